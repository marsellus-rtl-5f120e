// tb_abb_ctrl: the body-bias control loop under random bursts of
// pre-errors, compared cycle by cycle with a reference model of the loop:
// a pre-error raises the code by 4 (saturating at the maximum), then the
// loop waits the settling time; after a window with no pre-error the code
// is lowered by one; when disabled the code holds. Also checks that the
// code actually went up to the maximum and back to zero.
module tb_abb_ctrl;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic en;
  logic [15:0] pe;
  logic [15:0] window, settle, pe_count;
  logic [5:0] max_code, code;
  logic raise, relax;

  abb_ctrl dut (.clk_i (clk), .rst_ni (rst_n), .enable_i (en), .pre_error_i (pe), .window_i (window),
                .settle_i (settle), .max_code_i (max_code), .code_o (code), .raise_o (raise),
                .relax_o (relax), .pe_count_o (pe_count));

  // reference
  int m_code = 0, m_quiet = 0, m_settle = 0, m_cnt = 0;
  bit m_pe = 0;
  int n_raise = 0, n_relax = 0, hit_max = 0, hit_zero = 0;

  always @(posedge clk) if (rst_n) begin
    bit r, l;
    r = en && m_pe && m_settle == 0 && m_code < max_code;
    l = en && !m_pe && m_settle == 0 && m_quiet >= window && m_code != 0;
    checks++;
    if (raise !== r || relax !== l || code !== 6'(m_code) || pe_count !== 16'(m_cnt)) begin
      failures++;
      if (failures < 6) $display("FAIL t=%0t code %0d/%0d raise %b/%b relax %b/%b cnt %0d/%0d",
                                 $time, code, m_code, raise, r, relax, l, pe_count, m_cnt);
    end
    if (r) n_raise++;
    if (l) n_relax++;
    if (m_pe && m_cnt < 65535) m_cnt++;
    if (m_settle != 0) m_settle--;
    if (m_pe || l) m_quiet = 0; else if (m_quiet < 65535) m_quiet++;
    if (r) begin m_code = (m_code + 4 > max_code) ? max_code : m_code + 4; m_settle = settle; end
    else if (l) m_code--;
    if (m_code == max_code) hit_max++;
    if (m_code == 0 && n_relax > 0) hit_zero++;
    m_pe = |pe;
  end

  initial begin
    en = 1; pe = '0; window = 16'd30; settle = 16'd10; max_code = 6'd22;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 40; phase++) begin
      int dens;
      dens = (phase % 4 == 0) ? 0 : (phase % 4 == 1) ? 30 : 3;
      if (phase == 20) begin window = 16'd5; settle = 16'd0; end
      en = (phase % 7) != 6;
      repeat (300) begin
        @(negedge clk);
        pe = (($urandom % 100) < dens) ? 16'(1 << ($urandom % 16)) : '0;
      end
    end
    pe = '0;
    repeat (300) @(negedge clk);
    $display("raises %0d relaxes %0d", n_raise, n_relax);
    checks += 2;
    if (hit_max == 0) begin failures++; $display("FAIL never reached the maximum code"); end
    if (hit_zero == 0) begin failures++; $display("FAIL never relaxed back to zero"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
