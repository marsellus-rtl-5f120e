// tb_xpulpnn_macload: random streams of MAC&LOAD instructions against a
// model of the NN register file. Each instruction's sum-of-dot-products is
// checked (it reads the registers before its own refresh lands), as are the
// pointer increment, the LSU address, and the stall while the LSU withholds
// its grant or a previous refresh is still outstanding.
module tb_xpulpnn_macload;
  import marsellus_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_stall = 0;
  logic valid, stall, acc_we, ptr_we, lsu_req, lsu_gnt, lsu_rvalid, preload;
  simd_fmt_e fmt;
  simd_sign_e sgn;
  logic [4:0] imm;
  logic [31:0] ptr, acc, acc_o, ptr_o, lsu_addr, lsu_rdata;
  logic [31:0] rf [6];

  xpulpnn_macload dut (.clk_i (clk), .rst_ni (rst_n), .valid_i (valid), .fmt_i (fmt), .sign_i (sgn),
    .imm_i (imm), .ptr_i (ptr), .acc_i (acc), .stall_o (stall), .acc_we_o (acc_we), .acc_o (acc_o),
    .ptr_we_o (ptr_we), .ptr_o (ptr_o), .lsu_req_o (lsu_req), .lsu_addr_o (lsu_addr), .lsu_gnt_i (lsu_gnt),
    .lsu_rvalid_i (lsu_rvalid), .lsu_rdata_i (lsu_rdata), .preload_i (preload));

  function automatic longint elem(logic [31:0] v, int i, int ew, bit sgnd);
    logic [31:0] e;
    e = (v >> (i * ew)) & ((32'd1 << ew) - 1);
    if (sgnd && e[ew - 1]) return longint'(e) - (longint'(1) << ew);
    return longint'(e);
  endfunction

  function automatic logic [31:0] ref_acc();
    int ew;
    longint s;
    logic [31:0] x, w;
    x = rf[4 + imm[0]];
    w = rf[imm[2:1]];
    ew = 16 >> int'(fmt);
    s = longint'(acc);
    for (int i = 0; i < 32 / ew; i++)
      s += elem(x, i, ew, sgn == SGN_S) * elem(w, i, ew, sgn != SGN_U);
    return s[31:0];
  endfunction

  initial begin
    valid = 0; imm = 0; ptr = 0; acc = 0; lsu_gnt = 0; lsu_rvalid = 0; lsu_rdata = 0; preload = 0;
    fmt = SIMD_B; sgn = SGN_S;
    for (int r = 0; r < 6; r++) rf[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      bit refresh;
      int tgt, delay;
      logic [31:0] ld;
      valid = 1;
      imm = $urandom;
      if (imm[4]) imm[3] = 1'b0;
      fmt = simd_fmt_e'($urandom % 4); sgn = simd_sign_e'($urandom % 3);
      ptr = 4 * ($urandom % 1024); acc = $urandom; preload = ($urandom % 8) == 0;
      refresh = imm[4] | imm[3];
      tgt = imm[4] ? imm[2:1] : 4 + imm[0];
      delay = refresh ? $urandom % 3 : 0;
      lsu_gnt = delay == 0;
      for (int k = 0; k < delay; k++) begin
        #1;
        checks++;
        if (!stall || !lsu_req || acc_we || ptr_we) begin failures++; $display("FAIL not stalled"); end
        n_stall++;
        @(negedge clk);
        if (k == delay - 1) lsu_gnt = 1;
      end
      #1;
      checks++;
      if (stall || acc_o !== ref_acc() || acc_we !== !preload || ptr_we !== refresh
          || (refresh && (ptr_o !== ptr + 4 || lsu_addr !== ptr || !lsu_req)) || (!refresh && lsu_req)) begin
        failures++;
        if (failures < 6) $display("FAIL imm %b fmt %0d sign %0d: acc %h expected %h stall %b we %b/%b",
                                   imm, fmt, sgn, acc_o, ref_acc(), stall, acc_we, ptr_we);
      end
      ld = $urandom;
      @(negedge clk);
      valid = 0; lsu_gnt = 0;
      if (refresh) begin
        // a new refresh before the data arrives must stall
        if ($urandom % 2) begin
          valid = 1; imm = 5'b10000; lsu_gnt = 1;
          #1;
          checks++;
          if (!stall) begin failures++; $display("FAIL refresh while a load is outstanding"); end
          n_stall++;
          @(negedge clk);
          valid = 0; lsu_gnt = 0;
        end
        lsu_rvalid = 1; lsu_rdata = ld;
        @(negedge clk);
        lsu_rvalid = 0;
        rf[tgt] = ld;
      end
    end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL never stalled"); end
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
