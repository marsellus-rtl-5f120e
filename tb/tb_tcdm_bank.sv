// tb_tcdm_bank: random byte-enabled writes and reads of one SRAM bank,
// read data one cycle after the request, checked against a shadow copy.
module tb_tcdm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic req, we;
  logic [3:0] be;
  logic [9:0] addr;
  logic [31:0] wdata, rdata, expd;
  logic [31:0] shadow [1024];

  tcdm_bank dut (.clk_i (clk), .req_i (req), .we_i (we), .be_i (be), .addr_i (addr),
                 .wdata_i (wdata), .rdata_o (rdata));

  initial begin
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // fill everything first
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      req = 1; we = 1; be = 4'hF; addr = 10'(a); wdata = $urandom; shadow[a] = wdata;
    end
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      req = $urandom % 4 != 0; we = $urandom % 2; be = $urandom; addr = $urandom % 64; wdata = $urandom;
      if (req && we)
        for (int b = 0; b < 4; b++) if (be[b]) shadow[addr][8*b +: 8] = wdata[8*b +: 8];
      if (req && !we) begin
        expd = shadow[addr];
        @(negedge clk);
        req = 0;
        checks++;
        if (rdata !== expd) begin
          failures++;
          if (failures < 6) $display("FAIL read %0d: %h expected %h", addr, rdata, expd);
        end
      end
    end
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
