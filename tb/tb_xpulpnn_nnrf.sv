// tb_xpulpnn_nnrf: the 6-entry NN register file, reset to zero, one write
// port and two read ports, checked against a shadow array.
module tb_xpulpnn_nnrf;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] ra, rb, wa;
  logic [31:0] da, db, wd;
  logic we;
  logic [31:0] shadow [6];

  xpulpnn_nnrf dut (.clk_i (clk), .rst_ni (rst_n), .raddr_a_i (ra), .raddr_b_i (rb),
                    .rdata_a_o (da), .rdata_b_o (db), .we_i (we), .waddr_i (wa), .wdata_i (wd));

  initial begin
    we = 0; ra = 0; rb = 0; wa = 0; wd = 0;
    for (int r = 0; r < 6; r++) shadow[r] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      ra = $urandom % 6; rb = $urandom % 6;
      #1;
      checks++;
      if (da !== shadow[ra] || db !== shadow[rb]) begin
        failures++;
        if (failures < 6) $display("FAIL read %0d/%0d: %h %h expected %h %h", ra, rb, da, db, shadow[ra], shadow[rb]);
      end
      we = $urandom % 2; wa = $urandom % 6; wd = $urandom;
      @(posedge clk);
      if (we) shadow[wa] = wd;
      #1 we = 0;
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
