// tb_rbe_binconv: the BinConv computes popcount(weight AND input) << shift
// one cycle after a valid input, and 0 without one.
module tb_rbe_binconv;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid, valid_o;
  logic [31:0] wgt, inp, res;
  logic [4:0] sh;
  logic [31:0] exp_res;
  logic exp_valid;

  rbe_binconv dut (.clk_i (clk), .rst_ni (rst_n), .valid_i (valid), .wgt_i (wgt), .inp_i (inp),
                   .shift_i (sh), .valid_o (valid_o), .res_o (res));

  initial begin
    valid = 0; wgt = '0; inp = '0; sh = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      valid = $urandom % 4 != 0;
      wgt = $urandom; inp = $urandom; sh = $urandom % 16;
      if (n == 5) begin wgt = '1; inp = '1; sh = 5'd15; end
      exp_valid = valid;
      exp_res = valid ? 32'($countones(wgt & inp)) << sh : 32'd0;
      @(negedge clk);
      checks++;
      if (valid_o !== exp_valid || res !== exp_res) begin
        failures++;
        if (failures < 6) $display("FAIL w %h x %h sh %0d: %0d/%b expected %0d/%b", wgt, inp, sh, res, valid_o, exp_res, exp_valid);
      end
      valid = 0;
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
