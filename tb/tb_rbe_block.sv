// tb_rbe_block: a Block sums its four BinConvs, BinConv j shifted by
// shift + j, only the enabled ones contributing, one cycle after valid.
module tb_rbe_block;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic valid, valid_o;
  logic [3:0] en;
  logic [31:0] wgt, sum;
  logic [3:0][31:0] inp;
  logic [4:0] sh;
  logic [31:0] exp_sum;

  rbe_block dut (.clk_i (clk), .rst_ni (rst_n), .valid_i (valid), .bc_en_i (en), .wgt_i (wgt),
                 .inp_i (inp), .shift_i (sh), .valid_o (valid_o), .sum_o (sum));

  initial begin
    valid = 0; en = '0; wgt = '0; inp = '0; sh = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      valid = 1; en = $urandom; wgt = $urandom; sh = $urandom % 12;
      for (int j = 0; j < 4; j++) inp[j] = $urandom;
      if (n == 3) begin en = '1; wgt = '1; inp = '1; sh = 5'd11; end
      exp_sum = 0;
      for (int j = 0; j < 4; j++)
        if (en[j]) exp_sum += 32'($countones(wgt & inp[j])) << (sh + j);
      @(negedge clk);
      checks++;
      if ((valid_o !== (en != 0)) || sum !== exp_sum) begin
        failures++;
        if (failures < 6) $display("FAIL en %b sh %0d: %0d expected %0d", en, sh, sum, exp_sum);
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
