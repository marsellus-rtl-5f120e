// tb_ocm: the On-Chip Monitor samples its endpoint and a delayed copy of
// the endpoint's input; it flags a pre-error exactly when the two disagree.
module tb_ocm;
  localparam int W = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_pe = 0;
  logic [W-1:0] d, dd, q;
  logic pe;

  ocm #(.W(W)) dut (.clk_i (clk), .rst_ni (rst_n), .d_i (d), .d_del_i (dd), .q_o (q), .pre_error_o (pe));

  initial begin
    logic [W-1:0] ed, edd;
    d = 0; dd = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      d = $urandom;
      dd = (($urandom % 5) == 0) ? d ^ W'(1 << ($urandom % W)) : d;
      ed = d; edd = dd;
      @(negedge clk);
      checks++;
      if (q !== ed || pe !== (ed != edd)) begin
        failures++;
        if (failures < 6) $display("FAIL d %h del %h: q %h pe %b", ed, edd, q, pe);
      end
      if (pe) n_pe++;
    end
    checks++;
    if (n_pe == 0) begin failures++; $display("FAIL no pre-error seen"); end
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
