// tb_rbe_quant: random test of the normalization/quantization stage
// (scale * acc + bias) >> S with ReLU or signed saturation to O bits.
module tb_rbe_quant;
  int checks = 0, failures = 0;
  logic signed [31:0] acc, scale, bias;
  logic [4:0] sh;
  logic [3:0] ob;
  logic relu;
  logic [31:0] q;

  rbe_quant dut (.acc_i (acc), .scale_i (scale), .bias_i (bias), .shift_i (sh), .obits_i (ob),
                 .relu_i (relu), .q_o (q));

  function automatic logic [31:0] ref_q();
    longint v, lo, hi;
    v = (longint'(acc) * longint'(scale) + longint'(bias)) >>> sh;
    if (relu) begin lo = 0; hi = (longint'(1) << ob) - 1; end
    else begin lo = -(longint'(1) << (ob - 1)); hi = (longint'(1) << (ob - 1)) - 1; end
    if (v < lo) v = lo;
    if (v > hi) v = hi;
    return v[31:0];
  endfunction

  initial begin
    for (int n = 0; n < 5000; n++) begin
      acc = $urandom % 200000 - 100000;
      scale = $urandom % 64 - 16;
      bias = $urandom % 20000 - 10000;
      sh = $urandom % 20;
      ob = 2 + $urandom % 7;
      relu = $urandom % 2;
      if (n % 3 == 0) begin acc = $urandom; scale = $urandom; end
      #1;
      checks++;
      if (q !== ref_q()) begin
        failures++;
        if (failures < 6) $display("FAIL acc %0d scale %0d bias %0d S %0d O %0d relu %0d: %0d expected %0d",
                                   acc, scale, bias, sh, ob, relu, $signed(q), $signed(ref_q()));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
