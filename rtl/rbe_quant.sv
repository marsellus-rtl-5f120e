// rbe_quant: normalization and quantization of one RBE accumulator.
//
// Implements Eq. 2 of the RBE: out = (scale * acc + bias) >> S, followed by
// ReLU and reduction to O bits. The arithmetic is signed two's complement:
// the 32x32 product is kept at 64 bits, the bias is added at full width and
// the shift is arithmetic. With ReLU on, negative values become 0 and the
// result saturates to [0, 2^O - 1]; with ReLU off it saturates to the signed
// O-bit range. The result is returned sign- or zero-extended to 32 bits.
// The paper gives the equation and the ReLU/O-bit reduction; operand widths,
// rounding (truncation) and saturation are this design's choices.
//
// Purely combinational.
module rbe_quant (
  input  logic signed [31:0] acc_i,
  input  logic signed [31:0] scale_i,
  input  logic signed [31:0] bias_i,
  input  logic        [4:0]  shift_i,  // S
  input  logic        [3:0]  obits_i,  // O, 2..8
  input  logic               relu_i,
  output logic        [31:0] q_o
);
  logic signed [63:0] prod, sum, shifted;
  logic signed [63:0] hi, lo;

  always_comb begin
    prod    = 64'(acc_i) * 64'(scale_i);
    sum     = prod + 64'(bias_i);
    shifted = sum >>> shift_i;
    if (relu_i) begin
      lo = '0;
      hi = (64'sd1 <<< obits_i) - 64'sd1;
    end else begin
      lo = -(64'sd1 <<< (obits_i - 4'd1));
      hi = (64'sd1 <<< (obits_i - 4'd1)) - 64'sd1;
    end
    if (shifted < lo)      q_o = 32'(lo);
    else if (shifted > hi) q_o = 32'(hi);
    else                   q_o = 32'(shifted);
  end

endmodule
