// rbe_binconv: one binary convolution unit (BinConv) of the RBE accelerator.
//
// Each cycle it ANDs a 32-bit weight bit-plane with a 32-bit input bit-plane
// (one bit per input channel), counts the ones with an adder tree, registers
// the count in a pipe stage and shifts it left by the bit significance of the
// pair (weight bit index + input bit index). This is the 1-bit multiply of
// Eq. 1, 32 binary MACs per cycle, in the order printed in the BinConv
// diagram: AND gates, adder tree, pipe stage, scaler.
//
// Interface: valid_i/wgt_i/inp_i/shift_i are sampled on the rising edge;
// res_o is the scaled popcount one cycle later, qualified by valid_o.
// When valid_i is low the pipe register holds zero, so an idle BinConv adds
// nothing downstream (the paper clock-gates unused units; here the zero
// plays the same role). Reset is active-low and asynchronous (own choice).
module rbe_binconv #(
  parameter int unsigned CH    = 32,  // channels per BinConv (paper: 32)
  parameter int unsigned OUT_W = 32   // width of the scaled result
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     valid_i,
  input  logic [CH-1:0]            wgt_i,
  input  logic [CH-1:0]            inp_i,
  input  logic [4:0]               shift_i,   // i + j of Eq. 1
  output logic                     valid_o,
  output logic [OUT_W-1:0]         res_o
);
  localparam int unsigned CNT_W = $clog2(CH + 1);

  logic [CH-1:0]    prod;
  logic [CNT_W-1:0] popcnt;
  logic [CNT_W-1:0] psum_q;
  logic [4:0]       shift_q;

  assign prod = wgt_i & inp_i;

  // adder tree (written as a sum; synthesis builds the tree)
  always_comb begin
    popcnt = '0;
    for (int unsigned c = 0; c < CH; c++) popcnt = popcnt + CNT_W'(prod[c]);
  end

  // pipe stage
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      psum_q  <= '0;
      shift_q <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      psum_q  <= valid_i ? popcnt : '0;
      shift_q <= shift_i;
    end
  end

  // scaler: multiply by 2^(i+j)
  assign res_o = OUT_W'(psum_q) << shift_q;

endmodule
