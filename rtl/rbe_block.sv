// rbe_block: one Block of an RBE Core.
//
// A Block holds four BinConvs that share the same 32-channel weight
// bit-plane and receive four different input bit-planes (input bits
// 4t..4t+3 of the current input-bit tile t). BinConv j scales its popcount
// by 2^(shift_i + j); the Block adds the four scaled results with a small
// adder tree. In the 3x3 mode a Block is one of the 9 filter taps; in the
// 1x1 mode it is one weight bit (the mapping is done by rbe_datapath).
//
// Interface: inputs are sampled on the rising edge; sum_o is valid one
// cycle later (the BinConv pipe stage); valid_o is high when any enabled
// BinConv produced a result. bc_en_i
// switches off BinConvs whose input bit lies beyond I, so they add zero.
module rbe_block #(
  parameter int unsigned CH    = 32,
  parameter int unsigned NBC   = 4,   // BinConvs per Block (paper: 4)
  parameter int unsigned OUT_W = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     valid_i,
  input  logic [NBC-1:0]           bc_en_i,
  input  logic [CH-1:0]            wgt_i,
  input  logic [NBC-1:0][CH-1:0]   inp_i,
  input  logic [4:0]               shift_i,
  output logic                     valid_o,
  output logic [OUT_W-1:0]         sum_o
);
  logic [NBC-1:0][OUT_W-1:0] bc_res;
  logic [NBC-1:0]            bc_valid;

  for (genvar j = 0; j < NBC; j++) begin : g_bc
    rbe_binconv #(.CH(CH), .OUT_W(OUT_W)) i_binconv (
      .clk_i, .rst_ni,
      .valid_i (valid_i & bc_en_i[j]),
      .wgt_i,
      .inp_i   (inp_i[j]),
      .shift_i (shift_i + 5'(j)),
      .valid_o (bc_valid[j]),
      .res_o   (bc_res[j])
    );
  end

  // a disabled BinConv holds zero in its pipe stage, so all four can be summed
  assign valid_o = |bc_valid;

  always_comb begin
    sum_o = '0;
    for (int unsigned j = 0; j < NBC; j++) sum_o = sum_o + bc_res[j];
  end

endmodule
