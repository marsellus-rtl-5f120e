// rbe_datapath: input buffer, input mapping and the 9 Cores of the RBE.
//
// Input buffer: 5x5 pixels, each holding up to 4 input bit-planes of 32
// channels (one input-bit tile: bits 4t..4t+3 of the activations). The
// controller writes one pixel per in_wr_i. In the 1x1 mode only the top-left
// 3x3 pixels are used.
//
// Input mapping (the "Input Mapping to Core/Block" stage):
//   * Core c computes output pixel (c / 3, c % 3) of the 3x3 output tile.
//   * 3x3 mode: Block f is filter tap (f / 3, f % 3) and reads input pixel
//     (c/3 + f/3, c%3 + f%3). The weight port carries 9 words, one per tap,
//     for the current output channel and weight bit; they are broadcast to
//     all Cores. All Blocks scale by 2^(bit_wgt + 4t), weight bits are
//     serialised in time.
//   * 1x1 mode: all Blocks of Core c read input pixel (c / 3, c % 3); Block b
//     holds weight bit b (weight bits in parallel) and scales by 2^(b + 4t).
//     Blocks b >= W, including always the ninth one, stay idle.
//   * BinConv j of every Block handles input bit 4t + j and is enabled only
//     when that bit is below I.
// This mapping is the one the paper describes; the buffer organisation and
// port shapes are this design's.
//
// Stream-out: out_words_o[b] is output bit-plane b (32 channels) of the
// Core selected by out_pix_i.
//
// Timing: one compute beat per cycle, accumulated two edges later (see
// rbe_core).
module rbe_datapath
  import marsellus_pkg::*;
#(
  parameter int unsigned NCORE = 9,
  parameter int unsigned NBLK  = 9,
  parameter int unsigned NBC   = 4,
  parameter int unsigned CH    = 32
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // configuration of the running job
  input  rbe_mode_e                     mode_i,
  input  logic [3:0]                    wbits_i,
  input  logic [3:0]                    ibits_i,
  input  logic                          itile_i,   // input-bit tile t (0 or 1)
  // input buffer write (LOAD)
  input  logic                          in_wr_i,
  input  logic [4:0]                    in_pix_i,  // h * 5 + w
  input  logic [NBC-1:0][CH-1:0]        in_data_i,
  // compute (COMPUTE)
  input  logic                          clear_i,
  input  logic                          valid_i,
  input  logic [4:0]                    kout_i,
  input  logic [2:0]                    bw_i,      // weight bit (3x3 mode)
  input  logic [NBLK-1:0][CH-1:0]       wgt_i,
  // normalization / quantization (NORMQUANT)
  input  logic                          nq_valid_i,
  input  logic [2:0]                    nq_grp_i,
  input  logic [3:0][31:0]              nq_scale_i,
  input  logic [3:0][31:0]              nq_bias_i,
  input  logic [4:0]                    nq_shift_i,
  input  logic [3:0]                    nq_obits_i,
  input  logic                          nq_relu_i,
  // stream-out (STREAMOUT)
  input  logic [3:0]                    out_pix_i,
  output logic [7:0][CH-1:0]            out_words_o,
  output logic [NCORE-1:0][CH-1:0][31:0] acc_o
);
  logic [24:0][NBC-1:0][CH-1:0] ibuf_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      ibuf_q <= '0;
    else if (in_wr_i) ibuf_q[in_pix_i] <= in_data_i;
  end

  logic [NCORE-1:0][NBLK-1:0][NBC-1:0][CH-1:0] core_inp;
  logic [NBLK-1:0][4:0]                        blk_shift;
  logic [NBLK-1:0]                             blk_en;
  logic [NBC-1:0]                              bc_en;
  logic [NCORE-1:0][7:0][CH-1:0]               core_planes;
  logic [4:0]                                  tbase;

  assign tbase = itile_i ? 5'd4 : 5'd0;

  always_comb begin
    for (int unsigned j = 0; j < NBC; j++)
      bc_en[j] = (32'(tbase) + j) < 32'(ibits_i);
    for (int unsigned b = 0; b < NBLK; b++) begin
      if (mode_i == RBE_MODE_3X3) begin
        blk_en[b]    = 1'b1;
        blk_shift[b] = 5'(bw_i) + tbase;
      end else begin
        blk_en[b]    = (b < 32'(wbits_i)) && (b < NBLK - 1);
        blk_shift[b] = 5'(b) + tbase;
      end
    end
    for (int unsigned c = 0; c < NCORE; c++) begin
      for (int unsigned b = 0; b < NBLK; b++) begin
        if (mode_i == RBE_MODE_3X3)
          core_inp[c][b] = ibuf_q[(c / 3 + b / 3) * 5 + (c % 3 + b % 3)];
        else
          core_inp[c][b] = ibuf_q[(c / 3) * 5 + (c % 3)];
      end
    end
  end

  for (genvar c = 0; c < NCORE; c++) begin : g_core
    logic [7:0][CH-1:0] planes;
    rbe_core #(.CH(CH), .NBLK(NBLK), .NBC(NBC), .NACC(CH), .NQ_PAR(4)) i_core (
      .clk_i, .rst_ni,
      .clear_i,
      .valid_i,
      .kout_i,
      .blk_en_i   (blk_en),
      .bc_en_i    (bc_en),
      .wgt_i,
      .inp_i      (core_inp[c]),
      .shift_i    (blk_shift),
      .nq_valid_i,
      .nq_grp_i,
      .nq_scale_i,
      .nq_bias_i,
      .nq_shift_i,
      .nq_obits_i,
      .nq_relu_i,
      .bitplane_o (planes),
      .acc_o      (acc_o[c])
    );
    assign core_planes[c] = planes;
  end

  assign out_words_o = core_planes[out_pix_i];

endmodule
