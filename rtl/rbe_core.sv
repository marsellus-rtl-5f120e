// rbe_core: one Core of the RBE, computing one output pixel on 32 output
// channels.
//
// Nine Blocks (see rbe_block) receive the weight bit-planes and input
// bit-planes chosen by rbe_datapath; a core-level adder tree sums the nine
// Block results and the sum is added into one of 32 32-bit accumulators,
// selected by the output channel k_out that travelled with the data through
// the one-cycle BinConv pipe stage. The accumulators are output-stationary:
// they keep their value across LOAD/COMPUTE iterations until clear_i.
//
// After accumulation the Quantizer rewrites the accumulators in place, four
// channels per nq_valid_i (group nq_grp_i, channels 4g..4g+3), with the
// per-channel scale and bias given alongside (Eq. 2, see rbe_quant). The
// paper prints "32x 32-bit Accum." and describes them as latch based; here
// they are flip-flops. The four-channel quantizer width follows the
// NORMQUANT loop of the execution-flow figure ("groups of 4").
//
// For stream-out, bitplane_o[b] collects bit b of all 32 accumulators: the
// output bit-plane b of this pixel in the (H, W, K/32, O, 32) layout.
//
// Timing: data on valid_i is accumulated at the second rising edge; a
// quantization request is applied at the next rising edge. clear_i has
// priority over both.
module rbe_core #(
  parameter int unsigned CH     = 32,
  parameter int unsigned NBLK   = 9,
  parameter int unsigned NBC    = 4,
  parameter int unsigned NACC   = 32,  // accumulators = output channels per pass
  parameter int unsigned NQ_PAR = 4    // channels quantized per cycle
) (
  input  logic                               clk_i,
  input  logic                               rst_ni,
  input  logic                               clear_i,
  // compute
  input  logic                               valid_i,
  input  logic [$clog2(NACC)-1:0]            kout_i,
  input  logic [NBLK-1:0]                    blk_en_i,
  input  logic [NBC-1:0]                     bc_en_i,
  input  logic [NBLK-1:0][CH-1:0]            wgt_i,
  input  logic [NBLK-1:0][NBC-1:0][CH-1:0]   inp_i,
  input  logic [NBLK-1:0][4:0]               shift_i,
  // normalization / quantization
  input  logic                               nq_valid_i,
  input  logic [$clog2(NACC/NQ_PAR)-1:0]     nq_grp_i,
  input  logic [NQ_PAR-1:0][31:0]            nq_scale_i,
  input  logic [NQ_PAR-1:0][31:0]            nq_bias_i,
  input  logic [4:0]                         nq_shift_i,
  input  logic [3:0]                         nq_obits_i,
  input  logic                               nq_relu_i,
  // results
  output logic [7:0][NACC-1:0]               bitplane_o,
  output logic [NACC-1:0][31:0]              acc_o
);
  logic [NBLK-1:0][31:0] blk_sum;
  logic [NBLK-1:0]       blk_valid;
  logic                  valid_q;
  logic [$clog2(NACC)-1:0] kout_q;
  logic [31:0]           core_sum;
  logic [NACC-1:0][31:0] acc_q;
  logic [NQ_PAR-1:0][31:0] qres;

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    rbe_block #(.CH(CH), .NBC(NBC), .OUT_W(32)) i_block (
      .clk_i, .rst_ni,
      .valid_i (valid_i & blk_en_i[b]),
      .bc_en_i,
      .wgt_i   (wgt_i[b]),
      .inp_i   (inp_i[b]),
      .shift_i (shift_i[b]),
      .valid_o (blk_valid[b]),
      .sum_o   (blk_sum[b])
    );
  end

  // k_out travels alongside the BinConv pipe stage
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= 1'b0;
      kout_q  <= '0;
    end else begin
      valid_q <= valid_i;
      kout_q  <= kout_i;
    end
  end

  // core adder tree; blocks that were idle contribute zero
  always_comb begin
    core_sum = '0;
    for (int unsigned b = 0; b < NBLK; b++) core_sum = core_sum + blk_sum[b];
  end

  for (genvar q = 0; q < NQ_PAR; q++) begin : g_quant
    rbe_quant i_quant (
      .acc_i   (acc_q[32'(nq_grp_i) * NQ_PAR + q]),
      .scale_i (nq_scale_i[q]),
      .bias_i  (nq_bias_i[q]),
      .shift_i (nq_shift_i),
      .obits_i (nq_obits_i),
      .relu_i  (nq_relu_i),
      .q_o     (qres[q])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      acc_q <= '0;
    end else if (clear_i) begin
      acc_q <= '0;
    end else begin
      if (valid_q && (|blk_valid)) acc_q[kout_q] <= acc_q[kout_q] + core_sum;
      if (nq_valid_i) begin
        for (int unsigned q = 0; q < NQ_PAR; q++)
          acc_q[32'(nq_grp_i) * NQ_PAR + q] <= qres[q];
      end
    end
  end

  always_comb begin
    for (int unsigned b = 0; b < 8; b++)
      for (int unsigned k = 0; k < NACC; k++)
        bitplane_o[b][k] = acc_q[k][b];
  end

  assign acc_o = acc_q;

endmodule
