// rbe: the Reconfigurable Binary Engine, a convolution accelerator for
// 3x3 and 1x1 layers with 2..8-bit weights (W), inputs (I) and outputs (O).
//
// Every W x I-bit product is split into W*I single-bit products (AND) that
// are counted and weighted by powers of two (Eq. 1); after accumulation each
// 32-bit result is normalized, shifted, passed through ReLU and cut to O
// bits (Eq. 2). The engine follows the accelerator template of controller,
// streamer and datapath:
//   rbe_ctrl      peripheral unit, 2-job register file, tiled-loop FSM
//   rbe_streamer  288-bit TCDM load/store unit with 3D address generator
//   rbe_datapath  input buffer, mapping, 9 Cores x 9 Blocks x 4 BinConvs
//                 (10368 AND gates), 32 accumulators and quantizers per Core
// Streamer load beats go to the input buffer (LOAD), to the Blocks as weights
// (COMPUTE) or to the quantizers as (scale, bias) pairs (NORMQUANT); store
// beats take the output bit-planes of one output pixel (STREAMOUT).
//
// Interface: 32-bit peripheral target (see rbe_ctrl), one 9-word TCDM master
// port (see rbe_streamer), evt_o pulses for one cycle at the end of each job.
module rbe
  import marsellus_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  periph_req_t       preq_i,
  output periph_rsp_t       prsp_o,
  output logic              evt_o,
  output logic              busy_o,
  // wide TCDM master port
  output logic              tcdm_req_o,
  output logic              tcdm_we_o,
  output logic [31:0]       tcdm_addr_o,
  output logic [8:0]        tcdm_wen_o,
  output logic [8:0][31:0]  tcdm_wdata_o,
  input  logic              tcdm_gnt_i,
  input  logic              tcdm_rvalid_i,
  input  logic [8:0][31:0]  tcdm_rdata_i
);
  logic              s_start, s_we, s_busy, s_done, s_rvalid, s_rready, s_wvalid, s_wready;
  logic [31:0]       s_base;
  logic [3:0]        s_nwords;
  logic [2:0][7:0]   s_cnt;
  logic [2:0][31:0]  s_stride;
  logic [8:0][31:0]  s_rdata, s_wdata;

  rbe_mode_e   dp_mode;
  logic [3:0]  dp_wbits, dp_ibits, dp_nq_obits;
  logic        dp_itile, dp_in_wr, dp_clear, dp_valid, dp_nq_valid, dp_nq_relu;
  logic [4:0]  dp_in_pix, dp_kout, dp_nq_shift;
  logic [2:0]  dp_bw, dp_nq_grp;
  logic [3:0]  dp_out_pix;
  logic [7:0][31:0] dp_out_words;
  logic [3:0][31:0] nq_scale, nq_bias;
  logic [1:0]  queued;

  rbe_ctrl i_ctrl (
    .clk_i, .rst_ni, .preq_i, .prsp_o,
    .busy_o, .evt_o, .queued_o (queued),
    .s_start_o (s_start), .s_we_o (s_we), .s_base_o (s_base), .s_nwords_o (s_nwords),
    .s_cnt_o (s_cnt), .s_stride_o (s_stride), .s_busy_i (s_busy), .s_done_i (s_done),
    .s_rvalid_i (s_rvalid), .s_rready_o (s_rready),
    .s_wvalid_o (s_wvalid), .s_wready_i (s_wready),
    .dp_mode_o (dp_mode), .dp_wbits_o (dp_wbits), .dp_ibits_o (dp_ibits),
    .dp_itile_o (dp_itile), .dp_in_wr_o (dp_in_wr), .dp_in_pix_o (dp_in_pix),
    .dp_clear_o (dp_clear), .dp_valid_o (dp_valid), .dp_kout_o (dp_kout), .dp_bw_o (dp_bw),
    .dp_nq_valid_o (dp_nq_valid), .dp_nq_grp_o (dp_nq_grp), .dp_nq_shift_o (dp_nq_shift),
    .dp_nq_obits_o (dp_nq_obits), .dp_nq_relu_o (dp_nq_relu), .dp_out_pix_o (dp_out_pix)
  );

  rbe_streamer #(.NW(9)) i_streamer (
    .clk_i, .rst_ni,
    .start_i (s_start), .we_i (s_we), .base_i (s_base), .nwords_i (s_nwords),
    .cnt_i (s_cnt), .stride_i (s_stride), .busy_o (s_busy), .done_o (s_done),
    .rvalid_o (s_rvalid), .rdata_o (s_rdata), .rready_i (s_rready),
    .wvalid_i (s_wvalid), .wdata_i (s_wdata), .wready_o (s_wready),
    .req_o (tcdm_req_o), .we_o (tcdm_we_o), .addr_o (tcdm_addr_o), .wen_o (tcdm_wen_o),
    .wdata_o (tcdm_wdata_o), .gnt_i (tcdm_gnt_i), .r_valid_i (tcdm_rvalid_i),
    .r_data_i (tcdm_rdata_i)
  );

  // stream multiplexers: (scale, bias) pairs for NORMQUANT
  always_comb begin
    for (int unsigned q = 0; q < 4; q++) begin
      nq_scale[q] = s_rdata[2 * q];
      nq_bias[q]  = s_rdata[2 * q + 1];
    end
  end
  assign s_wdata = {32'd0, dp_out_words};

  rbe_datapath i_datapath (
    .clk_i, .rst_ni,
    .mode_i (dp_mode), .wbits_i (dp_wbits), .ibits_i (dp_ibits), .itile_i (dp_itile),
    .in_wr_i (dp_in_wr), .in_pix_i (dp_in_pix), .in_data_i (s_rdata[3:0]),
    .clear_i (dp_clear), .valid_i (dp_valid), .kout_i (dp_kout), .bw_i (dp_bw),
    .wgt_i (s_rdata),
    .nq_valid_i (dp_nq_valid), .nq_grp_i (dp_nq_grp), .nq_scale_i (nq_scale),
    .nq_bias_i (nq_bias), .nq_shift_i (dp_nq_shift), .nq_obits_i (dp_nq_obits),
    .nq_relu_i (dp_nq_relu),
    .out_pix_i (dp_out_pix), .out_words_o (dp_out_words),
    .acc_o ()
  );

endmodule
