// rbe_ctrl: controller of the RBE accelerator.
//
// Three parts, as in the paper's controller:
//   * Peripheral unit: a 32-bit register target on the cluster peripheral
//     bus. Software writes the job fields (see RBE_REG_* in marsellus_pkg)
//     into a staging context and writes RBE_REG_TRIGGER to enqueue it.
//     Reads of RBE_REG_STATUS return {busy, number of queued jobs}. The bus
//     grants in the request cycle and returns read data one cycle later.
//   * Job register file with two contexts: up to 2 jobs can be queued; the
//     oldest one runs when the engine is free. A trigger while both contexts
//     are full is dropped (software polls STATUS first).
//   * Control FSM: runs the tiled loop nest of one job,
//       for k_out tile, for h tile, for w tile:
//         clear accumulators
//         for k_in tile, for input-bit tile (I/4): LOAD, COMPUTE
//         NORMQUANT, STREAMOUT
//     and pulses evt_o at the end of the job. Each phase programs the
//     streamer with one 3D strided command; the loop indices of the beats
//     are tracked here so each beat is routed to the right place in the
//     datapath. The paper implements part of this loop nest with a
//     microcoded loop unit (uloop); here the loop nest is fixed counters,
//     which run the same schedule.
//
// Memory layouts follow the paper: activations (H, W, K/32, I, 32), 3x3
// weights (Kout, Kin/32, W, 9, 32), 1x1 weights (Kout, Kin/32, W, 32),
// outputs (H, W, K/32, O, 32), each innermost 32 a 32-bit word. The
// normalization factors are one (scale, bias) word pair per output channel
// (layout chosen here). Input tiles are read without padding: an output
// tile of 3x3 reads 5x5 input pixels (3x3 in the 1x1 mode) starting at
// input pixel (3*h_tile, 3*w_tile).
module rbe_ctrl
  import marsellus_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // peripheral bus
  input  periph_req_t       preq_i,
  output periph_rsp_t       prsp_o,
  // status
  output logic              busy_o,
  output logic              evt_o,
  output logic [1:0]        queued_o,
  // streamer command
  output logic              s_start_o,
  output logic              s_we_o,
  output logic [31:0]       s_base_o,
  output logic [3:0]        s_nwords_o,
  output logic [2:0][7:0]   s_cnt_o,
  output logic [2:0][31:0]  s_stride_o,
  input  logic              s_busy_i,
  input  logic              s_done_i,
  input  logic              s_rvalid_i,
  output logic              s_rready_o,
  output logic              s_wvalid_o,
  input  logic              s_wready_i,
  // datapath control
  output rbe_mode_e         dp_mode_o,
  output logic [3:0]        dp_wbits_o,
  output logic [3:0]        dp_ibits_o,
  output logic              dp_itile_o,
  output logic              dp_in_wr_o,
  output logic [4:0]        dp_in_pix_o,
  output logic              dp_clear_o,
  output logic              dp_valid_o,
  output logic [4:0]        dp_kout_o,
  output logic [2:0]        dp_bw_o,
  output logic              dp_nq_valid_o,
  output logic [2:0]        dp_nq_grp_o,
  output logic [4:0]        dp_nq_shift_o,
  output logic [3:0]        dp_nq_obits_o,
  output logic              dp_nq_relu_o,
  output logic [3:0]        dp_out_pix_o
);
  typedef enum logic [3:0] {
    S_IDLE, S_CLEAR, S_LOAD_ST, S_LOAD, S_COMP_ST, S_COMP, S_DRAIN,
    S_NQ_ST, S_NQ, S_SO_ST, S_SO, S_NEXT, S_EVT
  } state_e;

  state_e      state_q, state_d;
  rbe_job_t    staged_q;
  rbe_job_t    ctx_q [2];
  logic        head_q;
  logic [1:0]  count_q;
  rbe_job_t    job;

  // loop indices
  logic [7:0]  kot_q, ht_q, wt_q, kit_q;
  logic        it_q;
  // beat indices inside a phase
  logic [2:0]  bi0_q;      // w (LOAD/SO), bw (3x3 COMPUTE), group (NQ)
  logic [4:0]  bi1_q;      // h (LOAD/SO), k_out (COMPUTE)
  logic [1:0]  drain_q;

  assign job      = ctx_q[head_q];
  assign queued_o = count_q;
  assign busy_o   = state_q != S_IDLE;

  // ------------------------------------------------------------------
  // peripheral unit and job contexts
  // ------------------------------------------------------------------
  logic push, pop;
  logic rvalid_q;
  logic [31:0] rdata_q;
  assign push = preq_i.req && preq_i.we && (preq_i.addr == RBE_REG_TRIGGER) && (count_q != 2'd2);
  assign pop  = (state_q == S_EVT);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      staged_q <= '0;
      ctx_q[0] <= '0;
      ctx_q[1] <= '0;
      head_q   <= 1'b0;
      count_q  <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= preq_i.req && !preq_i.we;
      rdata_q  <= '0;
      if (preq_i.req && !preq_i.we && preq_i.addr == RBE_REG_STATUS)
        rdata_q <= {29'd0, busy_o, count_q};
      if (preq_i.req && preq_i.we) begin
        unique case (preq_i.addr)
          RBE_REG_CFG:    staged_q <= rbe_cfg_apply(staged_q, preq_i.wdata);
          RBE_REG_TILES: begin
            staged_q.n_kout <= preq_i.wdata[31:24];
            staged_q.n_kin  <= preq_i.wdata[23:16];
            staged_q.n_h    <= preq_i.wdata[15:8];
            staged_q.n_w    <= preq_i.wdata[7:0];
          end
          RBE_REG_XBASE:  staged_q.x_base       <= preq_i.wdata;
          RBE_REG_XROW:   staged_q.x_row_stride <= preq_i.wdata;
          RBE_REG_XPIX:   staged_q.x_pix_stride <= preq_i.wdata;
          RBE_REG_WBASE:  staged_q.w_base       <= preq_i.wdata;
          RBE_REG_NQBASE: staged_q.nq_base      <= preq_i.wdata;
          RBE_REG_YBASE:  staged_q.y_base       <= preq_i.wdata;
          RBE_REG_YROW:   staged_q.y_row_stride <= preq_i.wdata;
          RBE_REG_YPIX:   staged_q.y_pix_stride <= preq_i.wdata;
          default: ;
        endcase
      end
      if (push) ctx_q[head_q ^ count_q[0]] <= staged_q;  // tail context
      if (pop) head_q <= ~head_q;
      count_q <= count_q + 2'(push) - 2'(pop);
    end
  end
  // the bus always accepts in the request cycle
  assign prsp_o.gnt    = preq_i.req;
  assign prsp_o.rvalid = rvalid_q;
  assign prsp_o.rdata  = rdata_q;

  // ------------------------------------------------------------------
  // address generation per phase
  // ------------------------------------------------------------------
  logic [31:0] wbits32, ibits32, obits32, nkin32;
  logic [3:0]  in_words;
  logic        last_it, last_kit, last_wt, last_ht, last_kot;
  logic [7:0]  tile_pix;

  assign wbits32 = 32'(job.wbits);
  assign ibits32 = 32'(job.ibits);
  assign obits32 = 32'(job.obits);
  assign nkin32  = 32'(job.n_kin);
  assign in_words = (job.ibits > 4'd4 && !it_q) ? 4'd4 : (it_q ? job.ibits - 4'd4 : job.ibits);
  assign last_it  = (job.ibits <= 4'd4) || it_q;
  assign last_kit = kit_q == job.n_kin - 8'd1;
  assign last_wt  = wt_q == job.n_w - 8'd1;
  assign last_ht  = ht_q == job.n_h - 8'd1;
  assign last_kot = kot_q == job.n_kout - 8'd1;
  assign tile_pix = (job.mode == RBE_MODE_3X3) ? 8'd5 : 8'd3;

  always_comb begin
    s_start_o  = 1'b0;
    s_we_o     = 1'b0;
    s_base_o   = '0;
    s_nwords_o = 4'd9;
    s_cnt_o    = {8'd1, 8'd1, 8'd1};
    s_stride_o = '0;
    unique case (state_q)
      S_LOAD_ST: begin
        s_start_o     = 1'b1;
        s_base_o      = job.x_base + 32'(ht_q) * 3 * job.x_row_stride
                      + 32'(wt_q) * 3 * job.x_pix_stride
                      + (32'(kit_q) * ibits32 + (it_q ? 32'd4 : 32'd0)) * 4;
        s_nwords_o    = in_words;
        s_cnt_o[0]    = tile_pix;  s_stride_o[0] = job.x_pix_stride;
        s_cnt_o[1]    = tile_pix;  s_stride_o[1] = job.x_row_stride;
      end
      S_COMP_ST: begin
        s_start_o = 1'b1;
        if (job.mode == RBE_MODE_3X3) begin
          s_base_o      = job.w_base + ((32'(kot_q) * 32 * nkin32 + 32'(kit_q)) * wbits32) * 36;
          s_nwords_o    = 4'd9;
          s_cnt_o[0]    = 8'(job.wbits); s_stride_o[0] = 32'd36;
          s_cnt_o[1]    = 8'd32;         s_stride_o[1] = nkin32 * wbits32 * 36;
        end else begin
          s_base_o      = job.w_base + ((32'(kot_q) * 32 * nkin32 + 32'(kit_q)) * wbits32) * 4;
          s_nwords_o    = job.wbits;
          s_cnt_o[0]    = 8'd32;         s_stride_o[0] = nkin32 * wbits32 * 4;
        end
      end
      S_NQ_ST: begin
        s_start_o     = 1'b1;
        s_base_o      = job.nq_base + 32'(kot_q) * 32 * 8;
        s_nwords_o    = 4'd8;
        s_cnt_o[0]    = 8'd8;  s_stride_o[0] = 32'd32;
      end
      S_SO_ST: begin
        s_start_o     = 1'b1;
        s_we_o        = 1'b1;
        s_base_o      = job.y_base + 32'(ht_q) * 3 * job.y_row_stride
                      + 32'(wt_q) * 3 * job.y_pix_stride + 32'(kot_q) * obits32 * 4;
        s_nwords_o    = job.obits;
        s_cnt_o[0]    = 8'd3;  s_stride_o[0] = job.y_pix_stride;
        s_cnt_o[1]    = 8'd3;  s_stride_o[1] = job.y_row_stride;
      end
      default: ;
    endcase
  end

  // ------------------------------------------------------------------
  // beat routing
  // ------------------------------------------------------------------
  logic beat;
  assign s_rready_o = (state_q == S_LOAD) || (state_q == S_COMP) || (state_q == S_NQ);
  assign beat       = s_rvalid_i && s_rready_o;
  assign s_wvalid_o = (state_q == S_SO);

  assign dp_mode_o     = job.mode;
  assign dp_wbits_o    = job.wbits;
  assign dp_ibits_o    = job.ibits;
  assign dp_itile_o    = it_q;
  assign dp_in_wr_o    = beat && (state_q == S_LOAD);
  assign dp_in_pix_o   = 5'(bi1_q) * 5 + 5'(bi0_q);
  assign dp_clear_o    = (state_q == S_CLEAR);
  assign dp_valid_o    = beat && (state_q == S_COMP);
  assign dp_kout_o     = bi1_q;
  assign dp_bw_o       = bi0_q;
  assign dp_nq_valid_o = beat && (state_q == S_NQ);
  assign dp_nq_grp_o   = bi0_q;
  assign dp_nq_shift_o = job.shift;
  assign dp_nq_obits_o = job.obits;
  assign dp_nq_relu_o  = job.relu;
  assign dp_out_pix_o  = 4'(bi1_q) * 3 + 4'(bi0_q);

  // ------------------------------------------------------------------
  // FSM
  // ------------------------------------------------------------------
  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_IDLE:    if (count_q != 2'd0) state_d = S_CLEAR;
      S_CLEAR:   state_d = S_LOAD_ST;
      S_LOAD_ST: if (!s_busy_i) state_d = S_LOAD;
      S_LOAD:    if (s_done_i) state_d = S_COMP_ST;
      S_COMP_ST: if (!s_busy_i) state_d = S_COMP;
      S_COMP:    if (s_done_i) state_d = (last_it && last_kit) ? S_DRAIN : S_LOAD_ST;
      S_DRAIN:   if (drain_q == 2'd2) state_d = S_NQ_ST;
      S_NQ_ST:   if (!s_busy_i) state_d = S_NQ;
      S_NQ:      if (s_done_i) state_d = S_SO_ST;
      S_SO_ST:   if (!s_busy_i) state_d = S_SO;
      S_SO:      if (s_done_i) state_d = S_NEXT;
      S_NEXT:    state_d = (last_wt && last_ht && last_kot) ? S_EVT : S_CLEAR;
      S_EVT:     state_d = S_IDLE;
      default:   state_d = S_IDLE;
    endcase
  end

  assign evt_o = (state_q == S_EVT);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      kot_q <= '0; ht_q <= '0; wt_q <= '0; kit_q <= '0; it_q <= 1'b0;
      bi0_q <= '0; bi1_q <= '0; drain_q <= '0;
    end else begin
      state_q <= state_d;
      // phase start: reset beat indices
      if (state_q inside {S_LOAD_ST, S_COMP_ST, S_NQ_ST, S_SO_ST}) begin
        bi0_q <= '0; bi1_q <= '0;
      end
      drain_q <= (state_q == S_DRAIN) ? drain_q + 2'd1 : 2'd0;
      // beat indices follow the streamer's loop order
      unique case (state_q)
        S_LOAD: if (beat) begin
          if (32'(bi0_q) == 32'(tile_pix) - 1) begin bi0_q <= '0; bi1_q <= bi1_q + 5'd1; end
          else bi0_q <= bi0_q + 3'd1;
        end
        S_COMP: if (beat) begin
          if (job.mode == RBE_MODE_1X1) bi1_q <= bi1_q + 5'd1;
          else if (4'(bi0_q) == job.wbits - 4'd1) begin bi0_q <= '0; bi1_q <= bi1_q + 5'd1; end
          else bi0_q <= bi0_q + 3'd1;
        end
        S_NQ: if (beat) bi0_q <= bi0_q + 3'd1;
        S_SO: if (s_wready_i) begin
          if (bi0_q == 3'd2) begin bi0_q <= '0; bi1_q <= bi1_q + 5'd1; end
          else bi0_q <= bi0_q + 3'd1;
        end
        default: ;
      endcase
      // loop nest
      if (state_q == S_COMP && s_done_i) begin
        if (!last_it) it_q <= 1'b1;
        else begin
          it_q <= 1'b0;
          kit_q <= last_kit ? 8'd0 : kit_q + 8'd1;
        end
      end
      if (state_q == S_NEXT) begin
        if (!last_wt) wt_q <= wt_q + 8'd1;
        else begin
          wt_q <= '0;
          if (!last_ht) ht_q <= ht_q + 8'd1;
          else begin
            ht_q <= '0;
            kot_q <= last_kot ? 8'd0 : kot_q + 8'd1;
          end
        end
      end
    end
  end

endmodule
