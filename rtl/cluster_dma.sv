// cluster_dma: the cluster DMA engine between L2 and the TCDM.
//
// One transfer at a time, programmed over the peripheral bus:
//   0x00 EXT_ADDR  L2 byte address (8-byte aligned)
//   0x04 LOC_ADDR  TCDM byte address (8-byte aligned)
//   0x08 LEN       length in bytes (multiple of 8)
//   0x0C CMD       write: bit0 = direction (0: L2 -> TCDM, 1: TCDM -> L2), starts
//   0x10 STATUS    read: bit0 = busy
// The L2 side is a 64-bit request/grant port with read data one or more
// cycles after the grant (r_valid). The TCDM side uses the four 32-bit ports
// of the cluster: ports 0/1 write the low/high word of a 64-bit beat into
// the TCDM, ports 2/3 read them. A reader and a writer are decoupled by a
// two-entry beat buffer with a credit count, so when neither memory stalls
// the engine moves one 64-bit beat per cycle, the 64 bit/cycle of the paper.
// evt_o pulses when the last beat has been written.
// A beat leaving the buffer frees its slot in the same cycle (room uses pop).
// A lint tool may see a combinational loop through room, pop and ext_req_o;
// no real loop exists. When reading L2, pop is the TCDM write grant, which
// does not depend on ext_req_o. When writing L2, pop is the L2 grant, but
// ext_req_o then depends only on the registered buffer count. The loop
// appears only because one signal serves both directions.
// The paper gives the 64-bit/cycle read and write bandwidth, the 4x32-bit
// TCDM ports and the role of the DMA; descriptor format, single outstanding
// transfer and the port split are this design's choices.
module cluster_dma
  import marsellus_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  input  periph_req_t       preq_i,
  output periph_rsp_t       prsp_o,
  output logic              evt_o,
  output logic              busy_o,
  // TCDM ports
  output tcdm_req_t [3:0]   treq_o,
  input  tcdm_rsp_t [3:0]   trsp_i,
  // L2 port (64 bit)
  output logic              ext_req_o,
  output logic              ext_we_o,
  output logic [31:0]       ext_addr_o,
  output logic [63:0]       ext_wdata_o,
  input  logic              ext_gnt_i,
  input  logic              ext_rvalid_i,
  input  logic [63:0]       ext_rdata_i
);
  logic [31:0] ext_q, loc_q, len_q;
  logic        dir_q, busy_q;
  logic [31:0] rd_beats_q, wr_beats_q, n_beats;
  logic [1:0][63:0] buf_q;
  logic [1:0]  cnt_q;
  logic        rptr_q, wptr_q;
  logic [1:0]  inflight_q;        // reads issued, data not yet buffered
  logic        rvalid_q;
  logic [31:0] rdata_q;
  // TCDM write of one beat may take its two words in different cycles
  logic [1:0]  wr_done_q;
  // TCDM read of one beat: words arrive per port
  logic [1:0]  rd_issued_q, rd_got_q;
  logic [63:0] rd_word_q;

  logic        rd_issue, push, pop;
  logic [63:0] push_data;
  logic        start;

  assign n_beats = len_q >> 3;
  assign start   = preq_i.req && preq_i.we && preq_i.addr == 8'h0C && !busy_q;
  assign busy_o  = busy_q;

  // ---------------- read side ----------------
  logic rd_more, room;
  assign rd_more = busy_q && (rd_beats_q != n_beats);
  assign room    = ((32'(cnt_q) + 32'(inflight_q)) < 2) || pop;   // a beat leaving frees its slot

  // L2 -> TCDM: read L2
  assign ext_req_o  = busy_q && (dir_q ? (cnt_q != 2'd0) : (rd_more && room));
  assign ext_we_o   = dir_q;
  assign ext_addr_o = dir_q ? ext_q + (wr_beats_q << 3) : ext_q + (rd_beats_q << 3);
  assign ext_wdata_o = buf_q[rptr_q];

  // TCDM -> L2: read TCDM ports 2 and 3
  always_comb begin
    treq_o = '0;
    for (int unsigned p = 0; p < 2; p++) begin
      treq_o[2 + p].req  = busy_q && dir_q && rd_more && room && !rd_issued_q[p];
      treq_o[2 + p].we   = 1'b0;
      treq_o[2 + p].be   = 4'hF;
      treq_o[2 + p].addr = loc_q + (rd_beats_q << 3) + 32'(p * 4);
    end
    for (int unsigned p = 0; p < 2; p++) begin
      treq_o[p].req   = busy_q && !dir_q && (cnt_q != 2'd0) && !wr_done_q[p];
      treq_o[p].we    = 1'b1;
      treq_o[p].be    = 4'hF;
      treq_o[p].addr  = loc_q + (wr_beats_q << 3) + 32'(p * 4);
      treq_o[p].wdata = buf_q[rptr_q][32*p +: 32];
    end
  end

  logic [1:0] rd_issued_n, tw_done_n;
  always_comb begin
    for (int unsigned p = 0; p < 2; p++) begin
      rd_issued_n[p] = rd_issued_q[p] | (treq_o[2 + p].req & trsp_i[2 + p].gnt);
      tw_done_n[p]   = wr_done_q[p]   | (treq_o[p].req & trsp_i[p].gnt);
    end
  end

  // a beat is issued on the read side
  assign rd_issue = dir_q ? (rd_more && room && (rd_issued_n == 2'b11))
                          : (ext_req_o && ext_gnt_i);

  // read data arrives
  logic [1:0]  rd_got_n;
  logic [63:0] rd_word_n;
  always_comb begin
    rd_got_n  = rd_got_q;
    rd_word_n = rd_word_q;
    for (int unsigned p = 0; p < 2; p++)
      if (trsp_i[2 + p].rvalid) begin
        rd_got_n[p] = 1'b1;
        rd_word_n[32*p +: 32] = trsp_i[2 + p].rdata;
      end
  end
  assign push      = dir_q ? (busy_q && rd_got_n == 2'b11) : (busy_q && ext_rvalid_i);
  assign push_data = dir_q ? rd_word_n : ext_rdata_i;

  // ---------------- write side ----------------
  assign pop = dir_q ? (ext_req_o && ext_gnt_i) : (busy_q && cnt_q != 2'd0 && tw_done_n == 2'b11);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ext_q <= '0; loc_q <= '0; len_q <= '0; dir_q <= 1'b0; busy_q <= 1'b0;
      rd_beats_q <= '0; wr_beats_q <= '0; buf_q <= '0; cnt_q <= '0;
      rptr_q <= 1'b0; wptr_q <= 1'b0; inflight_q <= '0;
      rvalid_q <= 1'b0; rdata_q <= '0; wr_done_q <= '0;
      rd_issued_q <= '0; rd_got_q <= '0; rd_word_q <= '0; evt_o <= 1'b0;
    end else begin
      evt_o    <= 1'b0;
      rvalid_q <= preq_i.req && !preq_i.we;
      rdata_q  <= (preq_i.addr == 8'h10) ? {31'd0, busy_q} : '0;
      if (preq_i.req && preq_i.we && !busy_q) begin
        unique case (preq_i.addr)
          8'h00: ext_q <= preq_i.wdata;
          8'h04: loc_q <= preq_i.wdata;
          8'h08: len_q <= preq_i.wdata;
          8'h0C: dir_q <= preq_i.wdata[0];
          default: ;
        endcase
      end
      if (start) begin
        busy_q <= 1'b1; rd_beats_q <= '0; wr_beats_q <= '0; cnt_q <= '0;
        rptr_q <= 1'b0; wptr_q <= 1'b0; inflight_q <= '0;
        wr_done_q <= '0; rd_issued_q <= '0; rd_got_q <= '0;
      end else if (busy_q) begin
        // read side bookkeeping
        if (rd_issue) rd_beats_q <= rd_beats_q + 1;
        rd_issued_q <= rd_issue ? 2'b00 : rd_issued_n;
        rd_got_q    <= (dir_q && push) ? 2'b00 : rd_got_n;
        rd_word_q   <= rd_word_n;
        inflight_q  <= inflight_q + 2'(rd_issue) - 2'(push);
        if (push) begin
          buf_q[wptr_q] <= push_data;
          wptr_q <= ~wptr_q;
        end
        // write side bookkeeping
        wr_done_q <= pop ? 2'b00 : (dir_q ? 2'b00 : tw_done_n);
        if (pop) begin
          rptr_q <= ~rptr_q;
          wr_beats_q <= wr_beats_q + 1;
        end
        cnt_q <= cnt_q + 2'(push) - 2'(pop);
        if (pop && wr_beats_q + 1 == n_beats) begin
          busy_q <= 1'b0;
          evt_o  <= 1'b1;
        end
        if (n_beats == 0) begin
          busy_q <= 1'b0;
          evt_o  <= 1'b1;
        end
      end
    end
  end

  assign prsp_o.gnt    = preq_i.req;
  assign prsp_o.rvalid = rvalid_q;
  assign prsp_o.rdata  = rdata_q;

endmodule
