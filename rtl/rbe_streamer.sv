// rbe_streamer: the RBE memory streamer.
//
// A three-dimensional strided address generator turns one command (base
// address, three loop counts and three strides) into a sequence of wide
// memory accesses of up to 9 contiguous 32-bit words (288 bits), the width
// of the RBE port into the TCDM. Beat n with loop indices (i0, i1, i2), i0
// innermost, goes to base + i0*stride0 + i1*stride1 + i2*stride2.
//
// Loads are turned into a stream with a ready/valid handshake (rvalid_o /
// rready_i) so the consumer is latency insensitive; a two-entry buffer and a
// credit count let the unit issue one access per cycle when the memory grants
// every cycle (a beat being consumed in the same cycle returns its credit
// at once). Stores take their data from the wvalid_i / wready_o stream.
//
// Memory side: req_o/we_o/addr_o/wen_o/wdata_o are held until gnt_i; load
// data arrives with r_valid_i one cycle after the grant (0-wait-state TCDM).
// done_o pulses once the last beat has been granted (stores) or consumed
// (loads). The paper gives the 288-bit width, the 3D strided generator and
// the ready/valid streams; the command format and buffer depth are this
// design's choices.
module rbe_streamer #(
  parameter int unsigned NW = 9  // words per beat (paper: 288 bit = 9 x 32)
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // command
  input  logic                   start_i,
  input  logic                   we_i,
  input  logic [31:0]            base_i,
  input  logic [3:0]             nwords_i,   // 1..NW words per beat
  input  logic [2:0][7:0]        cnt_i,      // loop counts, >= 1
  input  logic [2:0][31:0]       stride_i,   // byte strides
  output logic                   busy_o,
  output logic                   done_o,
  // load stream
  output logic                   rvalid_o,
  output logic [NW-1:0][31:0]    rdata_o,
  input  logic                   rready_i,
  // store stream
  input  logic                   wvalid_i,
  input  logic [NW-1:0][31:0]    wdata_i,
  output logic                   wready_o,
  // wide TCDM port
  output logic                   req_o,
  output logic                   we_o,
  output logic [31:0]            addr_o,
  output logic [NW-1:0]          wen_o,      // word enables
  output logic [NW-1:0][31:0]    wdata_o,
  input  logic                   gnt_i,
  input  logic                   r_valid_i,
  input  logic [NW-1:0][31:0]    r_data_i
);
  logic              busy_q, we_q, issued_all_q;
  logic [31:0]       base_q;
  logic [3:0]        nwords_q;
  logic [2:0][7:0]   cnt_q, idx_q;
  logic [2:0][31:0]  stride_q;
  logic              inflight_q;
  logic [1:0][NW-1:0][31:0] fifo_q;
  logic [1:0]        fifo_cnt_q;
  logic              rd_ptr_q, wr_ptr_q;
  logic              issue, last_beat, push, pop;

  assign addr_o = base_q + 32'(idx_q[0]) * stride_q[0]
                         + 32'(idx_q[1]) * stride_q[1]
                         + 32'(idx_q[2]) * stride_q[2];
  assign last_beat = (idx_q[0] == cnt_q[0] - 8'd1) && (idx_q[1] == cnt_q[1] - 8'd1)
                  && (idx_q[2] == cnt_q[2] - 8'd1);

  always_comb begin
    for (int unsigned w = 0; w < NW; w++) wen_o[w] = w < 32'(nwords_q);
  end

  assign we_o    = we_q;
  assign wdata_o = wdata_i;
  assign req_o   = busy_q && !issued_all_q &&
                   (we_q ? wvalid_i : (32'(fifo_cnt_q) + 32'(inflight_q) < 2 || pop));
  assign issue   = req_o && gnt_i;
  assign wready_o = we_q && issue;

  assign push     = r_valid_i && inflight_q;
  assign rvalid_o = fifo_cnt_q != 2'd0;
  assign rdata_o  = fifo_q[rd_ptr_q];
  assign pop      = rvalid_o && rready_i;

  assign busy_o = busy_q;
  assign done_o = busy_q && issued_all_q && !inflight_q && (fifo_cnt_q == 2'd0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; we_q <= 1'b0; issued_all_q <= 1'b0;
      base_q <= '0; nwords_q <= '0; cnt_q <= '0; idx_q <= '0; stride_q <= '0;
      inflight_q <= 1'b0; fifo_q <= '0; fifo_cnt_q <= '0; rd_ptr_q <= 1'b0; wr_ptr_q <= 1'b0;
    end else begin
      if (start_i && !busy_q) begin
        busy_q <= 1'b1; we_q <= we_i; issued_all_q <= 1'b0;
        base_q <= base_i; nwords_q <= nwords_i; cnt_q <= cnt_i; stride_q <= stride_i;
        idx_q <= '0;
      end else if (done_o) begin
        busy_q <= 1'b0;
      end
      if (issue) begin
        if (last_beat) issued_all_q <= 1'b1;
        else if (idx_q[0] != cnt_q[0] - 8'd1) idx_q[0] <= idx_q[0] + 8'd1;
        else begin
          idx_q[0] <= '0;
          if (idx_q[1] != cnt_q[1] - 8'd1) idx_q[1] <= idx_q[1] + 8'd1;
          else begin
            idx_q[1] <= '0;
            idx_q[2] <= idx_q[2] + 8'd1;
          end
        end
      end
      inflight_q <= issue && !we_q;
      if (push) begin
        fifo_q[wr_ptr_q] <= r_data_i;
        wr_ptr_q <= ~wr_ptr_q;
      end
      if (pop) rd_ptr_q <= ~rd_ptr_q;
      fifo_cnt_q <= fifo_cnt_q + 2'(push) - 2'(pop);
    end
  end

  // a load buffer never overflows thanks to the credit count
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(push && !pop && fifo_cnt_q == 2'd2));
  // the request stays stable until granted
  assert property (@(posedge clk_i) disable iff (!rst_ni) (req_o && !gnt_i && !we_q) |=> req_o && $stable(addr_o));

endmodule
