// event_unit: cluster synchronization and event unit.
//
// Gives the 16 cores a hardware barrier and per-core event buffers, and
// brings the end-of-job events of the DMA and the RBE to the cores.
//   * Barrier: a core signals arrival with a one-cycle bar_arrive_i pulse.
//     When every core of the barrier mask (register BAR_MASK) has arrived,
//     the barrier releases: the barrier event is set for all those cores and
//     the arrival bits are cleared, ready for the next barrier.
//   * Event buffer: per core, three bits {dma, rbe, barrier}. The RBE and DMA
//     events are posted to all cores. A core clears its buffer bits with
//     evt_clr_i (a mask, one cycle).
//   * Sleep: a core that raises core_wait_i while none of its buffered
//     events is enabled by EVT_MASK gets core_sleep_o (its clock would be
//     gated); it wakes in the cycle an enabled event arrives.
// Registers (32-bit peripheral target, read data one cycle after request):
//   0x00 BAR_MASK (reset: all cores)  0x04 EVT_MASK [2:0] (reset: 3'b111)
//   0x08 arrival status (read only)
// The paper gives the unit's purpose (barriers, critical sections, end-of-
// job events); the register map and encoding are this design's.
module event_unit
  import marsellus_pkg::*;
#(
  parameter int unsigned NC = 16
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  periph_req_t         preq_i,
  output periph_rsp_t         prsp_o,
  input  logic [NC-1:0]       bar_arrive_i,
  input  logic                rbe_evt_i,
  input  logic                dma_evt_i,
  input  logic [NC-1:0][2:0]  evt_clr_i,
  input  logic [NC-1:0]       core_wait_i,
  output logic [NC-1:0][2:0]  evt_buf_o,
  output logic [NC-1:0]       core_sleep_o,
  output logic                bar_release_o
);
  logic [NC-1:0]       bar_mask_q, arrived_q, arrived_n;
  logic [2:0]          evt_mask_q;
  logic [NC-1:0][2:0]  buf_q;
  logic                rvalid_q;
  logic [31:0]         rdata_q;

  assign arrived_n     = arrived_q | bar_arrive_i;
  assign bar_release_o = (bar_mask_q != '0) && ((arrived_n & bar_mask_q) == bar_mask_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bar_mask_q <= '1;
      evt_mask_q <= 3'b111;
      arrived_q  <= '0;
      buf_q      <= '0;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
    end else begin
      arrived_q <= bar_release_o ? (arrived_n & ~bar_mask_q) : arrived_n;
      for (int unsigned c = 0; c < NC; c++) begin
        buf_q[c] <= (buf_q[c] & ~evt_clr_i[c])
                  | {dma_evt_i, rbe_evt_i, bar_release_o && bar_mask_q[c]};
      end
      rvalid_q <= preq_i.req && !preq_i.we;
      rdata_q  <= '0;
      if (preq_i.req) begin
        if (preq_i.we) begin
          if (preq_i.addr == 8'h00) bar_mask_q <= preq_i.wdata[NC-1:0];
          if (preq_i.addr == 8'h04) evt_mask_q <= preq_i.wdata[2:0];
        end else begin
          unique case (preq_i.addr)
            8'h00:   rdata_q <= 32'(bar_mask_q);
            8'h04:   rdata_q <= 32'(evt_mask_q);
            8'h08:   rdata_q <= 32'(arrived_q);
            default: rdata_q <= '0;
          endcase
        end
      end
    end
  end

  assign prsp_o.gnt    = preq_i.req;
  assign prsp_o.rvalid = rvalid_q;
  assign prsp_o.rdata  = rdata_q;
  assign evt_buf_o     = buf_q;

  always_comb begin
    for (int unsigned c = 0; c < NC; c++)
      core_sleep_o[c] = core_wait_i[c] && ((buf_q[c] & evt_mask_q) == 3'b000);
  end

endmodule
