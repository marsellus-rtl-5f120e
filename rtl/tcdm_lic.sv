// tcdm_lic: the logarithmic interconnect (LIC) branch of the TCDM
// interconnect.
//
// A fully combinational crossbar from NM 32-bit masters (16 cores, 4 DMA
// ports, 1 SoC port) to NB word-interleaved banks. Bank index = byte address
// bits [log2(NB)+1:2], row = the bits above. Each bank has its own
// round-robin arbiter: the requesting master at or after the bank's
// priority pointer wins, and the pointer moves past the winner after each
// served request, so no master starves. A winner is granted only if the
// bank-level multiplexer (tcdm_interconnect) gives the bank to the LIC in
// that cycle (bank_free_i). Read data returns one cycle after the grant,
// routed back with a registered bank index per master.
//
// The paper names the LIC and its role; the round-robin policy per bank is
// this design's choice (the paper states round-robin only for the bank-level
// LIC/RBE multiplexers).
module tcdm_lic
  import marsellus_pkg::*;
#(
  parameter int unsigned NM    = 21,
  parameter int unsigned NB    = 32,
  parameter int unsigned WORDS = 1024
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  input  tcdm_req_t [NM-1:0]                    mreq_i,
  output tcdm_rsp_t [NM-1:0]                    mrsp_o,
  // bank side
  output logic      [NB-1:0]                    breq_o,
  output logic      [NB-1:0]                    bwe_o,
  output logic      [NB-1:0][3:0]               bbe_o,
  output logic      [NB-1:0][$clog2(WORDS)-1:0] baddr_o,
  output logic      [NB-1:0][31:0]              bwdata_o,
  input  logic      [NB-1:0]                    bank_free_i,
  input  logic      [NB-1:0][31:0]              brdata_i
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned MW = $clog2(NM);

  logic [NM-1:0][BW-1:0] mbank;
  logic [NB-1:0][MW-1:0] rr_q, win;
  logic [NB-1:0]         any;
  logic [NM-1:0]         gnt;
  logic [NM-1:0]         rvalid_q;
  logic [NM-1:0][BW-1:0] rbank_q;

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) mbank[m] = mreq_i[m].addr[BW+1:2];
    for (int unsigned b = 0; b < NB; b++) begin
      any[b] = 1'b0;
      win[b] = '0;
      // search from the pointer, wrapping around
      for (int unsigned k = 0; k < NM; k++) begin
        automatic int unsigned m = (32'(rr_q[b]) + k) % NM;
        if (!any[b] && mreq_i[m].req && mbank[m] == BW'(b)) begin
          any[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      breq_o[b]   = any[b] && bank_free_i[b];
      bwe_o[b]    = mreq_i[win[b]].we;
      bbe_o[b]    = mreq_i[win[b]].be;
      baddr_o[b]  = mreq_i[win[b]].addr[BW+2 +: $clog2(WORDS)];
      bwdata_o[b] = mreq_i[win[b]].wdata;
    end
    for (int unsigned m = 0; m < NM; m++)
      gnt[m] = mreq_i[m].req && any[mbank[m]] && (win[mbank[m]] == MW'(m)) && bank_free_i[mbank[m]];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      for (int unsigned b = 0; b < NB; b++)
        if (breq_o[b]) rr_q[b] <= (32'(win[b]) == NM - 1) ? '0 : win[b] + MW'(1);
      for (int unsigned m = 0; m < NM; m++) begin
        rvalid_q[m] <= gnt[m] && !mreq_i[m].we;
        if (gnt[m]) rbank_q[m] <= mbank[m];
      end
    end
  end

  always_comb begin
    for (int unsigned m = 0; m < NM; m++) begin
      mrsp_o[m].gnt    = gnt[m];
      mrsp_o[m].rvalid = rvalid_q[m];
      mrsp_o[m].rdata  = brdata_i[rbank_q[m]];
    end
  end

endmodule
