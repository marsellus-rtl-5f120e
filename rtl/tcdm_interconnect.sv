// tcdm_interconnect: the two-branch TCDM interconnect of the cluster.
//
// Branch 1, LIC (tcdm_lic): cores, DMA and SoC port, arbitrated per bank.
// Branch 2, RBE-IC: the accelerator's 288-bit port. RBE accesses are always
// contiguous: word k (k = 0..8, enabled by rbe_wen_i[k]) of an access at
// word address A goes to bank (A + k) mod NB, row (A + k) / NB. There is no
// per-bank arbitration inside this branch.
// Bank-level multiplexers choose, for every bank, between the two branches.
// A bank wanted by both is given by a per-bank priority bit that rotates
// round-robin: it flips towards the side that lost. Because a wide RBE
// access must be served in all its banks in the same cycle, the RBE is
// granted only when it wins every bank it needs; otherwise the LIC keeps
// all of them in that cycle and the priority bits of the contested banks
// turn to the RBE, which therefore wins the next cycle. Neither side can
// starve.
//
// The paper gives the two branches, the contiguous RBE accesses, the
// absence of bank-wise arbitration in the RBE branch and the round-robin
// bank multiplexers; the all-banks-or-none rule for the wide port is this
// design's choice. Aggregate bandwidth at the defaults: 16x32 (cores) +
// 4x32 (DMA) + 288 (RBE) = 928 bit/cycle, plus the 32-bit SoC port.
//
// Timing: grants in the request cycle, read data one cycle later.
module tcdm_interconnect
  import marsellus_pkg::*;
#(
  parameter int unsigned NM    = 21,
  parameter int unsigned NB    = 32,
  parameter int unsigned WORDS = 1024,
  parameter int unsigned RW    = 9     // words of the wide port
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  // LIC masters
  input  tcdm_req_t [NM-1:0]                    mreq_i,
  output tcdm_rsp_t [NM-1:0]                    mrsp_o,
  // RBE wide master
  input  logic                                  rbe_req_i,
  input  logic                                  rbe_we_i,
  input  logic      [31:0]                      rbe_addr_i,
  input  logic      [RW-1:0]                    rbe_wen_i,
  input  logic      [RW-1:0][31:0]              rbe_wdata_i,
  output logic                                  rbe_gnt_o,
  output logic                                  rbe_rvalid_o,
  output logic      [RW-1:0][31:0]              rbe_rdata_o,
  // banks
  output logic      [NB-1:0]                    breq_o,
  output logic      [NB-1:0]                    bwe_o,
  output logic      [NB-1:0][3:0]               bbe_o,
  output logic      [NB-1:0][$clog2(WORDS)-1:0] baddr_o,
  output logic      [NB-1:0][31:0]              bwdata_o,
  input  logic      [NB-1:0][31:0]              brdata_i,
  // statistics: banks contested by both branches this cycle
  output logic      [NB-1:0]                    conflict_o
);
  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned AW = $clog2(WORDS);

  logic [NB-1:0]          lic_req, lic_we, bank_free;
  logic [NB-1:0][3:0]     lic_be;
  logic [NB-1:0][AW-1:0]  lic_addr;
  logic [NB-1:0][31:0]    lic_wdata;
  logic [NB-1:0]          lic_any;

  // LIC requests are visible before the bank multiplexer decides: a bank is
  // "wanted by the LIC" if any master addresses it.
  always_comb begin
    lic_any = '0;
    for (int unsigned m = 0; m < NM; m++)
      if (mreq_i[m].req) lic_any[mreq_i[m].addr[BW+1:2]] = 1'b1;
  end

  tcdm_lic #(.NM(NM), .NB(NB), .WORDS(WORDS)) i_lic (
    .clk_i, .rst_ni, .mreq_i, .mrsp_o,
    .breq_o (lic_req), .bwe_o (lic_we), .bbe_o (lic_be), .baddr_o (lic_addr),
    .bwdata_o (lic_wdata), .bank_free_i (bank_free), .brdata_i
  );

  // RBE-IC: map the contiguous words onto banks
  logic [31:0]            rbe_word;
  logic [NB-1:0]          rbe_need;
  logic [NB-1:0][AW-1:0]  rbe_row;
  logic [NB-1:0][31:0]    rbe_bdata;
  logic [NB-1:0]          prio_q;   // 1: bank prefers the RBE on conflict
  logic                   rbe_win;
  logic                   rvalid_q;
  logic [BW-1:0]          first_bank_q;

  assign rbe_word = {2'b00, rbe_addr_i[31:2]};

  always_comb begin
    rbe_need  = '0;
    rbe_row   = '0;
    rbe_bdata = '0;
    for (int unsigned k = 0; k < RW; k++) begin
      automatic logic [31:0] w = rbe_word + k;
      if (rbe_req_i && rbe_wen_i[k]) begin
        rbe_need[w[BW-1:0]]  = 1'b1;
        rbe_row[w[BW-1:0]]   = w[BW +: AW];
        rbe_bdata[w[BW-1:0]] = rbe_wdata_i[k];
      end
    end
    conflict_o = rbe_need & lic_any;
    rbe_win    = rbe_req_i && ((conflict_o & ~prio_q) == '0);
    bank_free  = rbe_win ? ~rbe_need : '1;
    rbe_gnt_o  = rbe_win;
  end

  // bank-level multiplexers
  always_comb begin
    for (int unsigned b = 0; b < NB; b++) begin
      if (rbe_win && rbe_need[b]) begin
        breq_o[b]   = 1'b1;
        bwe_o[b]    = rbe_we_i;
        bbe_o[b]    = 4'hF;
        baddr_o[b]  = rbe_row[b];
        bwdata_o[b] = rbe_bdata[b];
      end else begin
        breq_o[b]   = lic_req[b];
        bwe_o[b]    = lic_we[b];
        bbe_o[b]    = lic_be[b];
        baddr_o[b]  = lic_addr[b];
        bwdata_o[b] = lic_wdata[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q       <= '0;
      rvalid_q     <= 1'b0;
      first_bank_q <= '0;
    end else begin
      for (int unsigned b = 0; b < NB; b++)
        if (conflict_o[b]) prio_q[b] <= !rbe_win;  // the loser gets priority
      rvalid_q <= rbe_win && !rbe_we_i;
      if (rbe_win) first_bank_q <= rbe_word[BW-1:0];
    end
  end

  assign rbe_rvalid_o = rvalid_q;
  always_comb begin
    for (int unsigned k = 0; k < RW; k++)
      rbe_rdata_o[k] = brdata_i[BW'(32'(first_bank_q) + k)];
  end

endmodule
