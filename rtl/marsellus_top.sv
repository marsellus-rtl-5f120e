// marsellus_top: the heterogeneous cluster of the SoC together with the L2
// scratchpad it exchanges data with.
//
// Contents
//   * L1 TCDM: 32 word-interleaved 32-bit banks (tcdm_bank), 128 KiB.
//   * tcdm_interconnect: LIC branch for the 16 cores, the 4 DMA ports and a
//     32-bit SoC port, RBE-IC branch for the accelerator's 288-bit port,
//     round-robin bank multiplexers.
//   * rbe: the convolution accelerator.
//   * cluster_dma: 64-bit L2 <-> TCDM transfers.
//   * event_unit: barriers and end-of-job events of the RBE and the DMA.
//   * Peripheral interconnect: a 32-bit register bus decoded on bits [9:8]
//     of periph_addr_i: 0 = RBE, 1 = DMA, 2 = event unit.
//   * 16 MAC&LOAD slices (xpulpnn_macload: NN-RF + DOTP), one per core.
//   * On-Chip Monitors (ocm) on NOCM endpoints and the ABB controller
//     (abb_ctrl) that turns their pre-errors into a body-bias code.
//   * l2_memory: 960 KiB interleaved + 64 KiB private L2; port 0 is the SoC
//     port of this top, port 1 belongs to the cluster DMA.
//
// Not contained, and therefore brought out as ports: the 16 RI5CY-based
// cores (their TCDM ports, barrier/event signals, the decoded MAC&LOAD
// operands and LSU traffic of each slice), the peripheral master, the SoC
// side (fabric controller core, I/O DMA, SoC crossbar) on the L2 port, the
// timing-critical endpoints observed by the OCMs with the delayed copies of
// their inputs (the delay cells are analog), and the analog well drivers
// that receive the ABB code. The shared FPUs, instruction caches and
// dual-clock AXI FIFOs are not part of this RTL; SoC and cluster share one
// clock here.
module marsellus_top
  import marsellus_pkg::*;
#(
  parameter int unsigned NOCM = 16   // monitored endpoints in this top
) (
  input  logic                         clk_i,
  input  logic                         rst_ni,
  // cores -> TCDM
  input  tcdm_req_t [N_CORES-1:0]      core_req_i,
  output tcdm_rsp_t [N_CORES-1:0]      core_rsp_o,
  // SoC -> TCDM
  input  tcdm_req_t                    soc_tcdm_req_i,
  output tcdm_rsp_t                    soc_tcdm_rsp_o,
  // cores -> peripheral interconnect
  input  logic                         periph_req_i,
  input  logic                         periph_we_i,
  input  logic [9:0]                   periph_addr_i,
  input  logic [31:0]                  periph_wdata_i,
  output logic                         periph_gnt_o,
  output logic                         periph_rvalid_o,
  output logic [31:0]                  periph_rdata_o,
  // event unit <-> cores
  input  logic [N_CORES-1:0]           bar_arrive_i,
  input  logic [N_CORES-1:0][2:0]      evt_clr_i,
  input  logic [N_CORES-1:0]           core_wait_i,
  output logic [N_CORES-1:0][2:0]      evt_buf_o,
  output logic [N_CORES-1:0]           core_sleep_o,
  output logic                         rbe_evt_o,
  output logic                         dma_evt_o,
  // MAC&LOAD slices <-> cores
  input  logic [N_CORES-1:0]           ml_valid_i,
  input  simd_fmt_e [N_CORES-1:0]      ml_fmt_i,
  input  simd_sign_e [N_CORES-1:0]     ml_sign_i,
  input  logic [N_CORES-1:0][4:0]      ml_imm_i,
  input  logic [N_CORES-1:0][31:0]     ml_ptr_i,
  input  logic [N_CORES-1:0][31:0]     ml_acc_i,
  input  logic [N_CORES-1:0]           ml_preload_i,
  output logic [N_CORES-1:0]           ml_stall_o,
  output logic [N_CORES-1:0]           ml_acc_we_o,
  output logic [N_CORES-1:0][31:0]     ml_acc_o,
  output logic [N_CORES-1:0]           ml_ptr_we_o,
  output logic [N_CORES-1:0][31:0]     ml_ptr_o,
  output logic [N_CORES-1:0]           ml_lsu_req_o,
  output logic [N_CORES-1:0][31:0]     ml_lsu_addr_o,
  input  logic [N_CORES-1:0]           ml_lsu_gnt_i,
  input  logic [N_CORES-1:0]           ml_lsu_rvalid_i,
  input  logic [N_CORES-1:0][31:0]     ml_lsu_rdata_i,
  // SoC -> L2
  input  logic                         l2_req_i,
  input  logic                         l2_we_i,
  input  logic [7:0]                   l2_be_i,
  input  logic [31:0]                  l2_addr_i,
  input  logic [63:0]                  l2_wdata_i,
  output logic                         l2_gnt_o,
  output logic                         l2_rvalid_o,
  output logic [63:0]                  l2_rdata_o,
  // On-Chip Monitors and ABB
  input  logic [NOCM-1:0]              ocm_d_i,
  input  logic [NOCM-1:0]              ocm_d_del_i,
  output logic [NOCM-1:0]              ocm_q_o,
  input  logic                         abb_enable_i,
  input  logic [15:0]                  abb_window_i,
  input  logic [15:0]                  abb_settle_i,
  input  logic [5:0]                   abb_max_code_i,
  output logic [5:0]                   abb_code_o,
  output logic [15:0]                  abb_pe_count_o,
  // status, for observation
  output logic                         rbe_busy_o,
  output logic                         dma_busy_o,
  output logic                         bar_release_o,
  output logic                         abb_raise_o,
  output logic                         abb_relax_o,
  output logic [N_BANKS-1:0]           tcdm_conflict_o
);
  // ---------------- peripheral interconnect ----------------
  periph_req_t preq_rbe, preq_dma, preq_eu;
  periph_rsp_t prsp_rbe, prsp_dma, prsp_eu;
  logic [1:0]  psel_q;

  always_comb begin
    preq_rbe = '{req: 1'b0, we: periph_we_i, addr: periph_addr_i[7:0], wdata: periph_wdata_i};
    preq_dma = preq_rbe;
    preq_eu  = preq_rbe;
    unique case (periph_addr_i[9:8])
      2'd0:    preq_rbe.req = periph_req_i;
      2'd1:    preq_dma.req = periph_req_i;
      2'd2:    preq_eu.req  = periph_req_i;
      default: ;
    endcase
    periph_gnt_o = periph_req_i;   // every target, and the empty slot, accepts at once
    unique case (psel_q)
      2'd0:    begin periph_rvalid_o = prsp_rbe.rvalid; periph_rdata_o = prsp_rbe.rdata; end
      2'd1:    begin periph_rvalid_o = prsp_dma.rvalid; periph_rdata_o = prsp_dma.rdata; end
      2'd2:    begin periph_rvalid_o = prsp_eu.rvalid;  periph_rdata_o = prsp_eu.rdata;  end
      default: begin periph_rvalid_o = 1'b0;            periph_rdata_o = '0;             end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)           psel_q <= '0;
    else if (periph_req_i) psel_q <= periph_addr_i[9:8];
  end

  // ---------------- TCDM ----------------
  tcdm_req_t [N_LIC_PORTS-1:0] lic_req;
  tcdm_rsp_t [N_LIC_PORTS-1:0] lic_rsp;
  tcdm_req_t [N_DMA_PORTS-1:0] dma_treq;
  tcdm_rsp_t [N_DMA_PORTS-1:0] dma_trsp;

  always_comb begin
    for (int unsigned c = 0; c < N_CORES; c++) lic_req[c] = core_req_i[c];
    for (int unsigned d = 0; d < N_DMA_PORTS; d++) lic_req[N_CORES + d] = dma_treq[d];
    lic_req[N_CORES + N_DMA_PORTS] = soc_tcdm_req_i;
    for (int unsigned c = 0; c < N_CORES; c++) core_rsp_o[c] = lic_rsp[c];
    for (int unsigned d = 0; d < N_DMA_PORTS; d++) dma_trsp[d] = lic_rsp[N_CORES + d];
    soc_tcdm_rsp_o = lic_rsp[N_CORES + N_DMA_PORTS];
  end

  logic                    rbe_req, rbe_we, rbe_gnt, rbe_rvalid;
  logic [31:0]             rbe_addr;
  logic [8:0]              rbe_wen;
  logic [8:0][31:0]        rbe_wdata, rbe_rdata;
  logic [N_BANKS-1:0]      b_req, b_we;
  logic [N_BANKS-1:0][3:0] b_be;
  logic [N_BANKS-1:0][$clog2(BANK_WORDS)-1:0] b_addr;
  logic [N_BANKS-1:0][31:0] b_wdata, b_rdata;
  
  tcdm_interconnect #(.NM(N_LIC_PORTS), .NB(N_BANKS), .WORDS(BANK_WORDS), .RW(9)) i_tcdm_ic (
    .clk_i, .rst_ni,
    .mreq_i (lic_req), .mrsp_o (lic_rsp),
    .rbe_req_i (rbe_req), .rbe_we_i (rbe_we), .rbe_addr_i (rbe_addr), .rbe_wen_i (rbe_wen),
    .rbe_wdata_i (rbe_wdata), .rbe_gnt_o (rbe_gnt), .rbe_rvalid_o (rbe_rvalid),
    .rbe_rdata_o (rbe_rdata),
    .breq_o (b_req), .bwe_o (b_we), .bbe_o (b_be), .baddr_o (b_addr), .bwdata_o (b_wdata),
    .brdata_i (b_rdata), .conflict_o (tcdm_conflict_o)
  );

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i,
      .req_i (b_req[b]), .we_i (b_we[b]), .be_i (b_be[b]), .addr_i (b_addr[b]),
      .wdata_i (b_wdata[b]), .rdata_o (b_rdata[b])
    );
  end

  // ---------------- RBE ----------------
  rbe i_rbe (
    .clk_i, .rst_ni,
    .preq_i (preq_rbe), .prsp_o (prsp_rbe),
    .evt_o (rbe_evt_o), .busy_o (rbe_busy_o),
    .tcdm_req_o (rbe_req), .tcdm_we_o (rbe_we), .tcdm_addr_o (rbe_addr), .tcdm_wen_o (rbe_wen),
    .tcdm_wdata_o (rbe_wdata), .tcdm_gnt_i (rbe_gnt), .tcdm_rvalid_i (rbe_rvalid),
    .tcdm_rdata_i (rbe_rdata)
  );

  // ---------------- DMA and L2 ----------------
  logic        ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;

  cluster_dma i_dma (
    .clk_i, .rst_ni,
    .preq_i (preq_dma), .prsp_o (prsp_dma),
    .evt_o (dma_evt_o), .busy_o (dma_busy_o),
    .treq_o (dma_treq), .trsp_i (dma_trsp),
    .ext_req_o (ext_req), .ext_we_o (ext_we), .ext_addr_o (ext_addr), .ext_wdata_o (ext_wdata),
    .ext_gnt_i (ext_gnt), .ext_rvalid_i (ext_rvalid), .ext_rdata_i (ext_rdata)
  );

  logic [1:0]       l2_gnt, l2_rvalid;
  logic [1:0][63:0] l2_rdata;

  l2_memory i_l2 (
    .clk_i, .rst_ni,
    .req_i   ({ext_req, l2_req_i}),
    .we_i    ({ext_we, l2_we_i}),
    .be_i    ({8'hFF, l2_be_i}),
    .addr_i  ({ext_addr, l2_addr_i}),
    .wdata_i ({ext_wdata, l2_wdata_i}),
    .gnt_o   (l2_gnt),
    .rvalid_o (l2_rvalid),
    .rdata_o (l2_rdata)
  );
  assign l2_gnt_o    = l2_gnt[0];
  assign l2_rvalid_o = l2_rvalid[0];
  assign l2_rdata_o  = l2_rdata[0];
  assign ext_gnt     = l2_gnt[1];
  assign ext_rvalid  = l2_rvalid[1];
  assign ext_rdata   = l2_rdata[1];

  // ---------------- event unit ----------------
  event_unit #(.NC(N_CORES)) i_eu (
    .clk_i, .rst_ni,
    .preq_i (preq_eu), .prsp_o (prsp_eu),
    .bar_arrive_i, .rbe_evt_i (rbe_evt_o), .dma_evt_i (dma_evt_o),
    .evt_clr_i, .core_wait_i, .evt_buf_o, .core_sleep_o,
    .bar_release_o
  );

  // ---------------- MAC&LOAD slices ----------------
  for (genvar c = 0; c < N_CORES; c++) begin : g_ml
    xpulpnn_macload i_ml (
      .clk_i, .rst_ni,
      .valid_i (ml_valid_i[c]), .fmt_i (ml_fmt_i[c]), .sign_i (ml_sign_i[c]),
      .imm_i (ml_imm_i[c]), .ptr_i (ml_ptr_i[c]), .acc_i (ml_acc_i[c]),
      .stall_o (ml_stall_o[c]), .acc_we_o (ml_acc_we_o[c]), .acc_o (ml_acc_o[c]),
      .ptr_we_o (ml_ptr_we_o[c]), .ptr_o (ml_ptr_o[c]),
      .lsu_req_o (ml_lsu_req_o[c]), .lsu_addr_o (ml_lsu_addr_o[c]),
      .lsu_gnt_i (ml_lsu_gnt_i[c]), .lsu_rvalid_i (ml_lsu_rvalid_i[c]),
      .lsu_rdata_i (ml_lsu_rdata_i[c]), .preload_i (ml_preload_i[c])
    );
  end

  // ---------------- OCMs and ABB ----------------
  logic [NOCM-1:0] pre_error;
  for (genvar o = 0; o < NOCM; o++) begin : g_ocm
    ocm #(.W(1)) i_ocm (
      .clk_i, .rst_ni,
      .d_i (ocm_d_i[o]), .d_del_i (ocm_d_del_i[o]),
      .q_o (ocm_q_o[o]), .pre_error_o (pre_error[o])
    );
  end

  abb_ctrl #(.NPE(NOCM), .CODE_W(6), .STEP_UP(4)) i_abb (
    .clk_i, .rst_ni,
    .enable_i (abb_enable_i), .pre_error_i (pre_error),
    .window_i (abb_window_i), .settle_i (abb_settle_i), .max_code_i (abb_max_code_i),
    .code_o (abb_code_o), .raise_o (abb_raise_o), .relax_o (abb_relax_o),
    .pe_count_o (abb_pe_count_o)
  );

endmodule
