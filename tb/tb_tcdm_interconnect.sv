// tb_tcdm_interconnect: the TCDM interconnect with its 32 banks, driven by
// 21 random 32-bit masters and the 288-bit accelerator port, all in a small
// address window so they collide. Every read is checked against a shadow
// copy taken at grant time; bank conflicts between the two branches, wide
// accesses that wrap around the bank array, and the longest wait of any
// master (the arbitration must not starve anyone) are checked as well.
module tb_tcdm_interconnect;
  import marsellus_pkg::*;
  localparam int NM = 21, NB = 32, WORDS = 1024, RW = 9, SPAN = 256;  // words touched
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tcdm_req_t [NM-1:0] mreq;
  tcdm_rsp_t [NM-1:0] mrsp;
  logic rreq, rwe, rgnt, rrvalid;
  logic [31:0] raddr;
  logic [RW-1:0] rwen;
  logic [RW-1:0][31:0] rwdata, rrdata;
  logic [NB-1:0] breq, bwe, conflict;
  logic [NB-1:0][3:0] bbe;
  logic [NB-1:0][9:0] baddr;
  logic [NB-1:0][31:0] bwdata, brdata;

  tcdm_interconnect #(.NM(NM), .NB(NB), .WORDS(WORDS), .RW(RW)) dut (
    .clk_i (clk), .rst_ni (rst_n), .mreq_i (mreq), .mrsp_o (mrsp),
    .rbe_req_i (rreq), .rbe_we_i (rwe), .rbe_addr_i (raddr), .rbe_wen_i (rwen),
    .rbe_wdata_i (rwdata), .rbe_gnt_o (rgnt), .rbe_rvalid_o (rrvalid), .rbe_rdata_o (rrdata),
    .breq_o (breq), .bwe_o (bwe), .bbe_o (bbe), .baddr_o (baddr), .bwdata_o (bwdata),
    .brdata_i (brdata), .conflict_o (conflict)
  );
  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(WORDS)) i_bank (.clk_i (clk), .req_i (breq[b]), .we_i (bwe[b]), .be_i (bbe[b]),
                                       .addr_i (baddr[b]), .wdata_i (bwdata[b]), .rdata_o (brdata[b]));
  end

  logic [31:0] shadow [SPAN];
  logic [NM-1:0][31:0] mexp;
  logic [RW-1:0][31:0] rexp;
  logic [RW-1:0] rexp_en;
  int wait_cnt [NM];
  int max_wait = 0, n_conflict = 0, n_wrap = 0, n_rbe = 0;
  logic run = 0;

  always_ff @(posedge clk) begin
    if (run) begin
      if (|conflict) n_conflict++;
      // checks of returned data
      for (int m = 0; m < NM; m++)
        if (mrsp[m].rvalid) begin
          checks++;
          if (mrsp[m].rdata !== mexp[m]) begin
            failures++;
            if (failures < 6) $display("FAIL master %0d read %h expected %h", m, mrsp[m].rdata, mexp[m]);
          end
        end
      if (rrvalid)
        for (int k = 0; k < RW; k++)
          if (rexp_en[k]) begin
            checks++;
            if (rrdata[k] !== rexp[k]) begin
              failures++;
              if (failures < 6) $display("FAIL wide word %0d read %h expected %h", k, rrdata[k], rexp[k]);
            end
          end
      // grants update the shadow copy
      for (int m = 0; m < NM; m++) begin
        if (mreq[m].req && mrsp[m].gnt) begin
          int unsigned w;
          w = mreq[m].addr[31:2] % SPAN;
          if (mreq[m].we) begin
            for (int b = 0; b < 4; b++) if (mreq[m].be[b]) shadow[w][8*b +: 8] = mreq[m].wdata[8*b +: 8];
          end else mexp[m] <= shadow[w];
          wait_cnt[m] = 0;
        end else if (mreq[m].req) begin
          wait_cnt[m]++;
          if (wait_cnt[m] > max_wait) max_wait = wait_cnt[m];
        end
      end
      if (rreq && rgnt) begin
        n_rbe++;
        if ((raddr[31:2] % NB) + RW > NB) n_wrap++;
        for (int k = 0; k < RW; k++) begin
          int unsigned w;
          w = (raddr[31:2] + k) % SPAN;
          if (rwe && rwen[k]) shadow[w] = rwdata[k];
          rexp[k] <= shadow[w];
        end
        rexp_en <= rwe ? '0 : rwen;
      end
      // new requests once the old one is granted
      for (int m = 0; m < NM; m++)
        if (!mreq[m].req || mrsp[m].gnt) begin
          mreq[m].req   <= ($urandom % 3) != 0;
          mreq[m].we    <= $urandom % 2;
          mreq[m].be    <= $urandom;
          mreq[m].addr  <= 4 * ($urandom % SPAN);
          mreq[m].wdata <= $urandom;
        end
      if (!rreq || rgnt) begin
        rreq   <= ($urandom % 2) != 0;
        rwe    <= $urandom % 2;
        raddr  <= 4 * ($urandom % (SPAN - RW));
        rwen   <= 9'h1FF >> ($urandom % 3);
        for (int k = 0; k < RW; k++) rwdata[k] <= $urandom;
      end
    end
  end

  initial begin
    mreq = '0; rreq = 0; rwe = 0; raddr = 0; rwen = 0; rwdata = '0;
    for (int m = 0; m < NM; m++) wait_cnt[m] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // zero the window through master 0
    for (int w = 0; w < SPAN; w++) begin
      @(negedge clk);
      mreq[0] = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 4 * w, wdata: '0};
      shadow[w] = '0;
    end
    @(negedge clk);
    mreq = '0;
    run = 1;
    repeat (20000) @(negedge clk);
    run = 0;
    $display("conflicts %0d, wide accesses %0d (wrapping %0d), longest wait %0d", n_conflict, n_rbe, n_wrap, max_wait);
    checks += 4;
    if (n_conflict == 0) begin failures++; $display("FAIL no conflicts"); end
    if (n_wrap == 0) begin failures++; $display("FAIL no wrapping wide access"); end
    if (n_rbe < 1000) begin failures++; $display("FAIL wide port starved"); end
    if (max_wait > 2 * NM + 2) begin failures++; $display("FAIL a master waited %0d cycles", max_wait); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
