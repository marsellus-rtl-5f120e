// tb_marsellus_top: end-to-end test of the cluster at its default size.
//
// The host (standing in for the SoC) writes two convolution layers into L2
// through the SoC port; the cluster DMA copies each into the TCDM; the RBE
// runs it (first a 3x3 layer with 64 input and 64 output channels on a 3x3
// output tile, the layer used for the published throughput measurements, then a 1x1 layer, so the
// engine switches mode); the DMA copies the outputs back to L2, where the
// host compares them with an integer reference convolution. While the RBE
// runs, all 16 core ports hammer the TCDM with reads and writes (each core
// in a region of its own, checked against a shadow copy), so cores and RBE
// collide on banks. The cores also sleep on the RBE event and meet at a
// barrier, one MAC&LOAD slice is exercised with a stalling load, and the
// On-Chip Monitors report a late endpoint so the body-bias loop raises and
// then relaxes its code.
//
// Each mechanism is counted; the test fails if any of them never happened.
module tb_marsellus_top;
  import marsellus_pkg::*;
  import tb_rbe_pkg::*;

  localparam int unsigned NOCM = 16;
  localparam int unsigned L2_LAYER = 32'h2_0000;    // where the layer image lives in L2
  localparam int unsigned CORE_REGION = 32'h1_0000; // cores play in the TCDM above this

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tcdm_req_t [N_CORES-1:0] core_req;
  tcdm_rsp_t [N_CORES-1:0] core_rsp;
  tcdm_req_t soc_req;
  tcdm_rsp_t soc_rsp;
  logic periph_req, periph_we, periph_gnt, periph_rvalid;
  logic [9:0] periph_addr;
  logic [31:0] periph_wdata, periph_rdata;
  logic [N_CORES-1:0] bar_arrive, core_wait, core_sleep;
  logic [N_CORES-1:0][2:0] evt_clr, evt_buf;
  logic rbe_evt, dma_evt;
  logic [N_CORES-1:0] ml_valid, ml_preload, ml_stall, ml_acc_we, ml_ptr_we, ml_lsu_req, ml_lsu_gnt, ml_lsu_rvalid;
  simd_fmt_e [N_CORES-1:0] ml_fmt;
  simd_sign_e [N_CORES-1:0] ml_sign;
  logic [N_CORES-1:0][4:0] ml_imm;
  logic [N_CORES-1:0][31:0] ml_ptr, ml_acc, ml_acc_out, ml_ptr_out, ml_lsu_addr, ml_lsu_rdata;
  logic l2_req, l2_we, l2_gnt, l2_rvalid;
  logic [7:0] l2_be;
  logic [31:0] l2_addr;
  logic [63:0] l2_wdata, l2_rdata;
  logic [NOCM-1:0] ocm_d, ocm_d_del, ocm_q;
  logic abb_enable;
  logic [15:0] abb_window, abb_settle, abb_pe_count;
  logic [5:0] abb_max_code, abb_code;
  logic rbe_busy, dma_busy, bar_release, abb_raise, abb_relax;
  logic [N_BANKS-1:0] tcdm_conflict;

  marsellus_top dut (
    .clk_i (clk), .rst_ni (rst_n),
    .core_req_i (core_req), .core_rsp_o (core_rsp),
    .soc_tcdm_req_i (soc_req), .soc_tcdm_rsp_o (soc_rsp),
    .periph_req_i (periph_req), .periph_we_i (periph_we), .periph_addr_i (periph_addr),
    .periph_wdata_i (periph_wdata), .periph_gnt_o (periph_gnt), .periph_rvalid_o (periph_rvalid),
    .periph_rdata_o (periph_rdata),
    .bar_arrive_i (bar_arrive), .evt_clr_i (evt_clr), .core_wait_i (core_wait),
    .evt_buf_o (evt_buf), .core_sleep_o (core_sleep), .rbe_evt_o (rbe_evt), .dma_evt_o (dma_evt),
    .ml_valid_i (ml_valid), .ml_fmt_i (ml_fmt), .ml_sign_i (ml_sign), .ml_imm_i (ml_imm),
    .ml_ptr_i (ml_ptr), .ml_acc_i (ml_acc), .ml_preload_i (ml_preload), .ml_stall_o (ml_stall),
    .ml_acc_we_o (ml_acc_we), .ml_acc_o (ml_acc_out), .ml_ptr_we_o (ml_ptr_we), .ml_ptr_o (ml_ptr_out),
    .ml_lsu_req_o (ml_lsu_req), .ml_lsu_addr_o (ml_lsu_addr), .ml_lsu_gnt_i (ml_lsu_gnt),
    .ml_lsu_rvalid_i (ml_lsu_rvalid), .ml_lsu_rdata_i (ml_lsu_rdata),
    .l2_req_i (l2_req), .l2_we_i (l2_we), .l2_be_i (l2_be), .l2_addr_i (l2_addr),
    .l2_wdata_i (l2_wdata), .l2_gnt_o (l2_gnt), .l2_rvalid_o (l2_rvalid), .l2_rdata_o (l2_rdata),
    .ocm_d_i (ocm_d), .ocm_d_del_i (ocm_d_del), .ocm_q_o (ocm_q),
    .abb_enable_i (abb_enable), .abb_window_i (abb_window), .abb_settle_i (abb_settle),
    .abb_max_code_i (abb_max_code), .abb_code_o (abb_code), .abb_pe_count_o (abb_pe_count),
    .rbe_busy_o (rbe_busy), .dma_busy_o (dma_busy), .bar_release_o (bar_release),
    .abb_raise_o (abb_raise), .abb_relax_o (abb_relax), .tcdm_conflict_o (tcdm_conflict)
  );

  // ------------------------------------------------------------------
  // mechanism counters
  // ------------------------------------------------------------------
  int n_conflict, n_core_stall, n_rbe_stall, n_mode_switch, n_rbe_evt, n_dma_evt;
  int n_bar_release, n_wake, n_ml_stall, n_raise, n_relax, n_core_rd, n_soc;
  int n_l2_conflict, n_jobs_3x3, n_jobs_1x1;
  logic last_mode, seen_mode;
  logic [N_CORES-1:0] sleep_q;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      if (|tcdm_conflict) n_conflict <= n_conflict + 1;
      for (int c = 0; c < N_CORES; c++)
        if (core_req[c].req && !core_rsp[c].gnt) n_core_stall <= n_core_stall + 1;
      if (dut.rbe_req && !dut.rbe_gnt) n_rbe_stall <= n_rbe_stall + 1;
      if (dut.i_rbe.dp_valid) begin
        seen_mode <= 1'b1;
        last_mode <= dut.i_rbe.dp_mode;
        if (seen_mode && last_mode != dut.i_rbe.dp_mode) n_mode_switch <= n_mode_switch + 1;
      end
      if (rbe_evt) n_rbe_evt <= n_rbe_evt + 1;
      if (dma_evt) n_dma_evt <= n_dma_evt + 1;
      if (bar_release) n_bar_release <= n_bar_release + 1;
      sleep_q <= core_sleep;
      for (int c = 0; c < N_CORES; c++)
        if (sleep_q[c] && !core_sleep[c]) n_wake <= n_wake + 1;
      if (|ml_stall) n_ml_stall <= n_ml_stall + 1;
      if (abb_raise) n_raise <= n_raise + 1;
      if (abb_relax) n_relax <= n_relax + 1;
      if (dut.i_l2.req_i == 2'b11 && dut.i_l2.gnt_o != 2'b11) n_l2_conflict <= n_l2_conflict + 1;
    end
  end

  // ------------------------------------------------------------------
  // core traffic: each core owns 512 bytes of the upper TCDM half
  // ------------------------------------------------------------------
  logic traffic_on = 1'b0;
  logic [31:0] shadow [N_CORES][128];
  logic [N_CORES-1:0][31:0] rd_exp;

  always_ff @(posedge clk) begin
    for (int c = 0; c < N_CORES; c++) begin
      if (rst_n && core_rsp[c].rvalid) begin
        checks++;
        n_core_rd++;
        if (core_rsp[c].rdata !== rd_exp[c]) begin
          failures++;
          $display("FAIL t=%0t core %0d read %h expected %h", $time, c, core_rsp[c].rdata, rd_exp[c]);
        end
      end
      if (core_req[c].req && core_rsp[c].gnt) begin
        int unsigned w;
        w = (core_req[c].addr - CORE_REGION - 512 * c) >> 2;
        if (core_req[c].we) shadow[c][w] <= core_req[c].wdata;
        else rd_exp[c] <= shadow[c][w];
      end
      if (!(core_req[c].req && !core_rsp[c].gnt)) begin
        core_req[c].req <= 1'b0;
        if (traffic_on && ($urandom % 4) != 0) begin
          int unsigned w;
          w = $urandom % 128;
          core_req[c].req   <= 1'b1;
          core_req[c].we    <= ($urandom % 2) == 0;
          core_req[c].be    <= 4'hF;
          core_req[c].addr  <= CORE_REGION + 512 * c + 4 * w;
          core_req[c].wdata <= $urandom;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // bus helpers
  // ------------------------------------------------------------------
  task automatic pwrite(input logic [9:0] a, input logic [31:0] d);
    @(negedge clk);
    periph_req = 1'b1; periph_we = 1'b1; periph_addr = a; periph_wdata = d;
    @(negedge clk);
    periph_req = 1'b0; periph_we = 1'b0;
  endtask

  task automatic pread(input logic [9:0] a, output logic [31:0] d);
    @(negedge clk);
    periph_req = 1'b1; periph_we = 1'b0; periph_addr = a;
    @(negedge clk);
    periph_req = 1'b0;
    d = periph_rdata;
  endtask

  task automatic l2_write(input logic [31:0] a, input logic [63:0] d);
    @(negedge clk);
    l2_req = 1'b1; l2_we = 1'b1; l2_be = 8'hFF; l2_addr = a; l2_wdata = d;
    @(posedge clk);
    while (!l2_gnt) @(posedge clk);
    @(negedge clk);
    l2_req = 1'b0; l2_we = 1'b0;
  endtask

  task automatic l2_read(input logic [31:0] a, output logic [63:0] d);
    @(negedge clk);
    l2_req = 1'b1; l2_we = 1'b0; l2_addr = a;
    @(posedge clk);
    while (!l2_gnt) @(posedge clk);
    @(negedge clk);
    l2_req = 1'b0;
    d = l2_rdata;
  endtask

  task automatic dma(input logic [31:0] ext, loc, len, input logic dir);
    int n0;
    n0 = n_dma_evt;
    pwrite(10'h100, ext);
    pwrite(10'h104, loc);
    pwrite(10'h108, (len + 7) & ~32'd7);
    pwrite(10'h10C, {31'd0, dir});
    wait (n_dma_evt == n0 + 1);
  endtask

  // ------------------------------------------------------------------
  // one layer end to end
  // ------------------------------------------------------------------
  task automatic run_layer(input int unsigned m, w_, i_, o_, ds, r_, nko, nki, nh_, nw_);
    int unsigned mean, first, len, bad, n0;
    logic [63:0] d;
    mean = 32 * nki * (m == 0 ? 9 : 1) * ((1 << i_) - 1) * ((1 << w_) - 1);
    setup(m, w_, i_, o_, $clog2(mean) - o_ + ds, r_, nko, nki, nh_, nw_, 32'h100);
    gen();
    pack();
    first = 32'h100;
    len = end_addr() - first;
    // host writes the image (outputs region holds junk) into L2
    for (int unsigned a = first; a < first + len; a += 8) begin
      logic [31:0] lo, hi;
      lo = mem.exists(a) ? mem[a] : $urandom;
      hi = mem.exists(a + 4) ? mem[a + 4] : $urandom;
      l2_write(L2_LAYER + a, {hi, lo});
    end
    // L2 -> TCDM, then start the accelerator while the cores run traffic
    dma(L2_LAYER + first, first, len, 1'b0);
    pwrite(10'h008, cfg_word());
    pwrite(10'h00C, tiles_word());
    pwrite(10'h010, x_base);
    pwrite(10'h014, x_row_stride());
    pwrite(10'h018, x_pix_stride());
    pwrite(10'h01C, w_base);
    pwrite(10'h020, nq_base);
    pwrite(10'h024, y_base);
    pwrite(10'h028, y_row_stride());
    pwrite(10'h02C, y_pix_stride());
    // cores clear their buffered events, then go to sleep on the RBE event
    @(negedge clk);
    evt_clr = '1;
    @(negedge clk);
    evt_clr = '0;
    core_wait = '1;
    n0 = n_rbe_evt;
    traffic_on = 1'b1;
    pwrite(10'h000, 0);
    repeat (3) @(negedge clk);
    checks++;
    if (core_sleep != '1) begin failures++; $display("FAIL cores not asleep %h", core_sleep); end
    wait (n_rbe_evt == n0 + 1);
    @(negedge clk);
    checks++;
    if (core_sleep != '0) begin failures++; $display("FAIL cores did not wake %h", core_sleep); end
    core_wait = '0;
    traffic_on = 1'b0;
    if (m == 0) n_jobs_3x3++; else n_jobs_1x1++;
    // outputs back to L2 at a different place, then read and compare
    dma(L2_LAYER + 32'h1_0000 + y_base, y_base, end_addr() - y_base, 1'b1);
    for (int unsigned a = y_base; a < end_addr(); a += 8) begin
      l2_read(L2_LAYER + 32'h1_0000 + a, d);
      mem[a] = d[31:0];
      mem[a + 4] = d[63:32];
    end
    bad = 0;
    for (int unsigned ho = 0; ho < hout; ho++)
      for (int unsigned wo = 0; wo < wout; wo++)
        for (int unsigned ko = 0; ko < kout; ko++) begin
          checks++;
          if (unpack_y(ho, wo, ko) != expected(ho, wo, ko)) begin
            failures++;
            if (bad++ < 5) $display("FAIL mode %0d y[%0d][%0d][%0d] = %0d expected %0d",
                                    m, ho, wo, ko, unpack_y(ho, wo, ko), expected(ho, wo, ko));
          end
        end
    $display("layer mode=%0d W=%0d I=%0d O=%0d Kin=%0d Kout=%0d %0dx%0d out checked", m, w_, i_, o_, kin, kout, hout, wout);
  endtask

  // signed 8-bit dot product of two words (sdotsp.b)
  function automatic logic [31:0] dot4(logic [31:0] a, logic [31:0] b, logic [31:0] acc);
    int s;
    s = int'(acc);
    for (int k = 0; k < 4; k++) s += int'($signed(a[8*k +: 8])) * int'($signed(b[8*k +: 8]));
    return 32'(s);
  endfunction

  task automatic macload(input logic [4:0] imm, input logic [31:0] acc, input int gnt_delay,
                         input logic [31:0] load, input logic [31:0] exp);
    @(negedge clk);
    ml_valid[0] = 1'b1; ml_imm[0] = imm; ml_acc[0] = acc; ml_ptr[0] = 32'h400;
    ml_lsu_gnt[0] = gnt_delay == 0;
    for (int k = 0; k < gnt_delay; k++) begin
      @(negedge clk);
      checks++;
      if (!ml_stall[0]) begin failures++; $display("FAIL no MAC&LOAD stall"); end
      if (k == gnt_delay - 1) ml_lsu_gnt[0] = 1'b1;
    end
    #1;
    checks++;
    if (ml_stall[0] || !ml_acc_we[0] || ml_acc_out[0] !== exp) begin
      failures++;
      $display("FAIL MAC&LOAD acc %h expected %h stall %b", ml_acc_out[0], exp, ml_stall[0]);
    end
    @(negedge clk);
    ml_valid[0] = 1'b0; ml_lsu_gnt[0] = 1'b0;
    ml_lsu_rvalid[0] = imm[4] | imm[3]; ml_lsu_rdata[0] = load;
    @(negedge clk);
    ml_lsu_rvalid[0] = 1'b0;
  endtask

  // ------------------------------------------------------------------
  // main sequence
  // ------------------------------------------------------------------
  initial begin
    logic [31:0] xw, ww, acc;
    int unsigned code_before;
    core_req = '0; soc_req = '0;
    periph_req = 0; periph_we = 0; periph_addr = '0; periph_wdata = '0;
    bar_arrive = '0; evt_clr = '0; core_wait = '0;
    ml_valid = '0; ml_preload = '0; ml_lsu_gnt = '0; ml_lsu_rvalid = '0; ml_lsu_rdata = '0;
    ml_fmt = {N_CORES{SIMD_B}}; ml_sign = {N_CORES{SGN_S}}; ml_imm = '0; ml_ptr = '0; ml_acc = '0;
    l2_req = 0; l2_we = 0; l2_be = '0; l2_addr = '0; l2_wdata = '0;
    ocm_d = '0; ocm_d_del = '0;
    abb_enable = 1'b1; abb_window = 16'd60; abb_settle = 16'd20; abb_max_code = 6'd40;
    for (int c = 0; c < N_CORES; c++)
      for (int w = 0; w < 128; w++) shadow[c][w] = '0;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    // cores zero their regions so the shadow copy matches; core c starts at
    // word c, so the 16 writes of one cycle go to 16 different banks
    for (int w = 0; w < 128; w++) begin
      @(negedge clk);
      for (int c = 0; c < N_CORES; c++) core_req[c] = '{req: 1'b1, we: 1'b1, be: 4'hF,
                                                         addr: CORE_REGION + 512 * c + 4 * ((w + c) % 128),
                                                         wdata: '0};
    end
    @(negedge clk);
    core_req = '0;
    @(negedge clk);
    for (int c = 0; c < N_CORES; c++)
      for (int w = 0; w < 128; w++) shadow[c][w] = '0;

    // the throughput-measurement layer: 64 -> 64 channels, 3x3 filter, 3x3 output
    run_layer(0, 4, 4, 4, 1, 1, 2, 2, 1, 1);
    // a 1x1 layer with 8-bit activations (two input-bit tiles) on a 6x3 output
    run_layer(1, 2, 8, 2, 1, 0, 1, 2, 2, 1);

    // the SoC and the DMA share the L2: read while the DMA copies
    fork
      dma(L2_LAYER, 32'h100, 32'h800, 1'b0);
      begin
        logic [63:0] d;
        repeat (8) @(negedge clk);
        for (int k = 0; k < 32; k++) l2_read(L2_LAYER + 8 * k, d);
        n_soc++;
      end
    join

    // SoC port into the TCDM: write and read back one word
    @(negedge clk);
    soc_req = '{req: 1'b1, we: 1'b1, be: 4'hF, addr: 32'h1_F000, wdata: 32'hC0FFEE11};
    @(posedge clk); while (!soc_rsp.gnt) @(posedge clk);
    @(negedge clk);
    soc_req.we = 1'b0;
    @(posedge clk); while (!soc_rsp.gnt) @(posedge clk);
    @(negedge clk);
    soc_req = '0;
    checks++;
    if (soc_rsp.rdata !== 32'hC0FFEE11) begin failures++; $display("FAIL SoC TCDM read %h", soc_rsp.rdata); end
    n_soc++;

    // barrier: cores arrive one by one in random order
    begin
      int order [N_CORES];
      for (int c = 0; c < N_CORES; c++) order[c] = c;
      order.shuffle();
      for (int k = 0; k < N_CORES; k++) begin
        @(negedge clk);
        bar_arrive = '0;
        bar_arrive[order[k]] = 1'b1;
        #1;
        checks++;
        if (bar_release !== (k == N_CORES - 1)) begin failures++; $display("FAIL barrier at arrival %0d", k); end
      end
      @(negedge clk);
      bar_arrive = '0;
    end

    // MAC&LOAD on core 0's slice: load a weight (stalled 3 cycles by the
    // LSU), load an activation, then a plain sum-of-dot-products
    xw = 32'h81_7F_05_FE;   // -127, 127, 5, -2 (bytes 3..0)
    ww = 32'h03_FD_40_C0;   // 3, -3, 64, -64
    acc = 32'd1000;
    macload(5'b10000, acc, 3, ww, acc);           // refresh W0, registers still zero
    macload(5'b01000, acc, 0, xw, acc);           // refresh X0 (reg 4)
    macload(5'b00000, acc, 0, '0, dot4(xw, ww, acc));

    // On-Chip Monitors: one endpoint's delayed copy disagrees once
    repeat (5) @(negedge clk);
    for (int k = 0; k < 20; k++) begin
      @(negedge clk);
      ocm_d = NOCM'($urandom);
      ocm_d_del = ocm_d;
      @(posedge clk); #1;
      checks++;
      if (ocm_q !== ocm_d) begin failures++; $display("FAIL OCM q %h d %h", ocm_q, ocm_d); end
    end
    code_before = abb_code;
    @(negedge clk);
    ocm_d_del[7] = ~ocm_d[7];
    @(negedge clk);
    ocm_d_del = ocm_d;
    repeat (4) @(negedge clk);
    checks++;
    if (abb_code != code_before + 4) begin failures++; $display("FAIL ABB code %0d after pre-error", abb_code); end
    repeat (400) @(negedge clk);
    checks++;
    if (abb_code != 0) begin failures++; $display("FAIL ABB code %0d not relaxed", abb_code); end

    // every mechanism must have occurred
    $display("conflict=%0d core_stall=%0d rbe_stall=%0d mode_switch=%0d rbe_evt=%0d dma_evt=%0d",
             n_conflict, n_core_stall, n_rbe_stall, n_mode_switch, n_rbe_evt, n_dma_evt);
    $display("barrier=%0d wake=%0d ml_stall=%0d raise=%0d relax=%0d core_reads=%0d l2_conflict=%0d soc=%0d",
             n_bar_release, n_wake, n_ml_stall, n_raise, n_relax, n_core_rd, n_l2_conflict, n_soc);
    check_seen("TCDM bank conflict RBE vs LIC", n_conflict);
    check_seen("core stalled by the interconnect", n_core_stall);
    check_seen("RBE stalled by the interconnect", n_rbe_stall);
    check_seen("RBE mode switch", n_mode_switch);
    check_seen("3x3 job", n_jobs_3x3);
    check_seen("1x1 job", n_jobs_1x1);
    check_seen("RBE end-of-job event", n_rbe_evt);
    check_seen("DMA event", n_dma_evt);
    check_seen("barrier release", n_bar_release);
    check_seen("core woken by event", n_wake);
    check_seen("MAC&LOAD stall", n_ml_stall);
    check_seen("ABB raise", n_raise);
    check_seen("ABB relax", n_relax);
    check_seen("core TCDM read", n_core_rd);
    check_seen("L2 port conflict", n_l2_conflict);
    check_seen("SoC access", n_soc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_seen(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
