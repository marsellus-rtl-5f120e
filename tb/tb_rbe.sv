// tb_rbe: end-to-end test of the RBE accelerator against a behavioural
// TCDM with occasional grant stalls.
//
// Runs several layers (3x3 and 1x1, different W/I/O, several k_in/k_out and
// spatial tiles, I > 4 split into two input-bit tiles), compares every
// output with a plain integer convolution (tb_rbe_pkg), checks the number of
// COMPUTE beats (32*W per LOAD/COMPUTE iteration in 3x3 mode, 32 in 1x1
// mode) and, without stalls, that a COMPUTE phase lasts no more than its
// beats plus 3 cycles. Finally it queues two jobs back to back and checks
// the STATUS register and the two end-of-job events.
module tb_rbe;
  import marsellus_pkg::*;
  import tb_rbe_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  periph_req_t preq;
  periph_rsp_t prsp;
  logic evt, busy;
  logic req, we, gnt, rvalid;
  logic [31:0] addr;
  logic [8:0] wen;
  logic [8:0][31:0] wdata, rdata;
  int stall_pct = 0;

  rbe dut (
    .clk_i (clk), .rst_ni (rst_n), .preq_i (preq), .prsp_o (prsp), .evt_o (evt), .busy_o (busy),
    .tcdm_req_o (req), .tcdm_we_o (we), .tcdm_addr_o (addr), .tcdm_wen_o (wen),
    .tcdm_wdata_o (wdata), .tcdm_gnt_i (gnt), .tcdm_rvalid_i (rvalid), .tcdm_rdata_i (rdata)
  );

  // behavioural TCDM: grant with probability (100 - stall_pct) %
  always_ff @(posedge clk) begin
    rvalid <= 1'b0;
    if (req && gnt) begin
      for (int k = 0; k < 9; k++) begin
        int unsigned a;
        a = addr + 4 * k;
        if (wen[k]) begin
          if (we) mem[a] = wdata[k];
          else    rdata[k] <= mem.exists(a) ? mem[a] : 32'd0;
        end else if (!we) rdata[k] <= 32'hDEAD_BEEF;
      end
      rvalid <= !we;
    end
    gnt <= ($urandom % 100) >= stall_pct;
  end

  task automatic pwrite(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk);
    preq = '0;
  endtask

  task automatic pread(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    preq = '{req: 1'b1, we: 1'b0, addr: a, wdata: '0};
    @(negedge clk);
    preq = '0;
    d = prsp.rdata;
  endtask

  task automatic program_job();
    pwrite(RBE_REG_CFG, cfg_word());
    pwrite(RBE_REG_TILES, tiles_word());
    pwrite(RBE_REG_XBASE, x_base);
    pwrite(RBE_REG_XROW, x_row_stride());
    pwrite(RBE_REG_XPIX, x_pix_stride());
    pwrite(RBE_REG_WBASE, w_base);
    pwrite(RBE_REG_NQBASE, nq_base);
    pwrite(RBE_REG_YBASE, y_base);
    pwrite(RBE_REG_YROW, y_row_stride());
    pwrite(RBE_REG_YPIX, y_pix_stride());
  endtask

  int beats, comp_cycles, comp_phases, events;
  always_ff @(posedge clk) begin
    if (dut.dp_valid) beats <= beats + 1;
    if (dut.i_ctrl.state_q == dut.i_ctrl.S_COMP) comp_cycles <= comp_cycles + 1;
    if (dut.i_ctrl.state_q == dut.i_ctrl.S_COMP_ST && dut.i_ctrl.state_d == dut.i_ctrl.S_COMP)
      comp_phases <= comp_phases + 1;
    if (evt) events <= events + 1;
  end

  task automatic run_layer(input int unsigned m, w_, i_, o_, s_, r_, nko, nki, nh_, nw_, stall);
    int unsigned nit, exp_beats, bad, mean;
    // pick S so that typical results land inside the O-bit range; the
    // value passed in is added as an offset
    mean = 32 * nki * (m == 0 ? 9 : 1) * ((1 << i_) - 1) * ((1 << w_) - 1);
    setup(m, w_, i_, o_, $clog2(mean) - o_ + s_, r_, nko, nki, nh_, nw_, 32'h100);
    gen();
    pack();
    stall_pct = stall;
    program_job();
    beats = 0; comp_cycles = 0; comp_phases = 0; events = 0;
    pwrite(RBE_REG_TRIGGER, 0);
    wait (events == 1);
    @(negedge clk);
    nit = (i_ > 4) ? 2 : 1;
    exp_beats = nko * nh_ * nw_ * nki * nit * 32 * (m == 0 ? w_ : 1);
    checks++;
    if (beats != exp_beats) begin
      failures++;
      $display("FAIL beats %0d expected %0d", beats, exp_beats);
    end
    if (stall == 0) begin
      checks++;
      if (comp_cycles > beats + 3 * comp_phases) begin
        failures++;
        $display("FAIL compute cycles %0d for %0d beats in %0d phases", comp_cycles, beats, comp_phases);
      end
    end
    bad = 0;
    for (int unsigned ho = 0; ho < hout; ho++)
      for (int unsigned wo = 0; wo < wout; wo++)
        for (int unsigned ko = 0; ko < kout; ko++) begin
          checks++;
          if (unpack_y(ho, wo, ko) != expected(ho, wo, ko)) begin
            failures++;
            if (bad++ < 5) $display("FAIL mode %0d W%0d I%0d O%0d y[%0d][%0d][%0d] = %0d expected %0d (acc %0d)",
                                     m, w_, i_, o_, ho, wo, ko, unpack_y(ho, wo, ko), expected(ho, wo, ko), acc_ref(ho, wo, ko));
          end
        end
    $display("layer mode=%0d W=%0d I=%0d O=%0d: %0d beats in %0d compute cycles", m, w_, i_, o_, beats, comp_cycles);
  endtask

  initial begin
    logic [31:0] st;
    preq = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    //        mode W  I  O  dS relu nko nki nh nw stall%
    run_layer(0,   2, 4, 4, 1, 1,   1,  1,  1, 1, 0);
    run_layer(0,   8, 8, 8, 2, 0,   1,  2,  1, 1, 20);
    run_layer(0,   3, 5, 2, 1, 1,   2,  1,  1, 2, 0);
    run_layer(1,   8, 4, 8, 1, 1,   1,  2,  1, 1, 0);
    run_layer(1,   5, 7, 3, 2, 0,   2,  1,  2, 1, 30);
    // two jobs queued back to back
    setup(0, 2, 2, 2, 9, 1, 1, 1, 1, 1, 32'h100);
    gen(); pack(); stall_pct = 0;
    program_job();
    events = 0;
    pwrite(RBE_REG_TRIGGER, 0);
    pwrite(RBE_REG_TRIGGER, 0);
    pwrite(RBE_REG_TRIGGER, 0);   // third one: both contexts busy, dropped
    pread(RBE_REG_STATUS, st);
    checks++;
    if (st[2] !== 1'b1 || st[1:0] == 2'd0) begin failures++; $display("FAIL status %h", st); end
    wait (events == 2);
    repeat (20) @(negedge clk);
    checks++;
    if (events != 2 || busy) begin failures++; $display("FAIL events %0d busy %0d", events, busy); end
    for (int unsigned ko = 0; ko < kout; ko++) begin
      checks++;
      if (unpack_y(1, 1, ko) != expected(1, 1, ko)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
