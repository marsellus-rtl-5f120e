// tb_event_unit: barriers with random arrival orders and random masks,
// buffered RBE/DMA/barrier events, per-core clearing, sleep while waiting
// with no enabled event, and the register interface.
module tb_event_unit;
  import marsellus_pkg::*;
  localparam int NC = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  periph_req_t preq;
  periph_rsp_t prsp;
  logic [NC-1:0] arrive, cwait, sleep;
  logic rbe_evt, dma_evt, release_o;
  logic [NC-1:0][2:0] clr, evbuf;

  event_unit #(.NC(NC)) dut (.clk_i (clk), .rst_ni (rst_n), .preq_i (preq), .prsp_o (prsp),
    .bar_arrive_i (arrive), .rbe_evt_i (rbe_evt), .dma_evt_i (dma_evt), .evt_clr_i (clr),
    .core_wait_i (cwait), .evt_buf_o (evbuf), .core_sleep_o (sleep), .bar_release_o (release_o));

  task automatic check(input logic cond, input string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 8) $display("FAIL %s", msg); end
  endtask

  task automatic pw(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); preq = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk); preq = '0;
  endtask

  initial begin
    logic [NC-1:0] mask;
    preq = '0; arrive = '0; cwait = '0; rbe_evt = 0; dma_evt = 0; clr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 60; round++) begin
      int order [NC];
      int last;
      mask = (round % 3 == 0) ? '1 : NC'($urandom) | 16'h1;
      pw(8'h00, 32'(mask));
      @(negedge clk); preq = '{req: 1'b1, we: 1'b0, addr: 8'h00, wdata: '0};
      @(negedge clk); preq = '0;
      check(prsp.rvalid && prsp.rdata == 32'(mask), "mask read back");
      for (int c = 0; c < NC; c++) order[c] = c;
      order.shuffle();
      last = -1;
      for (int k = 0; k < NC; k++) if (mask[order[k]]) last = k;
      clr = '1; @(negedge clk); clr = '0;
      for (int k = 0; k < NC; k++) begin
        arrive = '0;
        arrive[order[k]] = 1'b1;
        cwait = '0;
        #1;
        check(release_o === (k == last), $sformatf("release at arrival %0d of round %0d", k, round));
        @(negedge clk);
        arrive = '0;
        if (k == last) begin
          for (int c = 0; c < NC; c++) check(evbuf[c][0] == mask[c], "barrier event buffered on masked cores");
          break;
        end
      end
      // cores outside the mask that arrived stay arrived; clean up for next round
      if (mask != '1) begin
        pw(8'h00, 32'hFFFF);
        for (int c = 0; c < NC; c++) if (!mask[c]) begin arrive[c] = 1'b1; end
        @(negedge clk); arrive = '0;
        for (int c = 0; c < NC; c++) arrive[c] = 1'b1;
        @(negedge clk); arrive = '0;
      end
      repeat (2) @(negedge clk);
    end
    // events and sleep
    clr = '1; @(negedge clk); clr = '0;
    pw(8'h04, 32'b010);           // wake only on the RBE event
    cwait = '1;
    #1 check(sleep == '1, "all asleep");
    @(negedge clk); dma_evt = 1; @(negedge clk); dma_evt = 0;
    #1 check(sleep == '1, "DMA event masked");
    for (int c = 0; c < NC; c++) check(evbuf[c][2] == 1'b1, "DMA event buffered");
    @(negedge clk); rbe_evt = 1; @(negedge clk); rbe_evt = 0;
    #1 check(sleep == '0, "woken by RBE event");
    clr[3] = 3'b010; @(negedge clk); clr = '0;
    #1 check(sleep[3] == 1'b1 && sleep[4] == 1'b0, "clear of one core");
    check(evbuf[3] == 3'b100 && evbuf[4] == 3'b110, "buffers after clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
