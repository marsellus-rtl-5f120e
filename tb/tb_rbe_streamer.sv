// tb_rbe_streamer: random three-dimensional load and store commands against
// a behavioural wide memory that withholds its grant at random, with a
// consumer that is not always ready. Checks the address of every beat (base
// + i0*s0 + i1*s1 + i2*s2, i0 innermost), the loaded data in order, the
// stored data, the word enables, the done pulse, and that with a ready
// consumer and no stalls the unit moves one beat per cycle.
module tb_rbe_streamer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, we, busy, done, rvalid, rready, wvalid, wready;
  logic [31:0] base;
  logic [3:0] nwords;
  logic [2:0][7:0] cnt;
  logic [2:0][31:0] stride;
  logic [8:0][31:0] rdata, wdata, mwdata, mrdata;
  logic mreq, mwe, mgnt, mrvalid;
  logic [31:0] maddr;
  logic [8:0] mwen;
  int stall_pct = 0, ready_pct = 100;

  rbe_streamer dut (.clk_i (clk), .rst_ni (rst_n), .start_i (start), .we_i (we), .base_i (base),
    .nwords_i (nwords), .cnt_i (cnt), .stride_i (stride), .busy_o (busy), .done_o (done),
    .rvalid_o (rvalid), .rdata_o (rdata), .rready_i (rready), .wvalid_i (wvalid), .wdata_i (wdata),
    .wready_o (wready), .req_o (mreq), .we_o (mwe), .addr_o (maddr), .wen_o (mwen), .wdata_o (mwdata),
    .gnt_i (mgnt), .r_valid_i (mrvalid), .r_data_i (mrdata));

  // memory: word at byte address a holds a ^ 32'h5A5A0000 unless written
  logic [31:0] wr_log [$];
  logic [31:0] addr_q [$];
  always_ff @(posedge clk) begin
    mrvalid <= mreq && mgnt && !mwe;
    if (mreq && mgnt) begin
      addr_q.push_back(maddr);
      for (int k = 0; k < 9; k++) mrdata[k] <= (maddr + 4 * k) ^ 32'h5A5A_0000;
      if (mwe)
        for (int k = 0; k < 9; k++) if (mwen[k]) wr_log.push_back(mwdata[k]);
    end
    mgnt <= ($urandom % 100) >= stall_pct;
    rready <= ($urandom % 100) < ready_pct;
  end

  initial begin
    preset();
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int total, got, t0, nw;
      logic [31:0] exp_addr [$];
      stall_pct = (n % 3 == 0) ? 0 : 25;
      ready_pct = (n % 3 == 0) ? 100 : 70;
      @(negedge clk);
      exp_addr.delete();
      we = n % 2; base = 4 * ($urandom % 256); nw = 1 + $urandom % 9; nwords = 4'(nw);
      for (int d = 0; d < 3; d++) begin cnt[d] = 1 + $urandom % 4; stride[d] = 4 * ($urandom % 64); end
      total = cnt[0] * cnt[1] * cnt[2];
      for (int i2 = 0; i2 < cnt[2]; i2++)
        for (int i1 = 0; i1 < cnt[1]; i1++)
          for (int i0 = 0; i0 < cnt[0]; i0++)
            exp_addr.push_back(base + i0 * stride[0] + i1 * stride[1] + i2 * stride[2]);
      addr_q.delete(); wr_log.delete();
      start = 1;
      t0 = $time;
      @(negedge clk);
      start = 0;
      got = 0;
      wvalid = we;
      for (int k = 0; k < 9; k++) wdata[k] = 32'(got * 16 + k);
      while (!done) begin
        @(posedge clk);
        if (rvalid && rready) begin
          for (int k = 0; k < nw; k++) begin
            checks++;
            if (rdata[k] !== ((exp_addr[got] + 4 * k) ^ 32'h5A5A_0000)) begin
              failures++;
              if (failures < 6) $display("FAIL load beat %0d word %0d: %h", got, k, rdata[k]);
            end
          end
          got++;
        end
        if (wvalid && wready) got++;
        #1;
        for (int k = 0; k < 9; k++) wdata[k] = 32'(got * 16 + k);
        if (got == total) wvalid = 0;
      end
      @(posedge clk); #1;
      checks += 3;
      if (got != total || busy) begin failures++; $display("FAIL %0d of %0d beats, busy %b", got, total, busy); end
      if (addr_q.size() != total) begin failures++; $display("FAIL %0d accesses", addr_q.size()); end
      else
        for (int b = 0; b < total; b++) begin
          checks++;
          if (addr_q[b] !== exp_addr[b]) begin failures++; $display("FAIL beat %0d addr %h expected %h", b, addr_q[b], exp_addr[b]); end
        end
      if (we) begin
        if (wr_log.size() != total * nw) begin failures++; $display("FAIL %0d words written", wr_log.size()); end
        else
          for (int b = 0; b < total; b++)
            for (int k = 0; k < nw; k++) begin
              checks++;
              if (wr_log[b * nw + k] !== 32'(b * 16 + k)) failures++;
            end
      end
      if (stall_pct == 0 && total > 8) begin
        checks++;
        if (($time - t0) / 10 > total + 4) begin failures++; $display("FAIL %0d beats in %0d cycles", total, ($time - t0) / 10); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic preset();
    start = 0; we = 0; base = 0; nwords = 0; cnt = '0; stride = '0; wvalid = 0; wdata = '0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
