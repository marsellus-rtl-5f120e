// tb_cluster_dma: transfers of random lengths L2 -> TCDM and TCDM -> L2
// with behavioural memories that stall the engine at random on both sides.
// Every word that lands is checked, nothing outside the target range may
// be written, one event must come per transfer, and without stalls a long
// transfer must move one 64-bit beat per cycle.
module tb_cluster_dma;
  import marsellus_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  periph_req_t preq;
  periph_rsp_t prsp;
  logic evt, busy;
  tcdm_req_t [3:0] treq;
  tcdm_rsp_t [3:0] trsp;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;
  int stall_pct = 0, n_evt = 0;

  cluster_dma dut (.clk_i (clk), .rst_ni (rst_n), .preq_i (preq), .prsp_o (prsp), .evt_o (evt), .busy_o (busy),
    .treq_o (treq), .trsp_i (trsp), .ext_req_o (ext_req), .ext_we_o (ext_we), .ext_addr_o (ext_addr),
    .ext_wdata_o (ext_wdata), .ext_gnt_i (ext_gnt), .ext_rvalid_i (ext_rvalid), .ext_rdata_i (ext_rdata));

  logic [63:0] l2 [int];    // 8-byte words
  logic [31:0] l1 [int];    // 4-byte words
  logic [3:0] tgnt;

  always_comb begin
    for (int p = 0; p < 4; p++) trsp[p].gnt = treq[p].req && tgnt[p];
    ext_gnt = ext_req && tgnt[0];
  end

  always_ff @(posedge clk) begin
    if (evt) n_evt++;
    tgnt <= {($urandom % 100) >= stall_pct, ($urandom % 100) >= stall_pct,
             ($urandom % 100) >= stall_pct, ($urandom % 100) >= stall_pct};
    for (int p = 0; p < 4; p++) begin
      trsp[p].rvalid <= treq[p].req && trsp[p].gnt && !treq[p].we;
      if (treq[p].req && trsp[p].gnt) begin
        if (treq[p].we) l1[treq[p].addr >> 2] = treq[p].wdata;
        else trsp[p].rdata <= l1.exists(treq[p].addr >> 2) ? l1[treq[p].addr >> 2] : 32'hBAD0_BAD0;
      end
    end
    ext_rvalid <= ext_req && ext_gnt && !ext_we;
    if (ext_req && ext_gnt) begin
      if (ext_we) l2[ext_addr >> 3] = ext_wdata;
      else ext_rdata <= l2.exists(ext_addr >> 3) ? l2[ext_addr >> 3] : 64'hBAD;
    end
  end

  task automatic pw(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); preq = '{req: 1'b1, we: 1'b1, addr: a, wdata: d};
    @(negedge clk); preq = '0;
  endtask

  task automatic xfer(input logic [31:0] ext, loc, len, input logic dir, output int cycles);
    int n0, t0;
    n0 = n_evt;
    pw(8'h00, ext); pw(8'h04, loc); pw(8'h08, len);
    t0 = $time;
    pw(8'h0C, {31'd0, dir});
    wait (n_evt == n0 + 1);
    cycles = ($time - t0) / 10;
    repeat (3) @(negedge clk);
    checks++;
    if (n_evt != n0 + 1 || busy) begin failures++; $display("FAIL events %0d busy %b", n_evt - n0, busy); end
  endtask

  initial begin
    int cyc;
    preq = '0; trsp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      logic [31:0] ext, loc, len;
      logic dir;
      stall_pct = (n % 4) * 15;
      ext = 8 * ($urandom % 1000); loc = 8 * ($urandom % 1000); len = 8 * (1 + $urandom % 200);
      dir = n % 2;
      l1.delete(); l2.delete();
      for (int k = -2; k < int'(len / 8) + 2; k++) begin
        l2[(ext >> 3) + k] = {$urandom, $urandom};
        l1[(loc >> 2) + 2 * k] = $urandom;
        l1[(loc >> 2) + 2 * k + 1] = $urandom;
      end
      begin
        logic [63:0] l2c [int];
        logic [31:0] l1c [int];
        l2c = l2; l1c = l1;
        xfer(ext, loc, len, dir, cyc);
        for (int k = -2; k < int'(len / 8) + 2; k++) begin
          logic [63:0] src, dst, expv;
          bit inside_r;
          inside_r = k >= 0 && k < int'(len / 8);
          if (!dir) begin
            dst = {l1[(loc >> 2) + 2 * k + 1], l1[(loc >> 2) + 2 * k]};
            expv = inside_r ? l2c[(ext >> 3) + k] : {l1c[(loc >> 2) + 2 * k + 1], l1c[(loc >> 2) + 2 * k]};
          end else begin
            dst = l2[(ext >> 3) + k];
            expv = inside_r ? {l1c[(loc >> 2) + 2 * k + 1], l1c[(loc >> 2) + 2 * k]} : l2c[(ext >> 3) + k];
          end
          checks++;
          if (dst !== expv) begin
            failures++;
            if (failures < 6) $display("FAIL dir %0d len %0d beat %0d: %h expected %h", dir, len, k, dst, expv);
          end
        end
        if (stall_pct == 0 && len >= 400) begin
          checks++;
          if (cyc > int'(len / 8) + 8) begin failures++; $display("FAIL %0d beats took %0d cycles", len / 8, cyc); end
        end
      end
    end
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
