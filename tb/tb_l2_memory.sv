// tb_l2_memory: both ports of the L2 issue random byte-enabled reads and
// writes over the interleaved and the private section (and a few addresses
// past the end, which read as zero). Each bank serves one port per cycle;
// reads are checked against a shadow copy taken at grant time, and the
// test requires that conflicts happened and that no port waited forever.
module tb_l2_memory;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] req, we, gnt, rvalid;
  logic [1:0][7:0] be;
  logic [1:0][31:0] addr;
  logic [1:0][63:0] wdata, rdata, rexp;
  logic [63:0] shadow [int];
  int n_conflict = 0, max_wait = 0;
  int waitc [2];
  logic run = 0;

  l2_memory dut (.clk_i (clk), .rst_ni (rst_n), .req_i (req), .we_i (we), .be_i (be), .addr_i (addr),
                 .wdata_i (wdata), .gnt_o (gnt), .rvalid_o (rvalid), .rdata_o (rdata));

  function automatic logic [31:0] rand_addr();
    unique case ($urandom % 4)
      0: return 8 * ($urandom % 64);                        // start of the interleaved section
      1: return 32'hF0000 - 8 * (1 + $urandom % 16);        // its end
      2: return 32'hF0000 + 8 * ($urandom % 8192);          // private section, both banks
      default: return (($urandom % 16) == 0) ? 32'h100000 + 8 * ($urandom % 8) : 8 * ($urandom % 16);
    endcase
  endfunction

  always_ff @(posedge clk) if (run) begin
    if (req == 2'b11 && gnt != 2'b11) n_conflict++;
    for (int p = 0; p < 2; p++) begin
      if (rvalid[p]) begin
        checks++;
        if (rdata[p] !== rexp[p]) begin
          failures++;
          if (failures < 6) $display("FAIL port %0d read %h expected %h", p, rdata[p], rexp[p]);
        end
      end
      if (req[p] && gnt[p]) begin
        int unsigned a;
        a = addr[p] >> 3;
        waitc[p] = 0;
        if (we[p]) begin
          if (addr[p] < 32'h100000) begin
            logic [63:0] v;
            v = shadow.exists(a) ? shadow[a] : 64'd0;
            for (int b = 0; b < 8; b++) if (be[p][b]) v[8*b +: 8] = wdata[p][8*b +: 8];
            shadow[a] = v;
          end
        end else rexp[p] <= shadow.exists(a) ? shadow[a] : 64'd0;
      end else if (req[p]) begin
        waitc[p]++;
        if (waitc[p] > max_wait) max_wait = waitc[p];
      end
      if (!req[p] || gnt[p]) begin
        req[p]   <= ($urandom % 4) != 0;
        we[p]    <= $urandom % 2;
        be[p]    <= $urandom;
        addr[p]  <= rand_addr();
        wdata[p] <= {$urandom, $urandom};
      end
    end
  end

  initial begin
    req = '0; we = '0; be = '0; addr = '0; wdata = '0;
    waitc[0] = 0; waitc[1] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // clear the addresses the test touches
    for (int k = 0; k < 64; k++) begin
      @(negedge clk); req = 2'b11; we = 2'b11; be = '1; wdata = '0;
      addr[0] = 8 * k; addr[1] = 32'hF0000 - 8 * (1 + k % 16);
      shadow[k] = '0; shadow[(32'hF0000 >> 3) - 1 - k % 16] = '0;
    end
    for (int k = 0; k < 8192; k++) begin
      @(negedge clk); req = 2'b01; we = 2'b01; addr[0] = 32'hF0000 + 8 * k;
      shadow[(32'hF0000 >> 3) + k] = '0;
    end
    @(negedge clk); req = '0;
    run = 1;
    repeat (20000) @(negedge clk);
    run = 0;
    $display("conflicts %0d, longest wait %0d", n_conflict, max_wait);
    checks += 2;
    if (n_conflict == 0) begin failures++; $display("FAIL no conflicts"); end
    if (max_wait > 1) begin failures++; $display("FAIL a port waited %0d cycles", max_wait); end
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
