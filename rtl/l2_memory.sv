// l2_memory: the SoC L2 scratchpad.
//
// Two sections, as on the chip: a word-interleaved section of 960 KiB in
// four banks (64-bit word w lives in bank w mod 4) and a private section of
// 64 KiB in two banks placed one after the other (bank-interleaved). The
// word is 64 bit, the width of the SoC crossbar. Address map (byte
// addresses, chosen here): interleaved section at [0, 0xF0000), private
// section at [0xF0000, 0x100000); other addresses read as zero and ignore
// writes.
//
// Two 64-bit ports: port 0 for the SoC side (the fabric controller core and
// the I/O DMA behind the SoC crossbar) and port 1 for the cluster DMA.
// Each bank serves one port per cycle; when both want the same bank the
// priority alternates (round-robin). A granted read returns its data one
// cycle later with rvalid. Byte enables are per 8-bit lane.
module l2_memory #(
  parameter int unsigned IL_WORDS = 30720,  // 64-bit words per interleaved bank (240 KiB)
  parameter int unsigned PR_WORDS = 4096    // 64-bit words per private bank (32 KiB)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [1:0]       req_i,
  input  logic [1:0]       we_i,
  input  logic [1:0][7:0]  be_i,
  input  logic [1:0][31:0] addr_i,
  input  logic [1:0][63:0] wdata_i,
  output logic [1:0]       gnt_o,
  output logic [1:0]       rvalid_o,
  output logic [1:0][63:0] rdata_o
);
  localparam int unsigned NB = 6;  // 4 interleaved + 2 private
  localparam logic [31:0] IL_BYTES = 32'(IL_WORDS) * 8 * 4;
  localparam logic [31:0] PR_BYTES = 32'(PR_WORDS) * 8;

  logic [1:0][2:0]  bank;
  logic [1:0][31:0] row;
  logic [1:0]       valid_addr;
  logic [NB-1:0]    prio_q;   // which port wins a conflict
  logic [1:0]       rvalid_q;
  logic [1:0][63:0] rdata_q;

  always_comb begin
    for (int unsigned p = 0; p < 2; p++) begin
      automatic logic [31:0] w = addr_i[p] >> 3;
      if (addr_i[p] < IL_BYTES) begin
        bank[p] = 3'(w[1:0]);
        row[p]  = w >> 2;
        valid_addr[p] = 1'b1;
      end else if (addr_i[p] < IL_BYTES + 2 * PR_BYTES) begin
        automatic logic [31:0] o = (addr_i[p] - IL_BYTES) >> 3;
        bank[p] = (o >= 32'(PR_WORDS)) ? 3'd5 : 3'd4;
        row[p]  = (o >= 32'(PR_WORDS)) ? o - 32'(PR_WORDS) : o;
        valid_addr[p] = 1'b1;
      end else begin
        bank[p] = 3'd0;
        row[p]  = '0;
        valid_addr[p] = 1'b0;
      end
    end
    gnt_o[0] = req_i[0] && !(req_i[1] && bank[1] == bank[0] && prio_q[bank[0]]);
    gnt_o[1] = req_i[1] && !(req_i[0] && bank[1] == bank[0] && !prio_q[bank[1]]);
  end

  // One single-port array per bank. The arbitration above lets at most one
  // port use a bank in a cycle, so the bank's address, write enable and data
  // are taken from the port that was granted it.
  logic [NB-1:0][63:0] bank_rdata;
  logic [1:0][2:0]     rbank_q;
  logic [1:0]          rok_q;

  for (genvar k = 0; k < NB; k++) begin : g_bank
    localparam int unsigned DEPTH = (k < 4) ? IL_WORDS : PR_WORDS;
    logic                       en, p1, we;
    logic [7:0]                 be;
    logic [$clog2(DEPTH)-1:0]   a;
    logic [63:0]                wd;
    logic [63:0]                mem [DEPTH];

    assign p1 = gnt_o[1] && valid_addr[1] && bank[1] == 3'(k);
    assign en = p1 || (gnt_o[0] && valid_addr[0] && bank[0] == 3'(k));
    assign we = p1 ? we_i[1] : we_i[0];
    assign be = p1 ? be_i[1] : be_i[0];
    assign a  = p1 ? row[1][$clog2(DEPTH)-1:0] : row[0][$clog2(DEPTH)-1:0];
    assign wd = p1 ? wdata_i[1] : wdata_i[0];

    always_ff @(posedge clk_i) begin
      if (en) begin
        if (we) begin
          for (int unsigned b = 0; b < 8; b++)
            if (be[b]) mem[a][8*b +: 8] <= wd[8*b +: 8];
        end else begin
          bank_rdata[k] <= mem[a];
        end
      end
    end
  end

  always_ff @(posedge clk_i) begin
    for (int unsigned p = 0; p < 2; p++)
      if (gnt_o[p]) begin
        rbank_q[p] <= bank[p];
        rok_q[p]   <= valid_addr[p];
      end
  end

  always_comb begin
    for (int unsigned p = 0; p < 2; p++)
      rdata_q[p] = rok_q[p] ? bank_rdata[rbank_q[p]] : 64'd0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q   <= '0;
      rvalid_q <= '0;
    end else begin
      for (int unsigned p = 0; p < 2; p++) rvalid_q[p] <= gnt_o[p] && !we_i[p];
      if (req_i[0] && req_i[1] && bank[0] == bank[1]) prio_q[bank[0]] <= gnt_o[0];
    end
  end

  assign rvalid_o = rvalid_q;
  assign rdata_o  = rdata_q;

endmodule
