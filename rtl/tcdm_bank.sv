// tcdm_bank: one bank of the cluster's L1 Tightly Coupled Data Memory.
//
// A single-port SRAM of WORDS x 32 bit with byte enables and one cycle of
// read latency: a request accepted on a rising edge returns its read data
// right after the next rising edge ("0-wait-state" from the point of view
// of the interconnect, which always grants in the request cycle). The
// cluster uses 32 of these, word-interleaved, for 128 KiB. The SRAM macro
// of the chip is written here as an array; its contents are not reset.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024   // 4 KiB per bank, 32 banks = 128 KiB
) (
  input  logic                      clk_i,
  input  logic                      req_i,
  input  logic                      we_i,
  input  logic [3:0]                be_i,
  input  logic [$clog2(WORDS)-1:0]  addr_i,
  input  logic [31:0]               wdata_i,
  output logic [31:0]               rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int unsigned b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
