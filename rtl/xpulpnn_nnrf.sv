// xpulpnn_nnrf: the NN-RF of an Xpulpnn core, a dedicated register file of
// six 32-bit SIMD vector registers used by the MAC&LOAD instructions.
//
// Two combinational read ports feed the two DOTP operands; one write port
// takes the word loaded by the LSU in the WB stage, so a MAC&LOAD can
// refresh one NN-RF register while the DOTP reads two. A write and a read of
// the same register in one cycle return the old value (the new one is seen
// from the next cycle). Register count and ports follow the paper; the
// reset to zero is this design's choice.
module xpulpnn_nnrf #(
  parameter int unsigned NREG = 6
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [$clog2(NREG)-1:0] raddr_a_i,
  input  logic [$clog2(NREG)-1:0] raddr_b_i,
  output logic [31:0]             rdata_a_o,
  output logic [31:0]             rdata_b_o,
  input  logic                    we_i,
  input  logic [$clog2(NREG)-1:0] waddr_i,
  input  logic [31:0]             wdata_i
);
  logic [NREG-1:0][31:0] rf_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rf_q <= '0;
    else if (we_i && 32'(waddr_i) < NREG) rf_q[waddr_i] <= wdata_i;
  end

  assign rdata_a_o = (32'(raddr_a_i) < NREG) ? rf_q[raddr_a_i] : '0;
  assign rdata_b_o = (32'(raddr_b_i) < NREG) ? rf_q[raddr_b_i] : '0;

endmodule
