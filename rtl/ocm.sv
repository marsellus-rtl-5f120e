// ocm: On-Chip Monitor for one timing-critical register endpoint.
//
// The functional flip-flop samples D; a shadow flip-flop samples a delayed
// copy of D (d_del_i, produced by the delay cell in front of it); the XOR
// of the two outputs is the pre-error flag. If D settles late in the cycle
// (undervolting, overclocking) the delayed copy misses the edge while the
// functional flop still catches it, so Q and Q_del differ and pre-error
// rises one cycle before a real setup violation would occur. The structure
// (flop, delayed shadow flop, XOR) is the one drawn in the paper's OCM
// figure. The delay element itself is an analog/timing cell and has no
// logic function: it is outside this module, d_del_i is its output.
// The asynchronous active-low reset is this design's addition.
module ocm #(
  parameter int unsigned W = 1   // bits monitored by this OCM
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  input  logic [W-1:0] d_i,
  input  logic [W-1:0] d_del_i,
  output logic [W-1:0] q_o,
  output logic         pre_error_o
);
  logic [W-1:0] q_del;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      q_o   <= '0;
      q_del <= '0;
    end else begin
      q_o   <= d_i;
      q_del <= d_del_i;
    end
  end

  assign pre_error_o = |(q_o ^ q_del);

endmodule
