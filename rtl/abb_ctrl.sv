// abb_ctrl: the hardware control loop of the Adaptive Body Biasing
// generator.
//
// It collects the pre-error flags of all On-Chip Monitors (OR). When it is
// enabled and a pre-error is seen, it raises the forward-body-bias code by
// STEP_UP (saturating at max_code_i) and then lets the well drivers settle
// for settle_i cycles, during which further pre-errors are counted but do
// not raise the code again (on silicon a transition takes about 0.66 us,
// ~310 cycles at 470 MHz). When no pre-error has been seen for window_i
// cycles, the code is lowered by one step, progressively relaxing the bias
// to save power. The code drives the P-well and N-well drivers, which
// generate symmetric well voltages from it.
//
// The paper gives the loop's behaviour (raise FBB on pre-error, relax it
// after a window without pre-errors, configurable); code width, step sizes,
// settling time and the window counter are this design's choices. With
// enable_i low the code stays where it is and pre-errors are only counted.
module abb_ctrl #(
  parameter int unsigned NPE     = 16,  // pre-error inputs
  parameter int unsigned CODE_W  = 6,   // body-bias code width
  parameter int unsigned STEP_UP = 4
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              enable_i,
  input  logic [NPE-1:0]    pre_error_i,
  input  logic [15:0]       window_i,    // cycles without pre-error before relaxing
  input  logic [15:0]       settle_i,    // cycles to wait after a raise
  input  logic [CODE_W-1:0] max_code_i,
  output logic [CODE_W-1:0] code_o,
  output logic              raise_o,     // one-cycle pulse per raise
  output logic              relax_o,     // one-cycle pulse per relax step
  output logic [15:0]       pe_count_o   // pre-error cycles seen (saturating)
);
  logic              pe_q;
  logic [15:0]       quiet_q, settle_q;
  logic [CODE_W-1:0] code_q;

  // register the OR of all flags: they come from all over the die
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) pe_q <= 1'b0;
    else         pe_q <= |pre_error_i;
  end

  assign raise_o = enable_i && pe_q && (settle_q == '0) && (code_q < max_code_i);
  assign relax_o = enable_i && !pe_q && (settle_q == '0) && (quiet_q >= window_i) && (code_q != '0);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      code_q     <= '0;
      quiet_q    <= '0;
      settle_q   <= '0;
      pe_count_o <= '0;
    end else begin
      if (pe_q && pe_count_o != '1) pe_count_o <= pe_count_o + 16'd1;
      if (settle_q != '0) settle_q <= settle_q - 16'd1;
      if (pe_q) quiet_q <= '0;
      else if (relax_o) quiet_q <= '0;
      else if (quiet_q != '1) quiet_q <= quiet_q + 16'd1;
      if (raise_o) begin
        code_q   <= (32'(code_q) + STEP_UP > 32'(max_code_i)) ? max_code_i : code_q + CODE_W'(STEP_UP);
        settle_q <= settle_i;
      end else if (relax_o) begin
        code_q <= code_q - CODE_W'(1);
      end
    end
  end

  assign code_o = code_q;

endmodule
