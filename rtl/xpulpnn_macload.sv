// xpulpnn_macload: execution slice of the Xpulpnn MAC&LOAD instruction
// (pv.mlsdot{u,us,s}p.{h,b,n,c} rD, rs1, Imm).
//
// One MAC&LOAD does three things at once:
//   * a sum-of-dot-product whose two vector operands come from the NN-RF
//     (xpulpnn_nnrf), accumulated into rD of the general-purpose register
//     file (acc_i in, acc_o out, written in EX);
//   * optionally, a load from the address in rs1 (ptr_i) whose data, back
//     in WB, is written straight into one NN-RF register (refresh);
//   * with the load, the pointer is incremented by one word (ptr_o = rs1+4,
//     written back to the GP-RF in EX).
// The 5-bit immediate addresses the NN-RF. The NN-RF holds 4 weight
// registers (indices 0..3) and 2 activation registers (4..5); the DOTP
// computes activation (operand a, first) times weight (operand b, second),
// so the "us" form means unsigned activations and signed weights. The
// immediate is decoded as
//   Imm[0]   activation register (0..1)
//   Imm[2:1] weight register (0..3)
//   Imm[3]   refresh the addressed activation register with the load
//   Imm[4]   refresh the addressed weight register with the load
// This decoding is inferred from the immediates printed in the paper's
// MatMul listing (loads 16/18/20/22 into the four weight registers, 8/9 into
// the two activation registers; 0, 2, 4 without and 19, 21, 23 with a
// weight refresh); the paper itself only says that one of the two MSBs
// selects the refresh. Only one register can be refreshed per instruction
// (one LSU port); if both MSBs are set the weight register wins.
// The refresh is one outstanding load: a new MAC&LOAD with refresh issues
// only when the previous data has arrived (stall_o otherwise).
// The DOTP in the same cycle reads the old value of a register being
// refreshed.
module xpulpnn_macload
  import marsellus_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // decoded instruction (ID/EX)
  input  logic        valid_i,
  input  simd_fmt_e   fmt_i,
  input  simd_sign_e  sign_i,
  input  logic [4:0]  imm_i,
  input  logic [31:0] ptr_i,      // rs1
  input  logic [31:0] acc_i,      // rD
  output logic        stall_o,
  // GP-RF write-back
  output logic        acc_we_o,
  output logic [31:0] acc_o,
  output logic        ptr_we_o,
  output logic [31:0] ptr_o,
  // LSU
  output logic        lsu_req_o,
  output logic [31:0] lsu_addr_o,
  input  logic        lsu_gnt_i,
  input  logic        lsu_rvalid_i,
  input  logic [31:0] lsu_rdata_i,
  // NN-RF preload through the LSU path (pv.ml_load without a MAC)
  input  logic        preload_i
);
  logic [2:0]  ra_x, ra_w, tgt, tgt_q;
  logic        refresh, pending_q, issue;
  logic [31:0] x_op, w_op;

  assign ra_x    = 3'd4 + {2'b00, imm_i[0]};
  assign ra_w    = {1'b0, imm_i[2:1]};
  assign refresh = imm_i[4] | imm_i[3];
  assign tgt     = imm_i[4] ? ra_w : ra_x;

  assign stall_o   = valid_i && refresh && (pending_q || !lsu_gnt_i);
  assign issue     = valid_i && !stall_o;

  assign lsu_req_o  = valid_i && refresh && !pending_q;
  assign lsu_addr_o = ptr_i;
  assign ptr_we_o   = issue && refresh;
  assign ptr_o      = ptr_i + 32'd4;
  assign acc_we_o   = issue && !preload_i;

  xpulpnn_nnrf #(.NREG(6)) i_nnrf (
    .clk_i, .rst_ni,
    .raddr_a_i (ra_x),
    .raddr_b_i (ra_w),
    .rdata_a_o (x_op),
    .rdata_b_o (w_op),
    .we_i      (lsu_rvalid_i && pending_q),
    .waddr_i   (tgt_q),
    .wdata_i   (lsu_rdata_i)
  );

  xpulpnn_dotp i_dotp (
    .op_a_i  (x_op),
    .op_b_i  (w_op),
    .acc_i,
    .fmt_i,
    .sign_i,
    .vs_i    (1'b0),
    .sdotp_i (1'b1),
    .res_o   (acc_o)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q <= 1'b0;
      tgt_q     <= '0;
    end else begin
      if (issue && refresh) begin
        pending_q <= 1'b1;
        tgt_q     <= tgt;
      end else if (lsu_rvalid_i) begin
        pending_q <= 1'b0;
      end
    end
  end

endmodule
