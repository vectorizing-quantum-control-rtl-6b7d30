// qv_xif: offload interface between the scalar host and the quantum vector core.
//
// The host presents one instruction at a time together with the values of its
// two scalar source registers and an instruction id (issue channel,
// valid/ready). The interface decodes it through qv_decoder and answers in the
// same cycle with issue_accept_o: 1 means the coprocessor takes the instruction,
// 0 means it is not a coprocessor instruction or is illegal under the current
// vector configuration (the host then raises its own exception).
// Accepted vsetvli instructions complete at once and hand their new vl to the
// result path; every other accepted instruction is pushed into the
// instruction queue of the hazard unit. An accepted measurement instruction
// raises meas_issue_o, which starts the halt-resume protocol. While pause_i is
// high (measurement pending) no instruction is accepted, which is how the host
// is held at the measurement boundary.
//
// Follows the paper: offload over a CORE-V-XIF-like interface, issue / result
// channels, halt at measurement commit. This design's choices: the exact
// signal set (no separate commit channel: every accepted instruction counts as
// committed), same-cycle accept, and that issue_ready_o also waits for room in
// the queue and in the vsetvli result slot.
module qv_xif
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  // host issue channel
  input  logic              issue_valid_i,
  output logic              issue_ready_o,
  input  logic [31:0]       issue_instr_i,
  input  logic [XLEN-1:0]   issue_rs1_i,
  input  logic [XLEN-1:0]   issue_rs2_i,
  input  logic [ID_W-1:0]   issue_id_i,
  output logic              issue_accept_o,
  // measurement halt from the synchronizer
  input  logic              pause_i,
  // decoded instruction to the instruction queue
  output logic              q_valid_o,
  input  logic              q_ready_i,
  output vop_t              q_op_o,
  // vsetvli result
  output logic              vs_valid_o,
  input  logic              vs_ready_i,
  output logic [ID_W-1:0]   vs_id_o,
  output logic [XLEN-1:0]   vs_data_o,
  // protocol events
  output logic              meas_issue_o,
  output logic              reject_o,
  // vector configuration (observability)
  output logic [VL_W-1:0]   csr_vl_o,
  output logic [2:0]        csr_vlmul_o,
  output sew_e              csr_sew_o,
  output logic              csr_vill_o
);

  logic is_vec, illegal, fire, commit;
  vop_t op;
  logic [XLEN-1:0] vl_new;

  qv_decoder #(.VLEN(VLEN)) u_dec (
    .clk, .rst_n,
    .instr_i   (issue_instr_i),
    .rs1_i     (issue_rs1_i),
    .rs2_i     (issue_rs2_i),
    .id_i      (issue_id_i),
    .commit_i  (commit),
    .is_vec_o  (is_vec),
    .illegal_o (illegal),
    .op_o      (op),
    .vl_new_o  (vl_new),
    .csr_vl_o, .csr_vlmul_o, .csr_sew_o,
    .csr_vill_o
  );

  assign issue_ready_o  = !pause_i && q_ready_i && vs_ready_i;
  assign fire           = issue_valid_i && issue_ready_o;
  assign issue_accept_o = is_vec && !illegal;
  assign commit         = fire && issue_accept_o;
  assign reject_o       = fire && !issue_accept_o;

  assign q_valid_o    = commit && (op.cls != OP_VSETVLI);
  assign q_op_o       = op;
  assign vs_valid_o   = commit && (op.cls == OP_VSETVLI);
  assign vs_id_o      = issue_id_i;
  assign vs_data_o    = vl_new;
  assign meas_issue_o = commit && op.is_meas;

  // The host must hold an offered instruction stable until it is taken.
  property p_issue_stable;
    @(posedge clk)
      (issue_valid_i && !issue_ready_o) |=> (issue_valid_i && $stable(issue_instr_i) && $stable(issue_id_i));
  endproperty
  a_issue_stable: assert property (p_issue_stable);

endmodule
