// qv_hazard: instruction queue and hazard-aware issue ("Hazard Control").
//
// Decoded vector and quantum instructions wait in an in-order queue of QDEPTH
// entries. The head is dispatched to one of two pipelines: vector loads to the
// load/store unit, quantum instructions to the operand-unpack pipeline. The two
// pipelines run concurrently, so a scoreboard guards the vector registers:
//   * read-after-write: a quantum instruction whose index (vs1) or paired /
//     angle (vs2) register group overlaps a group that an in-flight load is
//     still writing waits (raw_stall_o pulses for every such cycle);
//   * write-after-read: a load whose destination group overlaps the groups the
//     quantum pipeline is still reading waits (war_stall_o).
// The register-group size is ceil(vl * element_bytes / (VLEN/8)), at least one
// register; for QV.ROT.V the vs2 group holds 32-bit angles, which is the
// "LMUL_vs2 = 4 x LMUL_vs1" rule. A quantum instruction with vl = 0 does
// nothing and is completed directly (nop_valid_o).
//
// Follows the paper: a queue, dispatch "when the required execution resources
// and register-file dependencies permit", dual pipelines. This design's
// choices: QDEPTH = 4, whole-group scoreboard granularity, strict in-order
// dispatch. Timing: push and pop are registered; dispatch is combinational from
// the queue head (one instruction per cycle at most).
module qv_hazard
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN   = 128,
  parameter int unsigned QDEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the offload interface
  input  logic        push_valid_i,
  output logic        push_ready_o,
  input  vop_t        push_op_i,
  // to the load/store unit
  output logic        lsu_valid_o,
  input  logic        lsu_ready_i,
  input  logic        lsu_done_i,     // the dispatched load has written all its registers
  // to the quantum pipeline
  output logic        q_valid_o,
  input  logic        q_ready_i,
  input  logic        q_idle_i,       // quantum pipeline has stopped reading registers
  output vop_t        disp_op_o,
  // zero-length quantum instruction completed here
  output logic        nop_valid_o,
  input  logic        nop_ready_i,
  output logic [ID_W-1:0] nop_id_o,
  // observability
  output logic        raw_stall_o,
  output logic        war_stall_o,
  output logic        empty_o
);

  localparam int unsigned PW    = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam int unsigned VLENB = VLEN / 8;

  vop_t           mem_q [QDEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [PW:0]    count;
  logic           pop;

  // Mask of the NVREG registers covered by a group.
  function automatic logic [NVREG-1:0] group_mask(input logic [4:0] base, input logic [VL_W-1:0] vl,
                                                  input int unsigned eb);
    int unsigned bytes, nregs;
    logic [2*NVREG-1:0] m;
    bytes = int'(vl) * eb;
    nregs = (bytes + VLENB - 1) / VLENB;
    if (nregs == 0) nregs = 1;
    if (nregs > 8)  nregs = 8;
    m = ((2*NVREG)'(1) << nregs) - 1;
    m = m << base;
    return m[NVREG-1:0];
  endfunction

  function automatic int unsigned sew_bytes(input sew_e s);
    return 1 << s;
  endfunction

  vop_t             head;
  logic             head_valid;
  logic [NVREG-1:0] pend_wr, lsu_mask_q, qrd_mask_q, head_rd, head_wr;
  logic             lsu_busy;

  assign head       = mem_q[rd_ptr];
  assign head_valid = (count != 0);
  assign empty_o    = (count == 0);
  assign push_ready_o = (count < (PW+1)'(QDEPTH));

  always_comb begin
    head_rd = group_mask(head.vs1, head.vl, sew_bytes(head.sew));
    if (head.cls == OP_QPAIR) head_rd |= group_mask(head.vs2, head.vl, sew_bytes(head.sew));
    if (head.cls == OP_QROTV) head_rd |= group_mask(head.vs2, head.vl, 4);
    head_wr = group_mask(head.vd, head.vl, sew_bytes(head.sew));
  end

  logic head_is_q, head_is_ld, q_zero, raw_hit, war_hit;
  assign head_is_ld = head_valid && (head.cls == OP_VLOAD);
  assign head_is_q  = head_valid && (head.cls inside {OP_QSINGLE, OP_QPAIR, OP_QROTG, OP_QROTV});
  assign q_zero     = (head.vl == '0);
  assign pend_wr    = lsu_busy ? lsu_mask_q : '0;
  assign raw_hit    = |(head_rd & pend_wr);
  assign war_hit    = !q_idle_i && |(head_wr & qrd_mask_q);

  assign lsu_valid_o = head_is_ld && !lsu_busy && !war_hit;
  assign q_valid_o   = head_is_q && !q_zero && !raw_hit;
  assign nop_valid_o = head_is_q && q_zero;
  assign nop_id_o    = head.id;
  assign disp_op_o   = head;

  assign pop = (lsu_valid_o && lsu_ready_i) || (q_valid_o && q_ready_i) || (nop_valid_o && nop_ready_i);

  assign raw_stall_o = head_is_q && !q_zero && raw_hit;
  assign war_stall_o = head_is_ld && !lsu_busy && war_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr     <= '0;
      wr_ptr     <= '0;
      count      <= '0;
      lsu_busy   <= 1'b0;
      lsu_mask_q <= '0;
      qrd_mask_q <= '0;
    end else begin
      if (push_valid_i && push_ready_o) begin
        mem_q[wr_ptr] <= push_op_i;
        wr_ptr        <= (wr_ptr == PW'(QDEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PW'(QDEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push_valid_i && push_ready_o) - (PW+1)'(pop);
      if (lsu_valid_o && lsu_ready_i) begin
        lsu_busy   <= 1'b1;
        lsu_mask_q <= head_wr;
      end else if (lsu_done_i) begin
        lsu_busy   <= 1'b0;
      end
      if (q_valid_o && q_ready_i) qrd_mask_q <= head_rd;
      a_no_overflow: assert (count <= (PW+1)'(QDEPTH));
    end
  end

endmodule
