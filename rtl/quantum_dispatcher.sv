// quantum_dispatcher: turns the quantum event stream into per-qubit timed firings.
//
// A free-running global counter (TS_W bits, reset to 0) is the time base. Each
// incoming event is decoded into qubit index, GateID and a due time
// now + Blk_imm, and enqueued in the timed_fifo of its qubit:
//   single-qubit gates and rotations: one entry (role SINGLE) at qubit q0;
//   two-qubit gates: one entry (role CTRL) at the control q0 and one (role TGT)
//   at the target q1, both with the same due time so that both qubits fire in
//   the same cycle when neither queue holds older work.
// Each qubit's time controller then raises fire_o[q] for one cycle when the
// counter reaches the due time, with the gate, role, partner qubit and 32-bit
// parameter. A firing of the measurement GateID also raises meas_trigger_o[q]
// toward the readout electronics. The event is only accepted when every
// destination queue has room (ev_ready_o), so nothing is lost. Events naming a
// qubit >= N_QUBITS, or a pair whose two qubits are equal, are accepted and
// dropped with drop_o raised for one cycle. pending_o is high while any qubit
// queue still holds a scheduled gate.
// Only the gate, type, qubit, Blk_imm and parameter fields of an event are
// used; the first/last/measurement/sequence qualifiers are carried for
// observers, so lint reports those bits of ev_i as unused.
//
// Follows the paper: per-qubit timed_fifo and time controller, due time =
// global counter + block_imm, N_QUBITS = 32 (the configuration of the
// resource table). This design's choices: back-pressure instead of overflow,
// the drop rule, the fire-port layout.
module quantum_dispatcher
  import hisepq_pkg::*;
#(
  parameter int unsigned N_QUBITS = 32,
  parameter int unsigned DEPTH    = 4,
  parameter int unsigned TS_W     = 16
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              ev_valid_i,
  output logic                              ev_ready_o,
  input  qevent_t                           ev_i,
  output logic [N_QUBITS-1:0]               fire_o,
  output logic [N_QUBITS-1:0][6:0]          fire_gate_o,
  output qrole_e [N_QUBITS-1:0]             fire_role_o,
  output logic [N_QUBITS-1:0][QID_W-1:0]    fire_partner_o,
  output logic [N_QUBITS-1:0][PARAM_W-1:0]  fire_param_o,
  output logic [N_QUBITS-1:0]               meas_trigger_o,
  output logic                              drop_o,
  output logic                              backpressure_o,
  output logic [TS_W-1:0]                   now_o,
  output logic                              pending_o   // some qubit still has a scheduled gate
);

  logic [TS_W-1:0]     now;
  logic [N_QUBITS-1:0] full, push;
  qfire_t              push_ent [N_QUBITS];
  qfire_t              fire_ent [N_QUBITS];
  logic [TS_W-1:0]     due;
  logic                is_pair, bad, room, take;
  logic [$clog2(DEPTH+1)-1:0] occ [N_QUBITS];
  logic [N_QUBITS-1:0] nonempty;

  assign now_o     = now;
  assign pending_o = |nonempty;
  assign due     = now + TS_W'(ev_i.blk);
  assign is_pair = (ev_i.op_type == OP_QPAIR);
  assign bad     = (ev_i.q0 >= 16'(N_QUBITS)) ||
                   (is_pair && ((ev_i.q1 >= 16'(N_QUBITS)) || (ev_i.q1 == ev_i.q0)));

  always_comb begin
    room = 1'b1;
    if (!bad) begin
      if (full[ev_i.q0[$clog2(N_QUBITS)-1:0]]) room = 1'b0;
      if (is_pair && full[ev_i.q1[$clog2(N_QUBITS)-1:0]]) room = 1'b0;
    end
  end

  assign ev_ready_o     = bad || room;
  assign take           = ev_valid_i && ev_ready_o;
  assign drop_o         = ev_valid_i && bad;
  assign backpressure_o = ev_valid_i && !ev_ready_o;

  always_comb begin
    for (int q = 0; q < N_QUBITS; q++) begin
      push[q]             = 1'b0;
      push_ent[q].gate    = ev_i.gate;
      push_ent[q].param   = ev_i.param;
      push_ent[q].role    = ROLE_SINGLE;
      push_ent[q].partner = '0;
      if (take && !bad) begin
        if (ev_i.q0 == 16'(q)) begin
          push[q]             = 1'b1;
          push_ent[q].role    = is_pair ? ROLE_CTRL : ROLE_SINGLE;
          push_ent[q].partner = is_pair ? ev_i.q1[QID_W-1:0] : '0;
        end else if (is_pair && ev_i.q1 == 16'(q)) begin
          push[q]             = 1'b1;
          push_ent[q].role    = ROLE_TGT;
          push_ent[q].partner = ev_i.q0[QID_W-1:0];
        end
      end
    end
  end

  for (genvar q = 0; q < N_QUBITS; q++) begin : g_q
    timed_fifo #(.DEPTH(DEPTH), .TS_W(TS_W)) u_tf (
      .clk, .rst_n,
      .now_i        (now),
      .push_i       (push[q]),
      .push_entry_i (push_ent[q]),
      .push_time_i  (due),
      .full_o       (full[q]),
      .fire_o       (fire_o[q]),
      .fire_entry_o (fire_ent[q]),
      .count_o      (occ[q])
    );
    assign fire_gate_o[q]    = fire_ent[q].gate;
    assign fire_role_o[q]    = fire_ent[q].role;
    assign fire_partner_o[q] = fire_ent[q].partner;
    assign fire_param_o[q]   = fire_ent[q].param;
    assign meas_trigger_o[q] = fire_o[q] && (fire_ent[q].gate == GATE_MEAS);
    assign nonempty[q]       = (occ[q] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) now <= '0;
    else        now <= now + 1'b1;
  end

endmodule
