// qv_qelem: quantum element execution unit (Q-ELEM).
//
// Turns each unpacked element of a quantum instruction into one quantum event
// (operation class, GateID, Blk_imm, qubit index / control-target pair, 32-bit
// parameter, first/last qualifiers) and registers it on a valid/ready output
// that feeds the quantum sideband. When the last element of an instruction
// leaves this stage the unit also
//   * reports completion of the instruction (id) to the writeback/result mux,
//   * pulses meas_drained_o if the instruction was a measurement, which tells
//     the synchronizer that the measurement stream has drained.
// The last element is only taken when the completion slot is free, so no
// completion is lost.
//
// Follows the paper: a quantum-capable element path in the execution units
// producing per-element quantum semantics, with completion signalling toward
// the host. This design's choices: a single register stage, the event layout.
// Timing: one cycle from input handshake to output valid; one event per cycle.
module qv_qelem
  import hisepq_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid_i,
  output logic            in_ready_o,
  input  qelem_t          in_elem_i,
  input  logic [ID_W-1:0] in_id_i,
  output logic            ev_valid_o,
  input  logic            ev_ready_i,
  output qevent_t         ev_o,
  output logic            done_valid_o,
  input  logic            done_ready_i,
  output logic [ID_W-1:0] done_id_o,
  output logic            meas_drained_o
);

  logic take;
  logic stage_free;
  assign stage_free = !ev_valid_o || ev_ready_i;
  // the last element also needs the completion slot
  assign in_ready_o = stage_free && (!in_elem_i.last || !done_valid_o || done_ready_i);
  assign take       = in_valid_i && in_ready_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ev_valid_o     <= 1'b0;
      ev_o           <= '0;
      done_valid_o   <= 1'b0;
      done_id_o      <= '0;
      meas_drained_o <= 1'b0;
    end else begin
      meas_drained_o <= 1'b0;
      if (ev_valid_o && ev_ready_i) ev_valid_o <= 1'b0;
      if (done_valid_o && done_ready_i) done_valid_o <= 1'b0;
      if (take) begin
        ev_valid_o    <= 1'b1;
        ev_o.op_type  <= in_elem_i.cls;
        ev_o.gate     <= in_elem_i.gate;
        ev_o.blk      <= in_elem_i.blk;
        ev_o.q0       <= in_elem_i.q0;
        ev_o.q1       <= (in_elem_i.cls == OP_QPAIR) ? in_elem_i.q1 : '0;
        ev_o.param    <= in_elem_i.param;
        ev_o.first    <= in_elem_i.first;
        ev_o.last     <= in_elem_i.last;
        ev_o.is_meas  <= in_elem_i.is_meas;
        ev_o.seq      <= '0;
        if (in_elem_i.last) begin
          done_valid_o   <= 1'b1;
          done_id_o      <= in_id_i;
          meas_drained_o <= in_elem_i.is_meas;
        end
      end
    end
  end

endmodule
