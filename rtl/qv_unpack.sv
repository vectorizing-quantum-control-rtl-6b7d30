// qv_unpack: pipeline wrapper and operand unpack for quantum instructions.
//
// On dispatch the instruction is latched into pipeline-local state (the
// "pipeline wrapper": operand roles, register bases, vl, SEW are fixed here).
// An element counter then walks i = 0 .. vl-1, one element per cycle. For each
// element the index operand is read from register vs1 + (i*SEW/8)/(VLEN/8) at
// byte offset (i*SEW/8) mod (VLEN/8) on read port 0, and the second operand on
// read port 1:
//   QV.PAIR   vs2 at the same SEW (control index; vs1 holds the target),
//   QV.ROT.V  vs2 at 32 bit (angle), i.e. a register group four times larger,
//   others    the scalar rs2 value captured at issue is used as the parameter.
// The extracted fields go out as one qelem_t per cycle through a registered
// valid/ready output. idle_o is high when no element remains to be read, which
// releases the write-after-read check in the hazard unit.
//
// Follows the paper: counter progression, per-operand element-width handling,
// 8-bit indices with 32-bit angles in one instruction, one event per cycle.
// This design's choices: indices wider than 16 bit (SEW=32) are truncated to
// 16 bit; no masking (the quantum encodings have no vm bit).
// Timing: the first element is valid two cycles after the dispatch handshake,
// then one element per cycle while out_ready_i is high.
module qv_unpack
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  vop_t              in_op_i,
  output logic [1:0][4:0]   vrf_raddr_o,
  input  logic [1:0][VLEN-1:0] vrf_rdata_i,
  output logic              out_valid_o,
  input  logic              out_ready_i,
  output qelem_t            out_elem_o,
  output logic [ID_W-1:0]   out_id_o,
  output logic              idle_o
);

  localparam int unsigned BOFS = $clog2(VLEN/8);

  vop_t            op_q;
  logic            busy;
  logic [VL_W-1:0] idx;

  logic [VL_W+1:0] off_a, off_b;
  logic [4:0]      reg_a, reg_b;
  logic [BOFS-1:0] byte_a, byte_b;
  logic [31:0]     elem_a, elem_b;
  sew_e            sew_b;
  logic            advance, last;

  always_comb begin
    off_a  = (VL_W+2)'(idx) << op_q.sew;
    sew_b  = (op_q.cls == OP_QROTV) ? SEW32 : op_q.sew;
    off_b  = (VL_W+2)'(idx) << sew_b;
    reg_a  = op_q.vs1 + 5'(off_a >> BOFS);
    reg_b  = op_q.vs2 + 5'(off_b >> BOFS);
    byte_a = off_a[BOFS-1:0];
    byte_b = off_b[BOFS-1:0];
    elem_a = 32'(vrf_rdata_i[0] >> (8 * byte_a));
    elem_b = 32'(vrf_rdata_i[1] >> (8 * byte_b));
    unique case (op_q.sew)
      SEW8:    elem_a &= 32'h0000_00ff;
      SEW16:   elem_a &= 32'h0000_ffff;
      default: ;
    endcase
    unique case (sew_b)
      SEW8:    elem_b &= 32'h0000_00ff;
      SEW16:   elem_b &= 32'h0000_ffff;
      default: ;
    endcase
  end
  assign vrf_raddr_o[0] = reg_a;
  assign vrf_raddr_o[1] = reg_b;

  assign advance    = busy && (!out_valid_o || out_ready_i);
  assign last       = (idx == op_q.vl - 1'b1);
  assign in_ready_o = !busy;
  assign idle_o     = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy        <= 1'b0;
      idx         <= '0;
      op_q        <= '0;
      out_valid_o <= 1'b0;
      out_elem_o  <= '0;
      out_id_o    <= '0;
    end else begin
      if (out_valid_o && out_ready_i) out_valid_o <= 1'b0;
      if (in_valid_i && in_ready_o) begin
        op_q <= in_op_i;
        busy <= 1'b1;
        idx  <= '0;
      end else if (advance) begin
        out_valid_o         <= 1'b1;
        out_id_o            <= op_q.id;
        out_elem_o.cls      <= op_q.cls;
        out_elem_o.gate     <= op_q.gate;
        out_elem_o.blk      <= op_q.vd;
        out_elem_o.first    <= (idx == '0);
        out_elem_o.last     <= last;
        out_elem_o.is_meas  <= op_q.is_meas;
        if (op_q.cls == OP_QPAIR) begin
          out_elem_o.q0    <= elem_b[15:0];   // control from vs2
          out_elem_o.q1    <= elem_a[15:0];   // target from vs1
        end else begin
          out_elem_o.q0    <= elem_a[15:0];
          out_elem_o.q1    <= '0;
        end
        out_elem_o.param <= (op_q.cls == OP_QROTV) ? elem_b : op_q.scalar;
        idx <= idx + 1'b1;
        if (last) busy <= 1'b0;
      end
    end
  end

endmodule
