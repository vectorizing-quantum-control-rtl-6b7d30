// qv_decoder: instruction decoder and vector configuration state ("Decoder + config").
//
// Classifies an offloaded 32-bit instruction, checks its legality against the
// current vector configuration and assigns operand roles. It also holds the
// vtype/vl state written by vsetvli, so every decoded operation leaves here
// carrying the vector length and element width it must execute with.
//
// Decoded classes:
//   vsetvli            OP-V, funct3=111, bit31=0. vl = min(AVL, VLMAX),
//                      VLMAX = VLEN*LMUL/SEW. SEW 8/16/32 are legal.
//   vle8/16/32.v       LOAD-FP, unit stride, unmasked, nf=0.
//   QV.SINGLE 000      one gate (GateID = [31:25]) on every index in vs1, rs2 forwarded.
//   QV.PAIR   001      vs2 = control indices, vs1 = target indices.
//   QV.ROT.G  010      rs2 is a 32-bit angle broadcast to every target in vs1.
//   QV.ROT.V  011      vs1 indices at SEW=8, vs2 angles at 32 bit (group LMUL*4);
//                      illegal for LMUL m4/m8 and for SEW other than 8.
// The class encodings, the legality rule of QV.ROT.V and the vsetvli semantics
// follow the paper and the RVV specification. Rejecting other OP-V encodings,
// masked loads, vsetvl/vsetivli and SEW=64, and treating QV.SINGLE with GateID
// 0x68 as the measurement, are this design's choices.
//
// Timing: decode is combinational; vtype/vl update on the clock edge at which a
// vsetvli is accepted (commit_i). Reset: vill=1, vl=0.
module qv_decoder
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       instr_i,
  input  logic [XLEN-1:0]   rs1_i,
  input  logic [XLEN-1:0]   rs2_i,
  input  logic [ID_W-1:0]   id_i,
  input  logic              commit_i,   // instruction accepted this cycle
  output logic              is_vec_o,   // instruction belongs to the coprocessor
  output logic              illegal_o,  // belongs to it but is illegal now
  output vop_t              op_o,
  output logic [XLEN-1:0]   vl_new_o,   // vsetvli result (new vl)
  output logic [VL_W-1:0]   csr_vl_o,
  output logic [2:0]        csr_vlmul_o,
  output sew_e              csr_sew_o,
  output logic              csr_vill_o
);

  logic [VL_W-1:0] vl_q;
  logic [2:0]      vlmul_q;
  sew_e            sew_q;
  logic            vill_q;

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [4:0] rd, rs1f;
  assign opcode = instr_i[6:0];
  assign funct3 = instr_i[14:12];
  assign rd     = instr_i[11:7];
  assign rs1f   = instr_i[19:15];

  // VLMAX for a given vtype; 0 means the setting is not legal.
  function automatic logic [VL_W-1:0] vlmax_f(input logic [2:0] lmul, input logic [2:0] vsew);
    int unsigned base;
    base = (vsew > 3'd2) ? 0 : (VLEN >> (3 + vsew));
    unique case (lmul)
      3'b000: return VL_W'(base);
      3'b001: return VL_W'(base << 1);
      3'b010: return VL_W'(base << 2);
      3'b011: return VL_W'(base << 3);
      3'b101: return VL_W'(base >> 3);
      3'b110: return VL_W'(base >> 2);
      3'b111: return VL_W'(base >> 1);
      default: return '0;
    endcase
  endfunction

  // vsetvli
  logic            is_vset;
  logic [2:0]      new_lmul, new_sew;
  logic [VL_W-1:0] new_vlmax;
  logic [XLEN-1:0] avl;
  logic [VL_W-1:0] new_vl;
  logic            new_vill;
  assign is_vset   = (opcode == OPC_OPV) && (funct3 == 3'b111) && !instr_i[31];
  assign new_lmul  = instr_i[22:20];
  assign new_sew   = instr_i[25:23];
  assign new_vlmax = vlmax_f(new_lmul, new_sew);
  assign new_vill  = (new_vlmax == '0) || (instr_i[30:28] != '0);

  always_comb begin
    if (rs1f != 5'd0)      avl = rs1_i;
    else if (rd != 5'd0)   avl = XLEN'(new_vlmax);
    else                   avl = XLEN'(vl_q);
    if (new_vill)                    new_vl = '0;
    else if (avl > XLEN'(new_vlmax)) new_vl = new_vlmax;
    else                             new_vl = VL_W'(avl);
  end
  assign vl_new_o = XLEN'(new_vl);

  // Vector loads
  logic is_load, load_ok;
  sew_e load_eew;
  always_comb begin
    is_load  = (opcode == OPC_LOADFP) &&
               (funct3 == 3'b000 || funct3 == 3'b101 || funct3 == 3'b110 || funct3 == 3'b111);
    load_eew = SEW8;
    unique case (funct3)
      3'b101:  load_eew = SEW16;
      3'b110:  load_eew = SEW32;
      default: load_eew = SEW8;
    endcase
    load_ok = (funct3 != 3'b111) && instr_i[25] && (instr_i[24:20] == 5'd0) &&
              (instr_i[28:26] == 3'b000) && (instr_i[31:29] == 3'b000) && !vill_q;
  end

  // Quantum instructions
  logic is_q, q_ok;
  op_class_e q_cls;
  always_comb begin
    is_q  = (opcode == OPC_OPV) && (funct3[2] == 1'b0);
    q_cls = OP_QSINGLE;
    unique case (funct3[1:0])
      2'b00: q_cls = OP_QSINGLE;
      2'b01: q_cls = OP_QPAIR;
      2'b10: q_cls = OP_QROTG;
      default: q_cls = OP_QROTV;
    endcase
    q_ok = !vill_q && (sew_q != SEW64);
    if (q_cls == OP_QROTV && (sew_q != SEW8 || vlmul_q == 3'b010 || vlmul_q == 3'b011))
      q_ok = 1'b0;
  end

  assign is_vec_o  = is_vset || (opcode == OPC_OPV) || is_load;
  assign illegal_o = is_vec_o && !(is_vset || (is_load && load_ok) || (is_q && q_ok));

  always_comb begin
    op_o         = '0;
    op_o.id      = id_i;
    op_o.gate    = instr_i[31:25];
    op_o.vd      = instr_i[11:7];
    op_o.vs1     = instr_i[19:15];
    op_o.vs2     = instr_i[24:20];
    op_o.vl      = vl_q;
    op_o.sew     = sew_q;
    op_o.scalar  = rs2_i;
    if (is_vset) begin
      op_o.cls = OP_VSETVLI;
    end else if (is_load) begin
      op_o.cls    = OP_VLOAD;
      op_o.sew    = load_eew;
      op_o.scalar = rs1_i;
    end else if (is_q) begin
      op_o.cls     = q_cls;
      op_o.is_meas = (q_cls == OP_QSINGLE) && (instr_i[31:25] == GATE_MEAS) && (vl_q != '0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vl_q    <= '0;
      vlmul_q <= 3'b000;
      sew_q   <= SEW8;
      vill_q  <= 1'b1;
    end else if (commit_i && is_vset) begin
      vl_q    <= new_vl;
      vlmul_q <= new_lmul;
      sew_q   <= sew_e'(new_sew[1:0]);
      vill_q  <= new_vill;
    end
  end

  assign csr_vl_o    = vl_q;
  assign csr_vlmul_o = vlmul_q;
  assign csr_sew_o   = sew_q;
  assign csr_vill_o  = vill_q;

endmodule
