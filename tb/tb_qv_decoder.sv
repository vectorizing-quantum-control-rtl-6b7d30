// tb_qv_decoder: self-checking test of the instruction decoder and vector
// configuration. Uses the machine words of the Bell-state example program
// (vsetvli 0x0C72F057, vle8.v 0x02050087, qv.h 0xC8708657, qv.meas 0xD0708657)
// and hand-assembled words for the other classes; expected vl values are the
// RVV formula min(AVL, VLEN*LMUL/SEW) worked out by hand for VLEN = 128.
module tb_qv_decoder;
  import hisepq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] instr, rs1, rs2;
  logic [ID_W-1:0] id;
  logic commit, is_vec, illegal;
  vop_t op;
  logic [31:0] vl_new;
  logic [VL_W-1:0] csr_vl;
  logic [2:0] csr_vlmul;
  sew_e csr_sew;
  logic csr_vill;

  qv_decoder dut (.clk, .rst_n, .instr_i(instr), .rs1_i(rs1), .rs2_i(rs2), .id_i(id), .commit_i(commit),
                  .is_vec_o(is_vec), .illegal_o(illegal), .op_o(op), .vl_new_o(vl_new),
                  .csr_vl_o(csr_vl), .csr_vlmul_o(csr_vlmul), .csr_sew_o(csr_sew), .csr_vill_o(csr_vill));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic logic [31:0] vsetvli(input int rd, input int rs, input int sew, input int lmul);
    return {1'b0, 3'b000, 1'b1, 1'b1, 3'(sew), 3'(lmul), 5'(rs), 3'b111, 5'(rd), 7'h57};
  endfunction
  function automatic logic [31:0] qinst(input int gate, input int vs2, input int vs1, input int f3, input int blk);
    return {7'(gate), 5'(vs2), 5'(vs1), 3'(f3), 5'(blk), 7'h57};
  endfunction

  // apply a vsetvli and commit it
  task automatic setvl(input int rd, input int avl, input int sew, input int lmul, input int exp_vl);
    instr = vsetvli(rd, (avl < 0) ? 0 : 5, sew, lmul);
    rs1 = (avl < 0) ? 0 : avl;
    commit = 1;
    #1;
    chk(is_vec && !illegal && op.cls == OP_VSETVLI, $sformatf("vsetvli decoded sew=%0d lmul=%0d", sew, lmul));
    chk(vl_new == 32'(exp_vl), $sformatf("vsetvli avl=%0d sew=%0d lmul=%0d vl=%0d exp %0d", avl, sew, lmul, vl_new, exp_vl));
    @(posedge clk); #1;
    commit = 0;
    chk(csr_vl == VL_W'(exp_vl), "csr vl updated");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr = 32'h0000_0013; rs1 = 0; rs2 = 0; id = 3; commit = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    chk(!is_vec, "addi is not a coprocessor instruction");
    // before any vsetvli the configuration is invalid
    instr = 32'hC870_8657; #1;
    chk(is_vec && illegal, "quantum instruction illegal while vill");
    chk(csr_vill, "vill after reset");

    // encoding helper agrees with the example program's word
    chk(vsetvli(0, 5, 0, 7) == 32'h0C72_F057, "vsetvli word of the example");
    setvl(0, 8, 0, 7, 8);                       // e8, mf2, AVL 8 -> 8
    chk(csr_sew == SEW8 && csr_vlmul == 3'b111 && !csr_vill, "e8 mf2 configuration");

    // qv.h v3, v1, x7, 12
    instr = 32'hC870_8657; rs2 = 32'h55; id = 5; #1;
    chk(is_vec && !illegal, "qv.h legal");
    chk(op.cls == OP_QSINGLE && op.gate == 7'h64 && op.vs1 == 1 && op.vd == 12 && op.scalar == 32'h55,
        "qv.h fields");
    chk(op.vl == 8 && op.sew == SEW8 && !op.is_meas && op.id == 5, "qv.h vl/sew/id");
    // qv.meas
    instr = 32'hD070_8657; #1;
    chk(op.cls == OP_QSINGLE && op.gate == 7'h68 && op.is_meas, "qv.meas recognised");
    // qv.resume v6, v2, x6, 12
    instr = 32'hF061_0657; rs2 = 32'h66; #1;
    chk(op.cls == OP_QSINGLE && op.gate == 7'h78 && op.vs1 == 2 && !op.is_meas && op.scalar == 32'h66, "qv.resume");
    // QV.PAIR funct3 = 001: vs2 control, vs1 target
    instr = qinst(7'h66, 1, 2, 1, 12); #1;
    chk(op.cls == OP_QPAIR && op.vs2 == 1 && op.vs1 == 2 && !illegal, "QV.PAIR");
    instr = qinst(0, 7, 2, 2, 3); rs2 = 32'h4000_0000; #1;
    chk(op.cls == OP_QROTG && op.scalar == 32'h4000_0000 && op.vd == 3 && !illegal, "QV.ROT.G");
    instr = qinst(0, 8, 2, 3, 0); #1;
    chk(op.cls == OP_QROTV && !illegal, "QV.ROT.V legal at e8 mf2");
    instr = {7'd0, 5'd0, 5'd1, 3'b100, 5'd1, 7'h57}; #1;
    chk(is_vec && illegal, "OP-V funct3=100 rejected");

    // vector loads
    instr = 32'h0205_0087; rs1 = 32'h1000; #1;
    chk(op.cls == OP_VLOAD && op.sew == SEW8 && op.vd == 1 && op.scalar == 32'h1000 && !illegal, "vle8.v");
    instr = {3'b000, 1'b0, 2'b00, 1'b1, 5'd0, 5'd10, 3'b110, 5'd8, 7'b0000111}; #1;
    chk(op.cls == OP_VLOAD && op.sew == SEW32 && op.vd == 8 && !illegal, "vle32.v");
    instr = {3'b000, 1'b0, 2'b00, 1'b0, 5'd0, 5'd10, 3'b000, 5'd8, 7'b0000111}; #1;
    chk(illegal, "masked load rejected");

    // LMUL table: VLEN=128, SEW=8 -> 8/16/32/64/128
    setvl(1, -1, 0, 1, 32);    // e8 m2, AVL=VLMAX
    setvl(1, -1, 0, 3, 128);   // e8 m8
    setvl(0, 200, 0, 3, 128);  // AVL larger than VLMAX
    setvl(0, 10, 2, 0, 4);     // e32 m1
    setvl(0, 50, 0, 5, 2);     // e8 mf8
    // QV.ROT.V illegal for m4/m8
    setvl(0, 64, 0, 2, 64);    // e8 m4
    instr = qinst(0, 8, 2, 3, 0); #1;
    chk(illegal, "QV.ROT.V illegal at m4");
    instr = qinst(7'h64, 7, 1, 0, 0); #1;
    chk(!illegal && op.vl == 64, "QV.SINGLE legal at m4 (64 qubits)");
    setvl(0, 16, 0, 0, 16);    // e8 m1
    instr = qinst(0, 8, 2, 3, 0); #1;
    chk(!illegal, "QV.ROT.V legal at m1");
    setvl(0, 8, 1, 0, 8);      // e16 m1
    instr = qinst(0, 8, 2, 3, 0); #1;
    chk(illegal, "QV.ROT.V illegal at SEW=16");
    instr = qinst(0, 7, 2, 2, 0); #1;
    chk(!illegal, "QV.ROT.G legal at SEW=16");
    // SEW=64 is not supported: vill
    instr = vsetvli(0, 5, 3, 0); rs1 = 4; commit = 1; #1;
    chk(vl_new == 0, "e64 gives vl 0");
    @(posedge clk); #1; commit = 0;
    chk(csr_vill, "e64 sets vill");
    // rs1 = x0, rd = x0 keeps vl (after legal config)
    setvl(0, 8, 0, 0, 8);
    setvl(0, -1, 0, 1, 8);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
