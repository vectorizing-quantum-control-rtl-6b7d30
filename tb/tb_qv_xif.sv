// tb_qv_xif: offload interface. Offers a mix of instructions and checks the
// accept flag, where each accepted instruction goes (queue or vsetvli result),
// the operand values carried along, the measurement-issue pulse, the reject
// pulse, and that nothing is taken while pause_i is high or the queue is full.
module tb_qv_xif;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, acc, pause, qv, qr, vsv, vsr, mi, rej;
  logic [31:0] instr, rs1, rs2, vsd;
  logic [ID_W-1:0] id, vsid;
  vop_t qop;
  logic [VL_W-1:0] vl;
  logic [2:0] vlmul;
  sew_e sew;
  qv_xif dut (.clk, .rst_n, .issue_valid_i(iv), .issue_ready_o(ir), .issue_instr_i(instr), .issue_rs1_i(rs1),
    .issue_rs2_i(rs2), .issue_id_i(id), .issue_accept_o(acc), .pause_i(pause), .q_valid_o(qv), .q_ready_i(qr),
    .q_op_o(qop), .vs_valid_o(vsv), .vs_ready_i(vsr), .vs_id_o(vsid), .vs_data_o(vsd), .meas_issue_o(mi),
    .reject_o(rej), .csr_vl_o(vl), .csr_vlmul_o(vlmul), .csr_sew_o(sew));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  function automatic logic [31:0] q_op(input logic [6:0] gate, input int vs2, input int vs1, input int f3, input int blk);
    return {gate, 5'(vs2), 5'(vs1), 3'(f3), 5'(blk), OPC_OPV};
  endfunction
  function automatic logic [31:0] vsetvli(input int rs1, input int sew_c, input int lmul);
    return {1'b0, 3'b000, 1'b1, 1'b1, 3'(sew_c), 3'(lmul), 5'(rs1), 3'b111, 5'd0, OPC_OPV};
  endfunction

  // offer one instruction; returns what happened in the cycle it was taken
  bit got_acc, got_q, got_vs, got_mi, got_rej;
  vop_t got_op;
  logic [31:0] got_vl;
  int wait_cyc;
  task automatic offer(input logic [31:0] w, input logic [31:0] a, input logic [31:0] b, input int i);
    iv = 1; instr = w; rs1 = a; rs2 = b; id = ID_W'(i);
    wait_cyc = 0;
    #1;
    while (!ir) begin @(posedge clk); #1; wait_cyc++; end
    got_acc = acc; got_q = qv; got_vs = vsv; got_mi = mi; got_rej = rej; got_op = qop; got_vl = vsd;
    @(posedge clk); #1;
    iv = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; instr = 0; rs1 = 0; rs2 = 0; id = 0; pause = 0; qr = 1; vsr = 1;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    // a quantum instruction before any vsetvli: vill is set, refused
    offer(q_op(GATE_H, 7, 1, 0, 12), 0, 32'h55, 1);
    chk(!got_acc && got_rej && !got_q, "quantum op refused while vtype is illegal");
    // scalar instruction (addi) is not for the coprocessor
    offer(32'h0080_0293, 0, 0, 2);
    chk(!got_acc && got_rej, "scalar instruction refused");
    // vsetvli e8 mf2, AVL 8 -> vl 8 on the result path
    offer(vsetvli(5, 0, 3'b111), 8, 0, 3);
    chk(got_acc && got_vs && !got_q && got_vl == 8, "vsetvli accepted, vl = 8 returned");
    @(posedge clk); #1;
    chk(vl == 8 && sew == SEW8 && vlmul == 3'b111, "configuration updated");
    // vsetvli with AVL 100 at m1 -> vl 16
    offer(vsetvli(5, 0, 3'b000), 100, 0, 4);
    chk(got_vl == 16, "vl = VLMAX for m1");
    // vle8 goes to the queue with rs1 as base
    offer(32'h0205_0087, 32'h1000, 0, 5);
    chk(got_acc && got_q && got_op.cls == OP_VLOAD && got_op.scalar == 32'h1000 && got_op.vd == 1 && got_op.id == 5,
        "vle8.v queued with base address");
    // qv.h to the queue with the scalar tag
    offer(32'hC870_8657, 0, 32'h55, 6);
    chk(got_acc && got_q && got_op.cls == OP_QSINGLE && got_op.gate == GATE_H && got_op.scalar == 32'h55 &&
        got_op.vl == 16 && !got_mi, "qv.h queued");
    // qv.meas raises meas_issue
    offer(32'hD070_8657, 0, 32'h55, 7);
    chk(got_acc && got_mi && got_op.is_meas, "measurement raises meas_issue");
    // paused: the offer waits
    pause = 1;
    fork
      offer(q_op(GATE_RESUME, 6, 2, 0, 12), 0, 32'h66, 8);
      begin repeat (5) @(posedge clk); #1; chk(!ir && iv, "nothing taken while paused"); pause = 0; end
    join
    chk(wait_cyc >= 5 && got_acc, "taken after the pause");
    // queue full: the offer waits for q_ready
    qr = 0;
    fork
      offer(q_op(GATE_CNOT, 1, 2, 1, 12), 0, 0, 9);
      begin repeat (3) @(posedge clk); #1; qr = 1; end
    join
    chk(wait_cyc >= 3 && got_q && got_op.cls == OP_QPAIR && got_op.vs2 == 1 && got_op.vs1 == 2, "pair taken after queue frees");
    // ROT.V legal at m1, illegal at m4
    offer(q_op(7'h41, 8, 4, 3, 3), 0, 0, 10);
    chk(got_acc && got_op.cls == OP_QROTV, "ROT.V accepted at m1");
    offer(vsetvli(5, 0, 3'b010), 64, 0, 11);
    offer(q_op(7'h41, 8, 4, 3, 3), 0, 0, 12);
    chk(!got_acc && got_rej, "ROT.V refused at m4");
    offer(q_op(7'h40, 8, 4, 2, 3), 0, 32'h77, 13);
    chk(got_acc && got_op.cls == OP_QROTG && got_op.vl == 64, "ROT.G accepted at m4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
