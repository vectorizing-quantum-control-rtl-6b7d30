// tb_quantum_dispatcher: drives quantum events into the dispatcher and checks
// the per-qubit firings: due time = acceptance time + Blk_imm, both qubits of a
// pair fire in the same cycle with control/target roles and partner index,
// measurement firings raise the readout trigger, out-of-range events are
// dropped, and a full per-qubit queue back-pressures the stream.
module tb_quantum_dispatcher;
  import hisepq_pkg::*;
  localparam int N = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic ev_valid, ev_ready, drop, bp;
  qevent_t ev;
  logic [N-1:0] fire, mtrig;
  logic [N-1:0][6:0] fgate;
  qrole_e [N-1:0] frole;
  logic [N-1:0][7:0] fpart;
  logic [N-1:0][31:0] fparam;
  logic [15:0] now;

  quantum_dispatcher dut (.clk, .rst_n, .ev_valid_i(ev_valid), .ev_ready_o(ev_ready), .ev_i(ev),
    .fire_o(fire), .fire_gate_o(fgate), .fire_role_o(frole), .fire_partner_o(fpart), .fire_param_o(fparam),
    .meas_trigger_o(mtrig), .drop_o(drop), .backpressure_o(bp), .now_o(now));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", now, m); end
  endtask

  // firing log
  typedef struct { int t; int q; int gate; qrole_e role; int partner; int param; bit meas; } frec_t;
  frec_t log_q [$];
  always @(negedge clk) if (rst_n)
    for (int q = 0; q < N; q++) if (fire[q])
      log_q.push_back('{now, q, fgate[q], frole[q], fpart[q], fparam[q], mtrig[q]});

  int accept_t;
  int bp_cycles = 0, drops = 0;
  always @(negedge clk) if (rst_n) begin
    if (bp) bp_cycles++;
    if (drop) drops++;
  end

  // send one event, return the cycle (now) at which it was accepted
  task automatic send(input op_class_e cls, input int gate, input int q0, input int q1, input int blk, input int param);
    ev = '0;
    ev.op_type = cls; ev.gate = 7'(gate); ev.q0 = 16'(q0); ev.q1 = 16'(q1); ev.blk = 5'(blk);
    ev.param = 32'(param); ev.first = 1; ev.last = 1;
    ev_valid = 1;
    #1;
    while (!ev_ready) begin @(posedge clk); #1; end
    accept_t = now;
    @(posedge clk); #1;
    ev_valid = 0;
  endtask

  function automatic int find(input int q, input int gate);
    foreach (log_q[i]) if (log_q[i].q == q && log_q[i].gate == gate) return i;
    return -1;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int i, j, t_single, t_pair, t_meas;
  initial begin
    ev_valid = 0; ev = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    send(OP_QSINGLE, 7'h64, 3, 0, 4, 32'h55);   t_single = accept_t;
    send(OP_QPAIR,   7'h66, 5, 6, 7, 32'h0);    t_pair = accept_t;
    send(OP_QSINGLE, 7'h68, 9, 0, 0, 32'h0);    t_meas = accept_t;
    send(OP_QROTG,   7'h00, 40, 0, 0, 32'h1);   // qubit out of range -> dropped
    send(OP_QPAIR,   7'h66, 7, 7, 0, 32'h0);    // pair on one qubit -> dropped
    repeat (40) @(posedge clk);
    i = find(3, 7'h64);
    chk(i >= 0, "single-qubit gate fired");
    if (i >= 0) chk(log_q[i].t == t_single + 4 && log_q[i].param == 32'h55 && log_q[i].role == ROLE_SINGLE,
                    $sformatf("H on q3 at accept+blk (%0d vs %0d)", log_q[i].t, t_single + 4));
    i = find(5, 7'h66); j = find(6, 7'h66);
    chk(i >= 0 && j >= 0, "both qubits of the pair fired");
    if (i >= 0 && j >= 0) begin
      chk(log_q[i].t == t_pair + 7 && log_q[j].t == log_q[i].t, "pair fires simultaneously at due time");
      chk(log_q[i].role == ROLE_CTRL && log_q[i].partner == 6, "control role and partner");
      chk(log_q[j].role == ROLE_TGT && log_q[j].partner == 5, "target role and partner");
    end
    i = find(9, 7'h68);
    chk(i >= 0 && log_q[i].meas && log_q[i].t == t_meas + 1, "measurement fires with readout trigger");
    chk(drops == 2, $sformatf("two events dropped (%0d)", drops));
    chk(find(40 % N, 0) < 0 && find(7, 7'h66) < 0, "dropped events do not fire");
    chk(log_q.size() == 4, $sformatf("exactly four firings (%0d)", log_q.size()));
    // back-pressure: five events to one qubit with the longest delay
    #1;
    log_q.delete();
    for (int k = 0; k < 5; k++) send(OP_QSINGLE, 7'h10 + k, 12, 0, 31, k);
    chk(bp_cycles > 0, "full queue back-pressures the stream");
    repeat (80) @(posedge clk);
    chk(log_q.size() == 5, $sformatf("all five delivered after the stall (%0d)", log_q.size()));
    for (int k = 0; k < 5 && k < log_q.size(); k++) chk(log_q[k].gate == 7'h10 + k, "order kept");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
