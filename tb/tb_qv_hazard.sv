// tb_qv_hazard: directed scenarios for the instruction queue and scoreboard.
// The testbench plays both pipelines: it decides when the load unit reports
// done and when the quantum pipeline goes idle. Checks:
//   * read-after-write: a quantum instruction reading a register being loaded
//     waits (raw_stall) and goes the cycle after the load is done;
//   * no false stall: an unrelated quantum instruction goes while a load runs;
//   * QV.ROT.V angle group is four times larger than the index group;
//   * write-after-read: a load into a register still being read waits
//     (war_stall) until the quantum pipeline is idle;
//   * vl = 0 quantum instructions leave on the nop path;
//   * dispatch order equals push order and the queue refuses a fifth entry.
module tb_qv_hazard;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic pv, pr, lv, lr, ldone, qv, qr, qidle, nv, nr, raw, war, empty;
  vop_t pop_in, dop;
  logic [ID_W-1:0] nid;
  qv_hazard dut (.clk, .rst_n, .push_valid_i(pv), .push_ready_o(pr), .push_op_i(pop_in), .lsu_valid_o(lv),
    .lsu_ready_i(lr), .lsu_done_i(ldone), .q_valid_o(qv), .q_ready_i(qr), .q_idle_i(qidle), .disp_op_o(dop),
    .nop_valid_o(nv), .nop_ready_i(nr), .nop_id_o(nid), .raw_stall_o(raw), .war_stall_o(war), .empty_o(empty));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int order [$];
  int nraw = 0, nwar = 0;
  always @(negedge clk) if (rst_n) begin
    if (lv && lr) order.push_back(dop.id);
    if (qv && qr) order.push_back(dop.id);
    if (nv && nr) order.push_back(nid);
    nraw += raw;
    nwar += war;
  end

  function automatic vop_t mk(input op_class_e cls, input int id, input int vd, input int vs1, input int vs2,
                              input int vl);
    vop_t o = '0;
    o.cls = cls; o.id = ID_W'(id); o.vd = 5'(vd); o.vs1 = 5'(vs1); o.vs2 = 5'(vs2); o.vl = VL_W'(vl); o.sew = SEW8;
    return o;
  endfunction

  task automatic push(input vop_t o);
    pop_in = o; pv = 1;
    @(posedge clk);
    while (!pr) @(posedge clk);
    #1; pv = 0;
  endtask

  task automatic wait_disp(input int id, input int maxc, output int cyc);
    int n0 = order.size();
    cyc = 0;
    while (cyc < maxc && !(order.size() > n0 && order[$] == id)) begin @(posedge clk); #1; cyc++; end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c;
  initial begin
    pv = 0; pop_in = '0; lr = 1; ldone = 0; qr = 1; qidle = 1; nr = 1;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    // 1. RAW: load v1, then quantum op reading v1
    push(mk(OP_VLOAD, 1, 1, 0, 0, 8));
    push(mk(OP_QSINGLE, 2, 0, 1, 0, 8));
    repeat (6) @(posedge clk); #1;
    chk(order.size() == 1 && order[0] == 1 && raw, "quantum op held by pending load (RAW)");
    ldone = 1; @(posedge clk); #1; ldone = 0; qidle = 0;
    wait_disp(2, 3, c);
    chk(order.size() == 2 && order[1] == 2, "quantum op released after load done");
    qidle = 1;
    // 2. unrelated quantum op goes while the load is busy
    push(mk(OP_VLOAD, 3, 4, 0, 0, 16));
    push(mk(OP_QPAIR, 4, 0, 6, 7, 16));
    wait_disp(4, 5, c);
    chk(order.size() == 4 && order[3] == 4, "independent quantum op overlaps the load");
    ldone = 1; @(posedge clk); #1; ldone = 0;
    // 3. ROT.V: 32 angles at v8..v11 (vl 16), load into v11 is pending
    push(mk(OP_VLOAD, 5, 11, 0, 0, 4));
    push(mk(OP_QROTV, 6, 0, 2, 8, 16));
    repeat (4) @(posedge clk); #1;
    chk(order.size() == 5 && raw, "ROT.V angle group (4 registers) sees the load into v11");
    ldone = 1; @(posedge clk); #1; ldone = 0;
    wait_disp(6, 3, c);
    chk(order.size() == 6, "ROT.V released");
    // 4. WAR: quantum op reading v20..v21 still busy, load into v21 waits
    qidle = 1;
    push(mk(OP_QPAIR, 7, 0, 20, 22, 32));
    qidle = 0;
    push(mk(OP_VLOAD, 8, 21, 0, 0, 16));
    repeat (5) @(posedge clk); #1;
    chk(order.size() == 7 && war, "load held while its destination is read (WAR)");
    qidle = 1;
    wait_disp(8, 3, c);
    chk(order.size() == 8, "load released when quantum pipeline idle");
    ldone = 1; @(posedge clk); #1; ldone = 0;
    // 5. vl = 0 quantum op leaves on the nop path
    push(mk(OP_QSINGLE, 9, 0, 3, 0, 0));
    wait_disp(9, 3, c);
    chk(order.size() == 9, "vl = 0 completed as nop");
    // 6. queue full: block the load unit and push five
    lr = 0;
    for (int k = 0; k < 4; k++) push(mk(OP_VLOAD, 10 + k, 30, 0, 0, 1));
    pop_in = mk(OP_VLOAD, 14, 30, 0, 0, 1); pv = 1; #1;
    chk(!pr, "fifth entry refused");
    lr = 1;
    @(posedge clk);
    while (!pr) @(posedge clk);
    #1; pv = 0;
    for (int k = 0; k < 5; k++) begin
      @(posedge clk); #1;
      ldone = 1; @(posedge clk); #1; ldone = 0;
    end
    repeat (5) @(posedge clk); #1;
    for (int k = 0; k < order.size(); k++) chk(order[k] == k + 1, $sformatf("dispatch order position %0d", k));
    chk(order.size() == 14 && empty, "all dispatched");
    chk(nraw > 0 && nwar > 0, "both stall kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
