// tb_workloads: benchmark-circuit workloads run end to end on the processor at
// its default size (VLEN 128, 32 qubits), with the behavioural host.
//
// The testbench compiles each circuit itself into a host program: vsetvli for
// the layer width, vle8.v/vle32.v of the index and angle vectors, and one
// quantum instruction per gate layer. It also builds the firings that the
// circuit must produce on every qubit, in order. A per-qubit scoreboard then
// checks every firing against that list: gate, role, partner qubit and
// parameter. So it checks the gate order on each qubit across dependent layers,
// e.g. the chain of a GHZ state, where each CNOT's target is the next one's
// control.
// Circuits (sizes follow the benchmark names: the number is the qubit count):
//   GHZ-16        H, then a 15-element CNOT chain as one QV.PAIR
//   GraphState-32 H on 32 qubits (m2), CZ on the even and odd ring edges
//   QAOA-16       one layer on a ring: H, CX-RZ-CX per edge set, RX mixer
//   TwoLocal-16   per-qubit RY angles (QV.ROT.V), linear CX entangler, RY
//   QFT-8         H(j), then all controlled phases onto j as one QV.PAIR
// The measurement halt is tested elsewhere, so these circuits end without
// measurement. Rate checks:
//   * every instruction emits its events on consecutive cycles (one per cycle);
//   * in the width sweep of each instruction class (8, 16, 32, 64, 128 qubits
//     per instruction, i.e. LMUL mf2 .. m8; QV.ROT.V only up to m2), the delay
//     from acceptance to the first event does not depend on the width, and the
//     last event follows n-1 cycles later.
// GateIDs other than H (0x64) and CNOT (0x66) are chosen by this testbench:
// 0x40 RZ, 0x41 RY, 0x42 RX, 0x67 CZ, 0x6A controlled phase (its angle is not
// carried: a pair's parameter is one scalar for the whole instruction).
module tb_workloads;
  import hisepq_pkg::*;
  localparam int N = 32;
  localparam logic [6:0] G_RZ = 7'h40, G_RY = 7'h41, G_RX = 7'h42, G_CZ = 7'h67, G_CP = 7'h6A;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // ---------------------------------------------------------------- DUT
  logic iv, irdy, iacc, rv, rrdy, rwe, irq;
  logic [31:0] iinstr, irs1, irs2, rdata_r;
  logic [ID_W-1:0] iid, rid;
  logic ireq, irvalid, dreq, dgnt, dwe, drvalid;
  logic [31:0] iaddr, irdata, daddr, dwdata, drdata;
  logic [3:0] dbe;
  logic [N-1:0] fire, mtrig;
  logic [N-1:0][6:0] fgate;
  qrole_e [N-1:0] frole;
  logic [N-1:0][QID_W-1:0] fpart;
  logic [N-1:0][PARAM_W-1:0] fparam;
  logic qevv, idone;
  qevent_t qev;
  logic [15:0] now;
  logic [7:0] status;
  logic [31:0] vtype;
  logic busy;

  logic h_dreq, h_dwe, t_dreq;
  logic [3:0] h_dbe;
  logic [31:0] h_daddr, h_dwdata, t_daddr, t_dwdata;
  bit loading = 1;
  assign dreq   = loading ? t_dreq : h_dreq;
  assign dwe    = loading ? 1'b1 : h_dwe;
  assign dbe    = loading ? 4'hf : h_dbe;
  assign daddr  = loading ? t_daddr : h_daddr;
  assign dwdata = loading ? t_dwdata : h_dwdata;

  hisepq_top dut (
    .clk, .rst_n,
    .issue_valid_i(iv), .issue_ready_o(irdy), .issue_instr_i(iinstr), .issue_rs1_i(irs1), .issue_rs2_i(irs2),
    .issue_id_i(iid), .issue_accept_o(iacc),
    .result_valid_o(rv), .result_ready_i(rrdy), .result_id_o(rid), .result_data_o(rdata_r), .result_we_o(rwe),
    .irq_qvsg_meas_o(irq),
    .instr_req_i(ireq), .instr_addr_i(iaddr), .instr_rvalid_o(irvalid), .instr_rdata_o(irdata),
    .data_req_i(dreq), .data_gnt_o(dgnt), .data_we_i(dwe), .data_be_i(dbe), .data_addr_i(daddr),
    .data_wdata_i(dwdata), .data_rvalid_o(drvalid), .data_rdata_o(drdata),
    .measure_done_i(1'b0), .meas_we_i(1'b0), .meas_addr_i(32'd0), .meas_wdata_i(32'd0),
    .fire_o(fire), .fire_gate_o(fgate), .fire_role_o(frole), .fire_partner_o(fpart), .fire_param_o(fparam),
    .meas_trigger_o(mtrig),
    .qev_valid_o(qevv), .qev_o(qev), .issued_done_o(idone), .now_o(now), .status_o(status),
    .vtype_o(vtype), .busy_o(busy)
  );

  host_model host (
    .clk, .rst_n,
    .instr_req_o(ireq), .instr_addr_o(iaddr), .instr_rvalid_i(irvalid), .instr_rdata_i(irdata),
    .data_req_o(h_dreq), .data_gnt_i(dgnt), .data_we_o(h_dwe), .data_be_o(h_dbe), .data_addr_o(h_daddr),
    .data_wdata_o(h_dwdata), .data_rvalid_i(drvalid), .data_rdata_i(drdata),
    .issue_valid_o(iv), .issue_ready_i(irdy), .issue_instr_o(iinstr), .issue_rs1_o(irs1), .issue_rs2_o(irs2),
    .issue_id_o(iid), .issue_accept_i(iacc),
    .result_valid_i(rv), .result_ready_o(rrdy), .result_id_i(rid), .result_data_i(rdata_r), .result_we_i(rwe),
    .irq_qvsg_meas_i(irq)
  );

  // ---------------------------------------------------------------- encoders
  function automatic logic [31:0] q_op(input logic [6:0] gate, input int vs2, input int vs1, input int f3, input int blk);
    return {gate, 5'(vs2), 5'(vs1), 3'(f3), 5'(blk), OPC_OPV};
  endfunction
  function automatic logic [31:0] vsetvli(input int rd, input int rs1, input int sew, input int lmul);
    return {1'b0, 3'b000, 1'b1, 1'b1, 3'(sew), 3'(lmul), 5'(rs1), 3'b111, 5'(rd), OPC_OPV};
  endfunction
  function automatic logic [31:0] vle(input int vd, input int rs1, input int eew_f3);
    return {3'b000, 1'b0, 2'b00, 1'b1, 5'b00000, 5'(rs1), 3'(eew_f3), 5'(vd), OPC_LOADFP};
  endfunction
  function automatic logic [31:0] addi(input int rd, input int rs1, input int imm);
    return {12'(imm), 5'(rs1), 3'b000, 5'(rd), 7'b0010011};
  endfunction
  function automatic logic [31:0] lui(input int rd, input int imm20);
    return {20'(imm20), 5'(rd), 7'b0110111};
  endfunction
  localparam logic [31:0] JAL_SELF = 32'h0000_006F;

  // ---------------------------------------------------------------- program builder
  // Programs start at 0x0; vector data lives at 0x1000 (x10) + offset.
  typedef struct { logic [6:0] g; qrole_e r; int p; bit chk_p; logic [31:0] prm; bit chk_prm; } exp_t;
  logic [31:0] prog [$];
  logic [7:0]  dbytes [$];
  exp_t        expq [N][$];
  int          n_expected = 0, n_fired = 0;

  function automatic int lmul_for(input int n);
    if (n <= 8)  return 3'b111;   // mf2
    if (n <= 16) return 3'b000;   // m1
    if (n <= 32) return 3'b001;   // m2
    if (n <= 64) return 3'b010;   // m4
    return 3'b011;                // m8
  endfunction

  task automatic begin_prog();
    prog.delete(); dbytes.delete();
    prog.push_back(lui(10, 1));
  endtask

  task automatic set_vl(input int n);
    prog.push_back(addi(5, 0, n));
    prog.push_back(vsetvli(0, 5, 0, lmul_for(n)));
  endtask

  // stores vals (eb bytes each) in the data area and loads them into vreg
  task automatic put_vec(input int vreg, input int vals [$], input int eb);
    int off;
    while (dbytes.size() % 4 != 0) dbytes.push_back(8'h00);
    off = dbytes.size();
    foreach (vals[i]) for (int k = 0; k < eb; k++) dbytes.push_back(8'(vals[i] >> (8 * k)));
    prog.push_back(addi(11, 10, off));
    prog.push_back(vle(vreg, 11, (eb == 1) ? 3'b000 : (eb == 2) ? 3'b101 : 3'b110));
  endtask

  task automatic single(input logic [6:0] g, input int qs [$], input int tag, input int blk);
    set_vl(qs.size());
    put_vec(8, qs, 1);
    prog.push_back(addi(6, 0, tag));
    prog.push_back(q_op(g, 6, 8, 0, blk));
    foreach (qs[i]) begin expq[qs[i]].push_back('{g, ROLE_SINGLE, 0, 0, 32'(tag), 1}); n_expected++; end
  endtask

  task automatic rotg(input logic [6:0] g, input int qs [$], input int angle, input int blk);
    set_vl(qs.size());
    put_vec(8, qs, 1);
    prog.push_back(addi(20, 0, angle));
    prog.push_back(q_op(g, 20, 8, 2, blk));
    foreach (qs[i]) begin expq[qs[i]].push_back('{g, ROLE_SINGLE, 0, 0, 32'(angle), 1}); n_expected++; end
  endtask

  task automatic rotv(input logic [6:0] g, input int qs [$], input int angles [$], input int blk);
    set_vl(qs.size());
    put_vec(8, qs, 1);
    put_vec(16, angles, 4);
    prog.push_back(q_op(g, 16, 8, 3, blk));
    foreach (qs[i]) begin expq[qs[i]].push_back('{g, ROLE_SINGLE, 0, 0, 32'(angles[i]), 1}); n_expected++; end
  endtask

  task automatic pair(input logic [6:0] g, input int ctl [$], input int tgt [$], input int blk);
    set_vl(ctl.size());
    put_vec(8, tgt, 1);
    put_vec(16, ctl, 1);
    prog.push_back(q_op(g, 16, 8, 1, blk));
    foreach (ctl[i]) begin
      expq[ctl[i]].push_back('{g, ROLE_CTRL, tgt[i], 1, 0, 0});
      expq[tgt[i]].push_back('{g, ROLE_TGT, ctl[i], 1, 0, 0});
      n_expected += 2;
    end
  endtask

  task automatic tb_store(input logic [31:0] a, input logic [31:0] v);
    t_dreq = 1; t_daddr = a; t_dwdata = v;
    @(posedge clk);
    while (!dgnt) @(posedge clk);
    #1; t_dreq = 0;
  endtask

  // loads and runs the built program, then waits until every expected firing
  // has happened and the processor is idle; returns the cycles taken
  task automatic run_prog(input string name, output int cycles);
    int t0;
    prog.push_back(JAL_SELF);
    while (dbytes.size() % 4 != 0) dbytes.push_back(8'h00);
    loading = 1;
    foreach (prog[i]) tb_store(32'(4 * i), prog[i]);
    for (int i = 0; i < dbytes.size(); i += 4)
      tb_store(32'h1000 + 32'(i), {dbytes[i+3], dbytes[i+2], dbytes[i+1], dbytes[i]});
    loading = 0;
    @(posedge clk); #1;
    t0 = cyc;
    host.run(32'h0, 1000);
    while ((n_fired < n_expected || busy) && cyc - t0 < 20000) begin @(posedge clk); #1; end
    cycles = cyc - t0;
    chk(n_fired == n_expected && !busy, $sformatf("%s: %0d of %0d firings, processor idle", name, n_fired, n_expected));
    for (int q = 0; q < N; q++) chk(expq[q].size() == 0, $sformatf("%s: qubit %0d got all its gates", name, q));
  endtask

  // ---------------------------------------------------------------- monitors
  // per-qubit scoreboard
  always @(negedge clk) if (rst_n) for (int q = 0; q < N; q++) if (fire[q]) begin
    n_fired++;
    if (expq[q].size() == 0) chk(0, $sformatf("unexpected firing on qubit %0d (gate %h)", q, fgate[q]));
    else begin
      exp_t e;
      e = expq[q].pop_front();
      chk(fgate[q] == e.g && frole[q] == e.r && (!e.chk_p || int'(fpart[q]) == e.p) &&
          (!e.chk_prm || fparam[q] == e.prm),
          $sformatf("qubit %0d: gate %h role %0d partner %0d param %h, expected %h %0d %0d %h",
                    q, fgate[q], frole[q], fpart[q], fparam[q], e.g, e.r, e.p, e.prm));
    end
  end

  // events of one instruction on consecutive cycles; acceptance-to-event delays
  int ev_first_cyc = 0, ev_cnt = 0, n_instr_rate = 0, acc_cyc = -1, lat_first = -1, lat_last = -1;
  always @(negedge clk) if (rst_n) begin
    if (iv && irdy && iacc && iinstr[6:0] == OPC_OPV && iinstr[14:12] != 3'b111) acc_cyc = cyc;
    if (qevv) begin
      if (qev.first) begin ev_first_cyc = cyc; ev_cnt = 0; lat_first = cyc - acc_cyc; end
      ev_cnt++;
      if (qev.last) begin
        chk(cyc - ev_first_cyc == ev_cnt - 1,
            $sformatf("%0d events of one instruction in %0d cycles", ev_cnt, cyc - ev_first_cyc + 1));
        n_instr_rate++;
        lat_last = cyc - acc_cyc;
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- workloads
  int q_all [$], c_q [$], t_q [$], a_q [$], cyc_wl, lat0;
  initial begin
    t_dreq = 0; t_daddr = 0; t_dwdata = 0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;

    // GHZ-16: H(0); CX(k, k+1) for k = 0..14
    begin_prog();
    single(GATE_H, '{0}, 7, 2);
    c_q.delete(); t_q.delete();
    for (int k = 0; k < 15; k++) begin c_q.push_back(k); t_q.push_back(k + 1); end
    pair(GATE_CNOT, c_q, t_q, 2);
    run_prog("GHZ-16", cyc_wl);
    $display("GHZ-16: %0d firings in %0d cycles", n_fired, cyc_wl);

    // GraphState-32: H on all, CZ on the ring edges (even set, odd set)
    begin_prog();
    q_all.delete();
    for (int q = 0; q < 32; q++) q_all.push_back(q);
    single(GATE_H, q_all, 7, 1);
    c_q.delete(); t_q.delete();
    for (int k = 0; k < 16; k++) begin c_q.push_back(2 * k); t_q.push_back(2 * k + 1); end
    pair(G_CZ, c_q, t_q, 1);
    c_q.delete(); t_q.delete();
    for (int k = 0; k < 16; k++) begin c_q.push_back(2 * k + 1); t_q.push_back((2 * k + 2) % 32); end
    pair(G_CZ, c_q, t_q, 1);
    lat0 = n_fired;
    run_prog("GraphState-32", cyc_wl);
    $display("GraphState-32: %0d firings in %0d cycles", n_fired - lat0, cyc_wl);

    // QAOA-16, one layer on a ring: ZZ(a, b) = CX(a, b) RZ(b) CX(a, b)
    begin_prog();
    q_all.delete();
    for (int q = 0; q < 16; q++) q_all.push_back(q);
    single(GATE_H, q_all, 7, 1);
    for (int s = 0; s < 2; s++) begin
      c_q.delete(); t_q.delete();
      for (int k = 0; k < 8; k++) begin c_q.push_back(2 * k + s); t_q.push_back((2 * k + s + 1) % 16); end
      pair(GATE_CNOT, c_q, t_q, 1);
      rotg(G_RZ, t_q, 300 + s, 1);
      pair(GATE_CNOT, c_q, t_q, 1);
    end
    rotg(G_RX, q_all, 500, 1);
    lat0 = n_fired;
    run_prog("QAOA-16", cyc_wl);
    $display("QAOA-16: %0d firings in %0d cycles", n_fired - lat0, cyc_wl);

    // TwoLocal-16: RY(theta_q), CX on (2k, 2k+1) then (2k+1, 2k+2), RY(phi_q)
    begin_prog();
    a_q.delete();
    for (int q = 0; q < 16; q++) a_q.push_back(32'h1000_0000 + q * 32'h0101);
    rotv(G_RY, q_all, a_q, 1);
    c_q.delete(); t_q.delete();
    for (int k = 0; k < 8; k++) begin c_q.push_back(2 * k); t_q.push_back(2 * k + 1); end
    pair(GATE_CNOT, c_q, t_q, 1);
    c_q.delete(); t_q.delete();
    for (int k = 0; k < 7; k++) begin c_q.push_back(2 * k + 1); t_q.push_back(2 * k + 2); end
    pair(GATE_CNOT, c_q, t_q, 1);
    a_q.delete();
    for (int q = 0; q < 16; q++) a_q.push_back(32'h2000_0000 + q * 32'h0303);
    rotv(G_RY, q_all, a_q, 1);
    lat0 = n_fired;
    run_prog("TwoLocal-16", cyc_wl);
    $display("TwoLocal-16: %0d firings in %0d cycles", n_fired - lat0, cyc_wl);

    // QFT-8: for each target j, H(j), then the controlled phases from every
    // later qubit k > j onto j as one QV.PAIR (control k, target j)
    begin_prog();
    for (int j = 0; j < 8; j++) begin
      single(GATE_H, '{j}, 7, 1);
      if (j < 7) begin
        c_q.delete(); t_q.delete();
        for (int k = j + 1; k < 8; k++) begin c_q.push_back(k); t_q.push_back(j); end
        pair(G_CP, c_q, t_q, 1);
      end
    end
    lat0 = n_fired;
    run_prog("QFT-8", cyc_wl);
    $display("QFT-8: %0d firings in %0d cycles", n_fired - lat0, cyc_wl);

    // width sweep of every instruction class: the operand vectors are loaded
    // by one program and the quantum instruction is issued by a second one, so
    // its acceptance is not delayed by the loads. QV.ROT.V stops at m2 (its
    // angle group would need 16 or 32 registers beyond).
    for (int c = 0; c < 4; c++) begin
      int lat_ref;
      lat_ref = -1;
      for (int w = 8; w <= ((c == 3) ? 32 : 128); w *= 2) begin
        begin_prog();
        q_all.delete(); c_q.delete(); a_q.delete();
        for (int i = 0; i < w; i++) begin
          q_all.push_back(i % 32);
          c_q.push_back((i + 16) % 32);
          a_q.push_back(32'h3000_0000 + i);
        end
        set_vl(w);
        put_vec(8, q_all, 1);
        if (c == 1) put_vec(16, c_q, 1);
        if (c == 3) put_vec(16, a_q, 4);
        run_prog($sformatf("sweep load %0d", w), cyc_wl);
        begin_prog();
        set_vl(w);
        prog.push_back(addi(6, 0, 9));
        case (c)
          0: prog.push_back(q_op(GATE_H, 6, 8, 0, 1));
          1: prog.push_back(q_op(GATE_CNOT, 16, 8, 1, 1));
          2: prog.push_back(q_op(G_RZ, 6, 8, 2, 1));
          default: prog.push_back(q_op(G_RY, 16, 8, 3, 1));
        endcase
        foreach (q_all[i]) begin
          case (c)
            0: expq[q_all[i]].push_back('{GATE_H, ROLE_SINGLE, 0, 0, 32'd9, 1});
            1: begin
              expq[c_q[i]].push_back('{GATE_CNOT, ROLE_CTRL, q_all[i], 1, 0, 0});
              expq[q_all[i]].push_back('{GATE_CNOT, ROLE_TGT, c_q[i], 1, 0, 0});
              n_expected++;
            end
            2: expq[q_all[i]].push_back('{G_RZ, ROLE_SINGLE, 0, 0, 32'd9, 1});
            default: expq[q_all[i]].push_back('{G_RY, ROLE_SINGLE, 0, 0, 32'(a_q[i]), 1});
          endcase
          n_expected++;
        end
        run_prog($sformatf("sweep %0d", w), cyc_wl);
        $display("%-9s width %3d: accept -> first event %0d cycles, accept -> last event %0d cycles",
                 (c == 0) ? "QV.SINGLE" : (c == 1) ? "QV.PAIR" : (c == 2) ? "QV.ROT.G" : "QV.ROT.V", w, lat_first, lat_last);
        chk(lat_last - lat_first == w - 1, $sformatf("class %0d width %0d: events on consecutive cycles", c, w));
        if (lat_ref < 0) lat_ref = lat_first;
        chk(lat_first == lat_ref, $sformatf("class %0d width %0d: start delay %0d independent of width", c, w, lat_first));
      end
    end

    chk(n_instr_rate == 2 + 3 + 8 + 4 + 15 + 3 * 5 + 3, $sformatf("rate checked on %0d instructions", n_instr_rate));
    chk(host.n_reject == 0, "no instruction refused");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
