// tb_hisepq_top: end-to-end test of the quantum vector control processor at
// its default size (VLEN 128, 32 qubits) with the behavioural host, a readout
// model and a scoreboard on the per-qubit firing outputs.
//
// Phase 1 is the Bell-state program of the architecture description (setup,
// two vle8.v loads, qv.h, qv.cx, qv.meas, qv.resume, self-loop). The qv.cx
// word is encoded as QV.PAIR (funct3 001, control in vs2, target in vs1) as the
// instruction-class table defines. Checks: H on the 8 control qubits, CNOT
// control/target pairs, MEASURE triggers, the halt raised at the measurement
// and dropped exactly RESUME_DELAY cycles after measure_done, RESUME only after
// the release, 32 events and 40 qubit firings. The cycle numbers are printed
// next to those of the published trace.
// Phase 2 exercises the rest: an m2 QV.ROT.V with 32 per-qubit angles right
// after its vle32.v (read-after-write stall), QV.ROT.G, an illegal QV.ROT.V at
// m4 (rejected), an m8 burst of 128 indices with 16 repeats of one qubit
// (dispatcher back-pressure) and four out-of-range indices (dropped), a reload
// of the burst's register group (write-after-read stall), host loads racing
// the vector loads (arbiter conflict), a vl = 0 instruction, the host reading a
// measurement result written by the readout model, and a stray measure_done.
// Every mechanism is counted; one that never happened is a failure.
module tb_hisepq_top;
  import hisepq_pkg::*;
  localparam int N = 32;
  localparam int RESUME_DELAY = 2;
  localparam logic [6:0] G_ROTG = 7'h40, G_ROTV = 7'h41;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;   // 100 MHz
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
  logic md, mwe;
  logic [31:0] maddr, mwdata;
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

  // host data port is shared with the program loader of the testbench
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
    .measure_done_i(md), .meas_we_i(mwe), .meas_addr_i(maddr), .meas_wdata_i(mwdata),
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
  function automatic logic [31:0] lw(input int rd, input int rs1, input int imm);
    return {12'(imm), 5'(rs1), 3'b010, 5'(rd), 7'b0000011};
  endfunction
  function automatic logic [31:0] sw(input int rs2, input int rs1, input int imm);
    logic [11:0] i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b010, i[4:0], 7'b0100011};
  endfunction
  localparam logic [31:0] JAL_SELF = 32'h0000_006F;

  // ---------------------------------------------------------------- loader
  task automatic tb_store(input logic [31:0] a, input logic [31:0] v);
    t_dreq = 1; t_daddr = a; t_dwdata = v;
    @(posedge clk);
    while (!dgnt) @(posedge clk);
    #1; t_dreq = 0;
  endtask

  // ---------------------------------------------------------------- readout model
  // After the expected number of MEASURE triggers it waits ADC_LAT cycles
  // (106 -> 153 in the published trace), writes one result word per measured
  // qubit at 0x2000 + 4q and pulses measure_done.
  localparam int ADC_LAT = 47;
  int meas_expected = 0, meas_seen = 0, last_trig_cyc = 0, md_cyc = -1, n_md = 0;
  int meas_q [$];
  always @(negedge clk) if (rst_n) for (int q = 0; q < N; q++) if (mtrig[q]) begin
    meas_q.push_back(q); meas_seen++; last_trig_cyc = cyc;
  end
  initial begin
    md = 0; mwe = 0; maddr = 0; mwdata = 0;
    forever begin
      @(posedge clk);
      if (meas_expected > 0 && meas_seen >= meas_expected) begin
        meas_expected = 0;
        repeat (ADC_LAT - meas_q.size() - 1) @(posedge clk);
        #1;
        while (meas_q.size() > 0) begin
          int q;
          q = meas_q.pop_front();
          mwe = 1; maddr = 32'h2000 + 32'(4 * q); mwdata = 32'h100 + 32'(q);
          @(posedge clk); #1;
        end
        mwe = 0;
        md = 1; md_cyc = cyc; n_md++;
        @(posedge clk); #1;
        md = 0;
      end
    end
  end

  // ---------------------------------------------------------------- monitors
  typedef struct { int t; int q; logic [6:0] g; qrole_e r; int p; logic [31:0] prm; } fire_rec_t;
  fire_rec_t fires [$];
  int n_qev = 0, n_raw = 0, n_war = 0, n_rej = 0, n_bp = 0, n_drop = 0, n_conf = 0, n_spur = 0, n_vl0 = 0;
  int n_halt_cyc = 0, n_rise = 0, n_fall = 0, rise_cyc = -1, fall_cyc = -1, meas_acc_cyc = -1, n_issued_done = 0;
  logic irq_d = 0;
  always @(negedge clk) if (rst_n) begin
    for (int q = 0; q < N; q++) if (fire[q])
      fires.push_back('{cyc, q, fgate[q], frole[q], int'(fpart[q]), fparam[q]});
    n_qev  += qevv;
    n_raw  += status[0];
    n_war  += status[1];
    n_rej  += status[2];
    n_bp   += status[3];
    n_drop += status[4];
    n_conf += status[5];
    n_spur += status[6];
    n_vl0  += status[7];
    n_halt_cyc += irq;
    n_issued_done += idone;
    if (irq && !irq_d) begin n_rise++; rise_cyc = cyc; end
    if (!irq && irq_d) begin n_fall++; fall_cyc = cyc; end
    irq_d = irq;
    if (iv && irdy && iacc && iinstr[31:25] == GATE_MEAS && iinstr[14:12] == 3'b000) meas_acc_cyc = cyc;
  end

  function automatic int count_fires(input int from, input logic [6:0] g);
    int n = 0;
    for (int i = from; i < fires.size(); i++) if (fires[i].g == g) n++;
    return n;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- test
  logic [31:0] prog1 [$], prog2 [$];
  int t0, f1, first_h = -1, first_cx = -1, first_meas = -1, first_res = -1, last_res = -1;
  initial begin
    t_dreq = 0; t_daddr = 0; t_dwdata = 0;
    // Bell-state program, 14 words
    prog1 = '{addi(6, 0, 32'h66), addi(7, 0, 32'h55), addi(5, 0, 8), vsetvli(0, 5, 0, 3'b111), 32'h0000_0013,
              lui(10, 1), vle(1, 10, 0), addi(11, 10, 8), vle(2, 11, 0),
              q_op(GATE_H, 7, 1, 0, 12), q_op(GATE_CNOT, 1, 2, 1, 12), q_op(GATE_MEAS, 7, 1, 0, 12),
              q_op(GATE_RESUME, 6, 2, 0, 12), JAL_SELF};
    // words printed in the program listing
    chk(prog1[0] == 32'h06600313 && prog1[1] == 32'h05500393 && prog1[2] == 32'h00800293 &&
        prog1[3] == 32'h0C72F057 && prog1[5] == 32'h00001537 && prog1[6] == 32'h02050087 &&
        prog1[7] == 32'h00850593 && prog1[8] == 32'h02058107 && prog1[9] == 32'hC8708657 &&
        prog1[11] == 32'hD0708657 && prog1[12] == 32'hF0610657, "encoder reproduces the listing words");
    // Phase 2 program at 0x200
    prog2 = '{addi(12, 10, 32'h40), addi(13, 10, 32'h80), addi(14, 10, 32'h100), addi(5, 0, 32),
              vsetvli(0, 5, 0, 3'b001),                         // e8 m2, vl = 32
              vle(4, 12, 0), vle(8, 13, 3'b110),                // indices v4-v5, angles v8-v15
              q_op(G_ROTV, 8, 4, 3, 3),                         // waits for the angle load
              lw(28, 10, 0), lw(29, 10, 4), sw(29, 10, 32'h7F0), lw(30, 10, 8),
              addi(20, 0, 32'h123), q_op(G_ROTG, 20, 4, 2, 5),
              addi(5, 0, 64), vsetvli(0, 5, 0, 3'b010),         // e8 m4
              q_op(G_ROTV, 8, 4, 3, 3),                         // illegal at m4
              addi(5, 0, 128), vsetvli(0, 5, 0, 3'b011),        // e8 m8, vl = 128
              vle(16, 14, 0), q_op(GATE_H, 7, 16, 0, 20),       // burst
              vle(16, 14, 0),                                    // reload while still read
              addi(5, 0, 0), vsetvli(0, 5, 0, 3'b011), q_op(GATE_H, 7, 16, 0, 1),  // vl = 0
              lui(15, 2), lw(31, 15, 0), lw(9, 15, 8),          // measurement results of q0, q2
              JAL_SELF};
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    foreach (prog1[i]) tb_store(32'(4 * i), prog1[i]);
    foreach (prog2[i]) tb_store(32'h200 + 32'(4 * i), prog2[i]);
    for (int i = 0; i < 8; i += 4) begin
      tb_store(32'h1000 + i, {8'(2*i+6), 8'(2*i+4), 8'(2*i+2), 8'(2*i)});
      tb_store(32'h1008 + i, {8'(2*i+7), 8'(2*i+5), 8'(2*i+3), 8'(2*i+1)});
    end
    for (int i = 0; i < 32; i += 4) begin
      logic [31:0] w;
      for (int b = 0; b < 4; b++) w[8*b +: 8] = 8'(((i + b) * 7 + 3) % 32);
      tb_store(32'h1040 + i, w);
    end
    for (int i = 0; i < 32; i++) tb_store(32'h1080 + 4 * i, 32'hA000_0000 + 32'(i));
    for (int i = 0; i < 128; i += 4) begin
      logic [31:0] w;
      for (int b = 0; b < 4; b++) w[8*b +: 8] = burst_idx(i + b);
      tb_store(32'h1100 + i, w);
    end
    loading = 0;
    @(posedge clk); #1;

    // ---------------- phase 1
    meas_expected = 8;
    t0 = cyc;
    host.run(32'h0, 100);
    wait (fires.size() >= 40 || cyc - t0 > 2000);
    repeat (40) @(posedge clk); #1;
    f1 = fires.size();
    chk(f1 == 40, $sformatf("Bell program: 40 qubit firings (%0d)", f1));
    chk(n_qev == 32, $sformatf("Bell program: 32 events (%0d)", n_qev));
    for (int i = 0; i < f1; i++) begin
      fire_rec_t r;
      r = fires[i];
      case (r.g)
        GATE_H: begin
          chk(r.q % 2 == 0 && r.q < 16 && r.r == ROLE_SINGLE && r.prm == 32'h55, "H on control qubit");
          if (first_h < 0) first_h = r.t - t0;
        end
        GATE_CNOT: begin
          chk(r.q < 16 && ((r.q % 2 == 0 && r.r == ROLE_CTRL && r.p == r.q + 1) ||
                           (r.q % 2 == 1 && r.r == ROLE_TGT && r.p == r.q - 1)), "CNOT control/target pair");
          if (first_cx < 0) first_cx = r.t - t0;
        end
        GATE_MEAS: begin
          chk(r.q % 2 == 0 && r.q < 16, "MEASURE on control qubit");
          if (first_meas < 0) first_meas = r.t - t0;
        end
        GATE_RESUME: begin
          chk(r.q % 2 == 1 && r.q < 16 && r.prm == 32'h66, "RESUME on target qubit with tag 0x66");
          chk(fall_cyc >= 0 && r.t > fall_cyc, "RESUME fires only after the halt is released");
          if (first_res < 0) first_res = r.t - t0;
          last_res = r.t - t0;
        end
        default: chk(0, $sformatf("unexpected gate %h", r.g));
      endcase
    end
    // per-qubit order H -> CNOT -> MEASURE on the control qubits
    for (int q = 0; q < 16; q += 2) begin
      int th, tc, tm;
      th = -1; tc = -1; tm = -1;
      for (int i = 0; i < f1; i++) if (fires[i].q == q) begin
        if (fires[i].g == GATE_H) th = fires[i].t;
        if (fires[i].g == GATE_CNOT) tc = fires[i].t;
        if (fires[i].g == GATE_MEAS) tm = fires[i].t;
      end
      chk(th >= 0 && th < tc && tc < tm, $sformatf("qubit %0d gate order", q));
    end
    chk(meas_seen == 8, "8 measurement triggers");
    chk(n_rise == 1 && rise_cyc == meas_acc_cyc + 1, "halt raised the cycle after the measurement is accepted");
    chk(n_fall == 1 && fall_cyc == md_cyc + RESUME_DELAY, $sformatf("halt released %0d cycles after measure_done",
        fall_cyc - md_cyc));
    chk(n_issued_done == 1, "issued_done once for the measurement");
    $display("Bell program timing (cycles from start; published trace in brackets):");
    $display("  halt rises %0d [31]  first H %0d [60]  first CNOT %0d [83]  first MEASURE %0d [106]",
             rise_cyc - t0, first_h, first_cx, first_meas);
    $display("  measure_done %0d [153]  halt falls %0d [155]  first RESUME %0d [177]  last RESUME %0d",
             md_cyc - t0, fall_cyc - t0, first_res, last_res);
    $display("  release to first RESUME %0d cycles", first_res - (fall_cyc - t0));

    // ---------------- phase 2
    host.run(32'h200, 200);
    wait (fires.size() >= f1 + 32 + 32 + 124 || cyc - t0 > 20000);
    repeat (60) @(posedge clk); #1;
    chk(count_fires(f1, G_ROTV) == 32 && count_fires(f1, G_ROTG) == 32, "ROT.V and ROT.G: 32 firings each");
    chk(count_fires(f1, GATE_H) == 124, $sformatf("burst: 124 of 128 indices fire (%0d)", count_fires(f1, GATE_H)));
    for (int i = f1; i < fires.size(); i++) begin
      if (fires[i].g == G_ROTV) begin
        int e;
        e = -1;
        for (int k = 0; k < 32; k++) if ((k * 7 + 3) % 32 == fires[i].q) e = k;
        chk(fires[i].prm == 32'hA000_0000 + 32'(e), $sformatf("ROT.V angle of qubit %0d", fires[i].q));
      end
      if (fires[i].g == G_ROTG) chk(fires[i].prm == 32'h123, "ROT.G scalar angle");
    end
    chk(host.n_reject == 1, $sformatf("one illegal instruction refused (%0d)", host.n_reject));
    chk(host.x[31] == 32'h100 && host.x[9] == 32'h102, $sformatf("host reads back measurement results (%h %h)", host.x[31], host.x[9]));
    chk(host.n_results == host.n_offload - host.n_reject, "every accepted instruction completes");
    chk(n_qev == 32 + 32 + 32 + 128, $sformatf("event count %0d", n_qev));
    chk(!busy, "processor idle after the program");
    chk(vtype == 32'h0000_00C3, $sformatf("vtype reads e8, m8 (%h)", vtype));
    // stray measure_done while no measurement is pending
    @(posedge clk); #1; md = 1; @(posedge clk); #1; md = 0;
    repeat (3) @(posedge clk); #1;

    // ---------------- mechanisms
    $display("mechanisms: raw=%0d war=%0d halt_cycles=%0d resume=%0d backpressure=%0d reject=%0d drop=%0d conflict=%0d vl0=%0d spurious=%0d",
             n_raw, n_war, n_halt_cyc, n_fall, n_bp, n_rej, n_drop, n_conf, n_vl0, n_spur);
    chk(n_raw > 0, "mechanism: read-after-write stall");
    chk(n_war > 0, "mechanism: write-after-read stall");
    chk(n_halt_cyc > 0 && host.halt_cycles > 0, "mechanism: host halt");
    chk(n_fall == 1, "mechanism: resume");
    chk(n_bp > 0, "mechanism: dispatcher back-pressure");
    chk(n_rej == 1, "mechanism: illegal instruction rejected");
    chk(n_drop == 4, $sformatf("mechanism: out-of-range events dropped (%0d)", n_drop));
    chk(n_conf > 0, "mechanism: data arbiter conflict");
    chk(n_vl0 > 0, "mechanism: vl = 0 configuration");
    chk(n_spur == 1, "mechanism: stray measure_done flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] burst_idx(input int i);
    if (i < 16) return 8'd5;
    if (i < 20) return 8'(200 + i);
    return 8'(i % 32);
  endfunction
endmodule
