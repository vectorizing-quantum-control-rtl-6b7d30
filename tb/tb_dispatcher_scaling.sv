// tb_dispatcher_scaling: the quantum dispatcher at N_QUBITS = 8, 16, 32, 64
// and 128, side by side. These are the qubit counts of the architecture's
// scalability study.
//
// Each size gets its own stream of 600 random events: single-qubit gates,
// measurements and pairs. A share of the indices is out of range, or is a pair
// whose two qubits are equal; those events must be dropped. Bursts on qubit 0
// with the longest Blk_imm fill its queue and force back-pressure.
// A reference model, computed here from the accepted events alone, gives each
// qubit's exact firing sequence and cycle:
//   * the first firing is at max(due, accept + 1);
//   * each later firing is at least one cycle after the previous one on that
//     qubit;
//   * due = counter value at acceptance + Blk_imm.
// Every firing is checked against it: cycle, gate, role, partner, parameter
// and the measurement trigger. At the end, every event must have fired or been
// dropped, and pending_o must be low.
module tb_dispatcher_scaling;
  import hisepq_pkg::*;
  localparam int NSIZES = 5;
  localparam int NEV = 600;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_done = 0;

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  for (genvar g = 0; g < NSIZES; g++) begin : g_n
    localparam int NQ = 8 << g;
    logic ev_valid, ev_ready, drop, bp, pend;
    qevent_t ev;
    logic [NQ-1:0] fire, mtrig;
    logic [NQ-1:0][6:0] fgate;
    qrole_e [NQ-1:0] frole;
    logic [NQ-1:0][QID_W-1:0] fpart;
    logic [NQ-1:0][PARAM_W-1:0] fparam;
    logic [15:0] now;

    quantum_dispatcher #(.N_QUBITS(NQ)) dut (.clk, .rst_n, .ev_valid_i(ev_valid), .ev_ready_o(ev_ready), .ev_i(ev),
      .fire_o(fire), .fire_gate_o(fgate), .fire_role_o(frole), .fire_partner_o(fpart), .fire_param_o(fparam),
      .meas_trigger_o(mtrig), .drop_o(drop), .backpressure_o(bp), .now_o(now), .pending_o(pend));

    typedef struct { int due; int acc; logic [6:0] g; qrole_e r; int p; logic [31:0] prm; } e_t;
    e_t expq [NQ][$];
    int last_fire [NQ];
    int n_exp = 0, n_fire = 0, n_drop = 0, n_drop_exp = 0, n_bp = 0, n_late = 0;

    always @(negedge clk) if (rst_n) begin
      for (int q = 0; q < NQ; q++) if (fire[q]) begin
        n_fire++;
        if (expq[q].size() == 0) chk(0, $sformatf("N=%0d: unexpected firing on qubit %0d", NQ, q));
        else begin
          e_t e;
          int t_exp;
          e = expq[q].pop_front();
          t_exp = e.due;
          if (e.acc + 1 > t_exp) t_exp = e.acc + 1;
          if (last_fire[q] + 1 > t_exp) t_exp = last_fire[q] + 1;
          if (t_exp > e.due) n_late++;
          chk(int'(now) == t_exp && fgate[q] == e.g && frole[q] == e.r && int'(fpart[q]) == e.p &&
              fparam[q] == e.prm && mtrig[q] == (e.g == GATE_MEAS),
              $sformatf("N=%0d qubit %0d: fired at %0d gate %h role %0d partner %0d, expected %0d %h %0d %0d",
                        NQ, q, now, fgate[q], frole[q], fpart[q], t_exp, e.g, e.r, e.p));
          last_fire[q] = int'(now);
        end
      end
      n_drop += drop;
      n_bp   += bp;
    end

    initial begin
      ev_valid = 0; ev = '0;
      foreach (last_fire[q]) last_fire[q] = -10;
      wait (rst_n);
      @(posedge clk); #1;
      for (int k = 0; k < NEV; k++) begin
        bit is_pair;
        int q0, q1, blk, acc;
        logic [6:0] gate;
        logic [31:0] prm;
        is_pair = ($urandom % 3) == 0;
        q0 = $urandom % (NQ + NQ / 8);
        q1 = is_pair ? (($urandom % 8 == 0) ? q0 : $urandom % NQ) : 0;
        blk = $urandom % 32;
        gate = is_pair ? 7'h66 : (($urandom % 4 == 0) ? GATE_MEAS : GATE_H);
        prm = $urandom;
        if (k % 100 < 6) begin is_pair = 0; q0 = 0; blk = 31; gate = GATE_H; end
        ev = '0;
        ev.op_type = is_pair ? OP_QPAIR : OP_QSINGLE;
        ev.gate = gate; ev.q0 = 16'(q0); ev.q1 = 16'(q1); ev.blk = 5'(blk); ev.param = prm;
        ev.first = 1; ev.last = 1;
        ev_valid = 1;
        #1;
        while (!ev_ready) begin @(posedge clk); #1; end
        acc = int'(now);
        if (q0 >= NQ || (is_pair && (q1 >= NQ || q1 == q0))) n_drop_exp++;
        else if (is_pair) begin
          expq[q0].push_back('{acc + blk, acc, gate, ROLE_CTRL, q1, prm});
          expq[q1].push_back('{acc + blk, acc, gate, ROLE_TGT, q0, prm});
          n_exp += 2;
        end else begin
          expq[q0].push_back('{acc + blk, acc, gate, ROLE_SINGLE, 0, prm});
          n_exp++;
        end
        @(posedge clk); #1;
        ev_valid = 0;
        if ($urandom % 2 == 0) begin @(posedge clk); #1; end
      end
      repeat (200) @(posedge clk);
      #1;
      chk(n_fire == n_exp, $sformatf("N=%0d: %0d of %0d expected firings", NQ, n_fire, n_exp));
      chk(n_drop == n_drop_exp && n_drop > 0, $sformatf("N=%0d: %0d drops, expected %0d", NQ, n_drop, n_drop_exp));
      chk(n_bp > 0, $sformatf("N=%0d: back-pressure seen", NQ));
      chk(!pend, $sformatf("N=%0d: nothing pending at the end", NQ));
      $display("N=%3d: %0d firings (%0d delayed behind an earlier gate), %0d drops, %0d back-pressure cycles",
               NQ, n_fire, n_late, n_drop, n_bp);
      n_done++;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    wait (n_done == NSIZES);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
