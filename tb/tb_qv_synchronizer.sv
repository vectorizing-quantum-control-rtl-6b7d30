// tb_qv_synchronizer: halt-resume protocol. Checks that qvsg_meas rises in the
// cycle after the measurement is accepted, stays high while the stream drains
// and while the readout is pending, that issued_done pulses once after the
// drain, and that the halt clears exactly RESUME_DELAY (2) cycles after
// measure_done; also an early measure_done and a spurious one.
module tb_qv_synchronizer;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic issue, drained, mdone, halt, idone, spur;
  qv_synchronizer #(.RESUME_DELAY(2)) dut (.clk, .rst_n, .meas_issue_i(issue), .meas_drained_i(drained),
    .measure_done_i(mdone), .qvsg_meas_o(halt), .issued_done_o(idone), .spurious_done_o(spur));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", cyc, m); end
  endtask

  int idone_count = 0;
  always @(negedge clk) if (rst_n && idone) idone_count++;

  task automatic pulse(ref logic s);
    s = 1; @(posedge clk); #1; s = 0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t_done;
  initial begin
    issue = 0; drained = 0; mdone = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    chk(!halt, "no halt after reset");
    pulse(issue);
    chk(halt, "halt right after the measurement is accepted");
    repeat (10) @(posedge clk); #1;
    chk(halt && idone_count == 0, "halt holds while draining");
    pulse(drained);
    @(negedge clk); #1;
    chk(idone_count == 1, "issued_done after drain");
    repeat (20) @(posedge clk); #1;
    chk(halt, "halt holds until measure_done");
    mdone = 1; t_done = cyc; @(posedge clk); #1; mdone = 0;
    chk(halt, "still halted 1 cycle after measure_done");
    @(posedge clk); #1;
    chk(!halt && cyc == t_done + 2, "halt cleared 2 cycles after measure_done");
    // early measure_done (before the drain) is remembered
    pulse(issue);
    pulse(mdone);
    chk(halt, "early measure_done does not release before the drain");
    pulse(drained);
    repeat (3) @(posedge clk); #1;
    chk(!halt, "released after drain with remembered measure_done");
    chk(idone_count == 2, "second issued_done");
    // spurious measure_done while idle
    mdone = 1; #1;
    chk(spur, "spurious measure_done flagged");
    @(posedge clk); #1; mdone = 0;
    chk(!halt, "spurious measure_done does not halt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
