// tb_timed_fifo: checks that each queued gate fires in exactly the cycle its
// due time is reached, in arrival order, that a full queue reports full, and
// that the comparison survives the roll-over of the 16-bit time base.
module tb_timed_fifo;
  import hisepq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] now;
  logic push, full, fire;
  qfire_t pent, fent;
  logic [15:0] ptime;
  logic [2:0] count;

  timed_fifo #(.DEPTH(4), .TS_W(16)) dut (.clk, .rst_n, .now_i(now), .push_i(push), .push_entry_i(pent),
    .push_time_i(ptime), .full_o(full), .fire_o(fire), .fire_entry_o(fent), .count_o(count));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL @%0d: %s", now, m); end
  endtask

  always_ff @(posedge clk) now <= rst_n ? now + 1'b1 : 16'd0;

  // record of fires
  int unsigned fire_time [$];
  logic [6:0]  fire_gate [$];
  always @(negedge clk) if (rst_n && fire) begin
    fire_time.push_back(now);
    fire_gate.push_back(fent.gate);
  end

  task automatic do_push(input int gate, input int due);
    pent = '{gate: 7'(gate), role: ROLE_SINGLE, partner: 8'd0, param: 32'(gate * 3)};
    ptime = 16'(due);
    push = 1;
    @(posedge clk); #1;
    push = 0;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0;
  initial begin
    push = 0; pent = '0; ptime = 0; now = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    chk(!fire && !full && count == 0, "empty after reset");
    t0 = now;
    do_push(1, t0 + 10);
    do_push(2, t0 + 12);
    do_push(3, t0 + 5);    // due earlier, but must wait behind entry 1
    do_push(4, t0 + 20);
    chk(full && count == 4, "full with four entries");
    repeat (30) @(posedge clk);
    #1;
    chk(fire_time.size() == 4, "four fires");
    if (fire_time.size() == 4) begin
      chk(fire_gate[0] == 1 && fire_time[0] == t0 + 10, $sformatf("entry 1 at due time (%0d vs %0d)", fire_time[0], t0 + 10));
      chk(fire_gate[1] == 2 && fire_time[1] == t0 + 12, "entry 2 at due time");
      chk(fire_gate[2] == 3 && fire_time[2] == t0 + 13, "late entry 3 fires right after entry 2");
      chk(fire_gate[3] == 4 && fire_time[3] == t0 + 20, "entry 4 at due time");
    end
    chk(count == 0 && !full, "drained");
    // roll-over: wait for now close to 65535
    fire_time.delete(); fire_gate.delete();
    wait (now == 16'hfff0);
    @(negedge clk);
    do_push(9, 16'h0005);   // due after the wrap
    repeat (40) @(posedge clk);
    #1;
    chk(fire_time.size() == 1 && fire_time[0] == 5 && fire_gate[0] == 9, "fires after counter wrap");
    // entry already due fires in the next cycle
    fire_time.delete(); fire_gate.delete();
    @(negedge clk);
    t0 = now;
    do_push(11, t0);
    @(posedge clk); #1;
    chk(fire_time.size() == 1 && fire_time[0] == t0 + 1, "already-due entry fires next cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
