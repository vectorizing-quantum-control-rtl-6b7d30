// tb_qv_adapter: streams events of three instructions through the adapter
// with a randomly stalling consumer and checks order, payload, and the
// per-instruction sequence number.
module tb_qv_adapter;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ov, ordy;
  qevent_t iev, oev;
  qv_adapter dut (.clk, .rst_n, .in_valid_i(iv), .in_ready_o(ir), .in_ev_i(iev),
                  .out_valid_o(ov), .out_ready_i(ordy), .out_ev_o(oev));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int NEV = 30;   // 3 instructions of 10 events
  int got = 0;
  int stalls = 0;
  always @(posedge clk) if (rst_n) ordy <= ($urandom % 3) != 0;
  always @(negedge clk) if (rst_n) begin
    if (iv && !ir) stalls++;
    if (ov && ordy) begin
      chk(oev.q0 == 16'(got) && oev.param == 32'(got * 7), $sformatf("event %0d payload", got));
      chk(oev.seq == 8'(got / 10), $sformatf("event %0d seq %0d", got, oev.seq));
      chk(oev.first == (got % 10 == 0) && oev.last == (got % 10 == 9), "qualifiers kept");
      got++;
    end
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; iev = '0; ordy = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int k = 0; k < NEV; k++) begin
      iev = '0;
      iev.op_type = OP_QSINGLE; iev.gate = 7'h64; iev.q0 = 16'(k); iev.param = 32'(k * 7);
      iev.first = (k % 10 == 0); iev.last = (k % 10 == 9);
      iev.seq = 8'hee;   // overwritten by the adapter
      iv = 1;
      @(posedge clk);
      while (!ir) @(posedge clk);
      #1;
    end
    iv = 0;
    repeat (50) @(posedge clk);
    chk(got == NEV, $sformatf("all events delivered (%0d)", got));
    chk(stalls > 0, "consumer stalls reached the producer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
