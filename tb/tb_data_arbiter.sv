// tb_data_arbiter: two requesters hammer a one-cycle memory model through the
// arbiter. Checks one grant per cycle, alternation under conflict, and that each
// read response returns to the requester that issued it with the right data.
module tb_data_arbiter;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] req, we, gnt, rvalid;
  logic [1:0][3:0] be;
  logic [1:0][31:0] addr, wdata, rdata;
  logic mreq, mwe, mrv, conflict;
  logic [3:0] mbe;
  logic [31:0] maddr, mwdata, mrdata;

  data_arbiter dut (.clk, .rst_n, .req_i(req), .we_i(we), .be_i(be), .addr_i(addr), .wdata_i(wdata),
    .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata), .mem_req_o(mreq), .mem_we_o(mwe), .mem_be_o(mbe),
    .mem_addr_o(maddr), .mem_wdata_o(mwdata), .mem_rvalid_i(mrv), .mem_rdata_i(mrdata), .conflict_o(conflict));

  // memory model: data = address xor constant, one cycle latency
  always_ff @(posedge clk) begin
    mrv    <= rst_n && mreq;
    mrdata <= maddr ^ 32'hA5A5_0000;
  end

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // each requester: issues reads to its own address range, expects responses in order
  int sent [2], recv [2], grants [2];
  int last_gnt = -1, alternations = 0, conflicts = 0;
  logic [31:0] exp_q [2][$];
  always @(negedge clk) if (rst_n) begin
    chk(!(gnt[0] && gnt[1]), "at most one grant");
    if (conflict) begin
      conflicts++;
      if (last_gnt >= 0 && ((gnt[0] && last_gnt == 1) || (gnt[1] && last_gnt == 0))) alternations++;
      last_gnt = gnt[1] ? 1 : 0;
    end
    for (int r = 0; r < 2; r++) begin
      if (rvalid[r]) begin
        if (exp_q[r].size() == 0) chk(0, "unexpected response");
        else chk(rdata[r] == (exp_q[r].pop_front() ^ 32'hA5A5_0000), $sformatf("requester %0d data", r));
        recv[r]++;
      end
      if (gnt[r]) begin exp_q[r].push_back(addr[r]); grants[r]++; end
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < 2; r++) begin
      if (!req[r] || gnt[r]) begin
        int n;
        n = sent[r] + (gnt[r] ? 1 : 0);
        req[r]  <= (n < 40) && ($urandom % 4 != 0);
        addr[r] <= 32'(r * 32'h1000 + n * 4);
      end
      if (gnt[r]) sent[r]++;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = 0; we = 0; be = '1; addr = '0; wdata = '0;
    sent[0] = 0; sent[1] = 0; recv[0] = 0; recv[1] = 0; grants[0] = 0; grants[1] = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    wait (sent[0] == 40 && sent[1] == 40);
    repeat (5) @(posedge clk);
    chk(recv[0] == 40 && recv[1] == 40, $sformatf("all responses returned (%0d, %0d)", recv[0], recv[1]));
    chk(conflicts > 0, "conflicts happened");
    chk(alternations == conflicts - 1, $sformatf("round robin under conflict (%0d of %0d)", alternations, conflicts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
