// tb_qv_writeback: four sources deliver completions at random while the host
// side accepts results at random. Checks that every completion arrives exactly
// once with its id, data and write flag, and that sources are refused while
// their slot is full.
module tb_qv_writeback;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] sv, sr, swe;
  logic [3:0][ID_W-1:0] sid;
  logic [3:0][31:0] sdata;
  logic rv, rr, rwe;
  logic [ID_W-1:0] rid;
  logic [31:0] rdata;
  qv_writeback dut (.clk, .rst_n, .src_valid_i(sv), .src_ready_o(sr), .src_id_i(sid), .src_data_i(sdata),
    .src_we_i(swe), .result_valid_o(rv), .result_ready_i(rr), .result_id_o(rid), .result_data_o(rdata), .result_we_o(rwe));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int sent = 0, got = 0, refused = 0;
  int pending [bit [35:0]];   // key {src, id, data[...]} -> count
  always @(negedge clk) if (rst_n) begin
    for (int s = 0; s < 4; s++) if (sv[s]) begin
      if (sr[s]) begin
        pending[{sid[s], sdata[s]}]++;
        sent++;
      end else refused++;
    end
    if (rv && rr) begin
      // the source is carried in data[31:30]; only source 0 (vsetvli) writes rd
      bit found;
      found = pending.exists({rid, rdata}) && (rwe == (rdata[31:30] == 2'd0));
      if (found) begin
        pending[{rid, rdata}]--;
        if (pending[{rid, rdata}] == 0) pending.delete({rid, rdata});
      end
      chk(found, $sformatf("result id=%0d data=%h matches a delivered completion", rid, rdata));
      got++;
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    sv = 0; sid = '0; sdata = '0; swe = 4'b0001; rr = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int k = 0; k < 400; k++) begin
      for (int s = 0; s < 4; s++) begin
        if (!sv[s] || sr[s]) begin   // hold until taken
          sv[s] = ($urandom % 2);
          sid[s] = ID_W'($urandom);
          sdata[s] = (s == 0) ? {2'(s), 30'($urandom)} : {2'(s), 30'(k)};
        end
      end
      rr = ($urandom % 4) != 0;
      @(posedge clk); #1;
    end
    sv = 0; rr = 1;
    repeat (10) @(posedge clk);
    chk(got == sent && pending.size() == 0, $sformatf("every completion returned once (%0d/%0d)", got, sent));
    chk(refused > 0, "full slots refused a source");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
