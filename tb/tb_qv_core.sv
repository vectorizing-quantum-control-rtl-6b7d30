// tb_qv_core: the quantum vector core on its own. The testbench offers the
// Bell-state sequence (vsetvli, two vle8.v, qv.h, qv.cx, qv.meas) and an m1
// QV.ROT.V with its vle32.v, serves the load unit from a word memory with
// random latency, and takes events with random back-pressure. Checks the
// event stream element by element, one result per accepted instruction with
// its id (the vsetvli result carrying vl), the measurement pulses, and that a
// quantum instruction reading a register still being loaded waits (RAW stall).
module tb_qv_core;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, acc, rv, rr, rwe, mreq, mgnt, mrv, evv, evr, pause, mi, md, raw, war, rej;
  logic [31:0] instr, rs1, rs2, rdata, maddr, mrdata;
  logic [ID_W-1:0] id, rid;
  qevent_t ev;
  logic [VL_W-1:0] vl;
  qv_core dut (.clk, .rst_n, .issue_valid_i(iv), .issue_ready_o(ir), .issue_instr_i(instr), .issue_rs1_i(rs1),
    .issue_rs2_i(rs2), .issue_id_i(id), .issue_accept_o(acc), .result_valid_o(rv), .result_ready_i(rr),
    .result_id_o(rid), .result_data_o(rdata), .result_we_o(rwe), .mem_req_o(mreq), .mem_gnt_i(mgnt),
    .mem_addr_o(maddr), .mem_rvalid_i(mrv), .mem_rdata_i(mrdata), .ev_valid_o(evv), .ev_ready_i(evr), .ev_o(ev),
    .pause_i(pause), .meas_issue_o(mi), .meas_drained_o(md), .raw_stall_o(raw), .war_stall_o(war),
    .reject_o(rej), .csr_vl_o(vl));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  // memory: 1 KiB from 0x1000, grant at random, data next cycle
  logic [31:0] mem [256];
  always @(negedge clk) mgnt = mreq && ($urandom % 2);
  always @(posedge clk) begin
    mrv <= mreq && mgnt;
    mrdata <= mem[maddr[9:2]];
  end
  always @(posedge clk) evr <= ($urandom % 4) != 0;

  qevent_t evs [$];
  int res_id [$];
  logic [31:0] res_data [$];
  int n_mi = 0, n_md = 0, n_raw = 0;
  always @(negedge clk) if (rst_n) begin
    if (evv && evr) evs.push_back(ev);
    if (rv && rr) begin res_id.push_back(int'(rid)); res_data.push_back(rdata); end
    n_mi += mi; n_md += md; n_raw += raw;
  end

  task automatic offer(input logic [31:0] w, input logic [31:0] a, input logic [31:0] b, input int i);
    iv = 1; instr = w; rs1 = a; rs2 = b; id = ID_W'(i);
    @(posedge clk);
    while (!ir) @(posedge clk);
    chk(acc, $sformatf("instruction %h accepted", w));
    #1; iv = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; instr = 0; rs1 = 0; rs2 = 0; id = 0; rr = 1; pause = 0; mrv = 0; mrdata = 0;
    for (int i = 0; i < 256; i++) mem[i] = 32'hA000_0000 + 32'(i);
    mem[0] = 32'h06040200; mem[1] = 32'h0E0C0A08;    // 0x1000: 0 2 4 ... 14
    mem[2] = 32'h07050301; mem[3] = 32'h0F0D0B09;    // 0x1008: 1 3 5 ... 15
    mem[4] = 32'h1B141F10; mem[5] = 32'h03020100; mem[6] = 32'h07060504; mem[7] = 32'h0B0A0908;  // 0x1010: 16 idx
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    offer(32'h0C72F057, 8, 0, 1);             // vsetvli x0, x5, e8, mf2
    offer(32'h02050087, 32'h1000, 0, 2);      // vle8.v v1, (a0)
    offer(32'h02058107, 32'h1008, 0, 3);      // vle8.v v2, (a1)
    offer(32'hC8708657, 0, 32'h55, 4);        // qv.h v1
    offer(32'hcc111657, 0, 0, 5);             // qv.cx ctrl v1, tgt v2
    offer(32'hD0708657, 0, 32'h55, 6);        // qv.meas v1
    // vsetvli e8 m1 (vl 16), vle8 v4 at 0x1010, vle32 v8..v11 at 0x1040, qv.rot.v v4 / v8
    offer({1'b0, 10'b00_1100_0000, 5'd5, 3'b111, 5'd0, OPC_OPV}, 16, 0, 7);
    offer(32'h0205_0207, 32'h1010, 0, 8);                // vle8.v v4, (a0)
    offer({3'b000, 1'b0, 2'b00, 1'b1, 5'b0, 5'd13, 3'b110, 5'd8, OPC_LOADFP}, 32'h1040, 0, 9);
    offer({7'h41, 5'd8, 5'd4, 3'b011, 5'd3, OPC_OPV}, 0, 0, 10);
    repeat (200) @(posedge clk); #1;
    chk(evs.size() == 8 + 8 + 8 + 16, $sformatf("event count %0d", evs.size()));
    for (int k = 0; k < evs.size() && k < 40; k++) begin
      if (k < 8)       chk(evs[k].gate == GATE_H && evs[k].q0 == 16'(2 * k) && evs[k].param == 32'h55, "H event");
      else if (k < 16) chk(evs[k].gate == GATE_CNOT && evs[k].op_type == OP_QPAIR && evs[k].q0 == 16'(2 * (k - 8)) &&
                           evs[k].q1 == 16'(2 * (k - 8) + 1), "CNOT event");
      else if (k < 24) chk(evs[k].gate == GATE_MEAS && evs[k].is_meas && evs[k].q0 == 16'(2 * (k - 16)), "MEASURE event");
      else             chk(evs[k].gate == 7'h41 && evs[k].q0 == 16'(mem[4 + (k - 24) / 4][8 * ((k - 24) % 4) +: 8]) &&
                           evs[k].param == mem[16 + k - 24], $sformatf("ROT.V event %0d", k - 24));
      chk(evs[k].blk == ((k < 24) ? 5'd12 : 5'd3), "Blk_imm carried");
    end
    chk(res_id.size() == 10, $sformatf("10 results (%0d)", res_id.size()));
    for (int k = 1; k <= 10; k++) begin
      int n;
      n = 0;
      foreach (res_id[j]) if (res_id[j] == k) n++;
      chk(n == 1, $sformatf("one result for id %0d", k));
    end
    chk(res_id[0] == 1 && res_data[0] == 8, "vsetvli result carries vl = 8");
    chk(n_mi == 1 && n_md == 1, "measurement issue and drained pulses");
    chk(n_raw > 0, "RAW stall seen");
    chk(vl == 16, "vl = 16 after the second vsetvli");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
