// tb_qv_qelem: feeds the elements of a pair instruction and of a measurement
// through Q-ELEM with random output stalls. Checks the event fields, one
// completion per instruction carrying its id, the measurement-drained pulse,
// and that the last element waits while the completion slot is full.
module tb_qv_qelem;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, ev_v, ev_r, dv, dr, drained;
  qelem_t el;
  logic [ID_W-1:0] iid, did;
  qevent_t ev;
  qv_qelem dut (.clk, .rst_n, .in_valid_i(iv), .in_ready_o(ir), .in_elem_i(el), .in_id_i(iid),
    .ev_valid_o(ev_v), .ev_ready_i(ev_r), .ev_o(ev), .done_valid_o(dv), .done_ready_i(dr), .done_id_o(did),
    .meas_drained_o(drained));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  int nev = 0, ndone = 0, ndrained = 0, blocked_last = 0;
  always @(posedge clk) if (rst_n) ev_r <= ($urandom % 3) != 0;
  always @(negedge clk) if (rst_n) begin
    if (ev_v && ev_r) begin
      if (nev < 8) begin
        chk(ev.op_type == OP_QPAIR && ev.gate == 7'h66 && ev.q0 == 16'(2 * nev) && ev.q1 == 16'(2 * nev + 1),
            $sformatf("pair event %0d", nev));
        chk(ev.blk == 5'd12 && ev.first == (nev == 0) && ev.last == (nev == 7), "pair qualifiers");
      end else begin
        chk(ev.op_type == OP_QSINGLE && ev.gate == 7'h68 && ev.is_meas && ev.q0 == 16'(2 * (nev - 8)) && ev.q1 == 0,
            $sformatf("measure event %0d", nev - 8));
      end
      nev++;
    end
    if (dv && dr) begin
      chk(did == ((ndone == 0) ? ID_W'(4) : ID_W'(9)), "completion id");
      ndone++;
    end
    if (drained) begin
      chk(ndone == 1 || (dv && did == 9), "drained pulse belongs to the measurement");
      ndrained++;
    end
    if (iv && el.last && !ir && !(ev_v && !ev_r)) blocked_last++;
  end

  task automatic feed(input op_class_e cls, input int gate, input int id, input bit meas);
    for (int k = 0; k < 8; k++) begin
      el = '0; el.cls = cls; el.gate = 7'(gate); el.blk = 5'd12;
      el.q0 = 16'(2 * k); el.q1 = 16'(2 * k + 1); el.param = 32'h55;
      el.first = (k == 0); el.last = (k == 7); el.is_meas = meas;
      iid = ID_W'(id);
      iv = 1;
      @(posedge clk);
      while (!ir) @(posedge clk);
      #1;
      iv = 0;
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; el = '0; iid = 0; dr = 0; ev_r = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    feed(OP_QPAIR, 7'h66, 4, 0);       // completion not taken yet (dr = 0)
    fork
      feed(OP_QSINGLE, 7'h68, 9, 1);   // its last element must wait for the slot
    join_none
    repeat (40) @(posedge clk); #1;
    chk(nev == 15, $sformatf("last measure element held back (%0d events)", nev));
    dr = 1;
    repeat (10) @(posedge clk); #1;
    chk(nev == 16 && ndone == 2 && ndrained == 1, $sformatf("all events and completions (%0d,%0d,%0d)", nev, ndone, ndrained));
    chk(blocked_last > 0, "last element blocked by full completion slot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
