// tb_qv_unpack: operand unpack against a register file filled by the
// testbench. Covers 8-bit indices over one and eight registers (mf2 / m8),
// 16-bit indices, a control/target pair, and the mixed-width QV.ROT.V case
// (8-bit indices with 32-bit angles from a four-times-larger group). Expected
// elements are computed from the testbench's own byte array. Also checks the
// rate: vl elements leave within vl + 3 cycles of dispatch when never stalled.
module tb_qv_unpack;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic iv, ir, ov, ordy, idle;
  vop_t op;
  qelem_t el;
  logic [ID_W-1:0] oid;
  logic [1:0][4:0] ra;
  logic [1:0][127:0] rd;
  logic we;
  logic [4:0] wa;
  logic [127:0] wd;

  qv_vrf vrf (.clk, .raddr_i(ra), .rdata_o(rd), .we_i(we), .waddr_i(wa), .wbe_i('1), .wdata_i(wd));
  qv_unpack dut (.clk, .rst_n, .in_valid_i(iv), .in_ready_o(ir), .in_op_i(op), .vrf_raddr_o(ra), .vrf_rdata_i(rd),
    .out_valid_o(ov), .out_ready_i(ordy), .out_elem_o(el), .out_id_o(oid), .idle_o(idle));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [7:0] bytes [32*16];    // register file image, byte b of register r at r*16+b
  function automatic int unsigned elem(input int reg0, input int i, input int eb);
    int unsigned v = 0;
    for (int k = 0; k < eb; k++) v |= int'(bytes[reg0 * 16 + i * eb + k]) << (8 * k);
    return v;
  endfunction

  qelem_t got [$];
  always @(negedge clk) if (rst_n && ov && ordy) got.push_back(el);

  task automatic run(input op_class_e cls, input int vs1, input int vs2, input sew_e sew, input int vl,
                     input bit stall, output int cycles);
    int t0;
    got.delete();
    op = '0; op.cls = cls; op.vs1 = 5'(vs1); op.vs2 = 5'(vs2); op.sew = sew; op.vl = VL_W'(vl);
    op.gate = 7'h42; op.vd = 5'd7; op.scalar = 32'hCAFE_0001; op.id = 4'd6;
    iv = 1; t0 = cyc;
    @(posedge clk); #1; iv = 0;
    while (got.size() < vl && cyc - t0 < 1000) begin
      ordy = stall ? ($urandom % 2) : 1'b1;
      @(posedge clk); #1;
    end
    ordy = 1;
    cycles = cyc - t0;
    @(posedge clk); #1;
    chk(idle, "idle after the last element");
  endtask

  task automatic compare(input op_class_e cls, input int vs1, input int vs2, input int eb, input int vl);
    chk(got.size() == vl, $sformatf("%s: %0d elements (got %0d)", cls.name(), vl, got.size()));
    foreach (got[i]) begin
      int unsigned ia, ib;
      ia = elem(vs1, i, eb) & 32'hffff;
      if (cls == OP_QPAIR) begin
        ib = elem(vs2, i, eb) & 32'hffff;
        chk(got[i].q0 == 16'(ib) && got[i].q1 == 16'(ia), $sformatf("pair element %0d", i));
      end else chk(got[i].q0 == 16'(ia), $sformatf("%s index element %0d: %0h vs %0h", cls.name(), i, got[i].q0, ia));
      if (cls == OP_QROTV) chk(got[i].param == elem(vs2, i, 4), $sformatf("angle element %0d", i));
      else                 chk(got[i].param == 32'hCAFE_0001, "scalar parameter");
      chk(got[i].first == (i == 0) && got[i].last == (i == vl - 1) && got[i].blk == 7 && got[i].gate == 7'h42,
          "qualifiers");
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int c;
  initial begin
    iv = 0; op = '0; ordy = 1; we = 0; wa = 0; wd = 0;
    for (int b = 0; b < 32 * 16; b++) bytes[b] = 8'($urandom);
    for (int r = 0; r < 32; r++) begin
      we = 1; wa = 5'(r);
      for (int b = 0; b < 16; b++) wd[8*b +: 8] = bytes[r * 16 + b];
      @(posedge clk); #1;
    end
    we = 0;
    rst_n = 1;
    @(posedge clk); #1;
    run(OP_QSINGLE, 1, 0, SEW8, 8, 0, c);   compare(OP_QSINGLE, 1, 0, 1, 8);
    chk(c <= 8 + 3, $sformatf("8 elements in %0d cycles", c));
    run(OP_QSINGLE, 16, 0, SEW8, 128, 0, c); compare(OP_QSINGLE, 16, 0, 1, 128);
    chk(c <= 128 + 3, $sformatf("128 elements in %0d cycles", c));
    run(OP_QPAIR, 2, 1, SEW8, 8, 1, c);     compare(OP_QPAIR, 2, 1, 1, 8);
    run(OP_QROTV, 3, 8, SEW8, 16, 1, c);    compare(OP_QROTV, 3, 8, 1, 16);
    run(OP_QROTV, 4, 24, SEW8, 32, 0, c);   compare(OP_QROTV, 4, 24, 1, 32);
    chk(c <= 32 + 3, $sformatf("QV.ROT.V 32 elements in %0d cycles", c));
    run(OP_QROTG, 5, 0, SEW16, 12, 1, c);   compare(OP_QROTG, 5, 0, 2, 12);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
