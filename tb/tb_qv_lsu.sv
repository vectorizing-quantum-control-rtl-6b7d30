// tb_qv_lsu: vector loads against a word memory model with random grant delay
// and random read latency. The register writes are applied to a shadow copy of
// the register file; after each load the shadow must hold the loaded bytes in
// the destination group and unchanged bytes everywhere else (tail
// undisturbed). Covers vle8 (one register and an m8 group), vle16 with a
// partial last word, vle32 angles, and vl = 0. Each load must report done once
// with its id.
module tb_qv_lsu;
  import hisepq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic iv, ir, mreq, mgnt, mrv, we, done;
  vop_t op;
  logic [31:0] maddr, mrdata;
  logic [4:0] wa;
  logic [15:0] wbe;
  logic [127:0] wd;
  logic [ID_W-1:0] did;
  qv_lsu dut (.clk, .rst_n, .in_valid_i(iv), .in_ready_o(ir), .in_op_i(op), .mem_req_o(mreq), .mem_gnt_i(mgnt),
    .mem_addr_o(maddr), .mem_rvalid_i(mrv), .mem_rdata_i(mrdata), .vrf_we_o(we), .vrf_waddr_o(wa), .vrf_wbe_o(wbe),
    .vrf_wdata_o(wd), .done_o(done), .done_id_o(did));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [31:0] mem [1024];
  logic [7:0] vrf [32*16];
  int ndone = 0;
  logic [ID_W-1:0] last_id;

  // memory model: grant after 0..2 cycles, data 1..3 cycles after the grant
  int lat = -1;
  logic [31:0] pend_addr;
  always @(posedge clk) begin
    mrv <= 1'b0;
    if (lat > 0) lat <= lat - 1;
    else if (lat == 0) begin mrv <= 1'b1; mrdata <= mem[pend_addr[11:2]]; lat <= -1; end
  end
  always @(negedge clk) begin
    mgnt = mreq && lat < 0 && !mrv && ($urandom % 3 != 0);
  end
  always @(posedge clk) if (mreq && mgnt) begin pend_addr <= maddr; lat <= $urandom % 3; end

  always @(negedge clk) if (rst_n) begin
    if (we) for (int b = 0; b < 16; b++) if (wbe[b]) vrf[wa * 16 + b] = wd[8*b +: 8];
    if (done) begin ndone++; last_id = did; end
  end

  task automatic load(input int vd, input int addr, input sew_e eew, input int vl, input int id);
    logic [7:0] prev_vrf [32*16];
    int nb, n0;
    prev_vrf = vrf;
    n0 = ndone;
    op = '0; op.cls = OP_VLOAD; op.vd = 5'(vd); op.scalar = 32'(addr); op.sew = eew; op.vl = VL_W'(vl); op.id = ID_W'(id);
    iv = 1;
    @(posedge clk);
    while (!ir) @(posedge clk);
    #1; iv = 0;
    for (int t = 0; t < 2000 && ndone == n0; t++) @(posedge clk);
    @(posedge clk); #1;
    chk(ndone == n0 + 1 && last_id == ID_W'(id), $sformatf("load to v%0d completes once with its id", vd));
    nb = vl << eew;
    for (int b = 0; b < 32 * 16; b++) begin
      logic [7:0] exp;
      int rel = b - vd * 16;
      exp = (rel >= 0 && rel < nb) ? mem[(addr + rel) >> 2][8 * ((addr + rel) % 4) +: 8] : prev_vrf[b];
      if (vrf[b] !== exp) begin
        chk(0, $sformatf("v%0d byte %0d: %h expected %h", b / 16, b % 16, vrf[b], exp));
        break;
      end
    end
    checks++;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iv = 0; op = '0; mrv = 0; mrdata = 0; mgnt = 0;
    foreach (mem[i]) mem[i] = $urandom;
    foreach (vrf[i]) vrf[i] = 8'($urandom);
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    load(1, 32'h100, SEW8, 8, 1);      // half a register, upper bytes untouched
    load(16, 32'h200, SEW8, 128, 2);   // m8 group
    load(8, 32'h400, SEW32, 32, 3);    // 32 angles over four registers
    load(3, 32'h40, SEW16, 5, 4);      // 10 bytes, last word partly used
    load(4, 32'h80, SEW8, 0, 5);       // vl = 0: completes without writes
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
