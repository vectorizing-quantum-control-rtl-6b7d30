// tb_qv_memory: writes words and bytes through the data port, writes through
// the measurement port, and reads back through the data and instruction ports,
// comparing with a shadow array kept by the testbench.
module tb_qv_memory;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int W = 256;
  logic ireq, irv, dreq, dwe, drv, mwe;
  logic [3:0] dbe;
  logic [31:0] iaddr, irdata, daddr, dwdata, drdata, maddr, mwdata;
  qv_memory #(.WORDS(W)) dut (.clk, .rst_n, .i_req_i(ireq), .i_addr_i(iaddr), .i_rvalid_o(irv), .i_rdata_o(irdata),
    .d_req_i(dreq), .d_we_i(dwe), .d_be_i(dbe), .d_addr_i(daddr), .d_wdata_i(dwdata), .d_rvalid_o(drv),
    .d_rdata_o(drdata), .m_we_i(mwe), .m_addr_i(maddr), .m_wdata_i(mwdata));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [31:0] shadow [W];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ireq = 0; dreq = 0; dwe = 0; mwe = 0; dbe = 0; iaddr = 0; daddr = 0; dwdata = 0; maddr = 0; mwdata = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    // fill
    for (int a = 0; a < W; a++) begin
      dreq = 1; dwe = 1; dbe = 4'hf; daddr = 32'(a * 4); dwdata = $urandom; shadow[a] = dwdata;
      @(posedge clk); #1;
    end
    // byte writes and measurement writes, same word in one cycle: measurement wins
    dbe = 4'b0010; daddr = 32'h10; dwdata = 32'h0000_AB00; shadow[4][15:8] = 8'hAB;
    @(posedge clk); #1;
    mwe = 1; maddr = 32'h20; mwdata = 32'h1234_5678; shadow[8] = 32'h1234_5678;
    dbe = 4'hf; daddr = 32'h20; dwdata = 32'hFFFF_FFFF;
    @(posedge clk); #1;
    mwe = 0; dreq = 0; dwe = 0;
    // read back on both read ports
    for (int a = 0; a < W; a++) begin
      dreq = 1; daddr = 32'(a * 4); ireq = 1; iaddr = 32'((W - 1 - a) * 4);
      @(posedge clk); #1;
      chk(drv && drdata == shadow[a], $sformatf("data port word %0d", a));
      chk(irv && irdata == shadow[W - 1 - a], $sformatf("instruction port word %0d", W - 1 - a));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
