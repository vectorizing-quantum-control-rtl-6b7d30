// tb_qv_vrf: random byte-enabled writes to all 32 registers against a shadow
// copy, checked through both read ports.
module tb_qv_vrf;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0][4:0] ra;
  logic [1:0][127:0] rd;
  logic we;
  logic [4:0] wa;
  logic [15:0] wbe;
  logic [127:0] wd;
  qv_vrf dut (.clk, .raddr_i(ra), .rdata_o(rd), .we_i(we), .waddr_i(wa), .wbe_i(wbe), .wdata_i(wd));

  task automatic chk(input bit c, input string m);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic [127:0] shadow [32];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TIMEOUT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; ra = '0; wa = 0; wbe = 0; wd = 0;
    @(posedge clk); #1;
    for (int r = 0; r < 32; r++) begin
      we = 1; wa = 5'(r); wbe = '1; wd = {$urandom, $urandom, $urandom, $urandom}; shadow[r] = wd;
      @(posedge clk); #1;
    end
    for (int k = 0; k < 300; k++) begin
      we = 1; wa = 5'($urandom); wbe = 16'($urandom); wd = {$urandom, $urandom, $urandom, $urandom};
      ra[0] = 5'($urandom); ra[1] = 5'($urandom);
      #1;
      chk(rd[0] == shadow[ra[0]] && rd[1] == shadow[ra[1]], "read ports before write");
      for (int b = 0; b < 16; b++) if (wbe[b]) shadow[wa][8*b +: 8] = wd[8*b +: 8];
      @(posedge clk); #1;
    end
    we = 0;
    for (int r = 0; r < 32; r++) begin
      ra[0] = 5'(r); ra[1] = 5'(31 - r); #1;
      chk(rd[0] == shadow[r] && rd[1] == shadow[31 - r], $sformatf("register %0d", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
