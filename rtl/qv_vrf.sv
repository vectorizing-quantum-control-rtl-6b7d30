// qv_vrf: vector register file, NVREG registers of VLEN bits.
//
// Holds ordinary vector operands as well as the qubit-index and angle streams
// of the quantum instructions. NRD asynchronous read ports (a distributed,
// LUT-based memory as on the FPGA prototype) and one synchronous write port
// with a per-byte enable, so that loads can fill a register 32 bits at a time
// and leave the other bytes unchanged.
//
// Follows the paper: 32 registers, VLEN = 128, configurable read ports, LUTRAM
// mapping. This design's choices: masked execution is not supported (the
// decoder only accepts unmasked loads), so v0 is an ordinary register with no
// mask output; one write port, no reset of the
// contents (software loads what it reads), write-before-read is not bypassed
// (a value written at an edge is visible from the next cycle).
module qv_vrf #(
  parameter int unsigned VLEN  = 128,
  parameter int unsigned NVREG = 32,
  parameter int unsigned NRD   = 2
) (
  input  logic                         clk,
  input  logic [NRD-1:0][$clog2(NVREG)-1:0] raddr_i,
  output logic [NRD-1:0][VLEN-1:0]     rdata_o,
  input  logic                         we_i,
  input  logic [$clog2(NVREG)-1:0]     waddr_i,
  input  logic [VLEN/8-1:0]            wbe_i,
  input  logic [VLEN-1:0]              wdata_i
);

  logic [VLEN-1:0] regs [NVREG];

  always_ff @(posedge clk) begin
    if (we_i) begin
      for (int b = 0; b < VLEN/8; b++) begin
        if (wbe_i[b]) regs[waddr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NRD; p++) rdata_o[p] = regs[raddr_i[p]];
  end

endmodule
