// qv_memory: shared instruction/data memory of the processor.
//
// WORDS 32-bit words, byte addressed (address bits [1:0] ignored, addresses
// wrap modulo the size). Three ports, all answering one cycle after the
// request:
//   instruction port  read only, used by the host's instruction fetch;
//   data port         read/write with byte enables, fed by the data arbiter;
//   measure port      write only, used by the readout (ADC) side to deposit
//                     measurement results where software can read them.
// If the data and measure ports write the same word in the same cycle the
// measurement result wins. Contents are not reset; the program is loaded
// through the data port. Only the word-index bits of the three addresses are
// decoded, so lint reports the byte-offset and upper address bits as unused.
//
// Follows the paper: one memory behind the instruction and data paths, with
// the "measure data" of the external ADC driver written into it. This design's
// choices: the size (16 KiB), the single-cycle latency, the three-port
// arrangement (the platform's instruction and data caches are not modelled).
module qv_memory #(
  parameter int unsigned WORDS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction port
  input  logic        i_req_i,
  input  logic [31:0] i_addr_i,
  output logic        i_rvalid_o,
  output logic [31:0] i_rdata_o,
  // data port
  input  logic        d_req_i,
  input  logic        d_we_i,
  input  logic [3:0]  d_be_i,
  input  logic [31:0] d_addr_i,
  input  logic [31:0] d_wdata_i,
  output logic        d_rvalid_o,
  output logic [31:0] d_rdata_o,
  // measurement result port
  input  logic        m_we_i,
  input  logic [31:0] m_addr_i,
  input  logic [31:0] m_wdata_i
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [AW-1:0] ia, da, ma;
  assign ia = i_addr_i[AW+1:2];
  assign da = d_addr_i[AW+1:2];
  assign ma = m_addr_i[AW+1:2];

  always_ff @(posedge clk) begin
    if (d_req_i && d_we_i) begin
      for (int b = 0; b < 4; b++)
        if (d_be_i[b]) mem[da][8*b +: 8] <= d_wdata_i[8*b +: 8];
    end
    if (m_we_i) mem[ma] <= m_wdata_i;
    if (i_req_i) i_rdata_o <= mem[ia];
    if (d_req_i && !d_we_i) d_rdata_o <= mem[da];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_rvalid_o <= 1'b0;
      d_rvalid_o <= 1'b0;
    end else begin
      i_rvalid_o <= i_req_i;
      d_rvalid_o <= d_req_i;
    end
  end

endmodule
