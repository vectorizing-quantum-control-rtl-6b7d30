// qv_lsu: vector load unit (unit-stride vle8.v / vle16.v / vle32.v).
//
// Loads vl elements of EEW bits from consecutive memory addresses starting at
// the base address (rs1) into the register group starting at vd. The group is
// filled one 32-bit memory word at a time: word w lands in register
// vd + (4w)/(VLEN/8) at byte offset (4w) mod (VLEN/8), with byte enables that
// stop at vl*EEW/8 bytes (tail bytes are left undisturbed). One request is
// outstanding at a time on a req/gnt/rvalid memory port with any latency.
// done_o pulses together with the last register write and returns the id.
//
// Follows the paper: loads go through the LSU of the vector engine and reach
// memory through the shared classical/quantum data arbiter; qubit indices are
// loaded with vle8.v, angles with vle32.v. This design's choices: word-aligned
// base address only, no stores, one outstanding request.
// Only the class-independent load fields of the decoded instruction (vd,
// base, EEW, vl, id) are used; lint reports its other bits as unused.
// Timing: per word one cycle to be granted plus the memory latency; a
// 16-byte register therefore takes at least 8 cycles with a one-cycle memory.
module qv_lsu
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid_i,
  output logic              in_ready_o,
  input  vop_t              in_op_i,
  // memory port
  output logic              mem_req_o,
  input  logic              mem_gnt_i,
  output logic [31:0]       mem_addr_o,
  input  logic              mem_rvalid_i,
  input  logic [31:0]       mem_rdata_i,
  // register file write
  output logic              vrf_we_o,
  output logic [4:0]        vrf_waddr_o,
  output logic [VLEN/8-1:0] vrf_wbe_o,
  output logic [VLEN-1:0]   vrf_wdata_o,
  // completion
  output logic              done_o,
  output logic [ID_W-1:0]   done_id_o
);

  localparam int unsigned VLENB = VLEN / 8;
  localparam int unsigned BOFS  = $clog2(VLENB);

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_e;
  state_e          state;
  logic [31:0]     base_q;
  logic [4:0]      vd_q;
  logic [ID_W-1:0] id_q;
  logic [11:0]     nbytes_q;     // vl * EEW/8, at most 256*4
  logic [11:0]     boff;         // byte offset of the current word

  assign in_ready_o = (state == S_IDLE);
  assign mem_req_o  = (state == S_REQ);
  assign mem_addr_o = base_q + 32'(boff);

  logic [11:0] remain;
  logic        last_word;
  assign remain    = nbytes_q - boff;
  assign last_word = (remain <= 12'd4);

  always_comb begin
    vrf_we_o    = (state == S_WAIT) && mem_rvalid_i;
    vrf_waddr_o = vd_q + 5'(boff >> BOFS);
    vrf_wbe_o   = '0;
    for (int k = 0; k < 4; k++)
      if (12'(k) < remain) vrf_wbe_o[boff[BOFS-1:0] + BOFS'(k)] = 1'b1;
    vrf_wdata_o = '0;
    vrf_wdata_o[8*boff[BOFS-1:0] +: 32] = mem_rdata_i;
  end

  logic zero_q;   // a load with vl = 0 completes without touching memory
  assign done_o    = (vrf_we_o && last_word) || zero_q;
  assign done_id_o = id_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      base_q   <= '0;
      vd_q     <= '0;
      id_q     <= '0;
      nbytes_q <= '0;
      boff     <= '0;
      zero_q   <= 1'b0;
    end else begin
      zero_q <= (state == S_IDLE) && in_valid_i && (in_op_i.vl == '0);
      unique case (state)
        S_IDLE: if (in_valid_i) begin
          base_q   <= in_op_i.scalar;
          vd_q     <= in_op_i.vd;
          id_q     <= in_op_i.id;
          nbytes_q <= 12'(in_op_i.vl) << in_op_i.sew;
          boff     <= '0;
          state    <= (in_op_i.vl == '0) ? S_IDLE : S_REQ;
        end
        S_REQ:  if (mem_gnt_i) state <= S_WAIT;
        S_WAIT: if (mem_rvalid_i) begin
          boff  <= boff + 12'd4;
          state <= last_word ? S_IDLE : S_REQ;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
