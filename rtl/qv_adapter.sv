// qv_adapter: quantum adapter, export layer of the quantum event stream.
//
// Collects the per-element events of the quantum sideband and presents them as
// an externally consumable stream (valid/ready) with its qualifiers: operation
// type, GateID, Blk_imm (in the vd field), qubit index or pair, parameter,
// first/last-of-instruction flags and a sequence number that is the same for
// all events of one instruction and increments per instruction. A FIFO of
// DEPTH entries decouples the core from short stalls of the consumer
// (consumer-ready semantics); the adapter computes nothing about the gates.
//
// Follows the paper: the adapter "gathers the data streams ... including the
// payload fields, associated qualifiers, and consumer-ready semantics" and
// performs no quantum computation. The FIFO depth and the sequence number are
// this design's choices. Timing: an event accepted at an edge is visible at the
// output from the next cycle; one event per cycle in and out.
module qv_adapter
  import hisepq_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid_i,
  output logic    in_ready_o,
  input  qevent_t in_ev_i,
  output logic    out_valid_o,
  input  logic    out_ready_i,
  output qevent_t out_ev_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  qevent_t       buf_q [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [PW:0]   count;
  logic [7:0]    seq;
  logic          push, pop;

  assign in_ready_o  = (count < (PW+1)'(DEPTH));
  assign out_valid_o = (count != 0);
  assign out_ev_o    = buf_q[rd_ptr];
  assign push        = in_valid_i && in_ready_o;
  assign pop         = out_valid_o && out_ready_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      seq    <= '0;
      for (int i = 0; i < DEPTH; i++) buf_q[i] <= '0;
    end else begin
      if (push) begin
        buf_q[wr_ptr]     <= in_ev_i;
        buf_q[wr_ptr].seq <= seq;
        wr_ptr            <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
        if (in_ev_i.last) seq <= seq + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

endmodule
