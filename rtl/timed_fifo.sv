// timed_fifo: per-qubit instruction queue with its time controller.
//
// Holds up to DEPTH gate entries for one qubit, each tagged with the global
// time at which it is due. The entry at the head is released (fire_o high for
// exactly one cycle, with the entry on fire_entry_o) in the first cycle in
// which the global counter has reached its due time; entries leave in arrival
// order, so a later entry never overtakes an earlier one. The comparison is
// done on the wrapped difference now - due, so the counter may roll over as
// long as no entry waits longer than 2^(TS_W-1) cycles.
//
// Follows the paper: "the event is enqueued into the destination qubit's
// timed_fifo, and a per-qubit time-controller releases it when the global
// counter reaches the scheduled time". DEPTH = 4 and TS_W = 16 are this
// design's choices: with the entry layout used here (gate 7, role 2, partner 8,
// parameter 32, time 16 bits) four entries hold 260 flip-flops, in line with
// the roughly 263 flip-flops per qubit the paper reports for its dispatcher.
// Timing: an entry pushed at an edge with due time <= now fires in the next
// cycle at the earliest.
module timed_fifo
  import hisepq_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned TS_W  = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [TS_W-1:0] now_i,
  input  logic            push_i,
  input  qfire_t          push_entry_i,
  input  logic [TS_W-1:0] push_time_i,
  output logic            full_o,
  output logic            fire_o,
  output qfire_t          fire_entry_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  qfire_t          ent_q  [DEPTH];
  logic [TS_W-1:0] time_q [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [PW:0]     count;
  logic [TS_W-1:0] diff;

  assign full_o       = (count == (PW+1)'(DEPTH));
  assign diff         = now_i - time_q[rd_ptr];
  assign fire_o       = (count != 0) && !diff[TS_W-1];
  assign fire_entry_o = ent_q[rd_ptr];
  assign count_o      = ($clog2(DEPTH+1))'(count);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) begin
        ent_q[i]  <= '0;
        time_q[i] <= '0;
      end
    end else begin
      if (push_i && !full_o) begin
        ent_q[wr_ptr]  <= push_entry_i;
        time_q[wr_ptr] <= push_time_i;
        wr_ptr         <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (fire_o) rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push_i && !full_o) - (PW+1)'(fire_o);
      a_push_not_full: assert (!(push_i && full_o));
    end
  end

endmodule
