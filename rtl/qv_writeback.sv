// qv_writeback: result multiplexer and completion signalling toward the host.
//
// Every instruction the coprocessor accepts ends with one result transaction on
// the host's result channel (valid/ready, id, data, we). Four sources complete
// instructions: vsetvli (new vl, written to the scalar rd), zero-length quantum
// instructions finished in the hazard unit, vector loads (LSU) and quantum
// instructions (Q-ELEM, after their last element). Each source has a one-entry
// slot here; a source may deliver only while its slot is empty
// (src_ready_o). Full slots are forwarded to the host in a rotating order so
// no source starves. The vector-register write path of the LSU goes straight
// to the register file and does not pass through this block.
//
// Follows the paper: "merges vector-register writeback, scalar result return,
// and completion signaling back toward the host". This design's choices: the
// slot structure, round-robin order, results may return out of program order
// (they carry the instruction id).
// Timing: a result can leave the cycle after its source delivered it.
module qv_writeback
  import hisepq_pkg::*;
#(
  parameter int unsigned NSRC = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [NSRC-1:0]            src_valid_i,
  output logic [NSRC-1:0]            src_ready_o,
  input  logic [NSRC-1:0][ID_W-1:0]  src_id_i,
  input  logic [NSRC-1:0][XLEN-1:0]  src_data_i,
  input  logic [NSRC-1:0]            src_we_i,
  output logic                       result_valid_o,
  input  logic                       result_ready_i,
  output logic [ID_W-1:0]            result_id_o,
  output logic [XLEN-1:0]            result_data_o,
  output logic                       result_we_o
);

  localparam int unsigned SW = (NSRC > 1) ? $clog2(NSRC) : 1;

  logic [NSRC-1:0]            slot_v;
  logic [NSRC-1:0][ID_W-1:0]  slot_id;
  logic [NSRC-1:0][XLEN-1:0]  slot_data;
  logic [NSRC-1:0]            slot_we;
  logic [SW-1:0]              rr;      // source with the highest priority next
  logic [SW-1:0]              sel;
  logic                       found;

  assign src_ready_o = ~slot_v;

  always_comb begin
    sel   = '0;
    found = 1'b0;
    for (int k = 0; k < NSRC; k++) begin
      logic [SW-1:0] s;
      s = SW'((int'(rr) + k) % NSRC);
      if (!found && slot_v[s]) begin
        sel   = SW'(s);
        found = 1'b1;
      end
    end
  end

  assign result_valid_o = found;
  assign result_id_o    = slot_id[sel];
  assign result_data_o  = slot_data[sel];
  assign result_we_o    = slot_we[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot_v    <= '0;
      slot_id   <= '0;
      slot_data <= '0;
      slot_we   <= '0;
      rr        <= '0;
    end else begin
      if (found && result_ready_i) begin
        slot_v[sel] <= 1'b0;
        rr          <= (sel == SW'(NSRC-1)) ? '0 : sel + 1'b1;
      end
      for (int s = 0; s < NSRC; s++) begin
        if (src_valid_i[s] && !slot_v[s]) begin
          slot_v[s]    <= 1'b1;
          slot_id[s]   <= src_id_i[s];
          slot_data[s] <= src_data_i[s];
          slot_we[s]   <= src_we_i[s];
        end
      end
    end
  end

endmodule
