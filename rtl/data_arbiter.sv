// data_arbiter: classical/quantum data arbiter in front of the shared data memory.
//
// Two requesters share one memory port: requester 0 is the host's classical
// data port, requester 1 the load unit of the quantum vector core. Each uses
// req/gnt (address phase) and rvalid/rdata (response phase). The arbiter
// grants one request per cycle; when both request it alternates (round robin),
// so neither side can starve the other. The memory behind it answers after a
// fixed latency of one cycle; the arbiter remembers which requester was
// granted and routes the response back to it.
//
// Follows the paper: "classical and quantum data requests converge through a
// data arbiter into the unified data-cache path". This design's choices: two
// requesters, round robin, a one-cycle memory behind it (the data cache of the
// platform is not modelled).
module data_arbiter #(
  parameter int unsigned AW = 32,
  parameter int unsigned DW = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [1:0]           req_i,
  input  logic [1:0]           we_i,
  input  logic [1:0][DW/8-1:0] be_i,
  input  logic [1:0][AW-1:0]   addr_i,
  input  logic [1:0][DW-1:0]   wdata_i,
  output logic [1:0]           gnt_o,
  output logic [1:0]           rvalid_o,
  output logic [1:0][DW-1:0]   rdata_o,
  // memory side
  output logic                 mem_req_o,
  output logic                 mem_we_o,
  output logic [DW/8-1:0]      mem_be_o,
  output logic [AW-1:0]        mem_addr_o,
  output logic [DW-1:0]        mem_wdata_o,
  input  logic                 mem_rvalid_i,
  input  logic [DW-1:0]        mem_rdata_i,
  // observability: both requested in this cycle
  output logic                 conflict_o
);

  logic prio;      // requester with priority on a conflict
  logic sel;       // requester granted this cycle
  logic owner_q;   // requester owning the response in flight

  always_comb begin
    if (req_i[0] && req_i[1]) sel = prio;
    else                      sel = req_i[1];
  end

  assign gnt_o[0]    = req_i[0] && (sel == 1'b0);
  assign gnt_o[1]    = req_i[1] && (sel == 1'b1);
  assign mem_req_o   = |req_i;
  assign mem_we_o    = we_i[sel];
  assign mem_be_o    = be_i[sel];
  assign mem_addr_o  = addr_i[sel];
  assign mem_wdata_o = wdata_i[sel];
  assign conflict_o  = &req_i;

  assign rvalid_o[0] = mem_rvalid_i && (owner_q == 1'b0);
  assign rvalid_o[1] = mem_rvalid_i && (owner_q == 1'b1);
  assign rdata_o[0]  = mem_rdata_i;
  assign rdata_o[1]  = mem_rdata_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prio    <= 1'b0;
      owner_q <= 1'b0;
    end else begin
      if (mem_req_o) owner_q <= sel;
      if (req_i[0] && req_i[1]) prio <= ~sel;
    end
  end

endmodule
