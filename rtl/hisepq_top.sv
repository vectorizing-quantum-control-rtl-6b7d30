// hisepq_top: quantum vector control processor with its execution back end.
//
// Structure (front end to back end):
//   qv_core            offload interface, decoder and vector configuration,
//                      instruction queue with hazard control, register file,
//                      load unit, operand unpack and Q-ELEM; exports one quantum
//                      event per vector element on its sideband.
//   qv_synchronizer    measurement halt-resume control: raises irq_qvsg_meas_o
//                      (which also stops the offload interface) when a
//                      measurement is accepted, and drops it after the stream
//                      drained and measure_done_i arrived.
//   qv_adapter         buffers the sideband and adds instruction qualifiers.
//   quantum_dispatcher per-qubit timed FIFOs; fires each gate when the global
//                      counter reaches "issue time + Blk_imm".
//   data_arbiter       shares the data memory between the host's classical
//                      data port and the core's load unit.
//   qv_memory          program and data memory; the readout side writes
//                      measurement results into it (meas_we_i...).
// The scalar host core is outside this module: its offload (issue/result),
// instruction-fetch and classical-data ports are brought out, as are the
// per-qubit firing outputs toward the pulse generators and the readout inputs.
//
// Parameters keep the values of the described configuration: VLEN = 128,
// 32 qubits in the dispatcher; the queue depths, the 16-bit time base and the
// 16 KiB memory are this design's choices.
module hisepq_top
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN         = 128,
  parameter int unsigned N_QUBITS     = 32,
  parameter int unsigned QDEPTH       = 4,
  parameter int unsigned TF_DEPTH     = 4,
  parameter int unsigned TS_W         = 16,
  parameter int unsigned MEM_WORDS    = 4096,
  parameter int unsigned RESUME_DELAY = 2
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // host offload interface (QXIF)
  input  logic                              issue_valid_i,
  output logic                              issue_ready_o,
  input  logic [31:0]                       issue_instr_i,
  input  logic [XLEN-1:0]                   issue_rs1_i,
  input  logic [XLEN-1:0]                   issue_rs2_i,
  input  logic [ID_W-1:0]                   issue_id_i,
  output logic                              issue_accept_o,
  output logic                              result_valid_o,
  input  logic                              result_ready_i,
  output logic [ID_W-1:0]                   result_id_o,
  output logic [XLEN-1:0]                   result_data_o,
  output logic                              result_we_o,
  output logic                              irq_qvsg_meas_o,
  // host instruction fetch
  input  logic                              instr_req_i,
  input  logic [31:0]                       instr_addr_i,
  output logic                              instr_rvalid_o,
  output logic [31:0]                       instr_rdata_o,
  // host classical data port
  input  logic                              data_req_i,
  output logic                              data_gnt_o,
  input  logic                              data_we_i,
  input  logic [3:0]                        data_be_i,
  input  logic [31:0]                       data_addr_i,
  input  logic [31:0]                       data_wdata_i,
  output logic                              data_rvalid_o,
  output logic [31:0]                       data_rdata_o,
  // readout side
  input  logic                              measure_done_i,
  input  logic                              meas_we_i,
  input  logic [31:0]                       meas_addr_i,
  input  logic [31:0]                       meas_wdata_i,
  // per-qubit firing toward the pulse generators
  output logic [N_QUBITS-1:0]               fire_o,
  output logic [N_QUBITS-1:0][6:0]          fire_gate_o,
  output qrole_e [N_QUBITS-1:0]             fire_role_o,
  output logic [N_QUBITS-1:0][QID_W-1:0]    fire_partner_o,
  output logic [N_QUBITS-1:0][PARAM_W-1:0]  fire_param_o,
  output logic [N_QUBITS-1:0]               meas_trigger_o,
  // exported event stream (observability) and status
  output logic                              qev_valid_o,
  output qevent_t                           qev_o,
  output logic                              issued_done_o,
  output logic [TS_W-1:0]                   now_o,
  output logic [7:0]                        status_o,  // see below
  output logic [XLEN-1:0]                   vtype_o,   // current vtype (RVV layout)
  output logic                              busy_o     // instructions or scheduled gates outstanding
);

  // core <-> back end
  logic    core_ev_v, core_ev_r, ad_v, ad_r;
  qevent_t core_ev, ad_ev;
  logic    meas_issue, meas_drained, pause;
  logic    raw_stall, war_stall, reject, spurious, drop, bp, conflict;
  logic [VL_W-1:0] csr_vl;
  logic            core_idle, disp_pending;

  // core <-> arbiter
  logic        lsu_req, lsu_gnt, lsu_rvalid;
  logic [31:0] lsu_addr, lsu_rdata;
  logic [1:0]            arb_req, arb_we, arb_gnt, arb_rvalid;
  logic [1:0][3:0]       arb_be;
  logic [1:0][31:0]      arb_addr, arb_wdata, arb_rdata;
  logic        m_req, m_we, m_rvalid;
  logic [3:0]  m_be;
  logic [31:0] m_addr, m_wdata, m_rdata;

  qv_core #(.VLEN(VLEN), .QDEPTH(QDEPTH)) u_core (
    .clk, .rst_n,
    .issue_valid_i, .issue_ready_o, .issue_instr_i, .issue_rs1_i, .issue_rs2_i, .issue_id_i,
    .issue_accept_o,
    .result_valid_o, .result_ready_i, .result_id_o, .result_data_o, .result_we_o,
    .mem_req_o(lsu_req), .mem_gnt_i(lsu_gnt), .mem_addr_o(lsu_addr),
    .mem_rvalid_i(lsu_rvalid), .mem_rdata_i(lsu_rdata),
    .ev_valid_o(core_ev_v), .ev_ready_i(core_ev_r), .ev_o(core_ev),
    .pause_i(pause), .meas_issue_o(meas_issue), .meas_drained_o(meas_drained),
    .raw_stall_o(raw_stall), .war_stall_o(war_stall), .reject_o(reject), .csr_vl_o(csr_vl),
    .csr_vtype_o(vtype_o), .idle_o(core_idle)
  );

  qv_synchronizer #(.RESUME_DELAY(RESUME_DELAY)) u_sync (
    .clk, .rst_n,
    .meas_issue_i(meas_issue), .meas_drained_i(meas_drained), .measure_done_i,
    .qvsg_meas_o(pause), .issued_done_o, .spurious_done_o(spurious)
  );
  assign irq_qvsg_meas_o = pause;

  qv_adapter #(.DEPTH(2)) u_adapter (
    .clk, .rst_n,
    .in_valid_i(core_ev_v), .in_ready_o(core_ev_r), .in_ev_i(core_ev),
    .out_valid_o(ad_v), .out_ready_i(ad_r), .out_ev_o(ad_ev)
  );
  assign qev_valid_o = ad_v && ad_r;
  assign qev_o       = ad_ev;

  quantum_dispatcher #(.N_QUBITS(N_QUBITS), .DEPTH(TF_DEPTH), .TS_W(TS_W)) u_disp (
    .clk, .rst_n,
    .ev_valid_i(ad_v), .ev_ready_o(ad_r), .ev_i(ad_ev),
    .fire_o, .fire_gate_o, .fire_role_o, .fire_partner_o, .fire_param_o, .meas_trigger_o,
    .drop_o(drop), .backpressure_o(bp), .now_o, .pending_o(disp_pending)
  );
  assign busy_o = !core_idle || ad_v || disp_pending;

  // data arbiter: 0 = host classical data, 1 = quantum core loads
  assign arb_req   = {lsu_req, data_req_i};
  assign arb_we    = {1'b0, data_we_i};
  assign arb_be    = {4'hf, data_be_i};
  assign arb_addr  = {lsu_addr, data_addr_i};
  assign arb_wdata = {32'h0, data_wdata_i};
  assign data_gnt_o    = arb_gnt[0];
  assign lsu_gnt       = arb_gnt[1];
  assign data_rvalid_o = arb_rvalid[0];
  assign lsu_rvalid    = arb_rvalid[1];
  assign data_rdata_o  = arb_rdata[0];
  assign lsu_rdata     = arb_rdata[1];

  data_arbiter #(.AW(32), .DW(32)) u_arb (
    .clk, .rst_n,
    .req_i(arb_req), .we_i(arb_we), .be_i(arb_be), .addr_i(arb_addr), .wdata_i(arb_wdata),
    .gnt_o(arb_gnt), .rvalid_o(arb_rvalid), .rdata_o(arb_rdata),
    .mem_req_o(m_req), .mem_we_o(m_we), .mem_be_o(m_be), .mem_addr_o(m_addr),
    .mem_wdata_o(m_wdata), .mem_rvalid_i(m_rvalid), .mem_rdata_i(m_rdata),
    .conflict_o(conflict)
  );

  qv_memory #(.WORDS(MEM_WORDS)) u_mem (
    .clk, .rst_n,
    .i_req_i(instr_req_i), .i_addr_i(instr_addr_i), .i_rvalid_o(instr_rvalid_o), .i_rdata_o(instr_rdata_o),
    .d_req_i(m_req), .d_we_i(m_we), .d_be_i(m_be), .d_addr_i(m_addr), .d_wdata_i(m_wdata),
    .d_rvalid_o(m_rvalid), .d_rdata_o(m_rdata),
    .m_we_i(meas_we_i), .m_addr_i(meas_addr_i), .m_wdata_i(meas_wdata_i)
  );

  // status_o: single-cycle event flags
  //   [0] read-after-write stall in the hazard unit   [1] write-after-read stall
  //   [2] instruction rejected (illegal)               [3] dispatcher back-pressure
  //   [4] event dropped (qubit out of range)           [5] data-arbiter conflict
  //   [6] measure_done with no measurement pending     [7] vl of the current configuration is 0
  assign status_o = {csr_vl == '0, spurious, conflict, drop, bp, reject, war_stall, raw_stall};

endmodule
