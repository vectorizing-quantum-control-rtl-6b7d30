// qv_core: the quantum vector control processor core (QVCP Core).
//
// Offloaded instructions enter through qv_xif (decode, vector configuration,
// legality), wait in the in-order queue of qv_hazard and are dispatched to one
// of two pipelines:
//   load pipeline     qv_lsu reads memory and writes the register file (qv_vrf);
//   quantum pipeline  qv_unpack walks the elements of vs1/vs2, qv_qelem turns
//                     each element into a quantum event on the sideband output.
// qv_writeback returns one result per accepted instruction to the host.
// The quantum sideband (ev_*) is exported in parallel with the ordinary result
// path; measurement control leaves as meas_issue_o (measurement accepted) and
// meas_drained_o (its last event left the core), and pause_i from the
// synchronizer stops further instructions from being accepted. The vector
// configuration is visible as csr_vl_o / csr_vtype_o (RVV vtype layout), and
// idle_o says that no accepted instruction is still queued or executing.
//
// The block structure follows the QVCP Core of the paper (decoder + config,
// hazard control, pipeline forward, operand unpack, register file, execution
// units, writeback + result mux). The ordinary vector ALU/multiplier of the
// reused vector engine is not part of this core; only loads and the quantum
// instructions execute here.
module qv_core
  import hisepq_pkg::*;
#(
  parameter int unsigned VLEN   = 128,
  parameter int unsigned QDEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  // host offload interface
  input  logic              issue_valid_i,
  output logic              issue_ready_o,
  input  logic [31:0]       issue_instr_i,
  input  logic [XLEN-1:0]   issue_rs1_i,
  input  logic [XLEN-1:0]   issue_rs2_i,
  input  logic [ID_W-1:0]   issue_id_i,
  output logic              issue_accept_o,
  output logic              result_valid_o,
  input  logic              result_ready_i,
  output logic [ID_W-1:0]   result_id_o,
  output logic [XLEN-1:0]   result_data_o,
  output logic              result_we_o,
  // data memory port (to the data arbiter)
  output logic              mem_req_o,
  input  logic              mem_gnt_i,
  output logic [31:0]       mem_addr_o,
  input  logic              mem_rvalid_i,
  input  logic [31:0]       mem_rdata_i,
  // quantum sideband
  output logic              ev_valid_o,
  input  logic              ev_ready_i,
  output qevent_t           ev_o,
  // measurement control
  input  logic              pause_i,
  output logic              meas_issue_o,
  output logic              meas_drained_o,
  // observability
  output logic              raw_stall_o,
  output logic              war_stall_o,
  output logic              reject_o,
  output logic [VL_W-1:0]   csr_vl_o,
  output logic [XLEN-1:0]   csr_vtype_o,
  output logic              idle_o
);

  // xif -> queue
  logic q_push_v, q_push_r;
  vop_t q_push_op;
  logic vs_v, vs_r;
  logic [ID_W-1:0] vs_id;
  logic [XLEN-1:0] vs_data;
  logic [2:0] csr_vlmul;
  sew_e csr_sew;
  logic csr_vill;

  qv_xif #(.VLEN(VLEN)) u_xif (
    .clk, .rst_n,
    .issue_valid_i, .issue_ready_o, .issue_instr_i, .issue_rs1_i, .issue_rs2_i, .issue_id_i,
    .issue_accept_o,
    .pause_i,
    .q_valid_o (q_push_v), .q_ready_i (q_push_r), .q_op_o (q_push_op),
    .vs_valid_o(vs_v), .vs_ready_i(vs_r), .vs_id_o(vs_id), .vs_data_o(vs_data),
    .meas_issue_o, .reject_o,
    .csr_vl_o, .csr_vlmul_o(csr_vlmul), .csr_sew_o(csr_sew), .csr_vill_o(csr_vill)
  );
  // vtype in the RVV CSR layout: vill in the top bit, vta = vma = 1, vsew, vlmul
  assign csr_vtype_o = {csr_vill, 23'd0, 2'b11, 1'b0, csr_sew, csr_vlmul};

  // hazard control
  logic lsu_v, lsu_r, lsu_in_r, lsu_done;
  logic up_v, up_r, up_idle;
  logic nop_v, nop_r;
  logic [ID_W-1:0] nop_id, lsu_done_id;
  vop_t disp_op;
  logic hz_empty;
  logic [3:0] wb_ready;

  // nothing queued, loading or being unpacked, and no event waiting
  assign idle_o = hz_empty && up_idle && lsu_in_r && !ev_valid_o;

  qv_hazard #(.VLEN(VLEN), .QDEPTH(QDEPTH)) u_hz (
    .clk, .rst_n,
    .push_valid_i(q_push_v), .push_ready_o(q_push_r), .push_op_i(q_push_op),
    .lsu_valid_o(lsu_v), .lsu_ready_i(lsu_r), .lsu_done_i(lsu_done),
    .q_valid_o(up_v), .q_ready_i(up_r), .q_idle_i(up_idle),
    .disp_op_o(disp_op),
    .nop_valid_o(nop_v), .nop_ready_i(nop_r), .nop_id_o(nop_id),
    .raw_stall_o, .war_stall_o, .empty_o(hz_empty)
  );
  // a load is only started when its completion slot is free
  assign lsu_r = lsu_in_r && wb_ready[2];

  // register file
  logic [1:0][4:0]      rd_addr;
  logic [1:0][VLEN-1:0] rd_data;
  logic                 vrf_we;
  logic [4:0]           vrf_waddr;
  logic [VLEN/8-1:0]    vrf_wbe;
  logic [VLEN-1:0]      vrf_wdata;

  qv_vrf #(.VLEN(VLEN), .NVREG(NVREG), .NRD(2)) u_vrf (
    .clk,
    .raddr_i(rd_addr), .rdata_o(rd_data),
    .we_i(vrf_we), .waddr_i(vrf_waddr), .wbe_i(vrf_wbe), .wdata_i(vrf_wdata)
  );

  qv_lsu #(.VLEN(VLEN)) u_lsu (
    .clk, .rst_n,
    .in_valid_i(lsu_v && wb_ready[2]), .in_ready_o(lsu_in_r), .in_op_i(disp_op),
    .mem_req_o, .mem_gnt_i, .mem_addr_o, .mem_rvalid_i, .mem_rdata_i,
    .vrf_we_o(vrf_we), .vrf_waddr_o(vrf_waddr), .vrf_wbe_o(vrf_wbe), .vrf_wdata_o(vrf_wdata),
    .done_o(lsu_done), .done_id_o(lsu_done_id)
  );

  // quantum pipeline
  logic        el_v, el_r;
  qelem_t      el;
  logic [ID_W-1:0] el_id;
  logic        qd_v, qd_r;
  logic [ID_W-1:0] qd_id;

  qv_unpack #(.VLEN(VLEN)) u_unpack (
    .clk, .rst_n,
    .in_valid_i(up_v), .in_ready_o(up_r), .in_op_i(disp_op),
    .vrf_raddr_o(rd_addr), .vrf_rdata_i(rd_data),
    .out_valid_o(el_v), .out_ready_i(el_r), .out_elem_o(el), .out_id_o(el_id),
    .idle_o(up_idle)
  );

  qv_qelem u_qelem (
    .clk, .rst_n,
    .in_valid_i(el_v), .in_ready_o(el_r), .in_elem_i(el), .in_id_i(el_id),
    .ev_valid_o, .ev_ready_i, .ev_o,
    .done_valid_o(qd_v), .done_ready_i(qd_r), .done_id_o(qd_id),
    .meas_drained_o
  );

  // results
  logic [3:0]            wb_valid, wb_we;
  logic [3:0][ID_W-1:0]  wb_id;
  logic [3:0][XLEN-1:0]  wb_data;
  assign wb_valid = {qd_v, lsu_done, nop_v, vs_v};
  assign wb_id    = {qd_id, lsu_done_id, nop_id, vs_id};
  assign wb_data  = {XLEN'(0), XLEN'(0), XLEN'(0), vs_data};
  assign wb_we    = 4'b0001;
  assign vs_r     = wb_ready[0];
  assign nop_r    = wb_ready[1];
  assign qd_r     = wb_ready[3];

  qv_writeback #(.NSRC(4)) u_wb (
    .clk, .rst_n,
    .src_valid_i(wb_valid), .src_ready_o(wb_ready), .src_id_i(wb_id),
    .src_data_i(wb_data), .src_we_i(wb_we),
    .result_valid_o, .result_ready_i, .result_id_o, .result_data_o, .result_we_o
  );

endmodule
