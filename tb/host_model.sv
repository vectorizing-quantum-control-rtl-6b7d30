// host_model: behavioural stand-in for the scalar RV32 host core.
//
// Executes a small RV32I subset from the instruction port of the memory:
// lui, auipc, addi, andi, ori, xori, slli, srli, add, sub, lw, sw, beq, bne,
// jal and jalr. "jal x0, 0" (a jump to itself) ends the program. Every OP-V
// (1010111) or LOAD-FP (0000111) instruction is offered to the coprocessor over
// the issue channel together with the current values of rs1 and rs2 and a
// fresh id. A refused instruction (accept = 0) counts as an illegal-instruction
// trap and is skipped. An accepted vsetvli waits for its result and writes rd;
// other offloaded instructions complete in the background (their results are
// only counted). While irq_qvsg_meas_i is high the host executes nothing (halt
// at the measurement boundary); the halted cycles are counted.
// Loads and stores go through the classical data port (req/gnt/rvalid).
// Timing: one fetch per instruction with the memory's one-cycle latency; the
// model is cycle-based but does not try to match a real pipeline.
module host_model
  import hisepq_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  output logic              instr_req_o,
  output logic [31:0]       instr_addr_o,
  input  logic              instr_rvalid_i,
  input  logic [31:0]       instr_rdata_i,
  output logic              data_req_o,
  input  logic              data_gnt_i,
  output logic              data_we_o,
  output logic [3:0]        data_be_o,
  output logic [31:0]       data_addr_o,
  output logic [31:0]       data_wdata_o,
  input  logic              data_rvalid_i,
  input  logic [31:0]       data_rdata_i,
  output logic              issue_valid_o,
  input  logic              issue_ready_i,
  output logic [31:0]       issue_instr_o,
  output logic [XLEN-1:0]   issue_rs1_o,
  output logic [XLEN-1:0]   issue_rs2_o,
  output logic [ID_W-1:0]   issue_id_o,
  input  logic              issue_accept_i,
  input  logic              result_valid_i,
  output logic              result_ready_o,
  input  logic [ID_W-1:0]   result_id_i,
  input  logic [XLEN-1:0]   result_data_i,
  input  logic              result_we_i,
  input  logic              irq_qvsg_meas_i
);
  logic [31:0] x [32];
  logic [31:0] pc;
  bit running = 0;
  int n_instr = 0, n_offload = 0, n_reject = 0, n_results = 0, halt_cycles = 0, n_ldst = 0;
  logic [ID_W-1:0] next_id = 0;
  bit              res_seen [1 << ID_W];
  logic [31:0]     res_data [1 << ID_W];

  assign result_ready_o = 1'b1;
  always @(posedge clk) if (rst_n && result_valid_i) begin
    res_seen[result_id_i] = 1'b1;
    res_data[result_id_i] = result_data_i;
    n_results++;
    if (result_we_i === 1'bx) $display("host: undefined write flag");
  end
  always @(posedge clk) if (running && irq_qvsg_meas_i) halt_cycles++;

  initial begin
    instr_req_o = 0; instr_addr_o = 0; data_req_o = 0; data_we_o = 0; data_be_o = 0; data_addr_o = 0;
    data_wdata_o = 0; issue_valid_o = 0; issue_instr_o = 0; issue_rs1_o = 0; issue_rs2_o = 0; issue_id_o = 0;
    foreach (x[i]) x[i] = 0;
    foreach (res_seen[i]) res_seen[i] = 0;
  end

  function automatic logic [31:0] imm_i(input logic [31:0] w); return {{20{w[31]}}, w[31:20]}; endfunction
  function automatic logic [31:0] imm_s(input logic [31:0] w); return {{20{w[31]}}, w[31:25], w[11:7]}; endfunction
  function automatic logic [31:0] imm_b(input logic [31:0] w);
    return {{19{w[31]}}, w[31], w[7], w[30:25], w[11:8], 1'b0};
  endfunction
  function automatic logic [31:0] imm_j(input logic [31:0] w);
    return {{11{w[31]}}, w[31], w[19:12], w[20], w[30:21], 1'b0};
  endfunction

  task automatic wr(input logic [4:0] rd, input logic [31:0] v);
    if (rd != 0) x[rd] = v;
  endtask

  task automatic mem_access(input bit we, input logic [31:0] addr, input logic [31:0] wdata, output logic [31:0] rdata);
    data_req_o = 1; data_we_o = we; data_be_o = 4'hf; data_addr_o = addr; data_wdata_o = wdata;
    @(posedge clk);
    while (!data_gnt_i) @(posedge clk);
    #1; data_req_o = 0; data_we_o = 0;
    while (!data_rvalid_i) begin @(posedge clk); #1; end
    rdata = data_rdata_i;
    n_ldst++;
  endtask

  // Run from start_pc until "jal x0, 0"; max_instr bounds a runaway program.
  task automatic run(input logic [31:0] start_pc, input int max_instr);
    logic [31:0] w, rd_v;
    logic [4:0] rd, rs1, rs2;
    logic [6:0] opc;
    logic [2:0] f3;
    pc = start_pc;
    running = 1;
    for (int k = 0; k < max_instr; k++) begin
      while (irq_qvsg_meas_i) begin @(posedge clk); #1; end
      instr_req_o = 1; instr_addr_o = pc;
      @(posedge clk); #1;
      instr_req_o = 0;
      while (!instr_rvalid_i) begin @(posedge clk); #1; end
      w = instr_rdata_i;
      opc = w[6:0]; rd = w[11:7]; f3 = w[14:12]; rs1 = w[19:15]; rs2 = w[24:20];
      n_instr++;
      case (opc)
        7'b0110111: begin wr(rd, {w[31:12], 12'h0}); pc += 4; end
        7'b0010111: begin wr(rd, pc + {w[31:12], 12'h0}); pc += 4; end
        7'b0010011: begin
          case (f3)
            3'b000: wr(rd, x[rs1] + imm_i(w));
            3'b100: wr(rd, x[rs1] ^ imm_i(w));
            3'b110: wr(rd, x[rs1] | imm_i(w));
            3'b111: wr(rd, x[rs1] & imm_i(w));
            3'b001: wr(rd, x[rs1] << w[24:20]);
            3'b101: wr(rd, x[rs1] >> w[24:20]);
            default: $display("host: unsupported OP-IMM %h", w);
          endcase
          pc += 4;
        end
        7'b0110011: begin wr(rd, w[30] ? x[rs1] - x[rs2] : x[rs1] + x[rs2]); pc += 4; end
        7'b0000011: begin mem_access(0, x[rs1] + imm_i(w), 0, rd_v); wr(rd, rd_v); pc += 4; end
        7'b0100011: begin mem_access(1, x[rs1] + imm_s(w), x[rs2], rd_v); pc += 4; end
        7'b1100011: begin
          bit t = (f3 == 3'b000) ? (x[rs1] == x[rs2]) : (x[rs1] != x[rs2]);
          pc = t ? pc + imm_b(w) : pc + 4;
        end
        7'b1101111: begin
          if (imm_j(w) == 0) begin running = 0; return; end
          wr(rd, pc + 4); pc += imm_j(w);
        end
        7'b1100111: begin rd_v = pc + 4; pc = (x[rs1] + imm_i(w)) & ~32'h1; wr(rd, rd_v); end
        7'b1010111, 7'b0000111: begin
          logic [ID_W-1:0] id = next_id;
          bit acc;
          next_id++;
          res_seen[id] = 0;
          issue_valid_o = 1; issue_instr_o = w; issue_rs1_o = x[rs1]; issue_rs2_o = x[rs2]; issue_id_o = id;
          @(posedge clk);
          while (!issue_ready_i) @(posedge clk);
          acc = issue_accept_i;
          #1; issue_valid_o = 0;
          n_offload++;
          if (!acc) n_reject++;
          else if (opc == 7'b1010111 && f3 == 3'b111) begin
            while (!res_seen[id]) begin @(posedge clk); #1; end
            wr(rd, res_data[id]);
          end
          pc += 4;
        end
        default: begin
          if (w == 32'h0000_0013 || opc == 7'b1110011) pc += 4;
          else begin $display("host: unsupported instruction %h at %h", w, pc); pc += 4; end
        end
      endcase
    end
    running = 0;
  endtask
endmodule
