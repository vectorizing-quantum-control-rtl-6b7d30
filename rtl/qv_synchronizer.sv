// qv_synchronizer: control plane of the measurement halt-resume protocol.
//
// When a measurement instruction is accepted (meas_issue_i) the synchronizer
//   1. raises qvsg_meas_o at once: this is both the interrupt/halt line to the
//      host and the pause of the offload interface, so no later scalar or
//      vector instruction is accepted;
//   2. lets the quantum stream that is already in flight drain, up to and
//      including the last event of the measurement (meas_drained_i);
//   3. pulses issued_done_o (measurement issued) and waits for the readout
//      completion measure_done_i from the ADC side (a measure_done that arrives
//      earlier is remembered);
//   4. after RESUME_DELAY further cycles drops qvsg_meas_o, releasing the host.
// State machine: IDLE -> DRAIN -> WAIT_DONE -> RELEASE -> IDLE.
//
// Follows the paper: halt asserted at commit of the measurement (not when the
// pulse is fired), drain, issue-done notification, wait for measure_done, then
// resume. RESUME_DELAY = 2 is taken from the printed trace of the Bell-state
// run (measure_done at cycle 153, halt cleared at cycle 155). Remembering an
// early measure_done and ignoring one with no measurement pending are this
// design's choices.
module qv_synchronizer #(
  parameter int unsigned RESUME_DELAY = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic meas_issue_i,
  input  logic meas_drained_i,
  input  logic measure_done_i,
  output logic qvsg_meas_o,
  output logic issued_done_o,
  output logic spurious_done_o
);

  typedef enum logic [1:0] {S_IDLE, S_DRAIN, S_WAIT_DONE, S_RELEASE} state_e;
  state_e      state;
  logic        done_seen;
  logic [7:0]  cnt;

  assign qvsg_meas_o = (state != S_IDLE);
  assign spurious_done_o = measure_done_i && (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      done_seen     <= 1'b0;
      cnt           <= '0;
      issued_done_o <= 1'b0;
    end else begin
      issued_done_o <= 1'b0;
      unique case (state)
        S_IDLE: begin
          done_seen <= 1'b0;
          if (meas_issue_i) state <= S_DRAIN;
        end
        S_DRAIN: begin
          if (measure_done_i) done_seen <= 1'b1;
          if (meas_drained_i) begin
            issued_done_o <= 1'b1;
            state         <= S_WAIT_DONE;
          end
        end
        S_WAIT_DONE: begin
          if (measure_done_i || done_seen) begin
            // qvsg_meas_o falls RESUME_DELAY cycles after measure_done
            cnt   <= 8'(RESUME_DELAY) - 8'd1;
            state <= (RESUME_DELAY <= 1) ? S_IDLE : S_RELEASE;
          end
        end
        S_RELEASE: begin
          cnt <= cnt - 1'b1;
          if (cnt <= 8'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
