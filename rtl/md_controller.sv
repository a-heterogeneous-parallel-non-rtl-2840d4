// md_controller: sequencer of the molecular-dynamics loop.
//
// After start it runs n_steps MD steps. Each step:
//   1. FE_WAIT   - fe_req asks the feature-extraction logic for the features
//                  of the two hydrogen atoms of the current positions and
//                  waits for fe_valid (any number of cycles);
//   2. issue     - in the cycle fe_req and fe_valid are both high, mlp_issue
//                  sends both feature sets to the two MLP chips at once;
//   3. MLP_WAIT  - waits until each chip has returned its force (the chips
//                  may answer in different cycles; each answer is noted);
//   4. INTEG     - integ_step applies the oxygen force from Newton's third law
//                  and the integration update in one clock;
// and the loop repeats until n_steps steps are done, then done is raised
// until the next start.
//
// Interface: start/n_steps/busy/done/step_count to the host; fe_req/fe_valid
// handshake to feature extraction; mlp_issue, chip0_valid, chip1_valid to the
// MLP chips; integ_step to the integrator.
// Timing: one step takes (feature wait) + chip latency + 2 cycles: the issue
// cycle, the chip latency (the last answer is noted in its own cycle) and the
// integration cycle; 11 cycles with the default 9-cycle chips and features
// returned in the cycle they are requested.
//
// Follows the specification: the step order (features, two chips in
// parallel, forces back, oxygen force, integration, repeat). Own choices:
// the handshake, the state encoding and the start/done protocol.
module md_controller
  import mlmd_pkg::*;
#(
  parameter int unsigned STEP_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [STEP_W-1:0] n_steps,
  output logic              busy,
  output logic              done,
  output logic [STEP_W-1:0] step_count,
  output logic              fe_req,
  input  logic              fe_valid,
  output logic              mlp_issue,
  input  logic              chip0_valid,
  input  logic              chip1_valid,
  output logic              integ_step
);

  typedef enum logic [2:0] {
    S_IDLE     = 3'd0,
    S_FE_WAIT  = 3'd1,
    S_MLP_WAIT = 3'd2,
    S_INTEG    = 3'd3,
    S_DONE     = 3'd4
  } state_e;

  state_e state;
  logic   got0, got1;

  assign busy       = (state == S_FE_WAIT) || (state == S_MLP_WAIT) || (state == S_INTEG);
  assign done       = (state == S_DONE);
  assign fe_req     = (state == S_FE_WAIT);
  assign mlp_issue  = fe_req && fe_valid;
  assign integ_step = (state == S_INTEG);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      step_count <= '0;
      got0       <= 1'b0;
      got1       <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            step_count <= '0;
            state      <= (n_steps == '0) ? S_DONE : S_FE_WAIT;
          end
        end
        S_FE_WAIT: begin
          if (fe_valid) begin
            got0  <= 1'b0;
            got1  <= 1'b0;
            state <= S_MLP_WAIT;
          end
        end
        S_MLP_WAIT: begin
          if (chip0_valid) got0 <= 1'b1;
          if (chip1_valid) got1 <= 1'b1;
          if ((got0 || chip0_valid) && (got1 || chip1_valid)) state <= S_INTEG;
        end
        S_INTEG: begin
          step_count <= step_count + 1'b1;
          state      <= (step_count + 1'b1 == n_steps) ? S_DONE : S_FE_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A chip answer outside MLP_WAIT would be lost.
  a_chip_answer_expected: assert property (@(posedge clk) disable iff (!rst_n)
      (chip0_valid || chip1_valid) |-> state == S_MLP_WAIT)
    else $error("md_controller: MLP chip answered outside MLP_WAIT");

  // Only one request for features per step.
  a_issue_once: assert property (@(posedge clk) disable iff (!rst_n)
      mlp_issue |=> !mlp_issue);

endmodule
