// control_path: sequencer of one simulation run.
//
// States:
//   IDLE   wait for `start`.
//   INIT   load the initial state, clear the Updated Register, reseed the
//          LFSR and empty the round-based stacks (`init`).
//   PRIME  copy the masked initial state into the Previous State Register.
//   RUN    ask the Rule Selector for an index (`enable_rng`). Each cycle it
//          answers with Valid Rule, the Current State and Updated Registers
//          are loaded (`load_next_state`, `load_updated`) and one step is
//          counted. A cycle without Valid Rule is a stall (stack fill or
//          transfer in the round-based scheme).
//   CHECK  entered once the upper comparator reports `steady` (every rule
//          has run since the last check: one round, one SMLN step, or the
//          first moment all rules have been hit in the step-based scheme).
//          If the lower comparator reports `is_steady_state` (current state
//          equals the previous one) the run ends in steady state; otherwise
//          the state is copied to the Previous State Register, the Updated
//          Register is cleared and RUN resumes.
//   DONE   `done` is high until the next `start`.
// A run also ends when its budget `max_count` is used up: rounds for the
// round-based scheme, steps for SMLN and step-based ones. For the Toggle
// scenarios, once `toggle_at` rounds/steps have been completed, one cycle
// pulses `toggle` (the Current State Register inverts the toggle mask);
// until that toggle has happened the run does not stop at steady state.
//
// The paper gives the Start, Enable RNG, Valid Rule, Load Next State, Load
// Updated, Load Last State, Steady and Is steady state? pins and their roles,
// and that a run lasts a given number of steps or rounds; the state encoding,
// the check after each full set of updates, the stop rule and the toggle
// mechanism are this design's reading of that description.
module control_path
  import dish_pkg::scheme_e, dish_pkg::SCHEME_RB, dish_pkg::stop_e, dish_pkg::STOP_NONE, dish_pkg::STOP_STEADY, dish_pkg::STOP_LIMIT;
#(
  parameter int unsigned CNT_W = dish_pkg::COUNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  scheme_e          scheme,
  input  logic [CNT_W-1:0] max_count,
  input  logic             toggle_en,
  input  logic [CNT_W-1:0] toggle_at,
  input  logic             valid_rule,
  input  logic             steady,
  input  logic             is_steady_state,
  output logic             init,
  output logic             enable_rng,
  output logic             load_next_state,
  output logic             load_updated,
  output logic             load_last_state,
  output logic             clear_updated,
  output logic             toggle,
  output logic             check,
  output logic             busy,
  output logic             done,
  output stop_e            stop_reason,
  output logic [CNT_W-1:0] step_count,
  output logic [CNT_W-1:0] round_count
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_PRIME, S_RUN, S_CHECK, S_DONE
  } state_e;

  state_e           state, state_nx;
  logic             toggled;
  logic             toggle_pending;
  logic [CNT_W-1:0] units;
  logic             step_limit, round_limit;
  stop_e            stop_nx;

  assign toggle_pending = toggle_en && !toggled;
  assign units          = (scheme == SCHEME_RB) ? round_count : step_count;
  assign step_limit     = (scheme != SCHEME_RB) && (step_count >= max_count);
  assign round_limit    = (scheme == SCHEME_RB) && ((round_count + 1'b1) >= max_count);

  always_comb begin
    state_nx        = state;
    stop_nx         = stop_reason;
    init            = 1'b0;
    enable_rng      = 1'b0;
    load_next_state = 1'b0;
    load_updated    = 1'b0;
    load_last_state = 1'b0;
    clear_updated   = 1'b0;
    toggle          = 1'b0;
    check           = 1'b0;
    unique case (state)
      S_IDLE:  if (start) state_nx = S_INIT;
      S_INIT: begin
        init          = 1'b1;
        clear_updated = 1'b1;
        stop_nx       = STOP_NONE;
        state_nx      = S_PRIME;
      end
      S_PRIME: begin
        load_last_state = 1'b1;
        state_nx        = S_RUN;
      end
      S_RUN: begin
        if (step_limit) begin
          stop_nx  = STOP_LIMIT;
          state_nx = S_DONE;
        end else if (toggle_pending && (units >= toggle_at)) begin
          toggle = 1'b1;
        end else if (steady) begin
          state_nx = S_CHECK;
        end else begin
          enable_rng      = 1'b1;
          load_next_state = valid_rule;
          load_updated    = valid_rule;
        end
      end
      S_CHECK: begin
        check = 1'b1;
        if (is_steady_state && !toggle_pending) begin
          stop_nx  = STOP_STEADY;
          state_nx = S_DONE;
        end else if (round_limit) begin
          stop_nx  = STOP_LIMIT;
          state_nx = S_DONE;
        end else begin
          load_last_state = 1'b1;
          clear_updated   = 1'b1;
          state_nx        = S_RUN;
        end
      end
      S_DONE:  if (start) state_nx = S_INIT;
      default: state_nx = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      stop_reason <= STOP_NONE;
      toggled     <= 1'b0;
      step_count  <= '0;
      round_count <= '0;
    end else begin
      state       <= state_nx;
      stop_reason <= stop_nx;
      if (init) begin
        toggled     <= 1'b0;
        step_count  <= '0;
        round_count <= '0;
      end else begin
        if (toggle)          toggled     <= 1'b1;
        if (load_next_state) step_count  <= step_count + 1'b1;
        if (check)           round_count <= round_count + 1'b1;
      end
    end
  end

  assign busy = (state != S_IDLE) && (state != S_DONE);
  assign done = (state == S_DONE);

  // Loads only happen on a valid index, and never outside RUN.
  assert property (@(posedge clk) disable iff (!rst_n)
                   load_next_state |-> (valid_rule && state == S_RUN));
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(toggle && load_next_state));

endmodule
