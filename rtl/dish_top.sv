// dish_top: discrete, stochastic simulator of a Boolean cell-signalling
// network (one bit per element), with SMLN, round-based RSQ(-g) and
// step-based RSQ(-g) update schemes.
//
// Datapath: the Current State Register is masked by the active entry of the
// Inhibitor Register (state AND NOT mask) and sent to the network's update
// logic on `nl_current_state`; the next state that comes back on
// `nl_next_state` is masked the same way and written into the elements of
// the rule chosen by the Rule Selector. The Updated Register records which
// rules have run; when all `num_rules` have, the upper comparator raises
// Steady and the control path compares the state with the Previous State
// Register (lower comparator). Equal means steady state and the run stops;
// otherwise the state is saved and a new window of updates starts.
//
// The network's update rules (the paper's Network Logic block) are model
// specific and are not part of this design: the top exports the masked
// current state and takes the next state back, combinationally, in the same
// cycle. Any combinational function of nl_current_state may be attached.
//
// Run interface: set scheme, num_rules (rules or groups, 1..NUM_ELEM),
// elem_group (rule index of each element; element e in group e for the
// ungrouped schemes, all elements in group 0 for SMLN is not needed),
// init_state, seed, max_count (rounds for RB, steps otherwise) and the toggle
// controls, then pulse `start`. `step_done` pulses in the cycle after each
// update, with `state` already showing its result; `rule`/`rule_valid` show
// the index used in the update cycle. `done` rises when the run ends and
// `stop_reason` tells why. Inhibitor masks are written at any time with
// inhib_load/inhib_sel/inhib_data; inhib_sel also chooses the active mask.
//
// Block structure and pin names follow the paper's framework figure; the
// polarity of the mask, the group map, the toggle mechanism and the widths
// are this design's choices (see each block).
module dish_top
  import dish_pkg::scheme_e, dish_pkg::stop_e;
#(
  parameter int unsigned NUM_ELEM  = dish_pkg::NUM_ELEM,
  parameter int unsigned NUM_INHIB = dish_pkg::NUM_INHIB,
  parameter int unsigned CNT_W     = dish_pkg::COUNT_W,
  parameter int unsigned RNG_W     = dish_pkg::LFSR_W,
  localparam int unsigned RULE_W   = $clog2(NUM_ELEM),
  localparam int unsigned NR_W     = $clog2(NUM_ELEM + 1),
  localparam int unsigned ISEL_W   = (NUM_INHIB > 1) ? $clog2(NUM_INHIB) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // run configuration
  input  logic                start,
  input  scheme_e             scheme,
  input  logic [NR_W-1:0]     num_rules,
  input  logic [RULE_W-1:0]   elem_group [NUM_ELEM],
  input  logic [NUM_ELEM-1:0] init_state,
  input  logic [RNG_W-1:0]    seed,
  input  logic [CNT_W-1:0]    max_count,
  input  logic                toggle_en,
  input  logic [CNT_W-1:0]    toggle_at,
  input  logic [NUM_ELEM-1:0] toggle_mask,
  // inhibitor bank
  input  logic [ISEL_W-1:0]   inhib_sel,
  input  logic                inhib_load,
  input  logic [NUM_ELEM-1:0] inhib_data,
  // network update logic (outside this design)
  output logic [NUM_ELEM-1:0] nl_current_state,
  input  logic [NUM_ELEM-1:0] nl_next_state,
  // observation
  output logic [NUM_ELEM-1:0] state,
  output logic [RULE_W-1:0]   rule,
  output logic                rule_valid,
  output logic                rule_all,
  output logic                step_done,
  output logic                check,
  output logic                toggle_pulse,
  output logic                stall,
  output logic                rb_transfer,
  output logic                rb_filling,
  output logic                busy,
  output logic                done,
  output stop_e               stop_reason,
  output logic [CNT_W-1:0]    step_count,
  output logic [CNT_W-1:0]    round_count
);

  logic                init, enable_rng, load_next_state, load_updated;
  logic                load_last_state, clear_updated, toggle;
  logic                valid_rule, steady, is_steady_state;
  logic [NUM_ELEM-1:0] inhib_mask, prev_state, updated, all_rules;
  logic [NUM_ELEM-1:0] cur_data_in;

  control_path #(.CNT_W(CNT_W)) u_ctrl (
    .clk             (clk),
    .rst_n           (rst_n),
    .start           (start),
    .scheme          (scheme),
    .max_count       (max_count),
    .toggle_en       (toggle_en),
    .toggle_at       (toggle_at),
    .valid_rule      (valid_rule),
    .steady          (steady),
    .is_steady_state (is_steady_state),
    .init            (init),
    .enable_rng      (enable_rng),
    .load_next_state (load_next_state),
    .load_updated    (load_updated),
    .load_last_state (load_last_state),
    .clear_updated   (clear_updated),
    .toggle          (toggle),
    .check           (check),
    .busy            (busy),
    .done            (done),
    .stop_reason     (stop_reason),
    .step_count      (step_count),
    .round_count     (round_count)
  );

  rule_selector #(.NUM_ELEM(NUM_ELEM), .RNG_W(RNG_W)) u_sel (
    .clk         (clk),
    .rst_n       (rst_n),
    .scheme      (scheme),
    .num_rules   (num_rules),
    .seed        (seed),
    .init        (init),
    .enable      (enable_rng),
    .rule        (rule),
    .valid_rule  (valid_rule),
    .rule_all    (rule_all),
    .rb_transfer (rb_transfer),
    .rb_filling  (rb_filling)
  );

  inhibitor_register #(.NUM_ELEM(NUM_ELEM), .NUM_INHIB(NUM_INHIB)) u_inhib (
    .clk      (clk),
    .rst_n    (rst_n),
    .sel      (inhib_sel),
    .load     (inhib_load),
    .data_in  (inhib_data),
    .data_out (inhib_mask)
  );

  // Bitmask of the state going into and coming out of the network logic.
  assign nl_current_state = state & ~inhib_mask;
  assign cur_data_in      = nl_next_state & ~inhib_mask;

  current_state_register #(.NUM_ELEM(NUM_ELEM)) u_cur (
    .clk         (clk),
    .rst_n       (rst_n),
    .init        (init),
    .init_state  (init_state),
    .load        (load_next_state),
    .load_all    (rule_all),
    .sel         (rule),
    .elem_group  (elem_group),
    .data_in     (cur_data_in),
    .toggle      (toggle),
    .toggle_mask (toggle_mask),
    .data_out    (state)
  );

  updated_register #(.NUM_ELEM(NUM_ELEM)) u_upd (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (clear_updated),
    .load      (load_updated),
    .load_all  (rule_all),
    .sel       (rule),
    .num_rules (num_rules),
    .data_out  (updated)
  );

  previous_state_register #(.NUM_ELEM(NUM_ELEM)) u_prev (
    .clk      (clk),
    .rst_n    (rst_n),
    .load     (load_last_state),
    .data_in  (nl_current_state),
    .data_out (prev_state)
  );

  // Complete list of rules: the first num_rules bits set.
  always_comb begin
    for (int r = 0; r < NUM_ELEM; r++) all_rules[r] = (r < int'(num_rules));
  end

  comparator #(.WIDTH(NUM_ELEM)) u_cmp_updated (
    .in1   (updated),
    .in2   (all_rules),
    .equal (steady)
  );

  comparator #(.WIDTH(NUM_ELEM)) u_cmp_state (
    .in1   (state),
    .in2   (prev_state),
    .equal (is_steady_state)
  );

  assign rule_valid   = load_next_state;
  assign toggle_pulse = toggle;
  assign stall        = enable_rng && !valid_rule;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) step_done <= 1'b0;
    else        step_done <= load_next_state;
  end

endmodule
