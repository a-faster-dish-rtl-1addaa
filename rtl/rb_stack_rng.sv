// rb_stack_rng: round-based random rule-order generator (two parallel stacks).
//
// Each round must run every rule exactly once in a random order. Two register
// arrays hold items {Priority, Value}. Stack A is built while stack B is
// consumed:
//   * push (A): a new item takes Value = `rng_value` and Priority 0. It is
//     compared with every item already on A at once: where the new Value is
//     greater, the new item's Priority goes up by one, otherwise the existing
//     item's Priority goes up by one. Every pair thus bumps exactly one of its
//     two members, so after num_rules pushes the Priorities are a permutation
//     of 0..num_rules-1, with no duplicates and no out-of-range index, even
//     when Values tie.
//   * pop (B): the top item leaves B and its Priority is the rule to run.
//   * transfer: when B is empty and A holds num_rules items, A is copied into
//     B and emptied. This takes one cycle with no rule out.
// At the start both stacks are empty, so num_rules pushes fill A (no rule is
// produced) before the first transfer; afterwards push and pop run in the
// same cycle and a round costs num_rules + 1 cycles.
//
// The stack algorithm, the Value/Priority split and the widths (log2 N bits
// each, 2*log2 N per register, N registers) follow the paper. Items are
// popped from the highest occupied position, as drawn. The one-cycle
// transfer and the handshake are this design's. Stack B keeps only the
// Priorities: its Values are never read again once A is complete.
//
// Interface: with `enable` high, `valid` says `rule` is a fresh index this
// cycle (combinational); the pop, the push and `push` (which advances the
// LFSR) all happen at the next rising clock. `clear` empties both stacks.
// `num_rules` must be at least 1 and must not change during a run.
module rb_stack_rng #(
  parameter int unsigned NUM_ELEM = dish_pkg::NUM_ELEM,
  localparam int unsigned RULE_W  = $clog2(NUM_ELEM),
  localparam int unsigned NR_W    = $clog2(NUM_ELEM + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              enable,
  input  logic [NR_W-1:0]   num_rules,
  input  logic [RULE_W-1:0] rng_value,
  output logic              push,
  output logic              valid,
  output logic [RULE_W-1:0] rule,
  output logic              transfer,
  output logic              empty_b,
  output logic [NR_W-1:0]   count_a,
  output logic [NR_W-1:0]   count_b
);

  logic [RULE_W-1:0] a_pri [NUM_ELEM];
  logic [RULE_W-1:0] a_val [NUM_ELEM];
  logic [RULE_W-1:0] b_pri [NUM_ELEM];

  logic [NUM_ELEM-1:0] new_wins;   // new Value greater than item i (i on A)
  logic [RULE_W-1:0]   new_pri;
  logic                pop;

  assign empty_b  = (count_b == '0);
  assign push     = enable && (count_a < num_rules);
  assign pop      = enable && !empty_b;
  assign valid    = pop;
  assign rule     = empty_b ? '0 : b_pri[count_b - 1'b1];
  assign transfer = empty_b && (count_a == num_rules) && (num_rules != '0);

  always_comb begin
    new_pri = '0;
    for (int i = 0; i < NUM_ELEM; i++) begin
      new_wins[i] = (i < int'(count_a)) && (rng_value > a_val[i]);
      new_pri     = new_pri + RULE_W'(new_wins[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count_a <= '0;
      count_b <= '0;
      for (int i = 0; i < NUM_ELEM; i++) begin
        a_pri[i] <= '0; a_val[i] <= '0; b_pri[i] <= '0;
      end
    end else if (clear) begin
      count_a <= '0;
      count_b <= '0;
    end else if (transfer) begin
      for (int i = 0; i < NUM_ELEM; i++) b_pri[i] <= a_pri[i];
      count_b <= count_a;
      count_a <= '0;
    end else begin
      if (push) begin
        for (int i = 0; i < NUM_ELEM; i++)
          if ((i < int'(count_a)) && !new_wins[i]) a_pri[i] <= a_pri[i] + 1'b1;
        a_pri[count_a[RULE_W-1:0]] <= new_pri;
        a_val[count_a[RULE_W-1:0]] <= rng_value;
        count_a <= count_a + 1'b1;
      end
      if (pop) count_b <= count_b - 1'b1;
    end
  end

  // A pop never happens on an empty stack, and A never outgrows the round.
  assert property (@(posedge clk) disable iff (!rst_n) valid |-> !empty_b);
  assert property (@(posedge clk) disable iff (!rst_n) count_a <= num_rules);

endmodule
