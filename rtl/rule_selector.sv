// rule_selector: produces the index of the rule (element or group) to update
// next, for the scheme selected by `scheme`.
//
//   SCHEME_SMLN  no random number: every Enable is a valid step and
//                `rule_all` asks the registers to update every element.
//   SCHEME_RB    rb_stack_rng: each round is a random permutation of the
//                rules; Valid Rule stays low while stack B is being filled
//                at the start of a run and during the A-to-B transfer.
//   SCHEME_SB    sb_index_gen: I = X mod num_rules with X the low 10 LFSR
//                bits; every Enable gives a valid index.
//
// A single LFSR serves both random schemes; it advances on every push (RB) or
// every Enable (SB). `init` reloads the LFSR from `seed` and empties the
// stacks, so a given seed repeats the same run.
//
// Timing: `rule`/`valid_rule` are combinational on `enable` and the
// selector's registers; the control path consumes the index in the same
// cycle, and the selector's state advances at the next rising clock.
//
// The paper places the scheme choice, the two index generators and the
// Seed/Enable/Rule/Valid Rule pins in this block; the sharing of one LFSR
// and the combinational handshake are this design's choices.
module rule_selector
  import dish_pkg::scheme_e, dish_pkg::SCHEME_SMLN, dish_pkg::SCHEME_RB, dish_pkg::SCHEME_SB, dish_pkg::SB_RNG_BITS;
#(
  parameter int unsigned NUM_ELEM = dish_pkg::NUM_ELEM,
  parameter int unsigned RNG_W    = dish_pkg::LFSR_W,
  localparam int unsigned RULE_W  = $clog2(NUM_ELEM),
  localparam int unsigned NR_W    = $clog2(NUM_ELEM + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  scheme_e           scheme,
  input  logic [NR_W-1:0]   num_rules,
  input  logic [RNG_W-1:0]  seed,
  input  logic              init,
  input  logic              enable,
  output logic [RULE_W-1:0] rule,
  output logic              valid_rule,
  output logic              rule_all,
  output logic              rb_transfer,
  output logic              rb_filling
);

  logic [RNG_W-1:0]  rng;
  logic              lfsr_step;
  logic              rb_push, rb_valid, rb_empty;
  logic [RULE_W-1:0] rb_rule, sb_rule;

  lfsr #(.WIDTH(RNG_W)) u_lfsr (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (init),
    .seed   (seed),
    .enable (lfsr_step),
    .q      (rng)
  );

  rb_stack_rng #(.NUM_ELEM(NUM_ELEM)) u_rb (
    .clk       (clk),
    .rst_n     (rst_n),
    .clear     (init),
    .enable    (enable && (scheme == SCHEME_RB)),
    .num_rules (num_rules),
    .rng_value (rng[RULE_W-1:0]),
    .push      (rb_push),
    .valid     (rb_valid),
    .rule      (rb_rule),
    .transfer  (rb_transfer),
    .empty_b   (rb_empty),
    .count_a   (),
    .count_b   ()
  );

  sb_index_gen #(.NUM_ELEM(NUM_ELEM)) u_sb (
    .x         (rng[SB_RNG_BITS-1:0]),
    .num_rules (num_rules),
    .index     (sb_rule)
  );

  assign rb_filling = (scheme == SCHEME_RB) && rb_empty;

  always_comb begin
    lfsr_step  = 1'b0;
    rule       = '0;
    valid_rule = 1'b0;
    rule_all   = 1'b0;
    unique case (scheme)
      SCHEME_SMLN: begin
        valid_rule = enable;
        rule_all   = 1'b1;
      end
      SCHEME_RB: begin
        lfsr_step  = rb_push && !init;
        rule       = rb_rule;
        valid_rule = rb_valid;
      end
      SCHEME_SB: begin
        lfsr_step  = enable && !init;
        rule       = sb_rule;
        valid_rule = enable;
      end
      default: ;
    endcase
  end

endmodule
