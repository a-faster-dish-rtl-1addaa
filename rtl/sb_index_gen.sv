// sb_index_gen: step-based rule index, I = X mod E.
//
// X is the low N_BITS bits of the random source and E = num_rules. Taking X
// directly as the index would waste the codes at and above E (27 of 64 for a
// 37-rule model); the modulo never misses. Its cost is a small bias: the
// lowest (2^n mod E) indices get one code more than the others. With
// N_BITS = 10 that affects (2^10 mod E)/2^10 of the codes: 2.4% for E = 37,
// 4.7% for E = 61. Equation and n = 10 are the paper's; the combinational divider
// is this design's choice. Purely combinational: the index is valid in the
// same cycle as X. num_rules must be at least 1.
module sb_index_gen #(
  parameter int unsigned NUM_ELEM = dish_pkg::NUM_ELEM,
  parameter int unsigned N_BITS   = dish_pkg::SB_RNG_BITS,
  localparam int unsigned RULE_W  = $clog2(NUM_ELEM),
  localparam int unsigned NR_W    = $clog2(NUM_ELEM + 1)
) (
  input  logic [N_BITS-1:0] x,
  input  logic [NR_W-1:0]   num_rules,
  output logic [RULE_W-1:0] index
);

  logic [N_BITS-1:0] divisor;
  logic [N_BITS-1:0] rem;

  assign divisor = (num_rules == '0) ? N_BITS'(1) : N_BITS'(num_rules);
  assign rem     = x % divisor;
  assign index   = rem[RULE_W-1:0];

endmodule
