// updated_register: one bit per rule (element or group) that records whether
// the rule has run since the last steady-state check.
//
// `clear` empties it (start of a run and start of each new round/check
// window). `load` (Load Updated) sets the bit of rule `sel`, or every bit of
// the first `num_rules` when `load_all` is set (SMLN). Its output goes to the
// upper comparator, which raises Steady once it equals the full rule list.
// Updates happen at the next rising clock; clear has priority.
// The register's role (tracking which rules have run, compared against the
// full list) is from the published framework; the set/clear protocol and
// the num_rules-sized load-all are this design's.
module updated_register #(
  parameter int unsigned NUM_ELEM = dish_pkg::NUM_ELEM,
  localparam int unsigned RULE_W  = $clog2(NUM_ELEM),
  localparam int unsigned NR_W    = $clog2(NUM_ELEM + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clear,
  input  logic                load,
  input  logic                load_all,
  input  logic [RULE_W-1:0]   sel,
  input  logic [NR_W-1:0]     num_rules,
  output logic [NUM_ELEM-1:0] data_out
);

  logic [NUM_ELEM-1:0] set_mask;

  always_comb begin
    for (int r = 0; r < NUM_ELEM; r++)
      set_mask[r] = load_all ? (r < int'(num_rules)) : (r == int'(sel));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     data_out <= '0;
    else if (clear) data_out <= '0;
    else if (load)  data_out <= data_out | set_mask;
  end

endmodule
