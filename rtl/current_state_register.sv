// current_state_register: the state of every model element, one bit each.
//
// A run starts with `init`, which loads the scenario's initial state. After
// that, `load` (Load Next State) writes `data_in` (the network's next state,
// already masked by the active inhibitor) into the elements selected by the
// rule index `sel`: element e is written when its group number
// `elem_group[e]` equals `sel`. With one element per group this is the
// ungrouped RSQ scheme, with several it is RSQ-g. `load_all` writes every
// element at once, which is the SMLN scheme. `toggle` inverts the elements set
// in `toggle_mask`; it implements the paper's Toggle scenarios, where an input
// protein flips after a fraction of the run. All actions take effect at the
// next rising clock, with priority init > toggle > load.
//
// The paper gives the register's role, its Select/Load/Initial State pins and
// that the index is its Select input; the group map, the per-element write
// enable and the toggle input are this design's.
module current_state_register #(
  parameter int unsigned NUM_ELEM = dish_pkg::NUM_ELEM,
  localparam int unsigned RULE_W  = $clog2(NUM_ELEM)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                init,
  input  logic [NUM_ELEM-1:0] init_state,
  input  logic                load,
  input  logic                load_all,
  input  logic [RULE_W-1:0]   sel,
  input  logic [RULE_W-1:0]   elem_group [NUM_ELEM],
  input  logic [NUM_ELEM-1:0] data_in,
  input  logic                toggle,
  input  logic [NUM_ELEM-1:0] toggle_mask,
  output logic [NUM_ELEM-1:0] data_out
);

  logic [NUM_ELEM-1:0] write_en;

  always_comb begin
    for (int e = 0; e < NUM_ELEM; e++)
      write_en[e] = load_all || (elem_group[e] == sel);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      data_out <= '0;
    else if (init)   data_out <= init_state;
    else if (toggle) data_out <= data_out ^ toggle_mask;
    else if (load)   data_out <= (data_out & ~write_en) | (data_in & write_en);
  end

endmodule
