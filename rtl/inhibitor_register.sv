// inhibitor_register: a small bank of inhibitor masks, one of which is active.
//
// A set bit in the active mask forces that element to 0: the simulator ANDs
// the current state, and the next state before it is stored, with the
// inverse of the mask. This models knock-outs such as the AKT inhibitor of the
// scenarios. `sel` (Select Inhibitor) picks the active entry, which appears on
// `data_out` combinationally; `load` (Load Inhibitor) writes `data_in` into
// the selected entry at the next rising clock. Reset clears every entry, so
// entry 0 left untouched means "no inhibition".
//
// The paper names the register, its Select Inhibitor and Load Inhibitor pins
// and the bitmasking; the number of entries (NUM_INHIB = 4) and the polarity
// (1 = inhibited) are this design's choices.
module inhibitor_register #(
  parameter int unsigned NUM_ELEM  = dish_pkg::NUM_ELEM,
  parameter int unsigned NUM_INHIB = dish_pkg::NUM_INHIB,
  localparam int unsigned SEL_W    = (NUM_INHIB > 1) ? $clog2(NUM_INHIB) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [SEL_W-1:0]    sel,
  input  logic                load,
  input  logic [NUM_ELEM-1:0] data_in,
  output logic [NUM_ELEM-1:0] data_out
);

  logic [NUM_ELEM-1:0] masks [NUM_INHIB];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_INHIB; i++) masks[i] <= '0;
    end else if (load && (int'(sel) < NUM_INHIB)) begin
      masks[sel] <= data_in;
    end
  end

  assign data_out = (int'(sel) < NUM_INHIB) ? masks[sel] : '0;

endmodule
