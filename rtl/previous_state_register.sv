// previous_state_register: keeps the (inhibitor-masked) state vector seen at
// the last steady-state check, so the lower comparator can tell whether the
// network has stopped changing.
//
// `load` (Load Last State from the control path) copies `data_in` at the next
// rising clock; reset clears it. Its width is one bit per model element.
// That it stores the masked state follows the published framework; when it
// is loaded (once at the start, then at each check that does not end the
// run) is this design's choice, made in the control path.
module previous_state_register #(
  parameter int unsigned NUM_ELEM = dish_pkg::NUM_ELEM
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                load,
  input  logic [NUM_ELEM-1:0] data_in,
  output logic [NUM_ELEM-1:0] data_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    data_out <= '0;
    else if (load) data_out <= data_in;
  end

endmodule
