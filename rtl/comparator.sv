// comparator: WIDTH-bit equality comparator ("Equal?").
//
// The simulator uses two: one tells the control path that every rule of the
// round has run (Updated Register against the full rule list), the other that
// the state has stopped changing (Current State against Previous State).
// Purely combinational. The two comparators and their roles are the
// published framework's; sharing one parameterised module is this design's.
module comparator #(
  parameter int unsigned WIDTH = dish_pkg::NUM_ELEM
) (
  input  logic [WIDTH-1:0] in1,
  input  logic [WIDTH-1:0] in2,
  output logic             equal
);

  assign equal = (in1 == in2);

endmodule
