// lfsr: Fibonacci linear feedback shift register, the random source of the
// rule selector.
//
// The paper names an LFSR as the generator of the random Values of the
// round-based scheme and of the RNG number X of the step-based scheme, but
// gives neither its length nor its polynomial. This design uses a WIDTH-bit
// maximal-length register; the default 16 bits uses x^16+x^14+x^13+x^11+1
// (period 65535). Other widths need a matching TAPS mask.
//
// Interface: `load` copies `seed` into the register (a zero seed is replaced
// by 1, since the all-zero state never leaves itself); `enable` advances one
// step. `q` is the register itself. Both take effect at the next rising clock.
module lfsr #(
  parameter int unsigned WIDTH = dish_pkg::LFSR_W,
  parameter logic [WIDTH-1:0] TAPS = 16'hB400
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [WIDTH-1:0] seed,
  input  logic             enable,
  output logic [WIDTH-1:0] q
);

  logic feedback;
  assign feedback = ^(q & TAPS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      q <= {{(WIDTH-1){1'b0}}, 1'b1};
    else if (load)   q <= (seed == '0) ? {{(WIDTH-1){1'b0}}, 1'b1} : seed;
    else if (enable) q <= {q[WIDTH-2:0], feedback};
  end

endmodule
