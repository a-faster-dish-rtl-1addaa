// tb_lfsr: the 16-bit register must run through all 65535 non-zero states
// before it repeats, follow the polynomial x^16+x^14+x^13+x^11+1 step by step
// (reference computed here from the tap positions), hold while not enabled,
// and turn a zero seed into 1.
module tb_lfsr;
  logic clk = 0, rst_n = 0, load = 0, enable = 0;
  logic [15:0] seed, q, model;
  int checks = 0, failures = 0, cycles = 0;

  lfsr dut (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed), .enable(enable), .q(q));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic logic [15:0] step(logic [15:0] s);
    logic fb;
    fb = s[15] ^ s[13] ^ s[12] ^ s[10];
    return {s[14:0], fb};
  endfunction

  initial begin
    int period;
    seed = 16'hACE1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // zero seed
    @(negedge clk); seed = '0; load = 1;
    @(negedge clk); load = 0;
    checks++; if (q !== 16'h0001) begin failures++; $display("FAIL zero seed q=%h", q); end
    // seed and follow
    seed = 16'hACE1; load = 1;
    @(negedge clk); load = 0; model = 16'hACE1;
    checks++; if (q !== model) begin failures++; $display("FAIL seed q=%h", q); end
    for (int i = 0; i < 200; i++) begin
      enable = ($urandom % 4) != 0;
      if (enable) model = step(model);
      @(negedge clk);
      checks++;
      if (q !== model) begin failures++; $display("FAIL step %0d q=%h exp=%h", i, q, model); end
    end
    enable = 0;
    // period
    seed = 16'h0001; load = 1;
    @(negedge clk); load = 0; enable = 1;
    period = 0;
    do begin
      @(negedge clk);
      period++;
      if (q == 16'h0000) begin failures++; checks++; $display("FAIL all-zero state"); break; end
    end while (q != 16'h0001 && period < 70000);
    enable = 0;
    checks++;
    if (period != 65535) begin failures++; $display("FAIL period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 80000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
