// tb_rule_selector: the three schemes through one selector.
//  * SB: with a reference LFSR (x^16+x^14+x^13+x^11+1, reseeded on init),
//    each enabled cycle must give Valid Rule and Rule = (low 10 bits) mod E;
//    the LFSR must hold while Enable is low. All E indices must be reached.
//  * RB: with Enable held high, nothing valid for E+1 cycles (stack fill and
//    transfer), then rounds of E valid rules forming a permutation, each
//    followed by one transfer cycle.
//  * SMLN: Valid Rule follows Enable and rule_all is set.
module tb_rule_selector;
  import dish_pkg::*;
  localparam int N = 61;
  logic clk = 0, rst_n = 0, init = 0, enable = 0;
  scheme_e scheme;
  logic [5:0] nr, rule;
  logic [15:0] seed, model;
  logic valid, rall, rb_transfer, rb_filling;
  int checks = 0, failures = 0, cycles = 0;

  rule_selector #(.NUM_ELEM(N)) dut (
    .clk(clk), .rst_n(rst_n), .scheme(scheme), .num_rules(nr), .seed(seed),
    .init(init), .enable(enable), .rule(rule), .valid_rule(valid), .rule_all(rall),
    .rb_transfer(rb_transfer), .rb_filling(rb_filling));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0d %s", cycles, msg);
  endtask

  function automatic logic [15:0] step(logic [15:0] s);
    return {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
  endfunction

  task automatic do_init(scheme_e sc, int e, logic [15:0] sd);
    @(negedge clk);
    scheme = sc; nr = 6'(e); seed = sd; init = 1; enable = 0;
    @(negedge clk);
    init = 0;
    model = sd;
  endtask

  initial begin
    int hits [64];
    scheme = SCHEME_SB; nr = 6'd37; seed = 16'h1234;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // Step-based.
    do_init(SCHEME_SB, 37, 16'h1234);
    for (int i = 0; i < 64; i++) hits[i] = 0;
    for (int i = 0; i < 3000; i++) begin
      enable = ($urandom % 5) != 0;
      #1;
      checks++;
      if (valid !== enable) fail("SB valid");
      if (enable) begin
        checks++;
        if (int'(rule) != int'(model[9:0]) % 37) fail($sformatf("SB rule=%0d exp=%0d", rule, int'(model[9:0]) % 37));
        hits[rule]++;
        model = step(model);
      end
      @(negedge clk);
    end
    for (int i = 0; i < 37; i++) begin
      checks++;
      if (hits[i] == 0) fail($sformatf("SB index %0d never produced", i));
    end
    enable = 0;

    // Round-based.
    for (int s = 0; s < 2; s++) begin
      automatic int e = (s == 0) ? 16 : 61;
      int seen [$];
      int c, nval, ntr;
      do_init(SCHEME_RB, e, 16'hBEEF);
      enable = 1;
      for (c = 0; c <= e; c++) begin
        #1; checks++;
        if (valid) fail("RB valid during fill");
        @(negedge clk);
      end
      nval = 0; ntr = 0;
      for (int r = 0; r < 5; r++) begin
        seen.delete();
        for (int k = 0; k < e; k++) begin
          #1; checks++;
          if (!valid) fail($sformatf("RB round %0d step %0d not valid", r, k));
          else if (int'(rule) >= e || (int'(rule) inside {seen})) fail($sformatf("RB duplicate/invalid %0d", rule));
          seen.push_back(int'(rule));
          nval++;
          @(negedge clk);
        end
        #1; checks++;
        if (valid || !rb_transfer) fail("RB missing transfer cycle");
        ntr++;
        @(negedge clk);
      end
      checks++;
      if (nval != 5 * e || ntr != 5) fail("RB round count");
      enable = 0;
    end

    // SMLN.
    do_init(SCHEME_SMLN, 61, 16'h0001);
    for (int i = 0; i < 20; i++) begin
      enable = i[0];
      #1; checks++;
      if (valid !== enable || !rall) fail("SMLN valid/rule_all");
      @(negedge clk);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
