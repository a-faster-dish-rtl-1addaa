// tb_scenarios: the evaluation grid of the simulator - eight input scenarios
// under the five schemes (SMLN, RB-RSQ, SB-RSQ, RB-RSQ-g, SB-RSQ-g), with the
// run lengths used for the T cell study: 30 rounds for round-based runs,
// 2000 steps for step-based and SMLN runs, and the Toggle scenarios flipping
// TCR_high after 20%, 26.67% and 33.33% of the run (6, 8, 10 rounds or 400,
// 533, 667 steps).
//
// The T cell model's update rules are not part of this design, so a test
// network stands in for them (same one as tb_dish_top): elements 0..8 are
// the inputs TCR_high, TCR_low, TGFbeta, AKT_off, CD28, PTEN, TSC, CD122,
// CD132 and hold their value; element i >= 9 computes
//     next[i] = (x[i-1] & ~x[i % 9]) | (x[i-2] & x[(5*i) % 9]).
// Scenario inputs follow the scenario table (CD28..CD132 = 1); the other
// elements start at 0, or at random values for SMLN. Grouped runs put
// elements 3k, 3k+1, 3k+2 in group k (21 groups).
//
// Every step is replayed on a reference model and the state compared; the
// toggle must happen exactly at its point; the stop reason must match the
// reference's steady-state decisions. Cycles per run are printed.
module tb_scenarios;
  import dish_pkg::*;
  localparam int N = 61;

  logic clk = 0, rst_n = 0, start = 0;
  scheme_e scheme;
  logic [5:0] num_rules;
  logic [5:0] elem_group [N];
  logic [N-1:0] init_state, toggle_mask, inhib_data, nl_cur, nl_next, state;
  logic [15:0] seed, max_count, toggle_at, step_count, round_count;
  logic toggle_en, inhib_load;
  logic [1:0] inhib_sel;
  logic [5:0] rule;
  logic rule_valid, rule_all, step_done, check, toggle_pulse, stall, rb_transfer, rb_filling, busy, done;
  stop_e stop_reason;

  int checks = 0, failures = 0, cycles = 0, runs = 0;

  dish_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .scheme(scheme), .num_rules(num_rules),
    .elem_group(elem_group), .init_state(init_state), .seed(seed), .max_count(max_count),
    .toggle_en(toggle_en), .toggle_at(toggle_at), .toggle_mask(toggle_mask),
    .inhib_sel(inhib_sel), .inhib_load(inhib_load), .inhib_data(inhib_data),
    .nl_current_state(nl_cur), .nl_next_state(nl_next), .state(state), .rule(rule),
    .rule_valid(rule_valid), .rule_all(rule_all), .step_done(step_done), .check(check),
    .toggle_pulse(toggle_pulse), .stall(stall), .rb_transfer(rb_transfer),
    .rb_filling(rb_filling), .busy(busy), .done(done), .stop_reason(stop_reason),
    .step_count(step_count), .round_count(round_count));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  function automatic logic [N-1:0] net(logic [N-1:0] x);
    logic [N-1:0] y;
    for (int i = 0; i < N; i++)
      if (i < 9) y[i] = x[i];
      else       y[i] = (x[i-1] & ~x[i % 9]) | (x[i-2] & x[(5 * i) % 9]);
    return y;
  endfunction

  always_comb nl_next = net(nl_cur);

  task automatic fail(string msg);
    failures++;
    if (failures < 30) $display("FAIL t=%0d %s", cycles, msg);
  endtask

  task automatic run(string name, scheme_e sc, bit grouped, int scen, logic [15:0] sd);
    logic [N-1:0] init, ref_s, prev_s, nxt;
    int nrules, budget, tat, nsteps, nrounds, pred_stop, start_cycle;
    bit ten, toggled;
    int seen [$];

    // scenario table: TCR_high, TCR_low, TGFbeta, AKT_off; toggle percentage
    init = '0;
    if (sc == SCHEME_SMLN) init = N'({$urandom, $urandom});
    init[0] = (scen == 2 || scen == 4) ? 1'b0 : 1'b1;
    init[1] = (scen == 2 || scen == 4) ? 1'b1 : 1'b0;
    init[2] = (scen == 3 || scen == 4) ? 1'b1 : 1'b0;
    init[3] = (scen == 5) ? 1'b1 : 1'b0;
    init[8:4] = 5'h1F;
    budget = (sc == SCHEME_RB) ? 30 : 2000;
    ten = scen >= 6;
    // 20.00%, 26.67%, 33.33% of the run, rounded to the nearest step/round
    tat = (scen == 6) ? (budget * 2000 + 5000) / 10000 :
          (scen == 7) ? (budget * 2667 + 5000) / 10000 :
          (scen == 8) ? (budget * 3333 + 5000) / 10000 : 0;
    nrules = grouped ? 21 : 61;

    @(negedge clk);
    scheme = sc; num_rules = 6'(nrules); max_count = 16'(budget); init_state = init;
    toggle_en = ten; toggle_at = 16'(tat); toggle_mask = 61'b1; seed = sd; inhib_sel = '0;
    for (int e = 0; e < N; e++) elem_group[e] = grouped ? 6'(e / 3) : 6'(e);
    start = 1;
    @(negedge clk);
    start = 0;
    start_cycle = cycles;
    ref_s = init; prev_s = init;
    nsteps = 0; nrounds = 0; toggled = 0; pred_stop = int'(STOP_NONE);
    seen.delete();

    while (!done) begin
      #1;
      if (check) begin
        nrounds++;
        if (sc == SCHEME_RB) begin
          checks++;
          if (seen.size() != nrules) fail($sformatf("%s round of %0d rules", name, seen.size()));
        end
        seen.delete();
        if (ref_s == prev_s && !(ten && !toggled)) pred_stop = int'(STOP_STEADY);
        else prev_s = ref_s;
      end
      if (rule_valid) begin
        nxt = net(ref_s);
        nsteps++;
        if (rule_all) ref_s = nxt;
        else begin
          checks++;
          if (int'(rule) >= nrules || (sc == SCHEME_RB && (int'(rule) inside {seen})))
            fail($sformatf("%s bad rule %0d", name, rule));
          seen.push_back(int'(rule));
          for (int e = 0; e < N; e++)
            if ((grouped ? e / 3 : e) == int'(rule)) ref_s[e] = nxt[e];
        end
      end
      if (toggle_pulse) begin
        checks++;
        if ((sc == SCHEME_RB ? nrounds : nsteps) != tat)
          fail($sformatf("%s toggle after %0d, expected %0d", name, sc == SCHEME_RB ? nrounds : nsteps, tat));
        ref_s[0] = ~ref_s[0];
        toggled = 1;
      end
      @(negedge clk);
      checks++;
      if (state !== ref_s) fail($sformatf("%s state %h exp %h", name, state, ref_s));
    end
    if (pred_stop == int'(STOP_NONE)) pred_stop = int'(STOP_LIMIT);
    checks++;
    if (int'(stop_reason) != pred_stop) fail($sformatf("%s stop %0d, reference %0d", name, stop_reason, pred_stop));
    if (ten) begin
      checks++;
      if (!toggled) fail($sformatf("%s no toggle", name));
    end
    runs++;
    $display("%-10s scenario %0d: %-11s steps=%0d rounds=%0d cycles=%0d", name, scen,
             stop_reason.name(), nsteps, nrounds, cycles - start_cycle);
  endtask

  initial begin
    scheme = SCHEME_SMLN; num_rules = 6'd61; max_count = '0; toggle_at = '0; toggle_en = 0;
    toggle_mask = '0; inhib_sel = '0; inhib_load = 0; inhib_data = '0; seed = 16'h1;
    init_state = '0;
    for (int e = 0; e < N; e++) elem_group[e] = 6'(e);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 1; s <= 8; s++) begin
      run("SMLN",     SCHEME_SMLN, 0, s, 16'(100 + s));
      run("RB-RSQ",   SCHEME_RB,   0, s, 16'(200 + s));
      run("SB-RSQ",   SCHEME_SB,   0, s, 16'(300 + s));
      run("RB-RSQ-g", SCHEME_RB,   1, s, 16'(400 + s));
      run("SB-RSQ-g", SCHEME_SB,   1, s, 16'(500 + s));
    end
    checks++;
    if (runs != 40) fail("not all runs finished");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 400000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
