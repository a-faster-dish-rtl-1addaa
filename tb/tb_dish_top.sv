// tb_dish_top: end-to-end test of the simulator at its default size
// (61 elements), for every scheme.
//
// The update rules of the network are supplied here by a test network, not a
// biological model: elements 0..8 are inputs that keep their value, and every
// element i >= 9 computes
//     next[i] = (x[i-1] & ~x[i % 9]) | (x[i-2] & x[(5*i) % 9])
// from lower-numbered elements only, so every scheme reaches a fixed point.
// A reference model in this file replays each update the design reports
// (rule index, or all elements for SMLN), applies the active inhibitor mask,
// and compares the whole state vector after every step. It also checks:
//   * round-based: every round is a permutation of the num_rules indices;
//     before the first rule the design stalls num_rules+1 cycles (stack fill
//     and transfer); a round takes num_rules+2 cycles in steady operation;
//   * step-based: one rule per cycle while running, all indices < num_rules;
//   * SMLN: every element updated in every step, 3 cycles per step;
//   * the stop reason, predicted by the reference at every check: steady state (state equal to the previous check) or
//     budget (max_count rounds/steps), the toggle of an input in the Toggle
//     runs, and that the inhibitor actually forces an element off.
// Each mechanism must occur at least once.
module tb_dish_top;
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

  int checks = 0, failures = 0, cycles = 0;
  // mechanism counters
  int m_fill_stall = 0, m_transfer = 0, m_check = 0, m_stop_steady = 0, m_stop_limit = 0;
  int m_toggle = 0, m_inhibit = 0, m_group = 0, m_smln = 0, m_sb = 0, m_rb_round = 0;

  dish_top dut (
    .clk(clk), .rst_n(rst_n), .start(start), .scheme(scheme), .num_rules(num_rules),
    .elem_group(elem_group), .init_state(init_state), .seed(seed), .max_count(max_count),
    .toggle_en(toggle_en), .toggle_at(toggle_at), .toggle_mask(toggle_mask),
    .inhib_sel(inhib_sel), .inhib_load(inhib_load), .inhib_data(inhib_data),
    .nl_current_state(nl_cur), .nl_next_state(nl_next), .state(state), .rule(rule),
    .rule_valid(rule_valid), .rule_all(rule_all), .step_done(step_done), .check(check), .toggle_pulse(toggle_pulse),
    .stall(stall), .rb_transfer(rb_transfer), .rb_filling(rb_filling), .busy(busy),
    .done(done), .stop_reason(stop_reason), .step_count(step_count), .round_count(round_count));

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

  // Write an inhibitor entry.
  task automatic set_inhib(int entry, logic [N-1:0] mask);
    @(negedge clk);
    inhib_sel = 2'(entry); inhib_data = mask; inhib_load = 1;
    @(negedge clk);
    inhib_load = 0;
  endtask

  // Run one simulation and check it against the reference model.
  // grp_mod: element e belongs to group e % grp_mod (grp_mod = N: ungrouped).
  task automatic run(string name, scheme_e sc, int nrules, int maxc, logic [N-1:0] init,
                     logic [N-1:0] mask, int isel, logic ten, int tat, int tbit,
                     logic [15:0] sd, int exp_stop);
    logic [N-1:0] ref_s, prev_s, nxt;
    int seen [$];
    int first_rule_cycle, start_cycle, stalls_before_first, last_round_start, nsteps, nrounds;
    logic pending_rule, pending_all, started;
    logic [5:0] pending_idx;
    bit toggled, gap_toggle;
    int pred_stop;

    @(negedge clk);
    scheme = sc; num_rules = 6'(nrules); max_count = 16'(maxc); init_state = init;
    inhib_sel = 2'(isel); toggle_en = ten; toggle_at = 16'(tat);
    toggle_mask = '0; toggle_mask[tbit] = 1'b1; seed = sd;
    for (int e = 0; e < N; e++) elem_group[e] = 6'(e % nrules);
    if (sc == SCHEME_SMLN) for (int e = 0; e < N; e++) elem_group[e] = 6'(e);
    start = 1;
    @(negedge clk);
    start = 0;
    start_cycle = cycles;
    ref_s = init; prev_s = init & ~mask;
    first_rule_cycle = -1; stalls_before_first = 0; last_round_start = -1;
    nsteps = 0; nrounds = 0; toggled = 0; gap_toggle = 0; pred_stop = int'(STOP_NONE);
    seen.delete();

    while (!done) begin
      // sample the cycle's decisions before the clock edge
      #1;
      pending_rule = rule_valid; pending_all = rule_all; pending_idx = rule;
      if (stall && first_rule_cycle < 0) stalls_before_first++;
      if (rb_transfer) m_transfer++;
      if (check) begin
        m_check++;
        nrounds++;
        // reference steady-state decision
        if (ref_s == prev_s && !(ten && !toggled)) pred_stop = int'(STOP_STEADY);
        else prev_s = ref_s & ~mask;
        if (sc == SCHEME_RB) begin
          checks++;
          if (seen.size() != nrules) fail($sformatf("%s round had %0d rules", name, seen.size()));
          m_rb_round++;
        end
        seen.delete();
      end
      if (pending_rule) begin
        nxt = net(ref_s & ~mask) & ~mask;
        if (first_rule_cycle < 0) first_rule_cycle = cycles - start_cycle;
        nsteps++;
        if (pending_all) begin
          if (last_round_start >= 0) begin
            checks++;
            if (cycles - last_round_start != 3 + int'(gap_toggle))
              fail($sformatf("%s SMLN step period %0d", name, cycles - last_round_start));
          end
          last_round_start = cycles;
          gap_toggle = 0;
          ref_s = nxt; m_smln++;
          checks++;
          if (sc != SCHEME_SMLN) fail("rule_all outside SMLN");
        end else begin
          int cnt = 0;
          checks++;
          if (int'(pending_idx) >= nrules) fail($sformatf("%s index %0d out of range", name, pending_idx));
          if (sc == SCHEME_RB) begin
            checks++;
            if (int'(pending_idx) inside {seen}) fail($sformatf("%s duplicate rule %0d in round", name, pending_idx));
            if (seen.size() == 0) begin
              if (last_round_start >= 0 && nrounds > 1) begin
                checks++;
                if (cycles - last_round_start != nrules + 2 + int'(gap_toggle))
                  fail($sformatf("%s round period %0d", name, cycles - last_round_start));
              end
              last_round_start = cycles;
              gap_toggle = 0;
            end
          end
          if (sc == SCHEME_SB) m_sb++;
          seen.push_back(int'(pending_idx));
          for (int e = 0; e < N; e++)
            if (int'(e % nrules) == int'(pending_idx)) begin ref_s[e] = nxt[e]; cnt++; end
          if (cnt > 1) m_group++;
        end
        if ((net(ref_s) & mask) != '0 && mask != '0) m_inhibit++;
      end
      if (toggle_pulse) begin
        ref_s[tbit] = ~ref_s[tbit]; toggled = 1; gap_toggle = 1; m_toggle++;
      end
      if (sc == SCHEME_SB) begin
        checks++;
        if (stall) fail("SB stalled");
      end
      @(negedge clk);
      checks++;
      if (state !== ref_s) fail($sformatf("%s state %h exp %h", name, state, ref_s));
    end

    // stop reason: the reference's own decision, and the one the run was meant to show
    if (pred_stop == int'(STOP_NONE)) pred_stop = int'(STOP_LIMIT);
    checks++;
    if (int'(stop_reason) != pred_stop) fail($sformatf("%s stop %0d, reference %0d", name, stop_reason, pred_stop));
    checks++;
    if (exp_stop >= 0 && int'(stop_reason) != exp_stop) fail($sformatf("%s stop %0d exp %0d", name, stop_reason, exp_stop));
    if (stop_reason == STOP_STEADY) m_stop_steady++;
    if (stop_reason == STOP_LIMIT)  m_stop_limit++;
    checks++;
    if (int'(step_count) != nsteps) fail($sformatf("%s step_count %0d exp %0d", name, step_count, nsteps));
    if (stop_reason == STOP_LIMIT) begin
      checks++;
      if (sc == SCHEME_RB ? (nrounds != maxc) : (nsteps != maxc))
        fail($sformatf("%s budget: rounds %0d steps %0d", name, nrounds, nsteps));
    end
    if (ten) begin
      checks++;
      if (!toggled) fail($sformatf("%s toggle missing", name));
    end
    if (sc == SCHEME_RB) begin
      checks++;
      if (stalls_before_first != nrules + 1) fail($sformatf("%s fill stalls %0d", name, stalls_before_first));
      if (stalls_before_first > 0) m_fill_stall++;
    end
    $display("%s: stop=%s steps=%0d checks(rounds)=%0d cycles=%0d", name, stop_reason.name(),
             nsteps, nrounds, cycles - start_cycle);
  endtask

  initial begin
    logic [N-1:0] base, knock;
    scheme = SCHEME_SMLN; num_rules = 6'd61; max_count = '0; toggle_at = '0; toggle_en = 0;
    toggle_mask = '0; inhib_sel = '0; inhib_load = 0; inhib_data = '0; seed = 16'h1;
    init_state = '0;
    for (int e = 0; e < N; e++) elem_group[e] = 6'(e);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;

    // inputs 0..8 on, rest random
    base = N'({$urandom, $urandom});
    base[8:0] = 9'h1FF;
    knock = '0; knock[30] = 1'b1; knock[45] = 1'b1;
    set_inhib(1, knock);

    run("SMLN",            SCHEME_SMLN, 61, 2000, base, '0,    0, 0, 0, 0, 16'h0001, int'(STOP_STEADY));
    run("SMLN inhibited",  SCHEME_SMLN, 61, 2000, base, knock, 1, 0, 0, 0, 16'h0001, int'(STOP_STEADY));
    run("SMLN toggle",     SCHEME_SMLN, 61, 2000, base, '0,    0, 1, 6, 0, 16'h0001, int'(STOP_STEADY));
    run("RB-RSQ",          SCHEME_RB,   61, 30,   base, '0,    0, 0, 0, 0, 16'hACE1, int'(STOP_STEADY));
    run("RB-RSQ budget",   SCHEME_RB,   61, 2,    base, '0,    0, 0, 0, 0, 16'h0BAD, int'(STOP_LIMIT));
    run("RB-RSQ-g toggle", SCHEME_RB,   20, 30,   base, knock, 1, 1, 3, 2, 16'h5EED, int'(STOP_STEADY));
    run("SB-RSQ",          SCHEME_SB,   61, 2000, base, '0,    0, 0, 0, 0, 16'h7777, -1);
    run("SB-RSQ budget",   SCHEME_SB,   61, 100,  base, '0,    0, 0, 0, 0, 16'h7777, int'(STOP_LIMIT));
    run("SB-RSQ-g toggle", SCHEME_SB,   15, 2000, base, knock, 1, 1, 400, 1, 16'h4242, int'(STOP_STEADY));

    begin
      static string names [11] = '{"fill stall", "stack transfer", "check", "steady stop", "budget stop",
                            "toggle", "inhibition", "group update", "SMLN step", "SB step", "RB round"};
      int counts [11];
      counts = '{m_fill_stall, m_transfer, m_check, m_stop_steady, m_stop_limit,
                 m_toggle, m_inhibit, m_group, m_smln, m_sb, m_rb_round};
      foreach (names[i]) begin
        $display("mechanism %-15s %0d", names[i], counts[i]);
        checks++;
        if (counts[i] == 0) fail($sformatf("mechanism %s never happened", names[i]));
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
