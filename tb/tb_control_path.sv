// tb_control_path: the control path against a small environment model.
// The environment answers Enable RNG with Valid Rule on a random subset of
// cycles (stalls), raises Steady once K loads have happened since the last
// clear of the Updated Register, and raises Is steady state? as the test
// decides. Scenarios:
//  1. start -> one init cycle -> one Load Last State (prime) -> loads; after
//     K loads a check; Is steady state? high -> DONE/STOP_STEADY with
//     step_count = K and round_count = 1.
//  2. step budget: max_count = 50 steps, never steady -> exactly 50 loads,
//     STOP_LIMIT, and a check (with Load Last State and clear) after every
//     K loads.
//  3. round budget (round-based): max_count = 3 rounds -> 3 checks, STOP_LIMIT.
//  4. toggle at round 2: Is steady state? held high, yet the run may not stop
//     before the toggle; exactly one toggle pulse, then STOP_STEADY.
// Loads must never occur without Valid Rule (also asserted in the design).
module tb_control_path;
  import dish_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, toggle_en = 0;
  scheme_e scheme;
  logic [15:0] max_count, toggle_at, step_count, round_count;
  logic valid_rule, steady, is_ss;
  logic init, enable_rng, load_next, load_upd, load_last, clear_upd, toggle, check, busy, done;
  stop_e stop_reason;
  int checks = 0, failures = 0, cycles = 0;
  int K, since_clear, n_load, n_check, n_toggle, n_init, n_last, n_stall;
  logic ss_value;

  control_path dut (
    .clk(clk), .rst_n(rst_n), .start(start), .scheme(scheme), .max_count(max_count),
    .toggle_en(toggle_en), .toggle_at(toggle_at), .valid_rule(valid_rule),
    .steady(steady), .is_steady_state(is_ss), .init(init), .enable_rng(enable_rng),
    .load_next_state(load_next), .load_updated(load_upd), .load_last_state(load_last),
    .clear_updated(clear_upd), .toggle(toggle), .check(check), .busy(busy), .done(done),
    .stop_reason(stop_reason), .step_count(step_count), .round_count(round_count));

  always #5 clk = ~clk;

  // Environment: registered "updated" count and combinational Valid Rule.
  always_comb begin
    steady = (since_clear >= K);
    is_ss  = ss_value;
  end
  always @(negedge clk) valid_rule = ($urandom % 3) != 0;
  always @(posedge clk) begin
    cycles++;
    if (rst_n) begin
      if (load_next && !valid_rule) begin failures++; $display("FAIL load without valid"); end
      if (load_next != load_upd) begin failures++; $display("FAIL load_next != load_updated"); end
      if (enable_rng && !valid_rule) n_stall++;
      if (clear_upd) since_clear <= 0;
      else if (load_upd) since_clear <= since_clear + 1;
      if (load_next) n_load++;
      if (check) n_check++;
      if (toggle) n_toggle++;
      if (init) n_init++;
      if (load_last) n_last++;
    end
  end

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", what, got, exp); end
  endtask

  task automatic run(scheme_e sc, int k, int maxc, logic ss, logic ten, int tat);
    @(negedge clk);
    scheme = sc; K = k; max_count = 16'(maxc); ss_value = ss; toggle_en = ten; toggle_at = 16'(tat);
    n_load = 0; n_check = 0; n_toggle = 0; n_init = 0; n_last = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    // the cycle after start is INIT, the next is PRIME
    checks++; if (!init) begin failures++; $display("FAIL no init after start"); end
    @(negedge clk);
    checks++; if (!load_last || init) begin failures++; $display("FAIL no prime after init"); end
    wait (done);
    @(negedge clk);
  endtask

  initial begin
    scheme = SCHEME_SB; max_count = '0; toggle_at = '0; ss_value = 0; K = 5; since_clear = 0;
    n_stall = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    run(SCHEME_SB, 7, 1000, 1'b1, 1'b0, 0);
    expect_eq("s1 loads", n_load, 7);
    expect_eq("s1 checks", n_check, 1);
    expect_eq("s1 stop", int'(stop_reason), int'(STOP_STEADY));
    expect_eq("s1 step_count", int'(step_count), 7);
    expect_eq("s1 round_count", int'(round_count), 1);

    run(SCHEME_SB, 8, 50, 1'b0, 1'b0, 0);
    expect_eq("s2 loads", n_load, 50);
    expect_eq("s2 checks", n_check, 6);
    expect_eq("s2 load_last", n_last, 1 + 6);
    expect_eq("s2 stop", int'(stop_reason), int'(STOP_LIMIT));

    run(SCHEME_RB, 10, 3, 1'b0, 1'b0, 0);
    expect_eq("s3 checks", n_check, 3);
    expect_eq("s3 loads", n_load, 30);
    expect_eq("s3 stop", int'(stop_reason), int'(STOP_LIMIT));
    expect_eq("s3 round_count", int'(round_count), 3);

    run(SCHEME_RB, 4, 30, 1'b1, 1'b1, 2);
    expect_eq("s4 toggles", n_toggle, 1);
    expect_eq("s4 checks", n_check, 3);
    expect_eq("s4 stop", int'(stop_reason), int'(STOP_STEADY));

    expect_eq("one init per run", n_init, 1);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no stall exercised"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
