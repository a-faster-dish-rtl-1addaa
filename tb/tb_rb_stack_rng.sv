// tb_rb_stack_rng: checks the two-stack round-based generator.
//  * Directed: the worked example of the algorithm. Values 1, 2, 6, 4 pushed
//    into a 4-rule round give Priorities 0, 1, 3, 2, popped top first as
//    rules 2, 3, 1, 0.
//  * Random: Values (with many ties, 6-bit) and a random Enable, for several
//    rule counts. A reference keeps the pushed Values and derives each
//    item's Priority from the pairwise rule (the newer item gains on a
//    strictly greater Value, the older one otherwise). Every pop must match,
//    every round must be a permutation of 0..num_rules-1, and the
//    push/valid/transfer handshake must match the stack counts.
//  * Timing: with Enable held high the first rule appears num_rules+1 cycles
//    after clear (fill plus transfer) and each later round takes
//    num_rules+1 cycles.
module tb_rb_stack_rng;
  localparam int N = 61;
  logic clk = 0, rst_n = 0, clear = 0, enable = 0;
  logic [5:0] nr, rng, rule, count_a, count_b;
  logic push, valid, transfer, empty_b;
  int checks = 0, failures = 0, cycles = 0;

  int a_vals [$];
  int b_pri  [$];
  int seen   [$];
  int m_cnt_a, m_cnt_b;

  rb_stack_rng #(.NUM_ELEM(N)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .enable(enable), .num_rules(nr),
    .rng_value(rng), .push(push), .valid(valid), .rule(rule), .transfer(transfer),
    .empty_b(empty_b), .count_a(count_a), .count_b(count_b));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL t=%0d %s", cycles, msg);
  endtask

  // Priority of item j among the values v (push order).
  function automatic int ref_pri(int v [$], int j);
    int p = 0;
    for (int i = 0; i < v.size(); i++) begin
      if (i < j && v[j] > v[i]) p++;
      if (i > j && v[j] >= v[i]) p++;
    end
    return p;
  endfunction

  task automatic do_clear();
    @(negedge clk); clear = 1; enable = 0;
    @(negedge clk); clear = 0;
    a_vals.delete(); b_pri.delete(); seen.delete();
    m_cnt_a = 0; m_cnt_b = 0;
  endtask

  // One clock: inputs already set at negedge; check combinational outputs,
  // update the reference, advance to the next negedge.
  task automatic tick();
    logic exp_push, exp_valid, exp_transfer;
    #1;
    exp_push     = enable && (m_cnt_a < int'(nr));
    exp_valid    = enable && (m_cnt_b > 0);
    exp_transfer = (m_cnt_b == 0) && (m_cnt_a == int'(nr));
    checks++;
    if (push !== exp_push || valid !== exp_valid || transfer !== exp_transfer)
      fail($sformatf("handshake push=%0b/%0b valid=%0b/%0b transfer=%0b/%0b",
                     push, exp_push, valid, exp_valid, transfer, exp_transfer));
    if (exp_transfer) begin
      b_pri.delete();
      foreach (a_vals[j]) b_pri.push_back(ref_pri(a_vals, j));
      a_vals.delete();
      m_cnt_b = m_cnt_a; m_cnt_a = 0;
      seen.delete();
    end else begin
      if (exp_valid) begin
        int e = b_pri.pop_back();
        checks++;
        if (int'(rule) != e) fail($sformatf("rule=%0d exp=%0d", rule, e));
        checks++;
        if (int'(rule) >= nr || (int'(rule) inside {seen})) fail($sformatf("duplicate/invalid rule %0d", rule));
        seen.push_back(int'(rule));
        m_cnt_b--;
      end
      if (exp_push) begin
        a_vals.push_back(int'(rng));
        m_cnt_a++;
      end
    end
    @(negedge clk);
  endtask

  initial begin
    static int fig_vals [4] = '{1, 2, 6, 4};
    static int fig_rules [4] = '{2, 3, 1, 0};
    nr = 6'd4; rng = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;

    // Directed example.
    do_clear();
    for (int k = 0; k < 4; k++) begin enable = 1; rng = 6'(fig_vals[k]); tick(); end
    enable = 0; tick();                     // transfer
    for (int k = 0; k < 4; k++) begin
      enable = 1; rng = 6'($urandom % 64);
      #1; checks++;
      if (!valid || int'(rule) != fig_rules[k]) fail($sformatf("example pop %0d rule=%0d", k, rule));
      tick();
    end

    // Timing with continuous Enable.
    begin
      static int sizes [3] = '{7, 16, 61};
      foreach (sizes[s]) begin
        int first, nvalid;
        nr = 6'(sizes[s]);
        do_clear();
        first = -1; nvalid = 0;
        for (int c = 0; c < 4 * (sizes[s] + 1); c++) begin
          enable = 1; rng = 6'($urandom % 64);
          #1;
          if (valid && first < 0) first = c;
          if (valid) nvalid++;
          tick();
        end
        checks++;
        if (first != sizes[s] + 1) fail($sformatf("first rule at cycle %0d, expected %0d", first, sizes[s] + 1));
        // after the fill round: 3 rounds of N+1 cycles, each with N valid
        checks++;
        if (nvalid != 3 * sizes[s])
          fail($sformatf("N=%0d valid cycles %0d", sizes[s], nvalid));
      end
    end

    // Random enable, random sizes.
    for (int t = 0; t < 6; t++) begin
      nr = 6'(1 + $urandom % N);
      do_clear();
      for (int c = 0; c < 8 * (int'(nr) + 1); c++) begin
        enable = ($urandom % 4) != 0;
        rng = 6'($urandom % 64);
        tick();
      end
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
