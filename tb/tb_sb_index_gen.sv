// tb_sb_index_gen: every 10-bit X for several rule counts (1, 7, 16, 37, 61),
// against X mod E, plus the count of indices that each receive one extra code
// (2^10 mod E), which for E = 37 is 25, i.e. a bias of 2.4% < 3%.
module tb_sb_index_gen;
  localparam int N = 61;
  logic [9:0] x;
  logic [5:0] nr;
  logic [5:0] idx;
  int checks = 0, failures = 0;
  int hist [64];

  sb_index_gen #(.NUM_ELEM(N), .N_BITS(10)) dut (.x(x), .num_rules(nr), .index(idx));

  initial begin
    static int es [5] = '{1, 7, 16, 37, 61};
    foreach (es[k]) begin
      int extra;
      nr = 6'(es[k]);
      for (int i = 0; i < 64; i++) hist[i] = 0;
      for (int v = 0; v < 1024; v++) begin
        x = 10'(v);
        #1;
        checks++;
        if (int'(idx) != v % es[k]) begin
          failures++;
          if (failures < 10) $display("FAIL E=%0d X=%0d idx=%0d", es[k], v, idx);
        end
        if (int'(idx) < 64) hist[idx]++;
      end
      extra = 0;
      for (int i = 0; i < es[k]; i++) if (hist[i] == 1024 / es[k] + 1) extra++;
      checks++;
      if (extra != 1024 % es[k]) begin failures++; $display("FAIL E=%0d extra=%0d", es[k], extra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
