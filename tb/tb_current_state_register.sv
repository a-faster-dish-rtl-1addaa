// tb_current_state_register: random init / toggle / group-load / load-all
// sequences against a per-element model. The group map is random with eight
// groups, so one load writes several elements at once (the grouped scheme),
// and the identity map is used for a second phase (ungrouped scheme).
module tb_current_state_register;
  localparam int N = 61;
  logic clk = 0, rst_n = 0, init = 0, load = 0, load_all = 0, toggle = 0;
  logic [5:0] sel;
  logic [5:0] grp [N];
  logic [N-1:0] init_state, din, tmask, dout, model;
  int checks = 0, failures = 0, cycles = 0, multi = 0;

  current_state_register #(.NUM_ELEM(N)) dut (
    .clk(clk), .rst_n(rst_n), .init(init), .init_state(init_state), .load(load),
    .load_all(load_all), .sel(sel), .elem_group(grp), .data_in(din),
    .toggle(toggle), .toggle_mask(tmask), .data_out(dout));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    init_state = '0; din = '0; tmask = '0; sel = '0; model = '0;
    for (int e = 0; e < N; e++) grp[e] = 6'($urandom % 8);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      int nw;
      @(negedge clk);
      if (i == 400) for (int e = 0; e < N; e++) grp[e] = 6'(e);
      init       = ($urandom % 30) == 0;
      toggle     = ($urandom % 15) == 0;
      load       = ($urandom % 2) == 0;
      load_all   = ($urandom % 10) == 0;
      sel        = (i < 400) ? 6'($urandom % 8) : 6'($urandom % N);
      init_state = N'({$urandom, $urandom});
      din        = N'({$urandom, $urandom});
      tmask      = N'({$urandom, $urandom});
      nw = 0;
      if (init) model = init_state;
      else if (toggle) model = model ^ tmask;
      else if (load) begin
        for (int e = 0; e < N; e++)
          if (load_all || grp[e] == sel) begin model[e] = din[e]; nw++; end
      end
      if (nw > 1 && !load_all) multi++;
      @(posedge clk); #1;
      checks++;
      if (dout !== model) begin failures++; $display("FAIL i=%0d dout=%h exp=%h", i, dout, model); end
    end
    checks++;
    if (multi == 0) begin failures++; $display("FAIL no multi-element group load happened"); end
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
