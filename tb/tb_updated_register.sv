// tb_updated_register: random sequences of clear, single-rule loads and
// load-all (SMLN) against a bit-vector model; also checks that load-all only
// sets the first num_rules bits.
module tb_updated_register;
  localparam int N = 61;
  logic clk = 0, rst_n = 0, clear = 0, load = 0, load_all = 0;
  logic [5:0] sel, nr;
  logic [N-1:0] dout, model;
  int checks = 0, failures = 0, cycles = 0;

  updated_register #(.NUM_ELEM(N)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .load(load), .load_all(load_all),
    .sel(sel), .num_rules(nr), .data_out(dout));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    sel = '0; nr = 6'd61; model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      clear    = ($urandom % 40) == 0;
      load     = ($urandom % 2) == 0;
      load_all = ($urandom % 25) == 0;
      sel      = 6'($urandom % N);
      nr       = 6'(1 + $urandom % N);
      if (clear) model = '0;
      else if (load) begin
        if (load_all) for (int r = 0; r < N; r++) begin if (r < nr) model[r] = 1'b1; end
        else model[sel] = 1'b1;
      end
      @(posedge clk); #1;
      checks++;
      if (dout !== model) begin failures++; $display("FAIL i=%0d dout=%h exp=%h", i, dout, model); end
    end
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
