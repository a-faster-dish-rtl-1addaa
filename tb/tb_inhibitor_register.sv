// tb_inhibitor_register: writes random masks into random entries of the
// four-entry bank and checks the selected entry on the output, including
// that reset leaves every entry clear.
module tb_inhibitor_register;
  localparam int N = 61;
  logic clk = 0, rst_n = 0, load = 0;
  logic [1:0] sel;
  logic [N-1:0] din, dout;
  logic [N-1:0] model [4];
  int checks = 0, failures = 0, cycles = 0;

  inhibitor_register #(.NUM_ELEM(N), .NUM_INHIB(4)) dut (
    .clk(clk), .rst_n(rst_n), .sel(sel), .load(load), .data_in(din), .data_out(dout));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    din = '0; sel = '0;
    for (int k = 0; k < 4; k++) model[k] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 4; k++) begin
      sel = 2'(k); #1; checks++;
      if (dout !== '0) begin failures++; $display("FAIL reset entry %0d", k); end
    end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      sel  = 2'($urandom % 4);
      load = ($urandom % 3) == 0;
      din  = N'({$urandom, $urandom});
      if (load) model[sel] = din;
      @(posedge clk); #1;
      sel = 2'($urandom % 4); #1;
      checks++;
      if (dout !== model[sel]) begin failures++; $display("FAIL i=%0d sel=%0d dout=%h exp=%h", i, sel, dout, model[sel]); end
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
