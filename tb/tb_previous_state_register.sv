// tb_previous_state_register: random load/hold sequence against a shadow copy.
module tb_previous_state_register;
  localparam int N = 61;
  logic clk = 0, rst_n = 0, load = 0;
  logic [N-1:0] din, dout, model;
  int checks = 0, failures = 0, cycles = 0;

  previous_state_register #(.NUM_ELEM(N)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .data_in(din), .data_out(dout));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    din = '0; model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (dout !== '0) begin failures++; $display("FAIL reset"); end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      load = ($urandom % 3) == 0;
      din  = N'({$urandom, $urandom});
      if (load) model = din;
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
