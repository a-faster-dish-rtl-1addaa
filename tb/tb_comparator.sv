// tb_comparator: random and directed vectors against the equality operator.
// Equal pairs are generated on purpose half of the time, and single-bit
// differences at every position are checked.
module tb_comparator;
  localparam int W = 61;
  logic [W-1:0] a, b;
  logic         eq;
  int checks = 0, failures = 0;

  comparator #(.WIDTH(W)) dut (.in1(a), .in2(b), .equal(eq));

  task automatic check_one(logic expected);
    #1;
    checks++;
    if (eq !== expected) begin
      failures++;
      $display("FAIL a=%h b=%h eq=%0b exp=%0b", a, b, eq, expected);
    end
  endtask

  initial begin
    for (int i = 0; i < 200; i++) begin
      a = W'({$urandom, $urandom});
      b = (i % 2 != 0) ? a : W'({$urandom, $urandom});
      check_one((i % 2 != 0) ? 1'b1 : (a == b));
    end
    for (int k = 0; k < W; k++) begin
      a = W'({$urandom, $urandom});
      b = a ^ (W'(1) << k);
      check_one(1'b0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
