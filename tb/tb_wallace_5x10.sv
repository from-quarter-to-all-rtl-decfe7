// tb_wallace_5x10 -- multiply mode against a * b, add mode against x + y.
//
// Exhaustive over a in 0..31 with random b (multiply) and over all x, y
// (add).  Combinational block: checked after a 1 ns settle.  The add mode
// follows the paper's reuse of the tree's final adder.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_wallace_5x10;
  logic        add_mode;
  logic [4:0]  a, x;
  logic [9:0]  b;
  logic [3:0]  y;
  logic [14:0] prod;
  int checks = 0, failures = 0;

  wallace_5x10 dut (.add_mode, .a, .b, .x, .y, .prod);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 32; i++) begin
      for (int j = 0; j < 40; j++) begin
        add_mode = 1'b0; a = 5'(i); b = (j == 0) ? 10'h3FF : 10'($urandom);
        x = 5'($urandom); y = 4'($urandom); #1;
        checks++;
        if (int'(prod) != i * int'(b)) begin
          failures++; $display("%0d * %0d = %0d", a, b, prod);
        end
      end
    end
    for (int i = 0; i < 32; i++) begin
      for (int j = 0; j < 16; j++) begin
        add_mode = 1'b1; x = 5'(i); y = 4'(j); a = 5'($urandom); b = 10'($urandom); #1;
        checks++;
        if (int'(prod) != i + j) begin
          failures++; $display("%0d + %0d = %0d", x, y, prod);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
