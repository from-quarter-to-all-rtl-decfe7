// tb_speq_sram -- random writes and reads against a shadow array; read data
// must appear exactly one cycle after the read request and hold afterwards.
//
// WIDTH and DEPTH are reduced; the one-cycle read latency and old-data
// on collision are this design's choices.
// Structure: no ports; the clock (where there is one) runs with a 10 ns
// period, inputs change on the falling edge and outputs are sampled there.
// A watchdog ends a run that hangs with one failure.  Result line:
// TB_RESULT checks=<n> failures=<n>, then $finish.
module tb_speq_sram;
  localparam int W = 40, D = 64;
  logic clk = 0, we, re;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata, shadow [D], exp_q;
  int checks = 0, failures = 0, cyc = 0;

  speq_sram #(.WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    wait (cyc == 5000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    for (int i = 0; i < D; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = {8'(i), 32'($urandom)}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 300; n++) begin
      @(negedge clk);
      re = 1; raddr = 6'($urandom);
      we = 1'($urandom); waddr = 6'($urandom); wdata = {8'($urandom), 32'($urandom)};
      exp_q = shadow[raddr];                 // old data on a same-address write
      @(posedge clk); #1;
      if (we) shadow[waddr] = wdata;
      checks++;
      if (rdata !== exp_q) begin failures++; $display("read %0d: %h want %h", raddr, rdata, exp_q); end
      we = 0; re = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp_q) begin failures++; $display("hold failed"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
