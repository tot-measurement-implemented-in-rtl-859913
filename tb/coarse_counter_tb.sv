// coarse_counter_tb: counts clock edges itself and checks the free-running
// count every cycle and the latched coarse value after random latch pulses,
// including the wrap of a narrow (8-bit) counter.
`timescale 1ps/1ps
module coarse_counter_tb;
  localparam int W = 8;
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst = 1'b1, latch = 1'b0;
  logic [W-1:0] count, coarse;
  int unsigned edges = 0;
  logic [W-1:0] exp_coarse = '0;

  coarse_counter #(.COARSE_W(W)) dut (.clk, .rst, .latch, .count, .coarse);

  always #2000 clk = ~clk;

  initial begin
    repeat (2) @(posedge clk);
    #10 rst = 1'b0;
    for (int n = 0; n < 1000; n++) begin
      @(posedge clk);
      if (latch) exp_coarse = W'(edges);   // value held before this edge
      edges++;
      #10;
      latch = $urandom_range(0, 4) == 0;
      checks++;
      if (count !== W'(edges)) begin failures++; $display("FAIL count %0d", n); end
      checks++;
      if (coarse !== exp_coarse) begin failures++; $display("FAIL coarse %0d", n); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
