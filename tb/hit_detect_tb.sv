// hit_detect_tb: feeds a random bit stream (registered, as the sampled first
// tap would be) and checks that the output is high in exactly the cycles in
// which the input is 1 and was 0 one clock earlier.
`timescale 1ps/1ps
module hit_detect_tb;
  int checks = 0, failures = 0, pulses = 0;

  logic clk = 1'b0, rst = 1'b1, in = 1'b0, out;
  logic prev_in;

  hit_detect dut (.clk, .rst, .in, .out);

  always #2000 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    prev_in = 1'b1;             // no pulse may appear in the first cycle
    in <= 1'b1;
    for (int n = 0; n < 1000; n++) begin
      @(posedge clk);
      prev_in = in;
      in <= ($urandom_range(0, 2) != 0) ? ~in : in;
      #1000;
      checks++;
      if (out !== (in & ~prev_in)) begin
        failures++;
        $display("FAIL cycle %0d in=%b prev=%b out=%b", n, in, prev_in, out);
      end
      if (out) pulses++;
    end
    checks++;
    if (pulses < 100) begin failures++; $display("FAIL too few pulses %0d", pulses); end
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
