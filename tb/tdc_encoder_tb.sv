// tdc_encoder_tb: applies thermometer codes of every length 0..104 (and
// random repeats) to the encoder at its default width with a load pulse,
// pulses latch one clock later as the channel does (changing the code
// without load in between), and checks the latched fine value two
// clocks after the code was applied; it also checks that the value holds
// while latch stays low.
`timescale 1ps/1ps
module tdc_encoder_tb;
  localparam int N = 104;
  localparam int FW = $clog2(N + 1);
  int checks = 0, failures = 0;

  logic clk = 1'b0, rst = 1'b1, load = 1'b0, latch = 1'b0;
  logic [N-1:0] code = '0;
  logic [FW-1:0] fine;

  tdc_encoder #(.N_CODE(N)) dut (.clk, .rst, .code, .load, .latch, .fine);

  always #2000 clk = ~clk;

  task automatic run(input int len);
    @(posedge clk); #10;
    code = (len == 0) ? '0 : N'({128'(0), {N{1'b1}}} >> (N - len));
    load = 1'b1;
    @(posedge clk); #10;
    code = '1;                         // codes without load must not matter
    load = 1'b0;
    latch = 1'b1;
    @(posedge clk); #10;
    latch = 1'b0;
    code = N'(1);
    checks++;
    if (fine !== FW'(len)) begin
      failures++;
      $display("FAIL length %0d: fine=%0d", len, fine);
    end
    repeat (2) @(posedge clk);
    #10;
    checks++;
    if (fine !== FW'(len)) begin failures++; $display("FAIL hold %0d", len); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst = 1'b0;
    for (int len = 0; len <= N; len++) run(len);
    for (int n = 0; n < 100; n++) run($urandom_range(0, N));
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
