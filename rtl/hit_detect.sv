// hit_detect: edge detect unit (used twice per channel, as LD for the leading
// edge and TD for the trailing edge).
//
// Following the source circuit it is a NOT gate, a D flip-flop and an AND
// gate: N1 = ~in, Q1 = N1 delayed one clock, out = in & Q1. The output is
// therefore high for exactly one clock period, the period in which `in` is
// high and was low one clock earlier. Its input is the sampled first tap of
// a delay line, which is already synchronous to clk, so `out` is a clean
// one-cycle pulse.
// The synchronous reset clearing Q1 is this design's own addition; it keeps
// a spurious pulse from appearing in the first cycle after reset.
`timescale 1ps/1ps
module hit_detect (
  input  logic clk,
  input  logic rst,
  input  logic in,
  output logic out
);

  logic n1;
  logic q1;

  assign n1 = ~in;

  always_ff @(posedge clk) begin
    if (rst) q1 <= 1'b0;
    else     q1 <= n1;
  end

  assign out = in & q1;

endmodule
