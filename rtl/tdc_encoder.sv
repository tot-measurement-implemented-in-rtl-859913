// tdc_encoder: the shared "encoder and processing unit" of a TOT TDC channel.
//
// It turns a thermometer code (000..0111..1, ones at the low end) into the
// binary count of its ones, which is the fine time in units of delay-line
// bins. As in the source design the encoder works by dichotomizing (binary)
// search for the 0-1 border: with the code zero-padded to a power of two
// P = 2^S, the result starts at 0 and for step b = S-1 down to 0 the bit at
// index result + 2^b - 1 is tested; if it is one, at least result + 2^b
// bits are set and 2^b is added. S probes replace a full population count,
// and the search is only right when the code really is a thermometer code,
// which the input rule of the source design (Hit high and low for at least
// one clock each) guarantees.
//
// Pipeline (the register stages are this design's choice, consistent with
// the latch and FIFO delays of the source design): the selected code enters
// the encoder only when a real edge was detected (`load`, the detect pulse),
// as in the source design, where a code is passed to the encoder only when
// a true Hit arrives; the search runs combinationally on the registered
// code; when `latch` (load delayed one clock) is high the result is stored
// in `fine`, which holds until the next latch. A code sampled at edge k,
// loaded in cycle k, is in `fine` after edge k+2.
`timescale 1ps/1ps
module tdc_encoder #(
  parameter int unsigned N_CODE = 2 * tdc_pkg::N_CARRY4_DEFAULT,
  parameter int unsigned FINE_W = $clog2(N_CODE + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_CODE-1:0] code,
  input  logic              load,
  input  logic              latch,
  output logic [FINE_W-1:0] fine
);

  localparam int unsigned STEPS = $clog2(N_CODE + 1);
  localparam int unsigned PAD   = 1 << STEPS;

  logic [N_CODE-1:0] code_q;
  logic [PAD-1:0]    padded;
  logic [STEPS:0]    result;

  assign padded = PAD'(code_q);

  always_comb begin
    result = '0;
    for (int b = STEPS - 1; b >= 0; b--) begin
      if (padded[result + (1 << b) - 1]) result = result + (STEPS+1)'(1 << b);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      code_q <= '0;
      fine   <= '0;
    end else begin
      if (load)  code_q <= code;
      if (latch) fine <= FINE_W'(result);
    end
  end

endmodule
