// tdc_tap_register: the sampling flip-flops behind the delay line.
//
// On every rising clock edge the state of all leading taps (the "L"
// flip-flops) and all trailing taps (the "T" flip-flops) is stored. The
// stored words are the raw thermometer codes of the fine time: the number of
// ones counts how far an edge has travelled into the line since it arrived.
// The registers sample continuously, as in the source design; nothing gates
// or resets them. (They must not be reset: the idle trailing taps read 1,
// and a reset to 0 would look like a falling Hit edge when it is released.
// A few clocks of reset of the rest of the channel are enough for these
// registers to hold the real tap state.)
// Latency: one clock from tap to output.
`timescale 1ps/1ps
module tdc_tap_register #(
  parameter int unsigned N_LEAD  = 2 * tdc_pkg::N_CARRY4_DEFAULT,
  parameter int unsigned N_TRAIL = tdc_pkg::N_CARRY4_DEFAULT
) (
  input  logic               clk,
  input  logic [N_LEAD-1:0]  lead_taps,
  input  logic [N_TRAIL-1:0] trail_taps,
  output logic [N_LEAD-1:0]  lead_code,
  output logic [N_TRAIL-1:0] trail_code
);

  always_ff @(posedge clk) begin
    lead_code  <= lead_taps;
    trail_code <= trail_taps;
  end

endmodule
