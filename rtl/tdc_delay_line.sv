// tdc_delay_line: the tapped delay line of one TOT TDC channel.
//
// The Hit input enters the carry chain at the CYINIT pin of the first CARRY4
// cell and ripples upward through N_CARRY4 cells (CO3 of one cell drives CI
// of the next). All MUXCY selects are tied to 1 so every cell acts as a pure
// delay. Two tap sets are taken from each cell, following the source design:
//   leading taps  : CO0 and CO3  -> lead_taps[2*k] = CO0, lead_taps[2*k+1] = CO3
//   trailing taps : O2           -> trail_taps[k]
// CO0 and CO3 split a cell into two roughly equal halves despite the slow
// first stage, so the leading line has two bins per cell. O2 is the only
// XOR output used, so the trailing line has one bin per cell.
//
// After a rising Hit edge the leading taps fill with ones from index 0
// upward; after a falling edge the trailing taps do the same. Both therefore
// present the same thermometer code (000..0111..1) to the sampling registers.
// This module is pure wiring of CARRY4 cells; on the FPGA it maps onto the
// vendor primitive, in simulation onto the carry4 model. (Synthesised with
// the model instead of the primitive, the delays are dropped and every tap
// becomes a plain copy of hit; the line only works with the real cells.)
`timescale 1ps/1ps
module tdc_delay_line #(
  parameter int unsigned N_CARRY4 = tdc_pkg::N_CARRY4_DEFAULT
) (
  input  logic                  hit,
  output logic [2*N_CARRY4-1:0] lead_taps,
  output logic [N_CARRY4-1:0]   trail_taps
);

  wire [N_CARRY4:0] carry;   // carry[k] enters cell k, carry[k+1] leaves it

  assign carry[0] = 1'b0;

  for (genvar k = 0; k < N_CARRY4; k++) begin : g_cell
    wire [3:0] co;
    wire [3:0] o;

    carry4 u_carry4 (
      .CI     (carry[k]),
      .CYINIT (k == 0 ? hit : 1'b0),
      .DI     (4'b0000),
      .S      (4'b1111),
      .CO     (co),
      .O      (o)
    );

    assign carry[k+1]       = co[3];
    assign lead_taps[2*k]   = co[0];
    assign lead_taps[2*k+1] = co[3];
    assign trail_taps[k]    = o[2];
  end

endmodule
