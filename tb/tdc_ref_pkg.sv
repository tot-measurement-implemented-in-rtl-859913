// tdc_ref_pkg: reference timing used by the testbenches to predict what the
// delay line, and so the whole channel, must report.
//
// The constants restate the default delays of the CARRY4 model (30, 16, 16,
// 16 ps per carry stage, 10 ps per XOR) as plain numbers, so the predictions
// do not depend on the model's code. For cell k:
//   leading tap 2k   (CO0) switches  30 + 78k ps after the Hit edge
//   leading tap 2k+1 (CO3) switches  78 + 78k ps after the Hit edge
//   trailing tap k   (O2)  switches  56 + 78k ps after the Hit edge
// Testbenches place Hit edges on odd picoseconds and clock edges on even
// ones, and all delays are even, so no tap ever switches exactly on a clock
// edge and every prediction is exact.
`timescale 1ps/1ps
package tdc_ref_pkg;

  localparam longint CELL_PS  = 78;
  localparam longint CO0_PS   = 30;
  localparam longint CO3_PS   = 78;
  localparam longint O2_PS    = 56;

  // Delay from Hit edge to leading tap j.
  function automatic longint lead_delay(input int j);
    return (j / 2) * CELL_PS + ((j % 2) ? CO3_PS : CO0_PS);
  endfunction

  // Delay from Hit edge to trailing tap k.
  function automatic longint trail_delay(input int k);
    return k * CELL_PS + O2_PS;
  endfunction

  // Number of leading taps that have switched dt ps after the edge.
  function automatic int lead_count(input longint dt, input int n_lead);
    int n = 0;
    for (int j = 0; j < n_lead; j++) if (lead_delay(j) < dt) n++;
    return n;
  endfunction

  // Number of trailing taps that have switched dt ps after the edge.
  function automatic int trail_count(input longint dt, input int n_trail);
    int n = 0;
    for (int k = 0; k < n_trail; k++) if (trail_delay(k) < dt) n++;
    return n;
  endfunction

endpackage
