// tdc_edge_control: the edge-select and timing path of one TOT TDC channel.
//
// Leading and trailing edges share one encoder. The one-cycle pulses of the
// leading detect (LD) and trailing detect (TD) units decide when and which
// code is passed on:
//   * a 2:1 multiplexer passes the leading code when LD is high and the
//     trailing code when TD is high. The trailing code is half as wide and is
//     zero-extended at the top, which keeps it a valid thermometer code;
//   * a second 2:1 multiplexer, steered by the same detect signals, passes
//     the active detect pulse itself. One flip-flop delays it by one clock
//     into `latch` (which latches the encoder result and the coarse count),
//     and a second flip-flop by two clocks into `wr_en` (the FIFO write).
// The edge type travels with the pulse so that the record written to the
// FIFO carries the right flag (`edge_type`, valid while wr_en is high).
//
// Timing, with the codes sampled at clock edge k (cycle k follows edge k):
//   cycle k   : ld or td high, code_out and `detect` valid
//   cycle k+1 : latch high (encoder result and coarse count latched at k+2)
//   cycle k+2 : wr_en high (FIFO written at k+3)
// When LD and TD fire together (impossible when Hit stays high and low for at
// least one clock each, the source design's input rule) the leading edge wins
// and the trailing one is lost; that priority is this design's choice.
`timescale 1ps/1ps
module tdc_edge_control #(
  parameter int unsigned N_LEAD  = 2 * tdc_pkg::N_CARRY4_DEFAULT,
  parameter int unsigned N_TRAIL = tdc_pkg::N_CARRY4_DEFAULT
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               ld,           // leading edge detect pulse
  input  logic               td,           // trailing edge detect pulse
  input  logic [N_LEAD-1:0]  lead_code,
  input  logic [N_TRAIL-1:0] trail_code,
  output logic [N_LEAD-1:0]  code_out,     // code for the shared encoder
  output logic               detect,       // selected detect pulse (cycle k)
  output logic               latch,        // detect delayed one clock
  output logic               wr_en,        // detect delayed two clocks
  output tdc_pkg::edge_e     edge_type     // edge type, aligned with wr_en
);

  import tdc_pkg::*;

  edge_e sel_edge;
  edge_e edge_d1;

  // Code multiplexer and detect multiplexer.
  always_comb begin
    if (ld) begin
      code_out = lead_code;
      detect   = ld;
      sel_edge = EDGE_LEADING;
    end else begin
      code_out = N_LEAD'(trail_code);
      detect   = td;
      sel_edge = EDGE_TRAILING;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      latch     <= 1'b0;
      wr_en     <= 1'b0;
      edge_d1   <= EDGE_LEADING;
      edge_type <= EDGE_LEADING;
    end else begin
      latch   <= detect;
      wr_en   <= latch;
      edge_d1 <= sel_edge;
      if (latch) edge_type <= edge_d1;
    end
  end

  // The source design requires Hit to stay high and low for at least one
  // clock each, so the two detect units never fire in the same cycle.
  a_one_edge_per_cycle: assert property (@(posedge clk) disable iff (rst) !(ld && td))
    else $warning("leading and trailing edge detected in the same cycle");

endmodule
