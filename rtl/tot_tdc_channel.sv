// tot_tdc_channel: one TDC input channel that measures both the leading and
// the trailing edge of its Hit pulse, so that one channel yields the arrival
// time and the time over threshold (pulse width).
//
// Data path (as in the source design):
//   Hit -> CARRY4 delay line -> L taps (CO0, CO3) and T taps (O2)
//       -> sampling registers (every clock)
//       -> LD / TD edge detectors on the first L and first T register
//       -> 2:1 code multiplexer -> shared thermometer encoder
//       -> {edge flag, coarse count, fine code} record -> dual-clock FIFO
// An edge sampled at clock edge k gives a one-cycle detect pulse in cycle k,
// the encoder result and coarse count are latched at edge k+2 and the record
// is written into the FIFO at edge k+3. A new edge can be taken every clock
// by this pipeline; the measurement dead time of two clocks comes from the
// input rule that Hit must stay high and low for at least one clock each.
//
// Record layout (MSB first): edge flag (0 leading, 1 trailing), COARSE_W
// bits of coarse count, FINE_W bits of fine code. The time of an edge, up to
// a constant, is coarse * T_clk - fine * bin, with the bin about half a
// CARRY4 delay for leading and one CARRY4 delay for trailing records. The
// pulse width is the trailing time minus the leading time; the channel
// stores both records and leaves that subtraction to the reader of the FIFO,
// as the source design does.
`timescale 1ps/1ps
module tot_tdc_channel #(
  parameter int unsigned N_CARRY4 = tdc_pkg::N_CARRY4_DEFAULT,
  parameter int unsigned COARSE_W = tdc_pkg::COARSE_W_DEFAULT,
  parameter int unsigned FIFO_AW  = 9,
  localparam int unsigned N_LEAD  = 2 * N_CARRY4,
  localparam int unsigned FINE_W  = $clog2(N_LEAD + 1),
  localparam int unsigned WORD_W  = 1 + COARSE_W + FINE_W
) (
  input  logic              clk,       // TDC system clock (FIFO write clock)
  input  logic              rst,       // synchronous to clk
  input  logic              hit,       // discriminator output

  input  logic              rd_clk,
  input  logic              rd_rst,    // synchronous to rd_clk
  input  logic              rd_en,
  output logic [WORD_W-1:0] rd_data,
  output logic              empty,
  output logic              full,
  output logic              overflow
);

  logic [N_LEAD-1:0]   lead_taps, lead_code, code_sel;
  logic [N_CARRY4-1:0] trail_taps, trail_code;
  logic                ld, td, detect, latch, wr_en;
  tdc_pkg::edge_e      edge_type;
  logic [FINE_W-1:0]   fine;
  logic [COARSE_W-1:0] count, coarse;

  tdc_delay_line #(.N_CARRY4(N_CARRY4)) u_line (
    .hit        (hit),
    .lead_taps  (lead_taps),
    .trail_taps (trail_taps)
  );

  tdc_tap_register #(.N_LEAD(N_LEAD), .N_TRAIL(N_CARRY4)) u_taps (
    .clk,
    .lead_taps, .trail_taps,
    .lead_code, .trail_code
  );

  hit_detect u_ld (.clk, .rst, .in(lead_code[0]),  .out(ld));
  hit_detect u_td (.clk, .rst, .in(trail_code[0]), .out(td));

  tdc_edge_control #(.N_LEAD(N_LEAD), .N_TRAIL(N_CARRY4)) u_ctrl (
    .clk, .rst, .ld, .td,
    .lead_code, .trail_code,
    .code_out (code_sel),
    .detect, .latch, .wr_en, .edge_type
  );

  tdc_encoder #(.N_CODE(N_LEAD), .FINE_W(FINE_W)) u_enc (
    .clk, .rst,
    .code  (code_sel),
    .load  (detect),
    .latch,
    .fine
  );

  coarse_counter #(.COARSE_W(COARSE_W)) u_coarse (
    .clk, .rst, .latch, .count, .coarse
  );

  async_fifo #(.DATA_W(WORD_W), .ADDR_W(FIFO_AW)) u_fifo (
    .wr_clk   (clk),
    .wr_rst   (rst),
    .wr_en    (wr_en),
    .wr_data  ({edge_type, coarse, fine}),
    .full, .overflow,
    .rd_clk, .rd_rst, .rd_en, .rd_data, .empty
  );

endmodule
