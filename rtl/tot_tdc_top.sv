// tot_tdc_top: the TOT TDC as built on the evaluation board, N_CH
// independent channels (two by default) clocked by one 250 MHz system clock.
//
// Every channel has its own delay line, encoder, coarse counter and FIFO;
// the channels share only the clocks and resets. Each channel delivers
// leading- and trailing-edge records through its own FIFO read port, so the
// arrival time and pulse width of every hit are available from a single
// input per signal. Port arrays are indexed by channel.
`timescale 1ps/1ps
module tot_tdc_top #(
  parameter int unsigned N_CH     = 2,
  parameter int unsigned N_CARRY4 = tdc_pkg::N_CARRY4_DEFAULT,
  parameter int unsigned COARSE_W = tdc_pkg::COARSE_W_DEFAULT,
  parameter int unsigned FIFO_AW  = 9,
  localparam int unsigned FINE_W  = $clog2(2 * N_CARRY4 + 1),
  localparam int unsigned WORD_W  = 1 + COARSE_W + FINE_W
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [N_CH-1:0]   hit,

  input  logic              rd_clk,
  input  logic              rd_rst,
  input  logic [N_CH-1:0]   rd_en,
  output logic [WORD_W-1:0] rd_data [N_CH],
  output logic [N_CH-1:0]   empty,
  output logic [N_CH-1:0]   full,
  output logic [N_CH-1:0]   overflow
);

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tot_tdc_channel #(
      .N_CARRY4 (N_CARRY4),
      .COARSE_W (COARSE_W),
      .FIFO_AW  (FIFO_AW)
    ) u_ch (
      .clk, .rst,
      .hit      (hit[c]),
      .rd_clk, .rd_rst,
      .rd_en    (rd_en[c]),
      .rd_data  (rd_data[c]),
      .empty    (empty[c]),
      .full     (full[c]),
      .overflow (overflow[c])
    );
  end

endmodule
