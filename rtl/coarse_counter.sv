// coarse_counter: coarse time of a TOT TDC channel.
//
// A plain binary counter advances once per system clock and wraps at
// 2^COARSE_W. When `latch` is high the current count is stored in `coarse`,
// which holds until the next latch. The count stored for an edge sampled at
// clock edge k is the count reached after edge k+1 (the latch arrives one
// clock after the detect pulse), a fixed offset that cancels in every time
// difference, the pulse width included. Counter width and synchronous reset
// to zero are this design's choices.
`timescale 1ps/1ps
module coarse_counter #(
  parameter int unsigned COARSE_W = tdc_pkg::COARSE_W_DEFAULT
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                latch,
  output logic [COARSE_W-1:0] count,
  output logic [COARSE_W-1:0] coarse
);

  always_ff @(posedge clk) begin
    if (rst) begin
      count  <= '0;
      coarse <= '0;
    end else begin
      count <= count + 1'b1;
      if (latch) coarse <= count;
    end
  end

endmodule
