// async_fifo: dual-clock FIFO that buffers the edge records of a channel.
//
// The source design writes leading and trailing records into one FIFO
// through Wr_EN / Wr_CLK and reads them with Rd_EN / Rd_CLK / Rd_Data; it
// gives no more detail. This implementation is a standard asynchronous FIFO
// of this design's own making: a 2^ADDR_W-word memory, binary read and write
// pointers one bit wider than the address, and their Gray-coded copies
// carried into the other clock domain through two flip-flops each. `full`
// and `empty` are computed from the local pointer and the synchronised
// remote one, so both are conservative (they may stay set for two clocks
// of the other domain after the condition has cleared).
// Write: wr_data is stored at the rising wr_clk edge when wr_en is high and
// the FIFO is not full; a write while full is dropped and sets the sticky
// `overflow` flag (cleared by wr_rst). Read: when rd_en is high and the
// FIFO is not empty, the oldest word appears on rd_data after the rising
// rd_clk edge and stays there until the next read.
// The default depth of 512 words is this design's choice.
`timescale 1ps/1ps
module async_fifo #(
  parameter int unsigned DATA_W = tdc_pkg::WORD_W,
  parameter int unsigned ADDR_W = 9
) (
  input  logic              wr_clk,
  input  logic              wr_rst,
  input  logic              wr_en,
  input  logic [DATA_W-1:0] wr_data,
  output logic              full,
  output logic              overflow,

  input  logic              rd_clk,
  input  logic              rd_rst,
  input  logic              rd_en,
  output logic [DATA_W-1:0] rd_data,
  output logic              empty
);

  localparam int unsigned DEPTH = 1 << ADDR_W;

  logic [DATA_W-1:0] mem [DEPTH];

  logic [ADDR_W:0] wr_bin, wr_gray, rd_bin, rd_gray;
  logic [ADDR_W:0] wr_gray_s1, wr_gray_s2;   // write pointer in rd_clk domain
  logic [ADDR_W:0] rd_gray_s1, rd_gray_s2;   // read pointer in wr_clk domain

  function automatic logic [ADDR_W:0] bin2gray(input logic [ADDR_W:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic do_write;
  assign do_write = wr_en && !full;

  // Full when the write pointer has lapped the read pointer: in Gray code
  // the two top bits differ and the rest are equal.
  assign full = (wr_gray == {~rd_gray_s2[ADDR_W:ADDR_W-1], rd_gray_s2[ADDR_W-2:0]});

  always_ff @(posedge wr_clk) begin
    if (do_write) mem[wr_bin[ADDR_W-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk) begin
    if (wr_rst) begin
      wr_bin     <= '0;
      wr_gray    <= '0;
      rd_gray_s1 <= '0;
      rd_gray_s2 <= '0;
      overflow   <= 1'b0;
    end else begin
      rd_gray_s1 <= rd_gray;
      rd_gray_s2 <= rd_gray_s1;
      if (do_write) begin
        wr_bin  <= wr_bin + 1'b1;
        wr_gray <= bin2gray(wr_bin + 1'b1);
      end
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  // ---------------- read side ----------------
  logic do_read;
  assign empty   = (rd_gray == wr_gray_s2);
  assign do_read = rd_en && !empty;

  always_ff @(posedge rd_clk) begin
    if (rd_rst) begin
      rd_bin     <= '0;
      rd_gray    <= '0;
      wr_gray_s1 <= '0;
      wr_gray_s2 <= '0;
      rd_data    <= '0;
    end else begin
      wr_gray_s1 <= wr_gray;
      wr_gray_s2 <= wr_gray_s1;
      if (do_read) begin
        rd_data <= mem[rd_bin[ADDR_W-1:0]];
        rd_bin  <= rd_bin + 1'b1;
        rd_gray <= bin2gray(rd_bin + 1'b1);
      end
    end
  end

endmodule
