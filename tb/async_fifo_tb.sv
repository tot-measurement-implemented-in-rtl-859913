// async_fifo_tb: writes random words at 250 MHz and reads them at an
// unrelated ~83 MHz clock, with random enables, and checks order and
// content against a queue. It then fills the FIFO with the reader stopped,
// checks that `full` rises after exactly 2^ADDR_W words, that a further
// write is dropped and sets `overflow`, and drains it completely.
`timescale 1ps/1ps
module async_fifo_tb;
  localparam int W = 32, AW = 4, DEPTH = 1 << AW;
  int checks = 0, failures = 0;

  logic wclk = 1'b0, rclk = 1'b0, wrst = 1'b1, rrst = 1'b1;
  logic wen = 1'b0, ren = 1'b0;
  logic [W-1:0] wdata = '0, rdata;
  logic full, empty, overflow;
  logic [W-1:0] model [$];
  int written = 0, readn = 0;
  bit   stop_reader = 0;

  async_fifo #(.DATA_W(W), .ADDR_W(AW)) dut (
    .wr_clk(wclk), .wr_rst(wrst), .wr_en(wen), .wr_data(wdata), .full, .overflow,
    .rd_clk(rclk), .rd_rst(rrst), .rd_en(ren), .rd_data(rdata), .empty);

  always #2000 wclk = ~wclk;
  always #6007 rclk = ~rclk;

  // reader: read when not empty, compare the word after the edge
  initial begin
    logic [W-1:0] exp;
    repeat (3) @(posedge rclk);
    rrst <= 1'b0;
    forever begin
      @(posedge rclk);
      if (ren && !empty) begin
        #1;
        exp = model.pop_front();
        readn++;
        checks++;
        if (rdata !== exp) begin failures++; $display("FAIL read %0d: %h vs %h", readn, rdata, exp); end
      end else #1;
      ren <= !stop_reader && ($urandom_range(0, 3) != 0);
    end
  end

  initial begin
    repeat (3) @(posedge wclk);
    wrst <= 1'b0;
    repeat (3) @(posedge wclk);
    for (int n = 0; n < 3000; n++) begin
      @(posedge wclk);
      if (wen && !full) begin model.push_back(wdata); written++; end
      #1;
      wen   = !full && ($urandom_range(0, 2) == 0);
      wdata = $urandom;
    end
    @(posedge wclk); #1 wen = 1'b0;
    // drain and stop the reader
    wait (model.size() == 0);
    stop_reader = 1;
    repeat (10) @(posedge rclk);
    checks++;
    if (!empty || full || overflow) begin failures++; $display("FAIL drain flags"); end
    // fill
    for (int n = 0; n < DEPTH; n++) begin
      @(posedge wclk); #1;
      checks++;
      if (full) begin failures++; $display("FAIL early full at %0d", n); end
      wen = 1'b1; wdata = $urandom; model.push_back(wdata);
      @(posedge wclk); #1 wen = 1'b0;
    end
    @(posedge wclk); #1;
    checks++;
    if (!full) begin failures++; $display("FAIL not full"); end
    wen = 1'b1; wdata = 32'hdead_beef;
    @(posedge wclk); #1 wen = 1'b0;
    checks++;
    if (!overflow) begin failures++; $display("FAIL no overflow"); end
    stop_reader = 0;
    wait (model.size() == 0);
    repeat (10) @(posedge rclk);
    checks++;
    if (!empty) begin failures++; $display("FAIL not empty at end"); end
    checks++;
    if (readn < 500) begin failures++; $display("FAIL too few reads %0d", readn); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
