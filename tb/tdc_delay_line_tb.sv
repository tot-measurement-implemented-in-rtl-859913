// tdc_delay_line_tb: checks the tap wiring of the delay line (8 cells). A
// rising and then a falling Hit edge are applied, and at many instants (odd picoseconds after the edge, so never on a tap delay)
// afterwards the leading and trailing tap words must be thermometer codes
// whose length matches the reference delays of tdc_ref_pkg.
`timescale 1ps/1ps
module tdc_delay_line_tb;
  import tdc_ref_pkg::*;

  localparam int N = 8;
  int checks = 0, failures = 0;

  logic           hit = 1'b0;
  logic [2*N-1:0] lead;
  logic [N-1:0]   trail;

  tdc_delay_line #(.N_CARRY4(N)) dut (.hit(hit), .lead_taps(lead), .trail_taps(trail));

  function automatic logic [2*N-1:0] therm_l(input int n);
    return (2*N)'((64'(1) << n) - 1);
  endfunction
  function automatic logic [N-1:0] therm_t(input int n);
    return N'((64'(1) << n) - 1);
  endfunction

  initial begin
    longint t_edge;
    #2001;
    // rising edge at an odd time; sample on even offsets
    t_edge = $time;
    hit = 1'b1;
    #1;
    for (int dt = 2; dt <= 2*N*40; dt += 14) begin
      #14;
      checks++;
      if (lead !== therm_l(lead_count($time - t_edge, 2*N))) begin
        failures++;
        $display("FAIL rising dt=%0d lead=%b", $time - t_edge, lead);
      end
      checks++;
      // trailing taps idle at 1 and clear from the bottom on a rising edge
      if (trail !== ~therm_t(trail_count($time - t_edge, N))) begin
        failures++;
        $display("FAIL rising dt=%0d trail=%b", $time - t_edge, trail);
      end
    end
    #3000;
    t_edge = $time;
    hit = 1'b0;
    #1;
    for (int dt = 2; dt <= N*80; dt += 14) begin
      #14;
      checks++;
      if (trail !== therm_t(trail_count($time - t_edge, N))) begin
        failures++;
        $display("FAIL falling dt=%0d trail=%b", $time - t_edge, trail);
      end
      checks++;
      // leading taps clear from the bottom: complement of a thermometer code
      if (lead !== ~therm_l(lead_count($time - t_edge, 2*N))) begin
        failures++;
        $display("FAIL falling dt=%0d lead=%b", $time - t_edge, lead);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
