// tdc_tap_register_tb: drives random tap words and checks that each appears
// on the outputs exactly one clock later, and that reset clears them.
`timescale 1ps/1ps
module tdc_tap_register_tb;
  localparam int NL = 104, NT = 52;
  int checks = 0, failures = 0;

  logic clk = 1'b0;
  logic [NL-1:0] lt, lc, lt_prev;
  logic [NT-1:0] tt, tc, tt_prev;

  tdc_tap_register #(.N_LEAD(NL), .N_TRAIL(NT)) dut (
    .clk, .lead_taps(lt), .trail_taps(tt), .lead_code(lc), .trail_code(tc));

  always #2000 clk = ~clk;

  function automatic logic [NL-1:0] rnd_l();
    logic [NL-1:0] v;
    for (int i = 0; i < NL; i++) v[i] = $urandom_range(0, 1) == 1;
    return v;
  endfunction

  initial begin
    lt = '1; tt = '1;
    repeat (2) @(posedge clk);
    for (int n = 0; n < 200; n++) begin
      lt = rnd_l();
      tt = NT'({$urandom, $urandom});
      lt_prev = lt; tt_prev = tt;
      @(posedge clk); #1;
      lt = rnd_l(); tt = NT'({$urandom, $urandom});   // changes after the edge must not show
      #100;
      checks++;
      if (lc !== lt_prev || tc !== tt_prev) begin
        failures++; $display("FAIL sample %0d", n);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
