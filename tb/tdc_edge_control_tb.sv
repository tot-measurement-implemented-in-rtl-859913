// tdc_edge_control_tb: drives random leading/trailing detect pulses (never
// both in one cycle) with random codes and checks the selected code, that
// latch follows the detect pulse by one clock and wr_en by two, and that the
// edge type shown with wr_en is that of the pulse two clocks earlier.
`timescale 1ps/1ps
module tdc_edge_control_tb;
  import tdc_pkg::*;
  localparam int NL = 104, NT = 52;
  int checks = 0, failures = 0, n_lead = 0, n_trail = 0;

  logic clk = 1'b0, rst = 1'b1, ld = 1'b0, td = 1'b0;
  logic [NL-1:0] lc = '0, code;
  logic [NT-1:0] tc = '0;
  logic detect, latch, wr_en;
  edge_e edge_type;

  // expected pipeline, independent of the DUT
  logic  det_h [3];
  edge_e typ_h [3];

  tdc_edge_control #(.N_LEAD(NL), .N_TRAIL(NT)) dut (
    .clk, .rst, .ld, .td, .lead_code(lc), .trail_code(tc),
    .code_out(code), .detect, .latch, .wr_en, .edge_type);

  always #2000 clk = ~clk;

  initial begin
    det_h = '{default: 1'b0};
    typ_h = '{default: EDGE_LEADING};
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 2000; n++) begin
      @(posedge clk);
      #10;
      // cycle n: new stimulus
      case ($urandom_range(0, 3))
        0: begin ld = 1'b1; td = 1'b0; end
        1: begin ld = 1'b0; td = 1'b1; end
        default: begin ld = 1'b0; td = 1'b0; end
      endcase
      for (int i = 0; i < NL; i++) lc[i] = $urandom_range(0, 1) == 1;
      for (int i = 0; i < NT; i++) tc[i] = $urandom_range(0, 1) == 1;
      det_h[2] = det_h[1]; det_h[1] = det_h[0]; det_h[0] = ld | td;
      typ_h[2] = typ_h[1]; typ_h[1] = typ_h[0];
      typ_h[0] = td ? EDGE_TRAILING : EDGE_LEADING;
      #100;
      checks++;
      if (ld && code !== lc) begin failures++; $display("FAIL leading code %0d", n); end
      else if (!ld && code !== {{(NL-NT){1'b0}}, tc}) begin
        failures++; $display("FAIL trailing code %0d", n);
      end
      checks++;
      if (detect !== det_h[0]) begin failures++; $display("FAIL detect %0d", n); end
      checks++;
      if (latch !== det_h[1]) begin failures++; $display("FAIL latch %0d", n); end
      checks++;
      if (wr_en !== det_h[2]) begin failures++; $display("FAIL wr_en %0d", n); end
      if (wr_en) begin
        checks++;
        if (edge_type !== typ_h[2]) begin failures++; $display("FAIL edge type %0d", n); end
        if (typ_h[2] == EDGE_LEADING) n_lead++; else n_trail++;
      end
    end
    checks++;
    if (n_lead < 100 || n_trail < 100) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
