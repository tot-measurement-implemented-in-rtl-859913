// tot_tdc_code_density_tb: code-density test of the two-channel TDC at its
// default parameters, the statistical method used to measure the DNL of a
// delay-line TDC.
//
// Channel 0 receives pulses whose edges fall at random phases with respect
// to the clock, so each edge is equally likely to arrive at any point of
// the clock period. The fine codes of the leading and of the trailing
// records are histogrammed separately. The probability of fine code n is
// the overlap of bin n, (d(n-1), d(n)] with d the reference tap delays,
// with the window of delays an edge can show at its first sampling clock,
// (d(0), d(0) + T_clk], divided by T_clk. Every bin count must agree with
// that probability within five standard deviations, and the number of bins
// actually used must lie between the number expected to be clearly
// populated and the number that can be populated at all. The bins in use
// and the largest DNL are printed for both edge types.
`timescale 1ps/1ps
module tot_tdc_code_density_tb;
  import tdc_pkg::*;
  import tdc_ref_pkg::*;

  localparam int  N_CARRY4 = N_CARRY4_DEFAULT;
  localparam int  N_LEAD   = 2 * N_CARRY4;
  localparam int  N_PULSES = 4000;
  localparam longint T_CLK = CLK_PERIOD_PS;

  int checks = 0, failures = 0;

  logic clk = 1'b0, rst = 1'b1;
  logic [1:0] hit = '0;
  logic rd_clk = 1'b0, rd_rst = 1'b1;
  logic [1:0] rd_en = 2'b01;
  logic [WORD_W-1:0] rd_data [2];
  logic [1:0] empty, full, overflow;

  int hist_l [N_LEAD + 1]   = '{default: 0};
  int hist_t [N_CARRY4 + 1] = '{default: 0};
  int n_rec = 0;

  tot_tdc_top dut (
    .clk, .rst, .hit, .rd_clk, .rd_rst, .rd_en, .rd_data, .empty, .full, .overflow);

  always #2000 clk = ~clk;
  always #5000 rd_clk = ~rd_clk;

  // Collect fine codes from channel 0.
  initial begin
    tdc_word_t got;
    repeat (4) @(posedge rd_clk);
    forever begin
      @(posedge rd_clk);
      if (rd_en[0] && !empty[0]) begin
        #1;
        got = tdc_word_t'(rd_data[0]);
        n_rec++;
        if (got.edge_type == EDGE_LEADING) hist_l[got.fine]++;
        else                               hist_t[got.fine]++;
      end
    end
  end

  function automatic real overlap(longint lo, longint hi, longint wlo, longint whi);
    longint a = (lo > wlo) ? lo : wlo;
    longint b = (hi < whi) ? hi : whi;
    return (b > a) ? real'(b - a) : 0.0;
  endfunction

  // Check one histogram; lead selects the tap delay table.
  task automatic check_hist(input bit lead, input string name);
    int  nbins = lead ? N_LEAD : N_CARRY4;
    longint d0 = lead ? lead_delay(0) : trail_delay(0);
    int  used = 0, possible = 0, clear = 0, total = 0;
    real max_dnl = 0.0, mean, e, o, dnl;
    int  cnt;
    for (int n = 0; n <= nbins; n++) total += lead ? hist_l[n] : hist_t[n];
    for (int n = 0; n <= nbins; n++) begin
      longint lo, hi;
      lo  = (n == 0) ? -1_000_000 : (lead ? lead_delay(n - 1) : trail_delay(n - 1));
      hi  = (n == nbins) ? 1_000_000 : (lead ? lead_delay(n) : trail_delay(n));
      e   = real'(total) * overlap(lo, hi, d0, d0 + T_CLK) / real'(T_CLK);
      cnt = lead ? hist_l[n] : hist_t[n];
      o   = real'(cnt);
      if (e > 0.0) possible++;
      if (e >= 10.0) clear++;
      if (cnt > 0) used++;
      checks++;
      if ((o - e) > 5.0 * $sqrt(e) + 2.0 || (e - o) > 5.0 * $sqrt(e) + 2.0) begin
        failures++;
        $display("FAIL %s bin %0d: %0d hits, %0.1f expected", name, n, cnt, e);
      end
    end
    mean = real'(total) / real'(used);
    for (int n = 0; n <= nbins; n++) begin
      cnt = lead ? hist_l[n] : hist_t[n];
      if (cnt > 0) begin
        dnl = real'(cnt) / mean - 1.0;
        if (dnl < 0.0) dnl = -dnl;
        if (dnl > max_dnl) max_dnl = dnl;
      end
    end
    checks++;
    if (total != N_PULSES) begin failures++; $display("FAIL %s: %0d records", name, total); end
    checks++;
    if (used < clear || used > possible) begin
      failures++; $display("FAIL %s: %0d bins used, expected %0d..%0d", name, used, clear, possible);
    end
    $display("%s: %0d records, %0d bins used (%0d possible), largest |DNL| %0.2f LSB",
             name, total, used, possible, max_dnl);
  endtask

  function automatic longint even_range(longint lo, longint hi);
    return 2 * longint'($urandom_range(int'(lo / 2), int'(hi / 2)));
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #1000 rst = 1'b0;
    rd_rst = 1'b0;
    repeat (5) @(posedge clk);
    #1;                                   // edges on odd picoseconds
    for (int p = 0; p < N_PULSES; p++) begin
      hit[0] = 1'b1;
      #(even_range(8000, 16000));
      hit[0] = 1'b0;
      #(even_range(8000, 16000));
    end
    #100_000;
    wait (empty[0]);
    #100_000;
    check_hist(1'b1, "leading");
    check_hist(1'b0, "trailing");
    checks++;
    if (overflow != '0) begin failures++; $display("FAIL FIFO overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
