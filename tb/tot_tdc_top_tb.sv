// tot_tdc_top_tb: end-to-end test of the two-channel TDC at its default
// parameters (no overrides), also used as the full-size test.
//
// Channel 0 gets a mixed pulse train: random widths and gaps of at least
// 4.1 ns, fixed 23 ns pulses, and bursts whose leading edges are a little
// over two clocks apart (the minimum spacing, i.e. the dead time). Channel 1
// gets the width test of the original evaluation: pulses of a constant
// 23 ns at random phases. Both channels run at the same time.
// For every Hit edge the testbench predicts, from the reference tap delays
// alone, the FIFO record (edge type, coarse count, fine code) and checks
// each record read back through the FIFO read ports in order. For each
// pulse it rebuilds the width from the leading and trailing records with a
// bin-centre calibration and checks it to within 70 ps of the truth; the
// RMS error of the 23 ns pulses is printed. It counts how often each
// mechanism happened (leading record, trailing record, minimum-spacing
// pair, both channels busy) and fails if one never did.
`timescale 1ps/1ps
module tot_tdc_top_tb;
  import tdc_pkg::*;
  import tdc_ref_pkg::*;

  localparam int  N_CH     = 2;
  localparam int  N_CARRY4 = N_CARRY4_DEFAULT;
  localparam int  N_LEAD   = 2 * N_CARRY4;
  localparam int  N_PULSES = 200;
  localparam longint T_CLK = CLK_PERIOD_PS;

  int checks = 0, failures = 0;
  int n_lead_rec [N_CH] = '{default: 0}, n_trail_rec [N_CH] = '{default: 0};
  int n_min_spacing = 0, n_width = 0;
  int n_23 = 0;
  real sq_err_23 = 0.0;

  logic clk = 1'b0, rst = 1'b1;
  logic [N_CH-1:0] hit = '0;
  logic rd_clk = 1'b0, rd_rst = 1'b1;
  logic [N_CH-1:0] rd_en = '0;
  logic [WORD_W-1:0] rd_data [N_CH];
  logic [N_CH-1:0] empty, full, overflow;
  int done = 0;

  tot_tdc_top dut (
    .clk, .rst, .hit, .rd_clk, .rd_rst, .rd_en, .rd_data, .empty, .full, .overflow);

  always #2000 clk = ~clk;        // 250 MHz, rising edges at even ps
  always #5000 rd_clk = ~rd_clk;  // 100 MHz readout

  typedef struct {
    longint t;
    edge_e  typ;
  } hit_edge_t;

  typedef struct {
    tdc_word_t w;
    longint    t_true;
  } exp_rec_t;

  hit_edge_t pend [N_CH][$];
  exp_rec_t  expq [N_CH][$];
  int unsigned cnt = 0;

  // Predict records at every rising clock edge.
  always @(posedge clk) begin
    longint dt;
    exp_rec_t e;
    if (rst) cnt = 0; else cnt = cnt + 1;
    for (int c = 0; c < N_CH; c++) begin
      if (pend[c].size() > 0) begin
        dt = $time - pend[c][0].t;
        if ((pend[c][0].typ == EDGE_LEADING  && dt > lead_delay(0)) ||
            (pend[c][0].typ == EDGE_TRAILING && dt > trail_delay(0))) begin
          e.w.edge_type = pend[c][0].typ;
          e.w.coarse    = COARSE_W_DEFAULT'(cnt + 1);
          e.w.fine      = FINE_W_DEFAULT'(pend[c][0].typ == EDGE_LEADING ?
                            lead_count(dt, N_LEAD) : trail_count(dt, N_CARRY4));
          e.t_true      = pend[c][0].t;
          expq[c].push_back(e);
          void'(pend[c].pop_front());
        end
      end
    end
  end

  function automatic longint rebuild(tdc_word_t w);
    longint lo, hi;
    if (w.edge_type == EDGE_LEADING) begin
      lo = (w.fine == 0) ? 0 : lead_delay(int'(w.fine) - 1);
      hi = lead_delay(int'(w.fine));
    end else begin
      lo = (w.fine == 0) ? 0 : trail_delay(int'(w.fine) - 1);
      hi = trail_delay(int'(w.fine));
    end
    return longint'(w.coarse) * T_CLK - (lo + hi) / 2;
  endfunction

  // One reader per channel.
  for (genvar gc = 0; gc < N_CH; gc++) begin : g_rd
    initial begin
      exp_rec_t e;
      tdc_word_t got;
      longint lead_rb = 0, lead_true = 0, width_rb, width_true;
      repeat (4) @(posedge rd_clk);
      forever begin
        @(posedge rd_clk);
        if (rd_en[gc] && !empty[gc]) begin
          #1;
          got = tdc_word_t'(rd_data[gc]);
          checks++;
          if (expq[gc].size() == 0) begin
            failures++; $display("FAIL ch%0d unexpected record %h", gc, rd_data[gc]);
          end else begin
            e = expq[gc].pop_front();
            if (got !== e.w) begin
              failures++;
              $display("FAIL ch%0d record: got %0d/%0d/%0d expected %0d/%0d/%0d (edge at %0t)", gc,
                       got.edge_type, got.coarse, got.fine, e.w.edge_type, e.w.coarse, e.w.fine, e.t_true);
            end
            if (got.edge_type == EDGE_LEADING) begin
              n_lead_rec[gc]++;
              lead_rb = rebuild(got); lead_true = e.t_true;
            end else begin
              n_trail_rec[gc]++;
              width_rb   = rebuild(got) - lead_rb;
              width_true = e.t_true - lead_true;
              checks++; n_width++;
              if (width_rb - width_true > 70 || width_true - width_rb > 70) begin
                failures++;
                $display("FAIL ch%0d width: rebuilt %0d ps, true %0d ps", gc, width_rb, width_true);
              end
              if (width_true == 23000) begin
                n_23++;
                sq_err_23 += real'(width_rb - width_true) ** 2;
              end
            end
          end
        end else #1;
        rd_en[gc] <= 1'b1;
      end
    end
  end

  task automatic pulse(input int c, input longint width, input longint gap);
    pend[c].push_back('{t: $time, typ: EDGE_LEADING});
    hit[c] = 1'b1;
    #(width);
    pend[c].push_back('{t: $time, typ: EDGE_TRAILING});
    hit[c] = 1'b0;
    #(gap);
  endtask

  function automatic longint even_range(longint lo, longint hi);
    return 2 * longint'($urandom_range(int'(lo / 2), int'(hi / 2)));
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #1000 rst = 1'b0;
    rd_rst = 1'b0;
    repeat (5) @(posedge clk);
    fork
      begin : ch0
        #($urandom_range(0, 1999) * 2 + 1);
        for (int p = 0; p < N_PULSES; p++) begin
          case (p % 3)
            0: pulse(0, even_range(4100, 40000), even_range(4100, 40000));
            1: pulse(0, 23000, even_range(4100, 20000));
            default: begin
              longint w1 = 4100 + 2 * $urandom_range(0, 40);
              longint g1 = 4100 + 2 * $urandom_range(0, 40);
              if (w1 + g1 < 3 * T_CLK) n_min_spacing++;
              pulse(0, w1, g1);
              pulse(0, 4100 + 2 * $urandom_range(0, 40), 4100);
            end
          endcase
        end
      end
      begin : ch1
        #($urandom_range(0, 1999) * 2 + 1);
        for (int p = 0; p < N_PULSES; p++)
          pulse(1, 23000, even_range(20000, 60000) + 2 * $urandom_range(0, 1999));
      end
    join
    #100_000;
    wait (empty == '1 && expq[0].size() == 0 && expq[1].size() == 0);
    #100_000;
    for (int c = 0; c < N_CH; c++) begin
      checks++;
      if (pend[c].size() != 0 || expq[c].size() != 0) begin failures++; $display("FAIL ch%0d records missing", c); end
      checks++;
      if (n_lead_rec[c] == 0 || n_trail_rec[c] == 0) begin failures++; $display("FAIL ch%0d edge type never seen", c); end
    end
    checks++;
    if (n_min_spacing == 0 || n_23 == 0) begin failures++; $display("FAIL a mechanism never happened"); end
    checks++;
    if (overflow != '0) begin failures++; $display("FAIL FIFO overflow"); end
    $display("ch0: leading %0d trailing %0d; ch1: leading %0d trailing %0d; minimum-spacing pairs %0d; widths checked %0d",
             n_lead_rec[0], n_trail_rec[0], n_lead_rec[1], n_trail_rec[1], n_min_spacing, n_width);
    $display("23 ns pulses: %0d, RMS width error %0.1f ps", n_23, $sqrt(sq_err_23 / n_23));
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
