// tot_tdc_channel_tb: end-to-end test of one channel at its default size
// (52 CARRY4 cells, 24-bit coarse count, 512-word FIFO).
//
// A pulse train with random phases, widths and gaps (each at least 4.1 ns,
// just over one clock and over the length of the delay line) is applied to
// Hit. Some pulses come in bursts whose leading edges are only a little over
// two clocks apart, the minimum spacing the channel is specified for. For
// every Hit edge the testbench predicts, from the reference tap delays
// alone, the clock edge that first sees it, the fine code (taps passed by
// then) and the coarse count latched two clocks later, and checks each FIFO
// record (type, coarse, fine) in order. From each leading/trailing pair it
// also rebuilds the pulse width with a bin-centre calibration and checks it
// against the true width to within half a leading plus half a trailing bin.
`timescale 1ps/1ps
module tot_tdc_channel_tb;
  import tdc_pkg::*;
  import tdc_ref_pkg::*;

  localparam int  N_CARRY4 = N_CARRY4_DEFAULT;
  localparam int  N_LEAD   = 2 * N_CARRY4;
  localparam int  N_PULSES = 300;
  localparam longint T_CLK = CLK_PERIOD_PS;

  int checks = 0, failures = 0;
  int n_lead_rec = 0, n_trail_rec = 0, n_min_spacing = 0, n_width = 0;

  logic clk = 1'b0, rst = 1'b1, hit = 1'b0;
  logic rd_clk = 1'b0, rd_rst = 1'b1, rd_en = 1'b0;
  logic [WORD_W-1:0] rd_data;
  logic empty, full, overflow;

  tot_tdc_channel dut (
    .clk, .rst, .hit, .rd_clk, .rd_rst, .rd_en, .rd_data, .empty, .full, .overflow);

  always #2000 clk = ~clk;        // 250 MHz, rising edges at even ps
  always #5000 rd_clk = ~rd_clk;  // 100 MHz readout

  typedef struct {
    longint t;
    edge_e  typ;
  } hit_edge_t;

  typedef struct {
    tdc_word_t w;
    longint    t_true;     // true edge time
    longint    t_sample;   // clock edge that saw it
  } exp_rec_t;

  hit_edge_t pend[$];
  exp_rec_t  expq[$];
  int unsigned cnt = 0;      // mirror of a free-running counter
  longint last_lead_t = -1_000_000;

  // Predict records at every rising clock edge.
  always @(posedge clk) begin
    longint dt;
    exp_rec_t e;
    if (rst) cnt = 0; else cnt = cnt + 1;
    if (pend.size() > 0) begin
      dt = $time - pend[0].t;
      if ((pend[0].typ == EDGE_LEADING  && dt > lead_delay(0)) ||
          (pend[0].typ == EDGE_TRAILING && dt > trail_delay(0))) begin
        e.w.edge_type = pend[0].typ;
        e.w.coarse    = COARSE_W_DEFAULT'(cnt + 1);
        e.w.fine      = FINE_W_DEFAULT'(pend[0].typ == EDGE_LEADING ?
                          lead_count(dt, N_LEAD) : trail_count(dt, N_CARRY4));
        e.t_true      = pend[0].t;
        e.t_sample    = $time;
        expq.push_back(e);
        void'(pend.pop_front());
      end
    end
  end

  // Time of an edge rebuilt from a record: sample time minus the centre of
  // the fine bin (reference delays play the part of a calibration table).
  function automatic longint rebuild(tdc_word_t w);
    longint ts, lo, hi;
    ts = longint'(w.coarse) * T_CLK;
    if (w.edge_type == EDGE_LEADING) begin
      lo = (w.fine == 0) ? 0 : lead_delay(int'(w.fine) - 1);
      hi = lead_delay(int'(w.fine));
    end else begin
      lo = (w.fine == 0) ? 0 : trail_delay(int'(w.fine) - 1);
      hi = trail_delay(int'(w.fine));
    end
    return ts - (lo + hi) / 2;
  endfunction

  // Read and check records.
  initial begin
    exp_rec_t e;
    tdc_word_t got;
    longint lead_rb = 0, lead_true = 0, width_rb, width_true;
    repeat (4) @(posedge rd_clk);
    rd_rst <= 1'b0;
    forever begin
      @(posedge rd_clk);
      if (rd_en && !empty) begin
        #1;
        got = tdc_word_t'(rd_data);
        checks++;
        if (expq.size() == 0) begin
          failures++; $display("FAIL unexpected record %h", rd_data);
        end else begin
          e = expq.pop_front();
          if (got !== e.w) begin
            failures++;
            $display("FAIL record: got type=%0d coarse=%0d fine=%0d, expected type=%0d coarse=%0d fine=%0d (edge at %0t)",
                     got.edge_type, got.coarse, got.fine, e.w.edge_type, e.w.coarse, e.w.fine, e.t_true);
          end
          if (got.edge_type == EDGE_LEADING) begin
            n_lead_rec++;
            lead_rb = rebuild(got); lead_true = e.t_true;
          end else begin
            n_trail_rec++;
            width_rb   = rebuild(got) - lead_rb;
            width_true = e.t_true - lead_true;
            checks++; n_width++;
            if (width_rb - width_true > 70 || width_true - width_rb > 70) begin
              failures++;
              $display("FAIL width: rebuilt %0d ps, true %0d ps", width_rb, width_true);
            end
          end
        end
      end else #1;
      rd_en <= 1'b1;
    end
  end

  // Hit stimulus. Edge times are odd picoseconds.
  task automatic pulse(input longint width, input longint gap);
    pend.push_back('{t: $time, typ: EDGE_LEADING});
    if ($time - last_lead_t < 3 * T_CLK) n_min_spacing++;
    last_lead_t = $time;
    hit = 1'b1;
    #(width);
    pend.push_back('{t: $time, typ: EDGE_TRAILING});
    hit = 1'b0;
    #(gap);
  endtask

  function automatic longint even_range(longint lo, longint hi);
    return 2 * longint'($urandom_range(int'(lo / 2), int'(hi / 2)));
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    #1000 rst = 1'b0;
    repeat (5) @(posedge clk);
    #($urandom_range(0, 1999) * 2 + 1);       // odd phase
    for (int p = 0; p < N_PULSES; p++) begin
      case (p % 4)
        0: pulse(even_range(4100, 40000), even_range(4100, 40000));
        1: pulse(23000, even_range(4100, 20000));           // fixed 23 ns width
        2: begin                                            // burst at minimum spacing
             pulse(4100, 4100 + 2 * $urandom_range(0, 50));
             pulse(4100 + 2 * $urandom_range(0, 50), 4100);
           end
        default: pulse(even_range(4100, 8000), even_range(4100, 8000));
      endcase
    end
    #100_000;
    wait (empty && expq.size() == 0);
    #100_000;
    checks++;
    if (pend.size() != 0 || expq.size() != 0) begin failures++; $display("FAIL records missing"); end
    checks++;
    if (n_lead_rec == 0 || n_trail_rec == 0 || n_min_spacing == 0 || n_width == 0) begin
      failures++; $display("FAIL a mechanism never happened");
    end
    checks++;
    if (overflow) begin failures++; $display("FAIL FIFO overflow"); end
    $display("leading records %0d, trailing records %0d, pairs at minimum spacing %0d, widths checked %0d",
             n_lead_rec, n_trail_rec, n_min_spacing, n_width);
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
