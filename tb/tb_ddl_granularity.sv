// tb_ddl_granularity: the published way of choosing control words, run
// against the delay line.
//
// The line is built with an example set of per-stage LUT delays (short
// stages spread between 188 and 512 ps per LUT, long stages 270 ps), which
// stands for the calibration vector (tau_0 .. tau_23) of one chip. The
// testbench then does what is done off-chip for the real device:
//   1. computes the delay of every one of the 2^K stage combinations
//      (K = 24: all of them), each as the sum of its selected stage delays;
//   2. sorts them;
//   3. walks the sorted list once and keeps a word whenever its delay lies
//      10 +- 5 ps above the last kept one (closest to +10 ps), jumping to
//      the next delay when no delay falls in that window.
// It counts the kept words between 23 ns and 1635 ns total delay (with the
// board's measured 18.808 ns zero delay added, which the model does not
// contain), which the published device puts at about 160 000, and the
// share of steps inside 10 +- 5 ps. It then loads runs of consecutive kept
// words into the line and checks that each measured delay is the computed
// one and that measured neighbours are 5..15 ps apart.
module tb_ddl_granularity;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int NS = 24;
  localparam int K = 24;
  localparam longint ZERO_DELAY_PS = 18808;
  localparam longint LUTS [NS] = '{
    1, 1, 2, 2, 3, 3, 4, 4, 5, 5,
    6, 10, 15, 25, 39, 63, 101, 161, 258, 412, 660, 1056, 1689, 1729
  };
  typedef int unsigned lut_ps_t [NS];
  localparam lut_ps_t PS = '{
    512, 188, 431, 297, 356, 243, 389, 318, 276, 341,
    301, 287, 279, 274, 270, 270, 270, 270, 270, 270, 270, 270, 270, 270
  };

  logic          sig_in = 1'b0;
  logic          sig_out;
  logic          cfg_clk = 1'b0;
  logic          cfg_rst_n = 1'b1;
  logic          cfg_shift_en = 1'b0;
  logic          cfg_sdi = 1'b0;
  logic          cfg_sdo;
  logic [NS-1:0] ctrl_word;

  ddl_top #(.STAGE_LUT_PS_P(PS)) dut (
    .sig_in(sig_in), .sig_out(sig_out),
    .cfg_clk(cfg_clk), .cfg_rst_n(cfg_rst_n), .cfg_shift_en(cfg_shift_en),
    .cfg_sdi(cfg_sdi), .cfg_sdo(cfg_sdo), .ctrl_word(ctrl_word)
  );

  int checks = 0;
  int failures = 0;

  longint t_rise_out;
  always @(posedge sig_out) if ($time > 0) t_rise_out = $time;

  longint keys[];        // delay << K | word, sorted
  longint sel_d[$];      // kept delays
  longint sel_w[$];      // kept words

  task automatic cfg_tick();
    #10000 cfg_clk = 1'b1;
    #10000 cfg_clk = 1'b0;
  endtask

  task automatic load_word(input logic [NS-1:0] w);
    cfg_shift_en = 1'b1;
    for (int i = NS - 1; i >= 0; i--) begin
      cfg_sdi = w[i];
      cfg_tick();
    end
    cfg_shift_en = 1'b0;
  endtask

  // measured delay of one 2 ns pulse; waits until the whole line is empty
  task automatic measure(input logic [NS-1:0] w, output longint d);
    longint t0;
    load_word(w);
    #100000;
    t0 = $time;
    t_rise_out = -1;
    sig_in = 1'b1;
    #2003 sig_in = 1'b0;
    #2100000;
    d = (t_rise_out < 0) ? -1 : t_rise_out - t0;
  endtask

  initial begin
    #200_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint stage_d [NS];
    longint dly[];
    longint last;
    longint lo;
    longint hi;
    int     n_in_range;
    int     n_good;
    int     n_gap;
    int     i;

    #1000 cfg_rst_n = 1'b0;
    #1000 cfg_rst_n = 1'b1;

    for (int n = 0; n < NS; n++) stage_d[n] = LUTS[n] * PS[n];

    // 1. delay of every combination: reuse the combination without its
    //    lowest set bit
    dly = new[1 << K];
    keys = new[1 << K];
    dly[0] = 0;
    for (int c = 1; c < (1 << K); c++) begin
      automatic int b = 0;
      while (!c[b]) b++;
      dly[c] = dly[c & (c - 1)] + stage_d[b];
    end
    foreach (dly[c]) keys[c] = (dly[c] << K) | longint'(c);
    dly.delete();

    // 2. sort
    keys.sort();

    // 3. linear search for a 10 +- 5 ps grid
    lo = 23000 - ZERO_DELAY_PS;
    hi = 1635000 - ZERO_DELAY_PS;
    i = 0;
    while (i < keys.size() && (keys[i] >> K) < lo) i++;
    sel_d.push_back(keys[i] >> K);
    sel_w.push_back(keys[i] & ((64'd1 << K) - 1));
    last = keys[i] >> K;
    n_good = 0;
    n_gap = 0;
    while (last < hi) begin
      automatic int     best = -1;
      automatic longint best_err = 0;
      while (i < keys.size() && (keys[i] >> K) < last + 5) i++;
      if (i >= keys.size()) break;
      for (int j = i; j < keys.size() && (keys[j] >> K) <= last + 15; j++) begin
        automatic longint e = (keys[j] >> K) - (last + 10);
        if (e < 0) e = -e;
        if (best < 0 || e < best_err) begin
          best = j;
          best_err = e;
        end
      end
      if (best < 0) begin
        best = i;
        n_gap++;
      end else begin
        n_good++;
      end
      last = keys[best] >> K;
      sel_d.push_back(last);
      sel_w.push_back(keys[best] & ((64'd1 << K) - 1));
      i = best + 1;
    end
    n_in_range = sel_d.size();
    $display("kept words: %0d between %0d and %0d ps (total delay); steps in 10+-5 ps: %0d, gaps: %0d",
             n_in_range, sel_d[0] + ZERO_DELAY_PS, sel_d[$] + ZERO_DELAY_PS, n_good, n_gap);
    keys.delete();

    // the grid must cover the range and be mostly 10 +- 5 ps
    checks++;
    if (sel_d[$] < hi) begin
      failures++;
      $display("FAIL grid ends at %0d ps", sel_d[$]);
    end
    checks++;
    if (n_in_range < 100000) begin
      failures++;
      $display("FAIL only %0d words", n_in_range);
    end
    checks++;
    if (n_good * 100 < n_in_range * 95) begin
      failures++;
      $display("FAIL only %0d of %0d steps within 10 +- 5 ps", n_good, n_in_range);
    end

    // 4. run consecutive kept words through the line at a few places
    for (int p = 0; p < 4; p++) begin
      automatic int     start = (p == 0) ? 0 : (sel_d.size() - 12) * p / 3;
      automatic longint prev = -1;
      for (int s = start; s < start + 12; s++) begin
        automatic longint d;
        measure(NS'(sel_w[s]), d);
        checks++;
        if (d != sel_d[s]) begin
          failures++;
          $display("FAIL word %h: measured %0d ps, computed %0d ps", sel_w[s], d, sel_d[s]);
        end
        if (prev >= 0) begin
          checks++;
          if (d - prev < 5 && !(sel_d[s] - sel_d[s-1] > 15)) begin
            failures++;
            $display("FAIL step %0d ps at word %h", d - prev, sel_w[s]);
          end else if (d - prev > 15 && !(sel_d[s] - sel_d[s-1] > 15)) begin
            failures++;
            $display("FAIL step %0d ps at word %h", d - prev, sel_w[s]);
          end
        end
        prev = d;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
