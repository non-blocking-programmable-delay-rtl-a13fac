// tb_ddl_deadtime: dead time of the delay line, measured the published
// way, at the default sizes.
//
// For each control word a square wave (high and low for h ps each) of 40
// periods is sent in and the output pulses are counted. A binary search
// finds the smallest h at which at least 95 % of the pulses come out; that
// half period is the dead time. Two larger half periods are then checked to
// pass as well.
//
// The result is checked against bounds from the widening rule. The line is
// cut into segments by the PSCs on the path: the input PSC, then the PSC of
// each selected stage among the last five. A segment whose LUT chains add
// up to L LUTs closes a low gap of 25 ps * L. Its input pulses are w wide,
// with w no more than min(h, C) for a PSC that caps pulses at C ps, so the
// gap 2h - w must exceed 25 L. That gives an upper bound of 25 L when
// 25 L <= C and (C + 25 L) / 2 otherwise, and a lower bound of 25 L / 2
// (w >= 0). The PSC output can be narrower than min(h, C) when the gap
// before a pulse is short, which is why only bounds are checked. Words
// without a PSC stage must also show a dead time growing with their delay,
// and words whose last PSC is that of stage 23 must share one dead time, set
// by that stage alone, to within 3 %. (When the gap before a pulse has nearly
// closed ahead of a PSC, the PSC passes a narrower pulse, which lowers the
// dead time a little.) Finally the largest
// dead time over all words is compared with the published maximum of
// 22.5 ns. Words with only short stages are left out:
// their dead time is under 1 ns, where the input PSC's own recovery sets the
// limit and the count does not grow steadily with h.
module tb_ddl_deadtime;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int NS = 24;
  localparam int NP = 40;
  localparam longint LUTS [NS] = '{
    1, 1, 2, 2, 3, 3, 4, 4, 5, 5,
    6, 10, 15, 25, 39, 63, 101, 161, 258, 412, 660, 1056, 1689, 1729
  };

  logic          sig_in = 1'b0;
  logic          sig_out;
  logic          cfg_clk = 1'b0;
  logic          cfg_rst_n = 1'b1;
  logic          cfg_shift_en = 1'b0;
  logic          cfg_sdi = 1'b0;
  logic          cfg_sdo;
  logic [NS-1:0] ctrl_word;

  ddl_top dut (
    .sig_in(sig_in), .sig_out(sig_out),
    .cfg_clk(cfg_clk), .cfg_rst_n(cfg_rst_n), .cfg_shift_en(cfg_shift_en),
    .cfg_sdi(cfg_sdi), .cfg_sdo(cfg_sdo), .ctrl_word(ctrl_word)
  );

  int checks = 0;
  int failures = 0;
  int n_out = 0;
  int n_psc_words = 0;
  int n_plain_words = 0;

  always @(posedge sig_out) if ($time > 0) n_out++;

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
    #2000000;
  endtask

  // fraction of NP square-wave pulses that come out, in percent
  task automatic transmitted(input longint h, output int pct);
    n_out = 0;
    for (int k = 0; k < NP; k++) begin
      sig_in = 1'b1;
      #(h) sig_in = 1'b0;
      #(h);
    end
    #2000000;
    pct = n_out * 100 / NP;
  endtask

  function automatic longint seg_need(input longint cap, input longint l);
    longint s = 25 * l;
    return (s <= cap) ? s : (cap + s) / 2;
  endfunction

  // upper bound (hi_bound = 1) or lower bound (0) of the dead time
  function automatic longint predict(input logic [NS-1:0] w, input bit hi_bound);
    longint cap = 15 * 270;
    longint l = 0;
    longint worst = 0;
    for (int n = 0; n < NS; n++) begin
      if (w[n]) begin
        if (n >= NS - 5) begin
          if (hi_bound && seg_need(cap, l) > worst) worst = seg_need(cap, l);
          if (!hi_bound && 25 * l / 2 > worst) worst = 25 * l / 2;
          cap = 4 * 270;
          l = 0;
        end
        l += LUTS[n];
      end
    end
    if (hi_bound && seg_need(cap, l) > worst) worst = seg_need(cap, l);
    if (!hi_bound && 25 * l / 2 > worst) worst = 25 * l / 2;
    return worst;
  endfunction

  initial begin
    #500_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NS-1:0] words[$];
    automatic longint prev_plain = -1;
    automatic longint max_dead = 0;
    automatic longint dead_23 = -1;
    #1000 cfg_rst_n = 1'b0;
    #1000 cfg_rst_n = 1'b1;

    // words without a PSC stage, in order of growing delay
    for (int n = 16; n < NS - 5; n++) words.push_back(NS'(1) << n);
    words.push_back(24'h07FFFF);
    // words using PSC stages
    for (int n = NS - 5; n < NS; n++) words.push_back(NS'(1) << n);
    words.push_back(24'h8FFFFF);
    words.push_back(24'hFFFFFF);
    words.push_back(24'h900000);

    foreach (words[i]) begin
      automatic logic [NS-1:0] w = words[i];
      automatic longint lo = 50;
      automatic longint hi = 60000;
      automatic longint pred = predict(w, 1'b1);
      automatic longint low = predict(w, 1'b0);
      automatic longint dly = 0;
      automatic int     pct;
      for (int n = 0; n < NS; n++) if (w[n]) dly += LUTS[n] * 270;
      load_word(w);
      // smallest h (50 ps steps) with >= 95 % transmitted
      while (hi - lo > 50) begin
        automatic longint mid = (lo + hi) / 2;
        transmitted(mid, pct);
        if (pct >= 95) hi = mid; else lo = mid;
      end
      $display("word %h delay %8.3f ns dead time %6.3f ns bounds %6.3f .. %6.3f ns",
               w, real'(dly) / 1000.0, real'(hi) / 1000.0,
               real'(low) / 1000.0, real'(pred) / 1000.0);
      checks++;
      if (hi < low || hi > pred + 100) begin
        failures++;
        $display("FAIL word %h: dead time %0d ps, bounds %0d..%0d ps", w, hi, low, pred);
      end
      if (hi > max_dead) max_dead = hi;
      // last PSC stage is stage 23: within 3 % of the first such word
      if (w[NS-1]) begin
        checks++;
        if (dead_23 < 0) dead_23 = hi;
        else if (100 * (hi - dead_23) > 3 * dead_23 || 100 * (dead_23 - hi) > 3 * dead_23) begin
          failures++;
          $display("FAIL word %h: dead time %0d ps differs from %0d ps of stage 23 alone",
                   w, hi, dead_23);
        end
      end
      // longer half periods must pass too
      transmitted(hi + 100, pct);
      checks++;
      if (pct < 95) begin
        failures++;
        $display("FAIL word %h: %0d %% passed at h = %0d ps", w, pct, hi + 100);
      end
      transmitted(2 * hi, pct);
      checks++;
      if (pct < 95) begin
        failures++;
        $display("FAIL word %h: %0d %% passed at h = %0d ps", w, pct, 2 * hi);
      end
      if (w[NS-1:NS-5] == '0) begin
        n_plain_words++;
        checks++;
        if (hi < prev_plain) begin
          failures++;
          $display("FAIL word %h: dead time fell with growing delay", w);
        end
        prev_plain = hi;
      end else begin
        n_psc_words++;
      end
    end
    $display("largest dead time %6.3f ns (published: at most 22.5 ns)",
             real'(max_dead) / 1000.0);
    checks++;
    if (max_dead > 22500) begin
      failures++;
      $display("FAIL largest dead time above 22.5 ns");
    end
    checks++;
    if (n_plain_words == 0 || n_psc_words == 0) begin
      failures++;
      $display("FAIL both kinds of word must be measured");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
