// tb_ddl_top: end-to-end test of the full delay line at its default sizes.
//
// The testbench loads control words through the serial configuration port,
// sends pulse trains into sig_in and compares every output edge with a
// reference computed here from the published structure alone: a waveform
// is a list of edge times, a LUT chain shifts rising edges by
// N * 270 ps and falling edges by N * 295 ps (a low gap that closes on the
// way merges its two pulses), and a pulse shrinking circuit is
// "input AND NOT delayed input". The LUT counts are repeated here rather
// than taken from the design's package.
//
// Phases: zero-delay path; each stage alone; random words with random
// pulse trains, including trains whose pulses are all inside the line at
// once (non-blocking operation) and pulses close enough to merge (dead
// time); all stages on; and a sweep of 20 target delays spaced evenly on
// a log scale from 23 ns to 1635 ns, each reached by a control word picked
// greedily from the nominal stage delays and checked to within one LUT.
// Each mechanism is counted and must have happened at least once.
module tb_ddl_top;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int NS = 24;
  localparam longint T_LUT = 270;
  localparam longint T_LUT_F = 295;           // 270 ps + 25 ps spreading
  localparam longint PSC_IN = 15;
  localparam longint PSC_ST = 4;
  localparam int FIRST_PSC_STAGE = 19;        // last five stages
  localparam longint ZERO_DELAY_PS = 18808;   // measured board zero delay
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
  int ambiguous = 0;

  // mechanism counters
  int n_cfg_load = 0;
  int n_zero_path = 0;
  int n_stage_used [NS];
  int n_in_psc_cut = 0;
  int n_stage_psc_cut = 0;
  int n_nonblocking = 0;
  int n_merged = 0;
  int n_workload = 0;

  longint out_edges[$];
  always @(sig_out) if ($time > 0) out_edges.push_back($time);

  typedef struct {
    longint t;
    bit     v;
    bit     src;
  } ev_t;

  // insert keeping the queue ordered by time (stable)
  function automatic void ev_insert(ref ev_t q[$], input ev_t e);
    int i = q.size();
    while (i > 0 && q[i-1].t > e.t) i--;
    q.insert(i, e);
  endfunction

  // delay of a waveform through a LUT chain: rising edges by tr, falling
  // by tf; a rising edge that would not come after the falling edge before
  // it closes the gap, and both edges disappear
  function automatic void wave_delay(input longint w[$], input longint tr,
                                     input longint tf, output longint o[$]);
    o.delete();
    foreach (w[i]) begin
      if (i % 2 == 0) begin
        if (o.size() > 0 && o[o.size()-1] >= w[i] + tr) void'(o.pop_back());
        else o.push_back(w[i] + tr);
      end else begin
        o.push_back(w[i] + tf);
      end
    end
  endfunction

  // a AND NOT b
  function automatic void wave_and_not(input longint a[$], input longint b[$],
                                       output longint o[$]);
    ev_t ev[$];
    bit  va = 1'b0;
    bit  vb = 1'b0;
    bit  cur = 1'b0;
    o.delete();
    foreach (a[i]) begin
      ev_t e;
      e.t = a[i]; e.v = (i % 2 == 0); e.src = 1'b0;
      ev_insert(ev, e);
    end
    foreach (b[i]) begin
      ev_t e;
      e.t = b[i]; e.v = (i % 2 == 0); e.src = 1'b1;
      ev_insert(ev, e);
    end
    for (int i = 0; i < ev.size(); i++) begin
      if (i > 0 && ev[i].t == ev[i-1].t && ev[i].src != ev[i-1].src) ambiguous++;
      if (ev[i].src) vb = ev[i].v; else va = ev[i].v;
      if ((va & ~vb) != cur) begin
        o.push_back(ev[i].t);
        cur = va & ~vb;
      end
    end
  endfunction

  function automatic longint max_width(input longint w[$]);
    longint m = 0;
    for (int i = 0; i + 1 < w.size(); i += 2)
      if (w[i+1] - w[i] > m) m = w[i+1] - w[i];
    return m;
  endfunction

  // expected output of the whole line; counts PSC cuts on the way
  function automatic void reference(input logic [NS-1:0] word,
                                    input longint w_in[$],
                                    output longint o[$],
                                    output int in_cut, output int st_cut);
    longint w[$];
    longint d[$];
    longint x[$];
    in_cut = (max_width(w_in) > PSC_IN * T_LUT) ? 1 : 0;
    st_cut = 0;
    wave_delay(w_in, PSC_IN * T_LUT, PSC_IN * T_LUT_F, d);
    wave_and_not(w_in, d, w);
    for (int n = 0; n < NS; n++) begin
      if (word[n]) begin
        if (n >= FIRST_PSC_STAGE) begin
          if (max_width(w) > PSC_ST * T_LUT) st_cut++;
          wave_delay(w, PSC_ST * T_LUT, PSC_ST * T_LUT_F, d);
          wave_and_not(w, d, x);
        end else begin
          x = w;
        end
        wave_delay(x, LUTS[n] * T_LUT, LUTS[n] * T_LUT_F, w);
      end
    end
    o = w;
  endfunction

  function automatic longint nominal_delay(input logic [NS-1:0] word);
    longint s = 0;
    for (int n = 0; n < NS; n++) if (word[n]) s += LUTS[n] * T_LUT;
    return s;
  endfunction

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
    checks++;
    if (ctrl_word !== w) begin
      failures++;
      $display("FAIL load: ctrl_word %h expected %h", ctrl_word, w);
    end else begin
      n_cfg_load++;
    end
  endtask

  // Run one test: pulses given as (start offset, width) pairs in ps.
  task automatic run(input string name, input logic [NS-1:0] word,
                     input longint starts[$], input longint widths[$]);
    longint w_in[$];
    longint exp_q[$];
    longint t0;
    int     in_cut;
    int     st_cut;
    int     amb0;
    load_word(word);
    #100000;
    t0 = $time;
    foreach (starts[i]) begin
      w_in.push_back(t0 + starts[i]);
      w_in.push_back(t0 + starts[i] + widths[i]);
    end
    amb0 = ambiguous;
    reference(word, w_in, exp_q, in_cut, st_cut);
    if (ambiguous != amb0) begin
      // two edges meet at one instant: order-dependent, not checked
      $display("note: %s skipped, coincident edges", name);
      return;
    end
    out_edges.delete();
    foreach (w_in[i]) begin
      #(w_in[i] - $time);
      sig_in = (i % 2 == 0);
    end
    // let every chain drain, selected or not: an unselected chain still
    // carries the pulse and would release it when a later word selects it
    #(nominal_delay('1) / T_LUT * T_LUT_F + 200000);
    checks++;
    if (out_edges.size() != exp_q.size()) begin
      failures++;
      foreach (out_edges[i]) $display("  got %0d", out_edges[i] - t0);
      foreach (exp_q[i]) $display("  exp %0d", exp_q[i] - t0);
      $display("FAIL %s: %0d output edges, expected %0d", name,
               out_edges.size(), exp_q.size());
      return;
    end
    foreach (exp_q[i]) begin
      checks++;
      if (out_edges[i] != exp_q[i]) begin
        failures++;
        $display("FAIL %s edge %0d: t=%0d expected %0d", name, i,
                 out_edges[i] - t0, exp_q[i] - t0);
      end
    end
    // mechanism bookkeeping
    if (word == '0) n_zero_path++;
    for (int n = 0; n < NS; n++) if (word[n]) n_stage_used[n]++;
    n_in_psc_cut += in_cut;
    n_stage_psc_cut += st_cut;
    if (exp_q.size() < w_in.size()) n_merged++;
    else if (starts.size() > 1 && exp_q.size() == w_in.size()
             && starts[1] < exp_q[0] - t0) n_nonblocking++;
  endtask

  initial begin
    #50_000_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NS-1:0] w;
    longint st[$];
    longint wd[$];
    foreach (n_stage_used[n]) n_stage_used[n] = 0;
    #1000 cfg_rst_n = 1'b0;
    #4000 cfg_rst_n = 1'b1;
    checks++;
    if (ctrl_word !== '0) begin
      failures++;
      $display("FAIL reset: ctrl_word %h", ctrl_word);
    end

    // 1. zero-delay path: a short pulse passes, a long one is cut to 4050 ps
    run("zero short", '0, '{1000}, '{2003});
    run("zero long", '0, '{1000}, '{10003});

    // 2. each stage alone, 2 ns pulse (cut to 1080 ps by the late PSCs)
    for (int n = 0; n < NS; n++)
      run($sformatf("stage %0d", n), NS'(1) << n, '{1000}, '{2003});

    // 3. non-blocking: ten pulses 25 ns apart through a 376 ns delay; the
    //    last PSC (stage 20) leaves them 1080 + 660 * 25 = 17580 ps wide
    st.delete(); wd.delete();
    for (int k = 0; k < 10; k++) begin
      st.push_back(1000 + 25000 * k);
      wd.push_back(3001);
    end
    run("train", 24'h1C_1234, st, wd);

    // 4. dead time: two pulses 1 ns apart through stage 18 (no PSC); the
    //    first pulse widens by 4 ns and swallows the second
    run("merge", NS'(1) << 18, '{1000, 4001}, '{2003, 2003});

    // 5. all stages on
    run("all on", '1, '{1000, 30000}, '{5003, 1501});

    // 6. random words and pulse trains
    for (int k = 0; k < 40; k++) begin
      automatic longint t = 1000;
      automatic int     np = 1 + int'($urandom_range(0, 5));
      w = NS'($urandom());
      st.delete(); wd.delete();
      for (int p = 0; p < np; p++) begin
        st.push_back(t);
        wd.push_back(longint'($urandom_range(300, 8000)));
        t += wd[p] + longint'($urandom_range(500, 40000));
      end
      run($sformatf("random %0d", k), w, st, wd);
    end

    // 7. workload: 20 target delays, log-spaced 23 ns .. 1635 ns, of which
    //    the board's measured 18.808 ns zero delay is outside this model
    for (int k = 0; k < 20; k++) begin
      real    tgt_r;
      longint tgt;
      longint rem;
      tgt_r = 23000.0 * $exp($ln(1635000.0 / 23000.0) * real'(k) / 19.0);
      tgt = longint'(tgt_r) - ZERO_DELAY_PS;
      rem = tgt;
      w = '0;
      for (int n = NS - 1; n >= 0; n--)
        if (LUTS[n] * T_LUT <= rem) begin
          w[n] = 1'b1;
          rem -= LUTS[n] * T_LUT;
        end
      checks++;
      if (rem < 0 || rem >= T_LUT) begin
        failures++;
        $display("FAIL workload %0d: target %0d ps left %0d ps", k, tgt, rem);
      end
      run($sformatf("target %0d", k), w, '{1000}, '{2003});
      n_workload++;
    end

    // every mechanism must have happened
    checks++;
    if (n_cfg_load == 0) begin failures++; $display("FAIL never loaded a word"); end
    checks++;
    if (n_zero_path == 0) begin failures++; $display("FAIL zero-delay path unused"); end
    foreach (n_stage_used[n]) begin
      checks++;
      if (n_stage_used[n] == 0) begin
        failures++;
        $display("FAIL stage %0d delay branch unused", n);
      end
    end
    checks++;
    if (n_in_psc_cut == 0) begin failures++; $display("FAIL input PSC never cut"); end
    checks++;
    if (n_stage_psc_cut == 0) begin failures++; $display("FAIL stage PSC never cut"); end
    checks++;
    if (n_nonblocking == 0) begin failures++; $display("FAIL no pulses in flight together"); end
    checks++;
    if (n_merged == 0) begin failures++; $display("FAIL no pulse merging"); end
    $display("mechanisms: loads=%0d zero_path=%0d in_psc_cut=%0d stage_psc_cut=%0d nonblocking=%0d merged=%0d workload=%0d skipped=%0d",
             n_cfg_load, n_zero_path, n_in_psc_cut, n_stage_psc_cut,
             n_nonblocking, n_merged, n_workload, ambiguous);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
