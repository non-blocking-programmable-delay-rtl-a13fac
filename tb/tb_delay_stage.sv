// tb_delay_stage: checks one delay stage with and without a pulse
// shrinking circuit, both with a 6-LUT delay chain (1620 ps rising,
// 1770 ps falling) and, for the PSC, a 4-LUT chain (1080 ps pulse).
//
// With sel = 0 the output must follow the input exactly. With sel = 1 the
// plain stage delays a 4 ns pulse by 1620 ps and widens it by 150 ps; the
// PSC stage first cuts the pulse to 1080 ps, then delays and widens it.
// A last phase flips sel on one stage only to check that each stage obeys
// its own bit.
module tb_delay_stage;
  timeunit 1ps;
  timeprecision 1ps;

  logic a = 1'b0;
  logic sel0 = 1'b0;
  logic sel1 = 1'b0;
  logic y0;
  logic y1;
  int   checks = 0;
  int   failures = 0;
  longint r0[$];
  longint f0[$];
  longint r1[$];
  longint f1[$];

  delay_stage #(.N_LUT(6), .HAS_PSC(1'b0)) dut_plain (.a(a), .sel(sel0), .y(y0));
  delay_stage #(.N_LUT(6), .HAS_PSC(1'b1), .PSC_LUTS(4)) dut_psc (.a(a), .sel(sel1), .y(y1));

  always @(posedge y0) if ($time > 0) r0.push_back($time);
  always @(negedge y0) if ($time > 0) f0.push_back($time);
  always @(posedge y1) if ($time > 0) r1.push_back($time);
  always @(negedge y1) if ($time > 0) f1.push_back($time);

  task automatic pulse(input longint t_rise, input longint t_fall);
    #(t_rise - $time) a = 1'b1;
    #(t_fall - $time) a = 1'b0;
  endtask

  task automatic check_q(input string what, input longint got[$],
                         input longint exp[$]);
    checks++;
    if (got.size() != exp.size()) begin
      failures++;
      $display("FAIL %s: %0d edges, expected %0d", what, got.size(), exp.size());
      return;
    end
    foreach (exp[i]) begin
      checks++;
      if (got[i] != exp[i]) begin
        failures++;
        $display("FAIL %s[%0d]: t=%0d expected %0d", what, i, got[i], exp[i]);
      end
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // zero-delay path on both stages
    pulse(1000, 5000);
    #10000;
    sel0 = 1'b1;
    sel1 = 1'b1;
    #1000;
    // delay path on both stages
    pulse(20000, 24000);
    #10000;
    // plain stage back to zero-delay, PSC stage stays on its delay path
    sel0 = 1'b0;
    #1000;
    pulse(40000, 40500);
    #10000;
    check_q("plain rise", r0, '{1000, 21620, 40000});
    check_q("plain fall", f0, '{5000, 25770, 40500});
    // PSC stage: 1000..5000 passes; 20000..21080 then +1620/+1770;
    // 40000..40500 is shorter than 1080 ps and only delayed
    check_q("psc rise", r1, '{1000, 21620, 41620});
    check_q("psc fall", f1, '{5000, 22850, 42270});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
