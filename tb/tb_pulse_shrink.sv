// tb_pulse_shrink: checks the pulse shrinking circuit with a 4-LUT chain
// (1080 ps rising, 1180 ps falling delay).
//
// A 10 ns pulse must come out 1080 ps long, a 500 ps pulse unchanged. A
// pulse that starts 300 ps after a long pulse ended finds the delayed copy
// of the previous pulse still high: the output only starts when that copy
// falls (40000 + 1180) and stops when the copy of the new pulse rises
// (40300 + 1080).
module tb_pulse_shrink;
  timeunit 1ps;
  timeprecision 1ps;

  logic a = 1'b0;
  logic y;
  int   checks = 0;
  int   failures = 0;
  longint rises[$];
  longint falls[$];

  pulse_shrink #(.N_LUT(4), .LUT_PS(270), .SPREAD_PS(25)) dut (.a(a), .y(y));

  always @(posedge y) if ($time > 0) rises.push_back($time);
  always @(negedge y) if ($time > 0) falls.push_back($time);

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
    pulse(1000, 11000);    // long: cut to 1080 ps
    pulse(20000, 20500);   // short: unchanged
    pulse(30000, 40000);   // long: cut to 1080 ps
    pulse(40300, 50000);   // starts while the delayed copy is still high
    #20000;
    check_q("rise", rises, '{1000, 20000, 30000, 41180});
    check_q("fall", falls, '{2080, 20500, 31080, 41380});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
