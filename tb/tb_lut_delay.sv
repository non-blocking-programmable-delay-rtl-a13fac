// tb_lut_delay: checks the LUT-chain delay model on its own.
//
// A 10-LUT chain with 270 ps per LUT and 25 ps spreading per LUT must delay
// rising edges by 2700 ps and falling edges by 2950 ps. The stimulus has an
// isolated pulse, a train of three pulses that are all inside the chain at
// the same time (non-blocking behaviour), and two pulses so close that the
// gap between them closes inside the chain and they leave it as one. Expected edge times are worked
// out by hand below.
module tb_lut_delay;
  timeunit 1ps;
  timeprecision 1ps;

  logic a = 1'b0;
  logic y;
  int   checks = 0;
  int   failures = 0;
  longint rises[$];
  longint falls[$];

  lut_delay #(.N_LUT(10), .LUT_PS(270), .SPREAD_PS(25)) dut (.a(a), .y(y));

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
    longint exp_r[$];
    longint exp_f[$];
    // isolated 2 ns pulse
    pulse(1000, 3000);
    // three 500 ps pulses 1 ns apart: all three in the chain together
    pulse(10000, 10500);
    pulse(11000, 11500);
    pulse(12000, 12500);
    // two 100 ps pulses 100 ps apart: the second rise (22900) would come
    // before the first, spread fall (23050); the gap closes and one pulse
    // from 22700 to the second fall (23250) remains
    pulse(20000, 20100);
    pulse(20200, 20300);
    #20000;
    exp_r = '{3700, 12700, 13700, 14700, 22700, 22900};
    exp_f = '{5950, 13450, 14450, 15450, 23250};
    // the 22900 rise happens while y is already high: no posedge
    exp_r.delete(5);
    check_q("rise", rises, exp_r);
    check_q("fall", falls, exp_f);
    checks++;
    if (y !== 1'b0) begin
      failures++;
      $display("FAIL output not idle at the end");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
