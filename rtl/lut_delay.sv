// lut_delay: behavioural model of a chain of N_LUT FPGA look-up tables that
// is used only for its propagation delay (the delay element tau_n of a
// stage, and the delay inside a pulse shrinking circuit).
//
// This is a behavioural model, not synthesizable logic: in the FPGA the
// element is N_LUT buffer LUTs placed in series and kept by the tools, and
// its delay is a property of the silicon and the routing. Each edge in the
// model keeps its own timer, so any number of pulses can be inside the
// chain at once, which is what makes the whole delay line non-blocking.
//
// Timing: a rising input edge appears at y after N_LUT * LUT_PS. A falling
// edge appears after N_LUT * (LUT_PS + SPREAD_PS). The extra SPREAD_PS per
// LUT on the falling edge models the measured pulse spreading of about
// 25 ps per LUT; which edge lags is this model's choice. Widening also
// means the low gap between two pulses shrinks by the same amount. Edges
// cannot overtake one another in a real chain, so when a rising edge would
// reach the output no later than the still pending falling edge before it,
// the gap has closed: both edges are dropped and the two pulses leave the
// chain as one. This is what gives the line its dead time.
// The default of 270 ps per LUT is the value measured for long chains.
module lut_delay #(
  parameter int unsigned N_LUT     = 1,
  parameter int unsigned LUT_PS    = 270,
  parameter int unsigned SPREAD_PS = 25
) (
  input  logic a,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned T_RISE_PS = N_LUT * LUT_PS;
  localparam int unsigned T_FALL_PS = N_LUT * (LUT_PS + SPREAD_PS);

  logic y_q;

  // Bookkeeping of the most recently scheduled output edge, so that a
  // rising edge can cancel the falling edge it would overtake.
  int unsigned      n_sched;
  int unsigned      last_id;
  logic             last_v;
  longint           last_t;
  bit               cancelled [int unsigned];

  // The chain is idle (low) at power-up. Every input edge starts its own
  // timer thread, so edges already inside the chain are never lost unless
  // a closed gap cancels them.
  initial begin
    y_q     = 1'b0;
    n_sched = 0;
    last_id = 0;
    last_v  = 1'b0;
    last_t  = 0;
    forever begin
      @(a);
      if (a && !last_v && last_t > longint'($time) &&
          last_t >= longint'($time) + longint'(T_RISE_PS)) begin
        // gap closed: drop the pending falling edge and this rising edge
        cancelled[last_id] = 1'b1;
        last_v = 1'b1;
      end else begin
        n_sched++;
        last_id = n_sched;
        last_v  = a;
        last_t  = longint'($time) + (a ? longint'(T_RISE_PS) : longint'(T_FALL_PS));
        fork
          automatic logic        v  = a;
          automatic int unsigned id = n_sched;
          begin
            if (v) #(T_RISE_PS);
            else   #(T_FALL_PS);
            if (cancelled.exists(id)) cancelled.delete(id);
            else y_q = v;
          end
        join_none
      end
    end
  end

  assign y = y_q;

endmodule
