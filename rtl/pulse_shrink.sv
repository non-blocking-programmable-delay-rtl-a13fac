// pulse_shrink: pulse shrinking circuit (PSC).
//
// The output is the input ANDed with an inverted copy of the input that
// has passed through a chain of N_LUT LUTs. A rising input edge therefore
// starts an output pulse at once, and the pulse ends either when the input
// falls or when the delayed copy arrives, whichever is first. Every output
// pulse is thus at most N_LUT * LUT_PS long, and a shorter input pulse is
// passed unchanged. This resets pulses that have been stretched by long LUT
// chains and so keeps the dead time of the line down.
//
// Structure (delay chain, inverter, AND with the undelayed input) follows
// the published schematic; the sizes are published too: 15 LUTs (about
// 4.3 ns) for the PSC at the input of the line and 4 LUTs (about 1 ns) for
// the PSCs in front of the last five stages. The delay chain is the
// behavioural lut_delay model; the gate itself is combinational and, like
// the multiplexers, is modelled with zero delay.
module pulse_shrink #(
  parameter int unsigned N_LUT     = 15,
  parameter int unsigned LUT_PS    = 270,
  parameter int unsigned SPREAD_PS = 25
) (
  input  logic a,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  logic a_dly;

  lut_delay #(
    .N_LUT    (N_LUT),
    .LUT_PS   (LUT_PS),
    .SPREAD_PS(SPREAD_PS)
  ) u_chain (
    .a(a),
    .y(a_dly)
  );

  always_comb y = a & ~a_dly;

endmodule
