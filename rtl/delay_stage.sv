// delay_stage: one stage of the delay line.
//
// The stage input splits in two. The delay branch runs through a chain of
// N_LUT LUTs (preceded by a pulse shrinking circuit when HAS_PSC is set);
// the zero-delay branch is a plain wire. A 2:1 multiplexer driven by the
// stage's control-word bit sel picks the branch: sel = 1 selects the delay
// branch, sel = 0 the zero-delay branch (the bit polarity is this design's
// choice). Both branches are always live, so a pulse entering the stage
// never waits for another.
//
// Timing: with sel = 0 the output follows the input with zero model delay.
// With sel = 1 a rising edge is delayed by N_LUT * LUT_PS and a pulse is
// widened by N_LUT * SPREAD_PS, after first being cut to at most
// PSC_LUTS * PSC_LUT_PS when HAS_PSC is set. sel is meant to be static while
// pulses travel; changing it mid-pulse can cut or duplicate an edge, as in
// the real multiplexer. The multiplexer's own LUT delay, which in hardware
// adds to every path alike, is left out of the model.
module delay_stage #(
  parameter int unsigned N_LUT     = 1,
  parameter bit          HAS_PSC   = 1'b0,
  parameter int unsigned PSC_LUTS  = 4,
  parameter int unsigned PSC_LUT_PS = 270,
  parameter int unsigned LUT_PS    = 270,
  parameter int unsigned SPREAD_PS = 25
) (
  input  logic a,
  input  logic sel,
  output logic y
);
  timeunit 1ps;
  timeprecision 1ps;

  logic branch_in;
  logic branch_out;

  if (HAS_PSC) begin : g_psc
    pulse_shrink #(
      .N_LUT    (PSC_LUTS),
      .LUT_PS   (PSC_LUT_PS),
      .SPREAD_PS(SPREAD_PS)
    ) u_psc (
      .a(a),
      .y(branch_in)
    );
  end else begin : g_no_psc
    assign branch_in = a;
  end

  lut_delay #(
    .N_LUT    (N_LUT),
    .LUT_PS   (LUT_PS),
    .SPREAD_PS(SPREAD_PS)
  ) u_tau (
    .a(branch_in),
    .y(branch_out)
  );

  always_comb y = sel ? branch_out : a;

endmodule
