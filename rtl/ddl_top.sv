// ddl_top: non-blocking programmable delay line.
//
// A pulse entering sig_in first passes an input pulse shrinking circuit
// (PSC_IN_LUTS LUTs, about 4.3 ns) that cuts every pulse to a standard
// width, then NUM_STAGES = 24 delay stages in series. Stage n adds the
// delay of STAGE_LUTS[n] LUTs when bit n of the control word is set and
// nothing (in this model) when it is clear, so the total delay is the sum
// of the selected stage delays. The last NUM_PSC_STAGES stages have a
// PSC_LUTS-LUT PSC in front of their chain that cuts pulses back to about
// 1 ns, so the pulse widening accumulated in the long chains does not
// reach the output. No clock takes part in the signal path: any number of
// pulses can be in flight, and the only dead time is the one set by pulse
// widths: pulses closer together than the widening of the longest stretch
// without a PSC merge.
//
// Delays: stage n's LUTs each take STAGE_LUT_PS_P[n] ps (default 270 ps
// for all, the published figure for long chains; a measured vector can be
// given instead), PSC LUTs take LUT_PS_P, and every LUT widens a pulse by
// SPREAD_PS_P.
//
// The control word lives in a 24-bit shift register loaded serially by
// an external microcontroller (cfg_* ports) and drives the stage
// multiplexers directly; ctrl_word shows it. Which control word gives which
// delay is decided outside the chip, from measured stage delays.
//
// Follows the published design: the stage count, the first ten and the
// last LUT counts, the PSC sizes and positions, the per-LUT delay and
// spreading. This design's own choices: the LUT counts of stages 10..22
// (see ddl_pkg), the serial protocol, and the input PSC sitting in the
// common path ahead of stage 0. The LUT chains and PSC delays are
// behavioural models with delays; everything else is synthesizable logic.
module ddl_top
  import ddl_pkg::*;
#(
  parameter lut_count_t  STAGE_LUTS_P   = STAGE_LUTS,
  parameter lut_ps_t     STAGE_LUT_PS_P = STAGE_LUT_PS,
  parameter int unsigned LUT_PS_P       = LUT_PS,
  parameter int unsigned SPREAD_PS_P    = SPREAD_PS,
  parameter int unsigned PSC_IN_LUTS_P  = PSC_IN_LUTS,
  parameter int unsigned PSC_LUTS_P     = PSC_LUTS,
  parameter int unsigned NUM_PSC_STG_P  = NUM_PSC_STAGES
) (
  input  logic       sig_in,
  output logic       sig_out,
  input  logic       cfg_clk,
  input  logic       cfg_rst_n,
  input  logic       cfg_shift_en,
  input  logic       cfg_sdi,
  output logic       cfg_sdo,
  output ctrl_word_t ctrl_word
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [NUM_STAGES:0] node;

  ctrl_shift_reg #(
    .WIDTH(NUM_STAGES)
  ) u_ctrl (
    .clk     (cfg_clk),
    .rst_n   (cfg_rst_n),
    .shift_en(cfg_shift_en),
    .sdi     (cfg_sdi),
    .sdo     (cfg_sdo),
    .word    (ctrl_word)
  );

  pulse_shrink #(
    .N_LUT    (PSC_IN_LUTS_P),
    .LUT_PS   (LUT_PS_P),
    .SPREAD_PS(SPREAD_PS_P)
  ) u_psc_in (
    .a(sig_in),
    .y(node[0])
  );

  for (genvar n = 0; n < NUM_STAGES; n++) begin : g_stage
    delay_stage #(
      .N_LUT    (STAGE_LUTS_P[n]),
      .HAS_PSC  (n >= NUM_STAGES - NUM_PSC_STG_P),
      .PSC_LUTS (PSC_LUTS_P),
      .PSC_LUT_PS(LUT_PS_P),
      .LUT_PS   (STAGE_LUT_PS_P[n]),
      .SPREAD_PS(SPREAD_PS_P)
    ) u_stage (
      .a  (node[n]),
      .sel(ctrl_word[n]),
      .y  (node[n+1])
    );
  end

  assign sig_out = node[NUM_STAGES];

endmodule
