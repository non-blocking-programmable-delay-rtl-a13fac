// ddl_pkg: constants and types shared by the non-blocking programmable
// delay line.
//
// The delay line is a chain of NUM_STAGES stages. Stage n either passes its
// input straight through a 2:1 multiplexer (the zero-delay path) or sends it
// through a chain of STAGE_LUTS[n] LUTs first. One control-word bit per
// stage makes that choice. The last NUM_PSC_STAGES stages carry a pulse
// shrinking circuit (PSC) in front of their LUT chain, and one more PSC sits
// at the very input of the line.
//
// Numbers taken from the published design: 24 stages; LUT counts
// 1,1,2,2,3,3,4,4,5,5 for the first ten stages; 1729 LUTs in the last stage;
// a 15-LUT input PSC; 4-LUT PSCs before the last five stages; 270 ps per LUT
// for long chains; pulse spreading of about 25 ps per LUT. The thirteen LUT
// counts of stages 10..22 are not published, only that they grow
// geometrically by about 1.6; this package uses round(6 * 1.6^k), k = 0..12,
// which continues the 5,5 of stage 9 and puts the whole line at 6254 LUTs,
// close to the 6272 logic elements of the FPGA the design was built in.
package ddl_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned NUM_STAGES     = 24;
  localparam int unsigned NUM_PSC_STAGES = 5;
  localparam int unsigned PSC_IN_LUTS    = 15;
  localparam int unsigned PSC_LUTS       = 4;
  localparam int unsigned LUT_PS         = 270;
  localparam int unsigned SPREAD_PS      = 25;

  typedef int unsigned lut_count_t [NUM_STAGES];

  localparam lut_count_t STAGE_LUTS = '{
    1, 1, 2, 2, 3, 3, 4, 4, 5, 5,
    6, 10, 15, 25, 39, 63, 101, 161, 258, 412, 660, 1056, 1689,
    1729
  };

  // Average delay per LUT of each stage, in ps. Measured devices show
  // 350 +- 250 ps per LUT in short stages and 270 ps in long ones; the
  // default is a uniform 270 ps. A measured vector goes here to model a
  // particular chip; the spread between stages is what lets sums of stage
  // delays fall on a fine grid.
  typedef int unsigned lut_ps_t [NUM_STAGES];

  localparam lut_ps_t STAGE_LUT_PS = '{default: LUT_PS};

  typedef logic [NUM_STAGES-1:0] ctrl_word_t;

  // Nominal delay of the LUT chains selected by a control word, in ps:
  // the sum over the set bits of STAGE_LUTS[n] * lut_ps[n]. Multiplexers
  // and PSC gates are taken as zero-delay here, as they are in the models.
  function automatic longint unsigned word_delay_ps(ctrl_word_t w,
                                                    lut_ps_t lut_ps);
    longint unsigned d = 0;
    for (int n = 0; n < NUM_STAGES; n++)
      if (w[n]) d += longint'(STAGE_LUTS[n]) * lut_ps[n];
    return d;
  endfunction

endpackage
