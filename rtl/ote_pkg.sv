// ote_pkg: types and constants shared by the offline test electronics.
//
// The strip signal of the ionisation-chamber simulator is a PWM on-time
// expressed in tenths of a percent of the PWM period (per mille, 0..1000).
// The four beam-centre situations of the quarter-strip approximation are
// an enum, and the 4 x 13 lookup table for sigma = 4 mm is given here as
// its reset contents. The table values are the "percentage to max value"
// columns of the chamber tables for sigma = 4 mm (100 MeV), multiplied by
// ten; the per-mille unit and its 10-bit width are this design's choice.
package ote_pkg;

  // Number of strips on one chamber axis (128 strips, 2 mm pitch).
  localparam int unsigned NUM_STRIPS_DEF = 128;
  // Strips covered by one beam pattern: centre strip +/- 6.
  localparam int unsigned LUT_TAPS       = 13;
  localparam int unsigned LUT_HALF       = 6;
  // PWM resolution: steps per period; one step = 0.1 % of the period.
  localparam int unsigned PWM_STEPS_DEF  = 1000;
  localparam int unsigned DUTY_W         = 10;

  typedef logic [DUTY_W-1:0] duty_t;

  // Where the rounded beam centre lies relative to the reference strip n.
  typedef enum logic [1:0] {
    SIT_CENTER = 2'd0,  // on the centre of strip n            (table 1)
    SIT_GAP    = 2'd1,  // in the gap between strips n-1 and n  (table 2)
    SIT_LEFTQ  = 2'd2,  // a quarter strip left of n's centre   (table 3)
    SIT_RIGHTQ = 2'd3   // a quarter strip right of n's centre  (table 4)
  } situation_e;

  typedef duty_t [LUT_TAPS-1:0] lut_row_t;

  // Reset contents, index 0 is strip n-6, index 12 is strip n+6.
  function automatic duty_t lut_default(situation_e sit, int unsigned tap);
    duty_t t1 [LUT_TAPS] = '{ 12,  47, 142, 334, 608, 885, 1000, 885, 608, 334, 142,  47, 12};
    duty_t t2 [LUT_TAPS] = '{ 26,  86, 230, 479, 783, 1000, 1000, 783, 479, 230,  86,  26,  6};
    duty_t t3 [LUT_TAPS] = '{ 17,  64, 180, 399, 693, 941, 1000, 832, 542, 277, 110,  35,  9};
    duty_t t4 [LUT_TAPS] = '{  9,  35, 110, 277, 542, 832, 1000, 941, 693, 399, 180,  64, 17};
    unique case (sit)
      SIT_CENTER: return t1[tap];
      SIT_GAP:    return t2[tap];
      SIT_LEFTQ:  return t3[tap];
      default:    return t4[tap];
    endcase
  endfunction

endpackage
