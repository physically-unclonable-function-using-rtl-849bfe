// wro_puf_pkg -- constants shared by the waveform ring-oscillator PUF.
//
// ID_BITS is the number of sampling flip-flops per RO pair and so the width of
// one captured ID word; 16 is the size of the measured chip. The oscillator
// timings are the defaults of the behavioural ring-oscillator model: RO1 runs
// near 1 GHz as stated for the chip, RO2 is set about 10 % faster
// (t1/t2 = 1.1, one of the two ratios used to illustrate the output pattern).
// The exact RO2 period is this design's choice.
package wro_puf_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned ID_BITS = 16;

  // Ring oscillator half periods and delay to the first rising edge (ps).
  localparam int unsigned RO1_HALF_PS  = 500;   // t1 = 1000 ps, ~1 GHz
  localparam int unsigned RO2_HALF_PS  = 455;   // t2 =  910 ps, t1/t2 ~ 1.1

  // Per-pair spread applied when more than one RO pair is instantiated,
  // standing in for the chip-to-chip / pair-to-pair process variation.
  localparam int          RO1_PAIR_STEP_PS = -31;
  localparam int          RO2_PAIR_STEP_PS = 17;

endpackage
