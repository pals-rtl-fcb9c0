// pals_pkg: constants shared by the PALS clock-synchronisation blocks.
//
// A PALS node runs a tunable ring oscillator whose rate is either 1 (slow
// mode) or 1+mu (fast mode). Each node samples taps of its neighbours' rings
// with its own clock and turns the thermometer-coded offsets into the mode
// bit. The numbers below are the operating point of the 15 nm line-of-four
// implementation: 2 GHz clocks, kappa = 10 ps, delta = 5 ps, mu = 1e-4 and an
// oscillator drift bound rho = 1e-5. Time constants are in femtoseconds so
// that a rate change of 1e-4 on a 250 ps half period (25 fs) is representable.
//
// Threshold levels: with S = {0..l}, NUM_LEVELS = l+1. The implementation uses
// S = {0,1}, i.e. NUM_LEVELS = 2 and four flip-flops per link.
//
// Bit layout of one link's measurement word (width 2*NUM_LEVELS), most
// significant bit first, as the thermometer string Q^l .. Q^1 Q^-1 .. Q^-l:
//   meas[NUM_LEVELS + i - 1]  = Q^{+i}  (1 iff O_w >= -(2i-1)*kappa - delta)
//   meas[NUM_LEVELS - i]      = Q^{-i}  (1 iff O_w >= +(2i-1)*kappa - delta)
// where O_w = L_w - L_v is the offset of neighbour w as seen by node v.
package pals_pkg;
  timeunit 1fs;
  timeprecision 1fs;

  // Number of threshold levels per sign (l+1); the implementation uses S = {0,1}.
  localparam int unsigned NUM_LEVELS = 2;

  // Timing of the 15 nm implementation, in femtoseconds.
  localparam int unsigned KAPPA_FS       = 10_000;   // kappa = 10 ps
  localparam int unsigned DELTA_FS       = 5_000;    // delta = 5 ps
  localparam int unsigned HALF_PERIOD_FS = 250_000;  // 2 GHz -> 500 ps period

  // Rate parameters in parts per million.
  localparam int unsigned MU_PPM  = 100;  // mu  = 1e-4
  localparam int unsigned RHO_PPM = 10;   // rho = 1e-5

endpackage
