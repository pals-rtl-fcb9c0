// ring_osc: behavioural model of a PALS node's local clock, a tunable ring
// oscillator whose ring doubles as the tapped delay line of the offset
// measurement (time-to-digital converter) of every neighbour.
//
// This is a behavioural model (not synthesisable): the real part is an analog
// ring of inverters, buffers and current-starved inverters. A synthesis tool
// that drops the delays leaves clk and the taps undriven; that is expected.
//
// How it works. The ring carries one wavefront that inverts on every lap; a
// lap is half a clock period. Starting from the earliest tap, the wavefront
// passes, in order:
//   tap Q^{+l} --2k--> ... --2k--> tap Q^{+1} --k--> top node --k--> tap Q^{-1}
//   --2k--> ... --2k--> tap Q^{-l} --starved inverters--> tap Q^{+l} (inverted)
// and the clock output is the top node delayed by delta. So, relative to the
// clock edge at L_w, tap Q^{+i} switches (2i-1)*kappa + delta earlier and tap
// Q^{-i} switches (2i-1)*kappa - delta later. A flip-flop clocked by a
// neighbour v that samples tap Q^{+-i} thus reads 1 exactly when
// L_w - L_v >= -+(2i-1)*kappa - delta, which is the threshold the measurement
// module must implement. With l = 1 this is the ring drawn for the 15 nm
// design: k and 2k segments, taps at L_w+3k+d, L_w+k+d, L_w-k+d, L_w-3k+d.
//
// The starved-inverter segment absorbs the rest of the half period. Its delay
// is chosen when the wavefront enters it, from the MODE input: slow mode gives
// a half period of HALF_PERIOD_FS/(1+DRIFT_PPM*1e-6), fast mode divides that
// by a further (1+MU_PPM*1e-6). A mode change therefore takes effect within
// one half period (T_osc). DRIFT_PPM models this oscillator's own frequency
// error, which the design assumes lies in [0, rho].
//
// Interface: en starts the ring (it stops at the end of the current lap when
// en falls, like a ring with a NAND enable); clk is the node clock; tap_pos[i-1]
// and tap_neg[i-1] are the taps for Q^{+i} and Q^{-i}, all with the polarity
// of clk (the inversions inside the ring are folded into the model).
//
// Follows the paper: ring structure, tap phases, kappa/delta/2 GHz/mu numbers.
// Own choices: the generalisation to more than two levels, the enable input,
// and modelling the starved-inverter response as a per-lap delay choice.
module ring_osc
  import pals_pkg::*;
#(
  parameter int unsigned LEVELS    = NUM_LEVELS,
  parameter int unsigned KAPPA     = KAPPA_FS,
  parameter int unsigned DELTA     = DELTA_FS,
  parameter int unsigned HALF      = HALF_PERIOD_FS,
  parameter int unsigned MU        = MU_PPM,
  parameter int unsigned DRIFT_PPM = 0
) (
  input  logic              en,
  input  logic              mode,
  output logic              clk,
  output logic [LEVELS-1:0] tap_pos,
  output logic [LEVELS-1:0] tap_neg
);
  timeunit 1fs;
  timeprecision 1fs;

  // Delay through the tapped part of the ring, from tap Q^{+l} to tap Q^{-l}.
  localparam longint unsigned TAPPED = longint'(4 * LEVELS - 2) * KAPPA;
  // Half periods in slow and fast mode, including this oscillator's drift.
  localparam longint unsigned HALF_SLOW =
      (longint'(HALF) * 1_000_000) / (64'd1_000_000 + longint'(DRIFT_PPM));
  localparam longint unsigned HALF_FAST =
      (HALF_SLOW * 1_000_000) / (64'd1_000_000 + longint'(MU));

  initial begin
    if (HALF_FAST <= TAPPED + longint'(DELTA) || KAPPA <= DELTA)
      $fatal(1, "ring_osc: inconsistent kappa, delta or half period");
  end

  logic level;       // polarity of the wavefront in the current lap

  initial begin
    level   = 1'b0;
    clk     = 1'b0;
    tap_pos = '0;
    tap_neg = '0;
  end

  // One lap of the wavefront per pass.
  always begin
      if (!en) @(posedge en);
      level = ~level;
      // Positive-side taps, from Q^{+l} down to Q^{+1}, 2*kappa apart.
      for (int i = LEVELS; i >= 2; i--) begin
        tap_pos[i-1] = level;
        #(2 * KAPPA);
      end
      tap_pos[0] = level;
      #(KAPPA);
      // The top node switches here; the clock output follows through the
      // delta-delay output inverter (whose inversion cancels that of the top
      // node). kappa > delta, so the clock edge comes before tap Q^{-1}.
      #(DELTA);
      clk = level;
      #(KAPPA - DELTA);
      // Negative-side taps, from Q^{-1} up to Q^{-l}, 2*kappa apart.
      for (int i = 1; i <= LEVELS; i++) begin
        tap_neg[i-1] = level;
        if (i < LEVELS) #(2 * KAPPA);
      end
      // Starved-inverter segment: the rest of the lap, set by the mode.
      if (mode) #(HALF_FAST - TAPPED);
      else      #(HALF_SLOW - TAPPED);
  end

endmodule
