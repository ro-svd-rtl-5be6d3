// ro_cell -- behavioural model of one LUT ring oscillator (not synthesizable).
//
// On the FPGA each oscillator is a loop of STAGES look-up tables: LUT 1 takes
// the enable and the fed-back output, LUT 2..LUT 4 are delay stages, and the
// loop is kept by the ALLOW_COMBINATORIAL_LOOPS constraint with LOC/BEL placement.
// Such a loop cannot be written as synthesizable RTL, so this model stands in
// for it in simulation: while `en` is high the output toggles every
// STAGES*STAGE_PS + SKEW_PS picoseconds, plus a uniform jitter of +-JITTER_PS
// drawn each half period
// from a per-instance pseudo-random generator seeded by NOISE_SEED. SKEW_PS represents the placement- and process-
// dependent delay of this particular loop (the intrinsic, device-specific
// part), JITTER_PS the thermal noise (the stochastic part). With `en` low the
// output is held at 0. The four-LUT loop follows the source design; the delay
// values are this model's own.
// Tool notes: lint reports the computed delay as possibly zero (it never is:
// it is clamped to at least 1 ps), and a synthesis front end that reads this
// model anyway sees the intended oscillation as a combinational loop through
// a latch; on the FPGA the loop is real and placed by hand.
`timescale 1ns / 1ps
module ro_cell #(
  parameter int STAGES    = 4,
  parameter int STAGE_PS  = 400,
  parameter int SKEW_PS   = 0,
  parameter int JITTER_PS = 3,
  parameter int NOISE_SEED = 1
) (
  input  logic en,
  output logic ro_out
);
  int half_ps;
  int unsigned noise;

  // Jitter source: a linear congruential generator, one draw per half period.
  initial noise = NOISE_SEED;

  initial ro_out = 1'b0;

  always begin
    if (!en) begin
      ro_out = 1'b0;
      wait (en);
    end
    noise   = noise * 32'd1664525 + 32'd1013904223;
    half_ps = STAGES * STAGE_PS + SKEW_PS
            + int'((noise >> 8) % (2 * JITTER_PS + 1)) - JITTER_PS;
    if (half_ps < 1) half_ps = 1;
    #(half_ps * 1ps);
    if (en) ro_out = ~ro_out;
  end
endmodule
