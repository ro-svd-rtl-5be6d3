// challenge_lfsr -- Galois LFSR that supplies the RO challenge bits.
//
// A W-bit Galois shift register with the maximal-length polynomial
// x^32 + x^22 + x^2 + x + 1 (taps mask 32'h8020_0003 for W = 32). `load`
// copies `seed` into the register (an all-zero seed, which would lock the
// register, is replaced by 1); `step` advances it by one position. Loading has
// priority over stepping. The whole state is presented on `state`; the entropy
// controller slices challenge bits out of it. The source design names the LFSR
// only; width, polynomial and seeding are this design's choices.
`timescale 1ns / 1ps
module challenge_lfsr #(
  parameter int              W     = 32,
  parameter logic [W-1:0]    TAPS  = W'(32'h8020_0003),
  parameter logic [W-1:0]    SEED  = W'(32'hACE1_1234)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] seed,
  input  logic         step,
  output logic [W-1:0] state
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      state <= (SEED == '0) ? W'(1) : SEED;
    else if (load)
      state <= (seed == '0) ? W'(1) : seed;
    else if (step)
      state <= state[0] ? ((state >> 1) ^ TAPS) : (state >> 1);
  end
endmodule
