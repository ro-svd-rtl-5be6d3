// sha256_core -- SHA-256 compression function, one round per clock.
//
// `init` loads the FIPS 180-4 initial hash value into the chaining state.
// `start` (while `ready`) takes a 512-bit message block (first word in bits
// 511:480), runs the 64 rounds over 64 cycles with a 16-word sliding message
// schedule, and adds the working variables to the chaining state in one more
// cycle; `ready` is low meanwhile and returns 65 cycles after the start cycle,
// so back-to-back blocks start every 66 cycles. `digest` holds
// the chaining state (H0 in bits 255:224). Padding is done by the caller (see
// bit_hasher). The source design only asks for "a hash function"; SHA-256 is
// this design's choice.
`timescale 1ns / 1ps
module sha256_core
  import rosvd_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         init,
  input  logic         start,
  input  logic [511:0] block,
  output logic         ready,
  output logic [255:0] digest
);
  logic [31:0] w [16];
  logic [31:0] a, b, c, d, e, f, g, h;
  logic [6:0]  t;
  logic        running;

  function automatic logic [31:0] rotr(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  logic [31:0] s0, s1, ch, maj, t1, t2, bs0, bs1, wnew;
  always_comb begin
    bs1  = rotr(e, 6) ^ rotr(e, 11) ^ rotr(e, 25);
    bs0  = rotr(a, 2) ^ rotr(a, 13) ^ rotr(a, 22);
    ch   = (e & f) ^ (~e & g);
    maj  = (a & b) ^ (a & c) ^ (b & c);
    t1   = h + bs1 + ch + sha256_k(int'(t[5:0])) + w[0];
    t2   = bs0 + maj;
    s0   = rotr(w[1], 7) ^ rotr(w[1], 18) ^ (w[1] >> 3);
    s1   = rotr(w[14], 17) ^ rotr(w[14], 19) ^ (w[14] >> 10);
    wnew = s1 + w[9] + s0 + w[0];
    ready = !running;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      digest  <= SHA256_H0;
      running <= 1'b0;
      t       <= '0;
      {a, b, c, d, e, f, g, h} <= '0;
      for (int i = 0; i < 16; i++) w[i] <= '0;
    end else if (!running) begin
      if (init) digest <= SHA256_H0;
      if (start) begin
        running <= 1'b1;
        t       <= '0;
        {a, b, c, d, e, f, g, h} <= init ? SHA256_H0 : digest;
        for (int i = 0; i < 16; i++) w[i] <= block[511 - 32*i -: 32];
      end
    end else if (t == 7'd64) begin
      digest  <= {digest[255:224] + a, digest[223:192] + b, digest[191:160] + c, digest[159:128] + d,
                  digest[127:96]  + e, digest[95:64]    + f, digest[63:32]    + g, digest[31:0]     + h};
      running <= 1'b0;
    end else begin
      h <= g;
      g <= f;
      f <= e;
      e <= d + t1;
      d <= c;
      c <= b;
      b <= a;
      a <= t1 + t2;
      for (int i = 0; i < 15; i++) w[i] <= w[i+1];
      w[15] <= wnew;
      t <= t + 1'b1;
    end
  end
endmodule
