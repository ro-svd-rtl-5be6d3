// rosvd_pkg -- types, constants and arithmetic helpers shared by the RO-SVD blocks.
//
// Number formats (a design choice; the source design used floating point):
//   fix_t   : signed Q15.16 in 32 bits. Matrix elements, W = U*Sigma and V entries.
//   acc_t   : signed 64-bit accumulator in the same Q.16 scaling (products are
//             shifted right by FRAC before they are summed).
//   ang_t   : signed Q2.29 angle in radians (range +-4 rad).
// CORDIC: the arctangent table is round(atan(2^-i) * 2^29); the gain correction
// is round(prod_i 1/sqrt(1 + 2^-2i) * 2^30) = 652032874 (0.60725293...).
// SHA-256 constants are those of FIPS 180-4.
// Deliberate truncations that lint reports as unused bits: cordic_rotate keeps
// the low 32 bits of its gain-corrected results (rotations preserve length, so
// an element of W never exceeds the norm of a row of A, sqrt(N) <= 32 at the
// default size, far inside the Q15.16 range), and sha256_k uses only the low
// six bits of its round index. Modules that import the package but not every
// constant make lint report those constants as unused.
`timescale 1ns / 1ps
package rosvd_pkg;

  localparam int DW   = 32;
  localparam int FRAC = 16;
  localparam int AW   = 64;
  localparam int CORDIC_MAX_IT = 24;

  typedef logic signed [DW-1:0] fix_t;
  typedef logic signed [AW-1:0] acc_t;
  typedef logic signed [31:0]   ang_t;

  localparam fix_t FIX_ONE = fix_t'(1) <<< FRAC;
  localparam logic signed [31:0] CORDIC_GAIN_Q30 = 32'sd652032874;

  function automatic ang_t atan_tab(input int i);
    case (i)
      0:  return 32'sd421657428;  1:  return 32'sd248918915;
      2:  return 32'sd131521918;  3:  return 32'sd66762579;
      4:  return 32'sd33510843;   5:  return 32'sd16771758;
      6:  return 32'sd8387925;    7:  return 32'sd4194219;
      8:  return 32'sd2097141;    9:  return 32'sd1048575;
      default: return (i < 30) ? (32'sd1 <<< (29 - i)) : 32'sd0;
    endcase
  endfunction

  // Vectoring-mode CORDIC: angle of (x, y) for x >= 0, i.e. atan(y / x) in
  // (-pi/2, pi/2]. Two guard bits absorb the CORDIC growth of 1.65.
  function automatic ang_t cordic_atan(input acc_t x_in, input acc_t y_in, input int iters);
    logic signed [AW+1:0] x, y, xn, yn;
    ang_t z;
    x = {{2{x_in[AW-1]}}, x_in};
    y = {{2{y_in[AW-1]}}, y_in};
    z = '0;
    for (int i = 0; i < CORDIC_MAX_IT; i++) begin
      if (i < iters) begin
        if (y > 0) begin
          xn = x + (y >>> i);
          yn = y - (x >>> i);
          z  = z + atan_tab(i);
        end else begin
          xn = x - (y >>> i);
          yn = y + (x >>> i);
          z  = z - atan_tab(i);
        end
        x = xn;
        y = yn;
      end
    end
    return z;
  endfunction

  // Rotation-mode CORDIC with gain correction: returns (x cos t - y sin t,
  // x sin t + y cos t) for |t| <= pi/2.
  function automatic logic [2*DW-1:0] cordic_rotate(input fix_t x_in, input fix_t y_in,
                                                    input ang_t theta, input int iters);
    logic signed [DW+1:0] x, y, xn, yn;
    logic signed [DW+33:0] xs, ys;
    ang_t z;
    fix_t xo, yo;
    x = {{2{x_in[DW-1]}}, x_in};
    y = {{2{y_in[DW-1]}}, y_in};
    z = theta;
    for (int i = 0; i < CORDIC_MAX_IT; i++) begin
      if (i < iters) begin
        if (z >= 0) begin
          xn = x - (y >>> i);
          yn = y + (x >>> i);
          z  = z - atan_tab(i);
        end else begin
          xn = x + (y >>> i);
          yn = y - (x >>> i);
          z  = z + atan_tab(i);
        end
        x = xn;
        y = yn;
      end
    end
    xs = (x * CORDIC_GAIN_Q30 + (DW+34)'(64'sd1 <<< 29)) >>> 30;
    ys = (y * CORDIC_GAIN_Q30 + (DW+34)'(64'sd1 <<< 29)) >>> 30;
    xo = fix_t'(xs);
    yo = fix_t'(ys);
    return {xo, yo};
  endfunction

  // Q.16 product of two fix_t values, widened to the accumulator.
  function automatic acc_t fmul(input fix_t a, input fix_t b);
    acc_t p;
    p = acc_t'(a) * acc_t'(b);
    return p >>> FRAC;
  endfunction

  // SHA-256 round constants.
  function automatic logic [31:0] sha256_k(input int t);
    logic [31:0] k [64];
    k = '{32'h428a2f98, 32'h71374491, 32'hb5c0fbcf, 32'he9b5dba5, 32'h3956c25b, 32'h59f111f1, 32'h923f82a4, 32'hab1c5ed5,
          32'hd807aa98, 32'h12835b01, 32'h243185be, 32'h550c7dc3, 32'h72be5d74, 32'h80deb1fe, 32'h9bdc06a7, 32'hc19bf174,
          32'he49b69c1, 32'hefbe4786, 32'h0fc19dc6, 32'h240ca1cc, 32'h2de92c6f, 32'h4a7484aa, 32'h5cb0a9dc, 32'h76f988da,
          32'h983e5152, 32'ha831c66d, 32'hb00327c8, 32'hbf597fc7, 32'hc6e00bf3, 32'hd5a79147, 32'h06ca6351, 32'h14292967,
          32'h27b70a85, 32'h2e1b2138, 32'h4d2c6dfc, 32'h53380d13, 32'h650a7354, 32'h766a0abb, 32'h81c2c92e, 32'h92722c85,
          32'ha2bfe8a1, 32'ha81a664b, 32'hc24b8b70, 32'hc76c51a3, 32'hd192e819, 32'hd6990624, 32'hf40e3585, 32'h106aa070,
          32'h19a4c116, 32'h1e376c08, 32'h2748774c, 32'h34b0bcb5, 32'h391c0cb3, 32'h4ed8aa4a, 32'h5b9cca4f, 32'h682e6ff3,
          32'h748f82ee, 32'h78a5636f, 32'h84c87814, 32'h8cc70208, 32'h90befffa, 32'ha4506ceb, 32'hbef9a3f7, 32'hc67178f2};
    return k[t];
  endfunction

  localparam logic [255:0] SHA256_H0 = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                        32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

endpackage
