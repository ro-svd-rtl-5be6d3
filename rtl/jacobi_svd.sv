// jacobi_svd -- one-sided (Hestenes) Jacobi singular value decomposition.
//
// Decomposes the M x N response matrix A = U * Sigma * V^T. The matrix is
// loaded as a stream of WORD_W-bit words holding its bits in row-major order
// (first bit in the word's most significant position); each bit becomes the
// element 0.0 or 1.0 in Q15.16 fixed point. V starts as the identity.
//
// A sweep visits every column pair (i, j), i < j, in cyclic order:
//   DOT    one row per cycle: alpha += a_ri^2, beta += a_rj^2, gamma += a_ri*a_rj;
//   ANGLE  if gamma^2 > alpha*beta * 2^(-2*TOL_SH) and |gamma| > GMIN the pair is
//          not yet orthogonal: the rotation angle theta = atan2(2 gamma,
//          beta - alpha) / 2, folded into [-pi/4, pi/4], is found by a
//          vectoring CORDIC;
//   ROT_A  one row per cycle, (a_ri, a_rj) is rotated by theta with a
//          rotation CORDIC, making columns i and j orthogonal;
//   ROT_V  the same rotation is applied to columns i and j of V.
// The sweeps stop after a sweep without any rotation, or after MAX_SWEEPS.
// A has then become W = A V = U * Sigma: column i of W is sigma_i * u_i. The
// NORM pass stores norm2[i] = ||w_i||^2 = sigma_i^2. The singular values are
// not sorted here; tsvd_reconstruct picks the largest ones.
//
// Timing: LOAD takes M*N cycles plus one handshake cycle per word, INIT N*N
// cycles, each pair M + 2 cycles when already orthogonal and 2M + N + 2 when
// rotated, NORM M*N cycles. `done` stays high from
// the end of NORM until the next `start`.
//
// Read ports (combinational, for the reconstruction stage): W element
// (w_row, w_col), V element (v_row, v_col), norm2[n_idx] and the original bit
// (b_row, b_col).
//
// The source design builds its Jacobi SVD with high-level synthesis, in
// floating point, and keeps the matrices in external DDR memory reached over
// AXI. This module keeps them in on-chip arrays and uses Q15.16 fixed point
// with CORDIC arithmetic, which is this design's own choice; the Jacobi method
// itself follows the source design.
`timescale 1ns / 1ps
module jacobi_svd
  import rosvd_pkg::*;
#(
  parameter int M          = 1024,
  parameter int N          = 1024,
  parameter int WORD_W     = 32,
  parameter int MAX_SWEEPS = 10,
  parameter int CORDIC_IT  = 20,
  parameter int TOL_SH     = 10,
  parameter int GMIN       = 4,
  localparam int RW        = (M > 1) ? $clog2(M) : 1,
  localparam int CW        = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              load_valid,
  output logic              load_ready,
  input  logic [WORD_W-1:0] load_word,
  output logic              busy,
  output logic              done,
  output logic [15:0]       sweeps,
  output logic [31:0]       rotations,
  output logic [31:0]       skips,
  input  logic [RW-1:0]     w_row,
  input  logic [CW-1:0]     w_col,
  output fix_t              w_rdata,
  input  logic [CW-1:0]     v_row,
  input  logic [CW-1:0]     v_col,
  output fix_t              v_rdata,
  input  logic [CW-1:0]     n_idx,
  output acc_t              norm2_rdata,
  input  logic [RW-1:0]     b_row,
  input  logic [CW-1:0]     b_col,
  output logic              b_rdata
);
  localparam int ME = M * N;
  localparam int VE = N * N;
  localparam int EW = $clog2(ME + 1);
  localparam int VW = $clog2(VE + 1);
  localparam int BW = $clog2(WORD_W + 1);

  typedef enum logic [3:0] {
    S_IDLE, S_LOAD, S_INIT, S_DOT, S_ANGLE, S_ROT_A, S_ROT_V, S_NEXT, S_NORM, S_DONE
  } state_t;
  state_t state;

  fix_t a_mem [ME];
  fix_t v_mem [VE];
  logic bit_mem [ME];
  acc_t norm2 [N];

  logic [WORD_W-1:0] wbuf;
  logic [BW-1:0]     wleft;
  logic [EW-1:0]     eidx;
  logic [VW-1:0]     vidx;
  logic [RW-1:0]     r;
  logic [CW-1:0]     ci, cj, vr, nc;
  acc_t              alpha, beta, gamma, nacc;
  ang_t              theta;
  logic              rot_in_sweep;

  // Element reads for the current step.
  fix_t ai, aj, vi, vj;
  always_comb begin
    ai = a_mem[int'(r) * N + int'(ci)];
    aj = a_mem[int'(r) * N + int'(cj)];
    vi = v_mem[int'(vr) * N + int'(ci)];
    vj = v_mem[int'(vr) * N + int'(cj)];
  end

  // Rotation decision and angle for the pair just measured.
  logic  rot_needed;
  ang_t  theta_next;
  always_comb begin
    logic signed [2*AW-1:0] g2, ab;
    acc_t x, y, ag;
    g2 = (2*AW)'(gamma) * (2*AW)'(gamma);
    ab = (2*AW)'(alpha) * (2*AW)'(beta);
    ag = (gamma < 0) ? -gamma : gamma;
    rot_needed = (ag > acc_t'(GMIN)) && (g2 > (ab >>> (2 * TOL_SH)));
    x = beta - alpha;
    y = gamma <<< 1;
    if (x < 0) begin
      x = -x;
      y = -y;
    end
    theta_next = cordic_atan(x, y, CORDIC_IT) >>> 1;
  end

  logic [2*DW-1:0] rot_a, rot_v;
  always_comb begin
    rot_a = cordic_rotate(ai, aj, theta, CORDIC_IT);
    rot_v = cordic_rotate(vi, vj, theta, CORDIC_IT);
  end

  always_comb begin
    load_ready  = (state == S_LOAD) && (wleft == '0);
    busy        = (state != S_IDLE) && (state != S_DONE);
    done        = (state == S_DONE);
    w_rdata     = a_mem[int'(w_row) * N + int'(w_col)];
    v_rdata     = v_mem[int'(v_row) * N + int'(v_col)];
    norm2_rdata = norm2[n_idx];
    b_rdata     = bit_mem[int'(b_row) * N + int'(b_col)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      wbuf         <= '0;
      wleft        <= '0;
      eidx         <= '0;
      vidx         <= '0;
      r            <= '0;
      ci           <= '0;
      cj           <= '0;
      vr           <= '0;
      nc           <= '0;
      alpha        <= '0;
      beta         <= '0;
      gamma        <= '0;
      nacc         <= '0;
      theta        <= '0;
      rot_in_sweep <= 1'b0;
      sweeps       <= '0;
      rotations    <= '0;
      skips        <= '0;
    end else if (start) begin
      state     <= S_LOAD;
      wleft     <= '0;
      eidx      <= '0;
      vidx      <= '0;
      sweeps    <= '0;
      rotations <= '0;
      skips     <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: ;
        S_LOAD: begin
          if (wleft == '0) begin
            if (load_valid) begin
              wbuf  <= load_word;
              wleft <= BW'(WORD_W);
            end
          end else begin
            wbuf  <= wbuf << 1;
            wleft <= wleft - 1'b1;
            eidx  <= eidx + 1'b1;
            if (eidx == EW'(ME - 1)) begin
              state <= S_INIT;
              wleft <= '0;
            end
          end
        end
        S_INIT: begin
          vidx <= vidx + 1'b1;
          if (vidx == VW'(VE - 1)) begin
            state        <= (N > 1) ? S_DOT : S_NORM;
            ci           <= '0;
            cj           <= CW'(1);
            r            <= '0;
            alpha        <= '0;
            beta         <= '0;
            gamma        <= '0;
            rot_in_sweep <= 1'b0;
            nc           <= '0;
            nacc         <= '0;
          end
        end
        S_DOT: begin
          alpha <= alpha + fmul(ai, ai);
          beta  <= beta  + fmul(aj, aj);
          gamma <= gamma + fmul(ai, aj);
          if (r == RW'(M - 1)) state <= S_ANGLE;
          else                 r <= r + 1'b1;
        end
        S_ANGLE: begin
          r     <= '0;
          vr    <= '0;
          theta <= theta_next;
          if (rot_needed) begin
            state        <= S_ROT_A;
            rot_in_sweep <= 1'b1;
            rotations    <= rotations + 1'b1;
          end else begin
            state <= S_NEXT;
            skips <= skips + 1'b1;
          end
        end
        S_ROT_A: begin
          if (r == RW'(M - 1)) state <= S_ROT_V;
          else                 r <= r + 1'b1;
        end
        S_ROT_V: begin
          if (vr == CW'(N - 1)) state <= S_NEXT;
          else                  vr <= vr + 1'b1;
        end
        S_NEXT: begin
          r     <= '0;
          alpha <= '0;
          beta  <= '0;
          gamma <= '0;
          state <= S_DOT;
          if (cj != CW'(N - 1)) begin
            cj <= cj + 1'b1;
          end else if (ci != CW'(N - 2)) begin
            ci <= ci + 1'b1;
            cj <= ci + CW'(2);
          end else begin
            // End of a sweep.
            sweeps <= sweeps + 1'b1;
            ci     <= '0;
            cj     <= CW'(1);
            rot_in_sweep <= 1'b0;
            if (!rot_in_sweep || int'(sweeps) + 1 >= MAX_SWEEPS) begin
              state <= S_NORM;
              nc    <= '0;
              nacc  <= '0;
            end
          end
        end
        S_NORM: begin
          // r walks the rows of column nc.
          if (r == RW'(M - 1)) begin
            r    <= '0;
            nacc <= '0;
            nc   <= nc + 1'b1;
            if (nc == CW'(N - 1)) state <= S_DONE;
          end else begin
            r    <= r + 1'b1;
            nacc <= nacc + fmul(a_mem[int'(r) * N + int'(nc)], a_mem[int'(r) * N + int'(nc)]);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Array writes (no reset: every entry is written by LOAD and INIT before use).
  always_ff @(posedge clk) begin
    if (!start) begin
      if (state == S_LOAD && wleft != '0) begin
        a_mem[int'(eidx)]   <= wbuf[WORD_W-1] ? FIX_ONE : fix_t'(0);
        bit_mem[int'(eidx)] <= wbuf[WORD_W-1];
      end
      if (state == S_INIT)
        v_mem[int'(vidx)] <= (int'(vidx) / N == int'(vidx) % N) ? FIX_ONE : fix_t'(0);
      if (state == S_ROT_A) begin
        a_mem[int'(r) * N + int'(ci)] <= rot_a[2*DW-1:DW];
        a_mem[int'(r) * N + int'(cj)] <= rot_a[DW-1:0];
      end
      if (state == S_ROT_V) begin
        v_mem[int'(vr) * N + int'(ci)] <= rot_v[2*DW-1:DW];
        v_mem[int'(vr) * N + int'(cj)] <= rot_v[DW-1:0];
      end
      if (state == S_NORM && r == RW'(M - 1))
        norm2[nc] <= nacc + fmul(a_mem[int'(r) * N + int'(nc)], a_mem[int'(r) * N + int'(nc)]);
    end
  end

  initial assert (M >= 2 && N >= 2) else $error("matrix must be at least 2 x 2");
endmodule
