// tsvd_reconstruct -- truncated-SVD reconstruction of the authentication and
// stochastic matrices.
//
// Works on the results left by jacobi_svd: W = U*Sigma (column i is
// sigma_i * u_i), V, the squared singular values norm2[i] (unsorted) and the
// original response bits A.
//   SELECT  K_RAND passes over norm2 pick the column indices of the K_RAND
//           largest singular values, largest first (ties: lowest index).
//   MAC     for each element (r, c), row-major, K_RAND cycles accumulate
//           p_s = W[r][idx_s] * V[c][idx_s]:
//             auth = sum_{s < K_AUTH} p_s          (rank-K_AUTH matrix A_k)
//             rand = A[r][c] - sum_{s < K_RAND} p_s (A with the K_RAND
//                                                   principal components removed)
//   EMIT    the pair (auth_val, rand_val) is offered with a valid/ready
//           handshake; out_last marks the last element of a row.
// The stochastic matrix is formed as A - A_K, which equals U Sigma_kbar V^T up
// to rounding and needs K_RAND instead of N - K_RAND multiply-adds per element.
// One element takes K_RAND + 1 cycles when the sink is ready; SELECT takes
// K_RAND * (N + 1) cycles. sigma1_sq is norm2 of the largest component.
// K_AUTH = 1 (rank-one principal matrix) and K_RAND = 7 (seven principal
// components removed) are the source design's values; the A - A_K form, the
// selection scheme and the interface are this design's choices.
`timescale 1ns / 1ps
module tsvd_reconstruct
  import rosvd_pkg::*;
#(
  parameter int M      = 1024,
  parameter int N      = 1024,
  parameter int K_AUTH = 1,
  parameter int K_RAND = 7,
  localparam int RW    = (M > 1) ? $clog2(M) : 1,
  localparam int CW    = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic [RW-1:0] w_row,
  output logic [CW-1:0] w_col,
  input  fix_t          w_rdata,
  output logic [CW-1:0] v_row,
  output logic [CW-1:0] v_col,
  input  fix_t          v_rdata,
  output logic [CW-1:0] n_idx,
  input  acc_t          norm2_rdata,
  output logic [RW-1:0] b_row,
  output logic [CW-1:0] b_col,
  input  logic          b_rdata,
  output logic          out_valid,
  input  logic          out_ready,
  output fix_t          auth_val,
  output fix_t          rand_val,
  output logic          out_last,
  output logic          busy,
  output logic          done,
  output acc_t          sigma1_sq
);
  localparam int SW = $clog2(K_RAND + 1);

  typedef enum logic [2:0] {S_IDLE, S_SEL, S_SEL_END, S_MAC, S_EMIT, S_DONE} state_t;
  state_t state;

  logic [CW-1:0] idx [K_RAND];
  logic [N-1:0]  chosen;
  logic [SW-1:0] s;
  logic [CW-1:0] scan, best;
  acc_t          best_val;
  logic          best_ok;
  logic [RW-1:0] row;
  logic [CW-1:0] col;
  acc_t          acc_a, acc_r;
  acc_t          prod;

  always_comb begin
    n_idx = (state == S_SEL) ? scan : idx[0];
    w_row = row;
    w_col = idx[(s < SW'(K_RAND)) ? s : '0];
    v_row = col;
    v_col = w_col;
    b_row = row;
    b_col = col;
    prod  = fmul(w_rdata, v_rdata);
    out_valid = (state == S_EMIT);
    out_last  = (col == CW'(N - 1));
    busy      = (state != S_IDLE) && (state != S_DONE);
    done      = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      chosen    <= '0;
      s         <= '0;
      scan      <= '0;
      best      <= '0;
      best_val  <= '0;
      best_ok   <= 1'b0;
      row       <= '0;
      col       <= '0;
      acc_a     <= '0;
      acc_r     <= '0;
      auth_val  <= '0;
      rand_val  <= '0;
      sigma1_sq <= '0;
      for (int k = 0; k < K_RAND; k++) idx[k] <= '0;
    end else if (start) begin
      state   <= S_SEL;
      chosen  <= '0;
      s       <= '0;
      scan    <= '0;
      best_ok <= 1'b0;
      row     <= '0;
      col     <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: ;
        S_SEL: begin
          if (!chosen[scan] && (!best_ok || norm2_rdata > best_val)) begin
            best     <= scan;
            best_val <= norm2_rdata;
            best_ok  <= 1'b1;
          end
          if (scan == CW'(N - 1)) state <= S_SEL_END;
          else                    scan <= scan + 1'b1;
        end
        S_SEL_END: begin
          idx[s]       <= best;
          chosen[best] <= 1'b1;
          if (s == '0) sigma1_sq <= best_val;
          best_ok <= 1'b0;
          scan    <= '0;
          if (s == SW'(K_RAND - 1)) begin
            state <= S_MAC;
            s     <= '0;
            acc_a <= '0;
            acc_r <= '0;
          end else begin
            s     <= s + 1'b1;
            state <= S_SEL;
          end
        end
        S_MAC: begin
          if (s == SW'(K_RAND - 1)) begin
            auth_val <= fix_t'(acc_a + ((K_AUTH >= K_RAND) ? prod : acc_t'(0)));
            rand_val <= fix_t'((b_rdata ? acc_t'(FIX_ONE) : acc_t'(0)) - (acc_r + prod));
            state    <= S_EMIT;
          end else begin
            if (int'(s) < K_AUTH) acc_a <= acc_a + prod;
            acc_r <= acc_r + prod;
            s     <= s + 1'b1;
          end
        end
        S_EMIT: if (out_ready) begin
          s     <= '0;
          acc_a <= '0;
          acc_r <= '0;
          state <= S_MAC;
          if (col == CW'(N - 1)) begin
            col <= '0;
            row <= row + 1'b1;
            if (row == RW'(M - 1)) state <= S_DONE;
          end else begin
            col <= col + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  initial assert (K_AUTH >= 1 && K_AUTH <= K_RAND && K_RAND < N)
    else $error("need 1 <= K_AUTH <= K_RAND < N");
endmodule
