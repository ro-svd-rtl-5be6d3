// tb_tsvd_reconstruct -- drives the reconstruction stage from arrays that
// stand for the SVD results (random W, V, bits and distinct random norm2).
// The expected top-K indices come from sorting norm2 here; every element of
// the authentication and stochastic outputs is recomputed with the same
// fixed-point products and compared exactly. Random back-pressure; checks
// out_last, sigma1_sq and the K_RAND+1 cycles per element.
`timescale 1ns / 1ps
module tb_tsvd_reconstruct;
  import rosvd_pkg::*;
  localparam int M = 4, N = 8, KA = 1, KR = 3;
  logic clk = 0, rst_n = 0, start = 0;
  logic [1:0] w_row, b_row;
  logic [2:0] w_col, v_row, v_col, n_idx, b_col;
  fix_t w_rdata, v_rdata, auth_val, rand_val;
  acc_t norm2_rdata, sigma1_sq;
  logic b_rdata, out_valid, out_ready = 1, out_last, busy, done;
  int checks = 0, failures = 0;

  fix_t Wm [M][N];
  fix_t Vm [N][N];
  acc_t Nm [N];
  bit   Bm [M][N];

  always_comb begin
    w_rdata     = Wm[w_row][w_col];
    v_rdata     = Vm[v_row][v_col];
    norm2_rdata = Nm[n_idx];
    b_rdata     = Bm[b_row][b_col];
  end

  tsvd_reconstruct #(.M(M), .N(N), .K_AUTH(KA), .K_RAND(KR)) dut (
    .clk(clk), .rst_n(rst_n), .start(start),
    .w_row(w_row), .w_col(w_col), .w_rdata(w_rdata), .v_row(v_row), .v_col(v_col), .v_rdata(v_rdata),
    .n_idx(n_idx), .norm2_rdata(norm2_rdata), .b_row(b_row), .b_col(b_col), .b_rdata(b_rdata),
    .out_valid(out_valid), .out_ready(out_ready), .auth_val(auth_val), .rand_val(rand_val),
    .out_last(out_last), .busy(busy), .done(done), .sigma1_sq(sigma1_sq));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int order [N];
    int got, t, last_t, gap_bad;
    longint ea, er, p;
    for (int trial = 0; trial < 3; trial++) begin
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
        Wm[r][c] = fix_t'($urandom_range(300000, 0)) - fix_t'(150000);
        Bm[r][c] = bit'($urandom_range(1, 0));
      end
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) Vm[r][c] = fix_t'($urandom_range(131072, 0)) - fix_t'(65536);
      for (int i = 0; i < N; i++) Nm[i] = acc_t'(i * 1000 + $urandom_range(999, 0)) * acc_t'(65536);
      for (int i = N - 1; i > 0; i--) begin  // shuffle
        int j; acc_t tmp;
        j = $urandom_range(i, 0);
        tmp = Nm[i]; Nm[i] = Nm[j]; Nm[j] = tmp;
      end
      for (int i = 0; i < N; i++) order[i] = i;
      for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
        if (Nm[order[j]] > Nm[order[i]]) begin int tmp; tmp = order[i]; order[i] = order[j]; order[j] = tmp; end
      if (trial == 0) rst_n = 0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      got = 0; t = 0; last_t = 0; gap_bad = 0;
      while (got < M * N) begin
        out_ready = (trial == 0) ? 1'b1 : ($urandom_range(2, 0) != 0);
        @(posedge clk);
        t++;
        if (out_valid && out_ready) begin
          int r, c;
          r = got / N; c = got % N;
          ea = 0; er = 0;
          for (int s = 0; s < KR; s++) begin
            p = (longint'(Wm[r][order[s]]) * longint'(Vm[c][order[s]])) >>> 16;
            if (s < KA) ea += p;
            er += p;
          end
          er = (Bm[r][c] ? 65536 : 0) - er;
          check(auth_val == fix_t'(ea) && rand_val == fix_t'(er),
                $sformatf("trial %0d (%0d,%0d): %0d/%0d expected %0d/%0d", trial, r, c, auth_val, rand_val, ea, er));
          check(out_last == (c == N - 1), "out_last");
          if (trial == 0 && got > 0 && t - last_t != KR + 1) gap_bad++;
          last_t = t;
          got++;
        end
        @(negedge clk);
      end
      if (trial == 0) check(gap_bad == 0, "one element every K_RAND+1 cycles");
      @(negedge clk);
      check(done && !busy, "done");
      check(sigma1_sq == Nm[order[0]], "sigma1_sq is the largest norm2");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
