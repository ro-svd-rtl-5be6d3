// tb_jacobi_svd -- loads 8 x 8 bit matrices through the word port and checks
// the decomposition with real arithmetic done here: W V^T reproduces A, V is
// orthonormal, the columns of W are mutually orthogonal, norm2 equals the
// squared column norms, their sum equals ||A||_F^2 (the number of ones), and
// the largest one equals the top eigenvalue of A^T A found by power
// iteration. Matrices: random (several), all ones (rank one, sigma^2 = 64)
// and a permutation (all sigma^2 = 1). Also checks the load time, the
// rotation/skip counters and the original-bit read port.
`timescale 1ns / 1ps
module tb_jacobi_svd;
  import rosvd_pkg::*;
  localparam int M = 8, N = 8, WW = 32;
  logic clk = 0, rst_n = 0, start = 0, load_valid = 0, load_ready, busy, done;
  logic [WW-1:0] load_word = 0;
  logic [15:0] sweeps;
  logic [31:0] rotations, skips;
  logic [2:0] w_row = 0, w_col = 0, v_row = 0, v_col = 0, n_idx = 0, b_row = 0, b_col = 0;
  fix_t w_rdata, v_rdata;
  acc_t norm2_rdata;
  logic b_rdata;
  int checks = 0, failures = 0;

  jacobi_svd #(.M(M), .N(N), .WORD_W(WW), .MAX_SWEEPS(10)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .load_valid(load_valid), .load_ready(load_ready),
    .load_word(load_word), .busy(busy), .done(done), .sweeps(sweeps), .rotations(rotations), .skips(skips),
    .w_row(w_row), .w_col(w_col), .w_rdata(w_rdata), .v_row(v_row), .v_col(v_col), .v_rdata(v_rdata),
    .n_idx(n_idx), .norm2_rdata(norm2_rdata), .b_row(b_row), .b_col(b_col), .b_rdata(b_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real fabs(real x); return (x < 0) ? -x : x; endfunction

  task automatic run(input bit a [M][N], input string name);
    real W [M][N], V [N][N], nm [N];
    real err, maxe, sum, ones, lam, x [N], y [N], nrm;
    int load_cycles, total;
    logic [M*N-1:0] flat;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) flat[M*N-1 - (r*N + c)] = a[r][c];
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    load_cycles = 0;
    for (int k = 0; k < M * N / WW; k++) begin
      load_word = flat[M*N-1 - k*WW -: WW];
      load_valid = 1;
      do begin @(posedge clk); load_cycles++; end while (!load_ready);
      @(negedge clk);
      load_valid = 0;
    end
    total = load_cycles;
    while (!done) begin @(negedge clk); total++; load_cycles += 0; end
    check(load_cycles <= M * N + M * N / WW + 2, $sformatf("%s: load took %0d cycles", name, load_cycles));
    check(sweeps >= 1 && sweeps <= 10, $sformatf("%s: %0d sweeps", name, sweeps));
    // read results
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      w_row = 3'(r); w_col = 3'(c); v_row = 3'(r); v_col = 3'(c); b_row = 3'(r); b_col = 3'(c);
      #1;
      W[r][c] = real'(w_rdata) / 65536.0;
      V[r][c] = real'(v_rdata) / 65536.0;
      if (b_rdata != a[r][c]) begin check(0, $sformatf("%s: bit port (%0d,%0d)", name, r, c)); end
    end
    for (int i = 0; i < N; i++) begin n_idx = 3'(i); #1; nm[i] = real'(norm2_rdata) / 65536.0; end
    maxe = 0;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      sum = 0;
      for (int k = 0; k < N; k++) sum += W[r][k] * V[c][k];
      err = fabs(sum - real'(a[r][c]));
      if (err > maxe) maxe = err;
    end
    check(maxe < 0.02, $sformatf("%s: |W V^T - A| max %f", name, maxe));
    maxe = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      sum = 0;
      for (int k = 0; k < N; k++) sum += V[k][i] * V[k][j];
      err = fabs(sum - ((i == j) ? 1.0 : 0.0));
      if (err > maxe) maxe = err;
    end
    check(maxe < 0.01, $sformatf("%s: |V^T V - I| max %f", name, maxe));
    maxe = 0;
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++) begin
      sum = 0;
      for (int k = 0; k < M; k++) sum += W[k][i] * W[k][j];
      err = fabs(sum);
      if (err > maxe) maxe = err;
    end
    check(maxe < 0.02, $sformatf("%s: off-diagonal of W^T W max %f", name, maxe));
    ones = 0; sum = 0;
    for (int i = 0; i < N; i++) begin
      real cn;
      cn = 0;
      for (int k = 0; k < M; k++) cn += W[k][i] * W[k][i];
      if (fabs(cn - nm[i]) > 0.01 + 0.005 * cn) check(0, $sformatf("%s: norm2[%0d] %f vs %f", name, i, nm[i], cn));
      sum += nm[i];
    end
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) ones += real'(a[r][c]);
    check(fabs(sum - ones) < 0.01 * ones + 0.05, $sformatf("%s: sum sigma^2 %f vs %f ones", name, sum, ones));
    // power iteration on A^T A
    for (int i = 0; i < N; i++) x[i] = 1.0 + 0.1 * i;
    lam = 0;
    for (int it = 0; it < 300; it++) begin
      for (int i = 0; i < N; i++) begin
        y[i] = 0;
        for (int j = 0; j < N; j++) begin
          real g;
          g = 0;
          for (int k = 0; k < M; k++) g += real'(a[k][i]) * real'(a[k][j]);
          y[i] += g * x[j];
        end
      end
      nrm = 0;
      for (int i = 0; i < N; i++) nrm += y[i] * y[i];
      nrm = $sqrt(nrm);
      lam = nrm;
      for (int i = 0; i < N; i++) x[i] = y[i] / nrm;
    end
    maxe = 0;
    for (int i = 0; i < N; i++) if (nm[i] > maxe) maxe = nm[i];
    check(fabs(maxe - lam) < 0.01 * lam, $sformatf("%s: sigma_1^2 %f vs power iteration %f", name, maxe, lam));
    $display("%s: %0d sweeps, %0d rotations, %0d skips, %0d cycles", name, sweeps, rotations, skips, total);
  endtask

  initial begin
    bit a [M][N];
    int tot_rot = 0, tot_skip = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) begin
      for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) a[r][c] = bit'($urandom_range(1, 0));
      run(a, $sformatf("random%0d", n));
      tot_rot += rotations; tot_skip += skips;
    end
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) a[r][c] = 1'b1;
    run(a, "ones");
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) a[r][c] = (c == (r * 3) % N);
    run(a, "permutation");
    check(rotations == 0, "permutation needs no rotation");
    check(tot_rot > 0 && tot_skip > 0, "rotations and skips both happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
