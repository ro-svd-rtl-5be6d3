// tb_ro_svd_top -- end-to-end run of the RO-SVD core at a 32 x 32 matrix.
//
// A processor model drives the AXI4-Lite port: it writes the seed, starts a
// generation, waits for the interrupt, and reads status, the SVD counters,
// sigma_1^2 and both hashes. Independently of the RTL the testbench
//   * records the response matrix as it leaves the entropy source,
//   * decomposes it with a floating-point one-sided Jacobi SVD,
//   * forms the rank-1 authentication matrix and the matrix with the seven
//     largest components removed, binarises both by the row-average rule and
//     compares them bit by bit with the bit streams entering the hashers
//     (a small number of differences is allowed where fixed-point rounding
//     decides a near-tie),
//   * hashes the recorded bit streams with a reference SHA-256 and requires
//     H1/H2 read over AXI to match exactly, and
//   * compares sigma_1^2 with its own.
// This is done for two seeds and for a repeat of the first seed. Every
// mechanism of the design is counted and must occur: measurements, Jacobi
// rotations and skipped (already orthogonal) pairs, back-pressure from the
// binarisers onto the reconstruction, hash blocks, AXI writes/reads and
// interrupts. The hashers are expected never to stall (checked as such).
`timescale 1ns / 1ps
module tb_ro_svd_top;
  import tb_sha256_pkg::*;
  localparam int M = 32, N = 32;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid, irq;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  logic x1_valid, x1_bit, x1_last, x2_valid, x2_bit, x2_last;
  int checks = 0, failures = 0;
  int n_meas = 0, n_bin_stall = 0, n_hash_stall = 0, n_irq = 0, n_wr = 0, n_rd = 0;

  ro_svd_top #(.M(M), .N(N)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .irq(irq),
    .x1_valid(x1_valid), .x1_bit(x1_bit), .x1_last(x1_last),
    .x2_valid(x2_valid), .x2_bit(x2_bit), .x2_last(x2_last));

  always #5 clk = ~clk;

  initial begin
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- taps ----------------
  bit A [M][N];
  bit s1[$], s2[$], p1[$], p2[$];
  int n_x1_last = 0;
  int mrow = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.resp_valid && dut.resp_ready) begin
      for (int c = 0; c < 16; c++) A[(n_meas * 16) / N][(n_meas * 16) % N + c] = dut.resp_bits[15 - c];
      n_meas++;
    end
    if (dut.rec_valid && !dut.rec_ready) n_bin_stall++;
    if ((dut.auth_bit_valid && !dut.auth_bit_ready) || (dut.rand_bit_valid && !dut.rand_bit_ready)) n_hash_stall++;
    if (dut.auth_bit_valid && dut.auth_bit_ready) s1.push_back(dut.auth_bit);
    if (dut.rand_bit_valid && dut.rand_bit_ready) s2.push_back(dut.rand_bit);
    if (x1_valid) begin p1.push_back(x1_bit); if (x1_last) n_x1_last++; end
    if (x2_valid) p2.push_back(x2_bit);
    if (irq) n_irq++;
  end

  // ---------------- AXI4-Lite master ----------------
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = 4'hF; wvalid = 1; bready = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk);
    bready = 0;
    n_wr++;
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk);
    rready = 0;
    n_rd++;
  endtask

  // ---------------- reference model ----------------
  function automatic real fabs(real x); return (x < 0) ? -x : x; endfunction

  task automatic reference(output bit b1 [M][N], output bit b2 [M][N], output real sig1);
    real W [M][N], V [N][N], nm [N], X1 [M][N], X2 [M][N], avg;
    int order [N];
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) W[r][c] = real'(A[r][c]);
    for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) V[r][c] = (r == c) ? 1.0 : 0.0;
    for (int sw = 0; sw < 40; sw++)
      for (int i = 0; i < N - 1; i++) for (int j = i + 1; j < N; j++) begin
        real al, be, ga, ze, t, cs, sn, xi, xj;
        al = 0; be = 0; ga = 0;
        for (int k = 0; k < M; k++) begin
          al += W[k][i] * W[k][i]; be += W[k][j] * W[k][j]; ga += W[k][i] * W[k][j];
        end
        if (fabs(ga) > 1e-12 * $sqrt(al * be) && fabs(ga) > 1e-15) begin
          ze = (be - al) / (2.0 * ga);
          t  = ((ze >= 0) ? 1.0 : -1.0) / (fabs(ze) + $sqrt(1.0 + ze * ze));
          cs = 1.0 / $sqrt(1.0 + t * t);
          sn = cs * t;
          for (int k = 0; k < M; k++) begin
            xi = W[k][i]; xj = W[k][j];
            W[k][i] = cs * xi - sn * xj; W[k][j] = sn * xi + cs * xj;
          end
          for (int k = 0; k < N; k++) begin
            xi = V[k][i]; xj = V[k][j];
            V[k][i] = cs * xi - sn * xj; V[k][j] = sn * xi + cs * xj;
          end
        end
      end
    for (int i = 0; i < N; i++) begin
      nm[i] = 0;
      for (int k = 0; k < M; k++) nm[i] += W[k][i] * W[k][i];
      order[i] = i;
    end
    for (int i = 0; i < N; i++) for (int j = i + 1; j < N; j++)
      if (nm[order[j]] > nm[order[i]]) begin int tmp; tmp = order[i]; order[i] = order[j]; order[j] = tmp; end
    sig1 = nm[order[0]];
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      real s7;
      X1[r][c] = W[r][order[0]] * V[c][order[0]];
      s7 = 0;
      for (int s = 0; s < 7; s++) s7 += W[r][order[s]] * V[c][order[s]];
      X2[r][c] = real'(A[r][c]) - s7;
    end
    for (int r = 0; r < M; r++) begin
      avg = 0;
      for (int c = 0; c < N; c++) avg += X1[r][c] / N;
      for (int c = 0; c < N; c++) b1[r][c] = (X1[r][c] >= avg - 1e-9);
      avg = 0;
      for (int c = 0; c < N; c++) avg += X2[r][c] / N;
      for (int c = 0; c < N; c++) b2[r][c] = (X2[r][c] >= avg - 1e-9);
    end
  endtask

  task automatic generate_and_check(input logic [31:0] seed, output logic [255:0] h1, output logic [255:0] h2,
                                    output bit amat [M][N]);
    logic [31:0] d, sw, rot, slo, shi;
    bit b1 [M][N], b2 [M][N];
    real sig1, rsig;
    int d1, d2, ones;
    s1.delete(); s2.delete(); p1.delete(); p2.delete();
    n_x1_last = 0;
    n_meas = 0;
    axi_write(8'h08, seed);
    axi_write(8'h00, 32'h1);
    axi_read(8'h04, d);
    check(d[0] == 1'b1, "busy after start");
    while (!irq) @(negedge clk);
    axi_read(8'h04, d);
    check(d == 32'h2, "status done");
    axi_read(8'h0C, sw);
    axi_read(8'h10, rot);
    axi_read(8'h14, slo);
    axi_read(8'h18, shi);
    for (int i = 0; i < 8; i++) begin
      axi_read(8'(8'h20 + 4*i), d); h1[255-32*i -: 32] = d;
      axi_read(8'(8'h40 + 4*i), d); h2[255-32*i -: 32] = d;
    end
    check(n_meas == M * N / 16, $sformatf("%0d measurements", n_meas));
    check(s1.size() == M * N && s2.size() == M * N, "hashers received M*N bits each");
    check(p1 == s1 && p2 == s2, "X1/X2 output ports carry the hashed bit streams");
    check(n_x1_last == M, "one row end per matrix row on x1_last");
    check(h1 == sha256_bits(s1), "H1 = SHA-256 of the binarised authentication matrix");
    check(h2 == sha256_bits(s2), "H2 = SHA-256 of the binarised stochastic matrix");
    ones = 0;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      ones += int'(A[r][c]);
      check(dut.u_svd.bit_mem[r*N + c] == A[r][c], "SVD holds the acquired matrix");
    end
    reference(b1, b2, sig1);
    d1 = 0; d2 = 0;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      if (b1[r][c] != s1[r*N + c]) d1++;
      if (b2[r][c] != s2[r*N + c]) d2++;
    end
    rsig = real'({shi, slo}) / 65536.0;
    $display("seed %h: %0d ones, %0d sweeps, %0d rotations, sigma1^2 %f (ref %f), bit differences auth %0d rand %0d",
             seed, ones, sw, rot, rsig, sig1, d1, d2);
    check(fabs(rsig - sig1) < 0.01 * sig1, "sigma_1^2 matches the floating-point SVD");
    check(d1 <= M * N / 50, $sformatf("authentication bits: %0d differences from the floating-point reference", d1));
    check(d2 <= M * N / 20, $sformatf("stochastic bits: %0d differences from the floating-point reference", d2));
    amat = A;
  endtask

  initial begin
    logic [255:0] h1a, h2a, h1b, h2b, h1c, h2c;
    bit ma [M][N], mb [M][N], mc [M][N];
    int diff_ab, diff_ac;
    repeat (3) @(negedge clk);
    rst_n = 1;
    generate_and_check(32'h1357_9BDF, h1a, h2a, ma);
    generate_and_check(32'h2468_ACE0, h1b, h2b, mb);
    generate_and_check(32'h1357_9BDF, h1c, h2c, mc);
    diff_ab = 0; diff_ac = 0;
    for (int r = 0; r < M; r++) for (int c = 0; c < N; c++) begin
      diff_ab += int'(ma[r][c] != mb[r][c]);
      diff_ac += int'(ma[r][c] != mc[r][c]);
    end
    $display("matrix differences: new seed %0d bits, same seed %0d bits; H1 repeat %s, H2 repeat %s",
             diff_ab, diff_ac, (h1a == h1c) ? "equal" : "differs", (h2a == h2c) ? "equal" : "differs");
    check(diff_ab > 0 && h2a != h2b, "a new seed gives a new matrix and a new stochastic hash");
    // mechanism coverage
    $display("coverage: measurements/run %0d, binariser stalls %0d, hasher stalls %0d, irq %0d, AXI writes %0d reads %0d",
             M * N / 16, n_bin_stall, n_hash_stall, n_irq, n_wr, n_rd);
    check(dut.u_svd.rotations > 0, "Jacobi rotations happened");
    check(dut.u_svd.skips > 0, "orthogonal pairs were skipped");
    check(n_bin_stall > 0, "binariser back-pressure happened");
    // The next binarised row needs N*(K_RAND+1) cycles, longer than one
    // 66-cycle compression, so the hashers never hold the binarisers back.
    check(n_hash_stall == 0, "hashers keep up with the binarisers");
    check(n_irq == 3, "one interrupt per run");
    check(int'(dut.u_hash_auth.blocks) == (M * N + 65 + 511) / 512, "SHA-256 block count for M*N bits plus padding");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
