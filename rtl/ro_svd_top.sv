// ro_svd_top -- RO-SVD copyright-traceability core.
//
// Generates, on the device itself, two hashes from ring-oscillator entropy:
// H1, an authentication hash that depends on the device's intrinsic
// (placement/process) oscillator pattern, and H2, a stochastic hash from what
// remains of the same raw data once that pattern is removed. Data flow:
//
//   ro_cell x 2*NUM_SRC*RO_PER_GROUP  (oscillator loops, behavioural model)
//     -> entropy_source    M x N response matrix, NUM_SRC bits per measurement
//     -> response_buffer   packs bits into WORD_W-bit words
//     -> jacobi_svd        A = U Sigma V^T, leaves W = U Sigma, V, sigma_i^2
//     -> tsvd_reconstruct  A_k (K_AUTH largest components) and A - A_(K_RAND)
//     -> row_binarizer x2  row-average threshold -> bit matrices
//     -> bit_hasher x2     SHA-256 -> H1 (authentication), H2 (stochastic)
//   axi_lite_regs          start, seed, status, H1/H2 and sigma_1^2 read-back
//
// Sequencing: a write of 1 to CTRL starts the entropy source, clears the
// buffer and puts the SVD into its load phase so the matrix streams straight
// in; the hashers are initialised at the same time. When the SVD reports done
// the reconstruction is started; when both hashes are valid the core is done,
// STATUS.done is set and `irq` pulses for one cycle.
//
// Each oscillator gets a fixed delay offset computed from DEVICE_SEED and its
// index, standing in for the per-device process variation, and its own jitter
// generator seed; change DEVICE_SEED to simulate another chip.
// Some status outputs of the sub-blocks are not needed by the sequencer and
// stay unread (entropy busy/done, SVD busy and skip count, the reconstruction's
// last-of-row flag, reconstruction busy, hash block counts); lint lists them as unused.
// Over the registers only sigma_1^2, the sweep and rotation counts and the
// hashes are exported; the binarised authentication and stochastic matrices
// (X1, X2) leave as bit streams on the x1_*/x2_* ports, for a watermark
// embedding stage outside this core. The pipeline of blocks follows the source design;
// the on-chip storage of the matrices (instead of DDR behind an AXI master),
// the fixed-point SVD, SHA-256 and all sizes marked as assumptions in the
// block files are this design's own choices.
`timescale 1ns / 1ps
module ro_svd_top
  import rosvd_pkg::*;
#(
  parameter int M            = 1024,
  parameter int N            = 1024,
  parameter int NUM_SRC      = 16,
  parameter int RO_PER_GROUP = 2,
  parameter int CNT_W        = 16,
  parameter int WINDOW       = 64,
  parameter int SETTLE       = 4,
  parameter int WORD_W       = 32,
  parameter int MAX_SWEEPS   = 10,
  parameter int K_AUTH       = 1,
  parameter int K_RAND       = 7,
  parameter int STAGE_PS     = 400,
  parameter int SKEW_RANGE   = 60,
  parameter int JITTER_PS    = 3,
  parameter int DEVICE_SEED  = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [7:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  output logic        irq,
  // Binarised matrices as they enter the hashers, for an embedding stage
  // (one bit per cycle while *_valid; *_last marks the end of a matrix row).
  output logic        x1_valid,
  output logic        x1_bit,
  output logic        x1_last,
  output logic        x2_valid,
  output logic        x2_bit,
  output logic        x2_last
);
  localparam int NRO = NUM_SRC * RO_PER_GROUP;
  localparam int RW  = $clog2(M);
  localparam int CW  = $clog2(N);

  // Deterministic per-oscillator delay offset in [-SKEW_RANGE, SKEW_RANGE] ps.
  function automatic int ro_skew(input int seed, input int idx);
    int unsigned h;
    h = 32'(seed) * 32'd2654435761 + 32'(idx) * 32'd40503 + 32'd12345;
    h = h ^ (h >> 13);
    h = h * 32'd1103515245;
    h = h ^ (h >> 16);
    return int'(h % 32'(2 * SKEW_RANGE + 1)) - SKEW_RANGE;
  endfunction

  // ---------------- control and status ----------------
  logic        start, busy, done_q;
  logic [31:0] seed;

  typedef enum logic [1:0] {T_IDLE, T_SVD, T_RECON, T_DONE} top_state_t;
  top_state_t tstate;

  // ---------------- oscillators ----------------
  logic          ro_en;
  logic [NRO-1:0] ro_a, ro_b;

  for (genvar k = 0; k < NRO; k++) begin : g_ro
    ro_cell #(.STAGES(4), .STAGE_PS(STAGE_PS), .SKEW_PS(ro_skew(DEVICE_SEED, 2*k)),
              .JITTER_PS(JITTER_PS), .NOISE_SEED(DEVICE_SEED * 7919 + 2*k + 1))
      u_ro_a (.en(ro_en), .ro_out(ro_a[k]));
    ro_cell #(.STAGES(4), .STAGE_PS(STAGE_PS), .SKEW_PS(ro_skew(DEVICE_SEED, 2*k+1)),
              .JITTER_PS(JITTER_PS), .NOISE_SEED(DEVICE_SEED * 7919 + 2*k + 2))
      u_ro_b (.en(ro_en), .ro_out(ro_b[k]));
  end

  // ---------------- entropy acquisition ----------------
  logic               resp_valid, resp_ready, ent_busy, ent_done;
  logic [NUM_SRC-1:0] resp_bits;

  entropy_source #(.NUM_SRC(NUM_SRC), .RO_PER_GROUP(RO_PER_GROUP), .CNT_W(CNT_W),
                   .WINDOW(WINDOW), .SETTLE(SETTLE), .M(M), .N(N)) u_entropy (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(seed),
    .ro_a(ro_a), .ro_b(ro_b), .ro_en(ro_en),
    .resp_valid(resp_valid), .resp_ready(resp_ready), .resp_bits(resp_bits),
    .busy(ent_busy), .done(ent_done)
  );

  logic              word_valid, word_ready;
  logic [WORD_W-1:0] word;

  response_buffer #(.IN_W(NUM_SRC), .WORD_W(WORD_W), .DEPTH(8)) u_buffer (
    .clk(clk), .rst_n(rst_n), .clear(start),
    .in_valid(resp_valid), .in_ready(resp_ready), .in_bits(resp_bits),
    .out_valid(word_valid), .out_ready(word_ready), .out_word(word)
  );

  // ---------------- SVD ----------------
  logic          svd_busy, svd_done;
  logic [15:0]   sweeps;
  logic [31:0]   rotations, skips;
  logic [RW-1:0] w_row, b_row;
  logic [CW-1:0] w_col, v_row, v_col, n_idx, b_col;
  fix_t          w_rdata, v_rdata;
  acc_t          norm2_rdata;
  logic          b_rdata;

  jacobi_svd #(.M(M), .N(N), .WORD_W(WORD_W), .MAX_SWEEPS(MAX_SWEEPS)) u_svd (
    .clk(clk), .rst_n(rst_n), .start(start),
    .load_valid(word_valid), .load_ready(word_ready), .load_word(word),
    .busy(svd_busy), .done(svd_done), .sweeps(sweeps), .rotations(rotations), .skips(skips),
    .w_row(w_row), .w_col(w_col), .w_rdata(w_rdata),
    .v_row(v_row), .v_col(v_col), .v_rdata(v_rdata),
    .n_idx(n_idx), .norm2_rdata(norm2_rdata),
    .b_row(b_row), .b_col(b_col), .b_rdata(b_rdata)
  );

  // ---------------- reconstruction, binarisation, hashing ----------------
  logic  rec_start, rec_valid, rec_ready, rec_last, rec_busy, rec_done;
  fix_t  auth_val, rand_val;
  acc_t  sigma1_sq;

  tsvd_reconstruct #(.M(M), .N(N), .K_AUTH(K_AUTH), .K_RAND(K_RAND)) u_tsvd (
    .clk(clk), .rst_n(rst_n), .start(rec_start),
    .w_row(w_row), .w_col(w_col), .w_rdata(w_rdata),
    .v_row(v_row), .v_col(v_col), .v_rdata(v_rdata),
    .n_idx(n_idx), .norm2_rdata(norm2_rdata),
    .b_row(b_row), .b_col(b_col), .b_rdata(b_rdata),
    .out_valid(rec_valid), .out_ready(rec_ready), .auth_val(auth_val), .rand_val(rand_val),
    .out_last(rec_last), .busy(rec_busy), .done(rec_done), .sigma1_sq(sigma1_sq)
  );

  logic auth_in_ready, rand_in_ready;
  logic auth_bit_valid, auth_bit_ready, auth_bit, auth_bit_last;
  logic rand_bit_valid, rand_bit_ready, rand_bit, rand_bit_last;

  // Both binarisers take each element together.
  always_comb rec_ready = auth_in_ready && rand_in_ready;

  always_comb begin
    x1_valid = auth_bit_valid && auth_bit_ready;
    x1_bit   = auth_bit;
    x1_last  = auth_bit_last;
    x2_valid = rand_bit_valid && rand_bit_ready;
    x2_bit   = rand_bit;
    x2_last  = rand_bit_last;
  end

  row_binarizer #(.N(N)) u_bin_auth (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rec_valid && rec_ready), .in_ready(auth_in_ready), .in_val(auth_val),
    .out_valid(auth_bit_valid), .out_ready(auth_bit_ready), .out_bit(auth_bit), .out_last(auth_bit_last)
  );
  row_binarizer #(.N(N)) u_bin_rand (
    .clk(clk), .rst_n(rst_n),
    .in_valid(rec_valid && rec_ready), .in_ready(rand_in_ready), .in_val(rand_val),
    .out_valid(rand_bit_valid), .out_ready(rand_bit_ready), .out_bit(rand_bit), .out_last(rand_bit_last)
  );

  logic [255:0] h1, h2;
  logic         h1_valid, h2_valid;
  logic [31:0]  h1_blocks, h2_blocks;

  bit_hasher #(.MSG_BITS(M * N)) u_hash_auth (
    .clk(clk), .rst_n(rst_n), .start(start),
    .in_valid(auth_bit_valid), .in_ready(auth_bit_ready), .in_bit(auth_bit),
    .hash(h1), .hash_valid(h1_valid), .blocks(h1_blocks)
  );
  bit_hasher #(.MSG_BITS(M * N)) u_hash_rand (
    .clk(clk), .rst_n(rst_n), .start(start),
    .in_valid(rand_bit_valid), .in_ready(rand_bit_ready), .in_bit(rand_bit),
    .hash(h2), .hash_valid(h2_valid), .blocks(h2_blocks)
  );

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tstate <= T_IDLE;
      done_q <= 1'b0;
      irq    <= 1'b0;
    end else begin
      irq <= 1'b0;
      if (start) begin
        tstate <= T_SVD;
        done_q <= 1'b0;
      end else begin
        unique case (tstate)
          T_IDLE:  ;
          T_SVD:   if (svd_done) tstate <= T_RECON;
          T_RECON: if (rec_done && h1_valid && h2_valid) begin
                     tstate <= T_DONE;
                     done_q <= 1'b1;
                     irq    <= 1'b1;
                   end
          T_DONE:  ;
          default: tstate <= T_IDLE;
        endcase
      end
    end
  end

  always_comb begin
    rec_start = (tstate == T_SVD) && svd_done && !start;
    busy      = (tstate == T_SVD) || (tstate == T_RECON);
  end

  axi_lite_regs #(.ADDR_W(8)) u_regs (
    .clk(clk), .rst_n(rst_n),
    .s_axi_awaddr(s_axi_awaddr), .s_axi_awvalid(s_axi_awvalid), .s_axi_awready(s_axi_awready),
    .s_axi_wdata(s_axi_wdata), .s_axi_wstrb(s_axi_wstrb), .s_axi_wvalid(s_axi_wvalid),
    .s_axi_wready(s_axi_wready), .s_axi_bresp(s_axi_bresp), .s_axi_bvalid(s_axi_bvalid),
    .s_axi_bready(s_axi_bready), .s_axi_araddr(s_axi_araddr), .s_axi_arvalid(s_axi_arvalid),
    .s_axi_arready(s_axi_arready), .s_axi_rdata(s_axi_rdata), .s_axi_rresp(s_axi_rresp),
    .s_axi_rvalid(s_axi_rvalid), .s_axi_rready(s_axi_rready),
    .start(start), .seed(seed), .busy(busy), .done(done_q),
    .sweeps(sweeps), .rotations(rotations), .sigma1_sq(sigma1_sq), .h1(h1), .h2(h2)
  );
endmodule
