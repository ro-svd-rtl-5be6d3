// tb_entropy_source -- four RO-pair units with oscillators whose delays
// differ by at least 40 ps fill a 4 x 8 response matrix. For every
// measurement the expected bits are worked out from a reference model of the
// challenge LFSR and the known oscillator delays (faster A oscillator -> 1).
// Also checks the number of measurements, the WINDOW+SETTLE+3 cycle period,
// `done`, the enable of the oscillators and back-pressure.
`timescale 1ns / 1ps
module tb_entropy_source;
  localparam int NS = 4, RPG = 2, M = 4, N = 8, WIN = 64, SET = 4;
  localparam int NRO = NS * RPG;
  logic clk = 0, rst_n = 0, start = 0, ready = 1;
  logic [31:0] seed = 32'h0BAD_F00D;
  logic [NRO-1:0] ro_a, ro_b;
  logic ro_en, rvalid, busy, done;
  logic [NS-1:0] rbits;
  int checks = 0, failures = 0;

  // Delay offsets: all distinct by >= 40 ps.
  function automatic int skew_a(int k); return (k * 97) % 17 * 40 - 320; endfunction
  function automatic int skew_b(int k); return ((k + 8) * 97) % 17 * 40 - 320; endfunction

  for (genvar k = 0; k < NRO; k++) begin : g_ro
    ro_cell #(.STAGE_PS(400), .SKEW_PS(skew_a(k)), .JITTER_PS(2), .NOISE_SEED(k + 1)) ra (.en(ro_en), .ro_out(ro_a[k]));
    ro_cell #(.STAGE_PS(400), .SKEW_PS(skew_b(k)), .JITTER_PS(2), .NOISE_SEED(k + 101)) rb (.en(ro_en), .ro_out(ro_b[k]));
  end

  entropy_source #(.NUM_SRC(NS), .RO_PER_GROUP(RPG), .CNT_W(16), .WINDOW(WIN), .SETTLE(SET), .M(M), .N(N)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .seed(seed), .ro_a(ro_a), .ro_b(ro_b), .ro_en(ro_en),
    .resp_valid(rvalid), .resp_ready(ready), .resp_bits(rbits), .busy(busy), .done(done));

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

  function automatic logic [31:0] lfsr_next(input logic [31:0] s);
    return s[0] ? ((s >> 1) ^ 32'h8020_0003) : (s >> 1);
  endfunction

  initial begin
    logic [31:0] l;
    logic [NS-1:0] exp_bits;
    int got, last_t, t, period_ok, stalls;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!ro_en && !busy && !done, "idle before start");
    start = 1;
    @(negedge clk);
    start = 0;
    check(ro_en && busy, "oscillators enabled while busy");
    l = seed;
    got = 0; last_t = 0; t = 0; period_ok = 1; stalls = 0;
    while (got < M * N / NS) begin
      // random back-pressure in the second half
      ready = (got < 4) ? 1'b1 : ($urandom_range(2, 0) != 0);
      @(posedge clk);
      t++;
      if (rvalid && ready) begin
        l = lfsr_next(l);
        for (int u = 0; u < NS; u++) begin
          int ia, ib;
          ia = u * RPG + int'(l[(2 * u) % 32]);
          ib = u * RPG + int'(l[(2 * u + 1) % 32]);
          exp_bits[NS-1-u] = (skew_a(ia) < skew_b(ib));
        end
        check(rbits == exp_bits, $sformatf("measurement %0d bits %b expected %b", got, rbits, exp_bits));
        if (got >= 1 && got < 4 && t - last_t != WIN + SET + 3) period_ok = 0;
        last_t = t;
        got++;
      end else if (rvalid) stalls++;
      @(negedge clk);
    end
    check(period_ok == 1, "measurement period is WINDOW+SETTLE+3 cycles");
    check(stalls > 0, "back-pressure exercised");
    @(negedge clk);
    check(done && !busy && !ro_en, "done after the last measurement");
    repeat (50) @(negedge clk);
    check(!rvalid, "no more responses after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
