// tb_challenge_lfsr -- compares the 32-bit LFSR with a bit-serial reference
// of the same polynomial, checks seeding (including the all-zero seed) and
// that an 8-bit instance with a primitive polynomial has period 255.
`timescale 1ns / 1ps
module tb_challenge_lfsr;
  logic clk = 0, rst_n = 0, load = 0, step = 0, load8 = 0, step8 = 0;
  logic [31:0] seed = 0, state;
  logic [7:0]  state8;
  int checks = 0, failures = 0;

  challenge_lfsr #(.W(32)) dut (.clk(clk), .rst_n(rst_n), .load(load), .seed(seed), .step(step), .state(state));
  challenge_lfsr #(.W(8), .TAPS(8'hB8), .SEED(8'h01)) dut8 (.clk(clk), .rst_n(rst_n), .load(load8), .seed(8'h01),
                                                           .step(step8), .state(state8));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Galois step for x^32 + x^22 + x^2 + x + 1 written out bit by bit.
  function automatic logic [31:0] ref_step(input logic [31:0] s);
    logic [31:0] n;
    logic fb;
    fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i+1];
    n[31] = fb;
    n[21] = s[22] ^ fb;
    n[1]  = s[2] ^ fb;
    n[0]  = s[1] ^ fb;
    return n;
  endfunction

  initial begin
    logic [31:0] r;
    int period;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(state == 32'hACE1_1234, "reset value");
    seed = 32'h1234_5678; load = 1;
    @(negedge clk); load = 0;
    check(state == 32'h1234_5678, "load");
    r = seed;
    step = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      r = ref_step(r);
      if (state != r) begin check(0, $sformatf("step %0d: %h vs %h", i, state, r)); break; end
    end
    check(state == r, "300 steps match reference");
    step = 0;
    seed = 0; load = 1;
    @(negedge clk); load = 0;
    check(state == 32'h1, "zero seed replaced by 1");
    // period of the 8-bit instance
    step8 = 1;
    period = 0;
    do begin @(negedge clk); period++; end while (state8 != 8'h01 && period < 1000);
    step8 = 0;
    check(period == 255, $sformatf("8-bit period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
