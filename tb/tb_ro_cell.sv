// tb_ro_cell -- checks the oscillator model: it is silent and low while
// disabled, and while enabled its number of rising edges over a fixed time
// matches the period STAGES*STAGE_PS+SKEW_PS (exactly without jitter, within
// a small tolerance with jitter).
`timescale 1ns / 1ps
module tb_ro_cell;
  logic en = 0;
  logic o0, o1;
  int checks = 0, failures = 0;
  int e0 = 0, e1 = 0;

  ro_cell #(.STAGES(4), .STAGE_PS(100), .SKEW_PS(20), .JITTER_PS(0)) dut0 (.en(en), .ro_out(o0));
  ro_cell #(.STAGES(4), .STAGE_PS(100), .SKEW_PS(-40), .JITTER_PS(10), .NOISE_SEED(7)) dut1 (.en(en), .ro_out(o1));

  always @(posedge o0) e0++;
  always @(posedge o1) e1++;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #50;
    check(o0 == 0 && o1 == 0, "outputs low while disabled");
    check(e0 == 0 && e1 == 0, "no edges while disabled");
    // Enabled for 1000 ns: period 840 ps -> 1190 rising edges (first at 840 ps);
    // with jitter period 720 ps on average -> ~1388.
    en = 1;
    #1000;
    en = 0;
    #10;
    check(e0 == 1190, $sformatf("jitter-free edges %0d, expected 1190", e0));
    check(e1 >= 1383 && e1 <= 1393, $sformatf("jittered edges %0d, expected 1388 +- 5", e1));
    e0 = 0; e1 = 0;
    #500;
    check(e0 == 0 && e1 == 0 && o0 == 0 && o1 == 0, "stops when disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
