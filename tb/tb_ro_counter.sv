// tb_ro_counter -- drives the counter with test clocks of known period and
// checks the count after a window of known length (to within the +-1 edge of
// synchroniser phase), that it holds after the window and restarts on the
// next one.
`timescale 1ns / 1ps
module tb_ro_counter;
  logic clk = 0, ro = 0, rst_n = 0, gate = 0;
  logic [15:0] count;
  int checks = 0, failures = 0;
  real half = 1.5;

  ro_counter #(.CNT_W(16)) dut (.ro_clk(ro), .rst_n(rst_n), .gate(gate), .count(count));

  always #5 clk = ~clk;
  always #(half) ro = ~ro;

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

  task automatic window(input int cycles);
    @(posedge clk); gate <= 1;
    repeat (cycles) @(posedge clk);
    gate <= 0;
    repeat (4) @(posedge clk);
  endtask

  initial begin
    logic [15:0] held;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // 3 ns period, 200 ns window -> 66.7 edges
    window(20);
    check(count >= 65 && count <= 68, $sformatf("count %0d for 3 ns period", count));
    held = count;
    repeat (10) @(posedge clk);
    check(count == held, "count holds after window");
    // 4 ns period, 400 ns window -> 100 edges
    half = 2.0;
    window(40);
    check(count >= 99 && count <= 101, $sformatf("count %0d for 4 ns period", count));
    // short window restarts from 1
    window(2);
    check(count >= 4 && count <= 6, $sformatf("restart count %0d", count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
