// tb_ro_compare_unit -- four test oscillators of known, distinct periods in
// two groups; for every challenge (sel_a, sel_b) the response must say whether
// the selected group-A oscillator is faster than the selected group-B one.
`timescale 1ns / 1ps
module tb_ro_compare_unit;
  logic clk = 0, rst_n = 0, gate = 0, sample = 0;
  logic [1:0] ro_a = 0, ro_b = 0;
  logic sel_a = 0, sel_b = 0, resp;
  logic [15:0] ca, cb;
  int checks = 0, failures = 0;
  real ha [2] = '{1.50, 1.70};
  real hb [2] = '{1.60, 1.40};

  ro_compare_unit #(.RO_PER_GROUP(2), .CNT_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .ro_a(ro_a), .ro_b(ro_b), .sel_a(sel_a), .sel_b(sel_b),
    .gate(gate), .sample(sample), .resp(resp), .cnt_a(ca), .cnt_b(cb));

  always #5 clk = ~clk;
  always #(ha[0]) ro_a[0] = ~ro_a[0];
  always #(ha[1]) ro_a[1] = ~ro_a[1];
  always #(hb[0]) ro_b[0] = ~ro_b[0];
  always #(hb[1]) ro_b[1] = ~ro_b[1];

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

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 2; rep++)
      for (int s = 0; s < 4; s++) begin
        @(posedge clk);
        sel_a <= s[0]; sel_b <= s[1];
        @(posedge clk); gate <= 1;
        repeat (40) @(posedge clk);
        gate <= 0;
        repeat (4) @(posedge clk);
        sample <= 1;
        @(posedge clk); sample <= 0;
        @(posedge clk);
        check(resp == (ha[s[0]] < hb[s[1]]),
              $sformatf("sel_a=%0d sel_b=%0d resp=%0d counts %0d/%0d", s[0], s[1], resp, ca, cb));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
