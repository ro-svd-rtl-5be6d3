// tb_row_binarizer -- random signed rows (including ties with the average)
// go through the row-average threshold; each output bit is compared with
// x >= mean(row) computed in real arithmetic, with random back-pressure on
// both sides; also checks out_last and the N-in / N-out row timing.
`timescale 1ns / 1ps
module tb_row_binarizer;
  import rosvd_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_bit, out_last;
  fix_t in_val = 0;
  int checks = 0, failures = 0;

  row_binarizer #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_val(in_val),
                              .out_valid(out_valid), .out_ready(out_ready), .out_bit(out_bit), .out_last(out_last));

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
    fix_t row [N];
    real mean;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      mean = 0.0;
      for (int c = 0; c < N; c++) begin
        row[c] = (r % 3 == 0) ? fix_t'(($urandom_range(2, 0)) * 65536) : fix_t'($urandom_range(400000, 0)) - fix_t'(200000);
        mean += real'(row[c]) / N;
      end
      // send the row
      for (int c = 0; c < N; ) begin
        in_valid = ($urandom_range(3, 0) != 0);
        in_val = row[c];
        @(posedge clk);
        if (in_valid && in_ready) c++;
        @(negedge clk);
      end
      in_valid = 0;
      check(!in_ready && out_valid, "row stored, now emitting");
      for (int c = 0; c < N; ) begin
        out_ready = ($urandom_range(3, 0) != 0);
        @(posedge clk);
        if (out_valid && out_ready) begin
          check(out_bit == (real'(row[c]) >= mean), $sformatf("row %0d col %0d", r, c));
          check(out_last == (c == N - 1), "out_last");
          c++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      check(in_ready && !out_valid, "back to fill");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
