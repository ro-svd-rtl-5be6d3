// tb_response_buffer -- random 16-bit groups in, random back-pressure out;
// every output word must be two consecutive groups, first group high, in
// order, with no loss or duplication; also checks the FIFO fills and stalls.
`timescale 1ns / 1ps
module tb_response_buffer;
  logic clk = 0, rst_n = 0, clear = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_bits = 0;
  logic [31:0] out_word;
  int checks = 0, failures = 0;
  logic [15:0] sent [$];
  int words = 0, stalls = 0;

  response_buffer #(.IN_W(16), .WORD_W(32), .DEPTH(4)) dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .in_valid(in_valid), .in_ready(in_ready), .in_bits(in_bits),
    .out_valid(out_valid), .out_ready(out_ready), .out_word(out_word));

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

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) sent.push_back(in_bits);
    if (in_valid && !in_ready) stalls++;
    if (out_valid && out_ready) begin
      logic [31:0] e;
      e = {sent.pop_front(), sent.pop_front()};
      check(out_word == e, $sformatf("word %0d: %h expected %h", words, out_word, e));
      words++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!out_valid, "empty after reset");
    for (int i = 0; i < 600; i++) begin
      in_valid  = ($urandom_range(3, 0) != 0);
      in_bits   = 16'($urandom);
      out_ready = (i < 100) ? 1'b0 : ($urandom_range(2, 0) != 0);
      @(negedge clk);
    end
    in_valid = 0;
    out_ready = 1;
    repeat (20) @(negedge clk);
    check(words > 150, $sformatf("%0d words passed", words));
    check(stalls > 0, "input stalled while the FIFO was full");
    check(!out_valid, "drained");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
