// tb_sha256_core -- checks the SHA-256 compression core against the FIPS 180-4
// examples "abc" (one block) and the 448-bit two-block message, plus random
// blocks against the reference model in tb_sha256_pkg; checks the 66-cycle
// block latency.
`timescale 1ns / 1ps
module tb_sha256_core;
  import tb_sha256_pkg::*;
  logic clk = 0, rst_n = 0, init = 0, start = 0, ready;
  logic [511:0] block;
  logic [255:0] digest;
  int checks = 0, failures = 0;

  sha256_core dut (.clk(clk), .rst_n(rst_n), .init(init), .start(start), .block(block),
                   .ready(ready), .digest(digest));

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

  task automatic run_block(input logic [511:0] b, input bit first, output int cyc);
    @(negedge clk);
    block = b; init = first; start = 1;
    @(negedge clk);
    init = 0; start = 0;
    cyc = 1;
    while (!ready) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    bit msg[$];
    logic [511:0] b;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // "abc", padded
    b = {24'h616263, 8'h80, 416'h0, 64'd24};
    run_block(b, 1, cyc);
    check(digest == 256'hba7816bf_8f01cfea_414140de_5dae2223_b00361a3_96177a9c_b410ff61_f20015ad, "abc digest");
    check(cyc == 66, $sformatf("block latency %0d, expected 66", cyc));
    // 448-bit message, two blocks
    b = {"abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq", 8'h80, 56'h0};
    run_block(b, 1, cyc);
    run_block({448'h0, 64'd448}, 0, cyc);
    check(digest == 256'h248d6a61_d20638b8_e5c02693_0c3e6039_a33ce459_64ff2167_f6ecedd4_19db06c1, "448-bit digest");
    // random 440-bit messages (fit one block with padding)
    for (int n = 0; n < 5; n++) begin
      msg.delete();
      for (int i = 0; i < 440; i++) msg.push_back(bit'($urandom_range(1, 0)));
      b = '0;
      for (int i = 0; i < 440; i++) b[511-i] = msg[i];
      b[511-440] = 1'b1;
      b[63:0] = 64'd440;
      run_block(b, 1, cyc);
      check(digest == sha256_bits(msg), "random block digest");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
