// tb_bit_hasher -- hashes bit streams of several lengths through bit_hasher,
// with random gaps in in_valid, and compares the digest and the number of
// compressed blocks with the FIPS 180-4 example and the reference model.
`timescale 1ns / 1ps
module tb_bit_hasher;
  import tb_sha256_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Three instances: 24 bits ("abc"), 448 bits (padding spills into a second
  // block) and 1500 random bits.
  localparam int L [3] = '{24, 448, 1500};
  logic         start [3];
  logic         in_valid [3], in_ready [3], in_bit [3], hv [3];
  logic [255:0] hash [3];
  logic [31:0]  blocks [3];

  for (genvar k = 0; k < 3; k++) begin : g_dut
    bit_hasher #(.MSG_BITS(L[k])) dut (
      .clk(clk), .rst_n(rst_n), .start(start[k]), .in_valid(in_valid[k]), .in_ready(in_ready[k]),
      .in_bit(in_bit[k]), .hash(hash[k]), .hash_valid(hv[k]), .blocks(blocks[k]));
  end

  task automatic feed(input int k, input bit msg[$]);
    int i;
    @(negedge clk);
    start[k] = 1;
    @(negedge clk);
    start[k] = 0;
    i = 0;
    while (i < msg.size()) begin
      in_valid[k] = ($urandom_range(3, 0) != 0);
      in_bit[k]   = msg[i];
      @(posedge clk);
      if (in_valid[k] && in_ready[k]) i++;
      @(negedge clk);
    end
    in_valid[k] = 0;
    while (!hv[k]) @(negedge clk);
  endtask

  initial begin
    bit msg[$];
    logic [23:0] abc;
    logic [447:0] m448;
    for (int k = 0; k < 3; k++) begin start[k] = 0; in_valid[k] = 0; in_bit[k] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    abc = 24'h616263;
    msg.delete();
    for (int i = 23; i >= 0; i--) msg.push_back(abc[i]);
    feed(0, msg);
    check(hash[0] == 256'hba7816bf_8f01cfea_414140de_5dae2223_b00361a3_96177a9c_b410ff61_f20015ad, "abc");
    check(blocks[0] == 1, "abc: one block");
    m448 = "abcdbcdecdefdefgefghfghighijhijkijkljklmklmnlmnomnopnopq";
    msg.delete();
    for (int i = 447; i >= 0; i--) msg.push_back(m448[i]);
    feed(1, msg);
    check(hash[1] == 256'h248d6a61_d20638b8_e5c02693_0c3e6039_a33ce459_64ff2167_f6ecedd4_19db06c1, "448-bit");
    check(blocks[1] == 2, "448-bit: two blocks");
    for (int n = 0; n < 2; n++) begin
      msg.delete();
      for (int i = 0; i < 1500; i++) msg.push_back(bit'($urandom_range(1, 0)));
      feed(2, msg);
      check(hash[2] == sha256_bits(msg), "1500 random bits");
      check(blocks[2] == 4, "1500 bits: four blocks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
