// tb_axi_lite_regs -- AXI4-Lite master tasks write and read every register:
// seed with byte strobes, the start pulse, status bits, sweep/rotation
// counters, sigma_1^2 and all 16 hash words; unmapped addresses read 0, and
// the response signals hold until accepted.
`timescale 1ns / 1ps
module tb_axi_lite_regs;
  logic clk = 0, rst_n = 0;
  logic [7:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  logic start, busy = 0, done = 0;
  logic [31:0] seed;
  logic [255:0] h1, h2;
  logic [63:0] sig = 64'h0123_4567_89AB_CDEF;
  int checks = 0, failures = 0, starts = 0;

  axi_lite_regs #(.ADDR_W(8)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .start(start), .seed(seed), .busy(busy), .done(done), .sweeps(16'd7), .rotations(32'd1234),
    .sigma1_sq(sig), .h1(h1), .h2(h2));

  always #5 clk = ~clk;
  always @(posedge clk) if (start) starts++;

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

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s);
    @(negedge clk);
    awaddr = a; awvalid = 1; wdata = d; wstrb = s; wvalid = 1;
    do @(posedge clk); while (!awready);
    @(negedge clk);
    awvalid = 0; wvalid = 0;
    repeat (2) @(negedge clk);
    check(bvalid, "bvalid held until bready");
    bready = 1;
    @(posedge clk);
    @(negedge clk);
    bready = 0;
    check(bresp == 2'b00, "bresp OKAY");
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk);
    arvalid = 0;
    @(negedge clk);
    rready = 1;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(posedge clk);
    @(negedge clk);
    rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < 8; i++) begin
      h1[255-32*i -: 32] = 32'h1111_0000 + i;
      h2[255-32*i -: 32] = 32'h2222_0000 + i;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    axi_read(8'h08, d);  check(d == 32'hACE1_1234, "seed reset value");
    axi_write(8'h08, 32'hDEAD_BEEF, 4'hF);
    axi_read(8'h08, d);  check(d == 32'hDEAD_BEEF, "seed write");
    axi_write(8'h08, 32'h0000_5500, 4'b0010);
    axi_read(8'h08, d);  check(d == 32'hDEAD_55EF, "seed byte strobe");
    check(seed == 32'hDEAD_55EF, "seed output");
    axi_write(8'h00, 32'h1, 4'hF);
    check(starts == 1, "one start pulse");
    axi_write(8'h00, 32'h0, 4'hF);
    check(starts == 1, "writing 0 does not start");
    busy = 1; axi_read(8'h04, d); check(d == 32'h1, "status busy");
    busy = 0; done = 1; axi_read(8'h04, d); check(d == 32'h2, "status done");
    axi_read(8'h0C, d); check(d == 7, "sweeps");
    axi_read(8'h10, d); check(d == 1234, "rotations");
    axi_read(8'h14, d); check(d == 32'h89AB_CDEF, "sigma lo");
    axi_read(8'h18, d); check(d == 32'h0123_4567, "sigma hi");
    for (int i = 0; i < 8; i++) begin
      axi_read(8'(8'h20 + 4*i), d); check(d == 32'h1111_0000 + i, $sformatf("h1 word %0d", i));
      axi_read(8'(8'h40 + 4*i), d); check(d == 32'h2222_0000 + i, $sformatf("h2 word %0d", i));
    end
    axi_read(8'h70, d); check(d == 0, "unmapped reads 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
