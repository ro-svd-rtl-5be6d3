// axi_lite_regs -- AXI4-Lite slave register file of the RO-SVD core.
//
// Control and status path between the processor and the core. Register map
// (byte addresses, 32-bit registers):
//   0x00 CTRL      write 1 to bit 0: start a generation (self-clearing pulse)
//   0x04 STATUS    bit 0 busy, bit 1 done (read only)
//   0x08 SEED      challenge LFSR seed (read/write)
//   0x0C SWEEPS    Jacobi sweeps used by the last run (read only)
//   0x10 ROTS      Jacobi rotations applied by the last run (read only)
//   0x14 SIG1_LO   sigma_1^2 bits 31:0  (Q.16, read only)
//   0x18 SIG1_HI   sigma_1^2 bits 63:32 (read only)
//   0x20..0x3C H1  authentication hash, word 0 = digest bits 255:224
//   0x40..0x5C H2  stochastic hash, same order
// A write is accepted when address and data are both valid (AWREADY and
// WREADY rise together for one cycle) and answered with BRESP OKAY; a read is
// answered one cycle after ARVALID with RRESP OKAY. Write strobes are
// honoured for SEED. Unmapped addresses read 0. The register map and the
// handshake timing are this design's choices; the source design states that
// its interface IP uses AXI4-Lite for control. BRESP and RRESP are constant
// OKAY. The two protocol assertions at the end use rst_n synchronously in
// `disable iff` while the registers use it as an asynchronous reset; lint
// notes the mixed use, which is intended (assertions are not hardware).
`timescale 1ns / 1ps
module axi_lite_regs #(
  parameter int          ADDR_W    = 8,
  parameter logic [31:0] SEED_INIT = 32'hACE1_1234
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output logic              start,
  output logic [31:0]       seed,
  input  logic              busy,
  input  logic              done,
  input  logic [15:0]       sweeps,
  input  logic [31:0]       rotations,
  input  logic [63:0]       sigma1_sq,
  input  logic [255:0]      h1,
  input  logic [255:0]      h2
);
  logic wr_en;

  always_comb begin
    s_axi_awready = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
    s_axi_wready  = s_axi_awready;
    wr_en         = s_axi_awready;
    s_axi_arready = !s_axi_rvalid;
    s_axi_bresp   = 2'b00;
    s_axi_rresp   = 2'b00;
  end

  function automatic logic [31:0] rd_mux(input logic [ADDR_W-1:0] addr);
    logic [7:0] a;
    a = 8'(addr);
    unique case (a) inside
      8'h00: return 32'h0;
      8'h04: return {30'h0, done, busy};
      8'h08: return seed;
      8'h0C: return {16'h0, sweeps};
      8'h10: return rotations;
      8'h14: return sigma1_sq[31:0];
      8'h18: return sigma1_sq[63:32];
      [8'h20:8'h3F]: return h1[255 - 32*int'(a[4:2]) -: 32];
      [8'h40:8'h5F]: return h2[255 - 32*int'(a[4:2]) -: 32];
      default: return 32'h0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start        <= 1'b0;
      seed         <= SEED_INIT;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      start <= 1'b0;
      if (wr_en) begin
        s_axi_bvalid <= 1'b1;
        unique case (8'(s_axi_awaddr))
          8'h00: start <= s_axi_wstrb[0] && s_axi_wdata[0];
          8'h08: for (int i = 0; i < 4; i++)
                   if (s_axi_wstrb[i]) seed[8*i +: 8] <= s_axi_wdata[8*i +: 8];
          default: ;
        endcase
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      if (s_axi_arvalid && s_axi_arready) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= rd_mux(s_axi_araddr);
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // Protocol rules: a response stays valid until it is accepted.
  assert property (@(posedge clk) disable iff (!rst_n) s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n) s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
endmodule
