// ro_counter -- edge counter clocked by a ring-oscillator output.
//
// The "Count" box of the entropy unit. The counter runs in the oscillator's
// own clock domain: the measurement window `gate`, produced in the system
// clock domain, is brought across with a two-flop synchroniser. On the first
// oscillator edge that sees the window open the counter restarts at 1; it then
// counts every rising edge while the window stays open and holds its value
// after it closes. The system domain reads `count` only after the window has
// been closed for a few system cycles, when the value is static, so no further
// synchronisation of the count is needed (a quasi-static transfer). The
// counter saturates instead of wrapping. Width and the synchroniser are this
// design's choices; the source design only names the counter.
`timescale 1ns / 1ps
module ro_counter #(
  parameter int CNT_W = 16
) (
  input  logic             ro_clk,
  input  logic             rst_n,
  input  logic             gate,
  output logic [CNT_W-1:0] count
);
  logic gate_m, gate_s, gate_q;

  always_ff @(posedge ro_clk or negedge rst_n) begin
    if (!rst_n) begin
      gate_m <= 1'b0;
      gate_s <= 1'b0;
      gate_q <= 1'b0;
    end else begin
      gate_m <= gate;
      gate_s <= gate_m;
      gate_q <= gate_s;
    end
  end

  always_ff @(posedge ro_clk or negedge rst_n) begin
    if (!rst_n)
      count <= '0;
    else if (gate_s && !gate_q)
      count <= CNT_W'(1);
    else if (gate_s && count != '1)
      count <= count + 1'b1;
  end
endmodule
