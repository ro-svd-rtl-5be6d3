// ro_compare_unit -- one RO-pair entropy unit producing one response bit.
//
// Two groups of RO_PER_GROUP oscillators (RO_1 and RO_2 in the source design's
// drawing) each feed a multiplexer steered by challenge bits from the LFSR.
// The selected oscillator of each group clocks its own ro_counter during the
// measurement window `gate`. When the system side pulses `sample` (after the
// window has closed and settled), the two counts are compared and the response
// bit `resp` = (count of group A > count of group B) is registered in the
// system clock domain. The challenge may change only while `gate` is low; the
// controller guarantees this, so the muxed oscillator clocks do not glitch
// inside a window. Structure (mux, counters, comparator) follows the source
// design; the group size, the comparison sense and the sampling scheme are
// this design's choices.
`timescale 1ns / 1ps
module ro_compare_unit #(
  parameter int RO_PER_GROUP = 2,
  parameter int CNT_W        = 16,
  localparam int SEL_W       = (RO_PER_GROUP > 1) ? $clog2(RO_PER_GROUP) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [RO_PER_GROUP-1:0] ro_a,
  input  logic [RO_PER_GROUP-1:0] ro_b,
  input  logic [SEL_W-1:0]        sel_a,
  input  logic [SEL_W-1:0]        sel_b,
  input  logic                    gate,
  input  logic                    sample,
  output logic                    resp,
  output logic [CNT_W-1:0]        cnt_a,
  output logic [CNT_W-1:0]        cnt_b
);
  logic clk_a, clk_b;

  always_comb begin
    clk_a = ro_a[sel_a];
    clk_b = ro_b[sel_b];
  end

  ro_counter #(.CNT_W(CNT_W)) u_cnt_a (.ro_clk(clk_a), .rst_n(rst_n), .gate(gate), .count(cnt_a));
  ro_counter #(.CNT_W(CNT_W)) u_cnt_b (.ro_clk(clk_b), .rst_n(rst_n), .gate(gate), .count(cnt_b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      resp <= 1'b0;
    else if (sample) resp <= (cnt_a > cnt_b);
  end
endmodule
