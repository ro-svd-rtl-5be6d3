// row_binarizer -- row-average threshold that turns a matrix into bits.
//
// Each row of N signed Q15.16 elements is first stored (FILL, one element per
// accepted handshake) while its sum is accumulated. The module then emits the
// row as bits (EMIT, one per accepted handshake): bit = 1 when the element is
// greater than or equal to the row average, else 0. The comparison is made
// without a division as N * x >= sum(row). out_last marks the last bit of a
// row. in_ready is high only in FILL, so a row takes N cycles in and N out.
// The thresholding rule follows the source design (where its formula divides
// the row sum by the number of rows, the average over the N columns of the row
// is used here); the two-phase buffering is this design's choice.
`timescale 1ns / 1ps
module row_binarizer
  import rosvd_pkg::*;
#(
  parameter int N   = 1024,
  localparam int CW = (N > 1) ? $clog2(N) : 1,
  localparam int SW = DW + CW + 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  fix_t in_val,
  output logic out_valid,
  input  logic out_ready,
  output logic out_bit,
  output logic out_last
);
  fix_t                 rowbuf [N];
  logic [CW-1:0]        col;
  logic                 emit;
  logic signed [SW-1:0] sum;

  always_comb begin
    logic signed [SW-1:0] scaled;
    scaled    = SW'(rowbuf[col]) * SW'(N);
    in_ready  = !emit;
    out_valid = emit;
    out_bit   = (scaled >= sum);
    out_last  = emit && (col == CW'(N - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col  <= '0;
      emit <= 1'b0;
      sum  <= '0;
    end else if (!emit) begin
      if (in_valid) begin
        sum <= sum + SW'(in_val);
        if (col == CW'(N - 1)) begin
          col  <= '0;
          emit <= 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end else if (out_ready) begin
      if (col == CW'(N - 1)) begin
        col  <= '0;
        emit <= 1'b0;
        sum  <= '0;
      end else begin
        col <= col + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!emit && in_valid) rowbuf[col] <= in_val;
  end
endmodule
