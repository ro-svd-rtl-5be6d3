// response_buffer -- packs response bits into words and queues them.
//
// The data buffer between the entropy units and the matrix consumer. Groups of
// IN_W response bits arrive with a valid/ready handshake; WORD_W/IN_W groups
// are concatenated into one word, the first group in the most significant
// position, and the word is pushed into a DEPTH-entry register FIFO. The
// output is a valid/ready word stream. `clear` empties the packer and FIFO.
// in_ready drops only when the FIFO is full and a word is about to be pushed.
// Latency from the last group of a word to out_valid is one cycle. The use of
// registers for the data buffer follows the source design; widths, depth and
// packing order are this design's choices.
`timescale 1ns / 1ps
module response_buffer #(
  parameter int IN_W   = 16,
  parameter int WORD_W = 32,
  parameter int DEPTH  = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [IN_W-1:0]   in_bits,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [WORD_W-1:0] out_word
);
  localparam int GROUPS = WORD_W / IN_W;
  localparam int GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1;
  localparam int PW     = $clog2(DEPTH);

  logic [WORD_W-IN_W-1:0] pack;
  logic [GW-1:0]     gcnt;
  logic [WORD_W-1:0] fifo [DEPTH];
  logic [PW-1:0]     wptr, rptr;
  logic [PW:0]       level;
  logic              push, pop, last_group, full;

  always_comb begin
    full       = (level == (PW+1)'(DEPTH));
    last_group = (gcnt == GW'(GROUPS - 1));
    in_ready   = !(last_group && full);
    push       = in_valid && in_ready && last_group;
    out_valid  = (level != '0);
    pop        = out_valid && out_ready;
    out_word   = fifo[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pack  <= '0;
      gcnt  <= '0;
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else if (clear) begin
      gcnt  <= '0;
      wptr  <= '0;
      rptr  <= '0;
      level <= '0;
    end else begin
      if (in_valid && in_ready) begin
        if (last_group) gcnt <= '0;
        else            gcnt <= gcnt + 1'b1;
        pack <= (WORD_W-IN_W)'({pack, in_bits});
      end
      if (push) wptr <= PW'((int'(wptr) + 1) % DEPTH);
      if (pop)  rptr <= PW'((int'(rptr) + 1) % DEPTH);
      level <= level + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) fifo[wptr] <= {pack, in_bits};
  end

  initial assert (WORD_W % IN_W == 0 && WORD_W > IN_W) else $error("WORD_W must be a multiple of IN_W, larger than it");
endmodule
