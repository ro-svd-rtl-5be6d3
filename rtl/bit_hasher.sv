// bit_hasher -- SHA-256 of a bit stream of known length.
//
// Hashes a message of MSG_BITS bits that arrives one bit per handshake, first
// bit first (it becomes the most significant bit of the first message byte).
// Bits are shifted into a 512-bit block register; each full block is handed
// to sha256_core and the input stalls (in_ready low) for the 66 cycles of the
// compression. After the last message bit the module appends the standard
// padding itself, one bit per cycle: a single 1, zeros up to bit 448 of a
// block, then the 64-bit message length. When the final block is compressed
// `hash_valid` rises and `hash` holds the digest until the next `start`.
// `start` clears the block and loads the initial hash value. The bit order is
// this design's choice; the source design does not specify the hash.
`timescale 1ns / 1ps
module bit_hasher #(
  parameter int MSG_BITS = 1024 * 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic         in_bit,
  output logic [255:0] hash,
  output logic         hash_valid,
  output logic [31:0]  blocks
);
  typedef enum logic [2:0] {P_MSG, P_ONE, P_ZERO, P_LEN, P_END} phase_t;
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_COMP, S_DONE} state_t;

  state_t        state;
  phase_t        phase;
  logic [511:0]  blk;
  logic [8:0]    bpos;
  logic [63:0]   mcount;
  logic [5:0]    lcnt;
  logic          core_start, core_ready, core_init, issued;
  logic [63:0]   msg_len;

  logic src_valid, src_bit, take;

  always_comb begin
    msg_len   = 64'(MSG_BITS);
    src_valid = 1'b0;
    src_bit   = 1'b0;
    in_ready  = 1'b0;
    if (state == S_RUN) begin
      unique case (phase)
        P_MSG:  begin src_valid = in_valid; src_bit = in_bit; in_ready = 1'b1; end
        P_ONE:  begin src_valid = 1'b1; src_bit = 1'b1; end
        P_ZERO: begin src_valid = (bpos != 9'd448); src_bit = 1'b0; end
        P_LEN:  begin src_valid = 1'b1; src_bit = msg_len[6'd63 - lcnt]; end
        default: ;
      endcase
    end
    take       = src_valid;
    core_start = (state == S_COMP) && !issued;
    core_init  = start;
    hash_valid = (state == S_DONE);
  end

  sha256_core u_core (
    .clk(clk), .rst_n(rst_n), .init(core_init), .start(core_start),
    .block(blk), .ready(core_ready), .digest(hash)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      phase  <= P_MSG;
      blk    <= '0;
      bpos   <= '0;
      mcount <= '0;
      lcnt   <= '0;
      issued <= 1'b0;
      blocks <= '0;
    end else if (start) begin
      state  <= S_RUN;
      phase  <= (MSG_BITS == 0) ? P_ONE : P_MSG;
      bpos   <= '0;
      mcount <= '0;
      lcnt   <= '0;
      issued <= 1'b0;
      blocks <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: ;
        S_RUN: begin
          if (take) begin
            blk  <= {blk[510:0], src_bit};
            bpos <= bpos + 1'b1;
            if (bpos == 9'd511) begin
              state <= S_COMP;
              bpos  <= '0;
            end
            unique case (phase)
              P_MSG: begin
                mcount <= mcount + 1'b1;
                if (mcount == msg_len - 1) phase <= P_ONE;
              end
              P_ONE:  phase <= P_ZERO;
              P_LEN: begin
                lcnt <= lcnt + 1'b1;
                if (lcnt == 6'd63) phase <= P_END;
              end
              default: ;
            endcase
          end else if (phase == P_ZERO && bpos == 9'd448) begin
            phase <= P_LEN;
          end
        end
        S_COMP: begin
          if (!issued) begin
            issued <= 1'b1;
          end else if (core_ready) begin
            issued <= 1'b0;
            blocks <= blocks + 1'b1;
            state  <= (phase == P_END) ? S_DONE : S_RUN;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
