// entropy_source -- matrix-based entropy acquisition from parallel RO-pair units.
//
// NUM_SRC ro_compare_units work in parallel and share one challenge LFSR. The
// controller (the "CONTROL" column of the source design's drawing) fills an
// M x N response matrix in row-major order, NUM_SRC adjacent bits per
// measurement:
//   STEP    advance the LFSR; each unit takes new challenge bits from it
//           (unit u reads SEL_W bits at offset 2*u*SEL_W for group A and
//           (2*u+1)*SEL_W for group B, modulo the LFSR width);
//   WIN     hold `gate` high for WINDOW system cycles while both selected ROs
//           of every unit are counted;
//   SETTLE  wait SETTLE cycles with the window closed so every count is static;
//   SAMPLE  all units register their response bits;
//   OUT     offer the NUM_SRC bits on resp_bits (bit NUM_SRC-1 is the left-most
//           matrix column of the group) with a valid/ready handshake.
// One measurement therefore takes WINDOW + SETTLE + 3 cycles when the sink is
// ready. `start` loads `seed` into the LFSR and begins a new matrix; `ro_en`
// enables the oscillators for the whole acquisition; `done` rises after the
// last group is accepted and stays high until the next start. The oscillators
// themselves are outside this module (see ro_cell). The unit structure follows
// the source design; NUM_SRC, the window, the fill order and the handshake are
// this design's choices. The raw counter values of the units are debug outputs
// and are left unconnected here on purpose.
`timescale 1ns / 1ps
module entropy_source #(
  parameter int NUM_SRC      = 16,
  parameter int RO_PER_GROUP = 2,
  parameter int CNT_W        = 16,
  parameter int WINDOW       = 64,
  parameter int SETTLE       = 4,
  parameter int M            = 1024,
  parameter int N            = 1024,
  localparam int SEL_W       = (RO_PER_GROUP > 1) ? $clog2(RO_PER_GROUP) : 1,
  localparam int NRO         = NUM_SRC * RO_PER_GROUP
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [31:0]        seed,
  input  logic [NRO-1:0]     ro_a,
  input  logic [NRO-1:0]     ro_b,
  output logic               ro_en,
  output logic               resp_valid,
  input  logic               resp_ready,
  output logic [NUM_SRC-1:0] resp_bits,
  output logic               busy,
  output logic               done
);
  localparam int NMEAS = (M * N) / NUM_SRC;
  localparam int MW    = $clog2(NMEAS + 1);
  localparam int TW    = $clog2(WINDOW + SETTLE + 1);

  typedef enum logic [2:0] {S_IDLE, S_STEP, S_WIN, S_SETTLE, S_SAMPLE, S_OUT, S_DONE} state_t;
  state_t state;

  logic [31:0]    lfsr;
  logic [TW-1:0]  tcnt;
  logic [MW-1:0]  meas;
  logic           gate, sample;
  logic [NUM_SRC-1:0] resp_raw;

  challenge_lfsr #(.W(32)) u_lfsr (
    .clk(clk), .rst_n(rst_n), .load(start), .seed(seed),
    .step(state == S_STEP), .state(lfsr)
  );

  for (genvar u = 0; u < NUM_SRC; u++) begin : g_unit
    localparam int OFF_A = (2 * u * SEL_W) % 32;
    localparam int OFF_B = ((2 * u + 1) * SEL_W) % 32;
    logic [SEL_W-1:0] sa, sb;
    always_comb begin
      for (int b = 0; b < SEL_W; b++) begin
        sa[b] = lfsr[(OFF_A + b) % 32];
        sb[b] = lfsr[(OFF_B + b) % 32];
      end
    end
    ro_compare_unit #(.RO_PER_GROUP(RO_PER_GROUP), .CNT_W(CNT_W)) u_unit (
      .clk(clk), .rst_n(rst_n),
      .ro_a(ro_a[u*RO_PER_GROUP +: RO_PER_GROUP]),
      .ro_b(ro_b[u*RO_PER_GROUP +: RO_PER_GROUP]),
      .sel_a(sa), .sel_b(sb), .gate(gate), .sample(sample),
      .resp(resp_raw[NUM_SRC-1-u]), .cnt_a(), .cnt_b()
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      tcnt  <= '0;
      meas  <= '0;
    end else if (start) begin
      state <= S_STEP;
      meas  <= '0;
      tcnt  <= '0;
    end else begin
      unique case (state)
        S_IDLE:   ;
        S_STEP:   begin state <= S_WIN; tcnt <= '0; end
        S_WIN:    if (tcnt == TW'(WINDOW - 1)) begin state <= S_SETTLE; tcnt <= '0; end
                  else tcnt <= tcnt + 1'b1;
        S_SETTLE: if (tcnt == TW'(SETTLE - 1)) state <= S_SAMPLE;
                  else tcnt <= tcnt + 1'b1;
        S_SAMPLE: state <= S_OUT;
        S_OUT:    if (resp_ready) begin
                    meas  <= meas + 1'b1;
                    state <= (meas == MW'(NMEAS - 1)) ? S_DONE : S_STEP;
                  end
        S_DONE:   ;
        default:  state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    gate       = (state == S_WIN);
    sample     = (state == S_SAMPLE);
    resp_valid = (state == S_OUT);
    resp_bits  = resp_raw;
    ro_en      = (state != S_IDLE) && (state != S_DONE);
    busy       = ro_en;
    done       = (state == S_DONE);
  end

  initial begin
    assert (N % NUM_SRC == 0) else $error("N must be a multiple of NUM_SRC");
    assert (WINDOW >= 1 && SETTLE >= 1) else $error("WINDOW and SETTLE must be at least 1");
  end
endmodule
