// aes_ctr_wrapper: AES-128 in counter mode, the PRG of RejSampPRG (line 1 of the
// QR-UOV RejSampPRG procedure).
//
// Buffer B1 (128 bits) takes the 16-byte seed, which is the AES key, as two 64-bit
// words on `seed_we` (first word = seed bytes 0..7, byte 0 in bits [7:0]). A
// `start` pulse makes the controller build the counter block
//     NONCE (64 bits) || IV (16 bits) || 48 zero bits
// and encrypt it; the lower 64 bits are then incremented once per block (counter
// mode). Each ciphertext is caught in buffer B2 (128 bits) and leaves as two
// 64-bit words on `dout` with `dvalid`, one per cycle, bytes 0..7 first, byte 0
// in bits [7:0]. This repeats until NWORDS words, ceil(tau/8), have left; the
// second half of a last, odd block is dropped. `done` pulses one cycle after the
// last word.
//
// Timing: one block takes 24 cycles (1 issue, 21 in the AES core, 2 writes); the
// controller waits for each block before it starts the next, which matches the
// ~25 cycles per block the paper's cycle count implies. With tau = 2916 (183
// blocks, 365 words) `done` is high 4391 cycles after the `start` cycle.
//
// From the paper: B1, B2, the internal controller, a 64-bit fixed nonce and a
// 64-bit counter made of a 2-byte IV followed by six zero bytes, two 64-bit writes
// per block. This design's choices: the nonce value (parameter NONCE), the byte
// order of the counter block (nonce in bytes 0..7, IV in bytes 8..9, big-endian
// increment of bytes 8..15), and issuing one block at a time.
module aes_ctr_wrapper
  import rejscore_pkg::*;
#(
  parameter int unsigned NBYTES = TAU,
  parameter int unsigned NWORDS = (NBYTES + 7) / 8,
  parameter logic [63:0] NONCE  = 64'h0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              seed_we,
  input  logic [DATA_W-1:0] seed_din,
  input  logic [15:0]       iv,
  input  logic              start,
  output logic [DATA_W-1:0] dout,
  output logic              dvalid,
  output logic              done,
  output logic              busy
);

  typedef enum logic [2:0] {S_IDLE, S_ISSUE, S_WAIT, S_WR0, S_WR1, S_DONE} state_e;
  state_e state;

  localparam int unsigned CW = $clog2(NWORDS + 1);

  logic [127:0] b1;        // seed, two words: b1[63:0] = word 0
  logic [127:0] b2;        // AES output block, FIPS byte order
  logic [63:0]  ctr;
  logic [CW-1:0] wcnt;
  logic [127:0] key, ct;
  logic          aes_ov;

  // seed bytes to AES key bytes (byte 0 of the key in bits [127:120])
  always_comb
    for (int i = 0; i < 16; i++) key[127 - 8*i -: 8] = b1[8*i +: 8];

  aes128_core u_aes (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (state == S_ISSUE),
    .key       (key),
    .pt        ({NONCE, ctr}),
    .out_valid (aes_ov),
    .ct        (ct)
  );

  always_ff @(posedge clk) begin
    if (seed_we) b1 <= {seed_din, b1[127:64]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      ctr   <= '0;
      wcnt  <= '0;
      b2    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          ctr   <= {iv, 48'h0};
          wcnt  <= '0;
          state <= S_ISSUE;
        end
        S_ISSUE: state <= S_WAIT;
        S_WAIT: if (aes_ov) begin
          b2    <= ct;
          state <= S_WR0;
        end
        S_WR0: begin
          wcnt  <= wcnt + 1'b1;
          state <= (wcnt + 1'b1 == CW'(NWORDS)) ? S_DONE : S_WR1;
        end
        S_WR1: begin
          wcnt  <= wcnt + 1'b1;
          ctr   <= ctr + 64'd1;
          state <= (wcnt + 1'b1 == CW'(NWORDS)) ? S_DONE : S_ISSUE;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // B2 bytes to a 64-bit word, byte 0 of the half in bits [7:0]
  always_comb begin
    dout = '0;
    for (int i = 0; i < 8; i++)
      dout[8*i +: 8] = (state == S_WR1) ? b2[127 - 8*(i + 8) -: 8] : b2[127 - 8*i -: 8];
  end

  assign dvalid = (state == S_WR0) || (state == S_WR1);
  assign done   = (state == S_DONE);
  assign busy   = (state != S_IDLE);

  // the core answers only while the controller waits for it
  a_ov_in_wait: assert property (@(posedge clk) disable iff (!rst_n) aes_ov |-> state == S_WAIT);

endmodule
