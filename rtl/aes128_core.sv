// aes128_core: fully unrolled, pipelined AES-128 encryption.
//
// All ten rounds exist in hardware side by side, and each round is split over two
// register stages, so a block takes 1 + 10*2 = 21 cycles from `in_valid` to
// `out_valid`, and a new block may enter every cycle.
//   stage 0      : state = plaintext ^ key (initial AddRoundKey), key registered
//   round r, A   : SubBytes + ShiftRows of the state; in parallel the key
//                  schedule computes SubWord(RotWord(w3)) ^ Rcon of the key
//   round r, B   : MixColumns (not in round 10) + AddRoundKey with round key r,
//                  which is finished in the same stage by the XOR chain of the
//                  key schedule and registered for round r+1
// The key travels down its own pipeline next to the data, so every block may use
// a different key. Bytes are in FIPS-197 order, byte 0 in bits [127:120].
//
// The paper gives the fully unrolled structure, the parallel key-expansion
// pipeline, two cycles per round and the 21-cycle latency. Which operations sit
// in which of the two stages of a round is this design's choice. Only the valid
// flags are reset; the data registers need no reset.
module aes128_core
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [127:0] key,
  input  logic [127:0] pt,
  output logic         out_valid,
  output logic [127:0] ct
);

  localparam int unsigned NR = 10;

  // s[r], k[r], v[r]: state, round key r and valid after round r (r = 0: stage 0)
  // (packed arrays, so that synthesis keeps them as pipeline registers)
  logic [NR:0][127:0] s;
  logic [NR-1:0][127:0] k;     // the last round key is not passed on
  logic [NR:0]        v;
  // after the A stage of round r (index r-1)
  logic [NR-1:0][127:0] sa;
  logic [NR-1:0][127:0] ka;
  logic [NR-1:0][31:0]  ga;
  logic [NR-1:0]        va;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v[0] <= 1'b0;
    else        v[0] <= in_valid;
  end

  always_ff @(posedge clk) begin
    s[0] <= pt ^ key;
    k[0] <= key;
  end

  for (genvar r = 1; r <= NR; r++) begin : g_round
    logic [127:0] kn;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        va[r-1] <= 1'b0;
        v[r]    <= 1'b0;
      end else begin
        va[r-1] <= v[r-1];
        v[r]    <= va[r-1];
      end
    end

    // stage A: SubBytes + ShiftRows, SubWord/RotWord/Rcon of the key schedule
    always_ff @(posedge clk) begin
      sa[r-1] <= sub_shift(s[r-1]);
      ka[r-1] <= k[r-1];
      ga[r-1] <= key_g(k[r-1][31:0], rcon(r));
    end

    // XOR chain of the key schedule gives round key r
    always_comb begin
      kn[127:96] = ka[r-1][127:96] ^ ga[r-1];
      kn[95:64]  = ka[r-1][95:64]  ^ kn[127:96];
      kn[63:32]  = ka[r-1][63:32]  ^ kn[95:64];
      kn[31:0]   = ka[r-1][31:0]   ^ kn[63:32];
    end

    // stage B: MixColumns (rounds 1..9) + AddRoundKey
    if (r < NR) begin : g_mid
      always_ff @(posedge clk) begin
        s[r] <= mix_columns(sa[r-1]) ^ kn;
        k[r] <= kn;
      end
    end else begin : g_last
      always_ff @(posedge clk) s[r] <= sa[r-1] ^ kn;
    end
  end

  assign out_valid = v[NR];
  assign ct        = s[NR];

endmodule
