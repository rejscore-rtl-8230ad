// rejsamp: iterative rejection sampler, QR-UOV RejSamp for a Mersenne prime q.
//
// The TAU pseudorandom bytes lie in memory from word BASE on, 8 per word (byte 0
// in bits [7:0]). The first NOUT bytes are the "head", the rest the "tail". Every
// byte is first masked with q ("Byte & q": 8 bytes of a word in parallel). A head
// byte below q is kept in its place. A head byte equal to q is replaced by the
// next not yet used tail byte that is below q, or by 0 when the tail is used up.
// The NOUT results are written back from word OUT_BASE on, 8 per word; by default
// OUT_BASE = BASE, so the elements overwrite the bytes in place, which is safe
// because a head word has always been read before its result is written.
//
// Datapath:
//   B1  128-bit shift register. Two 64-bit head words are loaded into it over
//       two cycles (after masking); "Byte < q" compares all 16 bytes with q in
//       parallel and gives a validity flag per byte. The byte-serial
//       controller consumes the flag of the bottom byte; the other 15 are
//       computed as the paper describes but have no reader (a lint warning).
//   The controller takes one head byte per cycle from the bottom of B1 and,
//   looking at its flag, either appends it to B2 or fetches a replacement.
//   T   64-bit tail buffer: one masked tail word, read from memory when a
//       replacement is needed and none is left in it; one tail byte is tested
//       per cycle.
//   B2  64-bit output buffer: when it holds 8 elements it is written to memory
//       in one cycle.
//
// Interface: `start` (one cycle, while idle) begins; the memory ports follow the
// read-latency-1 simple dual-port RAM; `done` pulses when the last word is
// written. `replaced` and `zero_fill` pulse for each head byte replaced from the
// tail and each one set to 0.
//
// Timing: one cycle per head byte, three cycles per load of B1 (16 bytes), one
// cycle per output word, and for replacements one cycle per tail byte tested
// plus two per tail word read. For TAU = 2916, NOUT = 2808 this is about 3690
// cycles, against the paper's 3893.
//
// From the paper: Byte & q, B1 filled by two 64-bit words over two cycles, the
// 16 parallel "Byte < q" checks, the controller collecting valid bytes until
// eight are there, B2 written in one cycle, and the result of Algorithm 2 (the
// QR-UOV RejSamp). The paper's text names no buffer for the tail bytes that
// Algorithm 2 uses as replacements: T is this design's addition to give exactly
// Algorithm 2's output; so are the one-byte-per-cycle schedule and in-place
// writing.
module rejsamp
  import rejscore_pkg::*;
#(
  parameter int unsigned PQ       = Q,
  parameter int unsigned PTAU     = TAU,
  parameter int unsigned PNOUT    = NOUT,
  parameter int unsigned BASE     = DATA_BASE,
  parameter int unsigned OUT_BASE = BASE,
  parameter int unsigned AW       = ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              mem_re,
  output logic [AW-1:0]     mem_raddr,
  input  logic [DATA_W-1:0] mem_rdata,
  output logic              mem_we,
  output logic [AW-1:0]     mem_waddr,
  output logic [DATA_W-1:0] mem_wdata,
  output logic              done,
  output logic              busy,
  output logic              replaced,
  output logic              zero_fill
);

  localparam logic [7:0]  QB         = 8'(PQ);
  localparam int unsigned TAIL_BYTES = PTAU - PNOUT;
  localparam int unsigned TAIL_WORD0 = BASE + PNOUT / 8;
  localparam int unsigned TAIL_SKIP  = PNOUT % 8;
  localparam int unsigned CW         = $clog2(PTAU + 1);

  typedef enum logic [2:0] {S_IDLE, S_LD0, S_LD1, S_LD2, S_PROC, S_TRD, S_DONE} state_e;
  state_e state;

  logic [127:0]  b1;
  logic [4:0]    b1_cnt;
  logic [15:0]   b1_ok;        // "Byte < q" flags
  logic [CW-1:0] h_unloaded;   // head bytes not yet loaded into B1
  logic [CW-1:0] h_left;       // head bytes not yet resolved
  logic [AW-1:0] h_word;
  logic [63:0]   b2;
  logic [3:0]    b2_cnt;
  logic [AW-1:0] o_word;
  logic [63:0]   t_buf;
  logic [3:0]    t_cnt;
  logic [AW-1:0] t_word;
  logic [CW-1:0] t_left;       // tail bytes not yet loaded into T
  logic          t_first;

  logic [63:0]   rmask;        // "Byte & q" of the word read
  logic [7:0]    t_byte;
  logic [CW-1:0] ld_n;         // bytes taken from the word being loaded
  logic [CW-1:0] t_avail, t_n;

  function automatic logic [CW-1:0] min_cw(input logic [CW-1:0] a, input logic [CW-1:0] b);
    return (a < b) ? a : b;
  endfunction

  always_comb begin
    for (int i = 0; i < 8; i++) rmask[8*i +: 8] = mem_rdata[8*i +: 8] & QB;
    for (int i = 0; i < 16; i++) b1_ok[i] = b1[8*i +: 8] < QB;
    t_byte  = t_buf[7:0];
    ld_n    = min_cw(h_unloaded, CW'(8));
    t_avail = t_first ? CW'(8 - TAIL_SKIP) : CW'(8);
    t_n     = min_cw(t_left, t_avail);
  end

  // memory ports
  always_comb begin
    mem_re    = 1'b0;
    mem_raddr = h_word;
    unique case (state)
      S_LD0: mem_re = 1'b1;
      S_LD1: begin
        mem_re    = (h_unloaded > ld_n);
        mem_raddr = h_word + 1'b1;
      end
      S_PROC: if (b2_cnt != 4'd8 && b1_cnt != 0 && !b1_ok[0] && t_cnt == 0 && t_left != 0) begin
        mem_re    = 1'b1;
        mem_raddr = t_word;
      end
      default: ;
    endcase
  end

  assign mem_we    = (state == S_PROC) && ((b2_cnt == 4'd8) || (b1_cnt == 0 && h_left == 0 && b2_cnt != 0));
  assign mem_waddr = o_word;
  assign mem_wdata = b2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      b1         <= '0;
      b1_cnt     <= '0;
      h_unloaded <= '0;
      h_left     <= '0;
      h_word     <= '0;
      b2         <= '0;
      b2_cnt     <= '0;
      o_word     <= '0;
      t_buf      <= '0;
      t_cnt      <= '0;
      t_word     <= '0;
      t_left     <= '0;
      t_first    <= 1'b0;
      replaced   <= 1'b0;
      zero_fill  <= 1'b0;
    end else begin
      replaced  <= 1'b0;
      zero_fill <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          b1_cnt     <= '0;
          h_unloaded <= CW'(PNOUT);
          h_left     <= CW'(PNOUT);
          h_word     <= AW'(BASE);
          b2         <= '0;
          b2_cnt     <= '0;
          o_word     <= AW'(OUT_BASE);
          t_cnt      <= '0;
          t_word     <= AW'(TAIL_WORD0);
          t_left     <= CW'(TAIL_BYTES);
          t_first    <= 1'b1;
          state      <= S_PROC;
        end
        S_LD0: state <= S_LD1;          // read of the first word issued
        S_LD1: begin                    // first word arrives: B1[63:0]
          b1         <= {64'h0, rmask};
          b1_cnt     <= 5'(ld_n);
          h_unloaded <= h_unloaded - ld_n;
          h_word     <= h_word + 1'b1;
          state      <= (h_unloaded > ld_n) ? S_LD2 : S_PROC;
        end
        S_LD2: begin                    // second word arrives: B1[127:64]
          b1[127:64] <= rmask;
          b1_cnt     <= b1_cnt + 5'(ld_n);
          h_unloaded <= h_unloaded - ld_n;
          h_word     <= h_word + 1'b1;
          state      <= S_PROC;
        end
        S_PROC: begin
          if (b2_cnt == 4'd8) begin     // B2 full: written this cycle
            b2     <= '0;
            b2_cnt <= '0;
            o_word <= o_word + 1'b1;
          end else if (b1_cnt == 0) begin
            if (h_left == 0) state <= S_DONE;  // a partial B2 is written this cycle
            else             state <= S_LD0;
          end else if (b1_ok[0]) begin  // valid head byte stays
            b2[8*b2_cnt[2:0] +: 8] <= b1[7:0];
            b2_cnt <= b2_cnt + 1'b1;
            b1     <= b1 >> 8;
            b1_cnt <= b1_cnt - 1'b1;
            h_left <= h_left - 1'b1;
          end else if (t_cnt != 0) begin  // test the next tail byte
            t_buf <= t_buf >> 8;
            t_cnt <= t_cnt - 1'b1;
            if (t_byte < QB) begin
              b2[8*b2_cnt[2:0] +: 8] <= t_byte;
              b2_cnt   <= b2_cnt + 1'b1;
              b1       <= b1 >> 8;
              b1_cnt   <= b1_cnt - 1'b1;
              h_left   <= h_left - 1'b1;
              replaced <= 1'b1;
            end
          end else if (t_left != 0) begin  // fetch a tail word
            state <= S_TRD;
          end else begin                // tail used up: the element is 0
            b2_cnt    <= b2_cnt + 1'b1;
            b1        <= b1 >> 8;
            b1_cnt    <= b1_cnt - 1'b1;
            h_left    <= h_left - 1'b1;
            zero_fill <= 1'b1;
          end
        end
        S_TRD: begin
          t_buf   <= t_first ? (rmask >> (8 * TAIL_SKIP)) : rmask;
          t_cnt   <= 4'(t_n);
          t_left  <= t_left - t_n;
          t_word  <= t_word + 1'b1;
          t_first <= 1'b0;
          state   <= S_PROC;
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign done = (state == S_DONE);
  assign busy = (state != S_IDLE);

  a_b2_bound: assert property (@(posedge clk) disable iff (!rst_n) b2_cnt <= 4'd8);
  a_b1_bound: assert property (@(posedge clk) disable iff (!rst_n) b1_cnt <= 5'd16);
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
                                 mem_we |-> mem_waddr < AW'(OUT_BASE + (PNOUT + 7) / 8));

endmodule
