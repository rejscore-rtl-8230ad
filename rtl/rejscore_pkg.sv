// rejscore_pkg: constants and types shared by the RejSCore blocks.
//
// The numbers are the QR-UOV security level I (SL-I) parameter set: q = 127 (a
// Mersenne prime, so a byte is reduced by masking it with q), l = 3, V = 52,
// M = 18, so the sampler must produce l*V*M = 2808 field elements from a
// pseudorandom string of tau = 2916 bytes. All datapaths are 64 bits wide and the
// data memory holds 1024 words of 64 bits (8 bytes per word, byte 0 in bits
// [7:0]).
//
// The 26-bit instruction word INS is, from MSB to LSB, op(3) | wen(1) |
// waddr(10) | raddr(10) | SecLevel(2). The field widths and their order are the
// paper's; the numeric codes of op and SecLevel are this design's own choice.
package rejscore_pkg;

  // QR-UOV SL-I parameters
  parameter int unsigned Q     = 127;
  parameter int unsigned ELL   = 3;
  parameter int unsigned V_DIM = 52;
  parameter int unsigned M_DIM = 18;
  parameter int unsigned NOUT  = ELL * V_DIM * M_DIM;  // 2808 output elements
  parameter int unsigned TAU   = 2916;                 // pseudorandom bytes

  // datapath and memory
  parameter int unsigned DATA_W    = 64;
  parameter int unsigned MEM_DEPTH = 1024;
  parameter int unsigned ADDR_W    = 10;
  parameter int unsigned INS_W     = 26;

  // memory map (this design's choice): seed in words 0..1, pseudorandom bytes
  // from word 2 on; sampled elements overwrite the bytes in place.
  parameter int unsigned SEED_ADDR = 0;
  parameter int unsigned DATA_BASE = 2;

  typedef enum logic [2:0] {
    OP_NOP        = 3'd0,   // no operation: memory write (wen) and/or read (raddr)
    OP_REJSAMPPRG = 3'd1,   // AES-CTR expansion of the seed, then rejection sampling
    OP_REJSAMP    = 3'd2    // rejection sampling of bytes already in memory
  } op_e;

  typedef enum logic [1:0] {
    SL_I   = 2'd0,
    SL_III = 2'd1,
    SL_V   = 2'd2
  } sl_e;

  typedef struct packed {
    op_e               op;
    logic              wen;
    logic [ADDR_W-1:0] waddr;
    logic [ADDR_W-1:0] raddr;
    sl_e               sl;
  } ins_t;

  // decoded command, one cycle long
  typedef struct packed {
    logic              wr;     // write wdata to mem[waddr]
    logic              rd;     // read mem[raddr] to the host port
    logic              prg;    // start RejSampPRG
    logic              rs;     // start RejSamp
    logic              err;    // instruction refused (unsupported SL or op)
    logic [ADDR_W-1:0] waddr;
    logic [ADDR_W-1:0] raddr;
    logic [DATA_W-1:0] wdata;
  } cmd_t;

endpackage
