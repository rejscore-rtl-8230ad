// rejscore: RejSCore, a rejection-sampling coprocessor for QR-UOV (SL-I).
//
// From a 16-byte seed and a 2-byte IV it produces the l*V*M = 2808 elements of
// F_127 that QR-UOV's RejSampPRG derives from them: an AES-128-CTR wrapper
// expands the seed into tau = 2916 pseudorandom bytes, stored in a 1024 x 64-bit
// dual-port memory, and the RejSamp unit reduces them to field elements in
// place. A routing and control unit decodes 26-bit instructions and moves the
// data. All internal datapaths are 64 bits wide.
//
// Host interface:
//   ins[25:0], ins_valid, ins_ready  instruction (op|wen|waddr|raddr|SL), taken
//                                    when valid and ready are both high
//   din[63:0]                        data word that comes with a write
//   iv[15:0]                         IV of the AES-CTR counter block, sampled
//                                    when a RejSampPRG operation starts
//   dout[63:0], dout_valid           word read by a NOP instruction, one cycle
//                                    after it has been decoded
//   busy, done                       an operation runs; it has just ended
//   err                              the last instruction was refused
//   ev_replaced, ev_zero_fill        pulse when RejSamp replaces a rejected
//                                    element from the tail / sets it to 0
// Use: write the seed to words 0 and 1 (wen = 1), issue RejSampPRG, wait for
// `done`, then read the 351 result words from word 2 on.
//
// The block structure and the sizes are the paper's; the memory map, handshake
// and op/SecLevel codes are this design's.
module rejscore
  import rejscore_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ins_valid,
  input  logic [INS_W-1:0]  ins,
  input  logic [DATA_W-1:0] din,
  input  logic [15:0]       iv,
  output logic              ins_ready,
  output logic [DATA_W-1:0] dout,
  output logic              dout_valid,
  output logic              busy,
  output logic              done,
  output logic              err,
  output logic              ev_replaced,
  output logic              ev_zero_fill
);

  cmd_t cmd;
  logic idle;

  logic              mem_we, mem_re;
  logic [ADDR_W-1:0] mem_waddr, mem_raddr;
  logic [DATA_W-1:0] mem_wdata, mem_rdata;

  logic              seed_we, prg_start, prg_dvalid, prg_done, prg_busy;
  logic [DATA_W-1:0] seed_din, prg_dout;

  logic              rs_start, rs_done, rs_busy, rs_replaced, rs_zero;
  logic              rs_mem_re, rs_mem_we;
  logic [ADDR_W-1:0] rs_mem_raddr, rs_mem_waddr;
  logic [DATA_W-1:0] rs_mem_wdata;

  ins_decoder u_dec (
    .clk, .rst_n, .ins_valid, .ins, .din,
    .core_idle (idle),
    .ins_ready,
    .cmd
  );

  rejscore_ctrl u_ctrl (
    .clk, .rst_n, .cmd, .idle, .busy, .done,
    .host_dout   (dout),
    .host_dvalid (dout_valid),
    .mem_we, .mem_waddr, .mem_wdata, .mem_re, .mem_raddr, .mem_rdata,
    .seed_we, .seed_din, .prg_start, .prg_dout, .prg_dvalid, .prg_done,
    .rs_start, .rs_mem_re, .rs_mem_raddr, .rs_mem_we, .rs_mem_waddr, .rs_mem_wdata,
    .rs_done
  );

  mem_unit u_mem (
    .clk,
    .we    (mem_we),
    .waddr (mem_waddr),
    .wdata (mem_wdata),
    .re    (mem_re),
    .raddr (mem_raddr),
    .rdata (mem_rdata)
  );

  aes_ctr_wrapper u_prg (
    .clk, .rst_n, .seed_we, .seed_din, .iv,
    .start  (prg_start),
    .dout   (prg_dout),
    .dvalid (prg_dvalid),
    .done   (prg_done),
    .busy   (prg_busy)
  );

  rejsamp u_rs (
    .clk, .rst_n,
    .start     (rs_start),
    .mem_re    (rs_mem_re),
    .mem_raddr (rs_mem_raddr),
    .mem_rdata (mem_rdata),
    .mem_we    (rs_mem_we),
    .mem_waddr (rs_mem_waddr),
    .mem_wdata (rs_mem_wdata),
    .done      (rs_done),
    .busy      (rs_busy),
    .replaced  (rs_replaced),
    .zero_fill (rs_zero)
  );

  // sticky refusal flag, cleared by the next accepted instruction
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      err <= 1'b0;
    else if (cmd.err)                err <= 1'b1;
    else if (ins_valid && ins_ready) err <= 1'b0;
  end

  assign ev_replaced  = rs_replaced;
  assign ev_zero_fill = rs_zero;

  a_units_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(prg_busy && rs_busy));

endmodule
