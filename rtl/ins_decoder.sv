// ins_decoder: takes the 26-bit instruction word INS from the host and decodes it.
//
// INS, MSB to LSB: op(3) | wen(1) | waddr(10) | raddr(10) | SecLevel(2). An
// instruction is accepted in a cycle where `ins_valid` and `ins_ready` are both
// high; `ins_ready` is high while the core is idle and no command is pending. One
// cycle later the decoded command appears in `cmd` for exactly one cycle, with
// the 64-bit host word `din` that came with it:
//   wen = 1              -> wr  (write din to mem[waddr])
//   op = NOP             -> rd  (read mem[raddr] to the host port)
//   op = RejSampPRG      -> prg (AES-CTR expansion of the seed, then RejSamp)
//   op = RejSamp         -> rs  (rejection sampling of the bytes in memory)
// An instruction whose SecLevel is not SL-I (the only level built, as in the
// paper) or whose op is not one of the three codes is refused: only `err` is set.
//
// The fields and their widths are the paper's. Their bit positions follow from
// the widths and the MSB/LSB order; the op and SecLevel codes, the ready/valid
// handshake and the data word that travels with a write are this design's own.
module ins_decoder
  import rejscore_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ins_valid,
  input  logic [INS_W-1:0]  ins,
  input  logic [DATA_W-1:0] din,
  input  logic              core_idle,
  output logic              ins_ready,
  output cmd_t              cmd
);

  ins_t f;
  logic legal;

  assign f         = ins_t'(ins);
  assign legal     = (f.sl == SL_I) &&
                     (f.op == OP_NOP || f.op == OP_REJSAMPPRG || f.op == OP_REJSAMP);
  assign ins_ready = core_idle && !(cmd.wr || cmd.rd || cmd.prg || cmd.rs);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd <= '0;
    end else begin
      cmd <= '0;
      if (ins_valid && ins_ready) begin
        cmd.wr    <= legal && f.wen;
        cmd.rd    <= legal && (f.op == OP_NOP);
        cmd.prg   <= legal && (f.op == OP_REJSAMPPRG);
        cmd.rs    <= legal && (f.op == OP_REJSAMP);
        cmd.err   <= !legal;
        cmd.waddr <= f.waddr;
        cmd.raddr <= f.raddr;
        cmd.wdata <= din;
      end
    end
  end

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(cmd.prg && cmd.rs));

endmodule
