// rejscore_ctrl: the routing and control unit of RejSCore.
//
// It carries out the decoded commands and owns the two ports of the data memory.
//   wr   : the host word is written to mem[waddr] in the command's cycle.
//   rd   : mem[raddr] is read; the word is on `host_dout` with `host_dvalid` one
//          cycle later.
//   prg  : RejSampPRG. The seed is read from words SEED_ADDR and SEED_ADDR+1 into
//          the wrapper's buffer B1 (two cycles), the AES-CTR wrapper is started,
//          each 64-bit word it emits is written to memory from DATA_BASE on, and
//          when the wrapper reports done the RejSamp unit is started on those
//          bytes.
//   rs   : RejSamp alone, on bytes the host has placed from DATA_BASE on.
// While RejSamp runs it drives both memory ports through this unit. `done`
// pulses when an operation ends; `busy` is high from the command to `done`.
//
// The paper gives this unit's function (decode, enable signals, watching the
// done/valid flags of the units, address sequencing over the dual-port memory).
// The state machine, the memory map and the port multiplexing are this design's.
module rejscore_ctrl
  import rejscore_pkg::*;
#(
  parameter int unsigned AW = ADDR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cmd_t              cmd,
  output logic              idle,
  output logic              busy,
  output logic              done,
  output logic [DATA_W-1:0] host_dout,
  output logic              host_dvalid,
  // memory
  output logic              mem_we,
  output logic [AW-1:0]     mem_waddr,
  output logic [DATA_W-1:0] mem_wdata,
  output logic              mem_re,
  output logic [AW-1:0]     mem_raddr,
  input  logic [DATA_W-1:0] mem_rdata,
  // AES-CTR wrapper
  output logic              seed_we,
  output logic [DATA_W-1:0] seed_din,
  output logic              prg_start,
  input  logic [DATA_W-1:0] prg_dout,
  input  logic              prg_dvalid,
  input  logic              prg_done,
  // RejSamp
  output logic              rs_start,
  input  logic              rs_mem_re,
  input  logic [AW-1:0]     rs_mem_raddr,
  input  logic              rs_mem_we,
  input  logic [AW-1:0]     rs_mem_waddr,
  input  logic [DATA_W-1:0] rs_mem_wdata,
  input  logic              rs_done
);

  typedef enum logic [2:0] {S_IDLE, S_SEED0, S_SEED1, S_SEED2, S_PRG, S_RS, S_DONE} state_e;
  state_e state;

  logic [AW-1:0] prg_waddr;
  logic          rd_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      prg_waddr <= '0;
      rd_pend   <= 1'b0;
    end else begin
      rd_pend <= (state == S_IDLE) && cmd.rd;
      unique case (state)
        S_IDLE: begin
          if (cmd.prg)     state <= S_SEED0;
          else if (cmd.rs) state <= S_RS;
        end
        S_SEED0: state <= S_SEED1;
        S_SEED1: state <= S_SEED2;
        S_SEED2: begin
          prg_waddr <= AW'(DATA_BASE);
          state     <= S_PRG;
        end
        S_PRG: begin
          if (prg_dvalid) prg_waddr <= prg_waddr + 1'b1;
          if (prg_done)   state     <= S_RS;
        end
        S_RS:   if (rs_done) state <= S_DONE;
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // port routing
  always_comb begin
    mem_we    = 1'b0;
    mem_waddr = cmd.waddr;
    mem_wdata = cmd.wdata;
    mem_re    = 1'b0;
    mem_raddr = cmd.raddr;
    unique case (state)
      S_IDLE: begin
        mem_we = cmd.wr;
        mem_re = cmd.rd;
      end
      S_SEED0: begin
        mem_re    = 1'b1;
        mem_raddr = AW'(SEED_ADDR);
      end
      S_SEED1: begin
        mem_re    = 1'b1;
        mem_raddr = AW'(SEED_ADDR + 1);
      end
      S_PRG: begin
        mem_we    = prg_dvalid;
        mem_waddr = prg_waddr;
        mem_wdata = prg_dout;
      end
      S_RS: begin
        mem_we    = rs_mem_we;
        mem_waddr = rs_mem_waddr;
        mem_wdata = rs_mem_wdata;
        mem_re    = rs_mem_re;
        mem_raddr = rs_mem_raddr;
      end
      default: ;
    endcase
  end

  assign seed_we     = (state == S_SEED1) || (state == S_SEED2);
  assign seed_din    = mem_rdata;
  assign prg_start   = (state == S_SEED2);
  assign rs_start    = ((state == S_IDLE) && cmd.rs && !cmd.prg) || ((state == S_PRG) && prg_done);
  assign host_dout   = mem_rdata;
  assign host_dvalid = rd_pend;
  assign idle        = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign done        = (state == S_DONE);

  a_prg_words_in_prg: assert property (@(posedge clk) disable iff (!rst_n) prg_dvalid |-> state == S_PRG);
  a_rs_mem_in_rs:     assert property (@(posedge clk) disable iff (!rst_n) (rs_mem_we || rs_mem_re) |-> state == S_RS);

endmodule
