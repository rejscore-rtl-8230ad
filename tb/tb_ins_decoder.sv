// tb_ins_decoder: sends random 26-bit instructions, with random gaps and random
// `core_idle`, and checks the decoded command one cycle after each accepted
// instruction: field extraction from op|wen|waddr|raddr|SL, the command bits, the
// refusal of unsupported security levels and op codes, and that nothing is
// accepted while the core is busy or a legal command is pending.
module tb_ins_decoder;
  import rejscore_pkg::*;

  logic clk = 0, rst_n = 0, ins_valid = 0, core_idle = 0, ins_ready;
  logic [25:0] ins = 0;
  logic [63:0] din = 0;
  cmd_t cmd;
  int checks = 0, failures = 0, n_acc = 0, n_err = 0;

  always #5 clk = ~clk;

  ins_decoder dut (.*);

  logic        acc_q = 0;
  logic [25:0] ins_q;
  logic [63:0] din_q;

  always @(posedge clk) begin
    if (rst_n && acc_q) begin
      logic [2:0] op;
      logic       wen;
      logic [1:0] sl;
      logic       legal;
      op    = ins_q[25:23];
      wen   = ins_q[22];
      sl    = ins_q[1:0];
      legal = (sl == 2'd0) && (op <= 3'd2);
      checks++;
      if (cmd.err != !legal || cmd.wr != (legal && wen) || cmd.rd != (legal && op == 3'd0) ||
          cmd.prg != (legal && op == 3'd1) || cmd.rs != (legal && op == 3'd2) ||
          cmd.waddr != ins_q[21:12] || cmd.raddr != ins_q[11:2] || cmd.wdata != din_q) begin
        failures++;
        $display("ins %h decoded wrong: %p", ins_q, cmd);
      end
      if (!legal) n_err++;
    end else if (rst_n) begin
      checks++;
      if (cmd.wr || cmd.rd || cmd.prg || cmd.rs || cmd.err) begin
        failures++;
        $display("command without an accepted instruction");
      end
    end
    acc_q <= ins_valid && ins_ready;
    ins_q <= ins;
    din_q <= din;
    if (ins_valid && ins_ready) n_acc++;
    // ready must be low while busy or while a command is out
    if (rst_n) begin
      checks++;
      if (ins_ready && (!core_idle || (acc_q && ins_q[1:0] == 2'd0 && ins_q[25:23] <= 3'd2))) begin
        failures++;
        $display("ready while not idle");
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      ins_valid = ($urandom % 3) != 0;
      core_idle = ($urandom % 5) != 0;
      ins = 26'($urandom);
      if ($urandom % 2) ins[1:0] = 2'd0;      // mostly SL-I
      din = {$urandom, $urandom};
    end
    @(negedge clk);
    ins_valid = 0;
    repeat (3) @(posedge clk);
    checks += 2;
    if (n_acc < 1000) failures++;
    if (n_err == 0) failures++;
    $display("accepted %0d, refused %0d", n_acc, n_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
