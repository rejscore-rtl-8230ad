// tb_rejscore: end-to-end test of RejSCore at its default (QR-UOV SL-I) size.
//   1. The host writes a random 16-byte seed to words 0 and 1 with wen.
//   2. RejSampPRG: 2916 AES-128-CTR bytes, then rejection sampling to 2808
//      elements of F_127; all 351 result words are read back with NOP
//      instructions and compared with the reference model (AES-CTR bytes fed to
//      QR-UOV RejSamp). Done twice, with two seeds and IVs.
//   3. RejSamp alone on a byte string written by the host in which most bytes
//      are rejected, so that the tail runs out and elements are set to 0.
//   4. An instruction for SL-III is refused; an instruction offered while the
//      core is busy waits.
// Counted mechanisms (each must happen): host write, host read, RejSampPRG,
// RejSamp alone, replacement from the tail, zero fill, refusal, waiting for a
// busy core. Cycle counts are printed next to the paper's (4632 for the AES-CTR
// wrapper, 3893 for RejSamp, 8525 in all); the wrapper's phase is checked exactly
// against its schedule: busy for 24 cycles per block, 183 blocks.
module tb_rejscore;
  import rejscore_pkg::*;
  import ref_pkg::*;

  logic clk = 0, rst_n = 0, ins_valid = 0;
  logic [25:0] ins = 0;
  logic [63:0] din = 0, dout;
  logic [15:0] iv = 0;
  logic ins_ready, dout_valid, busy, done, err, ev_replaced, ev_zero_fill;
  int checks = 0, failures = 0;
  int cyc = 0;
  int n_wr = 0, n_rd = 0, n_prg = 0, n_rs = 0, n_rep = 0, n_zero = 0, n_refused = 0, n_wait = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  rejscore dut (.*);

  always @(posedge clk) begin
    if (ev_replaced)  n_rep++;
    if (ev_zero_fill) n_zero++;
    if (ins_valid && !ins_ready && busy) n_wait++;
  end

  function automatic logic [25:0] mk(input int op, input bit wen, input int wa, input int ra, input int sl);
    return {3'(op), wen, 10'(wa), 10'(ra), 2'(sl)};
  endfunction

  // offer an instruction until it is taken
  task automatic issue(input logic [25:0] i, input logic [63:0] d = 0);
    @(negedge clk);
    ins_valid = 1; ins = i; din = d;
    @(posedge clk);
    while (!ins_ready) @(posedge clk);
    @(negedge clk);
    ins_valid = 0;
  endtask

  task automatic write_word(input int a, input logic [63:0] d);
    issue(mk(OP_NOP, 1, a, 0, SL_I), d);
    n_wr++;
  endtask

  task automatic read_word(input int a, output logic [63:0] d);
    issue(mk(OP_NOP, 0, 0, a, SL_I));
    @(posedge clk);
    #1;
    checks++;
    if (!dout_valid) begin
      failures++;
      $display("no read data for word %0d", a);
    end
    d = dout;
    n_rd++;
  endtask

  task automatic wait_done(output int cycles);
    int t0 = cyc;
    while (!done) @(posedge clk);
    cycles = cyc - t0;
  endtask

  task automatic compare(input string tag, ref u8 v []);
    logic [63:0] w;
    int bad = 0;
    for (int a = 0; a < (NOUT + 7) / 8; a++) begin
      read_word(DATA_BASE + a, w);
      for (int i = 0; i < 8; i++) if (8*a + i < NOUT) begin
        checks++;
        if (w[8*i +: 8] != v[8*a + i]) begin
          failures++;
          if (bad++ < 5) $display("%s: element %0d is %0d, expected %0d", tag, 8*a + i, w[8*i +: 8], v[8*a + i]);
        end
      end
    end
  endtask

  // PRG phase length from the wrapper's busy flag
  int prg_cycles = 0, rs_cycles = 0, op_cycles = 0;
  always @(posedge clk) begin
    if (busy) op_cycles++;
    if (dut.u_prg.busy) prg_cycles++;
    if (dut.u_rs.busy)  rs_cycles++;
  end

  task automatic run_prg(input int trial);
    logic [63:0] s0, s1;
    u8 key [16], r [], v [];
    int total;
    s0 = {$urandom, $urandom};
    s1 = {$urandom, $urandom};
    for (int i = 0; i < 8; i++) begin
      key[i]   = s0[8*i +: 8];
      key[8+i] = s1[8*i +: 8];
    end
    iv = 16'($urandom);
    ctr_bytes(key, 64'h0, iv, TAU, r);
    rejsamp(Q, TAU, NOUT, r, v);
    write_word(SEED_ADDR, s0);
    write_word(SEED_ADDR + 1, s1);
    prg_cycles = 0;
    rs_cycles  = 0;
    op_cycles  = 0;
    issue(mk(OP_REJSAMPPRG, 0, 0, 0, SL_I));
    // offered while busy: must wait, then is taken as a plain read
    @(negedge clk);
    ins_valid = 1; ins = mk(OP_NOP, 0, 0, 0, SL_I);
    repeat (5) @(posedge clk);
    @(negedge clk);
    ins_valid = 0;
    wait_done(total);
    n_prg++;
    $display("RejSampPRG %0d: AES-CTR wrapper %0d cycles (paper 4632), RejSamp %0d (paper 3893), core busy %0d (paper 8525)",
             trial, prg_cycles, rs_cycles, op_cycles);
    checks++;
    if (op_cycles != prg_cycles + rs_cycles + 3) begin
      failures++;
      $display("busy %0d cycles, expected wrapper + RejSamp + 3 (seed transfer, done)", op_cycles);
    end
    checks++;
    if (prg_cycles != 24 * (((TAU + 7) / 8 + 1) / 2)) begin
      failures++;
      $display("wrapper cycles %0d, expected %0d", prg_cycles, 24 * (((TAU + 7) / 8 + 1) / 2));
    end
    checks++;
    if (rs_cycles < 3000 || rs_cycles > 4500) begin
      failures++;
      $display("RejSamp cycle count out of range");
    end
    compare($sformatf("RejSampPRG %0d", trial), v);
  endtask

  initial begin
    u8 r [], v [];
    logic [63:0] w;
    int t;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    run_prg(0);
    run_prg(1);

    // RejSamp alone on host bytes, 90 % of them rejected
    r = new[TAU];
    for (int i = 0; i < TAU; i++) begin
      r[i] = u8'($urandom);
      if ($urandom % 10 != 0) r[i] = r[i] | 8'h7f;
    end
    rejsamp(Q, TAU, NOUT, r, v);
    for (int a = 0; a < (TAU + 7) / 8; a++) begin
      for (int i = 0; i < 8; i++) w[8*i +: 8] = (8*a + i < TAU) ? r[8*a + i] : 8'h00;
      write_word(DATA_BASE + a, w);
    end
    issue(mk(OP_REJSAMP, 0, 0, 0, SL_I));
    wait_done(t);
    n_rs++;
    compare("RejSamp", v);

    // refused: SL-III
    issue(mk(OP_REJSAMPPRG, 0, 0, 0, SL_III));
    repeat (3) @(posedge clk);
    checks++;
    if (!err || busy) begin
      failures++;
      $display("SL-III instruction not refused");
    end else n_refused++;

    $display("mechanisms: writes %0d reads %0d RejSampPRG %0d RejSamp %0d replaced %0d zero-filled %0d refused %0d waits %0d",
             n_wr, n_rd, n_prg, n_rs, n_rep, n_zero, n_refused, n_wait);
    checks += 8;
    if (n_wr == 0)      failures++;
    if (n_rd == 0)      failures++;
    if (n_prg == 0)     failures++;
    if (n_rs == 0)      failures++;
    if (n_rep == 0)     failures++;
    if (n_zero == 0)    failures++;
    if (n_refused == 0) failures++;
    if (n_wait == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
