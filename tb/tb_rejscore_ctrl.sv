// tb_rejscore_ctrl: drives decoded commands into the routing and control unit,
// with a real memory behind it and simple stand-ins for the AES-CTR wrapper and
// the RejSamp unit driven by the testbench. Checks host writes and reads (read
// data one cycle later), the seed transfer from words 0 and 1 into B1, that
// wrapper words land from DATA_BASE on, that RejSamp starts when the wrapper is
// done and its memory accesses are routed through, `busy`/`done`, and a RejSamp
// command on its own.
module tb_rejscore_ctrl;
  import rejscore_pkg::*;

  logic clk = 0, rst_n = 0;
  cmd_t cmd = '0;
  logic idle, busy, done, host_dvalid;
  logic [63:0] host_dout;
  logic mem_we, mem_re;
  logic [9:0] mem_waddr, mem_raddr;
  logic [63:0] mem_wdata, mem_rdata;
  logic seed_we, prg_start;
  logic [63:0] seed_din;
  logic [63:0] prg_dout = 0;
  logic prg_dvalid = 0, prg_done = 0;
  logic rs_start;
  logic rs_mem_re = 0, rs_mem_we = 0, rs_done = 0;
  logic [9:0] rs_mem_raddr = 0, rs_mem_waddr = 0;
  logic [63:0] rs_mem_wdata = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rejscore_ctrl dut (.*);
  mem_unit mem (.clk, .we (mem_we), .waddr (mem_waddr), .wdata (mem_wdata),
                .re (mem_re), .raddr (mem_raddr), .rdata (mem_rdata));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic host_write(input int a, input logic [63:0] d);
    @(negedge clk);
    cmd = '0; cmd.wr = 1; cmd.waddr = 10'(a); cmd.wdata = d;
    @(negedge clk);
    cmd = '0;
  endtask

  task automatic host_read(input int a, output logic [63:0] d);
    @(negedge clk);
    cmd = '0; cmd.rd = 1; cmd.raddr = 10'(a);
    @(negedge clk);
    cmd = '0;
    check(host_dvalid == 1, "read data valid one cycle after the command");
    d = host_dout;
  endtask

  // seed words seen on seed_we
  logic [63:0] seen_seed [$];
  always @(posedge clk) if (seed_we) seen_seed.push_back(seed_din);

  initial begin
    logic [63:0] s0, s1, d, pat [8];
    int n_start;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // host writes and reads
    s0 = {$urandom, $urandom};
    s1 = {$urandom, $urandom};
    host_write(SEED_ADDR, s0);
    host_write(SEED_ADDR + 1, s1);
    host_write(700, 64'hdead_beef_0123_4567);
    host_read(700, d);
    check(d == 64'hdead_beef_0123_4567, "host read back");
    check(idle && !busy, "idle after host accesses");
    // RejSampPRG
    @(negedge clk);
    cmd = '0; cmd.prg = 1;
    @(negedge clk);
    cmd = '0;
    check(busy, "busy after prg");
    n_start = 0;
    while (!prg_start) begin
      @(negedge clk);
      if (++n_start > 10) break;
    end
    check(prg_start, "wrapper started");
    @(negedge clk);
    check(seen_seed.size() == 2 && seen_seed[0] == s0 && seen_seed[1] == s1, "seed words 0 and 1 into B1 in order");
    // the wrapper stand-in emits 8 words, two per three cycles
    for (int i = 0; i < 8; i++) begin
      pat[i] = {$urandom, $urandom};
      @(negedge clk);
      prg_dvalid = 1; prg_dout = pat[i];
      if (i % 2 == 1) begin
        @(negedge clk);
        prg_dvalid = 0;
      end
    end
    @(negedge clk);
    prg_dvalid = 0; prg_done = 1;
    #1;
    check(rs_start, "RejSamp started in the wrapper's done cycle");
    @(negedge clk);
    prg_done = 0;
    // RejSamp stand-in: reads word DATA_BASE+3, writes it to DATA_BASE+7
    rs_mem_re = 1; rs_mem_raddr = 10'(DATA_BASE + 3);
    @(negedge clk);
    rs_mem_re = 0;
    check(mem_rdata == pat[3], "RejSamp read routed");
    rs_mem_we = 1; rs_mem_waddr = 10'(DATA_BASE + 7); rs_mem_wdata = ~mem_rdata;
    @(negedge clk);
    rs_mem_we = 0; rs_done = 1;
    @(negedge clk);
    rs_done = 0;
    #1;
    check(done, "done pulse after RejSamp");
    @(negedge clk);
    check(idle && !done, "back to idle");
    for (int i = 0; i < 7; i++) begin
      host_read(DATA_BASE + i, d);
      check(d == pat[i], $sformatf("wrapper word %0d at DATA_BASE+%0d", i, i));
    end
    host_read(DATA_BASE + 7, d);
    check(d == ~pat[3], "RejSamp write routed");
    // RejSamp alone
    @(negedge clk);
    cmd = '0; cmd.rs = 1;
    #1;
    check(rs_start, "RejSamp started directly");
    @(negedge clk);
    cmd = '0;
    check(busy, "busy during RejSamp");
    repeat (3) @(negedge clk);
    rs_done = 1;
    @(negedge clk);
    rs_done = 0;
    #1;
    check(done, "done after RejSamp alone");
    repeat (2) @(negedge clk);
    check(seen_seed.size() == 2, "no seed transfer for RejSamp alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
