// tb_aes_ctr_wrapper: loads a random seed into B1, runs the wrapper for a short
// byte string (two runs: an odd and, after a new seed and IV, the same length
// again) and compares every 64-bit word with the AES-CTR reference model. Checks
// the cycle count from `start` to `done`: 24 cycles per AES block less one, plus one when
// the word count is even.
module tb_aes_ctr_wrapper;
  import ref_pkg::*;

  localparam int unsigned NBYTES = 72;             // 9 words, 5 blocks
  localparam int unsigned NWORDS = (NBYTES + 7) / 8;
  localparam int unsigned NBLK   = (NWORDS + 1) / 2;
  localparam logic [63:0] NONCE  = 64'h0123_4567_89ab_cdef;

  logic clk = 0, rst_n = 0, seed_we = 0, start = 0;
  logic [63:0] seed_din = 0, dout;
  logic [15:0] iv = 0;
  logic dvalid, done, busy;
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  aes_ctr_wrapper #(.NBYTES(NBYTES), .NONCE(NONCE)) dut (.*);

  task automatic run(input int trial);
    u8 key [16];
    u8 exp [];
    logic [63:0] s0, s1, w;
    int nw = 0, t0;
    s0 = {$urandom, $urandom};
    s1 = {$urandom, $urandom};
    for (int i = 0; i < 8; i++) begin
      key[i]   = s0[8*i +: 8];
      key[8+i] = s1[8*i +: 8];
    end
    iv = 16'($urandom);
    ctr_bytes(key, NONCE, iv, NBYTES, exp);
    @(negedge clk); seed_we = 1; seed_din = s0;
    @(negedge clk); seed_din = s1;
    @(negedge clk); seed_we = 0; start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) begin
      @(posedge clk); #1;
      if (dvalid) begin
        for (int i = 0; i < 8; i++) w[8*i +: 8] = (8*nw + i < NBYTES) ? exp[8*nw + i] : 8'h00;
        checks++;
        // bytes past NBYTES in the last word are not specified
        for (int i = 0; i < 8; i++) if (8*nw + i < NBYTES && dout[8*i +: 8] != w[8*i +: 8]) begin
          failures++;
          $display("trial %0d word %0d: %h expected %h", trial, nw, dout, w);
          break;
        end
        nw++;
      end
    end
    checks += 2;
    if (nw != NWORDS) begin
      failures++;
      $display("trial %0d: %0d words, expected %0d", trial, nw, NWORDS);
    end
    // done is high 24*NBLK - 1 cycles after the start cycle (one more for an even word count)
    if (cyc - 1 - t0 != 24 * NBLK - 1 + ((NWORDS % 2 == 0) ? 1 : 0)) begin
      failures++;
      $display("trial %0d: %0d cycles, expected %0d", trial, cyc - 1 - t0, 24 * NBLK - 1);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3; t++) run(t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
