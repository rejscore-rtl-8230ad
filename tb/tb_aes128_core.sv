// tb_aes128_core: checks the unrolled AES-128 core against the FIPS-197 example
// vectors and against the byte-array reference model for random keys and blocks
// fed back to back (one per cycle). Also checks the 21-cycle latency and that the
// blocks come out in order.
module tb_aes128_core;
  import ref_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [127:0] key, pt, ct;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes128_core dut (.*);

  localparam int N = 40;
  logic [127:0] keys [N], pts [N], exp_ct [N];
  int issue_cyc [N];
  int cyc = 0, nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic logic [127:0] ref_enc(logic [127:0] k, logic [127:0] p);
    u8 kb [16], pb [16], cb [16];
    logic [127:0] c;
    for (int i = 0; i < 16; i++) begin
      kb[i] = k[127-8*i -: 8];
      pb[i] = p[127-8*i -: 8];
    end
    encrypt(kb, pb, cb);
    for (int i = 0; i < 16; i++) c[127-8*i -: 8] = cb[i];
    return c;
  endfunction

  initial begin
    keys[0] = 128'h000102030405060708090a0b0c0d0e0f;
    pts[0]  = 128'h00112233445566778899aabbccddeeff;
    keys[1] = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    pts[1]  = 128'h3243f6a8885a308d313198a2e0370734;
    for (int i = 2; i < N; i++) begin
      keys[i] = {$urandom, $urandom, $urandom, $urandom};
      pts[i]  = {$urandom, $urandom, $urandom, $urandom};
    end
    for (int i = 0; i < N; i++) exp_ct[i] = ref_enc(keys[i], pts[i]);
    // the reference must agree with FIPS-197 itself
    checks += 2;
    if (exp_ct[0] != 128'h69c4e0d86a7b0430d8cdb78070b4c55a) failures++;
    if (exp_ct[1] != 128'h3925841d02dc09fbdc118597196a0b32) failures++;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // first block alone, to measure latency, then the rest back to back
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1;
      key = keys[i];
      pt  = pts[i];
      issue_cyc[i] = cyc;
      if (i == 0) begin
        @(negedge clk);
        in_valid = 0;
        repeat (30) @(negedge clk);
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (40) @(posedge clk);
    checks++;
    if (nout != N) begin
      failures++;
      $display("expected %0d outputs, got %0d", N, nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 2;
    if (ct != exp_ct[nout]) begin
      failures++;
      $display("block %0d: ct %h expected %h", nout, ct, exp_ct[nout]);
    end
    // issued in cycle c (sampled at the edge ending it); visible 21 edges later
    if (cyc - issue_cyc[nout] != 21) begin
      failures++;
      $display("block %0d: latency %0d, expected 21", nout, cyc - issue_cyc[nout]);
    end
    nout <= nout + 1;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
