// tb_mem_unit: random writes and reads against an associative-array model of the
// 1024 x 64 memory. Checks the one-cycle read latency, that `rdata` holds while
// `re` is low, that a read and a write of one address in one cycle return the old
// word, and that both 32-bit banks keep their halves.
module tb_mem_unit;
  logic clk = 0, we = 0, re = 0;
  logic [9:0]  waddr = 0, raddr = 0;
  logic [63:0] wdata = 0, rdata;
  int checks = 0, failures = 0;
  logic [63:0] model [1024];
  logic [63:0] exp_q;
  logic        exp_v = 0;

  always #5 clk = ~clk;

  mem_unit dut (.*);

  initial begin
    // initialise every word so that every read has a known value
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = {$urandom, $urandom};
      model[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1;
      re = ($urandom % 4) != 0;
      waddr = 10'($urandom);
      raddr = (i % 7 == 0) ? waddr : 10'($urandom);   // collisions now and then
      wdata = {$urandom, $urandom};
      @(posedge clk);
      if (re) begin
        exp_q = model[raddr];   // old word on a collision
        exp_v = 1;
      end
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata != exp_q) begin
        failures++;
        $display("read mismatch at step %0d: %h vs %h", i, rdata, exp_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
