// tb_rejsamp: runs the rejection sampler on byte strings placed in a memory and
// compares the elements it writes back with the QR-UOV RejSamp reference model.
// A small size (tau = 70, n' = 45, neither a multiple of 8) keeps the test short
// and exercises partial words at the head/tail boundary and at the end. The
// share of rejected bytes varies from none to almost all, so that elements are
// kept, replaced from the tail, and set to 0 after the tail is used up; each of
// these must happen. The cycle count is checked against a schedule model.
module tb_rejsamp;
  import ref_pkg::*;

  localparam int unsigned PTAU  = 70;
  localparam int unsigned PNOUT = 45;
  localparam int unsigned BASE  = 3;
  localparam int unsigned Q     = 127;

  logic clk = 0, rst_n = 0, start = 0;
  logic        rs_re, rs_we, done, busy, replaced, zero_fill;
  logic [9:0]  rs_raddr, rs_waddr;
  logic [63:0] rs_wdata, rdata;
  // the testbench owns the memory ports while the sampler is idle
  logic        tb_we = 0, tb_re = 0;
  logic [9:0]  tb_waddr = 0, tb_raddr = 0;
  logic [63:0] tb_wdata = 0;
  int checks = 0, failures = 0, n_rep = 0, n_zero = 0, n_keep_runs = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  rejsamp #(.PQ(Q), .PTAU(PTAU), .PNOUT(PNOUT), .BASE(BASE)) dut (
    .clk, .rst_n, .start,
    .mem_re (rs_re), .mem_raddr (rs_raddr), .mem_rdata (rdata),
    .mem_we (rs_we), .mem_waddr (rs_waddr), .mem_wdata (rs_wdata),
    .done, .busy, .replaced, .zero_fill
  );

  mem_unit mem (
    .clk,
    .we    (busy ? rs_we : tb_we),
    .waddr (busy ? rs_waddr : tb_waddr),
    .wdata (busy ? rs_wdata : tb_wdata),
    .re    (busy ? rs_re : tb_re),
    .raddr (busy ? rs_raddr : tb_raddr),
    .rdata (rdata)
  );

  always @(posedge clk) begin
    if (replaced)  n_rep++;
    if (zero_fill) n_zero++;
  end

  // cycles of one run, from the schedule: 1 (start), 4 per two-word load of B1
  // (3 for a one-word load), 1 per head element, 1 per rejected tail byte
  // tested, 2 per tail word read, 1 per output word written, 1 for the end
  function automatic int model_cycles(ref u8 r []);
    int cyc_n = 1, tested = 0, twords = 0, tpos = PNOUT, tloaded = PNOUT;
    int head_loaded = 0;
    while (head_loaded < PNOUT) begin
      int n1 = (PNOUT - head_loaded < 8) ? PNOUT - head_loaded : 8;
      int n2;
      head_loaded += n1;
      n2 = (PNOUT - head_loaded < 8) ? PNOUT - head_loaded : 8;
      head_loaded += n2;
      cyc_n += (n2 > 0) ? 4 : 3;    // PROC (B1 empty) + LD0 + LD1 (+ LD2)
    end
    cyc_n += PNOUT;                  // one per element
    cyc_n += PNOUT / 8;              // full B2 writes
    cyc_n += 1;                      // final PROC with B1 empty
    // replacements
    for (int j = 0; j < PNOUT; j++) begin
      if ((r[j] & Q) == Q) begin
        bit found = 0;
        while (!found) begin
          if (tpos < tloaded) begin
            found = ((r[tpos] & Q) != Q);
            if (!found) cyc_n++;        // a valid tail byte is taken in the element's cycle
            tpos++;
          end else if (tloaded < PTAU) begin
            int w0 = (tloaded / 8 + 1) * 8;
            cyc_n += 2;
            tloaded = (w0 < PTAU) ? w0 : PTAU;
          end else break;             // zero fill: counted as the element
        end
      end
    end
    return cyc_n;                   // done is seen at the end of the next cycle
  endfunction

  task automatic run(input int trial, input int pbad);
    u8 r [], v [];
    logic [63:0] w;
    int t0, nwords, exp_cyc;
    r = new[PTAU];
    for (int i = 0; i < PTAU; i++) begin
      r[i] = u8'($urandom);
      if (($urandom % 100) < pbad) r[i] = r[i] | 8'h7f;   // rejected after masking
    end
    rejsamp(Q, PTAU, PNOUT, r, v);
    nwords = (PTAU + 7) / 8;
    for (int a = 0; a < nwords; a++) begin
      @(negedge clk);
      tb_we = 1; tb_waddr = 10'(BASE + a);
      for (int i = 0; i < 8; i++) tb_wdata[8*i +: 8] = (8*a + i < PTAU) ? r[8*a + i] : 8'($urandom);
    end
    @(negedge clk); tb_we = 0; start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    exp_cyc = model_cycles(r);
    checks++;
    if (cyc - t0 != exp_cyc) begin
      failures++;
      $display("trial %0d: %0d cycles, model %0d", trial, cyc - t0, exp_cyc);
    end
    @(negedge clk);
    for (int a = 0; a < (PNOUT + 7) / 8; a++) begin
      tb_re = 1; tb_raddr = 10'(BASE + a);
      @(negedge clk);
      tb_re = 0;
      w = rdata;
      for (int i = 0; i < 8; i++) if (8*a + i < PNOUT) begin
        checks++;
        if (w[8*i +: 8] != v[8*a + i]) begin
          failures++;
          $display("trial %0d element %0d: %0d expected %0d", trial, 8*a + i, w[8*i +: 8], v[8*a + i]);
        end
      end
    end
  endtask

  initial begin
    int pb [6] = '{0, 2, 10, 30, 70, 100};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) run(t, pb[t % 6]);
    checks += 2;
    if (n_rep == 0)  begin failures++; $display("no replacement happened"); end
    if (n_zero == 0) begin failures++; $display("no zero fill happened"); end
    $display("replacements %0d, zero fills %0d", n_rep, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
