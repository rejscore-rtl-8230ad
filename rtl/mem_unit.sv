// mem_unit: the 1024 x 64-bit simple dual-port data memory of RejSCore.
//
// It buffers the seed, the pseudorandom bytes from the AES-CTR wrapper and the
// sampled field elements, 8 bytes per 64-bit word. As in the paper's ASIC
// version it is built from two 1024 x 32-bit banks side by side: bits [31:0] of
// every word live in bank 0 and bits [63:32] in bank 1; both banks share the
// addresses and enables, so together they behave as one 1024 x 64 memory with a
// write port and a read port (read latency one cycle, old data on a same-address
// read and write). On an FPGA the same behaviour maps to one dual-port block RAM.
module mem_unit
  import rejscore_pkg::*;
#(
  parameter int unsigned DEPTH = MEM_DEPTH,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [DATA_W-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [DATA_W-1:0] rdata
);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sdp_ram #(.DEPTH(DEPTH), .WIDTH(DATA_W/2), .ADDR_W(AW)) u_bank (
      .clk   (clk),
      .we    (we),
      .waddr (waddr),
      .wdata (wdata[b*(DATA_W/2) +: DATA_W/2]),
      .re    (re),
      .raddr (raddr),
      .rdata (rdata[b*(DATA_W/2) +: DATA_W/2])
    );
  end

endmodule
