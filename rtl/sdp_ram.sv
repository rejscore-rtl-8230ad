// sdp_ram: simple dual-port RAM, one write port and one read port on one clock.
//
// A write stores `wdata` at `waddr` when `we` is high. A read returns mem[raddr]
// one cycle after `re` is high, in `rdata`; `rdata` holds its value otherwise.
// When both ports hit the same address in one cycle the read returns the old
// word. The array has no reset, like an SRAM macro or a block RAM, and maps to
// either.
module sdp_ram #(
  parameter int unsigned DEPTH  = 1024,
  parameter int unsigned WIDTH  = 32,
  parameter int unsigned ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              we,
  input  logic [ADDR_W-1:0] waddr,
  input  logic [WIDTH-1:0]  wdata,
  input  logic              re,
  input  logic [ADDR_W-1:0] raddr,
  output logic [WIDTH-1:0]  rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
