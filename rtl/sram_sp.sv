// sram_sp: single-port synchronous SRAM, the data store of the page-wise cache.
//
// One access per cycle: a write when we is high, otherwise a read whose data
// appears on rdata one cycle after en. Written as a plain array so that a
// foundry SRAM macro of the same shape (the cache is 128 KB) can replace it.
// The word width and one-cycle latency are choices of this implementation.
module sram_sp #(
  parameter int unsigned DEPTH = 32768,   // 128 KB of 32-bit words
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
