// mapping_table: the vector-ID -> physical-address hash table with access
// counts and prev/next links, one entry per vector ID.
//
// The paper keeps this table in the SSD's DRAM; here it is a single-port array
// with a one-cycle read: present req with we=0 and addr, rdata is valid in the
// next cycle; with we=1 the whole entry wdata is written. The vector ID
// indexes the array directly, which is this implementation's stand-in for the
// (unspecified) hash function. Entries are not reset: the host loads every
// entry that is used.
module mapping_table
  import recflash_pkg::*;
#(
  parameter int unsigned N_ROWS = 1048576,
  localparam int unsigned AW = $clog2(N_ROWS)
) (
  input  logic      clk,
  input  logic      req,
  input  logic      we,
  input  key_t      addr,
  input  ht_entry_t wdata,
  output ht_entry_t rdata
);
  ht_entry_t mem [N_ROWS];

  always_ff @(posedge clk) begin
    if (req) begin
      if (we) mem[addr[AW-1:0]] <= wdata;
      else    rdata <= mem[addr[AW-1:0]];
    end
  end
endmodule
