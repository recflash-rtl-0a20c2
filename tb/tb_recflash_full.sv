// tb_recflash_full: end-to-end test of recflash_top at its default size
// (1M-row mapping table, 16 KB pages, 128 KB page-wise cache, 500 MHz NAND
// timing) with a TLC tR of 60 us (30000 cycles). One table load, a few
// lookup bags, one hot-region update and the trigger; see tb_top_body.svh.
`include "tb_check.svh"
`define DUT_PARAMS
module tb_recflash_full;
  localparam int PB = 16384, LINES = 8, NKEYS = 8192, TR = 30000, NBAGS = 2, BAGLEN = 4;
  initial begin repeat (40000000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
`include "tb_top_body.svh"
endmodule
