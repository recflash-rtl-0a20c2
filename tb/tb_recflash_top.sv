// tb_recflash_top: end-to-end test of recflash_top at reduced size (512-byte
// pages, 4-line cache, 1024-row table, tR of 300 cycles). See tb_top_body.svh.
`include "tb_check.svh"
`define DUT_PARAMS #(.N_ROWS(1024), .PAGE_BYTES(512), .CACHE_BYTES(2048))
module tb_recflash_top;
  localparam int PB = 512, LINES = 4, NKEYS = 256, TR = 300, NBAGS = 30, BAGLEN = 8;
  initial begin repeat (3000000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
`include "tb_top_body.svh"
endmodule
