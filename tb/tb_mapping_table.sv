// tb_mapping_table: random whole-entry writes and read-back of a small table;
// a read returns the entry one cycle later.
`include "tb_check.svh"
module tb_mapping_table;
  import recflash_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic req = 0, we = 0; key_t addr = '0; ht_entry_t wdata = '0, rdata;
  ht_entry_t ref_t [64]; logic [63:0] w = '0;
  mapping_table #(.N_ROWS(64)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    @(posedge clk);
    for (int i = 0; i < 300; i++) begin
      req <= 1; we <= 1; addr <= key_t'($urandom % 64);
      wdata <= {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk); ref_t[addr[5:0]] = wdata; w[addr[5:0]] = 1;
    end
    for (int a = 0; a < 64; a++) if (w[a]) begin
      req <= 1; we <= 0; addr <= key_t'(a); @(posedge clk); req <= 0; #0.1;
      `CHECK(rdata == ref_t[a], $sformatf("entry %0d", a))
    end
    `FINISH
  end
endmodule
