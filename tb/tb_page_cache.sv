// tb_page_cache: random page accesses (6 rows over a 4-line cache) against a
// reference LRU model. Checks hit/miss, the hit line, the victim line (empty
// lines first, then least recently used) and the data read back from a line.
`include "tb_check.svh"
module tb_page_cache;
  import recflash_pkg::*;
  import recflash_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  row_t lk_row = '0, fill_row = '0;
  logic hit, touch = 0, fill_we = 0, fill_done = 0, rd_en = 0;
  logic [1:0] hit_way, victim, touch_way = 0, fill_way = 0, rd_way = 0;
  logic [3:0] fill_word = 0, rd_word = 0;
  logic [31:0] fill_data = 0, rd_data;
  page_cache #(.CACHE_BYTES(256), .PAGE_BYTES(64)) dut (.*);

  row_t ref_row [4]; logic [3:0] ref_vld = '0; int order[$];   // order[0] = MRU
  int nhit = 0, nmiss = 0, nevict = 0;

  function automatic int ref_lookup(row_t r);
    for (int i = 0; i < 4; i++) if (ref_vld[i] && ref_row[i] == r) return i;
    return -1;
  endfunction
  function automatic int ref_victim();
    for (int i = 0; i < 4; i++) if (!ref_vld[i]) return i;
    return order[order.size() - 1];
  endfunction
  task automatic ref_use(int w);
    foreach (order[i]) if (order[i] == w) begin order.delete(i); break; end
    order.push_front(w);
  endtask

  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    row_t r; int w, v, wd;
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int n = 0; n < 400; n++) begin
      r = row_t'(($urandom % 6) * 5 + 1);
      lk_row <= r; #0.5;
      w = ref_lookup(r);
      `CHECK(hit == (w >= 0), $sformatf("hit for row %0d", r))
      if (w >= 0) begin
        nhit++;
        `CHECK(hit_way == 2'(w), "hit way")
        touch <= 1; touch_way <= hit_way; @(posedge clk); touch <= 0; ref_use(w);
      end else begin
        nmiss++;
        v = ref_victim();
        if (ref_vld[v]) nevict++;
        `CHECK(victim == 2'(v), $sformatf("victim %0d exp %0d", victim, v))
        for (int k = 0; k < 16; k++) begin
          fill_we <= 1; fill_way <= 2'(v); fill_word <= 4'(k); fill_data <= nand_word(r, 16'(k));
          @(posedge clk);
        end
        fill_we <= 0; fill_done <= 1; fill_row <= r; @(posedge clk); fill_done <= 0;
        ref_row[v] = r; ref_vld[v] = 1; ref_use(v); w = v;
      end
      wd = $urandom % 16;
      rd_en <= 1; rd_way <= 2'(w); rd_word <= 4'(wd); @(posedge clk); rd_en <= 0; #0.5;
      `CHECK(rd_data == nand_word(r, 16'(wd)), "data")
    end
    `CHECK(nhit > 50 && nmiss > 20 && nevict > 10, "hits, misses and evictions all occurred")
    $display("hits=%0d misses=%0d evictions=%0d", nhit, nmiss, nevict);
    `FINISH
  end
endmodule
