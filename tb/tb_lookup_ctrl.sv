// tb_lookup_ctrl: the lookup sequencer with a real page cache, channel
// controller, mapping table and the NAND die model. Each looked-up vector is
// checked element by element on the SLS stream (values, element index, first
// and last flags of the bag). A cache hit must deliver its vector in
// 4 + dim cycles from the accepted request to the last element; a miss must
// fill the cache with one page read (or a page-buffer reuse). The second
// half of the run uses multi-plane page reads in the channel controller.
`include "tb_check.svh"
module tb_lookup_ctrl;
  import recflash_pkg::*;
  import recflash_tb_pkg::*;
  int checks = 0, failures = 0;
  localparam int PB = 512, CB = 2048;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  logic [2:0] dim_log2 = 5;
  logic q_valid = 0, q_ready, q_last = 0; key_t q_key = '0;
  logic mt_req; key_t mt_addr; ht_entry_t mt_rdata;
  logic t_req = 0; key_t t_addr = '0; ht_entry_t t_wdata = '0;
  row_t pc_lk_row, pc_fill_row; logic pc_hit, pc_touch, pc_fill_we, pc_fill_done, pc_rd_en;
  logic [1:0] pc_hit_way, pc_victim, pc_touch_way, pc_fill_way, pc_rd_way;
  logic [6:0] pc_fill_word, pc_rd_word; logic [31:0] pc_fill_data, pc_rd_data;
  logic nd_req_valid, nd_req_ready, nd_dout_valid, nd_dout_last, ev_page_read, ev_pb_hit;
  row_t nd_req_row; col_t nd_req_col; logic [15:0] nd_req_len; logic [7:0] nd_dout_byte;
  logic sls_valid, sls_first, sls_last, sls_elem_last; logic [5:0] sls_idx; logic [31:0] sls_data;
  logic [31:0] st_lookups, st_hits, st_misses;
  logic ce_n, cle, ale, we_n, re_n, io_oe, rb_n; logic [7:0] io_out, io_in; int array_reads, chgcol_err, mp_err;
  logic mp_en = 0;

  lookup_ctrl #(.PAGE_BYTES(PB), .CACHE_BYTES(CB), .MAX_DIM(64)) dut (.*);
  mapping_table #(.N_ROWS(256)) u_mt (.clk, .req(t_req | mt_req), .we(t_req), .addr(t_req ? t_addr : mt_addr),
    .wdata(t_wdata), .rdata(mt_rdata));
  page_cache #(.CACHE_BYTES(CB), .PAGE_BYTES(PB)) u_pc (.clk, .rst_n, .lk_row(pc_lk_row), .hit(pc_hit),
    .hit_way(pc_hit_way), .victim(pc_victim), .touch(pc_touch), .touch_way(pc_touch_way),
    .fill_we(pc_fill_we), .fill_way(pc_fill_way), .fill_word(pc_fill_word), .fill_data(pc_fill_data),
    .fill_done(pc_fill_done), .fill_row(pc_fill_row), .rd_en(pc_rd_en), .rd_way(pc_rd_way),
    .rd_word(pc_rd_word), .rd_data(pc_rd_data));
  nand_channel_ctrl #(.T_WC(4), .T_RC(2), .T_RR(4)) u_nc (.clk, .rst_n, .mp_en, .req_valid(nd_req_valid),
    .req_ready(nd_req_ready), .req_row(nd_req_row), .req_col(nd_req_col), .req_len(nd_req_len),
    .dout_valid(nd_dout_valid), .dout_byte(nd_dout_byte), .dout_last(nd_dout_last),
    .ev_page_read, .ev_pb_hit, .nand_ce_n(ce_n), .nand_cle(cle), .nand_ale(ale), .nand_we_n(we_n),
    .nand_re_n(re_n), .nand_io_out(io_out), .nand_io_oe(io_oe), .nand_io_in(io_in), .nand_rb_n(rb_n));
  nand_flash_model #(.T_R(100)) u_nand (.clk, .ce_n, .cle, .ale, .we_n, .re_n, .io_in(io_out),
    .io_out(io_in), .rb_n, .array_reads, .chgcol_err, .mp_err);

  paddr_t ra [256];
  initial begin repeat (2000000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  int nhit_lat = 0;
  initial begin
    int k, m0, t0, ne, dim; bit first; paddr_t a;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int i = 0; i < 256; i++) begin
      a = paddr_t'($urandom); a.page = PAGE_W'($urandom % 5); a.slot = SLOT_W'($urandom % 4);
      ra[i] = a;
      t_req <= 1; t_addr <= key_t'(i); t_wdata <= '{cnt: '0, addr: a, prev: PTR_NIL, next: PTR_NIL};
      @(posedge clk);
    end
    t_req <= 0; first = 1;
    for (int n = 0; n < 300; n++) begin
      k = $urandom % 256; dim = (n % 3 == 0) ? 64 : 32; dim_log2 <= (dim == 64) ? 3'd6 : 3'd5;
      if (dim == 64) begin ra[k].slot = SLOT_W'($urandom % 2);
        t_req <= 1; t_addr <= key_t'(k); t_wdata <= '{cnt: '0, addr: ra[k], prev: PTR_NIL, next: PTR_NIL};
        @(posedge clk); t_req <= 0; end
      m0 = st_misses; mp_en <= (n >= 150);
      q_valid <= 1; q_key <= key_t'(k); q_last <= (n % 4 == 3);
      @(posedge clk); while (!q_ready) @(posedge clk);
      q_valid <= 0; t0 = $time; ne = 0;
      while (ne < dim) begin
        @(posedge clk); #0.5;
        if (sls_valid) begin
          `CHECK(sls_idx == 6'(ne) && sls_data == nand_word({ra[k].page, ra[k].plane}, 16'(int'(ra[k].slot) * dim + ne)),
                 $sformatf("lookup %0d elem %0d", n, ne))
          `CHECK(sls_first == first && sls_last == (n % 4 == 3) && sls_elem_last == (ne == dim - 1), "flags")
          ne++;
        end
      end
      if (st_misses == m0) begin
        `CHECK(($time - t0) / 2 == 4 + dim, $sformatf("hit latency %0d exp %0d", ($time - t0) / 2, 4 + dim))
        nhit_lat++;
      end
      first = (n % 4 == 3);
      @(posedge clk);
    end
    `CHECK(st_lookups == 300 && st_hits + st_misses == 300, "lookup counters")
    `CHECK(st_hits > 20 && st_misses > 20, "hits and misses both occurred")
    `CHECK(32'(array_reads) <= st_misses && chgcol_err == 0 && mp_err == 0, "at most one page read per miss")
    $display("hits=%0d misses=%0d array_reads=%0d", st_hits, st_misses, array_reads);
    `FINISH
  end
endmodule
