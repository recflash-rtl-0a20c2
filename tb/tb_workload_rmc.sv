// tb_workload_rmc: the three recommendation-model workloads (RMC1, RMC2,
// RMC3) on a scaled recflash_top, at three locality levels (K0-K2) and under
// three data layouts.
//
// Bag shapes are the models' own: RMC1 80 lookups of dim-32 vectors, RMC2 120
// lookups of dim 64, RMC3 20 lookups of dim 32, one embedding table per run.
// Sizes are scaled so the run takes seconds: 2048 rows instead of 1M, 1 KB
// pages with an 8-page cache (the same 8-page ratio as 128 KB over 16 KB), and
// tR of 3000 cycles. Locality follows the paper's unique-access rate, 8 % for
// K0 and 66 % for K2; K1 is set to 30 % here (the paper gives only the range).
// A lookup is a new key with that probability, otherwise a repeat of a key
// already used in the run. New keys follow a skewed popularity (key id =
// popularity rank): 60 % fall among the 64 hottest keys, 25 % in the top 512,
// the rest are uniform. This generator is this testbench's own; the paper's
// trace generator is not described. The key streams come from a fixed linear
// congruential generator, so every layout serves the same lookups.
// Layouts:
//   base   vectors placed in a scrambled order (position = key*1237+71 mod
//          rows), the unordered mapping the frequency layout improves on;
//   freq   frequency-ordered, plane-distributed layout (rank order);
//   freq+mp the same with multi-plane page reads.
// Every SLS sum is checked against sums of the reference page contents. Per
// run the cache hits, misses, NAND page reads and page-buffer hits are
// printed. For every model and locality the frequency layout must need no
// more page reads than the scrambled one, and fewer summed over each model.
`include "tb_check.svh"
module tb_workload_rmc;
  import recflash_pkg::*;
  import recflash_tb_pkg::*;
  localparam int PB = 1024, NKEYS = 2048, TR = 3000, NBAGS = 2;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  mode_e mode = MODE_HOST; logic [2:0] dim_log2 = 3'd5; logic mp_en = 0;
  logic h_req = 0, h_we = 0; key_t h_addr = '0; ht_entry_t h_wdata = '0, h_rdata;
  logic list_load = 0; ptr_t list_head, list_tail;
  logic lk_valid = 0, lk_ready, lk_last = 0; key_t lk_key = '0;
  logic res_valid, res_last; logic [5:0] res_idx; logic [31:0] res_data;
  logic upd_busy, upd_done, nk_ready, rm_valid, trigger; cnt_t tau_cnt, thr_cnt;
  key_t rm_key; paddr_t rm_old, rm_new; logic [1:0] rm_kind; logic [31:0] trig_hot, trig_rows;
  logic [31:0] st_lookups, st_cache_hits, st_cache_misses, st_page_reads, st_pb_hits;
  logic [31:0] st_inserted, st_appended, st_compares;
  logic ce_n, cle, ale, we_n, re_n, io_oe, rb_n; logic [7:0] io_out, io_in;
  int array_reads, chgcol_err, mp_err;

  recflash_top #(.N_ROWS(NKEYS), .PAGE_BYTES(PB), .CACHE_BYTES(8 * PB)) dut (
    .clk, .rst_n, .mode, .dim_log2, .mp_en, .h_req, .h_we, .h_addr, .h_wdata, .h_rdata,
    .list_load, .load_head(PTR_NIL), .load_tail(PTR_NIL), .list_head, .list_tail,
    .lk_valid, .lk_ready, .lk_key, .lk_last, .res_valid, .res_idx, .res_data, .res_last,
    .upd_start(1'b0), .hot_len('0), .hot_base_page('0), .cold_base_page('0),
    .upd_busy, .upd_done, .tau_cnt,
    .nk_valid(1'b0), .nk_ready, .nk_key('0), .nk_cnt('0), .nk_last(1'b0),
    .rm_valid, .rm_ready(1'b1), .rm_key, .rm_old, .rm_new, .rm_kind,
    .thr_set(1'b0), .thr_value('0), .thr_cnt, .policy(POLICY_PERIOD), .oc_valid(1'b0),
    .oc_cnt('0), .period_end(1'b0), .trigger, .trig_hot, .trig_rows,
    .st_lookups, .st_cache_hits, .st_cache_misses, .st_page_reads, .st_pb_hits,
    .st_inserted, .st_appended, .st_compares,
    .nand_ce_n(ce_n), .nand_cle(cle), .nand_ale(ale), .nand_we_n(we_n), .nand_re_n(re_n),
    .nand_io_out(io_out), .nand_io_oe(io_oe), .nand_io_in(io_in), .nand_rb_n(rb_n));
  nand_flash_model #(.T_R(TR)) u_nand (
    .clk, .ce_n, .cle, .ale, .we_n, .re_n, .io_in(io_out), .io_out(io_in), .rb_n,
    .array_reads, .chgcol_err, .mp_err);

  initial begin
    repeat (120000000) @(posedge clk);
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  paddr_t ra [NKEYS];
  int dim;

  // rank -> address, pages filled in rank order and spread over the planes
  function automatic paddr_t ag(int rank);
    paddr_t a; int spp, g;
    spp = PB / (4 * dim); g = rank / spp;
    a.slot = SLOT_W'(rank % spp); a.plane = PLANE_W'(g % 4); a.page = PAGE_W'(g / 4);
    return a;
  endfunction

  logic [31:0] lcg;
  int hist[$];
  function automatic int rnd(int n);
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return int'(lcg[31:16]) % n;
  endfunction
  function automatic int next_key(int uniq_pct);
    int r, k;
    if (hist.size() > 0 && rnd(100) >= uniq_pct) return hist[rnd(hist.size())];
    r = rnd(100);
    k = new_key(r);
    hist.push_back(k);
    return k;
  endfunction
  function automatic int new_key(int r);
    if (r < 60) return rnd(64);
    if (r < 85) return rnd(512);
    return rnd(NKEYS);
  endfunction

  task automatic load_table(int layout);
    mode <= MODE_HOST; @(posedge clk);
    for (int k = 0; k < NKEYS; k++) begin
      ra[k] = (layout == 0) ? ag((k * 1237 + 71) % NKEYS) : ag(k);
      h_req <= 1; h_we <= 1; h_addr <= key_t'(k);
      h_wdata <= '{cnt: cnt_t'(NKEYS - k), addr: ra[k], prev: PTR_NIL, next: PTR_NIL};
      @(posedge clk);
    end
    h_req <= 0; h_we <= 0; @(posedge clk);
  endtask

  logic [31:0] expv [64];
  task automatic serve_bag(int keys[$]);
    int seen, t;
    for (int e = 0; e < 64; e++) expv[e] = 0;
    foreach (keys[i])
      for (int e = 0; e < dim; e++)
        expv[e] += nand_word({ra[keys[i]].page, ra[keys[i]].plane}, 16'(int'(ra[keys[i]].slot) * dim + e));
    fork
      begin
        foreach (keys[i]) begin
          lk_valid <= 1; lk_key <= key_t'(keys[i]); lk_last <= (i == keys.size() - 1);
          @(posedge clk); while (!lk_ready) @(posedge clk);
        end
        lk_valid <= 0;
      end
      begin
        seen = 0; t = 0;
        while (seen < dim && t < 20000000) begin
          @(posedge clk); #0.5; t++;
          if (res_valid) begin
            `CHECK(res_data == expv[res_idx], $sformatf("elem %0d: %h exp %h", res_idx, res_data, expv[res_idx]))
            seen++;
            if (seen == dim) `CHECK(res_last, "res_last on the final element")
          end
        end
        `CHECK(seen == dim, "bag result complete")
      end
    join
  endtask

  int pr [3][3], hits [3][3], prs [3][3];
  initial begin
    string mname [3] = '{"RMC1", "RMC2", "RMC3"};
    int mdim [3] = '{32, 64, 32};
    int mlook [3] = '{80, 120, 20};
    string lname [3] = '{"base", "freq", "freq+mp"};
    int uniq [3] = '{8, 30, 66};
    int keys[$];
    for (int m = 0; m < 3; m++) for (int l = 0; l < 3; l++) prs[m][l] = 0;
    for (int m = 0; m < 3; m++) for (int k = 0; k < 3; k++) begin
      dim = mdim[m];
      for (int l = 0; l < 3; l++) begin
        rst_n <= 0; repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
        dim_log2 <= (dim == 64) ? 3'd6 : 3'd5; mp_en <= (l == 2);
        load_table(l == 0 ? 0 : 1);
        mode <= MODE_SERVE; @(posedge clk);
        lcg = 32'h1234 + 32'(m * 3 + k); hist.delete();
        for (int b = 0; b < NBAGS; b++) begin
          keys.delete();
          for (int i = 0; i < mlook[m]; i++) keys.push_back(next_key(uniq[k]));
          serve_bag(keys);
        end
        pr[m][l] = int'(st_page_reads); hits[m][l] = int'(st_cache_hits);
        prs[m][l] += pr[m][l];
        $display("%s K%0d %-7s lookups=%0d cache_hits=%0d misses=%0d page_reads=%0d pb_hits=%0d",
                 mname[m], k, lname[l], st_lookups, st_cache_hits, st_cache_misses, st_page_reads, st_pb_hits);
        `CHECK(st_lookups == 32'(NBAGS * mlook[m]), "lookup count")
        `CHECK(chgcol_err == 0 && mp_err == 0, "page-buffer reuse only on open pages")
      end
      `CHECK(pr[m][1] <= pr[m][0], $sformatf("%s K%0d: frequency layout needs no more page reads", mname[m], k))
    end
    for (int m = 0; m < 3; m++) begin
      $display("%s total page reads: base %0d, freq %0d, freq+mp %0d", mname[m], prs[m][0], prs[m][1], prs[m][2]);
      `CHECK(prs[m][1] < prs[m][0], $sformatf("%s: frequency layout needs fewer page reads", mname[m]))
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
