// tb_top_body.svh: body shared by the end-to-end testbenches of recflash_top.
// The including module declares localparams PB (page bytes), LINES (cache
// lines), NKEYS (keys loaded), TR (tR in cycles), NBAGS, BAGLEN and the macro
// DUT_PARAMS (empty for the full-size run), then includes this file.
//
// Flow: (1) host mode loads a frequency-ordered table of NKEYS keys whose
// addresses follow the offline remapping (rank order, spread over planes),
// loads the hot-region threshold and runs one threshold period against it;
// (2) serve mode runs NBAGS bags of skewed-random lookups plus a directed
// sequence that makes a page leave the cache while its plane's page buffer
// still holds it; every SLS sum is checked against sums computed from the
// reference page contents; (3) update mode inserts new keys, the remap
// reports keep the testbench's copy of the addresses current; (4) serve
// again, including new keys, then four cold pages of one page index with
// multi-plane reads (one tR, three buffer hits); (5) the trigger fires under
// both policies, against the threshold left by the update.
// Each mechanism (cache hit, miss, eviction, page-buffer hit, page read,
// insertion, append, retirement, trigger, no trigger, mode switch) is counted
// and a failure is counted for one that never happened.
  import recflash_pkg::*;
  import recflash_tb_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  mode_e mode = MODE_HOST; logic [2:0] dim_log2 = 3'd5; logic mp_en = 0;
  logic h_req = 0, h_we = 0; key_t h_addr = '0; ht_entry_t h_wdata = '0, h_rdata;
  logic list_load = 0; ptr_t load_head = PTR_NIL, load_tail = PTR_NIL, list_head, list_tail;
  logic lk_valid = 0, lk_ready, lk_last = 0; key_t lk_key = '0;
  logic res_valid, res_last; logic [5:0] res_idx; logic [31:0] res_data;
  logic upd_start = 0, upd_busy, upd_done; logic [KEY_W:0] hot_len = '0;
  logic [PAGE_W-1:0] hot_base_page = '0, cold_base_page = '0; cnt_t tau_cnt;
  logic nk_valid = 0, nk_ready, nk_last = 0; key_t nk_key = '0; cnt_t nk_cnt = '0;
  logic rm_valid, rm_ready = 1; key_t rm_key; paddr_t rm_old, rm_new; logic [1:0] rm_kind;
  policy_e policy = POLICY_THRESHOLD; logic oc_valid = 0, period_end = 0, trigger;
  cnt_t oc_cnt = '0; logic [31:0] trig_hot, trig_rows;
  logic thr_set = 0; cnt_t thr_value = '0, thr_cnt;
  logic [31:0] st_lookups, st_cache_hits, st_cache_misses, st_page_reads, st_pb_hits;
  logic [31:0] st_inserted, st_appended, st_compares;
  logic ce_n, cle, ale, we_n, re_n, io_oe, rb_n; logic [7:0] io_out, io_in;
  int array_reads, chgcol_err, mp_err;
  int n_mp_reads = 0, n_mp_hits = 0;

  recflash_top `DUT_PARAMS dut (
    .clk, .rst_n, .mode, .dim_log2, .mp_en, .h_req, .h_we, .h_addr, .h_wdata, .h_rdata,
    .list_load, .load_head, .load_tail, .list_head, .list_tail,
    .lk_valid, .lk_ready, .lk_key, .lk_last, .res_valid, .res_idx, .res_data, .res_last,
    .upd_start, .hot_len, .hot_base_page, .cold_base_page, .upd_busy, .upd_done, .tau_cnt,
    .nk_valid, .nk_ready, .nk_key, .nk_cnt, .nk_last,
    .rm_valid, .rm_ready, .rm_key, .rm_old, .rm_new, .rm_kind,
    .thr_set, .thr_value, .thr_cnt, .policy, .oc_valid, .oc_cnt, .period_end, .trigger, .trig_hot, .trig_rows,
    .st_lookups, .st_cache_hits, .st_cache_misses, .st_page_reads, .st_pb_hits,
    .st_inserted, .st_appended, .st_compares,
    .nand_ce_n(ce_n), .nand_cle(cle), .nand_ale(ale), .nand_we_n(we_n), .nand_re_n(re_n),
    .nand_io_out(io_out), .nand_io_oe(io_oe), .nand_io_in(io_in), .nand_rb_n(rb_n));
  nand_flash_model #(.T_R(TR)) u_nand (
    .clk, .ce_n, .cle, .ale, .we_n, .re_n, .io_in(io_out), .io_out(io_in), .rb_n,
    .array_reads, .chgcol_err, .mp_err);

  // ---- testbench copy of the table ----
  paddr_t ra [NKEYS + 64];
  cnt_t   rc [NKEYS + 64];
  int n_retired = 0, n_reports = 0, n_mode_sw = 0, n_trig = 0, n_quiet = 0;
  int n_evict = 0, n_bags = 0;

  function automatic paddr_t ag(int rank, int base);
    paddr_t a; int spp, g;
    spp = PB / 128; g = rank / spp;
    a.slot = SLOT_W'(rank % spp); a.plane = PLANE_W'(g % 4); a.page = PAGE_W'(base + g / 4);
    return a;
  endfunction

  always @(posedge clk) if (rst_n && rm_valid && rm_ready) begin
    n_reports++;
    if (rm_kind == 2'd1) n_retired++;
    if (rm_kind != 2'd2) `CHECK(rm_old == ra[rm_key] || rm_kind == 2'd0, "report old address")
    ra[rm_key] = rm_new;
  end

  task automatic set_mode(mode_e m);
    @(posedge clk); mode <= m; @(posedge clk); n_mode_sw++;
  endtask

  // serve one bag and check its SLS result
  int res_seen;
  logic [31:0] expv [32];
  task automatic serve_bag(int keys[$]);
    int t0;
    for (int e = 0; e < 32; e++) expv[e] = 0;
    foreach (keys[i])
      for (int e = 0; e < 32; e++)
        expv[e] += nand_word({ra[keys[i]].page, ra[keys[i]].plane},
                             16'(int'(ra[keys[i]].slot) * 32 + e));
    res_seen = 0;
    foreach (keys[i]) begin
      lk_valid <= 1; lk_key <= key_t'(keys[i]); lk_last <= (i == keys.size() - 1);
      @(posedge clk); while (!lk_ready) @(posedge clk);
    end
    lk_valid <= 0;
    t0 = 0;
    while (res_seen < 32 && t0 < 4000000) begin
      @(posedge clk); #0.5; t0++;
      if (res_valid) begin
        `CHECK(res_data == expv[res_idx], $sformatf("bag %0d elem %0d: %h exp %h", n_bags, res_idx, res_data, expv[res_idx]))
        res_seen++;
        if (res_seen == 32) `CHECK(res_last, "res_last on element 31")
      end
    end
    `CHECK(res_seen == 32, "bag result complete")
    n_bags++;
  endtask

  int pick_key_rank;
  function automatic int skewed_key();   // hot keys far more likely
    int r; r = $urandom % 100;
    return (r < 70) ? ($urandom % (NKEYS / 16 + 1)) : ($urandom % NKEYS);
  endfunction

  initial begin
    int keys[$]; int m0;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    // (1) load table: key k has rank k, count decreasing with k
    for (int k = 0; k < NKEYS; k++) begin
      rc[k] = cnt_t'(100000 - k * 7); ra[k] = ag(k, 0);
      h_req <= 1; h_we <= 1; h_addr <= key_t'(k);
      h_wdata <= '{cnt: rc[k], addr: ra[k], prev: (k == 0) ? PTR_NIL : {1'b0, key_t'(k - 1)},
                   next: (k == NKEYS - 1) ? PTR_NIL : {1'b0, key_t'(k + 1)}};
      @(posedge clk);
    end
    h_req <= 0; list_load <= 1; load_head <= '0; load_tail <= {1'b0, key_t'(NKEYS - 1)};
    @(posedge clk); list_load <= 0;
    h_req <= 1; h_we <= 0; h_addr <= key_t'(3); @(posedge clk); h_req <= 0; #0.5;
    `CHECK(h_rdata.addr == ra[3] && h_rdata.cnt == rc[3], "host read-back")
    // threshold of the offline table (hot region = first NKEYS/8 keys), and
    // one threshold period against it: 3 of 2000 online keys above it
    thr_set <= 1; thr_value <= rc[NKEYS / 8 - 1]; @(posedge clk); thr_set <= 0;
    for (int i = 0; i < 2000; i++) begin
      oc_valid <= 1; oc_cnt <= (i % 700 == 5) ? thr_cnt + 1 : thr_cnt; @(posedge clk);
    end
    oc_valid <= 0; period_end <= 1; @(posedge clk); period_end <= 0; #0.5;
    `CHECK(trigger == 1'b1 && trig_hot == 3 && trig_rows == 2000, "trigger against the loaded threshold")
    if (trigger) n_trig++;
    // (2) serve
    set_mode(MODE_SERVE);
    for (int b = 0; b < NBAGS; b++) begin
      keys.delete();
      for (int i = 0; i < BAGLEN; i++) keys.push_back(skewed_key());
      m0 = st_cache_misses;
      serve_bag(keys);
    end
    // directed: pages of planes 0,1,2,3 then more pages of planes 1..3 so the
    // plane-0 page leaves the cache while plane 0's page buffer keeps it
    keys.delete();
    for (int g = 0; g < LINES + 1; g++)   // page groups on planes 1..3 only after the first
      keys.push_back(((g == 0) ? 0 : (32 + 4 * ((g - 1) / 3) + 1 + (g - 1) % 3)) * (PB / 128) % NKEYS);
    keys.push_back(0);
    serve_bag(keys);
    n_evict = st_cache_misses - LINES;
    // (3) update: four new keys, two hot enough to enter the hot region
    set_mode(MODE_UPDATE);
    hot_len <= (KEY_W+1)'(NKEYS / 8); hot_base_page <= PAGE_W'(1000); cold_base_page <= PAGE_W'(2000);
    upd_start <= 1; @(posedge clk); upd_start <= 0;
    for (int j = 0; j < 4; j++) begin
      int k; k = NKEYS + j;
      rc[k] = (j % 2 == 0) ? cnt_t'(200000 + j) : cnt_t'(5);
      nk_valid <= 1; nk_key <= key_t'(k); nk_cnt <= rc[k]; nk_last <= (j == 3);
      @(posedge clk); while (!nk_ready) @(posedge clk);
    end
    nk_valid <= 0;
    while (!upd_done) @(posedge clk);
    `CHECK(list_head == {1'b0, key_t'(NKEYS + 2)}, "hottest new key is the head")
    `CHECK(n_reports == 2 + 2 + NKEYS / 8, $sformatf("remap reports %0d", n_reports))
    // (4) serve again with new and retired keys
    set_mode(MODE_SERVE);
    keys.delete(); keys = '{NKEYS, NKEYS + 1, NKEYS + 2, NKEYS + 3, NKEYS / 8 - 1, NKEYS / 8 - 2, 1};
    serve_bag(keys);
    // (4b) multi-plane page reads: the four pages of the last page index of the
    // offline layout (same page, planes 0..3) cost one tR, then three
    // page-buffer hits; the lines are first pushed out of the cache
    mp_en <= 1;
    begin
      int pr0, pb0, m1, gl;
      gl = (NKEYS / (PB / 128)) / 4 - 1;
      keys.delete();
      for (int g = 0; g < LINES; g++) keys.push_back(((4 * (gl - 1 - g / 4) + g % 4) * (PB / 128)) % NKEYS);
      serve_bag(keys);
      keys.delete();
      for (int p = 0; p < 4; p++) keys.push_back((4 * gl + p) * (PB / 128) + 1);
      pr0 = st_page_reads; pb0 = st_pb_hits; m1 = st_cache_misses;
      serve_bag(keys);
      n_mp_reads = st_page_reads - pr0; n_mp_hits = st_pb_hits - pb0;
      `CHECK(st_cache_misses - m1 == 4 && n_mp_reads == 1 && n_mp_hits == 3,
             $sformatf("multi-plane: %0d page reads, %0d buffer hits", n_mp_reads, n_mp_hits))
    end
    mp_en <= 0;
    // (5) trigger
    set_mode(MODE_HOST);
    `CHECK(thr_cnt == tau_cnt && thr_cnt == rc[NKEYS / 8 - 3], "threshold follows the update (two keys entered)")
    for (int pol = 0; pol < 2; pol++) begin
      policy <= pol ? POLICY_PERIOD : POLICY_THRESHOLD;
      for (int i = 0; i < 2000; i++) begin
        oc_valid <= 1; oc_cnt <= (i % 500 == 7) ? thr_cnt + 1 : cnt_t'($urandom % 100); @(posedge clk);
      end
      oc_valid <= 0; period_end <= 1; @(posedge clk); period_end <= 0; #0.5;
      `CHECK(trigger == 1'b1, "trigger: 4 of 2000 above threshold is over 0.1%")
      if (trigger) n_trig++;
      policy <= POLICY_THRESHOLD;
      for (int i = 0; i < 2000; i++) begin
        oc_valid <= 1; oc_cnt <= (i == 9) ? thr_cnt + 1 : cnt_t'($urandom % 100); @(posedge clk);
      end
      oc_valid <= 0; period_end <= 1; @(posedge clk); period_end <= 0; #0.5;
      `CHECK(trigger == 1'b0, "no trigger: 1 of 2000")
      if (!trigger) n_quiet++;
    end
    // mechanism coverage
    $display("bags=%0d lookups=%0d cache_hits=%0d misses=%0d evictions=%0d page_reads=%0d pb_hits=%0d",
             n_bags, st_lookups, st_cache_hits, st_cache_misses, n_evict, st_page_reads, st_pb_hits);
    $display("multi_plane_reads=%0d multi_plane_buffer_hits=%0d", n_mp_reads, n_mp_hits);
    $display("inserted=%0d appended=%0d retired=%0d compares=%0d triggers=%0d quiet=%0d mode_switches=%0d",
             st_inserted, st_appended, n_retired, st_compares, n_trig, n_quiet, n_mode_sw);
    `CHECK(st_cache_hits > 0, "cache hit happened")
    `CHECK(st_cache_misses > 0, "cache miss happened")
    `CHECK(n_evict > 0, "LRU eviction happened")
    `CHECK(st_page_reads > 0, "NAND page read happened")
    `CHECK(st_pb_hits > 0, "page-buffer reuse happened")
    `CHECK(st_inserted > 0, "hot-region insertion happened")
    `CHECK(st_appended > 0, "tail append happened")
    `CHECK(n_retired > 0, "hot key retired")
    `CHECK(n_trig > 0 && n_quiet > 0, "trigger fired and stayed quiet")
    `CHECK(n_mode_sw >= 4, "mode switches")
    `CHECK(chgcol_err == 0 && mp_err == 0, "page-buffer reuse only on open pages")
    `CHECK(st_page_reads == 32'(array_reads), "page reads match the die's array reads")
    `FINISH
  end
