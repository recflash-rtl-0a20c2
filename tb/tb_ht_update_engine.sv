// tb_ht_update_engine: the mapping-table update engine against a reference
// model of the remapping algorithm written here with queues.
// A frequency-ordered list of 40 keys is loaded, then rounds of new keys with
// random counts are inserted, with hot regions of 10, 3, 2 and 1 entries and
// regions covering all or all but one of the list (the threshold key is then
// the tail or next to it). After each
// round the test walks the table and compares the order (next and prev links),
// every key's physical address (hot keys by rank from hot_base_page, retired
// and appended keys in cold space in allocation order), the threshold count,
// and every remap report (key, old, new, kind) in order. It also checks that
// the scan never compares beyond the threshold key.
`include "tb_check.svh"
module tb_ht_update_engine;
  import recflash_pkg::*;
  int checks = 0, failures = 0;
  localparam int NR = 256, PB = 256;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  logic start = 0, busy, done; logic [KEY_W:0] hot_len = 10;
  logic [2:0] dim_log2 = 5; logic [PAGE_W-1:0] hot_base_page = 100, cold_base_page = 500;
  cnt_t tau_cnt;
  logic nk_valid = 0, nk_ready, nk_last = 0; key_t nk_key = '0; cnt_t nk_cnt = '0;
  logic rm_valid, rm_ready = 1; key_t rm_key; paddr_t rm_old, rm_new; logic [1:0] rm_kind;
  logic [31:0] st_inserted, st_appended, st_compares;
  logic list_load = 0; ptr_t load_head = PTR_NIL, load_tail = PTR_NIL, head, tail;
  logic e_req, e_we; key_t e_addr; ht_entry_t e_wdata, rdata;
  logic t_req = 0, t_we = 0; key_t t_addr = '0; ht_entry_t t_wdata = '0;

  ht_update_engine #(.PAGE_BYTES(PB)) dut (
    .clk, .rst_n, .start, .hot_len, .dim_log2, .hot_base_page, .cold_base_page, .busy, .done,
    .tau_cnt, .nk_valid, .nk_ready, .nk_key, .nk_cnt, .nk_last,
    .rm_valid, .rm_ready, .rm_key, .rm_old, .rm_new, .rm_kind,
    .st_inserted, .st_appended, .st_compares,
    .list_load, .load_head, .load_tail, .head, .tail,
    .mt_req(e_req), .mt_we(e_we), .mt_addr(e_addr), .mt_wdata(e_wdata), .mt_rdata(rdata));
  mapping_table #(.N_ROWS(NR)) u_mt (
    .clk, .req(busy ? e_req : t_req), .we(busy ? e_we : t_we), .addr(busy ? e_addr : t_addr),
    .wdata(busy ? e_wdata : t_wdata), .rdata);

  // ---- reference model ----
  int lst[$]; cnt_t rc [NR]; paddr_t ra [NR];
  typedef struct {int key; paddr_t o; paddr_t n; int kind;} rep_t;
  rep_t exp_rep[$]; int nrep = 0;

  function automatic paddr_t ag(int rank, int base);
    paddr_t a; int spp, g;
    spp = PB / (4 << dim_log2); g = rank / spp;
    a.slot = SLOT_W'(rank % spp); a.plane = PLANE_W'(g % 4); a.page = PAGE_W'(base + g / 4);
    return a;
  endfunction
  function automatic int idx_of(int k);
    foreach (lst[i]) if (lst[i] == k) return i;
    return -1;
  endfunction

  int tau, taup, cold_rank, max_cmp;
  task automatic model_round(int keys[$], cnt_t cnts[$]);
    int flag, ti;
    cold_rank = 0; max_cmp = 0;
    tau = lst[hot_len - 1]; taup = (hot_len > 1) ? lst[hot_len - 2] : -1;
    foreach (keys[j]) begin
      flag = 0;
      for (int i = 0; lst[i] != tau; i++) begin
        max_cmp++;
        if (cnts[j] > rc[lst[i]]) begin
          lst.insert(i, keys[j]); rc[keys[j]] = cnts[j]; ra[keys[j]] = '0;
          ti = idx_of(tau); lst.delete(ti); lst.push_back(tau);
          exp_rep.push_back('{tau, ra[tau], ag(cold_rank, cold_base_page), 1});
          ra[tau] = ag(cold_rank, cold_base_page); cold_rank++;
          tau = taup; taup = (idx_of(tau) > 0) ? lst[idx_of(tau) - 1] : -1;
          flag = 1; break;
        end
      end
      if (!flag) begin
        lst.push_back(keys[j]); rc[keys[j]] = cnts[j];
        ra[keys[j]] = ag(cold_rank, cold_base_page);
        exp_rep.push_back('{keys[j], '0, ra[keys[j]], 2}); cold_rank++;
      end
    end
    for (int i = 0; i <= idx_of(tau); i++) begin
      exp_rep.push_back('{lst[i], ra[lst[i]], ag(i, hot_base_page), 0});
      ra[lst[i]] = ag(i, hot_base_page);
    end
  endtask

  task automatic tb_read(int k, output ht_entry_t e);
    t_req <= 1; t_we <= 0; t_addr <= key_t'(k); @(posedge clk); t_req <= 0; #0.5; e = rdata;
  endtask

  always @(posedge clk) if (rst_n && rm_valid && rm_ready) begin
    `CHECK(nrep < exp_rep.size(), "unexpected report")
    if (nrep < exp_rep.size())
      `CHECK(rm_key == key_t'(exp_rep[nrep].key) && rm_old == exp_rep[nrep].o &&
             rm_new == exp_rep[nrep].n && rm_kind == 2'(exp_rep[nrep].kind),
             $sformatf("report %0d key %0d kind %0d", nrep, rm_key, rm_kind))
    nrep++;
  end

  initial begin repeat (500000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    int keys[$]; cnt_t cnts[$]; int next_key; int ins_total = 0, app_total = 0;
    ht_entry_t e; ptr_t p, pv;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    // initial descending list of 40 keys (key ids shuffled)
    for (int i = 0; i < 40; i++) begin
      int k; k = (i * 37 + 11) % 200;
      lst.push_back(k); rc[k] = cnt_t'(20000 - i * 400 - ($urandom % 300)); ra[k] = ag(i, 0);
    end
    foreach (lst[i]) begin
      t_req <= 1; t_we <= 1; t_addr <= key_t'(lst[i]);
      t_wdata <= '{cnt: rc[lst[i]], addr: ra[lst[i]],
                   prev: (i == 0) ? PTR_NIL : {1'b0, key_t'(lst[i-1])},
                   next: (i == lst.size() - 1) ? PTR_NIL : {1'b0, key_t'(lst[i+1])}};
      @(posedge clk);
    end
    t_req <= 0;
    list_load <= 1; load_head <= {1'b0, key_t'(lst[0])}; load_tail <= {1'b0, key_t'(lst[$])};
    @(posedge clk); list_load <= 0;
    next_key = 200;
    for (int round = 0; round < 8; round++) begin
      // hot region sizes, including a one-entry region and one that spans the
      // whole list (threshold key = tail)
      case (round)
        1: hot_len <= 2;  2: hot_len <= 1;  3: hot_len <= (KEY_W+1)'(lst.size());
        4: hot_len <= 3;  6: hot_len <= (KEY_W+1)'(lst.size() - 1);
        default: hot_len <= 10;
      endcase
      @(posedge clk);
      keys.delete(); cnts.delete();
      for (int j = 0; j < 6; j++) begin
        keys.push_back(next_key++);
        cnts.push_back((j % 2) ? cnt_t'(15000 + $urandom % 10000) : cnt_t'($urandom % 3000));
      end
      model_round(keys, cnts);
      rm_ready <= 1;
      start <= 1; @(posedge clk); start <= 0;
      foreach (keys[j]) begin
        nk_valid <= 1; nk_key <= key_t'(keys[j]); nk_cnt <= cnts[j]; nk_last <= (j == keys.size() - 1);
        @(posedge clk); while (!nk_ready) @(posedge clk);
      end
      nk_valid <= 0;
      while (!done) begin rm_ready <= ($urandom % 3) != 0; @(posedge clk); end
      @(posedge clk);
      `CHECK(st_compares <= 32'(max_cmp) && st_compares == 32'(max_cmp), $sformatf("compares %0d exp %0d", st_compares, max_cmp))
      ins_total += st_inserted; app_total += st_appended;
      `CHECK(tau_cnt == rc[tau], "threshold count")
      // walk the list
      p = head; pv = PTR_NIL;
      foreach (lst[i]) begin
        `CHECK(p == {1'b0, key_t'(lst[i])}, $sformatf("round %0d list[%0d]=%0d got %0d", round, i, lst[i], p))
        tb_read(lst[i], e);
        `CHECK(e.prev == pv, "prev link")
        `CHECK(e.addr == ra[lst[i]], $sformatf("address of key %0d", lst[i]))
        `CHECK(e.cnt == rc[lst[i]], "count")
        pv = p; p = e.next;
      end
      `CHECK(p == PTR_NIL && tail == {1'b0, key_t'(lst[$])}, "tail")
    end
    `CHECK(nrep == exp_rep.size(), "all reports seen")
    `CHECK(ins_total > 0 && app_total > 0, "both insertions and appends happened")
    $display("inserted=%0d appended=%0d reports=%0d", ins_total, app_total, nrep);
    `FINISH
  end
endmodule
