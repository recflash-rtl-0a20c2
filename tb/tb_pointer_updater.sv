// tb_pointer_updater: random insert / append / move-to-tail operations on a
// small mapping table, compared with a reference list kept as a queue. After
// every operation the whole list is walked and each next and prev link, the
// head and tail, the counts and the addresses (moved keys take their new
// address, old_addr reports the previous one) are checked.
`include "tb_check.svh"
module tb_pointer_updater;
  import recflash_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  logic start = 0, busy, done, op_set_addr = 0, list_load = 0;
  logic [1:0] op = 0; key_t op_key = '0, op_pos = '0; cnt_t op_cnt = '0; paddr_t op_addr = '0, old_addr;
  ptr_t load_head = PTR_NIL, load_tail = PTR_NIL, head, tail;
  logic p_req, p_we; key_t p_addr; ht_entry_t p_wdata, rdata;
  logic t_req = 0; key_t t_addr = '0;
  pointer_updater dut (.clk, .rst_n, .start, .op, .op_key, .op_pos, .op_cnt, .op_addr, .op_set_addr,
    .busy, .done, .old_addr, .list_load, .load_head, .load_tail, .head, .tail,
    .mt_req(p_req), .mt_we(p_we), .mt_addr(p_addr), .mt_wdata(p_wdata), .mt_rdata(rdata));
  mapping_table #(.N_ROWS(64)) u_mt (.clk, .req(busy ? p_req : t_req), .we(busy ? p_we : 1'b0),
    .addr(busy ? p_addr : t_addr), .wdata(p_wdata), .rdata);

  int lst[$]; cnt_t rc[64]; paddr_t ra[64]; int nops[3] = '{0, 0, 0};

  task automatic run_op(int o, int k, int p, cnt_t c, paddr_t a, bit seta);
    start <= 1; op <= 2'(o); op_key <= key_t'(k); op_pos <= key_t'(p); op_cnt <= c;
    op_addr <= a; op_set_addr <= seta;
    @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    nops[o]++;
  endtask

  task automatic walk();
    ptr_t q, pv; ht_entry_t e;
    q = head; pv = PTR_NIL;
    foreach (lst[i]) begin
      `CHECK(q == {1'b0, key_t'(lst[i])}, $sformatf("list[%0d]", i))
      t_req <= 1; t_addr <= key_t'(lst[i]); @(posedge clk); t_req <= 0; #0.5; e = rdata;
      `CHECK(e.prev == pv && e.cnt == rc[lst[i]] && e.addr == ra[lst[i]], $sformatf("entry %0d", lst[i]))
      pv = q; q = e.next;
    end
    `CHECK(q == PTR_NIL && tail == pv, "tail")
  endtask

  initial begin repeat (300000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    int nk, k, p, i; paddr_t a; cnt_t c;
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    nk = 0;
    for (int n = 0; n < 300; n++) begin
      c = $urandom; a = paddr_t'($urandom);
      if (lst.size() < 3 || (n % 4 == 0 && nk < 64)) begin
        if (nk >= 64) continue;
        k = nk++;
        if (lst.size() > 0 && ($urandom % 2)) begin           // insert before p
          i = $urandom % lst.size(); p = lst[i];
          run_op(0, k, p, c, a, 0); lst.insert(i, k);
        end else begin
          run_op(1, k, 0, c, a, 0); lst.push_back(k);
        end
        rc[k] = c; ra[k] = a;
      end else begin                                            // move to tail
        i = $urandom % lst.size(); k = lst[i];
        run_op(2, k, 0, c, a, n % 2);
        `CHECK(old_addr == ra[k], "old_addr")
        lst.delete(i); lst.push_back(k);
        if (n % 2) ra[k] = a;
      end
      walk();
    end
    `CHECK(nops[0] > 5 && nops[1] > 5 && nops[2] > 5, "all three operations exercised")
    `FINISH
  end
endmodule
