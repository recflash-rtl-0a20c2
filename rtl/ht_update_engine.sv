// ht_update_engine: hardware mapping-table update for online remapping.
//
// After online training, the keys (vector IDs) seen in the new training data
// must enter the frequency-ordered mapping table. Instead of re-sorting the
// whole table, this engine only touches the hot-item region, the first
// hot_len entries of the list (the top-x% by access count):
//   Step 2  walk hot_len-1 links from the head to find the threshold key tau
//           (the last hot entry) and its predecessor tau_prev;
//   Step 3  for every new key (stream nk_*): scan from the head while the
//           scan pointer is not tau; at the first entry whose count is lower
//           than the new key's (hot_comparator), insert the key before it,
//           move tau to the tail and step tau back to tau_prev (so the hot
//           region keeps its size). A key that finds no such entry is
//           appended at the tail.
//   Step 4  walk the hot region again and give every hot key the address of
//           its rank (remap_addr_gen, pages filled in rank order, spread over
//           planes) in fresh pages starting at hot_base_page.
// Keys that leave the region (retired tau) and new keys appended at the tail
// are placed directly in free cold space, allocated in order from
// cold_base_page. Every address change is reported on the rm_* stream
// (key, old, new, kind) so firmware can copy the vector in NAND: kind 0 = hot
// reassign, 1 = retired hot key, 2 = new cold key (no old copy).
//
// The mapping table is reached through one port with a one-cycle read; the
// pointer_updater performs the link edits on it. start is taken in S_IDLE;
// done pulses when all new keys (the last one marked by nk_last) are placed
// and the hot region is reassigned. Per new key the scan costs 2 cycles per
// compared entry. Steps 2-4 follow the paper's algorithm; placing retired
// hot keys in cold space follows the paper's text (its Step 4 would keep
// their addresses). The allocation order of cold space, the report stream and
// requiring new keys to be absent from the list are this implementation's.
module ht_update_engine
  import recflash_pkg::*;
#(
  parameter int unsigned PAGE_BYTES = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
  // control
  input  logic        start,
  input  logic [KEY_W:0] hot_len,        // entries in the hot region (>= 1)
  input  logic [2:0]  dim_log2,
  input  logic [PAGE_W-1:0] hot_base_page,
  input  logic [PAGE_W-1:0] cold_base_page,
  output logic        busy,
  output logic        done,
  output cnt_t        tau_cnt,          // access count of the threshold key
  // new keys from the online training set
  input  logic        nk_valid,
  output logic        nk_ready,
  input  key_t        nk_key,
  input  cnt_t        nk_cnt,
  input  logic        nk_last,
  // remap reports
  output logic        rm_valid,
  input  logic        rm_ready,
  output key_t        rm_key,
  output paddr_t      rm_old,
  output paddr_t      rm_new,
  output logic [1:0]  rm_kind,
  // statistics (since start)
  output logic [31:0] st_inserted,
  output logic [31:0] st_appended,
  output logic [31:0] st_compares,
  // list load by the host
  input  logic        list_load,
  input  ptr_t        load_head,
  input  ptr_t        load_tail,
  output ptr_t        head,
  output ptr_t        tail,
  // mapping table port
  output logic        mt_req,
  output logic        mt_we,
  output key_t        mt_addr,
  output ht_entry_t   mt_wdata,
  input  ht_entry_t   mt_rdata
);
  typedef enum logic [4:0] {
    S_IDLE, S_FIND_R, S_FIND_D, S_NEXTKEY, S_SCAN_R, S_SCAN_D,
    S_INS_W, S_MOV_W, S_RETIRE_RM, S_TAU_R, S_TAU_D,
    S_APP_W, S_APP_RM, S_ASG_R, S_ASG_W, S_ASG_RM, S_DONE
  } state_e;
  state_e st;

  ptr_t        ptr, tau, tau_prev;
  logic [KEY_W:0] idx;
  key_t        k_new;
  cnt_t        c_new;
  logic        last_q;
  logic [KEY_W-1:0] hot_rank, cold_rank;

  // ---- sub-blocks ----
  logic   gt;
  hot_comparator #(.W(CNT_W)) u_cmp (.cand(c_new), .ref_cnt(mt_rdata.cnt), .gt(gt));

  paddr_t hot_addr, cold_addr;
  remap_addr_gen #(.PAGE_BYTES(PAGE_BYTES)) u_hot_ag (
    .rank(hot_rank), .dim_log2(dim_log2), .base_page(hot_base_page), .addr(hot_addr));
  remap_addr_gen #(.PAGE_BYTES(PAGE_BYTES)) u_cold_ag (
    .rank(cold_rank), .dim_log2(dim_log2), .base_page(cold_base_page), .addr(cold_addr));

  logic       pu_start, pu_busy, pu_done, pu_set_addr;
  logic [1:0] pu_op;
  key_t       pu_key, pu_pos;
  cnt_t       pu_cnt;
  paddr_t     pu_addr, pu_old;
  logic       pu_req, pu_we;
  key_t       pu_maddr;
  ht_entry_t  pu_wdata;

  pointer_updater u_pu (
    .clk, .rst_n,
    .start(pu_start), .op(pu_op), .op_key(pu_key), .op_pos(pu_pos), .op_cnt(pu_cnt),
    .op_addr(pu_addr), .op_set_addr(pu_set_addr), .busy(pu_busy), .done(pu_done),
    .old_addr(pu_old),
    .list_load, .load_head, .load_tail, .head, .tail,
    .mt_req(pu_req), .mt_we(pu_we), .mt_addr(pu_maddr), .mt_wdata(pu_wdata), .mt_rdata);

  // ---- updater commands (combinational, one-cycle start pulses) ----
  logic issued;   // the updater command of the current state was started
  always_comb begin
    pu_start = 1'b0; pu_op = 2'd0; pu_key = k_new; pu_pos = ptr[KEY_W-1:0];
    pu_cnt = c_new; pu_addr = cold_addr; pu_set_addr = 1'b0;
    unique case (st)
      S_INS_W: begin pu_start = !issued; pu_op = 2'd0; pu_addr = '0; end
      S_MOV_W: begin pu_start = !issued; pu_op = 2'd2; pu_key = tau[KEY_W-1:0];
                     pu_set_addr = 1'b1; end
      S_APP_W: begin pu_start = !issued; pu_op = 2'd1; end
      default: ;
    endcase
  end

  // ---- own table accesses ----
  logic      e_req, e_we;
  key_t      e_addr;
  ht_entry_t e_wdata;
  always_comb begin
    e_req = 1'b0; e_we = 1'b0; e_addr = ptr[KEY_W-1:0]; e_wdata = mt_rdata;
    unique case (st)
      S_FIND_R, S_SCAN_R, S_ASG_R: e_req = 1'b1;
      S_TAU_R: begin e_req = 1'b1; e_addr = tau[KEY_W-1:0]; end
      S_ASG_W: begin e_req = 1'b1; e_we = 1'b1; e_wdata.addr = hot_addr; end
      default: ;
    endcase
  end

  always_comb begin
    if (pu_busy) begin
      mt_req = pu_req; mt_we = pu_we; mt_addr = pu_maddr; mt_wdata = pu_wdata;
    end else begin
      mt_req = e_req;  mt_we = e_we;  mt_addr = e_addr;   mt_wdata = e_wdata;
    end
  end

  assign busy     = (st != S_IDLE);
  assign nk_ready = (st == S_NEXTKEY);

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ptr <= PTR_NIL; tau <= PTR_NIL; tau_prev <= PTR_NIL; idx <= '0;
      k_new <= '0; c_new <= '0; last_q <= 1'b0; hot_rank <= '0; cold_rank <= '0;
      issued <= 1'b0; done <= 1'b0; tau_cnt <= '0;
      rm_valid <= 1'b0; rm_key <= '0; rm_old <= '0; rm_new <= '0; rm_kind <= '0;
      st_inserted <= '0; st_appended <= '0; st_compares <= '0;
    end else begin
      done <= 1'b0;
      if (rm_valid && rm_ready) rm_valid <= 1'b0;
      if (pu_start) issued <= 1'b1;
      unique case (st)
        S_IDLE: if (start) begin
          ptr <= head; idx <= (KEY_W+1)'(1); cold_rank <= '0; hot_rank <= '0;
          st_inserted <= '0; st_appended <= '0; st_compares <= '0;
          st <= S_FIND_R;
        end
        // ---- Step 2: threshold key ----
        S_FIND_R: st <= S_FIND_D;
        S_FIND_D: begin
          if (idx == hot_len || mt_rdata.next == PTR_NIL) begin
            tau <= ptr; tau_prev <= mt_rdata.prev; tau_cnt <= mt_rdata.cnt;
            st <= S_NEXTKEY;
          end else begin
            ptr <= mt_rdata.next; idx <= idx + 1'b1; st <= S_FIND_R;
          end
        end
        // ---- Step 3: insert new keys ----
        S_NEXTKEY: if (nk_valid) begin
          k_new <= nk_key; c_new <= nk_cnt; last_q <= nk_last;
          ptr <= head; st <= S_SCAN_R;
        end
        S_SCAN_R: begin
          if (ptr == tau) begin issued <= 1'b0; st <= S_APP_W; end  // no insertion point
          else st <= S_SCAN_D;
        end
        S_SCAN_D: begin
          st_compares <= st_compares + 1'b1;
          if (gt) begin issued <= 1'b0; st <= S_INS_W; end
          else begin ptr <= mt_rdata.next; st <= S_SCAN_R; end
        end
        S_INS_W: if (issued && pu_done) begin
          st_inserted <= st_inserted + 1'b1;
          issued <= 1'b0; st <= S_MOV_W;
        end
        S_MOV_W: if (issued && pu_done) begin
          rm_valid <= 1'b1; rm_key <= tau[KEY_W-1:0]; rm_old <= pu_old;
          rm_new <= cold_addr; rm_kind <= 2'd1;
          cold_rank <= cold_rank + 1'b1;
          tau <= tau_prev;
          st <= S_RETIRE_RM;
        end
        S_RETIRE_RM: if (!rm_valid || rm_ready) st <= S_TAU_R;
        S_TAU_R: st <= S_TAU_D;                 // read new tau for prev and count
        S_TAU_D: begin
          tau_prev <= mt_rdata.prev; tau_cnt <= mt_rdata.cnt;
          st <= last_q ? S_ASG_R : S_NEXTKEY;
          if (last_q) begin ptr <= head; hot_rank <= '0; end
        end
        S_APP_W: if (issued && pu_done) begin
          st_appended <= st_appended + 1'b1;
          rm_valid <= 1'b1; rm_key <= k_new; rm_old <= '0;
          rm_new <= cold_addr; rm_kind <= 2'd2;
          cold_rank <= cold_rank + 1'b1;
          issued <= 1'b0; st <= S_APP_RM;
        end
        S_APP_RM: if (!rm_valid || rm_ready) begin
          st <= last_q ? S_ASG_R : S_NEXTKEY;
          if (last_q) begin ptr <= head; hot_rank <= '0; end
        end
        // ---- Step 4: reassign hot addresses ----
        S_ASG_R: st <= S_ASG_W;
        S_ASG_W: begin
          rm_valid <= 1'b1; rm_key <= ptr[KEY_W-1:0]; rm_old <= mt_rdata.addr;
          rm_new <= hot_addr; rm_kind <= 2'd0;
          st <= S_ASG_RM;
          if (ptr != tau) ptr <= mt_rdata.next;
        end
        S_ASG_RM: if (!rm_valid || rm_ready) begin
          hot_rank <= hot_rank + 1'b1;
          st <= (ptr == tau && rm_key == tau[KEY_W-1:0]) ? S_DONE : S_ASG_R;
        end
        S_DONE: begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (!start || head != PTR_NIL)
      else $error("ht_update_engine: started on an empty list");
endmodule
