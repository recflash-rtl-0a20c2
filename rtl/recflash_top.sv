// recflash_top: the RecFlash SSD-controller datapath for embedding lookups
// with frequency-based data mapping.
//
// Two paths share the mapping table (vector ID -> NAND address, access count,
// frequency-order links):
//  * serving (mode MODE_SERVE): vector IDs enter the transaction queue; the
//    lookup controller translates each through the mapping table, serves it
//    from the page-wise cache or fills the cache from NAND through the channel
//    controller (which reuses a page still held in a plane's page buffer),
//    and the SLS unit sums the vectors of each bag into the result stream;
//  * updating (mode MODE_UPDATE): after online training the update engine
//    inserts new keys into the hot region of the frequency-ordered list and
//    reassigns hot addresses, reporting every address change on rm_*.
// In MODE_HOST the host (firmware) reads and writes table entries directly,
// e.g. to load the table built offline, and sets the list ends with
// list_load, and the hot-region threshold count with thr_set. The trigger unit
// watches the online-training counts against that threshold count (replaced
// by the threshold key's count after every update) and raises trigger at a
// period end.
//
// mp_en makes every NAND page read a multi-plane read of the same page on all
// planes, so the neighbouring hot pages of the layout arrive in the same tR.
//
// The mode selects which path drives the table port; a lookup or update must
// not be in flight when the mode changes. The NAND bus of one channel and all
// host-side streams are ports; the NAND devices, DRAM, host interface and
// CPU are outside. The block split follows the paper's architecture figure;
// one channel, the mode port, the multi-plane switch and in-order serving are
// this implementation's.
module recflash_top
  import recflash_pkg::*;
#(
  parameter int unsigned N_ROWS      = 1048576,
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned CACHE_BYTES = 131072,
  parameter int unsigned MAX_DIM     = 64,
  parameter int unsigned Q_DEPTH     = 16,
  parameter int unsigned T_WC        = 10,
  parameter int unsigned T_RC        = 10,
  parameter int unsigned T_RR        = 10,
  localparam int unsigned IW = $clog2(MAX_DIM)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  mode_e       mode,
  input  logic [2:0]  dim_log2,
  input  logic        mp_en,        // multi-plane page reads on the channel
  // host access to the mapping table (MODE_HOST)
  input  logic        h_req,
  input  logic        h_we,
  input  key_t        h_addr,
  input  ht_entry_t   h_wdata,
  output ht_entry_t   h_rdata,
  input  logic        list_load,
  input  ptr_t        load_head,
  input  ptr_t        load_tail,
  output ptr_t        list_head,
  output ptr_t        list_tail,
  // lookups (MODE_SERVE)
  input  logic        lk_valid,
  output logic        lk_ready,
  input  key_t        lk_key,
  input  logic        lk_last,
  output logic        res_valid,
  output logic [IW-1:0] res_idx,
  output logic [31:0] res_data,
  output logic        res_last,
  // mapping-table update (MODE_UPDATE)
  input  logic        upd_start,
  input  logic [KEY_W:0] hot_len,
  input  logic [PAGE_W-1:0] hot_base_page,
  input  logic [PAGE_W-1:0] cold_base_page,
  output logic        upd_busy,
  output logic        upd_done,
  output cnt_t        tau_cnt,
  input  logic        nk_valid,
  output logic        nk_ready,
  input  key_t        nk_key,
  input  cnt_t        nk_cnt,
  input  logic        nk_last,
  output logic        rm_valid,
  input  logic        rm_ready,
  output key_t        rm_key,
  output paddr_t      rm_old,
  output paddr_t      rm_new,
  output logic [1:0]  rm_kind,
  // online-training trigger
  input  logic        thr_set,      // load the hot-region threshold count
  input  cnt_t        thr_value,
  output cnt_t        thr_cnt,
  input  policy_e     policy,
  input  logic        oc_valid,
  input  cnt_t        oc_cnt,
  input  logic        period_end,
  output logic        trigger,
  output logic [31:0] trig_hot,
  output logic [31:0] trig_rows,
  // statistics
  output logic [31:0] st_lookups,
  output logic [31:0] st_cache_hits,
  output logic [31:0] st_cache_misses,
  output logic [31:0] st_page_reads,
  output logic [31:0] st_pb_hits,
  output logic [31:0] st_inserted,
  output logic [31:0] st_appended,
  output logic [31:0] st_compares,
  // NAND channel
  output logic        nand_ce_n,
  output logic        nand_cle,
  output logic        nand_ale,
  output logic        nand_we_n,
  output logic        nand_re_n,
  output logic [7:0]  nand_io_out,
  output logic        nand_io_oe,
  input  logic [7:0]  nand_io_in,
  input  logic        nand_rb_n
);
  localparam int unsigned LINES  = CACHE_BYTES / PAGE_BYTES;
  localparam int unsigned WAY_W  = (LINES > 1) ? $clog2(LINES) : 1;
  localparam int unsigned WORD_W = $clog2(PAGE_BYTES / 4);

  // ---- mapping table and its port arbitration ----
  logic      mt_req, mt_we;
  key_t      mt_addr;
  ht_entry_t mt_wdata, mt_rdata;
  logic      lc_req;  key_t lc_addr;
  logic      ue_req, ue_we; key_t ue_addr; ht_entry_t ue_wdata;

  always_comb begin
    unique case (mode)
      MODE_SERVE:  begin mt_req = lc_req; mt_we = 1'b0;  mt_addr = lc_addr; mt_wdata = h_wdata;  end
      MODE_UPDATE: begin mt_req = ue_req; mt_we = ue_we; mt_addr = ue_addr; mt_wdata = ue_wdata; end
      default:     begin mt_req = h_req;  mt_we = h_we;  mt_addr = h_addr;  mt_wdata = h_wdata;  end
    endcase
  end
  assign h_rdata = mt_rdata;

  mapping_table #(.N_ROWS(N_ROWS)) u_mt (
    .clk, .req(mt_req), .we(mt_we), .addr(mt_addr), .wdata(mt_wdata), .rdata(mt_rdata));

  // ---- serving path ----
  logic q_valid, q_ready; logic [KEY_W:0] q_data;
  txn_queue #(.WIDTH(KEY_W + 1), .DEPTH(Q_DEPTH)) u_q (
    .clk, .rst_n,
    .in_valid(lk_valid && mode == MODE_SERVE), .in_ready(lk_ready), .in_data({lk_last, lk_key}),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data), .level());

  row_t pc_lk_row, pc_fill_row;
  logic pc_hit, pc_touch, pc_fill_we, pc_fill_done, pc_rd_en;
  logic [WAY_W-1:0] pc_hit_way, pc_victim, pc_touch_way, pc_fill_way, pc_rd_way;
  logic [WORD_W-1:0] pc_fill_word, pc_rd_word;
  logic [31:0] pc_fill_data, pc_rd_data;

  logic nd_req_valid, nd_req_ready, nd_dout_valid, nd_dout_last, ev_page_read, ev_pb_hit;
  row_t nd_req_row; col_t nd_req_col; logic [15:0] nd_req_len; logic [7:0] nd_dout_byte;

  logic sls_valid, sls_first, sls_last, sls_elem_last;
  logic [IW-1:0] sls_idx; logic [31:0] sls_data;

  lookup_ctrl #(.PAGE_BYTES(PAGE_BYTES), .CACHE_BYTES(CACHE_BYTES), .MAX_DIM(MAX_DIM)) u_lc (
    .clk, .rst_n, .dim_log2,
    .q_valid(q_valid && mode == MODE_SERVE), .q_ready, .q_key(q_data[KEY_W-1:0]), .q_last(q_data[KEY_W]),
    .mt_req(lc_req), .mt_addr(lc_addr), .mt_rdata,
    .pc_lk_row, .pc_hit, .pc_hit_way, .pc_victim, .pc_touch, .pc_touch_way,
    .pc_fill_we, .pc_fill_way, .pc_fill_word, .pc_fill_data, .pc_fill_done, .pc_fill_row,
    .pc_rd_en, .pc_rd_way, .pc_rd_word, .pc_rd_data,
    .nd_req_valid, .nd_req_ready, .nd_req_row, .nd_req_col, .nd_req_len,
    .nd_dout_valid, .nd_dout_byte, .nd_dout_last,
    .sls_valid, .sls_idx, .sls_data, .sls_first, .sls_last, .sls_elem_last,
    .st_lookups, .st_hits(st_cache_hits), .st_misses(st_cache_misses));

  page_cache #(.CACHE_BYTES(CACHE_BYTES), .PAGE_BYTES(PAGE_BYTES)) u_pc (
    .clk, .rst_n, .lk_row(pc_lk_row), .hit(pc_hit), .hit_way(pc_hit_way), .victim(pc_victim),
    .touch(pc_touch), .touch_way(pc_touch_way),
    .fill_we(pc_fill_we), .fill_way(pc_fill_way), .fill_word(pc_fill_word),
    .fill_data(pc_fill_data), .fill_done(pc_fill_done), .fill_row(pc_fill_row),
    .rd_en(pc_rd_en), .rd_way(pc_rd_way), .rd_word(pc_rd_word), .rd_data(pc_rd_data));

  nand_channel_ctrl #(.T_WC(T_WC), .T_RC(T_RC), .T_RR(T_RR)) u_nc (
    .clk, .rst_n, .mp_en,
    .req_valid(nd_req_valid), .req_ready(nd_req_ready), .req_row(nd_req_row),
    .req_col(nd_req_col), .req_len(nd_req_len),
    .dout_valid(nd_dout_valid), .dout_byte(nd_dout_byte), .dout_last(nd_dout_last),
    .ev_page_read, .ev_pb_hit,
    .nand_ce_n, .nand_cle, .nand_ale, .nand_we_n, .nand_re_n,
    .nand_io_out, .nand_io_oe, .nand_io_in, .nand_rb_n);

  sls_unit #(.MAX_DIM(MAX_DIM), .ELEM_W(32)) u_sls (
    .clk, .rst_n, .in_valid(sls_valid), .in_idx(sls_idx), .in_data(sls_data),
    .in_first(sls_first), .in_last(sls_last), .in_elem_last(sls_elem_last),
    .out_valid(res_valid), .out_idx(res_idx), .out_data(res_data), .out_last(res_last));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_page_reads <= '0; st_pb_hits <= '0;
    end else begin
      if (ev_page_read) st_page_reads <= st_page_reads + 1'b1;
      if (ev_pb_hit)    st_pb_hits    <= st_pb_hits + 1'b1;
    end
  end

  // ---- update path ----
  ht_update_engine #(.PAGE_BYTES(PAGE_BYTES)) u_ue (
    .clk, .rst_n,
    .start(upd_start && mode == MODE_UPDATE), .hot_len, .dim_log2, .hot_base_page, .cold_base_page,
    .busy(upd_busy), .done(upd_done), .tau_cnt,
    .nk_valid, .nk_ready, .nk_key, .nk_cnt, .nk_last,
    .rm_valid, .rm_ready, .rm_key, .rm_old, .rm_new, .rm_kind,
    .st_inserted, .st_appended, .st_compares,
    .list_load(list_load && mode == MODE_HOST), .load_head, .load_tail,
    .head(list_head), .tail(list_tail),
    .mt_req(ue_req), .mt_we(ue_we), .mt_addr(ue_addr), .mt_wdata(ue_wdata), .mt_rdata);

  // Threshold count of the hot region used by the trigger: set by the host
  // for the table built offline, then taken from the threshold key after
  // every update.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       thr_cnt <= '0;
    else if (thr_set) thr_cnt <= thr_value;
    else if (upd_done) thr_cnt <= tau_cnt;
  end

  trigger_unit u_trig (
    .clk, .rst_n, .policy, .thr_cnt, .oc_valid, .oc_cnt, .period_end,
    .trigger, .hot_seen(), .rows_seen(), .last_hot(trig_hot), .last_rows(trig_rows));
endmodule
