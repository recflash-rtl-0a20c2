// lookup_ctrl: embedding-lookup sequencer (address translation and
// transaction scheduling of the controller front end).
//
// For each queued vector ID (q_*, q_last marks the last ID of a bag):
//   1. read the mapping table entry (one-cycle read) for its physical
//      address {plane, page, slot};
//   2. look the page up in the page-wise cache. On a hit, mark the line most
//      recently used. On a miss, pick the LRU victim, ask the channel
//      controller for the whole page and write its bytes (little-endian, four
//      per 32-bit word) into the victim line, then validate the line;
//   3. read the vector's 2^dim_log2 words from the cache line (word offset
//      slot * dim) and stream them into the SLS unit, flagging the first and
//      last vectors of the bag.
// Lookups are served in order, one at a time. On a hit the vector costs
// 4 + dim cycles; a miss adds one NAND read of PAGE_BYTES bytes, which skips
// tR when that page is still in its plane's page buffer.
// Cache-before-NAND, whole-page fill and LRU follow the paper; in-order
// single-outstanding scheduling is this implementation's simplification.
module lookup_ctrl
  import recflash_pkg::*;
#(
  parameter int unsigned PAGE_BYTES  = 16384,
  parameter int unsigned CACHE_BYTES = 131072,
  parameter int unsigned MAX_DIM     = 64,
  localparam int unsigned LINES  = CACHE_BYTES / PAGE_BYTES,
  localparam int unsigned WAY_W  = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned WORD_W = $clog2(PAGE_BYTES / 4),
  localparam int unsigned IW     = $clog2(MAX_DIM)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [2:0]        dim_log2,
  // queued lookups
  input  logic              q_valid,
  output logic              q_ready,
  input  key_t              q_key,
  input  logic              q_last,
  // mapping table (read only)
  output logic              mt_req,
  output key_t              mt_addr,
  input  ht_entry_t         mt_rdata,
  // page cache
  output row_t              pc_lk_row,
  input  logic              pc_hit,
  input  logic [WAY_W-1:0]  pc_hit_way,
  input  logic [WAY_W-1:0]  pc_victim,
  output logic              pc_touch,
  output logic [WAY_W-1:0]  pc_touch_way,
  output logic              pc_fill_we,
  output logic [WAY_W-1:0]  pc_fill_way,
  output logic [WORD_W-1:0] pc_fill_word,
  output logic [31:0]       pc_fill_data,
  output logic              pc_fill_done,
  output row_t              pc_fill_row,
  output logic              pc_rd_en,
  output logic [WAY_W-1:0]  pc_rd_way,
  output logic [WORD_W-1:0] pc_rd_word,
  input  logic [31:0]       pc_rd_data,
  // NAND channel
  output logic              nd_req_valid,
  input  logic              nd_req_ready,
  output row_t              nd_req_row,
  output col_t              nd_req_col,
  output logic [15:0]       nd_req_len,
  input  logic              nd_dout_valid,
  input  logic [7:0]        nd_dout_byte,
  input  logic              nd_dout_last,
  // SLS stream
  output logic              sls_valid,
  output logic [IW-1:0]     sls_idx,
  output logic [31:0]       sls_data,
  output logic              sls_first,
  output logic              sls_last,
  output logic              sls_elem_last,
  // statistics
  output logic [31:0]       st_lookups,
  output logic [31:0]       st_hits,
  output logic [31:0]       st_misses
);
  typedef enum logic [2:0] {L_IDLE, L_MT_R, L_MT_D, L_CHK, L_NREQ, L_FILL, L_FWAIT, L_RD} lstate_e;
  lstate_e st;

  key_t             key_q;
  logic             last_q, first_q;
  paddr_t           pa;
  logic [WAY_W-1:0] way;
  logic [WORD_W-1:0] wcnt;
  logic [1:0]       bcnt;
  logic [23:0]      wsh;
  logic [IW:0]      e;            // element being read
  logic             rd_v;         // read issued last cycle
  logic [IW-1:0]    rd_e;
  logic             rd_last;

  logic [IW:0] dim;
  always_comb dim = (IW+1)'(1) << dim_log2;

  assign q_ready      = (st == L_IDLE);
  assign mt_req       = (st == L_MT_R);
  assign mt_addr      = key_q;
  assign pc_lk_row    = paddr_row(pa);
  assign pc_touch     = (st == L_CHK) && pc_hit;
  assign pc_touch_way = pc_hit_way;
  assign pc_fill_way  = way;
  assign pc_fill_row  = paddr_row(pa);
  assign pc_rd_way    = way;
  assign pc_rd_en     = (st == L_RD) && (e < dim);
  assign pc_rd_word   = WORD_W'((WORD_W'(pa.slot) << dim_log2) + WORD_W'(e));
  assign nd_req_valid = (st == L_NREQ);
  assign nd_req_row   = paddr_row(pa);
  assign nd_req_col   = '0;
  assign nd_req_len   = 16'(PAGE_BYTES);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; key_q <= '0; last_q <= 1'b0; first_q <= 1'b1; pa <= '0; way <= '0;
      wcnt <= '0; bcnt <= '0; wsh <= '0; e <= '0; rd_v <= 1'b0; rd_e <= '0; rd_last <= 1'b0;
      pc_fill_we <= 1'b0; pc_fill_word <= '0; pc_fill_data <= '0; pc_fill_done <= 1'b0;
      sls_valid <= 1'b0; sls_idx <= '0; sls_data <= '0; sls_first <= 1'b0; sls_last <= 1'b0;
      sls_elem_last <= 1'b0;
      st_lookups <= '0; st_hits <= '0; st_misses <= '0;
    end else begin
      pc_fill_we <= 1'b0; pc_fill_done <= 1'b0; sls_valid <= 1'b0;
      // cache read data arrives one cycle after the read
      rd_v <= pc_rd_en; rd_e <= IW'(e); rd_last <= (e == dim - 1'b1);
      if (rd_v) begin
        sls_valid <= 1'b1; sls_idx <= rd_e; sls_data <= pc_rd_data;
        sls_first <= first_q; sls_last <= last_q; sls_elem_last <= rd_last;
        if (rd_last) first_q <= last_q;
      end
      unique case (st)
        L_IDLE: if (q_valid && !rd_v) begin
          key_q <= q_key; last_q <= q_last; st <= L_MT_R;
          st_lookups <= st_lookups + 1'b1;
        end
        L_MT_R: st <= L_MT_D;
        L_MT_D: begin pa <= mt_rdata.addr; st <= L_CHK; end
        L_CHK: begin
          if (pc_hit) begin
            way <= pc_hit_way; st_hits <= st_hits + 1'b1; e <= '0; st <= L_RD;
          end else begin
            way <= pc_victim; st_misses <= st_misses + 1'b1; st <= L_NREQ;
          end
        end
        L_NREQ: if (nd_req_ready) begin
          wcnt <= '0; bcnt <= '0; st <= L_FILL;
        end
        L_FILL: begin
          if (pc_fill_we) wcnt <= wcnt + 1'b1;
          if (nd_dout_valid) begin
            bcnt <= bcnt + 1'b1;
            if (bcnt == 2'd3) begin
              pc_fill_we   <= 1'b1;
              pc_fill_word <= wcnt;
              pc_fill_data <= {nd_dout_byte, wsh};
            end else wsh <= {nd_dout_byte, wsh[23:8]};
            if (nd_dout_last) begin
              pc_fill_done <= 1'b1; e <= '0; st <= L_FWAIT;
            end
          end
        end
        L_FWAIT: st <= L_RD;   // last word is written this cycle
        L_RD: begin
          if (e < dim) e <= e + 1'b1;
          else if (!rd_v) st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
