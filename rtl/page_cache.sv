// page_cache: page-wise cache of NAND pages in controller SRAM, LRU replaced.
//
// The cache holds LINES = CACHE_BYTES / PAGE_BYTES whole NAND pages (8 pages of
// 16 KB in 128 KB by default). It is fully associative: the tag of a line is
// the NAND row address {page, plane} of the page it holds.
//
// Interface (all in one clock domain):
//  * lookup: combinational hit/hit_way for lk_row.
//  * victim: combinational line to fill on a miss, an invalid line first,
//    otherwise the least recently used one.
//  * touch/touch_way: mark a line most recently used (a served hit).
//  * fill: fill_we writes one data word of line fill_way; fill_done then
//    validates the line with tag fill_row and makes it most recently used.
//  * read: rd_en with rd_way/rd_word returns rd_data one cycle later.
// Data words are 32 bits stored in sram_sp. Caching whole pages with LRU
// follows the paper; full associativity and the rank-based LRU are this
// implementation's choices. hits/misses are not counted here, the user counts.
module page_cache
  import recflash_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 131072,
  parameter int unsigned PAGE_BYTES  = 16384,
  localparam int unsigned LINES = CACHE_BYTES / PAGE_BYTES,
  localparam int unsigned WAY_W = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int unsigned WORDS = PAGE_BYTES / 4,
  localparam int unsigned WORD_W = $clog2(WORDS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  row_t              lk_row,
  output logic              hit,
  output logic [WAY_W-1:0]  hit_way,
  output logic [WAY_W-1:0]  victim,
  input  logic              touch,
  input  logic [WAY_W-1:0]  touch_way,
  input  logic              fill_we,
  input  logic [WAY_W-1:0]  fill_way,
  input  logic [WORD_W-1:0] fill_word,
  input  logic [31:0]       fill_data,
  input  logic              fill_done,
  input  row_t              fill_row,
  input  logic              rd_en,
  input  logic [WAY_W-1:0]  rd_way,
  input  logic [WORD_W-1:0] rd_word,
  output logic [31:0]       rd_data
);
  row_t             tag   [LINES];
  logic [LINES-1:0] vld;
  logic [WAY_W-1:0] rank  [LINES];   // 0 = most recently used

  // ---- lookup and victim selection ----
  always_comb begin
    hit = 1'b0; hit_way = '0;
    for (int i = 0; i < LINES; i++)
      if (vld[i] && tag[i] == lk_row) begin hit = 1'b1; hit_way = WAY_W'(i); end
  end

  always_comb begin
    logic found;
    found = 1'b0; victim = '0;
    for (int i = 0; i < LINES; i++)
      if (!vld[i] && !found) begin found = 1'b1; victim = WAY_W'(i); end
    if (!found)
      for (int i = 0; i < LINES; i++)
        if (rank[i] == WAY_W'(LINES-1)) victim = WAY_W'(i);
  end

  // ---- tags and LRU ranks ----
  logic             use_en;
  logic [WAY_W-1:0] use_way;
  always_comb begin
    use_en  = touch || fill_done;
    use_way = fill_done ? fill_way : touch_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= '0;
      for (int i = 0; i < LINES; i++) begin
        rank[i] <= WAY_W'(i);
        tag[i]  <= '0;
      end
    end else begin
      if (fill_done) begin
        vld[fill_way] <= 1'b1;
        tag[fill_way] <= fill_row;
      end
      if (use_en) begin
        for (int i = 0; i < LINES; i++)
          if (rank[i] < rank[use_way]) rank[i] <= rank[i] + 1'b1;
        rank[use_way] <= '0;
      end
    end
  end

  // ---- data array ----
  logic [WAY_W+WORD_W-1:0] sram_addr;
  always_comb sram_addr = fill_we ? {fill_way, fill_word} : {rd_way, rd_word};

  sram_sp #(.DEPTH(LINES * WORDS), .WIDTH(32)) u_data (
    .clk   (clk),
    .en    (fill_we || rd_en),
    .we    (fill_we),
    .addr  (sram_addr),
    .wdata (fill_data),
    .rdata (rd_data)
  );

  always_ff @(posedge clk)
    if (rst_n) assert (!(fill_we && rd_en))
      else $error("page_cache: fill and read in the same cycle");
endmodule
