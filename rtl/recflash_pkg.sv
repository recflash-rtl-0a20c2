// recflash_pkg: types and constants shared by the RecFlash controller blocks.
//
// The mapping table (the "hash table" of the frequency-based remapping scheme)
// holds one entry per embedding vector ID. Each entry carries the access count,
// the physical location of the vector in NAND, and prev/next links that chain
// all entries into one list in descending access-count order. The list order
// and the four fields follow the remapping algorithm; the field widths, the NIL
// encoding of a link and the {plane, page, slot} address layout are choices of
// this implementation.
//
// Physical vector address: plane (page buffer) number, page number inside the
// plane, and slot (vector index inside the page). The NAND row address sent on
// the bus is {page, plane}; the column address is slot * vector bytes.
package recflash_pkg;

  // ---- geometry ----------------------------------------------------------
  localparam int unsigned KEY_W   = 20;  // vector ID width (2^20 >= 1M rows)
  localparam int unsigned CNT_W   = 32;  // access count width
  localparam int unsigned PLANE_W = 2;   // 4 planes
  localparam int unsigned PAGE_W  = 22;  // page number inside a plane
  localparam int unsigned SLOT_W  = 8;   // vector slot inside a page
  localparam int unsigned ROW_W   = PAGE_W + PLANE_W;  // 24-bit NAND row address
  localparam int unsigned COL_W   = 16;  // NAND column (byte) address

  typedef logic [KEY_W-1:0] key_t;
  typedef logic [KEY_W:0]   ptr_t;        // MSB set = NIL
  localparam ptr_t PTR_NIL = {1'b1, {KEY_W{1'b0}}};

  typedef logic [CNT_W-1:0] cnt_t;
  typedef logic [ROW_W-1:0] row_t;
  typedef logic [COL_W-1:0] col_t;

  typedef struct packed {
    logic [PLANE_W-1:0] plane;
    logic [PAGE_W-1:0]  page;
    logic [SLOT_W-1:0]  slot;
  } paddr_t;

  typedef struct packed {
    cnt_t   cnt;   // f_k
    paddr_t addr;  // a_k
    ptr_t   prev;
    ptr_t   next;
  } ht_entry_t;

  // ---- NAND bus commands (ONFI codes) ------------------------------------
  localparam logic [7:0] CMD_READ_1   = 8'h00;  // "St." of a page read
  localparam logic [7:0] CMD_READ_2   = 8'h30;  // "Ed." of a page read
  localparam logic [7:0] CMD_READ_MP  = 8'h32;  // queue a plane of a multi-plane read
  localparam logic [7:0] CMD_CHGCOL_1 = 8'h06;  // change read column, plane select
  localparam logic [7:0] CMD_CHGCOL_2 = 8'hE0;

  // ---- online-training trigger policies ----------------------------------
  typedef enum logic {POLICY_THRESHOLD = 1'b0, POLICY_PERIOD = 1'b1} policy_e;

  // ---- top-level operating modes -----------------------------------------
  typedef enum logic [1:0] {
    MODE_HOST   = 2'd0,  // host (firmware) reads and writes the mapping table
    MODE_SERVE  = 2'd1,  // embedding lookups / SLS inference
    MODE_UPDATE = 2'd2   // hardware mapping-table update (remapping)
  } mode_e;

  function automatic row_t paddr_row(paddr_t a);
    return {a.page, a.plane};
  endfunction

endpackage
