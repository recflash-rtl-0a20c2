// pointer_updater: link editor of the frequency-ordered mapping-table list.
//
// The mapping table chains its entries into one doubly linked list in
// descending access-count order (head = hottest). This block owns the head and
// tail pointers and performs the three list edits the remapping algorithm
// needs, each as a sequence of read-modify-write accesses on the single table
// port (one-cycle read latency):
//   OP_INSERT  insert key n (count, address) immediately before key p;
//   OP_APPEND  append key n (count, address) at the tail;
//   OP_MOVE    unlink key x and re-link it at the tail; when op_set_addr is
//              high its physical address becomes op_addr (a retired hot item
//              moves to free space of the cold region). old_addr returns the
//              address x had.
// start is accepted when busy is low; done pulses for one cycle at the end.
// An insert takes 5 cycles (3 when p is the head), an append 3 (1 into an
// empty list), a move at most 10. list_load sets head and tail directly for a
// table the host built. Keeping prev/next links and editing them instead of
// reordering the table follows the paper; the access sequence is this
// implementation's.
module pointer_updater
  import recflash_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // command
  input  logic       start,
  input  logic [1:0] op,
  input  key_t       op_key,      // n (insert/append) or x (move)
  input  key_t       op_pos,      // p (insert)
  input  cnt_t       op_cnt,
  input  paddr_t     op_addr,
  input  logic       op_set_addr,
  output logic       busy,
  output logic       done,
  output paddr_t     old_addr,
  // list ends
  input  logic       list_load,
  input  ptr_t       load_head,
  input  ptr_t       load_tail,
  output ptr_t       head,
  output ptr_t       tail,
  // mapping table port
  output logic       mt_req,
  output logic       mt_we,
  output key_t       mt_addr,
  output ht_entry_t  mt_wdata,
  input  ht_entry_t  mt_rdata
);
  localparam logic [1:0] OP_INSERT = 2'd0, OP_APPEND = 2'd1, OP_MOVE = 2'd2;

  typedef enum logic [4:0] {
    U_IDLE,
    U_INS_RP, U_INS_WP, U_INS_WN, U_INS_RPP, U_INS_WPP,
    U_APP_WN, U_APP_RT, U_APP_WT,
    U_MOV_RX, U_MOV_CHK, U_MOV_WXP, U_MOV_RXN, U_MOV_WXN, U_MOV_RT, U_MOV_WT, U_MOV_WX
  } ustate_e;
  ustate_e st;

  key_t   k_n, k_p;
  cnt_t   c_n;
  paddr_t a_n;
  logic   set_a;
  ptr_t   pp, xp, xn, old_tail;
  cnt_t   x_cnt;

  function automatic ptr_t P(key_t k);
    return {1'b0, k};
  endfunction

  assign busy = (st != U_IDLE);

  // ---- table port (combinational from state) ----
  always_comb begin
    mt_req = 1'b0; mt_we = 1'b0; mt_addr = '0; mt_wdata = mt_rdata;
    unique case (st)
      U_INS_RP:  begin mt_req = 1'b1; mt_addr = k_p; end
      U_INS_WP:  begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = k_p;
                       mt_wdata = mt_rdata; mt_wdata.prev = P(k_n); end
      U_INS_WN:  begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = k_n;
                       mt_wdata = '{cnt: c_n, addr: a_n, prev: pp, next: P(k_p)}; end
      U_INS_RPP: begin mt_req = 1'b1; mt_addr = pp[KEY_W-1:0]; end
      U_INS_WPP: begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = pp[KEY_W-1:0];
                       mt_wdata = mt_rdata; mt_wdata.next = P(k_n); end
      U_APP_WN:  begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = k_n;
                       mt_wdata = '{cnt: c_n, addr: a_n, prev: tail, next: PTR_NIL}; end
      U_APP_RT:  begin mt_req = 1'b1; mt_addr = old_tail[KEY_W-1:0]; end
      U_APP_WT:  begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = old_tail[KEY_W-1:0];
                       mt_wdata = mt_rdata; mt_wdata.next = P(k_n); end
      U_MOV_RX:  begin mt_req = 1'b1; mt_addr = k_n; end
      U_MOV_CHK: begin
        // x's entry is on mt_rdata; when x has a predecessor, read it now
        if (mt_rdata.prev != PTR_NIL && P(k_n) != tail) begin
          mt_req = 1'b1; mt_addr = mt_rdata.prev[KEY_W-1:0];
        end else if (P(k_n) == tail) begin
          mt_req = 1'b1; mt_we = 1'b1; mt_addr = k_n;
          mt_wdata = mt_rdata; if (set_a) mt_wdata.addr = a_n;
        end
      end
      U_MOV_WXP: begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = xp[KEY_W-1:0];
                       mt_wdata = mt_rdata; mt_wdata.next = xn; end
      U_MOV_RXN: begin mt_req = 1'b1; mt_addr = xn[KEY_W-1:0]; end
      U_MOV_WXN: begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = xn[KEY_W-1:0];
                       mt_wdata = mt_rdata; mt_wdata.prev = xp; end
      U_MOV_RT:  begin mt_req = 1'b1; mt_addr = old_tail[KEY_W-1:0]; end
      U_MOV_WT:  begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = old_tail[KEY_W-1:0];
                       mt_wdata = mt_rdata; mt_wdata.next = P(k_n); end
      U_MOV_WX:  begin mt_req = 1'b1; mt_we = 1'b1; mt_addr = k_n;
                       mt_wdata = '{cnt: x_cnt, addr: (set_a ? a_n : old_addr),
                                    prev: old_tail, next: PTR_NIL}; end
      default: ;
    endcase
  end

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= U_IDLE; head <= PTR_NIL; tail <= PTR_NIL; done <= 1'b0;
      k_n <= '0; k_p <= '0; c_n <= '0; a_n <= '0; set_a <= 1'b0;
      pp <= PTR_NIL; xp <= PTR_NIL; xn <= PTR_NIL; old_tail <= PTR_NIL;
      x_cnt <= '0; old_addr <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        U_IDLE: begin
          if (list_load) begin
            head <= load_head; tail <= load_tail;
          end else if (start) begin
            k_n <= op_key; k_p <= op_pos; c_n <= op_cnt; a_n <= op_addr;
            set_a <= op_set_addr; old_tail <= tail;
            unique case (op)
              OP_INSERT: st <= U_INS_RP;
              OP_APPEND: st <= U_APP_WN;
              default:   st <= U_MOV_RX;
            endcase
          end
        end
        // ---- insert n before p ----
        U_INS_RP:  st <= U_INS_WP;
        U_INS_WP:  begin pp <= mt_rdata.prev; st <= U_INS_WN; end
        U_INS_WN:  if (pp == PTR_NIL) begin head <= P(k_n); done <= 1'b1; st <= U_IDLE; end
                   else st <= U_INS_RPP;
        U_INS_RPP: st <= U_INS_WPP;
        U_INS_WPP: begin done <= 1'b1; st <= U_IDLE; end
        // ---- append n ----
        U_APP_WN: begin
          tail <= P(k_n);
          if (old_tail == PTR_NIL) begin head <= P(k_n); done <= 1'b1; st <= U_IDLE; end
          else st <= U_APP_RT;
        end
        U_APP_RT:  st <= U_APP_WT;
        U_APP_WT:  begin done <= 1'b1; st <= U_IDLE; end
        // ---- move x to tail ----
        U_MOV_RX:  st <= U_MOV_CHK;
        U_MOV_CHK: begin
          xp <= mt_rdata.prev; xn <= mt_rdata.next; x_cnt <= mt_rdata.cnt;
          old_addr <= mt_rdata.addr;
          if (P(k_n) == tail) begin
            done <= 1'b1; st <= U_IDLE;              // already last: address only
          end else if (mt_rdata.prev == PTR_NIL) begin
            head <= mt_rdata.next; st <= U_MOV_RXN;  // x was the head
          end else st <= U_MOV_WXP;                  // read of xp issued this cycle
        end
        U_MOV_WXP: st <= U_MOV_RXN;
        U_MOV_RXN: st <= U_MOV_WXN;
        U_MOV_WXN: st <= U_MOV_RT;
        U_MOV_RT:  st <= U_MOV_WT;
        U_MOV_WT:  st <= U_MOV_WX;
        U_MOV_WX:  begin tail <= P(k_n); done <= 1'b1; st <= U_IDLE; end
        default: st <= U_IDLE;
      endcase
    end
  end
endmodule
