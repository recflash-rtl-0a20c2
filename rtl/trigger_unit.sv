// trigger_unit: decides at the end of each period whether online training
// (and the remapping after it) starts.
//
// During a period the access counts of the keys in the online-training table
// are streamed in (oc_valid/oc_cnt, one key per cycle). A hot_comparator
// tests each count against the hot-item threshold thr_cnt, the count of the
// last key in the hot region of the serving table, and counts the keys above
// it (hot_seen) and all keys (rows_seen). When period_end pulses:
//   period policy     trigger fires every period;
//   threshold policy  trigger fires when hot_seen > 0.1% of rows_seen,
//                     i.e. hot_seen * FRAC_DEN > rows_seen * FRAC_NUM.
// trigger is a one-cycle pulse in the cycle after period_end; both counters
// are then cleared for the next period (a count arriving with period_end
// belongs to the next period). Both policies, the strict ">" on the count and
// the 0.1% ratio follow the paper; the paper's text says "greater than" while
// its figure prints ">=", and the text is followed. Streaming counts
// from firmware is this implementation's choice.
module trigger_unit
  import recflash_pkg::*;
#(
  parameter int unsigned FRAC_NUM = 1,
  parameter int unsigned FRAC_DEN = 1000
) (
  input  logic        clk,
  input  logic        rst_n,
  input  policy_e     policy,
  input  cnt_t        thr_cnt,
  input  logic        oc_valid,
  input  cnt_t        oc_cnt,
  input  logic        period_end,
  output logic        trigger,
  output logic [31:0] hot_seen,
  output logic [31:0] rows_seen,
  output logic [31:0] last_hot,     // hot_seen of the period that just ended
  output logic [31:0] last_rows
);
  logic gt;
  hot_comparator #(.W(CNT_W)) u_cmp (.cand(oc_cnt), .ref_cnt(thr_cnt), .gt(gt));

  logic [47:0] lhs, rhs;
  always_comb begin
    lhs = 48'(hot_seen) * 48'(FRAC_DEN);
    rhs = 48'(rows_seen) * 48'(FRAC_NUM);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trigger <= 1'b0; hot_seen <= '0; rows_seen <= '0; last_hot <= '0; last_rows <= '0;
    end else begin
      trigger <= 1'b0;
      if (period_end) begin
        trigger   <= (policy == POLICY_PERIOD) || (lhs > rhs);
        last_hot  <= hot_seen;
        last_rows <= rows_seen;
        hot_seen  <= (oc_valid && gt) ? 32'd1 : 32'd0;
        rows_seen <= oc_valid ? 32'd1 : 32'd0;
      end else if (oc_valid) begin
        rows_seen <= rows_seen + 1'b1;
        if (gt) hot_seen <= hot_seen + 1'b1;
      end
    end
  end
endmodule
