// tb_hot_comparator: random and corner counts; gt must equal cand > ref_cnt
// (equal counts are not greater).
`include "tb_check.svh"
module tb_hot_comparator;
  int checks = 0, failures = 0;
  logic [31:0] cand, ref_cnt; logic gt;
  hot_comparator #(.W(32)) dut (.*);
  initial begin
    cand = 6648; ref_cnt = 6647; #1 `CHECK(gt == 1, "6648 > 6647")
    cand = 6647; ref_cnt = 6647; #1 `CHECK(gt == 0, "6647 not > 6647")
    cand = 0; ref_cnt = 32'hFFFFFFFF; #1 `CHECK(gt == 0, "0 vs max")
    cand = 32'hFFFFFFFF; ref_cnt = 32'hFFFFFFFE; #1 `CHECK(gt == 1, "max vs max-1")
    for (int i = 0; i < 2000; i++) begin
      cand = $urandom; ref_cnt = (i % 3 == 0) ? cand : $urandom;
      #1 `CHECK(gt == (cand > ref_cnt), $sformatf("%0d > %0d", cand, ref_cnt))
    end
    `FINISH
  end
endmodule
