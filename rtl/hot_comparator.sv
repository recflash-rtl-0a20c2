// hot_comparator: access-count comparator of the mapping-table update logic.
//
// Combinational. gt is high when the candidate count is strictly greater than
// the reference count. The same block serves two uses: deciding whether a new
// key outranks the list entry under the search pointer (insertion point of the
// remapping algorithm) and deciding whether a key's access count exceeds the
// hot-item threshold (online-training trigger). The strict ">" follows the
// paper in both uses; the width is a choice of this implementation.
module hot_comparator #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] cand,   // count of the key being placed / tested
  input  logic [W-1:0] ref_cnt,// count of the list entry or the threshold
  output logic         gt
);
  always_comb gt = (cand > ref_cnt);
endmodule
