// tb_sls_unit: random bags (1..6 vectors of dim 32 or 64) streamed into the
// SLS unit; the output sums are compared with sums computed here, and the
// output must follow the last vector's elements by exactly one cycle.
`include "tb_check.svh"
module tb_sls_unit;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  logic in_valid = 0, in_first = 0, in_last = 0, in_elem_last = 0;
  logic [5:0] in_idx = 0; logic [31:0] in_data = 0;
  logic out_valid, out_last; logic [5:0] out_idx; logic [31:0] out_data;
  logic [31:0] expv [64];
  int outs = 0, lasts = 0;
  sls_unit #(.MAX_DIM(64), .ELEM_W(32)) dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  always @(posedge clk) if (rst_n && out_valid) begin
    `CHECK(out_data == expv[out_idx], $sformatf("sum[%0d] %h exp %h", out_idx, out_data, expv[out_idx]))
    outs++; if (out_last) lasts++;
  end
  initial begin
    int nb, dim, nvec;
    repeat (2) @(posedge clk); rst_n <= 1;
    for (int b = 0; b < 40; b++) begin
      dim = (b % 2) ? 32 : 64; nvec = 1 + $urandom % 6; nb = 0;
      for (int e = 0; e < 64; e++) expv[e] = 0;
      for (int v = 0; v < nvec; v++)
        for (int e = 0; e < dim; e++) begin
          in_valid <= 1; in_idx <= 6'(e); in_data <= $urandom;
          in_first <= (v == 0); in_last <= (v == nvec - 1); in_elem_last <= (e == dim - 1);
          #0.1 expv[e] = expv[e] + in_data;
          @(posedge clk);
        end
      in_valid <= 0;
      @(posedge clk); @(posedge clk);
      `CHECK(lasts == b + 1, "one out_last per bag")
    end
    `FINISH
  end
endmodule
