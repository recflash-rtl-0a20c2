// tb_txn_queue: random push/pop traffic against a reference queue; checks
// order, full/empty flags and level.
`include "tb_check.svh"
module tb_txn_queue;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [20:0] in_data = 0, out_data; logic [2:0] level;
  logic [20:0] q[$];
  txn_queue #(.WIDTH(21), .DEPTH(4)) dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      in_valid <= ($urandom % 3) != 0; in_data <= 21'($urandom);
      out_ready <= ($urandom % 2) != 0;
      #0.5;
      `CHECK(in_ready == (q.size() < 4), "in_ready")
      `CHECK(out_valid == (q.size() > 0), "out_valid")
      `CHECK(level == 3'(q.size()), "level")
      if (out_valid && q.size() > 0) `CHECK(out_data == q[0], "data order")
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
    end
    `FINISH
  end
endmodule
