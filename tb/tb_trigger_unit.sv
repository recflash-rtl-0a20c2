// tb_trigger_unit: several periods of online-training counts against a
// threshold. With the threshold policy the trigger must fire exactly when
// more than 0.1% of the keys exceed the threshold (also checked at the
// boundary: 1 of 1000 does not fire, 2 of 1000 does); with the period policy
// it must fire every period. Counts equal to the threshold are not hot.
`include "tb_check.svh"
module tb_trigger_unit;
  import recflash_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  policy_e policy = POLICY_THRESHOLD; cnt_t thr_cnt = 6647;
  logic oc_valid = 0, period_end = 0, trigger; cnt_t oc_cnt = 0;
  logic [31:0] hot_seen, rows_seen, last_hot, last_rows;
  trigger_unit dut (.*);
  int fired = 0, quiet = 0;

  task automatic period(int rows, int hot, bit exp_fire);
    int hot_at[$];
    for (int i = 0; i < hot; i++) hot_at.push_back(i * (rows / (hot + 1)) + 1);
    for (int i = 0; i < rows; i++) begin
      oc_valid <= 1;
      oc_cnt <= (i inside {hot_at}) ? thr_cnt + 1 + ($urandom % 100) : ($urandom % (thr_cnt + 1));
      @(posedge clk);
    end
    oc_valid <= 0; period_end <= 1; @(posedge clk); period_end <= 0; #0.5;
    `CHECK(trigger == exp_fire, $sformatf("rows %0d hot %0d policy %0d", rows, hot, policy))
    `CHECK(last_hot == 32'(hot) && last_rows == 32'(rows), "counters")
    if (trigger) fired++; else quiet++;
    @(posedge clk); #0.5 `CHECK(!trigger, "one-cycle pulse")
  endtask

  initial begin repeat (200000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    repeat (2) @(posedge clk); rst_n <= 1; @(posedge clk);
    period(1000, 1, 0);
    period(1000, 2, 1);
    period(5000, 3, 0);
    period(5000, 6, 1);
    period(300, 0, 0);
    policy = POLICY_PERIOD;
    period(300, 0, 1);
    period(2000, 1, 1);
    `CHECK(fired > 0 && quiet > 0, "trigger both fired and stayed quiet")
    `FINISH
  end
endmodule
