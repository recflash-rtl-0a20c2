// tb_sram_sp: writes random words to random addresses of a small sram_sp,
// then reads every written address back and compares with a reference array;
// also checks the one-cycle read latency.
`include "tb_check.svh"
module tb_sram_sp;
  int checks = 0, failures = 0;
  logic clk = 0; always #1 clk = ~clk;
  localparam int D = 256;
  logic en = 0, we = 0; logic [7:0] addr = 0; logic [31:0] wdata = 0, rdata;
  logic [31:0] ref_mem [D]; logic [D-1:0] written = '0;
  sram_sp #(.DEPTH(D), .WIDTH(32)) dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("watchdog"); `FINISH end
  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < 600; i++) begin
      en <= 1; we <= 1; addr <= 8'($urandom); wdata <= $urandom;
      @(posedge clk); ref_mem[addr] = wdata; written[addr] = 1'b1;
    end
    for (int a = 0; a < D; a++) if (written[a]) begin
      en <= 1; we <= 0; addr <= 8'(a);
      @(posedge clk); en <= 0; #0.1;
      `CHECK(rdata == ref_mem[a], $sformatf("addr %0d read %h exp %h", a, rdata, ref_mem[a]))
    end
    `FINISH
  end
endmodule
