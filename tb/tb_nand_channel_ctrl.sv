// tb_nand_channel_ctrl: the channel controller against the NAND die model.
// Checks the bytes of page reads and page-buffer hits against the reference
// page contents, that a hit performs no array read, that the bus carries the
// right command and address bytes (the model would miss a wrong row), and the
// cycle count of each request: 7*T_WC + tR + T_RR + len*T_RC (+3) for a page
// read and the same without tR for a page-buffer hit. A second run with
// multi-plane reads enabled checks that one page read fills the page buffers
// of all four planes (the other planes then hit without an array read), the
// longer C/A of such a read with its three tDBSY waits, and that the die saw matching page addresses.
`include "tb_check.svh"
module tb_nand_channel_ctrl;
  import recflash_pkg::*;
  import recflash_tb_pkg::*;
  int checks = 0, failures = 0;
  localparam int TWC = 10, TRC = 10, TRR = 10, TR = 500, TDBSY = 50;
  logic clk = 0; always #1 clk = ~clk;
  logic rst_n = 0;
  logic req_valid = 0, req_ready; row_t req_row = '0; col_t req_col = '0; logic [15:0] req_len = 0;
  logic dout_valid, dout_last, ev_page_read, ev_pb_hit; logic [7:0] dout_byte;
  logic ce_n, cle, ale, we_n, re_n, io_oe, rb_n; logic [7:0] io_out, io_in;
  int array_reads, chgcol_err, mp_err;
  logic mp_en = 0;
  nand_channel_ctrl #(.T_WC(TWC), .T_RC(TRC), .T_RR(TRR)) dut (
    .clk, .rst_n, .mp_en, .req_valid, .req_ready, .req_row, .req_col, .req_len,
    .dout_valid, .dout_byte, .dout_last, .ev_page_read, .ev_pb_hit,
    .nand_ce_n(ce_n), .nand_cle(cle), .nand_ale(ale), .nand_we_n(we_n), .nand_re_n(re_n),
    .nand_io_out(io_out), .nand_io_oe(io_oe), .nand_io_in(io_in), .nand_rb_n(rb_n));
  nand_flash_model #(.T_R(TR), .T_DBSY(TDBSY)) u_nand (
    .clk, .ce_n, .cle, .ale, .we_n, .re_n, .io_in(io_out), .io_out(io_in), .rb_n,
    .array_reads, .chgcol_err, .mp_err);

  initial begin repeat (400000) @(posedge clk); failures++; $display("watchdog"); `FINISH end

  int npr = 0, npb = 0;
  task automatic do_read(row_t r, col_t c, int len, bit exp_hit);
    int t0, t1, nb, ar0, exp_cyc;
    ar0 = array_reads;
    req_valid <= 1; req_row <= r; req_col <= c; req_len <= 16'(len);
    @(posedge clk); while (!req_ready) @(posedge clk);
    t0 = $time; req_valid <= 0;
    #0.5 `CHECK(ev_page_read == !exp_hit && ev_pb_hit == exp_hit, "event flags")
    nb = 0;
    forever begin
      @(posedge clk); #0.5;
      if (dout_valid) begin
        `CHECK(dout_byte == nand_byte(r, 16'(c + nb)), $sformatf("row %0d byte %0d", r, nb))
        nb++;
        if (dout_last) break;
      end
    end
    t1 = $time;
    `CHECK(nb == len, "byte count")
    `CHECK(array_reads == ar0 + (exp_hit ? 0 : 1), "array reads")
    exp_cyc = 7 * TWC + (exp_hit ? 0 : TR) + TRR + len * TRC
            + ((mp_en && !exp_hit) ? 4 * 7 * TWC + 3 * (TDBSY - TWC / 2) : 0);
    `CHECK((t1 - t0) / 2 >= exp_cyc - TRC && (t1 - t0) / 2 <= exp_cyc + 3,
           $sformatf("latency %0d cycles, expected %0d", (t1 - t0) / 2, exp_cyc))
    if (exp_hit) npb++; else npr++;
    repeat (TRC) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk); rst_n <= 1; @(posedge clk);
    do_read(24'h000104, 16'd0,   128, 0);   // plane 0, page 0x41: page read
    do_read(24'h000104, 16'd128, 128, 1);   // same page: page-buffer reuse
    do_read(24'h000105, 16'd256, 64,  0);   // plane 1
    do_read(24'h000104, 16'd512, 32,  1);   // plane 0 buffer still open
    do_read(24'h123408, 16'd1000, 40, 0);   // new page in plane 0
    do_read(24'h000104, 16'd0,   16,  0);   // evicted from plane 0 buffer
    do_read(24'h000105, 16'd300, 16,  1);
    `CHECK(chgcol_err == 0, "change-column only on open pages")
    `CHECK(npr == 4 && npb == 3, "page reads and page-buffer hits")
    // multi-plane page reads
    mp_en <= 1;
    do_read(24'h00020A, 16'd0,   64, 0);    // page 0x82 of plane 2, loads all planes
    do_read(24'h000208, 16'd100, 32, 1);    // plane 0, same page: no tR
    do_read(24'h000209, 16'd7,   32, 1);
    do_read(24'h00020B, 16'd4000, 32, 1);
    do_read(24'h00020A, 16'd64,  32, 1);
    do_read(24'h000104, 16'd0,   16, 0);    // plane 0 now holds page 0x82
    do_read(24'h000107, 16'd9,   16, 1);    // plane 3 loaded with page 0x41
    `CHECK(chgcol_err == 0 && mp_err == 0, "multi-plane buffers and addresses")
    `CHECK(npr == 6 && npb == 8 && array_reads == 6, "multi-plane page reads and hits")
    `FINISH
  end
endmodule
