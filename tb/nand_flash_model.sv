// nand_flash_model: behavioural model of a NAND flash die for simulation only
// (not synthesizable logic of the design; the real part is a commercial die).
//
// Samples the bus on the clock of the controller. On each rising edge of WE#
// with CE# low it latches a command (CLE high) or an address byte (ALE high):
// two column bytes, then three row bytes. Row bit [1:0] selects the plane;
// each plane has its own page buffer. 00h ... 30h loads the addressed page
// into its plane's page buffer and holds R/B# low for T_R cycles (tR).
// 00h ... 32h queues a plane of a multi-plane read; the closing 00h ... 30h
// then loads every queued plane and its own in the same tR (one array read
// counted); R/B# is low for T_DBSY cycles after each 32h; the queued rows must share the page address (mp_err counts
// those that do not).
// 06h ... E0h selects a plane's page buffer and column without an array read;
// if that buffer does not hold the addressed row, chgcol_err counts it. While
// RE# is low the byte at the current column drives io_out; the column steps
// on the rising edge of RE#. Page contents come from recflash_tb_pkg.
module nand_flash_model #(
  parameter int unsigned T_R    = 30000,   // 60 us TLC page read at 500 MHz
  parameter int unsigned T_DBSY = 250      // 0.5 us busy after 32h
) (
  input  logic       clk,
  input  logic       ce_n,
  input  logic       cle,
  input  logic       ale,
  input  logic       we_n,
  input  logic       re_n,
  input  logic [7:0] io_in,
  output logic [7:0] io_out,
  output logic       rb_n,
  output int         array_reads,
  output int         chgcol_err,
  output int         mp_err
);
  import recflash_tb_pkg::*;
  logic        we_q = 1'b1, re_q = 1'b1;
  logic [7:0]  cmd = 8'h00;
  int          acnt = 0;
  logic [15:0] col = '0;
  logic [23:0] row = '0;
  logic [23:0] pb_row [4];
  logic [3:0]  pb_vld = '0;
  logic [23:0] q_row [4];
  logic [3:0]  q_vld = '0;
  logic [1:0]  sel = '0;
  int          busy = 0;

  initial begin array_reads = 0; chgcol_err = 0; mp_err = 0; end

  assign rb_n   = (busy == 0);
  assign io_out = nand_byte(pb_row[sel], col);

  always @(posedge clk) begin
    we_q <= we_n;
    re_q <= re_n;
    if (busy > 0) busy <= busy - 1;
    if (!ce_n && !we_q && we_n) begin
      if (cle) begin
        cmd <= io_in;
        if (io_in == 8'h00 || io_in == 8'h06) acnt <= 0;
        if (io_in == 8'h32) begin
          q_row[row[1:0]] <= row; q_vld[row[1:0]] <= 1'b1; busy <= T_DBSY;
        end
        if (io_in == 8'h30) begin
          for (int i = 0; i < 4; i++)
            if (q_vld[i]) begin
              pb_row[i] <= q_row[i]; pb_vld[i] <= 1'b1;
              if (q_row[i][23:2] != row[23:2]) mp_err <= mp_err + 1;
            end
          q_vld <= '0;
          pb_row[row[1:0]] <= row; pb_vld[row[1:0]] <= 1'b1; sel <= row[1:0];
          busy <= T_R; array_reads <= array_reads + 1;
        end
        if (io_in == 8'hE0) begin
          sel <= row[1:0];
          if (!pb_vld[row[1:0]] || pb_row[row[1:0]] != row) chgcol_err <= chgcol_err + 1;
        end
      end else if (ale) begin
        case (acnt)
          0: col[7:0]    <= io_in;
          1: col[15:8]   <= io_in;
          2: row[7:0]    <= io_in;
          3: row[15:8]   <= io_in;
          default: row[23:16] <= io_in;
        endcase
        acnt <= acnt + 1;
      end
    end
    if (!ce_n && !re_q && re_n) col <= col + 1'b1;
  end
endmodule
