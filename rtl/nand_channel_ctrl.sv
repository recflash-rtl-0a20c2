// nand_channel_ctrl: one NAND flash channel controller with page-buffer reuse.
//
// A read request names a NAND row ({page, plane}), a start column and a byte
// count. The controller runs the three stages of a NAND read:
//   1. command/address (C/A): a command cycle, two column and three row
//      address cycles, and a closing command cycle, each T_WC clocks long with
//      WE# low for the first half (CLE high on command cycles, ALE high on
//      address cycles);
//   2. page read: after 30h the die pulls R/B# low for tR while the page is
//      latched into the plane's page buffer; the controller waits for R/B#
//      low and then high;
//   3. data out: after T_RR clocks, one byte per RE# cycle of T_RC clocks, the
//      byte sampled at the end of the RE# low half.
// The controller remembers which page each plane's page buffer holds. A
// request to that page skips the page read: it sends a change-read-column
// command (06h, the same five address cycles, E0h), waits T_RR and streams the
// bytes, so tR is paid once for all vectors of a page.
//
// With mp_en high a page read is a multi-plane read: the same page of every
// plane is addressed (00h, address, 32h for each other plane, then 00h,
// address, 30h for the requested one), all planes load their page buffers in
// one tR, and a change-read-column to the requested plane precedes the data
// out. After each 32h the controller waits for the die's short busy (tDBSY)
// on R/B# before addressing the next plane. Because the frequency layout puts consecutive hot pages on the same
// page of consecutive planes, later misses to those pages then skip tR. This
// costs (NPLANES-1)*7 + 7 extra bus cycles of T_WC and NPLANES-1 tDBSY per
// page read.
//
// Timing at the 500 MHz controller clock: a page read costs about
// 7*T_WC + tR + T_RR + len*T_RC clocks (the last byte leaves half an RE#
// cycle early, state changes add up to 3 clocks), a page-buffer hit the same
// without tR. The three stages, the per-plane page
// buffer and tR-free reuse follow the paper; the 8-bit bus (implied by the
// paper's t_DO of 128 tRC for a 128-byte vector), the ONFI command codes,
// the full C/A for a reuse and the multi-plane read (the paper names plane
// parallelism as the aim of its plane distribution but no command) are this
// implementation's.
module nand_channel_ctrl
  import recflash_pkg::*;
#(
  parameter int unsigned T_WC = 10,  // 20 ns write cycle
  parameter int unsigned T_RC = 10,  // 20 ns read cycle
  parameter int unsigned T_RR = 10,  // 20 ns ready to RE# low
  localparam int unsigned NPLANES = 1 << PLANE_W
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        mp_en,          // page reads load all planes (multi-plane)
  // request
  input  logic        req_valid,
  output logic        req_ready,
  input  row_t        req_row,
  input  col_t        req_col,
  input  logic [15:0] req_len,
  // data out stream
  output logic        dout_valid,
  output logic [7:0]  dout_byte,
  output logic        dout_last,
  // events
  output logic        ev_page_read,   // a page read (tR) was started
  output logic        ev_pb_hit,      // request served from an open page buffer
  // NAND bus
  output logic        nand_ce_n,
  output logic        nand_cle,
  output logic        nand_ale,
  output logic        nand_we_n,
  output logic        nand_re_n,
  output logic [7:0]  nand_io_out,
  output logic        nand_io_oe,
  input  logic [7:0]  nand_io_in,
  input  logic        nand_rb_n
);
  typedef enum logic [2:0] {S_IDLE, S_CA, S_WBUSY, S_WRDY, S_TRR, S_DOUT, S_MBUSY, S_MRDY} state_e;
  state_e state;

  row_t        row_q;
  col_t        col_q;
  logic [15:0] len_q, bytes_left;
  logic        reuse_q;
  logic        mp_q;                // this page read is a multi-plane read
  logic [PLANE_W-1:0] pl_idx;       // plane slot of the multi-plane C/A
  logic [PLANE_W-1:0] ca_plane;     // plane addressed by the current C/A
  row_t        ca_row;
  logic [2:0]  ca_idx;              // 0..6 bus cycle of the C/A stage
  logic [15:0] tcnt;

  row_t              open_row [NPLANES];
  logic [NPLANES-1:0] open_vld;

  logic [PLANE_W-1:0] req_plane;
  logic               req_hit;
  always_comb begin
    req_plane = req_row[PLANE_W-1:0];
    req_hit   = open_vld[req_plane] && (open_row[req_plane] == req_row);
  end

  assign req_ready = (state == S_IDLE);

  // A multi-plane read addresses the other planes first and the requested
  // plane last: plane slot i is plane (requested + 1 + i) mod NPLANES.
  always_comb begin
    ca_plane = mp_q ? PLANE_W'(row_q[PLANE_W-1:0] + pl_idx + 1'b1) : row_q[PLANE_W-1:0];
    ca_row   = {row_q[ROW_W-1:PLANE_W], ca_plane};
  end
  logic last_plane;
  assign last_plane = !mp_q || (pl_idx == PLANE_W'(NPLANES - 1));

  // ---- bus drive ----
  logic [7:0] ca_byte;
  always_comb begin
    unique case (ca_idx)
      3'd0: ca_byte = reuse_q ? CMD_CHGCOL_1 : CMD_READ_1;
      3'd1: ca_byte = col_q[7:0];
      3'd2: ca_byte = col_q[15:8];
      3'd3: ca_byte = ca_row[7:0];
      3'd4: ca_byte = ca_row[15:8];
      3'd5: ca_byte = 8'(ca_row[ROW_W-1:16]);
      default: ca_byte = reuse_q ? CMD_CHGCOL_2 : (last_plane ? CMD_READ_2 : CMD_READ_MP);
    endcase
  end

  always_comb begin
    nand_ce_n   = (state == S_IDLE);
    nand_cle    = (state == S_CA) && (ca_idx == 3'd0 || ca_idx == 3'd6);
    nand_ale    = (state == S_CA) && !(ca_idx == 3'd0 || ca_idx == 3'd6);
    nand_we_n   = !((state == S_CA) && (tcnt < 16'(T_WC / 2)));
    nand_io_oe  = (state == S_CA);
    nand_io_out = ca_byte;
    nand_re_n   = !((state == S_DOUT) && (tcnt < 16'(T_RC / 2)));
  end

  // ---- sequencer ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; row_q <= '0; col_q <= '0; len_q <= '0; bytes_left <= '0;
      reuse_q <= 1'b0; mp_q <= 1'b0; pl_idx <= '0; ca_idx <= '0; tcnt <= '0; open_vld <= '0;
      for (int i = 0; i < NPLANES; i++) open_row[i] <= '0;
      dout_valid <= 1'b0; dout_byte <= '0; dout_last <= 1'b0;
      ev_page_read <= 1'b0; ev_pb_hit <= 1'b0;
    end else begin
      dout_valid <= 1'b0; dout_last <= 1'b0;
      ev_page_read <= 1'b0; ev_pb_hit <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          row_q <= req_row; col_q <= req_col; len_q <= req_len;
          reuse_q <= req_hit; mp_q <= mp_en && !req_hit; pl_idx <= '0;
          ca_idx <= '0; tcnt <= '0;
          ev_pb_hit    <= req_hit;
          ev_page_read <= !req_hit;
          if (!req_hit && mp_en) begin
            open_vld <= '1;
            for (int i = 0; i < NPLANES; i++)
              open_row[i] <= {req_row[ROW_W-1:PLANE_W], PLANE_W'(i)};
          end else if (!req_hit) begin
            open_vld[req_plane] <= 1'b1;
            open_row[req_plane] <= req_row;
          end
          state <= S_CA;
        end
        S_CA: begin
          if (tcnt == 16'(T_WC - 1)) begin
            tcnt <= '0;
            if (ca_idx == 3'd6) begin
              ca_idx <= '0;
              if (reuse_q) state <= S_TRR;
              else if (!last_plane) state <= S_MBUSY;   // tDBSY after 32h
              else state <= S_WBUSY;
            end else ca_idx <= ca_idx + 1'b1;
          end else tcnt <= tcnt + 1'b1;
        end
        S_WBUSY: if (!nand_rb_n) state <= S_WRDY;
        S_MBUSY: if (!nand_rb_n) state <= S_MRDY;
        S_MRDY:  if (nand_rb_n) begin
          tcnt <= '0; pl_idx <= pl_idx + 1'b1; state <= S_CA;
        end
        S_WRDY:  if (nand_rb_n) begin
          tcnt <= '0;
          // after a multi-plane read, select the requested plane's buffer
          if (mp_q) begin reuse_q <= 1'b1; state <= S_CA; end
          else state <= S_TRR;
        end
        S_TRR: begin
          if (tcnt == 16'(T_RR - 1)) begin
            tcnt <= '0; bytes_left <= len_q; state <= S_DOUT;
          end else tcnt <= tcnt + 1'b1;
        end
        S_DOUT: begin
          if (tcnt == 16'(T_RC / 2 - 1)) begin   // end of RE# low: sample
            dout_valid <= 1'b1;
            dout_byte  <= nand_io_in;
            dout_last  <= (bytes_left == 16'd1);
          end
          if (tcnt == 16'(T_RC - 1)) begin
            tcnt <= '0;
            bytes_left <= bytes_left - 1'b1;
            if (bytes_left == 16'd1) state <= S_IDLE;
          end else tcnt <= tcnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk)
    if (rst_n) assert (!(state == S_IDLE && req_valid) || req_len != '0)
      else $error("nand_channel_ctrl: zero-length read");
endmodule
