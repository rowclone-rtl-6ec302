// rc_dram_chip: a RowClone-capable DRAM chip (the unit that receives the
// memory channel's commands).
//
// Structure: BANKS banks (each SUBARRAYS subarrays of ROWS_PER_SA rows of
// COLS cache lines), one shared internal bus, and the chip I/O. The command
// decoder executes the command registered by the chip I/O:
//   ACT      bank, row   open a row; a second ACT to the open subarray of the
//                        same bank copies the row buffer into the new row
//                        (Fast Parallel Mode, FPM)
//   PRE      bank        close the bank
//   RD       bank, col   the bank drives the bus; the chip I/O returns the line
//   WR       bank, col   the chip I/O drives the bus; the bank writes the line
//   TRANSFER bank, col -> dst_bank, dst_col
//                        the source bank drives the bus and the destination
//                        bank writes it in the same cycle (Pipelined Serial
//                        Mode, PSM); nothing crosses the memory channel
// Timing: a command is executed one cycle after it is on the channel; read
// data returns two cycles after the READ. DRAM timing constraints (tRCD,
// tRAS, tRP, tCCD, ...) are met by the controller; the chip only asserts the
// structural rules (column command to an open bank, TRANSFER between two
// different open banks).
//
// Follows the paper: bank/subarray/row-buffer organisation, shared internal
// bus and chip I/O (Fig. 1), FPM by back-to-back ACTIVATE, PSM by a TRANSFER
// command that overlaps a READ from one bank with a WRITE to another.
// This design's choices: the command encoding and fields, single-cycle
// TRANSFER of one 64 B line, and the sizes.
module rc_dram_chip #(
  parameter int unsigned BANKS       = rc_pkg::DEF_BANKS,
  parameter int unsigned SUBARRAYS   = rc_pkg::DEF_SUBARRAYS,
  parameter int unsigned ROWS_PER_SA = rc_pkg::DEF_ROWS_PER_SA,
  parameter int unsigned COLS        = rc_pkg::DEF_COLS,
  parameter int unsigned LINE_BITS   = rc_pkg::DEF_LINE_BITS,
  localparam int unsigned BANK_W     = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned SA_W       = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned LROW_W     = (ROWS_PER_SA > 1) ? $clog2(ROWS_PER_SA) : 1,
  localparam int unsigned ROW_W      = SA_W + LROW_W,
  localparam int unsigned COL_W      = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  rc_pkg::dram_cmd_e    ch_cmd,
  input  logic [BANK_W-1:0]    ch_bank,
  input  logic [ROW_W-1:0]     ch_row,
  input  logic [COL_W-1:0]     ch_col,
  input  logic [BANK_W-1:0]    ch_dst_bank,
  input  logic [COL_W-1:0]     ch_dst_col,
  input  logic [LINE_BITS-1:0] ch_wr_data,
  output logic [LINE_BITS-1:0] ch_rd_data,
  output logic                 ch_rd_valid,
  output logic [31:0]          ch_lines_read,     // lines returned over the channel
  output logic [31:0]          ch_lines_written,  // lines received over the channel
  output logic [31:0]          fpm_copies,        // rows copied by FPM
  output logic [31:0]          transfers          // lines moved by TRANSFER
);
  import rc_pkg::*;

  dram_cmd_e            cmd;
  logic [BANK_W-1:0]    bank, dst_bank;
  logic [ROW_W-1:0]     row;
  logic [COL_W-1:0]     col, dst_col;
  logic [LINE_BITS-1:0] wr_data, bus_data;
  logic [LINE_BITS-1:0] bank_rd [BANKS];
  logic [BANKS-1:0]     bank_open, bank_fpm;

  rc_chip_io #(
    .BANK_W(BANK_W), .ROW_W(ROW_W), .COL_W(COL_W), .LINE_BITS(LINE_BITS), .CNT_W(32)
  ) u_io (
    .clk, .rst_n,
    .ch_cmd, .ch_bank, .ch_row, .ch_col, .ch_dst_bank, .ch_dst_col, .ch_wr_data,
    .ch_rd_data, .ch_rd_valid,
    .cmd, .bank, .row, .col, .dst_bank, .dst_col, .wr_data, .bus_data,
    .lines_read(ch_lines_read), .lines_written(ch_lines_written)
  );

  rc_internal_bus #(.BANKS(BANKS), .LINE_BITS(LINE_BITS)) u_bus (
    .bank_rd_data(bank_rd),
    .chan_wr_data(wr_data),
    .src_is_chan (cmd == CMD_WR),
    .src_bank    (bank),
    .bus_data
  );

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic sel, dst_sel;
    assign sel     = (bank == BANK_W'(b));
    assign dst_sel = (dst_bank == BANK_W'(b));
    rc_bank #(
      .SUBARRAYS(SUBARRAYS), .ROWS_PER_SA(ROWS_PER_SA), .COLS(COLS), .LINE_BITS(LINE_BITS)
    ) u_bank (
      .clk, .rst_n,
      .act     (cmd == CMD_ACT && sel),
      .act_row (row),
      .pre     (cmd == CMD_PRE && sel),
      .wr      ((cmd == CMD_WR && sel) || (cmd == CMD_TRANSFER && dst_sel)),
      .col     ((cmd == CMD_TRANSFER && dst_sel) ? dst_col : col),
      .wr_data (bus_data),
      .rd_data (bank_rd[b]),
      .is_open (bank_open[b]),
      .fpm_copy(bank_fpm[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fpm_copies <= '0;
      transfers  <= '0;
    end else begin
      fpm_copies <= fpm_copies + 32'($countones(bank_fpm));
      if (cmd == CMD_TRANSFER) transfers <= transfers + 1'b1;
    end
  end

  // Structural command rules.
  a_col_open: assert property (@(posedge clk) disable iff (!rst_n)
      (cmd == CMD_RD || cmd == CMD_WR || cmd == CMD_TRANSFER) |-> bank_open[bank])
    else $error("rc_dram_chip: column command to a closed bank");
  a_xfer_dst: assert property (@(posedge clk) disable iff (!rst_n)
      (cmd == CMD_TRANSFER) |-> (bank_open[dst_bank] && dst_bank != bank))
    else $error("rc_dram_chip: TRANSFER needs a different, open destination bank");

endmodule
