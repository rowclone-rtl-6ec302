// rowclone_system: RowClone memory controller and RowClone DRAM chip joined
// by a memory channel.
//
// A requester (standing in for the processor that executes memcopy/meminit
// and decides what to offload) hands whole-row bulk copies and
// initializations, or single cache-line reads and writes, to the controller.
// The controller issues ACTIVATE/PRECHARGE/READ/WRITE/TRANSFER commands on
// the channel; the chip performs Fast Parallel Mode copies inside a
// subarray and Pipelined Serial Mode copies across banks over its shared
// internal bus. The statistics outputs count rows per mechanism (controller
// side) and lines per kind of movement (chip side): a bulk copy raises
// fpm_copies / transfers without raising the channel line counters.
//
// Interface and timing are those of rc_controller (request side) plus the
// chip's counters. After reset, init_done rises once the controller has
// zeroed the reserved zero row of every subarray; only then is req_ready high.
//
// Follows the paper: the split of work between memory controller and DRAM
// (FPM, PSM, zero rows). This design's choice: a single chip stands for the
// whole rank and one column access moves a whole 64 B cache line.
module rowclone_system #(
  parameter int unsigned BANKS       = rc_pkg::DEF_BANKS,
  parameter int unsigned SUBARRAYS   = rc_pkg::DEF_SUBARRAYS,
  parameter int unsigned ROWS_PER_SA = rc_pkg::DEF_ROWS_PER_SA,
  parameter int unsigned COLS        = rc_pkg::DEF_COLS,
  parameter int unsigned LINE_BITS   = rc_pkg::DEF_LINE_BITS,
  localparam int unsigned BANK_W     = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned SA_W       = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned LROW_W     = (ROWS_PER_SA > 1) ? $clog2(ROWS_PER_SA) : 1,
  localparam int unsigned ROW_W      = SA_W + LROW_W,
  localparam int unsigned COL_W      = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned ADDR_W     = BANK_W + ROW_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 req_valid,
  output logic                 req_ready,
  input  rc_pkg::req_op_e      req_op,
  input  logic [ADDR_W-1:0]    req_src,
  input  logic [ADDR_W-1:0]    req_dst,
  input  logic [ADDR_W:0]      req_n_rows,
  input  logic [COL_W-1:0]     req_col,
  input  logic [LINE_BITS-1:0] req_data,
  output logic                 resp_valid,
  output logic [LINE_BITS-1:0] resp_data,
  output logic                 init_done,
  output logic [31:0]          rows_fpm,
  output logic [31:0]          rows_zero_fpm,
  output logic [31:0]          rows_psm_inter,
  output logic [31:0]          rows_psm_intra,
  output logic [31:0]          rows_filled,
  output logic [31:0]          ch_lines_read,
  output logic [31:0]          ch_lines_written,
  output logic [31:0]          fpm_copies,
  output logic [31:0]          transfers
);
  import rc_pkg::*;

  dram_cmd_e            ch_cmd;
  logic [BANK_W-1:0]    ch_bank, ch_dst_bank;
  logic [ROW_W-1:0]     ch_row;
  logic [COL_W-1:0]     ch_col, ch_dst_col;
  logic [LINE_BITS-1:0] ch_wr_data, ch_rd_data;
  logic                 ch_rd_valid;

  rc_controller #(
    .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROWS_PER_SA(ROWS_PER_SA),
    .COLS(COLS), .LINE_BITS(LINE_BITS)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_op, .req_src, .req_dst, .req_n_rows, .req_col, .req_data,
    .resp_valid, .resp_data, .init_done,
    .ch_cmd, .ch_bank, .ch_row, .ch_col, .ch_dst_bank, .ch_dst_col, .ch_wr_data,
    .ch_rd_data, .ch_rd_valid,
    .rows_fpm, .rows_zero_fpm, .rows_psm_inter, .rows_psm_intra, .rows_filled
  );

  rc_dram_chip #(
    .BANKS(BANKS), .SUBARRAYS(SUBARRAYS), .ROWS_PER_SA(ROWS_PER_SA),
    .COLS(COLS), .LINE_BITS(LINE_BITS)
  ) u_chip (
    .clk, .rst_n,
    .ch_cmd, .ch_bank, .ch_row, .ch_col, .ch_dst_bank, .ch_dst_col, .ch_wr_data,
    .ch_rd_data, .ch_rd_valid,
    .ch_lines_read, .ch_lines_written, .fpm_copies, .transfers
  );

endmodule
