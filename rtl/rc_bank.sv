// rc_bank: one DRAM bank made of SUBARRAYS subarrays and the bank I/O.
//
// A bank-local row address is {subarray, row-in-subarray}. The bank keeps at
// most one subarray open. ACTIVATE to a closed bank opens the addressed
// subarray; a second ACTIVATE while that subarray is open goes to the same
// subarray and performs the Fast Parallel Mode copy inside it. ACTIVATE to a
// different subarray of an open bank is illegal and flagged by an assertion
// (the controller never issues it). PRECHARGE closes the open subarray.
// The bank I/O routes column reads and writes to the open subarray and puts
// the open subarray's selected column on rd_data, from where the chip's
// shared internal bus takes it.
//
// Timing: commands act on the clock edge on which they are presented;
// rd_data is combinational from the open subarray's row buffer.
//
// Follows the paper: the bank/subarray/bank-I/O hierarchy and FPM within a
// subarray. This design's choices: one open subarray per bank and the
// {subarray, row} address split.
module rc_bank #(
  parameter int unsigned SUBARRAYS  = rc_pkg::DEF_SUBARRAYS,
  parameter int unsigned ROWS_PER_SA = rc_pkg::DEF_ROWS_PER_SA,
  parameter int unsigned COLS       = rc_pkg::DEF_COLS,
  parameter int unsigned LINE_BITS  = rc_pkg::DEF_LINE_BITS,
  localparam int unsigned SA_W      = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned LROW_W    = (ROWS_PER_SA > 1) ? $clog2(ROWS_PER_SA) : 1,
  localparam int unsigned ROW_W     = SA_W + LROW_W,
  localparam int unsigned COL_W     = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 act,
  input  logic [ROW_W-1:0]     act_row,   // {subarray, row in subarray}
  input  logic                 pre,
  input  logic                 wr,
  input  logic [COL_W-1:0]     col,
  input  logic [LINE_BITS-1:0] wr_data,
  output logic [LINE_BITS-1:0] rd_data,
  output logic                 is_open,
  output logic                 fpm_copy   // an FPM copy happened in this bank last cycle
);

  logic [SA_W-1:0]      open_sa;
  logic [SA_W-1:0]      act_sa;
  logic [LROW_W-1:0]    act_lrow;
  logic [SUBARRAYS-1:0] sa_open, sa_fpm;
  logic [LINE_BITS-1:0] sa_rd [SUBARRAYS];

  assign act_sa   = act_row[ROW_W-1 -: SA_W];
  assign act_lrow = act_row[LROW_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   open_sa <= '0;
    else if (act) open_sa <= act_sa;
  end

  for (genvar s = 0; s < SUBARRAYS; s++) begin : g_sa
    rc_subarray #(
      .ROWS(ROWS_PER_SA), .COLS(COLS), .LINE_BITS(LINE_BITS)
    ) u_sa (
      .clk, .rst_n,
      .act     (act && act_sa == SA_W'(s)),
      .act_row (act_lrow),
      .pre     (pre && open_sa == SA_W'(s)),
      .wr      (wr && is_open && open_sa == SA_W'(s)),
      .col,
      .wr_data,
      .rd_data (sa_rd[s]),
      .is_open (sa_open[s]),
      .fpm_copy(sa_fpm[s])
    );
  end

  // Bank I/O: the open subarray drives the bank's column data.
  assign rd_data  = sa_rd[open_sa];
  assign is_open  = |sa_open;
  assign fpm_copy = |sa_fpm;

  a_one_sa: assert property (@(posedge clk) disable iff (!rst_n)
      (act && is_open) |-> (act_sa == open_sa))
    else $error("rc_bank: ACTIVATE to another subarray of an open bank");
  a_wr_open: assert property (@(posedge clk) disable iff (!rst_n) wr |-> is_open)
    else $error("rc_bank: column write to a closed bank");

endmodule
