// rc_subarray: one DRAM subarray, i.e. ROWS rows of cells that share one row
// buffer (the subarray's sense amplifiers).
//
// ACTIVATE on a precharged subarray senses the addressed row into the row
// buffer. ACTIVATE on a subarray whose row buffer already holds sensed data
// is the RowClone Fast Parallel Mode step: the sense amplifiers overdrive the
// newly raised row, so the whole row buffer is written into that row in one
// step. PRECHARGE closes the subarray. While open, column reads return one
// LINE_BITS slice of the row buffer (combinational, from the registered row
// buffer), and column writes update that slice of the row buffer and, write-
// through, of the cells of the most recently activated row.
//
// Timing: every command acts on the clock edge on which it is presented;
// rd_data follows col and the row buffer with no added delay. Analog timing
// (tRCD, tRAS, tRP) is the controller's business and is not modelled here.
//
// Follows the paper: row granularity of the cell-to-row-buffer transfer and
// the back-to-back-ACTIVATE copy. This design's choices: the cell array is a
// plain register array, a column write after an FPM second ACTIVATE reaches
// only the last activated row, and row 0 is the row that the controller
// keeps at zero (nothing in the subarray enforces it).
module rc_subarray #(
  parameter int unsigned ROWS      = rc_pkg::DEF_ROWS_PER_SA,
  parameter int unsigned COLS      = rc_pkg::DEF_COLS,
  parameter int unsigned LINE_BITS = rc_pkg::DEF_LINE_BITS,
  localparam int unsigned ROW_W    = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned COL_W    = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned ROW_BITS = COLS * LINE_BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 act,       // ACTIVATE
  input  logic [ROW_W-1:0]     act_row,
  input  logic                 pre,       // PRECHARGE
  input  logic                 wr,        // column write into the open row
  input  logic [COL_W-1:0]     col,
  input  logic [LINE_BITS-1:0] wr_data,
  output logic [LINE_BITS-1:0] rd_data,
  output logic                 is_open,   // row buffer holds sensed data
  output logic                 fpm_copy   // pulses when an ACTIVATE performed an FPM row copy
);

  logic [ROW_BITS-1:0] cells [ROWS];
  logic [ROW_BITS-1:0] row_buf;
  logic [ROW_W-1:0]    open_row;

  // Open/closed state of the row buffer.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      is_open  <= 1'b0;
      open_row <= '0;
      fpm_copy <= 1'b0;
    end else begin
      fpm_copy <= act && is_open;
      if (pre) begin
        is_open <= 1'b0;
      end else if (act) begin
        is_open  <= 1'b1;
        open_row <= act_row;
      end
    end
  end

  // Row buffer: sensed on the first ACTIVATE, written by column writes.
  always_ff @(posedge clk) begin
    if (act && !is_open && !pre)
      row_buf <= cells[act_row];
    else if (wr && is_open)
      row_buf[col*LINE_BITS +: LINE_BITS] <= wr_data;
  end

  // Cells: whole-row copy on the FPM ACTIVATE, write-through on column writes.
  always_ff @(posedge clk) begin
    if (act && is_open && !pre)
      cells[act_row] <= row_buf;
    else if (wr && is_open)
      cells[open_row][col*LINE_BITS +: LINE_BITS] <= wr_data;
  end

  assign rd_data = row_buf[col*LINE_BITS +: LINE_BITS];

  // A column command needs an open row; ACTIVATE and PRECHARGE never coincide.
  a_wr_open: assert property (@(posedge clk) disable iff (!rst_n) wr |-> is_open)
    else $error("rc_subarray: column write to a closed subarray");
  a_act_pre: assert property (@(posedge clk) disable iff (!rst_n) !(act && pre))
    else $error("rc_subarray: ACTIVATE and PRECHARGE together");

endmodule
