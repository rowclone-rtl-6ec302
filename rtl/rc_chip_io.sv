// rc_chip_io: the DRAM chip's interface to the memory channel.
//
// It registers each command, its addresses and its write data as they
// arrive from the channel, presents them to the chip's command decoder one
// cycle later, and registers column data that a READ put on the internal
// bus, returning it to the channel with rd_valid one cycle after the decoder
// executed the READ (two cycles after the READ was on the channel). It also
// counts the cache lines that crossed the channel in each direction, which
// shows that TRANSFER moves no data over the channel.
//
// Follows the paper: only the name and the place in the chip (Fig. 1). The
// register stages, the fixed two-cycle read return and the counters are this
// design's choices; DRAM CAS latency is accounted for by the controller.
module rc_chip_io #(
  parameter int unsigned BANK_W    = 3,
  parameter int unsigned ROW_W     = 6,
  parameter int unsigned COL_W     = 6,
  parameter int unsigned LINE_BITS = rc_pkg::DEF_LINE_BITS,
  parameter int unsigned CNT_W     = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // memory channel side
  input  rc_pkg::dram_cmd_e    ch_cmd,
  input  logic [BANK_W-1:0]    ch_bank,
  input  logic [ROW_W-1:0]     ch_row,
  input  logic [COL_W-1:0]     ch_col,
  input  logic [BANK_W-1:0]    ch_dst_bank,
  input  logic [COL_W-1:0]     ch_dst_col,
  input  logic [LINE_BITS-1:0] ch_wr_data,
  output logic [LINE_BITS-1:0] ch_rd_data,
  output logic                 ch_rd_valid,
  // chip side
  output rc_pkg::dram_cmd_e    cmd,
  output logic [BANK_W-1:0]    bank,
  output logic [ROW_W-1:0]     row,
  output logic [COL_W-1:0]     col,
  output logic [BANK_W-1:0]    dst_bank,
  output logic [COL_W-1:0]     dst_col,
  output logic [LINE_BITS-1:0] wr_data,
  input  logic [LINE_BITS-1:0] bus_data,
  // statistics
  output logic [CNT_W-1:0]     lines_read,
  output logic [CNT_W-1:0]     lines_written
);
  import rc_pkg::*;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd           <= CMD_NOP;
      bank          <= '0;
      row           <= '0;
      col           <= '0;
      dst_bank      <= '0;
      dst_col       <= '0;
      wr_data       <= '0;
      ch_rd_data    <= '0;
      ch_rd_valid   <= 1'b0;
      lines_read    <= '0;
      lines_written <= '0;
    end else begin
      cmd      <= ch_cmd;
      bank     <= ch_bank;
      row      <= ch_row;
      col      <= ch_col;
      dst_bank <= ch_dst_bank;
      dst_col  <= ch_dst_col;
      wr_data  <= ch_wr_data;
      ch_rd_valid <= (cmd == CMD_RD);
      if (cmd == CMD_RD) begin
        ch_rd_data <= bus_data;
        lines_read <= lines_read + 1'b1;
      end
      if (cmd == CMD_WR) lines_written <= lines_written + 1'b1;
    end
  end

endmodule
