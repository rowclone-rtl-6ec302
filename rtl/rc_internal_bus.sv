// rc_internal_bus: the DRAM chip's shared internal bus.
//
// All banks and the chip I/O hang on one bus that carries one column (cache
// line) per cycle. Exactly one source drives it: the bank named by src_bank
// (READ and TRANSFER) or the chip I/O with channel write data (WRITE).
// Every bank sees the bus as its write data; the chip's command decoder
// decides which bank, if any, writes it. A TRANSFER therefore moves a
// column from one bank to another in one bus cycle without touching the
// memory channel.
//
// Timing: purely combinational.
//
// Follows the paper: one bus shared by all banks and the channel, used by
// PSM. This design's choice: a multiplexer (rather than tri-state lines)
// with one-line width.
module rc_internal_bus #(
  parameter int unsigned BANKS     = rc_pkg::DEF_BANKS,
  parameter int unsigned LINE_BITS = rc_pkg::DEF_LINE_BITS,
  localparam int unsigned BANK_W   = (BANKS > 1) ? $clog2(BANKS) : 1
) (
  input  logic [LINE_BITS-1:0] bank_rd_data [BANKS],  // column data from each bank I/O
  input  logic [LINE_BITS-1:0] chan_wr_data,          // write data from the chip I/O
  input  logic                 src_is_chan,           // 1: channel drives, 0: a bank drives
  input  logic [BANK_W-1:0]    src_bank,
  output logic [LINE_BITS-1:0] bus_data
);

  always_comb begin
    if (src_is_chan) bus_data = chan_wr_data;
    else             bus_data = bank_rd_data[src_bank];
  end

endmodule
