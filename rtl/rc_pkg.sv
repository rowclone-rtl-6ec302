// rc_pkg: types and default constants shared by the RowClone DRAM chip and
// its memory controller.
//
// The DRAM command set is the usual ACTIVATE / PRECHARGE / READ / WRITE plus
// the TRANSFER command that RowClone adds for its Pipelined Serial Mode: a
// column is read from a source bank and written to a destination bank over
// the chip's shared internal bus without appearing on the memory channel.
// Fast Parallel Mode needs no new command; it is two back-to-back ACTIVATEs
// to the same subarray.
//
// The geometry and timing defaults are this design's own choices (the
// RowClone description gives none except the 4 KB copy granularity used for
// its latency table). Timing defaults are DDR3-1066-like values in clock
// cycles of tCK = 1.875 ns; with them a one-row FPM copy takes
// 2*tRAS + tRP = 47 cycles = 88 ns and an inter-bank PSM copy of 4 KB about
// 0.52 us, close to the 90 ns and 540 ns the RowClone latency table lists.
package rc_pkg;

  // DRAM commands on the memory channel.
  typedef enum logic [2:0] {
    CMD_NOP      = 3'd0,
    CMD_ACT      = 3'd1,  // ACTIVATE bank/row
    CMD_PRE      = 3'd2,  // PRECHARGE bank
    CMD_RD       = 3'd3,  // READ one column (cache line) to the channel
    CMD_WR       = 3'd4,  // WRITE one column from the channel
    CMD_TRANSFER = 3'd5   // RowClone PSM: bank/col -> dst_bank/dst_col, internal
  } dram_cmd_e;

  // Requests accepted by the RowClone memory controller.
  typedef enum logic [2:0] {
    OP_COPY  = 3'd0,  // memcopy: n_rows whole rows, src -> dst
    OP_INIT  = 3'd1,  // meminit: n_rows whole rows set to a repeated line value
    OP_READ  = 3'd2,  // ordinary cache-line read
    OP_WRITE = 3'd3   // ordinary cache-line write
  } req_op_e;

  // Mechanism chosen for one row of a bulk operation.
  typedef enum logic [1:0] {
    MECH_FPM       = 2'd0,  // same subarray: ACT src, ACT dst, PRE
    MECH_PSM_INTER = 2'd1,  // different banks: TRANSFER per column
    MECH_PSM_INTRA = 2'd2   // same bank, other subarray: two PSM copies via a staging row
  } mech_e;

  // Default geometry.
  localparam int unsigned DEF_BANKS        = 8;    // banks per chip
  localparam int unsigned DEF_SUBARRAYS    = 4;    // subarrays per bank
  localparam int unsigned DEF_ROWS_PER_SA  = 16;   // rows per subarray, zero row included
  localparam int unsigned DEF_LINE_BITS    = 512;  // one column access = one 64 B cache line
  localparam int unsigned DEF_COLS         = 64;   // 64 lines = 4 KB per row

  // Default timing in clock cycles (tCK = 1.875 ns).
  localparam int unsigned DEF_T_RCD = 7;   // ACT -> column command
  localparam int unsigned DEF_T_RP  = 7;   // PRE -> ACT
  localparam int unsigned DEF_T_RAS = 20;  // ACT -> PRE (also ACT -> 2nd ACT in FPM)
  localparam int unsigned DEF_T_RRD = 4;   // ACT -> ACT, different banks
  localparam int unsigned DEF_T_CCD = 4;   // column command -> column command
  localparam int unsigned DEF_T_WR  = 8;   // last write data -> PRE
  localparam int unsigned DEF_T_CL  = 7;   // READ -> data on the channel (controller wait)
  localparam int unsigned DEF_T_RTP = 4;   // READ -> PRE

endpackage
