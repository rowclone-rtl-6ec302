// rc_controller: memory-controller side of RowClone.
//
// It takes whole-row bulk requests (memcopy, meminit) and ordinary cache-line
// reads and writes, and turns them into DRAM command sequences on the memory
// channel. For every row of a bulk request it picks the mechanism:
//   FPM        source and destination in the same subarray of the same bank:
//              ACT src, (tRAS) ACT dst, (tRAS) PRE, (tRP)
//   PSM inter  different banks:
//              ACT src, (tRRD) ACT dst, (tRCD) COLS x TRANSFER spaced tCCD,
//              (tWR) PRE src, PRE dst, (tRP)
//   PSM intra  same bank, different subarray: two inter-bank PSM copies,
//              source -> staging row in the next bank -> destination
// meminit with an all-zero value copies, by FPM, the reserved zero row of
// each destination row's own subarray (row 0 of every subarray). meminit with
// another value first writes the value into the first destination row over
// the channel (ACT, COLS x WR, PRE) and then copies that row to the others.
// After reset the controller writes zeros into every reserved zero row
// (init_done rises when finished) and then accepts requests.
//
// Interface: req_valid/req_ready handshake; one request at a time; resp_valid
// pulses for one cycle when a request is complete (with resp_data for
// reads). Row addresses are {bank, subarray, row in subarray}. Bulk requests
// must not cover a reserved row (row 0 of a subarray, or the staging row, row
// ROWS_PER_SA-1 of the last subarray of each bank).
// Timing: commands leave on registered outputs; the gap between two commands
// is exactly the DRAM timing parameter named above. A bulk request of n rows
// takes 1 + n*(row time + 2) cycles from acceptance to resp_valid; the row
// times are listed in the README.
//
// Follows the paper: the choice between FPM and PSM by location, the
// command sequences (back-to-back ACTIVATE; TRANSFER), zeroing by FPM from a
// per-subarray zero row, and initialization by writing one row and copying
// it. This design's choices: the request format, the closed-page policy,
// the timing values, the staging-row method for intra-bank PSM (the paper
// only gives its latency, about twice that of inter-bank PSM), and who
// initializes the zero rows (the paper only says they are pre-initialized).
module rc_controller #(
  parameter int unsigned BANKS       = rc_pkg::DEF_BANKS,
  parameter int unsigned SUBARRAYS   = rc_pkg::DEF_SUBARRAYS,
  parameter int unsigned ROWS_PER_SA = rc_pkg::DEF_ROWS_PER_SA,
  parameter int unsigned COLS        = rc_pkg::DEF_COLS,
  parameter int unsigned LINE_BITS   = rc_pkg::DEF_LINE_BITS,
  parameter int unsigned T_RCD       = rc_pkg::DEF_T_RCD,
  parameter int unsigned T_RP        = rc_pkg::DEF_T_RP,
  parameter int unsigned T_RAS       = rc_pkg::DEF_T_RAS,
  parameter int unsigned T_RRD       = rc_pkg::DEF_T_RRD,
  parameter int unsigned T_CCD       = rc_pkg::DEF_T_CCD,
  parameter int unsigned T_WR        = rc_pkg::DEF_T_WR,
  parameter int unsigned T_CL        = rc_pkg::DEF_T_CL,
  parameter int unsigned T_RTP       = rc_pkg::DEF_T_RTP,
  localparam int unsigned BANK_W     = (BANKS > 1) ? $clog2(BANKS) : 1,
  localparam int unsigned SA_W       = (SUBARRAYS > 1) ? $clog2(SUBARRAYS) : 1,
  localparam int unsigned LROW_W     = (ROWS_PER_SA > 1) ? $clog2(ROWS_PER_SA) : 1,
  localparam int unsigned ROW_W      = SA_W + LROW_W,
  localparam int unsigned COL_W      = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned ADDR_W     = BANK_W + ROW_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // requests
  input  logic                 req_valid,
  output logic                 req_ready,
  input  rc_pkg::req_op_e      req_op,
  input  logic [ADDR_W-1:0]    req_src,     // COPY source row; READ/WRITE row
  input  logic [ADDR_W-1:0]    req_dst,     // COPY/INIT first destination row
  input  logic [ADDR_W:0]      req_n_rows,  // COPY/INIT row count (>= 1)
  input  logic [COL_W-1:0]     req_col,     // READ/WRITE column
  input  logic [LINE_BITS-1:0] req_data,    // WRITE data; INIT value of every line
  output logic                 resp_valid,
  output logic [LINE_BITS-1:0] resp_data,
  output logic                 init_done,
  // memory channel
  output rc_pkg::dram_cmd_e    ch_cmd,
  output logic [BANK_W-1:0]    ch_bank,
  output logic [ROW_W-1:0]     ch_row,
  output logic [COL_W-1:0]     ch_col,
  output logic [BANK_W-1:0]    ch_dst_bank,
  output logic [COL_W-1:0]     ch_dst_col,
  output logic [LINE_BITS-1:0] ch_wr_data,
  input  logic [LINE_BITS-1:0] ch_rd_data,
  input  logic                 ch_rd_valid,
  // mechanism statistics (rows)
  output logic [31:0]          rows_fpm,
  output logic [31:0]          rows_zero_fpm,
  output logic [31:0]          rows_psm_inter,
  output logic [31:0]          rows_psm_intra,
  output logic [31:0]          rows_filled
);
  import rc_pkg::*;

  typedef enum logic [4:0] {
    S_ZACT, S_ZWR, S_ZPRE,            // zero-row initialization after reset
    S_IDLE, S_PLAN, S_NEXT, S_WAIT,
    S_F_ACT1, S_F_ACT2, S_F_PRE,      // FPM
    S_P_ACT1, S_P_ACT2, S_P_XFER, S_P_PRE1, S_P_PRE2,  // PSM
    S_W_ACT, S_W_WR, S_W_PRE,         // channel write (WRITE, INIT fill)
    S_R_ACT, S_R_RD, S_R_PRE          // channel read
  } state_e;

  typedef struct packed {
    logic [BANK_W-1:0] bank;
    logic [SA_W-1:0]   sa;
    logic [LROW_W-1:0] lrow;
  } row_addr_t;

  // The PSM schedule precharges the source after tWR from its last TRANSFER;
  // that must not come before tRAS from its ACTIVATE.
  if (T_RRD + T_RCD + (COLS - 1) * T_CCD + T_WR < T_RAS) begin : g_bad_timing
    $error("rc_controller: PSM schedule would violate tRAS");
  end
  if (BANKS < 2) begin : g_bad_banks
    $error("rc_controller: intra-bank PSM needs at least two banks");
  end

  state_e          state, ret_state;
  logic [15:0]     wait_cnt;
  req_op_e         op;
  row_addr_t       cur_src, cur_dst, fill_row, p_src, p_dst;
  logic [ADDR_W:0] rows_left;
  logic [LINE_BITS-1:0] value;
  logic            first_row, intra_phase2, single_col;
  logic [COL_W-1:0] c;
  row_addr_t       zrow;

  // Staging row for intra-bank PSM: the last row of the last subarray of
  // the bank after b.
  function automatic row_addr_t staging_of(logic [BANK_W-1:0] b);
    row_addr_t s;
    s.bank = BANK_W'((int'(b) + 1) % BANKS);
    s.sa   = SA_W'(SUBARRAYS - 1);
    s.lrow = LROW_W'(ROWS_PER_SA - 1);
    return s;
  endfunction

  assign req_ready = (state == S_IDLE);

  // Source row of the current row operation: the request's source for a
  // copy, the destination subarray's zero row for zeroing, and the first
  // (filled) destination row for initialization with another value.
  row_addr_t src;
  always_comb begin
    src = cur_src;
    if (op == OP_INIT) begin
      if (value == '0) src = '{bank: cur_dst.bank, sa: cur_dst.sa, lrow: '0};
      else             src = fill_row;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_ZACT;
      ret_state      <= S_IDLE;
      wait_cnt       <= '0;
      op             <= OP_COPY;
      cur_src        <= '0;
      cur_dst        <= '0;
      fill_row       <= '0;
      p_src          <= '0;
      p_dst          <= '0;
      rows_left      <= '0;
      value          <= '0;
      first_row      <= 1'b0;
      intra_phase2   <= 1'b0;
      single_col     <= 1'b0;
      c              <= '0;
      zrow           <= '0;
      init_done      <= 1'b0;
      resp_valid     <= 1'b0;
      resp_data      <= '0;
      ch_cmd         <= CMD_NOP;
      ch_bank        <= '0;
      ch_row         <= '0;
      ch_col         <= '0;
      ch_dst_bank    <= '0;
      ch_dst_col     <= '0;
      ch_wr_data     <= '0;
      rows_fpm       <= '0;
      rows_zero_fpm  <= '0;
      rows_psm_inter <= '0;
      rows_psm_intra <= '0;
      rows_filled    <= '0;
    end else begin
      ch_cmd     <= CMD_NOP;
      resp_valid <= 1'b0;
      if (ch_rd_valid) resp_data <= ch_rd_data;

      unique case (state)
        // ---------------- zero rows: ACT, COLS x WR 0, PRE, for every subarray
        S_ZACT: begin
          issue_act(zrow);
          c <= '0;
          go(T_RCD, S_ZWR);
        end
        S_ZWR: begin
          issue_wr(zrow.bank, c, '0);
          c <= c + 1'b1;
          if (c == COL_W'(COLS - 1)) go(T_WR, S_ZPRE);
          else                       go(T_CCD, S_ZWR);
        end
        S_ZPRE: begin
          issue_pre(zrow.bank);
          if (zrow.sa == SA_W'(SUBARRAYS - 1) && zrow.bank == BANK_W'(BANKS - 1)) begin
            go(T_RP, S_IDLE);
            init_done <= 1'b1;
          end else begin
            if (zrow.sa == SA_W'(SUBARRAYS - 1)) begin
              zrow.sa   <= '0;
              zrow.bank <= zrow.bank + 1'b1;
            end else begin
              zrow.sa <= zrow.sa + 1'b1;
            end
            go(T_RP, S_ZACT);
          end
        end

        // ---------------- request intake
        S_IDLE: begin
          if (req_valid) begin
            op        <= req_op;
            cur_src   <= row_addr_t'(req_src);
            cur_dst   <= row_addr_t'(req_dst);
            fill_row  <= row_addr_t'(req_dst);
            rows_left <= req_n_rows;
            value     <= req_data;
            first_row <= 1'b1;
            unique case (req_op)
              OP_WRITE: begin
                cur_dst    <= row_addr_t'(req_src);
                c          <= req_col;
                single_col <= 1'b1;
                state      <= S_W_ACT;
              end
              OP_READ: begin
                c     <= req_col;
                state <= S_R_ACT;
              end
              default: state <= S_PLAN;
            endcase
          end
        end

        // ---------------- choose the mechanism for the current row
        S_PLAN: begin
          intra_phase2 <= 1'b0;
          if (op == OP_INIT && value != '0 && first_row) begin
            c          <= '0;
            single_col <= 1'b0;
            rows_filled <= rows_filled + 1'b1;
            state      <= S_W_ACT;
          end else if (src.bank == cur_dst.bank && src.sa == cur_dst.sa) begin
            p_src <= src;
            p_dst <= cur_dst;
            if (op == OP_INIT && value == '0) rows_zero_fpm <= rows_zero_fpm + 1'b1;
            else                              rows_fpm      <= rows_fpm + 1'b1;
            state <= S_F_ACT1;
          end else if (src.bank != cur_dst.bank) begin
            p_src <= src;
            p_dst <= cur_dst;
            rows_psm_inter <= rows_psm_inter + 1'b1;
            state <= S_P_ACT1;
          end else begin
            p_src <= src;
            p_dst <= staging_of(cur_dst.bank);
            rows_psm_intra <= rows_psm_intra + 1'b1;
            state <= S_P_ACT1;
          end
        end

        S_NEXT: begin
          first_row <= 1'b0;
          cur_src   <= row_addr_t'(ADDR_W'(cur_src) + 1'b1);
          cur_dst   <= row_addr_t'(ADDR_W'(cur_dst) + 1'b1);
          rows_left <= rows_left - 1'b1;
          if (op == OP_WRITE || op == OP_READ || rows_left <= 1) begin
            resp_valid <= 1'b1;
            state      <= S_IDLE;
          end else begin
            state <= S_PLAN;
          end
        end

        S_WAIT: begin
          if (wait_cnt <= 16'd1) state <= ret_state;
          else                   wait_cnt <= wait_cnt - 1'b1;
        end

        // ---------------- Fast Parallel Mode
        S_F_ACT1: begin issue_act(p_src); go(T_RAS, S_F_ACT2); end
        S_F_ACT2: begin issue_act(p_dst); go(T_RAS, S_F_PRE);  end
        S_F_PRE:  begin issue_pre(p_dst.bank); go(T_RP, S_NEXT); end

        // ---------------- Pipelined Serial Mode
        S_P_ACT1: begin issue_act(p_src); c <= '0; go(T_RRD, S_P_ACT2); end
        S_P_ACT2: begin issue_act(p_dst); go(T_RCD, S_P_XFER); end
        S_P_XFER: begin
          ch_cmd      <= CMD_TRANSFER;
          ch_bank     <= p_src.bank;
          ch_col      <= c;
          ch_dst_bank <= p_dst.bank;
          ch_dst_col  <= c;
          c           <= c + 1'b1;
          if (c == COL_W'(COLS - 1)) go(T_WR, S_P_PRE1);
          else                       go(T_CCD, S_P_XFER);
        end
        S_P_PRE1: begin issue_pre(p_src.bank); state <= S_P_PRE2; end
        S_P_PRE2: begin
          issue_pre(p_dst.bank);
          if (p_dst == staging_of(cur_dst.bank) && !intra_phase2) begin
            // intra-bank PSM, second half: staging row -> destination
            intra_phase2 <= 1'b1;
            p_src <= p_dst;
            p_dst <= cur_dst;
            go(T_RP, S_P_ACT1);
          end else begin
            go(T_RP, S_NEXT);
          end
        end

        // ---------------- channel write: one column (WRITE) or a whole row (INIT fill)
        S_W_ACT: begin issue_act(cur_dst); go(T_RCD, S_W_WR); end
        S_W_WR: begin
          issue_wr(cur_dst.bank, c, value);
          c <= c + 1'b1;
          if (single_col || c == COL_W'(COLS - 1)) go(T_WR, S_W_PRE);
          else                                     go(T_CCD, S_W_WR);
        end
        S_W_PRE: begin issue_pre(cur_dst.bank); go(T_RP, S_NEXT); end

        // ---------------- channel read of one column
        S_R_ACT: begin issue_act(cur_src); go(T_RCD, S_R_RD); end
        S_R_RD: begin
          ch_cmd  <= CMD_RD;
          ch_bank <= cur_src.bank;
          ch_col  <= c;
          go((T_CL > T_RTP) ? T_CL : T_RTP, S_R_PRE);
        end
        S_R_PRE: begin issue_pre(cur_src.bank); go(T_RP, S_NEXT); end

        default: state <= S_IDLE;
      endcase
    end
  end

  // Helpers used inside the state machine's always_ff.
  task automatic go(input int unsigned n, input state_e nxt);
    if (n <= 1) begin
      state <= nxt;
    end else begin
      wait_cnt  <= 16'(n - 1);
      ret_state <= nxt;
      state     <= S_WAIT;
    end
  endtask

  task automatic issue_act(input row_addr_t r);
    ch_cmd  <= CMD_ACT;
    ch_bank <= r.bank;
    ch_row  <= {r.sa, r.lrow};
  endtask

  task automatic issue_pre(input logic [BANK_W-1:0] b);
    ch_cmd  <= CMD_PRE;
    ch_bank <= b;
  endtask

  task automatic issue_wr(input logic [BANK_W-1:0] b, input logic [COL_W-1:0] col,
                          input logic [LINE_BITS-1:0] d);
    ch_cmd     <= CMD_WR;
    ch_bank    <= b;
    ch_col     <= col;
    ch_wr_data <= d;
  endtask

  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
      (req_valid && !req_ready) |=> req_valid)
    else $error("rc_controller: req_valid dropped before it was accepted");

endmodule
