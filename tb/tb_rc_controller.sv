// tb_rc_controller: checks the DRAM command stream of the RowClone
// controller on its own (4 banks x 2 subarrays x 4 rows x 4 columns, default
// timing). A monitor records every command on the channel with the number
// of cycles since the previous command; for each request the testbench
// builds the expected stream from the RowClone schedules and compares
// command, addresses and spacing:
//   zero-row init  per subarray: ACT zero row, tRCD, COLS x WR 0 every tCCD, tWR, PRE, tRP
//   FPM            ACT src, tRAS, ACT dst, tRAS, PRE
//   PSM inter      ACT src, tRRD, ACT dst, tRCD, COLS x TRANSFER every tCCD, tWR, PRE src, 1, PRE dst
//   PSM intra      the same twice, via the staging row of the next bank
//   zeroing        FPM from row 0 of the destination's subarray
//   value init     ACT, COLS x WR value, PRE, then FPM copies of that row
//   READ / WRITE   ACT, tRCD, RD/WR, ..., PRE, and the returned read data
module tb_rc_controller;
  import rc_pkg::*;
  localparam int unsigned BANKS = 4, SA = 2, RPS = 4, COLS = 4, LB = 32;
  localparam int unsigned ADDR_W = 2 + 1 + 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, resp_valid, init_done, ch_rd_valid;
  req_op_e req_op;
  logic [ADDR_W-1:0] req_src, req_dst;
  logic [ADDR_W:0] req_n_rows;
  logic [1:0] req_col;
  logic [LB-1:0] req_data, resp_data, ch_wr_data, ch_rd_data;
  dram_cmd_e ch_cmd;
  logic [1:0] ch_bank, ch_dst_bank, ch_col, ch_dst_col;
  logic [2:0] ch_row;
  logic [31:0] rows_fpm, rows_zero_fpm, rows_psm_inter, rows_psm_intra, rows_filled;

  rc_controller #(.BANKS(BANKS), .SUBARRAYS(SA), .ROWS_PER_SA(RPS), .COLS(COLS), .LINE_BITS(LB)) dut (.*);

  typedef struct {
    dram_cmd_e c; int b; int r; int col; int db; int dc; logic [LB-1:0] d; int gap;
  } ev_t;
  ev_t got[$], want[$];
  int checks = 0, failures = 0;
  int since = 0;

  // monitor + read-data responder (data = f(bank, col), two cycles after RD)
  logic [LB-1:0] rd_pipe [2];
  logic rd_v [2];
  always @(posedge clk) begin
    since++;
    if (rst_n && ch_cmd != CMD_NOP) begin
      ev_t e;
      e.c = ch_cmd; e.b = ch_bank; e.r = ch_row; e.col = ch_col; e.db = ch_dst_bank;
      e.dc = ch_dst_col; e.d = ch_wr_data; e.gap = since;
      got.push_back(e);
      since = 0;
    end
    rd_v[1] <= rd_v[0];
    rd_pipe[1] <= rd_pipe[0];
    rd_v[0] <= (ch_cmd == CMD_RD);
    rd_pipe[0] <= 32'hC0DE0000 | (32'(ch_bank) << 8) | 32'(ch_col);
  end
  assign ch_rd_valid = rd_v[1];
  assign ch_rd_data  = rd_pipe[1];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // gap < 0: not checked (first command of a request)
  task automatic ex(dram_cmd_e c, int b, int r, int col, int db, int dc, logic [LB-1:0] d, int gap);
    ev_t e;
    e.c = c; e.b = b; e.r = r; e.col = col; e.db = db; e.dc = dc; e.d = d; e.gap = gap;
    want.push_back(e);
  endtask

  task automatic ex_fpm(int b, int sr, int dr, int first_gap);
    ex(CMD_ACT, b, sr, 0, 0, 0, 0, first_gap);
    ex(CMD_ACT, b, dr, 0, 0, 0, 0, DEF_T_RAS);
    ex(CMD_PRE, b, 0, 0, 0, 0, 0, DEF_T_RAS);
  endtask

  task automatic ex_psm(int sb, int sr, int db, int dr, int first_gap);
    ex(CMD_ACT, sb, sr, 0, 0, 0, 0, first_gap);
    ex(CMD_ACT, db, dr, 0, 0, 0, 0, DEF_T_RRD);
    for (int c = 0; c < COLS; c++)
      ex(CMD_TRANSFER, sb, 0, c, db, c, 0, c == 0 ? DEF_T_RCD : DEF_T_CCD);
    ex(CMD_PRE, sb, 0, 0, 0, 0, 0, DEF_T_WR);
    ex(CMD_PRE, db, 0, 0, 0, 0, 0, 1);
  endtask

  task automatic compare(string what);
    check(got.size() == want.size(), $sformatf("%s: %0d commands, want %0d", what, got.size(), want.size()));
    for (int i = 0; i < got.size() && i < want.size(); i++) begin
      ev_t g, w;
      bit ok;
      g = got[i]; w = want[i];
      ok = g.c == w.c && g.b == w.b && (w.gap < 0 || g.gap == w.gap);
      if (w.c == CMD_ACT) ok &= g.r == w.r;
      if (w.c inside {CMD_RD, CMD_WR, CMD_TRANSFER}) ok &= g.col == w.col;
      if (w.c == CMD_TRANSFER) ok &= g.db == w.db && g.dc == w.dc;
      if (w.c == CMD_WR) ok &= g.d == w.d;
      check(ok, $sformatf("%s #%0d: got %s b%0d r%0d c%0d->b%0d c%0d gap %0d; want %s b%0d r%0d c%0d->b%0d c%0d gap %0d",
            what, i, g.c.name(), g.b, g.r, g.col, g.db, g.dc, g.gap,
            w.c.name(), w.b, w.r, w.col, w.db, w.dc, w.gap));
    end
    got.delete();
    want.delete();
  endtask

  task automatic req(req_op_e op, int src, int dst, int n, int col, logic [LB-1:0] d);
    @(negedge clk);
    req_valid = 1; req_op = op; req_src = ADDR_W'(src); req_dst = ADDR_W'(dst);
    req_n_rows = (ADDR_W+1)'(n); req_col = 2'(col); req_data = d;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(posedge clk);
    @(negedge clk);
  endtask

  // address helpers: {bank, sa, row}
  function automatic int ra(int b, int s, int r); return b * 8 + s * 4 + r; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_op = OP_COPY; req_src = 0; req_dst = 0; req_n_rows = 0; req_col = 0;
    req_data = 0; rd_v[0] = 0; rd_v[1] = 0; rd_pipe[0] = 0; rd_pipe[1] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(!req_ready, "not ready during zero-row init");
    wait (init_done);
    wait (req_ready);
    @(negedge clk);
    check(init_done && req_ready, "ready after zero-row init");
    for (int b = 0; b < BANKS; b++)
      for (int s = 0; s < SA; s++) begin
        ex(CMD_ACT, b, s * 4, 0, 0, 0, 0, (b == 0 && s == 0) ? -1 : DEF_T_RP);
        for (int c = 0; c < COLS; c++) ex(CMD_WR, b, 0, c, 0, 0, 0, c == 0 ? DEF_T_RCD : DEF_T_CCD);
        ex(CMD_PRE, b, 0, 0, 0, 0, 0, DEF_T_WR);
      end
    compare("zero-row init");

    req(OP_COPY, ra(1, 1, 1), ra(1, 1, 3), 1, 0, 0);
    ex_fpm(1, 5, 7, -1);
    compare("FPM");

    req(OP_COPY, ra(2, 0, 2), ra(0, 1, 1), 1, 0, 0);
    ex_psm(2, 2, 0, 5, -1);
    compare("PSM inter");

    req(OP_COPY, ra(3, 0, 1), ra(3, 1, 2), 1, 0, 0);
    ex_psm(3, 1, 0, 7, -1);          // to staging row: bank 0, last subarray, last row
    ex_psm(0, 7, 3, 6, DEF_T_RP);
    compare("PSM intra");

    req(OP_INIT, 0, ra(2, 1, 2), 2, 0, 0);
    ex_fpm(2, 4, 6, -1);
    ex_fpm(2, 4, 7, DEF_T_RP + 2);  // +2: per-row planning and bookkeeping cycles
    compare("zeroing");

    req(OP_INIT, 0, ra(1, 0, 1), 2, 0, 32'hA5A5_0F0F);
    ex(CMD_ACT, 1, 1, 0, 0, 0, 0, -1);
    for (int c = 0; c < COLS; c++) ex(CMD_WR, 1, 0, c, 0, 0, 32'hA5A5_0F0F, c == 0 ? DEF_T_RCD : DEF_T_CCD);
    ex(CMD_PRE, 1, 0, 0, 0, 0, 0, DEF_T_WR);
    ex_fpm(1, 1, 2, DEF_T_RP + 2);
    compare("value init");

    req(OP_WRITE, ra(2, 1, 3), 0, 1, 2, 32'h1234_5678);
    ex(CMD_ACT, 2, 7, 0, 0, 0, 0, -1);
    ex(CMD_WR, 2, 0, 2, 0, 0, 32'h1234_5678, DEF_T_RCD);
    ex(CMD_PRE, 2, 0, 0, 0, 0, 0, DEF_T_WR);
    compare("WRITE");

    req(OP_READ, ra(3, 0, 2), 0, 1, 3, 0);
    ex(CMD_ACT, 3, 2, 0, 0, 0, 0, -1);
    ex(CMD_RD, 3, 0, 3, 0, 0, 0, DEF_T_RCD);
    ex(CMD_PRE, 3, 0, 0, 0, 0, 0, (DEF_T_CL > DEF_T_RTP) ? DEF_T_CL : DEF_T_RTP);
    compare("READ");
    check(resp_data == 32'hC0DE0303, $sformatf("read data %h", resp_data));

    check(rows_fpm == 2 && rows_zero_fpm == 2 && rows_psm_inter == 1 && rows_psm_intra == 1 &&
          rows_filled == 1, "mechanism counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
