// tb_rowclone_system: end-to-end test of the RowClone controller and DRAM
// chip at the default sizes (8 banks x 4 subarrays x 16 rows of 4 KB).
//
// The testbench keeps its own model of memory contents (written lines and
// the expected effect of every bulk operation), fills source rows with
// random lines over the channel, runs each RowClone mechanism, reads every
// line of every affected row back over the channel and compares. It also
// checks:
//   - the latency of each bulk request against the command schedule
//     (FPM row 2*tRAS+tRP, inter-bank PSM row tRRD+tRCD+(COLS-1)*tCCD+tWR+1+tRP,
//     intra-bank PSM twice that, fill row tRCD+(COLS-1)*tCCD+tWR+tRP, plus
//     2 cycles per row and 1 per request), and prints it in ns at 1.875 ns/cycle
//     next to the RowClone latency table (FPM 90 ns, inter-bank PSM 540 ns,
//     intra-bank PSM 1050 ns for 4 KB);
//   - that bulk copies move no line over the memory channel;
//   - that every mechanism (zero-row init, FPM copy, FPM zeroing, inter- and
//     intra-bank PSM, fill-then-copy init, line read/write) happened.
module tb_rowclone_system;
  import rc_pkg::*;

  localparam int unsigned BANKS = DEF_BANKS, SUBARRAYS = DEF_SUBARRAYS;
  localparam int unsigned ROWS_PER_SA = DEF_ROWS_PER_SA, COLS = DEF_COLS;
  localparam int unsigned LINE_BITS = DEF_LINE_BITS;
  localparam int unsigned BANK_W = $clog2(BANKS), SA_W = $clog2(SUBARRAYS);
  localparam int unsigned LROW_W = $clog2(ROWS_PER_SA), COL_W = $clog2(COLS);
  localparam int unsigned ADDR_W = BANK_W + SA_W + LROW_W;
  localparam real TCK_NS = 1.875;

  localparam int FPM_ROW   = 2 * DEF_T_RAS + DEF_T_RP;
  localparam int PSM_ROW   = DEF_T_RRD + DEF_T_RCD + (COLS - 1) * DEF_T_CCD + DEF_T_WR + 1 + DEF_T_RP;
  localparam int INTRA_ROW = 2 * PSM_ROW;
  localparam int FILL_ROW  = DEF_T_RCD + (COLS - 1) * DEF_T_CCD + DEF_T_WR + DEF_T_RP;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic                 req_valid, req_ready, resp_valid, init_done;
  req_op_e              req_op;
  logic [ADDR_W-1:0]    req_src, req_dst;
  logic [ADDR_W:0]      req_n_rows;
  logic [COL_W-1:0]     req_col;
  logic [LINE_BITS-1:0] req_data, resp_data;
  logic [31:0] rows_fpm, rows_zero_fpm, rows_psm_inter, rows_psm_intra, rows_filled;
  logic [31:0] ch_lines_read, ch_lines_written, fpm_copies, transfers;

  rowclone_system dut (.*);

  int checks = 0, failures = 0;
  int n_reads = 0, n_writes = 0;
  logic [LINE_BITS-1:0] model [logic [ADDR_W+COL_W-1:0]];

  function automatic logic [ADDR_W-1:0] ra(int b, int s, int r);
    return {BANK_W'(b), SA_W'(s), LROW_W'(r)};
  endfunction

  function automatic logic [LINE_BITS-1:0] rand_line();
    logic [LINE_BITS-1:0] v;
    for (int i = 0; i < LINE_BITS / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic logic [LINE_BITS-1:0] expect_line(logic [ADDR_W-1:0] a, int c);
    logic [ADDR_W+COL_W-1:0] k = {a, COL_W'(c)};
    if (model.exists(k)) return model[k];
    return '0;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Issue one request and return its latency in cycles (accept edge to the
  // edge at which resp_valid is seen).
  task automatic do_req(req_op_e op, logic [ADDR_W-1:0] src, logic [ADDR_W-1:0] dst,
                        int n, int col, logic [LINE_BITS-1:0] data, output int lat);
    @(negedge clk);
    req_valid = 1'b1; req_op = op; req_src = src; req_dst = dst;
    req_n_rows = (ADDR_W+1)'(n); req_col = COL_W'(col); req_data = data;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 1'b0;
    lat = 0;
    do begin
      @(posedge clk);
      lat++;
    end while (!resp_valid);
  endtask

  task automatic write_line(logic [ADDR_W-1:0] a, int c, logic [LINE_BITS-1:0] d);
    int lat;
    do_req(OP_WRITE, a, '0, 1, c, d, lat);
    model[{a, COL_W'(c)}] = d;
    n_writes++;
  endtask

  task automatic read_line(logic [ADDR_W-1:0] a, int c, output logic [LINE_BITS-1:0] d);
    int lat;
    do_req(OP_READ, a, '0, 1, c, '0, lat);
    @(negedge clk);
    d = resp_data;
    n_reads++;
  endtask

  task automatic fill_row_random(logic [ADDR_W-1:0] a);
    for (int c = 0; c < COLS; c++) write_line(a, c, rand_line());
  endtask

  task automatic check_row(logic [ADDR_W-1:0] a, string what);
    logic [LINE_BITS-1:0] d;
    int bad = 0;
    for (int c = 0; c < COLS; c++) begin
      read_line(a, c, d);
      if (d !== expect_line(a, c)) bad++;
    end
    check(bad == 0, $sformatf("%s: row %0h has %0d wrong lines", what, a, bad));
  endtask

  task automatic model_copy(logic [ADDR_W-1:0] s, logic [ADDR_W-1:0] d);
    for (int c = 0; c < COLS; c++) model[{d, COL_W'(c)}] = expect_line(s, c);
  endtask

  task automatic model_set(logic [ADDR_W-1:0] d, logic [LINE_BITS-1:0] v);
    for (int c = 0; c < COLS; c++) model[{d, COL_W'(c)}] = v;
  endtask

  task automatic check_lat(int got, int want, string what, real paper_ns);
    check(got == want, $sformatf("%s latency %0d cycles, expected %0d", what, got, want));
    $display("%-28s %5d cycles = %7.1f ns (RowClone table: %0.0f ns)", what, got, got * TCK_NS, paper_ns);
  endtask

  // Copy requests must not use the channel.
  task automatic bulk(req_op_e op, logic [ADDR_W-1:0] s, logic [ADDR_W-1:0] d, int n,
                      logic [LINE_BITS-1:0] v, output int lat);
    logic [31:0] r0, w0;
    r0 = ch_lines_read; w0 = ch_lines_written;
    do_req(op, s, d, n, 0, v, lat);
    if (op == OP_COPY || v == '0)
      check(ch_lines_read == r0 && ch_lines_written == w0,
            $sformatf("bulk op %s moved lines over the channel", op.name()));
  endtask

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int lat, t0;
    logic [31:0] x0, f0;
    logic [LINE_BITS-1:0] v;
    req_valid = 1'b0; req_op = OP_COPY; req_src = '0; req_dst = '0;
    req_n_rows = '0; req_col = '0; req_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // zero rows are initialised before any request is taken
    t0 = 0;
    while (!init_done) begin
      @(posedge clk);
      t0++;
    end
    check(ch_lines_written == BANKS * SUBARRAYS * COLS, "zero-row init wrote every zero row");
    $display("zero-row init: %0d cycles, %0d lines", t0, ch_lines_written);

    // ---- FPM copy within one subarray
    fill_row_random(ra(0, 1, 2));
    f0 = fpm_copies;
    bulk(OP_COPY, ra(0, 1, 2), ra(0, 1, 5), 1, '0, lat);
    model_copy(ra(0, 1, 2), ra(0, 1, 5));
    check_lat(lat, 1 + FPM_ROW + 2, "FPM copy 4KB", 90.0);
    check(fpm_copies == f0 + 1, "FPM copy counted once by the chip");
    check_row(ra(0, 1, 5), "FPM copy");
    check_row(ra(0, 1, 2), "FPM source intact");

    // ---- inter-bank PSM copy
    x0 = transfers;
    bulk(OP_COPY, ra(0, 1, 2), ra(3, 0, 7), 1, '0, lat);
    model_copy(ra(0, 1, 2), ra(3, 0, 7));
    check_lat(lat, 1 + PSM_ROW + 2, "inter-bank PSM copy 4KB", 540.0);
    check(transfers == x0 + COLS, "inter-bank PSM used one TRANSFER per line");
    check_row(ra(3, 0, 7), "inter-bank PSM");

    // ---- intra-bank PSM copy (different subarray of the same bank)
    x0 = transfers;
    bulk(OP_COPY, ra(0, 1, 2), ra(0, 2, 4), 1, '0, lat);
    model_copy(ra(0, 1, 2), ra(0, 2, 4));
    check_lat(lat, 1 + INTRA_ROW + 2, "intra-bank PSM copy 4KB", 1050.0);
    check(transfers == x0 + 2 * COLS, "intra-bank PSM moved each line twice");
    check_row(ra(0, 2, 4), "intra-bank PSM");

    // ---- bulk zeroing (FPM from the zero row), 3 rows
    fill_row_random(ra(3, 0, 8));
    bulk(OP_INIT, '0, ra(3, 0, 7), 3, '0, lat);
    for (int r = 7; r < 10; r++) model_set(ra(3, 0, r), '0);
    check_lat(lat, 1 + 3 * (FPM_ROW + 2), "FPM zeroing 3 x 4KB", 3 * 90.0);
    for (int r = 7; r < 10; r++) check_row(ra(3, 0, r), "zeroing");

    // ---- initialization with a non-zero value: fill one row, copy it
    v = rand_line();
    bulk(OP_INIT, '0, ra(2, 1, 13), 3, v, lat);
    for (int r = 13; r < 16; r++) model_set(ra(2, 1, r), v);
    check_lat(lat, 1 + (FILL_ROW + 2) + 2 * (FPM_ROW + 2), "init: fill + 2 FPM", 0.0);
    for (int r = 13; r < 16; r++) check_row(ra(2, 1, r), "value init");

    // ---- multi-row copy mixing mechanisms: 3 rows of bank 5 to bank 5/6
    for (int r = 3; r < 6; r++) fill_row_random(ra(5, 2, r));
    bulk(OP_COPY, ra(5, 2, 3), ra(5, 2, 9), 3, '0, lat);
    for (int r = 0; r < 3; r++) model_copy(ra(5, 2, 3 + r), ra(5, 2, 9 + r));
    check_lat(lat, 1 + 3 * (FPM_ROW + 2), "FPM copy 3 x 4KB", 3 * 90.0);
    for (int r = 9; r < 12; r++) check_row(ra(5, 2, r), "multi-row FPM");
    bulk(OP_COPY, ra(5, 2, 9), ra(6, 3, 1), 3, '0, lat);
    for (int r = 0; r < 3; r++) model_copy(ra(5, 2, 9 + r), ra(6, 3, 1 + r));
    check_lat(lat, 1 + 3 * (PSM_ROW + 2), "inter-bank PSM 3 x 4KB", 3 * 540.0);
    for (int r = 1; r < 4; r++) check_row(ra(6, 3, r), "multi-row PSM");

    // ---- every mechanism happened
    check(rows_fpm > 0,       "FPM copy happened");
    check(rows_zero_fpm > 0,  "FPM zeroing happened");
    check(rows_psm_inter > 0, "inter-bank PSM happened");
    check(rows_psm_intra > 0, "intra-bank PSM happened");
    check(rows_filled > 0,    "fill-then-copy init happened");
    check(n_reads > 0 && n_writes > 0, "line read and write happened");
    $display("rows: fpm=%0d zero=%0d psm_inter=%0d psm_intra=%0d filled=%0d; chip fpm=%0d transfers=%0d",
             rows_fpm, rows_zero_fpm, rows_psm_inter, rows_psm_intra, rows_filled, fpm_copies, transfers);
    check(rows_fpm == 1 + 2 + 3 && rows_zero_fpm == 3 && rows_psm_inter == 4 && rows_psm_intra == 1,
          "per-mechanism row counts");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
