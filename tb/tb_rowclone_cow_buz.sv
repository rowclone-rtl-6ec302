// tb_rowclone_cow_buz: the two primitives RowClone accelerates, as a fork /
// free sequence on the full default-size system.
//   1. A parent process owns 6 pages (rows) with random contents.
//   2. Copy-on-write after fork: each page is copied to a child page. Four
//      destinations are allocated in the parent page's own subarray (FPM),
//      two had to go to another bank (inter-bank PSM).
//   3. The child writes one line of every copied page (the write that
//      triggered the copy); the parent pages must stay unchanged.
//   4. Secure deallocation: the parent's pages are zeroed (bulk zeroing, FPM
//      from the zero row of each subarray).
// Every page is read back and checked against a model. The testbench also
// counts the lines that crossed the memory channel during the bulk
// operations (must be 0) and prints the count a copy through the processor
// would have needed (64 lines read + 64 written per 4 KB copy, 64 written
// per 4 KB zeroing).
module tb_rowclone_cow_buz;
  import rc_pkg::*;

  localparam int unsigned COLS = DEF_COLS, LINE_BITS = DEF_LINE_BITS;
  localparam int unsigned BANK_W = $clog2(DEF_BANKS), SA_W = $clog2(DEF_SUBARRAYS);
  localparam int unsigned LROW_W = $clog2(DEF_ROWS_PER_SA), COL_W = $clog2(COLS);
  localparam int unsigned ADDR_W = BANK_W + SA_W + LROW_W;
  localparam int NPAGES = 6;

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
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic do_req(req_op_e op, logic [ADDR_W-1:0] src, logic [ADDR_W-1:0] dst,
                        int n, int col, logic [LINE_BITS-1:0] data);
    @(negedge clk);
    req_valid = 1'b1; req_op = op; req_src = src; req_dst = dst;
    req_n_rows = (ADDR_W+1)'(n); req_col = COL_W'(col); req_data = data;
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 1'b0;
    do @(posedge clk); while (!resp_valid);
  endtask

  task automatic write_line(logic [ADDR_W-1:0] a, int c, logic [LINE_BITS-1:0] d);
    do_req(OP_WRITE, a, '0, 1, c, d);
    model[{a, COL_W'(c)}] = d;
  endtask

  task automatic check_row(logic [ADDR_W-1:0] a, string what);
    int bad = 0;
    for (int c = 0; c < COLS; c++) begin
      do_req(OP_READ, a, '0, 1, c, '0);
      @(negedge clk);
      if (resp_data !== expect_line(a, c)) bad++;
    end
    check(bad == 0, $sformatf("%s: row %0h has %0d wrong lines", what, a, bad));
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    logic [ADDR_W-1:0] parent [NPAGES], child [NPAGES];
    logic [31:0] r0, w0;
    int copies = 0, zeroed = 0;
    req_valid = 1'b0; req_op = OP_COPY; req_src = '0; req_dst = '0;
    req_n_rows = '0; req_col = '0; req_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (init_done);

    for (int p = 0; p < NPAGES; p++) begin
      parent[p] = ra(1, p / 3, 1 + p % 3);
      child[p]  = (p < 4) ? ra(1, p / 3, 8 + p % 3) : ra(4, 2, 2 + p);
      for (int c = 0; c < COLS; c++) write_line(parent[p], c, rand_line());
    end

    // copy-on-write
    r0 = ch_lines_read; w0 = ch_lines_written;
    for (int p = 0; p < NPAGES; p++) begin
      do_req(OP_COPY, parent[p], child[p], 1, 0, '0);
      for (int c = 0; c < COLS; c++) model[{child[p], COL_W'(c)}] = expect_line(parent[p], c);
      copies++;
    end
    check(ch_lines_read == r0 && ch_lines_written == w0, "CoW copies used the channel");
    check(rows_fpm == 4 && rows_psm_inter == 2, $sformatf("CoW mechanisms fpm=%0d psm=%0d", rows_fpm, rows_psm_inter));

    // the child's writes
    for (int p = 0; p < NPAGES; p++) write_line(child[p], p * 7 % COLS, rand_line());
    for (int p = 0; p < NPAGES; p++) begin
      check_row(parent[p], "parent after CoW");
      check_row(child[p], "child after CoW");
    end

    // secure deallocation of the parent's pages
    r0 = ch_lines_read; w0 = ch_lines_written;
    for (int p = 0; p < NPAGES; p++) begin
      do_req(OP_INIT, '0, parent[p], 1, 0, '0);
      for (int c = 0; c < COLS; c++) model[{parent[p], COL_W'(c)}] = '0;
      zeroed++;
    end
    check(ch_lines_read == r0 && ch_lines_written == w0, "zeroing used the channel");
    check(rows_zero_fpm == NPAGES, "every page zeroed by FPM");
    for (int p = 0; p < NPAGES; p++) begin
      check_row(parent[p], "parent after zeroing");
      check_row(child[p], "child after parent freed");
    end

    $display("bulk ops: %0d page copies, %0d page zeroings; channel lines used 0, through the processor %0d",
             copies, zeroed, copies * 2 * COLS + zeroed * COLS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
