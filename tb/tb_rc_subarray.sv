// tb_rc_subarray: unit test of one subarray (4 rows of 4 x 32-bit columns).
// Writes random data into every row through the row buffer, reads it back,
// then performs Fast Parallel Mode copies (ACTIVATE src, ACTIVATE dst,
// PRECHARGE) and checks that the destination row became the source row,
// that other rows are untouched and that fpm_copy pulsed exactly once per copy.
module tb_rc_subarray;
  localparam int unsigned ROWS = 4, COLS = 4, LB = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic act, pre, wr, is_open, fpm_copy;
  logic [1:0] act_row, col;
  logic [LB-1:0] wr_data, rd_data;
  logic [LB-1:0] model [ROWS][COLS];
  int checks = 0, failures = 0, fpm_seen = 0;

  rc_subarray #(.ROWS(ROWS), .COLS(COLS), .LINE_BITS(LB)) dut (.*);

  always @(posedge clk) if (fpm_copy) fpm_seen++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(bit a, bit p, bit w, int r, int c, logic [LB-1:0] d);
    @(negedge clk);
    act = a; pre = p; wr = w; act_row = 2'(r); col = 2'(c); wr_data = d;
    @(negedge clk);
    act = 0; pre = 0; wr = 0;
  endtask

  task automatic read_row(int r);
    cmd(1, 0, 0, r, 0, '0);
    check(is_open, "open after ACTIVATE");
    for (int c = 0; c < COLS; c++) begin
      col = 2'(c);
      #1;
      check(rd_data == model[r][c], $sformatf("row %0d col %0d read %h want %h", r, c, rd_data, model[r][c]));
    end
    cmd(0, 1, 0, 0, 0, '0);
    check(!is_open, "closed after PRECHARGE");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = 0; pre = 0; wr = 0; act_row = 0; col = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check(!is_open, "closed after reset");
    for (int r = 0; r < ROWS; r++) begin
      cmd(1, 0, 0, r, 0, '0);
      for (int c = 0; c < COLS; c++) begin
        model[r][c] = $urandom;
        cmd(0, 0, 1, 0, c, model[r][c]);
      end
      cmd(0, 1, 0, 0, 0, '0);
    end
    for (int r = 0; r < ROWS; r++) read_row(r);
    // FPM copies: 1 -> 3, then 0 -> 1
    cmd(1, 0, 0, 1, 0, '0);
    cmd(1, 0, 0, 3, 0, '0);
    cmd(0, 1, 0, 0, 0, '0);
    model[3] = model[1];
    cmd(1, 0, 0, 0, 0, '0);
    cmd(1, 0, 0, 1, 0, '0);
    cmd(0, 1, 0, 0, 0, '0);
    model[1] = model[0];
    check(fpm_seen == 2, $sformatf("fpm_copy pulses %0d, want 2", fpm_seen));
    for (int r = 0; r < ROWS; r++) read_row(r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
