// tb_rc_bank: unit test of one bank (3 subarrays x 4 rows x 4 x 32-bit
// columns). Writes every row, reads all back, checks that an FPM copy
// (two ACTIVATEs to the same subarray) changes only the destination row and
// that the bank I/O returns the open subarray's data.
module tb_rc_bank;
  localparam int unsigned SA = 3, RPS = 4, COLS = 4, LB = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic act, pre, wr, is_open, fpm_copy;
  logic [3:0] act_row;   // {sa[1:0], row[1:0]}
  logic [1:0] col;
  logic [LB-1:0] wr_data, rd_data;
  logic [LB-1:0] model [SA*4][COLS];
  int checks = 0, failures = 0, fpm_seen = 0;

  rc_bank #(.SUBARRAYS(SA), .ROWS_PER_SA(RPS), .COLS(COLS), .LINE_BITS(LB)) dut (.*);

  always @(posedge clk) if (fpm_copy) fpm_seen++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cmd(bit a, bit p, bit w, int r, int c, logic [LB-1:0] d);
    @(negedge clk);
    act = a; pre = p; wr = w; act_row = 4'(r); col = 2'(c); wr_data = d;
    @(negedge clk);
    act = 0; pre = 0; wr = 0;
  endtask

  function automatic int ra(int s, int r); return s * 4 + r; endfunction

  task automatic check_all();
    for (int s = 0; s < SA; s++)
      for (int r = 0; r < RPS; r++) begin
        cmd(1, 0, 0, ra(s, r), 0, '0);
        for (int c = 0; c < COLS; c++) begin
          col = 2'(c);
          #1;
          check(rd_data == model[ra(s, r)][c],
                $sformatf("sa %0d row %0d col %0d: %h want %h", s, r, c, rd_data, model[ra(s, r)][c]));
        end
        cmd(0, 1, 0, 0, 0, '0);
      end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act = 0; pre = 0; wr = 0; act_row = 0; col = 0; wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < SA; s++)
      for (int r = 0; r < RPS; r++) begin
        cmd(1, 0, 0, ra(s, r), 0, '0);
        check(is_open, "bank open after ACTIVATE");
        for (int c = 0; c < COLS; c++) begin
          model[ra(s, r)][c] = $urandom;
          cmd(0, 0, 1, 0, c, model[ra(s, r)][c]);
        end
        cmd(0, 1, 0, 0, 0, '0);
        check(!is_open, "bank closed after PRECHARGE");
      end
    check_all();
    // FPM in subarray 2: row 1 -> row 2; and in subarray 0: row 3 -> row 0
    cmd(1, 0, 0, ra(2, 1), 0, '0);
    cmd(1, 0, 0, ra(2, 2), 0, '0);
    cmd(0, 1, 0, 0, 0, '0);
    model[ra(2, 2)] = model[ra(2, 1)];
    cmd(1, 0, 0, ra(0, 3), 0, '0);
    cmd(1, 0, 0, ra(0, 0), 0, '0);
    cmd(0, 1, 0, 0, 0, '0);
    model[ra(0, 0)] = model[ra(0, 3)];
    check(fpm_seen == 2, $sformatf("fpm pulses %0d, want 2", fpm_seen));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
