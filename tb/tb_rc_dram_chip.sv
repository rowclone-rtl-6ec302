// tb_rc_dram_chip: drives DRAM commands straight into a small chip
// (4 banks x 2 subarrays x 4 rows x 4 x 32-bit columns) and checks the data
// against a model: WRITE/READ over the channel, FPM by back-to-back
// ACTIVATE, PSM by TRANSFER between two open banks, and the chip counters
// (TRANSFER and FPM move no line over the channel).
module tb_rc_dram_chip;
  import rc_pkg::*;
  localparam int unsigned BANKS = 4, SA = 2, RPS = 4, COLS = 4, LB = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  dram_cmd_e ch_cmd;
  logic [1:0] ch_bank, ch_dst_bank, ch_col, ch_dst_col;
  logic [2:0] ch_row;
  logic [LB-1:0] ch_wr_data, ch_rd_data;
  logic ch_rd_valid;
  logic [31:0] ch_lines_read, ch_lines_written, fpm_copies, transfers;
  logic [LB-1:0] model [BANKS][SA*RPS][COLS];
  int checks = 0, failures = 0;

  rc_dram_chip #(.BANKS(BANKS), .SUBARRAYS(SA), .ROWS_PER_SA(RPS), .COLS(COLS), .LINE_BITS(LB)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(dram_cmd_e c, int b, int r, int cl, int db, int dc, logic [LB-1:0] d);
    @(negedge clk);
    ch_cmd = c; ch_bank = 2'(b); ch_row = 3'(r); ch_col = 2'(cl);
    ch_dst_bank = 2'(db); ch_dst_col = 2'(dc); ch_wr_data = d;
    @(negedge clk);
    ch_cmd = CMD_NOP;
  endtask

  task automatic read_check(int b, int r);
    issue(CMD_ACT, b, r, 0, 0, 0, '0);
    for (int c = 0; c < COLS; c++) begin
      issue(CMD_RD, b, 0, c, 0, 0, '0);
      @(posedge clk); #1;
      check(ch_rd_valid && ch_rd_data == model[b][r][c],
            $sformatf("bank %0d row %0d col %0d read %h want %h", b, r, c, ch_rd_data, model[b][r][c]));
    end
    issue(CMD_PRE, b, 0, 0, 0, 0, '0);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r0, w0;
    ch_cmd = CMD_NOP; ch_bank = 0; ch_row = 0; ch_col = 0; ch_dst_bank = 0; ch_dst_col = 0;
    ch_wr_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < BANKS; b++)
      for (int r = 0; r < SA * RPS; r++) begin
        issue(CMD_ACT, b, r, 0, 0, 0, '0);
        for (int c = 0; c < COLS; c++) begin
          model[b][r][c] = $urandom;
          issue(CMD_WR, b, 0, c, 0, 0, model[b][r][c]);
        end
        issue(CMD_PRE, b, 0, 0, 0, 0, '0);
      end
    for (int b = 0; b < BANKS; b++)
      for (int r = 0; r < SA * RPS; r++) read_check(b, r);
    r0 = ch_lines_read; w0 = ch_lines_written;

    // FPM: bank 1, subarray 1, row 5 -> row 6
    issue(CMD_ACT, 1, 5, 0, 0, 0, '0);
    issue(CMD_ACT, 1, 6, 0, 0, 0, '0);
    issue(CMD_PRE, 1, 0, 0, 0, 0, '0);
    model[1][6] = model[1][5];
    // PSM: bank 2 row 1 -> bank 0 row 7, columns crossed (c -> 3-c)
    issue(CMD_ACT, 2, 1, 0, 0, 0, '0);
    issue(CMD_ACT, 0, 7, 0, 0, 0, '0);
    for (int c = 0; c < COLS; c++) begin
      issue(CMD_TRANSFER, 2, 0, c, 0, COLS - 1 - c, '0);
      model[0][7][COLS - 1 - c] = model[2][1][c];
    end
    issue(CMD_PRE, 2, 0, 0, 0, 0, '0);
    issue(CMD_PRE, 0, 0, 0, 0, 0, '0);
    check(ch_lines_read == r0 && ch_lines_written == w0, "FPM/TRANSFER used no channel line");
    check(fpm_copies == 1, $sformatf("fpm_copies %0d", fpm_copies));
    check(transfers == COLS, $sformatf("transfers %0d", transfers));
    for (int b = 0; b < BANKS; b++)
      for (int r = 0; r < SA * RPS; r++) read_check(b, r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
