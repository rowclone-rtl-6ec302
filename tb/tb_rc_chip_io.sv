// tb_rc_chip_io: checks that the chip I/O presents each channel command with
// its fields one cycle later, returns the bus data of a READ on the channel
// one cycle after the decoder saw the READ, and counts channel lines.
module tb_rc_chip_io;
  import rc_pkg::*;
  localparam int unsigned LB = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  dram_cmd_e ch_cmd, cmd;
  logic [2:0] ch_bank, bank, ch_dst_bank, dst_bank;
  logic [5:0] ch_row, row, ch_col, col, ch_dst_col, dst_col;
  logic [LB-1:0] ch_wr_data, wr_data, ch_rd_data, bus_data;
  logic ch_rd_valid;
  logic [31:0] lines_read, lines_written;
  int checks = 0, failures = 0, nrd = 0, nwr = 0;

  rc_chip_io #(.BANK_W(3), .ROW_W(6), .COL_W(6), .LINE_BITS(LB), .CNT_W(32)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dram_cmd_e pc;
    logic [2:0] pb, pdb; logic [5:0] pr, pcl, pdc; logic [LB-1:0] pw;
    logic was_rd;
    logic [LB-1:0] bus_at_rd;
    ch_cmd = CMD_NOP; ch_bank = 0; ch_row = 0; ch_col = 0; ch_dst_bank = 0; ch_dst_col = 0;
    ch_wr_data = 0; bus_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cmd == CMD_NOP && !ch_rd_valid && lines_read == 0, "reset state");
    was_rd = 0;
    for (int i = 0; i < 100; i++) begin
      pc = dram_cmd_e'($urandom_range(0, 5));
      pb = 3'($urandom); pdb = 3'($urandom); pr = 6'($urandom); pcl = 6'($urandom);
      pdc = 6'($urandom); pw = $urandom;
      ch_cmd = pc; ch_bank = pb; ch_dst_bank = pdb; ch_row = pr; ch_col = pcl;
      ch_dst_col = pdc; ch_wr_data = pw;
      @(negedge clk);
      check(cmd == pc && bank == pb && dst_bank == pdb && row == pr && col == pcl &&
            dst_col == pdc && wr_data == pw, $sformatf("command %0d fields", i));
      // bus data the chip would drive during this decode cycle
      bus_data = $urandom;
      bus_at_rd = bus_data;
      was_rd = (pc == CMD_RD);
      if (pc == CMD_RD) nrd++;
      if (pc == CMD_WR) nwr++;
      ch_cmd = CMD_NOP;
      @(negedge clk);
      check(ch_rd_valid == was_rd, $sformatf("rd_valid after command %0d", i));
      if (was_rd) check(ch_rd_data == bus_at_rd, "read data returned");
    end
    check(lines_read == nrd && lines_written == nwr,
          $sformatf("counters %0d/%0d want %0d/%0d", lines_read, lines_written, nrd, nwr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
