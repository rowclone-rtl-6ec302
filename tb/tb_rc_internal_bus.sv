// tb_rc_internal_bus: drives random bank column data and channel data and
// checks that the bus carries the selected bank's line, or the channel's
// line when the channel is the source.
module tb_rc_internal_bus;
  localparam int unsigned BANKS = 8, LB = 64;
  logic [LB-1:0] bank_rd_data [BANKS];
  logic [LB-1:0] chan_wr_data, bus_data, want;
  logic src_is_chan;
  logic [2:0] src_bank;
  int checks = 0, failures = 0;

  rc_internal_bus #(.BANKS(BANKS), .LINE_BITS(LB)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      for (int b = 0; b < BANKS; b++) bank_rd_data[b] = {$urandom, $urandom};
      chan_wr_data = {$urandom, $urandom};
      src_is_chan = 1'($urandom);
      src_bank = 3'($urandom);
      #1;
      want = src_is_chan ? chan_wr_data : bank_rd_data[src_bank];
      checks++;
      if (bus_data !== want) begin
        failures++;
        $display("FAIL: chan=%0b bank=%0d bus=%h want %h", src_is_chan, src_bank, bus_data, want);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
