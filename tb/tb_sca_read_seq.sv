// tb_sca_read_seq: checks the SCA read-phase sequencer at full size
// (64 channels, 512 columns, 4 reset clocks per column).
// For two read phases it checks, clock by clock, that sca_read and the
// read-clock enable are high for exactly 512 x 68 clocks, that the reset
// slots carry no tag, that tags run column by column with channels 0..63
// inside each column, that slot_last marks only the final slot and that
// done follows it by one clock. A start while busy must be ignored.
module tb_sca_read_seq;
  localparam int NCH = 64, NCOL = 512, RT = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic sca_read, sca_rclk_en, slot_valid, slot_last, done;
  logic [8:0] slot_col;
  logic [5:0] slot_ch;
  int checks = 0, failures = 0;

  sca_read_seq #(.NCH(NCH), .NCOL(NCOL), .RESET_TCK(RT)) dut (.*);

  always #20 clk = ~clk;   // 25 MHz

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nread, nslot, ex_col, ex_ch, k;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    check(!sca_read && !slot_valid, "idle after reset");
    for (int run = 0; run < 2; run++) begin
      start <= 1;
      @(posedge clk);
      start <= 0;
      nread = 0; nslot = 0;
      // walk the expected schedule slot by slot
      for (int c = 0; c < NCOL; c++) begin
        for (int p = 0; p < RT + NCH; p++) begin
          #1;
          check(sca_read && sca_rclk_en, "sca_read high during phase");
          if (p < RT) check(!slot_valid, "reset slot untagged");
          else begin
            check(slot_valid && slot_col == 9'(c) && slot_ch == 6'(p - RT), "slot tag order");
            check(slot_last == (c == NCOL - 1 && p == RT + NCH - 1), "slot_last position");
          end
          if (c == 3 && p == 10) start <= 1;   // start while busy: ignored
          if (c == 3 && p == 11) start <= 0;
          @(posedge clk);
        end
      end
      #1;
      check(!sca_read && done, "sca_read low and done after last slot");
      @(posedge clk); #1;
      check(!done && !slot_valid, "done is one clock");
      k = 0;
      repeat (5) begin @(posedge clk); #1; if (sca_read) k++; end
      check(k == 0, "no restart from ignored start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
