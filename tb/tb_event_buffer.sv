// tb_event_buffer: checks the two-event reorder RAM at full size
// (4 banks x 2 slots x 64 channels x 512 cells x 16 bit).
// Two different events are written in AGET order, column by column, into
// slots 0 and 1; both are then read back channel by channel for every chip,
// with one clock of read latency, and each word must be {0x0, sample}. The
// two slots must not disturb each other.
module tb_event_buffer;
  import tb_pattern_pkg::*;
  localparam int NCHIP = 4, NCH = 64, NCOL = 512, NSLOT = 2;
  logic clk = 0;
  logic wr_en = 0, rd_en = 0;
  logic wr_slot = 0, rd_slot = 0;
  logic [5:0] wr_ch = 0, rd_ch = 0;
  logic [8:0] wr_col = 0, rd_col = 0;
  logic [1:0] rd_chip = 0;
  logic [11:0] wr_data [NCHIP];
  logic [15:0] rd_data;
  int checks = 0, failures = 0;

  event_buffer #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .NSLOT(NSLOT)) dut (.*);

  always #20 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCHIP; c++) wr_data[c] = '0;
    @(posedge clk);
    for (int s = 0; s < NSLOT; s++)
      for (int col = 0; col < NCOL; col++)
        for (int ch = 0; ch < NCH; ch++) begin
          #1;
          wr_en = 1; wr_slot = 1'(s); wr_col = 9'(col); wr_ch = 6'(ch);
          for (int c = 0; c < NCHIP; c++) wr_data[c] = sample_val(s + 7, c, ch, col);
          @(posedge clk);
        end
    #1 wr_en = 0;
    for (int s = NSLOT - 1; s >= 0; s--)
      for (int c = 0; c < NCHIP; c++)
        for (int ch = 0; ch < NCH; ch++)
          for (int col = 0; col < NCOL; col++) begin
            rd_en = 1; rd_slot = 1'(s); rd_chip = 2'(c); rd_ch = 6'(ch); rd_col = 9'(col);
            @(posedge clk); #1;
            check(rd_data == {4'h0, sample_val(s + 7, c, ch, col)}, "read-back word");
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
