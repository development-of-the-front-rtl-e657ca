// tb_chan_peak_tracker: checks the per-channel peak memory at full size.
// Three events of random samples are written column by column, alternating
// between the two slots; the reference maxima are kept by the testbench.
// After each event every (chip, channel) peak of that slot is read and
// compared, and the slot written two events earlier is overwritten, which
// checks that column 0 restarts the maximum: the third event's samples are
// all smaller than the first's, so a stale maximum would show.
module tb_chan_peak_tracker;
  localparam int NCHIP = 4, NCH = 64, NCOL = 512, NSLOT = 2;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, wr_slot = 0, rd_slot = 0;
  logic [5:0] wr_ch = 0, rd_ch = 0;
  logic [8:0] wr_col = 0;
  logic [1:0] rd_chip = 0;
  logic [11:0] wr_data [NCHIP];
  logic [11:0] rd_peak;
  logic [11:0] ref_pk [NCHIP][NCH];
  int checks = 0, failures = 0;

  chan_peak_tracker #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .NSLOT(NSLOT)) dut (.*);

  always #20 clk = ~clk;

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
    for (int c = 0; c < NCHIP; c++) wr_data[c] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int e = 0; e < 3; e++) begin
      for (int c = 0; c < NCHIP; c++) for (int h = 0; h < NCH; h++) ref_pk[c][h] = '0;
      for (int col = 0; col < NCOL; col++)
        for (int ch = 0; ch < NCH; ch++) begin
          @(posedge clk); #1;
          wr_en = 1; wr_slot = 1'(e % 2); wr_col = 9'(col); wr_ch = 6'(ch);
          for (int c = 0; c < NCHIP; c++) begin
            // small values, with one large sample per channel at a random cell
            wr_data[c] = 12'($urandom_range(0, 300 - e * 100));
            if (col == (ch * 5 + c * 17 + e * 31) % NCOL) wr_data[c] = 12'(1000 + ch * 40 + c - e * 300);
            if (wr_data[c] > ref_pk[c][ch]) ref_pk[c][ch] = wr_data[c];
          end
        end
      @(posedge clk); #1;
      wr_en = 0;
      for (int c = 0; c < NCHIP; c++)
        for (int h = 0; h < NCH; h++) begin
          rd_slot = 1'(e % 2); rd_chip = 2'(c); rd_ch = 6'(h);
          #1;
          check(rd_peak == ref_pk[c][h], "channel peak");
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
