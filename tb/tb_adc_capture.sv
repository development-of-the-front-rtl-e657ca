// tb_adc_capture: checks the four-lane ADC capture at full size (7-clock
// ADC latency). Random slot tags (valid, column, channel, last) are applied
// each clock while each ADC bus returns a random word LAT clocks late, the
// way a pipelined converter does. Each clock the write port must show the
// tag and the four ADC words of slot n-LAT-1, and done must follow a tagged
// last slot after LAT+2 clocks.
module tb_adc_capture;
  localparam int NCHIP = 4, NCH = 64, NCOL = 512, LAT = 7, N = 3000;
  logic clk = 0, rst_n = 0;
  logic slot_valid = 0, slot_last = 0;
  logic [8:0] slot_col = 0;
  logic [5:0] slot_ch = 0;
  logic [11:0] adc_data [NCHIP];
  logic wr_en, done;
  logic [8:0] wr_col;
  logic [5:0] wr_ch;
  logic [11:0] wr_data [NCHIP];
  int checks = 0, failures = 0;

  logic        tv [N];
  logic        tl [N];
  logic [8:0]  tc [N];
  logic [5:0]  th [N];
  logic [11:0] tvv [N][NCHIP];

  adc_capture #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .ADC_LAT(LAT)) dut (.*);

  always #20 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (N + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < N; n++) begin
      tv[n] = 1'($urandom_range(0, 3) != 0);
      tl[n] = tv[n] && ($urandom_range(0, 40) == 0);
      tc[n] = 9'($urandom);
      th[n] = 6'($urandom);
      for (int c = 0; c < NCHIP; c++) tvv[n][c] = 12'($urandom);
    end
    for (int c = 0; c < NCHIP; c++) adc_data[c] = '0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < N; n++) begin
      @(posedge clk); #1;
      slot_valid = tv[n]; slot_last = tl[n]; slot_col = tc[n]; slot_ch = th[n];
      for (int c = 0; c < NCHIP; c++) adc_data[c] = (n >= LAT) ? tvv[n-LAT][c] : 12'hABC;
      if (n >= LAT + 1) begin
        int m;
        m = n - LAT - 1;
        check(wr_en == tv[m], "wr_en");
        if (tv[m]) begin
          check(wr_col == tc[m] && wr_ch == th[m], "wr address");
          for (int c = 0; c < NCHIP; c++) check(wr_data[c] == tvv[m][c], "wr data");
        end
      end
      if (n >= LAT + 2) check(done == (tv[n-LAT-2] && tl[n-LAT-2]), "done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
