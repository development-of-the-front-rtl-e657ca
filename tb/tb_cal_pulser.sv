// tb_cal_pulser: checks the calibration pulser control with HOLD = 1024.
// For several delays (0, short, longer than the step) it measures how long
// cal_step stays high and on which clock the trigger comes, counted from
// the edge that takes fire. A fire during a pulse must be ignored.
module tb_cal_pulser;
  localparam int HOLD = 1024;
  logic clk = 0, rst_n = 0, fire = 0;
  logic [11:0] delay = 0;
  logic cal_step, trig, busy;
  int checks = 0, failures = 0;

  cal_pulser #(.HOLD(HOLD)) dut (.*);

  always #20 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int dl [4] = '{0, 37, 1500, 4095};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check(!cal_step && !trig && !busy, "idle");
    foreach (dl[i]) begin
      int t, step_hi, trig_at, ntrig;
      fire = 1; delay = 12'(dl[i]);
      @(posedge clk); #1;
      fire = 0;
      step_hi = 0; trig_at = -1; ntrig = 0;
      for (t = 1; t < HOLD + 4200; t++) begin
        if (cal_step) step_hi++;
        if (trig) begin ntrig++; trig_at = t; end
        if (t == 50) begin fire = 1; delay = 0; end   // ignored: pulse in progress
        if (t == 51) fire = 0;
        @(posedge clk); #1;
      end
      check(step_hi == HOLD, $sformatf("step length %0d", step_hi));
      check(ntrig == 1 && trig_at == dl[i] + 2, $sformatf("trigger at %0d for delay %0d", trig_at, dl[i]));
      check(!busy, "idle after pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
