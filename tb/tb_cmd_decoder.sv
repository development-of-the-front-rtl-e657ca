// tb_cmd_decoder: checks every command of the DCM command word format.
// Triggers and calibration requests must give one-clock pulses one clock
// after the word; mode and threshold must be held until changed; words
// without cmd_valid and unknown opcodes must change nothing but the
// unknown-command counter.
module tb_cmd_decoder;
  logic clk = 0, rst_n = 0, cmd_valid = 0;
  logic [15:0] cmd_data = 0;
  logic trig, compress_en, cal_fire;
  logic [11:0] thresh, cal_delay;
  logic [7:0] n_bad;
  int checks = 0, failures = 0;

  cmd_decoder dut (.*);

  always #20 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic send(logic [15:0] w, bit v = 1);
    @(posedge clk); #1;
    cmd_valid = v; cmd_data = w;
    @(posedge clk); #1;
    cmd_valid = 0; cmd_data = 16'h1FFF;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check(!compress_en && thresh == 0 && !trig && !cal_fire, "reset values");
    send(16'h1000);
    check(trig && !cal_fire, "trigger pulse");
    @(posedge clk); #1;
    check(!trig, "trigger lasts one clock");
    send(16'h2001);
    check(compress_en, "mode on");
    send(16'h3190);
    check(thresh == 12'h190 && compress_en, "threshold set");
    send(16'h4123);
    check(cal_fire && cal_delay == 12'h123 && !trig, "calibration request");
    @(posedge clk); #1;
    check(!cal_fire && cal_delay == 12'h123, "cal pulse one clock, delay held");
    send(16'h1000, 0);
    check(!trig, "no command without valid");
    send(16'h9ABC);
    check(n_bad == 1 && thresh == 12'h190 && compress_en && !trig, "unknown opcode counted only");
    send(16'h0000);
    check(n_bad == 1 && !trig, "nop");
    send(16'h2000);
    check(!compress_en && thresh == 12'h190, "mode off");
    for (int i = 0; i < 20; i++) begin
      logic [11:0] a;
      a = 12'($urandom);
      send({4'h3, a});
      check(thresh == a, "random threshold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
