// tb_acq_ctrl: checks trigger acceptance and two-slot bookkeeping.
// The testbench plays the read-out (cap_done some clocks after seq_start)
// and the packer (slot_release), and checks: a trigger on an idle
// controller starts exactly one read phase into the current slot with
// sca_write low throughout; triggers during a read phase or with both slots
// full are rejected and counted; slots fill in the order 0, 1, 0; a
// released slot accepts triggers again.
module tb_acq_ctrl;
  logic clk = 0, rst_n = 0;
  logic trig = 0, cap_done = 0, slot_release = 0, release_slot = 0;
  logic sca_write, seq_start, wr_slot, busy, trig_accept, trig_reject;
  logic [1:0] slot_full;
  logic [15:0] n_accept, n_reject;
  int checks = 0, failures = 0;
  int exp_acc = 0, exp_rej = 0;

  acq_ctrl #(.NSLOT(2)) dut (.*);

  always #20 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pulse_trig();
    @(posedge clk); #1 trig = 1;
    @(posedge clk); #1 trig = 0;
  endtask

  // One accepted acquisition lasting len clocks into slot s.
  task automatic acquire(int s, int len);
    check(!busy && sca_write && wr_slot == 1'(s), $sformatf("ready to fill slot %0d", s));
    pulse_trig(); exp_acc++;
    check(seq_start && !sca_write, "seq_start one clock after trigger");
    @(posedge clk); #1;
    check(!seq_start, "seq_start is one clock");
    for (int i = 0; i < len; i++) begin
      check(!sca_write && busy, "SCA frozen while reading");
      if (i == 3) begin trig = 1; exp_rej++; end
      if (i == 4) trig = 0;
      @(posedge clk); #1;
    end
    cap_done = 1;
    @(posedge clk); #1;
    cap_done = 0;
    check(slot_full[s] && sca_write, "slot marked full, recording resumed");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    @(posedge clk); #1;
    check(sca_write && !busy && slot_full == 0, "after reset");
    acquire(0, 30);
    acquire(1, 17);
    check(busy && slot_full == 2'b11, "both slots full -> busy");
    pulse_trig(); exp_rej++;
    check(!seq_start && sca_write, "trigger with full slots rejected");
    // packer frees slot 1 first: slot 0 still pending, next fill is slot 0
    @(posedge clk); #1 slot_release = 1; release_slot = 1;
    @(posedge clk); #1 slot_release = 0;
    check(busy && slot_full == 2'b01, "write slot 0 still full");
    pulse_trig(); exp_rej++;
    @(posedge clk); #1 slot_release = 1; release_slot = 0;
    @(posedge clk); #1 slot_release = 0;
    check(!busy && slot_full == 2'b00, "all slots free");
    acquire(0, 5);
    @(posedge clk); #1;
    check(n_accept == 16'(exp_acc) && n_reject == 16'(exp_rej),
          $sformatf("counters %0d/%0d expected %0d/%0d", n_accept, n_reject, exp_acc, exp_rej));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
