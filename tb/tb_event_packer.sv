// tb_event_packer: checks event framing, compression and link flow control
// at full size (4 chips x 64 channels x 512 samples).
// The testbench stands in for the RAM (one clock read latency) and the peak
// memory, filled from tb_pattern_pkg. Three events are drained:
//   1. slot 0, compression off, link always ready: every word is compared,
//      and the event must leave in exactly 2 + 256 x 513 consecutive clocks;
//   2. slot 1, compression on (threshold 400), link ready half the time:
//      only pulsed channels may appear, and suppressed channels are counted;
//   3. slot 0 again, compression on, ready 90 %: checks slot wrap-around and
//      the event number.
// Each slot must be released exactly once, after its last word is issued.
module tb_event_packer;
  import tb_pattern_pkg::*;
  localparam int NCHIP = 4, NCH = 64, NCOL = 512, NSLOT = 2;
  logic clk = 0, rst_n = 0;
  logic [1:0] slot_full = 0;
  logic compress_en = 0;
  logic [11:0] thresh = 0;
  logic buf_rd_en;
  logic [1:0] buf_rd_chip, pk_rd_chip;
  logic buf_rd_slot, pk_rd_slot, release_slot;
  logic [5:0] buf_rd_ch, pk_rd_ch;
  logic [8:0] buf_rd_col;
  logic [15:0] buf_rd_data = 0;
  logic [11:0] pk_peak;
  logic slot_release, tx_valid, chan_skip;
  logic tx_ready = 0;
  logic [15:0] tx_data;
  int checks = 0, failures = 0;
  int slot_evt [NSLOT] = '{0, 0};
  logic [11:0] pk_tab [NSLOT][NCHIP][NCH];
  int n_skip = 0, n_release = 0, ready_pct = 100;

  event_packer #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .NSLOT(NSLOT)) dut (.*);

  always #20 clk = ~clk;

  // RAM and peak-memory stand-ins
  always @(posedge clk)
    if (buf_rd_en) buf_rd_data <= {4'h0, sample_val(slot_evt[buf_rd_slot], buf_rd_chip, buf_rd_ch, buf_rd_col)};
  assign pk_peak = pk_tab[pk_rd_slot][pk_rd_chip][pk_rd_ch];

  always @(posedge clk) begin
    if (rst_n && chan_skip) n_skip++;
    if (rst_n && slot_release) begin
      n_release++;
      slot_full[release_slot] <= 1'b0;
    end
    tx_ready <= ($urandom_range(1, 100) <= ready_pct);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int s, int evt);
    slot_evt[s] = evt;
    for (int c = 0; c < NCHIP; c++)
      for (int h = 0; h < NCH; h++) pk_tab[s][c][h] = peak_val(evt, c, h, NCOL);
  endtask

  // Receive one event from slot s and compare it word by word.
  task automatic drain(int s, int evt_no, bit comp, output int first_t, output int last_t);
    logic [15:0] exp_q [$];
    int nch = 0, t = 0;
    exp_q.push_back({4'hA, 12'(evt_no)});
    for (int c = 0; c < NCHIP; c++)
      for (int h = 0; h < NCH; h++)
        if (!comp || pk_tab[s][c][h] >= thresh) begin
          nch++;
          exp_q.push_back({4'hC, 4'h0, 2'(c), 6'(h)});
          for (int col = 0; col < NCOL; col++) exp_q.push_back({4'h0, sample_val(slot_evt[s], c, h, col)});
        end
    exp_q.push_back({4'hF, 12'(nch)});
    first_t = -1;
    while (exp_q.size() > 0) begin
      @(posedge clk);
      t++;
      if (tx_valid && tx_ready) begin
        logic [15:0] e;
        e = exp_q.pop_front();
        if (first_t < 0) first_t = t;
        last_t = t;
        check(tx_data == e, $sformatf("word %h expected %h", tx_data, e));
      end
    end
  endtask

  initial begin
    int f, l, skip0;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (20) @(posedge clk);
    check(!tx_valid, "nothing sent with empty slots");
    // event 1: uncompressed, full rate
    fill(0, 3);
    slot_full[0] <= 1;
    drain(0, 0, 0, f, l);
    check(l - f + 1 == 2 + NCHIP * NCH * (NCOL + 1), $sformatf("full-rate event took %0d clocks", l - f + 1));
    repeat (3) @(posedge clk);
    check(n_release == 1 && slot_full == 0 && n_skip == 0, "slot 0 released once, no skips");
    // event 2: compressed, stalling link
    fill(1, 4);
    compress_en = 1; thresh = 12'(THRESH); ready_pct = 50;
    slot_full[1] <= 1;
    drain(1, 1, 1, f, l);
    repeat (3) @(posedge clk);
    skip0 = 0;
    for (int c = 0; c < NCHIP; c++) for (int h = 0; h < NCH; h++) if (!is_hit(4, c, h)) skip0++;
    check(n_skip == skip0 && skip0 > 0, $sformatf("suppressed %0d channels, expected %0d", n_skip, skip0));
    check(n_release == 2 && slot_full == 0, "slot 1 released");
    // event 3: slot 0 again
    fill(0, 5);
    ready_pct = 90;
    slot_full[0] <= 1;
    drain(0, 2, 1, f, l);
    repeat (3) @(posedge clk);
    check(n_release == 3 && !tx_valid, "slot 0 reused and released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
