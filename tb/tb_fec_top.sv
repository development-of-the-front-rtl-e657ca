// tb_fec_top: end-to-end test of the card read-out logic at reduced size
// (4 chips x 8 channels x 16 SCA cells), with the behavioural AGET/ADC model
// on the ADC ports and a receiver that parses and checks every word sent
// toward the DCM. The scenario makes each mechanism of the design happen
// and counts it:
//   - trigger accepted, and the read phase lasting NCOL*(RESET_TCK+NCH) clocks;
//   - trigger rejected during a read phase;
//   - link stalled (tx_valid without tx_ready) until both RAM slots are
//     full, then a trigger rejected because no slot is free;
//   - compression switched on by command, channels suppressed;
//   - calibration pulse fired by command, giving its own trigger;
//   - an unknown command counted.
// Every received event is compared sample by sample with the pattern the
// model played, and the channel list with the compression setting.
module tb_fec_top;
  import tb_pattern_pkg::*;
  localparam int NCHIP = 4, NCH = 8, NCOL = 16, RT = 4, LAT = 7, HOLD = 64;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0;
  logic [15:0] cmd_data = 0;
  logic [15:0] tx_data;
  logic tx_valid, tx_ready = 1, busy;
  logic sca_write, sca_read, sca_rclk_en, cal_step;
  logic [11:0] adc_data [NCHIP];
  logic [15:0] n_accept, n_reject;
  logic [7:0] n_bad_cmd;
  logic ev_trig_accept, ev_trig_reject, ev_chan_skip;
  int checks = 0, failures = 0;

  fec_top #(.NCH(NCH), .NCOL(NCOL), .RESET_TCK(RT), .ADC_LAT(LAT), .CAL_HOLD(HOLD)) dut (.*);
  aget_adc_model #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .RESET_TCK(RT), .ADC_LAT(LAT)) model (
    .clk, .sca_read, .adc_data);

  always #20 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int m_accept = 0, m_rej_read = 0, m_rej_full = 0, m_skip = 0, m_stall = 0, m_cal = 0;
  int read_len = 0, read_ok = 0, read_bad = 0;
  logic sca_read_q = 0, cal_q = 0;
  always @(posedge clk) if (rst_n) begin
    if (ev_trig_accept) m_accept++;
    if (ev_trig_reject && !sca_write) m_rej_read++;
    if (ev_trig_reject && sca_write) m_rej_full++;
    if (ev_chan_skip) m_skip++;
    if (tx_valid && !tx_ready) m_stall++;
    cal_q <= cal_step;
    if (cal_step && !cal_q) m_cal++;
    sca_read_q <= sca_read;
    if (sca_read) read_len++;
    if (sca_read_q && !sca_read) begin
      if (read_len == NCOL * (RT + NCH)) read_ok++; else read_bad++;
      read_len = 0;
    end
  end

  // ---------------- receiver ----------------
  bit comp_mode = 0;     // compression setting the packer is using
  int n_events = 0;
  typedef enum {R_HDR, R_CH, R_DATA} rstate_e;
  rstate_e rs = R_HDR;
  int r_evt, r_chip, r_ch, r_col, r_nch, r_next;   // r_next: next channel index allowed
  always @(posedge clk) if (rst_n && tx_valid && tx_ready) begin
    logic [15:0] w;
    w = tx_data;
    case (rs)
      R_HDR: begin
        check(w == {4'hA, 12'(n_events)}, $sformatf("event header %h", w));
        r_evt = n_events; r_nch = 0; r_next = 0;
        rs = R_CH;
      end
      R_CH: begin
        if (w[15:12] == 4'hF) begin
          // every channel not sent since the last one must be a suppressed one
          for (int k = r_next; k < NCHIP * NCH; k++)
            check(comp_mode && !is_hit(r_evt, k / NCH, k % NCH), "missing channel before end");
          check(w[11:0] == 12'(r_nch), "end word channel count");
          n_events++;
          rs = R_HDR;
        end else begin
          int k;
          check(w[15:12] == 4'hC && w[11:8] == 0, $sformatf("channel header %h", w));
          r_chip = int'(w[7:6]); r_ch = int'(w[5:0]);
          k = r_chip * NCH + r_ch;
          check(k >= r_next && r_ch < NCH, "channel order");
          for (int j = r_next; j < k; j++)
            check(comp_mode && !is_hit(r_evt, j / NCH, j % NCH), "wrongly suppressed channel");
          if (comp_mode) check(is_hit(r_evt, r_chip, r_ch), "quiet channel sent in compressed mode");
          r_next = k + 1; r_nch++; r_col = 0;
          rs = R_DATA;
        end
      end
      R_DATA: begin
        check(w == {4'h0, sample_val(r_evt, r_chip, r_ch, r_col)},
              $sformatf("sample ev%0d chip%0d ch%0d col%0d: %h", r_evt, r_chip, r_ch, r_col, w));
        r_col++;
        if (r_col == NCOL) rs = R_CH;
      end
    endcase
  end

  task automatic send(logic [15:0] w);
    @(posedge clk); #1 cmd_valid = 1; cmd_data = w;
    @(posedge clk); #1 cmd_valid = 0;
  endtask

  task automatic wait_events(int n);
    while (n_events < n) @(posedge clk);
    repeat (5) @(posedge clk);
  endtask

  task automatic wait_idle();
    @(posedge clk);
    while (sca_write) @(posedge clk);
    while (!sca_write) @(posedge clk);
    repeat (2) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    // 1. plain trigger, and a second one during the read phase
    send(16'h1000);
    repeat (20) @(posedge clk);
    send(16'h1000);
    wait_events(1);
    // 2. stall the link, fill both slots, lose a trigger
    #1 tx_ready = 0;
    send(16'h1000); wait_idle();
    send(16'h1000); wait_idle();
    check(busy, "busy with both slots full");
    send(16'h1000);
    repeat (50) @(posedge clk);
    check(!tx_ready && tx_valid, "link stalled with data waiting");
    fork
      begin
        while (n_events < 3) begin @(posedge clk); #1 tx_ready = 1'($urandom_range(0, 1)); end
        #1 tx_ready = 1;
      end
    join
    wait_events(3);
    // 3. compression on
    send(16'h2001);
    send({4'h3, 12'(THRESH)});
    comp_mode = 1;
    send(16'h1000);
    wait_events(4);
    // 4. calibration pulse with its own trigger
    send(16'h4010);
    wait_events(5);
    // 5. unknown command
    send(16'h9123);
    repeat (5) @(posedge clk);
    check(n_bad_cmd == 1, "unknown command counted");
    check(n_accept == 5 && n_reject == 2, $sformatf("trigger counters %0d/%0d", n_accept, n_reject));
    check(read_ok == 5 && read_bad == 0, $sformatf("read phases of right length: %0d ok, %0d bad", read_ok, read_bad));
    check(m_accept == 5, "mechanism: triggers accepted");
    check(m_rej_read >= 1, "mechanism: trigger rejected while reading");
    check(m_rej_full >= 1, "mechanism: trigger rejected with both slots full");
    check(m_stall > 0, "mechanism: link stall");
    check(m_skip > 0, "mechanism: channel suppression");
    check(m_cal == 1, "mechanism: calibration pulse");
    $display("mechanisms: accept=%0d reject_reading=%0d reject_full=%0d stall_clocks=%0d skipped_channels=%0d cal_pulses=%0d events=%0d",
             m_accept, m_rej_read, m_rej_full, m_stall, m_skip, m_cal, n_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
