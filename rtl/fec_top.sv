// fec_top: read-out logic of one PandaX-III front-end card (FEC).
//
// The card digitises four 64-channel AGET chips. Each AGET stores 512 samples
// per channel in a switched-capacitor array and, on read-out, sends them out
// column by column (one time cell of all channels after another) through one
// analog output per chip into a 12-bit ADC clocked at 25 MHz. This logic
//   - takes commands and triggers from the DCM (cmd_decoder),
//   - fires the on-board calibration pulser on request (cal_pulser),
//   - stops the SCAs on a trigger and runs the read phase (acq_ctrl,
//     sca_read_seq),
//   - captures the four ADC lanes, aligned for the ADC latency (adc_capture),
//   - stores the event into one of two RAM slots so that it can be read back
//     channel by channel (event_buffer, 4.2 Mbit at the default sizes),
//   - notes each channel's peak for compression (chan_peak_tracker), and
//   - sends each event to the DCM as framed 16-bit words (event_packer).
// Everything runs on one 25 MHz clock, which is also the SCA read clock and
// the ADC clock. The optical transceiver, the AGET slow-control port and the
// analog parts are outside: their signals are ports of this module.
// A read phase takes NCOL*(RESET_TCK+NCH) clocks plus ADC_LAT+3; a full
// event leaves on the link in 2 + NCHIP*NCH*(NCOL+1) clocks when the link
// never stalls.
module fec_top #(
  parameter int unsigned NCHIP     = fec_pkg::NCHIP,
  parameter int unsigned NCH       = fec_pkg::NCH,
  parameter int unsigned NCOL      = fec_pkg::NCOL,
  parameter int unsigned NSLOT     = fec_pkg::NSLOT,
  parameter int unsigned ADC_W     = fec_pkg::ADC_W,
  parameter int unsigned WORD_W    = fec_pkg::WORD_W,
  parameter int unsigned RESET_TCK = 4,
  parameter int unsigned ADC_LAT   = 7,
  parameter int unsigned CAL_HOLD  = 1024
) (
  input  logic               clk,
  input  logic               rst_n,
  // commands from the DCM (link receive side)
  input  logic               cmd_valid,
  input  logic [15:0]        cmd_data,
  // event data to the DCM (link transmit side)
  output logic [WORD_W-1:0]  tx_data,
  output logic               tx_valid,
  input  logic               tx_ready,
  output logic               busy,
  // AGET SCA control
  output logic               sca_write,
  output logic               sca_read,
  output logic               sca_rclk_en,
  // ADC data, one bus per AGET
  input  logic [ADC_W-1:0]   adc_data [NCHIP],
  // calibration circuit
  output logic               cal_step,
  // status counters
  output logic [15:0]        n_accept,
  output logic [15:0]        n_reject,
  output logic [7:0]         n_bad_cmd,
  // one-clock event strobes: trigger taken, trigger lost, channel suppressed
  output logic               ev_trig_accept,
  output logic               ev_trig_reject,
  output logic               ev_chan_skip
);
  localparam int unsigned CHW  = $clog2(NCH);
  localparam int unsigned COLW = $clog2(NCOL);
  localparam int unsigned SW   = $clog2(NSLOT);
  localparam int unsigned CPW  = $clog2(NCHIP);

  // command decoder
  logic        cmd_trig, compress_en, cal_fire;
  logic [11:0] thresh, cal_delay;

  cmd_decoder u_cmd (
    .clk, .rst_n, .cmd_valid, .cmd_data,
    .trig(cmd_trig), .compress_en, .thresh, .cal_fire, .cal_delay, .n_bad(n_bad_cmd)
  );

  // calibration pulser
  logic cal_trig;

  cal_pulser #(.HOLD(CAL_HOLD)) u_cal (
    .clk, .rst_n, .fire(cal_fire), .delay(cal_delay),
    .cal_step, .trig(cal_trig), .busy()
  );

  // acquisition control
  logic            seq_start, cap_done, slot_release;
  logic [SW-1:0]   wr_slot, release_slot;
  logic [NSLOT-1:0] slot_full;

  acq_ctrl #(.NSLOT(NSLOT)) u_acq (
    .clk, .rst_n, .trig(cmd_trig || cal_trig), .cap_done,
    .slot_release, .release_slot,
    .sca_write, .seq_start, .wr_slot, .slot_full, .busy,
    .trig_accept(ev_trig_accept), .trig_reject(ev_trig_reject), .n_accept, .n_reject
  );

  // SCA read sequencer
  logic            slot_valid, slot_last;
  logic [COLW-1:0] slot_col;
  logic [CHW-1:0]  slot_ch;

  sca_read_seq #(.NCH(NCH), .NCOL(NCOL), .RESET_TCK(RESET_TCK)) u_seq (
    .clk, .rst_n, .start(seq_start), .sca_read, .sca_rclk_en,
    .slot_valid, .slot_col, .slot_ch, .slot_last, .done()
  );

  // ADC capture
  logic            wr_en;
  logic [COLW-1:0] wr_col;
  logic [CHW-1:0]  wr_ch;
  logic [ADC_W-1:0] wr_data [NCHIP];

  adc_capture #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .ADC_W(ADC_W), .ADC_LAT(ADC_LAT)) u_cap (
    .clk, .rst_n, .slot_valid, .slot_col, .slot_ch, .slot_last, .adc_data,
    .wr_en, .wr_col, .wr_ch, .wr_data, .done(cap_done)
  );

  // two-event reorder RAM
  logic              buf_rd_en;
  logic [CPW-1:0]    buf_rd_chip;
  logic [SW-1:0]     buf_rd_slot;
  logic [CHW-1:0]    buf_rd_ch;
  logic [COLW-1:0]   buf_rd_col;
  logic [WORD_W-1:0] buf_rd_data;

  event_buffer #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .NSLOT(NSLOT),
                 .ADC_W(ADC_W), .WORD_W(WORD_W)) u_buf (
    .clk, .wr_en, .wr_slot, .wr_ch, .wr_col, .wr_data,
    .rd_en(buf_rd_en), .rd_chip(buf_rd_chip), .rd_slot(buf_rd_slot),
    .rd_ch(buf_rd_ch), .rd_col(buf_rd_col), .rd_data(buf_rd_data)
  );

  // channel peaks for compression
  logic [SW-1:0]    pk_rd_slot;
  logic [CPW-1:0]   pk_rd_chip;
  logic [CHW-1:0]   pk_rd_ch;
  logic [ADC_W-1:0] pk_peak;

  chan_peak_tracker #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .NSLOT(NSLOT), .ADC_W(ADC_W)) u_pk (
    .clk, .rst_n, .wr_en, .wr_slot, .wr_ch, .wr_col, .wr_data,
    .rd_slot(pk_rd_slot), .rd_chip(pk_rd_chip), .rd_ch(pk_rd_ch), .rd_peak(pk_peak)
  );

  // packer toward the DCM

  event_packer #(.NCHIP(NCHIP), .NCH(NCH), .NCOL(NCOL), .NSLOT(NSLOT),
                 .ADC_W(ADC_W), .WORD_W(WORD_W)) u_pack (
    .clk, .rst_n, .slot_full, .compress_en, .thresh(thresh[ADC_W-1:0]),
    .buf_rd_en, .buf_rd_chip, .buf_rd_slot, .buf_rd_ch, .buf_rd_col, .buf_rd_data,
    .pk_rd_slot, .pk_rd_chip, .pk_rd_ch, .pk_peak,
    .slot_release, .release_slot,
    .tx_data, .tx_valid, .tx_ready, .chan_skip(ev_chan_skip)
  );

endmodule
