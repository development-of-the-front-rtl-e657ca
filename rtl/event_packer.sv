// event_packer: reads buffered events channel by channel and frames them for
// the optical link to the data collection module (DCM).
//
// Slots of the two-event RAM are drained in the order they were filled. For
// one event the packer sends an event header {TAG_EVT, event_number}, then
// for each chip and channel either nothing (channel suppressed) or a channel
// header {TAG_CHAN, chip, channel} followed by the channel's NCOL samples in
// time order, and finally {TAG_END, number_of_channels_sent}. With
// compress_en low every channel is sent; with it high a channel is sent only
// if its peak sample reaches thresh. When the end word is issued the slot is
// released to the acquisition side.
// Interface: valid/ready word stream (tx_*); a word is taken when tx_valid
// and tx_ready are both high, and tx_data holds while tx_valid waits. A
// 4-word output FIFO absorbs the one-clock RAM read latency, so with tx_ready
// held high one word leaves per clock: an uncompressed event of 4 x 64
// channels is 2 + 256 x 513 words. Channel ordering follows the card's
// description; the word format and the suppression rule are this design's.
module event_packer #(
  parameter int unsigned NCHIP  = fec_pkg::NCHIP,
  parameter int unsigned NCH    = fec_pkg::NCH,
  parameter int unsigned NCOL   = fec_pkg::NCOL,
  parameter int unsigned NSLOT  = fec_pkg::NSLOT,
  parameter int unsigned ADC_W  = fec_pkg::ADC_W,
  parameter int unsigned WORD_W = fec_pkg::WORD_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [NSLOT-1:0]          slot_full,
  input  logic                      compress_en,
  input  logic [ADC_W-1:0]          thresh,
  // event buffer read port
  output logic                      buf_rd_en,
  output logic [$clog2(NCHIP)-1:0]  buf_rd_chip,
  output logic [$clog2(NSLOT)-1:0]  buf_rd_slot,
  output logic [$clog2(NCH)-1:0]    buf_rd_ch,
  output logic [$clog2(NCOL)-1:0]   buf_rd_col,
  input  logic [WORD_W-1:0]         buf_rd_data,
  // channel peak lookup
  output logic [$clog2(NSLOT)-1:0]  pk_rd_slot,
  output logic [$clog2(NCHIP)-1:0]  pk_rd_chip,
  output logic [$clog2(NCH)-1:0]    pk_rd_ch,
  input  logic [ADC_W-1:0]          pk_peak,
  // slot hand-back
  output logic                      slot_release,
  output logic [$clog2(NSLOT)-1:0]  release_slot,
  // link word stream
  output logic [WORD_W-1:0]         tx_data,
  output logic                      tx_valid,
  input  logic                      tx_ready,
  // status
  output logic                      chan_skip
);
  import fec_pkg::*;

  localparam int unsigned FDEPTH = 4;

  typedef enum logic [2:0] {S_IDLE, S_EVT, S_CHK, S_DAT, S_END} state_e;
  state_e state;

  logic [$clog2(NSLOT)-1:0]  rslot;
  logic [$clog2(NCHIP)-1:0]  chip;
  logic [$clog2(NCH)-1:0]    ch;
  logic [$clog2(NCOL)-1:0]   col;
  logic [11:0]               evt_no;
  logic [11:0]               nsent;

  // issue pipeline (one stage, matches the RAM read latency)
  logic                      p_valid, p_ram;
  logic [WORD_W-1:0]         p_word;

  // output FIFO
  logic [WORD_W-1:0]         fifo [FDEPTH];
  logic [$clog2(FDEPTH)-1:0] wptr, rptr;
  logic [$clog2(FDEPTH):0]   count;

  logic can_issue, issue, issue_ram, keep_ch, last_ch, pop;
  logic [WORD_W-1:0] issue_word;

  assign can_issue = (32'(count) + 32'(p_valid)) < FDEPTH;
  assign keep_ch   = !compress_en || (pk_peak >= thresh);
  assign last_ch   = (ch == $clog2(NCH)'(NCH - 1)) && (chip == $clog2(NCHIP)'(NCHIP - 1));
  assign pop       = tx_valid && tx_ready;

  assign pk_rd_slot = rslot;
  assign pk_rd_chip = chip;
  assign pk_rd_ch   = ch;

  always_comb begin
    issue      = 1'b0;
    issue_ram  = 1'b0;
    issue_word = '0;
    chan_skip  = 1'b0;
    unique case (state)
      S_EVT: begin
        issue      = can_issue;
        issue_word = {TAG_EVT, evt_no};
      end
      S_CHK: begin
        issue      = can_issue && keep_ch;
        chan_skip  = !keep_ch;
        issue_word = {TAG_CHAN, 4'b0000, 2'(chip), 6'(ch)};
      end
      S_DAT: begin
        issue     = can_issue;
        issue_ram = 1'b1;
      end
      S_END: begin
        issue      = can_issue;
        issue_word = {TAG_END, nsent};
      end
      default: ;
    endcase
  end

  assign buf_rd_en    = issue && issue_ram;
  assign buf_rd_chip  = chip;
  assign buf_rd_slot  = rslot;
  assign buf_rd_ch    = ch;
  assign buf_rd_col   = col;
  assign slot_release = (state == S_END) && issue;
  assign release_slot = rslot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      rslot  <= '0;
      chip   <= '0;
      ch     <= '0;
      col    <= '0;
      evt_no <= '0;
      nsent  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (slot_full[rslot]) state <= S_EVT;
        S_EVT: if (issue) begin
          chip  <= '0;
          ch    <= '0;
          nsent <= '0;
          state <= S_CHK;
        end
        S_CHK: begin
          if (!keep_ch) begin
            if (last_ch) state <= S_END;
            else begin
              ch <= ch + 1'b1;
              if (ch == $clog2(NCH)'(NCH - 1)) chip <= chip + 1'b1;
            end
          end else if (issue) begin
            col   <= '0;
            nsent <= nsent + 1'b1;
            state <= S_DAT;
          end
        end
        S_DAT: if (issue) begin
          if (col == $clog2(NCOL)'(NCOL - 1)) begin
            col <= '0;
            if (last_ch) state <= S_END;
            else begin
              ch <= ch + 1'b1;
              if (ch == $clog2(NCH)'(NCH - 1)) chip <= chip + 1'b1;
              state <= S_CHK;
            end
          end else begin
            col <= col + 1'b1;
          end
        end
        S_END: if (issue) begin
          rslot  <= (32'(rslot) == NSLOT - 1) ? '0 : rslot + 1'b1;
          evt_no <= evt_no + 1'b1;
          state  <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_ram   <= 1'b0;
      p_word  <= '0;
    end else begin
      p_valid <= issue;
      p_ram   <= issue_ram;
      p_word  <= issue_word;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
      for (int i = 0; i < FDEPTH; i++) fifo[i] <= '0;
    end else begin
      if (p_valid) begin
        fifo[wptr] <= p_ram ? buf_rd_data : p_word;
        wptr       <= wptr + 1'b1;
      end
      if (pop) rptr <= rptr + 1'b1;
      count <= count + ($clog2(FDEPTH)+1)'(p_valid) - ($clog2(FDEPTH)+1)'(pop);
    end
  end

  assign tx_valid = (count != 0);
  assign tx_data  = fifo[rptr];

  // The output FIFO can never overflow: issue is held back by can_issue.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= FDEPTH);
  // A word offered on the link stays put until it is taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));

endmodule
