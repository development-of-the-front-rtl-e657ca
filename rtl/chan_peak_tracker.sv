// chan_peak_tracker: per-channel maximum of each buffered event, used to
// compress the event by leaving out channels that saw no signal.
//
// While an event is written into the RAM column by column, this block keeps,
// for every (slot, chip, channel), the largest ADC code seen so far. A write
// of column 0 restarts the maximum, so no separate clear is needed and a slot
// can be reused as soon as it is freed. The read side is combinational: the
// packer asks for the peak of one channel and compares it with a threshold.
// The card is said to compress the channel-ordered data when needed but the
// method is not given; keeping whole channels whose peak exceeds a threshold
// is the simplest scheme that works on channel-ordered data, and is this
// design's choice.
module chan_peak_tracker #(
  parameter int unsigned NCHIP = fec_pkg::NCHIP,
  parameter int unsigned NCH   = fec_pkg::NCH,
  parameter int unsigned NCOL  = fec_pkg::NCOL,
  parameter int unsigned NSLOT = fec_pkg::NSLOT,
  parameter int unsigned ADC_W = fec_pkg::ADC_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      wr_en,
  input  logic [$clog2(NSLOT)-1:0]  wr_slot,
  input  logic [$clog2(NCH)-1:0]    wr_ch,
  input  logic [$clog2(NCOL)-1:0]   wr_col,
  input  logic [ADC_W-1:0]          wr_data [NCHIP],
  input  logic [$clog2(NSLOT)-1:0]  rd_slot,
  input  logic [$clog2(NCHIP)-1:0]  rd_chip,
  input  logic [$clog2(NCH)-1:0]    rd_ch,
  output logic [ADC_W-1:0]          rd_peak
);
  logic [ADC_W-1:0] peak [NSLOT][NCHIP][NCH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSLOT; s++)
        for (int c = 0; c < NCHIP; c++)
          for (int h = 0; h < NCH; h++)
            peak[s][c][h] <= '0;
    end else if (wr_en) begin
      for (int c = 0; c < NCHIP; c++) begin
        if (wr_col == '0 || wr_data[c] > peak[wr_slot][c][wr_ch])
          peak[wr_slot][c][wr_ch] <= wr_data[c];
      end
    end
  end

  assign rd_peak = peak[rd_slot][rd_chip][rd_ch];

endmodule
