// event_buffer: two-event RAM that turns the AGET's column-by-column order
// into channel-by-channel order.
//
// One bank per AGET chip, each holding NSLOT events of NCH channels x NCOL
// samples of WORD_W bits. The bank address is {slot, channel, column}, so a
// write stream arriving column by column (all channels of cell 0, then of
// cell 1, ...) lands where a sequential read finds channel 0's 512 samples
// first, then channel 1's, and so on: the transpose is done by addressing.
// All banks share the write address (the chips are read in lock-step) and
// take their own data word; samples are stored as {TAG_DATA, sample}.
// The single read port selects a bank by rd_chip; rd_data is valid one clock
// after rd_en (synchronous read, block-RAM style). At the default sizes the
// RAM is 4 x 2 x 64 x 512 x 16 = 4,194,304 bits, the 4.2 Mbit of two events.
module event_buffer #(
  parameter int unsigned NCHIP  = fec_pkg::NCHIP,
  parameter int unsigned NCH    = fec_pkg::NCH,
  parameter int unsigned NCOL   = fec_pkg::NCOL,
  parameter int unsigned NSLOT  = fec_pkg::NSLOT,
  parameter int unsigned ADC_W  = fec_pkg::ADC_W,
  parameter int unsigned WORD_W = fec_pkg::WORD_W
) (
  input  logic                      clk,
  input  logic                      wr_en,
  input  logic [$clog2(NSLOT)-1:0]  wr_slot,
  input  logic [$clog2(NCH)-1:0]    wr_ch,
  input  logic [$clog2(NCOL)-1:0]   wr_col,
  input  logic [ADC_W-1:0]          wr_data [NCHIP],
  input  logic                      rd_en,
  input  logic [$clog2(NCHIP)-1:0]  rd_chip,
  input  logic [$clog2(NSLOT)-1:0]  rd_slot,
  input  logic [$clog2(NCH)-1:0]    rd_ch,
  input  logic [$clog2(NCOL)-1:0]   rd_col,
  output logic [WORD_W-1:0]         rd_data
);
  localparam int unsigned AW    = $clog2(NSLOT) + $clog2(NCH) + $clog2(NCOL);
  localparam int unsigned DEPTH = NSLOT * NCH * NCOL;

  logic [AW-1:0]     waddr, raddr;
  logic [WORD_W-1:0] rd_bank [NCHIP];
  logic [$clog2(NCHIP)-1:0] rd_chip_q;

  assign waddr = {wr_slot, wr_ch, wr_col};
  assign raddr = {rd_slot, rd_ch, rd_col};

  for (genvar b = 0; b < NCHIP; b++) begin : g_bank
    logic [WORD_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en) mem[waddr] <= {fec_pkg::TAG_DATA, (WORD_W-4)'(wr_data[b])};
      if (rd_en) rd_bank[b] <= mem[raddr];
    end
  end

  always_ff @(posedge clk) if (rd_en) rd_chip_q <= rd_chip;

  assign rd_data = rd_bank[rd_chip_q];

endmodule
