// adc_capture: four-lane capture of the ADC buses behind the AGET chips.
//
// Each AGET analog output is digitised by its own 12-bit ADC clocked with the
// SCA read clock (25 MHz). A pipelined ADC returns the sample of read clock t
// only ADC_LAT clocks later, so the slot tag produced by sca_read_seq (valid,
// column, channel, last) is delayed by ADC_LAT clocks and then registered
// together with the four ADC words. Reset-level samples carry no tag and are
// dropped. Output: one write per channel slot, with all four chips' samples
// side by side (the four chips are read in lock-step). done pulses one clock
// after the write of the last slot. Latency: slot tag to wr_en is ADC_LAT+1.
// Four lanes of 12 bits follow the card; the 7-clock latency is the
// AD9235 data-sheet figure and is not stated in the card description.
module adc_capture #(
  parameter int unsigned NCHIP   = fec_pkg::NCHIP,
  parameter int unsigned NCH     = fec_pkg::NCH,
  parameter int unsigned NCOL    = fec_pkg::NCOL,
  parameter int unsigned ADC_W   = fec_pkg::ADC_W,
  parameter int unsigned ADC_LAT = 7
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     slot_valid,
  input  logic [$clog2(NCOL)-1:0]  slot_col,
  input  logic [$clog2(NCH)-1:0]   slot_ch,
  input  logic                     slot_last,
  input  logic [ADC_W-1:0]         adc_data [NCHIP],
  output logic                     wr_en,
  output logic [$clog2(NCOL)-1:0]  wr_col,
  output logic [$clog2(NCH)-1:0]   wr_ch,
  output logic [ADC_W-1:0]         wr_data [NCHIP],
  output logic                     done
);
  typedef struct packed {
    logic                    valid;
    logic                    last;
    logic [$clog2(NCOL)-1:0] col;
    logic [$clog2(NCH)-1:0]  ch;
  } tag_t;

  tag_t dly [ADC_LAT+1];

  always_comb dly[0] = '{valid: slot_valid, last: slot_last, col: slot_col, ch: slot_ch};

  // Tag delay line matching the ADC pipeline.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 1; i <= ADC_LAT; i++) dly[i] <= '0;
    end else begin
      for (int i = 1; i <= ADC_LAT; i++) dly[i] <= dly[i-1];
    end
  end

  logic last_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en  <= 1'b0;
      wr_col <= '0;
      wr_ch  <= '0;
      last_q <= 1'b0;
      done   <= 1'b0;
      for (int c = 0; c < NCHIP; c++) wr_data[c] <= '0;
    end else begin
      wr_en  <= dly[ADC_LAT].valid;
      wr_col <= dly[ADC_LAT].col;
      wr_ch  <= dly[ADC_LAT].ch;
      last_q <= dly[ADC_LAT].valid && dly[ADC_LAT].last;
      done   <= last_q;
      for (int c = 0; c < NCHIP; c++) wr_data[c] <= adc_data[c];
    end
  end

endmodule
