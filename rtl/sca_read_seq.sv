// sca_read_seq: sequencer for the read phase of the AGET switched-capacitor array.
//
// The AGET outputs its stored samples column by column: each column is one
// time cell of all 64 channels, preceded by a "reset" level lasting a few
// read clocks (2 to 4 in the AGET chronogram). A start pulse raises sca_read,
// which stays high for NCOL columns of RESET_TCK + NCH read clocks and then
// drops. The read clock of the chip is the system clock (25 MHz); sca_rclk_en
// says when it must be running. Every cycle that carries a channel sample
// raises slot_valid with its column and channel; slot_last marks the last
// channel of the last column. done pulses in the cycle after the last slot.
// Timing: the first slot after start is a reset slot; a full read phase lasts
// NCOL*(RESET_TCK+NCH) cycles. Column layout follows the AGET chronogram; the
// reset length of 4 within the printed 2-4 range is this design's choice.
module sca_read_seq #(
  parameter int unsigned NCH       = fec_pkg::NCH,
  parameter int unsigned NCOL      = fec_pkg::NCOL,
  parameter int unsigned RESET_TCK = 4
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     sca_read,
  output logic                     sca_rclk_en,
  output logic                     slot_valid,
  output logic [$clog2(NCOL)-1:0]  slot_col,
  output logic [$clog2(NCH)-1:0]   slot_ch,
  output logic                     slot_last,
  output logic                     done
);
  localparam int unsigned SLOTS = RESET_TCK + NCH;
  localparam int unsigned PW    = $clog2(SLOTS);

  logic [PW-1:0]            phase;
  logic [$clog2(NCOL)-1:0]  col;
  logic                     active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      phase  <= '0;
      col    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!active) begin
        if (start) begin
          active <= 1'b1;
          phase  <= '0;
          col    <= '0;
        end
      end else if (phase == PW'(SLOTS - 1)) begin
        phase <= '0;
        if (col == $clog2(NCOL)'(NCOL - 1)) begin
          active <= 1'b0;
          done   <= 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end else begin
        phase <= phase + 1'b1;
      end
    end
  end

  always_comb begin
    sca_read    = active;
    sca_rclk_en = active;
    slot_valid  = active && (phase >= PW'(RESET_TCK));
    slot_col    = col;
    slot_ch     = $clog2(NCH)'(phase - PW'(RESET_TCK));
    slot_last   = slot_valid && (phase == PW'(SLOTS - 1)) && (col == $clog2(NCOL)'(NCOL - 1));
  end

endmodule
