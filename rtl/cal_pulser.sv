// cal_pulser: control of the on-board calibration pulser.
//
// The card's calibration circuit applies a voltage step to small capacitors
// at the AGET inputs, injecting a known charge into the channels. This block
// drives that circuit: on fire it switches cal_step to its active level,
// holds it for HOLD clocks and returns it, and raises trig delay clocks after
// the step so that the shaped response lies inside the SCA window that the
// trigger freezes. A fire while a pulse is in progress is ignored.
// Timing: cal_step rises on the clock edge that samples fire and stays
// high for HOLD clocks; trig is a one-clock pulse that rises delay+1 clocks
// after cal_step. The pulser's purpose follows the card; the step polarity,
// its length and the trigger delay are this design's choices.
module cal_pulser #(
  parameter int unsigned HOLD = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        fire,
  input  logic [11:0] delay,
  output logic        cal_step,
  output logic        trig,
  output logic        busy
);
  localparam int unsigned CW = $clog2(HOLD + 4096 + 1);

  logic [CW-1:0] cnt;
  logic [11:0]   dly_q;
  logic          trig_done;

  assign busy = cal_step || !trig_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cal_step  <= 1'b0;
      trig      <= 1'b0;
      trig_done <= 1'b1;
      cnt       <= '0;
      dly_q     <= '0;
    end else begin
      trig <= 1'b0;
      if (fire && !busy) begin
        cal_step  <= 1'b1;
        trig_done <= 1'b0;
        cnt       <= '0;
        dly_q     <= delay;
      end else if (busy) begin
        cnt <= cnt + 1'b1;
        if (!trig_done && cnt == CW'(dly_q)) begin
          trig      <= 1'b1;
          trig_done <= 1'b1;
        end
        if (cal_step && cnt == CW'(HOLD - 1)) cal_step <= 1'b0;
      end
    end
  end

endmodule
