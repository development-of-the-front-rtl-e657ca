// acq_ctrl: trigger acceptance and two-event slot bookkeeping.
//
// Between events the AGET switched-capacitor arrays record continuously
// (sca_write high). A trigger is accepted only when the controller is idle
// and the RAM slot it would fill next is free. An accepted trigger drops
// sca_write, which freezes the 512 stored cells, and pulses seq_start to run
// one SCA read phase; when the capture side reports the last sample written
// (cap_done) the slot is marked full, the write pointer moves to the other
// slot and recording resumes. Slots are freed by the packer (slot_release)
// once their event has been sent. A trigger that arrives while reading or
// while both slots hold unsent events is rejected and counted; busy tells the
// trigger source that a trigger would now be lost.
// Timing: seq_start follows an accepted trigger by one clock; sca_write is
// low from that clock until the clock after cap_done.
// Holding two events follows the card's RAM size; the accept/reject policy
// and the absence of a post-trigger delay are this design's choices.
module acq_ctrl #(
  parameter int unsigned NSLOT = fec_pkg::NSLOT
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      trig,
  input  logic                      cap_done,
  input  logic                      slot_release,
  input  logic [$clog2(NSLOT)-1:0]  release_slot,
  output logic                      sca_write,
  output logic                      seq_start,
  output logic [$clog2(NSLOT)-1:0]  wr_slot,
  output logic [NSLOT-1:0]          slot_full,
  output logic                      busy,
  output logic                      trig_accept,
  output logic                      trig_reject,
  output logic [15:0]               n_accept,
  output logic [15:0]               n_reject
);
  typedef enum logic [1:0] {A_IDLE, A_START, A_READ} state_e;
  state_e state;

  assign busy        = (state != A_IDLE) || slot_full[wr_slot];
  assign trig_accept = trig && !busy;
  assign trig_reject = trig && busy;
  assign sca_write   = (state == A_IDLE);
  assign seq_start   = (state == A_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= A_IDLE;
      wr_slot   <= '0;
      slot_full <= '0;
      n_accept  <= '0;
      n_reject  <= '0;
    end else begin
      if (trig_accept) n_accept <= n_accept + 1'b1;
      if (trig_reject) n_reject <= n_reject + 1'b1;
      if (slot_release) slot_full[release_slot] <= 1'b0;
      unique case (state)
        A_IDLE:  if (trig_accept) state <= A_START;
        A_START: state <= A_READ;
        A_READ:  if (cap_done) begin
          slot_full[wr_slot] <= 1'b1;
          wr_slot <= (32'(wr_slot) == NSLOT - 1) ? '0 : wr_slot + 1'b1;
          state   <= A_IDLE;
        end
        default: state <= A_IDLE;
      endcase
    end
  end

  // A slot being filled is never one the packer still owns.
  a_fill_free: assert property (@(posedge clk) disable iff (!rst_n)
                                trig_accept |-> !slot_full[wr_slot]);

endmodule
