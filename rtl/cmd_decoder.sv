// cmd_decoder: decodes the command words the DCM sends to the card.
//
// The optical link to the DCM carries configuration commands and the
// trigger. Each command is one 16-bit word {opcode, argument}, taken when
// cmd_valid is high. OP_TRIG raises trig for one clock; OP_MODE sets the
// compression (channel suppression) enable from arg[0]; OP_THRESH sets the
// suppression threshold; OP_CAL asks the calibration pulser to fire, with
// arg as the delay in clocks from the pulse to its trigger. Unknown opcodes
// are ignored and counted. Outputs are registered: one clock from command
// to effect. After reset compression is off and the threshold is 0.
// That commands and triggers share the link follows the card's description;
// the word format and opcodes are this design's.
module cmd_decoder (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cmd_valid,
  input  logic [15:0] cmd_data,
  output logic        trig,
  output logic        compress_en,
  output logic [11:0] thresh,
  output logic        cal_fire,
  output logic [11:0] cal_delay,
  output logic [7:0]  n_bad
);
  import fec_pkg::*;

  cmd_word_t cmd;
  assign cmd = cmd_word_t'(cmd_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig        <= 1'b0;
      compress_en <= 1'b0;
      thresh      <= '0;
      cal_fire    <= 1'b0;
      cal_delay   <= '0;
      n_bad       <= '0;
    end else begin
      trig     <= 1'b0;
      cal_fire <= 1'b0;
      if (cmd_valid) begin
        case (cmd.op)
          OP_NOP:    ;
          OP_TRIG:   trig <= 1'b1;
          OP_MODE:   compress_en <= cmd.arg[0];
          OP_THRESH: thresh <= cmd.arg;
          OP_CAL: begin
            cal_fire  <= 1'b1;
            cal_delay <= cmd.arg;
          end
          default:   n_bad <= n_bad + 1'b1;
        endcase
      end
    end
  end

endmodule
