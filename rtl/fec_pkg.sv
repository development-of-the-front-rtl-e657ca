// fec_pkg: constants and types shared by the front-end card (FEC) read-out logic.
//
// Sizes follow the PandaX-III prototype FEC: four 64-channel AGET chips, each
// with a 512-cell switched-capacitor array (SCA), digitised by 12-bit ADCs.
// Samples are kept as 16-bit words: 4 chips x 64 channels x 512 cells x 16 bit
// = 2,097,152 bits per event, so two buffered events take the 4.2 Mbit of RAM
// quoted for the card, and one event every 100 ms gives the quoted 21 Mbit/s.
// The upper nibble of each word is a tag (this design's own framing), which
// is how 12-bit samples fill 16-bit words.
package fec_pkg;

  localparam int unsigned NCHIP  = 4;    // AGET chips (and ADCs) per card
  localparam int unsigned NCH    = 64;   // channels per AGET
  localparam int unsigned NCOL   = 512;  // SCA cells (time samples) per channel
  localparam int unsigned ADC_W  = 12;   // ADC resolution
  localparam int unsigned WORD_W = 16;   // buffer / link word width
  localparam int unsigned NSLOT  = 2;    // events held in RAM

  // Word tags carried in bits [15:12] of every word sent to the DCM.
  typedef enum logic [3:0] {
    TAG_DATA = 4'h0,  // {TAG_DATA, sample[11:0]}
    TAG_EVT  = 4'hA,  // {TAG_EVT,  event_number[11:0]}
    TAG_CHAN = 4'hC,  // {TAG_CHAN, 4'b0000, chip[1:0], channel[5:0]}
    TAG_END  = 4'hF   // {TAG_END,  channels_sent[11:0]}
  } word_tag_e;

  // Command words received from the DCM: {opcode[3:0], argument[11:0]}.
  typedef enum logic [3:0] {
    OP_NOP    = 4'h0,
    OP_TRIG   = 4'h1,  // trigger one acquisition
    OP_MODE   = 4'h2,  // arg[0]: channel suppression (compression) on
    OP_THRESH = 4'h3,  // arg: suppression threshold in ADC codes
    OP_CAL    = 4'h4   // fire calibration pulse; arg: cycles until trigger
  } cmd_op_e;

  typedef struct packed {
    cmd_op_e     op;
    logic [11:0] arg;
  } cmd_word_t;

endpackage
