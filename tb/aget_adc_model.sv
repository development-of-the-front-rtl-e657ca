// aget_adc_model: behavioural model (not synthesizable logic) of four AGET
// chips read out through four pipelined 12-bit ADCs.
//
// While sca_read is high the model walks its own copy of the AGET read
// order, one step per clock: RESET_TCK reset-level slots, then NCH channel
// slots, for each of NCOL columns. Each slot's analog level is taken from
// tb_pattern_pkg::sample_val for the current event number and appears on
// adc_data ADC_LAT clocks later, as a pipelined ADC would return it. A
// rising edge of sca_read restarts the walk at column 0; the event number
// advances after the last slot of the last column. Reset slots give
// RESET_LEVEL, which the read-out must discard.
module aget_adc_model #(
  parameter int unsigned NCHIP     = 4,
  parameter int unsigned NCH       = 64,
  parameter int unsigned NCOL      = 512,
  parameter int unsigned RESET_TCK = 4,
  parameter int unsigned ADC_LAT   = 7
) (
  input  logic        clk,
  input  logic        sca_read,
  output logic [11:0] adc_data [NCHIP]
);
  logic [11:0] pipe [ADC_LAT][NCHIP];
  int phase = 0;
  int col   = 0;
  int evt   = 0;
  logic read_q = 1'b0;

  initial begin
    for (int i = 0; i < int'(ADC_LAT); i++)
      for (int c = 0; c < int'(NCHIP); c++) pipe[i][c] = '0;
  end

  always @(posedge clk) begin
    logic [11:0] v [NCHIP];
    int ph, cl;
    // a rising edge of sca_read starts a fresh read phase
    ph = (sca_read && !read_q) ? 0 : phase;
    cl = (sca_read && !read_q) ? 0 : col;
    read_q <= sca_read;
    for (int c = 0; c < int'(NCHIP); c++) begin
      if (sca_read && ph >= int'(RESET_TCK))
        v[c] = tb_pattern_pkg::sample_val(evt, c, ph - int'(RESET_TCK), cl);
      else
        v[c] = 12'(tb_pattern_pkg::RESET_LEVEL);
    end
    if (sca_read) begin
      if (ph == int'(RESET_TCK + NCH) - 1) begin
        phase <= 0;
        col   <= (cl == int'(NCOL) - 1) ? 0 : cl + 1;
        if (cl == int'(NCOL) - 1) evt <= evt + 1;
      end else begin
        phase <= ph + 1;
        col   <= cl;
      end
    end
    pipe[0] <= v;
    for (int i = 1; i < int'(ADC_LAT); i++) pipe[i] <= pipe[i-1];
  end

  assign adc_data = pipe[ADC_LAT-1];

endmodule
