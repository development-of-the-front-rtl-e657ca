// tb_pattern_pkg: reference waveform used by the testbenches.
//
// sample_val(evt, chip, ch, col) is the ADC code the behavioural AGET/ADC
// model produces for one SCA cell. Roughly one channel in five carries a
// triangular pulse that peaks at 250 + 1000 codes near cell 100 + ch; the
// others hold a baseline of 250 codes with up to 15 codes of ripple, so a
// suppression threshold of 400 keeps exactly the pulsed channels.
package tb_pattern_pkg;

  localparam int unsigned BASE        = 250;
  localparam int unsigned RESET_LEVEL = 4000;
  localparam int unsigned THRESH      = 400;

  function automatic bit is_hit(int evt, int chip, int ch);
    return ((ch + 3 * chip + evt) % 5) == 0;
  endfunction

  function automatic logic [11:0] sample_val(int evt, int chip, int ch, int col);
    int d, v;
    if (is_hit(evt, chip, ch)) begin
      d = col - (100 + ch);
      if (d < 0) d = -d;
      v = 1000 - 8 * d;
      if (v < 0) v = 0;
      return 12'(BASE + v);
    end
    return 12'(BASE + ((col * 7 + ch * 13 + chip * 3 + evt) % 16));
  endfunction

  function automatic logic [11:0] peak_val(int evt, int chip, int ch, int ncol);
    logic [11:0] m;
    m = 0;
    for (int c = 0; c < ncol; c++) if (sample_val(evt, chip, ch, c) > m) m = sample_val(evt, chip, ch, c);
    return m;
  endfunction

endpackage
