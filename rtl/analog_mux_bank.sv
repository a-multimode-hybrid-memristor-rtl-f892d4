// analog_mux_bank: behavioural model of the line multiplexers of one line group.
//
// Behavioural model (not synthesizable logic): on the chip each word line, bit
// line and source line passes through thick-oxide, low-resistance
// transmission gates. In the digital mode (dig_active) the line follows its
// level shifter, dig_v. In the analog mode (ana_active) it is connected to
// ground, analog pad A or analog pad B as its configuration code sel says.
// With neither active (during a mode change) the line is left floating, which
// the model shows as 0 V. The current each line draws from the array,
// line_i, is summed into the current of the pad it is connected to, pad_i, so
// the instrument on the pad measures it. The gates are modelled as ideal
// switches. LINES lines make one bank; the top uses one bank each for word,
// bit and source lines.
//
// From the paper: the ground/pad A/pad B choice, the configuration by shift
// registers, the disconnection of the digital side in the analog mode. The
// floating state during a change of mode and the ideal gates are this
// design's own.
module analog_mux_bank
  import mm_pkg::*;
#(
  parameter int unsigned LINES = mm_pkg::DEF_ROWS
) (
  input  logic      dig_active,
  input  logic      ana_active,
  input  line_sel_e sel    [LINES],
  input  real       dig_v  [LINES],
  input  real       pad_v  [2],
  input  real       line_i [LINES],
  output real       line_v [LINES],
  output real       pad_i  [2]
);

  always_comb begin
    for (int unsigned i = 0; i < LINES; i++) begin
      if (dig_active)
        line_v[i] = dig_v[i];
      else if (ana_active && sel[i] == LINE_PAD_A)
        line_v[i] = pad_v[0];
      else if (ana_active && sel[i] == LINE_PAD_B)
        line_v[i] = pad_v[1];
      else
        line_v[i] = 0.0;
    end
  end

  always_comb begin
    pad_i[0] = 0.0;
    pad_i[1] = 0.0;
    if (ana_active) begin
      for (int unsigned i = 0; i < LINES; i++) begin
        if (sel[i] == LINE_PAD_A) pad_i[0] = pad_i[0] + line_i[i];
        if (sel[i] == LINE_PAD_B) pad_i[1] = pad_i[1] + line_i[i];
      end
    end
  end

endmodule
