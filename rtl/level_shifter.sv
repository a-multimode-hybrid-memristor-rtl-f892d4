// level_shifter: behavioural model of a high-voltage level shifter.
//
// Behavioural model (not synthesizable logic): on the chip this is a full
// custom thick-oxide circuit, one per word line, bit line and source line,
// that turns a digital-nominal select into a line voltage high enough to form
// and program memristors. The model outputs vddh when in is high and 0 V when
// it is low, after a propagation delay of T_PD time units. vddh is the
// externally supplied high-voltage rail of the line type (word-line, bit-line
// or source-line rail), so the forming and programming voltages are set by
// the measurement setup. The function follows the paper; the delay and the
// one-rail-per-line-type arrangement are this design's own.
module level_shifter #(
  parameter int unsigned T_PD = 0
) (
  input  logic in,
  input  real  vddh,
  output real  out
);

  always @(in or vddh) begin
    if (T_PD != 0) #(T_PD);
    out = in ? vddh : 0.0;
  end

endmodule
