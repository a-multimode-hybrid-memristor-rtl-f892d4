// analog_config_sr: configuration shift register for the analog mode.
//
// Holds a two-bit line_sel_e code for each of LINES array lines (ground, pad
// A or pad B), which sets the analog multiplexer of that line. Bits enter at
// sin while shift is high, one per clock, and leave at sout so that chains
// can be cascaded or read back. The register is 2*LINES bits long; after
// 2*LINES shifts the first bit shifted in sits in bit 0 of line 0, so the
// host shifts line 0 first, least significant bit first. The outputs follow
// the register directly; the lines only see them in the analog mode, so the
// register is loaded while the digital mode is active or the pads are at 0 V.
// Reset sets every line to ground.
//
// The paper states that shift registers configure the input multiplexers and
// that each line goes to ground or one of two analog pads; the code, the bit
// order, the absence of a shadow latch and the use of the system clock are
// this design's own.
module analog_config_sr
  import mm_pkg::*;
#(
  parameter int unsigned LINES = mm_pkg::DEF_ROWS
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      shift,
  input  logic      sin,
  output logic      sout,
  output line_sel_e sel [LINES]
);

  logic [2*LINES-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     sr <= '0;
    else if (shift) sr <= {sin, sr[2*LINES-1:1]};
  end

  assign sout = sr[0];

  always_comb
    for (int unsigned i = 0; i < LINES; i++)
      sel[i] = line_sel_e'(sr[2*i +: 2]);

endmodule
