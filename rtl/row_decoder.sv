// row_decoder: word-line decoder of the digital mode.
//
// Turns a binary row address into a one-hot word-line select. When en is low
// (no operation, or the chip in analog mode) every word line is deselected.
// Purely combinational; its outputs feed one level shifter per word line.
// The paper names the row decoder and its purpose; the plain one-hot decode
// with an enable is this design's own.
module row_decoder #(
  parameter int unsigned ROWS = mm_pkg::DEF_ROWS,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] wl_sel
);

  always_comb begin
    wl_sel = '0;
    for (int unsigned r = 0; r < ROWS; r++)
      if (en && (addr == AW'(r))) wl_sel[r] = 1'b1;
  end

endmodule
