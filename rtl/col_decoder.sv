// col_decoder: column decoder of the digital mode.
//
// Each complementary cell column owns two device columns (left, right), and
// each device column has its own bit line and source line. The decoder turns
// the binary cell-column address into bit-line and source-line selects:
// bl_sel[2c+s] is high when column c is addressed, en is high and bl_side[s]
// is high; sl_sel likewise with sl_side. The side masks come from the
// controller and set the polarity of a pulse: bit line high for SET or
// forming, source line high for RESET. Purely combinational; its outputs feed
// one level shifter per bit line and per source line. The paper names a column
// decoder; the side masks are this design's way to reach one device of a pair.
module col_decoder #(
  parameter int unsigned COLS = mm_pkg::DEF_COLS,
  localparam int unsigned AW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic              en,
  input  logic [AW-1:0]     addr,
  input  logic [1:0]        bl_side,
  input  logic [1:0]        sl_side,
  output logic [2*COLS-1:0] bl_sel,
  output logic [2*COLS-1:0] sl_sel
);

  always_comb begin
    bl_sel = '0;
    sl_sel = '0;
    for (int unsigned c = 0; c < COLS; c++) begin
      if (en && (addr == AW'(c))) begin
        bl_sel[2*c]   = bl_side[0];
        bl_sel[2*c+1] = bl_side[1];
        sl_sel[2*c]   = sl_side[0];
        sl_sel[2*c+1] = sl_side[1];
      end
    end
  end

endmodule
