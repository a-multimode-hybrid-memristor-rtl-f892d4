// pcsa: behavioural model of a precharge sense amplifier with XNOR.
//
// Behavioural model (not synthesizable logic): on the chip this is a full
// custom circuit at the foot of each complementary column. It compares the
// conductances seen through the two bit lines of the selected cell, g_bl (left
// device) and g_blb (right device). While se is low it precharges and both
// outputs are high. On the rising edge of se it resolves: the stored bit is 1
// when the left device conducts more. An input bit xnor_in reverses the two
// branches, so q = stored_bit XNOR xnor_in and qb = ~q; xnor_in = 1 gives a
// plain read. q and qb hold until se falls again. When the two conductances
// differ by less than G_OFFSET the latch resolves at random, which is how a
// closed resistance window shows up as bit errors.
//
// The paper gives the sense amplifier type, its place at each column and the
// XNOR logic-in-memory feature; the offset model is this design's own.
module pcsa #(
  parameter real G_OFFSET = 1.0e-6
) (
  input  logic se,
  input  real  g_bl,
  input  real  g_blb,
  input  logic xnor_in,
  output logic q,
  output logic qb
);

  logic bit_v;

  initial begin
    q  = 1'b1;
    qb = 1'b1;
  end

  always @(se) begin
    if (se) begin
      if ((g_bl - g_blb > G_OFFSET) || (g_blb - g_bl > G_OFFSET))
        bit_v = (g_bl > g_blb);
      else
        bit_v = 1'($urandom_range(1, 0));
      q  <= ~(bit_v ^ xnor_in);
      qb <= bit_v ^ xnor_in;
    end else begin
      q  <= 1'b1;
      qb <= 1'b1;
    end
  end

endmodule
