// sme_pooling: the bank's pooling unit, max pooling across vectors.
//
// A pooling window is formed by running several input vectors (positions of
// the window) through the same weights to the same destination word. The
// first is written with pooling off; every later one with pooling on, and
// the unit then keeps, lane by lane, the larger of the new activation and the
// value already stored: y = pool_en ? max(new, old) : new. Combinational.
// From the paper: the unit is only named. Max pooling done as a
// read-modify-write of the buffer word is this design's own choice.
module sme_pooling #(
  parameter int unsigned LANES = 128,
  parameter int unsigned W     = 8
) (
  input  logic         pool_en,
  input  logic [W-1:0] new_v [LANES],
  input  logic [W-1:0] old_v [LANES],
  output logic [W-1:0] y     [LANES]
);

  always_comb begin
    for (int l = 0; l < LANES; l++)
      y[l] = (pool_en && old_v[l] > new_v[l]) ? old_v[l] : new_v[l];
  end

endmodule
