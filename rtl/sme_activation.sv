// sme_activation: the bank's activation unit. It turns one CU's output
// register values (wide, non-negative sums) into 8-bit activations for the
// next layer, LANES values in parallel.
//
// Each lane computes y = min(x >> shift, 2^OUT_W - 1): a right shift that
// rescales the sum back to the activation range (the weights are stored as
// fractions, w = sum b_i 2^-i, so this shift also undoes the fixed-point
// scale), followed by saturation. With the unsigned weights and inputs of
// this design this is a clamped linear (ReLU-with-ceiling) activation; a
// plain ReLU would change nothing here. Combinational.
// From the paper: the unit is only named. The function, the per-layer shift
// and the saturation are this design's own choices.
module sme_activation #(
  parameter int unsigned LANES = 128,
  parameter int unsigned IN_W  = 32,
  parameter int unsigned OUT_W = 8
) (
  input  logic [IN_W-1:0]  x [LANES],
  input  logic [4:0]       shift,
  output logic [OUT_W-1:0] y [LANES]
);

  localparam logic [IN_W-1:0] YMAX = IN_W'((1 << OUT_W) - 1);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic [IN_W-1:0] s;
      s = x[l] >> shift;
      y[l] = (s > YMAX) ? YMAX[OUT_W-1:0] : s[OUT_W-1:0];
    end
  end

endmodule
