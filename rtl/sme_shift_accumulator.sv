// sme_shift_accumulator: the per-crossbar shifters (">>1" .. ">>8") and the
// accumulator of a CU.
//
// Crossbar i of a group (i = 1..N_XB) stores bit b_i of every weight, and a
// weight is w = sum_i b_i * 2^-i. The ADC code of crossbar i therefore has to
// be scaled by 2^-i before the codes of the group are added. With N_XB
// fractional bits kept, ">>i" is a left shift by N_XB-i of the integer code,
// and the sum equals the column's dot product of the current input bits with
// the integer weights W = sum_i b_i * 2^(N_XB-i). Crossbars whose xb_en bit
// is 0 are released (left empty by bit slicing or squeeze-out) and add
// nothing.
//
// Purely combinational: sum follows the codes in the same cycle.
// From the paper: one shifter per crossbar, shift by the crossbar's bit
// position, one accumulator. Own choices: fixed-point scaling and the enable
// mask that stands for the crossbar index.
module sme_shift_accumulator #(
  parameter int unsigned N_XB     = 8,
  parameter int unsigned ADC_BITS = 8,
  parameter int unsigned SUM_W    = ADC_BITS + N_XB
) (
  input  logic [ADC_BITS-1:0] code [N_XB],  // code[i-1] from crossbar i
  input  logic [N_XB-1:0]     xb_en,        // xb_en[i-1] enables crossbar i
  output logic [SUM_W-1:0]    sum
);

  always_comb begin
    sum = '0;
    for (int i = 1; i <= N_XB; i++) begin
      if (xb_en[i-1]) sum = sum + (SUM_W'(code[i-1]) << (N_XB - i));
    end
  end

endmodule
