// sme_shift_adder: the shift-and-add unit and output register of a CU.
//
// The CU produces, for every column and every input bit t, a partial sum of
// the current input bit against the column's weights. Input bits arrive LSB
// first, so the partial sum of bit t carries weight 2^t. When `valid` is high
// the unit adds (psum << t) into entry `col` of the output register; `clear`
// zeroes all entries before a new vector. After all 8+x input cycles entry c
// holds sum_r in[r] * W[r][c] for column c.
//
// Timing: one update per clock, visible on `out` the next cycle. `clear` wins
// over `valid`. From the paper: shift-and-add over input cycles into the
// output register. Own choices: width ACC_W and the per-column update port.
module sme_shift_adder #(
  parameter int unsigned COLS   = 128,
  parameter int unsigned PSUM_W = 16,
  parameter int unsigned T_W    = 4,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     valid,
  input  logic [$clog2(COLS)-1:0]  col,
  input  logic [T_W-1:0]           t,
  input  logic [PSUM_W-1:0]        psum,
  output logic [ACC_W-1:0]         out [COLS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) out[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < COLS; c++) out[c] <= '0;
    end else if (valid) begin
      out[col] <= out[col] + (ACC_W'(psum) << t);
    end
  end

endmodule
