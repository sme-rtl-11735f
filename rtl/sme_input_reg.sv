// sme_input_reg: the input register of one CU. It feeds the crossbars the
// way ISAAC does: bit-serially, one bit of every row's input per crossbar
// cycle, least significant bit first, so a (8+x)-bit input takes 8+x cycles.
//
// `load` captures the extended inputs from the buffer connection. `shift`
// moves every row one bit towards the LSB, so row_bits always shows the bit
// of the current input cycle. Because bits are sent LSB first, an input that
// the connection shifted left by x reaches the crossbars x cycles later: this
// is the "delay the input of these rows by x clocks" of the squeeze-out
// scheme.
//
// Timing: row_bits is valid the cycle after load and changes the cycle after
// each shift. From the paper: bit-serial inputs, 8+x input cycles.
// Own choices: LSB-first order and the load/shift interface.
module sme_input_reg #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned W    = 11
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [W-1:0]    in_data [ROWS],
  input  logic            shift,
  output logic [ROWS-1:0] row_bits
);

  logic [W-1:0] q [ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) q[r] <= '0;
    end else if (load) begin
      q <= in_data;
    end else if (shift) begin
      for (int r = 0; r < ROWS; r++) q[r] <= q[r] >> 1;
    end
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) row_bits[r] = q[r][0];
  end

endmodule
