// sme_connection: the buffer connection between the eDRAM buffer and a CU's
// input register. It holds the Row Conversion Mask Register (RCMR) and the
// shifter that carry out the input side of the squeeze-out scheme.
//
// Squeeze-out moves the weight bits of a crossbar row x bit positions towards
// the LSB crossbars, which halves that row's weight x times. To keep the
// product unchanged the row's input is multiplied by 2^x. The RCMR holds one
// bit per crossbar row: 1 marks a squeezed row. For such a row, when the
// layer's Shift_EN is set, the 8-bit input is shifted left by x bits into the
// (8+x)-bit field; every other row is zero-padded above its MSB (value
// unchanged). The extended inputs go to the input register.
//
// Interface: rcmr_load writes rcmr_wdata into the RCMR (clocked). The
// conversion is combinational: out_data follows in_data, sq_bits and shift_en
// in the same cycle. Output fields are IN_BITS+X_MAX wide so any x up to
// X_MAX fits.
//
// From the paper: RCMR, the AND of the RCMR bit with Shift_EN, shift by x for
// a '1' and zero padding in front of the MSB for a '0', width 8+x.
// Own choices: the RCMR load port and fixed-width output fields.
module sme_connection #(
  parameter int unsigned ROWS    = 128,
  parameter int unsigned IN_BITS = 8,
  parameter int unsigned X_MAX   = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        rcmr_load,
  input  logic [ROWS-1:0]             rcmr_wdata,
  input  logic                        shift_en,
  input  logic [$clog2(X_MAX+1)-1:0]  sq_bits,
  input  logic [IN_BITS-1:0]          in_data  [ROWS],
  output logic [IN_BITS+X_MAX-1:0]    out_data [ROWS],
  output logic [ROWS-1:0]             rcmr
);

  localparam int unsigned OW = IN_BITS + X_MAX;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rcmr <= '0;
    else if (rcmr_load) rcmr <= rcmr_wdata;
  end

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      if (rcmr[r] && shift_en) out_data[r] = OW'(in_data[r]) << sq_bits;
      else                     out_data[r] = OW'(in_data[r]);
    end
  end

endmodule
