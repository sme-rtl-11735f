// xb_adc: behavioural model of the analog multiplexer and the ADC that one
// crossbar shares among its 128 sample-and-hold outputs. This is an analog
// part; the model stands in for it in simulation.
//
// When `sample` is high the MUX selects held value `col` and the ADC converts
// it; the code appears on `code` one clock later together with `code_valid`.
// The conversion is ideal: the held count is returned as is and clipped to the
// largest code if it does not fit in ADC_BITS.
//
// From the paper: one ADC per crossbar fed through a MUX, 128 samplings per
// crossbar cycle. Own choices: 8-bit resolution (enough for a count of 0..128
// from single-bit inputs and cells), one conversion per clock, ideal transfer.
module xb_adc #(
  parameter int unsigned COLS     = 128,
  parameter int unsigned CNT_W    = 8,
  parameter int unsigned ADC_BITS = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [CNT_W-1:0]         sh_val [COLS],
  input  logic                     sample,
  input  logic [$clog2(COLS)-1:0]  col,
  output logic [ADC_BITS-1:0]      code,
  output logic                     code_valid
);

  localparam int unsigned MAXC = (1 << ADC_BITS) - 1;

  logic [CNT_W-1:0] sel;
  assign sel = sh_val[col];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code       <= '0;
      code_valid <= 1'b0;
    end else begin
      code_valid <= sample;
      if (sample) code <= (32'(sel) > MAXC) ? ADC_BITS'(MAXC) : ADC_BITS'(sel);
    end
  end

endmodule
