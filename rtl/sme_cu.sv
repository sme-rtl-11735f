// sme_cu: one in-situ computation unit (CU), the crossbar group of SME.
//
// The CU holds N_XB crossbars; crossbar i stores bit i (weight 2^-i) of the
// same ROWS x COLS block of 8-bit weights, so a weight is spread over the
// same cell of all crossbars of the group (inter-crossbar bit slicing).
// Work for one input vector, under control of the bank controller:
//   1. in_load: the extended (8+x)-bit inputs enter the input register and
//      out_clear empties the output register.
//   2. For each input bit t (LSB first): sh_latch makes every crossbar
//      compute its bitline values from the current input bits and hold them;
//      then COLS samples, one per clock: all N_XB ADCs convert column `col`
//      in parallel, the shifters scale crossbar i by 2^-i, the accumulator
//      adds them and the shift-adder adds the result, shifted by t, into the
//      output register entry of that column. in_shift on the last sample
//      moves to the next input bit.
// Released crossbars (xb_en bit 0) are not read and add nothing.
//
// Timing: a sample issued in clock k reaches the output register at the end
// of clock k+2 (ADC register, then shift-adder register).
// From the paper: 8 crossbars per CU, one ADC per crossbar behind a MUX over
// 128 S&H outputs, shifters ">>1" .. ">>8", accumulator, shift-and-add, output
// register. Own choices: the weight programming port (prog_*), the control
// bundle and the pipeline registers.
module sme_cu
  import sme_pkg::*;
#(
  parameter int unsigned ROWS     = XB_ROWS,
  parameter int unsigned COLS     = XB_COLS,
  parameter int unsigned NXB      = N_XB,
  parameter int unsigned W_IN     = IN_BITS + X_MAX,
  parameter int unsigned ADC_W    = ADC_BITS,
  parameter int unsigned OUT_W    = ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  cu_ctrl_t                 ctrl,
  input  logic [NXB-1:0]           xb_en,
  input  logic [W_IN-1:0]          in_data [ROWS],
  // weight programming: one wordline of one crossbar per clock
  input  logic                     prog_en,
  input  logic [$clog2(NXB)-1:0]   prog_xb,     // 0 = crossbar 1 (MSB)
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic [COLS-1:0]          prog_data,
  output logic [OUT_W-1:0]         out [COLS]
);

  localparam int unsigned CNT_W  = $clog2(ROWS + 1);
  localparam int unsigned PSUM_W = ADC_W + NXB;

  logic [ROWS-1:0]   row_bits;
  logic [CNT_W-1:0]  sh_val [NXB][COLS];
  logic [ADC_W-1:0]  code   [NXB];
  logic [NXB-1:0]    code_valid;
  logic [PSUM_W-1:0] psum;
  logic [$clog2(COLS)-1:0] col_d;
  logic [T_W-1:0]          t_d;

  sme_input_reg #(.ROWS(ROWS), .W(W_IN)) u_in (
    .clk, .rst_n, .load(ctrl.in_load), .in_data, .shift(ctrl.in_shift), .row_bits
  );

  for (genvar i = 0; i < NXB; i++) begin : g_xb
    reram_crossbar #(.ROWS(ROWS), .COLS(COLS)) u_xb (
      .clk, .rst_n,
      .prog_en  (prog_en && (prog_xb == ($clog2(NXB))'(i))),
      .prog_row, .prog_data,
      .in_bits  (row_bits),
      .sh_latch (ctrl.sh_latch && xb_en[i]),
      .sh_val   (sh_val[i])
    );
    xb_adc #(.COLS(COLS), .CNT_W(CNT_W), .ADC_BITS(ADC_W)) u_adc (
      .clk, .rst_n,
      .sh_val    (sh_val[i]),
      .sample    (ctrl.sample && xb_en[i]),
      .col       (ctrl.col[$clog2(COLS)-1:0]),
      .code      (code[i]),
      .code_valid(code_valid[i])
    );
  end

  logic sample_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sample_d <= 1'b0;
      col_d    <= '0;
      t_d      <= '0;
    end else begin
      sample_d <= ctrl.sample;
      col_d    <= ctrl.col[$clog2(COLS)-1:0];
      t_d      <= ctrl.t;
    end
  end

  // every enabled crossbar's ADC delivers a code exactly when a sample is due
  a_adc_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    code_valid == (sample_d ? xb_en : '0));

  sme_shift_accumulator #(.N_XB(NXB), .ADC_BITS(ADC_W), .SUM_W(PSUM_W)) u_acc (
    .code, .xb_en, .sum(psum)
  );

  sme_shift_adder #(.COLS(COLS), .PSUM_W(PSUM_W), .T_W(T_W), .ACC_W(OUT_W)) u_sa (
    .clk, .rst_n, .clear(ctrl.out_clear), .valid(sample_d),
    .col(col_d), .t(t_d), .psum, .out
  );

endmodule
