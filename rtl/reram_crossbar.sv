// reram_crossbar: behavioural model of one ReRAM crossbar with its bitline and
// wordline drivers and the sample-and-hold (S&H) stage on every bitline.
// This is an analog part; the model stands in for it in simulation.
//
// Each cell is a single-level 1T1R cell storing one weight bit (conductance
// G=0 or G=1). In a read cycle the row inputs are one bit each, so the current
// of column c is proportional to the number of rows r with in_bits[r]=1 and a
// stored 1 in cell (r,c). The model represents that current by this count
// (0..ROWS) and latches it per column when `sh_latch` is high, as the S&H
// does; the held values stay until the next latch, so the inputs may change
// while the ADC is still reading them out.
//
// Cells are written one row (wordline) at a time through the programming
// port: prog_en, prog_row and prog_data (one bit per column). Programming and
// reading are not expected in the same cycle. Timing: latched count is valid
// the cycle after sh_latch.
//
// From the paper: 128x128 size, SLC 1T1R cells, S&H on each bitline.
// Own choices: the programming port and an ideal (linear, noiseless) cell.
module reram_crossbar #(
  parameter int unsigned ROWS = 128,
  parameter int unsigned COLS = 128,
  parameter int unsigned CNT_W = $clog2(ROWS + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // programming port (one wordline at a time)
  input  logic                     prog_en,
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic [COLS-1:0]          prog_data,
  // read
  input  logic [ROWS-1:0]          in_bits,   // one input bit per row
  input  logic                     sh_latch,  // sample-and-hold strobe
  output logic [CNT_W-1:0]         sh_val [COLS]
);

  // cells stored column-major: cells[c][r]
  logic [ROWS-1:0] cells [COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < COLS; c++) cells[c][prog_row] <= prog_data[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < COLS; c++) sh_val[c] <= '0;
    end else if (sh_latch) begin
      for (int c = 0; c < COLS; c++) sh_val[c] <= CNT_W'($countones(cells[c] & in_bits));
    end
  end

endmodule
