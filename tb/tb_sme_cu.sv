// tb_sme_cu: self-checking test of one in-situ computation unit at full size
// (8 crossbars of 128x128). Random 8-bit weights are bit-sliced into the
// 8 crossbars (crossbar 1 = MSB), random 11-bit inputs are loaded, and the
// testbench sequences the CU as the controller does: load, then 11 input
// cycles of one S&H latch and 128 column samples. Each output must equal
// sum_r in[r] * W[r][c], with the bits of released crossbars removed from W.
// Also checks that the last sample reaches the output register exactly two
// clocks after it is issued.
module tb_sme_cu;
  import sme_pkg::*;
  localparam int ROWS = 128, COLS = 128, NXB = 8, W_IN = 11;
  logic clk = 0, rst_n = 0;
  cu_ctrl_t ctrl;
  logic [NXB-1:0] xb_en;
  logic [W_IN-1:0] in_data [ROWS];
  logic [W_IN-1:0] in_copy [ROWS];
  logic prog_en;
  logic [2:0] prog_xb;
  logic [6:0] prog_row;
  logic [COLS-1:0] prog_data;
  logic [31:0] out [COLS];
  logic [7:0] wt [ROWS][COLS];
  int checks = 0, failures = 0;

  sme_cu dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic longint expect_col(int c);
    longint s;
    logic [7:0] m;
    s = 0;
    for (int i = 0; i < NXB; i++) m[7-i] = xb_en[i];
    for (int r = 0; r < ROWS; r++) s += longint'(in_copy[r]) * longint'(wt[r][c] & m);
    return s;
  endfunction

  initial begin
    ctrl = '0; prog_en = 0; prog_xb = '0; prog_row = '0; prog_data = '0; xb_en = '1;
    foreach (in_data[r]) in_data[r] = '0;
    foreach (wt[r, c]) wt[r][c] = 8'($urandom);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NXB; i++)
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        prog_en = 1; prog_xb = 3'(i); prog_row = 7'(r);
        for (int c = 0; c < COLS; c++) prog_data[c] = wt[r][c][7-i];
      end
    @(negedge clk); prog_en = 0;

    for (int v = 0; v < 3; v++) begin
      xb_en = (v == 0) ? 8'hFF : (v == 1) ? 8'h1F : 8'($urandom);
      foreach (in_data[r]) begin in_data[r] = W_IN'($urandom); in_copy[r] = in_data[r]; end
      ctrl = '0; ctrl.in_load = 1; ctrl.out_clear = 1;
      @(negedge clk); ctrl = '0;
      foreach (in_data[r]) in_data[r] = '0;      // the register must hold what it loaded
      for (int t = 0; t < W_IN; t++) begin
        ctrl = '0; ctrl.sh_latch = 1; ctrl.t = 4'(t);
        @(negedge clk);
        for (int c = 0; c < COLS; c++) begin
          ctrl = '0; ctrl.sample = 1; ctrl.col = 7'(c); ctrl.t = 4'(t);
          ctrl.in_shift = (c == COLS - 1);
          @(negedge clk);
        end
        ctrl = '0;
      end
      // one clock after the last sample: column 127 still lacks its last term
      if (v == 0) begin
        checks++;
        if (longint'(out[COLS-1]) == expect_col(COLS-1)) begin
          failures++; $display("last column complete one clock early");
        end
      end
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (longint'(out[c]) != expect_col(c)) begin
          failures++;
          if (failures < 10) $display("v %0d col %0d: got %0d exp %0d", v, c, out[c], expect_col(c));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
