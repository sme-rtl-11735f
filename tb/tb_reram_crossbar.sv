// tb_reram_crossbar: self-checking test of the crossbar model. Programs a
// random bit pattern row by row, applies random row input bits, latches and
// compares every column value with a count of the rows whose input bit and
// stored bit are both 1. Also checks that the held values do not follow the
// inputs until the next latch.
module tb_reram_crossbar;
  localparam int ROWS = 128, COLS = 128, CNT_W = 8;
  logic clk = 0, rst_n = 0, prog_en = 0, sh_latch = 0;
  logic [6:0] prog_row;
  logic [COLS-1:0] prog_data;
  logic [ROWS-1:0] in_bits;
  logic [CNT_W-1:0] sh_val [COLS];
  logic [COLS-1:0] img [ROWS];
  int checks = 0, failures = 0;

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check_all();
    for (int c = 0; c < COLS; c++) begin
      int n;
      n = 0;
      for (int r = 0; r < ROWS; r++) if (in_bits[r] && img[r][c]) n++;
      checks++;
      if (int'(sh_val[c]) != n) begin
        failures++;
        if (failures < 10) $display("col %0d: got %0d exp %0d", c, sh_val[c], n);
      end
    end
  endtask

  initial begin
    prog_row = '0; prog_data = '0; in_bits = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pass = 0; pass < 3; pass++) begin
      for (int r = 0; r < ROWS; r++) begin
        @(negedge clk);
        prog_en = 1; prog_row = 7'(r);
        for (int w = 0; w < COLS / 32; w++) prog_data[w*32 +: 32] = $urandom;
        if (pass == 2) prog_data = '1;    // full array: count reaches ROWS
        img[r] = prog_data;
      end
      @(negedge clk); prog_en = 0;
      for (int it = 0; it < 20; it++) begin
        for (int w = 0; w < ROWS / 32; w++) in_bits[w*32 +: 32] = $urandom;
        if (it == 0) in_bits = '1;
        sh_latch = 1; @(negedge clk); sh_latch = 0;
        check_all();
        in_bits = ~in_bits;          // must not disturb the held values
        @(negedge clk);
        in_bits = ~in_bits;
        check_all();
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
