// tb_sme_shift_adder: self-checking test of the shift-and-add unit and
// output register. Random partial sums for random columns and bit indices
// are added into a reference array as psum * 2^t; clear must empty all
// entries and take priority over an update.
module tb_sme_shift_adder;
  localparam int COLS = 128, PSUM_W = 16, T_W = 4, ACC_W = 32;
  logic clk = 0, rst_n = 0, clear = 0, valid = 0;
  logic [6:0] col;
  logic [T_W-1:0] t;
  logic [PSUM_W-1:0] psum;
  logic [ACC_W-1:0] out [COLS];
  longint ref_v [COLS];
  int checks = 0, failures = 0;

  sme_shift_adder #(.COLS(COLS), .PSUM_W(PSUM_W), .T_W(T_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic compare();
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (longint'(out[c]) != (ref_v[c] & 64'hFFFF_FFFF)) begin
        failures++;
        if (failures < 10) $display("col %0d got %0d exp %0d", c, out[c], ref_v[c]);
      end
    end
  endtask

  initial begin
    col = '0; t = '0; psum = '0;
    foreach (ref_v[c]) ref_v[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 5; round++) begin
      @(negedge clk); clear = 1; valid = 1; col = 0; psum = 16'hFFFF;
      foreach (ref_v[c]) ref_v[c] = 0;
      @(negedge clk); clear = 0;
      compare();
      for (int k = 0; k < 3000; k++) begin
        valid = ($urandom % 3) != 0;
        col = 7'($urandom); t = T_W'($urandom % 11); psum = 16'($urandom % 32641);
        if (valid) ref_v[col] += longint'(psum) << t;
        @(negedge clk);
      end
      valid = 0;
      compare();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
