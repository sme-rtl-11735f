// tb_sme_input_reg: self-checking test of the bit-serial input register.
// Loads random 11-bit values and checks that after t shifts row_bits shows
// bit t of every value (LSB first), and that load has priority.
module tb_sme_input_reg;
  localparam int ROWS = 128, W = 11;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  logic [W-1:0] in_data [ROWS];
  logic [W-1:0] ref_v [ROWS];
  logic [ROWS-1:0] row_bits;
  int checks = 0, failures = 0;

  sme_input_reg #(.ROWS(ROWS), .W(W)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (in_data[r]) in_data[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 50; it++) begin
      @(negedge clk);
      foreach (in_data[r]) begin in_data[r] = W'($urandom); ref_v[r] = in_data[r]; end
      load = 1; shift = (it % 2);   // load must win over shift
      @(negedge clk); load = 0; shift = 0;
      for (int t = 0; t < W; t++) begin
        for (int r = 0; r < ROWS; r++) begin
          checks++;
          if (row_bits[r] !== ref_v[r][t]) begin
            failures++;
            if (failures < 10) $display("it %0d t %0d row %0d wrong", it, t, r);
          end
        end
        shift = 1; @(negedge clk); shift = 0;
      end
      checks++;
      if (row_bits !== '0) begin failures++; $display("register not empty after %0d shifts", W); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
