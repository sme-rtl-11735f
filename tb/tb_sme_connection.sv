// tb_sme_connection: self-checking test of the buffer connection (RCMR and
// input shifter). Random input vectors, RCMR masks, squeeze depths and
// Shift_EN values; each output row is compared with a reference that
// multiplies the input by 2^x for squeezed rows and leaves it unchanged for
// the others.
module tb_sme_connection;
  localparam int ROWS = 128, IN_BITS = 8, X_MAX = 3;
  logic clk = 0, rst_n = 0;
  logic rcmr_load, shift_en;
  logic [ROWS-1:0] rcmr_wdata, rcmr;
  logic [1:0] sq_bits;
  logic [IN_BITS-1:0] in_data [ROWS];
  logic [IN_BITS+X_MAX-1:0] out_data [ROWS];
  int checks = 0, failures = 0;

  sme_connection #(.ROWS(ROWS), .IN_BITS(IN_BITS), .X_MAX(X_MAX)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rcmr_load = 0; shift_en = 0; sq_bits = 0; rcmr_wdata = '0;
    foreach (in_data[r]) in_data[r] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      rcmr_load = 1;
      for (int w = 0; w < ROWS / 32; w++) rcmr_wdata[w*32 +: 32] = $urandom;
      @(negedge clk); rcmr_load = 0;
      shift_en = ($urandom % 4) != 0;
      sq_bits  = 2'($urandom % 4);
      foreach (in_data[r]) in_data[r] = 8'($urandom);
      #1;
      checks++;
      if (rcmr !== rcmr_wdata) begin failures++; $display("RCMR mismatch"); end
      for (int r = 0; r < ROWS; r++) begin
        int exp_v;
        exp_v = (rcmr_wdata[r] && shift_en) ? int'(in_data[r]) * (1 << sq_bits) : int'(in_data[r]);
        checks++;
        if (int'(out_data[r]) != exp_v) begin
          failures++;
          if (failures < 10) $display("row %0d: got %0d exp %0d", r, out_data[r], exp_v);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
