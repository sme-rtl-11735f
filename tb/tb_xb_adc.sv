// tb_xb_adc: self-checking test of the MUX + ADC model. Random held values,
// random column selections; checks the one-clock latency, code_valid and
// the code. A second instance with a 6-bit ADC checks clipping.
module tb_xb_adc;
  localparam int COLS = 128, CNT_W = 8;
  logic clk = 0, rst_n = 0, sample = 0;
  logic [CNT_W-1:0] sh_val [COLS];
  logic [6:0] col;
  logic [7:0] code;
  logic [5:0] code6;
  logic code_valid, code_valid6;
  int checks = 0, failures = 0;

  xb_adc #(.COLS(COLS), .CNT_W(CNT_W), .ADC_BITS(8)) dut (.*);
  xb_adc #(.COLS(COLS), .CNT_W(CNT_W), .ADC_BITS(6)) dut6 (
    .clk, .rst_n, .sh_val, .sample, .col, .code(code6), .code_valid(code_valid6));

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    col = '0;
    foreach (sh_val[c]) sh_val[c] = CNT_W'($urandom % 129);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      int exp_v, exp6;
      logic smp;
      @(negedge clk);
      smp = ($urandom % 4) != 0;
      sample = smp; col = 7'($urandom);
      exp_v = int'(sh_val[col]);
      exp6  = exp_v > 63 ? 63 : exp_v;
      @(negedge clk);
      sample = 0;
      checks++;
      if (code_valid !== smp || code_valid6 !== smp) begin failures++; $display("valid wrong"); end
      if (smp) begin
        checks++;
        if (int'(code) != exp_v || int'(code6) != exp6) begin
          failures++;
          if (failures < 10) $display("code %0d/%0d exp %0d/%0d", code, code6, exp_v, exp6);
        end
      end
      if (it % 100 == 0) foreach (sh_val[c]) sh_val[c] = CNT_W'($urandom % 129);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
