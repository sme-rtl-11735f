// tb_sme_shift_accumulator: self-checking test of the shifters and the
// accumulator. For random ADC codes and crossbar enables the sum must equal
// sum_i code_i * 2^(8-i) over the enabled crossbars i = 1..8.
module tb_sme_shift_accumulator;
  localparam int N_XB = 8, ADC_BITS = 8;
  logic [ADC_BITS-1:0] code [N_XB];
  logic [N_XB-1:0] xb_en;
  logic [ADC_BITS+N_XB-1:0] sum;
  int checks = 0, failures = 0;

  sme_shift_accumulator #(.N_XB(N_XB), .ADC_BITS(ADC_BITS)) dut (.*);

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      int exp_v;
      exp_v = 0;
      foreach (code[i]) code[i] = ADC_BITS'($urandom % 129);
      xb_en = (it < 8) ? N_XB'(1 << it) : N_XB'($urandom);
      if (it == 8) xb_en = '1;
      for (int i = 1; i <= N_XB; i++)
        if (xb_en[i-1]) exp_v += int'(code[i-1]) * (2 ** (N_XB - i));
      #1;
      checks++;
      if (int'(sum) != exp_v) begin
        failures++;
        if (failures < 10) $display("en %b: got %0d exp %0d", xb_en, sum, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
