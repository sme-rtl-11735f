// tb_sme_activation: self-checking test of the activation unit: each lane
// must give min(x / 2^shift, 255) for random wide values and shifts,
// including values that saturate.
module tb_sme_activation;
  localparam int LANES = 128;
  logic [31:0] x [LANES];
  logic [4:0] shift;
  logic [7:0] y [LANES];
  int checks = 0, failures = 0, sat = 0;

  sme_activation #(.LANES(LANES), .IN_W(32), .OUT_W(8)) dut (.*);

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 300; it++) begin
      shift = 5'($urandom);
      foreach (x[l]) x[l] = $urandom >> ($urandom % 32);
      #1;
      foreach (x[l]) begin
        longint q, e;
        q = longint'(x[l]) / (64'd1 << shift);
        e = q > 255 ? 255 : q;
        if (q > 255) sat++;
        checks++;
        if (longint'(y[l]) != e) begin
          failures++;
          if (failures < 10) $display("x %0d sh %0d: got %0d exp %0d", x[l], shift, y[l], e);
        end
      end
    end
    checks++;
    if (sat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
