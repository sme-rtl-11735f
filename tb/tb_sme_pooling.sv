// tb_sme_pooling: self-checking test of the pooling unit: with pooling off
// the new value passes, with pooling on each lane keeps the larger of the new
// and the stored value.
module tb_sme_pooling;
  localparam int LANES = 128;
  logic pool_en;
  logic [7:0] new_v [LANES], old_v [LANES], y [LANES];
  int checks = 0, failures = 0;

  sme_pooling #(.LANES(LANES), .W(8)) dut (.*);

  initial begin
    #1000000;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      pool_en = it[0];
      foreach (new_v[l]) begin new_v[l] = 8'($urandom); old_v[l] = 8'($urandom); end
      #1;
      foreach (y[l]) begin
        int e;
        e = (pool_en && old_v[l] > new_v[l]) ? int'(old_v[l]) : int'(new_v[l]);
        checks++;
        if (int'(y[l]) != e) begin
          failures++;
          if (failures < 10) $display("lane %0d pool %0d: got %0d exp %0d", l, pool_en, y[l], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
