// tb_sme_controller: self-checking test of the bank controller. Issues
// OP_CFG, OP_RCMR and OP_VMM instructions for several squeeze-out settings
// and checks, against counts worked out from the instruction, the number of
// input cycles (8+x, or 8 when Shift_EN is off), the S&H latches, the column
// sample order, the buffer reads and write-back addresses, the configuration
// outputs and the total latency 2 + (8+x)*129 + 2 + 2*8 clocks.
module tb_sme_controller;
  import sme_pkg::*;
  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, busy, done;
  instr_t instr;
  cu_ctrl_t cu_ctrl;
  logic [63:0] xb_en;
  logic shift_en, rcmr_load, buf_re, buf_we, pool_en;
  logic [1:0] sq_bits;
  logic [6:0] buf_raddr, buf_waddr;
  logic [2:0] wb_cu;
  logic [4:0] act_shift;
  int checks = 0, failures = 0;

  sme_controller dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (30000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic issue(input instr_t i);
    @(negedge clk);
    check(instr_ready, "ready in idle");
    instr = i; instr_valid = 1;
    @(negedge clk);
    instr_valid = 0; instr = '0;
  endtask

  task automatic cfg(input int x, input bit sen, input logic [63:0] en);
    instr_t i = '0;
    i.op = OP_CFG; i.sq_bits = 2'(x); i.shift_en = sen; i.act_shift = 5'd13;
    i.pool_en = 1'b1; i.xb_en = en;
    issue(i);
    check(sq_bits == 2'(x) && shift_en == sen && xb_en == en && act_shift == 5'd13 && pool_en,
          "configuration latched");
  endtask

  task automatic vmm(input int src, input int dst, input int ncyc);
    instr_t i = '0;
    int clocks = 0, latches = 0, samples = 0, shifts = 0, loads = 0, reads = 0, writes = 0;
    int exp_col = 0, exp_t = 0;
    bit order_ok = 1, wb_ok = 1, read_ok = 1;
    i.op = OP_VMM; i.src = 7'(src); i.dst = 7'(dst);
    @(negedge clk);
    instr = i; instr_valid = 1;
    @(posedge clk);
    #1 instr_valid = 0;
    while (!done) begin
      if (cu_ctrl.sh_latch) latches++;
      if (cu_ctrl.in_load) loads++;
      if (cu_ctrl.in_shift) shifts++;
      if (cu_ctrl.sample) begin
        if (int'(cu_ctrl.col) != exp_col || int'(cu_ctrl.t) != exp_t) order_ok = 0;
        samples++;
        exp_col++;
        if (exp_col == 128) begin exp_col = 0; exp_t++; end
      end
      if (buf_re) begin
        if (reads == 0 && int'(buf_raddr) != src) read_ok = 0;
        if (reads > 0 && int'(buf_raddr) != dst + reads - 1) read_ok = 0;
        reads++;
      end
      if (buf_we) begin
        if (int'(buf_waddr) != dst + writes || int'(wb_cu) != writes) wb_ok = 0;
        writes++;
      end
      clocks++;
      @(posedge clk); #1;
    end
    check(latches == ncyc, $sformatf("latches %0d exp %0d", latches, ncyc));
    check(shifts == ncyc, "one input shift per input cycle");
    check(samples == 128 * ncyc, $sformatf("samples %0d", samples));
    check(loads == 1, "one input load");
    check(order_ok, "column/bit order");
    check(reads == 9 && read_ok, $sformatf("buffer reads %0d", reads));
    check(writes == 8 && wb_ok, $sformatf("write-backs %0d", writes));
    check(clocks == 2 + ncyc * 129 + 2 + 16,
          $sformatf("latency %0d exp %0d", clocks, 2 + ncyc * 129 + 2 + 16));
  endtask

  initial begin
    instr_valid = 0; instr = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    check(!busy && instr_ready, "idle after reset");
    // RCMR load
    begin
      instr_t i = '0; bit seen_rd = 0, seen_ld = 0;
      i.op = OP_RCMR; i.src = 7'd9;
      @(negedge clk); instr = i; instr_valid = 1;
      @(negedge clk); instr_valid = 0;
      seen_rd = buf_re && buf_raddr == 7'd9;
      @(negedge clk);
      seen_ld = rcmr_load;
      @(posedge clk); #1;
      check(seen_rd && seen_ld && done, "RCMR read then load then done");
    end
    cfg(3, 1, 64'hFEFE_FEFE_F0F0_F0F0);
    vmm(3, 20, 11);
    cfg(1, 1, '1);
    vmm(100, 40, 9);
    cfg(3, 0, '1);           // squeeze-out off for this layer: 8 cycles
    vmm(5, 0, 8);
    cfg(0, 1, '1);
    vmm(6, 8, 8);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
