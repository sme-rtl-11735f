// tb_sme_bank: end-to-end test of one SME bank at its default size
// (8 CUs x 8 crossbars of 128x128, 16 KB buffer).
//
// The testbench does the offline part of SME itself:
//   1. quantisation: every weight is an 8-bit codeword whose '1' bits lie in
//      a window of at most S = 3 consecutive positions;
//   2. bit slicing: bit i of every weight goes to crossbar i of its CU;
//   3. squeeze-out by x = 3: rows holding any weight with a '1' in the top
//      three bit positions are shifted three positions towards the LSB
//      crossbars (their codewords end by bit 5, so nothing is lost), their
//      RCMR bit is set, and crossbars 1..3 end up empty and are released.
// It then runs, through the instruction port:
//   - layer A: squeeze-out on (x = 3, Shift_EN = 1), crossbars 1..3 off:
//     vector 0 to words 16..23 with pooling off, vector 1 to the same words
//     with pooling on (max pooling of the two);
//   - layer B: Shift_EN = 0 (squeeze-out off) with all crossbars on: vector
//     2 to words 32..39, computed with the squeezed weights as stored.
// Results are read back through the host port and compared with a
// reference computed from the ORIGINAL (unsqueezed) weights for layer A, so
// the test shows that squeeze-out leaves the products unchanged. The VMM
// latency is checked against 2 + (8+x)*129 + 2 + 16 clocks. Every mechanism
// (squeezed rows, released crossbars, activation saturation, pooling
// keeping the old value, squeeze-out switched on and off) is counted and
// must occur at least once.
module tb_sme_bank;
  import sme_pkg::*;
  localparam int ROWS = 128, COLS = 128, NXB = 8, NCU = 8, X = 3, ACT_SH = 10;

  logic clk = 0, rst_n = 0;
  logic instr_valid, instr_ready, busy, done;
  instr_t instr;
  logic host_we, host_re;
  logic [6:0] host_waddr, host_raddr;
  logic [1023:0] host_wdata, host_rdata;
  logic prog_en;
  logic [2:0] prog_cu, prog_xb;
  logic [6:0] prog_row;
  logic [127:0] prog_data;

  sme_bank dut (.*);

  logic [7:0]  w_orig [NCU][ROWS][COLS];   // quantised weights
  logic [7:0]  w_map  [NCU][ROWS][COLS];   // after squeeze-out (as stored)
  logic [ROWS-1:0] sq_row [NCU];           // RCMR contents
  logic [7:0]  vin [3][ROWS];
  int checks = 0, failures = 0;
  int n_sq_rows = 0, n_released = 0, n_sat = 0, n_pool_keep = 0, n_sq_on = 0, n_sq_off = 0;

  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // codeword with its '1's inside a window of 3 starting at bit position k
  // (k = 1 is the MSB, weight 2^-1); k = 0 gives a zero weight
  function automatic logic [7:0] apt_word(int kmin, int kmax);
    logic [7:0] w;
    int k;
    w = '0;
    if ($urandom % 4 == 0) return w;
    k = kmin + int'($urandom % (kmax - kmin + 1));
    w[8-k] = 1'b1;
    for (int j = k + 1; j <= k + 2 && j <= 8; j++) w[8-j] = 1'($urandom);
    return w;
  endfunction

  task automatic host_write(input int a, input logic [1023:0] d);
    @(negedge clk); host_we = 1; host_waddr = 7'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  task automatic host_read(input int a, output logic [1023:0] d);
    @(negedge clk); host_re = 1; host_raddr = 7'(a);
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask

  task automatic run(input instr_t i, output int clocks);
    @(negedge clk);
    check(instr_ready, "bank ready");
    instr = i; instr_valid = 1;
    @(posedge clk); #1 instr_valid = 0; instr = '0;
    clocks = 1;
    while (!done) begin @(posedge clk); #1 clocks++; end
    clocks--;
  endtask

  task automatic vmm(input int src, input int dst, output int clocks);
    instr_t i = '0;
    i.op = OP_VMM; i.src = 7'(src); i.dst = 7'(dst);
    if (dut.shift_en && dut.sq_bits != 0) n_sq_on++; else n_sq_off++;
    for (int k = 0; k < NCU; k++) begin
      if (dut.shift_en) n_sq_rows += $countones(sq_row[k]);
    end
    n_released += NCU * NXB - $countones(dut.xb_en);
    run(i, clocks);
  endtask

  task automatic cfg(input int x, input bit sen, input logic [63:0] en, input bit pool);
    instr_t i = '0;
    int c;
    i.op = OP_CFG; i.sq_bits = 2'(x); i.shift_en = sen; i.xb_en = en;
    i.act_shift = 5'(ACT_SH); i.pool_en = pool;
    @(negedge clk); instr = i; instr_valid = 1;
    @(negedge clk); instr_valid = 0; instr = '0;
  endtask

  // reference activation of output c of CU k for input vector v
  function automatic int ref_act(int v, int k, int c, bit orig);
    longint y;
    y = 0;
    for (int r = 0; r < ROWS; r++)
      y += longint'(vin[v][r]) * longint'(orig ? w_orig[k][r][c] : w_map[k][r][c]);
    y = y >> ACT_SH;
    return (y > 255) ? 255 : int'(y);
  endfunction

  initial begin
    logic [1023:0] word;
    int clocks, a0, a1, e, got;
    instr_valid = 0; instr = '0; host_we = 0; host_re = 0; host_waddr = '0; host_raddr = '0;
    host_wdata = '0; prog_en = 0; prog_cu = '0; prog_xb = '0; prog_row = '0; prog_data = '0;

    // ---- offline mapping: quantise, slice, squeeze --------------------------
    for (int k = 0; k < NCU; k++)
      for (int r = 0; r < ROWS; r++) begin
        sq_row[k][r] = ($urandom % 4) == 0;
        for (int c = 0; c < COLS; c++) begin
          w_orig[k][r][c] = sq_row[k][r] ? apt_word(1, 3) : apt_word(4, 8);
          w_map[k][r][c]  = sq_row[k][r] ? (w_orig[k][r][c] >> X) : w_orig[k][r][c];
        end
      end
    foreach (vin[v, r]) vin[v][r] = 8'($urandom);

    repeat (3) @(posedge clk); rst_n = 1;

    // ---- program the crossbars ----------------------------------------------
    for (int k = 0; k < NCU; k++)
      for (int i = 0; i < NXB; i++)
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk);
          prog_en = 1; prog_cu = 3'(k); prog_xb = 3'(i); prog_row = 7'(r);
          for (int c = 0; c < COLS; c++) prog_data[c] = w_map[k][r][c][7-i];
        end
    @(negedge clk); prog_en = 0;

    // ---- load the buffer: three input vectors and the RCMR word -------------
    for (int v = 0; v < 3; v++) begin
      for (int r = 0; r < ROWS; r++) word[8*r +: 8] = vin[v][r];
      host_write(v, word);
    end
    for (int k = 0; k < NCU; k++) word[128*k +: 128] = sq_row[k];
    host_write(3, word);

    // ---- layer A: squeeze-out by 3, crossbars 1..3 released ------------------
    begin
      instr_t i = '0;
      i.op = OP_RCMR; i.src = 7'd3;
      run(i, clocks);
      check(clocks == 2, $sformatf("RCMR latency %0d", clocks));
    end
    cfg(X, 1, {NCU{8'hF8}}, 0);
    vmm(0, 16, clocks);
    check(clocks == 2 + (8 + X) * 129 + 2 + 16, $sformatf("VMM latency %0d", clocks));
    cfg(X, 1, {NCU{8'hF8}}, 1);
    vmm(1, 16, clocks);
    for (int k = 0; k < NCU; k++) begin
      host_read(16 + k, word);
      for (int c = 0; c < COLS; c++) begin
        a0 = ref_act(0, k, c, 1); a1 = ref_act(1, k, c, 1);
        if (a0 == 255 || a1 == 255) n_sat++;
        if (a0 > a1) n_pool_keep++;
        e = (a0 > a1) ? a0 : a1;
        got = int'(word[8*c +: 8]);
        check(got == e, $sformatf("layer A cu %0d col %0d: got %0d exp %0d", k, c, got, e));
      end
    end

    // ---- layer B: squeeze-out off, all crossbars on -------------------------
    cfg(X, 0, '1, 0);
    vmm(2, 32, clocks);
    check(clocks == 2 + 8 * 129 + 2 + 16, $sformatf("VMM latency (no squeeze) %0d", clocks));
    for (int k = 0; k < NCU; k++) begin
      host_read(32 + k, word);
      for (int c = 0; c < COLS; c++) begin
        e = ref_act(2, k, c, 0);
        got = int'(word[8*c +: 8]);
        check(got == e, $sformatf("layer B cu %0d col %0d: got %0d exp %0d", k, c, got, e));
      end
    end

    $display("mechanisms: squeezed rows %0d, released crossbars %0d, saturated %0d, pool kept old %0d, squeeze on %0d, off %0d",
             n_sq_rows, n_released, n_sat, n_pool_keep, n_sq_on, n_sq_off);
    check(n_sq_rows > 0, "squeezed rows never used");
    check(n_released > 0, "no crossbar released");
    check(n_sat > 0, "activation never saturated");
    check(n_pool_keep > 0, "pooling never kept the stored value");
    check(n_sq_on > 0 && n_sq_off > 0, "squeeze-out mode never switched");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
