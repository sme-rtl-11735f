// tb_sme_workloads: runs the bank, at its default size, through the mapping
// configurations over which SME is evaluated, one after the other on the
// same bank:
//   squeeze-out by x = 1, 2 and 3 bits with a '1' window of S = 3;
//   x = 2 with a window of S = 4;
//   5-bit weights (mixed precision) with S = 2 and squeeze-out off.
// For each configuration the testbench quantises random weights with the
// window restriction, bit-slices them, squeezes the rows that use the top x
// bit positions, derives the crossbar index (a crossbar is enabled only if it
// holds a '1'), programs all 64 crossbars, and runs two input vectors. The
// results are compared with a reference computed from the unsqueezed
// weights; the activation shift is chosen so that no result saturates, so
// every output is checked at full precision. Also checked: the latency
// 2 + (8+x)*129 + 2 + 16 clocks, and that every configuration releases at least
// one crossbar.
module tb_sme_workloads;
  import sme_pkg::*;
  localparam int ROWS = 128, COLS = 128, NXB = 8, NCU = 8;

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

  logic [7:0] w_orig [NCU][ROWS][COLS];
  logic [7:0] w_map  [NCU][ROWS][COLS];
  logic [ROWS-1:0] sq_row [NCU];
  logic [63:0] xb_index;
  logic [7:0] vin [2][ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  initial begin
    repeat (120000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // codeword whose '1's lie in a window of s positions starting at position
  // k in [kmin, kmax] (position 1 = MSB) and never below position nbits
  function automatic logic [7:0] word_in_window(int kmin, int kmax, int s, int nbits);
    logic [7:0] w;
    int k;
    w = '0;
    if (kmax < kmin || $urandom % 4 == 0) return w;
    k = kmin + int'($urandom % (kmax - kmin + 1));
    w[8-k] = 1'b1;
    for (int j = k + 1; j <= k + s - 1 && j <= nbits; j++) w[8-j] = 1'($urandom);
    return w;
  endfunction

  task automatic run(input instr_t i, output int clocks);
    @(negedge clk);
    instr = i; instr_valid = 1;
    @(posedge clk); #1 instr_valid = 0; instr = '0;
    clocks = 1;
    while (!done) begin @(posedge clk); #1 clocks++; end
    clocks--;
  endtask

  task automatic host_write(input int a, input logic [1023:0] d);
    @(negedge clk); host_we = 1; host_waddr = 7'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask

  task automatic host_read(input int a, output logic [1023:0] d);
    @(negedge clk); host_re = 1; host_raddr = 7'(a);
    @(negedge clk); host_re = 0; d = host_rdata;
  endtask

  function automatic longint ref_y(int v, int k, int c);
    longint y;
    y = 0;
    for (int r = 0; r < ROWS; r++) y += longint'(vin[v][r]) * longint'(w_orig[k][r][c]);
    return y;
  endfunction

  task automatic workload(input int x, input int s, input int nbits);
    logic [1023:0] word;
    instr_t i;
    int clocks, sh, released;
    longint ymax;
    // ---- offline mapping ----
    for (int k = 0; k < NCU; k++)
      for (int r = 0; r < ROWS; r++) begin
        sq_row[k][r] = (x > 0) && ($urandom % 4 == 0);
        for (int c = 0; c < COLS; c++) begin
          if (sq_row[k][r]) w_orig[k][r][c] = word_in_window(1, (x < 9 - x - s) ? x : 9 - x - s, s, nbits);
          else              w_orig[k][r][c] = word_in_window(x + 1, nbits, s, nbits);
          w_map[k][r][c] = sq_row[k][r] ? (w_orig[k][r][c] >> x) : w_orig[k][r][c];
        end
      end
    xb_index = '0;
    for (int k = 0; k < NCU; k++)
      for (int b = 0; b < NXB; b++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            if (w_map[k][r][c][7-b]) xb_index[8*k + b] = 1'b1;
    released = NCU * NXB - $countones(xb_index);
    foreach (vin[v, r]) vin[v][r] = 8'($urandom);
    ymax = 0;
    for (int v = 0; v < 2; v++)
      for (int k = 0; k < NCU; k++)
        for (int c = 0; c < COLS; c++) if (ref_y(v, k, c) > ymax) ymax = ref_y(v, k, c);
    sh = 0;
    while ((ymax >> sh) > 255) sh++;

    // ---- program and load ----
    for (int k = 0; k < NCU; k++)
      for (int b = 0; b < NXB; b++)
        for (int r = 0; r < ROWS; r++) begin
          @(negedge clk);
          prog_en = 1; prog_cu = 3'(k); prog_xb = 3'(b); prog_row = 7'(r);
          for (int c = 0; c < COLS; c++) prog_data[c] = w_map[k][r][c][7-b];
        end
    @(negedge clk); prog_en = 0;
    for (int v = 0; v < 2; v++) begin
      for (int r = 0; r < ROWS; r++) word[8*r +: 8] = vin[v][r];
      host_write(v, word);
    end
    for (int k = 0; k < NCU; k++) word[128*k +: 128] = sq_row[k];
    host_write(2, word);

    // ---- run ----
    i = '0; i.op = OP_RCMR; i.src = 7'd2;
    run(i, clocks);
    i = '0; i.op = OP_CFG; i.sq_bits = 2'(x); i.shift_en = (x > 0); i.xb_en = xb_index;
    i.act_shift = 5'(sh); i.pool_en = 1'b0;
    run_cfg(i);
    for (int v = 0; v < 2; v++) begin
      i = '0; i.op = OP_VMM; i.src = 7'(v); i.dst = 7'(16 + 8 * v);
      run(i, clocks);
      check(clocks == 2 + (8 + x) * 129 + 18, $sformatf("x=%0d latency %0d", x, clocks));
    end
    for (int v = 0; v < 2; v++)
      for (int k = 0; k < NCU; k++) begin
        host_read(16 + 8 * v + k, word);
        for (int c = 0; c < COLS; c++) begin
          int e, got;
          e = int'(ref_y(v, k, c) >> sh);
          got = int'(word[8*c +: 8]);
          check(got == e, $sformatf("x=%0d S=%0d n=%0d v%0d cu%0d col%0d: got %0d exp %0d",
                                    x, s, nbits, v, k, c, got, e));
        end
      end
    check(released > 0, $sformatf("x=%0d S=%0d n=%0d released no crossbar", x, s, nbits));
    $display("workload x=%0d S=%0d bits=%0d: squeezed rows %0d, crossbars released %0d of 64, act shift %0d",
             x, s, nbits, $countones({sq_row[0], sq_row[1], sq_row[2], sq_row[3], sq_row[4], sq_row[5], sq_row[6], sq_row[7]}),
             released, sh);
  endtask

  task automatic run_cfg(input instr_t i);
    @(negedge clk); instr = i; instr_valid = 1;
    @(negedge clk); instr_valid = 0; instr = '0;
  endtask

  initial begin
    instr_valid = 0; instr = '0; host_we = 0; host_re = 0; host_waddr = '0; host_raddr = '0;
    host_wdata = '0; prog_en = 0; prog_cu = '0; prog_xb = '0; prog_row = '0; prog_data = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    workload(1, 3, 8);
    workload(2, 3, 8);
    workload(3, 3, 8);
    workload(2, 4, 8);
    workload(0, 2, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
