// tb_sme_edram_buffer: self-checking test of the activation buffer at its
// full 16 KB size. Fills every word with random data, reads all back with
// the one-clock latency, then mixes reads and writes including same-address
// read/write (old data expected).
module tb_sme_edram_buffer;
  localparam int WORD_W = 1024, DEPTH = 128;
  logic clk = 0, re = 0, we = 0;
  logic [6:0] raddr, waddr;
  logic [WORD_W-1:0] rdata, wdata;
  logic [WORD_W-1:0] img [DEPTH];
  int checks = 0, failures = 0;

  sme_edram_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [WORD_W-1:0] rnd();
    logic [WORD_W-1:0] v;
    for (int w = 0; w < WORD_W / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    raddr = '0; waddr = '0; wdata = '0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wdata = rnd(); img[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      re = 1; raddr = 7'(a); @(negedge clk); re = 0;
      checks++;
      if (rdata !== img[a]) begin failures++; $display("word %0d wrong", a); end
    end
    for (int k = 0; k < 2000; k++) begin
      logic [6:0] ra;
      logic [WORD_W-1:0] exp_v;
      ra = 7'($urandom); re = 1; raddr = ra; exp_v = img[ra];
      we = ($urandom % 2) == 1; waddr = ($urandom % 4 == 0) ? ra : 7'($urandom); wdata = rnd();
      if (we) img[waddr] = wdata;
      @(negedge clk); re = 0; we = 0;
      checks++;
      if (rdata !== exp_v) begin failures++; if (failures < 10) $display("read %0d wrong", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
