// sme_edram_buffer: the bank's activation buffer (eDRAM in the original
// design, written here as a plain synchronous memory array).
//
// It holds input vectors, RCMR words and layer outputs. One word is one
// input vector of the crossbars: WORD_W = ROWS*IN_BITS = 1024 bits, 8-bit
// element r in bits [8r+7:8r]. With the 16 KB per bank of the evaluated
// configuration this gives DEPTH = 128 words.
//
// One read port and one write port. A read issued with `re` returns `rdata`
// in the next cycle; a write with `we` takes effect at the clock edge. A read
// and a write to the same word in one cycle return the old data.
// From the paper: an eDRAM buffer of 16 KB per bank for activations.
// Own choices: word width, port count, one-cycle read latency; eDRAM refresh
// is not modelled.
module sme_edram_buffer #(
  parameter int unsigned BYTES  = 16384,
  parameter int unsigned WORD_W = 1024,
  parameter int unsigned DEPTH  = BYTES * 8 / WORD_W,
  parameter int unsigned AW     = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [WORD_W-1:0] rdata,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [WORD_W-1:0] wdata
);

  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
