// sme_bank: one SME bank, the top of this design.
//
// A bank holds the controller, NCU in-situ computation units (CUs), one
// buffer connection (RCMR + shifter) per CU, the eDRAM activation buffer and
// the shared activation and pooling units. Each CU is one crossbar group of
// NXB bit-sliced 128x128 crossbars, i.e. one 128x128 block of 8-bit weights.
// An OP_VMM instruction reads one 128-element input vector from the buffer,
// broadcasts it through each CU's connection (which applies that CU's
// squeeze-out row mask) into the CU's input register, runs all CUs in
// lock-step for 8+x bit-serial input cycles of 1+128 clocks each, and writes
// the NCU*128 results, activated and optionally max-pooled, back to NCU
// consecutive buffer words.
//
// Host side (stands in for the bank IO bus, whose protocol is not given):
//   - instruction port: instr_valid / instr_ready / instr, busy, done;
//   - buffer port: host_we/host_waddr/host_wdata and host_re/host_raddr ->
//     host_rdata one clock later; only to be used while busy is low;
//   - weight programming port: prog_en, prog_cu, prog_xb (0 = MSB crossbar),
//     prog_row, prog_data writes one wordline of one crossbar per clock.
// Buffer word layout: 8-bit element r at bits [8r+7:8r]. The RCMR word read
// by OP_RCMR has the row mask of CU cu at bits [128cu+127:128cu].
// From the paper: bank = controller + CUs + shared blocks (activation,
// pooling, eDRAM buffer), 8 CUs per bank, 8 crossbars per CU, 16 KB buffer
// per bank, buffer connection between buffer and input registers. Own
// choices: the host ports, the instruction set, broadcasting one input
// vector to all CUs, one connection per CU and point-to-point wiring in
// place of the shared bus.
module sme_bank
  import sme_pkg::*;
#(
  parameter int unsigned ROWS  = XB_ROWS,
  parameter int unsigned COLS  = XB_COLS,
  parameter int unsigned NXB   = N_XB,
  parameter int unsigned NCU   = N_CU,
  parameter int unsigned NIN   = IN_BITS,
  parameter int unsigned XMAX  = X_MAX,
  parameter int unsigned BYTES = BUF_BYTES,
  parameter int unsigned WORD_W = ROWS * NIN,
  parameter int unsigned AW    = $clog2(BYTES * 8 / WORD_W)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // instructions
  input  logic                     instr_valid,
  output logic                     instr_ready,
  input  instr_t                   instr,
  output logic                     busy,
  output logic                     done,
  // host access to the buffer
  input  logic                     host_we,
  input  logic [AW-1:0]            host_waddr,
  input  logic [WORD_W-1:0]        host_wdata,
  input  logic                     host_re,
  input  logic [AW-1:0]            host_raddr,
  output logic [WORD_W-1:0]        host_rdata,
  // weight programming
  input  logic                     prog_en,
  input  logic [$clog2(NCU)-1:0]   prog_cu,
  input  logic [$clog2(NXB)-1:0]   prog_xb,
  input  logic [$clog2(ROWS)-1:0]  prog_row,
  input  logic [COLS-1:0]          prog_data
);

  localparam int unsigned W_IN = NIN + XMAX;

  cu_ctrl_t                  cu_ctrl;
  logic [NCU*NXB-1:0]        xb_en;
  logic                      shift_en, rcmr_load;
  logic [1:0]                sq_bits;
  logic                      c_re, c_we;
  logic [AW-1:0]             c_raddr, c_waddr;
  logic [$clog2(NCU)-1:0]    wb_cu;
  logic [4:0]                act_shift;
  logic                      pool_en;
  logic [WORD_W-1:0]         buf_rdata, buf_wdata;

  sme_controller #(.NCU(NCU), .NXB(NXB), .COLS(COLS), .NIN(NIN), .XMAX(XMAX), .AW(AW))
  u_ctrl (
    .clk, .rst_n, .instr_valid, .instr_ready, .instr, .busy, .done,
    .cu_ctrl, .xb_en, .shift_en, .sq_bits, .rcmr_load,
    .buf_re(c_re), .buf_raddr(c_raddr), .buf_we(c_we), .buf_waddr(c_waddr),
    .wb_cu, .act_shift, .pool_en
  );

  // ---- buffer, owned by the controller while busy -------------------------
  sme_edram_buffer #(.BYTES(BYTES), .WORD_W(WORD_W)) u_buf (
    .clk,
    .re   (busy ? c_re    : host_re),
    .raddr(busy ? c_raddr : host_raddr),
    .rdata(buf_rdata),
    .we   (busy ? c_we    : host_we),
    .waddr(busy ? c_waddr : host_waddr),
    .wdata(busy ? buf_wdata : host_wdata)
  );
  assign host_rdata = buf_rdata;

  // unpack the buffer word into 8-bit elements
  logic [NIN-1:0] vec_in [ROWS];
  always_comb for (int r = 0; r < ROWS; r++) vec_in[r] = buf_rdata[r*NIN +: NIN];

  // ---- CUs with their buffer connections ---------------------------------
  logic [ACC_W-1:0] cu_out [NCU][COLS];

  for (genvar k = 0; k < NCU; k++) begin : g_cu
    logic [W_IN-1:0] ext_in [ROWS];
    logic [ROWS-1:0] rcmr;

    sme_connection #(.ROWS(ROWS), .IN_BITS(NIN), .X_MAX(XMAX)) u_conn (
      .clk, .rst_n,
      .rcmr_load (rcmr_load),
      .rcmr_wdata(buf_rdata[(k*ROWS) % WORD_W +: ROWS]),
      .shift_en, .sq_bits($clog2(XMAX+1)'(sq_bits)),
      .in_data(vec_in), .out_data(ext_in), .rcmr
    );

    sme_cu #(.ROWS(ROWS), .COLS(COLS), .NXB(NXB), .W_IN(W_IN), .OUT_W(ACC_W)) u_cu (
      .clk, .rst_n, .ctrl(cu_ctrl), .xb_en(xb_en[k*NXB +: NXB]), .in_data(ext_in),
      .prog_en  (prog_en && (prog_cu == ($clog2(NCU))'(k))),
      .prog_xb, .prog_row, .prog_data,
      .out(cu_out[k])
    );
  end

  // ---- shared activation and pooling units -------------------------------
  logic [NIN-1:0] act_v [COLS];
  logic [NIN-1:0] old_v [COLS];
  logic [NIN-1:0] pool_v [COLS];

  sme_activation #(.LANES(COLS), .IN_W(ACC_W), .OUT_W(NIN)) u_act (
    .x(cu_out[wb_cu]), .shift(act_shift), .y(act_v)
  );

  always_comb for (int c = 0; c < COLS; c++) old_v[c] = buf_rdata[(c*NIN) % WORD_W +: NIN];

  sme_pooling #(.LANES(COLS), .W(NIN)) u_pool (
    .pool_en, .new_v(act_v), .old_v, .y(pool_v)
  );

  always_comb begin
    buf_wdata = '0;
    for (int c = 0; c < COLS; c++) buf_wdata[(c*NIN) % WORD_W +: NIN] = pool_v[c];
  end

  // The host may not use the buffer while an instruction runs.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(host_we || host_re));

endmodule
