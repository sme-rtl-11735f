// sme_pkg: types and constants shared by the SME bank.
//
// SME computes a neural-network vector-matrix product on ReRAM crossbars in
// which every bit position of an 8-bit weight lives in its own crossbar
// ("inter-crossbar bit slicing"). A crossbar group of 8 crossbars forms one
// in-situ computation unit (CU) and 8 CUs form a bank. The numbers below are
// the defaults of one bank: 128x128 crossbars, 8 crossbars per CU, 8 CUs per
// bank, 8-bit inputs, a 16 KB activation buffer, and a squeeze-out depth of up
// to 3 bits (the largest depth evaluated). ADC resolution, accumulator width
// and the instruction format are this design's own choices.
package sme_pkg;

  // ---- sizes (defaults) --------------------------------------------------
  localparam int unsigned XB_ROWS   = 128;  // crossbar rows (wordlines)
  localparam int unsigned XB_COLS   = 128;  // crossbar columns (bitlines)
  localparam int unsigned N_XB      = 8;    // crossbars per CU = weight bits Nq
  localparam int unsigned N_CU      = 8;    // CUs per bank
  localparam int unsigned IN_BITS   = 8;    // activation width
  localparam int unsigned X_MAX     = 3;    // deepest squeeze-out supported
  localparam int unsigned ADC_BITS  = 8;    // covers a column count 0..128
  localparam int unsigned ACC_W     = 32;   // output register width
  localparam int unsigned BUF_BYTES = 16384;// eDRAM buffer per bank

  // ---- instruction set ----------------------------------------------------
  typedef enum logic [1:0] {
    OP_NOP  = 2'd0,   // does nothing
    OP_CFG  = 2'd1,   // load the layer configuration
    OP_RCMR = 2'd2,   // load every CU's RCMR from one buffer word
    OP_VMM  = 2'd3    // one vector-matrix product with write-back
  } opcode_e;

  // One instruction. Fields that an opcode does not use are ignored.
  typedef struct packed {
    opcode_e     op;
    logic [6:0]  src;        // buffer word of the input vector / RCMR word
    logic [6:0]  dst;        // first buffer word of the N_CU result words
    logic [1:0]  sq_bits;    // squeeze-out depth x (OP_CFG)
    logic        shift_en;   // Shift_EN: squeeze-out on for this layer
    logic [4:0]  act_shift;  // activation scale: right shift
    logic        pool_en;    // max-pool with the word already at dst
    logic [N_CU*N_XB-1:0] xb_en;   // crossbar index: bit 8*cu+i-1 enables XB i of CU cu
  } instr_t;

  // Control bundle that the controller broadcasts to every CU each clock.
  localparam int unsigned COL_W = $clog2(XB_COLS);
  localparam int unsigned T_W   = $clog2(IN_BITS + X_MAX);
  typedef struct packed {
    logic             in_load;   // capture extended inputs into the input register
    logic             in_shift;  // advance to the next input bit
    logic             sh_latch;  // crossbar read cycle: S&H latches bitline values
    logic             sample;    // ADC converts column `col`
    logic [COL_W-1:0] col;       // column being sampled
    logic [T_W-1:0]   t;         // index of the input bit being processed
    logic             out_clear; // clear the output register
  } cu_ctrl_t;

endpackage
