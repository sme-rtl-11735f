// sme_controller: the bank controller. It decodes instructions and runs the
// state machine that drives the buffer, the buffer connections and all CUs
// cycle by cycle.
//
// Instructions (sme_pkg::instr_t) are accepted with instr_valid && instr_ready;
// instr_ready is high only in IDLE.
//   OP_CFG  (1 clock) latches the layer configuration: squeeze-out depth x,
//           Shift_EN, activation shift, pooling on/off and the crossbar index
//           xb_en (which crossbars of each CU hold data).
//   OP_RCMR reads buffer word `src` and loads slice cu of it into the RCMR of
//           CU cu (rcmr_load for one clock while buf_rdata is valid).
//   OP_VMM  runs one vector-matrix product:
//           RD     read input vector `src` from the buffer
//           LOAD   inputs pass the connections into all input registers;
//                  output registers are cleared
//           then for t = 0 .. IN_BITS+x-1:
//           LATCH  one crossbar read cycle (S&H latch)
//           SAMPLE COLS clocks, column 0..COLS-1; in_shift on the last one
//           DRAIN  2 clocks for the CU pipeline to empty
//           then for cu = 0 .. NCU-1:
//           WB_RD  read the destination word dst+cu (old value for pooling)
//           WB_WR  write activation/pooling of CU cu's outputs to dst+cu
// `done` pulses for one clock when an OP_RCMR or OP_VMM finishes.
// An OP_VMM therefore takes 2 + (IN_BITS+x)*(1+COLS) + 2 + 2*NCU clocks from
// acceptance to the done pulse (1439 at x = 3 and 1052 at x = 0 with the defaults).
// From the paper: the controller decodes instructions, drives the FSMs that
// steer inputs and outputs every cycle, and decides per layer whether
// squeeze-out is used, which extends the input to 8+x bits and the number of
// input cycles to 8+x. The instruction set, the state sequence and the
// write-back order are this design's own.
module sme_controller
  import sme_pkg::*;
#(
  parameter int unsigned NCU  = N_CU,
  parameter int unsigned NXB  = N_XB,
  parameter int unsigned COLS = XB_COLS,
  parameter int unsigned NIN  = IN_BITS,
  parameter int unsigned XMAX = X_MAX,
  parameter int unsigned AW   = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   instr_valid,
  output logic                   instr_ready,
  input  instr_t                 instr,
  output logic                   busy,
  output logic                   done,
  // CU control (broadcast) and layer configuration
  output cu_ctrl_t               cu_ctrl,
  output logic [NCU*NXB-1:0]     xb_en,
  output logic                   shift_en,
  output logic [1:0]             sq_bits,
  output logic                   rcmr_load,
  // buffer
  output logic                   buf_re,
  output logic [AW-1:0]          buf_raddr,
  output logic                   buf_we,
  output logic [AW-1:0]          buf_waddr,
  // write-back path
  output logic [$clog2(NCU)-1:0] wb_cu,
  output logic [4:0]             act_shift,
  output logic                   pool_en
);

  typedef enum logic [3:0] {
    S_IDLE, S_RCMR_RD, S_RCMR_WR, S_RD, S_LOAD, S_LATCH, S_SAMPLE, S_DRAIN,
    S_WB_RD, S_WB_WR
  } state_e;

  state_e                    state;
  logic [AW-1:0]             src_q, dst_q;
  logic [$clog2(COLS)-1:0]   col_q;
  logic [T_W-1:0]            t_q;
  logic [$clog2(NCU)-1:0]    cu_q;
  logic                      drain_q;
  logic [T_W-1:0]            t_last;

  assign t_last      = T_W'(NIN - 1) + T_W'(shift_en ? sq_bits : 2'd0);
  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);
  assign wb_cu       = cu_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      src_q     <= '0;
      dst_q     <= '0;
      col_q     <= '0;
      t_q       <= '0;
      cu_q      <= '0;
      drain_q   <= 1'b0;
      xb_en     <= '1;
      shift_en  <= 1'b0;
      sq_bits   <= '0;
      act_shift <= '0;
      pool_en   <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (instr_valid) begin
          src_q <= instr.src[AW-1:0];
          dst_q <= instr.dst[AW-1:0];
          unique case (instr.op)
            OP_CFG: begin
              xb_en     <= instr.xb_en[NCU*NXB-1:0];
              shift_en  <= instr.shift_en;
              sq_bits   <= (32'(instr.sq_bits) > XMAX) ? 2'(XMAX) : instr.sq_bits;
              act_shift <= instr.act_shift;
              pool_en   <= instr.pool_en;
            end
            OP_RCMR: state <= S_RCMR_RD;
            OP_VMM:  state <= S_RD;
            default: ;
          endcase
        end
        S_RCMR_RD: state <= S_RCMR_WR;
        S_RCMR_WR: begin state <= S_IDLE; done <= 1'b1; end
        S_RD:      state <= S_LOAD;
        S_LOAD:    begin state <= S_LATCH; t_q <= '0; end
        S_LATCH:   begin state <= S_SAMPLE; col_q <= '0; end
        S_SAMPLE: begin
          col_q <= col_q + 1'b1;
          if (col_q == ($clog2(COLS))'(COLS - 1)) begin
            if (t_q == t_last) begin
              state   <= S_DRAIN;
              drain_q <= 1'b0;
            end else begin
              state <= S_LATCH;
              t_q   <= t_q + 1'b1;
            end
          end
        end
        S_DRAIN: begin
          drain_q <= 1'b1;
          if (drain_q) begin state <= S_WB_RD; cu_q <= '0; end
        end
        S_WB_RD: state <= S_WB_WR;
        S_WB_WR: begin
          cu_q <= cu_q + 1'b1;
          if (cu_q == ($clog2(NCU))'(NCU - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else state <= S_WB_RD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    cu_ctrl           = '0;
    cu_ctrl.col       = COL_W'(col_q);
    cu_ctrl.t         = t_q;
    cu_ctrl.in_load   = (state == S_LOAD);
    cu_ctrl.out_clear = (state == S_LOAD);
    cu_ctrl.sh_latch  = (state == S_LATCH);
    cu_ctrl.sample    = (state == S_SAMPLE);
    cu_ctrl.in_shift  = (state == S_SAMPLE) && (col_q == ($clog2(COLS))'(COLS - 1));
    rcmr_load         = (state == S_RCMR_WR);
    buf_re            = (state == S_RCMR_RD) || (state == S_RD) || (state == S_WB_RD);
    buf_raddr         = (state == S_WB_RD) ? dst_q + AW'(cu_q) : src_q;
    buf_we            = (state == S_WB_WR);
    buf_waddr         = dst_q + AW'(cu_q);
  end

  // An instruction is only taken in IDLE, and the squeeze depth never exceeds
  // what the input register can hold.
  a_sq_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(sq_bits) <= XMAX);
  a_one_hot_phase: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({cu_ctrl.in_load, cu_ctrl.sh_latch, cu_ctrl.sample, buf_we}));

endmodule
