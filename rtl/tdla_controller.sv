// tdla_controller: instruction fetch, decode and convolution sequencing.
//
// The host fills the instruction memory with 64-bit words (format in
// tdla_pkg) and pulses start. The controller then fetches from address 0:
//   NOP  : skip.
//   SETQ : load the scaling multiplier (SAL) and right shift (KS).
//   CONV : one pass of a stride-1, unpadded convolution over an FS x FS map
//          held in the input buffer from address {SAM,SAL}, kernel KS x KS,
//          weight tile CC[3:0], output (FS-KS+1)^2 pixels to {DAM,DAL},
//          with the first/last/ReLU/pool flags of CC[7:4].
//   END  : stop; done goes high until the next start.
// A CONV whose KS is 0 or above LK, or whose FS is below KS or above LD, is
// skipped and sets err.
//
// During a CONV one pixel word is read from the input buffer per clock (read
// address out, data one clock later) and pushed into the line buffer, which
// was configured with k = KS and depth d = FS at decode. A pushed pixel at
// (y, x) with y, x >= k-1 completes a window; win_valid marks it two clocks
// after the read (one for the buffer read, one for the window registers).
// Flow control is by credits: a pixel that will complete a window is read
// only if a credit is free; a credit is spent at the read and returned when
// the write-back unit retires the result (retire). With CREDITS no larger than
// the depth of each asynchronous FIFO, neither FIFO can overflow. A cycle that
// waits for a credit is a stall. The CONV ends when all pixels are read, all
// credits are back and the write-back unit is idle; the next instruction is
// fetched then, so instructions never overlap.
//
// The instruction fields and their order are published; opcodes, the CC bit
// assignment, the credit scheme and the sequential execution are this
// design's choices.
module tdla_controller
  import tdla_pkg::*;
#(
  parameter int IMEM_AW = 8,
  parameter int IBUF_AW = 12,
  parameter int OBUF_AW = 12,
  parameter int LK      = 5,
  parameter int LD      = 32,
  parameter int CREDITS = 16,
  parameter int WT_AW   = 4,
  localparam int KW  = $clog2(LK + 1),
  localparam int DWD = $clog2(LD + 1),
  localparam int CW  = $clog2(CREDITS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  output logic               busy,
  output logic               done,
  output logic               err,
  // instruction memory read port
  output logic [IMEM_AW-1:0] imem_raddr,
  input  logic [63:0]        imem_rdata,
  // input buffer read port
  output logic [IBUF_AW-1:0] ibuf_raddr,
  // line buffer
  output logic               lb_cfg_we,
  output logic [KW-1:0]      lb_cfg_k,
  output logic [DWD-1:0]     lb_cfg_d,
  output logic               lb_push,
  output logic               win_valid,
  // weight tile selection
  output logic               w_load,
  output logic [WT_AW-1:0]   w_tile,
  // write-back configuration and handshake
  output logic               wb_start,
  output logic [OBUF_AW-1:0] wb_da,
  output logic [DWD-1:0]     wb_ow,
  output logic               wb_first,
  output logic               wb_last,
  output logic               wb_relu,
  output logic               wb_pool,
  output logic [7:0]         q_mult,
  output logic [4:0]         q_shift,
  input  logic               retire,
  input  logic               wb_busy,
  output logic               stall
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_DECODE, S_RUN, S_DRAIN} state_e;
  state_e state;

  logic [IMEM_AW-1:0] pc;
  inst_t              inst;
  logic [DWD-1:0]     fs;
  logic [KW-1:0]      k;
  logic [15:0]        sa;
  logic [10:0]        p, total;
  logic [DWD-1:0]     rx, ry;
  logic [CW-1:0]      credits;
  logic               rd_d1, wv_d1, wv_d2;
  logic               will_valid, rd_ok;
  logic               conv_ok;

  assign inst       = inst_t'(imem_rdata);
  assign imem_raddr = pc;
  assign busy       = (state != S_IDLE);
  assign conv_ok    = (inst.ks != 0) && (inst.ks <= 8'(LK)) &&
                      (inst.fs >= inst.ks) && (inst.fs <= 8'(LD));

  assign will_valid = (rx >= DWD'(k - 1'b1)) && (ry >= DWD'(k - 1'b1));
  assign rd_ok      = (state == S_RUN) && (p < total) && (!will_valid || credits != 0);
  assign stall      = (state == S_RUN) && (p < total) && will_valid && (credits == 0);
  assign ibuf_raddr = IBUF_AW'(sa + 16'(p));
  assign lb_push    = rd_d1;
  assign win_valid  = wv_d2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; pc <= '0; done <= 1'b0; err <= 1'b0;
      fs <= '0; k <= '0; sa <= '0; p <= '0; total <= '0; rx <= '0; ry <= '0;
      credits <= CW'(CREDITS);
      rd_d1 <= 1'b0; wv_d1 <= 1'b0; wv_d2 <= 1'b0;
      lb_cfg_we <= 1'b0; lb_cfg_k <= '0; lb_cfg_d <= '0;
      w_load <= 1'b0; w_tile <= '0;
      wb_start <= 1'b0; wb_da <= '0; wb_ow <= '0;
      wb_first <= 1'b0; wb_last <= 1'b0; wb_relu <= 1'b0; wb_pool <= 1'b0;
      q_mult <= 8'd1; q_shift <= '0;
    end else begin
      lb_cfg_we <= 1'b0;
      w_load    <= 1'b0;
      wb_start  <= 1'b0;
      rd_d1 <= rd_ok;
      wv_d1 <= rd_ok && will_valid;
      wv_d2 <= wv_d1;
      credits <= credits - CW'(rd_ok && will_valid) + CW'(retire);

      unique case (state)
        S_IDLE: if (start) begin
          pc <= '0; done <= 1'b0; err <= 1'b0;
          state <= S_FETCH;
        end
        S_FETCH: state <= S_DECODE;   // instruction memory read latency
        S_DECODE: begin
          state <= S_FETCH;
          pc    <= pc + 1'b1;
          case (inst.op)
            OP_SETQ: begin
              q_mult  <= inst.sal;
              q_shift <= inst.ks[4:0];
            end
            OP_CONV: begin
              if (conv_ok) begin
                fs  <= DWD'(inst.fs);
                k   <= KW'(inst.ks);
                sa  <= {inst.sam, inst.sal};
                p   <= '0;
                total <= 11'(inst.fs) * 11'(inst.fs);
                rx  <= '0; ry <= '0;
                lb_cfg_we <= 1'b1;
                lb_cfg_k  <= KW'(inst.ks);
                lb_cfg_d  <= DWD'(inst.fs);
                w_load    <= 1'b1;
                w_tile    <= WT_AW'(inst.cc[3:0]);
                wb_start  <= 1'b1;
                wb_da     <= OBUF_AW'({inst.dam, inst.dal});
                wb_ow     <= DWD'(inst.fs - inst.ks + 8'd1);
                wb_first  <= inst.cc[CC_FIRST];
                wb_last   <= inst.cc[CC_LAST];
                wb_relu   <= inst.cc[CC_RELU];
                wb_pool   <= inst.cc[CC_POOL];
                pc        <= pc;
                state     <= S_RUN;
              end else begin
                err <= 1'b1;
              end
            end
            OP_END: begin
              done  <= 1'b1;
              state <= S_IDLE;
            end
            default: ;
          endcase
        end
        S_RUN: begin
          if (rd_ok) begin
            p <= p + 1'b1;
            if (rx == fs - 1'b1) begin
              rx <= '0;
              ry <= ry + 1'b1;
            end else begin
              rx <= rx + 1'b1;
            end
            if (p + 1'b1 == total) state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          if (!rd_d1 && !wv_d1 && !wv_d2 && credits == CW'(CREDITS) && !wb_busy) begin
            pc    <= pc + 1'b1;
            state <= S_FETCH;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_credit_range: assert property (@(posedge clk) disable iff (!rst_n) credits <= CW'(CREDITS));
endmodule
