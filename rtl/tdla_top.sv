// tdla_top: T-DLA, a ternary-weight convolution accelerator core for
// low-latency inference on a small FPGA.
//
// A layer is run as a list of 64-bit SIMD instructions. For a convolution,
// input pixels (TN channels per word) stream from the input buffer through
// the variable-length line buffer, which turns them into one k x k x TN
// window per clock. The ternary computation array applies the window to TM
// output channels at once with 2-bit weights (selection and negation only).
// The TM*TN*k*k products cross into a faster clock domain (clk_dsp) through
// an asynchronous FIFO, where the DSP SIMD adder trees reduce them to TM sums
// per clock; the sums come back through a second asynchronous FIFO. The
// write-back unit accumulates sums over input-channel tiles in the output
// buffer and, on the last tile, applies linear scaling, ReLU and 2x2 max
// pooling, each in one clock.
//
// Host interface (the embedded processor side):
//   imem_*  write 64-bit instructions; ibuf_* write input pixel words;
//   wbuf_*  write one output channel's ternary weights of one tile
//           (LK*LK*TN 2-bit codes, index (i*LK+j)*TN + c for window row i,
//           column j, input channel c);
//   start   pulse to run the program from address 0; busy/done/err report;
//           stall is high in a clock that waits for an adder-tree credit;
//   obuf_*  read results (TM channels of ACC_W bits, registered read, one
//           clock) while busy is low.
// Clocks: clk for everything except the adder trees, clk_dsp for the trees
// (the published build runs 125 MHz and 250 MHz). rst_n is asynchronous,
// shared by both domains, and must be released synchronously to both.
//
// Defaults are the published configuration <TN, TM, LK, LD, Dw> =
// <4, 16, 5, 32, 12>, with 8-bit activations. Buffer depths, ACC_W,
// WTILES and CREDITS are this design's choices.
module tdla_top
  import tdla_pkg::*;
#(
  parameter int TN         = 4,
  parameter int TM         = 16,
  parameter int LK         = 5,
  parameter int LD         = 32,
  parameter int DW         = 12,
  parameter int ACT_W      = 8,
  parameter int ACC_W      = 24,
  parameter int IBUF_DEPTH = 4096,
  parameter int OBUF_DEPTH = 4096,
  parameter int IMEM_DEPTH = 256,
  parameter int WTILES     = 16,
  parameter int CREDITS    = 16,
  localparam int P      = LK * LK,
  localparam int N      = TN * P,
  localparam int IAW    = $clog2(IBUF_DEPTH),
  localparam int OAW    = $clog2(OBUF_DEPTH),
  localparam int MAW    = $clog2(IMEM_DEPTH),
  localparam int WAW    = $clog2(WTILES),
  localparam int MW     = $clog2(TM),
  localparam int FIFO_AW = $clog2(CREDITS)
) (
  input  logic                               clk,
  input  logic                               clk_dsp,
  input  logic                               rst_n,
  input  logic                               start,
  output logic                               busy,
  output logic                               done,
  output logic                               err,
  output logic                               stall,
  input  logic                               imem_we,
  input  logic [MAW-1:0]                     imem_addr,
  input  logic [63:0]                        imem_wdata,
  input  logic                               ibuf_we,
  input  logic [IAW-1:0]                     ibuf_addr,
  input  logic [TN-1:0][ACT_W-1:0]           ibuf_wdata,
  input  logic                               wbuf_we,
  input  logic [WAW-1:0]                     wbuf_tile,
  input  logic [MW-1:0]                      wbuf_m,
  input  logic [P-1:0][TN-1:0][1:0]          wbuf_wdata,
  input  logic [OAW-1:0]                     obuf_raddr,
  output logic [TM-1:0][ACC_W-1:0]           obuf_rdata
);
  localparam int KW  = $clog2(LK + 1);
  localparam int DWD = $clog2(LD + 1);
  localparam int XW  = $clog2(LD);

  typedef logic [P-1:0][TN-1:0][1:0] wrow_t;

  // ---------------- controller ----------------
  logic [MAW-1:0] imem_raddr;
  logic [63:0]    imem_rdata;
  logic [IAW-1:0] ibuf_raddr;
  logic [TN-1:0][ACT_W-1:0] ibuf_rdata;
  logic           lb_cfg_we, lb_push, win_valid, w_load, wb_start;
  logic [KW-1:0]  lb_cfg_k;
  logic [DWD-1:0] lb_cfg_d, wb_ow;
  logic [WAW-1:0] w_tile;
  logic [OAW-1:0] wb_da;
  logic           wb_first, wb_last, wb_relu, wb_pool, retire, wb_busy;
  logic [7:0]     q_mult;
  logic [4:0]     q_shift;

  tdla_controller #(
    .IMEM_AW(MAW), .IBUF_AW(IAW), .OBUF_AW(OAW), .LK(LK), .LD(LD),
    .CREDITS(CREDITS), .WT_AW(WAW)
  ) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .err,
    .imem_raddr, .imem_rdata, .ibuf_raddr,
    .lb_cfg_we, .lb_cfg_k, .lb_cfg_d, .lb_push, .win_valid,
    .w_load, .w_tile,
    .wb_start, .wb_da, .wb_ow, .wb_first, .wb_last, .wb_relu, .wb_pool,
    .q_mult, .q_shift, .retire, .wb_busy, .stall
  );

  // ---------------- memories ----------------
  tdla_sdp_ram #(.DEPTH(IMEM_DEPTH), .WIDTH(64)) u_imem (
    .clk, .we(imem_we), .waddr(imem_addr), .wdata(imem_wdata),
    .raddr(imem_raddr), .rdata(imem_rdata)
  );

  tdla_sdp_ram #(.DEPTH(IBUF_DEPTH), .WIDTH(TN*ACT_W)) u_ibuf (
    .clk, .we(ibuf_we), .waddr(ibuf_addr), .wdata(ibuf_wdata),
    .raddr(ibuf_raddr), .rdata(ibuf_rdata)
  );

  // Weight buffer: WTILES tiles of TM output-channel rows; the selected tile
  // is copied into the array's weight register when a CONV starts.
  wrow_t wmem [WTILES][TM];
  logic [TM-1:0][P-1:0][TN-1:0][1:0] w_cur;

  always_ff @(posedge clk) begin
    if (wbuf_we) wmem[wbuf_tile][wbuf_m] <= wbuf_wdata;
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w_cur <= '0;
    else if (w_load)
      for (int m = 0; m < TM; m++) w_cur[m] <= wmem[w_tile][m];
  end

  // ---------------- line buffer and ternary array ----------------
  logic [LK-1:0][LK-1:0][TN*ACT_W-1:0] win;
  logic                                arr_valid;
  logic [TM-1:0][N-1:0][DW-1:0]        prod;

  tdla_line_buffer #(.LK(LK), .LD(LD), .PW(TN*ACT_W)) u_lb (
    .clk, .rst_n, .cfg_we(lb_cfg_we), .cfg_k(lb_cfg_k), .cfg_d(lb_cfg_d),
    .push(lb_push), .pix(ibuf_rdata), .win
  );

  tdla_ternary_array #(.TN(TN), .TM(TM), .LK(LK), .ACT_W(ACT_W), .DW(DW)) u_array (
    .clk, .rst_n, .in_valid(win_valid), .win(win), .w(w_cur),
    .out_valid(arr_valid), .prod
  );

  // ---------------- adder trees in the clk_dsp domain ----------------
  logic                         fi_full, fi_empty;
  logic [TM-1:0][N-1:0][DW-1:0] fi_rdata;
  logic                         tree_valid;
  logic [TM-1:0][DW-1:0]        tree_sum;
  logic                         fo_full, fo_empty, fo_pop;
  logic [TM-1:0][DW-1:0]        fo_rdata;

  tdla_async_fifo #(.WIDTH(TM*N*DW), .AW(FIFO_AW)) u_fifo_in (
    .wclk(clk), .wrst_n(rst_n), .wr(arr_valid), .wdata(prod), .full(fi_full),
    .rclk(clk_dsp), .rrst_n(rst_n), .rd(!fi_empty), .rdata(fi_rdata), .empty(fi_empty)
  );

  tdla_adder_tree #(.TN(TN), .TM(TM), .LK(LK), .DW(DW)) u_tree (
    .clk(clk_dsp), .rst_n, .in_valid(!fi_empty), .prod(fi_rdata),
    .out_valid(tree_valid), .sum(tree_sum)
  );

  tdla_async_fifo #(.WIDTH(TM*DW), .AW(FIFO_AW)) u_fifo_out (
    .wclk(clk_dsp), .wrst_n(rst_n), .wr(tree_valid), .wdata(tree_sum), .full(fo_full),
    .rclk(clk), .rrst_n(rst_n), .rd(fo_pop), .rdata(fo_rdata), .empty(fo_empty)
  );

  // ---------------- write-back and output buffer ----------------
  logic [OAW-1:0]            wb_raddr, ob_waddr, ob_raddr;
  logic [TM-1:0][ACC_W-1:0]  ob_rdata, ob_wdata;
  logic                      ob_we;

  tdla_writeback #(
    .TM(TM), .DW(DW), .ACC_W(ACC_W), .ACT_W(ACT_W), .OBUF_DEPTH(OBUF_DEPTH), .MAXW(LD)
  ) u_wb (
    .clk, .rst_n, .start(wb_start),
    .cfg_da(wb_da), .cfg_ow((XW+1)'(wb_ow)), .cfg_first(wb_first), .cfg_last(wb_last),
    .cfg_relu(wb_relu), .cfg_pool(wb_pool), .cfg_mult(q_mult), .cfg_shift(q_shift),
    .in_valid(!fo_empty), .in_sum(fo_rdata), .in_pop(fo_pop), .retire, .busy(wb_busy),
    .ob_raddr(wb_raddr), .ob_rdata, .ob_we, .ob_waddr, .ob_wdata
  );

  assign ob_raddr   = busy ? wb_raddr : obuf_raddr;
  assign obuf_rdata = ob_rdata;

  tdla_sdp_ram #(.DEPTH(OBUF_DEPTH), .WIDTH(TM*ACC_W)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata),
    .raddr(ob_raddr), .rdata(ob_rdata)
  );

  a_fifo_in_room:  assert property (@(posedge clk) disable iff (!rst_n) !(arr_valid && fi_full));
  a_fifo_out_room: assert property (@(posedge clk_dsp) disable iff (!rst_n) !(tree_valid && fo_full));
endmodule
