// tdla_writeback: the back end of the execution pipeline. It takes per-channel
// sums from the adder trees, accumulates them across input-channel tiles,
// and on the last tile scales, activates, pools and stores them.
//
// A layer with more than TN input channels is computed in passes, one per
// tile of TN input channels. Partial sums (ACC_W bits per output channel) are
// kept in the output buffer at the destination address: on the first pass
// the sum is taken as is, on later passes it is added to the stored value
// (read-modify-write; the read address is issued in the cycle the sum is
// popped, the data return one clock later). On a pass flagged last, the
// accumulated sums go through tdla_act_scale (one clock) and, if pooling is
// on, tdla_max_pool (one clock) instead of being stored, and the result is
// written back to the output buffer at the destination address, each channel
// sign-extended to ACC_W bits. Unpooled outputs land at da + y*ow + x; pooled
// ones at da + (y/2)*(ow/2) + x/2.
//
// Stream input: first-word-fall-through (in_valid, in_sum) from the output
// FIFO; the unit is always ready, so in_pop = in_valid. retire pulses once per
// accepted sum and returns a credit to the controller. busy is high while
// any pipeline stage holds data. Outputs arrive in raster order of the
// ow x ow output map; start resets the position counters. Where partial sums
// live and this pass-based accumulation are this design's choices: the
// publication names the adder trees, activation/scaling and pooling modules
// in that order but not how input-channel tiles are combined.
module tdla_writeback #(
  parameter int TM         = 16,
  parameter int DW         = 12,
  parameter int ACC_W      = 24,
  parameter int ACT_W      = 8,
  parameter int OBUF_DEPTH = 4096,
  parameter int MAXW       = 32,
  localparam int OAW = $clog2(OBUF_DEPTH),
  localparam int XW  = $clog2(MAXW)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [OAW-1:0]              cfg_da,
  input  logic [XW:0]                 cfg_ow,
  input  logic                        cfg_first,
  input  logic                        cfg_last,
  input  logic                        cfg_relu,
  input  logic                        cfg_pool,
  input  logic [7:0]                  cfg_mult,
  input  logic [4:0]                  cfg_shift,
  input  logic                        in_valid,
  input  logic [TM-1:0][DW-1:0]       in_sum,
  output logic                        in_pop,
  output logic                        retire,
  output logic                        busy,
  output logic [OAW-1:0]              ob_raddr,
  input  logic [TM-1:0][ACC_W-1:0]    ob_rdata,
  output logic                        ob_we,
  output logic [OAW-1:0]              ob_waddr,
  output logic [TM-1:0][ACC_W-1:0]    ob_wdata
);
  typedef logic [TM-1:0][ACC_W-1:0] acc_vec_t;
  typedef logic [TM-1:0][ACT_W-1:0] act_vec_t;

  logic [XW-1:0] x, y;
  logic          s1_valid;
  logic [TM-1:0][DW-1:0] s1_sum;
  logic [OAW-1:0] s1_addr, s2_addr;
  logic [XW-1:0]  s1_x, s1_y, s2_x, s2_y;
  acc_vec_t       acc;
  logic           as_valid;
  act_vec_t       as_out;
  logic           mp_valid;
  logic [XW-1:0]  mp_x, mp_y;
  act_vec_t       mp_out;

  assign in_pop   = in_valid;
  assign retire   = in_valid;
  assign ob_raddr = cfg_da + OAW'(y) * OAW'(cfg_ow) + OAW'(x);

  // Stage 0 -> 1: accept a sum, request the stored partial sum.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0; y <= '0;
      s1_valid <= 1'b0; s1_sum <= '0; s1_addr <= '0; s1_x <= '0; s1_y <= '0;
    end else begin
      s1_valid <= in_valid;
      if (start) begin
        x <= '0; y <= '0;
      end else if (in_valid) begin
        s1_sum  <= in_sum;
        s1_addr <= ob_raddr;
        s1_x    <= x;
        s1_y    <= y;
        if ((XW+1)'(x) == cfg_ow - 1'b1) begin
          x <= '0;
          y <= y + 1'b1;
        end else begin
          x <= x + 1'b1;
        end
      end
    end
  end

  // Stage 1: accumulate.
  always_comb begin
    for (int m = 0; m < TM; m++)
      acc[m] = (cfg_first ? '0 : ob_rdata[m]) + ACC_W'($signed(s1_sum[m]));
  end

  tdla_act_scale #(.TM(TM), .ACC_W(ACC_W), .ACT_W(ACT_W)) u_act (
    .clk, .rst_n,
    .in_valid (s1_valid && cfg_last),
    .acc      (acc),
    .mult     (cfg_mult),
    .shift    (cfg_shift),
    .relu_en  (cfg_relu),
    .out_valid(as_valid),
    .dout     (as_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_addr <= '0; s2_x <= '0; s2_y <= '0;
    end else if (s1_valid) begin
      s2_addr <= s1_addr; s2_x <= s1_x; s2_y <= s1_y;
    end
  end

  tdla_max_pool #(.TM(TM), .ACT_W(ACT_W), .MAXW(MAXW)) u_pool (
    .clk, .rst_n,
    .in_valid (as_valid && cfg_pool),
    .x        (s2_x),
    .y        (s2_y),
    .din      (as_out),
    .out_valid(mp_valid),
    .out_x    (mp_x),
    .out_y    (mp_y),
    .dout     (mp_out)
  );

  function automatic acc_vec_t widen(act_vec_t v);
    acc_vec_t r;
    for (int m = 0; m < TM; m++) r[m] = ACC_W'($signed(v[m]));
    return r;
  endfunction

  // Output buffer write port: partial sum, plain result or pooled result.
  always_comb begin
    ob_we    = 1'b0;
    ob_waddr = s1_addr;
    ob_wdata = acc;
    if (s1_valid && !cfg_last) begin
      ob_we = 1'b1;
    end else if (as_valid && !cfg_pool) begin
      ob_we    = 1'b1;
      ob_waddr = s2_addr;
      ob_wdata = widen(as_out);
    end else if (mp_valid) begin
      ob_we    = 1'b1;
      ob_waddr = cfg_da + OAW'(mp_y) * OAW'(cfg_ow >> 1) + OAW'(mp_x);
      ob_wdata = widen(mp_out);
    end
  end

  assign busy = in_valid || s1_valid || as_valid || mp_valid;
endmodule
