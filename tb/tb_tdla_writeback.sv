// Self-checking testbench for tdla_writeback with an output buffer: three
// passes over a 6x6 output map (first, middle, last) accumulate random sums;
// the last pass applies scale, ReLU and 2x2 pooling. A second layer is run
// without pooling. Buffer contents are compared with an integer model, and
// the scale and pool stages are checked to add one clock each.
module tb_tdla_writeback;
  localparam int TM = 16, DW = 12, ACC_W = 24, ACT_W = 8, OBUF_DEPTH = 256, MAXW = 32, OAW = 8, XW = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic [OAW-1:0] cfg_da = '0;
  logic [XW:0] cfg_ow = '0;
  logic cfg_first = 0, cfg_last = 0, cfg_relu = 0, cfg_pool = 0;
  logic [7:0] cfg_mult = 8'd1;
  logic [4:0] cfg_shift = '0;
  logic in_valid = 0, in_pop, retire, busy;
  logic [TM-1:0][DW-1:0] in_sum = '0;
  logic [OAW-1:0] ob_raddr, ob_waddr, host_raddr = '0, raddr;
  logic [TM-1:0][ACC_W-1:0] ob_rdata, ob_wdata;
  logic ob_we;
  int checks = 0, failures = 0, nret = 0;
  int acc_m [64][TM];

  tdla_writeback #(.TM(TM), .DW(DW), .ACC_W(ACC_W), .ACT_W(ACT_W), .OBUF_DEPTH(OBUF_DEPTH), .MAXW(MAXW)) dut (.*);
  assign raddr = busy ? ob_raddr : host_raddr;
  tdla_sdp_ram #(.DEPTH(OBUF_DEPTH), .WIDTH(TM*ACC_W)) u_ob (
    .clk, .we(ob_we), .waddr(ob_waddr), .wdata(ob_wdata), .raddr(raddr), .rdata(ob_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) if (retire) nret++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic pass(input int ow, input int da, input bit first, input bit last, input bit relu, input bit pool);
    @(negedge clk);
    cfg_ow = (XW+1)'(ow); cfg_da = OAW'(da); cfg_first = first; cfg_last = last;
    cfg_relu = relu; cfg_pool = pool; start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < ow*ow; i++) begin
      in_valid = 1;
      for (int m = 0; m < TM; m++) begin
        int v;
        v = $urandom_range(0, 1000) - 500;
        in_sum[m] = DW'(v);
        acc_m[i][m] = (first ? 0 : acc_m[i][m]) + v;
      end
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    while (busy) @(negedge clk);
  endtask

  function automatic int scale(int a, bit relu);
    longint v;
    v = (longint'(a) * longint'(cfg_mult)) >>> cfg_shift;
    if (relu && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic read_check(input int addr, input int m, input int e, input string what);
    @(negedge clk); host_raddr = OAW'(addr);
    @(posedge clk); #1;
    checks++;
    if ($signed(ob_rdata[m]) != e) begin
      failures++; if (failures < 12) $display("%s addr %0d ch %0d: got %0d exp %0d", what, addr, m, $signed(ob_rdata[m]), e);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    cfg_mult = 8'd3; cfg_shift = 5'd4;
    // Layer 1: 6x6 outputs, three input tiles, ReLU and pooling.
    pass(6, 16, 1, 0, 0, 0);
    for (int i = 0; i < 36; i++) for (int m = 0; m < TM; m += 5) read_check(16 + i, m, acc_m[i][m], "psum1");
    pass(6, 16, 0, 0, 0, 0);
    for (int i = 0; i < 36; i++) for (int m = 0; m < TM; m += 5) read_check(16 + i, m, acc_m[i][m], "psum2");
    pass(6, 16, 0, 1, 1, 1);
    for (int py = 0; py < 3; py++)
      for (int px = 0; px < 3; px++)
        for (int m = 0; m < TM; m++) begin
          int e, v;
          e = -1000;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++) begin
              v = scale(acc_m[(2*py+dy)*6 + 2*px+dx][m], 1);
              if (v > e) e = v;
            end
          read_check(16 + py*3 + px, m, e, "pooled");
        end
    // Layer 2: 5x5, single tile, no ReLU, no pooling.
    pass(5, 100, 1, 1, 0, 0);
    for (int i = 0; i < 25; i++) for (int m = 0; m < TM; m++) read_check(100 + i, m, scale(acc_m[i][m], 0), "plain");
    checks++;
    if (nret != 36*3 + 25) begin failures++; $display("retired %0d", nret); end
    // Latency of the scale and pool stages: one clock each.
    @(negedge clk);
    cfg_ow = 6'd2; cfg_da = 8'd200; cfg_first = 1; cfg_last = 1; cfg_pool = 1; start = 1;
    @(negedge clk); start = 0;
    for (int i = 0; i < 4; i++) begin in_valid = 1; in_sum = '0; @(negedge clk); end
    in_valid = 0;
    // the last sum is popped now; s1, act_scale and pool take one clock each
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (busy) begin failures++; $display("pipeline longer than three clocks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Stage timing check: act_scale output follows s1 by one clock; pool output
  // follows the act_scale output of an odd-odd pixel by one clock.
  logic s1_q, as_q;
  always @(posedge clk) begin
    s1_q <= dut.s1_valid && cfg_last;
    as_q <= dut.as_valid && cfg_pool && dut.s2_x[0] && dut.s2_y[0];
    if (rst_n) begin
      if (dut.as_valid !== s1_q) begin failures++; $display("act_scale not one clock after accumulate"); end
      if (dut.mp_valid !== as_q) begin failures++; $display("pool not one clock after act_scale"); end
    end
  end
endmodule
