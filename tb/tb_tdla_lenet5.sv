// Workload testbench: the two convolution layers of LeNet-5 on tdla_top at
// its default configuration.
//
// Layer 1: a 32x32 single-channel image (channels 1..3 of each pixel word
// are zero), 5x5 kernel, 6 output channels, ReLU and 2x2 pooling, giving
// 14x14x6. The host (this testbench) then copies the result from the output
// buffer to the input buffer as two channel tiles (channels 0-3 and 4-5).
// Layer 2: 14x14, 5x5 kernel, 6 -> 16 channels in two accumulated passes,
// ReLU and pooling, giving 5x5x16. Both layers are checked word for word
// against an integer model, and the core clocks spent in each program are
// reported (the fully connected layers of the network are not part of this
// run). Their clock count must stay under the 2000 clocks (0.016 ms at
// 125 MHz) published for the whole network. Random weights and inputs; the model includes the 12-bit lane wrap.
module tb_tdla_lenet5;
  import tdla_pkg::*;
  localparam int TN = 4, TM = 16, LK = 5, ACT_W = 8, ACC_W = 24, P = LK*LK;

  logic clk = 0, clk_dsp = 0, rst_n = 0, start = 0;
  logic busy, done, err, stall;
  logic imem_we = 0; logic [7:0] imem_addr = '0; logic [63:0] imem_wdata = '0;
  logic ibuf_we = 0; logic [11:0] ibuf_addr = '0; logic [TN-1:0][ACT_W-1:0] ibuf_wdata = '0;
  logic wbuf_we = 0; logic [3:0] wbuf_tile = '0; logic [3:0] wbuf_m = '0;
  logic [P-1:0][TN-1:0][1:0] wbuf_wdata = '0;
  logic [11:0] obuf_raddr = '0;
  logic [TM-1:0][ACC_W-1:0] obuf_rdata;

  tdla_top dut (.*);

  always #4 clk = ~clk;        // 125 MHz core
  always #2 clk_dsp = ~clk_dsp; // 250 MHz adder trees

  int checks = 0, failures = 0;
  logic signed [7:0] img [4096][TN];   // input buffer model
  logic [1:0]        wt [16][TM][P][TN];
  int                acc [1024][TM];
  int                res [1024][TM];
  localparam int MULT = 1, SHIFT = 2;

  initial begin
    #4000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic put_inst(input int a, input inst_t i);
    @(negedge clk); imem_we = 1; imem_addr = 8'(a); imem_wdata = i;
    @(negedge clk); imem_we = 0;
  endtask

  task automatic put_pix(input int a);
    @(negedge clk); ibuf_we = 1; ibuf_addr = 12'(a);
    for (int c = 0; c < TN; c++) ibuf_wdata[c] = img[a][c];
    @(negedge clk); ibuf_we = 0;
  endtask

  task automatic load_tile(input int t, input int nin, input int nout);
    for (int m = 0; m < TM; m++) begin
      @(negedge clk);
      wbuf_we = 1; wbuf_tile = 4'(t); wbuf_m = 4'(m);
      for (int p = 0; p < P; p++)
        for (int c = 0; c < TN; c++) begin
          logic [1:0] code;
          case ($urandom_range(0, 2)) 0: code = 2'b00; 1: code = 2'b01; default: code = 2'b11; endcase
          if (c >= nin || m >= nout) code = 2'b00;
          wt[t][m][p][c] = code;
          wbuf_wdata[p][c] = code;
        end
    end
    @(negedge clk); wbuf_we = 0;
  endtask

  function automatic int wv(logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  // One pass: accumulate into acc[] (12-bit lane wrap per pass).
  task automatic model_pass(input int fs, input int sa, input int tile, input bit first);
    int ow;
    ow = fs - 4;
    for (int y = 0; y < ow; y++)
      for (int x = 0; x < ow; x++)
        for (int m = 0; m < TM; m++) begin
          int s;
          logic [11:0] lane;
          s = 0;
          for (int i = 0; i < 5; i++)
            for (int j = 0; j < 5; j++)
              for (int c = 0; c < TN; c++)
                s += wv(wt[tile][m][i*LK+j][c]) * int'(img[sa + (y+i)*fs + x+j][c]);
          lane = 12'(s);
          acc[y*ow+x][m] = (first ? 0 : acc[y*ow+x][m]) + int'($signed(lane));
        end
  endtask

  function automatic int act(int a);
    longint v;
    v = (longint'(a) * MULT) >>> SHIFT;
    if (v < 0) v = 0;
    if (v > 127) v = 127;
    return int'(v);
  endfunction

  task automatic model_pool(input int ow);
    for (int py = 0; py < ow/2; py++)
      for (int px = 0; px < ow/2; px++)
        for (int m = 0; m < TM; m++) begin
          int e;
          e = 0;
          for (int dy = 0; dy < 2; dy++)
            for (int dx = 0; dx < 2; dx++)
              if (act(acc[(2*py+dy)*ow + 2*px+dx][m]) > e) e = act(acc[(2*py+dy)*ow + 2*px+dx][m]);
          res[py*(ow/2)+px][m] = e;
        end
  endtask

  task automatic run(output int cycles);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 0;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  task automatic check_out(input int n, input string tag);
    for (int a = 0; a < n; a++) begin
      @(negedge clk); obuf_raddr = 12'(a);
      @(posedge clk); #1;
      for (int m = 0; m < TM; m++) begin
        checks++;
        if (int'($signed(obuf_rdata[m])) != res[a][m]) begin
          failures++;
          if (failures < 10) $display("%s: out %0d ch %0d got %0d exp %0d", tag, a, m, $signed(obuf_rdata[m]), res[a][m]);
        end
      end
    end
  endtask

  initial begin
    int c1, c2;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- layer 1 ----
    for (int p = 0; p < 1024; p++) begin
      for (int c = 0; c < TN; c++) img[p][c] = (c == 0) ? 8'($urandom_range(0, 15)) : 8'd0;
      put_pix(p);
    end
    load_tile(0, 1, 6);
    put_inst(0, make_inst(OP_SETQ, 8'd0, 16'(MULT), 16'd0, 8'(SHIFT), 8'd0));
    put_inst(1, make_inst(OP_CONV, 8'd32, 16'd0, 16'd0, 8'd5, 8'hF0));
    put_inst(2, make_inst(OP_END, 8'd0, 16'd0, 16'd0, 8'd0, 8'd0));
    model_pass(32, 0, 0, 1);
    model_pool(28);
    run(c1);
    check_out(196, "conv1");
    // ---- host: output buffer -> input buffer, two channel tiles ----
    for (int a = 0; a < 196; a++) begin
      @(negedge clk); obuf_raddr = 12'(a);
      @(posedge clk); #1;
      for (int c = 0; c < TN; c++) begin
        img[1024 + a][c] = obuf_rdata[c][7:0];
        img[1024 + 196 + a][c] = (c < 2) ? obuf_rdata[4+c][7:0] : 8'd0;
      end
    end
    for (int a = 0; a < 392; a++) put_pix(1024 + a);
    // ---- layer 2 ----
    load_tile(1, 4, 16);
    load_tile(2, 2, 16);
    put_inst(1, make_inst(OP_CONV, 8'd14, 16'd1024, 16'd0, 8'd5, 8'h11));
    put_inst(2, make_inst(OP_CONV, 8'd14, 16'd1220, 16'd0, 8'd5, 8'hE2));
    put_inst(3, make_inst(OP_END, 8'd0, 16'd0, 16'd0, 8'd0, 8'd0));
    model_pass(14, 1024, 1, 1);
    model_pass(14, 1220, 2, 0);
    model_pool(10);
    run(c2);
    check_out(25, "conv2");
    // The published end-to-end LeNet-5 latency is 0.016 ms, i.e. 2000 clocks at
    // 125 MHz for the whole network; the convolution layers alone must fit in it.
    checks++;
    if (c1 + c2 > 2000) begin failures++; $display("conv layers slower than the published 2000 clocks"); end
    checks++;
    if (err) begin failures++; $display("err raised"); end
    $display("LeNet-5 conv layers: layer 1 %0d clocks, layer 2 %0d clocks, total %0d clocks = %0.2f us at 125 MHz",
             c1, c2, c1 + c2, real'(c1 + c2) * 0.008);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
