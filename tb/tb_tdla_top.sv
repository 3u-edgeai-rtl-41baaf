// End-to-end testbench for tdla_top at its default (published) configuration
// <TN, TM, LK, LD> = <4, 16, 5, 32>, 8-bit activations, 12-bit adder lanes.
//
// A program of five convolution passes is loaded with random ternary weights
// and random activations, and run twice: first with the adder-tree clock at
// twice the core clock (as published), then with the adder-tree clock slower
// than the core clock so that credits run out and the controller stalls.
// The passes cover: a two-tile layer (8 input channels) whose partial sums
// are accumulated in the output buffer, then scaled, ReLU'd and 2x2-pooled;
// a 5x5 kernel; a 1x1 kernel; a 3x3 kernel over a 32x32 map (the full line
// depth) with pooling; and an instruction with an illegal kernel size. Every
// output word is compared with an integer model written here from the
// definitions (12-bit lane wrap, accumulation, scale, ReLU, saturation,
// pooling). The run time of the first program is checked against one pixel
// per clock plus a fixed per-instruction overhead, and each mechanism is
// counted and must occur.
module tb_tdla_top;
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

  int half_dsp = 2;
  always #4 clk = ~clk;                      // 125 MHz
  always #(half_dsp) clk_dsp = ~clk_dsp;     // 250 MHz, later slowed down

  int checks = 0, failures = 0;
  int n_stall = 0, n_pool = 0, n_relu0 = 0, n_accum = 0, n_err = 0, n_fast = 0, n_slow = 0;
  int kseen [6];

  // model state
  logic signed [7:0] ibuf_m [4096][TN];
  logic [1:0]        wbuf_m_ [16][TM][P][TN];
  int                obuf_e [4096][TM];
  bit                obuf_v [4096];
  int                q_mult = 1, q_shift = 0;

  initial begin
    #3000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && stall) n_stall++;

  // ---------------- host helpers ----------------
  task automatic put_inst(input int a, input inst_t i);
    @(negedge clk); imem_we = 1; imem_addr = 8'(a); imem_wdata = i;
    @(negedge clk); imem_we = 0;
  endtask

  task automatic load_map(input int sa, input int fs);
    for (int p = 0; p < fs*fs; p++) begin
      @(negedge clk);
      ibuf_we = 1; ibuf_addr = 12'(sa + p);
      for (int c = 0; c < TN; c++) begin
        ibuf_m[sa+p][c] = 8'($signed($urandom_range(0, 15)) - 8);
        ibuf_wdata[c] = ibuf_m[sa+p][c];
      end
    end
    @(negedge clk); ibuf_we = 0;
  endtask

  task automatic load_tile(input int t);
    for (int m = 0; m < TM; m++) begin
      @(negedge clk);
      wbuf_we = 1; wbuf_tile = 4'(t); wbuf_m = 4'(m);
      for (int p = 0; p < P; p++)
        for (int c = 0; c < TN; c++) begin
          logic [1:0] code;
          case ($urandom_range(0, 2)) 0: code = 2'b00; 1: code = 2'b01; default: code = 2'b11; endcase
          wbuf_m_[t][m][p][c] = code;
          wbuf_wdata[p][c] = code;
        end
    end
    @(negedge clk); wbuf_we = 0;
  endtask

  // ---------------- reference model ----------------
  int psum [1024][TM];

  function automatic int wval(logic [1:0] c);
    return (c == 2'b01) ? 1 : (c == 2'b11) ? -1 : 0;
  endfunction

  function automatic int act(int a, bit relu);
    longint v;
    v = (longint'(a) * longint'(q_mult)) >>> q_shift;
    if (relu && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic model_conv(input int fs, input int k, input int sa, input int da, input int tile,
                            input bit first, input bit last, input bit relu, input bit pool);
    int ow;
    ow = fs - k + 1;
    for (int oy = 0; oy < ow; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int m = 0; m < TM; m++) begin
          int s;
          logic [11:0] lane;
          s = 0;
          for (int i = 0; i < k; i++)
            for (int j = 0; j < k; j++)
              for (int c = 0; c < TN; c++)
                s += wval(wbuf_m_[tile][m][i*LK+j][c]) * int'(ibuf_m[sa + (oy+i)*fs + ox+j][c]);
          lane = 12'(s);                             // adder-tree lane width
          s = int'($signed(lane));
          psum[oy*ow+ox][m] = (first ? 0 : psum[oy*ow+ox][m]) + s;
        end
    if (!first) n_accum++;
    if (!last) begin
      for (int i = 0; i < ow*ow; i++) begin
        obuf_v[da+i] = 1;
        for (int m = 0; m < TM; m++) obuf_e[da+i][m] = psum[i][m];
      end
    end else if (!pool) begin
      for (int i = 0; i < ow*ow; i++) begin
        obuf_v[da+i] = 1;
        for (int m = 0; m < TM; m++) begin
          obuf_e[da+i][m] = act(psum[i][m], relu);
          if (relu && obuf_e[da+i][m] == 0) n_relu0++;
        end
      end
    end else begin
      for (int py = 0; py < ow/2; py++)
        for (int px = 0; px < ow/2; px++) begin
          int a;
          a = da + py*(ow/2) + px;
          obuf_v[a] = 1;
          n_pool++;
          for (int m = 0; m < TM; m++) begin
            int e;
            e = -1000;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++) begin
                int v;
                v = act(psum[(2*py+dy)*ow + 2*px+dx][m], relu);
                if (relu && v == 0) n_relu0++;
                if (v > e) e = v;
              end
            obuf_e[a][m] = e;
          end
        end
    end
    kseen[k]++;
  endtask

  task automatic conv(inout int pc, input int fs, input int k, input int sa, input int da,
                      input int tile, input bit first, input bit last, input bit relu, input bit pool);
    logic [7:0] cc;
    cc = {pool, relu, last, first, 4'(tile)};
    put_inst(pc, make_inst(OP_CONV, 8'(fs), 16'(sa), 16'(da), 8'(k), cc));
    pc++;
    model_conv(fs, k, sa, da, tile, first, last, relu, pool);
  endtask

  task automatic check_obuf(input string tag);
    for (int a = 0; a < 4096; a++) begin
      if (!obuf_v[a]) continue;
      @(negedge clk); obuf_raddr = 12'(a);
      @(posedge clk); #1;
      for (int m = 0; m < TM; m++) begin
        checks++;
        if (int'($signed(obuf_rdata[m])) != obuf_e[a][m]) begin
          failures++;
          if (failures < 15) $display("%s: obuf[%0d] ch %0d got %0d exp %0d", tag, a, m, $signed(obuf_rdata[m]), obuf_e[a][m]);
        end
      end
    end
  endtask

  task automatic run_program(output int cycles);
    int c0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    c0 = 0;
    while (!done) begin @(negedge clk); c0++; end
    cycles = c0;
    checks++;
    if (!err) begin failures++; $display("illegal instruction not flagged"); end
    else n_err++;
  endtask

  initial begin
    int pc, cyc1, cyc2, pixels;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // data
    load_map(0, 8);     // tile 0 input channels 0..3
    load_map(64, 8);    // tile 1 input channels 4..7
    load_map(128, 12);
    load_map(300, 6);
    load_map(400, 32);
    for (int t = 0; t < 5; t++) load_tile(t);
    // program
    pc = 0;
    q_mult = 3; q_shift = 4;
    put_inst(pc, make_inst(OP_SETQ, 8'd0, 16'(q_mult), 16'd0, 8'(q_shift), 8'd0)); pc++;
    conv(pc, 8, 3, 0, 0, 0, 1, 0, 0, 0);
    conv(pc, 8, 3, 64, 0, 1, 0, 1, 1, 1);
    conv(pc, 12, 5, 128, 100, 2, 1, 1, 0, 0);
    conv(pc, 6, 1, 300, 200, 3, 1, 1, 1, 0);
    put_inst(pc, make_inst(OP_CONV, 8'd9, 16'd0, 16'd900, 8'd6, 8'h30)); pc++;   // KS=6 > LK
    conv(pc, 32, 3, 400, 300, 4, 1, 1, 1, 1);
    put_inst(pc, make_inst(OP_NOP, 8'd0, 16'd0, 16'd0, 8'd0, 8'd0)); pc++;
    put_inst(pc, make_inst(OP_END, 8'd0, 16'd0, 16'd0, 8'd0, 8'd0)); pc++;
    pixels = 64 + 64 + 144 + 36 + 1024;

    // run 1: adder trees at twice the core clock
    begin
      int st0;
      st0 = n_stall;
      run_program(cyc1);
      if (n_stall == st0) n_fast++;
    end
    check_obuf("fast dsp clock");
    $display("program: %0d pixels in %0d core clocks, %0d stall clocks", pixels, cyc1, n_stall);
    checks++;
    if (cyc1 > pixels + 9*40) begin failures++; $display("too slow: %0d clocks", cyc1); end

    // run 2: adder trees slower than the core clock; results must not change
    half_dsp = 9;
    begin
      int st0;
      st0 = n_stall;
      run_program(cyc2);
      if (n_stall > st0) n_slow++;
    end
    check_obuf("slow dsp clock");
    $display("slow adder clock: %0d core clocks, %0d stall clocks in total", cyc2, n_stall);

    // mechanisms
    checks++; if (n_stall == 0) begin failures++; $display("no credit stall"); end
    checks++; if (n_slow == 0) begin failures++; $display("slow adder clock caused no stall"); end
    checks++; if (n_accum == 0) begin failures++; $display("no multi-tile accumulation"); end
    checks++; if (n_pool == 0) begin failures++; $display("no pooling"); end
    checks++; if (n_relu0 == 0) begin failures++; $display("ReLU never clipped"); end
    checks++; if (n_err == 0) begin failures++; $display("illegal instruction never seen"); end
    checks++; if (kseen[1] == 0 || kseen[3] == 0 || kseen[5] == 0) begin failures++; $display("kernel sizes 1/3/5 not all used"); end
    $display("mechanisms: stall clocks=%0d accum passes=%0d pooled pixels=%0d relu-zero=%0d illegal=%0d k1=%0d k3=%0d k5=%0d",
             n_stall, n_accum, n_pool, n_relu0, n_err, kseen[1], kseen[3], kseen[5]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
