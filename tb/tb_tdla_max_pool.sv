// Self-checking testbench for tdla_max_pool: random signed maps of width 6
// and 7 (odd, last column dropped) stream in raster order with gaps; each
// pooled 2x2 maximum and its position are checked, one clock after the
// completing pixel.
module tb_tdla_max_pool;
  localparam int TM = 16, ACT_W = 8, MAXW = 32, XW = 5;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [XW-1:0] x = '0, y = '0, out_x, out_y;
  logic [TM-1:0][ACT_W-1:0] din = '0, dout;
  logic [TM-1:0][ACT_W-1:0] img [8][8];
  int checks = 0, failures = 0, nout = 0;

  tdla_max_pool #(.TM(TM), .ACT_W(ACT_W), .MAXW(MAXW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_map(input int W, input int H);
    for (int yy = 0; yy < H; yy++)
      for (int xx = 0; xx < W; xx++)
        for (int m = 0; m < TM; m++) img[yy][xx][m] = ACT_W'($urandom);
    for (int yy = 0; yy < H; yy++)
      for (int xx = 0; xx < W; xx++) begin
        @(negedge clk);
        in_valid = 1; x = XW'(xx); y = XW'(yy); din = img[yy][xx];
        @(posedge clk); #1;
        in_valid = 0;
        if (xx[0] && yy[0]) begin
          checks++;
          if (!out_valid || out_x != XW'(xx/2) || out_y != XW'(yy/2)) begin
            failures++; $display("missing/misplaced output at (%0d,%0d)", xx, yy);
          end
          for (int m = 0; m < TM; m++) begin
            logic signed [ACT_W-1:0] e;
            e = $signed(img[yy-1][xx-1][m]);
            if ($signed(img[yy-1][xx][m]) > e) e = $signed(img[yy-1][xx][m]);
            if ($signed(img[yy][xx-1][m]) > e) e = $signed(img[yy][xx-1][m]);
            if ($signed(img[yy][xx][m]) > e) e = $signed(img[yy][xx][m]);
            checks++;
            if ($signed(dout[m]) != e) begin failures++; $display("(%0d,%0d) ch %0d got %0d exp %0d", xx, yy, m, $signed(dout[m]), e); end
          end
          nout++;
        end else begin
          checks++;
          if (out_valid) begin failures++; $display("spurious output at (%0d,%0d)", xx, yy); end
        end
        if ($urandom_range(0, 2) == 0) @(negedge clk);   // gap
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_map(6, 6);
    run_map(7, 5);
    checks++;
    if (nout != 9 + 6) begin failures++; $display("pooled %0d outputs, expected 15", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
