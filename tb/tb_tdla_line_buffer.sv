// Self-checking testbench for tdla_line_buffer at the published size
// (LK=5, LD=32): for kernel sizes 1 to 5 and several map widths (including
// the full depth 32), a random map is pushed in raster order, one pixel per
// clock; after every push that completes a window, all LK x LK window
// positions are compared with the map (zero outside k x k).
module tb_tdla_line_buffer;
  localparam int LK = 5, LD = 32, PW = 32;
  logic clk = 0, rst_n = 0, cfg_we = 0, push = 0;
  logic [2:0] cfg_k = '0;
  logic [5:0] cfg_d = '0;
  logic [PW-1:0] pix = '0;
  logic [LK-1:0][LK-1:0][PW-1:0] win;
  logic [PW-1:0] img [LD][LD];
  int checks = 0, failures = 0, nwin = 0;

  tdla_line_buffer #(.LK(LK), .LD(LD), .PW(PW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int k, input int fs, input int rows);
    @(negedge clk);
    cfg_we = 1; cfg_k = 3'(k); cfg_d = 6'(fs);
    @(negedge clk);
    cfg_we = 0;
    for (int yy = 0; yy < rows; yy++)
      for (int xx = 0; xx < fs; xx++) img[yy][xx] = $urandom;
    for (int yy = 0; yy < rows; yy++)
      for (int xx = 0; xx < fs; xx++) begin
        push = 1; pix = img[yy][xx];
        @(posedge clk); #1;
        if (yy >= k-1 && xx >= k-1) begin
          nwin++;
          for (int i = 0; i < LK; i++)
            for (int j = 0; j < LK; j++) begin
              logic [PW-1:0] e;
              e = (i < k && j < k) ? img[yy-k+1+i][xx-k+1+j] : '0;
              checks++;
              if (win[i][j] !== e) begin
                failures++;
                if (failures < 10) $display("k=%0d fs=%0d at (%0d,%0d) win[%0d][%0d]=%h exp %h", k, fs, yy, xx, i, j, win[i][j], e);
              end
            end
        end
        @(negedge clk);
      end
    push = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(3, 8, 6);
    run(5, 32, 7);
    run(1, 4, 3);
    run(2, 5, 4);
    run(4, 13, 6);
    run(5, 5, 5);
    checks++;
    if (nwin == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
