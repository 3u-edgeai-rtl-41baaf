// Self-checking testbench for tdla_ternary_array at the published size
// (TN=4, TM=16, LK=5): random windows and ternary weights (including the
// unused code 10), every product compared with an integer multiply, one clock
// of latency.
module tb_tdla_ternary_array;
  localparam int TN = 4, TM = 16, LK = 5, ACT_W = 8, DW = 12, P = LK*LK, N = TN*P;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [P-1:0][TN-1:0][ACT_W-1:0]   win = '0;
  logic [TM-1:0][P-1:0][TN-1:0][1:0] w = '0;
  logic [TM-1:0][N-1:0][DW-1:0]      prod;
  int checks = 0, failures = 0;

  tdla_ternary_array #(.TN(TN), .TM(TM), .LK(LK), .ACT_W(ACT_W), .DW(DW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      for (int p = 0; p < P; p++)
        for (int c = 0; c < TN; c++) begin
          win[p][c] = (t == 0 && p == 0) ? 8'h80 : 8'($urandom);
          for (int m = 0; m < TM; m++) w[m][p][c] = 2'($urandom);
        end
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("out_valid missing"); end
      for (int m = 0; m < TM; m++)
        for (int p = 0; p < P; p++)
          for (int c = 0; c < TN; c++) begin
            int wv, e;
            wv = (w[m][p][c] == 2'b01) ? 1 : (w[m][p][c] == 2'b11) ? -1 : 0;
            e = wv * int'($signed(win[p][c]));
            checks++;
            if (prod[m][p*TN+c] !== DW'(e)) begin
              failures++;
              if (failures < 10) $display("m%0d p%0d c%0d: got %h exp %h", m, p, c, prod[m][p*TN+c], DW'(e));
            end
          end
    end
    @(negedge clk); in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("out_valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
