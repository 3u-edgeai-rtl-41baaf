// Self-checking testbench for tdla_adder_tree at the published size: a new
// random product set enters every clock, and each output-channel sum
// (12-bit, wrapping) must leave exactly LEVELS = 7 clocks later, one per
// clock.
module tb_tdla_adder_tree;
  localparam int TN = 4, TM = 16, LK = 5, DW = 12, N = TN*LK*LK, LEVELS = 7, NV = 40;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [TM-1:0][N-1:0][DW-1:0] prod = '0;
  logic [TM-1:0][DW-1:0] sum;
  logic [TM-1:0][DW-1:0] exp_q [NV];
  int checks = 0, failures = 0, sent = 0, got = 0, cyc = 0;
  int sent_cyc [NV];

  tdla_adder_tree #(.TN(TN), .TM(TM), .LK(LK), .DW(DW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Receiver
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (got >= NV) begin failures++; $display("extra output"); end
      else begin
        if (cyc - sent_cyc[got] != LEVELS) begin
          failures++; $display("latency %0d, expected %0d", cyc - sent_cyc[got], LEVELS);
        end
        for (int m = 0; m < TM; m++) begin
          checks++;
          if (sum[m] !== exp_q[got][m]) begin
            failures++; if (failures < 10) $display("set %0d ch %0d: got %h exp %h", got, m, sum[m], exp_q[got][m]);
          end
        end
      end
      got <= got + 1;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int s = 0; s < NV; s++) begin
      @(negedge clk);
      // set 0 drives every value to 0xFFF to exercise lane wrap-around
      for (int m = 0; m < TM; m++) begin
        int acc;
        acc = 0;
        for (int n = 0; n < N; n++) begin
          prod[m][n] = (s == 0) ? 12'hFFF : DW'($urandom);
          acc += int'(prod[m][n]);
        end
        exp_q[s][m] = DW'(acc);
      end
      in_valid = (s % 7 != 3) || (s == 0);   // a few bubbles
      if (in_valid) begin sent_cyc[sent] = cyc; exp_q[sent] = exp_q[s]; sent++; end
    end
    @(negedge clk); in_valid = 0;
    repeat (LEVELS + 3) @(posedge clk);
    checks++;
    if (got != sent) begin failures++; $display("got %0d of %0d", got, sent); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
