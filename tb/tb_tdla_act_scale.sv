// Self-checking testbench for tdla_act_scale: random sums, multipliers and
// shifts, with and without ReLU; results compared with an integer model of
// scale, ReLU and saturation, one clock of latency.
module tb_tdla_act_scale;
  localparam int TM = 16, ACC_W = 24, ACT_W = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, relu_en = 0, out_valid;
  logic [TM-1:0][ACC_W-1:0] acc = '0;
  logic [7:0] mult = 8'd1;
  logic [4:0] shift = '0;
  logic [TM-1:0][ACT_W-1:0] dout;
  int checks = 0, failures = 0, nrelu = 0, nsat = 0;

  tdla_act_scale #(.TM(TM), .ACC_W(ACC_W), .ACT_W(ACT_W)) dut (.*);
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
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      mult = 8'($urandom_range(1, 255));
      shift = 5'($urandom_range(0, 12));
      relu_en = t[0];
      for (int m = 0; m < TM; m++) acc[m] = ACC_W'($signed(16'($urandom)) >>> $urandom_range(0, 8));
      in_valid = 1;
      @(posedge clk); #1;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid after one clock"); end
      for (int m = 0; m < TM; m++) begin
        longint v;
        v = (longint'($signed(acc[m])) * longint'(mult)) >>> shift;
        if (relu_en && v < 0) begin v = 0; nrelu++; end
        if (v > 127) begin v = 127; nsat++; end
        if (v < -128) begin v = -128; nsat++; end
        checks++;
        if ($signed(dout[m]) != v) begin
          failures++; if (failures < 10) $display("acc %0d *%0d >>%0d relu %0d: got %0d exp %0d", $signed(acc[m]), mult, shift, relu_en, $signed(dout[m]), v);
        end
      end
    end
    checks++;
    if (nrelu == 0 || nsat == 0) begin failures++; $display("ReLU or saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
