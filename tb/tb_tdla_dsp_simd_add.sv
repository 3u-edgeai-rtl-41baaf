// Self-checking testbench for tdla_dsp_simd_add: random lane operands, each
// lane's result compared with its own 12-bit sum one clock later; lanes that
// overflow must not carry into their neighbours.
module tb_tdla_dsp_simd_add;
  logic clk = 0, rst_n = 0;
  logic [3:0][11:0] a = '0, b = '0, p;
  int checks = 0, failures = 0;

  tdla_dsp_simd_add #(.LANES(4), .DW(12)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input logic [3:0][11:0] ta, input logic [3:0][11:0] tb_);
    @(negedge clk); a = ta; b = tb_;
    @(posedge clk); #1;
    for (int l = 0; l < 4; l++) begin
      logic [11:0] e;
      e = 12'((int'(ta[l]) + int'(tb_[l])) % 4096);
      checks++;
      if (p[l] !== e) begin
        failures++; $display("lane %0d: %h + %h -> %h exp %h", l, ta[l], tb_[l], p[l], e);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_one({12'hFFF, 12'hFFF, 12'hFFF, 12'hFFF}, {12'h001, 12'h001, 12'h001, 12'h001});
    check_one({12'h800, 12'h7FF, 12'h000, 12'hFFF}, {12'h800, 12'h001, 12'h000, 12'hFFF});
    for (int i = 0; i < 300; i++) check_one({$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
