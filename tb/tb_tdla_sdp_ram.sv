// Self-checking testbench for tdla_sdp_ram: writes random words, reads them
// back with the one-clock registered read, and checks read-during-write
// returns the old contents.
module tb_tdla_sdp_ram;
  localparam int DEPTH = 64, WIDTH = 32, AW = 6;
  logic clk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  tdla_sdp_ram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom_range(0, DEPTH-1);
      @(negedge clk); raddr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++; $display("read %0d: got %h exp %h", a, rdata, model[a]);
      end
    end
    // read and write the same address in one clock: old data comes out
    @(negedge clk); raddr = 6'd5; waddr = 6'd5; wdata = ~model[5]; we = 1;
    @(posedge clk); #1;
    checks++;
    if (rdata !== model[5]) begin failures++; $display("read-during-write returned new data"); end
    @(negedge clk); we = 0;
    @(posedge clk); #1;
    checks++;
    if (rdata !== ~model[5]) begin failures++; $display("write not stored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
