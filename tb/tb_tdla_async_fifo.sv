// Self-checking testbench for tdla_async_fifo: a writer at one clock and a
// reader at an unrelated clock move 300 random words; order and contents are
// checked, the writer fills the FIFO until full, and the two clock ratios are
// swapped half way through.
module tb_tdla_async_fifo;
  localparam int WIDTH = 16, AW = 3, NW = 300;
  logic wclk = 0, rclk = 0, rst_n = 0;
  logic wr = 0, rd = 0, full, empty;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] q [$];
  int checks = 0, failures = 0, nread = 0, nfull = 0;
  int wper = 4, rper = 7;

  tdla_async_fifo #(.WIDTH(WIDTH), .AW(AW)) dut (
    .wclk, .wrst_n(rst_n), .wr, .wdata, .full,
    .rclk, .rrst_n(rst_n), .rd, .rdata, .empty);

  always #(wper) wclk = ~wclk;
  always #(rper) rclk = ~rclk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    #30 rst_n = 1;
    for (int i = 0; i < NW; i++) begin
      @(negedge wclk);
      while (full) begin nfull++; wr = 0; @(negedge wclk); end
      wr = 1; wdata = WIDTH'($urandom); q.push_back(wdata);
      if (i == NW/2) begin wper = 9; rper = 3; end
    end
    @(negedge wclk); wr = 0;
  end

  // reader (pops when not empty, with occasional pauses)
  always @(negedge rclk) rd <= !empty && ($urandom_range(0, 3) != 0);
  always @(posedge rclk) begin
    if (rst_n && rd && !empty) begin
      checks++;
      if (q.size() == 0) begin failures++; $display("read from empty"); end
      else begin
        logic [WIDTH-1:0] e;
        e = q.pop_front();
        if (rdata !== e) begin failures++; $display("word %0d: got %h exp %h", nread, rdata, e); end
      end
      nread++;
      if (nread == NW) begin
        checks++;
        if (nfull == 0) begin failures++; $display("full never seen"); end
        #50;
        checks++;
        if (!empty) begin failures++; $display("not empty at end"); end
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
