// Self-checking testbench for tdla_controller with an instruction memory: a
// program of SETQ, NOP, two CONV passes, an invalid CONV and END. The
// testbench plays the write-back unit, retiring each window after a random
// delay with only 4 credits, so the controller must stall. Checked: the
// decoded configuration, the input-buffer address sequence, the number and
// timing of windows, the credit limit, err and done.
module tb_tdla_controller;
  import tdla_pkg::*;
  localparam int CREDITS = 4;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, err;
  logic [7:0] imem_raddr;
  logic [63:0] imem_rdata;
  logic imem_we = 0;
  logic [7:0] imem_addr = '0;
  logic [63:0] imem_wdata = '0;
  logic [11:0] ibuf_raddr;
  logic lb_cfg_we, lb_push, win_valid, w_load, wb_start;
  logic [2:0] lb_cfg_k;
  logic [5:0] lb_cfg_d, wb_ow;
  logic [3:0] w_tile;
  logic [11:0] wb_da;
  logic wb_first, wb_last, wb_relu, wb_pool;
  logic [7:0] q_mult;
  logic [4:0] q_shift;
  logic retire = 0, wb_busy = 0, stall;
  int checks = 0, failures = 0;
  int nstall = 0, nwin = 0, npush = 0, outstanding = 0, max_out = 0, conv_idx = -1;
  int exp_addr, pending [$];
  int exp_fs [2] = '{6, 5};
  int exp_k  [2] = '{3, 5};
  int exp_sa [2] = '{100, 300};
  int wins_per [2];

  tdla_sdp_ram #(.DEPTH(256), .WIDTH(64)) u_imem (
    .clk, .we(imem_we), .waddr(imem_addr), .wdata(imem_wdata), .raddr(imem_raddr), .rdata(imem_rdata));

  tdla_controller #(.CREDITS(CREDITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int a, input inst_t i);
    @(negedge clk); imem_we = 1; imem_addr = 8'(a); imem_wdata = i;
  endtask

  // Monitor: addresses, windows, credits.
  logic [11:0] raddr_q;
  logic        rd_q;
  always @(posedge clk) begin
    if (rst_n) begin
      if (lb_cfg_we) begin
        conv_idx++;
        exp_addr = exp_sa[conv_idx];
        checks += 4;
        if (lb_cfg_k != 3'(exp_k[conv_idx]) || lb_cfg_d != 6'(exp_fs[conv_idx])) begin failures++; $display("line buffer config %0d %0d", lb_cfg_k, lb_cfg_d); end
        if (wb_ow != 6'(exp_fs[conv_idx] - exp_k[conv_idx] + 1)) begin failures++; $display("wb_ow %0d", wb_ow); end
        if (conv_idx == 0 && (w_tile != 4'd2 || !wb_first || !wb_last || !wb_relu || wb_pool || wb_da != 12'd50)) begin failures++; $display("CC/DA decode wrong"); end
        if (conv_idx == 1 && (w_tile != 4'd9 || !wb_first || wb_last || wb_relu || !wb_pool || wb_da != 12'h123)) begin failures++; $display("CC/DA decode wrong (2)"); end
        if (q_mult != 8'd5 || q_shift != 5'd3) begin failures++; $display("SETQ not applied"); end
      end
      if (lb_push) begin
        npush++;
        checks++;
        if (raddr_q != 12'(exp_addr)) begin failures++; $display("read address %0d exp %0d", raddr_q, exp_addr); end
        exp_addr++;
      end
      if (stall) nstall++;
      if (win_valid) begin
        nwin++;
        wins_per[conv_idx]++;
        pending.push_back($urandom_range(3, 25));
      end
    end
  end
  // remember the address presented in the read cycle
  always @(posedge clk) raddr_q <= ibuf_raddr;

  // Write-back model: retire the oldest window when its delay expires.
  always @(negedge clk) begin
    retire <= 0;
    if (pending.size() > 0) begin
      if (pending[0] <= 0) begin void'(pending.pop_front()); retire <= 1; end
      else pending[0]--;
    end
  end
  // Windows issued but not yet retired never exceed the credits.
  always @(posedge clk) begin
    if (rst_n) outstanding = outstanding + int'(win_valid) - int'(retire);
    if (outstanding > max_out) max_out = outstanding;
  end

  initial begin
    wr(0, make_inst(OP_SETQ, 8'd0, 16'h0005, 16'd0, 8'd3, 8'd0));
    wr(1, make_inst(OP_NOP, 8'd0, 16'd0, 16'd0, 8'd0, 8'd0));
    wr(2, make_inst(OP_CONV, 8'd6, 16'd100, 16'd50, 8'd3, 8'h72));
    wr(3, make_inst(OP_CONV, 8'd8, 16'd0, 16'd0, 8'd7, 8'h30));    // KS > LK: rejected
    wr(4, make_inst(OP_CONV, 8'd5, 16'd300, 16'h123, 8'd5, 8'h99));
    wr(5, make_inst(OP_END, 8'd0, 16'd0, 16'd0, 8'd0, 8'd0));
    @(negedge clk); imem_we = 0;
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks += 7;
    if (!err) begin failures++; $display("invalid CONV not flagged"); end
    if (busy) begin failures++; $display("busy after END"); end
    if (npush != 36 + 25) begin failures++; $display("pushes %0d", npush); end
    if (wins_per[0] != 16 || wins_per[1] != 1) begin failures++; $display("windows %0d %0d", wins_per[0], wins_per[1]); end
    if (nstall == 0) begin failures++; $display("no stall seen"); end
    if (max_out > CREDITS) begin failures++; $display("outstanding %0d > credits", max_out); end
    if (pending.size() != 0) begin failures++; $display("finished with windows in flight"); end
    $display("stall cycles %0d, max outstanding %0d", nstall, max_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
