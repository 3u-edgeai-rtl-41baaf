// tdla_line_buffer: the variable-length line buffer that streams k x k
// windows into the ternary computation array.
//
// Structure (as in the published block diagram): LK-1 line buffers are
// chained behind the input pixel stream; each is a shift register up to LD
// entries long whose output tap is chosen by the Depth Reg, so a line delays
// its input by exactly d pushes (d = the feature-map row width). The input
// pixel and the output of every line feed one row of an LK x LK block of
// window registers. The Kernel Reg holds the kernel size k; its kernel
// control keeps lines k-1 .. LK-2 idle, so only the lines a k x k kernel needs
// are active. Both registers are loaded by cfg_we.
//
// With pixels pushed in raster order over a map of width d, after the push of
// pixel (y, x) the window output win[i][j] (i, j < k) holds pixel
// (y-k+1+i, x-k+1+j): the k x k window whose top-left corner is at
// (y-k+1, x-k+1). Positions with i >= k or j >= k are zero. The window is
// valid once y >= k-1 and x >= k-1; the controller tracks that. One window
// leaves per push, i.e. one per clock when a pixel is pushed every clock.
// win changes on the clock edge that takes the push.
//
// PW is the width of one pixel word (TN channels of ACT_W bits). Ordering of
// the window, reset to zero and the idle policy of unused lines are this
// design's choices.
module tdla_line_buffer #(
  parameter int LK = 5,
  parameter int LD = 32,
  parameter int PW = 32,
  localparam int KW = $clog2(LK + 1),
  localparam int DWD = $clog2(LD + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           cfg_we,
  input  logic [KW-1:0]                  cfg_k,
  input  logic [DWD-1:0]                 cfg_d,
  input  logic                           push,
  input  logic [PW-1:0]                  pix,
  output logic [LK-1:0][LK-1:0][PW-1:0]  win
);
  logic [KW-1:0]  kernel_reg;
  logic [DWD-1:0] depth_reg;

  logic [PW-1:0] line [LK-1][LD];
  logic [LK-1:0][PW-1:0] tap;                // tap[0] = input, tap[r] = line r-1 output
  logic [LK-1:0][LK-1:0][PW-1:0] regs;       // regs[r][c]: row r, c pushes old

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      kernel_reg <= KW'(LK);
      depth_reg  <= DWD'(LD);
    end else if (cfg_we) begin
      kernel_reg <= cfg_k;
      depth_reg  <= cfg_d;
    end
  end

  always_comb begin
    tap[0] = pix;
    for (int r = 1; r < LK; r++) begin
      tap[r] = '0;
      for (int i = 0; i < LD; i++)
        if (DWD'(i + 1) == depth_reg) tap[r] = line[r-1][i];
    end
  end

  // Line shift registers with kernel control (only lines r < k-1 move).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < LK-1; r++)
        for (int i = 0; i < LD; i++) line[r][i] <= '0;
    end else if (push) begin
      for (int r = 0; r < LK-1; r++) begin
        if (r + 1 < int'(kernel_reg)) begin
          line[r][0] <= tap[r];
          for (int i = 1; i < LD; i++) line[r][i] <= line[r][i-1];
        end
      end
    end
  end

  // k x k window registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      regs <= '0;
    end else if (push) begin
      for (int r = 0; r < LK; r++) begin
        regs[r][0] <= tap[r];
        for (int c = 1; c < LK; c++) regs[r][c] <= regs[r][c-1];
      end
    end
  end

  // Reorder to top-left-first and mask positions outside k x k.
  always_comb begin
    win = '0;
    for (int i = 0; i < LK; i++)
      for (int j = 0; j < LK; j++)
        for (int s = 0; s < LK; s++)
          for (int t = 0; t < LK; t++)
            if (i < int'(kernel_reg) && j < int'(kernel_reg) &&
                s == int'(kernel_reg) - 1 - i && t == int'(kernel_reg) - 1 - j)
              win[i][j] = regs[s][t];
  end
endmodule
