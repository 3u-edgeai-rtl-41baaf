// tdla_ternary_array: the ternary computation array, TN x TM x LK^2 units.
//
// Unit (m, p, c) multiplies activation c of window position p by the ternary
// weight w[m][p][c]. Weights are 2-bit two's complement (01 = +1, 11 = -1,
// 00 = 0), so a multiplication is only a selection (pass or zero) and an
// inversion (negate): no multipliers are used. The code 10 (-2) is not a
// ternary value and gives 0. Activations are signed ACT_W-bit values; products
// are sign-extended to the adder-tree lane width DW. Every unit of the array
// works in the same clock, so the array takes one k x k x TN window per clock
// and applies it to TM output channels at once.
//
// Layout: window index p = i*LK + j (row i, column j of the window), channel c
// inside a pixel word; product index n = p*TN + c. Output is registered:
// prod/out_valid appear one clock after win/in_valid. The selection/inversion
// scheme and the array's dimensions are the published ones; the register
// stage and the treatment of code 10 are this design's choices.
module tdla_ternary_array
  import tdla_pkg::*;
#(
  parameter int TN    = 4,
  parameter int TM    = 16,
  parameter int LK    = 5,
  parameter int ACT_W = 8,
  parameter int DW    = 12,
  localparam int P = LK * LK,
  localparam int N = TN * P
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   in_valid,
  input  logic [P-1:0][TN-1:0][ACT_W-1:0]        win,
  input  logic [TM-1:0][P-1:0][TN-1:0][1:0]      w,
  output logic                                   out_valid,
  output logic [TM-1:0][N-1:0][DW-1:0]           prod
);
  logic [TM-1:0][N-1:0][DW-1:0] prod_c;

  always_comb begin
    for (int m = 0; m < TM; m++) begin
      for (int p = 0; p < P; p++) begin
        for (int c = 0; c < TN; c++) begin
          logic [DW-1:0] x;
          x = DW'($signed(win[p][c]));
          unique case (w[m][p][c])
            W_POS:   prod_c[m][p*TN+c] = x;
            W_NEG:   prod_c[m][p*TN+c] = ~x + 1'b1;
            default: prod_c[m][p*TN+c] = '0;
          endcase
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  // Datapath register without reset: it is only read when out_valid is high.
  always_ff @(posedge clk) begin
    if (in_valid) prod <= prod_c;
  end
endmodule
