// tdla_adder_tree: the set of adder trees that reduce the ternary array's
// products to one sum per output channel.
//
// Each output channel has N = TN*LK*LK products (100 by default). Four output
// channels share one chain of DSP slices, one channel per 12-bit SIMD lane, so
// TM/4 trees of tdla_dsp_simd_add slices run side by side. Each tree is a
// binary tree over N padded up to a power of two (128) with zeros, one slice
// register per level: latency is LEVELS = log2(128) = 7 clocks, and a new set
// of products is accepted every clock (full throughput once the register
// levels are filled). in_valid travels beside the data.
//
// The trees run in their own fast clock domain (250 MHz against 125 MHz for
// the rest of the core in the published configuration); the asynchronous
// FIFOs around them are in tdla_top. The binary-tree shape and the padding are
// this design's choices; the published text gives the lane split and the
// one-result-per-clock behaviour.
module tdla_adder_tree #(
  parameter int TN = 4,
  parameter int TM = 16,
  parameter int LK = 5,
  parameter int DW = 12,
  localparam int N      = TN * LK * LK,
  localparam int LEVELS = $clog2(N),
  localparam int NP     = 1 << LEVELS,
  localparam int G      = TM / 4
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [TM-1:0][N-1:0][DW-1:0]  prod,
  output logic                          out_valid,
  output logic [TM-1:0][DW-1:0]         sum
);
  // lvl[l][g][i]: value i of level l of tree g, four lanes wide.
  logic [3:0][DW-1:0] lvl [LEVELS+1][G][NP];
  logic [LEVELS-1:0]  vpipe;

  // Level 0: pack four output channels per lane set, pad with zeros.
  always_comb begin
    for (int g = 0; g < G; g++) begin
      for (int i = 0; i < NP; i++) begin
        for (int l = 0; l < 4; l++) begin
          lvl[0][g][i][l] = (i < N) ? prod[4*g+l][i] : '0;
        end
      end
    end
  end

  for (genvar lv = 0; lv < LEVELS; lv++) begin : g_level
    localparam int CNT = NP >> (lv + 1);
    for (genvar g = 0; g < G; g++) begin : g_tree
      for (genvar i = 0; i < NP; i++) begin : g_node
        if (i < CNT) begin : g_dsp
          tdla_dsp_simd_add #(.LANES(4), .DW(DW)) u_dsp (
            .clk  (clk),
            .rst_n(rst_n),
            .a    (lvl[lv][g][2*i]),
            .b    (lvl[lv][g][2*i+1]),
            .p    (lvl[lv+1][g][i])
          );
        end else begin : g_unused
          assign lvl[lv+1][g][i] = '0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LEVELS-2:0], in_valid};
  end

  assign out_valid = vpipe[LEVELS-1];
  always_comb begin
    for (int g = 0; g < G; g++)
      for (int l = 0; l < 4; l++) sum[4*g+l] = lvl[LEVELS][g][0][l];
  end

  initial begin
    assert (TM % 4 == 0) else $error("TM must be a multiple of the four DSP lanes");
    assert (LEVELS >= 2) else $error("adder tree needs at least two levels");
  end
endmodule
