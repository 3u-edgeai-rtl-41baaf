// tdla_act_scale: linear scaling and ReLU activation, one clock cycle.
//
// For each of TM channels: y = (acc * mult) >>> shift (arithmetic shift, so
// rounding is toward minus infinity); if relu_en, negative y becomes 0; y is
// then saturated to the signed ACT_W-bit range. The result and out_valid are
// registered: one clock from input to output, as the publication requires of
// its activation and scaling modules. The scaling formula (integer multiplier
// and shift standing for the per-layer scale factor) and the saturation are
// this design's choices.
module tdla_act_scale #(
  parameter int TM    = 16,
  parameter int ACC_W = 24,
  parameter int ACT_W = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic [TM-1:0][ACC_W-1:0]     acc,
  input  logic [7:0]                   mult,
  input  logic [4:0]                   shift,
  input  logic                         relu_en,
  output logic                         out_valid,
  output logic [TM-1:0][ACT_W-1:0]     dout
);
  localparam int PW = ACC_W + 9;
  localparam logic signed [PW-1:0] MAXV = PW'((1 << (ACT_W-1)) - 1);
  localparam logic signed [PW-1:0] MINV = -PW'(1 << (ACT_W-1));

  logic [TM-1:0][ACT_W-1:0] y;

  always_comb begin
    for (int m = 0; m < TM; m++) begin
      logic signed [PW-1:0] p;
      p = PW'($signed(acc[m])) * $signed({1'b0, mult});
      p = p >>> shift;
      if (relu_en && p < 0) p = '0;
      if (p > MAXV)      y[m] = MAXV[ACT_W-1:0];
      else if (p < MINV) y[m] = MINV[ACT_W-1:0];
      else               y[m] = p[ACT_W-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      dout      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) dout <= y;
    end
  end
endmodule
