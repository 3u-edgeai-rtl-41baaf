// tdla_dsp_simd_add: one DSP slice used as a SIMD adder.
//
// The 48-bit operands a and b each carry LANES independent DW-bit values
// (four 12-bit lanes by default). The carry between lanes is blocked, so each
// lane wraps modulo 2^DW on its own, as a DSP48 does in its FOUR12 SIMD mode.
// One slice therefore adds eight inputs and gives four outputs. The result is
// registered: p is valid one clock after a and b. The lane split follows the
// publication; the wrap-around on overflow is what the hardware mode does and
// is not discussed there.
module tdla_dsp_simd_add #(
  parameter int LANES = 4,
  parameter int DW    = 12
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [LANES-1:0][DW-1:0]  a,
  input  logic [LANES-1:0][DW-1:0]  b,
  output logic [LANES-1:0][DW-1:0]  p
);
  logic [LANES-1:0][DW-1:0] sum;

  always_comb begin
    for (int l = 0; l < LANES; l++) sum[l] = a[l] + b[l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p <= '0;
    else        p <= sum;
  end
endmodule
