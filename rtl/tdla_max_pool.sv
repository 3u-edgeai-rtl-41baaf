// tdla_max_pool: 2x2, stride-2 max pooling of a raster-ordered pixel stream,
// one clock cycle per pixel.
//
// Pixels arrive with their position (x, y) in a map of width at most MAXW.
// For an even x the value is held; for the odd x that follows, the horizontal
// maximum of the pair is formed. On an even row it is stored in a row memory
// of MAXW/2 entries; on the odd row below, it is compared with the stored one
// and the 2x2 maximum leaves with out_valid and its pooled position
// (x/2, y/2). All TM channels (signed ACT_W-bit) are pooled in parallel. A
// trailing odd column or row is dropped. Output is registered: one clock after
// the pixel that completes a window. The publication gives a single-cycle max
// pooling module; the 2x2 window and the streaming organisation are this
// design's choices.
module tdla_max_pool #(
  parameter int TM    = 16,
  parameter int ACT_W = 8,
  parameter int MAXW  = 32,
  localparam int XW = $clog2(MAXW)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [XW-1:0]              x,
  input  logic [XW-1:0]              y,
  input  logic [TM-1:0][ACT_W-1:0]   din,
  output logic                       out_valid,
  output logic [XW-1:0]              out_x,
  output logic [XW-1:0]              out_y,
  output logic [TM-1:0][ACT_W-1:0]   dout
);
  typedef logic [TM-1:0][ACT_W-1:0] vec_t;

  function automatic vec_t vmax(vec_t a, vec_t b);
    vec_t r;
    for (int m = 0; m < TM; m++)
      r[m] = ($signed(a[m]) > $signed(b[m])) ? a[m] : b[m];
    return r;
  endfunction

  vec_t hold;
  vec_t rowmem [MAXW/2];
  vec_t hmax;

  assign hmax = vmax(hold, din);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hold      <= '0;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
      dout      <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (!x[0]) begin
          hold <= din;
        end else if (y[0]) begin
          out_valid <= 1'b1;
          out_x     <= x >> 1;
          out_y     <= y >> 1;
          dout      <= vmax(rowmem[x[XW-1:1]], hmax);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && x[0] && !y[0]) rowmem[x[XW-1:1]] <= hmax;
  end
endmodule
