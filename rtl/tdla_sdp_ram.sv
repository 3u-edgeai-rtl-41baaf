// tdla_sdp_ram: simple dual-port block RAM (one write port, one read port,
// single clock). It is the accelerator's "simple input buffer" for input
// features, and the same module serves as instruction memory and as the
// partial-sum/output buffer.
//
// Write: when we is high, mem[waddr] <= wdata at the rising edge.
// Read: rdata shows mem[raddr] one cycle after raddr is presented (registered
// read, as in a BRAM). A read and a write of the same address in the same
// cycle return the old contents. Depth, width and read latency are this
// design's choices; the publication gives only the buffer's purpose.
module tdla_sdp_ram #(
  parameter int DEPTH = 4096,
  parameter int WIDTH = 32,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
