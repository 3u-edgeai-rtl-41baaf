// tdla_async_fifo: dual-clock FIFO between the core clock and the adder-tree
// clock.
//
// 2^AW entries of WIDTH bits. Write and read pointers are AW+1-bit binary
// counters, passed to the other clock domain in Gray code through two
// flip-flops, so at most one bit changes per transfer. full and empty are
// computed from the local pointer and the synchronised remote one: they are
// conservative (full may stay high, empty may stay high, for two clocks after
// the other side has moved). Read is first-word-fall-through: rdata shows the
// head entry whenever empty is low, and rd pops it. A write when full or a
// read when empty is a protocol error, flagged by assertions. The core uses one
// FIFO in front of the adder trees and one behind them; the publication only
// names these FIFOs, so the structure here is a standard Gray-pointer FIFO.
module tdla_async_fifo #(
  parameter int WIDTH = 8,
  parameter int AW    = 4
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  logic [WIDTH-1:0] mem [1<<AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray;   // read pointer seen in write domain
  logic [AW:0] rq1_wgray, rq2_wgray;   // write pointer seen in read domain

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // Write domain
  logic [AW:0] wbin_n;
  assign wbin_n = wbin + (AW+1)'(wr && !full);
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; wq1_rgray <= '0; wq2_rgray <= '0;
    end else begin
      wbin  <= wbin_n;
      wgray <= bin2gray(wbin_n);
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
    end
  end
  always_ff @(posedge wclk) begin
    if (wr && !full) mem[wbin[AW-1:0]] <= wdata;
  end
  assign full = (wgray == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});

  // Read domain
  logic [AW:0] rbin_n;
  assign rbin_n = rbin + (AW+1)'(rd && !empty);
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; rq1_wgray <= '0; rq2_wgray <= '0;
    end else begin
      rbin  <= rbin_n;
      rgray <= bin2gray(rbin_n);
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
    end
  end
  assign empty = (rgray == rq2_wgray);
  assign rdata = mem[rbin[AW-1:0]];

  initial assert (AW >= 2) else $error("async FIFO needs AW >= 2");

  a_no_overflow:  assert property (@(posedge wclk) disable iff (!wrst_n) !(wr && full));
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) !(rd && empty));
endmodule
