// async_fifo: dual-clock FIFO for the clock-domain crossings of the GALS
// PE (the PE core clock comes from its own ADPLL and changes frequency and
// stops at run time; the NoC runs on the reference clock).
//
// Classic design: binary and Gray-coded read and write pointers, each Gray
// pointer synchronised into the other clock domain by two flip-flops. full
// is computed in the write domain, empty in the read domain, so both are
// pessimistic and safe. The read side is first-word-fall-through: rdata
// shows the head entry whenever empty is low, and rd_en pops it. DEPTH must
// be a power of two. Both sides share one asynchronous reset.
`timescale 1ns / 1ps
module async_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 8
) (
  input  logic wclk,
  input  logic rclk,
  input  logic rst_n,
  input  logic wr_en,
  input  T     wdata,
  output logic full,
  input  logic rd_en,
  output T     rdata,
  output logic empty
);

  localparam int unsigned AW = $clog2(DEPTH);

  T mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_n;
  assign wbin_n = wbin + (AW+1)'(wr_en && !full);
  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) begin
      wbin  <= '0;
      wgray <= '0;
    end else begin
      wbin  <= wbin_n;
      wgray <= bin2gray(wbin_n);
    end
  end
  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end
  always_ff @(posedge wclk or negedge rst_n) begin
    if (!rst_n) {wq2_rgray, wq1_rgray} <= '0;
    else        {wq2_rgray, wq1_rgray} <= {wq1_rgray, rgray};
  end
  assign full = (wgray == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});

  // read side
  logic [AW:0] rbin_n;
  assign rbin_n = rbin + (AW+1)'(rd_en && !empty);
  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else begin
      rbin  <= rbin_n;
      rgray <= bin2gray(rbin_n);
    end
  end
  always_ff @(posedge rclk or negedge rst_n) begin
    if (!rst_n) {rq2_wgray, rq1_wgray} <= '0;
    else        {rq2_wgray, rq1_wgray} <= {rq1_wgray, wgray};
  end
  assign empty = (rgray == rq2_wgray);
  assign rdata = mem[rbin[AW-1:0]];

endmodule
