// noc_xbar: the on-chip packet network, as a single-stage crossbar.
//
// Every node (PEs, router, DRAM port, periphery, shared SRAM) has one input
// and one output port; a packet is one flit (noc_pkt_t) and goes to the
// output port numbered by its dst field. Each output has a round-robin
// arbiter over the inputs that address it and one output register, so a
// packet takes one cycle from input to output and each output passes one
// packet per cycle. Handshake on every port: valid/ready, transfer when
// both are high; a valid packet stays stable until accepted.
//
// The paper describes the network only as packet based, carrying spike,
// DMA and control packets; the crossbar topology, single-flit packets and
// arbitration are this design's simplest choice.
`timescale 1ns / 1ps
module noc_xbar
  import dvfs_pkg::*;
#(
  parameter int unsigned NPORTS = NNODES
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic     [NPORTS-1:0] in_valid,
  output logic     [NPORTS-1:0] in_ready,
  input  noc_pkt_t              in_pkt   [NPORTS],
  output logic     [NPORTS-1:0] out_valid,
  input  logic     [NPORTS-1:0] out_ready,
  output noc_pkt_t              out_pkt  [NPORTS]
);

  logic [NPORTS-1:0] req  [NPORTS];   // [output][input]
  logic [NPORTS-1:0] gnt  [NPORTS];
  logic [NPORTS-1:0] take;            // output o loads a packet

  always_comb begin
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        req[o][i] = in_valid[i] && (int'(in_pkt[i].dst) == o);
  end

  for (genvar o = 0; o < NPORTS; o++) begin : g_out
    rr_arb #(.N(NPORTS)) u_arb (
      .clk, .rst_n, .req(req[o]), .advance(take[o]), .gnt(gnt[o]));

    assign take[o] = (gnt[o] != '0) && (!out_valid[o] || out_ready[o]);

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_valid[o] <= 1'b0;
        out_pkt[o]   <= '0;
      end else if (take[o]) begin
        out_valid[o] <= 1'b1;
        for (int i = 0; i < NPORTS; i++)
          if (gnt[o][i]) out_pkt[o] <= in_pkt[i];
      end else if (out_ready[o]) begin
        out_valid[o] <= 1'b0;
      end
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < NPORTS; o++)
      for (int i = 0; i < NPORTS; i++)
        if (gnt[o][i] && take[o]) in_ready[i] = 1'b1;
  end

endmodule
