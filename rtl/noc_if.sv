// noc_if: NoC interface of one PE.
//
// Connects the PE to the packet network and crosses between the NoC clock
// (the reference clock) and the PE core clock, which is generated by the
// PE's own ADPLL and may change or stop at any time (GALS clocking).
//
// Receive side (NoC -> PE), one packet per NoC cycle:
//   PKT_PMC     goes straight to the PMC, in the NoC clock domain, so a
//               remote core can change the PL or power up this PE even
//               while its clock is stopped or its core is off
//               ("remote DVFS").
//   PKT_MC      spike: crosses into the core domain and its key is pushed
//               into the spike FIFO.
//   PKT_RD_RSP  DMA read response: crosses into the core domain to the DMA.
//   others      are consumed and dropped, as are spikes and responses that
//               arrive while the core is isolated (powered off).
// Send side (PE -> NoC): the processor's packets and the DMA's read requests
// share a dual-clock FIFO into the NoC domain (processor first). A PMC
// command the processor addresses to its own node does not enter the NoC:
// it is handed to the PMC here ("self DVFS"). Remote commands take
// precedence over self commands when both are pending.
//
// The self/remote DVFS paths follow the paper's PE figure; the FIFO depths,
// the priority orders and dropping packets for a powered-off core are this
// design's choices.
`timescale 1ns / 1ps
module noc_if
  import dvfs_pkg::*;
#(
  parameter logic [NODE_W-1:0] NODE_ID    = '0,
  parameter int unsigned       FIFO_DEPTH = 8
) (
  input  logic      clk_noc,
  input  logic      clk_core,
  input  logic      rst_n,
  input  logic      iso_en,           // core domain powered off
  // NoC port
  input  logic      in_valid,
  output logic      in_ready,
  input  noc_pkt_t  in_pkt,
  output logic      out_valid,
  input  logic      out_ready,
  output noc_pkt_t  out_pkt,
  // PMC (NoC clock domain)
  output logic      pmc_valid,
  input  logic      pmc_ready,
  output pmc_cmd_t  pmc_cmd,
  // core clock domain
  output logic      spike_push,
  output logic [31:0] spike_key,
  output logic      dma_rsp_valid,
  output noc_pkt_t  dma_rsp,
  input  logic      cpu_tx_valid,
  output logic      cpu_tx_ready,
  input  noc_pkt_t  cpu_tx,
  input  logic      dma_req_valid,
  output logic      dma_req_ready,
  input  noc_pkt_t  dma_req
);

  // ---------------- receive ----------------
  logic     rx_full, rx_empty, rx_wr, rx_rd;
  noc_pkt_t rx_head;
  logic     in_is_pmc, in_is_core;

  assign in_is_pmc  = in_pkt.ptype == PKT_PMC;
  assign in_is_core = (in_pkt.ptype == PKT_MC || in_pkt.ptype == PKT_RD_RSP) && !iso_en;

  // self-addressed PMC command waiting at the head of the send FIFO
  logic     tx_full, tx_empty, tx_wr, tx_rd;
  noc_pkt_t tx_head, tx_in;
  logic     self_pmc;
  assign self_pmc = !tx_empty && tx_head.ptype == PKT_PMC && tx_head.dst == NODE_ID;

  logic remote_pmc;
  assign remote_pmc = in_valid && in_is_pmc;

  assign in_ready = in_is_pmc  ? pmc_ready :
                    in_is_core ? !rx_full  : 1'b1;
  assign rx_wr    = in_valid && in_is_core && !rx_full;

  assign pmc_valid = remote_pmc || self_pmc;
  assign pmc_cmd   = remote_pmc ? pkt_to_pmc_cmd(in_pkt) : pkt_to_pmc_cmd(tx_head);

  async_fifo #(.T(noc_pkt_t), .DEPTH(FIFO_DEPTH)) u_rx (
    .wclk(clk_noc), .rclk(clk_core), .rst_n,
    .wr_en(rx_wr), .wdata(in_pkt), .full(rx_full),
    .rd_en(rx_rd), .rdata(rx_head), .empty(rx_empty));

  assign rx_rd         = !rx_empty;
  assign spike_push    = !rx_empty && rx_head.ptype == PKT_MC;
  assign spike_key     = rx_head.addr;
  assign dma_rsp_valid = !rx_empty && rx_head.ptype == PKT_RD_RSP;
  assign dma_rsp       = rx_head;

  // ---------------- send ----------------
  assign cpu_tx_ready  = !tx_full;
  assign dma_req_ready = !tx_full && !cpu_tx_valid;
  assign tx_wr         = (cpu_tx_valid || dma_req_valid) && !tx_full;
  assign tx_in         = cpu_tx_valid ? cpu_tx : dma_req;

  async_fifo #(.T(noc_pkt_t), .DEPTH(FIFO_DEPTH)) u_tx (
    .wclk(clk_core), .rclk(clk_noc), .rst_n,
    .wr_en(tx_wr), .wdata(tx_in), .full(tx_full),
    .rd_en(tx_rd), .rdata(tx_head), .empty(tx_empty));

  assign out_valid = !tx_empty && !self_pmc;
  assign out_pkt   = tx_head;
  assign tx_rd     = self_pmc ? (pmc_ready && !remote_pmc) : (out_valid && out_ready);

endmodule
