// neuro_soc_top: neuromorphic many-core system with per-PE DVFS (the
// four-PE test-chip configuration).
//
// Four processing elements, each with its own power management controller,
// ADPLL and header power switches, share one packet network (noc_xbar) with
// the multicast spike router, the periphery timer and the shared SRAM; the
// DRAM that holds the synapse rows is reached through a NoC port that this
// module brings out (dram_*), where the LPDDR2 interface would connect.
// Node numbers: PE0..PE3 = 0..3, router 4, DRAM 5, periphery (timer) 6,
// shared SRAM 7. The router's chip-to-chip link is brought out as ext_*.
//
// The processors (ARM Cortex-M4F in the paper's chip) are not part of this
// RTL: each PE's processor buses are ports of this module, indexed by PE
// (cpu_*), together with the core clock, core reset and timer interrupt
// that the PE supplies to its processor. Everything outside the PE core
// domains runs on clk_ref, the 100 MHz reference clock.
//
// Each PE can change its performance level (PL1 0.70 V/125 MHz, PL2
// 0.85 V/333 MHz, PL3 1.00 V/500 MHz) by sending a PKT_PMC packet to its own
// node (self DVFS), or another node can send it (remote DVFS, power-up,
// shut-off). The structure follows the paper's system and PE block
// diagrams; the node map and the way the ports are grouped are this
// design's choices.
`timescale 1ns / 1ps
module neuro_soc_top
  import dvfs_pkg::*;
#(
  parameter int unsigned TIMER_PERIOD = 100000,   // 1 ms at 10 ns
  parameter int unsigned SRAM_WORDS   = 32768,    // 128 kB per PE
  parameter int unsigned SPIKE_DEPTH  = 512,
  parameter int unsigned ROUTER_ENTRIES = 64
) (
  input  logic              clk_ref,
  input  logic              rst_n,
  // processor side of each PE (core clock domain of that PE)
  output logic [NPE-1:0]    cpu_clk,
  output logic [NPE-1:0]    cpu_rst_n,
  output logic [NPE-1:0]    cpu_irq,
  input  logic [NPE-1:0]    cpu_mem_en,
  input  logic [3:0]        cpu_mem_we       [NPE],
  input  logic [$clog2(SRAM_WORDS)-1:0] cpu_mem_addr [NPE],
  input  logic [31:0]       cpu_mem_wdata    [NPE],
  output logic [31:0]       cpu_mem_rdata    [NPE],
  input  logic [NPE-1:0]    cpu_spk_pop,
  output logic [31:0]       cpu_spk_key      [NPE],
  output logic [$clog2(SPIKE_DEPTH):0] cpu_spk_count [NPE],
  output logic [NPE-1:0]    cpu_spk_overflow,
  input  logic [NPE-1:0]    cpu_dma_start,
  input  logic [31:0]       cpu_dma_dram_addr [NPE],
  input  logic [$clog2(SRAM_WORDS)-1:0] cpu_dma_sram_addr [NPE],
  input  logic [15:0]       cpu_dma_nwords   [NPE],
  output logic [NPE-1:0]    cpu_dma_busy,
  output logic [NPE-1:0]    cpu_dma_done,
  input  logic [NPE-1:0]    cpu_tx_valid,
  output logic [NPE-1:0]    cpu_tx_ready,
  input  noc_pkt_t          cpu_tx           [NPE],
  // DRAM side (LPDDR2 interface)
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output noc_pkt_t          dram_req,
  input  logic              dram_rsp_valid,
  output logic              dram_rsp_ready,
  input  noc_pkt_t          dram_rsp,
  // chip-to-chip link of the router
  input  logic              ext_in_valid,
  output logic              ext_in_ready,
  input  noc_pkt_t          ext_in_pkt,
  output logic              ext_out_valid,
  input  logic              ext_out_ready,
  output noc_pkt_t          ext_out_pkt,
  // status
  output logic              tick,
  output logic [PL_W-1:0]   pl_cur           [NPE],
  output logic [NPE-1:0]    powered,
  output logic [NPE-1:0]    pmc_busy,
  output logic [FREQ_W-1:0] freq_mhz         [NPE],
  output int                vdd_mv           [NPE],
  output logic [NPE-1:0]    pwr_ok,
  output int                rush_count       [NPE],
  output logic [31:0]       n_routed,
  output logic [31:0]       n_dropped,
  output logic [31:0]       n_ticks
);

  logic     [NNODES-1:0] x_in_valid, x_in_ready, x_out_valid, x_out_ready;
  noc_pkt_t              x_in_pkt [NNODES];
  noc_pkt_t              x_out_pkt[NNODES];

  noc_xbar #(.NPORTS(NNODES)) u_noc (
    .clk(clk_ref), .rst_n,
    .in_valid(x_in_valid), .in_ready(x_in_ready), .in_pkt(x_in_pkt),
    .out_valid(x_out_valid), .out_ready(x_out_ready), .out_pkt(x_out_pkt));

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    pe #(.NODE_ID(NODE_W'(p)), .SRAM_WORDS(SRAM_WORDS), .SPIKE_DEPTH(SPIKE_DEPTH)) u_pe (
      .clk_ref, .rst_n, .tick,
      .noc_in_valid(x_out_valid[p]), .noc_in_ready(x_out_ready[p]), .noc_in_pkt(x_out_pkt[p]),
      .noc_out_valid(x_in_valid[p]), .noc_out_ready(x_in_ready[p]), .noc_out_pkt(x_in_pkt[p]),
      .cpu_clk(cpu_clk[p]), .cpu_rst_n(cpu_rst_n[p]), .cpu_irq(cpu_irq[p]),
      .cpu_mem_en(cpu_mem_en[p]), .cpu_mem_we(cpu_mem_we[p]), .cpu_mem_addr(cpu_mem_addr[p]),
      .cpu_mem_wdata(cpu_mem_wdata[p]), .cpu_mem_rdata(cpu_mem_rdata[p]),
      .cpu_spk_pop(cpu_spk_pop[p]), .cpu_spk_key(cpu_spk_key[p]),
      .cpu_spk_count(cpu_spk_count[p]), .cpu_spk_overflow(cpu_spk_overflow[p]),
      .cpu_dma_start(cpu_dma_start[p]), .cpu_dma_dram_addr(cpu_dma_dram_addr[p]),
      .cpu_dma_sram_addr(cpu_dma_sram_addr[p]), .cpu_dma_nwords(cpu_dma_nwords[p]),
      .cpu_dma_busy(cpu_dma_busy[p]), .cpu_dma_done(cpu_dma_done[p]),
      .cpu_tx_valid(cpu_tx_valid[p]), .cpu_tx_ready(cpu_tx_ready[p]), .cpu_tx(cpu_tx[p]),
      .pl_cur(pl_cur[p]), .powered(powered[p]), .pmc_busy(pmc_busy[p]),
      .freq_mhz(freq_mhz[p]), .vdd_mv(vdd_mv[p]), .pwr_ok(pwr_ok[p]),
      .rush_count(rush_count[p]));
  end

  spinn_router #(.ENTRIES(ROUTER_ENTRIES)) u_router (
    .clk(clk_ref), .rst_n,
    .in_valid(x_out_valid[NODE_ROUTER]), .in_ready(x_out_ready[NODE_ROUTER]),
    .in_pkt(x_out_pkt[NODE_ROUTER]),
    .out_valid(x_in_valid[NODE_ROUTER]), .out_ready(x_in_ready[NODE_ROUTER]),
    .out_pkt(x_in_pkt[NODE_ROUTER]),
    .ext_in_valid, .ext_in_ready, .ext_in_pkt,
    .ext_out_valid, .ext_out_ready, .ext_out_pkt,
    .n_routed, .n_dropped);

  // DRAM port
  assign dram_req_valid           = x_out_valid[NODE_DRAM];
  assign x_out_ready[NODE_DRAM]   = dram_req_ready;
  assign dram_req                 = x_out_pkt[NODE_DRAM];
  assign x_in_valid[NODE_DRAM]    = dram_rsp_valid;
  assign dram_rsp_ready           = x_in_ready[NODE_DRAM];
  assign x_in_pkt[NODE_DRAM]      = dram_rsp;

  // periphery: timer (receives configuration, sends nothing)
  sys_timer #(.PERIOD(TIMER_PERIOD)) u_timer (
    .clk(clk_ref), .rst_n,
    .in_valid(x_out_valid[NODE_PERIPH]), .in_ready(x_out_ready[NODE_PERIPH]),
    .in_pkt(x_out_pkt[NODE_PERIPH]), .tick, .n_ticks);
  assign x_in_valid[NODE_PERIPH] = 1'b0;
  assign x_in_pkt[NODE_PERIPH]   = '0;

  shared_sram u_shsram (
    .clk(clk_ref), .rst_n,
    .in_valid(x_out_valid[NODE_SHSRAM]), .in_ready(x_out_ready[NODE_SHSRAM]),
    .in_pkt(x_out_pkt[NODE_SHSRAM]),
    .out_valid(x_in_valid[NODE_SHSRAM]), .out_ready(x_in_ready[NODE_SHSRAM]),
    .out_pkt(x_in_pkt[NODE_SHSRAM]));

endmodule
