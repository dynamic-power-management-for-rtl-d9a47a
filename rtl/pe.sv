// pe: one processing element (PE) with its power management, the "core
// wrapper" of the system.
//
// The PE is split into an always-on part, clocked by the reference clock,
// and a switchable core domain, clocked by the PE's own ADPLL:
//   always-on:  pmc (power management controller), plevel_lut, the NoC
//               side of noc_if
//   clock gen:  adpll (behavioural), frequency from the Plevel LUT, gated
//               by the PMC's clk_en
//   supply:     power_switch (behavioural header switches, three rails),
//               driven by the PMC
//   core:       processor (outside this module: its buses are the cpu_*
//               ports), pe_sram, spike_fifo, dma_ctrl, the core side of
//               noc_if; iso_ls clamps the core's send requests while the
//               PMC isolates the domain
// A PL change is a NoC packet of type PKT_PMC to this PE's node, sent by
// another PE (remote DVFS) or by this PE's processor (self DVFS, looped back
// inside noc_if). The timer tick reaches the processor as cpu_irq, a
// one-cycle pulse in the core clock, delivered after the clock restarts if
// it was stopped. The core reset cpu_rst_n is held while the PMC holds the
// core in reset (power shut-off) and released synchronously to the core
// clock.
//
// Two tool warnings stand on purpose: crst_q2, the output of the core
// reset synchroniser, is used as the asynchronous reset of the core-domain
// blocks (asserted asynchronously, released in step with the core clock,
// which is what the synchroniser is for); and the spike FIFO's full and
// empty outputs are left open because the processor reads the count, which
// says both.
//
// The block structure is the paper's; the processor interface signals,
// the tick path and the reset handling are this design's choices.
`timescale 1ns / 1ps
module pe
  import dvfs_pkg::*;
#(
  parameter logic [NODE_W-1:0] NODE_ID  = '0,
  parameter bit                RESET_ON = 1'b1,
  parameter int unsigned       SRAM_WORDS = 32768,
  parameter int unsigned       SPIKE_DEPTH = 512
) (
  input  logic              clk_ref,
  input  logic              rst_n,
  input  logic              tick,
  // NoC port
  input  logic              noc_in_valid,
  output logic              noc_in_ready,
  input  noc_pkt_t          noc_in_pkt,
  output logic              noc_out_valid,
  input  logic              noc_out_ready,
  output noc_pkt_t          noc_out_pkt,
  // processor side, core clock domain
  output logic              cpu_clk,
  output logic              cpu_rst_n,
  output logic              cpu_irq,
  input  logic              cpu_mem_en,
  input  logic [3:0]        cpu_mem_we,
  input  logic [$clog2(SRAM_WORDS)-1:0] cpu_mem_addr,
  input  logic [31:0]       cpu_mem_wdata,
  output logic [31:0]       cpu_mem_rdata,
  input  logic              cpu_spk_pop,
  output logic [31:0]       cpu_spk_key,
  output logic [$clog2(SPIKE_DEPTH):0] cpu_spk_count,
  output logic              cpu_spk_overflow,
  input  logic              cpu_dma_start,
  input  logic [31:0]       cpu_dma_dram_addr,
  input  logic [$clog2(SRAM_WORDS)-1:0] cpu_dma_sram_addr,
  input  logic [15:0]       cpu_dma_nwords,
  output logic              cpu_dma_busy,
  output logic              cpu_dma_done,
  input  logic              cpu_tx_valid,
  output logic              cpu_tx_ready,
  input  noc_pkt_t          cpu_tx,
  // status
  output logic [PL_W-1:0]   pl_cur,
  output logic              powered,
  output logic              pmc_busy,
  output logic [FREQ_W-1:0] freq_mhz,
  output int                vdd_mv,
  output logic              pwr_ok,
  output int                rush_count
);

  localparam int unsigned SAW = $clog2(SRAM_WORDS);

  // ---------------- power management ----------------
  logic              pmc_valid, pmc_ready;
  pmc_cmd_t          pmc_cmd;
  logic [PL_W-1:0]   pl_idx, rail_pl, lut_widx;
  logic              lut_we, pre_en, main_en, clk_en, iso_en, core_rst_n;
  logic [FREQ_W-1:0] lut_wmhz;
  logic [PRE_W-1:0]  n_pre;

  pmc #(.RESET_ON(RESET_ON)) u_pmc (
    .clk_ref, .rst_n,
    .cmd_valid(pmc_valid), .cmd_ready(pmc_ready), .cmd(pmc_cmd),
    .pl_idx, .lut_we, .lut_widx, .lut_wmhz,
    .rail_pl, .pre_en, .n_pre, .main_en,
    .clk_en, .iso_en, .core_rst_n,
    .busy(pmc_busy), .powered, .pl_cur);

  plevel_lut u_lut (
    .clk_ref, .rst_n,
    .wr_en(lut_we), .wr_idx(lut_widx), .wr_mhz(lut_wmhz),
    .rd_idx(pl_idx), .freq_mhz);

  adpll u_adpll (.clk_ref, .freq_mhz, .clk_en, .clk_core(cpu_clk));

  power_switch #(.INIT_ON(RESET_ON ? 1 : 0)) u_sw (
    .rail_sel(rail_pl), .pre_en, .n_pre, .main_en,
    .vdd_mv, .pwr_ok, .rush_count);

  // ---------------- core reset and tick ----------------
  logic crst_a, crst_q1, crst_q2;
  assign crst_a = rst_n && core_rst_n;
  always_ff @(posedge cpu_clk or negedge crst_a) begin
    if (!crst_a) {crst_q2, crst_q1} <= 2'b00;
    else         {crst_q2, crst_q1} <= {crst_q1, 1'b1};
  end
  assign cpu_rst_n = crst_q2;

  pulse_sync u_tick (.src_clk(clk_ref), .dst_clk(cpu_clk), .rst_n,
                     .src_pulse(tick), .dst_pulse(cpu_irq));

  // ---------------- NoC interface ----------------
  logic     spike_push, dma_rsp_valid, dma_req_valid, dma_req_ready;
  logic     tx_valid_iso, dma_req_valid_iso;
  logic [31:0] spike_key;
  noc_pkt_t dma_rsp, dma_req;

  iso_ls #(.W(2)) u_iso (
    .iso_en,
    .d({cpu_tx_valid, dma_req_valid}),
    .q({tx_valid_iso, dma_req_valid_iso}));

  noc_if #(.NODE_ID(NODE_ID)) u_nif (
    .clk_noc(clk_ref), .clk_core(cpu_clk), .rst_n, .iso_en,
    .in_valid(noc_in_valid), .in_ready(noc_in_ready), .in_pkt(noc_in_pkt),
    .out_valid(noc_out_valid), .out_ready(noc_out_ready), .out_pkt(noc_out_pkt),
    .pmc_valid, .pmc_ready, .pmc_cmd,
    .spike_push, .spike_key, .dma_rsp_valid, .dma_rsp,
    .cpu_tx_valid(tx_valid_iso), .cpu_tx_ready, .cpu_tx,
    .dma_req_valid(dma_req_valid_iso), .dma_req_ready, .dma_req);

  // ---------------- core domain ----------------
  spike_fifo #(.DEPTH(SPIKE_DEPTH)) u_spk (
    .clk(cpu_clk), .rst_n(cpu_rst_n),
    .push(spike_push), .push_key(spike_key),
    .pop(cpu_spk_pop), .pop_key(cpu_spk_key),
    .count(cpu_spk_count), .full(), .empty(), .overflow(cpu_spk_overflow));

  logic           dma_we;
  logic [SAW-1:0] dma_waddr;
  logic [31:0]    dma_wdata;

  dma_ctrl #(.SRAM_AW(SAW), .NODE_ID(NODE_ID)) u_dma (
    .clk(cpu_clk), .rst_n(cpu_rst_n),
    .start(cpu_dma_start), .dram_addr(cpu_dma_dram_addr),
    .sram_addr(cpu_dma_sram_addr), .nwords(cpu_dma_nwords),
    .busy(cpu_dma_busy), .done(cpu_dma_done),
    .req_valid(dma_req_valid), .req_ready(dma_req_ready), .req(dma_req),
    .rsp_valid(dma_rsp_valid), .rsp(dma_rsp),
    .mem_we(dma_we), .mem_addr(dma_waddr), .mem_wdata(dma_wdata));

  pe_sram #(.WORDS(SRAM_WORDS)) u_sram (
    .clk(cpu_clk),
    .a_en(cpu_mem_en), .a_we(cpu_mem_we), .a_addr(cpu_mem_addr),
    .a_wdata(cpu_mem_wdata), .a_rdata(cpu_mem_rdata),
    .b_we(dma_we), .b_addr(dma_waddr), .b_wdata(dma_wdata));

endmodule
