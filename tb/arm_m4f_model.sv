// arm_m4f_model: behavioural model of the processor of one PE running the
// spiking-neural-network kernel with software performance-level (PL)
// selection. Not synthesizable; for testbenches only. It drives the PE's
// processor ports and runs entirely in the PE core clock, so it stalls
// while the PMC has the clock stopped and restarts from boot after a
// power shut-off.
//
// Boot: clears the neuron states and writes the synapse-row lookup table
// into local SRAM (one word per source neuron: row length in the top byte,
// DRAM byte address of the row below). The PE selected as MANAGER also
// writes the multicast routing table, stores every PE's PL thresholds in the
// shared SRAM, and later powers PE PSO_PE off and on again by remote
// commands.
//
// Every timer tick (cpu_irq), the simulation cycle:
//   1. l = number of spikes in the spike FIFO (received during the last
//      cycle).
//   2. PL = PL1 if l < lth1, PL2 if l < lth2, else PL3; sent as a PMC
//      command to the PE's own node (self DVFS).
//   3. Each of the l spikes: pop the key, read the row address and length
//      from the lookup table, DMA the row from DRAM into SRAM, then read
//      each synapse word from SRAM and add its weight into the ring buffer
//      slot of its target neuron and delay. The DMA of the next row is
//      started before the current one is processed.
//   4. Neuron update for all N_NEUR neurons: leak, add the current ring
//      buffer slot, fire above THRESH (send a spike to the router, key =
//      PE number << 12 | neuron) and reset; state kept in SRAM.
//   5. Back to PL1 (self DVFS) and wait for the next tick.
// Compute costs are modelled as extra core clock cycles: C_PRE per
// received spike, C_SYN per synapse, C_NEUR per neuron. The cycle structure
// and the selection rule are the paper's software flow; the cost numbers,
// the network, the key format and the table layout are this testbench's.
//
// The model checks every synapse word it reads from SRAM against the DRAM
// content (n_word_err), and counts a missed deadline when a tick arrives
// before a cycle's work is done (n_miss).
`timescale 1ns / 1ps
module arm_m4f_model
  import dvfs_pkg::*;
#(
  parameter int unsigned PE        = 0,
  parameter int unsigned SRAM_AW   = 15,
  parameter int unsigned SPK_CW    = 10,
  parameter int unsigned N_NEUR    = 250,
  parameter int unsigned FAN_STIM  = 16,     // row length, stimulus sources
  parameter int unsigned FAN_NEUR  = 8,      // row length, neuron sources
  parameter int unsigned LTH1      = 20,
  parameter int unsigned LTH2      = 100,
  parameter int unsigned C_PRE     = 150,
  parameter int unsigned C_SYN     = 8,
  parameter int unsigned C_NEUR    = 200,
  parameter int          THRESH    = 4000,
  parameter bit          MANAGER   = 1'b0,
  parameter int unsigned PSO_PE    = 3,
  parameter int unsigned PU_TICK   = 2      // manager powers PSO_PE up at this tick
) (
  input  logic                cpu_clk,
  input  logic                cpu_rst_n,
  input  logic                cpu_irq,
  output logic                mem_en,
  output logic [3:0]          mem_we,
  output logic [SRAM_AW-1:0]  mem_addr,
  output logic [31:0]         mem_wdata,
  input  logic [31:0]         mem_rdata,
  output logic                spk_pop,
  input  logic [31:0]         spk_key,
  input  logic [SPK_CW-1:0]   spk_count,
  output logic                dma_start,
  output logic [31:0]         dma_dram_addr,
  output logic [SRAM_AW-1:0]  dma_sram_addr,
  output logic [15:0]         dma_nwords,
  input  logic                dma_busy,
  input  logic                dma_done,
  output logic                tx_valid,
  input  logic                tx_ready,
  output noc_pkt_t            tx,
  // observation
  output int                  n_cycles,     // ticks served
  output int                  l_seen,       // l of the last tick
  output logic [PL_W-1:0]     want_pl,      // PL last requested by self DVFS
  output int                  n_spk_in,     // spikes processed
  output int                  n_syn,        // synaptic events processed
  output int                  n_spk_out,    // spikes sent
  output int                  n_dma,        // DMAs completed
  output int                  n_word_err,
  output int                  n_miss,
  output int                  n_self,       // self PL commands sent
  output int                  n_remote,     // remote PMC commands sent
  output realtime             t_sp_max      // longest tick-to-done time
);

  // SRAM map (word addresses)
  localparam int unsigned LUT_BASE  = 0;      // 4096 entries, {src, neuron}
  localparam int unsigned NEUR_BASE = 4096;   // neuron membrane states
  localparam int unsigned TH_BASE   = 4608;   // two threshold words
  localparam int unsigned BUF_A     = 8192;   // synapse row buffers
  localparam int unsigned BUF_B     = 8448;

  function automatic logic [31:0] syn_word(input logic [31:0] a);
    synapse_word_t w;
    logic [31:0] i;
    i = a >> 2;
    w = '0;
    w.weight     = 16'((i * 32'd40503) & 32'h3FF);
    w.target     = 8'((i * 32'd7) + (i >> 8));
    w.inhibitory = (i[2:0] == 3'd5);
    w.delay      = 4'(i[5:2]);
    return w;
  endfunction

  // sources that project to this PE: stimulus source 8+PE and the neurons
  // of PE (PE+2)%3 (a ring over PE0..PE2); PE3 has stimulus input only
  function automatic int nsrc_of(input int src);
    if (src == 8 + int'(PE)) return FAN_STIM;
    if (PE < 3 && src == int'((PE + 2) % 3)) return FAN_NEUR;
    return 0;
  endfunction

  int ring [16][256];
  int lth1, lth2;
  int tick_no;
  bit have_th;

  bit in_cycle;

  // Outputs change, and inputs are sampled, 50 ps after each core clock
  // edge, so inputs read here hold their values at the next edge. A tick
  // seen while a cycle's work is still running is a missed deadline.
  task automatic clk1();
    @(posedge cpu_clk);
    #0.05;
    if (in_cycle && cpu_irq) n_miss++;
  endtask
  task automatic idle(input int n);
    repeat (n) clk1();
  endtask

  task automatic mem_write(input int a, input logic [31:0] d);
    mem_en = 1'b1; mem_we = 4'hF; mem_addr = SRAM_AW'(a); mem_wdata = d;
    clk1();
    mem_en = 1'b0; mem_we = 4'h0;
  endtask
  task automatic mem_read(input int a, output logic [31:0] d);
    mem_en = 1'b1; mem_we = 4'h0; mem_addr = SRAM_AW'(a);
    clk1();
    mem_en = 1'b0;
    clk1();
    d = mem_rdata;
  endtask

  task automatic send(input noc_pkt_t p);
    tx_valid = 1'b1; tx = p;
    while (!tx_ready) clk1();
    clk1();
    tx_valid = 1'b0;
  endtask

  task automatic pmc_cmd(input int dst, input logic [1:0] op, input logic [3:0] sel, input int arg);
    noc_pkt_t p;
    p = '0; p.ptype = PKT_PMC; p.dst = NODE_W'(dst); p.src = NODE_W'(PE);
    p.addr = {24'd0, sel, 2'b00, op}; p.data = 32'(arg);
    send(p);
    if (dst == int'(PE)) n_self++; else n_remote++;
  endtask

  task automatic set_pl(input int pl);
    want_pl = PL_W'(pl);
    pmc_cmd(PE, 2'd0, 4'd0, pl);
  endtask

  task automatic noc_write(input int dst, input logic [31:0] a, input logic [31:0] d);
    noc_pkt_t p;
    p = '0; p.ptype = PKT_WR; p.dst = NODE_W'(dst); p.src = NODE_W'(PE); p.addr = a; p.data = d;
    send(p);
  endtask

  task automatic dma(input logic [31:0] da, input int sa, input int n);
    dma_start = 1'b1; dma_dram_addr = da; dma_sram_addr = SRAM_AW'(sa); dma_nwords = 16'(n);
    clk1();
    dma_start = 1'b0;
    clk1();
  endtask
  task automatic dma_wait();
    while (dma_busy) clk1();
    clk1();
    n_dma++;
  endtask

  task automatic route(input int e, input logic [31:0] key, input logic [31:0] r);
    noc_write(NODE_ROUTER, {16'd0, 8'(e), 8'd0}, key);
    noc_write(NODE_ROUTER, {16'd0, 8'(e), 8'd1}, 32'hFFFF_F000);
    noc_write(NODE_ROUTER, {16'd0, 8'(e), 8'd2}, r);
  endtask

  task automatic boot();
    for (int n = 0; n < int'(N_NEUR); n++) mem_write(NEUR_BASE + n, '0);
    for (int s = 0; s < 16; s++)
      if (nsrc_of(s) != 0)
        for (int n = 0; n < 256; n++)
          mem_write(LUT_BASE + s * 256 + n, {8'(nsrc_of(s)), 24'((s * 256 + n) * 1024)});
    foreach (ring[i, j]) ring[i][j] = 0;
    have_th = 0;
    tick_no = 0;
    want_pl = '0;
    if (MANAGER) begin
      for (int p = 0; p < 4; p++) route(p, 32'((8 + p) << 12), 32'(1 << p));   // stimulus
      route(4, 32'h0000, 32'b00010);    // PE0 neurons -> PE1
      route(5, 32'h1000, 32'b00100);    // PE1 neurons -> PE2
      route(6, 32'h2000, 32'b00001);    // PE2 neurons -> PE0
      route(7, 32'h3000, 32'b10000);    // PE3 neurons -> chip link
      for (int p = 0; p < 4; p++) begin
        noc_write(NODE_SHSRAM, 32'hF000_0000 + 32'(8 * p), LTH1);
        noc_write(NODE_SHSRAM, 32'hF000_0004 + 32'(8 * p), LTH2);
      end
      idle(2000);
      pmc_cmd(PSO_PE, 2'd1, 4'd0, 0);   // unused PE off
    end
  endtask

  // one simulation cycle
  task automatic cycle();
    int l, pl, cur, slot, nn;
    logic [31:0] d, key, ent;
    realtime t0;
    synapse_word_t w;
    t0 = $realtime;
    in_cycle = 1;
    tick_no++;
    if (MANAGER && tick_no == int'(PU_TICK)) pmc_cmd(PSO_PE, 2'd0, 4'd0, 0);   // remote power-up
    if (!have_th) begin
      // thresholds from the shared SRAM
      dma(32'hF000_0000 + 32'(8 * PE), TH_BASE, 2);
      dma_wait();
      mem_read(TH_BASE, d);     lth1 = int'(d);
      mem_read(TH_BASE + 1, d); lth2 = int'(d);
      have_th = 1;
    end
    l = int'(spk_count);
    l_seen = l;
    pl = (l < lth1) ? 0 : (l < lth2) ? 1 : 2;
    set_pl(pl);
    // synapse processing, row DMA overlapped with processing of the last row
    cur = 0;
    for (int s = 0; s <= l; s++) begin
      int len_next;
      len_next = 0;
      if (s > 0) dma_wait();
      if (s < l) begin
        key = spk_key;
        spk_pop = 1'b1; clk1(); spk_pop = 1'b0;
        mem_read(LUT_BASE + int'({key[15:12], key[7:0]}), ent);
        len_next = int'(ent[31:24]);
        idle(C_PRE);
        if (len_next != 0) dma({8'd0, ent[23:0]}, (s % 2 == 0) ? BUF_A : BUF_B, len_next);
        else n_dma++;
        n_spk_in++;
      end
      if (s > 0) begin
        for (int k = 0; k < cur; k++) begin
          mem_read(((s - 1) % 2 == 0 ? BUF_A : BUF_B) + k, d);
          if (d != syn_word(32'((nn << 2) + 4 * k))) n_word_err++;
          w = synapse_word_t'(d);
          slot = (tick_no + int'(w.delay)) % 16;
          ring[slot][int'(w.target) % N_NEUR] += w.inhibitory ? -int'(w.weight) : int'(w.weight);
          idle(C_SYN);
          n_syn++;
        end
      end
      cur = len_next;
      nn = int'(ent[23:0]) >> 2;
    end
    // neuron updates
    slot = tick_no % 16;
    for (int i = 0; i < int'(N_NEUR); i++) begin
      int v;
      mem_read(NEUR_BASE + i, d);
      v = int'(d);
      v = v - (v >>> 2) + ring[slot][i];
      ring[slot][i] = 0;
      if (v < 0) v = 0;
      if (v >= THRESH) begin
        noc_pkt_t p;
        p = '0; p.ptype = PKT_MC; p.dst = NODE_W'(NODE_ROUTER); p.src = NODE_W'(PE);
        p.addr = 32'((PE << 12) | i);
        send(p);
        n_spk_out++;
        v = 0;
      end
      mem_write(NEUR_BASE + i, 32'(v));
      idle(C_NEUR);
    end
    set_pl(0);
    in_cycle = 0;
    if ($realtime - t0 > t_sp_max) t_sp_max = $realtime - t0;
    n_cycles++;
  endtask

  initial begin
    mem_en = 0; mem_we = 0; mem_addr = '0; mem_wdata = '0;
    spk_pop = 0; dma_start = 0; dma_dram_addr = '0; dma_sram_addr = '0; dma_nwords = '0;
    tx_valid = 0; tx = '0;
    n_cycles = 0; l_seen = 0; want_pl = '0; n_spk_in = 0; n_syn = 0; n_spk_out = 0;
    n_dma = 0; n_word_err = 0; n_miss = 0; n_self = 0; n_remote = 0; t_sp_max = 0;
    in_cycle = 0;
    lth1 = LTH1; lth2 = LTH2;
    forever begin
      do clk1(); while (!cpu_rst_n);
      boot();
      while (cpu_rst_n) begin
        clk1();
        if (cpu_irq) cycle();
      end
    end
  end

endmodule
