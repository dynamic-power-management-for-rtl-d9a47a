// tb_neuro_soc_top: end-to-end test of the four-PE system at its default
// sizes (128 kB SRAM per PE, 512-entry spike FIFOs, 64 routing entries,
// 1 ms timer tick at a 10 ns reference clock).
//
// Each PE runs a processor model (arm_m4f_model) executing the spiking
// network kernel with per-tick PL selection by spike count (thresholds 20
// and 100, those of the synfire benchmark); a DRAM model answers the
// synapse-row DMAs; the testbench injects stimulus spikes through the
// router's chip-to-chip link input a while after each tick. PE0 is the
// manager: it loads the routing table and the thresholds (via the shared
// SRAM), switches PE3 off at boot and powers it up again at its second tick
// (remote DVFS). Stimulus per tick: PE0 alternates 10 and 120 spikes, PE1
// gets 50, PE2 150, PE3 200 (while PE3 is off these are dropped at its
// isolated interface), plus one key with no route. After tick 5 a burst of
// 600 spikes is sent to PE2 to overflow its spike FIFO; at tick 6 PE2 must
// select PL3 for it. The run ends 0.6 ms after tick 7.
//
// Checked along the way: after every PMC sequence of a powered PE its PL
// is the one its software requested; each requested PL follows the
// threshold rule for the l that the software read; every synapse word read
// from SRAM equals the DRAM content; no cycle misses its 1 ms deadline;
// the core clock frequency matches the PL whenever a PE is running. Each mechanism is counted and must have happened at least
// once: timer tick, self DVFS, remote DVFS, supply change, power-up,
// power shut-off, each of PL1/PL2/PL3 in use, spike routing to PEs and to
// the chip link, unrouted spike dropped, spike dropped at an isolated PE,
// DMA from DRAM and from shared SRAM, spike FIFO overflow.
`timescale 1ns / 1ps
module tb_neuro_soc_top;
  import dvfs_pkg::*;

  localparam int AW = 15;
  localparam int CW = 10;

  logic clk_ref = 0, rst_n = 0;
  always #5 clk_ref = !clk_ref;

  logic [NPE-1:0] cpu_clk, cpu_rst_n, cpu_irq, cpu_mem_en, cpu_spk_pop, cpu_spk_overflow;
  logic [3:0]     cpu_mem_we [NPE];
  logic [AW-1:0]  cpu_mem_addr [NPE];
  logic [31:0]    cpu_mem_wdata [NPE], cpu_mem_rdata [NPE], cpu_spk_key [NPE];
  logic [CW-1:0]  cpu_spk_count [NPE];
  logic [NPE-1:0] cpu_dma_start, cpu_dma_busy, cpu_dma_done, cpu_tx_valid, cpu_tx_ready;
  logic [31:0]    cpu_dma_dram_addr [NPE];
  logic [AW-1:0]  cpu_dma_sram_addr [NPE];
  logic [15:0]    cpu_dma_nwords [NPE];
  noc_pkt_t       cpu_tx [NPE];
  logic           dram_req_valid, dram_req_ready, dram_rsp_valid, dram_rsp_ready;
  noc_pkt_t       dram_req, dram_rsp;
  logic           ext_in_valid = 0, ext_in_ready, ext_out_valid, ext_out_ready = 1;
  noc_pkt_t       ext_in_pkt = '0, ext_out_pkt;
  logic           tick;
  logic [PL_W-1:0] pl_cur [NPE];
  logic [NPE-1:0] powered, pmc_busy, pwr_ok;
  logic [FREQ_W-1:0] freq_mhz [NPE];
  int             vdd_mv [NPE], rush_count [NPE];
  logic [31:0]    n_routed, n_dropped, n_ticks;

  neuro_soc_top dut (.*);

  int n_dram_reads;
  dram_model u_dram (
    .clk(clk_ref), .rst_n,
    .req_valid(dram_req_valid), .req_ready(dram_req_ready), .req(dram_req),
    .rsp_valid(dram_rsp_valid), .rsp_ready(dram_rsp_ready), .rsp(dram_rsp),
    .n_reads(n_dram_reads));

  int        m_cycles [NPE], m_l [NPE], m_spk_in [NPE], m_syn [NPE], m_spk_out [NPE];
  int        m_dma [NPE], m_word_err [NPE], m_miss [NPE], m_self [NPE], m_remote [NPE];
  logic [PL_W-1:0] m_want [NPE];
  realtime   m_tsp [NPE];

  for (genvar p = 0; p < NPE; p++) begin : g_cpu
    arm_m4f_model #(.PE(p), .SRAM_AW(AW), .SPK_CW(CW), .MANAGER(p == 0)) u_cpu (
      .cpu_clk(cpu_clk[p]), .cpu_rst_n(cpu_rst_n[p]), .cpu_irq(cpu_irq[p]),
      .mem_en(cpu_mem_en[p]), .mem_we(cpu_mem_we[p]), .mem_addr(cpu_mem_addr[p]),
      .mem_wdata(cpu_mem_wdata[p]), .mem_rdata(cpu_mem_rdata[p]),
      .spk_pop(cpu_spk_pop[p]), .spk_key(cpu_spk_key[p]), .spk_count(cpu_spk_count[p]),
      .dma_start(cpu_dma_start[p]), .dma_dram_addr(cpu_dma_dram_addr[p]),
      .dma_sram_addr(cpu_dma_sram_addr[p]), .dma_nwords(cpu_dma_nwords[p]),
      .dma_busy(cpu_dma_busy[p]), .dma_done(cpu_dma_done[p]),
      .tx_valid(cpu_tx_valid[p]), .tx_ready(cpu_tx_ready[p]), .tx(cpu_tx[p]),
      .n_cycles(m_cycles[p]), .l_seen(m_l[p]), .want_pl(m_want[p]), .n_spk_in(m_spk_in[p]),
      .n_syn(m_syn[p]), .n_spk_out(m_spk_out[p]), .n_dma(m_dma[p]), .n_word_err(m_word_err[p]),
      .n_miss(m_miss[p]), .n_self(m_self[p]), .n_remote(m_remote[p]), .t_sp_max(m_tsp[p]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int c_sc = 0, c_pu = 0, c_pso = 0, c_pl_used [NUM_PL], c_ext_out = 0, c_iso_drop = 0;
  int c_self_cmd = 0, c_remote_cmd = 0, c_sh_dma = 0, c_freq_ok = 0, c_freq_bad = 0;
  logic [NPE-1:0] busy_d = '0, pow_d = '0;
  logic [PL_W-1:0] pl_d [NPE];
  initial foreach (c_pl_used[i]) c_pl_used[i] = 0;

  // remote and self PMC commands at each PE's NoC interface
  always @(posedge clk_ref) if (rst_n) begin
    if (dut.g_pe[0].u_pe.u_nif.pmc_valid && dut.g_pe[0].u_pe.u_nif.pmc_ready) begin
      if (dut.g_pe[0].u_pe.u_nif.remote_pmc) c_remote_cmd++; else c_self_cmd++; end
    if (dut.g_pe[1].u_pe.u_nif.pmc_valid && dut.g_pe[1].u_pe.u_nif.pmc_ready) begin
      if (dut.g_pe[1].u_pe.u_nif.remote_pmc) c_remote_cmd++; else c_self_cmd++; end
    if (dut.g_pe[2].u_pe.u_nif.pmc_valid && dut.g_pe[2].u_pe.u_nif.pmc_ready) begin
      if (dut.g_pe[2].u_pe.u_nif.remote_pmc) c_remote_cmd++; else c_self_cmd++; end
    if (dut.g_pe[3].u_pe.u_nif.pmc_valid && dut.g_pe[3].u_pe.u_nif.pmc_ready) begin
      if (dut.g_pe[3].u_pe.u_nif.remote_pmc) c_remote_cmd++; else c_self_cmd++; end
    // spikes reaching PE3 while its core is isolated
    if (dut.g_pe[3].u_pe.u_nif.in_valid && dut.g_pe[3].u_pe.u_nif.in_ready &&
        dut.g_pe[3].u_pe.u_nif.in_pkt.ptype == PKT_MC && dut.g_pe[3].u_pe.iso_en) c_iso_drop++;
    // DMA reads served by the shared SRAM
    if (dut.u_shsram.in_valid && dut.u_shsram.in_ready && dut.u_shsram.in_pkt.ptype == PKT_RD_REQ)
      c_sh_dma++;
    if (ext_out_valid && ext_out_ready) c_ext_out++;
  end

  // PMC sequences: classify at the end of each, and check the PL
  always @(posedge clk_ref) if (rst_n) begin
    for (int p = 0; p < NPE; p++) begin
      if (busy_d[p] && !pmc_busy[p]) begin
        if (pow_d[p] && !powered[p]) c_pso++;
        else if (!pow_d[p] && powered[p]) c_pu++;
        else if (pl_d[p] != pl_cur[p]) c_sc++;
        if (powered[p])
          check(pl_cur[p] == m_want[p], $sformatf("PE%0d PL %0d after sequence, software asked %0d",
                                                  p, pl_cur[p], m_want[p]));
      end
      if (!pmc_busy[p]) begin pow_d[p] = powered[p]; pl_d[p] = pl_cur[p]; end
      busy_d[p] = pmc_busy[p];
    end
  end

  // PL in use and clock frequency check for running PEs
  realtime last_edge [NPE];
  realtime per [NPE];
  for (genvar p = 0; p < NPE; p++) begin : g_mon
    initial begin last_edge[p] = 0; per[p] = 0; end
    always @(posedge cpu_clk[p]) begin per[p] = $realtime - last_edge[p]; last_edge[p] = $realtime; end
  end
  function automatic real want_period(input logic [PL_W-1:0] pl);
    return pl == 0 ? 8.0 : pl == 1 ? 1000.0 / 333.0 : 2.0;
  endfunction
  always @(posedge clk_ref) if (rst_n) begin
    for (int p = 0; p < NPE; p++)
      if (powered[p] && !pmc_busy[p] && $realtime - last_edge[p] < 9.0 && per[p] > 0.0 &&
          per[p] < 9.0 && pl_cur[p] == pl_d[p]) begin
        if (per[p] > want_period(pl_cur[p]) - 0.05 && per[p] < want_period(pl_cur[p]) + 0.05)
          c_freq_ok++;
        else c_freq_bad++;
      end
  end
  always @(posedge clk_ref) if (rst_n) begin
    for (int p = 0; p < NPE; p++) if (powered[p] && !pmc_busy[p]) c_pl_used[pl_cur[p]]++;
  end

  // PL selection rule, checked whenever software reads l
  int l_d [NPE];
  initial foreach (l_d[i]) l_d[i] = -1;
  always @(posedge clk_ref) begin
    for (int p = 0; p < NPE; p++) begin
      if (m_cycles[p] >= 0 && m_l[p] != l_d[p] && m_want[p] != 0) begin
        int e;
        e = m_l[p] < 20 ? 0 : m_l[p] < 100 ? 1 : 2;
        check(int'(m_want[p]) == e, $sformatf("PE%0d l=%0d selects PL%0d", p, m_l[p], m_want[p] + 1));
      end
      l_d[p] = m_l[p];
    end
  end

  // ---------------- stimulus via the chip link ----------------
  noc_pkt_t stim [$];
  always @(posedge clk_ref) if (ext_in_valid && ext_in_ready) void'(stim.pop_front());
  always @(negedge clk_ref) begin
    ext_in_valid = stim.size() > 0;
    if (stim.size() > 0) ext_in_pkt = stim[0];
  end
  task automatic stim_push(input int src, input int n);
    for (int i = 0; i < n; i++) begin
      noc_pkt_t s;
      s = '0; s.ptype = PKT_MC; s.dst = NODE_W'(NODE_ROUTER); s.src = NODE_W'(NODE_ROUTER);
      s.addr = 32'((src << 12) | ($urandom_range(0, 255)));
      stim.push_back(s);
    end
  endtask

  int tick_no = 0;
  always @(posedge clk_ref) if (rst_n && tick) tick_no++;

  initial begin
    int ovf_miss0;
    repeat (5) @(negedge clk_ref);
    rst_n = 1;
    for (int k = 1; k <= 5; k++) begin
      wait (tick_no == k);
      repeat (5000) @(negedge clk_ref);      // 50 us into the cycle
      stim_push(8, (k % 2 == 1) ? 10 : 120);
      stim_push(9, 50);
      stim_push(10, 150);
      stim_push(11, 200);
      if (k == 1) begin
        noc_pkt_t s;
        s = '0; s.ptype = PKT_MC; s.addr = 32'hF000; stim.push_back(s);   // no route
      end
    end
    wait (stim.size() == 0);
    repeat (20000) @(negedge clk_ref);
    stim_push(10, 600);
    wait (tick_no == 6);
    repeat (100) @(negedge clk_ref);
    check(cpu_spk_overflow[2], "PE2 spike FIFO overflowed");
    check(m_l[2] == 512, $sformatf("PE2 read a full FIFO (%0d)", m_l[2]));
    ovf_miss0 = m_miss[2];
    wait (tick_no == 7);
    repeat (60000) @(negedge clk_ref);

    // ---- results ----
    for (int p = 0; p < NPE; p++) begin
      $display("PE%0d: cycles=%0d spikes_in=%0d syn=%0d spikes_out=%0d dma=%0d self=%0d remote=%0d t_sp_max=%0.1f us",
               p, m_cycles[p], m_spk_in[p], m_syn[p], m_spk_out[p], m_dma[p], m_self[p], m_remote[p],
               m_tsp[p] / 1000.0);
      check(m_word_err[p] == 0, $sformatf("PE%0d synapse words from SRAM match DRAM (%0d errors)", p, m_word_err[p]));
      check(m_miss[p] == 0, $sformatf("PE%0d met every 1 ms deadline (%0d misses)", p, m_miss[p]));
      check(rush_count[p] == 0, $sformatf("PE%0d no rush current (%0d)", p, rush_count[p]));
    end
    check(m_cycles[0] == 7 && m_cycles[1] == 7 && m_cycles[2] == 7, "PE0..2 served every tick");
    check(m_cycles[3] >= 4, "PE3 served ticks after power-up");
    $display("mechanisms: ticks=%0d self_cmd=%0d remote_cmd=%0d SC=%0d PU=%0d PSO=%0d PL1/2/3 cycles=%0d/%0d/%0d",
             n_ticks, c_self_cmd, c_remote_cmd, c_sc, c_pu, c_pso, c_pl_used[0], c_pl_used[1], c_pl_used[2]);
    $display("            routed=%0d dropped=%0d link_out=%0d iso_drop=%0d dram_reads=%0d shsram_reads=%0d overflow=%0b freq_ok=%0d",
             n_routed, n_dropped, c_ext_out, c_iso_drop, n_dram_reads, c_sh_dma, cpu_spk_overflow[2], c_freq_ok);
    check(n_ticks == 7, "timer tick every 1 ms");
    check(c_self_cmd > 0, "self DVFS happened");
    check(c_remote_cmd >= 2, "remote DVFS (shut-off and power-up) happened");
    check(c_sc > 0, "supply change happened");
    check(c_pu >= 1, "power-up happened");
    check(c_pso >= 1, "power shut-off happened");
    check(c_pl_used[0] > 0 && c_pl_used[1] > 0 && c_pl_used[2] > 0, "all three PLs used");
    check(n_routed > 0, "spikes routed");
    check(c_ext_out > 0, "spikes routed to the chip link");
    check(n_dropped >= 1, "unrouted spike dropped");
    check(c_iso_drop > 0, "spike dropped at an isolated PE");
    check(n_dram_reads > 0, "DMA from DRAM");
    check(c_sh_dma == 8, "DMA from shared SRAM (thresholds)");
    check(c_freq_ok > 0 && c_freq_bad == 0, $sformatf("core clock frequency matched the PL (%0d mismatches)", c_freq_bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk_ref);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
