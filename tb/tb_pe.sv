// tb_pe: self-checking test of one processing element with its power
// management. The testbench plays the rest of the system: it injects NoC
// packets (remote DVFS commands, spikes), answers the PE's DRAM read
// requests like a memory node, and drives the processor ports in the PE
// core clock as a processor would.
//
// Checked: the core clock period at PL1/PL2/PL3 (8 ns, 3 ns, 2 ns), a remote
// PL change and its duration in reference cycles (supply change below
// 100 ns), a self PL change sent by the processor to its own node, the
// supply net voltage after each change, spike delivery into the spike FIFO,
// a DMA of a synapse row into SRAM, the tick interrupt, power shut-off
// (clock stopped, core in reset, spikes dropped) and power-up by a remote
// command (about 0.75 us, core reset released), and that too few pre-charge
// switches make the model report a rush-current event while the default 31
// do not. The PE runs with reduced SRAM and spike FIFO sizes.
`timescale 1ns / 1ps
module tb_pe;
  import dvfs_pkg::*;
  localparam logic [NODE_W-1:0] ME = 3'd1;
  localparam int W = 1024;
  localparam int AW = $clog2(W);

  logic clk_ref = 0, rst_n = 0, tick = 0;
  always #5 clk_ref = !clk_ref;

  logic noc_in_valid = 0, noc_in_ready, noc_out_valid, noc_out_ready = 1;
  noc_pkt_t noc_in_pkt = '0, noc_out_pkt;
  logic cpu_clk, cpu_rst_n, cpu_irq;
  logic cpu_mem_en = 0;
  logic [3:0] cpu_mem_we = 0;
  logic [AW-1:0] cpu_mem_addr = 0;
  logic [31:0] cpu_mem_wdata = 0, cpu_mem_rdata, cpu_spk_key;
  logic cpu_spk_pop = 0, cpu_spk_overflow;
  logic [4:0] cpu_spk_count;
  logic cpu_dma_start = 0, cpu_dma_busy, cpu_dma_done;
  logic [31:0] cpu_dma_dram_addr = 0;
  logic [AW-1:0] cpu_dma_sram_addr = 0;
  logic [15:0] cpu_dma_nwords = 0;
  logic cpu_tx_valid = 0, cpu_tx_ready;
  noc_pkt_t cpu_tx = '0;
  logic [PL_W-1:0] pl_cur;
  logic powered, pmc_busy, pwr_ok;
  logic [FREQ_W-1:0] freq_mhz;
  int vdd_mv, rush_count;

  pe #(.NODE_ID(ME), .SRAM_WORDS(W), .SPIKE_DEPTH(16)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- NoC injection queue and DRAM responder ----
  noc_pkt_t inq [$];
  always @(posedge clk_ref) if (noc_in_valid && noc_in_ready) void'(inq.pop_front());
  always @(negedge clk_ref) begin
    noc_in_valid = inq.size() > 0;
    if (inq.size() > 0) noc_in_pkt = inq[0];
  end
  function automatic logic [31:0] dram_word(input logic [31:0] a);
    return a ^ 32'hC0DE_0000;
  endfunction
  int n_rd_req = 0;
  always @(posedge clk_ref) if (rst_n && noc_out_valid && noc_out_ready) begin
    if (noc_out_pkt.ptype == PKT_RD_REQ) begin
      noc_pkt_t r;
      n_rd_req++;
      r = '0; r.ptype = PKT_RD_RSP; r.dst = noc_out_pkt.src; r.src = 3'(NODE_DRAM);
      r.addr = noc_out_pkt.addr; r.data = dram_word(noc_out_pkt.addr);
      inq.push_back(r);
    end
  end

  function automatic noc_pkt_t pmc_pkt(input logic [1:0] op, input logic [3:0] sel, input int arg,
                                       input logic [NODE_W-1:0] dst = ME);
    noc_pkt_t p;
    p = '0; p.ptype = PKT_PMC; p.dst = dst; p.src = 3'd0;
    p.addr = {24'd0, sel, 2'b00, op}; p.data = 32'(arg);
    return p;
  endfunction

  // ---- measurements ----
  realtime last_edge = 0, period = 0;
  always @(posedge cpu_clk) begin period = $realtime - last_edge; last_edge = $realtime; end
  task automatic measure(output realtime p);
    repeat (3) @(posedge cpu_clk);
    p = period;
  endtask

  // duration of the next PMC sequence, in reference cycles
  task automatic seq_len(output int n);
    n = 0;
    wait (pmc_busy);
    while (pmc_busy) begin @(posedge clk_ref); #1; n++; end
  endtask

  int n_irq = 0;
  always @(posedge cpu_clk) if (rst_n && cpu_irq) n_irq++;

  initial begin
    realtime p;
    int n;
    int rush0;
    repeat (3) @(negedge clk_ref); rst_n = 1;
    wait (cpu_rst_n);
    measure(p);
    check(pl_cur == 0 && freq_mhz == 125 && vdd_mv == 700, "reset at PL1, 0.70 V, 125 MHz");
    check(p > 7.9 && p < 8.1, $sformatf("PL1 clock period %0.3f ns", p));

    // remote DVFS to PL3
    inq.push_back(pmc_pkt(2'd0, 4'd0, 2));
    seq_len(n);
    check(n == 9, $sformatf("supply change takes 9 reference cycles (%0d)", n));
    check(n * 10 < 100, "supply change < 100 ns");
    measure(p);
    check(pl_cur == 2 && freq_mhz == 500 && vdd_mv == 1000 && pwr_ok, "remote change to PL3");
    check(p > 1.9 && p < 2.1, $sformatf("PL3 clock period %0.3f ns", p));

    // self DVFS to PL2, sent by the processor to its own node
    @(negedge cpu_clk); cpu_tx_valid = 1; cpu_tx = pmc_pkt(2'd0, 4'd0, 1, ME);
    @(posedge cpu_clk); while (!cpu_tx_ready) @(posedge cpu_clk);
    @(negedge cpu_clk); cpu_tx_valid = 0;
    seq_len(n);
    measure(p);
    check(pl_cur == 1 && freq_mhz == 333 && vdd_mv == 850, "self change to PL2");
    check(p > 2.95 && p < 3.05, $sformatf("PL2 clock period %0.3f ns", p));
    check(n_rd_req == 0, "self command did not leave the PE");

    // spikes
    for (int i = 0; i < 5; i++) begin
      noc_pkt_t s;
      s = '0; s.ptype = PKT_MC; s.dst = ME; s.addr = 32'h100 + i;
      inq.push_back(s);
    end
    repeat (20) @(posedge clk_ref);
    check(cpu_spk_count == 5, $sformatf("5 spikes in FIFO (%0d)", cpu_spk_count));
    for (int i = 0; i < 5; i++) begin
      @(negedge cpu_clk);
      check(cpu_spk_key == 32'h100 + i, "spike key in order");
      cpu_spk_pop = 1;
      @(negedge cpu_clk); cpu_spk_pop = 0;
    end
    check(cpu_spk_count == 0, "spike FIFO drained");

    // DMA of a 12-word synapse row to SRAM word 40
    @(negedge cpu_clk);
    cpu_dma_start = 1; cpu_dma_dram_addr = 32'h0004_0100; cpu_dma_sram_addr = 40; cpu_dma_nwords = 12;
    @(negedge cpu_clk); cpu_dma_start = 0;
    check(cpu_dma_busy, "DMA busy");
    wait (cpu_dma_done);
    repeat (3) @(negedge cpu_clk);
    check(n_rd_req == 12, "12 DRAM read requests");
    for (int i = 0; i < 12; i++) begin
      @(negedge cpu_clk); cpu_mem_en = 1; cpu_mem_addr = AW'(40 + i);
      @(negedge cpu_clk); cpu_mem_en = 0;
      check(cpu_mem_rdata == dram_word(32'h0004_0100 + 4 * i), $sformatf("DMA word %0d in SRAM", i));
    end

    // timer tick -> interrupt
    @(negedge clk_ref); tick = 1; @(negedge clk_ref); tick = 0;
    repeat (5) @(posedge clk_ref);
    check(n_irq == 1, "tick reaches processor as one interrupt");

    // power shut-off by remote command
    inq.push_back(pmc_pkt(2'd1, 4'd0, 0));
    seq_len(n);
    repeat (3) @(posedge clk_ref);
    check(!powered && !cpu_rst_n, "PE off, core in reset");
    p = last_edge;
    repeat (20) @(posedge clk_ref);
    check(last_edge == p, "core clock stopped");
    begin
      noc_pkt_t s;
      s = '0; s.ptype = PKT_MC; s.dst = ME; s.addr = 32'h999;
      inq.push_back(s);
    end
    repeat (200) @(posedge clk_ref);
    check(inq.size() == 0, "spike to an off PE consumed");
    check(vdd_mv < 100, $sformatf("core net discharged (%0d mV)", vdd_mv));

    // power-up by remote command at PL1
    rush0 = rush_count;
    inq.push_back(pmc_pkt(2'd0, 4'd0, 0));
    seq_len(n);
    check(n == 76, $sformatf("power-up takes 76 reference cycles (%0d)", n));
    check(n * 10 > 500 && n * 10 < 1500, "power-up about 1 us");
    wait (cpu_rst_n);
    measure(p);
    check(powered && pl_cur == 0 && vdd_mv == 700 && p > 7.9 && p < 8.1, "PE back at PL1");
    check(cpu_spk_count == 0, "dropped spike not in FIFO after power-up");
    check(rush_count == rush0, "no rush current with 31 pre-charge switches");

    // one pre-charge switch only: the net cannot reach the rail in t_pre
    inq.push_back(pmc_pkt(2'd2, 4'(CFG_NPRE), 1));
    repeat (5) @(posedge clk_ref);
    inq.push_back(pmc_pkt(2'd0, 4'd0, 2));
    seq_len(n);
    check(rush_count == rush0 + 1, "rush current with one pre-charge switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_ref);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
