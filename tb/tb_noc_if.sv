// tb_noc_if: self-checking test of the PE's NoC interface.
// The NoC side runs at 10 ns, the core side at an unrelated 3.3 ns period.
// The test sends remote PMC commands (checked at the PMC port, in order and
// decoded), spikes (checked as keys at the spike FIFO port, in order),
// read responses (checked at the DMA port), spikes while the core is
// isolated (must be consumed and dropped), processor packets and DMA
// requests (checked at the NoC output, in order) and a self-addressed PMC
// command from the processor (must reach the PMC and never the NoC). The
// PMC and the NoC output apply random back-pressure.
`timescale 1ns / 1ps
module tb_noc_if;
  import dvfs_pkg::*;
  localparam logic [NODE_W-1:0] ME = 3'd2;
  logic clk_noc = 0, clk_core = 0, rst_n = 0, iso_en = 0;
  always #5    clk_noc  = !clk_noc;
  always #1.65 clk_core = !clk_core;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  noc_pkt_t in_pkt = '0, out_pkt;
  logic pmc_valid, pmc_ready = 1;
  pmc_cmd_t pmc_cmd;
  logic spike_push, dma_rsp_valid;
  logic [31:0] spike_key;
  noc_pkt_t dma_rsp;
  logic cpu_tx_valid = 0, cpu_tx_ready, dma_req_valid = 0, dma_req_ready;
  noc_pkt_t cpu_tx = '0, dma_req = '0;
  int checks = 0, failures = 0;
  bit bp = 0;

  noc_if #(.NODE_ID(ME)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // back-pressure
  always @(negedge clk_noc) begin
    pmc_ready = bp ? ($urandom_range(0, 1) == 1) : 1'b1;
    out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  // scoreboards
  pmc_cmd_t exp_pmc [$];
  logic [31:0] exp_spk [$];
  logic [31:0] exp_rsp [$];
  noc_pkt_t exp_out [$];
  int n_spk = 0, n_pmc = 0, n_rsp = 0, n_out = 0;

  always @(posedge clk_noc) if (rst_n && pmc_valid && pmc_ready) begin
    n_pmc++;
    if (exp_pmc.size() == 0) check(0, "unexpected PMC command");
    else check(pmc_cmd == exp_pmc.pop_front(), "PMC command order/decode");
  end
  always @(posedge clk_core) if (rst_n && spike_push) begin
    n_spk++;
    if (exp_spk.size() == 0) check(0, "unexpected spike");
    else check(spike_key == exp_spk.pop_front(), "spike key order");
  end
  always @(posedge clk_core) if (rst_n && dma_rsp_valid) begin
    n_rsp++;
    if (exp_rsp.size() == 0) check(0, "unexpected read response");
    else check(dma_rsp.data == exp_rsp.pop_front(), "read response data");
  end
  always @(posedge clk_noc) if (rst_n && out_valid && out_ready && out_pkt.ptype != PKT_RD_REQ) begin
    n_out++;
    if (exp_out.size() == 0) check(0, "unexpected NoC output");
    else check(out_pkt == exp_out.pop_front(), "NoC output order");
    check(!(out_pkt.ptype == PKT_PMC && out_pkt.dst == ME), "self PMC command leaked onto NoC");
  end

  task automatic send(input noc_pkt_t p);
    @(negedge clk_noc);
    in_valid = 1; in_pkt = p;
    @(posedge clk_noc);
    while (!in_ready) @(posedge clk_noc);
    @(negedge clk_noc); in_valid = 0;
  endtask

  task automatic cpu_send(input noc_pkt_t p);
    @(negedge clk_core);
    cpu_tx_valid = 1; cpu_tx = p;
    @(posedge clk_core);
    while (!cpu_tx_ready) @(posedge clk_core);
    @(negedge clk_core); cpu_tx_valid = 0;
  endtask

  // DMA requests from a process of their own
  int n_dma_req = 0;
  task automatic dma_send(input noc_pkt_t p);
    @(negedge clk_core);
    dma_req_valid = 1; dma_req = p;
    @(posedge clk_core);
    while (!dma_req_ready) @(posedge clk_core);
    @(negedge clk_core); dma_req_valid = 0;
  endtask

  initial begin
    noc_pkt_t p;
    int sel;
    repeat (3) @(negedge clk_noc); rst_n = 1;
    repeat (3) @(negedge clk_noc);
    bp = 1;
    // mixed remote traffic
    for (int i = 0; i < 60; i++) begin
      p = '0; p.dst = ME; p.src = 3'($urandom_range(0, 7));
      p.addr = $urandom; p.data = $urandom;
      sel = $urandom_range(0, 2);
      case (sel)
        0: begin p.ptype = PKT_PMC; exp_pmc.push_back(pkt_to_pmc_cmd(p)); end
        1: begin p.ptype = PKT_MC; exp_spk.push_back(p.addr); end
        default: begin p.ptype = PKT_RD_RSP; exp_rsp.push_back(p.data); end
      endcase
      send(p);
    end
    // a write to the PE is consumed and ignored
    p = '0; p.ptype = PKT_WR; p.dst = ME; send(p);
    repeat (40) @(negedge clk_noc);
    check(exp_pmc.size() == 0 && exp_spk.size() == 0 && exp_rsp.size() == 0,
          "all remote packets delivered");

    // isolated core: spikes and responses are dropped, PMC still works
    iso_en = 1;
    for (int i = 0; i < 10; i++) begin
      p = '0; p.dst = ME; p.ptype = PKT_MC; p.addr = i; send(p);
    end
    p = '0; p.dst = ME; p.ptype = PKT_PMC; p.addr = 32'h0; p.data = 32'd2;
    exp_pmc.push_back(pkt_to_pmc_cmd(p)); send(p);
    repeat (20) @(negedge clk_noc);
    check(exp_pmc.size() == 0, "remote PMC command reaches PMC of isolated PE");
    iso_en = 0;

    // send side: processor packets, DMA requests, self and foreign PMC
    fork
      for (int i = 0; i < 30; i++) begin
        p = '0; p.src = ME; p.addr = $urandom; p.data = $urandom;
        p.dst = 3'($urandom_range(0, 7));
        if (i % 5 == 0) begin
          p.ptype = PKT_PMC; p.addr[3:0] = 4'h0; p.data = 32'($urandom_range(0, 2));
          if (p.dst == ME) exp_pmc.push_back(pkt_to_pmc_cmd(p));
          else exp_out.push_back(p);
        end else begin
          p.ptype = PKT_MC; exp_out.push_back(p);
        end
        cpu_send(p);
      end
      for (int i = 0; i < 20; i++) begin
        noc_pkt_t q;
        q = '0; q.ptype = PKT_RD_REQ; q.src = ME; q.dst = 3'(NODE_DRAM); q.addr = 32'(i * 4);
        // the processor has priority; requests are queued in issue order
        dma_send(q);
      end
    join
    // explicit self PMC command
    p = '0; p.ptype = PKT_PMC; p.src = ME; p.dst = ME; p.addr = 32'h2 | (32'd3 << 4); p.data = 32'd55;
    exp_pmc.push_back(pkt_to_pmc_cmd(p));
    cpu_send(p);
    repeat (100) @(negedge clk_noc);
    check(exp_pmc.size() == 0, "self PMC commands delivered");
    $display("delivered: pmc=%0d spikes=%0d rsp=%0d out=%0d", n_pmc, n_spk, n_rsp, n_out);
    check(exp_out.size() == 0, "all processor packets reached the NoC");
    check(last_req == 19 * 4, "all DMA requests reached the NoC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // DMA requests are not in exp_out order-wise with processor packets;
  // a separate check: all sent RD_REQs leave with increasing addresses.
  int last_req = -4;
  always @(posedge clk_noc) if (rst_n && out_valid && out_ready && out_pkt.ptype == PKT_RD_REQ) begin
    check(int'(out_pkt.addr) == last_req + 4, "DMA request order");
    last_req = int'(out_pkt.addr);
  end

  initial begin
    repeat (20000) @(posedge clk_noc);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
