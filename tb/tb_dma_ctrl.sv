// tb_dma_ctrl: self-checking test of the synapse-row DMA controller.
// A memory model answers the read requests with data = f(address) after a
// random delay and out of order; the test checks every SRAM write (address
// sram_addr + word offset, data), the number of requests and responses,
// the done pulse, that requests go out one per cycle while the NoC is
// ready, and a second job after the first.
`timescale 1ns / 1ps
module tb_dma_ctrl;
  import dvfs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic start = 0, busy, done, req_valid, req_ready = 1, rsp_valid = 0, mem_we;
  logic [31:0] dram_addr = 0, mem_wdata;
  logic [14:0] sram_addr = 0, mem_addr;
  logic [15:0] nwords = 0;
  noc_pkt_t req, rsp = '0;
  int checks = 0, failures = 0;

  dma_ctrl #(.SRAM_AW(15), .NODE_ID(3'd2)) dut (.clk, .rst_n, .start, .dram_addr, .sram_addr, .nwords,
    .busy, .done, .req_valid, .req_ready, .req, .rsp_valid, .rsp, .mem_we, .mem_addr, .mem_wdata);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [31:0] fdata(input logic [31:0] a);
    return a * 32'h9E3779B1 + 32'h1234;
  endfunction

  // memory model: collects requests, answers in random order
  logic [31:0] pend[$];
  int n_req = 0, first_req_cyc = -1, last_req_cyc = -1, cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && req_valid && req_ready) begin
      if (req.ptype != PKT_RD_REQ || req.dst != NODE_DRAM || req.src != 3'd2) begin
        failures++; $display("FAIL: request fields");
      end
      pend.push_back(req.addr);
      n_req++;
      if (first_req_cyc < 0) first_req_cyc = cyc;
      last_req_cyc = cyc;
    end
  end
  always @(negedge clk) begin
    rsp_valid = 0;
    if (pend.size() > 0 && $urandom_range(0, 2) != 0) begin
      int k;
      k = $urandom_range(0, pend.size() - 1);
      rsp.ptype = PKT_RD_RSP; rsp.dst = 3'd2; rsp.src = NODE_W'(NODE_DRAM);
      rsp.addr = pend[k]; rsp.data = fdata(pend[k]);
      pend.delete(k);
      rsp_valid = 1;
    end
  end

  // SRAM model
  logic [31:0] sram [int];
  always @(posedge clk) if (mem_we) sram[int'(mem_addr)] = mem_wdata;

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  task automatic job(input logic [31:0] da, input int sa, input int n);
    int t0;
    sram.delete(); n_req = 0; first_req_cyc = -1; n_done = 0;
    @(negedge clk); start = 1; dram_addr = da; sram_addr = 15'(sa); nwords = 16'(n);
    @(negedge clk); start = 0;
    t0 = cyc;
    while (!done && cyc < t0 + 2000) @(negedge clk);
    @(negedge clk);
    check(!busy && n_done == 1, "done pulse once, not busy");
    check(n_req == n, $sformatf("%0d requests", n_req));
    check(last_req_cyc - first_req_cyc == n - 1, "one request per cycle");
    for (int i = 0; i < n; i++)
      check(sram.exists(sa + i) && sram[sa + i] == fdata(da + 32'(4 * i)), $sformatf("word %0d: %0d %h %h", i, sram.exists(sa + i), sram.exists(sa + i) ? sram[sa + i] : 0, fdata(da + 32'(4 * i))));
    check(sram.size() == n, "no stray writes");
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    job(32'h0010_0000, 100, 80);    // synfire average fan-out: 80 synapses
    job(32'h0020_0040, 4000, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
