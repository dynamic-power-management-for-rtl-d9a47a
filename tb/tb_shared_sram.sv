// tb_shared_sram: self-checking test of the NoC-attached shared SRAM.
// Writes random words through PKT_WR packets, reads them back with
// PKT_RD_REQ from different source nodes, and checks every response's
// type, destination (the requester), address and data against a reference
// array, with and without back-pressure on the response port.
`timescale 1ns / 1ps
module tb_shared_sram;
  import dvfs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  noc_pkt_t in_pkt = '0, out_pkt;
  int checks = 0, failures = 0;

  shared_sram #(.WORDS(256)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_pkt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input noc_pkt_t p);
    @(negedge clk); in_pkt = p; in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  logic [31:0] refm [256];
  int n_rsp = 0;
  struct { int src; logic [31:0] addr; } exp_q [$];
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    n_rsp++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected response"); end
    else begin
      checks++;
      if (out_pkt.ptype != PKT_RD_RSP || int'(out_pkt.dst) != exp_q[0].src || out_pkt.addr != exp_q[0].addr ||
          out_pkt.data != refm[exp_q[0].addr[9:2]]) begin
        failures++; $display("FAIL: response %h %h", out_pkt.addr, out_pkt.data);
      end
      void'(exp_q.pop_front());
    end
  end

  bit bp = 0;
  always @(negedge clk) out_ready = bp ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    noc_pkt_t p;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      p = '0; p.ptype = PKT_WR; p.dst = NODE_W'(NODE_SHSRAM); p.addr = 32'(4 * i); p.data = $urandom;
      refm[i] = p.data;
      send(p);
    end
    bp = 1;
    for (int i = 0; i < 64; i++) begin
      p = '0; p.ptype = PKT_RD_REQ; p.src = NODE_W'($urandom_range(0, 5)); p.addr = 32'(4 * $urandom_range(0, 255));
      exp_q.push_back('{int'(p.src), p.addr});
      send(p);
    end
    bp = 0;
    repeat (5) @(negedge clk);
    check(n_rsp == 64 && exp_q.size() == 0, $sformatf("%0d responses", n_rsp));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
