// tb_noc_xbar: self-checking test of the crossbar network.
// Phase 1: every input sends random-destination packets against random
// output back-pressure; each packet carries its source and a sequence
// number, and the test checks that every packet arrives once, at the port
// named by dst, in order per source/destination pair. Phase 2: one input
// streams to one free output: one packet per cycle, one cycle latency.
// Phase 3: all inputs target one output, which must serve them round-robin
// (each input within NPORTS grants).
`timescale 1ns / 1ps
module tb_noc_xbar;
  import dvfs_pkg::*;
  localparam int N = NNODES;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  noc_pkt_t in_pkt [N];
  noc_pkt_t out_pkt [N];
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  noc_xbar dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_pkt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int sent_seq [N][N];    // [src][dst] next seq to send
  int exp_seq  [N][N];    // next expected at receiver
  int n_recv = 0, n_sent = 0;
  int last_src [N];
  int recv_cyc [$];
  bit random_mode = 1;
  bit stream_rr [N];
  int gap_max [N];
  int since [N];

  // receiver checks
  always @(posedge clk) begin
    for (int o = 0; o < N; o++) begin
      if (rst_n && out_valid[o] && out_ready[o]) begin
        int s, q;
        s = int'(out_pkt[o].src);
        q = int'(out_pkt[o].data);
        n_recv++;
        check(int'(out_pkt[o].dst) == o, "packet at its destination port");
        check(q == exp_seq[s][o], $sformatf("order %0d->%0d got %0d exp %0d", s, o, q, exp_seq[s][o]));
        exp_seq[s][o] = q + 1;
        last_src[o] = s;
        recv_cyc.push_back(cyc);
      end
    end
  end

  // senders
  task automatic new_pkt(input int i, input int d);
    in_pkt[i].ptype = PKT_WR;
    in_pkt[i].src = NODE_W'(i);
    in_pkt[i].dst = NODE_W'(d);
    in_pkt[i].addr = 0;
    in_pkt[i].data = sent_seq[i][d];
    sent_seq[i][d]++;
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      in_pkt[i] = '0;
      for (int j = 0; j < N; j++) begin sent_seq[i][j] = 0; exp_seq[i][j] = 0; end
    end
    repeat (2) @(negedge clk); rst_n = 1;
    // phase 1: random traffic, 400 cycles
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        if (in_valid[i] && in_ready_q[i]) begin in_valid[i] = 0; n_sent++; end
        if (!in_valid[i] && $urandom_range(0, 1) == 1) begin
          new_pkt(i, $urandom_range(0, N - 1));
          in_valid[i] = 1;
        end
      end
      out_ready = N'($urandom);
    end
    // drain
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) if (in_valid[i] && in_ready_q[i]) begin in_valid[i] = 0; n_sent++; end
      out_ready = '1;
    end
    check(n_sent > 500, $sformatf("%0d packets sent", n_sent));
    check(n_recv == n_sent, $sformatf("all delivered: %0d of %0d", n_recv, n_sent));
    // phase 2: stream 0 -> 5
    recv_cyc.delete();
    begin
      int t0;
      @(negedge clk);
      t0 = cyc;
      for (int k = 0; k < 20; k++) begin
        new_pkt(0, 5); in_valid[0] = 1;
        @(negedge clk);
        check(in_ready_q[0], "stream accepted every cycle");
      end
      in_valid[0] = 0;
      repeat (3) @(negedge clk);
      check(recv_cyc.size() == 20 && recv_cyc[0] == t0 + 1 && recv_cyc[19] == t0 + 20,
            "one packet per cycle, one cycle latency");
    end
    // phase 3: all to output 3, round-robin
    begin
      int cnt [N];
      for (int i = 0; i < N; i++) cnt[i] = 0;
      for (int t = 0; t < 8 * N; t++) begin
        @(negedge clk);
        for (int i = 0; i < N; i++) begin
          if (in_valid[i] && in_ready_q[i]) begin in_valid[i] = 0; cnt[i]++; end
          if (!in_valid[i]) begin new_pkt(i, 3); in_valid[i] = 1; end
        end
      end
      for (int i = 0; i < N; i++) check(cnt[i] >= 6, $sformatf("fair share for input %0d: %0d", i, cnt[i]));
      @(negedge clk); in_valid = '0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // in_ready sampled at the clock edge
  logic [N-1:0] in_ready_q;
  always @(posedge clk) in_ready_q <= in_ready & in_valid;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
