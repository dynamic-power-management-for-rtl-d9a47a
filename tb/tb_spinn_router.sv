// tb_spinn_router: self-checking test of the multicast spike router.
// Writes a routing table through NoC write packets, then sends spikes from
// the NoC and from the chip-to-chip link and checks, against a table model
// in the test, the set of copies (destination PE or link) for each key,
// first-match priority of overlapping entries, dropping of unmatched keys,
// entry invalidation, the routed/dropped counters, back-pressure on the
// output, and that copies leave one per cycle.
`timescale 1ns / 1ps
module tb_spinn_router;
  import dvfs_pkg::*;
  localparam int E = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = !clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic ext_in_valid = 0, ext_in_ready, ext_out_valid, ext_out_ready = 1;
  noc_pkt_t in_pkt = '0, out_pkt, ext_in_pkt = '0, ext_out_pkt;
  logic [31:0] n_routed, n_dropped;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  spinn_router #(.ENTRIES(E)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_pkt, .out_valid, .out_ready, .out_pkt,
    .ext_in_valid, .ext_in_ready, .ext_in_pkt, .ext_out_valid, .ext_out_ready, .ext_out_pkt, .n_routed, .n_dropped);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // table model
  logic [31:0] mk [E], mm [E];
  logic [4:0]  mr [E];
  bit          mv [E];

  function automatic logic [4:0] model_route(input logic [31:0] key, output bit hit);
    hit = 0;
    for (int e = 0; e < E; e++) if (mv[e] && (key & mm[e]) == mk[e]) begin hit = 1; return mr[e]; end
    return '0;
  endfunction

  task automatic send_noc(input noc_pkt_t p);
    @(negedge clk); in_pkt = p; in_valid = 1;
    @(posedge clk); while (!in_ready) @(posedge clk);
    @(negedge clk); in_valid = 0;
  endtask

  task automatic wr(input int e, input int f, input logic [31:0] v);
    noc_pkt_t p;
    p = '0; p.ptype = PKT_WR; p.dst = NODE_W'(NODE_ROUTER); p.addr = {16'd0, 8'(e), 6'd0, 2'(f)}; p.data = v;
    send_noc(p);
    if (f == 0) mk[e] = v;
    if (f == 1) mm[e] = v;
    if (f == 2) begin mr[e] = v[4:0]; mv[e] = 1; end
    if (f == 3) mv[e] = 0;
  endtask

  // collect copies
  logic [4:0] got;
  int copies_cyc [$];
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      got[out_pkt.dst] = 1'b1; copies_cyc.push_back(cyc);
      check(out_pkt.ptype == PKT_MC && out_pkt.addr == cur_key, "copy fields");
    end
    if (rst_n && ext_out_valid && ext_out_ready) begin
      got[4] = 1'b1;
      check(ext_out_pkt.addr == cur_key, "link copy key");
    end
  end

  logic [31:0] cur_key;
  int exp_routed = 0, exp_dropped = 0;
  task automatic spike(input logic [31:0] key, input bit from_ext);
    logic [4:0] er; bit hit;
    noc_pkt_t p;
    er = model_route(key, hit);
    cur_key = key; got = '0; copies_cyc.delete();
    p = '0; p.ptype = PKT_MC; p.src = 3'd1; p.dst = NODE_W'(NODE_ROUTER); p.addr = key;
    if (from_ext) begin
      @(negedge clk); ext_in_pkt = p; ext_in_valid = 1;
      @(posedge clk); while (!ext_in_ready) @(posedge clk);
      @(negedge clk); ext_in_valid = 0;
    end else send_noc(p);
    repeat (12) @(negedge clk);
    if (hit && er != 0) exp_routed++; else exp_dropped++;
    check(got == er, $sformatf("key %h: copies %b expected %b", key, got, er));
    if (out_ready && copies_cyc.size() > 1)
      check(copies_cyc[copies_cyc.size()-1] - copies_cyc[0] == copies_cyc.size() - 1, "one copy per cycle");
  endtask

  initial begin
    for (int e = 0; e < E; e++) mv[e] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // entry 0: exact key 0x100 -> PE1, PE2
    wr(0, 0, 32'h100); wr(0, 1, 32'hFFFF_FFFF); wr(0, 2, 32'b00110);
    // entry 1: keys 0x1xx -> PE0..3 and link (lower priority than entry 0)
    wr(1, 0, 32'h100); wr(1, 1, 32'hFFFF_FF00); wr(1, 2, 32'b11111);
    // entry 2: keys 0x2x0..0x2xF in steps -> PE3
    wr(2, 0, 32'h200); wr(2, 1, 32'hFFFF_FF0F); wr(2, 2, 32'b01000);
    // entry 5: 0x300 -> link only
    wr(5, 0, 32'h300); wr(5, 1, 32'hFFFF_FFFF); wr(5, 2, 32'b10000);
    spike(32'h100, 0);
    spike(32'h1A5, 0);
    spike(32'h230, 0);
    spike(32'h231, 0);
    spike(32'h300, 1);
    spike(32'h1FF, 1);
    spike(32'hDEAD, 0);
    // random keys
    for (int i = 0; i < 20; i++) spike({20'd0, 4'($urandom_range(0, 3)), 8'($urandom)}, $urandom_range(0, 1) == 1);
    // invalidate entry 0: 0x100 now hits entry 1
    wr(0, 3, 0);
    spike(32'h100, 0);
    // back-pressure
    out_ready = 0;
    fork
      spike(32'h1B0, 0);
      begin repeat (6) @(negedge clk); out_ready = 1; end
    join
    check(n_routed == 32'(exp_routed) && n_dropped == 32'(exp_dropped),
          $sformatf("counters %0d/%0d expected %0d/%0d", n_routed, n_dropped, exp_routed, exp_dropped));
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
