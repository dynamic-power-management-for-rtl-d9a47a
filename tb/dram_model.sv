// dram_model: behavioural stand-in for the LPDDR2 interface and the
// off-chip DRAM that holds the synapse rows. Not synthesizable; for
// testbenches only.
//
// It is a NoC slave on the DRAM node: every PKT_RD_REQ is answered, in
// order, LAT reference cycles later by a PKT_RD_RSP to the requester with
// the address echoed. The memory content is not stored but computed from
// the byte address (syn_word below), so any synapse row the processors ask
// for exists and a reader can recompute what it should have received. Up to
// 64 requests may be outstanding; req_ready falls when that many wait. One
// response leaves per cycle while rsp_ready is high. Writes are consumed and
// ignored. n_reads counts the requests served.
`timescale 1ns / 1ps
module dram_model
  import dvfs_pkg::*;
#(
  parameter int unsigned LAT = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     req_valid,
  output logic     req_ready,
  input  noc_pkt_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output noc_pkt_t rsp,
  output int       n_reads
);

  // synapse word stored at a byte address: weight 0..1023, any target,
  // delay from the address, every eighth synapse inhibitory
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

  typedef struct {
    noc_pkt_t p;
    longint   due;
  } pend_t;
  pend_t q [$];
  longint cyc;

  assign req_ready = rst_n && q.size() < 64;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q.delete();
      cyc       <= 0;
      n_reads   <= 0;
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      cyc <= cyc + 1;
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (req_valid && req_ready && req.ptype == PKT_RD_REQ) begin
        pend_t e;
        e.p       = '0;
        e.p.ptype = PKT_RD_RSP;
        e.p.dst   = req.src;
        e.p.src   = NODE_W'(NODE_DRAM);
        e.p.addr  = req.addr;
        e.p.data  = syn_word(req.addr);
        e.due     = cyc + LAT;
        q.push_back(e);
        n_reads <= n_reads + 1;
      end
      // present the head of the queue once its latency has passed
      if (q.size() > 0 && q[0].due <= cyc + 1) begin
        rsp_valid <= 1'b1;
        rsp       <= q[0].p;
      end else begin
        rsp_valid <= 1'b0;
      end
    end
  end

endmodule
