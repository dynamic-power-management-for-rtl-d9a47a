// spinn_router: multicast spike router.
//
// A spike is a PKT_MC packet whose addr field is the key of the sending
// neuron. The router compares the key with every entry of a routing table
// of ENTRIES (key, mask, route) triples: an entry matches when
// (key & mask) == entry key, and the lowest-numbered valid match wins. The
// route is a bit vector: bit p (p < NPE) sends a copy to PE p, bit NPE sends
// one to the chip-to-chip link. Copies are sent one per cycle, in bit
// order, each as a PKT_MC with the PE as dst. A key that matches no entry
// is dropped and counted in n_dropped. Spikes come from the NoC (sent by a
// PE to the router node) or from the chip-to-chip link; the two inputs are
// served alternately when both wait. The router takes a new spike when the
// previous one's copies are all sent.
//
// Table writes are PKT_WR packets to the router node: addr[15:8] is the
// entry, addr[1:0] the field (0 key, 1 mask, 2 route, a route write also
// marks the entry valid; 3 clears the entry), data the value.
//
// The paper gives the router's function (multicast by a configurable
// routing table, identifiers of the sending neurons in the packets); the
// key/mask table, its size, first-match priority, serial copies and
// dropping unmatched keys are this design's choices.
`timescale 1ns / 1ps
module spinn_router
  import dvfs_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned NPE_P   = NPE
) (
  input  logic       clk,
  input  logic       rst_n,
  // from the NoC
  input  logic       in_valid,
  output logic       in_ready,
  input  noc_pkt_t   in_pkt,
  // to the NoC
  output logic       out_valid,
  input  logic       out_ready,
  output noc_pkt_t   out_pkt,
  // chip-to-chip link
  input  logic       ext_in_valid,
  output logic       ext_in_ready,
  input  noc_pkt_t   ext_in_pkt,
  output logic       ext_out_valid,
  input  logic       ext_out_ready,
  output noc_pkt_t   ext_out_pkt,
  // statistics
  output logic [31:0] n_routed,
  output logic [31:0] n_dropped
);

  localparam int unsigned RW  = NPE_P + 1;
  localparam int unsigned EAW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  logic [31:0]   key_q   [ENTRIES];
  logic [31:0]   mask_q  [ENTRIES];
  logic [RW-1:0] route_q [ENTRIES];
  logic [ENTRIES-1:0] vld_q;

  // current spike
  logic          busy_q;
  logic [31:0]   cur_key_q;
  logic [NODE_W-1:0] cur_src_q;
  logic [RW-1:0] pend_q;
  logic          prefer_ext_q;

  logic [EAW-1:0] cfg_e;
  assign cfg_e = in_pkt.addr[8 +: EAW];

  // ---- input selection ----
  logic in_is_cfg, in_is_mc, take_noc, take_ext;
  assign in_is_cfg = in_valid && in_pkt.ptype == PKT_WR;
  assign in_is_mc  = in_valid && in_pkt.ptype == PKT_MC;
  assign take_ext  = !busy_q && ext_in_valid && (prefer_ext_q || !in_is_mc);
  assign take_noc  = !busy_q && in_is_mc && !take_ext;
  assign in_ready  = in_is_cfg || take_noc || (in_valid && !in_is_mc && !in_is_cfg);
  assign ext_in_ready = take_ext;

  logic [31:0] lk_key;
  assign lk_key = take_ext ? ext_in_pkt.addr : in_pkt.addr;

  // ---- table lookup, first match ----
  logic [RW-1:0] lk_route;
  logic          lk_hit;
  always_comb begin
    lk_route = '0;
    lk_hit   = 1'b0;
    for (int e = ENTRIES-1; e >= 0; e--) begin
      if (vld_q[e] && ((lk_key & mask_q[e]) == key_q[e])) begin
        lk_route = route_q[e];
        lk_hit   = 1'b1;
      end
    end
  end

  // ---- copy emission ----
  logic [RW-1:0] first;
  always_comb first = pend_q & (~pend_q + 1'b1);   // lowest set bit

  logic [NODE_W-1:0] first_idx;
  always_comb begin
    first_idx = '0;
    for (int p = 0; p < NPE_P; p++) if (first[p]) first_idx = NODE_W'(p);
  end

  always_comb begin
    out_pkt       = '0;
    out_pkt.ptype = PKT_MC;
    out_pkt.dst   = first_idx;
    out_pkt.src   = cur_src_q;
    out_pkt.addr  = cur_key_q;
    ext_out_pkt      = out_pkt;
    ext_out_pkt.dst  = NODE_W'(NODE_ROUTER);
  end
  assign out_valid     = busy_q && first != '0 && !first[NPE_P];
  assign ext_out_valid = busy_q && first[NPE_P];

  logic sent;
  assign sent = (out_valid && out_ready) || (ext_out_valid && ext_out_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q       <= 1'b0;
      cur_key_q    <= '0;
      cur_src_q    <= '0;
      pend_q       <= '0;
      prefer_ext_q <= 1'b0;
      vld_q        <= '0;
      n_routed     <= '0;
      n_dropped    <= '0;
    end else begin
      if (busy_q) begin
        if (sent) begin
          pend_q <= pend_q & ~first;
          if ((pend_q & ~first) == '0) busy_q <= 1'b0;
        end
      end else if (take_ext || take_noc) begin
        prefer_ext_q <= !take_ext;
        if (lk_hit && lk_route != '0) begin
          busy_q    <= 1'b1;
          pend_q    <= lk_route;
          cur_key_q <= lk_key;
          cur_src_q <= take_ext ? NODE_W'(NODE_ROUTER) : in_pkt.src;
          n_routed  <= n_routed + 1'b1;
        end else begin
          n_dropped <= n_dropped + 1'b1;
        end
      end
      if (in_is_cfg && int'(in_pkt.addr[15:8]) < ENTRIES) begin
        unique case (in_pkt.addr[1:0])
          2'd0: key_q[cfg_e]   <= in_pkt.data;
          2'd1: mask_q[cfg_e]  <= in_pkt.data;
          2'd2: begin
            route_q[cfg_e] <= in_pkt.data[RW-1:0];
            vld_q[cfg_e]   <= 1'b1;
          end
          default: vld_q[cfg_e] <= 1'b0;
        endcase
      end
    end
  end

endmodule
