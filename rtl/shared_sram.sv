// shared_sram: on-chip SRAM shared by all PEs, reached over the NoC.
//
// A PKT_WR packet writes data to the word at byte address addr; a
// PKT_RD_REQ packet is answered with a PKT_RD_RSP to its sender carrying
// the same address and the word. One packet is taken per cycle when the
// response register is free; the response follows one cycle later. Other
// packet types are consumed and ignored. Addresses wrap at the memory size.
// A new packet is taken only once the previous response has left, which
// halves the read rate but keeps the ready path free of combinational
// loops through the network.
// The paper only names a shared SRAM on the NoC; its size (16 kB) and the
// access packets are this design's choices.
`timescale 1ns / 1ps
module shared_sram
  import dvfs_pkg::*;
#(
  parameter int unsigned       WORDS   = 4096,
  parameter logic [NODE_W-1:0] NODE_ID = NODE_W'(NODE_SHSRAM)
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  noc_pkt_t  in_pkt,
  output logic      out_valid,
  input  logic      out_ready,
  output noc_pkt_t  out_pkt
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic [AW-1:0] a;
  assign a = in_pkt.addr[AW+1:2];

  assign in_ready = !out_valid;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready && in_pkt.ptype == PKT_WR) mem[a] <= in_pkt.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_pkt   <= '0;
    end else if (out_valid) begin
      if (out_ready) out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && in_pkt.ptype == PKT_RD_REQ;
      out_pkt.ptype <= PKT_RD_RSP;
      out_pkt.dst   <= in_pkt.src;
      out_pkt.src   <= NODE_ID;
      out_pkt.addr  <= in_pkt.addr;
      out_pkt.data  <= mem[a];
    end
  end

endmodule
