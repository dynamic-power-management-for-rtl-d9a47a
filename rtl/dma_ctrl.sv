// dma_ctrl: DMA controller of one PE; fetches a synapse row from DRAM.
//
// When the processor receives a spike it looks up the start address and
// length of the source neuron's synapse row and starts this DMA, then goes
// on with other work while the row streams into local SRAM. On start the
// controller latches the DRAM byte address, the SRAM word address and the
// number of 32-bit words, then issues one NoC read request per word
// (PKT_RD_REQ to the DRAM node, one per cycle while the NoC accepts). Each
// response (PKT_RD_RSP) echoes its DRAM address, so responses may come back
// in any order: the word goes to sram_addr + (address - dram_addr)/4 through
// the SRAM write port in the cycle it arrives. busy is high from start
// until the last response; done pulses for one cycle then. A start while
// busy is ignored. Source addresses whose top byte is SH_PAGE (0xF0) are
// read from the shared SRAM node instead of the DRAM. The job is defined by the paper; the per-word request
// format is this design's choice.
`timescale 1ns / 1ps
module dma_ctrl
  import dvfs_pkg::*;
#(
  parameter int unsigned          SRAM_AW = 15,
  parameter logic [NODE_W-1:0]    NODE_ID = '0,
  parameter logic [NODE_W-1:0]    MEM_NODE = NODE_W'(NODE_DRAM),
  parameter logic [7:0]           SH_PAGE  = 8'hF0   // address page of the shared SRAM
) (
  input  logic               clk,
  input  logic               rst_n,
  // job from the processor
  input  logic               start,
  input  logic [31:0]        dram_addr,
  input  logic [SRAM_AW-1:0] sram_addr,
  input  logic [15:0]        nwords,
  output logic               busy,
  output logic               done,
  // NoC
  output logic               req_valid,
  input  logic               req_ready,
  output noc_pkt_t           req,
  input  logic               rsp_valid,
  input  noc_pkt_t           rsp,
  // SRAM write port
  output logic               mem_we,
  output logic [SRAM_AW-1:0] mem_addr,
  output logic [31:0]        mem_wdata
);

  logic [31:0]        base_q;
  logic [SRAM_AW-1:0] sbase_q;
  logic [15:0]        n_q, sent_q, got_q;

  assign req_valid = busy && (sent_q != n_q);
  always_comb begin
    req       = '0;
    req.ptype = PKT_RD_REQ;
    req.dst   = (base_q[31:24] == SH_PAGE) ? NODE_W'(NODE_SHSRAM) : MEM_NODE;
    req.src   = NODE_ID;
    req.addr  = base_q + {14'd0, sent_q, 2'b00};
  end

  logic        rsp_ok;
  logic [31:0] off;
  assign rsp_ok = busy && rsp_valid && rsp.ptype == PKT_RD_RSP;
  assign off    = rsp.addr - base_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      base_q    <= '0;
      sbase_q   <= '0;
      n_q       <= '0;
      sent_q    <= '0;
      got_q     <= '0;
      mem_we    <= 1'b0;
      mem_addr  <= '0;
      mem_wdata <= '0;
    end else begin
      done   <= 1'b0;
      mem_we <= 1'b0;
      if (!busy) begin
        if (start && nwords != '0) begin
          busy    <= 1'b1;
          base_q  <= dram_addr;
          sbase_q <= sram_addr;
          n_q     <= nwords;
          sent_q  <= '0;
          got_q   <= '0;
        end else if (start) begin
          done <= 1'b1;
        end
      end else begin
        if (req_valid && req_ready) sent_q <= sent_q + 1'b1;
        if (rsp_ok) begin
          mem_we    <= 1'b1;
          mem_addr  <= sbase_q + off[SRAM_AW+1:2];
          mem_wdata <= rsp.data;
          got_q     <= got_q + 1'b1;
          if (got_q + 1'b1 == n_q) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

endmodule
