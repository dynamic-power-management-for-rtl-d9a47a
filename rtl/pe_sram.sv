// pe_sram: local SRAM of one PE (128 kB, 32768 words of 32 bit).
//
// It holds the processor's code and data: neuron state and parameters, the
// synapse-row look-up table and the synaptic input ring buffers. Port A
// belongs to the processor (read and write, byte enables), port B to the DMA
// controller, which writes synapse rows fetched from DRAM. Both ports are
// synchronous with one cycle read latency; if both write one word in the
// same cycle, port A wins. The size is the paper's; two ports and the word
// width are this design's choices, and the memory is an array standing in
// for the process SRAM macros.
`timescale 1ns / 1ps
module pe_sram #(
  parameter int unsigned WORDS = 32768
) (
  input  logic                      clk,
  // port A: processor
  input  logic                      a_en,
  input  logic [3:0]                a_we,
  input  logic [$clog2(WORDS)-1:0]  a_addr,
  input  logic [31:0]               a_wdata,
  output logic [31:0]               a_rdata,
  // port B: DMA write
  input  logic                      b_we,
  input  logic [$clog2(WORDS)-1:0]  b_addr,
  input  logic [31:0]               b_wdata
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (b_we && !(a_en && a_we != '0 && a_addr == b_addr))
      mem[b_addr] <= b_wdata;
    if (a_en) begin
      for (int b = 0; b < 4; b++)
        if (a_we[b]) mem[a_addr][8*b +: 8] <= a_wdata[8*b +: 8];
      a_rdata <= mem[a_addr];
    end
  end

endmodule
