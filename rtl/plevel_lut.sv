// plevel_lut: performance-level look-up table of one PE.
//
// Holds, for each performance level (PL), the frequency word sent to the
// PE's ADPLL. The PMC selects the entry with rd_idx; the output follows the
// index combinationally so a frequency change takes effect in the cycle the
// PMC switches the index. Entries reset to the test chip's three levels,
// PL1 = 125 MHz, PL2 = 333 MHz, PL3 = 500 MHz, and can be rewritten one per
// cycle through the write port (driven by PMC LUT commands).
//
// The paper names this table between the PMC and the ADPLL and gives the
// three levels; the frequency word being the frequency in MHz, and the
// supply rail of PL i being rail i (so no rail field is stored), are this
// design's choices.
`timescale 1ns / 1ps
module plevel_lut
  import dvfs_pkg::*;
#(
  parameter int unsigned PL1_MHZ = 125,
  parameter int unsigned PL2_MHZ = 333,
  parameter int unsigned PL3_MHZ = 500
) (
  input  logic              clk_ref,
  input  logic              rst_n,
  input  logic              wr_en,
  input  logic [PL_W-1:0]   wr_idx,
  input  logic [FREQ_W-1:0] wr_mhz,
  input  logic [PL_W-1:0]   rd_idx,
  output logic [FREQ_W-1:0] freq_mhz
);

  logic [FREQ_W-1:0] lut_q [NUM_PL];

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      lut_q[0] <= FREQ_W'(PL1_MHZ);
      lut_q[1] <= FREQ_W'(PL2_MHZ);
      lut_q[2] <= FREQ_W'(PL3_MHZ);
    end else if (wr_en && wr_idx < PL_W'(NUM_PL)) begin
      lut_q[wr_idx] <= wr_mhz;
    end
  end

  assign freq_mhz = (rd_idx < PL_W'(NUM_PL)) ? lut_q[rd_idx] : lut_q[0];

endmodule
