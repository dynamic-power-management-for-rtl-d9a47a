// adpll: behavioural model of the PE's all-digital PLL clock generator.
// This is a behavioural model, not synthesizable logic: the real ADPLL is a
// mixed-signal macro whose design is published elsewhere.
//
// The ADPLL generates the PE core clock with open-loop output clock
// generation, so a new frequency setting applies immediately, without a
// relock. The model is a free-running oscillator whose half period is
// 500000/freq_mhz ps; each half period re-reads freq_mhz, so a frequency
// change takes effect within one output period. The output is gated by
// clk_en through a latch-style clock gate (enable sampled while the clock
// is low), so clk_core has no glitches when the PMC stops or starts it.
// The reference clock input is kept for port compatibility with the real
// part; the model does not lock to it. A frequency word of 0 stops the
// oscillator.
//
// Tools report en_lat as a latch: it is intended. It is the enable latch of
// the clock gate (transparent while the oscillator output is low), which is
// what keeps the gated clock free of glitches.

`timescale 1ns / 1ps
module adpll
  import dvfs_pkg::*;
(
  input  logic              clk_ref,
  input  logic [FREQ_W-1:0] freq_mhz,
  input  logic              clk_en,
  output logic              clk_core
);


  logic osc = 1'b0;
  logic en_lat = 1'b0;
  realtime half_ns;

  initial begin
    forever begin
      if (freq_mhz == '0) begin
        @(freq_mhz);
      end else begin
        half_ns = 500.0 / real'(freq_mhz);
        #(half_ns) osc = !osc;
      end
    end
  end

  // glitch-free gate: enable captured while the oscillator is low
  always_latch begin
    if (!osc) en_lat = clk_en;
  end

  assign clk_core = osc & en_lat;

  // reference clock unused by the model
  logic unused_ref;
  assign unused_ref = clk_ref;

endmodule
