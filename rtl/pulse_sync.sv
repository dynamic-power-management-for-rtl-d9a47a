// pulse_sync: carries a one-cycle pulse from one clock domain to another.
//
// The source pulse toggles a flag; the flag is synchronised into the
// destination clock by two flip-flops and each change produces one
// destination-cycle pulse, two to three destination cycles later. Used for
// the timer tick, which must reach a PE core whose clock may be stopped
// during a PL change: the tick is then delivered when the clock restarts.
// Pulses closer together than the crossing time may merge.
`timescale 1ns / 1ps
module pulse_sync (
  input  logic src_clk,
  input  logic dst_clk,
  input  logic rst_n,
  input  logic src_pulse,
  output logic dst_pulse
);

  logic tgl, s1, s2, s3;

  always_ff @(posedge src_clk or negedge rst_n) begin
    if (!rst_n)         tgl <= 1'b0;
    else if (src_pulse) tgl <= !tgl;
  end

  always_ff @(posedge dst_clk or negedge rst_n) begin
    if (!rst_n) {s3, s2, s1} <= '0;
    else        {s3, s2, s1} <= {s2, s1, tgl};
  end

  assign dst_pulse = s3 ^ s2;

endmodule
