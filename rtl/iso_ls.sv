// iso_ls: isolation cells at the boundary of a PE's switchable core domain.
//
// While iso_en is high (core domain clock-stopped and about to lose or
// without supply) every signal leaving the core domain is clamped to 0, so
// the always-on logic never sees floating values from a powered-down core.
// When iso_en is low the signals pass unchanged. The paper shows an
// "isolation, level shifter" stage between the core and the rest of the PE;
// the clamp-to-0 value is this design's choice and the level shifters are
// analog and not modelled.
`timescale 1ns / 1ps
module iso_ls #(
  parameter int unsigned W = 8
) (
  input  logic         iso_en,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  always_comb q = iso_en ? '0 : d;

endmodule
