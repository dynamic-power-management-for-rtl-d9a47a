// rr_arb: round-robin arbiter.
//
// Grants one of N requesters (one-hot gnt, combinational from req). The
// search starts at the requester after the one granted last, so every
// requester is served within N grants. The priority pointer moves only when
// advance is high (the grant was used).
`timescale 1ns / 1ps
module rr_arb #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);

  logic [$clog2(N)-1:0] last_q;

  always_comb begin
    gnt = '0;
    for (int k = 1; k <= N; k++) begin
      int idx;
      idx = (int'(last_q) + k) % N;
      if (gnt == '0 && req[idx]) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_q <= $clog2(N)'(N-1);
    else if (advance && gnt != '0) begin
      for (int i = 0; i < N; i++)
        if (gnt[i]) last_q <= $clog2(N)'(i);
    end
  end

endmodule
