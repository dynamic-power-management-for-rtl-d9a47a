// spike_fifo: hardware FIFO for received spike events of one PE.
//
// The NoC interface pushes the key (source neuron id) of every multicast
// spike that reaches the PE; the processor pops them during the next
// simulation cycle. The fill level count is the number l of spikes waiting,
// which the PE software reads at the start of each cycle to choose the
// performance level, so the processor is not interrupted per spike. A push
// into a full FIFO drops the spike and sets the sticky overflow flag, which
// only reset clears. Push and pop in the same cycle are allowed.
// pop_key shows the head entry whenever empty is low (first-word fall
// through); everything is in the PE core clock domain.
//
// The paper places this FIFO in the PE and attaches it to the local SRAM;
// here it has its own storage array. Depth and the overflow flag are this
// design's choices.
`timescale 1ns / 1ps
module spike_fifo #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned KW    = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  logic [KW-1:0]            push_key,
  input  logic                     pop,
  output logic [KW-1:0]            pop_key,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     full,
  output logic                     empty,
  output logic                     overflow
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [KW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;

  logic do_push, do_pop;
  assign do_pop  = pop && !empty;
  assign do_push = push && (!full || do_pop);

  assign full  = (count == (AW+1)'(DEPTH));
  assign empty = (count == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (do_push) wp <= wp + 1'b1;
      if (do_pop)  rp <= rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && !do_push) overflow <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= push_key;
  end

  assign pop_key = mem[rp];

endmodule
