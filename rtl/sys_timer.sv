// sys_timer: periphery timer generating the real-time simulation tick.
//
// Every PERIOD reference-clock cycles (1 ms at the 10 ns reference, the
// simulation time step t_sys) tick pulses high for one cycle; the tick goes
// as a wire to every PE, where it is the timer interrupt that starts a
// simulation cycle. The period and the enable can be changed by PKT_WR
// packets to the periphery node: addr 0 writes the period (reloading the
// counter), addr 4 writes the enable (data[0]). The timer counts n_ticks.
// Other packets are consumed and ignored. The paper names the timer and its
// purpose; the register map and the wire to the PEs are this design's
// choices.
`timescale 1ns / 1ps
module sys_timer
  import dvfs_pkg::*;
#(
  parameter int unsigned PERIOD    = 100000,
  parameter bit          EN_RESET  = 1'b1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  noc_pkt_t    in_pkt,
  output logic        tick,
  output logic [31:0] n_ticks
);

  logic [31:0] period_q, cnt_q;
  logic        en_q;

  assign in_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      period_q <= 32'(PERIOD);
      cnt_q    <= '0;
      en_q     <= EN_RESET;
      tick     <= 1'b0;
      n_ticks  <= '0;
    end else begin
      tick <= 1'b0;
      if (en_q) begin
        if (cnt_q + 1 >= period_q) begin
          cnt_q   <= '0;
          tick    <= 1'b1;
          n_ticks <= n_ticks + 1'b1;
        end else begin
          cnt_q <= cnt_q + 1'b1;
        end
      end
      if (in_valid && in_pkt.ptype == PKT_WR) begin
        if (in_pkt.addr[7:0] == 8'h00) begin
          period_q <= in_pkt.data;
          cnt_q    <= '0;
        end
        if (in_pkt.addr[7:0] == 8'h04) en_q <= in_pkt.data[0];
      end
    end
  end

endmodule
