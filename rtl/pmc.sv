// pmc: power management controller of one PE.
//
// The PMC owns the PE's performance level (PL). A command from the NoC
// interface starts one of three sequences, each a schedule of events at
// configurable times measured in reference-clock cycles from the command:
//
//   supply change (SC), PE running, new PL:
//     t_off2clk          clk_en falls (core clock stopped)
//     t_up2vdd           main switches leave the old rail, the n_pre
//                        pre-charge switches connect to the new rail
//     t_up2vdd+t_pre_sc  all switches of the new rail on, pre-charge off
//     t_up2freq          the Plevel LUT index (ADPLL frequency) changes
//     t_on2clk           clk_en rises, sequence ends
//   power-up (PU), PE off: the same, with t_pre_pu, t_up2freq_pu and
//     t_on2clk_pu; at clock enable the isolation is released and the core
//     reset is lifted.
//   power shut-off (PSO), PE running: at t_off2clk the clock stops and the
//     isolation closes; at t_up2vdd all switches open and the core domain is
//     held in reset. The sequence ends there.
//
// The event order and the names of the times follow the paper's timing
// diagram of a PL change (clock disable, supply selection with net
// pre-charge, frequency selection, clock enable). The paper prints no time
// for the supply-select edge; here the main switches close at the end of the
// pre-charge. Separate PU and SC pre-charge times, isolation, core reset,
// the register map and the defaults (SC in 80 ns, PU in 750 ns with 31
// pre-charge switches at a 10 ns reference) are this design's choices.
//
// Interface: cmd_valid/cmd_ready handshake, one command accepted per cycle
// when idle; commands are held off while a sequence runs. CFG commands write
// a timing register, LUT commands are forwarded to the Plevel LUT, both in
// one cycle. A SET_PL to the PL already running completes at once.
`timescale 1ns / 1ps
module pmc
  import dvfs_pkg::*;
#(
  parameter bit          RESET_ON = 1'b1,          // powered at PL1 after reset
  parameter pmc_timing_t TIMING   = PMC_TIMING_DEFAULT
) (
  input  logic              clk_ref,
  input  logic              rst_n,
  // command from the NoC interface
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  pmc_cmd_t          cmd,
  // Plevel LUT
  output logic [PL_W-1:0]   pl_idx,       // selects the frequency
  output logic              lut_we,
  output logic [PL_W-1:0]   lut_widx,
  output logic [FREQ_W-1:0] lut_wmhz,
  // header power switches
  output logic [PL_W-1:0]   rail_pl,      // rail the switches connect to
  output logic              pre_en,
  output logic [PRE_W-1:0]  n_pre,
  output logic              main_en,
  // core domain
  output logic              clk_en,
  output logic              iso_en,
  output logic              core_rst_n,
  // status
  output logic              busy,
  output logic              powered,
  output logic [PL_W-1:0]   pl_cur
);

  typedef enum logic [1:0] {IDLE, SEQ_SC, SEQ_PU, SEQ_PSO} seq_e;

  seq_e             seq_q;
  logic [TW-1:0]    t_q;
  logic [PL_W-1:0]  target_q;
  pmc_timing_t      tim_q;

  // end of pre-charge, relative to the command
  logic [TW:0] t_main_on;
  assign t_main_on = {1'b0, tim_q.t_up2vdd} +
                     (TW+1)'((seq_q == SEQ_PU) ? tim_q.t_pre_pu : tim_q.t_pre_sc);

  logic [TW-1:0] t_freq, t_on;
  assign t_freq = (seq_q == SEQ_PU) ? tim_q.t_up2freq_pu : tim_q.t_up2freq;
  assign t_on   = (seq_q == SEQ_PU) ? tim_q.t_on2clk_pu  : tim_q.t_on2clk;

  assign busy      = (seq_q != IDLE);
  assign cmd_ready = (seq_q == IDLE);
  assign n_pre     = tim_q.n_pre;
  assign pl_cur    = pl_idx;

  always_ff @(posedge clk_ref or negedge rst_n) begin
    if (!rst_n) begin
      seq_q      <= IDLE;
      t_q        <= '0;
      target_q   <= '0;
      tim_q      <= TIMING;
      pl_idx     <= '0;
      rail_pl    <= '0;
      pre_en     <= 1'b0;
      main_en    <= RESET_ON;
      clk_en     <= RESET_ON;
      iso_en     <= !RESET_ON;
      core_rst_n <= RESET_ON;
      powered    <= RESET_ON;
      lut_we     <= 1'b0;
      lut_widx   <= '0;
      lut_wmhz   <= '0;
    end else begin
      lut_we <= 1'b0;
      unique case (seq_q)
        IDLE: begin
          t_q <= '0;
          if (cmd_valid) begin
            unique case (cmd.op)
              PMC_SET_PL: begin
                target_q <= cmd.arg[PL_W-1:0];
                if (!powered)                          seq_q <= SEQ_PU;
                else if (cmd.arg[PL_W-1:0] != pl_idx)  seq_q <= SEQ_SC;
              end
              PMC_PSO: if (powered) seq_q <= SEQ_PSO;
              PMC_CFG: begin
                unique case (cmd.sel)
                  CFG_OFF2CLK:    tim_q.t_off2clk    <= cmd.arg[TW-1:0];
                  CFG_UP2VDD:     tim_q.t_up2vdd     <= cmd.arg[TW-1:0];
                  CFG_PRE_SC:     tim_q.t_pre_sc     <= cmd.arg[PRE_W-1:0];
                  CFG_UP2FREQ:    tim_q.t_up2freq    <= cmd.arg[TW-1:0];
                  CFG_ON2CLK:     tim_q.t_on2clk     <= cmd.arg[TW-1:0];
                  CFG_PRE_PU:     tim_q.t_pre_pu     <= cmd.arg[PRE_W-1:0];
                  CFG_UP2FREQ_PU: tim_q.t_up2freq_pu <= cmd.arg[TW-1:0];
                  CFG_ON2CLK_PU:  tim_q.t_on2clk_pu  <= cmd.arg[TW-1:0];
                  CFG_NPRE:       tim_q.n_pre        <= cmd.arg[PRE_W-1:0];
                  default: ;
                endcase
              end
              PMC_LUT: begin
                lut_we   <= 1'b1;
                lut_widx <= cmd.sel[PL_W-1:0];
                lut_wmhz <= cmd.arg[FREQ_W-1:0];
              end
              default: ;
            endcase
          end
        end

        SEQ_SC, SEQ_PU: begin
          t_q <= t_q + 1'b1;
          if (seq_q == SEQ_SC && t_q == tim_q.t_off2clk) clk_en <= 1'b0;
          if (t_q == tim_q.t_up2vdd) begin
            main_en <= 1'b0;
            rail_pl <= target_q;
            pre_en  <= 1'b1;
          end
          if ({1'b0, t_q} == t_main_on) begin
            main_en <= 1'b1;
            pre_en  <= 1'b0;
            powered <= 1'b1;
          end
          if (t_q == t_freq) pl_idx <= target_q;
          if (t_q == t_on) begin
            clk_en     <= 1'b1;
            iso_en     <= 1'b0;
            core_rst_n <= 1'b1;
            seq_q      <= IDLE;
          end
        end

        SEQ_PSO: begin
          t_q <= t_q + 1'b1;
          if (t_q == tim_q.t_off2clk) begin
            clk_en <= 1'b0;
            iso_en <= 1'b1;
          end
          if (t_q == tim_q.t_up2vdd) begin
            main_en    <= 1'b0;
            pre_en     <= 1'b0;
            core_rst_n <= 1'b0;
            powered    <= 1'b0;
            seq_q      <= IDLE;
          end
        end

        default: seq_q <= IDLE;
      endcase
    end
  end

  // The schedule must be ordered as in the timing diagram.
  a_sc_order: assert property (@(posedge clk_ref) disable iff (!rst_n)
      (seq_q == SEQ_SC) |-> (tim_q.t_off2clk <= tim_q.t_up2vdd &&
                             {1'b0, tim_q.t_up2vdd} + TW'(tim_q.t_pre_sc) <= {1'b0, tim_q.t_on2clk} &&
                             tim_q.t_up2freq < tim_q.t_on2clk));
  // The clock never runs while the core is not fully connected to a rail.
  a_clk_safe: assert property (@(posedge clk_ref) disable iff (!rst_n)
      clk_en |-> main_en);

endmodule
