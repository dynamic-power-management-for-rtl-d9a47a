// dvfs_pkg: types and constants shared by the neuromorphic many-core system
// with per-PE dynamic voltage and frequency scaling (DVFS).
//
// The system has four processing elements (PEs), a multicast spike router, a
// periphery timer, a shared SRAM and a DRAM port, all on one packet network
// (NoC). Every NoC packet is a single flit of type noc_pkt_t. The packet
// format, the node numbering and the command encodings below are this
// design's own choices; the paper names the packet classes (spike packets,
// DMA packets for DRAM access, control packets) but gives no format.
//
// Performance levels (PL) follow the paper's test chip: PL1 = 0.70 V/125 MHz,
// PL2 = 0.85 V/333 MHz, PL3 = 1.00 V/500 MHz. Inside the RTL a PL is an index
// 0..2 (PL1..PL3); the supply rail of PL index i is rail i.
`timescale 1ns / 1ps
package dvfs_pkg;

  // ---- system size and node ids -----------------------------------------
  localparam int unsigned NPE         = 4;   // PEs on the test chip
  localparam int unsigned NNODES      = 8;   // NoC ports
  localparam int unsigned NODE_W      = 3;
  localparam int unsigned NODE_ROUTER = 4;
  localparam int unsigned NODE_DRAM   = 5;
  localparam int unsigned NODE_PERIPH = 6;
  localparam int unsigned NODE_SHSRAM = 7;

  // ---- performance levels -----------------------------------------------
  localparam int unsigned NUM_PL  = 3;
  localparam int unsigned PL_W    = 2;
  localparam int unsigned FREQ_W  = 10;      // frequency word = MHz
  localparam int unsigned PRE_W   = 8;       // pre-charge switch count / time
  localparam int unsigned TW      = 10;      // PMC schedule time, ref cycles

  // ---- NoC packet -------------------------------------------------------
  typedef enum logic [2:0] {
    PKT_MC      = 3'd0,   // multicast spike, addr = source neuron key
    PKT_RD_REQ  = 3'd1,   // memory read request, addr = byte address
    PKT_RD_RSP  = 3'd2,   // memory read response, addr echoed, data = word
    PKT_WR      = 3'd3,   // memory / register write
    PKT_PMC     = 3'd4    // power management command to the PMC of dst
  } pkt_type_e;

  typedef struct packed {
    pkt_type_e           ptype;
    logic [NODE_W-1:0]   dst;
    logic [NODE_W-1:0]   src;
    logic [31:0]         addr;
    logic [31:0]         data;
  } noc_pkt_t;

  // ---- PMC commands -----------------------------------------------------
  // A PKT_PMC packet carries the opcode in addr[1:0]; data holds the
  // argument. CFG writes set one timing register, selected by addr[7:4].
  typedef enum logic [1:0] {
    PMC_SET_PL = 2'd0,    // change to PL data[1:0] (power-up if off)
    PMC_PSO    = 2'd1,    // power shut-off
    PMC_CFG    = 2'd2,    // timing register write
    PMC_LUT    = 2'd3     // Plevel LUT write: entry addr[5:4], MHz data
  } pmc_op_e;

  typedef enum logic [3:0] {
    CFG_OFF2CLK = 4'd0,
    CFG_UP2VDD  = 4'd1,
    CFG_PRE_SC  = 4'd2,
    CFG_UP2FREQ = 4'd3,
    CFG_ON2CLK  = 4'd4,
    CFG_PRE_PU  = 4'd5,
    CFG_UP2FREQ_PU = 4'd6,
    CFG_ON2CLK_PU  = 4'd7,
    CFG_NPRE    = 4'd8
  } pmc_cfg_e;

  typedef struct packed {
    pmc_op_e      op;
    logic [3:0]   sel;    // CFG register or LUT entry
    logic [15:0]  arg;    // PL index, time in ref cycles, count or MHz
  } pmc_cmd_t;

  // The PMC's schedule, all times in reference-clock cycles counted from
  // the command (names as in the paper's PL-change timing diagram).
  typedef struct packed {
    logic [TW-1:0]    t_off2clk;     // command -> clock disabled
    logic [TW-1:0]    t_up2vdd;      // command -> pre-charge starts
    logic [PRE_W-1:0] t_pre_sc;      // pre-charge length, supply change
    logic [TW-1:0]    t_up2freq;     // command -> new frequency
    logic [TW-1:0]    t_on2clk;      // command -> clock enabled
    logic [PRE_W-1:0] t_pre_pu;      // pre-charge length, power-up
    logic [TW-1:0]    t_up2freq_pu;
    logic [TW-1:0]    t_on2clk_pu;
    logic [PRE_W-1:0] n_pre;         // pre-charge switches used
  } pmc_timing_t;

  localparam pmc_timing_t PMC_TIMING_DEFAULT = '{
    t_off2clk: 10'd1, t_up2vdd: 10'd2, t_pre_sc: 8'd3, t_up2freq: 10'd6,
    t_on2clk: 10'd8, t_pre_pu: 8'd70, t_up2freq_pu: 10'd73,
    t_on2clk_pu: 10'd75, n_pre: 8'd31 };

  // ---- synapse word (stored in DRAM synapse rows) ------------------------
  // 16-bit weight, 8-bit target neuron, 1 type bit, 4-bit delay; the bit
  // order is this design's choice.
  typedef struct packed {
    logic [2:0]  unused;
    logic [3:0]  delay;
    logic        inhibitory;
    logic [7:0]  target;
    logic [15:0] weight;
  } synapse_word_t;

  function automatic pmc_cmd_t pkt_to_pmc_cmd(input noc_pkt_t p);
    pmc_cmd_t c;
    c.op  = pmc_op_e'(p.addr[1:0]);
    c.sel = p.addr[7:4];
    c.arg = p.data[15:0];
    return c;
  endfunction

endpackage
