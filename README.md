# Per-core DVFS for a neuromorphic many-core chip

A spiking neural network simulated in real time does a varying amount of work.
Every 1 ms simulation cycle each core must update all of its neurons, which
costs the same every cycle. It must also process every synapse reached by the
spikes it received, and that number can vary by orders of magnitude from one
millisecond to the next. A core clocked for the worst cycle wastes energy in
all the others.

This design gives each processing element (PE) its own supply voltage and
clock frequency, and lets software choose between three performance levels
(PLs) at the start of each cycle:

| PL  | supply | core clock |
|-----|--------|------------|
| PL1 | 0.70 V | 125 MHz    |
| PL2 | 0.85 V | 333 MHz    |
| PL3 | 1.00 V | 500 MHz    |

The choice is cheap because the count of spikes waiting in a hardware FIFO is
a good forecast of the cycle's work. A PL change takes under 100 ns of a 1 ms
cycle. The system has four PEs on one packet network with a multicast spike
router, a timer, a shared SRAM and a port to the DRAM that holds the synapses.

RTL is in `rtl/`, testbenches and simulation models in `tb/`. All shared
types and encodings are in `rtl/dvfs_pkg.sv`.

## System structure

```
                 +---------------------- noc_xbar (8 ports) ----------------------+
                 |      |      |      |        |          |          |          |
               PE0    PE1    PE2    PE3   spinn_router   DRAM     sys_timer  shared_sram
              node0  node1  node2  node3    node 4      node 5     node 6     node 7
                                              |        (port out)    |
                                          ext_* link               tick --> every PE
```

- `neuro_soc_top` is the whole chip. The processors are not in the RTL. Each
  PE's processor buses come out as `cpu_*` port arrays indexed by PE. The DRAM
  node comes out as `dram_*`, where an LPDDR2 controller would connect. The
  router's chip-to-chip link comes out as `ext_*`.
- Everything outside the PE core domains runs on `clk_ref`, a 100 MHz
  reference clock (10 ns).
- `sys_timer` pulses `tick` every 100000 reference cycles (1 ms). The tick
  goes by wire to every PE and becomes the processor's interrupt.

## Inside a PE

`pe` is the "core wrapper". It has an always-on part clocked by `clk_ref` and
a switchable core domain clocked by its own ADPLL.

| part | block | domain |
|------|-------|--------|
| power management controller | `pmc` | always-on |
| frequency table (Plevel LUT) | `plevel_lut` | always-on |
| clock generator | `adpll` (behavioural) | produces the core clock |
| header power switches and rails | `power_switch` (behavioural) | analog |
| isolation at the domain boundary | `iso_ls` | boundary |
| NoC interface | `noc_if` | both; crosses between them |
| local SRAM, 128 kB | `pe_sram` | core |
| spike FIFO | `spike_fifo` | core |
| synapse-row DMA | `dma_ctrl` | core |

The PMC lives in the always-on domain, so it keeps working while the core
clock is stopped or the core is unpowered. That is what makes remote power-up
possible.

## The PL change sequence (pmc)

The PMC is the hardest part of the design to read, because several things must
happen in a fixed order. A command starts one of three sequences. Each event
has a time in reference cycles, counted from the command. The times are
registers that can be rewritten with a configuration command.

**Supply change (SC).** The PE is running and a new PL is asked for.

| default time | event |
|---|---|
| `t_off2clk` = 1 | `clk_en` falls. The ADPLL output is gated off. |
| `t_up2vdd` = 2 | The main switches leave the old rail. `n_pre` (31) pre-charge switches connect to the new rail. |
| `t_up2vdd + t_pre_sc` = 5 | All switches of the new rail close. Pre-charge ends. |
| `t_up2freq` = 6 | The LUT index changes, so the ADPLL runs at the new frequency. |
| `t_on2clk` = 8 | `clk_en` rises. The sequence ends. |

`busy` covers 9 reference cycles, which is 90 ns.

**Power-up (PU).** The PE is off. It uses the same order with the longer times
`t_pre_pu` = 70, `t_up2freq_pu` = 73 and `t_on2clk_pu` = 75. When the clock is
enabled, the isolation opens and the core reset is released. This takes 76
cycles, about 0.76 µs.

**Power shut-off (PSO).**
1. At `t_off2clk` the clock stops and the isolation closes.
2. At `t_up2vdd` all switches open and the core is held in reset.

**Why the clock is stopped and the net pre-charged.** The core must not run
while its supply moves. Connecting a net at 0.70 V straight to the 1.00 V rail
would draw a rush current that disturbs the other PEs on that rail. A few
pre-charge switches let the net slew first. `power_switch` models this. While
only the pre-charge switches are on, it moves `vdd_mv` towards the rail at
`n_pre*1000/SLEW_NS_PER_V` mV per ns. If the main switches close while the
net is still more than 20 mV away, it counts a rush event in `rush_count`.
With the default 31 switches, the 3 pre-charge cycles are enough. With a
single switch they are not, and `tb_pe` checks that a rush event is counted.
The slew rate is illustrative, not measured.

**Other cases.**
- A SET_PL to the PL already running finishes at once.
- A SET_PL to a PE that is off powers it up at that PL.
- Commands that arrive during a sequence wait. The PMC's `cmd_ready` stays low
  until the sequence ends.

**Command encoding.** A command is a NoC packet of type `PKT_PMC`. `addr[1:0]`
holds the opcode:

| opcode | meaning | argument |
|---|---|---|
| 0 | SET_PL | `data` = PL index 0..2 |
| 1 | PSO | – |
| 2 | CFG | timing register `addr[7:4]`; see `pmc_cfg_e` |
| 3 | LUT | Plevel LUT entry `addr[5:4]`, `data` = MHz |

## Self and remote DVFS, and the clock crossings (noc_if)

Each PE has its own clock, so the chip is globally asynchronous and locally
synchronous. `noc_if` is where the two clocks meet.

**Receive side.** It runs in the NoC clock.
- A `PKT_PMC` goes straight to the PMC, without crossing into the core domain.
  So a PE whose clock is stopped, or whose core is off, can still be given a
  new PL or powered up by another node. This is **remote DVFS**.
- Spikes (`PKT_MC`) and DMA read responses (`PKT_RD_RSP`) cross into the core
  clock through one dual-clock FIFO (`async_fifo`: Gray-coded pointers,
  two-flop synchronisers).
- While the core is isolated, spikes and responses for it are consumed and
  dropped, so the network never blocks on a dead PE.

**Send side.**
- The processor's packets and the DMA's read requests share one dual-clock
  FIFO into the NoC clock. The processor has priority.
- A `PKT_PMC` that the processor addresses to its own node never enters the
  network. It is handed to the PMC inside `noc_if`. This is **self DVFS**: the
  software changes its own PL by sending itself a packet.
- When a remote and a self command are both pending, the remote one goes
  first.

**Other crossings.** The timer tick crosses into the core clock with
`pulse_sync` and reaches the processor as a one-cycle `cpu_irq`. If the clock
is stopped when the tick arrives, the interrupt is delivered once the clock
runs again. The core reset is asserted at once and released two core-clock
edges later.

## Clock generation (adpll, plevel_lut)

`plevel_lut` holds one frequency word in MHz per PL (125/333/500 after reset).
It can be rewritten by LUT commands.

`adpll` is a behavioural oscillator whose half period is `500/freq` ns. It
reads the frequency every half period, so a new frequency applies without a
relock, as an open-loop ADPLL would. Its output is gated by `clk_en` through a
latch that is transparent while the oscillator is low. That latch is the
reason the gated clock has no glitches, and it is intended.

## Packet network (noc_xbar) and packet format

Every packet is one flit (`noc_pkt_t`):

| field | width | meaning |
|---|---|---|
| `ptype` | 3 | MC spike, RD_REQ, RD_RSP, WR, PMC |
| `dst`, `src` | 3 each | node numbers |
| `addr` | 32 | spike key, byte address, or command |
| `data` | 32 | payload |

`noc_xbar` is an 8×8 crossbar with valid/ready on every port. Each output has
a round-robin arbiter and one output register, so each output passes one
packet per cycle with one cycle of latency. The paper only says the network
is packet based and carries spikes, DMA and control traffic. The crossbar and
the packet format are this design's choices.

## Spike routing (spinn_router)

A spike is a `PKT_MC` whose `addr` is the key of the neuron that fired.

**Matching.** The router matches the key against 64 (key, mask, route)
entries. An entry matches when `key & mask == entry key`, and the lowest
matching entry wins.

**Sending copies.**
- The route is a bit vector.
  - Bits 0..3 send a copy to PE0..PE3.
  - Bit 4 sends a copy to the chip-to-chip link.
- Copies leave one per cycle.
- A key that matches nothing is dropped and counted.

**Inputs.** Spikes come from the network or from the chip link, served in
turn.

**Table writes.** The table is written with `PKT_WR` packets to node 4.
- `addr[15:8]` selects the entry.
- `addr[1:0]` selects the field:

  | `addr[1:0]` | field |
  |---|---|
  | 0 | key |
  | 1 | mask |
  | 2 | route (also marks the entry valid) |
  | 3 | clear |

## Receiving spikes and fetching synapses (spike_fifo, dma_ctrl, pe_sram)

**Spike FIFO.** Received spike keys go into a 512-entry `spike_fifo` in the
core domain.
- Its fill level is `cpu_spk_count`. This is the spike count `l` the software
  reads at the start of a cycle. The processor is not interrupted per spike.
- A push into a full FIFO drops the spike and sets a sticky overflow flag.

**Synapse rows.** Synapses live in DRAM as *synapse rows*: one contiguous
block per source neuron, one 32-bit word per synapse. Each word holds:
- a 16-bit weight;
- an 8-bit target neuron;
- an inhibitory bit;
- a 4-bit delay.

**DMA.** `dma_ctrl` copies a row into local SRAM while the processor works on
the previous one.
1. It sends one `PKT_RD_REQ` per word.
2. It writes each response to the SRAM address given by the echoed DRAM
   address. So responses may come back in any order.
3. Source addresses whose top byte is `0xF0` go to the shared SRAM instead of
   the DRAM.

**Local SRAM.** `pe_sram` is the 128 kB local SRAM with two ports.
- A processor port with byte enables.
- A DMA write port.

## Software: choosing the PL each cycle

The PL choice is software on the PE's processor. It is not in the RTL, but the
testbench model `tb/arm_m4f_model.sv` runs it on the real ports. On every tick
the model does the following.

1. It reads `l`, the number of spikes waiting in the FIFO.
2. It picks PL1 if `l < l_th1`, PL2 if `l < l_th2`, else PL3, and sends this
   as a self-DVFS packet. The thresholds come from the worst case in which the
   `l` sources with the largest fan-out all fired. They are set per network
   before the run, for example 20 and 100 for the synfire chain. In the
   model, the manager PE stores them in the shared SRAM, and each PE fetches
   its own by DMA at its first tick.
3. For each spike, it looks up the source's row address and length in a
   table in SRAM. It DMAs the row and adds each weight to the ring buffer slot
   of its target and delay. The next row's DMA is started before the current
   row is processed.
4. It updates all neurons (leaky integrate-and-fire, state in SRAM). It sends
   a spike for each neuron that fires, with key `PE<<12 | neuron`.
5. It sets PL1 again and sleeps until the next tick.

Processing time is modelled as core cycles per spike, per synapse and per
neuron. A higher PL therefore finishes the same work sooner, and a cycle
that misses its 1 ms deadline is counted.

## Simulating

Any Verilog simulator with SystemVerilog timing support will do. With
Verilator:

```
verilator --binary --timing -Irtl -Itb rtl/dvfs_pkg.sv tb/tb_pmc.sv --top-module tb_pmc
./obj_dir/Vtb_pmc
```

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends it with a failure if it hangs.

| testbench | covers |
|---|---|
| `tb_pmc` | SC, PU and PSO event times cycle by cycle; reconfigured times; LUT forwarding; a no-op command |
| `tb_pe` | clock periods at the three PLs; SC in 9 cycles (< 100 ns); self and remote DVFS; spikes; DMA; tick; PSO and PU (76 cycles); rush event with one pre-charge switch |
| `tb_noc_if` | remote and self PMC paths; spike and response crossings at unrelated clocks under back-pressure; dropping while isolated |
| `tb_neuro_soc_top` | the whole chip, at default sizes (see below) |
| others | each remaining block on its own |

`tb_neuro_soc_top` runs the chip with four processor models and the DRAM
model (`tb/dram_model.sv`, which computes each synapse word from its address).
Spikes are injected on the chip link after each tick so that the PEs see
different loads, and the network spikes travel back through the router. It
runs for seven 1 ms cycles. The manager PE shuts PE3 down and powers it up
again remotely. A burst of 600 spikes overflows PE2's 512-entry FIFO.

The testbench checks:
- every PL against the threshold rule;
- every synapse word;
- every deadline;
- the core clock frequency against the PL.

It also counts, and requires at least once, each of these:
- tick;
- self DVFS and remote DVFS;
- each PL;
- power-up and shut-off;
- routed, unrouted and link spikes;
- dropped spikes at an isolated PE;
- FIFO overflow;
- shared-SRAM reads.

The run takes about 20 s with Verilator.

## Where this design departs from the paper, or goes beyond it

**Times and sizes.**
- The paper shows the order of the events of a PL change but prints no
  cycle counts. The default times above are chosen to meet its figures:
  under 100 ns for a supply change and about 1 µs for power-up.
- The reference clock period (10 ns) is this design's assumption.

**Formats and encodings.** The packet format, node numbers, command
encoding, router table format and synapse-word bit order are this design's
own. The paper gives no format.

**Switching details.**
- Separate pre-charge times for SC and PU are this design's own.
- In this design the main switches of the new rail close when the
  pre-charge ends. The paper prints no time for that edge.
- The isolation and reset handling are this design's own.

**Behavioural models.** The power switches, the rails and the ADPLL are
behavioural models with illustrative analog behaviour. They show the
sequence, not measured voltages or currents.

**Spike FIFO storage.** The spike FIFO has its own storage. In the paper it
is attached to the local SRAM.

**Full-size test.** The full-size test uses the paper's thresholds (20/100),
250 neurons per PE, 128 kB SRAM and a 1 ms tick. To keep simulation time
reasonable, it uses synapse rows of 16 and 8 words rather than the synfire
chain's average fan-out of 80. The other benchmark networks (bursting,
asynchronous irregular) differ only in sizes and thresholds, which are
parameters of the processor model. The memory and FIFO arithmetic for all of
them is within the built sizes.

## Not built

- **ARM Cortex-M4F processors:** licensed IP, modelled in `tb/`.
- **LPDDR2 controller and the DRAM:** modelled in `tb/` as a network node
  with fixed latency.
- **Random number generator, exponential accelerator and SerDes links:**
  only named in the paper. The link port of the router is brought out
  instead.
- **Off-chip DC/DC regulators:** the rails are ideal.
- **Power and energy measurement:** the paper's power model, and the energy
  figures that come from the silicon, are outside the scope of RTL.
