# A time-multiplexed 256-neuron, 64k-synapse spiking core with on-line learning

A fully connected network of 256 spiking neurons needs 65,536 synapses. Building
one circuit per synapse is too big, so this core keeps every neuron and every
synapse in ordinary single-port SRAM and runs **one** neuron-update circuit and
**eight** synapse-update circuits over and over. An incoming spike from source
neuron *i* is turned into 256 *synaptic operations* (SOPs), one for every
destination neuron *j*. Each SOP takes two clock cycles. The first cycle reads
neuron *j*. The second cycle computes its new state from the weight of
synapse *i → j* and writes it back. The weights learn on-line with the
spike-driven synaptic dynamics rule (SDSP). This rule needs only the
post-synaptic neuron's membrane potential and a "Calcium" activity counter at
the moment the pre-synaptic spike arrives, so a synapse can be updated in the
same SOP that reads it.

Each neuron can be set up as one of two models:
* an 8-bit leaky integrate-and-fire (LIF) neuron;
* a phenomenological neuron that imitates the firing behaviours of the
  Izhikevich model (bursting, adaptation, latency, rebound, ...) with small
  counters instead of differential equations.

Bursts need spikes at fixed intervals that are shorter than the neuron's
external time step. A scheduler built from rotating FIFOs produces them.

All RTL is SystemVerilog-2017 in `rtl/`. There is one self-checking
testbench per block in `tb/`.

## Block map

```
           SCK MOSI MISO                                  
              |  |   ^                                    
           +--v--v---+---+                                 
           |  spi_slave  |                                 
           +------+------+                                 
 17-bit           |                                   8-bit
 ADDR/REQ/ACK +---v------------------------------+   ADDR/REQ/ACK
 ---> aer_in -> controller + global registers    |-> aer_out --->
              +--+-----------+-----------+-------+
                 |           |           ^ packets / events
          neuron_sram   synapse_sram     |
          256 x 128     8192 x 32     scheduler
                 |           |        (32-entry spike FIFO,
          neuron_update  sdsp_regs +   57 rotating 4-entry FIFOs)
          (lif_neuron |  8 x sdsp_update
           izh_neuron)
```

| module | role |
|---|---|
| `odin` | top level; wires everything below |
| `odin_pkg` | shared widths, record layouts, event and packet types |
| `aer_in` | four-phase AER receiver; decodes the five input event kinds |
| `aer_out` | four-phase AER sender for spike addresses or monitor bytes |
| `spi_slave` | 32-bit-frame SPI slave giving access to registers and both memories |
| `controller` | event arbitration, SOP sequencing, global parameter registers |
| `neuron_sram`, `synapse_sram` | single-port memories (arrays standing in for SRAM macros) |
| `neuron_update` | per-neuron choice between `lif_neuron` and `izh_neuron` |
| `sdsp_regs` | holds the up/down learning conditions of eight neurons |
| `sdsp_update` | 3-bit weight update of one synapse (eight instances) |
| `scheduler` | orders internal spikes and spreads bursts over time |

There is one clock, `clk`. All state is reset by the active-low asynchronous
`rst_n`. The memories are not reset: they are loaded over SPI. The chip this
core comes from also has an on-chip clock generator and a clock multiplexer.
They are not part of this RTL; `clk` plays the role of the external clock.

## Memories and record formats

**Neuron memory**: 256 words of 128 bits, one word per neuron.

| bits | content |
|---|---|
| [69:0] | parameters (70 bits) |
| [124:70] | state (55 bits) |
| [125] | model: 0 = LIF, 1 = phenomenological |
| [127:126] | unused |

The field layouts are the packed structs in `odin_pkg.sv`: `lif_param_t`,
`lif_state_t`, `izh_param_t` and `izh_state_t`. Their LSB is the lowest bit
of the record. For example, the LIF threshold is at bits [7:0] and the LIF
membrane potential at bits [77:70].

**Synapse memory**: 8192 words of 32 bits. The word at address `{i, j[7:3]}`
(13 bits) holds the eight synapses from source *i* to destinations
`j[7:3]*8 … j[7:3]*8+7`. Synapse `j` uses nibble `j[2:0]`:

* bits [2:0] are the weight (0–7);
* bit 3 is the *mapping* bit, which switches learning on for that synapse.

If the mapping bit is 0, the weight never changes.

The **sign** of a synapse is not stored in the synapse. It belongs to the
source neuron: a 256-bit register table marks each source as excitatory or
inhibitory.

## Event kinds and the input address

The 17-bit AER input address selects one of five operations:

| ADDR | event | work done |
|---|---|---|
| `1 iiiiiiii jjjjjjjj` | single synapse *i → j* | 1 SOP, synapse *i → j* may learn |
| `0 iiiiiiii 00000000` | spike of neuron *i* | 256 SOPs (512 cycles), all synapses of row *i* may learn |
| `0 xxxxxxxx 00000001` | neuron time reference | 256 SOPs with leak/timers, no synapse access |
| `0 xxxxxxxx 00000010` | bistability time reference | every synapse word read and written, 16384 cycles |
| `0 jjjjjjjj 1xxxswww` | virtual synapse to *j* | 1 SOP with weight `www`, inhibitory if `s`, no synapse access |

Any other code is acknowledged and ignored. Each address is acknowledged only
after the controller has accepted its event. A slow core therefore slows the
sender down instead of losing events. REQ passes a two-flip-flop
synchroniser, so the sender may be asynchronous to `clk`.

## The synaptic operation in detail

For a spike of neuron *i* the controller steps *j* from 0 to 255:

```
cycle  2j     R: read neuron j; if j%8==0 also read synapse word {i, j/8}
cycle  2j+1   W: new record of j = update(record, weight(i->j), sign(i))
                 write it back; capture up/down of neuron j in slot j%8;
                 if j%8==7, write the synapse word back with all eight
                 synapses updated by the SDSP logic
```

The synapse word is read once per eight neurons and written once per eight.
The SDSP up/down conditions of the eight destinations are therefore kept in
`sdsp_regs` until the word is written. The last slot is bypassed, so the
eighth neuron's conditions reach the update circuits in the same cycle.

**Learning rule.** Let `Vmem` and `Ca` be the destination neuron's membrane
potential and Calcium value *as read*, i.e. just before this spike is added.
The weight is incremented if

    Vmem >= theta_m  and  theta_1 <= Ca < theta_3

and decremented if

    Vmem <  theta_m  and  theta_1 <= Ca < theta_2.

Increments saturate at 7 and decrements at 0. All four thresholds are
per-neuron parameters.

**Calcium.** Calcium rises by one on every output spike of the neuron. It
falls by one every `ca_leak` neuron time references. It thus measures the
neuron's recent firing rate, and the learning window `theta_1…theta_3`
selects which rates lead to potentiation or depression.

**Bistability.** A bistability event moves every plastic weight one step
toward the nearer end of its range:

* weights of 4 or more move up;
* weights of 3 or less move down.

Repeated bistability events push every plastic weight to 0 or 7. Only
synapses pushed above or below the middle often enough keep the change, which
makes the learning stochastic and protects the weights against background
activity.

**Timing.** A spike event always takes exactly 512 cycles, i.e. one SOP every
two cycles. At 75 MHz that is 37.5 M SOP/s. Single-synapse and virtual events
take 2 cycles, a time reference 512 and a bistability sweep 16384.

## The two neuron models

**LIF** (`lif_neuron`). This is an 8-bit membrane with a programmable
threshold and leak.

* A synaptic event adds or subtracts the 3-bit weight, saturating at 0 and
  255.
* A time reference subtracts `leak` (floor 0) and advances the Calcium leak
  counter.
* When the membrane is at or above the threshold, the neuron fires: the
  membrane resets to 0, Calcium increments, and the packet `{j, 0, 0}` goes
  to the scheduler.

**Phenomenological neuron** (`izh_neuron`). The record has the widths of the
original design:

* an 11-bit input accumulator;
* a 4-bit signed membrane;
* 36 bits of behaviour counters;
* 3 bits of Calcium;
* a burst lock bit.

The update works in three stages:

1. *Input stage.* Weights are summed in the accumulator. Each time the sum
   crosses `±2^acc_depth`, one positive or negative "accumulated event" goes
   to the core. `acc_depth` therefore sets how many inputs make one step of
   the membrane. A time reference leaks the accumulator by `acc_leak`.
2. *Core.* Accumulated events move the 4-bit membrane up or down by one
   step. Four optional blocks shape this:
   * stimulation strength and sequence: `str_min` (minimum events per time
     step), `phasic` (one spike per stimulation episode), `rebound` (spike
     after inhibition);
   * dynamic threshold: `thr_adapt` raises the threshold after each spike,
     `thr_var` lets inhibition lower it, and the threshold relaxes toward
     its base by one per time reference;
   * time windows: `latency` delays firing, `dap` holds the membrane just
     below threshold after a spike, `refrac` ignores inputs for a while;
   * sign rotation every `rot_per` time references, for oscillation and
     resonance.

   `mem_leak` sets a slow membrane leak.
3. *Output stage.* A spike emits `{j, burst_num, burst_isi}`. If
   `burst_num > 0`, the membrane is reset and the neuron is locked until the
   scheduler reports the end of the burst.

The chip this core follows specifies these stages, their widths and what
each block is for. It does not specify the logic inside the blocks. The
rules above are the simplest reading of each block, so this model shows the
same *kinds* of behaviour, not a cycle-exact copy of the chip's. The
testbench checks several behaviours by directed tests (integration, leak,
burst lock, latency, refractory, threshold variability and relaxation, phasic firing, rebound, sign rotation, Calcium leak). It does not check
all twenty Izhikevich behaviours.

## Scheduler: how bursts keep their rhythm

A firing neuron sends a 14-bit packet:

* its 8-bit address;
* `num` = spikes − 1 (3 bits);
* `isi` = interval between spikes, in timesteps, minus one (3 bits).

Single spikes (`num = 0`) enter a 32-entry FIFO. This FIFO always has the
highest priority.

A burst is split by the decoder into `num+1` spikes. Spike *m* goes into the
rotating FIFO that stands for timestep `+m·(isi+1)`. There are 57 = 7·8+1
such 4-entry FIFOs, enough for 8 spikes at the largest interval. Each entry
stores the 8-bit address plus a flag on the burst's last spike.

A local counter ticks every `isi_period+1` cycles. `isi_period` is a 24-bit
register, so one timestep can be set anywhere from biological to accelerated
time. On each tick the FIFO priorities rotate by one: the "+1" FIFO becomes
"+0", whose contents are sent to the controller. Only a pointer moves; no
data is copied. A tick is held back until the "+0" FIFO is empty, so a spike
is never rotated away.

When the controller processes the flagged last spike, it raises `burst_end`
during the source neuron's own SOP. That SOP unlocks the neuron.

A packet that does not fit is dropped whole and pulses `sched_overflow`. This
happens when the spike FIFO is full, or when any rotating FIFO it needs is
full.

A neuron event from the scheduler is processed like an external spike. It
is also the core's output: in standard mode its address is sent on the AER
output, and the controller waits for that port to be free first.

## Configuration interface (SPI)

There is no chip-select pin. Frames are 32 bits long, MSB first, SPI mode 0,
and are counted from reset. SCK is sampled by `clk`, so each SCK level must
last at least three `clk` cycles.

| bits | meaning |
|---|---|
| [31] | 1 = write, 0 = read |
| [30:29] | 0 = registers, 1 = neuron memory, 2 = synapse memory |
| [23:8] | byte address |
| [7:0] | write data |

Byte addresses:

* neuron memory: `{neuron[7:0], byte[3:0]}`;
* synapse memory: `{word[12:0], byte[1:0]}`.

A read returns its byte in bits [7:0] of the *next* frame.

Registers:

| address | register |
|---|---|
| 0 | CTRL: [0] gate (stop event processing), [1] monitoring mode, [2] monitor a synapse instead of a neuron |
| 1 | monitored neuron *j* |
| 2 | monitored source *i* (synapse *i → j*) |
| 3–5 | burst ISI period, 24 bits, LSB first |
| 32–63 | 256 sign bits, 1 = source neuron is inhibitory |

Memory accesses over SPI wait until the controller is idle. Register accesses
are served at once.

**Monitoring mode.** No spike addresses are sent on the AER output. Instead,
each update of the monitored neuron sends the low byte of its new state, or
each update of the monitored synapse sends its new 4-bit value.

## Where this design makes its own choices

These points are not fixed by the chip this core is modelled on. Change them
freely:

* the bit assignment of the 17-bit input address;
* the SPI frame and the register map;
* the arbitration order: SPI memory access, then scheduler, then AER input;
* the gate bit;
* the monitoring byte format;
* all neuron parameter layouts;
* the LIF leak and reset rules;
* every rule inside the phenomenological neuron's blocks;
* holding the scheduler's tick while "+0" is non-empty;
* drop-on-overflow;
* the bistability midpoint (4).

Also own choices: the synapse word is read on the first SOP of each group of
eight and written on the eighth, and a time reference walks all 256 neurons
in 512 cycles. The clock generator is not modelled.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>`. For example,
with Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/odin_pkg.sv \
    $(ls rtl/*.sv | grep -v odin_pkg) tb/tb_odin.sv --top-module tb_odin -Mdir obj
obj/Vtb_odin
```

To test a single block, pass `odin_pkg.sv`, the block's file and its
testbench. `tb_odin` runs the full-size core (no parameter overrides) for
about two million cycles; with Verilator this takes a few seconds. It does
the following:

* configures all 256 neurons and the used synapse rows over SPI;
* sends every kind of input event;
* checks the learned weights and neuron states by SPI read-back;
* checks event durations (512 / 2 / 16384 cycles) and burst spacing;
* drives the scheduler into overflow while a slow AER receiver makes the
  core stall;
* counts that each mechanism actually happened.

The block testbenches compare each unit against an independent reference:

* `tb_lif_neuron`: random records;
* `tb_sdsp_update`: all input combinations;
* `tb_scheduler`: burst spacing and priorities;
* `tb_controller`: SOP sequencing, with memory models and a stand-in neuron.

Three testbenches run application workloads on the full-size core:

* `tb_classifier` is a single-layer classifier with 10 output LIF
  neurons and 256 inputs, one per pixel of a 16×16 image. It needs 10
  neurons, 256 source addresses and 2560 synapses. The class templates are
  random and generated in the testbench, not a real handwritten-digit set.
  Pixels are sent as spike events and the first output spike is the
  decision.
* `tb_izh_behaviours` runs five phenomenological neurons side by side:
  tonic spiking, phasic spiking, tonic bursting, spike latency and rebound
  spike. It checks their spike counts and timing on the AER output.
* `tb_sdsp_learning` runs one LIF neuron with one plastic synapse and a
  teacher input through virtual synapses. It shows four regimes:
  * no change while Calcium is below `theta_1`;
  * potentiation to 7 when the membrane is high inside the Calcium window;
  * depression to 0 when it is low;
  * learning stopped once Calcium saturates above `theta_3`.

  Bistability events hold the learned weight through all of them.

Output neurons' spikes re-enter the core through their own synapse rows. A
network that uses every address as an input must keep those rows harmless.
