# An accelerated analog neuromorphic core: SystemVerilog model

This design captures the digital side of a BrainScaleS-2 style single-chip neuromorphic system.
On such a chip, neurons and synapses are physical analog circuits. Their time constants are about a
thousand times shorter than biological ones, so a network "runs" 1000x faster than real time.
Around the analog network sits digital logic that does four jobs:

* it delivers spike events to the synapses,
* it collects the spikes of the neurons and sends them on,
* it holds the configuration and the synaptic weights in SRAM,
* it digitises analog observables (membrane voltages, spike-timing correlations) for on-chip
  plasticity processors.

The same synapse array also does analog vector-matrix multiplication ("HAGEN mode"). An input
event then carries a 5-bit activation as the length of the synaptic current pulse. The neurons
become plain integrators, and a column-parallel ADC reads the dot products.

The RTL in `rtl/` implements every block whose logic function is known. The analog neuron is a
discrete-time behavioural model, so whole-chip simulations produce meaningful numbers. The two
plasticity processors, the host link PHYs and other analog macros are not included. Their
signals are ports of the top module `hicannx`.

## Organisation

```
   L2 (time-stamped) events      +-------------------+   L1 events    +--------------------+
 host ---------------------------| l2_l1_converter   |--4 links-----> |                    |
      <--------------------------| system time       |<-4 links------ |   event_router     |
                                 +-------------------+                |   20 sources x     |
                                 8 x random_generator --8 sources---> |   12 channels      |
                                                                      |                    |
                                  anncore output buses 0..7 --------> |                    |
                                  anncore input buses 0..7 <--------- |                    |
                                                                      +--------------------+
 anncore
   top half:    quadrant 0 (128 cols) | 128 synapse drivers | quadrant 1 (128 cols)    256 rows
                128 compartments + capmem + CADC     128 compartments + capmem + CADC
                  8 neuron control blocks (each: 32 top + 32 bottom compartments)
                128 compartments + capmem + CADC     128 compartments + capmem + CADC
   bottom half: quadrant 2               | 128 synapse drivers | quadrant 3              256 rows
```

| Module | Role | Size at default |
|---|---|---|
| `synapse` | 16 SRAM bits, 6-bit address comparator, pulse area = weight x pulse length | 1 synapse |
| `synapse_array` | one quadrant: SRAM with 1024-bit row port, column sums for inputs A and B | 256 x 128 |
| `synapse_driver` | selects events from its bus, drives a pair of rows for one 4 ns cycle | 2 x 128 |
| `neuron_compartment` | behavioural neuron: leaky integrate-and-fire, or integrator in HAGEN mode | 512 |
| `neuron_builder` | joins spikes of adjacent compartments into one neuron | 8 |
| `neuron_control` | synchroniser, neuron builder, priority encoder, 8 x 64 source address memory | 8 |
| `capmem` | digital copy of the 24 analog parameters per neuron, refresh sequencer | 4 x 130 x 24 |
| `cadc` | single-slope ADC: 256 counters per quadrant, 8 bits | 4 x 256 |
| `random_generator` | LFSR Bernoulli source of background events | 8 |
| `event_router` | crossbar with a one-event buffer per crossing, round-robin mergers | 20 x 12 |
| `l2_l1_converter` | releases time-stamped events on time, stamps outgoing ones | 4 + 4 links |
| `anncore` | the analog network core with its digital periphery | |
| `hicannx` | chip top | |
| `bss2_pkg` | sizes, event and row-signal types | |

One clock of 250 MHz (4 ns) runs everything.

## Events and their addresses

A real-time (L1) event is `{valid, addr[13:0]}`. There is no handshake: a link carries one event
per cycle, and a receiver that cannot take it drops it.
Inside the core the address splits in two:

* `addr[13:6]`, the driver-select field, is compared by each synapse driver against its
  programmed target under its programmed mask.
* `addr[5:0]` is the pre-synaptic neuron number that the synapses compare with their stored
  number.

Each row carries up to 64 pre-synaptic neurons, time-multiplexed. Each synapse listens to only
one of them.

Events that the core sends out have the address `{block[5:0], source[7:0]}`, where `block` is
the neuron control block (0..7), that is, the output bus. `source` comes from the block's 8 x 64
source address memory. With suitable source addresses, an output event can be routed straight
back into the core as input.

The router has 20 sources and 12 channels:

* sources 0-7: anncore output buses,
* sources 8-11: events from the host, released by the L2/L1 converter,
* sources 12-19: random generators,
* channels 0-7: anncore input buses,
* channels 8-11: back to the host, stamped with the system time.

Any source can feed any channel. Each crossing has a one-event buffer, and a round-robin merger
empties the buffers of a channel. An anncore input bus takes at most one event every two cycles.
One cycle is the 4 ns synapse pulse; the other lets the row address settle. A full crossing buffer
drops the new event, and `route_drops` counts it per channel.

Driver `d` of a half feeds rows `2d` and `2d+1` of both quadrants of that half. It listens to
input bus `4*half + d mod 4`.

## Synapses and signed weights

A synapse stores two 8-bit words: word 0 = `{calib[3:2], weight[5:0]}` and word 1 =
`{calib[1:0], neuron number[5:0]}`. When its row's pre-enable is high and the row address equals
the stored number, it emits a current pulse. The pulse height is proportional to the weight, and
its length is set by the driver. The column's dendritic wire sums these pulses. The RTL represents
the charge of one pulse by the integer `weight * pulse_len`. Full length, code 31, is the 4 ns
pulse.

Each row is statically switched to input A or B of the neuron, and A counts positive, B negative.
A signed weight w is therefore a pair of rows fed by the same driver: |w| in the A row when w > 0,
and in the B row when w < 0. That gives weights from -63 to +63 with 128 signed inputs per column.

## HAGEN mode: vector-matrix multiplication

This part of the design has the most interplay between blocks. One multiplication `y = ReLU(W x)`
goes as follows (`tb/tb_hicannx_body.svh` does exactly this):

1. **Weights.** For every row, write word 0 (weights) and word 1 (neuron numbers) through the
   quadrant's memory port, one 128-word row per cycle. In rate mode the synapse compares only
   bit 5 of its number, so bit 5 selects one of two "input sets" per row.
2. **Drivers.** Set the row pairs to rate mode (config bits 21:20), row `2d` to A and row `2d+1`
   to B (bits 19:18 = `10`).
3. **Neurons.** Set the compartments to HAGEN mode (neuron control register bit 9). Leak and
   spike generation are then off.
4. **Reset.** Pulse `neuron_reset` for the columns. The membranes go to the reset potential
   (parameter 1).
5. **Inputs.** Send one event per driver: `addr = {driver, set bit, x[4:0]}`. In rate mode the
   driver uses the low five address bits as the pulse length. Four buses per half, each at one
   event per two cycles, move all 128 inputs of a half in 64 cycles (256 ns).
6. **Read out.** Start the quadrant's ADC with `cadc_sel_mem` set. After 256 cycles, channels
   0..127 hold the upper 8 bits of each membrane code.

With the behavioural neuron, the result of column c is
`clip(sum_d x_d (wA_dc - wB_dc) / 64, 0, 1023) / 4`: a ReLU of the dot product.
Clipping at zero is the ReLU. It comes from placing the reset potential at the bottom of the ADC
range.

Throughput of this implementation: 64 cycles of input plus 256 cycles of conversion per vector.
At 250 MHz that is about 0.78 M vectors/s, or 1.0e11 multiply-accumulates per second for a
256 x 512 matrix. The published estimate assumes a 500 ns cycle and 2.6e11. Closing that gap
needs a faster ramp clock, which is analog and not modelled here.

## Spiking mode: from a threshold crossing to the host

1. A compartment crosses its threshold (parameter 0) and emits a spike.
2. In its neuron control block the spike passes a two-flip-flop synchroniser and an edge detector.
3. The neuron builder copies it to every compartment joined to this one. `h_conn` links
   horizontal neighbours, `v_conn` links the top and bottom compartment of a column. The
   resulting pulses leave on `post`, the post-synaptic lines that the analog correlation sensors
   use.
4. Compartments whose output is enabled set a pending bit. The priority encoder sends the
   lowest-numbered pending one each cycle, so an isolated spike appears on the output bus four
   cycles after the fire edge. A spike that finds its compartment still pending is lost and
   counted in `spikes_lost`.
5. The router sends the event to an L1->L2 channel. The converter stamps it with the low 16 bits
   of the system time.

Events from the host go the other way. Each link queues up to 16 events in arrival order. The
event at the head leaves in the cycle after the system time reaches its stamp. A stamp that has
already passed (up to half the 16-bit range back) releases the event at once. `systime_load`
sets the counter, so several chips can share one time base.

## Parameter memory and ADC

On the chip, every compartment has 24 analog parameters held on capacitors, plus 48 global ones.
The capacitors are refreshed all the time from a digital copy. `capmem` holds that copy:
130 columns x 24 values of 10 bits per quadrant, where columns 128 and 129 hold the globals. It
streams one `(column, index, value)` per cycle to the cells. The neuron model takes its values
from this stream. A new value therefore takes effect at its next refresh, at most 3120 cycles
later. The model uses parameters 0 to 3: threshold, reset potential, leak potential and leak
shift. The membrane code is the internal state divided by 64, clipped to 0..1023.

The `cadc` is a single-slope converter. A ramp starts at zero and rises one code per cycle, and
each of the 256 channels counts until the ramp passes its input. Channels 0..127 take the causal
correlation level of their column, or the membrane with `sel_mem`. Channels 128..255 take the
anti-causal levels. The correlation levels come in through ports, because the sensors are analog.

## Configuration map

`cfg_we`, `cfg_addr[19:0]`, `cfg_wdata[31:0]`, one write per cycle:

| `cfg_addr[19:16]` | Target | Address bits | Data |
|---|---|---|---|
| 0 | synapse driver | [7] half, [6:0] driver | [7:0] target, [15:8] mask, [17:16] row enable, [19:18] row to B, [21:20] row rate mode |
| 1 | neuron control | [9:7] block, [6:0] register | reg 0..63: [7:0] source address, [8] output enable, [9] HAGEN mode; reg 64/65: h_conn low/high; reg 66: v_conn |
| 2 | parameter memory | [14:13] quadrant, [12:5] column, [4:0] parameter | [9:0] value |
| 3 | router | [3:0] channel | [19:0] route enable per source |
| 4 | random generator | [4:2] generator, [1:0] register | reg 0: [16] enable, [15:0] rate/65536 per cycle; 1: base; 2: random-bit mask; 3: seed |

After reset, all drivers, routes, generators and output enables are off. Memories (synapses,
parameters, source addresses) are not reset: write them before use.

## How far the model follows the published chip

Taken from the published chip:

* sizes: 256 rows, 4 x 128 columns, 128 drivers per half, 64 compartments per control block,
  8 x 64 source memory, 130 x 24 parameters, 256 x 8-bit ADC channels, 20 x 12 router,
  4 L2 links each way;
* the 6/6/4-bit synapse fields in two 8-bit words;
* the address comparator and the row-level A/B switch;
* the 4 ns pulse, with one event per two cycles on the core's input buses;
* pulse length in the five low address bits in rate mode;
* the HAGEN integration and reset, and the ReLU behaviour.

Choices of this design, where the published description is silent:

* address widths and split, and the driver target/mask selection;
* bus-to-driver assignment, quadrant and block numbering;
* the configuration map;
* one event buffer per router crossing, round-robin merging, dropping on overflow;
* synchroniser depth, lowest-index priority;
* 10-bit parameters, refresh order and rate;
* LFSR generators;
* time-stamp width (16 bits), FIFO depth (16), release rule;
* memory access timing;
* a routing element at every crossing, where the published router has them only at selected
  ones.

Departures and limits:

* **Clock.** The published text gives the neuron event clock once as 125 MHz and elsewhere the
  system clock as 250 MHz. This design uses 250 MHz throughout.
* **Input sign.** The published text once calls input A excitatory and later calls A
  inhibitory. Here A adds and B subtracts.
* **Analog parts are stand-ins.** The neuron is a discrete-time leaky integrate-and-fire model:
  no adaptation, exponential term, NMDA/plateau or multi-compartment conductance. The synaptic
  current sum is exact integer arithmetic, and it goes straight onto the membrane: the
  exponential low-pass of the real synaptic input line, whose time constant is about a thousand
  times the 4 ns pulse, is not modelled. The ADC comparators are ideal, so fixed-pattern noise
  and the temporal noise of the real chip are absent.
* **Not present:** short-term plasticity in the drivers (a spiking-mode pulse is always full
  length), the correlation sensors, the plasticity processors, the host link
  serialisers/deserialisers and packet layer (CRC, slow control, link count), the PLL, the fast
  ADC, the output amplifiers and JTAG.
* **HAGEN throughput.** The published chip reaches about 500 ns per input vector. Here one
  vector takes about 1.28 us: 64 cycles to deliver 128 events per half over four buses at one
  event per two cycles, plus a 256-cycle ADC ramp stepped once per 4 ns clock. That is about
  1.0e11 multiply-accumulates per second rather than 2.6e11. The published ramp is faster than
  one code per system clock, but its rate is not given.
* **Neuron builder.** Links do not cross the border of a neuron control block. The analog
  membrane switches are not represented.

## Simulating

Every testbench in `tb/` checks itself and ends with a line `TB_RESULT checks=N failures=M`. For
example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/bss2_pkg.sv tb/tb_hicannx.sv --top-module tb_hicannx -Mdir obj_tb -o sim
./obj_tb/sim
```

| Testbench | What it shows |
|---|---|
| `tb_synapse`, `tb_synapse_array` | comparator in both modes, pulse areas, memory read/write, column sums against a reference |
| `tb_synapse_driver` | target/mask selection, one-cycle pulse, pulse length per mode |
| `tb_neuron_compartment` | HAGEN summing/ReLU/reset, leak, threshold, cycle-exact reference |
| `tb_neuron_builder` | joined groups against a union-find reference |
| `tb_neuron_control` | latency 4, priority order, source addresses, builder, lost spikes |
| `tb_capmem`, `tb_cadc` | refresh order and values; 256-cycle conversion, channel map |
| `tb_random_generator` | cycle-exact against a reference LFSR, measured rate |
| `tb_event_router` | latency 2, merging, bus rate limit, conservation (delivered + dropped = sent) |
| `tb_l2_l1_converter` | release exactly one cycle after the stamp, order, back-pressure, stamping |
| `tb_anncore` | core at 8 x 32: membranes against a reference, only the right compartments fire |
| `tb_hicannx` | whole chip at 16 rows x 32 columns, the sequence above, every mechanism counted |

The sizes are parameters of `synapse_array`, `anncore` and `hicannx` (`ROWS`, `COLS`). `COLS`
must be a multiple of 32, because each neuron control block takes 32 columns. The largest
configuration simulated end to end is the one in `tb_hicannx`: 16 synapse rows by 32 columns
per quadrant (2048 synapses). The full chip, 256 x 128 per quadrant, instantiates 131072
synapse cells; verilator turns that into close to a gigabyte of generated C++, so the default
size has been linted and elaborated but not simulated.
