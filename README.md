# Core interface for an event-driven neuromorphic core

A multi-core spiking processor spends much of its time and energy at the
edges of each core. When a neuron fires, its address has to be encoded and
sent out. When an address event arrives from another core, the core has to
find which of its synapses subscribe to it. This design builds both edges of
one core:

* **Output side: hierarchical arbiter tree (HAT) encoder.** 64 neurons
  compete for one output channel. Arbitration is split into three levels of
  small four-input arbiters, and each level resolves two address bits.
  A level keeps its decision while lower levels still have requests waiting
  in the same cluster. So a burst from neighbouring neurons is sent without
  re-arbitrating the upper address bits for every event.
* **Input side: CAM with current-sensing completion detection (CSCD).**
  A content-addressable memory holds one 11-bit source tag per synapse. It
  has 512 entries, and a search returns a 512-bit match vector. The search
  is acknowledged when the current drawn by the array dies away, not after
  a worst-case delay line. Each match-line sense amplifier (MLSA) also
  switches off its own current source early:
  * *Feedback control:* once a line has matched, its output closes the
    line's source.
  * *Speculative sense:* a mismatch in one of the three cells nearest the
    amplifier closes the source before the search starts.

The top module, `core_interface`, puts the two side by side. Its two event
channels are ports:

* neuron request/grant lines;
* an output address channel (`aer_out_*`);
* an input address channel (`aer_in_*`);
* the CAM's match vector and write port.

The network between cores and the routing table are not part of the design.

## How the circuits are rendered

The source circuits are asynchronous and quasi-delay-insensitive. Requests
and acknowledges follow a four-phase protocol. State is held in latches and
Muller C-elements. This RTL keeps that structure and those handshakes, but
clocks them:

* **Storage.** Every latch and every C-element is a flip-flop on the rising
  edge of `clk`, with an asynchronous active-low reset `rst_n`.
  * A latch "open" means the flip-flop loads its input on that edge.
  * A C-element follows its inputs when they agree and holds otherwise.
* **Handshakes.** Every handshake wire is an ordinary level that changes at
  most once per cycle.
* **Timing.** Latencies are counted in clock cycles, not gate delays. They
  show the structure of the design, such as how many stages an event passes
  and how often the upper levels are re-arbitrated. They are not a
  prediction of the speed of a silicon implementation.

Three parts are analog in the original. They are written as cycle-level
behavioural models in synthesizable style, and each file says so at its top:

* the mutex inside a two-input arbiter (`hat_arb2`);
* the match-line sense amplifier (`cam_mlsa`);
* the current sensor (`cscd_current_sense`).

## The HAT encoder

### Neuron address and clusters

A neuron's 6-bit address is three base-4 digits `{H, M, L}`. Each level of
the arbiter tree sees four cluster request lines:

| Level | Cluster `d` holds the neurons whose… | Size of one contest |
|-------|--------------------------------------|---------------------|
| High (H) | H digit is `d` | 16 neurons each |
| Medium (M) | M digit is `d`, but only in the H cluster that currently holds the high-level grant | — |
| Low (L) | L digit is `d`, within the granted H and M clusters | 1 neuron |

`hat_cluster_bus` builds these lines:

* A neuron adds its request to a lower level's line only while it holds
  the grants of all levels above. In silicon these are wired-OR lines.
* A neuron's own grant is the AND of its cluster's grants at every level.

### One level

Each level is a chain of three parts.

**Masking stage (`hat_masking`).** One channel per cluster line.
* A latch passes the cluster's request to the arbiter, and the level's
  grant clears it.
* A C-element over the request and the latch output closes the latch once
  the request has been taken. A cluster that keeps its line high is
  therefore offered once. It is offered again only after its line has
  fallen.
* A second C-element over the request and the level's grant makes the
  cluster grant. That grant outlives the arbiter's short grant and falls
  only after the cluster has released its line.
* `v` (the OR of the latched requests) says a masked request is still
  waiting at this level.

**Arbiter (`hat_arbiter4`).** Three two-input arbiters form a tree. The
leaves decide within {0,1} and {2,3}, and the root decides between the pairs.

**First pipeline register and encoder (`hat_stage1`).**
* The register captures the one-hot grant when two conditions hold:
  * it is empty;
  * the acknowledge `Ack` is low.
* The held value goes back to the masking stage as the level's grant.
* A one-hot to dual-rail encoder turns it into the level's two address bits.
* The register's completion detector is an XOR of the four bits, not an OR.
  A momentary overlap of two grants is therefore never taken as valid.

### Merging the levels and the acknowledge

The second pipeline register (`hat_stage2`) takes the dual-rail digits of
all levels. Once all of them are complete, they form one packet, and the
register presents it on the output channel (`data_out`, `req_out`,
`ack_out`). The register's completion signal also drives the ack generator
(`hat_ack_gen`).

The ack generator raises `Ack` when a packet has been captured. Raising
`Ack` clears the first-stage registers, but not all of them:

* the low level always clears;
* a higher level clears only if no lower level has a masked request
  waiting.

This is the mechanism that keeps the upper digits fixed during a burst.
`Ack` falls again once no level still holds data of the packet just sent:

    packet_valid = D_L | (D_M & ~V_L) | (D_H & ~V_M & ~V_L)

Here `D_x` is a level's encoder output and `V_x` its masked-request flag.
The RTL generalises this to any number of levels. Once `Ack` falls, the
first stage opens for the next event.

### Timing, as built

* **Sparse events.** A single event takes 3 cycles per level from the
  neuron's request to `req_out` (9 cycles for 64 neurons). The three cycles
  are the masking latch, the first-stage register and the cluster grant.
* **Full-frame burst.** When all 64 neurons fire together, every address
  leaves exactly once.
  * The H digit changes only 3 times.
  * The M digit changes 3 times inside each H cluster.
  * The burst takes about 380 cycles, about 6 per event, with a receiver
    that acknowledges in one cycle.
* **256 neurons.** The same holds with `LEVELS = 4`: 12 cycles for a sparse
  event, and a burst in about 1530 cycles.

**Constraint on the neuron side.** A neuron must drop its request within
about two cycles of seeing its grant. The neuron handshake circuits are not
part of this design. In the testbenches a neuron drops its request in the
cycle after its grant. A much slower neuron could let a higher level release
its grant before the lower-level request has gone.

## The CSCD CAM

### Entry and sense amplifier

`cam_entry` stores one 11-bit tag. It compares the tag with the search
lines, cell by cell:

* Any mismatching cell gives the match line a pull-down path.
* The per-cell sense nodes `sen_n` go low on a mismatch.
* The three cells nearest the amplifier are taken as bits `[2:0]`.

`cam_mlsa` models the current-race amplifier:

* **Charging.** While the search request is high, a current source charges
  the match line. The line reaches the threshold after `CHARGE_CYCLES`
  (default 2) cycles unless it has a pull-down path. On reaching the
  threshold, the output (`match`) goes high.
* **What closes the source.**
  * `Off` from the dummy entry;
  * the amplifier's own output (feedback control);
  * a mismatch in the last three cells (speculative sense).
* **Precharge.** Dropping the request discharges the line and clears the
  output.

### Dummy entry and completion

`cam_array` holds the entries and a dummy entry.

* The dummy entry always matches, but charges more slowly
  (`DUMMY_CHARGE_CYCLES`, default 3). Its output is `Off`, which stops every
  line that is still charging.
* `src_count`, the number of conducting current sources in a cycle, stands
  for the current drawn from the supply.

`cscd_current_sense` turns that current into a logic level: high while the
request is up and some source conducts. `cscd_hs` is the completion
flip-flop. Its data input is tied to 1, it is triggered by the falling edge
of the sensor output, and it is held in reset while the request is low. Its
output is the acknowledge.

`cam_hs` is the four-phase controller around all of this:

1. latch the key onto the search lines;
2. one cycle later, raise the request (data before request);
3. on the acknowledge, capture the match vector and drop the request;
4. when the acknowledge has fallen, answer the input channel.

One search takes 10 cycles from `in_req` to `in_ack`, whatever the data.

### What the early stops buy here

Per search, the charge (sum of `src_count` over cycles) is:

* 3 for the dummy line;
* 2 for each matching line, because feedback control stops it at the
  threshold;
* 3 for each line whose mismatches all lie outside the last three cells;
* 0 for each line with a mismatch in the last three cells.

With random keys, 7 in 8 mismatching lines are stopped by speculative sense.
The exact figure for 11 bits is (2^11 − 2^8 + 1)/2^11 ≈ 87.5 %.

`tb_cam_energy` runs two 512 × 11 copies on the same data, one with the
mechanisms and one without, and compares their charge:

| Data case | Charge saved |
|-----------|--------------|
| all entries match | 33 % (2 instead of 3 per line) |
| all mismatch, bits at random | 87 % |
| random tags and keys | 87 % |
| all mismatch in the last three cells | almost all; only the dummy line conducts |
| all mismatch outside the last three cells | none |

This charge counts only match-line current sources. Whole-array energy also
includes search-line and write energy, so real savings would be smaller.

In this model the dummy line draws current until `Off`. So the sensor always
falls at the same time, and the early stops save charge but not cycle time.
In the circuit the design comes from, they also shorten the cycle a little,
because the total current falls sooner. That effect depends on analog
thresholds that a cycle model does not have.

## Parameters

| Module | Parameter | Default | Meaning |
|--------|-----------|---------|---------|
| `core_interface`, `hat_encoder` | `LEVELS` | 3 | arbiter levels; 4**LEVELS neurons, 2*LEVELS address bits |
| `core_interface` | `CAM_N` | 512 | CAM entries (synapses) |
| `core_interface` | `CAM_W` | 11 | tag width |
| `cam_cscd`, `cam_array`, `cam_entry` | `FEEDBACK`, `SPEC` | 1, 1 | feedback control and speculative sense on or off |
| `cam_mlsa` | `CHARGE_CYCLES` | 2 | match-line charge time of an entry |
| `core_if_pkg` | `DUMMY_CHARGE_CYCLES` | 3 | charge time of the dummy line |
| `core_if_pkg` | `CAM_SPEC_BITS` | 3 | cells used for speculative sense |

The sizes are those of the source design's main configuration:

* 64 neurons in three levels;
* a 512 × 11 CAM (it was also evaluated at 16 × 11).

The two charge times are this design's choice. The dummy line must be the
slower one.

## Where this departs from the source circuits

* **Synchronous rendering.** Everything is clocked (see above), and latencies
  are in cycles.
* **Double-capture guard.** The second pipeline register also waits for
  `Ack` to be low before it captures. Without this, a clocked rendering can
  capture the same packet twice. This happens when the low-level digit has
  not yet been cleared at the moment the output channel frees.
* **Two-input arbiter.** A real mutex settles a tie by metastability. The
  model's tie-break is its own choice: ties from idle alternate between the
  two sides, so simulation is fair and repeatable.
* **Analog blocks.** The MLSA, the current sensor and the mutex are
  cycle-level models. The charge times are assumed, and the sensor has no
  threshold or pulse-width behaviour.
* **Cycle-time benefit of early stops.** It is not reproduced (see above).
* **Tag width.** It is 11 bits. One illustration in the source uses
  10-bit entries, but the evaluated design points are 11 bits wide.
* **Interfaces of this design's own.** These are not specified in the
  source:
  * the CAM's write port (a whole tag in one cycle, not during a search);
  * the input key channel;
  * the bit order of the output address, with the H digit most significant.

## Files

`rtl/` holds one module per file. `core_if_pkg` holds the shared
constants, types and the one-hot/dual-rail helpers.

| File | Part |
|------|------|
| `core_interface.sv` | top: encoder and CAM |
| `hat_encoder.sv` | cluster lines and pipeline, 4**LEVELS neurons |
| `hat_cluster_bus.sv` | shared cluster request and grant lines |
| `hat_pipeline.sv` | per-level masking, arbiter and first register; ack generator; second register |
| `hat_masking.sv`, `hat_arbiter4.sv`, `hat_arb2.sv`, `hat_stage1.sv`, `hat_ack_gen.sv`, `hat_stage2.sv` | pipeline parts |
| `cam_cscd.sv` | input interface: HS controller, array, sensor, completion flip-flop |
| `cam_hs.sv`, `cam_array.sv`, `cam_entry.sv`, `cam_mlsa.sv`, `cscd_current_sense.sv`, `cscd_hs.sv` | CAM parts |

`tb/` has one self-checking testbench per module, named `tb_<module>`.
There are two more:

* `tb_hat_encoder_256`: the encoder at 256 neurons.
* `tb_cam_energy`: the CAM with and without feedback control and
  speculative sense.
* `tb_core_interface`: the whole interface at its default size.
  * The output events are looped back to the input through a queue, with
    source core number 3 in the upper five tag bits. This queue stands for
    the network between cores.
  * Output acknowledges come after a random delay.
  * It counts each mechanism and fails if one never occurs: sparse events,
    burst, a level holding its grant, arbiter contention, output stalls, and
    lines stopped by feedback, by speculative sense and by `Off`.

Every testbench prints one line `TB_RESULT checks=N failures=M` and stops
itself with a watchdog if the design hangs.

## Simulating

Verilator 5 with timing support is needed. From the directory that holds
`rtl/` and `tb/`, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/core_if_pkg.sv \
        tb/tb_core_interface.sv --top-module tb_core_interface -Mdir obj -o sim
    ./obj/sim

Any other testbench is built the same way, with its name in both places. The
package must come first on the command line. The other modules are found
through `-Irtl`.

Lint reports three kinds of warning, none of them a circuit problem:

* Some package constants are unused by a given module.
* `rst_n` is used both as an asynchronous reset and in the assertions'
  `disable iff`.
* `cam_cscd` leaves the array's `Off` output open, because it is used only
  inside the array.
