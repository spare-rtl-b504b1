# SPARE — a spiking-network accelerator whose SRAM also holds ROM tables

A spiking neural network (SNN) needs two kinds of data. It needs state that changes: synaptic
weights, membrane potentials (Vmem) and spike times. It also needs fixed functions: the synaptic
current as a function of the weight, the neuron's dVmem/dt as a function of Vmem, and the
exponential used by spike-timing-dependent plasticity (STDP). Fixed functions are cheapest as
look-up tables, but a separate ROM costs area next to every compute unit.

This design puts the ROM *inside* the SRAM. Every 6-transistor cell is wired at manufacture so
that it also stores one read-only bit. The choice is which of two word lines drives the cell's
left access transistor. A normal read or write uses both word lines and sees ordinary RAM. A
short write/read/restore sequence exposes the hard-wired ROM bits instead. Each processing
element (PE) therefore keeps its neurons' state and all the tables it needs in one 32 KB memory,
and does every multiply-free model evaluation as a table look-up in that same array.

The PEs sit on a shared bus with a global spike memory and a control unit. Only spikes travel
between PEs, as packed 32-bit words. Weights never leave the PE that owns them.

The RTL is SystemVerilog (IEEE 1800-2017) in `rtl/`, one module per file. Self-checking
testbenches are in `tb/`. The top module is `spare_top`.

## The ROM-embedded SRAM (`rsram_array`, `rsram_mem_ctrl`)

Each cell has two access transistors. The right one is always on word line WL2. The left one
(AXL) is on WL1 if the cell's ROM bit is 1, and on WL2 if it is 0.

- **RAM mode.** WL1 and WL2 are driven together, so every cell behaves as a normal 6T cell.
- **ROM mode.** The controller runs six array cycles on the addressed row:
  1. Accept the request.
  2. Read the RAM word and park it in a one-word buffer.
  3. Write all 1s with WL1 = WL2 = on.
  4. Write all 0s with WL1 off and WL2 on. Only the cells whose AXL sits on WL2 (ROM bit 0)
     are written through both sides. The others keep their 1. The row now holds the ROM word.
  5. Read the row.
  6. Write the parked RAM word back.

`rsram_array` models this at bit level. A write reaches a cell only when the word line of its
AXL is raised. The per-row ROM pattern comes from `spare_pkg::rom_word()`, which stands for the
mask-programmed wiring. Step 4 is a write through a single access transistor; real silicon needs
write-assist circuits for it to be reliable. The model assumes that assist is present, so such
writes always succeed.

**Timing.** `rsram_mem_ctrl` serves one request at a time:

| Access | Response after acceptance |
|---|---|
| RAM read or write | 2 cycles |
| ROM read | 6 cycles |

The 1:3 ratio matches the published R-SRAM latencies (0.418 ns RAM, 1.254 ns ROM at 45 nm).
`rom_mode` is high during steps 2–6.

## Tables in the ROM layer (`spare_pkg`, `lut_addr_gen`)

The hidden ROM of every PE holds three tables of 32-bit words:

| Rows | Table | Contents |
|---|---|---|
| 0–255 | I_SYN | synaptic current for 8-bit weight w: `w >>> 1` |
| 256–511 | DVDT | LIF leak for 8-bit Vmem v: `-((v - E_L) >>> 4)` with E_L = 0, i.e. g_L·dt/C = 1/16 |
| 512–527 | EXP | `round(2^(d/16) · 32768)` for d = 0..15 (K = 4) |

A "fetch LUT" step names a table and an offset. `lut_addr_gen` adds the offset to the table's
base row (its "LUT index"). EXP offsets beyond the table are clamped to its last row.

All table contents, the scale factors and K are this design's choices. The published design
names the tables but gives no values. The tables are computed by SystemVerilog functions, not
read from files.

## The STDP exponential (`exp_unit`)

The weight change of a synapse is proportional to e^x, where x = −Δt/τ and Δt is the time
between the input spike and the output spike. A full e^x table would be large, so the design
uses range reduction:

- N = floor(x / (ln2 / 2^K)); write N = M·2^K + d with 0 ≤ d < 2^K.
- Let r = x − N·ln2/2^K, so 0 ≤ r < ln2/2^K.
- Then e^x = 2^M · 2^(d/2^K) · e^r ≈ 2^M · LUT(d) · (1 + r).

Only the 2^K-entry table of 2^(d/2^K) is stored, in the ROM. The power of two is a shift.
`exp_unit` has two combinational halves. The first reduces x (Q8.8) to d, the shift −M and
r (Q0.16). The PE then fetches LUT(d) from ROM. The second half forms
`(LUT(d) · (1 + r)) >> −M` as a Q1.15 value.

Only x ≤ 0 is supported, which is all a decaying STDP window needs. The relative error is
below 1/256 (checked against `$exp` in `tb_exp_unit`).

The published text defines N with floor, but also states |r| ≤ ln2/2^(K+1), which would need
rounding. This RTL follows floor.

## Spike output computation and state update (`spike_output_compute`, `state_update`)

**Neuron.** Leaky integrate-and-fire: `V' = sat8(V + DVDT[V] + I_SYN[w])`. The neuron fires when
V > V_th; equality does not fire. A fired neuron is reset to V_reset.

**Plasticity.** Potentiation only, applied when a neuron fires:

    w' = sat8(w + (a_plus · e^(−Δt·τ_inv)) >> 15)

- Δt = t_now + 1 − t_pre, capped at 255.
- Spike times are stored as step + 1, so 0 means "never spiked". A never-spiked input is not
  updated.
- Depression is not modelled.

**State update.** Weights and Vmem are 8-bit values packed four to a 32-bit word.
`state_update` builds the write-back word by replacing one byte lane, or writes a whole
spike-time word.

## The processing element and its event controller (`pe`, `event_controller`)

A PE holds a slice of one layer: `n_out` output neurons and all their synapses from the layer's
`n_in` inputs. It has:

- a 32-word spike input buffer (`spike_input_buffer`, 32 spikes per word);
- the event controller;
- the R-SRAM with its controller;
- the compute core (`spike_output_compute`);
- the state updater;
- a 32-word spike output buffer (`spike_output_buffer`).

The event controller is an extended state machine that walks one time step as follows.

1. **Fetch input.** Take the next input spike bit from the buffer head. A `0` costs one cycle
   and is skipped: this is the event-driven saving. A `1` (in training, its time step is first
   written to the input's spike-time word) runs, for every output neuron j:
   - **synapse model:** read the weight word (RAM), fetch I_SYN[w] (ROM), latch the current;
   - **neuron model:** read the Vmem word (RAM), fetch DVDT[V] (ROM), evaluate, write Vmem back
     (RAM).
2. **Threshold pass.** After all `n_in` inputs, for every output neuron:
   - read Vmem; if V > V_th the neuron fires;
   - in training mode, the plasticity model then runs for every input i: read w_ij, read
     t_pre(i), fetch EXP[d] (ROM), write w_ij;
   - reset Vmem.
   Output bits collect into a word, which goes to the output buffer every 32 neurons and after
   the last one.
3. **Next step.** Start the next time step, or return to idle after `n_steps` steps.

Padding bits at the end of the last input word of each step are dropped.

**Cycle cost** (checked by `tb_event_controller` and `tb_pe`). A memory step lasts 3 cycles for
RAM and 7 for ROM, counting its request cycle; an evaluate step lasts 1 cycle.

| Event | Cycles |
|---|---|
| `0` input | 1 |
| `1` input | 1 + 25·n_out (+3 in training) |
| weight update | 16 |

Memory accesses are not overlapped. Per synaptic event the PE makes 2 ROM reads, 2 RAM reads
and 1 RAM write. Per weight update it makes 1 ROM read, 2 RAM reads and 1 RAM write.

### Memory layout inside a PE

Three base addresses come from configuration registers:

| Data | Address |
|---|---|
| weight w_ij | `w_base + (i·n_out + j)/4`, byte `(i·n_out + j) mod 4` |
| Vmem_j | `v_base + j/4`, byte `j mod 4` |
| spike time of input i | `t_base + i` (one word) |

The same 8192 rows also carry the ROM tables in their hidden layer, so the RAM map and the ROM
map do not compete for space.

### Configuration registers (host writes with `cfg = 1`)

| Addr | Contents |
|---|---|
| 0 | `{tag[7:4], training[1], enable[0]}` |
| 1 | n_in |
| 2 | n_out |
| 3 | w_base |
| 4 | v_base |
| 5 | t_base |
| 6 | `{v_reset[15:8], v_th[7:0]}` (signed) |
| 7 | n_steps |
| 8 | `{a_plus[15:8], tau_inv[7:0]}` (τ_inv is Q8.8 per step) |

An enabled PE starts as soon as a spike word for its tag is in its input buffer. Host RAM
accesses (`cfg = 0`) are accepted only while the PE is idle.

## Shared bus, global memory and control unit (`spike_bus`, `global_memory`, `control_unit`)

An SNN is mapped layer by layer. Each layer gets a group of contiguous PEs, and the layer number
is the PEs' tag.

**Bus.** `spike_bus` broadcasts a spike word to every enabled PE whose tag matches. A word is
taken only when all of them have room; otherwise the bus stalls. The bus also selects one PE's
output buffer for the gather, and routes host requests to one PE. There is no PE-to-PE path:
all spikes pass through global memory.

**Rounds.** The control unit reads a layer table and runs the network in rounds. In round r:

- **gather:** for every layer l with a valid step t = r − 1 − l, read `out_words` words from each
  of the layer's PEs and store them at `dst_base + t·dst_stride + pe·out_words`;
- **scatter:** for every layer l with a valid step t = r − l, read the layer's `n_words` input
  words from `src_base + t·src_stride` and broadcast them with tag l.

Layer l + 1 takes its input from where layer l's outputs were stored. So in one round, layer 0
works on step r while layer 1 works on step r − 1. This is **inter-layer pipelining**: a PE
starts computing as soon as its broadcast arrives, while other layers are still busy. The run
ends after `n_steps + n_layers − 1` rounds.

**Padding.** A PE's output word carries its neurons' spikes in its low bits. If a PE has fewer
than 32 neurons, the remaining bits are padding zeros. Those bits become inputs of the next
layer. Give them zero weights: since they never spike, they cost one skip cycle each.

**Control-unit registers** (host target `HOST_CU`):

| Addr | Contents |
|---|---|
| 0 | write 1 to start; read `{done, busy}` |
| 1 | n_steps |
| 2 | n_layers |
| 16 + 8·l … 23 + 8·l | layer l: `src_base, src_stride, n_words, dst_base, dst_stride, pe_first, pe_count, out_words` |

The global memory (4096 words) is host-accessible only while no run is active.

**Not built: convolution layers.** In the published design, the control unit can also split
convolution inputs into windows and merge the outputs, using stride, kernel size and map count.
This RTL does not build that. Only fully-connected layers are run; each receives its whole input
vector.

## Top level (`spare_top`)

The top has:

- `NUM_PE` PEs (default 16: the smallest published benchmark, a 784×400 network, uses 16);
- the bus, the global memory and the control unit.

The host interface is published only as a name, so its signals are the top's ports:

- `host_valid/host_ready/host_req`, where `host_req_t` selects the global memory, the
  control-unit registers, a PE's RAM or a PE's configuration;
- `host_rvalid/host_rdata` for read data.

Observation ports:

- `pe_stats[NUM_PE]`: per PE, the skipped `0` inputs, processed `1` inputs, RAM/ROM accesses,
  fires, weight updates and steps;
- `bus_stall_cycles`, `bus_bc_words`, `bus_gather_words`;
- `pipeline_overlap_cycles`: broadcast cycles during which a PE of another layer was computing.

Parameters: `NUM_PE`, `MAX_LAYERS` (4), `GMEM_WORDS` (4096), `PE_WORDS` (8192 = 32 KB of 32-bit
words).

## Departures from the published design

**Published values kept:**

- 32 KB memory per PE;
- 32-bit data;
- 8-bit weights and Vmem;
- buffer depth 32;
- the six-step ROM read;
- the event-controller flow.

**Chosen here (the published design gives no value):**

- all widths of counters and addresses;
- the table contents and K = 4;
- 4-per-word packing and the PE memory map;
- the spike-time encoding;
- the host protocol and all register maps;
- the round-based scatter/gather schedule;
- all-or-none broadcast;
- NUM_PE = 16, global memory size, MAX_LAYERS = 4.

**Left out:**

- convolution window split and output merge;
- Izhikevich and Hodgkin–Huxley neurons (the published results for them are projections; only
  LIF tables are in ROM);
- STDP depression;
- the write-assist circuit (assumed ideal);
- the MRAM variant of the ROM-embedded memory.

**Other differences:**

- The published pipelining is across input images: layer 2 works on image n while layer 1
  works on image n + 1. Here the pipeline works across time steps, which also covers a stream of
  images laid out as consecutive steps. Nothing resets Vmem between images; the host must
  rewrite it.
- The PE issues one memory access at a time, so its cycle counts are a plain sum of access
  latencies.
- Leak is applied each time a `1` input is processed, as the flow chart's order implies, not
  once per time step.

**Capacity.** With 8192 words per PE, a PE with `n_in` inputs holds at most about
`(8192 − n_in) · 4 / n_in` neurons, for example 37 for 784 inputs. At the default 16 PEs:

| Network | Fits? |
|---|---|
| 784×400 | yes |
| 784×1600 | needs about 44 PEs |
| 784×6400 | needs about 173 PEs |
| 784×1200×1200×10 | needs about 94 PEs |
| CIFAR-10 CNN | no (convolution not built) |

`NUM_PE` can be raised up to 256, the range of the layer table's PE fields.

## Simulation

Every testbench is self-checking and ends with `TB_RESULT checks=<n> failures=<m>`. Build
one with plain Verilator, for example:

    verilator --binary --timing -Wno-fatal --top-module tb_spare_top \
        rtl/spare_pkg.sv rtl/*.sv tb/tb_spare_top.sv
    ./obj_dir/Vtb_spare_top

(List `spare_pkg.sv` first; repeating it through the wildcard is harmless.)

**Unit testbenches.** `tb_<module>` exists for every module. Each checks its module against an
independent model: bit-level ROM/RAM behaviour; the 2- and 6-cycle memory latencies; FIFO order
and the 32-word depth; e^x against the real exponential; LIF and STDP arithmetic; bus
routing and stalls; and the control unit's placement of gathered and scattered words.

**`tb_event_controller` and `tb_pe`** run several training steps against a reference model of
the whole PE flow. They compare:

- output spike words;
- final Vmem, weights and spike times;
- ROM read counts;
- the cost of a `1` input: 25·n_out cycles more than a `0` input.

**`tb_spare_top`** runs a two-layer network on 4 PEs through the host interface. Layer 0 has
1280 inputs, which is more than the input buffer holds, so the bus must stall. Layer 1 is fed
from layer 0's outputs. The testbench checks every output word in global memory, and PE
state, against the reference model. It counts `0` skips, `1` events, fires, weight updates, bus
stalls and pipelined overlap; each must be non-zero.

**`tb_spare_top_full`** uses the top with all defaults (16 PEs × 32 KB). It runs the 784×400
network with 25 neurons per PE for two training steps, about 0.2 M cycles after loading, and
checks all PEs.
