# A streaming multicore neural processor with memristor-crossbar cores

Sensors such as cameras produce data far faster than a general-purpose
processor can push it through a neural network. This design places a mesh of
small neural cores directly under the sensor, in a 3-D stack. Pixels flow in
on one edge of the mesh. Each core computes one layer, or one slice of a
layer, and hands its outputs to the next core over a statically scheduled
network. Results leave on the opposite edge into a buffer that the host
processor reads.

The main core type is an analog **memristor crossbar**. Each synapse is a
pair of resistive devices whose conductances encode a signed weight. A whole
layer of up to 64 threshold neurons with 128 inputs each settles in one
analog step (two 5 ns clock cycles). A conventional **SRAM digital core**
(256 inputs × 128 neurons, 8-bit weights, multiply-accumulate units and an
activation lookup table) is also provided. It can be selected for the whole
mesh with a top-level parameter, so that both versions of the system can be
simulated.

All sizes are defaults of parameters:

| item | default | origin |
|---|---|---|
| memristor core | 128 inputs × 64 neurons, 2 devices per synapse, plus a bias row | design point of the original study |
| digital core | 256 inputs × 128 neurons, 8-bit weights and values, 256-byte activation table | design point of the original study |
| link width | 8 bits, plus a valid bit | 8 bits from the original study; valid bit is this design's own |
| clock | 200 MHz (crossbar evaluation = 2 cycles) | original study |
| mesh | 8 rows × 9 columns = 72 tiles | this design; the largest workload studied needs 68 memristor cores |
| schedule | 256 time slots per switch | this design |
| DAC cores | every second tile (`DAC_EVERY = 2`) | this design; the study only says they are spread evenly |

## The mesh (`nn_top`)

Each tile holds one neural core and one routing switch. Switch ports are
named N, E, S, W and L (the local core). Neighbouring switches are wired
N↔S and E↔W. The open edges are treated as follows:

- On the west edge, each row's W input is fed by one lane of the **IO
  interface** (`io_interface`). This is a FIFO per row that takes pixels from
  the sensor.
- On the east edge, each row's E output goes to the **output buffer**
  (`sys_out_buffer`). This is a FIFO per row with a read port for the host.
- North and south edge inputs are tied to idle.

A single global slot counter counts from 0 to `tdm_len-1` and then wraps.
All switches see the same slot number.

Host-side ports are plain signals:

- `rt_*` writes one schedule entry: tile, slot, output port, and source
  port/enable.
- `cfg_*` writes core registers, LUT entries or weights of one tile.
- `pg_*` sends memristor programming commands to one tile and returns the
  ADC readings.
- `core_event`, `core_stall`, `core_err`, `io_overflow` and `ob_overflow` are
  status outputs per core or per row.

## Routing switch and static time-multiplexing (`routing_switch`)

The switch is a 5×5 crossbar controlled by configuration memory. For each
time slot and each output port, one entry `{en, src}` says whether that
output is driven in that slot and, if so, from which input. Several outputs
may take the same input (broadcast). The L output may take the L input, which
lets a core feed its own outputs back to itself (loopback). A multi-layer
network can therefore run on a single core, layer after layer.

Two points depart from a pure pass-transistor crossbar:

- **Registered outputs.** Every output is registered, so each hop costs one
  clock. A schedule must allow for this: a byte that leaves core A in slot s
  is on the next switch's input in slot s+1.
- **Grant signal.** The switch reports, per input, whether any output took
  that input in the current slot (`grant`). Sources (cores, IO lanes) keep
  offering the same byte until it is granted. A source that is scheduled
  but has nothing to send produces an idle flit (valid = 0), not garbage.

The schedule memory has no reset, like the SRAM it models. Every slot that a
frame uses must be written, either with a route or with `en = 0`.

Writing a schedule: for a byte that must travel from core A to core B over k
hops, starting in slot s:

- A's switch routes L→(direction) in slot s.
- Each intermediate switch routes (entry port)→(exit port) one slot later
  than the previous one.
- B's switch routes (entry port)→L in slot s+k.

`tb/tb_nn_top_full.sv` contains a complete worked example on the full-size
mesh.

## Memristor crossbar core (`memristor_core`)

### The analog neuron (`memristor_crossbar`, behavioural model)

Every input i drives two rows: one with voltage v_i and one with −v_i.
Neuron j's column holds a device of conductance σ⁺ on the first row and σ⁻
on the second. The column collects a current proportional to Σ v_i·(σ⁺ − σ⁻).
A pair of inverters at the column's foot turns the sign of that sum into a
full-swing output: +1 V for a positive sum, −1 V otherwise. An extra bias
row, always driven at +1 V, provides the threshold.

The model does not simulate currents. It computes the sign of
Σ v_i·(g⁺ − g⁻) over integer conductance levels 1..255 and presents the
result `LAT = 2` cycles after `eval`. Writing the devices is modelled as
well:

- A SET or RESET pulse moves one device's level up or down by 1 to 3 steps.
  The step size differs from device to device, because real devices respond
  unevenly to identical pulses.
- A read gives the voltage across a sense resistor in series with the
  selected device: g/(g + G_SENSE) of the read voltage.

### Inputs, DACs and the 18-cycle pattern

A core takes one byte per cycle from its switch. Its meaning depends on the
core type:

- **Hidden-layer core (`HAS_DAC = 0`).** Each byte carries eight binary
  outputs of an earlier layer. Bit k of byte n drives row 8n+k at +1 V (1)
  or −1 V (0). A full 128-input pattern is therefore 16 bytes. Adding the 2
  cycles of crossbar evaluation gives 18 cycles = 90 ns, the throughput the
  original study reports for this core.
- **First-layer core (`HAS_DAC = 1`).** Each byte is one 8-bit sensor value.
  The value drives its row through a DAC (`dac`, behavioural model, linear
  from −1 V for code 0 to +1 V for code 255). A full pattern is then 128
  bytes.

`CFG_NUM_IN` sets how many bytes make a pattern. Rows that are not received
are driven at 0 V and do not count. A smaller layer therefore needs no zero
weights.

When the last byte arrives:

1. The rows are copied into the row drivers.
2. The crossbar is evaluated.
3. The input buffer is already free to take the next pattern.

### Output buffer, overlap and overrun

The 64 outputs go out as `CFG_NUM_OUT` bytes, eight neurons per byte
(neuron 8k+b in bit b of byte k). They are sent while the next pattern
comes in.

A result that finishes while the previous one is still being sent waits in
a holding register. A further result is dropped and sets the sticky
`overrun` flag. This only happens if the schedule gives a core fewer output
slots than its input rate requires.

Timing at defaults, checked in `tb_memristor_core`: counting the first of
the 16 input bytes as cycle 1, the crossbar result appears in cycle 18
(90 ns) and the first output byte is offered in cycle 19.

### Programming the devices (`prog_ctrl`, `prog_adc`)

Devices are tuned one at a time by a feedback loop run from off-chip: pulse,
read back, compare, pulse again. Each crosspoint has a select transistor.
The core carries one ADC and a small controller. Setting `CFG_MODE = 1`
puts the core in programming mode: network input is ignored, and
`prog_ctrl` accepts commands `{op, row, col, neg}` with a valid/ready
handshake:

- **SET / RESET.** Applies one write pulse (`PULSE_CYC` cycles) to the
  chosen device, then answers.
- **READ.** Turns on the row's read switch, settles for one cycle, runs the
  ADC (`CONV_CYC = 4` cycles, 8 bits, `prog_adc` behavioural model), and
  answers with the code.

The search over pulses is left to the host. Tests program target weights
this way through the top level.

## SRAM digital core (`digital_core`, `weight_sram`, `activation_lut`)

Inputs arrive one per cycle. Input number i (counted in arrival order) reads
row i of the 256×128 weight memory. All 128 multiply-accumulate units then
add W[i][j]·x_i. Weights are signed and inputs unsigned, both 8 bits.

After the last input (`CFG_NUM_IN`), each sum is scaled:

1. Arithmetic right shift by `CFG_SHIFT`.
2. Saturation to a signed byte.
3. Storage in the output buffer.

The buffer is sent one neuron per cycle through the core's single 256-entry
activation table. Sending pattern n overlaps computing pattern n+1.

If the previous pattern is still being sent when a new one finishes, the
accumulators hold and the array stalls (`stall`). Inputs keep queueing in a
small FIFO. If the FIFO fills, inputs are dropped and `overflow` is set.

A 256-input pattern takes 256 cycles to accumulate (1.28 µs at 200 MHz, as
in the original study). The first output is offered 258 cycles after the
first input.

Configuration addresses are defined in `nn_pkg`:

- `CFG_NUM_IN` = 0
- `CFG_NUM_OUT` = 1
- `CFG_SHIFT` = 2
- `CFG_MODE` = 3
- `CFG_LUT + a` for table entries
- `CFG_WEIGHT | row<<7 | col` for weights

## Capacity

By core count, the 72-tile mesh holds each application of the original
study:

| application | memristor cores needed | digital cores needed |
|---|---|---|
| MNIST 784-200-100-10 | 31 | 9 |
| edge detection (4 small networks) | 16 | 18 |
| motion estimation | 2 | 2 |
| CIFAR-10 3072-100-10 | 68 | 17 |
| OCR 2500-60-26 | 31 | 13 |

Larger layers are split across cores: inputs in slices of 128, neurons in
groups of 64, with a further neuron layer combining the partial results.
This splitting is a property of the trained network and the schedule, not
of the hardware. `tb_workload_split` runs the splitting pattern on
full-size cores with weights of ±1. None of the applications is run with
trained weights.

## Where this design departs from the original study

- Switch outputs are registered (one cycle per hop) instead of being pass
  transistors. Links carry a valid bit, and sources advance on a grant.
- The mesh size, the number of slots, the DAC placement, and the host
  configuration and programming ports are this design's choices.
- Packing eight binary outputs per byte follows from the reported 90 ns per
  pattern. The original study does not describe the packing itself.
- Analog parts are behavioural models: crossbar, DAC and ADC. Device
  physics (resistance range, pulse amplitude, nonlinearity) is reduced to
  integer conductance levels.
- The digital core's scaling (shift and saturate) before the lookup table is
  this design's choice.
- Not included: the stacked sensor chip and its through-silicon vias, the
  host processor and memory, and the off-chip programming controller. Their
  signals are ports of `nn_top`.

## Files and simulation

`rtl/` holds one module or package per file; `nn_pkg.sv` must be compiled
first. `tb/` holds one self-checking testbench per module. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs.

Testbenches:

- `tb_nn_top` runs small meshes (2×3 memristor, 1×2 digital) end to end:
  two chained layers, a loopback pipeline, device programming, and mode
  switches. It counts each mechanism.
- `tb_nn_top_full` uses the top at its default size (8×9 mesh, 256 slots).
  The weights are written with the pulse and read-back loop. A 128-pixel
  pattern then enters a DAC core. Its 64 binary outputs feed a second core,
  whose results cross the remaining seven switches into the output buffer.
  There they are compared with a model of the network. It takes about
  4 minutes to build and run.
- `tb_workload_split` shows how a layer that is too wide for one core is
  mapped, which is what the large recognition workloads need. A neuron
  over 192 pixels is split into two partial neurons on two first-layer
  cores, one per mesh row. A third core combines both partial results. One
  of the two streams reaches it around a corner of the mesh.

Running one testbench:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/nn_pkg.sv tb/tb_memristor_core.sv --top-module tb_memristor_core
./obj_dir/Vtb_memristor_core
```

Simulator notes:

- The crossbar model is written for a two-state simulator. Its conductances
  start at level 1.
- Schedule memories must be written before use, because they have no reset.
- Synthesis of the full mesh is slow: the behavioural crossbar model is
  unrolled 72 times. The crossbar, DAC and ADC models are not meant for
  synthesis in any case.
