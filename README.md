# FPSA: a reconfigurable spiking ReRAM accelerator in SystemVerilog

FPSA builds a neural-network accelerator the way an FPGA is built. There is one
kind of compute tile, a ReRAM crossbar that multiplies a 256-long input vector by
a 256x256 weight matrix. Many of these tiles are laid out in an island-style array
with two other tile kinds:

- small spike buffers (SMBs), and
- lookup-table logic (CLBs) for control.

Switches made of ReRAM cells join the tiles. A network is mapped onto the array
by writing weights into the crossbars and by closing the switches that wire one
layer's outputs to the next layer's inputs.

Numbers travel between tiles as spike trains, not as binary words. A value x is
the number of 1-cycles in a sampling window of Γ = 2^n clock cycles. Because of
this, a processing element needs no ADC or DAC:

- each input row is driven by one switch, and
- each output column is read by an integrate-and-fire neuron.

This RTL models the whole digital side of that fabric:

- the processing element (PE), with behavioural models of its analog parts;
- the SMB and the CLB;
- the connection boxes and switch boxes;
- the tile and the chip-level array.

## The processing element: multiply-accumulate with spikes

A PE (`pe`) has 256 spike inputs and 256 spike outputs. Inside it there are
three parts.

**The crossbar** (`reram_crossbar`, behavioural) has 256 rows and 512 physical
columns. Each logical weight w[r][j] uses two physical columns: 2j carries the
positive part of the weight and 2j+1 carries the magnitude of the negative part.
Each crossing holds eight 4-bit cells (16 conductance levels). Their
conductances add, so one crossing can hold a magnitude up to 8 x 15 = 120. This
is how 8-bit-range weights are built from 4-bit devices.

In a cycle, every row whose input spike is 1 is driven, and each column gathers
the summed conductance of the driven rows. The model returns this sum as an
integer `col_charge[c]`. A real chip needs a single pass transistor per row to
drive it, so the "charging unit" has no module of its own: it is the `row_spk[r]`
condition in the sum.

**Neurons** (`neuron_unit`, behavioural) sit at the foot of every physical
column. A neuron keeps a membrane value v and, each cycle, works out
v + charge:

- If that reaches the threshold η (a per-PE register), the neuron spikes in the
  next cycle and v returns to 0. Charge above η is lost.
- Otherwise v accumulates.
- A window reset clears v and the spike.

Over a window, a column that receives a total charge Q fires about Q/η times.
With inputs x_r (spike counts), the positive neuron of column j fires about
Σ_r g⁺[r][j]·x_r / η times, and the negative neuron likewise with g⁻.

**Subtracters** (`spike_subtracter`) combine each positive/negative pair into
one output train:

- A negative spike arms a one-bit "block" flag (one D flip-flop).
- The next positive spike is swallowed and clears the flag.
- Positive spikes with no block armed pass through.
- A positive and a negative spike in the same cycle cancel.
- The window reset clears the flag.

The output count is therefore about max(Y⁺ − Y⁻, 0). This is the product followed
by a ReLU, obtained without any explicit activation circuit. With a single flag
the result is exact only while negative spikes do not pile up between positive
ones. The `BLK_W` parameter widens the flag into a saturating counter for a
closer ReLU. The default of 1 matches the single flip-flop of the original
circuit.

**Timing.** The crossbar is combinational and each neuron registers its spike, so
an input spike in cycle t affects the output in cycle t+1. This is the
"next-block-may-start-one-cycle-later" pipelining the fabric relies on: chained
PEs all run inside the same window, offset by one cycle each. No PE ever waits a
whole window for its predecessor.

**Configuration.** Write target `CFG_BLK`:

| Address | Data |
|---|---|
| 0..ROWS-1 | One crossbar row: all 512 x 8 cells, 4 bits each. Physical column c, cell k is at bit (c·8+k)·4. |
| `CFG_REG_ETA` (0x8000) | The threshold η, 20 bits. It resets to 256. |

## Spike memory block (SMB)

A chain of PEs cannot always run in lock-step. Some examples:

- a convolution layer reuses one PE for many window positions;
- a layer's output is needed again later;
- two producers feed one consumer at different times.

The `smb` breaks the chain: it records spike trains as counts and replays them
later.

- **Counting.** There is one counter per lane (256 lanes). The `clr` pin starts
  a new count, and the spike present in that same cycle is counted as the first.
  The counters saturate at 2^n − 1.
- **Storing.** The `commit` pin writes the 256 counts of the current window into
  slot `addr` of a 16 Kbit memory. A slot holds 256 counts of n bits packed
  back-to-back and starts at bit `addr·256·n`. With n = 6 (the 64-cycle window of
  the evaluated 6-bit configuration), one slot is 1,536 bits, so ten slots fit.
  With n = 3, twenty-one slots fit. A commit to a slot that would run past the
  end of memory is ignored, and such a slot reads as zero.
- **Replay.** The `load` pin reads slot `addr` into the spike generators and
  replays it over the next 2^n cycles. Lane l spikes in window cycle t when
  bitreverse_n(t) < count[l]. This spreads the spikes evenly through the window,
  so a downstream neuron sees a steady charge rate.
- **Window size.** n is set through `CFG_REG_NBITS` (0x8001), from 1 to 8, and
  resets to 6.

In the tile, SMB input pins 0..255 are the spike lanes. They are followed by
`clr`, `commit`, `load` and the address bits (6 by default).

## Configurable logic block (CLB): the control plane

The PEs and SMBs need window resets, clears, commits, loads and slot addresses
at the right cycles. Nothing in the fabric is hard-wired to produce them.
Instead they come from `clb` tiles: 128 six-input LUTs, each with a 64-bit truth
table, six input selectors, a flip-flop and an output mode bit.

- **Inputs.** Each LUT input selector can pick any of the 256 CLB input pins or
  the flip-flop of any LUT. This feedback makes counters and state machines
  possible without leaving the block.
- **Outputs.** LUT n drives output pin n. It outputs either the raw table value
  or its flip-flop.
- **Configuration.** One LUT is written per configuration word:

  | Bits | Field |
  |---|---|
  | [63:0] | Truth table, indexed by {in5..in0} |
  | [64 + i·S +: S] | Selector i, with S = clog2(256 + 128) = 9. Values 0..255 are pins; 256 + m is LUT m's flip-flop. |
  | Next bit | Registered-output mode |
  | Last bit | Initial value of the flip-flop, loaded when the LUT is written |

A typical controller, used by the end-to-end test, is built like this:

- a 6-bit window counter q, one LUT per bit, each a toggle term of the lower bits;
- compare LUTs that decode q = 0, 1, 2, … into one-cycle reset, commit and load
  pulses for the different PEs and SMBs;
- a registered "window end" LUT and two toggle LUTs that step the SMB slot
  address from window to window.

## Routing: connection boxes, switch boxes and tiles

Each tile (`fpsa_tile`) is a function block under a switch box, with a
connection box on each of its four sides. All three block kinds share one pin
frame, so any kind can sit in any tile:

- **Input pins.** NPI = max(256 + 3 + 6, 256) = 265 input pins. Pin k lies on
  side k mod 4 (N = 0, E = 1, S = 2, W = 3) as pin k/4 of that side's connection
  box, so each side has 67 pins.
- **Output pins.** NPO = 256 output pins.
- **Tracks.** Tracks are one-way. Each side of a tile has W = 96 tracks arriving
  and 96 leaving. The leaving tracks of one tile are the arriving tracks of its
  neighbour. At the chip border they become the chip's `edge_out_*` and
  `edge_in_*` ports.

**Connection box** (`connection_box`). Every input pin on a side has a selector:

- 0 leaves the pin at 0 (all of its ReRAM cells off);
- t + 1 connects it to arriving track t of that side.

Write target `CFG_CB_N/E/S/W`. The address is the pin index on that side and the
data is the selector.

**Switch box** (`switch_box`). Every leaving track (side s, track t) has a
selector:

- 0 means open;
- 1..4W picks arriving track (side·W + t′) + 1, from any side;
- 4W + 1 + o picks block output o.

The same switch box therefore turns corners, goes straight through, and puts the
block's outputs onto the network. Write target `CFG_SB`, address s·W + t.

**Paths are wires.** A configured path is a chain of closed switches, so it is
combinational across the chip. The only registers on a path are in the blocks
themselves. Verilator reports the switch-box mesh as a possible combinational
loop (UNOPTFLAT). A loop only forms if the configuration closes one, which a
valid routing never does.

**Reset.** Every selector resets to 0, so after reset the fabric is fully open.

## The chip (`fpsa_top`)

The default array has 8 rows of 9 tiles. The columns repeat the pattern
PE PE PE SMB CLB SMB PE PE PE, which gives 48 PEs, 16 SMBs and 8 CLBs. A larger
chip is obtained by changing `GRID_R` and `GRID_C`.

The configuration port writes one word per clock:

- `cfg_row` and `cfg_col` select the tile;
- `cfg_tgt` selects the switch box, one of the connection boxes, or the block;
- `cfg_addr` and `cfg_data` carry the word; `cfg_data` is as wide as a PE row
  (16,384 bits).

## What the fabric holds

- The default chip holds 48 × 65,536 ≈ 3.1 M weights, each stored in eight
  4-bit cells.
- Small networks fit in it even without duplication: a 784-500-100-10 MLP needs
  11 PEs, and LeNet-class and small VGG-class CIFAR networks need about 7 and 17
  PEs by weight count.
- ImageNet networks (AlexNet, VGG16, GoogleNet, ResNet-152) need between about
  100 and 2,100 PEs, so they need a much larger array.
- The array is a parameter, but simulating it grows with its size.

## Where this RTL departs from the original design, and what is modelled

- **Analog parts are behavioural.** Crossbar cells are ideal integer
  conductances, with no variation, IR drop or nonlinearity. The neuron
  integrates exact charge and compares it with η. The charging transistor is
  folded into the crossbar model.
- **Our own choices.** The published design does not specify these details, so
  they are choices of this RTL:
  - the routing architecture's widths (96 tracks per direction per side);
  - full-crossbar switch boxes, instead of a sparse switch pattern;
  - the pin placement;
  - the configuration port and its address map;
  - the SMB slot layout, generator order and control pins;
  - the CLB input selectors;
  - same-cycle cancellation in the subtracter.
- **Not built.** There is no configuration bitstream loader or chip I/O pad
  logic. The software stack is also not built: the network synthesizer, the
  spatial-to-temporal mapper, and place-and-route. The testbench includes a
  small maze router over tiles that stands in for place-and-route in its tests.

## Testbenches and how to simulate

Each block has a self-checking testbench in `tb/`. Each testbench compares the
block with an independent model and ends with a line of the form
`TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_reram_crossbar` | Column sums against direct sums over random cells and spikes |
| `tb_neuron_unit` | Cycle-by-cycle integrate/fire/reset against a model |
| `tb_spike_subtracter` | Blocking, cancellation, window clear, and the count identity |
| `tb_pe` | A 32x16 PE, cycle-exact against a model; the one-cycle latency; output counts against the (Wx)/η formula |
| `tb_smb` | Counting, saturation, slot packing for n = 6 and n = 3, dropped slots, replay spike positions |
| `tb_clb` | Counters, decoders and random LUTs built from the configuration word |
| `tb_connection_box`, `tb_switch_box` | Random selector settings against the track and pin arrays |
| `tb_fpsa_tile` | A PE tile and a CLB tile configured through the tile's decode |

**`tb_fpsa_top`** is the end-to-end test of a 3x9 array with 16-row PEs and 16
tracks. It does the following:

1. Places three PEs, one SMB and one CLB.
2. Routes, with its own maze router:
   - the 16 inputs from the chip edge into PE A;
   - A → B → SMB → C;
   - C's outputs back to the chip edge;
   - the CLB's control pulses to every block.
3. Programs random weights and thresholds and builds the CLB controller.
4. Runs 8 windows of 16 cycles.

During the run it compares every output of C at the chip edge, every cycle,
with a model of the whole chain. It also counts each mechanism and fails any
that never occurred:

- neuron firing;
- subtracter blocking;
- the ReLU clamp;
- direct PE-to-PE hand-over;
- SMB commits and replays across several slots;
- CLB pulses;
- routes through SMB/CLB switch boxes.

**Running at full size.** To run the test on the default chip, copy
`tb_fpsa_top.sv` and change three things:

- set its localparams to the defaults: GRID 8x9, W = 96, ROWS = COLS = N_IN = 256,
  NB = 6;
- raise the watchdog;
- instantiate `fpsa_top` with no parameter list.

Verilator takes more than ten minutes to compile that model: it has 72 tiles,
and each PE row is a 16,384-bit configuration word. It then simulates the 8
windows in about a minute.

The largest size verified end to end is the reduced 3x9 array of
`tb_fpsa_top`. At full size, one run completed its simulation, but the test's
router could not fit every net into the 96-track channels around PE A. Inputs
now enter from the edge nearest each pin's side, but that change has not been
re-run at full size.

To run a test with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/fpsa_pkg.sv tb/fpsa_tb_pkg.sv tb/tb_pe.sv --top-module tb_pe
./obj_dir/Vtb_pe +verilator+rand+reset+2
```

- The end-to-end test includes `tb/tb_fpsa_top_body.svh`, so it needs `-Itb`.
- Verilator warns UNOPTFLAT about the routing mesh, as explained above.
- Reduce `GRID_R`, `GRID_C`, `ROWS`/`COLS`/`N_IN` and `W` to shrink the array. A
  tile needs ROWS + 9 ≤ 4 · pins-per-side, which the localparams compute.
