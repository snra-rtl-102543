# SNRA: in-circuit contrastive-divergence training of spintronic RBMs

A restricted Boltzmann machine (RBM) is two layers of binary stochastic
neurons joined by a full weight matrix. Stacking RBMs gives a deep belief
network (DBN). In the spintronic neuromorphic reconfigurable array (SNRA)
the analog work is done by devices. Each weight is a spin-Hall domain-wall
device whose resistance sets the current it passes. Each neuron is a
"p-bit": a magnetic tunnel junction with an almost barrier-free free layer.
It fluctuates thermally and outputs 1 with a probability that is a sigmoid of
its input current. A crossbar of such weights with p-bits on its rows and
columns samples an RBM directly.

What is left for digital logic is training. This RTL implements the
contrastive-divergence (CD) training and test controller of the SNRA. It is
a four-state machine with a handful of registers. For an RBM with `hn`
hidden neurons it runs one CD iteration in `hn + 3` clocks. Around the
controller sit:

- behavioural models of the analog crossbar and p-bits, so the whole loop can
  be simulated;
- the routing that stacks three RBMs into a DBN;
- a bank of non-volatile SHE-MTJ look-up-table/flip-flop pairs. These are the
  Boolean fabric, and the pairs used only for training are power-gated during
  test.

## 1. Contrastive divergence as four states

One CD iteration on an RBM with visible vector `v` goes like this:

1. **Feed-forward.** Drive `v` on the visible lines and sample the hidden
   layer `h`.
2. **Feed-back.** Drive `h` back on the hidden lines and sample a visible
   reconstruction `v'`.
3. **Reconstruct.** Drive `v'` and sample `h'`.
4. **Update.** Change the weights by `dW = eta (v h^T - v' h'^T)`.

`cd_fsm` has one state per step. The machine rests in FEED_FORWARD. That
state is also the test operation: with `train` low it loops there, and the
RBM just maps inputs to sampled outputs. When `train` is high, the edge that
ends the feed-forward cycle stores the input and the hidden sample in the `v`
and `h` registers. The edge that ends FEED_BACK stores `v_bar`, and the edge
that ends RECONSTRUCT stores `h_bar` (`cd_sample_regs`). UPDATE then lasts
one clock per hidden column. A counter runs 0..hn-1, and after the last
column the machine returns to FEED_FORWARD. Bit *i* of every register is
neuron *i*.

The 4x2 example (4 visible, 2 hidden neurons) uses v = 4'b0101,
h = 2'b01, v' = 4'b0100 and h' = 2'b10. The controller produces:

| clock | state        | RWL  | WWL  | BL (Vtrain rows) | SL (Vtrain rows) |
|-------|--------------|------|------|------------------|------------------|
| —     | reset        | Hi-Z | Hi-Z | Hi-Z             | Hi-Z             |
| 0     | feed-forward | 2'h3 | 2'h0 | Hi-Z             | Hi-Z             |
| 1     | feed-back    | 2'h3 | 2'h0 | Hi-Z             | Hi-Z             |
| 2     | reconstruct  | 2'h3 | 2'h0 | Hi-Z             | Hi-Z             |
| 3     | update c=0   | 2'h0 | 2'h1 | 4'h5             | 4'h0             |
| 4     | update c=1   | 2'h0 | 2'h2 | 4'h0             | 4'h4             |

That is five clocks. Weights w00 and w20 go up and w21 goes down, which is
exactly `v h^T - v' h'^T`. `tb_cd_controller` replays this example cycle by
cycle.

## 2. The update datapath and the line levels

Each weight cell has two paths:

- a read path, enabled by the read word line RWL;
- a write path, enabled by the write word line WWL, through which a current
  between the bit line BL and the source line SL pushes the domain wall.

The line levels per phase:

| phase                          | RWL | WWL | BL     | SL     |
|--------------------------------|-----|-----|--------|--------|
| feed-forward/back, reconstruct | VDD | GND | Hi-Z   | Hi-Z   |
| update, increase weight        | GND | VDD | Vtrain | GND    |
| update, decrease weight        | GND | VDD | GND    | Vtrain |

In update, column `c` is written in clock `c`, and only `WWL[c]` is high.
`update_unit` picks `h[c]` and `h_bar[c]` with a counter-driven multiplexer.
AND gates then form `BL_reg = v & h[c]` and `SL_reg = v_bar & h_bar[c]`.
`bl_sl_driver` turns each register bit into Vtrain (1) or GND (0), and
`rw_line_driver` decodes the word lines.

The sign of the update follows from the two line levels:

- BL=Vtrain, SL=GND: the weight increases.
- BL=GND, SL=Vtrain: the weight decreases.
- Both lines at the same level: no current flows and the weight stays. This
  is the `1 - 1 = 0` case of the update rule.

The learning rate is not a number in the logic. It is the Vtrain amplitude,
which sets how far the domain wall moves per write. The model exposes it as
`DW_STEP`.

**Register timing (a design choice).** `BL_reg` and `SL_reg` are real
registers. Each is loaded at the edge that starts an update cycle, with the
values for that cycle's column. To do that, the datapath uses the FSM's
next-state and next-counter outputs. For column 0 it also uses the value
`h_bar` is being loaded with at the same edge. The result is that BL/SL and
WWL change together at each clock edge, as the example table shows, and no
extra cycle is added.

**Initialization.** While `rst` is high, every line is marked as floating
(`wl_oe = 0`, BL/SL at `LINE_HIZ`). The lines become driven at the first
clock after reset. This design has only two-state signals, so "Hi-Z" is
carried as an enable flag for the word lines and as the `LINE_HIZ` value of
`snra_pkg::line_drive_t` for BL/SL.

## 3. One controller for a whole DBN

A DBN is trained one RBM at a time, bottom-up, so the training logic can be
shared. The controller is sized for the largest RBM, and `hn` is a run-time
input. `snra_top` holds three RBM islands:

| island | default size | role                              |
|--------|--------------|-----------------------------------|
| RBM0   | 784 x 800    | input layer (28x28 MNIST pixels)  |
| RBM1   | 800 x 800    | second hidden layer, or output    |
| RBM2   | 800 x 10     | output layer of 3-RBM topologies  |

The defaults are the largest evaluated topology, 784x800x800x10.
`cfg_nlayers` (1..3) chooses how many islands are chained, and `cfg_hn[k]`
how many hidden neurons island *k* uses. With these two inputs all five
evaluated topologies map onto the same fabric:

| topology       | cfg_nlayers | cfg_hn          |
|----------------|-------------|-----------------|
| 784x10         | 1           | {10, -, -}      |
| 784x500x10     | 2           | {500, 10, -}    |
| 784x800x10     | 2           | {800, 10, -}    |
| 784x500x500x10 | 3           | {500, 500, 10}  |
| 784x800x800x10 | 3           | {800, 800, 10}  |

`rbm_island` wraps one crossbar. It holds:

- The island's input/output buffer (`io_buffer`). This chooses what drives
  the neuron lines: the input vector in feed-forward, `h` in feed-back,
  `v_bar` in reconstruct.
- A switch. When `cfg_train_layer` selects the island, its word, bit and
  source lines come from the controller. Otherwise the island stays in read
  mode: RWL high on its used columns, WWL low, BL/SL floating.
- Masks that force unused neurons to 0, so they neither reach the next layer
  nor enter the update.

The routing chain is fixed: `data_in -> RBM0 -> RBM1 -> RBM2`, and
`dbn_out` is the output of the last island in use. In test the whole network
evaluates combinationally in one clock. When RBM *k* trains, its visible
vector is whatever RBMs below it produce from `data_in` in that cycle. This
is the layer-wise CD procedure.

## 4. The analog parts, as behavioural models

`pbit_neuron` and `rbm_array` are not synthesizable. Each says so in its
first comment. They exist so that the controller can be exercised against
something that behaves like the device.

- **p-bit.** Every clock the model draws a uniform random threshold. Its
  output is `sigmoid(i_in / I0) > threshold`, so within a cycle it responds
  to its input current without delay.
- **Weights.** Each connection stores an integer domain-wall position,
  0..`DW_LEVELS-1` (default 17 levels). The signed weight is the position
  minus the middle value. A write moves the position by `DW_STEP`, and it
  saturates at both ends.
- **Read currents.** A hidden neuron receives `sum_i v_i w_ij` over the
  columns whose RWL is high. A visible neuron receives `sum_j h_j w_ij` when
  the hidden lines are driven. Current flows in one direction per phase, so
  the model has no combinational loop.

The number of resistive levels, the linear position-to-weight map, the
sigmoid scale and the per-clock sampling are all choices of this model. They
are not device data. Bias cells are left out, because the update rule
changes only W and the controller never writes a bias.

## 5. Boolean fabric: SHE-MTJ LUTs and power gating

The SNRA places its RBM islands among configurable logic blocks. Their LUTs
keep the configuration in non-volatile SHE-MTJ cells instead of SRAM.

`she_mtj_lut6` models one such LUT: 64 cells, a select tree, and two sense
amplifiers. `out1` is a 6-input function of `in[5:0]`. `out2` reads cells
0..31, so with `in[5]` tied high the LUT gives two 5-input functions of
common inputs. `lut_ff_pair` adds a flip-flop and a 65th cell that chooses a
registered or a direct output.

Configuration is one cell per clock through
`lut_cfg_sel/lut_cfg_addr/lut_cfg_bit/lut_cfg_we`. Because the cells are
non-volatile, a power-gated LUT outputs 0 but keeps its truth table. The
flip-flop is CMOS and is cleared.

`snra_top` keeps pairs `0..N_TEST_LUT-1` (3 of `NUM_LUT` = 32) always
powered. The others are powered only while a training iteration is requested
or running, or while that pair is being configured. The 3-of-32 figure
matches the 4x2 controller, in which only three pairs serve the test
operation. The LUT bank is not wired to the controller. In this RTL the
controller is ordinary logic, and placing it onto LUTs is a job for an FPGA
mapping flow.

## 6. Files

Package:

- `rtl/snra_pkg.sv`: `cd_state_t` (the four states) and `line_drive_t`
  (Hi-Z, GND, Vtrain).

Controller (synthesizable):

- `cd_fsm.sv`: states, column counter, capture strobes, `drive_en`.
- `cd_sample_regs.sv`: the `v`, `h`, `v_bar` and `h_bar` registers.
- `update_unit.sv`: column multiplexers, AND gates, `BL_reg`/`SL_reg`.
- `rw_line_driver.sv`: RWL/WWL decode.
- `bl_sl_driver.sv`: BL/SL levels.
- `io_buffer.sv`: what drives the neuron lines in each phase.
- `cd_controller.sv`: all of the above except `io_buffer`.

Fabric:

- `rbm_island.sv`: an RBM crossbar with its buffer, switch and masks.
- `she_mtj_lut6.sv` and `lut_ff_pair.sv`: the Boolean fabric.
- `snra_top.sv`: the whole array.

Behavioural:

- `pbit_neuron.sv` and `rbm_array.sv`.

Every module has a self-checking testbench `tb/tb_<module>.sv`.
`tb/tb_snra_top.sv` runs the whole design at 8x6x6x3. It covers:

- reset with floating lines;
- LUT configuration;
- test at depths 1, 2 and 3;
- bottom-up training of all three RBMs, with one reduced `hn`;
- controller hand-over between islands;
- weight increase, decrease and no-change cases;
- LUT power gating.

For every iteration it checks every weight of every island against the
update rule, and it counts each of these mechanisms.
`tb/tb_snra_workloads.sv` runs the five topologies of section 3 on the
default-size fabric. For each one it checks a test evaluation and trains
every RBM of the topology once, using random 784-bit vectors in place of
images. `tb/tb_snra_full.sv`
runs the default 784x800x800x10 design through one test evaluation and one
803-clock training iteration of RBM0. It checks all 627,200 weights of RBM0
and confirms that RBM1 is untouched.

## 7. Simulating

Each testbench is a standalone top. With Verilator 5, for example:

    verilator --binary --timing --assert -Irtl -Itb rtl/snra_pkg.sv \
        tb/tb_snra_top.sv --top-module tb_snra_top -o sim
    obj_dir/sim +verilator+rand+reset+2

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
The full-size testbench builds in under a minute and runs in seconds. To
change sizes, override the parameters of `snra_top`. `N0..N3` set the layer
widths, `DW_LEVELS` and `DW_STEP` set the weight resolution and the learning
step, and `NUM_LUT` and `N_TEST_LUT` set the LUT bank. Logic synthesis of the
top is dominated by the behavioural 1.27-million-cell weight store. It is
meant for simulation. The controller modules on their own are small and
synthesize normally.

## 8. How far this follows the source design

These parts come from the published design:

- the four states and their order;
- `hn + 3` clocks per iteration;
- the v/h/v_bar/h_bar registers and their bit order;
- the counter-driven multiplexers and AND gates of the update;
- `BL_reg` and `SL_reg`;
- the line levels of each phase;
- the 4x2 example values;
- the topologies and layer sizes;
- the 6-input fracturable SHE-MTJ LUT with 64 cells and two outputs;
- the three always-on LUT pairs of 32.

These are choices of this implementation:

- the state encoding;
- the synchronous reset and the floating lines during reset;
- loading `BL_reg`/`SL_reg` from next-state values;
- `hn` as a run-time input, with `hn = 0` treated as 1;
- `RWL` held low on unused columns;
- the per-island buffer, switch and masks;
- the fixed routing chain, in place of a general FPGA routing network;
- the LUT output split and the bypassable flip-flop;
- which signals gate LUT power;
- all device-model details.

The source text gives two definitions of the N in `N + 3`. One says the
number of neurons in each RBM, the other the hidden neurons of the RBM. The
worked example settles it: hidden neurons.

One loose cross-check is possible. A controller built for a 784x10 RBM has
4 x 784 visible-width registers (`v`, `v_bar`, `BL_reg`, `SL_reg`), plus
2 x 10 hidden-width registers, a 4-bit counter and a state register. That
is about 3,160 flip-flops, close to the 3,185 slice registers reported for
that case.

Not built:

- the general routing network (switch and connection blocks);
- the configuration bit-stream loader;
- transistor-level sense amplifiers and reference MTJs;
- any accuracy result. The network error rates come from a software model
  of the DBN, not from this hardware.
