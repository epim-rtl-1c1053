# EPIM data path: running epitome layers on a memristor crossbar

An *epitome* is a small four-dimensional weight tensor that stands in for a
much larger convolution. The convolution's weights are not stored. They are
rebuilt by sampling small, possibly overlapping patches of the epitome and
placing them side by side. Stored on a processing-in-memory (PIM) accelerator,
whose weights live as memristor conductances in crossbar arrays, an epitome
needs far fewer crossbars than the convolution it replaces.

The cost moves to run time. A convolution mapped to a crossbar is evaluated in
one activation, with all its word lines and bit lines at once. An epitome
layer activates the same crossbar several times, once per sampled patch. Each
activation uses only the word lines and bit lines of that patch. The input
values must be picked out of the buffer and put on the right word lines. The
bit-line results must then be put in the right place of the output feature
map.

This RTL implements the data path that does this bookkeeping, following the
EPIM design (Wang et al., DAC 2024). Three small index tables sit around an
otherwise ordinary crossbar:

| table | contents, one entry per patch | role |
|---|---|---|
| IFAT, input feature address table | start/stop index pair into the input buffer | which inputs this patch needs |
| IFRT, input feature row table | one bit per crossbar word line | which word lines receive them; all others are driven with 0 |
| OFAT, output feature address table | start/stop index pair into the output map, plus first bit line | where this patch's results go |

Each activation's results are parked in an output buffer. After the last
activation, a join phase walks the OFAT once more and a joint module
rebuilds the output feature map. A result that lands on an index already
written in this operation is added to it, so patches that split the input
dimension sum up. A result at a fresh index is stored, so patches that cover
consecutive output ranges are concatenated. The joint module also provides
*output channel wrapping*. When the convolution repeats the epitome's `c`
output channels `r` times, only `c` channels are computed and written. A read
of channel `x` returns channel `x mod c`. This cuts the activations and the
output-buffer writes by a factor of `r`.

## Block diagram

```
            host write ports (buffer, cells, tables)
                 |
  +--------------+------------------------------------------------+
  |  addr_ctrl: round k, continuous offset 0,1,2,...               |
  |      |                   |                          |          |
  |      v                   v                          v          |
  |   ifat[k] --addr--> input_buffer --value--> ifrt[k] --row--> input_register (IR)
  |                                                                |  word lines
  |                                                                v
  |                                                        xbar_model (crossbar)
  |                                                                |  one bit line per clock
  |                                                                v
  |                           ofat[k] <--column-- output_register (OR)
  |                              |  activation phase: push          |
  |                              v                                  |
  |                        output_buffer                            |
  |                              |  join phase: pop, ofat[k] gives dst
  |                              v                                  |
  |                        joint_module                             |
  |      |                                                         |
  +------+---------------------------------------------------------+
         v
   output map read port (optionally wrapped: channel x -> x mod c)
```

The order of the blocks, and the address controller feeding the tables, come
from the EPIM data-path figure. The output buffer is not drawn there, but the
EPIM text names it and counts its writes. Everything is instantiated in
`epim_top`.

## One operation, round by round

The host first loads the input buffer, the crossbar cells and entries
`0 .. n_rounds-1` of the three tables. It then pulses `start` with `n_rounds`.
This clears the output buffer and the output map. The address controller
(`addr_ctrl`, states in `epim_state_pkg`) runs two phases. The same round
index `k` selects the entry of all three tables.

**Activation phase**, for `k = 0 .. n_rounds-1`:

1. **CLR** (1 clock): the input register, the IFRT placement pointer and the
   output register are cleared. Every word line is now 0.
2. **LOAD** (`L_in` clocks): the controller emits a continuous offset
   0, 1, 2, ... The IFAT adds it to its start index and raises `last` at the
   stop index. So the buffer is read from `start` to `stop`, one value per
   clock.
3. **DRAIN** (1 clock): the last buffer read reaches the IFRT. The IFRT puts
   the *j*-th value fetched in this round on the *j*-th word line whose bit
   is set, and leaves unmarked word lines at 0. This is the example of the
   EPIM figure: buffer values 6, 2, 4 with row bits 1,1,0,1 give word-line
   values 6, 2, 0, 4.
4. **ACT** (1 clock): the crossbar is activated.
5. **WAIT** (`XB_COLS` clocks): bit lines are converted one per clock into the
   output register.
6. **STORE** (`L_out` clocks): a second continuous offset runs through the
   OFAT. Offset `j` appends column `col_base + j` of the output register to
   the output buffer.
7. **NEXT** (1 clock): next round, or on to the join phase.

**Join phase**, again for `k = 0 .. n_rounds-1`:

8. **JOIN** (`L_out` clocks): the results are popped from the output buffer
   in the order they were pushed. Offset `j` of OFAT entry `k` gives each one
   its output index `start + j`, and the joint module adds it there or
   stores it.
9. **JNEXT** (1 clock): next round, or `done`.

An operation therefore takes the sum over its rounds of
`L_in + 2*L_out + XB_COLS + 5` clocks, plus one clock until `done` is seen.
Here `L_in = stop - start + 1` of the IFAT entry, and likewise `L_out` for
the OFAT. The top-level tests check this count exactly. Nothing is
overlapped. A pipelined controller could hide LOAD and STORE behind the
crossbar read-out; the source design says nothing about this.

## Programming the tables for an epitome layer

Take a layer whose unrolled input vector (`c_in x p x q` values, one output
pixel) is in the buffer, and whose epitome is stored with `c_in x p x q` on
word lines and `c_out` on bit lines. For every patch sampled from the epitome:

* **IFAT**: `[start, stop]` = the range of input-vector positions the patch
  multiplies. Stop is inclusive.
* **IFRT**: a bit for each epitome row (word line) the patch uses. The number
  of set bits must equal `stop - start + 1`. If more values arrive than there
  are set bits, the sticky `ifrt_overflow` flag is raised.
* **OFAT**: `[start, stop]` = the output channels the patch produces, and
  `col_base` = the epitome column (bit line) of its first channel.

Patches that split the input dimension get the same OFAT range; the joint
module adds them. Patches for different output channels get consecutive
ranges and are concatenated. With wrapping, the entries simply cover only the
first `c` channels, and the read port is set to `wrap_en = 1, wrap_c = c`.
`tb/tb_wl_epitome256.sv` shows both ways for a 512-input, 512-output layer
built from a 256 x 256 epitome with two overlapping row patches. Without
wrapping it takes 6 activations and 1536 output-buffer writes (5663
clocks). With wrapping it takes 3 activations and 768 writes (2832 clocks),
and the output is the same.

`tb/tb_wl_conv_layer.sv` runs a complete small layer: a 3 x 3 convolution
with 16 input and 32 output channels on a 5 x 5 image. Its weights are
sampled from a 4 x 4 x 8 x 16 epitome (spatial x spatial x input channels x
output channels), mapped with row = (p*4 + q)*8 + c. Each patch
`E[p0:p0+3, q0:q0+3, 0:8, o0:o0+8]` lands on 72 scattered word lines, which
the IFRT bit mask selects. The buffer holds the receptive field in
(input-channel group, kh, kw, channel) order, so each patch's inputs form
one contiguous IFAT range. All nine output positions match a direct
convolution with the rebuilt weights.

The output map holds one output pixel's channels. A whole layer is run as
one operation per output position, with the buffer reloaded in between.

## Numbers and sizes

| parameter (in `epim_pkg`) | default | origin |
|---|---|---|
| `A_BITS` activation bits | 9 | EPIM evaluation uses A9 throughout |
| `W_BITS` weight bits per cell | 9 | largest weight precision evaluated (W9); W7, W5 and W3 fit |
| `XB_ROWS` x `XB_COLS` | 256 x 256 | assumed; consistent with the 1024x256 and 256x256 epitome shapes evaluated |
| `IN_DEPTH` input buffer words | 4608 | assumed: 3 x 3 x 512, largest unrolled receptive field of ResNet-50/101 |
| `OUT_DEPTH` output map entries | 2048 | assumed: largest channel count of ResNet-50/101 |
| `MAX_ROUNDS` table entries | 64 | assumed; a 3x3x512 -> 512 layer from a 1024x256 epitome needs 36 activations |
| `PSUM_W` bit-line result | 26 | 9 + 9 + log2(256) |
| `ACC_W` joint accumulator | 32 | assumed |
| `OB_DEPTH` output buffer words | 16384 | assumed: `MAX_ROUNDS x XB_COLS`, every bit line of every activation |

All modules take these as typed parameters, so any one block can be built at
another size. Widths of table fields follow from the depths (`$clog2`).

## What is taken from EPIM and what is this design's own

Taken from the source design:
* the blocks and their order: buffer, IFAT, IFRT, input register, crossbar,
  output register, OFAT, joint module, address controller;
* start/stop pairs in IFAT and OFAT, one per activation or patch;
* an IFRT sequence as long as the crossbar has rows, with unused word lines
  driven to zero;
* an output buffer written once per patch result, and a rebuild of the
  output map by OFAT and joint module only after all patches have been
  activated;
* the joint module's rule: add equal indices, concatenate sequential ones;
* output channel wrapping (compute `c` channels and reuse them, cutting
  output-buffer writes by `r`);
* 9-bit activations and up to 9-bit weights; `c_in x p x q` on word lines,
  `c_out` on bit lines.

Choices made here, where the source is silent:
* the IFRT encoding (one bit per word line, values placed in order);
* the `col_base` field in the OFAT, which selects a patch's bit lines;
* the controller's state machine, the offset-counter form of the "continuous
  address", and no overlap between steps;
* the output buffer as a first-in first-out store;
* wrapping done on the read port of the joint module (channel `x` reads
  `x mod c`);
* one crossbar per data path, with host write ports for everything;
* all sizes marked "assumed" above.

Not modelled:
* **Analog parts.** `xbar_model` is a behavioural model. Each cell holds one
  signed integer weight and each bit line gives the exact dot product.
  Bit slicing of weights over 2-bit memristor cells, DAC/ADC resolution and
  analog error are absent. The read-out of one bit line per clock stands in
  for a shared converter, and its timing is a placeholder.
* **Several crossbars.** A 1024 x 256 epitome needs four 256 x 256 crossbars.
  Whole ResNet-50/101 networks need hundreds (428 to 2648 in the EPIM
  evaluation). How crossbars are grouped into tiles, and how their partial
  sums combine, is inherited from earlier PIM designs and not described, so
  it is not built.
* **Quantization scales.** EPIM computes one scaling factor per crossbar,
  weighting the overlapping (often-reused) part of the epitome differently.
  This is done offline when quantizing. The integers stored in the cells are
  already quantized, and no scale is applied in the data path.
* **Design-time software**: the evolutionary epitome search and the
  latency/energy simulator.

## Files

`rtl/` (one unit per file):

| file | contents |
|---|---|
| `epim_pkg.sv` | shared sizes |
| `epim_state_pkg.sv` | address controller state enum |
| `addr_ctrl.sv` | round sequencer and continuous offset generator |
| `input_buffer.sv` | input feature buffer, synchronous read |
| `ifat.sv`, `ifrt.sv`, `ofat.sv` | the three index tables |
| `input_register.sv` | word-line register, cleared per round |
| `xbar_model.sv` | behavioural crossbar with serial bit-line read-out |
| `output_register.sv` | bit-line results of one activation |
| `output_buffer.sv` | results of all activations until the join phase |
| `joint_module.sv` | output map reconstruction and channel wrapping |
| `epim_top.sv` | the whole data path |

`tb/` has a self-checking testbench `tb_<module>.sv` for each block, plus:
* `tb_epim_top.sv`: an end-to-end test at full default size. It makes every
  mechanism happen at least once: word lines held at zero, joint addition,
  concatenation, wrapped reads and multi-round operations.
* `tb_wl_epitome256.sv`: the 256 x 256 epitome workload described above.
* `tb_wl_conv_layer.sv`: the epitome-sampled 3 x 3 convolution layer.

Every testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.
All of them pass. Each one was also run against a copy of its block with
one deliberate bug (for example a read address bit inverted, the last word
line left out of the dot product, or accumulation turned into overwrite),
and each then reported failures.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl rtl/epim_pkg.sv rtl/epim_state_pkg.sv \
    tb/tb_epim_top.sv --top-module tb_epim_top -o sim
./obj_dir/sim
```

Replace `tb_epim_top` with any other testbench name. The testbenches set
every signal they read, so they also run on a two-state simulator. The
full-size end-to-end test takes a few seconds. Most of its time goes into
programming the 65,536 crossbar cells one per clock.

Assertions in the RTL catch the programming errors they can see:
out-of-range buffer or output addresses, `stop < start`, an OFAT range that
runs past the last bit line, reading an output-register column that was not
captured, and writing cells during an activation. The `rst_n` signal is both
the asynchronous reset of the flops and the `disable iff` of these
assertions, which Verilator's lint reports as a sync/async mix. That warning
is expected.
