# BCIM: a binary-neural-network layer engine on memristor crossbars

In a binary neural network (BNN) every weight and activation is +1 or -1. If
-1 is stored as 0, the dot product of two such vectors of length n becomes

    A . B = 2 * popcount(XNOR(A', B')) - n

so the sign of the dot product, which is the next layer's activation, is 1
exactly when more than half of the n positions agree. This engine computes
that bit directly inside a memristor crossbar:

* each crossbar column stores one neuron's weight vector as **differential
  cell pairs**. Each input position has one row for the weight and one for
  its complement. The input drives the first row with x and the second with
  not-x, so exactly one cell of the pair conducts when x equals w. The
  bitline current is then popcount(XNOR(x, w)), formed in analog by the
  array;
* a **sense amplifier** per column compares that current with a reference
  of n/2. A single comparator therefore replaces the ADC, the digital
  popcount and the sign logic. All columns (neurons) are evaluated in the
  same read.

The design is based on the BCIM architecture (Zahedi, Shahroodi, Wong,
Hamdioui, "BCIM: Efficient Implementation of Binary Neural Network Based on
Computation in Memory"). Two further ideas from that work are built:

* **Split vectors and cascading functions.** A weight vector longer than a
  column is split over several crossbars. The final bit is decided from the
  per-part comparator results, and extra references around each part's
  threshold make that decision more accurate.
* **A column-sliced input buffer for convolutions.** Moving the window by
  one step only streams in the new column of input data. The weights in the
  crossbar never move.

The RTL here is a cycle-level model of one layer engine. The crossbar and
the sense amplifier are analog parts. They are written as behavioural models
that work on integer current levels. Everything around them is synthesizable
digital logic: the wordline driver, input buffer, reference generation,
reference sequencing, cascading, control and bus packing.

## Block diagram

```
            32-bit input bus (in_kind: WORD / COL / CLEAR, in_tile)
                 |
   +-------------+--------------+----------------------------+
   | tile 0                     | tile 1        ...  tile NTILES-1
   | input_buffer (512 bits)    |
   |   -> wl_driver (WL, WLbar) |
   |   -> xnor_crossbar 1024x512 (cell pairs)
   |   -> 512 x sense_amp  <- sa_ref_gen (refs)  <- sel from bcim_ctrl
   |        res[col][ref]       |
   +-------------+--------------+---------------------------+
                 | res of column c from every tile
           512 x cascade_unit (NONE / AND / OR / F1 / F2)
                 |
           act[511:0] -> act_packer -> 32-bit output bus
   bcim_ctrl (READ -> COMPARE x nref -> CASCADE), contains sa_ref_seq
```

Default sizes are 512 input positions x 512 columns per crossbar, three
crossbars, a 32-bit bus and three references per sense amplifier.

## The crossbar and its sense amplifiers

Physical row `2k` of a crossbar holds the weight bits of input position k
(1 = low-resistance, conducting). Row `2k+1` holds their complements.
`wl_driver` raises row `2k` when the input is 1 and row `2k+1` when it is 0.
It raises neither for positions at or above `n_active`. `xnor_crossbar`
samples, in the read cycle, each bitline's current as the number of
conducting cells on driven rows. The model uses ideal devices: there is no
resistance variation, no IR drop and no read disturb.

A position whose two cells are both programmed to 0 adds nothing, whatever
the input. The convolution mapping uses this (see below).

`sense_amp` compares the bitline level with one reference per clock and
keeps one result bit per reference slot. With three references it needs
three compare cycles. The comparison is strict: `level > ref`. With the main
reference `floor(n/2)` from `sa_ref_gen`, the output is 1 exactly when
popcount > n/2, i.e. when the signed dot product is positive. A dot product
of exactly 0 gives -1. The original formulation of the sign function maps 0
to +1, but its own accuracy analysis uses the strict form, and that form is
built. To switch, change the main reference to `ceil(n/2) - 1`.

## Splitting a vector: references and cascading functions

Take a weight vector of size V split into two halves, on the same column of
tiles 0 and 1. Each half sees only its own partial popcount, m for the first
half and n for the second. The exact answer is `m + n > V/2`, but neither
comparator sees the sum. With one reference per half (V/4), the two bits can
only be merged approximately:

* `CASC_AND`: `m > V/4 and n > V/4`. It misses cases where one half is high
  enough to carry a low other half.
* `CASC_OR`: `m > V/4 or n > V/4`. It fires on cases where the sum stays
  below V/2.

Each half therefore gets two auxiliary references at distance x from its
main one. `sa_ref_gen` produces them, and `cfg.aux_x` sets x. For half 1 the
references are Ref0 = V/4 - x, Ref1 = V/4 and Ref2 = V/4 + x. For half 2
they are Ref3, Ref4 and Ref5, with the same values. Each sense amplifier
delivers three bits: a = (m > Ref0, m > Ref1, m > Ref2) and b = (n > Ref3,
n > Ref4, n > Ref5). `cascade_unit` offers two merges:

| function | output is 1 when | property |
|---|---|---|
| F1 (`CASC_F1`) | `a0&b2 \| a1&b1 \| a2&b0` | each term guarantees m + n > V/2: F1 never outputs a false 1, but misses some true ones |
| F2 (`CASC_F2`) | `b2 \| a0&b1 \| a1&b0 \| a2` | relaxed: recovers those misses and gives some false 1s instead |

The accuracy loss depends on x relative to the crossbar size and on the data
distribution. x is therefore a run-time setting, not a constant. For more
references (NREF = 5, 7, ...) both patterns extend symmetrically:
F1 = OR of `a[i] & b[NREF-1-i]`, and F2 = `a[top] | b[top] | OR a[i] & b[NREF-2-i]`.
This extension is a choice of this design. F1 and F2 use parts 0 and 1
only. `CASC_AND` and `CASC_OR` combine any number of parts (up to NTILES),
which vectors above 1024 inputs need. `CASC_NONE` passes the main result of
part 0, for vectors that fit one column.

The tile reads all crossbars in the same cycle and compares them in step.
Part p of a split vector must be loaded into tile p. `vec_size[p]` is the
size of that part, and it sets the part's references.

## The input buffer for convolutions

For a K x K convolution over Cin input channels, one window is K columns of
K x Cin bits. `input_buffer` stores the window as *slots*:

* slot s holds window column s of every channel: bit `s*K*Cin + c*K + r` is
  channel c, kernel row r;
* the kernels in the crossbar are laid out the same way, so row position k
  of the crossbar always faces slot `k / (K*Cin)`.

When the window moves one step right, the new right-hand column is streamed
in over the bus (`IN_COL` words, ceil(K*Cin/32) beats, `in_last` on the
last beat). The buffer then shifts every slot down by one, drops slot 0 and
puts the new column in the top slot. Nothing already in the buffer is
resent, and the crossbar is never reprogrammed. At the end of a row of
windows the window moves down: `IN_CLEAR` empties the buffer, and streaming
`nslots` columns refills it.

With `nslots = K + 1` the buffer also holds the column that the next window
needs. Two column groups are then programmed:

* group A holds the kernels on slots 0..K-1, with zero cells on slot K;
* group B holds the same kernels on slots 1..K, with zero cells on slot 0.

One read yields the outputs of windows j and j+1 for every output channel.
The engine then streams two columns and reads again. `tb_bcim_top` and
`tb_bcim_full` contain this complete flow, including the mapping of kernels
to crossbar rows.

Fully connected layers skip the slots. They write the vector with `IN_WORD`
(word `in_addr` holds bits `[32*in_addr +: 32]`).

## Control and timing

`bcim_ctrl` runs one evaluation per accepted `start`:

| cycle | action |
|---|---|
| 0 | `start` accepted (needs `start_ready`: idle and output bus drained) |
| 1 | READ: wordlines driven from the buffers, bitlines sampled |
| 2 .. nref+1 | COMPARE: one reference per cycle (`sa_ref_seq`, lowest first) |
| nref+2 | CASCADE: `cascade_unit` outputs handed to `act_packer` |
| nref+3 | `act_valid`, `act` and the first output word |

So an evaluation takes 4 cycles with one reference and 6 with three. While
it runs, `in_ready` is low, which stalls the input bus so that no buffer
changes under a read. `act_packer` sends ceil(`cfg.ncols_out`/32) words,
bit 0 first. Unused bits are 0, and `out_last` marks the final word. A
receiver that holds `out_ready` low delays the next `start`.

Weights are programmed one physical row of one tile per cycle (`prog_*`).
Memristors are non-volatile, so the array has no reset. Program every row
you enable.

## Configuration (`layer_cfg_t` and per-tile sizes)

| field | meaning |
|---|---|
| `fn` | `CASC_NONE`, `CASC_AND`, `CASC_OR`, `CASC_F1`, `CASC_F2` |
| `nparts` | tiles one vector spans (1..NTILES) |
| `nref` | 1 (main reference only) or 3 (odd, at most NREF) |
| `aux_x` | distance x of the auxiliary references |
| `slot_bits`, `nslots` | K*Cin and K or K+1, for sliding windows |
| `ncols_out` | activation bits sent per evaluation |
| `n_active[t]` | input positions driven in tile t |
| `vec_size[t]` | inputs per column in tile t (sets its references) |

## What the defaults can run

Every binarized hidden layer of the evaluated MNIST networks fits: LeNet-5,
CNN-1, CNN-2 and the MLPs with 500 to 1500 neurons per layer.

* A vector longer than 512 is split over 2 crossbars (784, 720 and 1000
  inputs) or over 3 (1210 and 1500 inputs).
* A layer with more than 512 neurons needs one pass of the engine per 512
  outputs, with reprogramming between passes, or more engines.
* The three-part layers (1210 and 1500 inputs) can only use AND/OR
  cascading, since F1/F2 are defined for two parts.
* The first convolution of each CNN works on non-binary pixels. It needs an
  ADC and a shift-and-add path that are not part of this engine.

## Where this RTL departs from, or adds to, the architecture

* **Analog parts.** `xnor_crossbar` and `sense_amp` are behavioural models:
  integer current levels, ideal devices, and a comparator with no offset.
  The bitline and source drivers are folded into them.
* **Unused cells.** The architecture asks for the cells in front of the
  spare window column to be programmed to logic 0. With differential pairs a
  stored 0 would still conduct through its complement cell when the input is
  0. Here both cells of the pair are set to the high-resistance state, so the
  position adds no current for any input.
* **Clock rate.** The architecture is evaluated at 1 GHz. No timing is
  claimed for this RTL.
* **Crossbar size.** "512 x 512" is read as 512 input positions (1024
  physical rows, two per input) by 512 columns.
* **Design choices, not from the architecture:**
  * bus protocols (valid/ready, word and column kinds);
  * the programming port;
  * the bit order inside a slot;
  * the cycle sequence READ/COMPARE/CASCADE;
  * NTILES = 3;
  * the reference spacing beyond three references;
  * the clamping of references at 0.
* **Not built:** pipelining between layers (one engine runs one layer), the
  ADC path for non-binary layers, and device non-idealities.

## Files and simulation

`rtl/` holds one module or package per file. Start with `bcim_pkg.sv`
(constants, `casc_fn_e`, `in_kind_e`, `layer_cfg_t`), then read bottom-up:
`wl_driver`, `xnor_crossbar`, `sense_amp`, `sa_ref_gen`, `sa_ref_seq`,
`cascade_unit`, `input_buffer`, `act_packer`, `bcim_ctrl`, `bcim_tile` and
`bcim_top`. `tb/` holds one self-checking testbench per module, `tb_<name>`.
Each prints `TB_RESULT checks=N failures=M`. There are two end-to-end tests:

* `tb_bcim_top` runs the engine at a reduced size (64 x 16 x 3);
* `tb_bcim_full` runs it at the default size with LeNet-5 and MLP layer
  shapes. It takes a few seconds.

Two more tests run whole networks at the default size, layer after layer.
Each layer's outputs come back over the output bus and feed the next layer:

* `tb_workload_mlp` runs MLP-S, MLP-M and MLP-L;
* `tb_workload_cnn` runs the binarized part of LeNet-5 (the second
  convolution on the window buffer, 2 x 2 pooling done by the host, then the
  FC layers) and the FC stacks of CNN-1 and CNN-2. Each network starts from
  a random binary feature map, which stands in for the output of the
  non-binary first convolution.

Both compute the expected activations from the weights and inputs. They
count every mechanism: stall, back-pressure, column shift, refresh,
dual-window read, each cascading function, and one and three references.

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/bcim_pkg.sv tb/tb_bcim_full.sv --top-module tb_bcim_full
./obj_dir/Vtb_bcim_full
```

Replace `tb_bcim_full` with any other testbench name to run that test. The
simulation is two-state. Every register that is read is reset, except the
crossbar cells, which the testbenches program before use.
