# Bit-wise CNN convolution in SOT-MRAM with power-failure resilient accumulation

This is SystemVerilog RTL for a processing-in-memory accelerator for low bit-width
convolutional neural networks. It follows the architecture published by Roohi, Angizi, Fan
and DeMara, "Processing-In-Memory Acceleration of Convolutional Neural Networks for
Energy-Efficiency, and Power-Intermittency Resilience". The RTL is an independent
implementation, not the authors' code. Where the publication leaves a detail open, this
design makes its own choice, and this document says which parts those are.

The design rests on two ideas:

1. **No multipliers.** A dot product of k-bit integers is computed only from bulk bit-wise
   ANDs inside a memory array, a one-cycle bit count and a shift.
2. **Accumulation that survives a power cut.** The accumulation keeps its state in
   non-volatile flip-flops. After a power cut it resumes from a recent checkpoint instead
   of starting over. This suits battery-less sensor nodes that lose power often.

## 1. The arithmetic: AND-Accumulation

Take a window of input elements `I_i` (m bits each) and weights `W_i` (n bits each).
`C_b(I)` is the vector of bit `b` of every input element, and `C_b(W)` the same for the
weights. These vectors are the *bit-planes*. Then

```
  sum_i I_i * W_i  =  sum_{n'=0}^{n-1} sum_{m'=0}^{m-1}  2^(m'+n') * popcount( C_n'(W) AND C_m'(I) )
```

Each term takes three steps:

- one AND of two bit-planes, done for every element at once inside the memory;
- a count of the ones in the result;
- a left shift by `m'+n'`.

A window therefore takes `m*n` of these steps, each called a *frame* below. The number
of elements does not change it. For 1-bit weights and 4-bit inputs a window takes 4
frames, whether it holds 10 elements or 512.

A worked example: inputs `(0,1,2,3)` and weights `(1,4,1,2)`, both 3-bit:

- the dot product is `0*1 + 1*4 + 2*1 + 3*2 = 12`;
- bit-plane `C_2(W)` is `0100`, because only the weight 4 has bit 2 set;
- `C_0(W) AND C_1(I)` is `(1,0,1,0) AND (0,0,1,1) = 0010`, which contributes
  `1 << (0+1) = 2`.

## 2. Data layout in a computational sub-array

A computational sub-array is a 256 x 512 SOT-MRAM mat (`sot_mram_subarray`). Element `e`
of the window lives in column `e`, and every bit-plane is one row:

| rows                        | content                                   |
|-----------------------------|-------------------------------------------|
| `0 .. n-1`                  | `C_0(W) .. C_{n-1}(W)`, weight bit-planes  |
| `MAX_BITS .. MAX_BITS+m-1`  | `C_0(I) .. C_{m-1}(I)`, input bit-planes   |
| `ROWS-1`                    | scratch row for the AND result            |

The row numbers are this design's choice; the publication shows only the order.
Columns past the window length hold zeros, so they add nothing.

The memory can sense two rows of a column at once. Each bit-line has a reconfigurable
sense amplifier (`msa`). Its 3-bit select `SEL` chooses a plain read of one cell, or the
AND, NAND, OR, NOR, XOR or XNOR of two cells. XOR is made from the AND and NOR sense
outputs. One `ARR_COMPUTE` command senses rows `ra` and `rb` on all 512 bit-lines and
writes the result into row `rw` in the same cycle. The SEL codes are in `pim_pkg`; the
publication gives the functions but not their codes.

The magnetic cell and the analog sensing are not modelled. A cell is a stored bit, and a
sense amplifier is its Boolean result. Because the array is non-volatile, it has no reset
and keeps its content through power loss.

## 3. The accumulation chain of a sub-array

A `compute_tile` connects the parts of one sub-array in this order:

```
 sub-array rows --> 512 sense amps --> CMP (popcount) --> ASR (<< m'+n') --> NV-FA (+=) --> psum
                                                 ^ controlled by subarray_ctrl ^
```

- **CMP, `cmp_tree` with its recursive helper `cmp_reduce`.** It counts the ones of a
  512-bit row within one clock cycle. Every bit starts as a one-bit operand. Rows of
  4:2 compressors (`cmp42`) reduce four operands to two at each stage. When at most two
  operands are left, one adder finishes the count.
  - Each `cmp42` cell uses the multiplexer form of the compressor:
    - two XORs, `x1^x2` and `x3^x4`, on the first level;
    - multiplexers for every later XOR;
    - `sum = x1^x2^x3^x4^cin`, `carry = (x1^x2^x3^x4) ? cin : x4`, `cout = (x1^x2) ? x3 : x1`.
  - `cout` does not depend on `cin`, so a row of cells has no ripple.
  - In the original the compressor is partly built inside the memory. Here it is plain
    logic on the sense outputs.
- **ASR, `asr`.** An adaptive shift register: `IN_W+MAX_SHIFT` flip-flops, each behind
  a multiplexer. It loads `IN << SHIFT` in one clock edge, so the weight `2^(m'+n')`
  costs no serial shifting.
  - Its defaults are the published example: 4-bit input, shifts 0, 1 and 2, six
    flip-flops. With `IN=1001` and `SHIFT=01` it loads `010010`.
  - Inside a tile it is 10 bits wide with shifts 0 to 14.
- **NV-FA, `nv_fa`.** A 32-bit ripple-carry adder made of `full_adder` cells. It adds
  the shifted count to the running sum. The sum and the last carry-out sit in NV-FFs.
- **Ctrl, `subarray_ctrl`.** It takes three cycles for each frame:

  | state   | action |
  |---------|--------|
  | `S_AND` | AND rows `C_n'(W)` and `C_m'(I)` into the scratch row |
  | `S_CMP` | read the scratch row; the count enters the ASR with shift `m'+n'` |
  | `S_ADD` | the NV-FA adds |

  Frames run with `n'` in the outer loop and `m'` in the inner loop. `done` rises
  `3 + 3*m*n + ceil(m*n/20)` clock edges after the edge that samples `start`.

## 4. Power-failure resilience

This is the least obvious part of the design.

**NV-FF (`nvff`).** An NV-FF is an ordinary volatile flip-flop paired with a
non-volatile magnetic element:

- `backup` copies the flip-flop into the element;
- `restore` copies the element back;
- while `pwr_good` is low, the volatile part is cleared, which models the loss of its
  content. The element keeps its value.
- A backup requested while power is down is ignored.

**Which state is non-volatile.** Everything a computation needs to resume is in NV-FFs:

- the NV-FA sum and carry;
- the controller's next `(n', m')` pair and its `busy` and `done` flags.

The frame counter and the state machine are volatile. The memory array holds the
bit-planes and is non-volatile anyway.

**When checkpoints are taken.** Writing a magnetic element costs energy, so checkpoints
are not taken every cycle. They happen:

- every 20 frames (`FRAMES_PER_BACKUP`, the published period);
- at the start of a window, right after the sum is cleared (this design's addition);
- after the last frame of a window (this design's addition).

The two extra checkpoints guarantee that a restore always finds a state belonging to
the current window. Without the first one, an early power failure would restore the
previous window's result.

**What happens after a power failure.**

1. When `pwr_good` falls, the controller drops to `S_OFF` and every volatile register
   is lost.
2. When power returns, `S_RESTORE` pulses `restore` into every NV-FF of the tile.
3. `S_RESUME` then reads the restored flags:
   - a busy window continues with the frame after the last checkpoint;
   - a finished window reports `done` again;
   - otherwise the tile goes back to idle.

At most 19 frames, about 60 cycles, are repeated. The repeated AND results are rewritten
in the scratch row, so repeating frames does no harm.

A checkpoint taken while an addition is half done cannot happen: backups occur only in
their own `S_BACKUP` cycle, after the addition has finished.

**Modelling limits.** The real cell's timing, with VDD decaying and data written into
two complementary MTJs, is not modelled. Loss of power is a synchronous clear while
`pwr_good` is low.

The publication also suggests a cheaper variant with one NV-FF per adder. It is not
implemented.

## 5. The whole accelerator (`pim_cnn_top`)

One operation computes one output pixel:

```
  out = Act( BN( sum_{s<NUM_SA} dot(I_s, W_s) + bias ) )
```

The window is split into `NUM_SA` slices of `k_len <= 512` elements. Slice `s`, element
`e` is read from `base + s*k_len + e` of the Image Bank (inputs) and the Kernel Bank
(weights). Each bank holds raw bytes, where byte `x` stands for `x/255` in `[0, 1]`.

| phase | what happens | cycles |
|-------|--------------|--------|
| 1 mapping | For each sub-array in turn: read the slice's weights, quantize them to `n_bits`, collect them in the `bitplane_mapper` and write the `n_bits` plane rows. Then the same for the inputs with `m_bits`. | about `NUM_SA*(2*k_len + m + n + 6)` |
| 2+3 parallel AND and accumulate | All tiles run their frames at the same time, with checkpoints. | `3 + 3*m*n + ceil(m*n/20)` |
| 4 activation | `adder_bias` sums the tile results and the bias, then `batch_norm`, then `activation`; one cycle each. | 4 |

The result is on `out_data` during the single cycle in which `out_valid` (and `done`)
is high.

The extra processing unit (EPU) holds three parts:

- **`quantizer`**: computes `q = round((2^k-1) * x/255)`, rounding halves up.
- **`batch_norm`**: computes `y = floor((x-mu)*scale / 2^8) + beta`. `scale` is the
  folded `gamma/sqrt(var+eps)`, a signed number with 8 fraction bits.
- **`activation`**: offers four modes, selected by `act_mode`:
  - none;
  - ReLU;
  - sign: 1 when `x >= 0`, else 0;
  - `(tanh(x)+1)/2`, approximated by `clamp(1/2 + x/2, 0, 1)` with 8 fraction bits.

The publication names these EPU units but hardly describes them. The formats above are
this design's.

**Top-level ports:**

| group | ports |
|-------|-------|
| bank loading | `img_we`, `kern_we`, `bank_waddr`, `bank_wdata` |
| operation | `start`, `m_bits`, `n_bits`, `k_len`, `img_base`, `kern_base` |
| EPU settings | `bias`, `bn_mu`, `bn_scale`, `bn_beta`, `act_mode` |
| status | `busy`, `done`, `out_valid`, `out_data` |
| observation | `psum` (per tile) and the per-tile events `ev_backup`, `ev_restore`, `ev_shift_load`, `ev_shift` |
| power | `pwr_good` |

`pwr_good` reaches only the compute tiles. The banks are non-volatile, and the mapping
sequencer and the EPU are taken to stay powered.

### Parameters (defaults)

| parameter | default | origin |
|-----------|---------|--------|
| `ROWS` x `COLS` | 256 x 512 | mat size of the publication |
| `BANK_DEPTH` | 65536 bytes | 2 x 2 mats per bank, as published |
| `MAX_BITS` | 8 | widest published bit-width, 1:8 (W:I) |
| `FRAMES_PER_BACKUP` | 20 | published checkpoint period |
| `NUM_SA` | 4 | own choice; not published |
| `ACC_W`, `OUT_W`, `S_W`, `FRAC` | 32, 40, 16, 8 | own choice |

## 6. What fits

- **Bit-widths.** All evaluated weight:input bit-widths run: 1:1, 1:4, 1:8 and 2:2.
  Wider operands (the 32-bit and 64-bit baselines) need `MAX_BITS` raised.
- **Window size.** One operation covers up to 2048 window elements. Larger windows need
  `NUM_SA` raised, or several operations added together outside the design. An example
  is AlexNet conv3 at 3x3x256 = 2304 elements.
- **Storage.** The two banks hold 64 KiB each. That is smaller than a whole low
  bit-width SVHN model (about 0.3 MB), so layers must be loaded in turn.
- **Not covered.** The first and last network layers, which stay in full precision,
  and pooling are outside this datapath.

## 7. Where this RTL departs from or goes beyond the publication

- **Shift amount.** It is `m'+n'`, with bit indices counted from 0, as in the
  AND-Accumulation equation. The prose of the publication mentions `m+n-2`, and a figure
  labels it `2^(m+k)`.
- **Compressor tree.** It covers all 512 bit-lines, built from 4:2 cells in a greedy
  tree. It is CMOS logic, not the in-memory XOR/MUX realisation.
- **NV-FA width.** It is a 32-bit word: one sum NV-FF per bit, plus one carry NV-FF.
  The published cell is a single full adder with two NV-FFs.
- **Frames and checkpoints.** A "frame" is one bit-plane pair. The extra checkpoints at
  the start and end of a window, the non-volatile controller progress, and the
  three-cycle frame are this design's.
- **Quantized values.** The tiles multiply the integer levels `q` in `0 .. 2^k-1`.
  The factor `1/((2^m-1)(2^n-1))` that turns them back into real numbers in `[0, 1]`
  is not applied. It belongs in `bn_scale`.
- **EPU parameters.** In the original, the batch-norm constants are kept in the
  memory arrays. Here they are top-level ports, and the EPU works on one output pixel
  at a time.
- **Other layers.** The publication says pooling and batch-norm layers could also be
  run on the arrays. That is not built.
- **Own choices.** These were not published:
  - the number of sub-arrays;
  - the bank organisation;
  - the window-to-sub-array split;
  - the mapping sequencer;
  - every bit-width of the EPU;
  - every port and handshake.
- **Not built:**
  - the analog sense margins;
  - the H-tree organisation of the full 512 Mb memory (16 groups of 8 x 8 banks);
  - the second Image and Kernel Bank shown in the architecture drawing.

## 8. Files and simulation

`rtl/` holds one module or package per file. Start with `pim_pkg.sv`, then the leaf
cells:

- `msa`, `cmp42`, `full_adder`, `nvff`;
- `sot_mram_subarray`, `cmp_tree` and `cmp_reduce`, `asr`, `nv_fa`, `subarray_ctrl`;
- `compute_tile`, `mram_bank`, `quantizer`, `bitplane_mapper`, `adder_bias`,
  `batch_norm`, `activation`;
- `pim_cnn_top`.

`tb/` holds a self-checking testbench `tb_<module>.sv` for every module. Each compares
the module against an independent model and ends with a line
`TB_RESULT checks=N failures=M`. Some testbenches also check cycle counts:
`tb_subarray_ctrl` and `tb_compute_tile` check the frame timing and the resume point
after a power cut.

`tb_pim_cnn_top` runs the full-size design end to end:

- random bank contents;
- bit-widths 1:1, 1:4, 1:8, 2:2, and 8:8 with a power failure in the middle;
- every activation mode.

It checks every tile's partial sum and the activated output. It also counts AND steps,
non-zero shifts, periodic checkpoints and restores, and fails if any of them never
happened.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/pim_pkg.sv tb/tb_compute_tile.sv \
          --top-module tb_compute_tile -Mdir obj_tile
./obj_tile/Vtb_compute_tile +verilator+rand+reset+2
```

Replace the name to run any other testbench. The full-size `tb_pim_cnn_top` is slow to build. The C++
compile of four full 256 x 512 tiles takes about 15 minutes on four cores without a
compiler cache. It then simulates in about 10 seconds.

Lint with `verilator --lint-only -Wall -Irtl rtl/pim_pkg.sv rtl/<module>.sv`. The
remaining warnings are of three kinds:

- bits that are deliberately dropped: compressor overflow and quotient high bits;
- the reset used both in flip-flops and in the `disable iff` of assertions;
- the shared package parameter.
