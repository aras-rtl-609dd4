# ARAS in SystemVerilog: a ReRAM accelerator that rewrites its crossbars layer by layer

Most ReRAM processing-in-memory accelerators assume that all the weights of a network stay
in the crossbars for good. ARAS does not. It has deliberately few crossbars: 96 PEs × 24 APUs
× a 128×128 array of 2-bit cells. That holds about 9.4 M 8-bit weights, fewer than any of the
networks it targets. So while one layer computes, the crossbar rows that later layers need are
reprogrammed.

Three things make this affordable:
- **Overlap.** An offline schedule overlaps the slow ReRAM writes with computation.
- **Partial weight reuse.** A row is written as a set of deltas against what the cells
  already hold. A cell whose value does not change costs no pulse.
- **Adaptive bank selection.** A global buffer made of banks of very different sizes
  power-gates every bank that the current layer does not need.

This RTL builds the chip side of that design: APUs, PEs, network, global buffer,
accumulation, special functions, external I/O and the controller. Two parts are left out.
The offline scheduler is software. The LPDDR4 main memory is an external device, so the
chip's memory port is brought out as top-level signals. In the testbenches, a behavioural
memory and instruction programs written by hand take the place of the two.

## Block map

```
aras_top
├── ext_io            burst DMA to main memory (read and write streams)
├── gbuffer           10 banks, 1 KB … 2 MB, per-bank enable = power gating
│   └── gbuffer_bank
├── noc               controller → PE command flits; PE → ACC result flits
├── pe  (× NP = 96)
│   ├── pe_controller     command decoder and sequencer
│   ├── pe_buffer (× M)   one 96 × 128-bit buffer per APU row
│   ├── shift_register_set  8-bit activations → 8 bit-planes
│   ├── pe_add_array      adds the partial sums of selected APU rows
│   ├── pe_output_buffer  result-flit FIFO (sync_fifo)
│   └── apu (× M·N = 6·4)
│       ├── apu_controller   compute / write sequencing
│       ├── wlbl_driver      wordline select, bitline polarity
│       ├── sl_driver        per-column programming pulses
│       ├── reram_crossbar   behavioural 128×128 2-bit array
│       ├── adc_pool         sample & hold, 16 × 6-bit ADCs, column mux
│       └── shift_add        shift-and-add of cells and bit iterations
├── acc_unit          256 slots × 4 lanes of 32-bit accumulation
├── sfu               bias, ReLU, rescale to 8 bits, max pooling
└── aras_controller   executes the scheduled instruction list
```

All shared constants and types are in `aras_pkg`. Among them are the flit formats
`pe_flit_t` and `res_flit_t` and the instruction format `instr_t`. Every datapath word is
128 bits, which is the PE bus width.

## The APU: one crossbar, two modes

### How weights are stored

Each 8-bit weight occupies four adjacent columns. Column `4w + j` holds bits `[2j+1:2j]`
of weight `w`, so cell `j = 3` holds the two MSBs. That gives 32 weights per crossbar row.
All APUs in one APU row of a PE hold weights of the same layer and receive the same
activations.

### Computing: 96 cycles

Activations are processed bit-serially, LSB plane first. For each of the 8 bit-planes:

1. The plane drives the 128 wordlines for 4 cycles. The column sums are sampled on the
   last of these cycles.
2. The 16 ADCs convert the 128 columns in 8 mux steps of 16 columns each.
3. For each of the 4 weights in a step, `shift_add` forms
   `Σ_j code[4w+j] << (2j + bit)` and adds it to that weight's 32-bit accumulator.
   With signed activations, the MSB plane is subtracted instead.

That is 8 × (4 + 8) = 96 cycles. `done` comes 2 cycles later, once the last conversion has
drained through the ADC register and the adder. The split of the 96 cycles is this design's
choice; only the total comes from the published parameters.

The ADC is ideal and saturates at 63. A column sum can reach 128 × 3 = 384, so a dense
bit-plane over large weights is clipped. This is the model's behaviour, not an error: the
end-to-end test saturates ADCs on purpose, and its reference model clips in the same way.

### Writing: a row at a time, in two polarity steps

A row write is given a delta per cell, in 4-bit sign-magnitude `{dec, |Δ|[2:0]}`. A row
takes 128 cells × 4 bits, that is four 128-bit words. The SL driver works as follows:
- It latches the largest increase `max_inc` and the largest decrease `max_dec` in the row.
- It runs `max_inc` pulse periods with the increase polarity, then `max_dec` periods with
  the decrease polarity.
- In each period, every column that still needs a pulse gets one.

So a row costs `(max_inc + max_dec) × PULSE_CYCLES` cycles, and an all-zero row costs one
cycle and no pulse. That is where partial weight reuse pays off.

`PULSE_CYCLES = 1000` is derived from the 768 000-cycle crossbar write latency. The worst
case is 128 rows × 2 steps × 3 pulses, and 768 000 / 768 = 1000. The worst-case row
therefore takes 6000 cycles. The full-size testbench checks this figure.

The order of the two steps is a choice. The write-scheme figure labels the increase
"Step 1" and the decrease "Step 2". The dataflow text speaks of "decreasing and increasing
the cell values in two phases". The RTL follows the figure, and the total time is the same
either way.

An APU is never computing and writing at the same moment. The PE, however, loads the input
registers of the APUs of one APU row while other APUs write. Different APUs, in the same PE
or in different PEs, compute and write at the same time.

## The PE

A PE takes five commands from the network, each a `pe_flit_t`:

| command | effect |
|---|---|
| `K_DELTA` | stores a delta word straight into the row's buffer, bypassing the shift registers |
| `K_ACT` | sends 16 activations into the shared shift-register set. After 8 words (128 activations), the set writes 8 bit-planes, one per cycle, into the buffer of the addressed APU row. |
| `K_WRITE` | moves 4 delta words from the buffer into APU `(row, col)` and starts writing crossbar row `aux` |
| `K_COMPUTE` | loads 8 planes into every APU of an APU row and starts them together |
| `K_REDUCE` | adds the results of the APU rows in mask `aux` and sends `N·32/4` result flits, tagged with ACC slots `addr, addr+1, …` |

Backpressure decides when a command is accepted:
- `K_WRITE` waits until the target APU is idle.
- `K_COMPUTE` waits until its APU row is idle.
- `K_REDUCE` waits until the masked rows are idle.

Until then the flit waits in the network, and the controller stalls behind it.

Result flits carry 4 lanes of 32-bit sums. Flit `j` of a reduction holds weights
`(j mod 8)·4 … +3` of APU column `j / 8`.

## Chip level: the instruction list

The offline scheduler produces the schedule, which this design encodes as a list of `instr_t`
words. `aras_controller` executes them strictly in order:

| op | meaning |
|---|---|
| `I_BANKS` | sets the bank-enable mask. Unselected banks are gated: they are not accessed, read as zero and flag an error if touched. |
| `I_LOAD_GB` / `I_STORE` | copy `len` words between main memory and the Gbuffer |
| `I_WROW` | fetches a row's 4 delta words from main memory, sends them as `K_DELTA`, then sends `K_WRITE`. It does **not** wait for the write. |
| `I_COMP` | reads 8 Gbuffer words, sends them as `K_ACT`, then sends `K_COMPUTE` |
| `I_REDUCE` | sends `K_REDUCE`. The controller now expects the matching number of result flits at the ACC. |
| `I_SFU_CFG` | sets ReLU, pooling `2^p`, a 16-bit bias, an 8-bit multiplier and a shift |
| `I_FLUSH` | waits until every expected result flit has been accumulated. It then reads `len` ACC slots through the SFU. Slots are cleared when read. The 8-bit results are packed, 16 per word, into the Gbuffer. |
| `I_WAIT_W` | blocks until one APU row has finished writing. This is the "written weights?" test of the execution flow. |
| `I_END` | raises `done` |

Because `I_WROW` returns at once, the schedule can place the writes for later layers in
front of the computations of the current one. The hardware then overlaps them as far as
the APUs allow. A layer larger than one PE is handled in the same way: several PEs reduce
into the same ACC slots, which add their contributions.

The SFU's arithmetic is `y = clip(((v + bias) · mult) >>> shift, 0, 255)`. With ReLU on,
negative values become 0 before scaling. With ReLU off, the result is centred on 128.

## Timing summary (default parameters, 1 GHz)

| operation | cycles |
|---|---|
| APU compute (8-bit activations) | 96 (+2 to valid results) |
| crossbar row write | (max increase + max decrease) × 1000; 6000 worst case; 1 if all deltas are 0 |
| full crossbar rewrite, worst case | 128 × 6000 = 768 000 |
| reduction | 32 result flits, one per cycle, subject to network backpressure |
| Gbuffer read | 1 |

## Where this RTL departs from, or adds to, the published design

- **Network.** The figure shows a router beside each PE, but no topology or routing is
  given. Here one registered stage broadcasts commands and selects the target PE, and a
  round-robin arbiter collects results. Nothing in this RTL depends on a mesh.
- **SFU.** It implements ReLU, max pooling and the integer rescale. Sigmoid and
  normalization are named in the paper but not specified, and are not built.
- **Scheduler.** The scheduler is not part of the RTL. Bank selection, replication and
  weight shifting are decisions that arrive already made in the instruction list.
  - The weight shifting moves every weight of a layer by a common offset. Its correction
    term, Offset × Σx, must be folded into the SFU bias by that software.
- **Main memory.** Main memory is reached through a generic request/response port. It is
  not an LPDDR4 controller.
- **Own choices.** All of the following are this design's choices:
  - formats: the delta encoding, the instruction and flit formats, and 128-bit words
    throughout;
  - sizes: the ACC slot organisation (256 slots × 4 lanes) and the 32-entry PE output
    buffer;
  - the linear Gbuffer address map;
  - which of the "6x4" numbers is the row count: 6 APU rows of 4.
- **Crossbar and ADCs.** These are behavioural models. Cells are integer levels 0–3, a pulse
  moves one level, and there is no device noise, IR drop or variation.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Stimulus is random (`$urandom`), and
each testbench compares the block against a reference written independently of the RTL.
Where the design has a fixed latency, the testbench checks it: the 98-cycle compute, the
6000-cycle worst-case row, the single-cycle zero-delta row, and the one-cycle Gbuffer and
network stages.

`tb_aras_top` runs two small layers end to end, with 2 PEs of 2×2 APUs, small Gbuffer banks
and 4-cycle pulses. It builds the instruction program and a cycle-independent reference of
the arithmetic together. It then compares the outputs stored back in main memory, and the
exact total number of programming pulses. It also counts each mechanism and fails if any
never occurred:
- row writes and zero-delta rows;
- the delta bypass and activation serialisation;
- computation overlapping writes, waits for written weights, and network backpressure;
- ADC saturation;
- multi-row reduction and two PEs adding into one ACC slot;
- ReLU, pooling and signed activations;
- power-gated banks.

`tb_aras_full` instantiates `aras_top` with no parameter overrides: 96 PEs, 2304 crossbars
and the 4 MB buffer. It writes and rewrites one crossbar row, computes, reduces, rescales
and stores the result. It checks the values, the pulse count, the 6000-cycle worst-case row
write and the 96-cycle compute. Building and running it with Verilator takes about
3.5 minutes.

To run a testbench with plain Verilator (`tb_apu` is an example):

```
verilator --binary --timing --assert -Irtl -Itb rtl/aras_pkg.sv tb/tb_apu.sv --top-module tb_apu
./obj_dir/Vtb_apu
```

Testbenches that need main memory pick up `tb/mm_model.sv` through `-Itb`.

## Sizing against the evaluated networks

The crossbars hold 96 × 24 × 128 × 32 = 9 437 184 weights. The evaluated networks are
VGG-16, ResNet-50, DenseNet-161, BERT-Base and BERT-Large. Their weight counts (about
138 M, 25.6 M, 28.7 M, 110 M and 340 M) are general knowledge, not figures from the paper.
All of them exceed that capacity, as intended, and run by rewriting rows layer by layer.

The Gbuffer holds 4 136 960 bytes. That covers the largest input-plus-output activation
footprint of ResNet-50, DenseNet-161 and both BERT models at sequence length 384. The first
convolution block of VGG-16 needs 2 × 224 × 224 × 64 bytes ≈ 6.4 MB, so that layer must be
tiled by the schedule.
