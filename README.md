# Anda: a bit-serial FP-INT GeMM accelerator for variable-length grouped activations

Weight-only quantized LLMs keep their weights as 4-bit integers but their
activations in FP16. Every matrix product is then an FP16 × INT4 product.
Done naively, each product needs a floating-point multiplier and an FP adder
tree, and the FP16 activations take 16 bits each in SRAM and DRAM.

This design stores activations in the **Anda** format instead:

- 64 consecutive values of one token share one exponent.
- Each value keeps a sign and a mantissa of a selectable length M (1 to 16 bits).
- M can change from one layer, or one kind of activation, to the next.

The arithmetic becomes integer arithmetic within a group. The hardware reads
one *bit-plane* per cycle: bit i of all 64 mantissas at once. So the
computation takes about M cycles per group, and storage takes about 1+M bits
per value. A shorter mantissa saves time, SRAM capacity and DRAM traffic in
direct proportion, with no change to the datapath.

The RTL here covers the full datapath and its control:

- the bit-serial processing unit (APU) and a 16 × 16 array of them (MXU);
- the activation and weight dispatchers, and the output dispatcher;
- the on-the-fly bit-plane compressor (BPC), which turns FP16 results back into Anda;
- the activation buffer, stored in bit-plane layout, and the weight buffer;
- the address generator and an instruction-driven top controller.

The vector unit, which handles the non-linear functions, and the external
DRAM are not included. They connect through ports (see *What is outside*).

## 1. The number format

A group holds 64 FP16 values x_j. Let e_j be their 5-bit biased exponents.
Conversion to Anda with mantissa length M works like this:

1. E = max_j e_j becomes the shared exponent.
2. Each value's 11-bit significand (implicit one plus 10 fraction bits) is
   shifted right by E − e_j.
3. The top M bits of that 11-bit field (M > 11 appends zeros) form mantissa
   m_j. M counts the formerly hidden leading one. Bits below M are dropped;
   there is no rounding.
4. Zero, and FP16 subnormals, get m_j = 0.

The value of an element is

    x_j ≈ (−1)^s_j · m_j · 2^(E − 15 − (M − 1))

In the value with the largest exponent, the leading one sits in the top
mantissa bit. Smaller values lose low bits as they are shifted.

## 2. Bit-plane storage

Each memory word is 1024 bits wide: 16 banks of 64 bits, where bank r belongs
to token r of a 16-token tile. One *group row* covers 16 tokens and 64
channels. It is stored as 1+M consecutive words:

| address          | bank r holds (64 bits)                   |
|------------------|------------------------------------------|
| base + 0         | sign bits of token r's 64 values         |
| base + 1         | mantissa bit M−1 (MSB) of the 64 values  |
| …                | …                                        |
| base + M         | mantissa bit 0 (LSB)                     |

A separate 80-bit exponent word at `exp_base` holds the 16 shared exponents,
with bank r at bits [5r +: 5].

The word width never changes. A shorter mantissa only makes a group row use
fewer addresses, so the stride between group rows is 1+M.

Sizes (`act_buffer`):

- Mantissa memory: 8192 × 1024 bits = 1 MB.
- Exponent memory: 8192 × 80 bits.

Without compression, the same memory can also hold plain FP16 words of 64
values. This is how uncompressed results are stored (*bypass*).

The weight buffer (`weight_buffer`) holds one word per 64-deep group and
16-channel tile:

- 16 columns × 64 signed INT4 weights (4096 bits);
- 16 FP16 group scale factors, one per column, at bit 4096 + 16c.

2048 words make 1 MB of INT4 data plus 64 KB of scales.

## 3. The bit-serial processing unit (APU)

The APU computes one output element. It is the part most worth understanding.
It consists of the integer `anda_pe` followed by the `fp_accumulator`.

**Per group of 64 (anda_pe).**

- *Sign cycle.* The group's 64 sign bits and its shared exponent are latched.
  The weights that were pre-loaded into the shadow register become the active
  weights, and so does their scale. This is the weight double buffer.
- *Plane cycles 1 … M, MSB first.* Each mantissa bit selects its INT4 weight
  or zero. The sign bit negates the weight. An adder tree sums the 64 results
  into a plane partial sum p. A 32-bit register then accumulates
  `acc = (first plane ? 0 : acc << 1) + p`.

  The order of work is "first over elements, then over bit-planes". Each plane
  costs one adder tree pass. The only other cost per plane is a shift of the
  single accumulator. No per-element shifters are needed, because the
  exponents are shared.
- *Conversion.* After the last plane, `acc` holds Σ_j (±m_j · w_j) as an
  integer whose binary point depends on M. Shifting it left by 16 − M fixes
  the binary point at bit 15 for every M. `INT2Half` then builds an FP16 from
  it and the shared exponent:

      value = (acc << (16 − M)) · 2^(E − 30)

The next group's sign cycle may follow the last plane directly, so a group
takes 1 + M cycles. The result appears two cycles after the last plane.

**Across groups (fp_accumulator).**

- Each group result is multiplied by its group's FP16 weight scale. The FP32
  product is exact.
- The product is added into an FP32 accumulator. On the first group of an
  output, a mux feeds 0 instead of the accumulator.
- After the last group, the sum is converted to FP16.

This stage adds one cycle, so the APU result appears three cycles after the
last plane.

**Numerics.**

- Every conversion truncates (rounds toward zero).
- Results below the FP16/FP32 normal range are flushed to zero.
- Results above the largest finite value saturate to it.
- Inf and NaN are never produced.

The 32-bit integer accumulator cannot overflow: the worst case is
64 · 8 · (2^16 − 1), which is below 2^25.

## 4. The MXU and the read schedule

The MXU is 16 × 16 APUs working output-stationary. One 16-token ×
16-channel output tile stays in the array while the reduction dimension K
streams through:

- Row r receives token r's 64-bit bank of each activation word. All 16
  columns share it.
- Column c receives output channel c's 64 weights and scale. All 16 rows
  share them.

`act_dispatcher` tags each activation read as a sign word or a plane word,
with first/last flags, and registers it. `weight_dispatcher` registers the
weight word and fans its 16 column slices out to the shadow registers.

`addr_gen` walks through the work as follows:

    for n in 0 .. N/16−1            (output tile)
      for k in 0 .. K/64−1          (group)
        read sign word  at act_base + k(1+M), exponent at act_exp_base + k
        read M plane words
    weight word for (n, k) at w_base + n·K/64 + k

Weight reads are scheduled so that loading overlaps computation:

- The first group's weight word is read one cycle before its sign word.
- Every later group's weight word is read during the previous group's first
  plane cycle. It reaches the shadow registers before the sign cycle that
  swaps it in.

There are therefore no bubbles between groups or between tiles. A GeMM of
16 tokens × K × N needs

    1 + (N/16) · (K/64) · (1 + M)  cycles of issue

plus pipeline drain and any output stalls (section 5). A finished tile leaves
the array five cycles after its last plane read: one cycle of buffer read, one
dispatcher register, and three in the APU.

## 5. The output path and its stall

A compressed result must again form 64-channel groups, but a tile holds only
16 channels. `out_dispatcher` therefore handles tiles as follows:

- It gathers four consecutive tiles of the same tokens into a gather buffer.
  Channel 16t + c comes from tile t, column c.
- When the set is complete, it copies the set into an emit buffer.
- It sends the set as 16 words of 64 FP16 values, word r = token r, using a
  valid/ready handshake.

With one set being gathered and one being emitted, the MXU may run ahead by
at most one set. The address generator enforces this with a credit rule:

- The last tile of set q (n mod 4 = 3, at its first group) may only start
  after sets 0 … q−1 have been fully emitted.
- Otherwise the generator holds in its sign state and raises `stall_cycle`.

An assertion in the dispatcher checks that a set never completes while the
previous one is still being sent.

Stalls appear when the output side is slower than the computation. For
example, with small K and a wide N, or when the compressor needs 1 + M_out
cycles per 16 words. A long K hides them entirely.

## 6. The bit-plane compressor (BPC)

The BPC turns 16 FP16 words (one per token, 64 values each) into one Anda
group row with a chosen output mantissa length `m_out`. The result is ready
to serve as the next layer's input without leaving the chip.

- **ser2par_fifo** collects the 16 incoming 1024-bit words (one per cycle,
  valid/ready) and hands them to the 16 lanes at once. Lane l receives word l
  (token l).
- **Lane** (`bpc_lane`): has three parts.
  - `fp_field_extractor` splits 64 values into signs, exponents and 11-bit
    significands.
  - `max_exp_catcher` finds the largest exponent with a comparator tree and
    computes each element's difference to it.
  - `mant_aligner` holds the 64 significands and produces one plane per step.
    For each element: if its remaining difference is 0, it outputs the
    register's MSB and shifts the register left. Otherwise it outputs 0 and
    decrements the difference.

  After `d` zero bits, an element therefore starts to contribute its own
  leading one. This is the right shift by the exponent difference, done one
  bit at a time, with no barrel shifter. Truncation at M bits follows simply
  from stopping after M steps.
- **data_packager**: emits the words in storage order. First comes one
  1024-bit word with all 16 lanes' sign planes, together with the 80-bit word
  of their shared exponents. Then come the M plane words, MSB first. While
  emitting the plane words it pulses the aligners' step.

For a compress started in cycle s, words appear in cycles s+2 … s+2+M. A new
set of 16 words can be accepted while the previous group is still being
emitted. The whole compressor takes 1 + M cycles per 16 FP16 words.

## 7. Control

`top_ctrl` holds a 64-entry instruction memory. A host writes it through
`imem_*` while the design is idle, then pulses `run`. The instruction
(`instr_t` in `anda_pkg`) has these fields:

| field           | meaning                                                      |
|-----------------|--------------------------------------------------------------|
| `op`            | `OP_GEMM`, `OP_VEC` or `OP_END`                              |
| `m_in`, `m_out` | mantissa length of the input activations and of the output   |
| `compress`      | 1: results go through the BPC; 0: stored as FP16 (bypass)    |
| `k_groups`      | K/64 (up to 1023)                                            |
| `n_tiles`       | N/16, a multiple of 4 (for `OP_VEC`: 4 × number of 16-word sets) |
| `act_base`, `act_exp_base` | input group rows in the activation buffer         |
| `w_base`        | first weight word                                            |
| `out_base`, `out_exp_base` | where the results are written                     |

The instructions work as follows:

- `OP_GEMM` computes one 16-token tile of C = A · W for all N channels. It
  finishes when every read has been issued and all N/64 output sets have been
  written back.
- `OP_VEC` stores FP16 words that arrive on the `vec_*` port, through the same
  output path (compressed or not).
- `OP_END` returns to idle and pulses `done`.

Written results are placed contiguously from `out_base`, in one of two
layouts:

- Compressed: 1 + m_out words per set, plus one exponent word.
- Bypass: 16 FP16 words per set.

A later instruction can use those results as its input.

The external ports `ext_m_*` / `ext_e_*` read and write the activation
buffer. They act only while the design is idle. `ext_w_*` writes the weight
buffer at any time.

## 8. What is outside, and where this RTL departs from the original design

- **Vector unit.** The architecture has a 64-FPU vector unit for the
  transformer's non-linear functions. Which functions it supports and how it
  is built are not specified, so it is not included. Its results enter
  through `vec_valid/vec_ready/vec_data`. Its inputs can be read through
  `ext_m_*`.
- **External memory.** The off-chip DRAM (HBM2) is represented only by the
  buffer ports. Loading and unloading do not overlap with computation here,
  because the activation ports act only while idle.
- **Exponent memory size.** The original figure is 0.125 MB. Here it is
  8192 × 80 bits (0.078 MB): one 5-bit exponent per bank and row.
- **Scale factors** are stored beside the weights in each weight word. This
  adds 64 KB to the weight memory.
- **Timing choices.** The separate sign cycle, the read schedule, the
  four-tile gathering, the credit stall, the instruction set and the
  idle-only external ports are all choices of this RTL. The original
  description gives the blocks and the dataflow, not the cycle-level control.
- **Rounding.** Truncation everywhere, and subnormal flushing, are choices of
  this RTL.
- **Weights.** INT4 weights are signed two's complement, with no zero point.
  They are stored packed, four bits per weight, not split into bit-planes like
  the activations. The APU uses all four bits of a weight at once, so a
  bit-plane weight layout would only reorder bits inside a word.
- **Clock.** The reference implementation runs at 285 MHz in 16 nm. This RTL
  has not been synthesized to a technology, so no clock or area claim is
  made.

Model sizes the design is meant for: at K up to 28672 (an OPT-30B FFN) and
M ≤ 13, one 16-token input row set takes at most 6272 of the 8192
activation words. Wide N is split over several instructions, limited by the
weight memory (k_groups × n_tiles ≤ 2048). Whole-model weights always
stream through the buffers.

## 9. Verification

Each testbench checks against a reference model written in the testbench
itself, and ends by printing `TB_RESULT checks=… failures=…`. Each has a
cycle watchdog.

| testbench           | covers                                   | what it checks |
|---------------------|------------------------------------------|----------------|
| `tb_apu`            | anda_pe, fp_accumulator, apu             | random dot products of up to 6 groups, M from 1 to 16, against a real-valued reference within the truncation error bound; 3-cycle latency; back-to-back restarts |
| `tb_mxu`            | mxu, both dispatchers                    | 16 × 16 tiles against a per-element model, 5-cycle latency, weight overlap |
| `tb_out_dispatcher` | out_dispatcher                           | tile-to-word reordering, random ready pattern, quad_done |
| `tb_bpc`            | extractor, max-exp catcher, aligner, lane, FIFO, packager, bpc | every plane bit and exponent against a software conversion, all M |
| `tb_act_buffer`, `tb_weight_buffer` | buffers                  | read/write, read latency |
| `tb_addr_gen`       | addr_gen                                 | full address sequences, credit stall |
| `tb_anda_top`       | the whole design, default parameters     | a program of two chained GeMMs (compressed, then bypass) and a vector store, checked word by word; counts stalls, overlapped weight loads, compressed groups, bypass words and vector words, and fails if any never happened |

`tb_anda_top` runs the full-size design in a few hundred cycles. Two
instructions are chained: the first GeMM's compressed output (M = 3) is the
second GeMM's input.

To simulate with Verilator 5, for example:

    verilator --binary --timing --assert -y rtl rtl/anda_pkg.sv tb/tb_util_pkg.sv \
              tb/tb_anda_top.sv --top-module tb_anda_top -Mdir obj_top
    ./obj_top/Vtb_anda_top

All other testbenches build the same way. Pass `-Wno-fatal` if your
Verilator version warns about the unused bits of shared structs.

## 10. Files

- `rtl/anda_pkg.sv`: constants, `instr_t`, FP helper functions.
- APU: `anda_pe`, `fp_accumulator`, `apu`.
- Array: `act_dispatcher`, `weight_dispatcher`, `mxu`.
- Output: `out_dispatcher`.
- Compressor: `fp_field_extractor`, `max_exp_catcher`, `mant_aligner`,
  `bpc_lane`, `ser2par_fifo`, `data_packager`, `bpc`.
- Memories: `act_buffer`, `weight_buffer`.
- Control: `addr_gen`, `top_ctrl`.
- Top: `anda_top`.
- `tb/`: one testbench per unit as listed above, plus `tb_util_pkg`
  (FP16 helpers for the reference models).
