# Sparq lane: a RISC-V vector lane with a multiply-shift-accumulate for sub-byte inference

Quantized neural networks work well with 1- to 4-bit weights and activations. Vector hardware,
though, handles nothing narrower than 8-bit elements. ULPPACK works around this in software.
It packs two narrow operands into each wider element. Then one ordinary multiply computes a
two-term dot product, and the result lands in the middle bits of the product:

```
 activation element  a = a0 + 2^h * a1          (h = SEW/2)
 weight element      w = w1 + 2^h * w0
 a * w = 2^(2h) a1 w0  +  2^h (a0 w0 + a1 w1)  +  a0 w1
         \_ dropped by the SEW-bit product _/   \_ dot product _/   \_ low garbage _/
```

With plain RVV instructions the dot product must be shifted down before it can be added to an
accumulator. The usual trick avoids a shift after every multiply: it sums several unshifted
products first. That only works while the sum still fits in the h-bit field, and with 3- or 4-bit
operands the field fills after one or two products.

Sparq is a modified Ara, the open 64-bit RISC-V "V" vector processor. It removes this limit with
one instruction, **vmacsr** (vector multiply-shift-accumulate):

```
 vd[i] <- vd[i] + ( ((vs1[i] * vs2[i]) mod 2^SEW) >> SEW/2 )
```

A right shift by a fixed half element width sits between the multiplier and the accumulator. Each
packed dot product is shifted before it is added, so the accumulator can use the full element
width. Sparq also drops Ara's floating-point unit. The published single-lane layout (GF 22FDX) is
43 % smaller and uses 59 % less power than an Ara lane, and it runs 8.7 % faster.

This repository gives synthesizable SystemVerilog for **one Sparq lane**: the part that was built
in silicon. It holds the vector register file slice, the operand queues, the integer ALU, and the
multiply/divide unit with vmacsr. A decoder for the instructions the lane runs is included. It
also gives self-checking testbenches, including 2D convolutions run on the lane.

## 1. vmacsr in detail

### Semantics

For each element of width SEW (8, 16, 32 or 64 bits), `sparq_simd_mul` does the following:

1. It multiplies vs1 (or the scalar rs1, truncated and replicated) by vs2 and keeps the low SEW
   bits, as `vmul` does.
2. It shifts that logically right by SEW/2. The shift amount is hard-wired, not a register field.
3. It adds the result to the old vd, modulo 2^SEW.

For SEW = 16 this gives `(a0*w0 + a1*w1) + floor(a0*w1 / 256)`. The answer is exact when two
conditions hold:

* `a0*w1 < 2^(SEW/2)`, so the low term does not carry into the dot product.
* `a0*w0 + a1*w1 < 2^(SEW/2)`, so the dot product is not cut off at the top.

With unsigned n-bit activations and m-bit weights, the second condition fails first. At SEW = 16
that allows, for example, W3A4 or W1A7. At SEW = 8 only the smallest combinations fit; the
published ULP kernels use W1A1, W1A2 and W2A1. The paper calls
the 16-bit packing "LP" (low precision) and the 8-bit packing "ULP" (ultra-low precision).

Worked 8-bit example (ULP, 1-bit operands):

```
 vs1 = 0001_0001  (a1=1, a0=1)   vs2 = 0001_0000 (w0=1, w1=0)   vd = 5
 product mod 256 = 0001_0000 ; >> 4 = 1 = a0*w0 + a1*w1 ; vd <- 6
```

### Encoding

vmacsr uses the free funct6 slot right after `vmacc`. It has both a vector-vector and a
vector-scalar form:

| bits      | 31..26 | 25 | 24..20 | 19..15 | 14..12 | 11..7 | 6..0    |
|-----------|--------|----|--------|--------|--------|-------|---------|
| vmacsr.vx | 101110 | vm | vs2    | rs1    | 110 (OPMVX) | vd | 1010111 |
| vmacsr.vv | 101110 | vm | vs2    | vs1    | 010 (OPMVV) | vd | 1010111 |

For example, `vmacsr.vx v0, x1, v2` is `101110_1_00010_00001_110_00000_1010111`. The convolution
kernels use only the `.vx` form: packed weights come from scalar registers. The lane has no mask
unit, so it refuses `vm = 0`.

## 2. The lane

```
            instr, rs1, vsew, vl                     ext_* (load/store and slide units)
                   |                                        |
             +-----v------+                                 |
             | decoder    |  illegal_o                      |
             +-----+------+                                 |
                   | vop                                    |
             +-----v---------------------------------------v------+
             | sequencer: rd_cnt / inflight credits / wr_cnt      |
             +--+-----------------------------+-------------------+
                | 3 reads / cycle             ^ 1 write / cycle (byte enables)
             +--v-----------------------------+--+
             |  VRF slice: 32 regs x 1024 bit      |
             +--+--------+--------+----------------+
                | vs1/rs1| vs2    | vd (old)
             +--v--+  +--v--+  +--v--+
             | OQ a|  | OQ b|  | OQ c|     operand queues, OQ_DEPTH words
             +--+--+  +--+--+  +--+--+
                +--------+--------+
                |                 |
          +-----v-----+   +-------v-------------------+
          |  VALU     |   | VMFPU (no FPU)            |
          |  1 stage  |   |  SIMD mul + vmacsr (2 st.)|
          |           |   |  SIMD div (serial)        |
          +-----+-----+   +-------+-------------------+
                +------> result -> VRF word w of vd
```

### Where the data lives

The machine has four lanes. VLEN is 4096 bits, and 32 registers of that make the 16 KiB vector
register file. Each lane holds 1024 bits of every register: 16 words of 64 bits. In this lane,
word w of register v is at address `v*16 + w`. The lane's elements sit in order inside those
words: at SEW = 16, element k is in word k/4, bits `16*(k%4)` and up. How the elements of a
whole vector are spread across the four lanes is the business of the load/store and slide units,
which are not part of this design. `vl_i` is the number of elements held by *this* lane, so at
most `128 >> vsew`.

### How one instruction runs

The lane runs one instruction at a time:

1. **Accept.** When `instr_ready_o` is high, the lane takes `instr_i` with `rs1_value_i`, `vsew_i`
   and `vl_i`. An instruction the decoder refuses raises `illegal_o` for that one cycle, and the
   lane stays idle. `vl_i = 0` is accepted and does nothing.
2. **Fetch.** Each cycle the sequencer reads word `rd_cnt` of vs1, vs2 and vd in parallel. It does
   so only while fewer than `OQ_DEPTH` words are in flight (read but not yet taken by a unit). A
   word arrives one cycle later and is pushed into the three operand queues. For `.vx` and `.vi`
   forms, queue a gets the scalar or immediate, truncated to SEW and replicated over the word,
   instead of vs1.
3. **Execute.** Once all three queues hold a word, the selected unit takes them: the VALU, or the
   VMFPU's multiplier or divider. The old vd word always travels along. The multiplier needs it for
   vmacc, vnmsac and vmacsr.
4. **Write back.** The unit's result is written to word `wr_cnt` of vd. The last word gets byte
   enables covering only the bytes below vl, so tail elements keep their old value (tail
   undisturbed). `done_o` pulses in the cycle of that last write. The next instruction can be
   accepted in the following cycle.

Reads always run ahead of writes, and each word is read before it is written. So vd may be the
same register as vs1 or vs2.

### Timing

For an instruction of n words, counting cycles from the accepting clock edge to the edge that
writes the last word:

| unit                   | cycles                          | throughput               |
|------------------------|---------------------------------|--------------------------|
| VALU                   | n + 3                           | 1 word / cycle           |
| multiplier, incl. vmacsr | n + 2 + MUL_STAGES (n + 4)    | 1 word / cycle           |
| divider                | about n x (64/SEW) x (SEW+2)    | 1 word per 64/SEW x (SEW+2) cycles |

At one 64-bit word per cycle, a lane does four 16-bit multiply-accumulates per cycle. Four lanes
therefore peak at 32 operations per cycle, which is the int16 ceiling the published results are
measured against. With vmacsr each element carries two packed products, so the ceiling doubles.
Because this lane does not overlap instructions, a full 16-word instruction keeps the multiplier
busy for 16 of about 21 cycles. Ara's chaining sequencer, which the published numbers rely on,
hides most of that gap.

With the divider, the queues fill and the fetch stalls. `events_o.fetch_stall` marks those
cycles. `events_o.tail_write` marks a partial last-word write, and `events_o.vmacsr_word` marks
each vmacsr result word.

### The external VRF port

The load/store unit and the slide unit sit between the lanes, so they are not part of a lane.
They reach this VRF slice through `ext_*`. `ext_gnt_o` is high only while the lane is idle:

* A granted write takes effect at the clock edge.
* A granted read returns `ext_rdata_o` with `ext_rvalid_o` one cycle later.
* A request while the lane is busy is not granted. The requester keeps `ext_req_i` high until it
  is.

## 3. The units

| file | what it is |
|------|-----------|
| `rtl/sparq_pkg.sv` | element widths, RVV funct3/funct6 values (vmacsr = 101110), operation enum, decoded-operation struct, lane event struct |
| `rtl/sparq_decoder.sv` | combinational decoder: OPIVV/OPIVX/OPIVI vadd, vsub, vand, vor, vxor, vsll, vsrl, vsra, vmv.v.*; OPMVV/OPMVX vmul, vmacc, vnmsac, **vmacsr**, vdivu, vdiv, vremu, vrem. Refuses floating point, masked, vset* and anything else |
| `rtl/sparq_simd_mul.sv` | per-width element multipliers (8x8, 4x16, 2x32, 1x64 bits), the vmacsr shift, `STAGES` output registers, valid/ready |
| `rtl/sparq_simd_div.sv` | one restoring divider working through the elements of a word in turn; RVV rules for division by zero and signed overflow |
| `rtl/sparq_vmfpu.sv` | the multiply/divide unit without an FPU: steers words to the multiplier or divider and merges the results |
| `rtl/sparq_valu.sv` | integer ALU, one register stage |
| `rtl/sparq_operand_queue.sv` | synchronous FIFO, no fall-through, with assertions against overflow and underflow |
| `rtl/sparq_vrf.sv` | 512 x 64-bit array, 3 synchronous read ports, 1 byte-enabled write port |
| `rtl/sparq_lane.sv` | the lane (top): decode, sequencing, write-back, ext port |

## 4. Running a convolution on the lane

The paper's convolution is output-stationary. Take a kernel with F rows and columns:

* Accumulator registers V1..VF hold F output rows in progress.
* Each input row is loaded into V0. Activation packing is done on the lane: `vsll.vi` moves the
  second channel up by SEW/2, and `vor.vv` merges it with the first.
* For each kernel column i, the scalar core packs column i of the kernel into F scalars,
  `w_c1 + 2^(SEW/2) w_c0`. Then it issues F `vmacsr.vx` instructions, one into each accumulator.
  `vslidedown` by one element then lines V0 up with the next column.
* After each input row, V1 holds a finished output row once F rows have been seen. It is stored,
  and `vmv.v.v` moves V2..VF down one place.

The end-to-end testbench runs this program. The paper lists it only in simplified form, with the
row move inside the "output row complete" branch. The testbench moves the rows after every input
row, so that accumulator j always holds output row `h - F + j` from the start. The testbench
plays the load/store and slide units through the ext port. It runs these cases:

* LP W2A2 with a 3x3 kernel;
* LP W3A4 with a 7x7 kernel;
* ULP W1A1 with a 7x7 kernel;
* ULP W1A2 with a 3x3 kernel;
* the int16 baseline, using `vmacc.vx`, with a 7x7 kernel.

Each output element is checked against a direct convolution.

**Capacity.** A packed row of N 16-bit elements needs 16N bits, so one register at VLEN 4096
holds rows of up to N = 256. That covers the paper's 1x32xNxN inputs for N = 32 to 256, in LP and
int16. A 512-wide row needs register grouping (LMUL = 2), which this lane does not implement, or
rows split into strips in software. With 8-bit elements (ULP), N = 512 fits. A 7x7 kernel uses
10 of the 32 registers.

## 5. What follows the published design and what does not

From the paper:

* vmacsr: its semantics, the SEW/2 shift, its funct6 and formats.
* The removal of the FPU.
* The four parts of the lane: VRF, operand queues, VALU, MUL/DIV.
* 4 lanes and a 16 KiB VRF.

The published size table lists the 16 KiB VRF on a per-lane row, next to "4 lanes". Here it is
read as the whole machine's VRF, 4 KiB per lane, because 16 KiB is exactly 32 x 4096 bits.

This design's own choices, where the paper relies on Ara or says nothing:

* **Sequencing.** Ara's lane overlaps and chains instructions. This lane runs one instruction at
  a time, with credit-based operand fetch.
* **VRF.** Ara uses eight single-ported banks with arbitration. Here it is a 3-read/1-write array.
  On silicon it would be SRAM macros.
* **Depths and latencies.** Queue depth (4), multiplier stages (2), the one-stage VALU and the
  bit-serial divider are all this design's choices.
* **Instruction subset.** Only the integer subset above is supported. There is no masking, no
  LMUL > 1, no fixed-point rounding, no reductions, widening ops or compares.
* **Outside the lane.** The load/store unit, the slide unit, the dispatcher/main sequencer and the
  scalar core are not included. They connect through the instruction port and the ext port.
* **Reset.** All control state has an asynchronous, active-low reset. VRF contents are not reset.
* **No physical results.** The published area, frequency and power come from a commercial flow in
  22 nm and are not reproduced here.

## 6. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops with `$finish`. Each also has a
cycle watchdog. With Verilator 5, run from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sparq_pkg.sv tb/sparq_ref_pkg.sv tb/tb_sparq_lane.sv --top-module tb_sparq_lane
./obj_dir/Vtb_sparq_lane
```

Replace `tb_sparq_lane` with `tb_sparq_decoder`, `tb_sparq_simd_mul`, `tb_sparq_simd_div`,
`tb_sparq_vmfpu`, `tb_sparq_valu`, `tb_sparq_operand_queue` or `tb_sparq_vrf` to test one unit.
`tb/sparq_ref_pkg.sv` is the reference model. It computes each element with plain integer
arithmetic, from the RVV definitions and the vmacsr formula, and shares no code with the RTL.

`tb_sparq_lane` runs the lane at its default parameters, with a full 1024-bit register slice per
lane. It goes through four stages:

1. It fills the VRF.
2. It runs 250 random instructions. These cover every operation, form and element width, and
   random vector lengths. Each is checked register-wide against a VRF model, and the cycle counts
   in the table above are checked too.
3. It runs the convolutions of section 4.
4. It checks refusals: a floating-point instruction, a masked instruction, and an ext write while
   busy.

It also counts the lane's mechanisms: vmacsr, fetch stalls, partial tail writes, divides,
scalar/immediate operands, refused instructions and refused ext accesses. A mechanism that never
occurred counts as a failure. The whole test runs in well under a second.

## 7. Parameters of `sparq_lane`

| parameter | default | meaning |
|-----------|---------|---------|
| `NR_VREGS` | 32 | vector registers |
| `VLEN` | 4096 | bits per vector register, whole machine |
| `NR_LANES` | 4 | lanes the register is spread over, which sets the slice size `VLEN/NR_LANES` |
| `OQ_DEPTH` | 4 | words per operand queue, which is also the fetch run-ahead limit |
| `MUL_STAGES` | 2 | multiplier output register stages |

`ext_addr_i` is `log2(NR_VREGS * VLEN / NR_LANES / 64)` bits wide, 9 by default. `vl_i` is
`log2(VLEN/NR_LANES/8 + 1)` bits wide, 8 by default.
