# A pipelined 384-bit Montgomery multiplier for BLS12-381, built from DSP slices

This design multiplies two numbers modulo the 381-bit BLS12-381 prime `p`, using
Montgomery multiplication. For inputs `a` and `b` it returns

    r = a * b * 2^-384  mod p,   with r in [0, 2p)

and it accepts a new operand pair every 48 clock cycles. All 384-bit arithmetic is
reduced to 32-bit word operations. Those word operations run on FPGA DSP slices of
the UltraScale+ DSP48E2 kind. A multiplication takes 576 cycles to get through the
pipeline, and twelve multiplications are in flight at once.

The core is wrapped as a streaming kernel. Two 512-bit AXI-Stream inputs carry `a`
and `b`, and one 512-bit AXI-Stream output carries `r`. Each stream passes through
a 32-entry FIFO, and a full output FIFO stalls the whole pipeline.

The design has four layers, bottom up:

| Layer | Module | What it is |
|---|---|---|
| DSP slice | `dsp48_lite` | the part of a DSP48E2 that the word units use |
| word units | `madd32`, `maddcarry32` | 32-bit multiply-add (4 slices); multiply-add with internal carry (5 slices) |
| outer-unrolled pipeline | `oup_stage`, `oup_mmm` | one stage per outer-loop iteration of the Montgomery algorithm, 12 stages |
| streaming kernel | `axis_fifo`, `mmm_stream_kernel` | AXI-Stream FIFOs around the pipeline (top module) |

`mmm_pkg` holds the shared constants: `p`, `p' = -p^-1 mod 2^32 = 0xfffcfffd`, word
size 32, 12 words, latencies and stream widths.

## The algorithm: word-serial Montgomery multiplication (CIOS)

The operands are split into s = 12 words of W = 32 bits. The method used is Coarsely
Integrated Operand Scanning (CIOS), which interleaves multiplication and reduction
word by word. For every word `b[i]` (the outer loop, i = 0..11), it runs two inner
loops over a 13-word accumulator `t`:

    // LOOP_1: t += a * b[i]
    C = 0
    for j in 0..s-1:  (C, t[j]) = a[j]*b[i] + t[j] + C
    (C, t[s]) = t[s] + C                          // t[s+1] = C, which is always 0 here
    m = t[0] * p'  mod 2^32

    // LOOP_2: t = (t + m*p) / 2^32
    C = 0
    for j in 0..s-1:  (C, t[j]) = p[j]*m + t[j] + C
    t[s] = t[s] + C
    shift t right by one word                     // t[0] is 0 by construction

After twelve outer iterations `t = a*b*2^-384 mod p`, plus possibly one extra `p`.

No final subtraction is done. Because `4p < 2^384`, a result in `[0, 2p)` can be fed
back as an input to another multiplication and stays in range. A consumer that
needs the canonical value must subtract `p` once if `r >= p`.

Every step in both loops has the same form: `word * word + word + carry`. That is
the only operation the datapath needs. The design builds one unit that does it in
one pipelined step per cycle, keeping the carry inside the unit.

## The word units and the carry trick

This is the least obvious part of the design. Read it before changing
`madd32.sv` or `maddcarry32.sv`.

### DSP slice model (`dsp48_lite`)

A DSP48E2 slice has a 27x18 multiplier and a 48-bit three-input adder. One of the
adder's inputs can come from the previous slice's output, either as-is or shifted
right by 17 bits (the `PCIN` cascade). The model keeps only what the word units
use:

- input registers, with a configurable depth `AB_REGS`;
- the M (product) register;
- the P (accumulator) register;
- the C input;
- the PCIN / `PCIN>>17` cascade (`ZSEL`);
- the `A:B` concatenation mode (`USE_MULT=0`);
- carry-out fed back as carry-in (`CARRY_FB=1`).

Latency is `AB_REGS + 2` with the multiplier and `AB_REGS + 1` without it. The
pre-adder, SIMD, logic and pattern-detect features are not modelled.

### 32-bit multiply-add (`madd32`): `p = a*b + c`, 64 bits, latency 6

Each 32-bit operand is cut into 17-bit limbs, `a = a1:a0` and `b = b1:b0`, where
`a1` is 15 bits wide. The four partial products are added along a cascade of four
slices:

    DSP0: P0 = a0*b0 + c               -> result[16:0]
    DSP1: P1 = a0*b1 + (P0 >> 17)
    DSP2: P2 = a1*b0 + P1              -> result[33:17]
    DSP3: P3 = a1*b1 + (P2 >> 17)      -> result[63:34]

Each slice's inputs go through one more register than the previous slice's inputs,
so every slice meets its predecessor's P exactly when it needs it. The 17-bit
result slices leave early. They are delayed in fabric registers so that all of the
result appears together: three registers for P0 and one for P2.

The addend `c` goes straight into DSP0's C port. The multiply-add therefore costs
nothing extra over the plain multiply. With `c = 0` the unit is the plain 32-bit
multiplier.

### Multiply-add with carry (`maddcarry32`): latency 8, 5 slices

The inner-loop step needs `(C, t) = a*b + c + C`, where the carry C is a full
32-bit word plus one bit. Feeding C back through the 6-cycle `madd32` pipeline
would allow only one step every 6 cycles. Instead, a fifth slice performs the carry
addition in a single cycle and keeps the carry inside.

The fifth slice works as follows. Let `q(n) = a(n)*b(n) + c(n)` be the 64-bit
`madd32` output for the n-th issued word. Register `S` holds the high half of the
previous output, `q(n-1)[63:32]`. The fifth slice runs in `A:B` mode (no
multiplier) and computes

    A:B = { q(n)[31:0], 16'h0000 }
    C   = { S,          16'hFFFF }
    P   = A:B + C + carry_in,      carry_in = this slice's carry-out from the last cycle
    out = P[47:16]

The low 16 bits of `C` are all ones. If `carry_in` is 1, the low 16 bits overflow
and carry into bit 16. If `carry_in` is 0, nothing is carried. This moves the
slice's carry input, which sits at bit 0, up to bit 16, where the words are added.

The output word is then `q(n)[31:0] + q(n-1)[63:32] + carry(n-1)`. This is exactly
the CIOS word, with the running carry held as `S` plus one bit. One word leaves the
unit every cycle, 8 cycles after its inputs went in.

Pushing `a = b = c = 0` returns the pending carry word and leaves both `S` and the
carry bit at zero. The next inner loop can then start with no reset. The stage's
schedule relies on this.

Both the arrangement (operand packing, carry feedback, 4+1 slices) and the
latencies (6 and 8) come from the reference design. Their testbenches check them
cycle by cycle against a plain arithmetic model.

## The pipeline stage (`oup_stage`): one outer iteration on one word unit

Each stage owns one `maddcarry32` and the following state:

- registers for `a` and `b`;
- the 13-word array `t[0..12]`;
- the quotient `m`;
- a loop counter.

The constants `p` and `p'` are fixed in the package. A stage always works on the
low word of the `b` it receives. It passes `b >> 32` to the next stage, so stage i
sees `b[i]` in that position.

The controller is a small state machine: `IDLE -> LOAD -> LOOP_1 -> LOOP_2 -> DONE`.
Each loop runs for exactly 23 cycles (counter 0..22). The table shows what is issued
into the word unit at each counter value:

| counter | LOOP_1 issues (a, b, c) | result goes to | LOOP_2 issues (a, b, c) | result goes to |
|---|---|---|---|---|
| 0..11 | `a[j], b[i], t[j]` | `t[j]` | `p[j], m, t[j]` | `t[j]` |
| 12 | `0, 0, t[12]` | `t[12]` | `0, 0, t[12]` | `t[12]` |
| 13 | `t[0], p', 0` | `m` | `0, 0, 0` | (carry flushed, discarded) |
| 14 | `0, 0, 0` | (carry flushed, discarded) | – | – |
| 15..22 | – | results still arriving | – | results still arriving |

A result issued at counter `k` comes back at counter `k + 8`. It is written straight
into `t` or `m`, so issue and write-back overlap within the loop.

In LOOP_1 the quotient step at counter 13 issues `t[0]`. That value is written back
at counter 8, well before it is read. Its product with `p'` comes back at counter
21, which is why a loop is `12 + 8 + 3 = 23` cycles long.

After LOOP_2, `t[0]` is zero; an assertion checks this. The new partial result is
`t[12:1]`.

### Timing

The stage timing adds up as follows:

- one cycle takes `start`;
- one LOAD cycle loads `a`, `b` and all of `t` in parallel;
- the two loops take 2 x 23 cycles;
- DONE holds the outputs.

Start to done is 48 cycles. When the next stage is ready, DONE also accepts the
next operands in the same cycle, so a stage takes a new operation every 48 cycles.
With 12 stages the first result appears 576 cycles after the first start, and a
new result follows every 48 cycles. The reference design reports the same
figures: 576 and 48.

The stage is *blocking*: it takes no new operands until both of its loops are
finished. A non-blocking stage could overlap LOOP_2 of one operation with LOOP_1
of the next, at the cost of a second word unit or more complex control. This design
does not do that.

## Chaining the stages (`oup_mmm`): start/done/ready/continue

The 12 stages form a chain. Each stage passes its successor a 384-bit bundle: `a`,
`b` shifted right by 32 bits, and `r`. Stage 0 starts from `r = 0`. The unit's
external interface follows the Vivado HLS `ap_ctrl_chain` block protocol:

| signal | meaning |
|---|---|
| `ap_start` | `a` and `b` are valid |
| `ap_ready` | stage 0 takes them this cycle, when `ap_start` is also high |
| `ap_done` | `result` is valid |
| `ap_continue` | the consumer takes `result` this cycle |

Inside the chain the same idea repeats:

- `start[k] = done[k-1]`;
- `cont[k] = ready[k+1]`;
- the last stage's `cont` is `ap_continue`.

A stage sits in DONE, holding its outputs, until its successor can take them. When
`ap_continue` drops, the last stage stops first, then each stage behind it stops
once it finishes its current work. Nothing is lost or duplicated. The testbenches
check this with long random stalls.

## The streaming kernel (`mmm_stream_kernel`, top)

Three FIFOs surround the multiplier. Each is 32 entries deep and 512 bits wide,
with first-word fall-through (`axis_fifo`). The kernel is wired as follows:

- `ap_start` is high when both operand FIFOs hold an entry;
- both FIFOs are popped together on `ap_start && ap_ready`;
- `ap_done` writes the result into the output FIFO;
- `ap_continue` is "output FIFO not full".

The 384-bit values sit in bits `[383:0]` of each 512-bit beat. Input bits
`[511:384]` are ignored and output bits `[511:384]` are zero. The streams carry no
`tlast` or `tkeep`.

Measured from the first beat offered at the input, the first result leaves the
kernel after 578 cycles:

- 576 in the pipeline;
- one FIFO cycle on the way in;
- one FIFO cycle on the way out.

Sustained throughput is one result per 48 cycles. At the 467 MHz the reference
implementation reached, that is at most 9.7 million multiplications per second.
The reference measured 7.97 million per second end to end, including the host and
memory transfers, which are not part of this RTL.

## Where this RTL departs from the reference design, and what it leaves out

- **Only the 32-bit word size is built.** The reference also describes 24-bit and
  64-bit word units and pipelines, with 16 or 6 stages. The 32-bit version is its
  fastest and most power-efficient. The word size is not a free parameter here: W
  appears in the limb split of the word units.
- **The DSP slice is a behavioural-style model.** It is synthesizable logic, not the
  vendor primitive. The operands are unsigned limbs of 17 bits or fewer, so the
  real slice's signed multiplier is written as an unsigned product. Separate
  A1/A2/B1/B2 register enables are folded into one input delay depth. On an FPGA,
  the tool may or may not map each `dsp48_lite` onto one DSP48E2.
- **The cycle-by-cycle schedule inside a stage is this design's own.** It was chosen
  to match the published totals of 48 and 576 cycles. The reference's schedule
  drawing is off by one cycle between two of its labels, and it does not show the
  second loop at all.
- **The stage-to-stage stall protocol is this design's own.** It uses
  ready/continue, as described above. The reference says only that the output FIFO's
  full flag stalls the pipeline.
- **`t` is a register array.** The reference keeps it in LUT-RAM. Mapping it that
  way is left to synthesis.
- **FIFOs are plain RTL** rather than the vendor's parameterized FIFO macro.
- **Reset is synchronous and active high** everywhere. The reference does not
  specify reset.
- **Not included:**
  - the host-side kernels that move data between board memory and the streams;
  - the memory and PCIe platform;
  - the other multiplier styles that the reference compares against: row-parallel,
    row-serial, Karatsuba and high-level-synthesis versions.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against a model
written with plain wide arithmetic, and each ends with a line
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_dsp48_lite` | three slice configurations (multiply + C, cascade `>>17`, A:B with carry feedback) against a cycle model |
| `tb_madd32` | random `a*b+c`, latency exactly 6, one result per cycle, hold under clock-enable low |
| `tb_maddcarry32` | random inner loops against a word-carry reference, carry flush by zero push, latency 8 |
| `tb_oup_stage` | one CIOS outer iteration against a reference, start-to-done 48, back-to-back 48, stalls |
| `tb_oup_mmm` | full Montgomery products against `a*b*2^-384 mod p` (up to one extra `p`), 576 first / 48 period, stall |
| `tb_axis_fifo` | fill to 32, drain, random traffic with an AXI-Stream hold assertion |
| `tb_mmm_stream_kernel` | end to end at full size: 160 random products through the AXI-Stream ports, with random back-pressure and gaps on each input |

The end-to-end testbench also counts the kernel's flow-control events and fails if
any of them never happens:

- pipeline stalls;
- a full output FIFO;
- a full input FIFO;
- one operand stream waiting for the other;
- a busy pipeline;
- back-to-back issue.

It runs at the default parameters and takes about ten seconds of simulation.

To simulate with Verilator 5, for any testbench:

    verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
        rtl/mmm_pkg.sv tb/tb_mmm_stream_kernel.sv --top-module tb_mmm_stream_kernel
    ./obj_dir/Vtb_mmm_stream_kernel

Some changes need matching edits elsewhere:

- **Changing `p`:** edit `P_MOD` and `P_PRIME` in `mmm_pkg`. `P_PRIME` must equal
  `-p^-1 mod 2^32`, and `4p < 2^384` must hold, or the no-final-subtraction
  argument fails.
- **Changing the unit latency `MC_LATENCY`:** it moves `LOOP_LEN` and the write-back
  index together. The stage's testbench then catches any schedule mismatch.
