# A SIMD multi-precision accelerator for interaction-type sums

This RTL describes one processor chip of a GRAPE-style accelerator. The chip
does quadruple, hexuple and octuple precision floating-point arithmetic in
dedicated hardware. It targets loops of the form

    f_i = sum over j of f(X_i, Y_j)

These are the double loops that come out of direct numerical integration of
Feynman loop integrals once a multi-dimensional quadrature (double-exponential
rule) has been fused into two loops. Each processing element (PE) holds one
`X_i` in its registers. The values `Y_j` are broadcast to every PE one after
another. Every PE evaluates `f(X_i, Y_j)` with the same instruction stream and
adds the result to its own running sum. A host sends the data and a program,
starts the chip and reads the sums back.

The design follows the published description of the GRAPE9-MPX processor as
far as that description goes. That covers the number format, the PE contents,
the unit latency, the PE counts and the memory sizes. Where the description
stops, this RTL makes its own choices. The biggest are the instruction set,
the control sequencer and every internal detail of the arithmetic units. Each
such choice is stated below and in the header comment of the file it concerns.

## Number format

Every PE word has a sign, a 19-bit biased exponent and a stored mantissa
behind a hidden leading one:

| precision     | sign | exponent | mantissa | PE word | host word |
|---------------|------|----------|----------|---------|-----------|
| MP4 (quad)    | 1    | 19       | 112      | 132     | 128       |
| MP6 (hexuple) | 1    | 19       | 176      | 196     | 192       |
| MP8 (octuple) | 1    | 19       | 240      | 260     | 256       |

The 19-bit exponent is the one IEEE binary256 uses, and the bias is 2^18-1.
The same exponent is kept for all three precisions. A PE word is therefore
4 bits wider than the standard word the host works with. Going from PE to host
(`mp_fmt_conv`), those 4 bits are removed in one of two ways, chosen at run
time by the host input `h_cut_exp`:

* `h_cut_exp = 0` cuts the mantissa. The host word keeps the 19-bit exponent,
  and the 4 lowest mantissa bits are truncated.
* `h_cut_exp = 1` cuts the exponent. The host word has a 15-bit exponent with
  bias 16383. For MP4 this is exactly IEEE binary128. Values out of range
  become infinity or zero.

Data going from host to PE is converted the opposite way.

These are this design's own arithmetic conventions:

* An exponent field of 0 encodes zero. There are no subnormals, infinities or
  NaNs.
* Results round to nearest-even.
* Underflow flushes to zero.
* Overflow saturates to the largest finite magnitude.

## Block structure

```
 host port ──► data memory (32k words, host format) ◄──┐
 (h_dm_*)                                              │ dm_*
 host port ──► instruction memory ──► CP control unit ─┼──► format conversion
 (h_im_*)      4k on-chip words   fetch  (cp_ctrl)     │         │
               + 16M DRAM words ◄─ dram_* port          │         ▼
                                                   ┌────┴── MP processor (mp_array)
                                                   │  broadcast memory (mp_bm)
                                                   │        │ one word per clock to all PEs
                                                   │  PE 0 … PE NPE-1 (mp_pe)
                                                   │   registers (mp_regfile)
                                                   │   multiplier (mp_fmul)
                                                   │   adder/subtractor (mp_fadd)
                                                   │   1/sqrt seed (mp_rsq)
                                                   └─ read-out port back to CP
```

`g9mpx_chip` is the top. Its defaults are the MP4 build: `MW = 112`,
`NPE = 36`, 32768 data words and 4096 on-chip instruction words. The MP6 and
MP8 builds are `MW = 176, NPE = 19` and `MW = 240, NPE = 11`. Both elaborate,
but only MP4 is simulated here.

Two parts of the real board are not in the RTL:

* The PCIe link is replaced by a plain word-wide host port.
* The DRAM controller is replaced by a request/response fetch port.

## The processing element and its timing

This is the part that needs the most care when you write programs.

Each PE has a multiplier, an adder/subtractor and an inverse-square-root seed
unit. All three are fully pipelined with a latency of exactly 4 clocks. The
published peak rates count two floating-point operations per PE per clock
(36 × 88 MHz × 2 = 6.3 Gflops for MP4). For that reason one PE instruction
has two slots that issue together:

* a **multiply slot**: `M_MUL`, `M_RSQ` or `M_NOP`, with `m_dst`, `m_a`, `m_b`
  and `m_b_bm`;
* an **adder slot**: `A_ADD`, `A_SUB` or `A_NOP`, with `a_dst`, `a_a`, `a_b`
  and `a_b_bm`;
* one `bm_addr`, the broadcast-memory word that either slot can take as its
  operand b when its `*_b_bm` bit is set.

The layout is `mp_pkg::pe_instr_t`, 48 bits. Registers are 6-bit numbers:
each PE has 64 registers.

Timing rules:

1. An instruction issued in cycle *t* reads its registers and the broadcast
   word in cycle *t*.
2. Its results are written at the end of cycle *t+4*. The register file
   forwards a value in the cycle it is written, so a dependent instruction may
   issue in cycle *t+4*, but no earlier.
3. The hardware has **no interlock**. A program must place 3 independent
   instructions (or `C_PE` no-ops) between a producer and its consumer. An
   accumulation chain therefore adds at most once every 4 clocks unless it is
   spread over 4 or more partial sums, which is why the original system runs
   several integrations at once.
4. The rsq unit shares the multiply slot and its write port.

### Division and square root

The hardware has no divider. `M_RSQ` returns 1/sqrt(|x|) with the full 19-bit
exponent and a 32-bit mantissa; its remaining mantissa bits are zero. The
result is always within 2^-31 (relative) below the true value.

Software finishes a division with Newton–Raphson steps on the full-precision
units. For d > 0, the seed is r = rsq(d)², about 1/d to 31 bits. Each step
r ← r·(2 − d·r) doubles the number of correct bits. Two steps are enough for
MP4, three for MP8.

The seed unit computes the square root and the reciprocal exactly with integer
arithmetic: a digit-by-digit square root of a 96-bit radicand, then a
division of 2^80 by that root. A ROM table is not used.

## Control processor and its instructions

The instruction set is this design's own. The published description says
only that the control processor (CP) sends the data and instructions and
collects the results. CP instructions are 64 bits wide (`mp_pkg::cp_instr_t`):
an opcode in bits 63:60 and arguments in bits 47:0.

| opcode     | action | cost in clocks |
|------------|--------|----------------|
| `C_PE`     | issue the PE instruction in bits 47:0 to all PEs | 1 |
| `C_XLOAD`  | PE *i* register `rreg` ← DM[`dm_addr` + *i*], for every PE | drain + NPE + 3 |
| `C_BMLOAD` | BM[`bm_addr` + k] ← DM[`dm_addr` (+ loop offset) + k], for k < `count` | `count` + 3 |
| `C_STORE`  | DM[`dm_addr` + *i*] ← PE *i* register `rreg`, for every PE | drain + NPE + 2 |
| `C_LOOP`   | repeat the body up to `C_ENDL` `count` times; the loop offset grows by `stride` each pass | 1 |
| `C_ENDL`   | end of the loop body | 1 |
| `C_NOP`    | nothing (unused opcodes behave the same) | 1 |
| `C_HALT`   | stop; `done` pulses for one clock | – |

In the table, DM is the data memory and BM the broadcast memory.

`C_XLOAD` and `C_STORE` first wait until no PE result is in flight (the
drain), so they always see finished results. The loop has one level.
`C_BMLOAD` with `use_off` set walks through the `Y_j` stored in the data
memory. Words at instruction addresses 0–4095 come from on-chip memory at one
per clock. Addresses from 4096 up go to the DRAM port, which is slower: each
word costs one round trip.

Example program, the kernel `f_i = Σ_j X_i·Y_j` over 6 values of `Y`. It is
the program the chip testbench runs.

```
0  C_XLOAD  dm=0,   reg=0          r0 <- X_i
1  C_XLOAD  dm=300, reg=1          r1 <- 0
2  C_LOOP   count=6, stride=1
3  C_BMLOAD dm=100, bm=0, count=1, use_off   BM[0] <- Y_j
4  C_PE     MUL r2 = r0 * BM[0]
5-7 C_PE    (no-ops: 4-clock latency)
8  C_PE     ADD r1 = r1 + r2
9  C_ENDL
10 C_PE     RSQ r3 = rsq(r0) | SUB r4 = r0 - BM[0]   (dual issue)
11 C_STORE  dm=1000, reg=1
   ... (on-chip NOP padding; the rest runs from DRAM)
   C_STORE  dm=1100, reg=3
   C_STORE  dm=1200, reg=4
   C_HALT
```

## Host side

A run goes as follows:

1. Write the data words through `h_dm_*`. Reads return data one clock after
   the request.
2. Write the program through `h_im_*`. DRAM-resident words are loaded by other
   means.
3. Set `h_cut_exp`.
4. Pulse `h_start`.
5. Wait for `done`.
6. Read the results from the data memory.

`busy` is high from start to done. The data memory is dual-ported, so the
host may read it at any time.

## Where this RTL departs from, or goes beyond, the published design

* **Own choices where the source is silent:**
  * both instruction sets, the hardware loop and the drain rule;
  * the register count (64), the register-file ports and its bypass;
  * the broadcast-memory depth (64) and the use of a single broadcast memory
    (the source mentions broadcast memory *units*, plural, without saying how
    many);
  * the stage split of every arithmetic unit, the rounding mode and the
    treatment of special values;
  * the rsq algorithm and its latency;
  * how data is converted on its way into the PEs;
  * the instruction address map.
* **Not modelled:**
  * results leave through a per-PE read-out port; no summation across PEs is
    built, since the source does not describe one;
  * the clock rates (88/78/68 MHz) belong to an FPGA build and are not
    modelled;
  * the PCIe interface, the DRAM controller, the host PCs and the 64-board
    cluster are outside the chip.
* The source gives the PE counts for an Arria V FPGA. Here they are
  parameters, and nothing checks that a given count would fit a particular
  device.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* **Multiplier and adder** (`tb_mp_fmul`, `tb_mp_fadd`). Thousands of random
  and directed operations, one per clock. The expected results come from an
  independent reference (`tb/mp_ref_pkg.sv`). That reference forms the exact
  product or sum as a wide integer and rounds it only at the end. Each result
  must arrive exactly 4 clocks after issue.
* **rsq** (`tb_mp_rsq`). Relative error below 2^-30 against `$sqrt`, plus exact
  powers of two.
* **Storage and conversion.** Register file (bypass and port priority),
  broadcast memory, data memory (all 32k words), instruction memory
  (on-chip and DRAM paths) and format conversion (both modes, both
  directions).
* **PE, array and sequencer** (`tb_mp_pe`, `tb_mp_array`, `tb_cp_ctrl`).
* **`tb_g9mpx_chip`.** The full-size chip (36 PEs, MP4) runs the example
  program twice, once in each cut mode. It checks every PE's sum, difference
  and rsq result. It also counts that these mechanisms actually happened:
  register bypass, dual issue, rsq, drain stall, loop passes, DRAM fetches.
  It runs in well under a minute.

Only the MP4 format is simulated; the reference package is fixed to it.

To run a testbench with plain Verilator, list the packages first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/mp_pkg.sv tb/mp_ref_pkg.sv rtl/*.sv tb/tb_g9mpx_chip.sv \
  --top-module tb_g9mpx_chip -o sim && ./obj_dir/sim
```

(`rtl/mp_pkg.sv` appears twice on that line. If your Verilator version
objects to the duplicate, list the `rtl/` files one by one instead.)
Assertions in `mp_pe` and `cp_ctrl` check that the unit pipelines stay
aligned, that fetches are made only when the instruction memory is ready, and
that registers are never loaded while results are in flight.

The RTL passes Verilator lint and the slang front end. The remaining lint
warnings are deliberate:

* Unused bits: reserved instruction fields, and rsq operand bits below its
  accuracy.
* `rst_n` in assertion `disable iff` clauses, which Verilator reports as a
  net used both synchronously and asynchronously.
