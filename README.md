# MQX execution units: vector carry and widening multiply for 128-bit modular arithmetic

Fully homomorphic encryption (FHE) spends most of its time on polynomial
arithmetic: number theoretic transforms (NTTs) and element-wise vector
operations over residues modulo a prime `q`. Using 128-bit residues
(with `q` of up to 124 bits) instead of 64-bit ones reduces the work elsewhere in
FHE, but a CPU then has to build every 128-bit operation from 64-bit
pieces. The x86 scalar ISA does this cheaply with `ADC`, `SBB` and the
double-width `MUL`. AVX-512 has no vector equivalent. It has no carry flag per
lane, and no instruction returns the high half of a 64x64 product. An
add-with-carry therefore takes six vector instructions (add, masked add,
two unsigned compares, mask OR), and a 64x64->128 product takes even more.

MQX (multi-word extension; Zhang, Fu and Franchetti, MICRO 2025) closes that
gap with three SIMD instructions. Each is the vector form of a scalar x86
instruction:

| Instruction | Intrinsic | Per lane i (8 lanes of 64 bits) |
|---|---|---|
| `vpmulq` | `_mm512_mul_epi64(&ch, &cl, a, b)` | `{ch[i], cl[i]} = a[i] * b[i]` (unsigned, 128-bit product) |
| `vpadcq` | `c = _mm512_adc_epi64(a, b, ci, &co)` | `{co[i], c[i]} = a[i] + b[i] + ci[i]` |
| `vpsbbq` | `c = _mm512_sbb_epi64(a, b, bi, &bo)` | `c[i] = a[i] - b[i] - bi[i]`, `bo[i]` = 1 when the true difference is negative |

Carries and borrows live in the 8-bit AVX-512 mask (`k`) registers, one bit
per lane. Lanes never exchange carries. A 128-bit value is held as two vectors,
one of high words and one of low words, so a multi-word add is a chain of `vpadcq`
instructions. The carry mask of one instruction is the carry-in of the next.

This repository gives synthesizable SystemVerilog for the execution
hardware MQX adds to a core. It also gives testbenches that use that hardware to run the
kernels MQX targets: 1,024-element vector add, sub, multiply and axpy, and
256- and 1,024-point NTTs, all on 128-bit residues.

## Where the instructions execute

MQX is placed in an existing core by giving each new instruction the
execution ports of its closest AVX-512 relative. `vpadcq` goes with
`vpaddq`, `vpsbbq` with `vpsubq`, and `vpmulq` with `vpmullq`. For an Intel
Sunny Cove core (Xeon 8352Y class) that gives:

| Port | MQX instructions | Module instance |
|---|---|---|
| 0 | `vpadcq`, `vpsbbq`, `vpmulq` | `mqx_exec.u_port0` (`HAS_MUL = 1`) |
| 1 | `vpadcq`, `vpsbbq` | `mqx_exec.u_port1` (`HAS_MUL = 0`) |
| 5 | `vpadcq`, `vpsbbq` | `mqx_exec.u_port5` (`HAS_MUL = 0`) |
| 6 | none (scalar ALU / branch) | — |

`mqx_exec` is the top. It holds the three port slices and nothing else. The
scheduler that fills the issue slots, the zmm/k register files that receive
the results, and the existing AVX-512 units (compares, blends, shifts, the
FMA units) belong to the host core. They are not part of this RTL, and their
connections are the top's ports.

```
            issue[0] ──► mqx_port (port 0) ──► alu_res[0]
                          ├─ mqx_adc ┐
                          ├─ mqx_sbb ┴─► 1-cycle result register
                          └─ mqx_mul ───► LAT-stage pipe ──► mul_res
            issue[1] ──► mqx_port (port 1) ──► alu_res[1]   (adc, sbb)
            issue[2] ──► mqx_port (port 5) ──► alu_res[2]   (adc, sbb)
```

## Interface and timing

The bundles are packed structs in `mqx_pkg`:

* `mqx_uop_t` (one per port, from the scheduler): `valid`, `op`
  (`OP_ADC`, `OP_SBB`, `OP_MUL`), `tag`, source vectors `a` and `b`, and `cin`,
  the carry-in or borrow-in mask. Vectors are `logic [7:0][63:0]`, with lane i
  in `[i]`. Masks are `logic [7:0]`, with bit i for lane i.
* `mqx_alu_res_t` (one per port): `valid`, `op`, `tag`, result vector `c`
  and `cout`, the carry-out or borrow-out mask.
* `mqx_mul_res_t` (port 0 only): `valid`, `tag`, the high halves `ch` and
  the low halves `cl`.

Each port accepts one instruction per cycle and never stalls. `vpadcq` and
`vpsbbq` results are registered and appear one cycle after issue, the
latency of an ordinary vector add. `vpmulq` is fully pipelined and its result
appears `MUL_LAT` cycles after issue (default 5). An add and a multiply
issued to port 0 in different cycles can therefore finish in the same cycle.
For that reason port 0 has two result buses, and each result carries the tag
it was issued with. Peak rate is three carry instructions per cycle, or two
carry instructions and one multiply.

`rst_n` is synchronous and active low. It clears the valid bits, so
instructions in flight are discarded. Data registers are not reset.
Assertions report a `vpmulq` issued to a port without a multiplier (the
instruction is dropped) and any undefined opcode.

## Building 128-bit modular arithmetic from MQX

This is the part that needs the most care. The hardware above is simple, and
its value shows only when multi-word arithmetic is written with it. The
workload testbench `tb/tb_mqx_kernels.sv` contains the full sequences. In it,
the lanes carry eight independent residues, and a residue `x` is the pair
`(xh, xl)` of high and low words.

**Modular addition**, `c = a + b mod q` for `a, b < q`:

```
el, c0 = adc(al, bl, 0)        eh, c1 = adc(ah, bh, c0)      # e = a + b
dl, b0 = sbb(el, ql, 0)        dh, b1 = sbb(eh, qh, b0)      # d = e - q
take  = c1 | ~b1                                             # e >= q
c     = blend(take, e, d)
```

The condition `e >= q` comes from the borrow out of the high word of
`e - q`. An alternative is to compare the high words (`qh < eh`) and OR in the
carry. That misses the case where the high words are equal and the low word
of `e` is at least `ql`, so the result is not reduced. That form appears in
the published MQX code listing for this operation. The borrow-chain form used here has no special case and needs no
compare instruction.

**Modular subtraction** is the mirror image: `d = a - b` with `sbb`, `sbb`;
if the final borrow is set, add `q` back with `adc`, `adc` and blend.

**Modular multiplication** uses schoolbook multiplication and Barrett
reduction with `k = 248` and `mu = floor(2^248 / q)`. For a 124-bit `q` (`2^123 < q < 2^124`),
`mu` is below `2^125` and fits in two words.

1. `x = a * b`: four `vpmulq` (`ah*bh`, `ah*bl`, `al*bh`, `al*bl`). Their
   halves are added into a 4-word accumulator with `vpadcq` carry chains.
2. `x * mu`: a 4-word by 2-word product, eight `vpmulq`.
3. `t = (x * mu) >> 248`: word shifts on the host (`vpsrlq`/`vpsllq`/`vpor`).
4. `r = x - t*q` over the low 128 bits: four `vpmulq` and an `sbb` chain.
5. `r < 3q`, so subtract `q` conditionally up to twice (`sbb`, `sbb`, blend
   on the final borrow).

That is 16 `vpmulq` per 8 products. With a single multiplier (port 0), a
vector multiply or an NTT butterfly is bound by the multiplier port.

**NTT butterfly**: `(u, v) -> (u + w*v, u - w*v)`, which is one `mulmod`
followed by an `addmod` and a `submod`. The testbench runs them on ports 1 and 5
in parallel. Gathering butterfly operands into lanes stands in for the
host's permute/unpack instructions.

## What follows the MQX proposal, and what is this design's own

Taken from the proposal:

* The three instructions, their operands and their per-lane semantics,
  including the borrow definition (sign of the full-width difference).
* 8 lanes of 64 bits with 8-bit carry masks (the AVX-512 form). The proposal
  notes that lanes and word width are configurable in principle.
* The port assignment: carry instructions on ports 0, 1 and 5, widening
  multiply on port 0.
* The workloads: 124-bit moduli, 1,024-element BLAS-style vectors, NTTs from
  2^8 points, schoolbook multiplication with Barrett reduction.

This design's own choices, where the proposal leaves the hardware open:

* Latencies. The carry instructions take 1 cycle, following the
  observation that x86 `ADC`/`SBB` cost the same as `ADD`/`SUB`. The
  multiply takes `MUL_LAT = 5`, fully pipelined. The proposal gives no cycle
  counts for any MQX instruction.
* Insides. Each lane has a plain 65-bit adder or subtractor, and a 64x64
  multiplier followed by a register chain that synthesis is expected to
  retime.
* The port interface: the structs, the 8-bit tag, the separate adc/sbb and
  mul result buses, the no-stall rule, and reset behaviour.
* No write-masking (`{k}` merge masking) of MQX results. The instructions are
  defined without it.
* Not built: the multiply-high-only variant and predicated add/subtract.
  The proposal evaluated both as alternatives and kept neither.
* The NTT modulus `q = 2^123 + 0x700001` and its roots of unity in the test.

## Files

| File | Contents |
|---|---|
| `rtl/mqx_pkg.sv` | lane count, word width, tag width, opcodes, bundle structs |
| `rtl/mqx_adc.sv` | 8-lane add with carry (combinational) |
| `rtl/mqx_sbb.sv` | 8-lane subtract with borrow (combinational) |
| `rtl/mqx_mul.sv` | 8-lane 64x64->128 multiplier, `LAT`-stage pipeline |
| `rtl/mqx_port.sv` | one execution port: adc/sbb, optional multiplier |
| `rtl/mqx_exec.sv` | top: ports 0, 1 and 5 |
| `tb/tb_mqx_adc.sv`, `tb/tb_mqx_sbb.sv`, `tb/tb_mqx_mul.sv`, `tb/tb_mqx_port.sv` | unit tests |
| `tb/tb_mqx_exec.sv` | end-to-end test of the top at default parameters |
| `tb/tb_mqx_kernels.sv` | BLAS operations and NTT built from MQX instructions |
| `tb/mqx_host_tasks.svh` | host-side driver: issues one instruction to a port and waits for its tagged result |

## Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. From the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/mqx_pkg.sv tb/tb_mqx_kernels.sv --top-module tb_mqx_kernels -o sim
./obj_dir/sim
```

Replace `tb_mqx_kernels` with any other testbench name. Verilator has no
X state, so testbenches reset or assign everything they read. Every test
finishes in well under a second.

What the tests cover:

* Unit tests compare every lane with the instruction definitions, evaluated
  in 128-bit arithmetic, over corner cases and thousands of random vectors.
  They also check latency, tags, ordering and throughput with a scoreboard.
* `tb_mqx_exec` runs random traffic on all three ports at once. It then runs
  128-bit modular additions on ports 1 and 5 in parallel and 128x128-bit
  products from overlapping multiplies, and ends with a reset during
  multiplies in flight. It counts each mechanism (triple issue, simultaneous
  adc and mul results, a full multiplier pipeline, carry and borrow masks
  chained between instructions, reset flush) and fails if any count is zero.
* `tb_mqx_kernels` checks 1,024-element vadd, vsub, vmul and axpy, and
  256- and 1,024-point NTTs, against direct 256-bit arithmetic. The NTTs are checked
  against the O(n^2) definition. Measured cost with the simple driver
  (one kernel sequence per port, dependent instructions back to back):

  | Kernel | Cycles | Per element / butterfly |
  |---|---|---|
  | vadd, 1,024 elements | 257 | 0.25 |
  | vsub, 1,024 elements | 256 | 0.25 |
  | vmul, 1,024 elements | 8,333 | 8.1 |
  | axpy, 1,024 elements | 8,565 | 8.4 |
  | NTT, 256 points | 8,768 | 8.6 |
  | NTT, 1,024 points | 43,891 | 8.6 |

  These are cycle counts of this RTL under that driver. They are not
  predictions of CPU performance. A real core overlaps far more independent
  work than the driver does.

## Changing it

* `MUL_LAT` (a parameter of `mqx_exec`, `mqx_port` and `mqx_mul`, where it
  is called `LAT`) sets the multiply latency. The testbenches hold the
  expected latency in a local parameter of the same name, so change both.
* `MQX_LANES`, `MQX_W` and `MQX_TAG_W` in `mqx_pkg` set the vector shape
  (e.g. 4 lanes for an AVX2-width version) and the tag width. The lane
  modules take `LANES`/`W` parameters that default to these. The kernel
  testbench assumes 64-bit words.
* To put the multiplier on another port, or add one, change the `HAS_MUL`
  parameters in `mqx_exec`. The host driver sends every `vpmulq` to port 0.
