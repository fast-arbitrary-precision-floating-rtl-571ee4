# Arbitrary-precision floating-point GEMM: a Karatsuba pipeline in SystemVerilog

Some numerical codes need floating-point numbers with hundreds of mantissa
bits. One example is the semidefinite-program solvers used in the conformal
bootstrap. In software each such operation becomes a loop over 64-bit limbs,
and multiplication, whose cost grows faster than linearly with the width,
ends up dominating the run time. This design keeps the precision fixed when
it is built. That turns the whole mantissa multiplication into one deep,
fully pipelined circuit that takes a new pair of operands every clock cycle.
The multiplier is a recursive Karatsuba decomposition that bottoms out in
ordinary DSP-sized multipliers. An adder with the same round-toward-zero
rules sits behind it, and the resulting multiply-add pipeline drives a tiled
matrix-multiplication unit (C = A·B + C). That unit is replicated, and each
copy works on its own slice of the rows.

The arithmetic gives the same bits as the MPFR library's `mpfr_mul` and
`mpfr_add` in round-toward-zero mode (`MPFR_RNDZ`) on the same mantissa
width. The testbenches compare every result with an independent reference
model.

The default build has 512-bit numbers (448-bit mantissa), a Karatsuba
threshold of 72 bits, 128 bits added per pipeline stage, 32 × 32 output
tiles and 8 compute units.

## Number format

Each number is one packed word of `BITS` bits (a multiple of 512, to suit
wide memory bursts):

| bits | field |
|---|---|
| `BITS-1` | sign (1 = negative) |
| `BITS-2 : BITS-64` | exponent, 63-bit two's complement |
| `BITS-65 : 0` | mantissa, `M = BITS-64` bits |

The value is (−1)^sign × 0.mantissa × 2^exponent. As in MPFR, the leading
mantissa bit is stored explicitly and is 1 for every non-zero number. Zero is
any word whose mantissa is all zeros. Results that are zero carry exponent 0.
The field widths come from the design; placing the sign in the top bit and
encoding zero this way are choices made here. Exponent overflow and underflow
are not detected: the exponent simply wraps.

## The Karatsuba multiplier (`karatsuba_mult`)

To multiply two `w`-bit integers, split each into halves of n = w/2 bits,
a = a1·2^n + a0 and b = b1·2^n + b0, and form three half-width products:

```
c0 = a0·b0            c2 = a1·b1            t = |a1−a0| · |b1−b0|
s  = sign of (a1−a0)(b1−b0)
c1 = c0 + c2 − s·t          (= a1·b0 + a0·b1, needs 2n+2 bits, never negative)
a·b = c0 + c1·2^n + c2·2^2n
```

Because only the absolute differences are multiplied and their sign s is
carried separately, all three products are plain unsigned n × n products. Each
of them is another `karatsuba_mult` instance, so the module instantiates
itself. Once the width is at or below `MULT_BASE_BITS`, `dsp_mult` forms the
product directly; on an FPGA that multiplier maps onto hardened DSP slices. The products c0 and c2 do not overlap in the result,
so the final three-term sum is a single addition of the concatenation
{c2, c0} and c1 shifted left by n.

Each recursion level is pipelined like this:

1. One register stage holds the halves, |a1−a0|, |b1−b0| and the sign.
2. The three sub-multipliers run in parallel. The sign, c0 and c2 travel in
   delay lines beside them.
3. c0 + c2 is one (w+2)-bit chunked addition.
4. Adding or subtracting t is a second (w+2)-bit chunked addition. Subtraction
   is done as + ~t + 1.
5. {c2,c0} + (c1 << n) is one 2w-bit chunked addition.

This gives a latency of 1 + 2·⌈(w+2)/A⌉ + ⌈2w/A⌉ per level, where A is
`ADD_BASE_BITS`, plus one cycle for the bottom multiply
(`apfp_pkg::karatsuba_latency`). With the defaults the recursion goes
448 → 224 → 112 → 56, so the 448-bit product is built from 27 multipliers of
56 × 56 bits and takes 16 + 9 + 5 + 1 = 31 cycles. Every width above the
threshold must be even; the module refuses to elaborate otherwise.

## Chunked wide addition (`pipelined_add`)

The recombination adds numbers of up to 2 × 448 = 896 bits. A single-cycle
carry chain that long would limit the clock rate. So every wide addition goes
through `pipelined_add`, which adds `ADD_BASE_BITS` bits per stage and passes
the carry to the next stage in a register. Operand chunks that have not been
added yet, and result chunks that are finished, move along in registers. As a
result a new addition can start every cycle, and each one takes ⌈W/A⌉ cycles.

## Floating-point multiply and add

**`apfp_mult`** multiplies the mantissas with `karatsuba_mult`. Meanwhile the
XOR of the signs, the sum of the exponents and a zero flag wait in a delay
line. Both mantissas lie in [½, 1), so their product lies in [¼, 1). If the
product's top bit is clear, it is shifted left by one and the exponent is
reduced by one. Keeping the top M bits then truncates the product, which is
exactly round-toward-zero. The multiplier has one more stage than the
Karatsuba core: 32 cycles at the defaults.

**`apfp_add`** has five parts:

1. **Order.** The operand with the larger magnitude becomes x. The exponent
   difference d is computed.
2. **Align.** y is shifted right by d into a field of M+2 bits; the two extra
   bits are guard bits. Every bit shifted past the guard bits is ORed into a
   sticky bit.
3. **Add or subtract.** Equal signs add, different signs subtract. This uses
   a chunked adder, and a subtraction also subtracts the sticky bit.
4. **Count.** The leading zeros of the result are counted.
5. **Normalise.** On a carry, the result shifts right by one. Otherwise it
   shifts left by the leading-zero count. The exponent is adjusted and the
   guard bits are dropped.

The guard and sticky bits are what make the result bit-exact:

- If d ≥ 2, a subtraction can cancel at most one leading bit. With two guard
  bits, the rounded-down difference on the guard grid then truncates to the
  correctly rounded result.
- If d ≤ 1, nothing is shifted out, and the difference is exact however many
  bits cancel.
- If the smaller operand lies entirely below the guard bits, the sticky bit
  alone removes one unit from x. For example, 1.000… − tiny gives 0.111…1.

The adder takes 4 + ⌈(M+3)/A⌉ cycles, which is 8 at the defaults.

**`apfp_mac`** feeds the product into the adder, with c delayed to meet it.
The result is RNDZ(RNDZ(a·b) + c): two roundings, the same as calling
`mpfr_mul` and then `mpfr_add`. It is not a fused multiply-add. It takes 40
cycles at the defaults, accepts one operation per cycle and never stalls.

## The GEMM compute unit (`gemm_cu`)

A fully pipelined multiply-add needs three operands per cycle. At 512 bits
and a few hundred MHz that is far more than a DDR4 bank delivers, so the
operands have to be reused from on-chip memory. The unit uses an
outer-product tiling. For every `TILE_N × TILE_M` tile of C it goes through
these phases:

| phase | what happens | cycles (ideal) |
|---|---|---|
| `LOAD_C` | the C tile is read into the on-chip tile buffer | TN·TM reads |
| `LOAD_AB` (per k) | column k of A (the tile's rows) and row k of B (the tile's columns) are read into two small buffers | TN+TM reads |
| `WAIT_HAZ` (per k, rare) | waits until the previous k's results are back in the tile buffer | 0 unless TN·TM + TN + TM < latency + 2 |
| `COMPUTE` (per k) | the TN·TM products A[i]·B[j] + Ctile[i][j] are issued one per cycle; each result overwrites its tile element | TN·TM |
| `DRAIN` | the multiply-add pipeline empties | ~latency |
| `WRITE_C` | the tile is written back, two cycles per element | 2·TN·TM |

The accumulation happens in place, in the tile buffer. With 32 × 32 tiles an
element comes back to the pipeline 1024 + 64 cycles after its previous update,
far longer than the 40-cycle latency. The read-after-write guard (`WAIT_HAZ`)
therefore only matters for the small tiles used in fast simulations. Each k
step loads 64 numbers and performs 1024 multiply-adds. That is the arithmetic
intensity TN·TM / (TN+TM) that makes the unit compute-bound.

Tiles that extend past the matrix edge are still computed in full. Elements
outside the matrix are filled with zero instead of being read, and they are
not written back.

Matrices are row-major, one word per number. Element (r, c) of X is at word
`x_base + r·ldx + c`. The unit has one memory port with three valid/ready
channels:

- **Read request:** `rd_req_valid`, `rd_req_ready`, `rd_req_addr`.
- **Read response:** `rd_resp_valid`, `rd_resp_ready`, `rd_resp_data`, in
  request order.
- **Write:** `wr_valid`, `wr_ready`, `wr_addr`, `wr_data`.

A transfer happens when valid and ready are both high. A request or write
stays stable until it is accepted, and assertions in the module check this.
Reads are issued as fast as the port accepts them; responses are matched to
buffer slots by a second counter that walks the same element order. While
idle, the unit latches its configuration on `start`. It then holds `busy`
until the one-cycle `done` pulse.

## Replication (`apfp_gemm`, the top level)

`apfp_gemm` instantiates `COMPUTE_UNITS` compute units. Unit p computes rows
p·R … p·R+R−1 of C, where R = ⌈N/P⌉; the last units may get fewer rows or
none. Every unit has its own memory port, meant to connect to its own DDR
bank. That bank holds the unit's rows of A and C and a full copy of B, at the
same base addresses in every bank. Arranging the data that way is the host's
job.

`cu_ddr_bank[p]` says which of the four banks unit p belongs to. The order is
1, 0, 2, 3, then repeating, so consecutive units land on different chiplets.
Bank 1 comes first because it sits next to the host-interface logic.

The top starts all units together and pulses `done` once every unit has
finished.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `BITS` | 512 | packed number width (mantissa `BITS−64`) |
| `MULT_BASE_BITS` | 72 | Karatsuba recursion stops at or below this width |
| `ADD_BASE_BITS` | 128 | bits added per pipeline stage in wide additions |
| `TILE_N`, `TILE_M` | 32, 32 | output tile per compute unit |
| `COMPUTE_UNITS` | 8 | replicated compute units |
| `ADDR_W`, `DIM_W` | 32, 32 | word-address and dimension widths |

The defaults are collected in `apfp_pkg`, which also holds the latency
functions that parent modules use to size their delay lines. For a
1024-bit build (960-bit mantissa), set `BITS = 1024`; the recursion
960 → 480 → 240 → 120 → 60 splits evenly. Other Karatsuba thresholds and
adder widths are single parameter changes. Thresholds of 36 and 144 bits, and
adder widths from 32 to 512 bits, are the alternatives worth comparing for
area and clock rate.

## Where this RTL is its own

This RTL follows the described architecture for all of the following:

- the packed format and its field widths;
- MPFR round-toward-zero semantics;
- the Karatsuba equations with an explicit sign for the middle term;
- the configurable bottom-out width;
- chunked wide additions;
- the steps of the adder (align, add or subtract, count leading zeros,
  shift);
- the chained multiply-add;
- outer-product tiling with an on-chip C tile and α = β = 1;
- the row split across units with B shared;
- the bank order.

The following are choices made for this RTL:

- where the pipeline registers sit, and hence every latency above;
- the guard and sticky bits in the adder;
- the zero encoding and the bit order of the fields;
- the memory handshake, and the fact that loads do not overlap compute (there
  is no double buffering, so each k step costs TN+TM load cycles plus memory
  latency on top of the TN·TM compute cycles);
- the two-cycle-per-element write-back;
- the hazard wait for small tiles;
- start/busy/done control.

What it leaves out:

- the platform shell, the host interface and the DDR controllers;
- the host-side conversion between MPFR numbers and the packed format;
- the stand-alone streaming multiplier used to benchmark the multiplier in
  isolation.

## Simulating

All files are plain SystemVerilog-2017. Packages must come first on the
command line: `rtl/apfp_pkg.sv`, and for testbenches also
`tb/apfp_ref_pkg.sv`. Here is an example for the end-to-end test at reduced
size:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/apfp_pkg.sv tb/apfp_ref_pkg.sv tb/ddr_model.sv \
  $(ls rtl/*.sv | grep -v apfp_pkg) tb/tb_apfp_gemm.sv \
  --top-module tb_apfp_gemm
./obj_dir/Vtb_apfp_gemm
```

Each testbench prints `TB_RESULT checks=N failures=F` and stops itself. A
watchdog counts a failure if it hangs. Lint (`verilator --lint-only -Wall`)
reports `c0`, `c2` and `t` in `karatsuba_mult` as undriven. That warning
comes from the module instantiating itself. Each of those signals is driven
by a sub-instance's product output. The testbenches are:

| testbench | what it checks |
|---|---|
| `tb_pipelined_add` | 100-bit adder in 32-bit chunks: every sum and carry, and the 4-cycle latency |
| `tb_dsp_mult` | the 18-bit base multiplier |
| `tb_karatsuba_mult` | 64-bit (64→32→16) and full 448-bit (448→…→56) products, random and corner operands, exact latency |
| `tb_apfp_mult`, `tb_apfp_add`, `tb_apfp_mac` | 2000 operations each at 128 bits, against the reference model, including cancellation, far-apart exponents and zeros; exact latency |
| `tb_gemm_cu` | one unit with 2 × 3 tiles and a memory model with random back-pressure: three GEMMs including edge tiles, padded leading dimensions and K = 0; untouched guard words; hazard waits, padding and stalls must all occur |
| `tb_apfp_gemm` | five units (so the bank order wraps) at 128 bits: three GEMMs, including units that get no rows; multiply-add count = tiles × K × tile size |
| `tb_apfp_gemm_full` | the top with every parameter at its default (8 units, 512 bits, 32 × 32 tiles): a 20 × 33 × 2 GEMM checked element by element |

The reference model in `tb/apfp_ref_pkg.sv` works differently from the RTL.
It computes every sum exactly on a wide integer grid and then truncates. So
it checks the guard and sticky reasoning rather than repeating it.
`tb/ddr_model.sv` is a behavioural memory bank with a fixed read latency and
a random ready signal. The full-size testbench takes a few minutes to compile
and about a second to run.
