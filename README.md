# A double-precision FFT/IFFT processor over the ring Q[x]/(x^n + 1) for FALCON

FALCON, the lattice signature scheme, does most of its key generation and
signing arithmetic in the Fourier domain of the ring Q[x]/(x^n + 1). It needs a
forward and an inverse transform for every power-of-two size from n = 2 up
to n = 1024 (security levels I and V use N = 512 and N = 1024). It needs them
in IEEE-754 binary64, because the scheme's security argument assumes that
precision. This RTL is a small co-processor for that job. It has two
reconfigurable radix-2 butterfly units (PEs), four single-port coefficient
banks, two compressed twiddle ROMs and a control unit. The control unit
schedules the butterflies so that no bank is ever asked for two words in the
same cycle. The same hardware runs the forward transform (Cooley-Tukey
butterflies) and the inverse (Gentleman-Sande butterflies). Size and direction
are chosen at run time.

The design follows the architecture of a published FALCON FFT processor: two
PEs, 4 x 128-word banks, 2 x 129-word ROMs, 2 cycles per butterfly step.
Several details were not given in complete form and had to be
reconstructed: the address rules, the exchange rules and the ROM contents.
Those reconstructions are described below, and the last section lists every
place where this RTL departs from, or adds to, that description.

## 1. What is computed

A real polynomial a(x) = a_0 + ... + a_{n-1} x^{n-1} is held as n/2 complex
words

    c_k = a_k + i * a_{k+n/2},   k = 0 .. n/2 - 1.

The forward transform FFT^phi_n evaluates a(x) at the n/2 roots of
x^n + 1 in the upper half plane. It runs log2(n) - 1 stages of n/4
butterflies. Stage sg (0-based) pairs words j and j + ht with
ht = n / 2^(sg+2). The pair belongs to group i1 = j / (2 ht) and uses the
twiddle factor gm[2^(sg+1) + i1], where

    gm[k] = exp(i * pi * (2 * rev_s(k - 2^s) + 1) / 2^(s+1)),   s = floor(log2 k),

and rev_s is the s-bit reversal. This is exactly the table and the loop
order of the FALCON reference code, so results can be compared with it
directly.

    forward (CT):  x = u + v*w,        y = u - v*w
    inverse (GS):  x = u + v,          y = (u - v) * conj(w)

The inverse runs the same stages in reverse order with conjugated factors.
It does **not** divide by n/2: an FFT followed by an IFFT returns
(n/2) * c_k. The host scales, or folds the factor into a later step, as
FALCON's own code does.

n = 2 is a single word that is already its own transform: the processor
finishes without touching memory. n = 4 has a single butterfly per stage, so
PE1 stays idle.

## 2. Block structure

    fft_processor                      top level, host port, bank exchanges
    |- control_unit                    FSM, stage/step counters
    |  |- coef_addr_gen                Addr0 / Addr1 of the banks
    |  |- twiddle_addr_gen             ROM address, odd/minus flags
    |  `- config_ctrl                  exchange controls, selects, twiddle expansion controls
    |- coef_memory                     4 banks x 128 complex words
    |  `- sram_sp (x8)                 real and imaginary halves, 128 x 64 bit each
    |- twiddle_memory                  one compressed ROM per PE + expansion
    |  |- twiddle_rom (x2)             129 x 128 bit, contents in rtl/twiddle_rom{0,1}.hex
    |  `- exchange                     re/im swap
    |- pe_array                        two PEs, each between an input and an output exchange
    |  |- exchange (x4)
    |  `- pe_butterfly (x2)            reconfigurable CT/GS butterfly
    |     |- complex_mult              4 fp64_mul + 2 fp64_addsub
    |     `- fp64_addsub (x4)
    `- exchange (x2)                   bank exchange (stage 0 pairing)

Shared types and sizes are in `fft_pkg` (`cplx_t` = {re, im} binary64,
`N_PE = 2`, `N_BANK = 4`, `S_MAX = 1024`, `BANK_DEPTH = 128`,
`TW_DEPTH = 129`).

The wiring between banks and PEs is fixed, apart from one pair of exchange
switches. PE0 reads and writes banks 0 and 1, and PE1 reads and writes
banks 2 and 3. In stage 0 the bank exchange swaps the roles of banks 1 and
2, so PE0 works on banks 0/2 and PE1 on banks 1/3. Banks 0 and 2 always see
address Addr0, and banks 1 and 3 see Addr1. Inside each PE, the input
exchange (control `rs`) decides which bank word is u and which is v. The
output exchange (control `ws`) decides which bank receives x and which
receives y. These two controls are the whole of the schedule's data
movement.

## 3. Timing

Each butterfly step takes two clock cycles, because the banks are
single-ported:

1. **read cycle**: both PEs' four bank words and the two ROM words are read.
2. **write cycle**: the PEs compute combinationally, and the four results are
   written back to the same four addresses.

There is no pipelining. With max(n/8, 1) steps per stage and log2(n) - 1
stages, a transform takes

| n      | 4 | 8 | 16 | 32 | 64 | 128 | 256 | 512  | 1024 |
|--------|---|---|----|----|----|-----|-----|------|------|
| cycles | 2 | 4 | 12 | 32 | 80 | 192 | 448 | 1024 | 2304 |

busy cycles. The counts for n = 8 to 1024 are the ones the original design
reports. The PE is one long combinational path (binary64 multiply, then add),
so the clock frequency is set by it. The original reaches 167 MHz in a 22 nm
process. This RTL makes no timing claim.

Control protocol (`control_unit`): synchronous active-high `rst`. A one-cycle
`start` with `fft_ifft` and `logn` valid is accepted while idle or done.
`busy` is high for exactly the cycles above. `done` rises after the last
write cycle and stays high until the next `start`. `start` while busy is
ignored, and logn = 0 or 1 goes straight to done.

## 4. The conflict-free schedule

This is the heart of the design and the part that needs the most care.

### Initial layout

For n >= 8 each bank holds n/8 words. Word k starts in bank k / (n/8) at
address k mod (n/8). This is the natural order, bank 0 first. For n = 4,
word 0 is in bank 0 and word 1 in bank 2 (so the stage-0 pairing below
applies unchanged), and for n = 2 the only word is in bank 0. Let
sbits = log2(n/8) be the number of address bits in use.

### Why conflicts appear

In stage sg the partners of a butterfly are ht = n/2^(sg+2) words apart.

* **Stage 0** (ht = n/4): partners sit in banks 0/2 and 1/3 at the same
  address. The bank exchange lets PE0 take banks 0/2 and PE1 take banks 1/3.
* **Stage 1** (ht = n/8, one bank): partners are in banks 0/1 and 2/3, again
  at the same address. No exchange is needed.
* **Stages sg >= 2**: ht is smaller than a bank, so both partners would sit
  in one bank. The schedule prevents this by moving data. In the stage
  before, some results are written to the *other* bank of the pair
  (output exchange). In the stage after, the PE reads the words back in
  swapped roles (input exchange).

### The rules

Let the step counter be p (0 .. n/8 - 1), and for sg >= 1 let t = sg - 1.

    Addr0 = p
    Addr1 = p                                             sg <= 1
    Addr1 = p XOR ( (2^t - 1) << (sbits - t) )            sg >= 2

In words: in stage sg >= 2 the second bank of each pair is read at the
address whose top t bits are inverted. Two more bits of p are needed:

    inex = p[sbits - t]        for sg >= 2, else 0              (read swapped)
    ex   = p[sbits - t - 1]    for 1 <= sg <= log2(n) - 3, else 0  (prepare next stage)

    forward:  rs = inex,        ws = inex XOR ex
    inverse:  rs = inex XOR ex, ws = inex

For the inverse, the stage counter runs backwards (sg = log2(n) - 2 down to
0). The rules are the forward rules with the two exchanges swapped, so each
inverse stage undoes the data movement of the matching forward stage.

### Worked example, n = 32 (4 steps per stage, forward)

| stage | step p        | 0 | 1 | 2 | 3 |
|-------|---------------|---|---|---|---|
| 0     | Addr1         | 0 | 1 | 2 | 3 |
|       | rs / ws       | 0/0 | 0/0 | 0/0 | 0/0 |
| 1     | Addr1         | 0 | 1 | 2 | 3 |
|       | rs / ws       | 0/0 | 0/0 | 0/1 | 0/1 |
| 2     | Addr1         | 2 | 3 | 0 | 1 |
|       | rs / ws       | 0/0 | 0/1 | 1/1 | 1/0 |
| 3     | Addr1         | 3 | 2 | 1 | 0 |
|       | rs / ws       | 0/0 | 1/1 | 0/0 | 1/1 |

Bank 0 and bank 2 are always read at Addr0 = p. Stage 0 uses the bank
exchange. For the inverse transform, the rs and ws rows swap roles.

### Result order

After the forward transform, each value is still in the same half of the
memory: banks 0/1 hold FFT words 0 .. n/4 - 1, and banks 2/3 hold the rest.
Within a half the values are permuted. For n = 32 the banks end up holding
the FALCON-order outputs

    bank 0: 0  3  6  5      bank 2:  8 11 14 13
    bank 1: 4  7  2  1      bank 3: 12 15 10  9

FALCON only uses the transformed polynomial coefficient-wise: it adds,
multiplies and divides pointwise. So the order does not matter as long as
all operands share it, and the inverse transform, fed this layout, puts every
word back in its natural place. A host that needs the FALCON order can
reproduce the permutation by running the rules above on labels (the
testbench `tb_control_unit` does exactly that).

Every stage touches each word exactly once. Each step reads one word from
each of the four banks (n = 4: two words). So no bank ever sees two
accesses in a cycle, and the banks can stay single-ported.

## 5. Twiddle factors: distribution and compression

Each PE needs its own sequence of factors, which lets each PE have its own
ROM. The step counter indexes the ROM directly, with no per-size table. At
stage sg and step p, both PEs use the *uncompressed* index

    j = 0                                    sg = 0
    j = 2^t + (p >> (sbits - t)),  t = sg-1  sg >= 1

and PE number pe (0 or 1) finds there the factor

    j = 0:  gm[2]
    j >= 1: gm[2^(t+2) + pe * 2^t + gray(j - 2^t)],   t = floor(log2 j),  gray(r) = r ^ (r >> 1).

The Gray-code order reflects how the schedule moves butterfly groups between
PEs and steps. Because the index depends only on the stage and the
high bits of p, the same ROM serves every transform size: a smaller transform
just uses the first entries of each stage.

**Compression.** The factors at uncompressed indices 2m and 2m + 1 (m >= 1)
always differ by a quarter turn: gm[...](2m+1) = gm[...](2m) * (+i or -i).
Only the even one is stored. The ROM holds

    word 0: j = 0,   word 1: j = 1,   word a >= 2: j = 2(a - 1)

so 129 words per PE cover the 256 indices that n = 1024 needs. An odd index
2(a-1)+1 is read from word a and rebuilt by swapping real and imaginary
parts and flipping one sign:

* times +i, (re, im) -> (-im, re), for words a = 2, 3 and every odd a;
* times -i, (re, im) -> (im, -re), for every even a >= 4.

For the inverse transform the imaginary sign is flipped once more
(conjugation). All of this is a multiplexer and two XOR gates on sign bits
after the ROM register, so it costs nothing in time.

The ROM words are the correctly rounded binary64 values of cos and sin of
the angles above, stored as 32 hex digits {re, im} per line. ROM 0 starts
with `3fe6a09e667f3bcd3fe6a09e667f3bcd` (exp(i pi/4)). The testbench
`tb_twiddle_memory` recomputes every entry from the formula with `$cos` and
`$sin` and checks the sign rule, so the files can be regenerated from the
formula alone.

## 6. The reconfigurable PE

A PE contains the arithmetic of one butterfly: a complex multiplier (four
binary64 multipliers, one subtractor, one adder) and a complex adder and
subtractor (two binary64 adders each). That makes six adders and four
multipliers. Two multiplexers reorder them:

    FFT:   v -> [mult w] -> p;   x = u + p,  y = u - p
    IFFT:  x = u + v;            d = u - v -> [mult w] -> y

so the multiplier sits either before or after the subtractor. The resulting
netlist contains a structural loop, subtractor -> multiplier -> subtractor,
through the two multiplexers. It is a false path: for either setting of
`op` one multiplexer cuts it. Lint tools report it as a combinational loop
(Verilator: UNOPTFLAT), and a generic synthesis run sees a cyclic graph.
For static timing analysis, set a case analysis on `op` or declare the loop a
false path. It is kept, because sharing one set of units between the two
butterfly types is the point of this PE.

## 7. Floating-point units

`fp64_addsub` and `fp64_mul` are combinational IEEE-754 binary64 units with
round-to-nearest-even. They handle subnormal inputs and outputs (gradual
underflow), infinities, and NaN (returned as the canonical quiet NaN,
0x7FF8000000000000). Results are bit-identical to a C `double` computation
with the same operation order, which is how the testbenches check them. The
complex product is rounded term by term (re = ar*br - ai*bi), with no fused
multiply-add, which matches FALCON's reference code.

## 8. Memories

`sram_sp` is a single-port synchronous RAM: one address, read data
registered (available the cycle after the read), and read data held during a
write. Each bank of `coef_memory` is two of them (real and imaginary,
128 x 64 bit), eight in all. In silicon these are compiled SRAM macros; here
they are arrays that synthesis keeps as memory cells. `twiddle_rom` is a
registered-output ROM loaded with `$readmemh` from `rtl/twiddle_rom0.hex`
and `rtl/twiddle_rom1.hex`. The path is relative to the repository root, so
simulate from there. The original implementation used logic (LUTs) for the
ROMs, which a synthesis tool may do with these arrays too.

## 9. Host interface

While `busy` is low, the host reaches any bank word directly. It sets
`host_en`, `host_we`, `host_bank` (0-3), `host_addr` (0-127) and
`host_wdata` ({re, im}). Read data appear on `host_rdata` one cycle after
the request. Coefficients are loaded in the layout of section 4 and read
back the same way after an inverse transform. An assertion flags host
accesses while busy.

## 10. Verification

Every block has a self-checking testbench in `tb/`:

* `tb_fp64_addsub`, `tb_fp64_mul`, `tb_complex_mult`, `tb_pe_butterfly`,
  `tb_pe_array`: bit-exact comparison with the simulator's binary64
  arithmetic on random operands and on edge cases (for the FP units:
  zeros, subnormals, overflow, NaN, infinity, exact ties).
* `tb_exchange`, `tb_sram_sp`, `tb_coef_memory`: switching, read latency,
  read data held during writes, bank independence.
* `tb_twiddle_memory`: every ROM word against the closed form of section 5,
  the odd-index expansion, conjugation and read enable.
* `tb_coef_addr_gen`, `tb_twiddle_addr_gen`, `tb_config_ctrl`: the n = 32
  example of section 4 and structural properties for every size (addresses
  form a permutation, every factor of a stage used equally often, the sign
  rule).
* `tb_control_unit`: runs FFT then IFFT for every n = 2 .. 1024 on *labels*
  instead of numbers. It checks that every butterfly pairs the right two
  words with the right factor, that there are no bank conflicts, the cycle
  counts of section 3, the done/busy protocol, and that the IFFT restores
  the natural layout. For n = 32 it also compares the memory contents
  after every stage, forward and inverse, with the published 32-point
  example.
* `tb_fft_processor`: the whole processor at its default size. For
  n = 2 .. 1024 it loads random polynomials through the host port, checks
  the forward result against a FALCON-order reference FFT computed in the
  testbench and the cycle count, then checks that the inverse returns
  (n/2) * input in natural order. It counts how often each mechanism was
  exercised (input, output and bank exchange, +i and -i twiddle expansion,
  conjugation, single-PE n = 4 mode, n = 2 pass-through) and fails if one
  never was. It runs in well under a second.
* `tb_poly_mul`: the workload the transform exists for. It multiplies two
  random integer polynomials in Z[x]/(x^n + 1) for every n = 2 .. 1024: two
  forward transforms, a pointwise product done by the testbench in the
  memory order the schedule leaves, an inverse transform and scaling by
  2/n. It compares the rounded result with the exact schoolbook negacyclic
  product. This check does not depend on the internal ordering or on any
  twiddle table of the testbench.

To simulate one, run this from the repository root:

    verilator --binary --timing --assert -Irtl rtl/fft_pkg.sv \
        rtl/*.sv tb/tb_fft_processor.sv --top-module tb_fft_processor
    ./obj_dir/Vtb_fft_processor

Each testbench ends with a line `TB_RESULT checks=N failures=M`. Add
`-Wno-UNOPTFLAT` to silence the PE's false loop (section 6).

## 11. Departures from the original description, and choices made here

* **Address rule (Addr1).** The original names the stage-CP address "a
  reversal of bits k..l of Addr0". The rule that reproduces its 32-point
  data-flow example, and that is conflict-free for every size, *inverts* the
  top t = sg - 1 address bits. The ROM address, given there simply as the
  step number, is replaced by the j formula of section 5.
* **Exchange conditions.** The original scheduling pseudo-code exchanges
  inputs for "even group and safe stage" and uses an exchange bit
  "n - sg - 2". Both contradict its own 32-point example. The rules of
  section 4 follow the example: input exchange by p[sbits - t] in stages
  sg >= 2, output exchange by bit log2(n) - sg - 3 of the butterfly index,
  which is the pseudo-code's bit if its "n" is read as its stage count
  Logn = log2(n) - 1.
* **ROM order.** The original builds the ROM order with a block-permutation
  algorithm and a figure. This design stores the same factors in the
  order the schedule consumes them (closed form in section 5). It agrees
  with the 32-point figure, where the figure's two ROM tables are labelled
  in the opposite order to the PEs that use them; here ROM 0 serves PE0.
* **Sign rule.** Which odd factors are +i and which -i is not stated in the
  original. It is derived from the factor table.
* **n = 4 layout.** Word 1 is placed in bank 2, not bank 1, so stage 0 needs
  no special case.
* **Host port** and the start/busy/done protocol are this design's own; the
  original does not describe how data enter or leave the banks.
* **No output scaling** in the IFFT (same as FALCON's reference routine).
* **Memories** are modelled as arrays instead of compiled SRAM macros and
  LUT ROMs; no area, power or frequency figure of the original is
  reproduced or claimed.
* **n_PE is fixed at 2**, the configuration that was built and evaluated.
  The schedule and ROM formulas above are stated for two PEs only.
