# One butterfly for three transforms: a unified FFT / ML-KEM NTT / ML-DSA NTT accelerator

A 512-point complex FFT on 32-bit fixed-point data and the number theoretic
transforms (NTTs) of the post-quantum signature and key-exchange standards
ML-DSA (Dilithium) and ML-KEM (Kyber) are the same algorithm on different
rings. Each is log2 N stages of Cooley-Tukey butterflies `a ± w·b`. What
differs is the arithmetic: signed complex fixed-point in one case, unsigned
modular integers in the other two. An FFT butterfly already needs four 32-bit
multipliers and several 32-bit adders. Each NTT needs much less of the same
thing:

| transform | element | butterfly arithmetic | butterflies / stage | stages |
|---|---|---|---|---|
| FFT, 512 points | complex, Q16.15 re/im | 4 signed 32x32 products, 6 adds | 256 | 9 |
| ML-DSA NTT, N = 256 | 23-bit residue mod 8380417 | one 23x23 product mod q | 128 | 8 |
| ML-KEM NTT, N = 256 (128 pairs) | 12-bit residue mod 3329 | one 12x12 product mod q | 128 | 7 |

The design builds the FFT datapath in a form that can be cut apart, and then
reuses it. Each 32-bit multiplier is a Karatsuba multiplier made of 16-bit
pieces. Each 32-bit adder is two 16-bit adders joined by a carry link that can
be cut. As a result, one FFT butterfly slot can also run two ML-DSA butterflies
or four ML-KEM butterflies in the same cycle. The only NTT-specific logic is
the modular reduction after the multipliers and adders, plus the multiplexers
that select results. Memory is shared the same way: 1024 32-bit words hold the
FFT data. The same words hold 256 ML-DSA coefficients, one per word, or 256
ML-KEM coefficients, two per word.

The RTL here is a cycle-accurate implementation of that idea. Transforms take
2430 cycles (FFT), 624 cycles (ML-DSA) and 322 cycles (ML-KEM) from start to
done, the counts published for the original FPGA implementation.

## 1. Arithmetic of the three butterflies

**FFT.** Data are Q16.15: sign, 16 integer bits, 15 fraction bits, two's
complement. Twiddles are Q1.30. For `x ± w·y` the butterfly computes

    t1 = Re(w·y) = yR·wR − yI·wI        t2 = Im(w·y) = yR·wI + yI·wR
    out = (xR + t1, xR − t1, xI + t2, xI − t2)

Each 64-bit product is Q17.45 and is cut back to Q16.15 by taking bits
[61:30]. This is a floor, i.e. truncation toward −∞. Sums wrap modulo 2^32.
Stages apply no scaling. The 16 integer bits leave room for the growth of a
512-point transform only if inputs stay small. A full-scale input overflows,
exactly as it would in an unscaled fixed-point FFT.

**ML-DSA** (q = 8380417). Each residue is zero-padded to 32 bits. The butterfly
computes `(a + z·b) mod q` and `(a − z·b) mod q`. The product is reduced by
Barrett reduction with k = 48 and m = ⌊2^48/q⌋ = 33587228, followed by one
conditional subtraction of q. After the sum, q is subtracted if the sum is
≥ q. After the difference, q is added if the difference is negative.

**ML-KEM** (q = 3329). Each residue is zero-padded to 16 bits, and a 32-bit word
carries two of them. Barrett reduction uses k = 26 and m = ⌊2^26/q⌋ = 20158.
The conditional corrections are the same as for ML-DSA. The ML-KEM NTT stops
one level early (7 stages): 3329 has 256-th but no 512-th roots of unity. The
polynomial is therefore transformed as 128 pairs of coefficients, and both
members of a pair see the same twiddle. This design uses that fact. The two
coefficients of a word are always processed together with one zeta, so the
ML-KEM NTT is a 7-stage transform over 128 words.

## 2. How one datapath does all three (`unified_butterfly`)

The butterfly has six 32-bit inputs: a, b, c, d and the twiddles z1, z2. These
are twelve 16-bit halves. It has four 32-bit outputs, i.e. eight 16-bit
halves:

    a_o = a + t1   b_o = a − t1   c_o = c + t2   d_o = c − t2

| input | FFT | ML-DSA | ML-KEM (per 16-bit half) |
|---|---|---|---|
| a, b | Re x, Re y | butterfly 1: a, b | butterflies 1 and 2: a, b |
| c, d | Im x, Im y | butterfly 2: a, b | butterflies 3 and 4: a, b |
| z1, z2 | Re w, Im w | zeta of butterfly 1, of butterfly 2 | zeta of 1 and 2 (same value), of 3 and 4 |

**Multipliers.** There are four 32-bit Karatsuba multipliers: b·z1, d·z2, b·z2
and d·z1 (`karatsuba_mul32`). Each uses two 16x16 products, hh and ll, and one
17x17 product of the half-sums:

    a·b = hh·2^32 + ((aH+aL)(bH+bL) − hh − ll)·2^16 + ll

- FFT uses all four full products.
- ML-DSA uses the full products of the first two multipliers.
- ML-KEM uses only the hh and ll partial products of those same two multipliers.
  These are the four independent 12x12 products it needs.

**Sign handling.** The multipliers are unsigned. For the FFT, a 32-bit two's
complement converter (`twos_comp_conv`) takes the magnitude of each operand
before its multiplier. A 64-bit converter after the multiplier restores the
sign of the product. In the NTT modes the converters pass data through.

**Adders.** Every 32-bit add or subtract is built from two 16-bit units. For the
FFT and ML-DSA, the carry (or borrow) of the low half feeds the high half. For
ML-KEM the link is cut, so the two halves become independent 12-bit butterflies.
After the adders come the reductions `mod_{kyber,dilithium}_{add,sub}` (one
conditional ±q) and a mode multiplexer.

**Pipeline.** There are nine register stages. The butterfly accepts a new operand
set every cycle and never stalls. Mode and valid travel with the data.

| stage | work |
|---|---|
| R1 | input registers |
| R2 | 32-bit two's complement converters |
| R3 | 16x16 partial products, Karatsuba pre-adds |
| R4 | 17x17 middle product |
| R5 | Karatsuba combination (64-bit products) |
| R6 | 64-bit converters and Q16.15 truncation (FFT); Barrett reduction (NTT) |
| R7 | low 16-bit halves of the FFT `b·z1 − d·z2`, `b·z2 + d·z1` |
| R8 | high halves, with carry or borrow from R7 |
| R9 | final a ± t1, c ± t2 in 16-bit pairs, modular correction, output select |

The stage count (nine) is given. Where each register boundary falls is this
design's own choice.

## 3. Memories and where each element lives

**Data bank** (`data_ram_bank`, `tdp_ram`). Eight 256x16 true-dual-port RAMs,
4 KB in total, are paired into four 32-bit lanes. Every cycle, port A of each
lane reads one word and port B writes one word. A butterfly slot needs four
words in and four words out per cycle, so all four must sit in different
lanes. The element-to-lane map ensures this. It is based on parity, i.e. the
XOR of all index bits:

| mode | element index | lane | row |
|---|---|---|---|
| FFT | point p (9 bits), part im | {im, parity(p)} | p[8:1] |
| ML-DSA | coefficient x (8 bits) | {x[7], parity(x)} | x[6:1] |
| ML-KEM | word w (7 bits) | {w[6], parity(w)} | w[5:1] |

The two elements of a butterfly differ in exactly one index bit, so they have
opposite parity. In the FFT, the real and imaginary parts of one point use the
other lane bit. In the NTT modes, butterfly k of a stage runs together with butterfly
k + B/2, where B is the number of butterflies per stage. The two then differ in
the top index bit, or in the first stage in the next bit. Either way the parity
and top-bit pattern fills the two remaining lanes. The controller testbench
checks this for every cycle of every stage. Rows are unique within a lane, because the omitted bit x[0]
follows from the parity. `lane_crossbar` routes the lanes to the butterfly
ports and back. It asserts that both routes are permutations.

**Twiddle ROM** (`twiddle_rom`). 1024 32-bit words, two read ports. Its contents
come from the constant function `gen_rom()` at elaboration, so no data file is
needed.

| words | content |
|---|---|
| 0–255 | cos(2πe/512) in Q1.30, e = 0..255 |
| 256–511 | −sin(2πe/512) in Q1.30 |
| 512–767 | ML-DSA zetas 1753^brv8(k) mod q, k = 0..255 |
| 768–895 | ML-KEM zetas 17^brv7(k) mod q, k = 0..127, the same value in both halves |
| 896–1023 | unused, zero |

The FFT cosines come from a Q1.62 rotation recurrence and are rounded to Q1.30.
The testbench checks that every word equals the correctly rounded value of
cos or −sin. Port 1 supplies z1 and port 2 supplies z2. In the FFT these are the
cosine and the negative sine of the same exponent.

## 4. Schedule and cycle count (`uacc_controller`)

All three transforms are the forward Cooley-Tukey loop. Input is in natural
order and output in bit-reversed order. Stage st has span 2^s with
s = n−1−st, where n = 9, 8, 7. Butterfly k joins element `top` (k with a 0
inserted at bit s) and `top + 2^s`.

- **FFT:** one butterfly per cycle, k = 0..255. The twiddle exponent is
  bitrev8(k >> s). Output X[k] is at point bitrev9(k).
- **NTT:** butterflies k and k + N/4 issue together, where N is the number of
  words (256 for ML-DSA, 128 for ML-KEM). For ML-KEM that is 2 word
  butterflies, i.e. 4 coefficient butterflies. The zeta index is
  2^st + (top >> (s+1)). This is the ordering of the FIPS 203/204 reference
  loop, so the output is the standard NTT of those documents.

The controller issues for `issue` cycles per stage (256, 64 or 32) and then
waits `STAGE_OVERHEAD` = 14 cycles:

    FFT    9 × (256 + 14) = 2430
    ML-DSA 8 × ( 64 + 14) =  624
    ML-KEM 7 × ( 32 + 14) =  322

These match the published cycle counts. The wait is needed because data flow in
place. A result is written 10 cycles after its read address was issued (one
cycle of RAM read, nine of butterfly). The next stage may not read a word
before it has been rewritten. At least 11 cycles must therefore separate the
last read of one stage from the first read of the next. The remaining 3 cycles
of overhead are idle. The source gives only the totals, so 14 was chosen
because it reproduces all three. An assertion in the controller checks that
the pipeline is empty when a new stage starts.

## 5. Using the top level (`unified_fft_ntt_top`)

| port | use |
|---|---|
| `mode_i[1:0]` | 0 FFT, 1 ML-KEM, 2 ML-DSA; 3 is reserved and refused |
| `start_i` | starts a transform in `mode_i`; refused while busy |
| `busy_o`, `done_o`, `stage_o` | progress; `done_o` is sticky until the next start |
| `status_o[4:0]` | {start refused, done, busy, mode} |
| `host_en_i`, `host_we_i`, `host_addr_i[9:0]`, `host_wdata_i` | load/unload while idle |
| `host_rdata_o`, `host_rvalid_o` | read data, one cycle after the request |

`host_addr_i` is an element index in the mode currently on `mode_i`:

- **FFT:** {im, point[8:0]}.
- **ML-DSA:** coefficient [7:0].
- **ML-KEM:** word [6:0]. Word w holds {f[2w+1], f[2w]}.

The top maps the index through the lane table above, so the host never sees
the bank layout. A transform runs from `start_i` (accepted when idle and the
mode is valid) until `done_o`. `busy_o` is high for exactly the cycle counts
of section 4. Reset is asynchronous and active low.

## 6. Where this RTL goes beyond or departs from its source

- **Bank depth.** The source's block diagram marks each data RAM as 64 deep,
  but its text says 256x16. Only 256 holds the 1024x32-bit FFT data. 256 is
  built.
- **FFT twiddles.** The source says 512 complex twiddles. That would fill the
  whole ROM and leave no room for the NTT zetas. The schedule above needs only
  w^e for e < 256, so the ROM holds those 256 complex values.
- **Stage overhead.** The 14-cycle stage overhead, the schedule, the butterfly
  pairing, the lane map and the ROM layout are not given. They were chosen here
  to reproduce the published cycle counts with a conflict-free memory.
- **Twiddle and product details.** The product truncation (floor, bits
  [61:30]), the absence of per-stage FFT scaling, and the Barrett constants
  are this design's.
- **Interface.** The mode encoding, the status register layout, the host port
  and reset are not described in the source.
- **Not built.** The FPGA test harness was not built: ROMs of golden vectors
  compared row by row with the data bank, driven from a PYNQ host. The
  testbenches below take its place. Resource, frequency and power figures are
  FPGA results and are not reproduced.

## 7. Verification

Every module in `rtl/` has a self-checking testbench `tb/tb_<module>.sv`. Each
one prints `TB_RESULT checks=N failures=M` and has a watchdog. The unit
benches compare against independent reference arithmetic:

- Karatsuba against the `*` operator.
- Barrett reductions against `%`, including the corner cases ≥ q and = q.
- The butterfly against per-mode models, including the 9-cycle latency and a
  mode change on every cycle.
- The ROM against modular exponentiation and `$cos`/`$sin`.
- The controller against its cycle counts and conflict-free lane use.

`tb_unified_fft_ntt_top` runs the whole accelerator at its default size. It
performs:

- ML-KEM and ML-DSA NTTs, compared with an NTT computed from the definition
  (polynomial evaluation at the odd powers of the root).
- 512-point FFTs, compared bit-exactly with a model of the fixed-point schedule
  and, within 1024 LSB, with a double-precision DFT.
- Checks of the 322, 624 and 2430 cycle counts.
- At every stage boundary, a row-by-row comparison of the whole data bank
  with the expected contents after that stage. For the NTTs these come from
  the FIPS 203/204 loops; for the FFT, from the fixed-point model. An error is
  therefore pinned to the stage that produced it. The FPGA harness was
  designed around the same kind of check.

It also counts the events the design exists to handle and fails if any never
occurs:

- negative FFT operands;
- modular corrections after additions and subtractions in both NTT modes;
- a start refused while busy;
- the reserved mode refused;
- at least three mode switches between transforms.

To simulate with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
      --top-module tb_unified_fft_ntt_top rtl/uacc_pkg.sv tb/tb_unified_fft_ntt_top.sv
    ./obj_dir/Vtb_unified_fft_ntt_top

Substitute any other testbench name to run it instead. The package must come
first. All other modules are found through `-y rtl`.
