# A shift-register partial sums unit for polar codes, with a sequential encoder and a line SC decoder

Successive cancellation (SC) decoding of a polar code of length N = 2^n
estimates the bits u_0 ... u_{N-1} one after the other. Every estimate that
has been made must be fed back into the decoder as *partial sums*: XORs of
already-decided bits that the g function of the decoder needs to combine two
LLRs. In hardware the unit that keeps these sums up to date tends to be the
part that limits clock frequency and, once the LLR memory is moved into RAM,
the largest part of the decoder.

The design here keeps all partial sums in one N/2-bit shift register. When a
bit u_i is decided it is shifted in; at each position it is XORed into the
value moving past only if a control bit says so. The control bits form a
simple matrix that a second small register produces on the fly. The critical
path is one AND and one XOR, independent of N, and the partial sums needed by
each processing element always appear in the same flip-flop, so no routing
multiplexers are needed. The same structure, made N bits wide, is a
bit-serial polar encoder.

This repository gives:

* `matrix_gen` – the control matrix generator;
* `sr_psu` – the shift-register partial sums unit (SR-PSU);
* `polar_encoder` – the sequential encoder built from an N-bit SR-PSU;
* a complete line SC decoder around the SR-PSU: `processing_element`,
  `processing_unit`, `memory_unit`, `sc_controller`, `sc_decoder`;
* `polar_codec` – the top, holding one encoder and one decoder;
* `polar_pkg` – the LLR type and the f, g and decision functions.

All modules default to N = 1024. Any power of two N >= 4 works by setting
the `N` parameter (or `W` = N/2 for the partial sums unit alone).

## Polar codes in one paragraph

Let kappa = [1 0; 1 1] and G = kappa^{(x) n}, its n-th Kronecker power. An
extended information vector U of N bits carries K information bits on the
most reliable positions and zeros ("frozen bits") elsewhere; the code word is
X = U G over GF(2). Graphically, X is obtained from U through n butterfly
stages: stage s replaces line k by line k XOR line k+2^s for every k whose
bit s is 0. The decoder runs the same graph backwards on LLRs. With
lambda_{i,n} the channel LLRs and B(i,j) = bit j of i,

    lambda_{i,j} = f(lambda_{i,j+1}, lambda_{i+2^j,j+1})                  if B(i,j) = 0
    lambda_{i,j} = g(lambda_{i-2^j,j+1}, lambda_{i,j+1}, S_{i-2^j,j})     if B(i,j) = 1

    f(a,b)   = sgn(a) sgn(b) min(|a|,|b|)
    g(a,b,s) = (-1)^s a + b

and u_i is 0 if it is frozen or if lambda_{i,0} > 0, otherwise 1. S_{k,j},
the partial sum, is the value on line k of the encoder graph after stages
0 ... j-1, computed from the bits decided so far. For instance with N = 8,
S_{0,2} = u_0+u_1+u_2+u_3 and S_{1,2} = u_1+u_3.

## The shift-register partial sums unit (`sr_psu`)

The register R_0 ... R_{W-1} (W = N/2) is updated once per decided bit:

    R_0 <= u_i AND c_{i,0}
    R_k <= R_{k-1} XOR (u_i AND c_{i,k})        k > 0

Here c_i is row i of the control matrix C = [K; K], with K = kappa^{(x) n-1}
(W x W), so row i of C is row (i mod W) of K.

For N = 8 (W = 4) the register holds, after each step (a step is one decided
bit; "+" is XOR):

| step | R0 | R1 | R2 | R3 |
|---|---|---|---|---|
| 1 | u0 = S00 | 0 | 0 | 0 |
| 2 | u1 = S11 | u0+u1 = S01 | 0 | 0 |
| 3 | u2 = S20 | u1 | u0+u1+u2 | 0 |
| 4 | u3 = S32 | u2+u3 = S22 | u1+u3 = S12 | u0+u1+u2+u3 = S02 |
| 5 | u4 = S40 | u3 | u2+u3 | u1+u3 |
| 6 | u5 = S51 | u4+u5 = S41 | u3 | u2+u3 |
| 7 | u6 = S60 | u5 | u4+u5+u6 | u3 |
| 8 | u7 | u6+u7 | u5+u7 | u4+u5+u6+u7 |

The entries marked S are the ones the decoder uses. The general rule, which
the testbench checks at N = 1024 against the definition of S, is:

> After t bits have been decided, let j = min(ctz(t), n-1), with ctz the
> number of trailing zeros. Then R_{2^j-1-m} = S_{t-2^j+m, j} for
> m = 0 ... 2^j-1.

Those are exactly the 2^j partial sums that the g functions of stage j need
next. They are found in R_0 ... R_{2^j-1}, so processing element p can be
wired to R_p for good.

The other entries are leftovers that are never read. At the start of a word
the design clears R and the control generator to match the table. This is
not strictly needed: at step t only R_p with p < 2^ctz(t) <= t is read, and
those positions already hold data of the current word.

The SR-PSU costs W flip-flops for R, W for the control generator, W-1 XORs
in the register, W-1 XORs in the generator, and W ANDs. The AND on R_0 has a constant 1 as its control
input and vanishes in synthesis. The critical path starts at u_i, which
drives W AND gates. That fan-out, not the logic depth, is what limits the
clock at large N.

### Control matrix generator (`matrix_gen`)

Row i of K holds c_{i,k} = binomial(i,k) mod 2, so each row follows from the
previous one like Pascal's triangle:

    c_{i,0} = 1,   c_{i+1,k} = c_{i,k-1} XOR c_{i,k}

The generator is therefore a W-bit register M with M_0 <= 1 and
M_k <= M_k XOR M_{k-1}, started at row 0 = 1,0,...,0. Because
binomial(W,k) is even for 0 < k < W, the register returns to row 0 after W
steps by itself. This produces C = [K; K] over the N steps of a word with no
counter and no ROM. For N = 8 the rows are 1000, 1100, 1010, 1111, then
1000 again.

## Sequential encoder (`polar_encoder`)

With W = N, the same register is an encoder. After u_0 ... u_{N-1} have been
shifted in, R_k = x_{N-1-k}, with X = U kappa^{(x) n}. The module reverses the
register onto its output `x`, so that `x[i]` = x_i. It raises `x_valid` on the
edge that takes in u_{N-1}. The register and the control generator are both
back at their start state after N bits, so words can follow each other with
no idle cycle.

## The line SC decoder (`sc_decoder`)

The decoder has the three usual units: a processing unit (PU) of N/2
processing elements, a memory unit (MU) of LLR registers, and the partial
sums unit, here the SR-PSU. A controller schedules them.

### Schedule (`sc_controller`)

One stage is computed per clock. Before bit i is decided, stages J(i) down
to 0 are recomputed, with J(0) = n-1 and J(i) = min(ctz(i), n-1) otherwise.
Stage j computes the 2^j LLRs of the size-2^j block of indices that contains
i. All of them are f nodes if bit j of i is 0, and all are g nodes if it is 1.
At stage 0 PE 0 delivers lambda_{i,0}. The bit is decided and shifted into
the SR-PSU in the same cycle, so the partial sums are ready at the next edge.

A word takes sum_i (J(i)+1) = 2N-2 cycles of computation plus one cycle to
load the channel LLRs. `done` pulses 2N-1 cycles after `start` (2047 cycles
at N = 1024). The decoded bits also stream out one per stage-0 cycle on
`u_valid`/`u_bit`/`u_idx`. Concurrent assertions in the controller state
the handshake rules: a word is loaded only while idle, decisions happen only
while busy, and `done` comes with the return to idle.

### Memory layout (`memory_unit`) – the part to read carefully

Only the block in use of each stage is kept:

* N channel LLRs;
* 2^j LLRs for each stage j = 1 ... n-1, N-2 registers in all.

Stage 0 is used at once and not stored.

Within a stage, the LLR at offset o of its block is stored at position
p = 2^j-1-o. The channel LLRs are stored reversed in the same way:
ch[q] = lambda_{N-1-q}. With this reversed order, PE p at stage j always
uses the same positions:

    a = L_{j+1}[p + 2^j],   b = L_{j+1}[p],   s = R_p,   L_j[p] <= f(a,b) or g(a,b,s)

Here a is the LLR of the first half of the stage-(j+1) block and b that of
the second half. The PE-to-register wiring is fixed. The only multiplexing
left is the choice of stage on the read side of the LLR memory. A partial
sum never needs multiplexing.

The reversal is what makes PE p's partial sum sit in R_p: the shift register
puts the sum for block offset o in R_{2^j-1-o}.

### Arithmetic (`polar_pkg`, `processing_element`)

LLRs are 6-bit two's complement numbers, kept in the symmetric range
[-31, +31]. f is exact min-sum. g saturates. The decision gives 1 for
lambda <= 0. The width is set by `polar_pkg::LLR_W`.

## Top (`polar_codec`)

The top holds one N-bit `polar_encoder` and one `sc_decoder`. Their N/2-bit
SR-PSU is the same structure at half the width. The two sides share only
clock and reset and can run at the same time. Ports:

* `enc_*` for the encoder: serial in, parallel code word out;
* `dec_*` for the decoder: parallel LLRs and frozen mask in, estimate out.

The frozen mask is an input, not a constant, so any code construction and
rate can be used.

## Where this follows the source architecture and where it does not

The following follow the published architecture:

* the SR-PSU update rule;
* the control matrix C and its generator;
* the sequential encoder and its bit order;
* the f/g functions and the decision rule;
* the fixed PE-to-R_p connection.

The rest is this design's own:

* **Decoder type.** The architecture was verified inside a *tree* SC decoder
  that is not described in detail. A line decoder with N/2 PEs is used
  instead. The SR-PSU fits such a decoder directly.
* **Encoder and decoder are separate instances.** The top does not share one
  register between them: the encoder needs N flip-flops, the partial sums
  unit N/2.
* **Memory, timing and interfaces.** Everything the source leaves open is
  chosen here:
  * the memory organisation;
  * one stage per clock, with the decision in the same cycle;
  * 6-bit saturated LLRs;
  * reset values;
  * the `clear`, `start`/`done` and valid handshakes;
  * capturing the frozen mask at start.
* **Gate count.** The register follows the update rule literally, with W
  ANDs. The published gate count (N/2-1 ANDs) counts the one on R_0 as
  removed. Synthesis removes it too.
* **Not modelled.** Semi-parallel decoders (fewer PEs than N/2, which need
  multiplexing of the partial sums) and RAM-based LLR memories are not built.

## Verification

Every module has a self-checking testbench in `tb/`. The testbenches compare
against reference models in `tb/tb_polar_ref_pkg.sv`, which are written from
the definitions and not from the RTL:

* a butterfly encoder;
* an SC decoder that evaluates lambda_{k,j} and S_{k,j} from the equations
  above;
* a BEC-Bhattacharyya frozen-set construction;
* a BPSK/AWGN channel.

| testbench | what it shows |
|---|---|
| `tb_matrix_gen` | rows of the N = 8 example; binomial(i,k) mod 2 at W = 512 over two periods |
| `tb_sr_psu` | all 32 register entries of the N = 8 table; at N = 1024 a closed form of R after every step, and the R_{2^j-1-m} = S_{t-2^j+m,j} rule |
| `tb_polar_encoder` | all 256 words at N = 8 against the written-out 8x8 generator matrix; N = 1024 words back to back and with gaps |
| `tb_processing_element` | exhaustive f and g over [-31, 31]^2 |
| `tb_processing_unit` | 512 PEs with random inputs, each with its own partial sum |
| `tb_memory_unit` | read/write addressing of every stage at N = 1024 |
| `tb_sc_controller` | cycle-by-cycle schedule against the J(i) list, 2N-2 cycles, start ignored while busy |
| `tb_sc_decoder` | N = 1024 words at several Eb/N0 values and with random LLRs, bit-exact against the reference SC decoder, latency 2N-1 |
| `tb_polar_codec` | end to end at N = 1024: 7 Eb/N0 points from 0 to 3 dB, encoder checked, decoder bit-exact, encoding of one word overlapped with decoding of the previous; counts f and g stages, g with a partial sum of 1, frozen and information decisions, shifts, clears |
| `tb_sc_workloads` | code lengths 16 ... 512, 7 Eb/N0 points, 2520 words through encoder and decoder, all bit-exact |

The word error rates these testbenches print are for information only.
Coarse 6-bit LLRs with one fractional bit and a BEC-designed frozen set are
not tuned for error-correcting performance. The check is bit-exactness
against the reference, not a target error rate.

## Simulating

With Verilator 5, from the directory holding `rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb \
        rtl/polar_pkg.sv tb/tb_polar_ref_pkg.sv tb/tb_polar_codec.sv \
        --top-module tb_polar_codec -Mdir obj && ./obj/Vtb_polar_codec

Replace `tb_polar_codec` with any testbench name. Each testbench ends with
`TB_RESULT checks=<n> failures=<m>`.

Run times:

* the end-to-end test at N = 1024 takes a few seconds;
* `tb_sc_workloads` takes under a minute.

To change the code length, set `N` on `polar_codec`, `sc_decoder` or
`polar_encoder`. To change the LLR width, edit `LLR_W` in `polar_pkg` and
`LMAX` in the reference package.
