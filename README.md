# A multiplexer-free partial sums unit for successive-cancellation polar decoders

A successive-cancellation (SC) decoder for a polar code of length N = 2^n
decides the bits u_0, u_1, ..., u_{N-1} one after another. To decide a bit it
needs log-likelihood ratios, and to compute those it needs *partial sums*:
exclusive-or combinations of the bits already decided. The partial sums
change every time a bit is decided. In the usual decoder they live in a
large register file that feeds the processing elements through wide
multiplexers. For large N this partial sums unit takes much of the area and
sets the clock frequency.

This RTL implements a partial sums unit built from two N/2-bit shift
registers and one AND and one XOR per bit. It needs no multiplexer. Each
processing element of a tree SC decoder is wired to one fixed register stage,
and it finds there every partial sum it will ever need, each at the step
where that partial sum becomes valid. The architecture follows the one
published by Berhault, Leroux, Jego and Dallet ("Partial Sums Computation
In Polar Codes Decoding"). The interface, the handshake, the reset behaviour
and the default size are this implementation's own choices.

## Partial sums as a running matrix product

Let kappa = [1 0; 1 1] and let kappa^(n) be its n-th Kronecker power, an
N x N lower-triangular 0/1 matrix. Its entry c_{i,j} is 1 exactly when every
set bit of j is also set in i, that is when (i & j) == j. This is Pascal's
triangle modulo 2. After step t, let U(t) be the vector of bits decided so far,
with zeros after position t. The vector

    P(t) = U(t) x kappa^(n)        (mod 2)

then holds every partial sum of the factor graph at some step t. Row m of the
graph only ever shows up in bit p_m. Bit m obeys

    p_m(t) = p_m(t-1) xor (u_t and c_{t,m}),

so each bit of P needs one register, one AND and one XOR.

Let S_{m,q} be the partial sum on row m, column q of the graph (0 <= q < n).
It is the (m - a)-th bit of the polar encoding of the decided block
u_a .. u_tau, where a = floor(m / 2^q) * 2^q and tau = a + 2^q - 1. It is
valid from step tau on:

    tau(m, q) = (floor(m / 2^q) + 1) * 2^q - 1.

Example for N = 4: S_{0,1} = u0+u1, S_{1,1} = u1, S_{0,2} = u0+u1+u2+u3,
S_{1,2} = u1+u3, S_{2,2} = u2+u3, S_{3,2} = u3.

## The shift-register datapath (`ps_shift_reg`)

The unit does not update p_m in place. It updates the value while moving it
one stage to the right:

    R_0 <= u_t and c_{t,0}
    R_j <= R_{j-1} xor (u_t and c_{t,j})        j >= 1

After step t, stage R_d therefore holds p_{t-d}(t) (for d <= t). Partial sum
S_{m,q} becomes valid at step tau. At that moment it sits in stage tau - m.

The shift also changes which coefficient each stage needs: stage j now needs
c_{t,t-j}. Pascal's triangle is symmetric, so c_{t,t-j} = c_{t,j}, and the
plain matrix row drives the shifted datapath unchanged.

The point of the shift is where partial sums end up. In a tree decoder,
processing element PE(x,y) (0 <= y < n, 0 <= x < 2^y) serves column y. It needs
the partial sums S_{x + k*2^(y+1), y} for all k. Substituting tau shows that
all of them land in the same stage:

    stage(PE(x,y)) = 2^y - 1 - x.

That index never exceeds N/2 - 1. So only the first N/2 stages are built, and
each PE reads one wire. For N = 8:

| PE     | partial sums it uses             | stage |
|--------|----------------------------------|-------|
| (0,0)  | S_{0,0} S_{2,0} S_{4,0} S_{6,0}  | 0     |
| (0,1)  | S_{0,1} S_{4,1}                  | 1     |
| (1,1)  | S_{1,1} S_{5,1}                  | 0     |
| (0,2)  | S_{0,2}                          | 3     |
| (1,2)  | S_{1,2}                          | 2     |
| (2,2)  | S_{2,2}                          | 1     |
| (3,2)  | S_{3,2}                          | 0     |

Stages beyond step t still hold bits from the previous code word. No PE reads
them before they are overwritten, so clearing between code words is optional.

## Generating the matrix rows (`kappa_gen`)

Storing kappa^(n) in a ROM is out of the question for N near 2^20. The rows
come instead from a second N/2-bit register chain that applies Pascal's rule
once per decided bit:

    M_0(t) = 1,    M_j(t) = M_{j-1}(t-1) xor M_j(t-1).

Only the N/2 leftmost columns are needed, because the datapath has N/2
stages. Truncated to those columns, row t + N/2 equals row t (Lucas'
theorem). So the same chain serves both halves of the code word and wraps
back to row 0 = (1, 0, ..., 0) by itself after N/2 steps. For N = 8 the
chain gives 1000, 1100, 1010, 1111, 1000, ... (column 0 first).

## Top level (`polar_psu`) and its interface

`polar_psu` holds the generator, the datapath and the fixed PE wiring.
`polar_psu_pkg` holds the default size and the index functions tau,
PE-to-stage and PE numbering.

| port       | dir | width | meaning                                               |
|------------|-----|-------|-------------------------------------------------------|
| `clk`      | in  | 1     | clock; all state changes on the rising edge            |
| `rst_n`    | in  | 1     | asynchronous active-low reset                          |
| `clear`    | in  | 1     | start a new code word; must not coincide with `u_valid`|
| `u_valid`  | in  | 1     | a decided bit is presented                             |
| `u_hat`    | in  | 1     | the decided bit u_t                                    |
| `ps_stage` | out | N/2   | the shift-register stages R_0 .. R_{N/2-1}             |
| `pe_ps`    | out | N-1   | `pe_ps[2^y-1+x]` is the partial sum for PE(x,y)        |

Timing:

- The unit accepts one bit per clock cycle.
- The edge that accepts u_tau makes every partial sum with that tau visible on
  `pe_ps`. The values hold until the next accepted bit, so the processing unit
  must use them before it presents its next decision. SC scheduling satisfies
  this naturally: the g-computations that need these sums come right after
  the decision.
- `u_valid` may stay low for any number of cycles (stall).
- After N bits the unit is ready for the next code word with or without
  `clear`.

The processing unit and the LLR memory of the decoder are not part of this
RTL. The ports above are where they connect. The tree-decoder scheduling,
LLR quantisation and memory organisation are left to the integrator.

## Parameters and size

| parameter            | default  | notes                                           |
|----------------------|----------|-------------------------------------------------|
| `polar_psu.N`        | 2^20     | code length, a power of two >= 4                |
| `kappa_gen.WIDTH`    | N/2      | set by the top; `WIDTH = N` gives full rows     |
| `ps_shift_reg.DEPTH` | N/2      | set by the top; `DEPTH = N` gives all N stages  |

The default of 2^20 is the code length the ROM-free generator is meant for.
At that size the unit has 2 x 2^19 flip-flops, 2^19 XOR gates in the
generator and 2^19 AND/XOR pairs in the datapath. The PE wiring adds no
logic.

## Verification

Every testbench checks itself and prints `TB_RESULT checks=... failures=...`.

- `kappa_gen_tb` compares the generator with the N = 8 rows listed above
  and with Lucas' rule (t & j) == j over several wraps, random stalls and a
  clear.
- `ps_shift_reg_tb` runs all 16 code words of N = 4 through a 4-stage
  datapath and checks every stage after every step. It also runs N = 64 with
  random bits against the unshifted in-place recurrence. The coefficients
  come from the testbench, not from the generator.
- `polar_psu_tb` runs end to end at N = 64 and at N = 8 (all 256 code words).
  `psu_scoreboard` rebuilds every partial sum with plain butterfly encoding
  of the decided blocks. It checks that each PE sees each partial sum it needs
  at its step and for as long as the unit stalls. The test counts
  back-to-back bits, stalls, a clear in the middle of a code word, code words
  started by wrap-around, and checks in the second half of a code word. It
  fails if any of these never happens, and it checks the one-bit-per-cycle
  rate.
- `polar_psu_large_tb` runs one full code word at N = 2^18 (about 2.4 million
  partial-sum checks, about two minutes). This is the largest size
  simulated. Simulation time grows with N^2, because every step touches all
  N/2 stages, so one code word at the default N = 2^20 would take roughly half
  an hour. The default size is compiled and linted but not simulated.

To run a test with Verilator:

    verilator --binary --timing --assert rtl/polar_psu_pkg.sv -y rtl -y tb \
        tb/polar_psu_tb.sv --top-module polar_psu_tb
    ./obj_dir/Vpolar_psu_tb

## Departures and own choices

- Handshake, reset and clear: the architecture describes no clocking. The
  `u_valid`/`clear` protocol, the reset values and the heap numbering of
  `pe_ps` are this implementation's choices.
- The generator recurrence is an exclusive-or of a register with its left
  neighbour. A passing remark in the source calls it an AND gate; the XOR
  follows the recurrence itself.
- Only the tree-decoder wiring is built. Line and semi-parallel SC decoders
  would group or multiplex PEs onto the same stages, but that is not
  implemented here.
