# Constant-time fixed-weight sampling for HQC-128, with the key-generation polynomial core

HQC is a code-based key-encapsulation scheme. Its key generation needs two
sparse "error" polynomials x and y of exact Hamming weight omega = 66 in
R = F2[X]/(X^n - 1), n = 17669, plus one dense random polynomial h, and it
computes z = h*y + x. Sampling the sparse polynomials is a security-critical
step: an earlier rejection-based sampler leaked the secret through its run
time. The current HQC sampler draws omega random 32-bit words,
maps each into a shrinking range with a biased modular reduction and then
repairs duplicates, so the run time no longer depends on the data. Done
directly, however, the duplicate check compares every coordinate with every
other one (O(omega^2)) and cannot be overlapped with the reduction.

This RTL implements the hardware scheme described in *Efficient Hardware
Implementation of Constant Time Sampling for HQC* (Schöffel, Feldmann, Wehn),
which removes both problems:

* **Duplicates are checked in explicit form.** The polynomial being sampled is
  kept as a bit vector in memory, so "is this coordinate already taken?" is one
  memory read instead of a comparison with all earlier coordinates.
* **The random words are used in reverse index order.** The first word from the
  PRNG is used for i = omega-1. The reduction of word k and the duplicate
  check of iteration k then need the same index, so both loops merge into one
  loop that a five-stage pipeline runs at one coordinate per cycle, directly
  on the PRNG output.
* **Memories are shared between sampling and multiplication.** x goes straight
  into the memory that later holds z, and the explicit copy of y is
  overwritten by h. z is accumulated on top of x and reduced modulo X^n - 1 as it
  goes, so three memories suffice (two of one polynomial each, one small list).

All of this is SystemVerilog-2017 under `rtl/`, with a self-checking testbench
per module under `tb/`. What follows the publication and what was chosen here
is stated in each file's header and summarised in
[Departures and limits](#departures-and-limits).

## The sampling loop

The loop that the hardware computes, for a stream of 32-bit words W:

```
v <- 0                                  (n-bit explicit polynomial)
for i = omega-1 downto 0:
    W           <- next PRNG word
    support[i]  <- i + (W mod (n - i))  (always >= i)
    if v[support[i]] = 1:  v[i] <- 1,          support[i] <- i
    else:                  v[support[i]] <- 1
```

Because support[i] >= i and every earlier write went to a position >= i+1,
bit i is always still clear when a duplicate redirects to it, so the result
has weight exactly omega. This loop produces the same polynomial as the HQC
reference sampler fed with the word array reversed (randomwords[omega-1-i] in
place of randomwords[i]). It is therefore **not seed-compatible** with the
reference sampler as specified: the same seed gives a different polynomial.

## The five-stage pipeline

`cw_sampler` chains three modules:

| Stage | Module | Work |
|---|---|---|
| Barrett 1 | `barrett_pipe` | P1 = W[17:0]*R, P2 = W[31:18]*R |
| Barrett 2 | `barrett_pipe` | q = (P1 + P2*2^18) >> 32 |
| Barrett 3 | `barrett_pipe` | X = (W + i) - q*(n - i) |
| Compare n / read | `unique_check` | if X >= n: X -= (n - i); read word X/64 |
| Check / write | `unique_check` | test bit; set it, or set bit i; write word |

**Barrett reduction with a moving modulus.** With R = floor(2^32/M), the
quotient estimate q = (W*R) >> 32 is at most one too small, so W - q*M lies in
[0, 2M) and one conditional subtraction finishes the reduction. Here
M = n - i changes every iteration. Storing 66 (or 75) 18-bit factors is
avoided by a recurrence: for HQC-128's range of M the factor drops by exactly
13 or 14 from one modulus to the next, so

    R_{i-1} = R_i - 14 + LUT[i],   LUT one bit per iteration,

starting from R_{omega-1} = floor(2^32/(n - omega + 1)) (`barrett_rlut`). The
table is not typed in: `hqc_pkg::make_rlut` derives it from n and omega at
elaboration, and an assertion checks that every step is 13 or 14, which holds
for n = 17669 and any omega up to 75.

**Timing.** One word enters per cycle whenever the PRNG has one; a missing
word becomes a bubble that moves through the pipeline. From `start` to
`done` a fixed-weight run takes omega + 7 cycles when words are available
every cycle (73 for omega = 66): omega issue cycles, four cycles of drain and
two cycles to write back the local words (next section), plus the done cycle.

## Keeping the memory accesses constant-time

The explicit polynomial lives in a memory of 64-bit words (277 words for
n = 17669). Each iteration reads the word that holds its coordinate in the
Compare stage and writes the updated word one cycle later. Two situations
would break a simple read-modify-write pipeline, and both are handled without
ever stalling, because a stall that depends on the data would reveal it.

**Back-to-back hits on the same word.** If iteration k+1's coordinate lies in
the word that iteration k writes in the same cycle, the memory returns the
old word. `unique_check` keeps the last written word and its address in a
register; when the address of the word now being checked matches, that
register is used instead of the memory data.

**Duplicates write somewhere else.** When a coordinate is already taken, bit
i must be set, and bit i usually lies in a word that was never read. Reading
it would cost an extra cycle only in the duplicate case. Since i < omega, all
such bits fall in the first LW = ceil(omega/64) words (two words for
omega = 66). These words are held in registers inside `unique_check`. Every
read and write of a word below LW uses the registers; so the duplicate
redirection can update the right word in the same cycle. Every write is also
mirrored to memory, so each iteration makes exactly one memory write, duplicate
or not. After the last iteration all LW local words are written to memory
whether or not they changed.

Together this gives the same access pattern for every input: one read and one
write per valid word, then LW write-back cycles. The addresses do depend on the
secret, as they must in explicit form; the scheme assumes a memory whose access
time does not depend on the address (no cache), as FPGA block or distributed
RAM is.

The memory must be zero at the start of a fixed-weight run; the
key-generation core clears it.

## Dense expansion of h

With `dense = 1` the sampler writes the PRNG output straight into memory: two
consecutive 32-bit words form one 64-bit word (first word in the low half),
words 0 to 276 in order, the top word cut to n mod 64 = 5 bits. This takes
2*277 + 1 = 555 cycles when words flow continuously.

## Random word supply

`prng_squeeze` sits between the Keccak permutation core and the sampler. The
core is external (only its request/acknowledge interface is defined here): when
the squeeze unit has used up its block it raises `perm_req`; the core answers
with `perm_ack` and the 17-lane (1088-bit, SHAKE256) rate part of the permuted
state. Lanes are taken one per cycle, split into two 32-bit words (low half
first) and pushed into a 4-word FIFO whose output feeds the sampler with a
valid/ready handshake. A block gives 34 words, so sampling 66 words crosses
block boundaries and waits for the permutation there. Those waits depend
only on the PRNG, never on the secret values. Absorbing the seed and keeping
the Keccak state are left to the core.

## Multiplying by a sparse polynomial

`ring_mult` computes z += h*y, with y given as its 66 coordinates c. Multiplying
by X^c modulo X^n - 1 is a cyclic rotation of h by c bits, so for each
coordinate the unit streams h cyclically, starting at bit s0 = (n - c) mod n,
and XORs it word by word into z:

1. read word s0/64 and drop its low s0 mod 64 bits;
2. read the following words up to word 276 (which holds only 5 bits), then
   words 0, 1, ... up to s0/64 - 1;
3. read word s0/64 again, keeping only its low s0 mod 64 bits.

A bit aligner collects these chunks of varying length: it holds a remainder
of fewer than 64 bits, appends each chunk, and whenever 64 bits are available
sends them as output word j = 0, 1, 2, ... The 5 bits left at the end form
word 276. The wrap at bit n happens while streaming, so each partial product
is already reduced. The output words go to z's memory as XOR writes
("modify access" of `poly_ram`), so the multiplier never reads z and x needs
no separate addition step: it is simply what z's memory holds at the start.

One h word is read per cycle; a coordinate takes 277 + 6 cycles, the whole
product 66 * 283 + 1 = 18679 cycles.

## Key-generation sequence

`hqc_keygen` instantiates everything and runs:

| Step | Cycles (omega = 66) | RAM0 (277x64) | RAM1 (277x64) | RAM2 (66x15) |
|---|---|---|---|---|
| clear | 277 | 0 | 0 | - |
| sample x (secret stream) | 73 + PRNG waits | x | - | - |
| sample y (secret stream) | 73 + PRNG waits | x | y explicit | y support |
| switch to public stream | a few | | | |
| expand h (public stream) | 555 + PRNG waits | x | h | y support |
| multiply | 18679 | z = x + h*y | h | y support |

`perm_stream` tells the permutation core which seed stream is asked for (0:
the secret seed for x and y, 1: the public seed for h). Before switching,
the squeeze unit is stopped, its outstanding request is allowed to finish and
its buffer is emptied. After `done`, z, h and the support of y can be read
through the `ext_*` ports. With a permutation core of 24 cycles latency, one
run takes 20163 cycles, whatever the random data.

## Interfaces and timing at a glance

All blocks use one clock and an asynchronous active-low reset `rst_n`;
memories are not reset. Memories have one-cycle synchronous reads and return
the old data when the same word is written in the same cycle.

| Module | Start/end | Latency |
|---|---|---|
| `barrett_rlut` | `init`, `step` | 1 cycle |
| `barrett_pipe` | `in_valid` -> `x_valid` | 3 cycles, no back-pressure |
| `unique_check` | `x_valid` -> memory write, `flush` | 1 cycle after the read; LW cycles of flush |
| `cw_sampler` | `start` -> `done` | omega + 7 (fixed weight), 2*NWORDS + 1 (dense), plus PRNG waits |
| `prng_squeeze` | `perm_req`/`perm_ack`, `word_valid`/`word_ready` | one lane per cycle into the FIFO |
| `ring_mult` | `start` -> `done` | omega*(NWORDS + 6) + 1 |
| `hqc_keygen` | `start` -> `done` | sum of the above |

## Parameters

`hqc_pkg` holds the defaults: N = 17669, OMEGA = 66, MW = 64 (memory word),
NWORDS = 277, RW = 18 (Barrett factor), RATE_LANES = 17. Modules take N,
OMEGA and the widths as parameters. The R recurrence holds only where the
factor steps by 13 or 14; the elaboration-time assertion in `barrett_rlut`
flags any other choice. OMEGA = 75 (HQC-128's weight for encapsulation)
works; the testbench of `barrett_rlut` checks both 66 and 75.

## Departures and limits

* **Multiplier speed.** The published multiplier reaches about 4900 cycles
  for this product with a windowing method that is not described. The
  streaming multiplier here is exact but takes 18679 cycles, and so the whole
  key-generation core takes about 20000 cycles instead of about 6500.
* **Final Barrett subtraction.** The published pipeline sketch shows a
  subtraction of n in the Compare stage. Since X carries the offset i, the
  test X >= n is right but the amount subtracted must be n - i (as in the
  Barrett algorithm itself); that is what is built.
* **Local words** are written to memory at every update as well as at the
  end, so each iteration performs exactly one memory write. The publication
  says only that they are written at the end.
* **Own choices** where the publication is silent: 64-bit memory words, the
  request/acknowledge interface to the permutation core, a 4-word FIFO, the
  order of words within a lane, the packing of h, clearing the memories before
  sampling, start/done pulses, and the reset.
* **Not included:** the Keccak permutation itself, seed handling and key
  encoding of HQC key generation, and the earlier (O(omega^2)) sampler the
  publication compares with.
* **Verification.** Every module's testbench compares against values computed
  in the testbench (with `%`, bit-by-bit polynomial arithmetic and an
  independent Barrett estimate), and each one was shown to fail on a
  deliberately broken copy of its module. The end-to-end test uses a stand-in
  for the permutation core (xorshift generators, not Keccak), so it checks the
  datapath and sequencing but not SHAKE output; nothing here has been run on
  an FPGA.

## Files and simulation

```
rtl/hqc_pkg.sv        constants, Barrett factor and LUT functions
rtl/barrett_rlut.sv   R register and one-bit recurrence
rtl/barrett_pipe.sv   Barrett stages 1-3
rtl/unique_check.sv   compare/read and check/write stages, forwarding, local words
rtl/cw_sampler.sv     sampler: control, pipeline, dense mode
rtl/prng_squeeze.sv   lane squeeze and word FIFO
rtl/poly_ram.sv       explicit polynomial memory with XOR write
rtl/support_ram.sv    support list memory
rtl/ring_mult.sv      streaming dense-by-sparse multiplier
rtl/hqc_keygen.sv     top: key-generation polynomial core
tb/tb_<module>.sv     one self-checking testbench per module
```

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and stops; a watchdog
ends it with a failure if it hangs. To run one with Verilator, from the
directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing -Irtl -y rtl +libext+.sv rtl/hqc_pkg.sv \
          tb/tb_hqc_keygen.sv --top-module tb_hqc_keygen
./obj_dir/Vtb_hqc_keygen
```

`tb_hqc_keygen` runs ten complete key generations at the full HQC-128 size in
a few seconds, and also counts that the stall, duplicate, forwarding, local-word,
final-subtraction and stream-switch cases all occurred. Add `--assert` to check
the handshake assertions embedded in the RTL.
