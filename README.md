# Multi-rate IR-QC-LDPC reconciliation for QKD: encoder and decoder RTL

In quantum key distribution (QKD), Alice and Bob end up with two copies of a
sifted key that differ in a few percent of their bits. *Information
reconciliation* removes those differences by publishing as little as
possible over the authenticated classical channel. Here this is done with an
LDPC code in one pass:

1. Alice treats a block of her key as the information part of a codeword and
   computes its parity bits.
2. She sends only the parity.
3. Bob puts Alice's parity next to his own, noisy copy of the key. The result
   is a codeword seen through a binary symmetric channel in the key bits and
   a perfect channel in the parity bits, and he decodes it back to Alice's
   key.

The more errors the link has, the more parity is needed. So the design
supports four code rates from one code family, chosen per frame:

| rate | block rows m | key bits per frame | parity bits sent |
|------|--------------|--------------------|------------------|
| 1/2  | 12           | 972                | 972              |
| 2/3  | 8            | 1296               | 648              |
| 3/4  | 6            | 1458               | 486              |
| 5/6  | 4            | 1620               | 324              |

In every case the codeword has n = 24 block columns of z = 81 bits, which
makes 1944 bits. The RTL follows the architecture of Cheng, Lu, Xie, Shen,
Liao and Peng, *"Multi-Code-Rate Correction Technique with IR-QC-LDPC: An
application to QKD"*:

- a recursive-accumulate encoder for dual-diagonal parity;
- a normalized min-sum decoder with one small RAM per base-matrix block;
- rotated read addresses instead of a shuffle network.

The sections below say where this RTL follows that paper and where it makes
its own choices.

## 1. The code

The parity-check matrix H is an array of z x z blocks. Each block is either
all-zero (written -1) or an identity matrix rotated by a *shift* h. This
design uses one shift convention everywhere (RTL, reference model and this
text):

> a block with shift h connects check row r of its block row to variable
> column (r + h) mod z, so it maps a z-bit vector v to w[r] = v[(r+h) mod z].

For a code with m block rows, the base matrix (`h_base`, built by
`ldpc_pkg::hbase`) is defined as follows.

- **Information part**, columns j < n-m: every block is present, with shift
  a^i * b^j mod z. Here a = 2 and b = 5, two primes below z.
- **Parity part**, columns n-m .. n-1:
  - Column n-m+t for t >= 1 has identities in block rows t-1 and t. This is
    the dual diagonal.
  - The first parity column has shift d = 1 in rows 0 and m-1 and an
    identity in row x = m/2.

The construction is the paper's own (its mother matrix). The values of a, b,
d and x are choices of this design:

- a = 2 and b = 5 give the fewest length-4 cycles among small primes at
  z = 81;
- x = m/2 puts the middle entry at the centre.

The paper's FPGA build uses a fixed base matrix taken from an IEEE standard.
This RTL does not use that matrix: it builds all four rates from the
construction instead. That is the main reason its error-correction
performance differs from the paper's (section 7).

`h_base` returns the whole 12 x 24 table for the selected rate. Each entry is
a four-way mux of constants worked out at elaboration. Rows i >= m are marked
absent, so hardware sized for rate 1/2 idles them at higher rates.

## 2. Encoder (`ldpc_encode`)

Write lambda_i = sum_j H_ij s_j for block row i, summed over the information
groups s_j. The dual-diagonal rows then read:

    row 0:        lambda_0   + P^d p_0 + p_1         = 0
    row i:        lambda_i   + p_i + p_{i+1}         = 0   (i != 0, x, m-1)
    row x:        lambda_x   + p_0 + p_x + p_{x+1}   = 0
    row m-1:      lambda_m-1 + P^d p_0 + p_{m-1}     = 0

Adding all rows cancels everything but p_0, so p_0 = sum of all lambda_i.
The other parity groups follow one at a time.

In hardware, one information group (81 bits) arrives per clock. All m row
accumulators update at once, each XORing in the group rotated by its block's
shift (12 barrel rotators). After the last group, one parity group leaves per
clock:

    clock:    1..n-m            n-m+1   n-m+2   ...   n
    s_in      s_0 .. s_(n-m-1)
    p_out                        p_0     p_1     ...   p_(m-1)  (p_last)

A rate-2/3 frame takes 16 + 8 = 24 clocks. The group-per-clock input is this
design's choice. The paper's 183 Mbit/s encoder figure depends on interfaces
it does not describe, so this encoder is much faster than needed.

## 3. Decoder memory organisation and the address trick

This is the part of the design that takes the most explaining.

**Three RAM arrays** (`msg_ram_array`). Each RAM is 81 words of 8 bits, with
one write port and one synchronous read port.

| array      | RAMs    | word k of RAM (i,j) holds                          |
|------------|---------|----------------------------------------------------|
| Init-Array | 1 x 24  | channel message of bit k of group j                |
| C2V-Array  | 12 x 24 | check-to-variable message of **check row k** of block (i,j) |
| V2C-Array  | 12 x 24 | variable-to-check message of **variable column k** of block (i,j) |

Each block has exactly one edge per check row and one per variable column,
so a block's 81 edges fit one RAM exactly.

**Both processors write at the natural address k.** They differ in what k
means:

- A **check-node step k** handles check row k of every block row. It writes
  C2V word k of every block.
- A **variable-node step k** handles variable column k of every block column.
  It writes V2C word k of every block.

Each side therefore finds the other side's messages at a rotated address,
different for every block. `addr_convt` computes these (paper Eq. 18 and 19),
purely combinationally:

    check step k, block shift h:    reads V2C word (k + h) mod z
    variable step k, block shift h: reads C2V word (k - h) mod z

All 288 blocks get their own read address in the same clock. So the decoder
needs no permutation network between processors and memories: the rotation is
done by addressing. The C2V-Array is cleared while the Init-Array is filled.
That makes the first variable-node pass produce V2C = channel message and the
hard decision of the raw key.

**Schedule (flooding).** A phase runs k = 0 .. 80 on consecutive clocks:

    clock c      read addresses for k = c presented to all RAMs
    clock c+1    RAM data valid; processor computes; result registered
    clock c+2    result written at address k of the other array

A phase therefore lasts z + 2 = 83 clocks. Writes of a phase never touch the
array it reads, so nothing stalls. One iteration is:

1. a check-node phase;
2. a variable-node phase;
3. a parity check, which takes 3 clocks.

That is 2z + 7 = 169 clocks.

## 4. Processors and number format

All messages are 8 bits. A positive value means "bit is 0".

- **Channel messages** (`data_load`) are sign-magnitude: {bit, magnitude}.
  - Key bits use the run-time magnitude `llr_mag`. A good value is
    log((1-e)/e) scaled; 24 is used in the tests.
  - Alice's parity bits use `par_mag` (100 in the tests), because they arrive
    without error.

  The {bit, magnitude} form and the run-time magnitudes are this design's
  choice; mapping the error probability to a magnitude is left to the user.
- **Check-node processor** (`cnu_process`), one per block row, normalized
  min-sum. It works in sign-magnitude and keeps the smallest magnitude, the
  second smallest, the position of the smallest and the XOR of all signs. For
  block j it outputs:
  - magnitude = min over the others, times alpha;
  - sign = XOR of the other signs.

  alpha = 0.4 is the paper's value. It is applied as (x * 102 + 128) >> 8.
- **Variable-node processor** (`vnu_process`), one per block column:
  1. Convert the channel and C2V messages to two's complement (S2C).
  2. Add them up in 12 bits to get the posterior Q.
  3. Form each V2C as Q minus its own C2V, saturated to +-127 and converted
     back to sign-magnitude (C2S).

  The hard decision of the bit is Q < 0.

The paper's prose describes the check-node minimum as taken over other block
*rows* and the variable-node sum as taken over other block *columns*. That is
the reverse of min-sum, and it would not decode. This RTL implements standard
normalized min-sum: check nodes combine the other blocks of their block row,
and variable nodes combine the other blocks of their block column.

## 5. Decision and iteration control

`decode_judge` holds all 1944 hard decisions in flip-flops, written by the
variable-node processor. On request it evaluates every parity check in one
clock: each block row XORs the decision vectors of its blocks, each rotated
by the block's shift. The paper only says the decision is checked against
H x = 0; the fully parallel check is this design's choice.

`iter_control` sequences each frame:

1. After the Init-Array fill, run one variable-node pass and check.
2. While the check fails and fewer than `iter_max` iterations have run
   (10 in the paper), run another iteration and check again.
3. Stream the decoded key out, one group per clock, and pulse `done` with
   `success` and `iters`.

A frame that hits the limit is reported as failed. Its output is whatever the
last decision was.

**Latency.** From the last input group to `done`, a frame takes

    2z + 8 + 169 * iterations + (n - m)   clocks

which is 186 + 169 x iterations at rate 2/3. `data_load` keeps a full-frame
buffer (24 x 81 flip-flops), so the next frame loads while the current one is
decoded. Only the 81-clock Init-Array fill waits for the decoder.

## 6. The system (`ldpc_system`)

`ldpc_system` wires up the FPGA test system described in the paper:

    key_source --Alice's key--> ldpc_encode --parity--+
         |                                            v
         +------Bob's key (with errors)-----------> ldpc_decoder --> corrected key
    global_ctrl: starts frames, latches the rate, enables the key source

- `key_source` stands in for the QKD link. It has one 32-bit xorshift
  generator per bit lane. Bit 31 of each lane is Alice's key bit, and the low
  16 bits, compared with `ber_thr`, decide whether Bob's copy of the bit is
  flipped (error probability `ber_thr`/65536). The paper names this block but
  does not describe it.
- `global_ctrl` starts a frame whenever `run` is high and both the encoder
  and the decoder's input buffer are free. It then enables the key source for
  the n-m groups of the frame.

Bob's key groups and Alice's parity groups reach the decoder in different
clocks, and an assertion checks that they never collide.

Top-level ports are plain signals and packed structs. A z-bit group on a
stream is `grp_t` = {valid, idx, data[80:0]}.

## 7. Behaviour measured in simulation, and how it compares

With llr_mag = 24, par_mag = 100 and iter_max = 10, at full size:

| point                  | frames | corrected | mean iterations | from the paper        |
|------------------------|--------|-----------|-----------------|-----------------------|
| rate 2/3, 2% errors    | 30     | 30        | 2               |                       |
| rate 2/3, 3% errors    | 30     | 29        | 4               |                       |
| rate 2/3, 4% errors    | 30     | 15        | 6               |                       |
| rate 2/3, 6% errors    | 20     | 0         | -               | FER < 1% at 6%        |
| rate 5/6, 1.04% errors | 20     | 17        | 5               | FER < 1% at 1.04%     |
| rate 1/2, 3% errors    | 30     | 30        | 2               |                       |
| rate 3/4, 2% errors    | 30     | 30        | 4               |                       |

The paper reaches 6% at rate 2/3 with its fixed standard matrix. The dense
information part of the construction used here (every information block
present, check degree 18-19 at rate 2/3) is much weaker: about 3% is its
limit at rate 2/3. To reach the paper's performance, replace `hbase` in
`ldpc_pkg` with a sparser base matrix that keeps the same dual-diagonal
parity part. Nothing else in the RTL depends on the matrix entries.

The decoding throughput at 25 MHz is 1296 key bits per (186 + 169 x
iterations) clocks. That is about 31 Mbit/s at 5 iterations and 18 Mbit/s
when every frame runs all 10. The paper reports 27.85 Mbit/s on average at
6%.

## 8. Other departures from the paper

- **Rates at run time.** The rate is chosen per frame. The memories are sized
  for rate 1/2 (12 x 24 RAMs per message array) rather than the paper's rate
  2/3 build (8 x 24).
- **Parity-column equations.** The paper's two equations for the base matrix
  differ in two places:
  - the shift exponents (a^(i-1) vs a^i);
  - the first parity column's middle entry.

  This RTL follows the form the encoding equations need: a^i * b^j, and an
  identity at row x.
- **Handshakes, widths, pipeline depths and reset.** These are not given in
  the paper. This design uses valid-only streams with ready outputs,
  asynchronous active-low reset, and one pipeline register per processor.
- **alpha.** It is a build-time constant, not a run-time setting.

## 9. Files

`rtl/` (one module or package per file):

| file | contents |
|------|----------|
| `ldpc_pkg.sv` | sizes (Z=81, N=24, M_MAX=12, 8-bit messages), alpha, rate enum, `grp_t`, `hentry_t`, base-matrix function, rotation, C2S/S2C |
| `h_base.sv` | base-matrix table for the selected rate |
| `key_source.sv` | test key generator with error injection |
| `ldpc_encode.sv` | encoder |
| `data_load.sv` | decoder input unit, frame buffer, Init-Array fill |
| `msg_ram_array.sv` | array of 81 x 8 RAMs (Init, C2V and V2C arrays) |
| `addr_convt.sv` | rotated read addresses |
| `cnu_process.sv` / `vnu_process.sv` | check- and variable-node processors |
| `decode_judge.sv` | hard decisions, parity check, key read-out |
| `iter_control.sv` | decoder phase and iteration controller |
| `ldpc_decoder.sv` | the decoder |
| `global_ctrl.sv` | frame sequencer |
| `ldpc_system.sv` | top level |

`tb/` has one self-checking testbench per module (`tb_<module>.sv`) and two
system-level tests, all at the full code size:

- `tb_ldpc_system` is the end-to-end test. It runs every rate and covers
  frames decided without iterating, frames corrected by iterating, frames
  that fail at the limit, and loading that overlaps decoding.
- `tb_workload_qber` runs the two operating points of the table above.

`ldpc_ref_pkg.sv` is an independent bit-level model of the code: base
matrix, encoder and syndrome. The testbenches use it to make codewords and to
judge results. Each testbench prints `TB_RESULT checks=N failures=F`.

To simulate one test with Verilator 5, run from the directory above `rtl/`
and `tb/`:

    verilator --binary --timing --assert --top-module tb_ldpc_system \
        -y rtl -y tb +libext+.sv rtl/ldpc_pkg.sv tb/ldpc_ref_pkg.sv \
        tb/tb_ldpc_system.sv -Mdir obj_sys
    obj_sys/Vtb_ldpc_system

Every testbench finishes in seconds. The code sizes live in `ldpc_pkg`:

- Changing Z or N changes every module.
- The base-matrix constants (`H_A`, `H_B`, `H_D`) and `hbase` define the
  code.
- The reference model in `tb/ldpc_ref_pkg.sv` must be changed to match.
