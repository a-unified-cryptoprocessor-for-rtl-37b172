# A unified lattice cryptoprocessor for Saber and Dilithium

Saber (a key-encapsulation scheme) and Dilithium (a signature scheme) look
different on paper but spend almost all of their time on the same three things:
multiplying polynomials of 256 coefficients, running Keccak, and walking over
polynomials coefficient by coefficient. This design builds one small processor
that does all three for both schemes, and lets a short program decide which
scheme, security level and routine it runs.

The key trick is in the multiplier. Dilithium's modulus q = 2^23 - 2^13 + 1
supports the number-theoretic transform (NTT), so multiplication there costs
O(n log n). Saber computes modulo a power of two, which has no NTT. But Saber
always multiplies a public polynomial (13-bit coefficients) by a small secret
one (coefficients in [-5, 5]), so the true integer product is bounded. If the
NTT runs modulo a prime larger than twice that bound, the integer result can be
recovered from the residue and then reduced modulo 2^13. Using a prime of the
same shape as Dilithium's, 2^24 - 2^14 + 1, lets a single modular-reduction
circuit and a single butterfly serve both schemes. With this 24-bit prime the
recovery is exact whenever the product's coefficients stay below (q-1)/2. That
holds always for FireSaber and with overwhelming probability for Saber and
LightSaber. The 25-bit prime 2^25 - 2^14 + 1 would make it exact in every case,
and the RTL takes it as a parameter (`SAB_X = 25`), but that setting is not
tested.

## Processor overview

```
 host ── comm_ctrl ──┐                        ┌── data_memory: 4 sets x 2560 x 64 bit
                     │                        │      (sets 0,1 = pair 0; sets 2,3 = pair 1)
 program_controller ─┼── poly_arith_unit ─────┤
   (1024 x 108-bit   ├── sha_shake_unit ──────┼── mem_bus (pair-wise crossbar)
    instruction RAM) └── coef_stream_unit ────┘
```

There are three engines:

* `poly_arith_unit`: NTT, inverse NTT, and coefficient-wise multiply, add and
  subtract, on two unified butterflies.
* `sha_shake_unit`: SHA3-256/512 and SHAKE-128/256. Samplers sit on its output
  stream, so it writes finished polynomials into memory.
* `coef_stream_unit`: the linear-time, scheme-specific instructions.
  * Saber: AddRound, AddPack, UnPack, Verify, CMOV, COPY.
  * Dilithium: Power2Round, Decompose, MakeHint, UseHint, norm check,
    Counter_ref, Refresh, Write, SampleInBall, Encode_H, pack and unpack
    (which also serves Saber's BS2POLVEC).

Each engine works on one *pair* of memory sets at a time. A polynomial lives in
one pair: 64 words in each set, two coefficients per word. While the arithmetic
unit uses one pair, Keccak can fill the other. That is how polynomial
generation overlaps multiplication, which is the processor's main source of
speed-up over running the instructions strictly one after another.

## Unified modular reduction (`mod_red`)

A product c < q^2 is reduced using 2^X ≡ 2^Y - 1 (mod q), for q = 2^X - 2^Y + 1.
Split c into a low part L = c[X-1:0] and a high part H = c >> X. Then
H·2^X ≡ H·2^Y - H. Applying the same identity once more to the parts of H·2^Y
that are still at or above 2^X gives six partial results:

    L,  H0·2^Y,  H1lo·2^Y,  H2·(2^Y - 1),  -H,  -H1

Here H = H1·2^(X-Y) + H0, and H1 is split again into its low bits H1lo and its
top H2. For both primes, and for the 25-bit one, the sum of the six terms lies
in [-q, 3q); this was checked exhaustively over the bit ranges. So one adder
tree is followed by a register. After that, a choice among +q, 0, -q and -2q
gives the result in [0, q). `sel_saber` chooses which set of shifts feeds the
adder. Latency: one clock.

## Butterfly (`butterfly`)

There is one pipelined multiplier (5 register stages), then the reduction (1),
then an adder/subtractor stage. Operands a and b travel alongside in a 7-clock
delay line. The modes are:

| mode | outputs |
|------|---------|
| CT  | a + w·b, a − w·b (forward NTT) |
| GS  | (a + b)/2, w·(a − b)/2 (inverse NTT) |
| MUL | w·b |
| ADD | a + b |
| SUB | a − b |

In GS mode the difference is formed *before* the multiplier. Halving mod q is a
shift plus (q+1)/2 when the value is odd. Applying it in every inverse stage
removes the final multiplication by 1/256. Latency: 8 clocks, one operation per
clock.

## The NTT memory layout (`ntt_ctrl`)

This is the part that needs the most care. Every clock, each of the two
butterflies needs one pair (x[j], x[j+len]). The memory delivers one 64-bit word
(two coefficients) from each of the two sets per clock. So the two coefficients
of every pair must sit at the *same address and the same half* of the two sets,
in every stage, with no reordering passes.

Think of the 8-bit coefficient index as being mapped onto 8 storage bits:
1 set bit, 1 half bit and 6 address bits. A stage pairs coefficients that
differ in one index bit, the "pairing bit". The pair is fetched together exactly
when the pairing bit is stored in the set bit. So, while writing back the
results of a stage, the controller swaps the storage position of the *next*
stage's pairing bit with the set bit. That gives two cases:

* **The swapped bit is an address bit.** The two results of one butterfly
  belong in the same set, at two addresses. The read order is chosen so that
  consecutive clocks produce results for alternating sets. One result word is
  then held for a clock, so each set takes exactly one write per clock.
* **The swapped bit is the half bit.** This happens in one stage of each
  transform. Each butterfly's two results form one whole word. The last stage
  writes in place.

Starting from natural order (coefficient 2k and 2k+1 in word k, word k in set
k[6]), the forward transform ends with set = i[0], half = i[1],
address = i[7:2]. Coefficient-wise multiplication does not care about the order,
and the inverse transform walks the same permutations backwards to natural
order.

Twiddles use the usual table zeta[k] = r^brv8(k), where r is a primitive
512th root of unity:

* r = 1753 for Dilithium;
* r = 3091885 = 5^((q−1)/512) for 2^24 − 2^14 + 1.

The forward stage s uses zeta[2^s + group]. The inverse uses
−zeta[2^(8−b) − 1 − group]. The table is computed at elaboration time, so no
data file is needed.

Timing: the controller lets the 8-clock butterfly pipeline drain before the next
stage reads what the previous one wrote. One transform therefore takes
8·(64 + 11) + 1 = 601 clocks from start to done, where an ideal overlapped
schedule would take 512. Coefficient-wise operations read operand A and then
operand B on alternate clocks, and take 128 + 11 clocks.

## Keccak and the samplers (`keccak_core`, `sha_shake_unit`, `binomial_sampler`)

`keccak_core` is a plain Keccak-f[1600] that runs one round per clock.

### Absorb and squeeze

* Absorb reads a byte string from memory, as little-endian 64-bit words, and
  XORs one rate block into the state. It adds the FIPS 202 padding and permutes
  after each block.
* Squeeze copies the rate into a 1368-bit output buffer (1344 + 24) and takes
  one chunk per clock from the buffer's low end. Depending on the format, a
  chunk becomes:
  * a 64-bit word;
  * a pair of 13-bit Saber coefficients;
  * a centred binomial sample (mu = 10, 8, 6);
  * a 23-bit candidate for Dilithium's uniform rejection sampler, which accepts
    it only if it is below q;
  * a 4-bit candidate for the eta sampler;
  * an 18- or 20-bit mask coefficient.

  Accepted coefficients are packed two per word and written in the natural
  polynomial layout.

### Left-over bits

The rate is not a multiple of 26 (or of 18 and 20). So when the buffer runs low,
up to 24 unused bits remain. For the Saber formats this count is always even.
Rather than build a 13-way variable shifter, the unit works as follows:

1. It copies the top 24 bits into a small left-over buffer.
2. It left-aligns them there with fixed shifts by 4 and by 2.
3. It loads the buffer as {new rate, left-over}.
4. It closes the gap with the same fixed 4- and 2-bit shifts, one step per
   clock.

The left-over bits therefore come out first, exactly as if the output were one
continuous stream. A new squeeze continues the stream where the last one
stopped.

## Scheme-specific instructions (`coef_stream_unit` and its datapaths)

For address j = 0..63 the unit works as follows:

* It reads operand A at a_base + j from both sets on one clock, and operand B at
  b_base + j on the next. That gives four coefficient lanes every two clocks:
  128 clocks per polynomial, plus a 5-clock tail.
* The first result is written to d_base + j when B arrives. A second result,
  used for r0 of Decompose/Power2Round, is written to d2_base + j one clock
  later.
* A length field shortens the run for short strings.

The datapaths:

* `saber_round`: AddRound, AddPack, UnPack. It first lifts the NTT residue to
  (−q/2, q/2] and takes the low bits of that integer. This is where the
  multiplication result is brought back from the NTT prime to Saber's
  power-of-two moduli.
* `saber_verify_cmov`: a constant-time comparison into a sticky `differ` flag.
  CMOV selects B when the flag is set; COPY always passes A.
* `dil_decompose`: Decompose for both gamma2 values, using the multiply-shift
  form, and Power2Round. MakeHint and UseHint reuse the same Decompose circuit.
  A is decomposed when it arrives, and for MakeHint B is decomposed when it
  arrives.
* `dil_makehint`: the hint bits and their running weight. Counter_ref zeroes
  the weight when the loop has failed.
* `dil_usehint`: UseHint.
* `dil_sampleinball`: the challenge polynomial. It does not follow the
  streaming schedule. It asks for the stored SHAKE-256 output one word at a
  time (even set, consecutive addresses). The first word gives the sign bits;
  then it takes one byte per clock. A byte b is accepted while b <= i, for
  i = 256 − tau .. 255; then c[i] takes c[b] and c[b] becomes ±1. c lives
  in a local 256 × 2-bit array, cleared at start, and is written out as
  64 word pairs in the normal layout. So, unlike the in-place scheme that
  needs a zero-filled target, no Refresh is required first. tau is in
  immediate bits [7:1].
* `dil_encode_h`: packs w1 for hashing. It reads word k of the polynomial
  at clock k and appends 4 or 6 bits per coefficient, least significant
  first, to a bit accumulator. Every full 64 bits are written to the next
  address of the even set. That is the layout the Keccak wrapper absorbs
  from, so a program can place mu just before the string and hash both in
  one absorb.
* `dil_pack_unpack`: converts between polynomials and byte strings with
  W-bit fields, W = 1..20. Optionally the field holds 2^S − c instead of c.
  Dilithium's offsets (eta, 2^12, gamma1) are all powers of two, so one
  shifter covers them. Unpacking requests string words into a 128-bit bit
  buffer and emits one polynomial word (two coefficients) whenever 2W bits
  are present. Packing appends two fields per clock and writes every full
  64 bits. Saber's BS2POLVEC is the same unpack with W = 13 (or 10) and no
  offset.
* SampleInBall, Encode_H, unpack and pack share stream opcode 15, selected
  by immediate bits [1:0], because the 4-bit opcode field is full.
* `dil_verify`: a sticky fail flag. It is set when any centred |coefficient|
  reaches the bound, or when the hint weight exceeds omega.

## Program controller and instruction word

The processor is programmed, not hard-wired. An instruction word is 108 bits
(1024 words, three 36-kbit RAMs). It holds four control bits and two 52-bit
slots. Both slots of a word start in the same clock. The next word is fetched
only after every engine started by this one has finished. A word with two slots
therefore runs two instructions in parallel; a word with one slot runs one.

| bits | field |
|------|-------|
| 107:104 | control: bit0 HALT, bit1 MARK (loop start), bit2 LOOP (jump to MARK if the Dilithium fail flag is set), bit3 CONFIG |
| 103:52 | slot 1 |
| 51:0 | slot 2 |

Each slot is laid out as follows:

| bits | field |
|------|-------|
| 51:50 | engine: 0 none, 1 SHA-SHAKE, 2 arithmetic, 3 stream |
| 49:46 | opcode (`sh_cmd_e`, `pa_op_e`, `cs_op_e` in `cp_pkg`) |
| 45 | memory-set pair |
| 44:36 | A/input base, in units of 8 words |
| 35:27 | destination base, in units of 8 words |
| 26:0 | engine-specific, listed below |

The engine-specific bits 26:0 are:

* **SHA-SHAKE:** mode [26:25], format [24:22], length [21:10], mu [9:6],
  eta [5:3], gamma1 = 2^19 [2].
* **Arithmetic:** B base [26:18].
* **Stream:** length [26:19], B base [18:10], second destination [9:1].
  Write stores [26:0]. The norm check takes its bound from [22:0].
  Opcode 15 uses [1:0] to choose among SampleInBall (0, tau in [8:2]),
  Encode_H (1), unpack (2) and pack (3). Pack and unpack take
  W = [13:9], an offset enable at [14] and S = [19:15].
* **CONFIG word:** slot 1 bits [0] Saber prime, [3:1] eps_T, [4] gamma2 =
  (q−1)/88, [14:5] omega.

The signing loop of Dilithium is a MARK word, the loop body, and a LOOP word
that jumps back while the fail flag is set. The program must not give both slots
of a word the same engine or the same pair; an assertion reports this.

## Memory, bus and host port

* `data_memory` has four simple-dual-port sets of 2560 × 64 bits, read latency
  one clock.
* `mem_bus` connects each engine (and the host) to the pair it owns. Owners are
  ranked by priority: arithmetic, SHA-SHAKE, stream, host. It is a pair-wise
  crossbar, not a shared bus.
* `comm_ctrl` is the host port, with 14-bit addresses (set, word):
  * memory write;
  * memory read (data two clocks later, with `h_rvalid`);
  * program write (two beats per 108-bit word);
  * start.

  It accepts commands only while no program runs.

## Timing summary

| operation | clocks |
|-----------|--------|
| NTT / INTT of one polynomial | 601 start to done |
| coefficient-wise multiply / add / sub | 139 |
| stream instruction on one polynomial | 133 |
| SampleInBall | about 9 per 8 stream bytes, + 64 to write out |
| Encode_H, pack | 133 |
| unpack | about 128 + string words |
| Keccak permutation | 25 (24 rounds) |
| absorb of one block | rate/64 words × 2 + 24 + 3 |

## Where this design departs from the paper's description

* A transform takes 601 clocks instead of 512, because the pipeline drains
  between stages.
* The Keccak wrapper takes every output width from one output buffer. The
  described 192-bit side buffer, used for 4-, 24- and 64-bit chunks, is not
  built, so raw output is one 64-bit word per clock.
* The Keccak core is a straightforward round-per-clock core.
* The scheme-specific instructions are grouped into one streaming engine with a
  shared schedule, not separate units.
* The 4 control bits, the slot encoding, the host protocol and the address
  granularity are this design's own.
* Instructions are synchronised per word: both slots start together and the
  next word waits for both.
* The paper splits the instructions into two sets and pairs one
  instruction from each set per word. Here the pairing rule is "two
  different engines on two different memory-set pairs". For example, the
  paper puts Pack-Unpack and Decompose/Verify in the first set, next to
  Keccak. Here they are stream-engine instructions, so they cannot run
  alongside MakeHint or UseHint. They can still run alongside Keccak or the
  NTT.
* SampleInBall works on a local array instead of in place in zero-filled
  memory.
* BS2POLVEC, pack/unpack, SampleInBall and Encode_H are not separate
  units. They share the stream engine, so they do not run in parallel with
  the other stream instructions.
* The hint vector's position-list encoding is not a fixed-width field and is
  not built; the host packs it.
* All Saber and Dilithium routines map onto the instruction set, but only
  the pieces listed under Verification have been simulated. No complete
  KEM or signature has been run.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. References are computed
independently inside the testbench:

* modular results with 64-bit integers;
* a reference NTT and a schoolbook negacyclic product;
* Keccak-f values of the standard permutation;
* SHA3/SHAKE digests and checksums of the standard functions;
* Decompose and hints written from the scheme specifications, not from the
  RTL's shortcuts.

Cycle counts are checked where a rate or latency is stated above.

`tb_crypto_top` runs the whole processor at its default size. It loads data and
an 18-word program through the host port, and checks:

* SHA3-256 of a seed;
* generation of a Saber public polynomial;
* binomial samples generated in parallel with an NTT;
* round(S·A) through NTT, multiply, INTT and AddRound, against an exact integer
  product mod 2^13;
* a two-iteration signing-style loop;
* a nonce Write;
* SampleInBall with tau = 60, against the challenge rebuilt from the same
  stream;
* Encode_H of a 6-bit w1 polynomial, against the packed bit string.

It also counts, and requires, the following events:

* dual issue;
* two engines using memory in the same clock;
* Keccak permutations;
* left-over-bit refills;
* loop jumps.

Simulating one testbench with Verilator:

    verilator --binary --timing --assert -Irtl rtl/cp_pkg.sv tb/tb_crypto_top.sv --top tb_crypto_top
    ./obj_dir/Vtb_crypto_top

## Files

* `rtl/cp_pkg.sv`: constants, opcodes, memory request type.
* `rtl/crypto_top.sv`: the top.
* Engines:
  * `rtl/poly_arith_unit.sv`, with `ntt_ctrl.sv`, `polyop_ctrl.sv`,
    `butterfly.sv`, `mod_red.sv` and `twiddle_rom.sv`;
  * `rtl/sha_shake_unit.sv`, with `keccak_core.sv` and `binomial_sampler.sv`;
  * `rtl/coef_stream_unit.sv`, with `saber_round.sv`, `saber_verify_cmov.sv`,
    `dil_decompose.sv`, `dil_makehint.sv`, `dil_usehint.sv`,
    `dil_verify.sv`, `dil_sampleinball.sv`, `dil_encode_h.sv` and
    `dil_pack_unpack.sv`.
* Infrastructure: `rtl/program_controller.sv`, `rtl/data_memory.sv`,
  `rtl/sdp_ram.sv`, `rtl/mem_bus.sv`, `rtl/comm_ctrl.sv`.
* `tb/tb_<module>.sv`: one testbench per module.
