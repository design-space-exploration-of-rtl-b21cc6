# A 1 GHz-class SABER coprocessor with split single-port memory

SABER is a post-quantum key-encapsulation scheme built on the Module
Learning With Rounding problem. Almost all of its work is arithmetic on
polynomials of degree 256 with 13-bit (mod q = 2^13) or 10-bit
(mod p = 2^10) coefficients, plus Keccak hashing. This RTL implements a
coprocessor that runs SABER one building-block instruction at a time. Its
memory is organised for a high clock rate:

- The 1024 x 64-bit data memory is split into **four single-port 256 x 64
  RegFiles** (compiled 6T SRAM macros in the target process). Bank decoding
  is done in logic.
- A **pipeline register** sits on the memory read data, so that no logic
  follows the memory access in the same cycle.
- One **676-bit shift buffer** is shared by the four blocks that unpack
  coefficients from memory words: the multiplier, AddRound, AddPack and
  BS2POLVECp.

The cost of this organisation is extra cycles. Every read now takes two
cycles. Blocks that used to read and write in the same cycle must now take
turns on the single port. The configuration follows the "PIP_SP_4(256x64)"
point of a published design-space exploration of SABER in 65 nm. This RTL
is an independent implementation of that architecture; the details that
were left open are filled in here and listed below.

All parameters are those of SABER at the AES-192 level: N = 256,
q = 2^13, p = 2^10, T = 2^4, l = 3 and binomial parameter mu = 8.

## How the core is driven

The core executes instructions; it has no program of its own. The program
memory is outside the core. It presents one instruction at a time on
`instr`/`instr_valid`, and the core takes it when `instr_ready` is high
(that is, while idle). The FSM controller then:

1. latches the instruction;
2. one cycle later, pulses the start line of the building block named by
   the opcode, clears the shared shift buffer and hands it to that block;
3. routes that block's memory requests to the memory manager until the
   block pulses `done`;
4. pulses `op_done` and puts the instruction's length in cycles, counted
   from the start pulse to done inclusive, in `last_cycles`.

While the core is idle, a host port (`host_req`, `host_rdata`,
`host_rvalid`) reaches the memory directly. This is how seeds and messages
are loaded and results read back. An assertion flags any host access while
an instruction is running.

An instruction (`instr_t`) has an opcode, three 10-bit word addresses
(`src0`, `src1`, `dst`) and two 16-bit counts (`len`, `len2`):

| opcode | block | src0 | src1 | dst | len | len2 |
|---|---|---|---|---|---|---|
| 1 SHA3_256 | SHA3 unit | message | - | 4-word digest | message bytes | - |
| 2 SHA3_512 | SHA3 unit | message | - | 8-word digest | message bytes | - |
| 3 SHAKE128 | SHA3 unit | message | - | output | message bytes | output words |
| 4 SAMPLER | binomial sampler | random bytes | - | secret (4-bit) | coefficients (multiple of 16) | - |
| 5 MULT | multiplier | public poly vector (13-bit) | secret vector (4-bit) | 13-bit result | pairs l | word stride of the public polys (0 = 52) |
| 6 ADDROUND | AddRound | 13-bit poly | - | 10-bit poly | coefficients (multiple of 64) | - |
| 7 ADDPACK | AddPack | 13-bit poly v | message bits, or c_m when decrypting | 4-bit packed, or message bits | coefficients (multiple of 64) | 1 = decrypt |
| 8 UNPACK | Unpack | message | - | 13-bit poly | bits (multiple of 64) | - |
| 9 BS2POLVECP | BS2POLVECp | 10-bit packed | - | 13-bit poly | coefficients (multiple of 64) | - |
| 10 COPYWORDS | CopyWords | source | - | destination | words | - |
| 11 VERIFY | Verify | string A | string B | - | words | - |
| 12 CMOV | CMOV | key | pseudo-random z | destination | words | - |

The architecture has an ISA of this kind, but its encoding is not
published. The encoding above is this design's own. Opcode 0 is a no-op.

## Data formats in memory

Memory words are 64 bits wide, and bytes are stored little-endian within a
word.

- **Mod-q polynomials** (13-bit coefficients) are packed densely, starting
  at bit 0. A polynomial takes 256 * 13 / 64 = 52 words, and coefficient i
  occupies bits 13i to 13i + 12 of the string.
- **Mod-p polynomials** (10 bits) take 40 words.
- **Ciphertext parts** (4 bits) take 16 words.
- **Secrets** from the sampler are 4-bit two's complement, 16 per word.
- A vector of l polynomials is l polynomials back to back.

These formats are choices of this design: they are the densest packing and
keep every unit simple.

## The memory path

`mem_manager` decodes the bank from address bits [9:8] and drives one of
the four `regfile_sp` instances. It remembers which bank a read went to,
and passes that bank's output through `pipeline_reg`. A read issued in
cycle t returns data with `rvalid` high in cycle t + 2. Only one request
(a read or a write) can be made per cycle.

All blocks follow the same discipline on the single port:

- A block never needs the result of a read in the next cycle. Reads are
  issued ahead, and the returning data is recognised by a small tag
  pipeline that tracks which of the block's reads are in flight.
- When a block has a finished output word, the write takes the port in
  that cycle and any read waits. Writing first means the output packer
  never overflows. The reader then falls behind briefly, and the shared
  buffer absorbs this.

## The shared shift buffer

Four blocks have to turn a stream of 64-bit words into a stream of
coefficients 13 or 10 bits wide. Each could have its own shift register.
Because only one block runs at a time, a single 676-bit register serves all
of them.

`shared_shift_buffer` behaves as a first-in first-out queue of bits:

- **State.** It holds up to 676 valid bits, starting at bit 0, and a count
  of valid bits.
- **Pop.** The owning block pops `pop_bits` from the bottom. The buffer
  shifts right by that amount, and the next coefficient is always in the
  low bits of `rsp.data`.
- **Push.** In the same cycle the block may push up to 64 bits. They land
  directly above the bits that remain after the pop.
- **Ownership.** The controller selects the owner (`sel`) from the opcode
  and clears the buffer at the start of every instruction.
- **Checks.** Assertions catch popping more bits than are held, and
  pushing past 676.

The interesting part is keeping the buffer fed across the two-cycle memory
latency. `stream_reader` does this. It issues a read only when:

- the buffer has room for that word plus every word still in flight; and
- the owning block grants it the port (no write pending).

So the buffer can never overflow. At 13 bits consumed per cycle against
64 bits per read, the reader keeps well ahead. A consumer stalls only at
the start of a stream or when writes crowd out reads. The multiplier, for
example, loses four cycles on a 3-pair vector product.

## Building blocks

**SHA3 unit** (`sha3_unit`, `keccak_round`). One Keccak-f[1600] sponge
computes one round per clock, so a permutation takes 24 cycles.

- Rates: SHA3-256 uses 17 lanes, SHA3-512 uses 9 lanes and SHAKE-128 uses
  21 lanes. The domain bits are 0x06 for SHA3 and 0x1F for SHAKE, and
  pad10*1 is applied to the final block.
- Absorbing reads one lane per cycle, pipelined across the read latency.
  Bytes past the end of the message are masked.
- Squeezing is overlapped. When a permutation ends, the rate lanes are
  copied into a 21-lane output buffer and the next permutation starts in
  the same cycle. The buffer drains to memory one lane per cycle during
  that permutation. Since 21 writes fit into 24 rounds, SHAKE-128 produces
  1344 bits every 24 cycles.

**Binomial sampler** (`binomial_sampler`). Each random byte r gives
`HW(r[3:0]) - HW(r[7:4])`, a value from -4 to 4 (mu = 8). Two input words
(16 bytes) make one output word of 16 samples. The reads, the wait and the
write take about 5 cycles per output word. A secret vector of 768
coefficients takes 242 cycles.

**Multiplier** (`poly_multiplier`). A centralised schoolbook multiplier
with 256 multiply-accumulate units, described in detail below.

**AddRound** (`add_round`). Computes `(x + 4) >> 3` on 13-bit
coefficients, giving 10-bit ones. This is the rounding from q to p used to
make the public key b and the ciphertext b'.

**AddPack** (`add_pack`). Computes
`c = ((v + 4 - m * 2^9) mod 2^10) >> 6` for each coefficient. Here v is
the low 10 bits of v' and m is the matching message bit. The 4-bit results
are packed 16 per word: this is the encryption step that hides the
message. The message is fetched one word at a time alongside the
coefficient stream. With `len2 = 1` the same block performs the matching
decryption step instead: the second operand is c_m, and each output bit is
`m' = ((v - 64 * c_m + 228) mod 2^10) >> 9`, where 228 = 2^8 - 2^5 + 2^2 is
the constant that centres the rounding error. The recovered bits are packed
64 per word.

**Unpack** (`unpack`). Expands a message into a polynomial with one
coefficient (0 or 1) per bit, in the 13-bit format. It reads a word, then
emits one coefficient per cycle into an output packer. Each full 64-bit
word is written out in the same cycle that the next coefficient is packed,
so only the three-cycle input fetches pause the stream. 256 bits take 275
cycles from start to done.

**BS2POLVECp** (`bs2polvecp`). Converts 10-bit packed coefficients back
into 13-bit polynomials, so that a public key b can enter the multiplier.

**CopyWords** (`copy_words`). Copies words one at a time: read, wait for
the pipelined data, then write. A copy of n words takes exactly
4n + 1 cycles.

**Verify** (`verify_unit`) and **CMOV** (`cmov_unit`). Both run in
constant time.

- Verify reads both strings word by word and ORs together the XOR of each
  pair, with no early exit. It holds `fail` until the next Verify.
- CMOV always reads both the key and z, and selects between them with a
  mask driven by `fail`. The access pattern does not depend on the
  outcome.

## The multiplier

SABER multiplies a public polynomial a (13-bit coefficients) by a secret s
(coefficients in [-4, 4]) modulo x^256 + 1. The multiplier holds s in a
256-entry register s' and keeps 256 13-bit accumulators. In each MAC cycle
it takes the next coefficient a_i from the shared buffer and updates:

    acc[j] += a_i * s'[j]                 for all j in parallel
    s'     <- x * s'  (mod x^256 + 1): shift up by one place,
              and the coefficient that wraps around is negated

After 256 cycles `acc` holds a * s mod (x^256 + 1, 2^13). Because
|s| <= 4, each MAC is a 13 x 3-bit product followed by a conditional
negation, not a full multiplier.

A vector product sum_k a_k * s_k, which is what KeyGen and Encaps need for
one entry of A^T s or A s, simply loads the next s_k without clearing the
accumulators. The public polynomials a_k are read every 52 words by
default; a stride in `len2` (156 for a 3 x 3 matrix stored row by row)
lets key generation walk a column of A instead of a row. Each pair costs:

- 16 reads to load s;
- 256 MAC cycles, plus a cycle for each time the buffer is short of 13
  bits.

At the end, the accumulators shift out four coefficients per cycle into an
output packer, which writes each 64-bit word as soon as it is full.
Measured on the full-size design:

- 944 cycles for l = 3 pairs;
- 394 cycles for one pair.

## Cycle counts against the architecture

The reference figures for this configuration are per block. The figures
for this RTL are counted by the controller, from the start pulse to done
inclusive, on the full-size core:

| operation | reference | this RTL | note |
|---|---|---|---|
| multiplier | 970 | 944 | 3-pair vector product, taken to be what 970 counts |
| binomial sampler | 246 | 242 | one secret vector of 768 coefficients (size assumed) |
| Unpack | 295 | 275 | 256 message bits |
| CopyWords | 211 | 210 | one polynomial, 52 words (length assumed); 4n + 2 in general |
| SHAKE-128 | 28 per 1344 bits | 24 per 1344 bits | output buffer overlaps writes with the next permutation |

The remaining blocks have no published cycle counts to compare with. Two
of them, measured the same way:

- AddRound and BS2POLVECp: 263 cycles per 256 coefficients;
- AddPack: 276 cycles when encrypting, 311 when decrypting (the 4-bit c_m
  needs 16 word fetches instead of 4).

The totals for a whole KEM operation depend on the instruction program.
The reference programs are not published, so the two programs in `tb/`
are this design's own:

| operation | reference total | this RTL |
|---|---|---|
| KEM key generation | 7154 | 5784 (`tb_saber_keygen`) |
| KEM encapsulation | 7136 | 7516 (`tb_saber_encaps`), about 5% more |
| KEM decapsulation | 9359 | 9742 (`tb_saber_decaps`), about 4% more |

Most of the encapsulation and decapsulation excess comes from hashing
the 992-byte public key and the 1088-byte ciphertext. Absorbing costs
about 43 cycles per 136-byte block, because the next block's reads do not
overlap the permutation.

## Where this design departs from, or goes beyond, the architecture

- **SHAKE output buffer.** The reference quotes 28 cycles per 1344-bit
  block of output from one serial sponge. With a 64-bit single-port
  memory, that rate is only reachable if the output is written while the
  next permutation runs. This design therefore adds a 1344-bit output
  buffer, which the architecture does not mention.
- **Instruction encoding and handshake.** These are this design's own, as
  are the host memory port and the `last_cycles` counter.
- **Memory formats** (above) are chosen here.
- **Unpack** is read as "message bits to polynomial". Its output format,
  one 13-bit coefficient per bit, is chosen here.
- **AddPack** also performs the decryption step (recovering the message
  from v and c_m), selected by `len2`. Folding it into this block is a
  choice made here.
- **Multiplier stride.** The operand stride used to walk a column of A is
  this design's addition to the instruction set.
- **BS2POLVECp** outputs zero-extended 13-bit coefficients so that the
  multiplier can use them directly.
- **Pipeline register.** In the architecture the pipeline register feeds
  the sampler, but it is drawn as feeding the controller. Here it is the
  only read path, so every block sees two-cycle reads.
- **Cycle counts.** The per-block cycle counts are at or below the
  reference figures, but not equal to them, as in the table above. The
  operand sizes behind the reference figures are assumed. Encapsulation
  takes about 5% more than the reference total, and decapsulation about 4%
  more.
- **Not part of this RTL.** The RegFile macro is modelled as a
  synchronous-read array. Physical design is out of scope: placement,
  clock tree and power grid.

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares
against values it computes itself, and ends by printing
`TB_RESULT checks=<n> failures=<n>`.

- `tb_sha3_unit` has its own Keccak model. It also checks the published
  FIPS 202 values for SHA3-256, SHA3-512 and SHAKE-128, multi-block inputs,
  long SHAKE outputs, the 24-cycle permutation, and one 1344-bit output
  block per permutation.
- `tb_poly_multiplier` checks against a negacyclic schoolbook product
  written in the testbench.
- `tb_copy_words` checks the exact cycle count, and `tb_verify_unit`
  checks that Verify takes the same time whether or not the strings match.
- `tb_saber_top` runs the full-size core end to end with no parameter
  overrides:
  - SHAKE-128 expands one row of the matrix and the secret randomness;
  - the sampler makes s;
  - the multiplier forms the row product;
  - AddRound and BS2POLVECp process a public polynomial;
  - a second product forms v';
  - Unpack and AddPack handle a message, and AddPack's decryption mode
    recovers it;
  - CopyWords copies a polynomial and a ciphertext part;
  - Verify and CMOV run in both outcomes;
  - the three hash modes are checked against published values.

  Each result is checked against the testbench's own computation. The
  testbench also checks the cycle limits above, and counts the design's
  mechanisms, failing if any never occurred:
  - each of the four shared-buffer clients;
  - multiplier stalls on the buffer;
  - reads deferred by a write;
  - reads through the pipeline register from all four RegFiles;
  - both AddPack modes;
  - repeated SHAKE squeezing;
  - both Verify outcomes.

  It runs in a few seconds.

Three further testbenches run whole KEM operations as programs on the
full-size core:

- `tb_saber_keygen` performs key generation: seedA, the full 3 x 3
  matrix, s, b = round(A^T s) column by column, pk, H(pk) and sk.
- `tb_saber_encaps` performs encapsulation from a random public key, up to
  the ciphertext and the shared key K.

Both predict every output word with a model of their own, which includes
an independent Keccak, and both print their cycle totals.

- `tb_saber_decaps` runs key generation, encapsulation and decapsulation
  back to back on one core. Decapsulation must recover the encapsulated
  message and shared key and reproduce the ciphertext exactly. A ciphertext
  with one flipped bit must make Verify fail and give the rejection key
  SHA3-256(z || SHA3-256(ct)), which the testbench computes itself. In this memory
format the public key is 992 bytes and the ciphertext 1088 bytes.

To simulate a testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/saber_pkg.sv tb/tb_saber_top.sv --top-module tb_saber_top
    ./obj_dir/Vtb_saber_top

Replace `tb_saber_top` with any other testbench name. All flops use an
asynchronous active-low reset `rst_n`. Assertions guard the handshake
rules: buffer underflow and overflow, packer overflow, and host access
while busy.

## Files

| file | contents |
|---|---|
| `rtl/saber_pkg.sv` | constants, request structs, opcodes, instruction format |
| `rtl/saber_top.sv` | the coprocessor |
| `rtl/fsm_controller.sv` | instruction handshake, start/done, port and buffer routing |
| `rtl/mem_manager.sv`, `rtl/regfile_sp.sv`, `rtl/pipeline_reg.sv` | memory path |
| `rtl/shared_shift_buffer.sv`, `rtl/stream_reader.sv`, `rtl/word_packer.sv` | coefficient streaming in and out |
| `rtl/poly_multiplier.sv` | schoolbook multiplier |
| `rtl/sha3_unit.sv`, `rtl/keccak_round.sv` | hashing |
| `rtl/binomial_sampler.sv`, `rtl/add_round.sv`, `rtl/add_pack.sv`, `rtl/unpack.sv`, `rtl/bs2polvecp.sv`, `rtl/copy_words.sv`, `rtl/verify_unit.sv`, `rtl/cmov_unit.sv` | the other building blocks |
| `tb/tb_<module>.sv` | one testbench per module; `tb_saber_top` is the end-to-end test |
