# Serpent encryption engine built from refined higher-order processes

This is a Serpent block-cipher engine: a key schedule plus an encryptor whose
degree of parallelism is a parameter. It follows a design that was derived
step by step from a functional specification of the cipher. Each list
function of that specification (`map`, `zipWith`, `foldl`) was turned into a
network of communicating processes. A "vector" became parallel hardware and a
"stream" became one unit used over and over in time. The 31 ordinary rounds
are a left fold of one round function over a list of subkeys. How that fold
is refined sets the cost:

* as a **vector fold**, every round is its own unit in a pipeline (fully
  pipelined);
* as a **stream fold**, one round unit is used 31 times (fully sequential);
* a **mix** puts the first `N_PAR` rounds in a pipeline and iterates one
  unit over the other `31 - N_PAR`.

The RTL builds the mixed form, with `N_PAR = 2` by default: two pipelined
rounds and one round unit run 29 times. That is the most parallel
configuration reported for the original FPGA target. `N_PAR = 0` gives the
purely sequential design and `N_PAR = 31` the fully pipelined one. All three
are simulated.

A decryptor sits next to the encryptor and reads the same subkeys.
For more throughput, several encryptors can also be run side by side, one per
block of a wider transfer (`N_WAYS`, default 1).

## The cipher in the form used here

A block is 128 bits, held as four 32-bit words `x0..x3`, with `x0` in bits
`[31:0]` (`serpent_pkg::block_t`). The cipher is computed in its **bit-sliced**
form:

* bit `j` of `x0, x1, x2, x3` forms one 4-bit S-box input, with `x0` as the
  least significant bit;
* the 32 slices go through the S-box in parallel;
* the linear transformation then mixes whole words with rotations, shifts and
  XORs.

The standard Serpent description wraps the cipher in an initial and a final
bit permutation. In the bit-sliced form these cancel, so the engine applies
neither and gives the standard ciphertext directly. For example, the all-zero
128-bit key and the all-zero block give `3620b17ae6a993d09618b8768266bae9`
(bytes, least significant byte first). As a `block_t` that is
`128'he9ba668276b81896d093a9e67ab12036`. Both testbenches that run the whole
engine check this known answer.

Encryption of one block, with subkeys `K0..K32` (each four words):

```
x = P
for r = 0..30:  x = LT( S[r mod 8]( x ^ K[r] ) )
C = S7( x ^ K31 ) ^ K32
```

`LT` is the linear transformation (`serpent_ltransform`):

```
x0 <<<= 13; x2 <<<= 3; x1 ^= x0 ^ x2; x3 ^= x2 ^ (x0 << 3);
x1 <<<= 1;  x3 <<<= 7; x0 ^= x1 ^ x3; x2 ^= x3 ^ (x1 << 7);
x0 <<<= 5;  x2 <<<= 22
```

Of the eight S-boxes, the source design writes out only S0. It gives S0 as a
network of 17 word-wide XOR/OR/AND/NOT steps (`t01..t17`), and
`serpent_sbox` builds S0 exactly that way. S1..S7 are looked up per slice in
the tables of the Serpent definition (`serpent_pkg::SBOX_TABLE`). The S0 table
is also stored there, and the testbench checks the S0 network against it.

## Key schedule (`serpent_keyschedule`)

1. **Padding and segmentation.** A 128- or 192-bit key is extended to 256 bits
   with a single 1 bit just above its top bit, then zeros (`key_len` selects
   128, 192 or 256). The 256 bits are cut into eight words, `w[0] = key[31:0]`.
2. **Prekeys** (`serpent_generate_ws`). The prekeys fill the register array
   `ws[0..139]`, one word per clock for 132 clocks:
   `ws[i] = (ws[i-8] ^ ws[i-5] ^ ws[i-3] ^ ws[i-1] ^ 0x9e3779b9 ^ (i-8)) <<< 11`
   for `i = 8..139`.
3. **Subkeys.** The 128 prekeys `ws[8..135]` leave in four beats of 32 words.
   Each beat is eight groups of four, and one bank of eight S-boxes handles
   them. Group `g` of each beat uses S-box `(3 - g) mod 8`, i.e. S3, S2, S1,
   S0, S7, S6, S5, S4. So beat `b` yields subkeys `K(8b)..K(8b+7)`. The last
   four prekeys go through a separate S3 and become `K32`.

This is the "stream-output" key schedule: one S-box bank is shared by the
four beats. The alternative with 32 banks side by side was not built. The
subkeys go to `serpent_subkey_store`, a 33 x 128-bit register file. The store
sets `keys_valid` when the end-of-transmission event follows the fourth beat.

Timing: if the key is taken at clock 0, `keys_valid` rises roughly 137 clocks later
(132 clocks of generation, four beats and the EOT).

## Encryptor (`serpent_eseg`)

```
            N_PAR pipelined rounds           one round iterated 31-N_PAR times    last round
 in --> [fold K0,S0]->reg->[fold K1,S1]->reg --> [fold K_r,S_r mod 8]<->loop reg --> ^K31,S7,^K32 -> out reg --> out
```

`serpent_fold` is one round, `LT(S_sel(x ^ k))`, and is combinational. The
three parts of the encryptor are:

* **Pipelined part.** Each of the first `N_PAR` rounds has its own fold and a
  register after it. The subkey and S-box of each stage are fixed.
* **Sequential part.** A single fold with a loop register and a round counter
  `r`. It computes round `N_PAR` as it takes the block, then rounds
  `N_PAR+1..30`, one per clock, with subkey `K_r` and S-box `r mod 8`.
* **Last round.** XOR `K31`, S7 and XOR `K32` go into the output register.

Each stage passes data forward with valid/ready, so several blocks are in
flight at once. If the output is not taken, the whole chain stalls.

Timing, with the output always ready:

| quantity | value |
|---|---|
| latency | the ciphertext is valid 31 clocks after the input handshake, for any `N_PAR` |
| block interval, `N_PAR` = 0..30 | `31 - N_PAR` clocks (29 at the default). The sequential part sets the pace and takes its next block in the clock that releases the previous one. |
| block interval, `N_PAR` = 31 | 1 clock (no sequential part) |

So the default engine gives 128 bits every 29 clocks. Going from `N_PAR = 0`
to `2` gains only about 7 % throughput. The original implementation showed the
same: the sequential part dominates until nearly all rounds are pipelined.

The cycle counts differ from those reported for the original high-level
compiler flow. That flow spent extra clocks on every channel
communication between processes (it reports 1314 cycles for the sequential
design). Those counts are not reproduced here.

## Several blocks at a time (`serpent_eseg_multi`)

The whole engine is written as a stream of vectors of `n` blocks. Each
element of a vector has its own encryptor, and all of them read the one
subkey store. `N_WAYS` is this `n`. The source leaves `n` open ("as many as
fit"), so it defaults to 1.

Each plaintext transfer carries `N_WAYS` blocks, with lane `i` in element
`i`. The lanes are kept in lockstep:

* a vector is taken only when every lane is ready;
* results leave only when every lane has one;
* the EOT is given to all lanes together.

All lanes are identical and start in the same clock, so none ever waits for
another. Latency and interval are those of a single encryptor, so the
throughput grows by a factor of `N_WAYS`.

## Decryptor (`serpent_dseg`)

Decryption runs the encryption steps backwards:

* XOR `K32`, inverse S7, XOR `K31`;
* then for `r = 30` down to `0`: inverse linear transformation
  (`serpent_inv_ltransform`), inverse S-box `r mod 8` (`serpent_inv_sbox`),
  XOR `K_r`.

The first step is done as the block is taken, and then one inverse round runs
per clock. The plaintext is valid 32 clocks after the input handshake, and a
new block can be taken every 32 clocks. The inverse S-boxes are not stored as
tables: each slice is matched against the 16 entries of the forward table.
The source gives decryption only as an algorithm (flowchart and prose). Its
hardware form here, one iterated round, is this design's choice.

## Channels and end of transmission

Every channel is a rendezvous: a value moves on the clock edge where `valid`
and `ready` are both high. A sender must hold `valid` and the data until then.
An assertion in the encryptor and decryptor checks this on their outputs.

A stream is a sequence of transfers on the data channel, followed by one
transfer on a separate EOT channel (`*_eot_valid` / `*_eot_ready`). The EOT
never overtakes data:

* the encryptor and decryptor accept an input EOT only when they hold no
  block;
* they then offer the output EOT.

## Top level (`serpent_encrypt_top`)

```
key ─► serpent_keyschedule ─(4 beats + EOT, K32)─► serpent_subkey_store ─┬─► serpent_eseg_multi (N_WAYS x serpent_eseg)  (pt_* ► ct_*)
                                                                         └─► serpent_dseg                                 (dct_* ► dpt_*)
```

| port group | meaning |
|---|---|
| `key_valid/key_ready`, `key[255:0]`, `key_len` | load a key |
| `keys_valid` | the subkeys are in place |
| `pt_*` → `ct_*` | encryption streams, `N_WAYS` blocks per transfer |
| `dct_*` → `dpt_*` | decryption streams |

Rules:

* A key is accepted only while both data paths are empty.
* From then until `keys_valid` rises again, the data inputs are held off.
* Encryption and decryption may run at the same time.
* There are two parameters: `N_PAR` (0..31, default 2) and `N_WAYS`
  (at least 1, default 1).

## What comes from the source design and what does not

Taken from the source:

* the S0 network, the linear transformation and the prekey recurrence;
* the order of the key-schedule S-boxes and the round structure, with K31
  and K32 in the last round;
* the split into pipelined and iterated rounds, and `N_PAR = 2`;
* the 140-word prekey array;
* the stream/vector structure of the key schedule;
* EOT on its own channel;
* the multi-way form with `n` encryptors side by side.

This design's own choices:

* S1..S7 from the cipher definition;
* the bit-slice and word order (chosen to match the published known answer);
* the key padding rule;
* valid/ready for the abstract channels, and one register per pipelined
  round;
* overlapping blocks in flight;
* the subkey register file;
* the key-reload interlock;
* the asynchronous active-low reset;
* the hardware form of decryption;
* the lockstep rules of the multi-way form, and `N_WAYS = 1`.

Where the source contradicts itself:

* **The last round.** The prose says it uses the 32nd subkey set twice, but
  its code and figures use `K31` then `K32`. The code and figures were
  followed.
* **The key-schedule S-box order.** The prose says S3, S2, S1, S0, S7, S6,
  S5, S4, but the block diagrams print S3, S4, ..., S2. The prose was
  followed.

Not built:

* the RAM-based prekey generator variant;
* the key schedule with 32 S-box banks in parallel;
* the host-board interface, which is replaced by the ports above.

No initial or final permutation is built either, for the reason given in the
section on the bit-sliced form.

## How far it is verified

Each module has a self-checking testbench in `tb/`. The reference model
`tb/serpent_ref_pkg.sv` is written independently from the cipher definition,
and the testbenches compare against it.

| testbench | what it checks |
|---|---|
| `tb_serpent_sbox` | all 8 S-boxes, all 16 slice values and random blocks |
| `tb_serpent_ltransform` | all 128 single-bit inputs and random blocks |
| `tb_serpent_fold` | random round inputs for every S-box |
| `tb_serpent_generate_ws` | all prekeys; exactly 132 clocks of generation; back-pressure; EOT |
| `tb_serpent_keyschedule` | all 33 subkeys for 128-, 192- and 256-bit keys, including padding |
| `tb_serpent_subkey_store` | write order, `keys_valid`, clear |
| `tb_serpent_eseg` | ciphertexts; latency; 29-clock interval; key stall; back-pressure; EOT drain |
| `tb_serpent_eseg_multi` | three lanes: every lane against the reference; lanes in step; latency; interval; back-pressure; EOT |
| `tb_serpent_dseg` | decrypts reference ciphertexts back to their plaintexts; latency; 32-clock interval; EOT |
| `tb_serpent_encrypt_top` | the whole engine at default parameters (see below) |
| `tb_serpent_designs` | `N_PAR` = 0, 2 and 31 and a two-lane engine side by side: the known answer, a random 256-bit key and a burst of blocks, with the block interval checked for each |

`tb_serpent_encrypt_top` uses all three key lengths and checks the known
answer. It counts each of these and fails if one never happens:

* a key waiting for blocks in flight;
* plaintext waiting for the subkeys;
* ciphertext back-pressure;
* an input EOT waiting for the drain;
* encryption and decryption overlapping.

The S-box tables and the key schedule are confirmed by the known answer. Since
the reference model and the RTL share the cipher definition, the known answer
is the check that ties both to real Serpent. Only one known answer is used.
Timing closure and area have not been evaluated.

## Simulating

Packages first, then the rest. For example, the full engine:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/serpent_pkg.sv tb/serpent_ref_pkg.sv rtl/*.sv tb/tb_serpent_encrypt_top.sv \
  --top-module tb_serpent_encrypt_top -o sim
./obj_dir/sim
```

Every testbench ends with `TB_RESULT checks=N failures=M`. Variables the
design reads are reset, and the testbenches initialise what they drive, so
random initial values do not matter. For the side-by-side run, add
`tb/tb_serpent_design_run.sv` and use `--top-module tb_serpent_designs`.

## Files

| file | content |
|---|---|
| `rtl/serpent_pkg.sv` | block and word types, S-box tables, PHI, the key-schedule S-box order, `rotl` |
| `rtl/serpent_sbox.sv`, `rtl/serpent_inv_sbox.sv` | bit-sliced S-box and inverse S-box |
| `rtl/serpent_ltransform.sv`, `rtl/serpent_inv_ltransform.sv` | linear transformation and its inverse |
| `rtl/serpent_fold.sv` | one round |
| `rtl/serpent_generate_ws.sv` | prekey generator |
| `rtl/serpent_keyschedule.sv` | key schedule |
| `rtl/serpent_subkey_store.sv` | subkey register file |
| `rtl/serpent_eseg.sv` | encryptor, `N_PAR` pipelined rounds plus the iterated round |
| `rtl/serpent_eseg_multi.sv` | `N_WAYS` encryptors in lockstep |
| `rtl/serpent_dseg.sv` | decryptor |
| `rtl/serpent_encrypt_top.sv` | top level |
| `tb/` | reference model and testbenches |
