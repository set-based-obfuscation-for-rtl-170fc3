# Random set-based obfuscation (RSO) for an Arbiter PUF

A strong PUF such as the Arbiter PUF answers each challenge with a bit that
depends on manufacturing variation. That makes it a cheap way to authenticate
a device. The weakness is that its challenge-to-response map is close to
linear: after an eavesdropper has collected a few thousand challenge-response
pairs (CRPs), logistic regression or a small neural network predicts the PUF
almost perfectly.

RSO hides that map behind two XOR keys, and the keys come from the PUF itself.
At test time a set of m stable PUF responses is recorded. These are the keys.
For each authentication a true random number generator picks two of them:

* Key_i is XORed into every challenge before it reaches the PUF;
* Key_j is XORed into the n-bit response that comes out.

The pair (i, j) is fresh every time and never leaves the chip. An observer
therefore sees each challenge set answered through one of m x m unknown
mappings. With m = 32, the modelling attacks in the original evaluation fall to
about 50 % accuracy. The server knows the key set and has a model of the PUF,
so it can work out all m x m possible answers and accept the device when one
of them matches. Once enough CRPs have been exposed, the server orders a new
key set. Everything the device adds is XOR logic, a small random source, a
store for the challenges that define the keys, and registers for the keys.

This repository gives SystemVerilog for the device side at the scheme's main
size: a 64-stage PUF, 64 challenges per authentication (so a 64-bit response)
and 32 keys. It also gives testbenches, including one that plays the server.

## The device at a glance

```
                 [C] (n challenges)            candidate R_a list      R_hat_b
                        |                            |                    ^
                        v                            v                    |
  +-----------+    +---------+  C'  +-------------+  R'  +---------+  R_hat  +-----------+
  |  TRNG     |--->|  XOR    |----->| Arbiter PUF |----->|  XOR    |-------->| HD match  |
  | (i, j)    |    | Key_i   |      | (n stages)  |      | Key_j   |         | vs R_a    |
  +-----------+    +---------+      +-------------+      +---------+         +-----------+
        |               ^                 ^   |               ^
        v               |                 |   | (set generation)
  +-------------------------------+       |   v
  |  key registers  K = {K_0..K_m-1}  <---+---+  key-set generator  <--- NVM: m x n stored challenges
  +-------------------------------+
```

| Module (`rtl/`) | Role |
|---|---|
| `rso_pkg` | Default sizes (n = 64, m = 32), result codes, and the delay function of the PUF model |
| `arbiter_puf` | Behavioural model of the n-stage Arbiter PUF |
| `rso_trng` | Behavioural model of the ceil(log2 m)-bit random source |
| `rso_nvm` | Store of the m x n challenges that define the keys, as a memory array |
| `rso_keygen` | Builds the key set from the stored challenges, after power-up or on an update |
| `rso_key_regs` | The m keys, with two read ports (Key_i, Key_j) and a valid flag |
| `rso_xor_obf` | The two XOR layers |
| `rso_hd_check` | Hamming distance and the tolerance test |
| `rso_auth_ctrl` | One authentication, from the random draw to releasing R_hat_b |
| `rso_otp_id` | Write-once identifier, burnt into fuses at enrollment |
| `rso_puf_top` | Wires the blocks together and shares the PUF between set generation and authentication |

`arbiter_puf` and `rso_trng` stand for physical parts and cannot be
synthesized. Everything else is ordinary synchronous logic with an
active-low asynchronous reset.

## How the key set is made

Each key is an n-bit response of the PUF. The PUF gives one bit per
challenge, so one key takes n challenges. The store therefore holds m groups
of n challenges, m x n words of n bits in all. At the default size that is
2048 words of 64 bits (16 KiB). Word `k*n + t` is challenge t of key k.

At test time, whoever programs the device keeps only challenges whose
response is stable, meaning the delay race is far from a tie. Noise then
cannot flip those bits, and the keys come out the same every time they are
derived. The keys live in volatile registers, so they must be derived again
after power-up.

`rso_keygen` derives them. When it receives `init_req`, it clears the set's
valid flag. It then reads each stored challenge and applies it to the PUF
without any XOR, and shifts each response bit into a register. The first
challenge of a group gives the most significant key bit. After n bits it
writes key k. After all m keys it sets the valid flag.

Each challenge costs one read cycle, one request cycle and the PUF latency
plus one cycle. With the model's latency of 2, that is 5 cycles per challenge,
and a whole set takes m x n x 5 = 10240 cycles. `keygen_done` is seen
10241 edges after the edge that took `init_req`.

**Set update.** The server counts how many CRPs the device has revealed. At
a threshold it orders a new set. The threshold is m^2 (n+1) / (2 eps): the
CRP count needed to model a bare PUF to error eps, multiplied by m^2. How the
chip then gets a new set is not specified, because the same stored challenges
on the same PUF would give the same keys. In this design, the new challenge
groups are written through the NVM program port and `init_req` derives the
keys again. The server computes the same new keys from its PUF model.

## One authentication, step by step

This is the part that needs care. The device must decide on its own whether
the server is genuine before it reveals anything, and the server must be able
to check an answer it cannot predict exactly.

1. **Identifier.** The device presents `dev_id`. The server looks up that
   device's PUF model, key set and CRP counter.
2. **Server precomputation.** The server chooses a fresh set [C] of n random
   challenges. For every key index i it computes R'_i = PUF(C_t xor K_i) for
   t = 1..n. For every j it then forms the candidate R(i, j) = R'_i xor K_j.
   That gives m x m candidates, 1024 at the default size. Each candidate is
   split into a first half R_a and a second half R_b. The server sends [C]
   and all m x m R_a halves. It keeps the R_b halves.
3. **Random draw.** After `auth_start`, `rso_auth_ctrl` draws i and then j,
   independently, from `rso_trng`. Both may be equal, which is why there are
   m x m candidates and not m(m-1). The random source gives ceil(log2 m)
   bits. A value of m or more is discarded and drawn again, which keeps the
   choice uniform when m is not a power of two.
4. **Obfuscated evaluation.** The n challenges arrive on the `chal_*`
   stream. Each is XORed with Key_i and applied to the PUF, and the response
   bit is shifted into R' (C_1 gives the MSB). Then R_hat = R' xor Key_j.
5. **Device-side check.** The R_a candidates arrive on the `ra_*` stream,
   and the last one is flagged by `ra_last`. Each is compared with R_hat_a,
   the upper `RA_W` bits of R_hat. A candidate matches when the Hamming
   distance is at most `hd_tol`. All candidates are compared before any
   decision, so the time taken does not depend on where a match was.
6. **Release or abort.** If any candidate matched, R_hat_b (the lower
   n - `RA_W` bits) is offered on the `rb_*` stream, and `auth_status`
   becomes `AUTH_PASS` once it is taken. Otherwise `auth_status` is
   `AUTH_NOMATCH` and nothing is released. `rb_data` reads zero whenever
   `rb_valid` is low.
7. **Server check.** The server accepts the device when R_hat_b is within
   the tolerance of at least one of its m x m R_b halves.

Three details explain this design:

* **Why XOR keeps the PUF reliable.** The keys are stable responses and XOR
  maps single bit errors to single bit errors. The obfuscated response
  therefore has the same error rate as the bare PUF, about 5 % per bit for an
  Arbiter PUF.
* **Why both halves.** The device only answers a server that proved it
  knows the model, by producing the right R_a. What it then reveals is only
  half of the response.
* **How to pick the tolerance.** `hd_tol` is a whole number of bit flips
  (the fractional threshold tau times the number of bits compared) and is
  set for each authentication. The original analysis suggests 10 flips out of
  64 bits for a 99.9 % success rate at 5 % bit error. It reports equal error
  rates at 6 of 32, 13 of 64 and 27 of 128 bits. The end-to-end testbench uses
  5 flips on the 32-bit R_a.

With a sender that never stalls, and the PUF model's latency of 2, an
authentication at the default size takes
5 + n x 4 + m x m + 2 = 1287 cycles from `auth_start` to `auth_done`. The
pieces are: 5 cycles for the two draws (2 more per discarded draw), 4 cycles
per challenge, and 1 cycle per R_a. An abort takes one cycle less.

## The Arbiter PUF model

`arbiter_puf` races a rising edge along two paths through N switch stages.
Stage s is set by challenge bit C_s: 0 passes both paths straight and 1
crosses them. Each stage has four delays (straight-upper, straight-lower and
the two crossings). The response is 1 when the upper path arrives strictly
first.

This is the additive delay model that makes a bare Arbiter PUF learnable.
The delays of one instance come from an integer hash of the `SEED` parameter
(`rso_pkg::stage_delay`), so different seeds behave as different chips. The
testbench measures about 50 % differing bits between two seeds.

`NOISE` adds a fresh uniform value in [-NOISE, +NOISE] to every delay on
every evaluation. With `NOISE = 8` about 5 % of the bits flip between repeated
evaluations, which is the error rate measured on real Arbiter PUFs. The
default is 0, an ideal and repeatable PUF. The request-to-acknowledge latency
(`LATENCY`, default 2) is a property of the model only.

Bit order throughout: C_1 is the MSB of a challenge. The first challenge of a
set produces the MSB of the response, so strings read left to right in
challenge order.

## Top-level interface (`rso_puf_top`)

| Port group | Direction | Use |
|---|---|---|
| `otp_prog_we`, `otp_prog_data`, `dev_id`, `id_locked` | in/out | Program the identifier once. Later writes are ignored. Bits can only go from 0 to 1. |
| `nvm_prog_we`, `nvm_prog_addr`, `nvm_prog_data` | in | Write stored challenge word k*n+t, one per cycle. |
| `init_req`, `keygen_busy`, `keygen_done`, `keys_valid` | in/out | Derive or update the key set. Ignored while an authentication runs. |
| `auth_start`, `hd_tol`, `auth_busy`, `auth_done`, `auth_status` | in/out | Start an authentication. `auth_status` holds a result code (`AUTH_PASS`, `AUTH_NOMATCH`, `AUTH_NOKEYS`). `auth_start` is ignored during set generation. |
| `chal_valid/ready/data` | stream in | The n challenges of [C]. |
| `ra_valid/ready/data/last` | stream in | The candidate R_a list. |
| `rb_valid/ready/data` | stream out | The released R_hat_b. |

The streams are valid/ready. A word moves on a cycle where both signals are
high, and a sender must hold valid and data until then. Assertions in
`rso_auth_ctrl` check this rule. An assertion in the top checks that set
generation and authentication never run at the same time.

Parameters: `N` (64), `M` (32), `RA_W` (N/2), `ID_W` (32), `PUF_SEED`,
`PUF_LAT` (2), `PUF_NOISE` (0).

## What follows the scheme and what this design chose

The following come from the scheme:

* the XOR of every challenge with Key_i and of the response with Key_j;
* keys that are PUF responses to stored challenges;
* a random choice of both keys with a ceil(log2 m)-bit TRNG;
* m x m server candidates, split into R_a/R_b halves, with the device
  checking R_a before it releases R_b;
* the fractional Hamming-distance threshold;
* a write-once identifier;
* server-triggered set updates.

This design chose, because the description leaves them open:

* The store is m groups of n challenges, which is what the 4 KB figure
  (8 x 64 x 64 bits) implies. One passage speaks of "m challenges".
* The response is split in equal halves, with R_a as the upper half.
* The two draws are independent, and out-of-range draws are redrawn.
* All candidates are compared before the decision, and R_hat_b is zeroed
  when not released.
* The handshakes, the latencies and the bit order.
* Set updates are made by reprogramming the store and deriving the keys
  again.
* The identifier is 32 bits wide.
* The PUF is shared between set generation and authentication.
* The PUF and TRNG models are this design's own. In particular, the rule
  that a response is 1 when the upper path arrives first is assumed.

There are known differences from the original evaluation:

* Its FPGA resource figures (about 400 LUTs and 180 flip-flops for 128
  stages and 8 keys) cannot be met by a register-based key set. Eight keys of
  128 bits are already 1024 flip-flops. The key storage there must have been
  organised differently, and that is not described.
* The "secure zone with direct memory access" that protects the challenge
  store is only named in the source. Here it reduces to this: only the
  key-set generator reads the store.
* The server (PUF model training, CRP counter, final check) is software. It
  is not in `rtl/`, and the testbenches model it.

## Sizes

The defaults are the main configuration: n = 64 and m = 32. The evaluated
variants map onto the RTL as follows:

* **Fewer keys (2 to 16) with 64 stages.** Build with `M = m`. On the
  default build, store each of the m challenge groups 32/m times. The draw
  then stays uniform over the m distinct keys.
* **32-stage or 128-stage PUFs.** Set `N`; `RA_W` follows as N/2.
  `tb_rso_workload_stages` builds the device with 32, 64 and 128 stages and
  8 keys. The 128-stage build is the one whose FPGA cost was measured. Each
  build uses the balanced threshold for its length (6 of 32, 13 of 64,
  27 of 128 bits, halved for each half), and all pass their
  authentications.
* **Tolerance.** Any tolerance up to `RA_W` bits is a run-time value.
* **Collecting one million CRPs.** This takes about 15 600 authentications,
  or about 2 x 10^7 cycles at the default size.

### What the set sizes look like in simulation

`tb_rso_workload_sets` runs the default build with a noisy PUF (about 5.7 %
of the bits flip). Its threshold is 13 flips per 64 bits, which is 6 flips on
each 32-bit half. One run gave these results:

| Distinct keys m | Authentications | Rejected | Bare-PUF model right on released bits |
|---|---|---|---|
| 2 | 41 (2624 CRPs, then a set update) | 0 | 703 of 1312 (54 %) |
| 4 | 8 | 0 | 136 of 256 |
| 8 | 8 | 0 | 145 of 256 |
| 16 | 8 | 0 | 124 of 256 |
| 32 | 15 625 (one million CRPs) | 21 | 250 102 of 499 616 (50.1 %) |

In the last column, the released R_hat_b bits are compared with what an
exact model of the unprotected PUF predicts for the same challenges. The
accuracy is at chance for every set size. This shows only that the PUF's
own map is hidden. The attacks in the original evaluation train on the
obfuscated pairs instead, and reach 55 % to 65 % for small sets; they are not
repeated here.

The tolerance also has a cost that grows with the set. A random 32-bit value
lies within 6 flips of a given candidate with probability 2.7 x 10^-4. The
device and the server each compare against m^2 candidates, so a random guess
is accepted with probability about m^2 x 2.7 x 10^-4. That is 0.1 % for
m = 2, 1.7 % for m = 8 and 24 % for m = 32. A lower tolerance, or checking
the halves together, reduces it.

## Testbenches

Every testbench checks itself and ends with a `TB_RESULT checks=… failures=…`
line.

| Testbench | What it shows |
|---|---|
| `tb_arbiter_puf` | Responses against the delay difference written in its recursive form, the latency, about 50 % uniqueness between instances, and a noise level near 5 % |
| `tb_rso_trng` | Request/valid timing, and that all values occur |
| `tb_rso_nvm`, `tb_rso_key_regs`, `tb_rso_otp_id` | The storage behaviour |
| `tb_rso_xor_obf`, `tb_rso_hd_check` | The XORs, and exact distances at and around the tolerance |
| `tb_rso_keygen` | Keys against the reference PUF, the cycle count, the valid flag, and an update that rewrites the challenges of one key (all keys checked again, that key must change) |
| `tb_rso_auth_ctrl` | An honest list, a list with no match, a match at exactly `tol` flips and at `tol`+1, abort without keys, draw and challenge cycle counts, and redraws (m = 6) |
| `tb_rso_puf_top` | End to end with a noisy PUF, m = 6 and a server model: passes within tolerance, forged lists, a set update and its stale-set rejection, redraws, abort without keys, and a start ignored during set generation (each counted) |
| `tb_rso_workload_sets` | The default build at 2, 4, 8, 16 and 32 distinct keys: rejection rate, key-pair coverage, one million CRPs at m = 32, and a set update when the CRP counter reaches m^2 (n+1)/(2 eps) for m = 2. It runs for about a minute. |
| `tb_rso_workload_stages` | Builds with 32, 64 and 128 stages and 8 keys, run through the harness `rso_tb_device_run`: cycle counts and rejection rate at each length |
| `tb_rso_puf_top_full` | The top at its default parameters: 2048 stored challenges, set generation and the full 1024-candidate authentications, with cycle counts |

`tb/rso_tb_server_pkg.sv` holds the server model, a class with the PUF
model, the key set, the candidate computation and the final check.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/rso_pkg.sv tb/rso_tb_server_pkg.sv tb/tb_rso_puf_top.sv --top tb_rso_puf_top
./obj_dir/Vtb_rso_puf_top
```

`tb_rso_workload_stages` also needs `tb/rso_tb_device_run.sv` before its
own file. Block testbenches only need `rtl/rso_pkg.sv` and their own file, for example
`verilator --binary --timing --assert -Irtl rtl/rso_pkg.sv tb/tb_rso_keygen.sv --top tb_rso_keygen`.
Each testbench except the workload one finishes in a few seconds.
