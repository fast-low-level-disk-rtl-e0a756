# FAST[AES,BRW]-2: a two-core AES engine for sector-wide tweakable encryption

Disk encryption that sits just above the disk controller must encrypt a whole
sector as one unit. The sector address is the tweak, and the ciphertext is exactly
as long as the plaintext. A tweakable enciphering scheme (TES) does this. FAST is
a TES built only from the AES *encryption* function and a polynomial hash over
GF(2^128). Decryption of FAST also needs only AES encryption, so hardware never
carries an AES decryption core.

This RTL encrypts 4096-byte sectors (m = 256 blocks of 128 bits) with FAST, using
BRW polynomials as the hash. It follows the FAST[AES,BRW]-2 architecture of
Chakraborty, Ghosh, Mancillas López and Sarkar, "Fast Low Level Disk Encryption
Using FPGAs". That architecture has two pipelined AES-128 encryption cores, one
pipelined Karatsuba multiplier, and a state machine that overlaps the counter
mode with the second hash. A sector takes 315 cycles from `start` to `done`, or
316 cycles counting both ends. The published design reports 319.

## The computation

Write the sector as X_1 ... X_m and the tweak as T. The key K drives AES-128,
written E. With tau = E(fStr), encryption runs in four steps:

```
H:        A1 = X1 ^ tau * BRW(X3..Xm, T)          F1 = X2 ^ tau * A1
Feistel:  F2 = A1 ^ E(F1)                          B2 = F1 ^ E(F2)
counter:  Z  = F1 ^ F2                             C_i = X_i ^ E(Z ^ (i-2)),  i = 3..m
G':       C2 = B2 ^ tau^2 * BRW(C3..Cm, T)         C1 = F2 ^ tau * B2
```

`^` is XOR. `*` is multiplication in GF(2^128) modulo
x^128 + x^7 + x^2 + x + 1. Bit i of a 128-bit word is the coefficient of x^i,
and counter values are XORed into the low bits of Z. In an AES block, byte 0 is
bits [127:120], so the usual hex notation of the AES test vectors applies
unchanged.

Both hashes cover m-1 = 255 blocks: the 254 bulk blocks and then the tweak.

## Datapath

```
            fStr F1 F2 Podd                              
               \  | |  /                                 
                [ M5 ]----------------------+            
                   |                        |  (XOR at output: Codd)
   Z^(2k-1) --[ M1 ]--> AES odd  ---[ M2 ]--+--> Codd --[ M6 ]--> c_odd
                                                 |        C1 --^
   Z^(2k)   ----------> AES even --(^Peven)--> Ceven --[ M7 ]--> c_even
        ^                                        |        C2 --^
   pair counter (k, 2k-1, 2k)                    |
                                                 v
   Podd/Codd/A1/B2 --[ M3 ]--+                     
   Peven/Ceven    --[ M4 ]--+--> BRW unit (Karatsuba multiplier, 4 stages)
                                    |  --> A1 = X1 ^ out, F1 = X2 ^ out,
                                    |      C2 = B2 ^ out, C1 = F2 ^ out
```

| Part | Module | Role |
|---|---|---|
| shared key schedule | `aes_key_schedule` | all 11 round keys at once for both cores |
| AES cores | `aes_pipe_enc` ×2 | 11 pipeline stages; one block per cycle |
| S-box | `aes_sbox` | 256×8 table, 16 per round |
| counter-mode unit | `fast_ctr_mode` | both cores, M1, M2, the pair counter, the XORs with Z and with the plaintext |
| pair counter | `pair_counter` | block-pair order and odd/even counter values |
| hash unit | `brw_poly_eval` | BRW hash, products by tau, squarings |
| multiplier | `gf128_mul_kara` | GF(2^128) Karatsuba multiplier, 4-cycle latency |
| top | `fast_brw2_top` | registers A1, F1, F2, B2, Z, multiplexers M3-M7, control |

The odd core does all single-block encryptions: fStr, F1 and F2. It also
encrypts the odd counter values. The even core encrypts only the even counter
values. Each pair of keystream blocks leaves both cores in the same cycle. The
host presents the matching plaintext pair in that same cycle: Podd passes
through M5 to the XOR behind M2, and Peven goes straight to the XOR behind the
even core. The two ciphertext blocks go out of the engine and into the hash unit
together, so the second hash runs alongside the counter mode.

## The BRW hash and its schedule

This is the least obvious part of the design.

For 2^L − 1 blocks, the BRW polynomial is a balanced binary tree. Count the
blocks from 1 and set j = 2k. Each pair k = (Y_{2k-1}, Y_{2k}) contributes one
multiplication. The multiplication sits at level v, the number of trailing zeros
of j:

```
level 1:    P_j = (tau ^ Y_{j-1}) * (tau^2 ^ Y_j)
level v>1:  P_j = (Y_{j-1} ^ P_{j-2} ^ P_{j-4} ^ ... ^ P_{j-2^(v-1)}) * (tau^(2^v) ^ Y_j)
result:     BRW = Y_{m-1} ^ P_{m-2} ^ P_{m-4} ^ ... ^ P_{m/2}
```

Two facts shape the hardware:

* **Every multiplication consumes exactly one odd/even pair of input blocks.**
  So each cycle the unit takes one pair from M3/M4. That is 127 multiplications
  for 255 blocks, plus the last block (the tweak), which is only XORed in.
* **Every product is used exactly once.** P_j is used by the multiplication at
  j + 2^v, or by the final sum when that position is m. The unit therefore keeps
  one 128-bit accumulator per consumer, m/4 = 64 of them. No stack of products is
  kept. Each product leaving the multiplier is XORed into its consumer's
  accumulator. The consumer reads and clears its accumulator when it issues, so
  the unit is ready for the next hash at once.

The powers tau^(2^i) come from a chain of squarers, which load when tau arrives.

**Order.** A multiplication may issue only when every product it needs has
reached its accumulator. That takes 5 cycles: 4 in the multiplier and 1 to
accumulate. The pair counter follows a list schedule that is fixed when the
design is elaborated: in each cycle it issues the smallest k whose products are
all ready, and stays idle when there is none. The schedule is a constant table
inside `pair_counter`, one entry per slot.

For m = 256 the order starts 1, 3, 5, 7, 9, 2, 11, 6, 13, 10, 4, 15, … One pass
has 127 pairs, 1 idle cycle near the top of the tree, then 4 idle cycles before
the tweak slot, which needs the products of pairs 127, 126, 124, …, 64. That
makes 133 slots. The last product issued before the tweak slot must be one the
tweak slot needs, so at least 4 idle cycles there are unavoidable. An assertion
in `brw_poly_eval` checks that no accumulator is read while a product for it is
still in flight.

**Consequence for the host.** The counter mode follows the same order, so the
ciphertext pairs arrive already in the order the hash needs. This is also the
order in which the engine asks for plaintext pairs and sends out ciphertext
pairs. Pair k holds blocks 2k+1 and 2k+2, so for m = 256 the odd blocks come as
3, 7, 11, 15, 19, 5, 23, 13, … The published architecture uses an "optimal"
multiplication order from earlier work, which it does not spell out. Its BRW
pass takes 131 cycles, against 133 issue slots plus 4 cycles of latency here.
The list schedule and the accumulators are this design's own choice.

## One sector, cycle by cycle (m = 256)

The cycle `start` is seen is cycle 1.

| Cycles | Work |
|---|---|
| 1-12 | E(fStr) on the odd core; tau loads into the hash unit |
| 13-145 | 127 plaintext pairs, 5 idle cycles, then T; tau·BRW leaves 4 cycles later |
| 149-154 | A1 = X1 ^ out; tau·A1; F1 = X2 ^ out |
| 155-166 | E(F1) on the odd core; F2 and Z are known |
| 167 | E(F2) enters the odd core |
| 168-300 | the counter issues its 127 pairs, with the same 5 idle cycles |
| 179-306 | ciphertext pairs C3..C256 leave and enter the hash unit |
| 311-316 | T; tau^2·BRW gives C2; tau·B2 gives C1; C1 and C2 leave with `done` |

In the general case, the count from `start` to `done` is 51 + 2S. Here S is
the number of slots of one pass before the tweak slot: m/2 − 1 pairs plus the
idle cycles of the schedule. For m = 256, S = 132 and the count is 315; for
m = 8, S = 10 and the count is 71. The published timing diagram puts the same
phase boundaries at 12, 153, 165, 303 and 318. Here the first hash ends
with F1 at cycle 154, 142 cycles after tau; the published figure for that
phase is 141 cycles.

## Interfaces

`fast_brw2_top` parameters: `LOG2M` (default 8, so m = 2^LOG2M = 256 blocks; at
least 3) and `FSTR` (default all ones).

* **Key.** Pulse `key_load` with `key`. `key_ready` rises 11 cycles later. The
  key stays loaded across sectors. Reloading it while busy is not supported.
* **Start.** Pulse `start` while `key_ready` is high and `busy` is low.
* **Block requests.** These are answered in the same cycle, the way a sector
  buffer with asynchronous reads would answer them:
  * If `req_odd_valid` is high, drive `p_odd` with block `req_odd_idx`. If
    `req_odd_tweak` is also high, drive it with the tweak instead.
  * If `req_even_valid` is high, drive `p_even` with block `req_even_idx`.
  * Blocks are numbered 1..m.
* **Ciphertext.** Each cycle with `c_valid` high carries blocks `c_odd_idx` and
  `c_even_idx`. Blocks 3..m arrive in pair order. Blocks 1 and 2 come last, in
  the cycle `done` is high.

There is no back-pressure. The host must supply data in every cycle that it is
requested, and accept every output.

## Where this RTL departs from the published architecture

* **Schedule and cycle count.** The BRW order is a list schedule computed at
  elaboration, with 64 accumulators and 5 idle cycles per pass. The total is
  315/316 cycles against the published 319.
* **Host order.** Blocks are requested and produced in BRW pair order. The
  counter counts in that order, so ciphertext needs no reordering buffer.
* **tau.** tau is computed as E(fStr) on the odd core at the start of every
  sector, as the algorithm and the timing diagram show. The block diagram also
  draws a separate tau input port on the hash unit; this RTL has none.
* **fStr.** Its value is not given by the source, so here it is a parameter,
  defaulting to all ones. Any other fixed value works, provided encryption and
  decryption agree on it.
* **Interior design of the parts.** The source describes the following only by
  their function:
  * the key schedule: sequential, one round key per cycle;
  * the stage split of the multiplier: pre-sums, 27 16×16 products,
    recombination, reduction;
  * the S-box: a table computed at elaboration from its definition.
* **C2 register.** One extra register holds C2 for a cycle, so that C1 and C2
  leave together.

## Not included

* **Decryption.** It reuses the same parts in a different order, but its datapath
  is not given in the source, so it is not built.
* **The other evaluated architectures.** These are FAST[AES,Horner]-2 (two
  multipliers with an 8-decimated Horner hash), the single-core variants, and
  AEZ-2.
* **Timing and area figures.** The published numbers come from Virtex-5 and
  Virtex-7 implementations. Nothing here reproduces them.

## Verification

Every module has a self-checking testbench in `tb/`. Expected values come from
the reference models in `tb/fast_ref_pkg.sv`, which are written differently from
the RTL:

* AES uses a byte-array implementation. Its S-box comes from the generator-loop
  construction.
* GF(2^128) products use shift-and-add.
* BRW is evaluated bottom-up from its recursive definition.
* FAST encryption is written out step by step.

The AES parts are also checked against the example vectors of the AES standard.

| Testbench | What it checks |
|---|---|
| `tb_aes_sbox` | all 256 entries |
| `tb_aes_key_schedule` | standard round keys; ready after 11 cycles |
| `tb_aes_pipe_enc` | standard vectors; 200 random blocks back to back; latency 11 |
| `tb_gf128_mul_kara` | 304 products; latency 4 |
| `tb_pair_counter` | every pair once; dependency distance of at least 5; pass length |
| `tb_brw_poly_eval` | tau·BRW and tau^2·BRW over 255 random blocks, fed in a shuffled order; single products; latency |
| `tb_fast_ctr_mode` | single-block encryption; counter pairs; latency 11 |
| `tb_fast_brw2_small` | whole engine at m = 8: 4 sectors, a key change, cycle count, each block leaves once |
| `tb_fast_brw2_top` | whole engine at full size (m = 256, defaults): 3 sectors, a key change, 315 cycles each |

The two end-to-end benches also count each mechanism and fail if any never
happened:

* the tau encryption;
* both Feistel encryptions;
* counter pairs on both cores;
* out-of-order block requests;
* idle cycles of the schedule;
* final and single products of the hash unit;
* a key reload.

Every testbench prints `TB_RESULT checks=N failures=F`.

To simulate with Verilator 5, for example the full-size engine:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fast_brw2_top \
  rtl/fast_pkg.sv tb/fast_ref_pkg.sv rtl/*.sv tb/fast_tb_body.sv tb/tb_fast_brw2_top.sv
./obj_dir/Vtb_fast_brw2_top
```

For any other bench, replace the last file and the top-module name. Compile the
two packages first.
