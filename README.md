# Strong Anti-SAT and Robust SAS logic locking of a 32-bit multiplier

Logic locking guards a design against an untrusted foundry. The chip gets extra
key inputs, and it computes correctly only when the secret key, held in
tamper-proof on-chip storage, is applied. Locking is judged on two counts, and
they pull against each other:

* **SAT resilience.** An attacker holds the netlist and a working chip. They
  can run the oracle-guided SAT attack, where each iteration finds a
  *distinguishing input* (DI) and discards every key that gets it wrong. Every
  wrong key has to corrupt very few inputs, or the attack finishes quickly.
* **Effectiveness.** A wrong key, including an "almost right" key found by an
  approximate attack, must make the chip useless for real work. Error-tolerant
  workloads such as neural-network inference shrug off rare errors.

For any locking scheme, the average fraction of inputs that a wrong key
corrupts equals the average fraction of wrong keys that corrupt an input. The
expected number of SAT iterations is at least the inverse of that number. So
the *total* error cannot be raised without weakening SAT resilience. It can,
however, be *placed*. **Strong Anti-SAT (SAS)** picks a handful of *critical
minterms*: input values that matter a lot to the application, such as the most
common multiplier operands. It gives those values a high error rate under any
wrong key, and gives every other input an error rate of 2^-n. Every wrong key
corrupts at least one critical minterm, so the damage shows up at the
application level. The expected SAT effort still grows as 2^n.

**Robust SAS (RSAS)** computes the same function, but it also resists *removal*.
The protected circuit itself is changed to be wrong on the critical minterms,
and the locking block puts that error right under the correct key. Cutting
the block out and tying its output to 0 leaves a broken circuit.

This RTL locks the multiplier of a 32-bit 80386-class processor, which is
that processor's longest combinational path. It can be built in either the SAS
or the RSAS form, with one or more locking blocks.

## Top level: `locked_multiplier`

```
             a[31:0] b[31:0]
                 |     |
        +--------v-----v---------+     X = b[N-1:0]
        |  host multiplier       |----------------+------------------+
        |  (original for SAS,    |                |                  |
        |   altered for RSAS)    |      key[0] -> block 0   key[L-1] -> block L-1
        +-----------+------------+                | y_lock[0]        | y_lock[L-1]
                    | p_host[63:0]                v                  v
                    +------------> p[WIRE_BIT[0]] ^=        p[WIRE_BIT[L-1]] ^=
                                                  |
                                                  v  p[63:0]
```

| Port     | Dir | Width        | Meaning |
|----------|-----|--------------|---------|
| `a`, `b` | in  | `OPW` (32)   | operands; the low `N` bits of `b` are the locked input X |
| `key`    | in  | `L` x `2N`   | `key[j] = {K2, K1}` of block j (from the key store) |
| `p`      | out | `2*OPW` (64) | product; correct iff every block has K1 == K2 |
| `y_lock` | out | `L`          | each block's output, for test and characterisation |

The design is purely combinational. `p` follows `a`, `b` and `key` with no
clock, just as the unprotected multiplier would.

| Parameter   | Default | Meaning |
|-------------|---------|---------|
| `OPW`       | 32 | operand width |
| `N`         | 32 | locked input bits n; each block takes a 2n-bit key |
| `M`         | 4  | critical minterms m (power of two) |
| `L`         | 2  | locking blocks l (power of two, l <= m); l = 1 is "Configuration 1", l > 1 "Configuration 2" |
| `ROBUST`    | 1  | 1: RSAS (altered host + RSAS blocks); 0: SAS (original host + SAS blocks) |
| `CRIT`      | 1, -1, 2, -2 | critical minterms; block j owns entries j·M/L … (j+1)·M/L-1 |
| `XG`        | 32'h5A5A_C3C3, 32'hA5C3_0F96 | on-set point of each block's g function |
| `WIRE_BIT`  | 31, 30 | product bit each block's output is XORed into |
| `XNOR_MASK` | 0 | bits where the key layer uses XNOR instead of XOR |

n = 32 with m = 4 critical minterms over l = 2 blocks is one of the evaluated
hardware configurations. It is also the rule used for the effectiveness
results (one block for a single critical minterm, two blocks otherwise). The
values of the critical minterms, `XG` and `WIRE_BIT` are this implementation's
choices. In a real deployment they come from profiling the target workloads.
Defaults live in `rtl/sas_pkg.sv`.

A key is correct exactly when K1 == K2 inside every block. There are therefore
2^(nl) correct keys, and all of them are functionally equivalent.

## The SAS block (`sas_block`)

```
 X ──> H(X,K1) ──X'──┬──(+)K1──> g(.)     ──┐
                     │                       AND ──> Y_SAS
                     └──(+)K2──> g_bar(.) ──┘
```

* `g` (`sas_g_function`) is a point function: it is 1 for the single input
  `XG`. `g_bar` is its complement. Because both see the same X', the output is
  1 only if X' ^ K1 == XG and X' ^ K2 != XG. That needs K1 != K2, so a correct
  key never injects a fault. An immediate assertion in `sas_block` enforces
  this.
* `(+)` is XOR, or XNOR on the bits set in `XNOR_MASK`.
* Without H, this is the Anti-SAT structure. Each input X is corrupted only by
  the keys with K1 = X ^ XG: 2^n - 1 out of the 2^n(2^n - 1) wrong keys, an
  input error rate (IER) of 2^-n.

### H: placing the error on the critical minterms

H is where this design needs the most care. It must give each critical
minterm of the block an IER of exactly 1/MJ, where MJ = M/L is the number of
critical minterms in the block. To do this it divides the 2^n values of K1
into MJ disjoint *slices* of 2^n/MJ values, one slice per critical minterm:

* If X is critical and K1 lies in X's slice, H outputs X' = K1 ^ mask ^ XG.
  The g input then equals XG, so g fires for every K1 in the slice, and every
  K2 != K1 completes the fault.
* In all other cases X' = X.

Which slice a K1 value belongs to is decided by the top log2(MJ) bits of
K1 ^ XG ^ mask: the slice belongs to the critical minterm C with the same top
bits. Keying the slice on K1 ^ XG, and not on K1 alone, has a reason. C's own
pass-through key (K1 = C ^ XG ^ mask, the only K1 that would fire g for an
un-steered C) always lands inside C's slice. That has two consequences:

* C's IER is *exactly* 1/MJ. There is no extra key row outside the slice.
* The key whose K1 is C's pass-through value corrupts C and nothing else. This
  is what forces every critical minterm to be a DI in any complete SAT attack.
  The expected-iteration formula below rests on that property.

The price is a rule on the designer's choice: the critical minterms of one
block must differ in their top log2(MJ) bits. `sas_h_function` checks this at
elaboration. The defaults meet it: block 0 holds 1 and -1, block 1 holds 2
and -2, and each pair differs in bit 31.

Worked example with n = 4 and two critical minterms {1, 9} in one block, so
MJ = 2 and slices are set by bit 3 of K1 ^ XG. For X = 1, eight K1 values
(those with (K1 ^ XG)[3] = 0) steer X' onto the on-set, and each pairs with
15 values of K2. That gives 8·15 = 120 of the 240 wrong keys, an IER of 1/2.
A non-critical X such as 5 is corrupted only by the 15 keys with K1 = 5 ^ XG.

## Error rates and SAT effort

| Configuration | blocks l | IER of a critical minterm | expected SAT iterations |
|---------------|----------|---------------------------|-------------------------|
| 1             | 1        | 1/m                       | (2^n + m)/2             |
| 2             | 1 ≤ l ≤ m | l/m                      | (l·2^n + m)/(l + 1)     |

Why the second column holds: each non-critical X is covered, in each block,
by exactly one critical minterm. "Covered" means every key that corrupts X in
that block also corrupts that critical minterm. X therefore counts as an
iteration only if the attack picks it before all of its l covering critical
minterms. With DIs picked uniformly at random, that happens with probability
l/(l+1).

With several blocks, a critical minterm of block j can also be hit by another
block through that block's single non-critical row. So its IER is slightly
above l/m: 0.5018 instead of 0.5 for n = 4, m = 4, l = 2. The difference
vanishes as 2^-n.

`tb/tb_sat_attack_iterations.sv` checks this table. It runs the oracle-guided
DI attack on n = 4 instances of `locked_multiplier`, where every key can be
enumerated, with 1000 runs per configuration:

| m, l | simulated mean iterations | (l·2^n + m)/(l + 1) |
|------|---------------------------|---------------------|
| 1, 1 | 8.56  | 8.5   |
| 2, 1 | 8.90  | 9.0   |
| 2, 2 | 11.27 | 11.33 |
| 4, 1 | 10.11 | 10.0  |
| 4, 2 | 12.07 | 12.0  |
| 8, 1 | 11.96 | 12.0  |
| 8, 2 | 13.33 | 13.33 |

The exact means change a little from one simulator seed to another. The test
passes when each mean is within 4.5 standard errors of the formula. With
l = 4, n = 4 the key has 32 bits, too many to enumerate, so that case is not
simulated. Rows with a larger m show the trend that matters: more critical
minterms *raise* the SAT effort instead of lowering it.

The same test also checks four more things. The exact number of wrong keys
that corrupt each input matches the closed form. Every wrong key corrupts at
least one critical minterm. Every critical minterm ends up among the DIs. The
attack always ends with a functionally correct key.

## RSAS: resisting removal

Under SAS, an attacker who finds the locking blocks can tie their outputs to 0
and gets a perfect multiplier. RSAS changes two places for every block j:

1. **Altered host (`mul_altered`).** Product bit `WIRE_BIT[j]` is inverted
   whenever X is one of block j's critical minterms.
2. **RSAS block (`rsas_block`).** Its output is Y_RSAS = Y_SAS ^ crit_j(X).
   Under the correct key it is therefore 1 exactly on the critical minterms,
   which cancels the inversion in the host.

The two inversions meet at the same XOR, so the RSAS form computes the same
function as the SAS form for every key. `tb_sas_rsas_equivalence` checks this
for 20,000 random (operand, key) pairs, in both Configuration 1 and
Configuration 2. RSAS therefore inherits the error rates and SAT effort above.
After a removal attack the host alone is wrong on every critical operand;
`tb_locked_multiplier` checks that.

One point is inferred. One can imagine an RSAS block that keeps exactly the
SAS gate structure and changes only H. Such a block is still an AND of g and
g_bar on a shared X', so it outputs 0 for every correct key and could never
cancel the host's inversion. This RTL therefore builds the RSAS block as the
SAS structure followed by an XOR with the block's critical-minterm flag. That
flag is already computed inside H. For wrong keys this gives the expected
pattern: a critical minterm is now corrupted by the (MJ-1)/MJ share of K1
values *outside* its slice.

## Files

| File | Content |
|------|---------|
| `rtl/sas_pkg.sv` | default sizes, critical minterms, XG and wire bits; `is_pow2` |
| `rtl/sas_g_function.sv` | point function g and g_bar |
| `rtl/sas_h_function.sv` | H(X, K1), slice logic, critical-minterm flag |
| `rtl/sas_block.sv` | SAS block |
| `rtl/rsas_block.sv` | RSAS block (SAS block + output inversion on critical minterms) |
| `rtl/mul_original.sv` | unsigned OPW x OPW multiplier being protected |
| `rtl/mul_altered.sv` | multiplier with block wires inverted on critical minterms |
| `rtl/locked_multiplier.sv` | top: host multiplier + L SAS/RSAS blocks |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the two below |
| `tb/tb_sas_rsas_equivalence.sv` | SAS form == RSAS form, configurations 1 and 2 |
| `tb/tb_sat_attack_iterations.sv`, `tb/sat_dip_runner.sv` | exhaustive error-rate and DI-attack study at n = 4 |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and ends with
`$finish`. For example, the end-to-end test at the default 32-bit size:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/sas_pkg.sv tb/tb_locked_multiplier.sv --top-module tb_locked_multiplier
./obj_dir/Vtb_locked_multiplier
```

Change the testbench name to run any other. All of them finish within
seconds. `tb_locked_multiplier` drives, and counts, each behaviour at least
once:

* a correct key on ordinary and on critical operands, where the RSAS output
  restores the critical ones;
* a wrong key hitting a non-critical minterm;
* a wrong key hitting a critical minterm through its slice;
* wrong keys that leave ordinary operands intact;
* the guarantee that every wrong key breaks some critical operand;
* the removal attack.

Lint with `verilator --lint-only -Wall -Irtl -y rtl rtl/sas_pkg.sv rtl/<module>.sv`.
The only warnings are package constants a given module does not use.

## Design choices and limits

* **Locked bits and wires.** X is the full 32-bit operand b. Block outputs
  flip product bits 31 and 30. The scheme only asks for "a wire" of the
  protected circuit per block, so any other net works the same way. Change
  `WIRE_BIT`, or move the XOR into the host.
* **Multiplier.** The multiplier is unsigned and combinational (the MUL form).
  Signed IMUL and the rest of the processor are outside this RTL.
* **Key storage.** The tamper-proof key memory is not modelled. The key is a
  top-level input.
* **XOR/XNOR layer.** The scheme lets each key gate be XOR or XNOR, and lets
  the layers in front of g and g_bar differ. This RTL uses one `XNOR_MASK` for
  both layers.
* **Configuration changes.** Other configurations, such as n = 14 or 16,
  m up to 32, or l = 4, only need parameters. Keep M and L powers of two with
  L <= M <= 2^N, and let the critical minterms of each block differ in their
  top log2(M/L) bits.
* **Flattening.** The structure is meant to be flattened and resynthesised
  before layout. Left as written, the named blocks and the `crit` flag would
  make the locking logic easy to find in the netlist.
