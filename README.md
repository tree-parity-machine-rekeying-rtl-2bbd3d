# Tree Parity Machine Rekeying Architecture (TPMRA)

Two chips that share no secret can agree on one over a public wire by letting
two small neural networks learn from each other. Each chip holds a *Tree
Parity Machine* (TPM) with secret random weights. Both machines are fed the
same pseudo-random inputs. After each input the two sides publish their
one-bit outputs, and each side nudges its weights only when the two outputs
agreed. The weight vectors perform a coupled random walk and, after a few
hundred outputs, become identical. The common weight vector is the new key.
An eavesdropper who sees the same inputs and outputs but can only listen, not
take part in the exchange, synchronises far more slowly.

This RTL is one party's core. It runs key exchanges back to back for as long
as an encryption unit asks for keys, so keys can be replaced many times a
second (re-keying). Two instances, wired back to back, make a complete link.
The default configuration is the largest one the architecture was published
with: a 588-bit key, using six adders shared over time (the "semi-parallel"
form). One parameter turns it into the single-adder "serial" form.

## 1. The Tree Parity Machine

A TPM has `K` hidden units. Hidden unit `k` has `N` inputs `x[k][j]` in
{-1,+1} and `N` integer weights `w[k][j]` in `[-L, L]`. Per input vector:

    sum[k] = SUM_j w[k][j] * x[k][j]
    y[k]   = sign(sum[k])          (+1 or -1, see section 6 for sum = 0)
    O      = y[0] * y[1] * ... * y[K-1]      (the "parity" output)

Since `x = +-1`, the product is only a conditional negation of the weight,
so the whole datapath is adders. With `K=3, N=49, L=4` there are 147 weights
of 4 bits each: a 588-bit key.

**Learning (Hebbian, with clipping).** After both outputs `O_A(t)`, `O_B(t)`
are known, each party, for the step `t`:

* does nothing if `O_A(t) != O_B(t)`;
* otherwise, for every hidden unit with `y[k](t) == O(t)`, sets
  `w[k][j] += O(t) * x[k][j](t)` for all `j`, and clips the result back into
  `[-L, L]` (a weight of +4 that would become +5 stays +4).

Units that disagreed with the output are left alone. Once the weights are
equal they stay equal: both parties see the same inputs, compute the same
outputs and make the same updates.

**When are they synchronised?** Neither side can look at the other's
weights. They count consecutive steps with equal outputs instead. After
`T_MIN` equal outputs in a row, chance agreement is very unlikely, and the
weights are taken as the key.

## 2. One party's core

    tpmra (one party)
    +-------------------------------------------------------------+
    |  tpm_khbpc  Key Handshake & Bit Package Control              |
    |    - key handshake with the encryption unit                  |
    |    - bit package exchange with the other party               |
    |    - equal-output counter (synchronisation test)             |
    |  tpm_watchdog   iteration counter with programmable limit    |
    |  tpm_unit   Tree Parity Machine unit                         |
    |    tpm_control     FSM: init, compute package, learn         |
    |    tpm_crc_gen     common pseudo-random inputs               |
    |    tpm_parity      sums, signs, parity (ADDERS lanes)        |
    |    tpm_weight_adj  learning rule (ADDERS lanes)              |
    |    tpm_regbank     weights, stored inputs/signs/outputs      |
    +-------------------------------------------------------------+

| file | role |
|---|---|
| `rtl/tpm_pkg.sv` | default sizes, the `party_e` type, width helpers |
| `rtl/tpmra.sv` | top: one party's core |
| `rtl/tpm_khbpc.sv` | key handshake, bit package exchange, synchronisation counter |
| `rtl/tpm_watchdog.sv` | supervises the length of an exchange |
| `rtl/tpm_unit.sv` | the TPM unit (wires the five parts below) |
| `rtl/tpm_control.sv` | the TPM unit's FSM |
| `rtl/tpm_crc_gen.sv` | CRC/LFSR input generator |
| `rtl/tpm_parity.sv` | parity computation |
| `rtl/tpm_weight_adj.sv` | weight adjustment |
| `rtl/tpm_regbank.sv` | register bank |

Top-level ports (`rtl/tpmra.sv`):

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, active-low asynchronous reset |
| `party` | in | 1 | strap, `PARTY_A` (0) at one end, `PARTY_B` (1) at the other |
| `req_key` | in | 1 | encryption unit wants keys |
| `key_cha` | out | 1 | a new key is on `key` |
| `key_com` | in | 1 | encryption unit has taken the key |
| `key` | out | `K*N*WB` | the key, weight `i` in bits `[i*WB +: WB]`, two's complement |
| `bp_out`, `bp_req_out` | out | `B`, 1 | own bit package and its request |
| `bp_ack_in` | in | 1 | partner acknowledges our package |
| `bp_in`, `bp_req_in` | in | `B`, 1 | partner's bit package and its request |
| `bp_ack_out` | out | 1 | we acknowledge the partner's package |
| `sync_error` | out | 1 | the watchdog ran out; stays high until the next key |
| `wd_limit` | in | `WD_W` | watchdog limit in iterations, 0 = off |
| `crc_seed` | in | `CRC_W` | common seed of the input generator (same at both ends) |
| `w_init` | in | `K*N*WB` | secret random initial weights (different at both ends) |

The initial weights come from outside (a fixed device value, a separate
random source or a noise source). They are sampled at the start of every
exchange, so the source must present fresh values for each key. The seed is
sampled at the first exchange after reset. If it is kept secret between the
two ends, it also authenticates them, since a stranger cannot produce the
right outputs.

## 3. The bit package exchange (the central mechanism)

Sending one output bit at a time over a real bus would waste almost all of
the bus in protocol overhead. The core therefore computes `B = 32` outputs
with **fixed weights**, sends them as one 32-bit *bit package*, receives
the partner's package, and only then learns from all 32 steps in order.
Everything the learning needs for those 32 steps has to be kept until the
partner's package has arrived. That is the inputs (`B*K*N` = 4704 bits),
the hidden signs (`B*K`) and the own outputs (`B`). This storage is most of
the core's area: about 4700 of its roughly 6300 flip-flops.

One exchange, as seen by `tpm_khbpc`:

1. **Start.** `tpm_init` to the TPM unit: load `w_init` (clipped to
   `[-L, L]`), clear the watchdog and the equal-output counter. The first
   exchange after reset also loads `crc_seed`.
2. **Compute.** `tpm_control` runs `B` iterations. For iteration `t`, the
   parity unit pulls the next `K*N` input bits from the CRC generator,
   `ADDERS` per clock, and writes them to input slot `t` as it goes. It
   then stores `y(t)` and `O(t)`. The outputs form the package, bit `t` =
   `O(t)`, with 1 meaning +1.
3. **Exchange.** The package goes out on `bp_out` and the partner's comes in
   on `bp_in`, with independent request/acknowledge handshakes (section 5).
   Either side may be slower; the faster one waits.
4. **Learn.** The partner's package is handed to the TPM unit (`tpm_learn`).
   For `t = 0 .. B-1`: if `O(t) == partner(t)`, the weight adjustment unit
   applies the rule using the stored `x(t)`, `y(t)`, `O(t)`. If not, the
   step costs one cycle. The watchdog advances by `B`.
5. **Test.** The controller compares the two packages bit by bit. A package
   with no mismatch adds `B` to the equal-output counter. A package with a
   mismatch sets the counter to the number of equal bits after its last
   mismatch, because bit `B-1` is the most recent iteration. The counter
   stops counting once it has reached `T_MIN`.
6. **Decide.** Once learning is done:
   * counter `>= T_MIN`: copy the weights into the key register, raise
     `key_cha`, and wait for the key handshake;
   * watchdog expired: raise `sync_error` and restart at step 1 with fresh
     initial weights (the input sequence just continues);
   * otherwise: `tpm_next` and back to step 2 with the updated weights.

Both parties make exactly the same decisions, because they see the same two
packages, so they stay in lock-step without any extra messages. The
parties may run at different speeds: every wait is a handshake, never a
fixed delay.

Consequences of the batch learning that a user should know:

* Synchrony shows up only once per package. The key is therefore taken at
  a package boundary, after at least `T_MIN` equal outputs, and the counter
  can over-shoot `T_MIN` by up to `B - 1`.
* The learning of a package starts only after the whole package has been
  computed and exchanged. Computing and learning do not overlap.

**Cycle budget** (defaults: `K=3`, `N=49`, `ADDERS=6`, so `C = ceil(N/ADDERS) = 9` chunks per unit):

| phase | cycles |
|---|---|
| one output | `K*C + 1` = 28 |
| one package | about `B*(K*C+1) + 2` = 898 |
| one agreeing learning step | `1 + sum over units of (C if the unit learns, else 1)` plus a few, at most about 31 |
| one disagreeing learning step | 1 |
| exchange handshakes (back-to-back partner, same clock) | a few |

In simulation, a complete 588-bit key takes about 870 iterations (27
packages) and about 35,000 cycles, which is 40 cycles per iteration.

## 4. The TPM unit datapath

**Adder lanes (`tpm_parity`).** The core has no multiplier. The `ADDERS`
adder lanes are shared over time. Hidden units are done one after the
other. Within unit `k`, chunk `c` (`c = 0 .. C-1`) gives lane `p` the input
`j = c*ADDERS + p`. The lane adds `+w` or `-w` into its own partial-sum
register. Lanes with `j >= N` in the last chunk add nothing. At the end of
the unit the lane partial sums are added, the sign is taken, and the lanes
are cleared. After the `K`th unit the parity of the signs is the output.
`ADDERS = 6` is the semi-parallel architecture. `ADDERS = 1` is the serial
one (one adder, 147 cycles per output). Sum widths come from
`tpm_pkg::sum_width` and cannot overflow.

**Weight adjustment (`tpm_weight_adj`)** walks the same chunk schedule. For a
hidden unit that learns, it adds `+-1` to `ADDERS` weights per cycle and
clips at `+-L`. A unit that does not learn costs one cycle.

**Register bank (`tpm_regbank`).** Weights, the per-iteration inputs, signs
and outputs live in flip-flop arrays with lane-wide write ports and
combinational read ports. No RAM macro is used. The packed weight vector is
the key.

**Input generator (`tpm_crc_gen`).** A 32-bit Galois LFSR with the CRC-32
polynomial `0x04C11DB7`, which is a CRC generator clocked with a zero data
stream. It produces `ADDERS` bits per clock, in the same order a
one-bit-per-clock generator would give them. Both ends get the same seed and
consume bits in the same order, so their inputs are identical. An all-zero
seed is replaced by all ones.

**Control (`tpm_control`)** is a seven-state FSM: idle, start output, wait
for output, package ready, learn check, learn wait, done. It accepts the
next `init`/`next` command already in its done cycle.

## 5. Handshakes at the edges

**Bit packages.** Each direction has a four-phase handshake. The sender puts
its package on `bp_out` and raises `bp_req_out`. The receiver samples `bp_in`
while `bp_req_in` is high and raises `bp_ack_out`. The sender drops the
request, and the receiver then drops the acknowledge:

    bp_req  ___/""""""""""\_______
    bp_ack  ______/"""""""""\_____
    bp_data ===<  package  >======

The two directions run independently, and a core learns only when both its
own send and its receive are complete. Connect `bp_out`, `bp_req_out` and
`bp_ack_out` of one core to `bp_in`, `bp_req_in` and `bp_ack_in` of the
other. The signals are synchronous to `clk`. If the two cores run on
different clocks, put synchronisers between them.

**Keys.** While `req_key` is high the core keeps producing keys. A new key
appears on `key` together with `key_cha`, which stays high until `key_com`
rises. The core waits for `key_com` to fall, then starts the next exchange
if `req_key` is still high. `key` holds the last key until the next one
replaces it, so the encryption unit can keep using it. An exchange that has
started always finishes, even if `req_key` falls, so the partner is never
left waiting. Assertions in `tpm_khbpc` check that `bp_req_out` and
`key_cha` are held until acknowledged.

**Watchdog.** The number of iterations an exchange needs is random.
`tpm_watchdog` counts iterations, `B` per package, and expires at
`wd_limit`. The limit should be set with the configuration's typical
synchronisation time in mind: several times the mean of about 900
iterations at the defaults. On expiry the exchange starts over and
`sync_error` is raised.

## 6. The sign of a zero sum: where this design departs

With an even number of weights per unit, `sum[k]` can be exactly 0. The
published architecture defines a party-specific sign for that case: +1 at
one party and -1 at the other. The same description also says that the
implemented version uses parallel (Hebbian) learning and that the weights
stay identical once synchronised. The two statements do not fit together. With
identical weights, a zero sum then gives *different* outputs at the two
ends. The counter never reaches `T_MIN`, and the mismatches push the
weights apart again. In simulation at 588 bits, the party-specific rule
needed about 14,000 to 49,000 iterations per key instead of about 900.

This design follows the parallel-weights description: by default both
parties map a zero sum to +1 (`TIE_BY_PARTY = 0`). Setting `TIE_BY_PARTY = 1`
gives the party-specific rule, with the `party` strap choosing the side. The
strap is also a port at the default, so a design can switch without
rewiring.

## 7. Parameters

Defaults are in `rtl/tpm_pkg.sv`. Both ends must use the same values.

| parameter | default | meaning | origin |
|---|---|---|---|
| `K` | 3 | hidden units | published configuration |
| `N` | 49 | inputs per hidden unit (7, 13, 19, 25 give 84- to 300-bit keys) | published |
| `L` | 4 | weight range `[-L, L]` | published |
| `WB` | 4 | bits per stored weight (key = `K*N*WB` bits) | published (L-bit adders) |
| `B` | 32 | bit package length = bus width | published |
| `ADDERS` | 6 | adder lanes; 6 = semi-parallel, 1 = serial | published |
| `TIE_BY_PARTY` | 0 | sign rule for a zero sum (section 6) | this design |
| `CRC_W`, `POLY` | 32, `0x04C11DB7` | input generator | this design |
| `T_MIN` | 128 | equal outputs needed for a key | this design |
| `WD_W` | 16 | width of the watchdog limit | this design |

`WB` must hold `-L .. L` in two's complement (`WB >= clog2(L+1)+1`).

## 8. Performance against the published figures

The published ASIC results give, for each key length, a clock frequency and
a key rate assuming 400 iterations per key. From those the implied cycles per
iteration can be worked out and compared with this RTL (simulated, 5 keys per
configuration, `tb/tb_tpmra_sweep.sv`):

| key bits | N | published semi-parallel cyc/it | this RTL, ADDERS=6 | published serial cyc/it | this RTL, ADDERS=1 |
|---|---|---|---|---|---|
| 84 | 7 | 18.3 | 11.8 | 29.8 | 31.6 |
| 156 | 13 | 19.7 | 15.7 | 46.2 | 56.0 |
| 228 | 19 | 20.3 | 19.9 | 58.1 | 80.1 |
| 300 | 25 | 21.1 | 24.0 | 70.3 | 105.1 |
| 588 | 49 | 25.5 | 40.1 | 121.7 | 204.0 |

(Published figures: for example 182 MHz / (17,839 keys/s x 400 iterations) = 25.5.)

At large `N` this RTL needs up to 1.7 times more cycles per iteration,
because learning is done one step after another once the package has
arrived, and it runs at the adders' speed. A design that learned while
computing the next package, or that used more lanes for learning, would
close the gap. The published architecture does not say how it schedules
this.

The measured number of iterations per key was about 770 to 1070, against
the 400 assumed for the published rates. The count here includes the
`T_MIN = 128` outputs of the synchronisation test and rounds up to a whole
package.

No timing or area numbers come from this RTL. A generic synthesis of the
default core gives about 2,600 cells and 6,300 flip-flop bits.

## 9. Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/tpm_pkg.sv -y rtl \
        tb/tb_tpmra.sv --top-module tb_tpmra
    obj_dir/Vtb_tpmra

Replace `tb_tpmra` with any testbench below. Add `-y tb` for `tb_tpmra_sweep`,
which instantiates the helper `tb_tpmra_pair`.

| testbench | what it checks |
|---|---|
| `tb_tpm_crc_gen` | output bits against a one-bit-per-clock reference LFSR, zero seed, two generators with one seed agree |
| `tb_tpm_parity` | sums, signs, parity and the TDMA cycle count against a reference model; both sign rules |
| `tb_tpm_weight_adj` | learning rule and clipping against a reference, random weights and inputs |
| `tb_tpm_regbank` | all write/read ports and initial-weight clipping against a shadow model |
| `tb_tpm_control` | FSM sequence with modelled sub-units: package bits, skipped/learned steps |
| `tb_tpm_unit` | whole TPM unit against a complete software TPM with the same LFSR, package by package |
| `tb_tpm_watchdog` | expiry against a reference count, including limits on package boundaries |
| `tb_tpm_khbpc` | both handshakes with random delays, equal-output counter, key hand-over, watchdog restart |
| `tb_tpmra` | two full-size cores back to back: keys agree, watchdog restarts happen, handshake stalls, skipped and applied learning steps |
| `tb_tpmra_sweep` | all ten published configurations (N = 7..49, serial and semi-parallel): keys agree, iterations per key, cycles per iteration |

`tb_tpmra` runs at the default parameters with no overrides. It first
uses a watchdog limit too short to synchronise, to exercise `sync_error`
and the restart, then a normal limit, for three keys. It runs in about
half a second.

## 10. Departures and open points

* **Zero-sum sign.** Both parties use +1 by default (section 6); the
  party-specific rule is available by parameter.
* **Synchronisation length `T_MIN`, the generator polynomial and width, the
  watchdog width and unit** are not given by the published design and are
  chosen here.
* **Handshake details.** The signal names (`req_key`, `key_cha`,
  `key_com`, `BP_req`, `BP_ack`, the bit package bus, `sync_error`) are the
  published ones. Their exact four-phase protocol, the restart policy on
  `sync_error` and the hold of the last key are choices of this design. The
  published diagram shows the package bus and its handshake as bidirectional.
  Here each is split into an in and an out port.
* **Package hand-over.** The TPM unit gives the controller a whole 32-bit
  package, rather than parity bits that the controller packs into slices.
* **Scheduling.** Computing and learning do not overlap (section 8), so
  large configurations need more cycles per iteration than published.
* **Not included:** the encryption unit, the source of initial weights, the
  clock generation (a DPLL in the published design) and the channel between
  the parties. They are ports here. The anti-parallel (anti-Hebbian) variant
  is not built.
* **Clocking.** One clock, no clock-domain crossing inside the core.
