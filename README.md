# A uniform-ladder SECP256K1 public-key engine

A crypto wallet derives its public key as `Q = k·G`: it multiplies the
generator point `G` of the SECP256K1 curve (`y² = x³ + 7` over the 256-bit
prime field `p = 2²⁵⁶ − 2³² − 977`) by the 256-bit private key `k`. In a
hardware wallet an attacker can measure power or electromagnetic emission
while this runs. Any difference in work between key bits `k_i = 1` and
`k_i = 0` can then leak the key.

This RTL implements the architecture of Lemayian, Gagnon, Zhang and Giard,
*"WiP: Towards a Secure SECP256K1 for Crypto Wallets: Hardware Architecture
and Implementation"*. It removes such differences at three levels:

* **Point arithmetic without branches.** Every point operation uses the
  complete projective addition formula for `a = 0` curves, from Renes,
  Costello and Batina. Doubling is the same formula with the same point on
  both inputs. Adding the point at infinity, or a point to its negative,
  needs no special case.
* **A ladder step that looks the same for both key bits.** The Montgomery
  ladder runs its addition and its doubling on two identical point adders,
  PA0 and PA1, which start together and finish together. PA0 always writes
  register R0 and PA1 always writes R1. A temporary point register Rt is
  written in the same clock edge as R0 and R1. The key bit only steers
  multiplexers.
* **Arithmetic whose timing does not depend on the data.** The modular
  multiplier spends the same cycles on every multiplier bit.

At the end, a binary-inversion unit (BIA) converts the projective result to
affine `(x, y)`. It borrows R1 and Rt as its working registers.

## Block map

```
                 k ──► Cntl ──► ki, init, selects, write enables
                                   
  P=(px,py,pz) ──────────────────────────────┐
                                             ▼
  ki?R1:R0, R0 ────────► PA0 ───────────► [mux] ──► R0 ──► r_hat ──┐
                                                                   │
  ki?R1:R0, init?P:R1 ─► PA1 ───────────► [mux] ──► R1             │
                                             ▲                     │
                  R0, R1, Rt ──► BIA ────────┤                     │
                                             ▼                     │
                         ki?R0:R1 ──────► [mux] ──► Rt ──► qx, qy  │
                                                                   │
       (PA0 and PA1 each: operand muxes, MALU, 8x256 register      │
        file, program sequencer; the BIA reads R^ = R0) ◄──────────┘
```


| File | Block |
|---|---|
| `rtl/secp_pkg.sv` | constants (p, b3 = 21, G), `point_t`, MALU op codes, field helpers, and the 33-step addition program `pa_ucode` |
| `rtl/malu.sv` | modular add / subtract / shift-and-add multiply |
| `rtl/pa_unit.sv` | one complete point adder (PA0 or PA1): operand multiplexers, MALU, 8×256 register file, program sequencer |
| `rtl/point_reg.sv` | one 3×256 point register (R0, R1 or Rt) |
| `rtl/ladder_cntl.sv` | the controller (Cntl) that walks the key bits |
| `rtl/bia.sv` | binary inversion and affine conversion |
| `rtl/secp256k1_top.sv` | the whole engine |

## Field arithmetic: the MALU

All values are 256-bit residues in `[0, p)`. Only two primitives exist:
`mod_add(a, b)` and `mod_sub(a, b)` in `secp_pkg`. Each is one 257-bit
add or subtract followed by one conditional correction by `p`.

`malu` performs ADD, SUB or MUL. A multiplication is interleaved
shift-and-add, most significant multiplier bit first. Each multiplier bit
takes two cycles on the one shared modular adder:

1. `acc ← acc + acc mod p`, and then
2. `acc ← acc + a mod p` if the bit is 1.

The second sum is always computed, and the bit only chooses which value is
kept. So a multiplication always takes 2 × 256 cycles, whatever its
operands. Counted from the start cycle, ADD and SUB are ready after 2
cycles and MUL after 513.

The published design names a shift-and-add MALU but gives no schedule. The
two-cycles-per-bit form is chosen here because it needs a single adder,
which suits a design that aims at a small LUT count. It also lands close to
the published latency (see *Timing*).

## Point addition: `pa_unit`

The adder runs a fixed program of 33 MALU operations. This is the complete
addition formula for `Y²Z = X³ + bZ³` with `b3 = 3b = 21`: 12 general
multiplications, 2 multiplications by `b3`, and 19 additions or
subtractions. The program lives in `secp_pkg::pa_ucode`, one line per
formula step with the formula as a comment. Each entry names:

* the MALU op;
* two sources: one of the register-file words t0…t4, X3, Y3, Z3, one of the
  six input coordinates, or `b3`;
* a destination word.

A program counter steps through it. The controller issues each operation
to the MALU and, when the MALU is done, writes the result into the
register file. Words X3, Y3 and Z3 of the register file form the output.

The schedule never changes, so an addition takes 7254 cycles from start to
`done` for any inputs. This includes doubling, the point at infinity
`(0 : 1 : 0)` and `P + (−P)`, whose result has `Z = 0`.

## The ladder on two adders

The ladder keeps `R1 − R0 = P`. Before the loop, `R0 ← P` and `R1 ← 2P`.
Then, for each key bit below the leading one, from the top down:

| `k_i` | PA0 computes → R0 | PA1 computes → R1 | Rt loaded with |
|---|---|---|---|
| 1 | `R1 + R0` | `R1 + R1` | old `R0` |
| 0 | `R0 + R0` | `R0 + R1` | old `R1` |

The operand multiplexers are:

* PA0: A = `k_i ? R1 : R0`, B = `R0`
* PA1: A = `k_i ? R1 : R0`, B = `init ? P : R1`

Whatever the bit, both adders run the same program on the same schedule,
and R0, R1 and Rt are written together on the same clock edge when they
finish. The adders do not know which of their results is "the addition"
and which is "the doubling". Register R0 always receives PA0's output, so
the destination of each result does not depend on the key. An assertion in
the top level checks that the two adders stay in lock step.

`R1 ← 2P` is one run of the same step. PA1's second operand is switched to
the input point, and only R1 is written.

**The temporary register Rt.** In the source, the prose and the pseudocode
disagree about what Rt receives. The prose says Rt is loaded with R0 when
`k_i = 1` and with R1 when `k_i = 0`. The pseudocode writes `2·R0` and
`2·R1`. This RTL follows the prose. The architecture figure also feeds the
R0 and R1 buses straight into Rt's multiplexer, and a third doubling would
need a third adder, which the architecture does not have. Rt's contents
during the ladder are never used. It exists so that every step writes
three registers.

**Leading zeros.** The ladder algorithm assumes the top key bit is 1. A
real private key may have leading zeros. The controller therefore first
scans down from bit 255 to the leading one, spending one cycle per bit.
This is a choice of this RTL, and it reveals the key's bit length through
timing. `k = 0` is refused with `err`.

## Affine conversion: `bia`

The ladder's result `R^ = (x0 : y0 : z0)` stays in R0. The BIA computes
`r = z0⁻¹ mod p` with the binary extended-Euclid method. It starts with
`u = z0`, `v = p`, `x1 = 1`, `x2 = 0`. Each cycle does one of:

* halve an even `u`, and halve `x1` mod p (adding `p` first if `x1` is
  odd);
* halve an even `v`, and likewise `x2`;
* subtract the smaller of `u` and `v` from the larger, and the matching
  `x` from the other `x` mod p.

When `u` reaches 1 the inverse is `x1`. When `v` reaches 1 it is `x2`.

The BIA has no working registers of its own. `u` and `v` live in R1.x and
R1.y, and `x1` and `x2` in Rt.x and Rt.y. So the inverse ends up in Rt.x
or in Rt.y. The BIA then uses its own MALU to form the two products:

* first the product whose destination word does not hold `r`;
* then the one whose destination does. The MALU has already captured `r`
  when it starts, so `r` may then be overwritten.

At the end Rt holds `(x, y, 1)`, which the top level presents as `qx` and
`qy`. If `z0 = 0` (the result is the point at infinity, for example when
`k` is a multiple of the group order), the BIA raises `fail` at once, and
the top level reports `err`.

The inversion takes a data-dependent number of cycles, at most about
3 × 256, plus 2 × 514 cycles for the products. The source does not discuss
the inverter's timing. Note that `z0` depends on the key.

## Timing

| Quantity | Cycles |
|---|---|
| MALU ADD / SUB / MUL | 2 / 2 / 513 |
| one point addition (`pa_unit`) | 7254 |
| one ladder step (start to commit) | 7255, for `k_i = 0` and `k_i = 1` alike |
| 256-bit key with top bit set, start to `done` | 1,858,844 (simulated) |
| published latency for the same operation | 1,895 k |

The total is the 2P step plus 255 ladder steps (256 × 7255 =
1,857,280 cycles), plus the scan, the handshakes and about 1.5 k cycles of
conversion. After yosys coarse synthesis the top level has about 9.6 k
flip-flop bits plus 832 bits inferred as memory. The published figure is
about 13.4 k to 13.9 k registers on an FPGA.

## Interface (`secp256k1_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | rising-edge clock, asynchronous active-low reset |
| `start` | in | 1 | one-cycle pulse while `busy` is low; `k` is captured |
| `k` | in | `KEY_BITS` (256) | private key |
| `px`, `py`, `pz` | in | 256 each | input point in projective form; for the generator use `(Gx, Gy, 1)` (`secp_pkg::GX/GY`); hold stable while `busy` |
| `qx`, `qy` | out | 256 each | affine `k·P`, valid from `done` until the next start |
| `r_hat` | out | 768 | projective ladder result (R0) |
| `busy` | out | 1 | operation in progress |
| `done` | out | 1 | one-cycle pulse at the end |
| `err` | out | 1 | with `done`: `k = 0` or `k·P` is the point at infinity |

All inputs must be reduced mod p. The only parameter is `KEY_BITS`. The
field width is fixed at 256 by the curve.

## Simulating

Every testbench checks itself and ends by printing
`TB_RESULT checks=N failures=M`. The reference model `tb/secp_ref_pkg.sv`
uses 512-bit products with `%`, Fermat inversion and the textbook affine
chord-and-tangent formulas, so it shares no code with the RTL. It is
itself checked against the published x coordinates of 2G and 3G.

```
verilator --binary --timing --assert -y rtl rtl/secp_pkg.sv tb/secp_ref_pkg.sv \
          tb/tb_secp256k1_top.sv --top-module tb_secp256k1_top
./obj_dir/Vtb_secp256k1_top
```

Replace the testbench name to run another one.

| Testbench | What it checks |
|---|---|
| `tb_malu` | ADD/SUB/MUL on edge values (0, 1, p−1, p−2, 21) and random operands; exact latencies |
| `tb_pa_unit` | distinct points, doubling, infinity on either side, `P + (−P)`, random multiples of G with random z; constant latency |
| `tb_point_reg` | reset value, every combination of the word enables |
| `tb_ladder_cntl` | with stand-in adders: one step per bit below the leading one with the right `k_i`, all three registers written together, equal step lengths, `k = 0` refusal (16-bit keys) |
| `tb_bia` | affine result for z = 1, 2, p−1 and random z; z = 0 raises `fail`; R1.z untouched; cycle bound |
| `tb_secp256k1_top` | full 256-bit engine: k = 1, 2, 3, a 64-bit key on `3G` in projective form, a full-length random key, a key with leading zeros, `k = n` (infinity) and `k = 0`. It counts that both kinds of ladder step, the Rt loads, the scan, the 2P step, the conversion and both refusals occurred, that all ladder steps last 7255 cycles, and that a full-length key finishes within 5 % of the published 1,895 k cycles. It takes about 10 s. |

## Where this RTL goes beyond or departs from the source

* The MALU schedule, the program-counter sequencer, the register-file word
  assignment, the BIA's register mapping and the order of its products,
  all handshakes and resets are this design's own. The source shows these
  blocks but not their insides.
* Rt receives the old R0 or R1 rather than a doubled point (see above).
* In the architecture figure, the bus that feeds the adder's register file
  back to its multiplexers carries the label 1280 bits (five words). Here
  all eight words can be selected, because the formula also reads X3, Y3
  and Z3 as operands.
* The controller scans for the key's leading one, which the source does
  not describe. The scan leaks the key's bit length. The inversion time
  depends on `z0`.
* There is no countermeasure beyond those the source describes: no
  randomised projective coordinates, no scalar blinding. The source itself
  does not measure side-channel leakage.
* FPGA mapping, clock targets and a host interface are outside this RTL.
