# Key-aggregate bitstream protection for multi-tenant FPGAs: on-chip RTL

## The problem and the idea

Several mutually distrusting tenants share one FPGA. Each rents a
partition and loads its own partial bitstream into it. Each tenant wants
its bitstream to stay confidential, including from the cloud operator. The
natural approach is "bring your own key": each tenant encrypts its bitstream
with an AES-128 key K that it picks itself. The problem is getting K onto
the chip. If the FPGA kept one secret key per partition, secure on-chip
storage would grow with the number of partitions, and the operator would
have to manage all those keys.

This design solves that with a **key-aggregate cryptosystem (KAC)**, a
pairing-based public-key scheme. Every partition has a public identity `id`.
A tenant encrypts K for the identity of its partition, using one master
public key that the FPGA vendor publishes. When the vendor makes the chip,
it stores a single **aggregate key** `sk_S` in tamper-proof memory. `sk_S`
is one elliptic-curve point, and it decrypts for every identity in the set
S of that chip's partitions. So the secure storage is one point whether the
chip has 3 partitions or 100. The only trusted party is the vendor; the
cloud operator is not trusted.

On chip, the work splits in two:

* one **KAC decryption engine** per FPGA recovers K from the tenant's
  encrypted key (once per tenant session);
* one **AES-128 decryption engine** per partition receives K directly and
  decrypts any number of bitstream blocks for that partition.

K never appears on a chip pin.

## The key-recovery computation

Curve points are written in additive notation, and `e` is a bilinear
pairing into the group `G_T`, whose elements lie in `F_p^12`. For
partition `i` the chip holds:

| value     | where                               | secret? |
|-----------|-------------------------------------|---------|
| `sk_S`    | FPGA-wide, tamper-proof store       | yes     |
| `a_S`     | FPGA-wide store                     | no      |
| `b_i,S`   | store of partition `i`              | no      |
| `id_i`    | store of partition `i`              | no      |

The tenant's encrypted key is `C2 = (c0, c1, c2)`. Here `c0 = [r]P` and
`c1 = [r]([gamma]P + [alpha^i]P)` are curve points, and
`c2 = K xor H(e([alpha]P, [alpha^n]P)^r)`. The engine computes

    K = c2 xor H( e(a_S, c1) * e(sk_S + b_i,S, c0)^-1 )

It runs these steps one after another, on shared cores:

1. `T = sk_S + b_i,S`: point addition, in Jacobian coordinates.
2. `T` is converted to affine form. This takes one field inversion and four
   products.
3. `g1 = e(a_S, c1)`: a request to the pairing core.
4. `g2 = e(T, -c0)`: a second pairing request. Negating `c0` (y becomes
   p - y) gives `e(T, c0)^-1` because the pairing is bilinear. So no
   inversion in `F_p^12` is needed, only a product.
5. `g = g1 * g2`: a request to the `F_p^12` multiplier (`fp12_mul`).
6. `h = SHA-256(g)`. The twelve 256-bit coefficients are hashed with
   coefficient 11 first, big-endian, as a 384-byte message. With padding
   that is seven blocks.
7. `K = c2 xor h[255:128]` is written into the AES engine of partition `i`.

The steps run serially on shared hardware, as in the original design,
which trades latency for area. Without the pairing calls a recovery takes
about 145,000 cycles. Most of it is the Fermat inversion of step 2 (94,428
cycles) and the `F_p^12` product of step 5 (44,488 cycles). The rest is the
point addition (4,200 cycles) and the hashing (7 x 64 cycles).

**The `F_p^12` product.** The original names an `F_p^12` multiplication
core but not the field representation. `fp12_mul` uses the common
single-step form for BN254, `F_p12 = F_p[w] / (w^12 - 18 w^6 + 82)`, with
the constants as parameters. It forms the 144 coefficient products on one
`fp_mul` and one `fp_addsub`, then folds degrees 22 down to 12 back with
`w^12 = 18 w^6 - 82`. That is 166 products in 166 x (W + 12) = 44,488
cycles. The engine reaches it through a request/done port (`gtm_*`), so a
different tower would change only this core.

**What is not included.** The Tate pairing (Miller loop and final
exponentiation) is not part of this RTL. The design it comes from names it
and gives its cycle counts, but does not fix the curve, the twist, the
extension-field tower or the line functions. It also describes a symmetric
pairing `G x G -> G_T` on a BN curve, which is an asymmetric family. The
pairing core sits behind a request/done port on the top level (`pair_*`).
`pair_req` stays high, with stable operands, until the one-cycle
`pair_done` pulse; an assertion in the engine checks this, and the same
for `gtm_*`. The reported cycle counts of the originals are 83.4 M (Miller
loop) and 96.8 M (final exponentiation) at 200 MHz. Those two cores
dominate the 1.8 s key-recovery time of the original design.

## Block structure

```
fpga_provisioning_top
 +- key_nvm  u_sk_store        sk_S (x, y), tamper-proof in a real chip
 +- key_nvm  u_as_store        a_S (x, y)
 +- kac_decrypt_engine u_kac
 |   +- ec_point_unit          micro-sequenced point add / double / to-affine
 |   |   +- fp_mul             bit-serial modular multiplier
 |   |   +- fp_addsub          digit-serial modular adder/subtractor
 |   |   +- fp_inv             Fermat inverter (contains its own fp_mul)
 |   +- sha256_core
 +- fp12_mul u_gtm             F_p12 product (own fp_mul and fp_addsub)
 +- partition_slot g_part[i]   (N_PART of them)
     +- key_nvm                id, b_i,S (x, y)
     +- aes128_dec
```

`kac_pkg` holds the widths, the default prime and the shared types:
`fp_t`, `ec_affine_t`, `ec_jac_t`, `fp12_t`, `aes_blk_t` and `ec_op_e`.

### Field arithmetic (`fp_addsub`, `fp_mul`, `fp_inv`)

All three take parameters `W` (field width, 256) and `P` (the prime).
Each has a `start` / `busy` / `done` handshake; the result is valid while
`done` pulses and stays until the next start.

* `fp_addsub` works in 64-bit digits. It spends 4 cycles on the raw sum or
  difference and 4 cycles on the correction by p. The carries of the two
  passes select the reduced result. Latency is 8 cycles, the adder latency
  reported for the original design.
* `fp_mul` is an interleaved (MSB-first) shift-and-add multiplier. It takes
  one bit of `b` per cycle and brings the result back below p at every
  step, so a product takes 256 cycles. The original multiplier uses DSP
  tiles and takes about 293 cycles. This one uses no DSP blocks.
* `fp_inv` computes `a^(p-2)` by square-and-multiply on one `fp_mul`,
  taking `(W + popcount(p-2)) * (W+2)` cycles, 94,428 for the default
  prime. `inv(0) = 0`.

### Point unit (`ec_point_unit`)

A 16-word register file sits in front of one multiplier, one adder and one
inverter. A fixed micro-program per operation, in the function `uop`, lists
for each step the unit, the destination register and two source registers.
Operations:

* `EC_ADD` uses the add-1998-cmo-2 formulas: 16 products and 7
  subtractions, 4,200 cycles.
* `EC_DBL` uses dbl-1998-cmo-2 for curves with a = 0: 7 products and 12
  additions or subtractions, 1,928 cycles.
* `EC_AFF` computes `x = X/Z^2` and `y = Y/Z^3`.

`EC_ADD` raises `degenerate` when `P1 = +-P2`, because the formulas break
down there. The engine reports this as an error; it happens only if
`b_i,S = +-sk_S`. The point at infinity has no encoding. The key-recovery
path uses `EC_ADD` and `EC_AFF`. `EC_DBL` is there because point doubling
is one of the design's reported cores, and a Miller loop would need it.

### Key stores (`key_nvm`)

These are one-time-programmable registers. The first write to an entry
sets its valid bit. Later writes, and every write after `lock`, are
refused with `wr_reject`. There is no external read path. In silicon, the
`sk_S` store would be eFUSE or battery-backed RAM. Here the cells are
flip-flops, and only the access policy is modelled.

### Partitions (`partition_slot`, `aes128_dec`)

Each partition has three store entries: the 16-bit id, `b.x` and `b.y`.
It also has its own `aes128_dec`. Loading a key expands the 11 round keys
in 10 cycles. After that, each 128-bit block takes 10 cycles (one inverse
round per cycle), and `in_ready` is low while a block is in flight. The
S-boxes are computed from the GF(2^8) inverse and the affine map. Blocks
are decrypted independently, because no chaining mode is specified.

## Top-level interface (`fpga_provisioning_top`)

Parameters: `N_PART = 3` (partitions) and `ID_W = 16`.

| group       | signals | use |
|-------------|---------|-----|
| programming | `prog_en`, `prog_target`, `prog_addr`, `prog_data`, `prog_lock`, `prog_reject` | Vendor, at manufacture. `prog_target` selects the store: 0 = `sk_S` (addr 0 = x, 1 = y), 1 = `a_S`, 2+i = partition i (0 = id, 1 = b.x, 2 = b.y). |
| key request | `kac_start`, `kac_part`, `kac_c0`, `kac_c1`, `kac_c2`, `kac_busy`, `kac_done`, `kac_error` | One recovery at a time; `start` is ignored while busy. `error`: partition out of range, a store not programmed, or the degenerate point case. |
| pairing     | `pair_req`, `pair_p`, `pair_q`, `pair_done`, `pair_res` | Computes `e(pair_p, pair_q)`. Points are affine; the result has 12 coefficients. |
| bitstream in | `bs_valid`, `bs_part`, `bs_data`, `bs_ready` | Encrypted 128-bit blocks from the DMA side. |
| bitstream out | `cfg_valid[i]`, `cfg_data[i]` | Decrypted blocks of partition i, to its configuration interface. |
| status      | `part_id[i]`, `part_key_ready[i]` | Public partition ids; whether a key is installed. |

A partition can go on decrypting while the KAC engine recovers another
tenant's key. A new recovery for a partition replaces its key.

## Departures from the original design, and how far to trust this RTL

* **The pairing is external** (see above). The end-to-end test replaces
  it with a deterministic stand-in function, not a pairing; the product of
  the two stand-in values is computed by the real `fp12_mul`. So the tests
  show that every operand reaches the right place,
  that the point arithmetic is right, and that the hashing and key
  delivery are right. They cannot show that a real KAC ciphertext decrypts.
* **Curve.** The original names only "a BN curve with a 256-bit p". The
  default `P` is the 254-bit BN254 prime (`y^2 = x^3 + 3`). The datapath is
  256 bits wide, and any prime below 2^256 can be set through `P`.
  (Identifying the scalar group order as a 128-bit prime, as the original
  does, does not fit a BN curve; nothing here depends on it.)
* **Multiplier** is bit-serial rather than DSP-tiled. Its cycle count is
  close to the original's (256 against about 293), but it uses no DSP
  blocks.
* **Point formulas, inversion method, `F_p^12` representation, SHA-256 and
  AES structure** are this
  design's own choices. The original gives only their function and cost.
  The cycle counts are 4,200 / 1,928 cycles for add / double (original:
  6,231 / 5,330), 94,428 for inversion (original: about 75,000) and 10 per
  AES block (original: about 16).
* **Encodings** not fixed by the original are this design's own: the order
  in which an `F_p^12` value is hashed, the use of the top 128 bits of the
  digest as the mask for K, the store layout and the id width.
* **Secure storage** is one uncompressed point (64 bytes). The original's
  storage plot shows 40 bytes for the aggregate key, which does not match a
  point over a 256-bit field.
* Special points (infinity, `P1 = +-P2`) are rejected, not handled.

## Scaling with the number of tenants

Raising `N_PART` adds one `partition_slot` per partition: an AES engine and
a 3-entry store. The FPGA-wide secret stays one point (64 bytes), and there
is still a single KAC engine. The original reports up to 100 tenants per
FPGA. The default here is 3; set `N_PART` for more. `tb/tb_tenant_scaling.sv`
builds the top with eight partitions, recovers a key for each of eight
tenants through the one KAC engine, and checks that blocks sent to the
partitions in turn each come out under their own tenant's key.

## Simulating

All files are SystemVerilog-2017. Packages must be read first. For example,
the end-to-end test of the top at default size:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/kac_pkg.sv rtl/fp_addsub.sv rtl/fp_mul.sv rtl/fp_inv.sv rtl/ec_point_unit.sv \
  rtl/fp12_mul.sv rtl/sha256_core.sv rtl/aes128_dec.sv rtl/key_nvm.sv rtl/partition_slot.sv \
  rtl/kac_decrypt_engine.sv rtl/fpga_provisioning_top.sv \
  tb/tb_ref_pkg.sv tb/tb_coproc_model.sv tb/tb_fpga_provisioning_top.sv \
  --top-module tb_fpga_provisioning_top -o sim && obj_dir/sim
```

Each block has a testbench, `tb/tb_<module>.sv`, that ends by printing
`TB_RESULT checks=N failures=M`. The references in `tb/tb_ref_pkg.sv` are
written independently of the RTL:

* wide-integer modular arithmetic;
* affine curve formulas;
* SHA-256 over a byte string;
* AES-128 encryption (FIPS-197).

The testbenches also use published vectors: FIPS-197 C.1 for AES, and
"abc" and the 448-bit FIPS 180 message for SHA-256.
`tb/tb_coproc_model.sv` stands in for the pairing core (and, in the
engine's own test, for the product core).

The top-level test programs all the stores and locks them. It then
recovers keys for two tenants and streams their bitstreams, including
interleaved streams and one stream that runs while the other tenant's key
is being recovered. It also re-keys a partition, and exercises the error
exits and the back-pressure stall. It reports how often each of these
happened. It runs in a few seconds.
