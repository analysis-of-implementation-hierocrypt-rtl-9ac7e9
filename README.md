# Hierocrypt-3 and Camellia-128 as iterative FPGA cipher units

This RTL describes two 128-bit block ciphers built as *iterative* ("loop")
hardware for a small FPGA with 24 embedded 2048-bit memory blocks (an Altera
FLEX 10KE class device). Each cipher gets one encryption/decryption unit. Both
units have the same outside behaviour: a key-setup phase, then one block at a
time, with a READY / START / WORK handshake. Both are tuned so that one 128-bit
block takes **7 clocks**:

* **Camellia-128** is *loop-unrolled*. One clock computes three of the 18
  Feistel rounds, so the 24 S-boxes of three F-functions fit exactly into the 24
  memory blocks. The unit is complete: key schedule, encryption and decryption,
  and all tables.
* **Hierocrypt-3** uses the *very long setup* organisation. The key-schedule
  work is moved into setup, so that the round datapath alone sets the clock. The
  last S-layer (XS) and the final key addition (AK) are merged into one clock.
  The round datapath, its timing, MDS_L and MDS_L^-1 are built. The Hierocrypt-3
  S-box, the MDS_H matrix and the key schedule (P^(n), M_5E, M_B3, the constants
  G and H) are not defined in this design. They connect through ports, and the
  unit tells the outside which round key it needs in every clock.

`crypto_top` places the two units side by side. They share the clock and reset
and are otherwise independent.

## The shared control protocol (`ctrl_unit`)

Both units use one controller with four states: IDLE, SETUP, READY, WORK. All
inputs are sampled on the rising clock edge. RESET is synchronous and active
high.

```
RESET  --> IDLE (READY=0). START edges are ignored.
SETUP rising edge in IDLE:
   clock 0      key_load: main key register written
   clocks 1..N  setup cycles 0..N-1 (N = SETUP_CYCLES)
   then READY=1, and it stays 1 until the next RESET. Further SETUP edges are ignored.
START rising edge while READY=1 and not working:
   clock 0      data_load: input register written (decrypt bit sampled too)
   clocks 1..W  WORK=1, work cycles 0..W-1 (W = WORK_CYCLES)
   the last work clock writes the result register; WORK drops with that edge
START edges during WORK are ignored.
```

A block therefore occupies `1 + WORK_CYCLES` clocks. A new START edge is
accepted from the clock after WORK falls. `data_o` is the result register. It
becomes valid on the edge that clears WORK and holds until the next block
finishes.

The controller watches for *edges*, not levels. A START held high starts only
one block. Its edge detector is cleared by reset to 0, so a START or SETUP line
that is already high in the first clock after reset counts as an edge. Two
concurrent assertions check that WORK is only high while READY is high, and
that WORK and the setup cycles never overlap.

The paper behind this design fixes the following:

* READY stays high until RESET;
* START is ignored while READY is low;
* WORK is high while a block is being processed.

This design chose the rest:

* the synchronous reset;
* SETUP being edge-triggered and ignored once READY is high;
* the START edges ignored during WORK;
* the extra load clock.

The load clock is what makes the published cycle counts add up (see
*Throughput*).

## Camellia-128, three rounds per clock

### The work schedule

The 128-bit state `L || R` is held in the input register and passes once per
clock through `cam_round3`: an optional whitening XOR, three Feistel rounds,
then an optional FL / FL^-1 layer or an optional final whitening.

| work clock | rounds | extra step in the same clock |
|---|---|---|
| 1 | 1-3   | pre-whitening with kw1 \|\| kw2 (before the rounds) |
| 2 | 4-6   | FL(L, kl1), FL^-1(R, kl2) |
| 3 | 7-9   | - |
| 4 | 10-12 | FL(L, kl3), FL^-1(R, kl4) |
| 5 | 13-15 | - |
| 6 | 16-18 | swap halves, post-whitening with kw3 \|\| kw4 |

Each Feistel round is `L' = R ^ F(L, k)`, `R' = L`. The final step outputs
`(R || L) ^ kw`, which undoes the swap of the last round.

Decryption uses the same datapath with the subkeys in reverse order:

* kw3 || kw4 comes first;
* k18 down to k1 are the round keys;
* FL uses kl4 and then kl2;
* FL^-1 uses kl3 and then kl1;
* kw1 || kw2 comes last.

The `decrypt` input is sampled together with START.

### Key setup on the same datapath

The Camellia key schedule needs the value K_A. K_A is four Feistel rounds of the
same F-function applied to K_L, with the constants Sigma1..Sigma4 as keys and an
XOR with K_L after the second round. This design does not build a separate key
datapath. It sends K_L through the first two rounds of `cam_round3` during the
two setup clocks and takes the state after round 2 (`state_r2`):

1. setup clock 1: `K_A register <= F2(K_L; Sigma1, Sigma2) ^ K_L`
2. setup clock 2: `K_A register <= F2(K_A register; Sigma3, Sigma4)`

So the whole unit has exactly three F-functions, i.e. 24 S-box ROMs.

### Subkeys are wiring

After setup, every subkey of the 128-bit key schedule is a 64-bit half of K_L or
K_A rotated left by 0, 15, 30, 45, 60, 77, 94 or 111 bits. `cam_keysched`
therefore holds only the two 128-bit registers. It picks the three round keys
and the whitening or FL keys of each work clock with a multiplexer indexed by
the work cycle and the direction. There is no per-clock key computation, so the
critical path is the three chained F-functions.

### S-boxes

`cam_sbox` is a 256 x 8 ROM holding SBOX1 of the Camellia definition (in
`cam_pkg`). The other three boxes are derived from it:

* `s2(x) = s1(x) <<< 1`
* `s3(x) = s1(x) >>> 1`
* `s4(x) = s1(x <<< 1)`

Each F-function uses the eight boxes in the order s1 s2 s3 s4 s2 s3 s4 s1. Then
comes the byte-mixing P-function (XOR network). Three F-functions make 24 ROMs
of 2048 bits, 49152 bits in all. That is the memory figure published for this
organisation.

## Hierocrypt-3, very long setup

### One round and the block schedule

The Hierocrypt-3 round function on a 128-bit X with a 256-bit round key
`K^(t) = K1 || K2` is

```
rho(X)  = MDS_H( S( MDS_L( S(X ^ K1) ) ^ K2 ) )
XS(X)   = S( MDS_L( S(X ^ K1) ) ^ K2 )            (last round: no MDS_H)
AK(X)   = X ^ K^(7)                                (final 128-bit key addition)
```

Here S applies the 8-bit S-box to all 16 bytes, and MDS_L mixes each 32-bit word
(see below). A block is `AK(XS(rho^5(X)))` with round keys K^(1)..K^(6).

In the very-long-setup organisation, XS and AK are done in the same clock, so
the work phase is 6 clocks:

| work clock | encryption | decryption |
|---|---|---|
| 0 | rho, K^(1) | AK with K^(7), then XS^-1 with K^(6) |
| 1-4 | rho, K^(2)..K^(5) | rho^-1, K^(5)..K^(2) |
| 5 | XS with K^(6), then AK with K^(7) | rho^-1, K^(1) |

The inverse steps are

```
rho^-1(Y) = S^-1( MDS_L^-1( S^-1( MDS_H^-1(Y) ) ^ K2 ) ) ^ K1
XS^-1(Y)  = S^-1( MDS_L^-1( S^-1(Y) ) ^ K2 ) ^ K1
```

### What connects from outside, and the contract

The round (`hc3_round`) uses two S-layers, MDS_H and, for decryption,
MDS_H^-1. None of these has a definition in this design, so each is a pair of
128-bit ports:

| ports | carries |
|---|---|
| `sl1_in_o` / `sl1_out_i` | first S-layer of the round |
| `sl2_in_o` / `sl2_out_i` | second S-layer |
| `inv_o` | 1 while decrypting: both S-layers must return S^-1 |
| `mdsh_in_o` / `mdsh_out_i` | MDS_H (encryption) |
| `mdshi_in_o` / `mdshi_out_i` | MDS_H^-1 (decryption) |

These external functions must be **combinational**: the round reads their
answers within the same clock. The S-layers are used in the same order in both
directions, and MDS_H^-1 has its own ports. That way no combinational path runs
from an output port back to itself through the outside logic.

The key side is also outside the unit. The unit tells it what to do:

| port | meaning |
|---|---|
| `ks_key_load_o` | 1 for the clock in which the main key should be captured |
| `ks_setup_o`, `ks_setup_cyc_o` | the SETUP_CYCLES key-setup clocks, numbered |
| `rk_idx_o` | t of the round key K^(t) needed *in this clock*: 1..6 encrypting, 6..1 decrypting, 0 when idle |
| `rk_i` | K^(t), 256 bits, K1 in bits 255:128; expected in the same clock |
| `ak_i` | K^(7) = K^(7)_1 \|\| K^(7)_2, 128 bits, used in the XS/AK clock |

The main key itself does not pass through the unit. The external key schedule
takes it when `ks_key_load_o` is high. The intended key side keeps, after setup,
all five intermediate keys and their F_sigma outputs (1600 bits). From those it
can produce K^(t) for any t in one step, in either order. That is why decryption
simply asks for the keys backwards.

`SETUP_CYCLES = 15` assumes five sigma updates of three clocks each. Only the
three clocks per update are published, not the total, and the parameter can be
changed. `WORK_CYCLES = 6` is fixed by the round schedule above.

### MDS_L and its inverse (`hc3_mds_l`)

Each 32-bit word `x1 x2 x3 x4` (x1 = most significant byte) is multiplied by the
circulant matrix whose first row is `C4 65 C8 8B`. The arithmetic is in GF(2^8)
with the polynomial `x^8 + x^6 + x^5 + x + 1` (0x163):

```
y1 = C4*x1 ^ 65*x2 ^ C8*x3 ^ 8B*x4
y2 = 8B*x1 ^ C4*x2 ^ 65*x3 ^ C8*x4
y3 = C8*x1 ^ 8B*x2 ^ C4*x3 ^ 65*x4
y4 = 65*x1 ^ C8*x2 ^ 8B*x3 ^ C4*x4
```

Multiplication by a constant is the shift-and-reduce formula unrolled at
elaboration time (`gf_mul_const` in `hc3_pkg`). It produces plain XOR networks,
for example the published bit equations for C4h. With `INVERSE = 1` the module
uses the inverse circulant, first row `82 C4 34 F6`. That matrix was computed
for this design by inverting the forward one over the same field. The testbench
checks both the matrix entries and that the inverse undoes the forward matrix.

## Bit and byte order

A 128-bit block is a big-endian byte string: the first byte is bits 127:120.

* **Camellia:** L is bits 127:64 and R is bits 63:0. The known-answer vector of
  the Camellia definition (key = plaintext = `0123456789abcdeffedcba9876543210`,
  ciphertext `67673138549669730857065648eabe43`) is reproduced with this
  ordering.
* **Hierocrypt-3:** word X1 is bits 127:96, and byte x1 is the top byte of each
  word. K1 is the upper half of the 256-bit round key. These orders are this
  design's choice and are not published.

## Throughput

With 7 clocks per 128-bit block:

| unit | published clock | 128 x f / 7 | published throughput |
|---|---|---|---|
| Camellia, 3 rounds/clock | 13.15 MHz | 240.5 Mb/s | 240 Mb/s |
| Hierocrypt-3, very long setup | 15.64 MHz | 286 Mb/s | 304 Mb/s |

The Camellia figure matches. For Hierocrypt-3 the published 7-clock count and
the published throughput do not agree: 304 Mb/s would need about 6.6 clocks. The
design follows the cycle count.

## Where this design departs from, or adds to, the published description

* **Hierocrypt-3 S-box, MDS_H and key schedule** are external (see above). With
  the real functions connected, the unit computes real Hierocrypt-3. The
  testbenches use stand-ins instead: S(x) = 37x + 11 mod 256, with inverse
  173(y - 11), and an invertible word shuffle for MDS_H. These stand-ins prove
  only the wiring and the schedule.
* **Hierocrypt-3 decryption** follows from defining decryption as the inverse of
  encryption. It needs MDS_L^-1, which is computed here, and S^-1 and MDS_H^-1,
  which are external.
* **The published memory layout for Hierocrypt-3** is not reproduced, since the
  S-layers are outside. That layout puts one round S-layer and the 8 key-schedule
  boxes in memory blocks and the other layer in logic.
* **Camellia decryption subkey order** and **sharing the round datapath for key
  setup** are this design's choices. The order is the standard one of the cipher
  definition. The sharing follows from the 24-box resource count.
* **The `decrypt` pins** (`cam_decrypt`, `hc3_decrypt`) are additions. The
  published interface has no mode pin.
* **The load clock:** the published cycle counts are read as one load clock plus
  the work clocks.
* **Not built:** the other Hierocrypt-3 organisations. These are the short and
  long setup (8 clocks) and the variant that merges S and MDS_L into 64
  composite S-boxes.

## Module map

```
crypto_top
├── camellia_unit
│   ├── ctrl_unit            (SETUP_CYCLES=2, WORK_CYCLES=6)
│   ├── cam_keysched         K_L / K_A registers, subkey multiplexer
│   └── cam_round3           whitening, 3 rounds, FL / FL^-1
│       ├── cam_f  x3        8 S-boxes + P-function
│       │   └── cam_sbox x8  256x8 ROM
│       └── cam_fl           FL and FL^-1
└── hc3_unit
    ├── ctrl_unit            (SETUP_CYCLES=15, WORK_CYCLES=6)
    └── hc3_round            key XORs, MDS_L, MDS_L^-1, step selection
        └── hc3_mds_l x2     forward and inverse
packages: cam_pkg (types, Sigma constants, SBOX1, rotations),
          hc3_pkg (types, GF(2^8) constant multiplier)
```

## Simulating

Every testbench in `tb/` checks itself and ends by printing
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/cam_pkg.sv rtl/hc3_pkg.sv tb/tb_crypto_top.sv --top-module tb_crypto_top
./obj_dir/Vtb_crypto_top
```

Replace `tb_crypto_top` with any other testbench name.

| testbench | what it checks |
|---|---|
| `tb_ctrl_unit` | the control protocol |
| `tb_cam_*` | the Camellia blocks against independently computed values: S-boxes as permutations with the published values and the derived boxes, FL / FL^-1 inverses, round-by-round and subkey values from a software model |
| `tb_camellia_unit` | the known-answer vector, model vectors, random round trips, back-to-back blocks and the 2 + 7 clock timing |
| `tb_hc3_*` | MDS_L against a bit-serial GF(2^8) model and the published C4h equations; the round and unit against a software model with the stand-ins; decryption by round trip and the round-key request order |
| `tb_workload_throughput` | both units streaming 32 blocks back to back in each direction: 7 clocks between loads, 224 clocks per stream, 240.5 Mb/s (Camellia, 13.15 MHz) and 286 Mb/s (Hierocrypt-3, 15.64 MHz) |
| `tb_crypto_top` | both units end to end at default parameters; counts every mechanism (key setup, whitening, FL layer, decryption in both units, rho, merged XS/AK, ignored START and SETUP edges, RESET clearing READY) and fails if one never occurs |

Each testbench has a watchdog.
