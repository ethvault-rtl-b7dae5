# EthVault RTL: a hardware Ethereum cold wallet

An Ethereum cold wallet has to do three things without ever letting a private key
leave the device:

1. turn a random number into a recoverable secret (a BIP-39 mnemonic);
2. derive any number of key pairs and addresses from that secret (BIP-32/BIP-44);
3. sign transactions with those keys (ECDSA on SECP256K1).

This RTL does all three in one synchronous block, `ethvault`. It puts the following
stages in hardware:

- SHA-256 and SHA-512;
- HMAC-SHA-512 and PBKDF2;
- BIP-32 child key derivation;
- elliptic-curve point multiplication;
- Keccak-256;
- the EIP-55 checksummed address;
- ECDSA.

Two constraints shape the design:

- **Small area.** There is one HMAC-SHA-512 engine, one point multiplier and one
  Keccak-256 core. Every stage shares them.
- **No timing or power signature.** The point multiplication runs the same sequence of
  operations and the same number of cycles for every key. The private keys stay in an
  internal RAM. The host can read back public keys and addresses, never private keys.

The clock, the true random number generator and the USB/JTAG link to a host are outside
this RTL. The entropy `e`, the signing nonce `k` and the top-level ports stand in for
them.

## Data flow

```
 e ──► SHA256 ─► CS ─► MNG ─► mnemonic (R3) ◄── mcs_in (recovery)
                                 │
                 (hash if > 128 bytes, SHA-512)
                                 ▼
        PBKDF2: 2048 x HMAC-SHA512(password, ·), salt "mnemonic"  ─►  seed
                                 ▼
        HMAC-SHA512("Bitcoin seed", seed)  ─►  master (k, c)      (R1)
                                 ▼
        CKD 44' ─► CKD 60' ─► CKD 0' ─► CKD 0  ─►  account node   (R2, cached)
                                 ▼  for i = 0 .. n-1
        CKD i ─► child private key ─► k*G ─► public key (x, y)
                                 │            │
                                 │        Keccak256(PAD0(x||y)) ─► address Ad (low 160 bits)
                                 │            │
                                 │        HEX2ASCII ─► Keccak256(PAD1) ─► EIP-55 ─► cAd
                                 ▼
        RAM[i] = { private key 256 | compressed public key 264 | cAd 336 }

        sign(sel, z, k):  d = RAM[sel].priv ─► ECDSA (k*G on the shared multiplier) ─► r, s
```

The control unit (`ethvault.sv`) has these states:

| State | What it does |
|---|---|
| `S_BIP` | mnemonic and seed |
| `S_MST` | master key |
| `S_PATH` | the four path levels |
| `S_IDX` | the child key of index i |
| `S_PUB` | its public key |
| `S_K0` | the address |
| `S_K1` | the checksum, then the RAM write |
| `S_SIGN` | a signature |

A 32-bit counter (`cntr`) holds the address index. The RAM write happens at the end of
`S_K1`, and after the write the control unit moves to index i+1. The account node at
m/44'/60'/0'/0 is computed once and kept in R2. So the second and later addresses cost
one CKD, not five.

## Modules

| Module | Function |
|---|---|
| `ethvault_pkg` | curve constants (p, n, G, b3 = 21), Keccak round constants, CKDF mode and control-state enums |
| `sha256_core` | one SHA-256 block, one round per cycle (BIP-39 checksum) |
| `sha512_core` | one SHA-512 block, one round per cycle |
| `hmac_sha512` | HMAC-SHA-512 built on one `sha512_core`; also passes raw blocks through (`toSHA512`) |
| `keccak256` | Keccak-f[1600], one round per cycle, rate 1088 |
| `keccak_pad` | PAD0 (64-byte public key) and PAD1 (40-character ASCII address) into one 1088-bit block |
| `hex2ascii` | 160-bit address to 40 lower-case hex characters |
| `eip55_checksum` | mixed-case address from the address and Keccak of its ASCII form |
| `malu` | modular add, subtract, multiply for a fixed 256-bit modulus |
| `point_add` | complete projective point addition (also used for doubling) |
| `bin_inv` | binary extended-Euclid inversion |
| `secp256k1` | Montgomery ladder with a dummy register, two `point_add`s, `bin_inv` at the end |
| `pubkey_serialize` | SR: (x, y) to the 33-byte compressed key |
| `ckdf` | BIP-32 CKD with the shared HMAC and SECP256K1 engines |
| `mnemonic_gen` | MNG: 24 word indices, word table, sentence packing |
| `bip39` | checksum, mnemonic, recovery input, password hashing, PBKDF2 |
| `ecdsa` | signature datapath (Fig. 11 style registers R0–R4, inversion mod n, "-n" loops) |
| `cntr` | address-index counter |
| `key_ram` | key store, 775 x 856 bits, registered read |
| `ethvault` | top: control unit, shared engines, RAM |

Every file opens with a comment giving its interface, timing and what is specific to it.

## The point multiplier: where the side-channel protection lives

Point multiplication dominates the cost: about 1.87 million of the 1.87–1.89 million
cycles of each of these operations:

- a non-hardened CKD;
- a public key;
- a signature.

It is also the part that touches secret scalars, so it is built to be constant-time. It
has three layers.

**MALU (`malu.sv`).** The arithmetic works on 256-bit residues modulo a fixed prime.

- Add and subtract take one cycle each. A 257-bit add or subtract is followed by one
  conditional correction.
- Multiply is shift-and-add over b, from the most significant bit down. Each cycle
  computes `acc = 2*acc mod M`, then adds a when the bit is set.
- Both modular additions are formed every cycle, so a multiply always takes 257 cycles
  whatever the operands.

The same module, with the group order n as its parameter, is the `MM` multiplier of ECDSA.

**PA (`point_add.sv`).** This is the complete addition formula for short Weierstrass
curves with a = 0 (Renes–Costello–Batina, 14 multiplications, 19 additions and
subtractions). It runs as a 33-step microprogram on one MALU.

"Complete" means there are no special cases: the formula gives the right answer when
- P = Q (doubling);
- P = −Q;
- either input is the point at infinity (0 : 1 : 0).

So one unit does both addition and doubling, and there is no branch on the data. Every PA
takes exactly 3651 cycles.

**Ladder (`secp256k1.sv`).** This is a Montgomery ladder with two PA units and a
temporary register Rt. For each bit k_i, from bit 255 down:

| Phase | PA0 | PA1 |
|---|---|---|
| A | S = R0 + R1 | D = 2·R_{k_i} |
| B | Rt = 2·S (dummy, result discarded) | — |

After phase A:

- k_i = 1 gives R0 ← S, R1 ← D;
- k_i = 0 gives R1 ← S, R0 ← D.

The dummy doubling in phase B makes both branches do one addition and two doublings. So
the power profile of a step does not reveal the bit, and the cycle count is
256 · 2 · 3651 for every key.

The ladder starts from R0 = O (the point at infinity) and R1 = G, and runs all 256 bits.
The published form of this ladder starts from R0 = P, R1 = 2P and skips the leading 1
bit. That form needs the key's bit length, which is itself a timing leak, and cannot take
k = 0. Because the addition is complete, starting at infinity costs nothing extra.

The ladder leaves the result in projective coordinates (X : Y : Z). Then:

1. `bin_inv` computes Z⁻¹ mod p with the binary extended Euclid algorithm, one step per
   cycle. This is the only data-dependent timing, about 500–1000 cycles, and it depends
   on Z, not directly on k.
2. Two MALU multiplies give x and y.
3. `inf` is raised when k ≡ 0 (mod n).

Total: about 1,870,900 cycles.

## CKDF: one engine for four jobs

`ckdf.sv` holds the wallet's only HMAC-SHA-512 and its only SECP256K1. A `mode` input
selects what one start does:

| mode | work | cycles |
|---|---|---|
| `CKDF_CKD` | BIP-32 child private key | 335 hardened, ~1,871,200 non-hardened |
| `CKDF_PUB` | k·G only (public keys, and the k·G of ECDSA) | ~1,870,900 |
| `CKDF_HMAC` | HMAC(key, message ≤ 512 bits): master key, PBKDF2 rounds | 333 |
| `CKDF_SHA` | one raw SHA-512 compression: hashing a long mnemonic | ~84 |

### CKD mode

The HMAC data depends on whether the index n is hardened (n[31] = 1):

- **Hardened:** `0x00 || k || n`.
- **Non-hardened:**
  1. the multiplier first computes K = k·G;
  2. `pubkey_serialize` compresses K to `0x02/0x03 || x`;
  3. the data is `serP(K) || n`.

In both cases the data is 296 bits, and the parent chain code c is the HMAC key. From
the 512-bit output I = I_L || I_R:

- the child key is (I_L + k) mod n, reduced by one conditional subtraction;
- the child chain code is I_R.

`valid` drops if I_L ≥ n or the child key is 0. BIP-32 says to skip to the next index in
that case. Here the control unit sets `derive_err` instead (see the departures below). The
probability is about 2⁻¹²⁷ per key.

### Who drives the engine

The control unit and the request ports of `bip39` and `ecdsa` share one `ckdf`. The
control unit muxes three masters onto it:

- its own requests (master key, path, index, public key);
- BIP-39's `h_*` port (PBKDF2 and SHA rounds);
- ECDSA's `p_*` port (k·G).

Only one master is active at a time, because the control-unit states never overlap. No
arbiter is needed.

## BIP-39: from entropy or sentence to seed

`bip39.sv` is the longest state machine. Its states are:

| State | What it does |
|---|---|
| `S_CS` | SHA-256 of the 256-bit entropy (one padded block, 66 cycles); the first byte is the checksum |
| `S_MNG` | `mnemonic_gen` splits entropy‖checksum (264 bits) into 24 11-bit indices and packs the sentence |
| `S_SCAN` | recovery only: finds the length of the sentence on `mcs_in` by its last non-zero byte |
| `S_PAD`, `S_DL`, `S_DR`, `S_D3` | password hashing, only for a sentence longer than 128 bytes |
| `S_U1`, `S_UI` | PBKDF2 |

**Mnemonic generation.** `mnemonic_gen` takes 24 11-bit indices from entropy‖checksum
and looks each one up in a 2048-word table. It then packs the words byte by byte into a
2048-bit sentence register, with single spaces between words.

**Recovery.** With `recover = 1` the sentence comes from `mcs_in` instead. It must be
left-aligned and zero-filled. `S_SCAN` finds its length.

**Password hashing.** HMAC takes a key of at most one SHA-512 block (128 bytes). A 24-word
English sentence is usually longer, up to 215 bytes with the standard list. A longer key
must first be replaced by its SHA-512 digest. The hardware does this in place:

1. The SHA-512 padding (0x80, zeros, 128-bit length) is written into the sentence
   register R3.
2. The two halves of R3 are sent as raw blocks through CKDF's `CKDF_SHA` mode.
3. The digest becomes the HMAC key.

A sentence over 239 bytes (only possible through `mcs_in`) leaves no room for the length
field in the second block. A third block then carries the rest of the padding. After
hashing, R3 is restored, so `mcs` still shows the sentence.

**PBKDF2.** The salt is `"mnemonic"` with an empty passphrase. The rounds are:

- U1 = HMAC(Pwd, salt || 0x00000001);
- U_i = HMAC(Pwd, U_{i-1}).

The XOR of all ITER values is the seed. With ITER = 2048 this is 2048 × 334 cycles, most
of the 684,600 cycles BIP-39 takes.

**Word table.** It is not built in. It is loaded through `wl_we/wl_addr/wl_data`, one
72-bit entry per word: up to 8 ASCII letters left-aligned in bits 71:8, and the length in
bits in bits 7:0. Any 2048-word list works. To produce BIP-39-compatible seeds, load the
standard English list.

## Addresses: Keccak, PAD0/PAD1 and EIP-55

One `keccak256` core (24 rounds, 25 cycles per block) is used twice per address, through
a mux on `keccak_pad`:

1. **PAD0.** The 64-byte public key x‖y is padded to one 1088-bit block. The low 160 bits
   of the digest are the address Ad, kept in R3.
2. **PAD1.** `hex2ascii` writes Ad as 40 lower-case hex characters. These are padded and
   hashed again.
3. **EIP-55.** `eip55_checksum` writes each hex letter in upper case when the matching
   nibble of the second digest is above 7.

The result is `"0x"` followed by 40 characters, 336 bits.

The RAM entry also holds the compressed public key (33 bytes) produced by
`pubkey_serialize`.

## ECDSA

`ecdsa.sv` computes:

- r = (k·G).x mod n;
- s = k⁻¹(z + d·r) mod n.

It works as follows:

1. k·G is requested from the shared multiplier. While that runs, a `bin_inv` modulo n
   computes k⁻¹.
2. Each value that may reach n or above goes through a "-n" loop of one-cycle
   subtractions: x, the private key d, and the 257-bit sum z + d·r. So out-of-range inputs
   are handled.
3. Two MALU-mod-n multiplies form d·r and then s.

`valid` is low if r or s is 0. The nonce k is an input: its generation (RNG or RFC 6979)
is outside the RTL. `nred` reports how many "-n" steps the last signature took.

## Timing

The figures below are for the default parameters. They were measured in simulation, with
cycles counted from the start pulse.

| Operation | Cycles here | Published figure |
|---|---|---|
| SHA-256 block | 66 | 73 |
| HMAC-SHA-512 | 333–335 | 335 |
| Keccak-256 block | 25 | 25 |
| MALU multiply | 257 | — |
| Point addition (PA) | 3651 | — |
| Point multiplication | ~1,870,900 | 1,887,520 |
| Non-hardened CKD | 1,871,229 | 1,887,855 |
| BIP-39 (generate + PBKDF2) | 684,555 | 692,827 |
| ECDSA signature | 1,871,410 | 1,888,550 |
| First address (start to RAM write) | 6,303,399 | 6,356,729 |
| Each further address | 3,742,175 | 3,775,064 |

Everything is within 1% of the published figures. The small difference comes from
per-step issue overhead, which this implementation does not reproduce exactly.

A further address costs two point multiplications:

1. one in the non-hardened CKD, for the parent's public key;
2. one for the child's own public key.

## Departures from the published design

- **Ladder start.** The ladder starts at (O, G) and runs 256 bits. See above for why.
- **BIA registers.** BIA has its own registers instead of reusing R1 and Rt.
- **Parent public key.** The account node's public key is recomputed for every index
  instead of being cached with the node. This doubles the cost of an address and matches
  the published per-address cycle count.
- **Unusable keys.** An unusable derived key sets `derive_err` and the key is still
  written. BIP-32 would move to index i+1; this event has probability about 2⁻¹²⁷.
- **Modulus.** The CKD addition is reduced modulo the group order n, as BIP-32 requires.
  The prose description names the field prime p.
- **PBKDF2 salt.** The salt is `"mnemonic"` (BIP-39), not `"mnemonics"`.
- **HMAC pads.** The standard HMAC pads are used: ipad for the inner hash, opad for the
  outer.
- **Back-to-back signatures.** Signatures run one at a time. Overlapping the next
  signature's point multiplication with the last two multiplies of the current one would
  save only about 530 of 1.87 million cycles.
- **Mnemonic retention.** The sentence stays in R3, readable on `mcs`, until the next
  `start`. It is never written to the key RAM. A deployment that wants it gone as soon as
  it has been shown should clear R3 once the seed is done.
- **Word list.** The word list is loaded at run time, not hard-wired.
- **Off-chip parts.** The RNG, PLL and host link are ports, not logic.
- **RAM depth.** `RAM_DEPTH` defaults to 775 entries of 856 bits, about 663 kbit,
  inferred as an array.
- **Cycle counts.** They are about 1% below the published figures.

## Parameters

| Module | Parameter | Default | Meaning |
|---|---|---|---|
| `ethvault` | `ITER` | 2048 | PBKDF2 rounds |
| `ethvault` | `RAM_DEPTH` | 775 | number of key entries; `n` must be 1..RAM_DEPTH |
| `bip39` | `ITER` | 2048 | passed down from the top |
| `malu`, `bin_inv` | `MODULUS` | p | n inside ECDSA |
| `key_ram` | `DEPTH`, `WIDTH` | 775, 856 | |
| `cntr` | `WIDTH` | 32 | |

Lowering `ITER` only shortens simulation; the seed then no longer matches BIP-39.

## Simulation

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. Build and run one with
Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/ethvault_pkg.sv rtl/*.sv tb/tb_secp256k1.sv \
          --top-module tb_secp256k1 -o sim && ./obj_dir/sim
```

The expected values in the testbenches come from an independent software model of each
standard:

- SHA-2 and Keccak;
- HMAC and PBKDF2;
- BIP-32;
- SECP256K1;
- EIP-55.

The word list they load is synthetic: entry i has 3 + (i mod 6) letters, and letter j is
`'a' + ((7i + 11j + (i >> 5)) mod 26)`. So the mnemonics are not English, but the
arithmetic is the standard one.

Boundary inputs are tested in the block testbenches:

- **`tb_secp256k1`:** scalars k = 0, n−1, n, n+1, 2²⁵⁶−1 and 2²⁵⁵.
- **`tb_bip39`:** entropy all ones and all zeros. Recovery sentences all ones (256 bytes,
  three hash blocks), 245 bytes, and empty.
- **`tb_ecdsa`:** k, d and z above n, all ones, equal to 1, and zero.

### Top-level testbenches

**`tb_ethvault`** runs the whole wallet with ITER = 2 and checks these paths:

- generation and recovery;
- a short sentence (direct password) and a long one (hashed password);
- master key and hardened path;
- cached account node and non-hardened CKD;
- public keys, PAD0/PAD1 addresses and RAM writes;
- signing, including a signature that needs a "-n" reduction.

It counts how often each of these mechanisms happens and fails any that never happens.

**`tb_ethvault_full`** runs the top at its default parameters (ITER = 2048, 775-entry
RAM): one wallet with two addresses, and one signature. It checks the cycle counts in the
table above. It takes about 20 seconds of simulation.

Cycle-count checks in the block testbenches use the measured values above, with small
margins.
