# DTLS cryptographic engine SoC for IoT end nodes

An IoT node that talks to a server over DTLS must run two kinds of
cryptography. The handshake needs elliptic-curve arithmetic: ECDHE key
agreement and ECDSA signatures. The record layer needs AES-128-GCM and
SHA-256. On a small RV32I processor the elliptic-curve part dominates, in
both run time and energy. This SoC therefore puts a memory-mapped
*DTLS engine* next to the processor. The engine contains:

- a 2 KB private RAM;
- a controller with an HMAC-DRBG random number generator and a
  transcript-hash finisher;
- an AES-128-GCM engine;
- a SHA-256 engine;
- an elliptic-curve engine for any prime field up to 256 bits.

The elliptic-curve engine uses a fixed-base comb method. Its pre-computed
tables live in a 4 KB cache that holds up to six base points. The processor
hands a job to the engine, stops its own clock with WFI, and is woken by the
engine's interrupt. The engine runs on a divided clock. Its long 256-bit
carry paths then do not limit the processor's clock frequency.

This repository has synthesizable SystemVerilog for everything except the
processor core and the SD card controller. Those two connect through ports
of the top level `dtls_soc`.

```
             CLK ─┬──────────────[core_clock_ctrl]── core_clk ──► RISC-V core (external)
                  │                     ▲ wfi   ▲ irq                 │ fetch        │ data bus
                  │                     │       │               ┌─────▼─────┐  ┌─────▼─────┐
                  │                     │       │               │  icache   │  │   mmio    │── sysctl: GATE, DIV_CFG
                  │                     │       │               │  16 KB    │  └┬──┬──┬──┬─┘
                  │                     │       │               └─────┬─────┘   │  │  │  └── gpio / uart / spi
                  │                     │       │              refill │ (SD)    │  │  └───── data_mem 64 KB
                  └──[clock_div]── crypto_clk ──┼─────────────────────────────────┐ │
                      ▲ GATE, DIV_CFG           │                                ▼ ▼
                                          ┌─────┴──────────── dtls_engine ───────────────┐
                                          │ dtls_controller ── dtls_ram, hmac_drbg,       │
                                          │                    sha_finish                │
                                          │   ├── sha256_core                            │
                                          │   ├── aes_gcm ── aes128_core, gf128_mul      │
                                          │   └── ecc_core ── mod_mul, mod_inv, comb_cache│
                                          └──────────────────────────────────────────────┘
```

## The elliptic-curve engine (`ecc_core`)

### Arithmetic units

`mod_mul` computes `z = a*b mod p` by interleaved reduction. It scans `b`
one bit per clock, most significant bit first. In each clock the partial
result is doubled and reduced. Then `a` is added if the bit is set, and the
sum is reduced again. The partial result therefore always stays in
`[0, p)`. The modulus needs no special form, so NIST, SEC, Brainpool or
any other prime works.

Only the lowest `nbits` bits of `b` are scanned. A 160-bit curve therefore
needs 160 clocks per product instead of 256. That is how the upper part of
the datapath is left idle. It is not clock or power gating.

`mod_inv` computes `q = x / y mod p` with a binary extended Euclid
algorithm, one step per clock. Starting the coefficient register at `x`
instead of 1 turns the inverter into a divider. The slope of an affine point
addition, `(y2-y1)/(x2-x1)`, then costs one division and no extra
multiplication. The number of steps depends on the data: about
`2.1*log2(p)` on average and fewer than `4*log2(p)`.

With the division available, the engine uses **affine coordinates**
throughout:

| Operation | Steps |
|---|---|
| Addition | λ = Δy/Δx (one division), then x3 = λ² − x1 − x2 and y3 = λ(x1 − x3) − y1 (two multiplications) |
| Doubling | one extra multiplication for x² |

The point at infinity is a separate flag, not a coordinate value. The cases
`P + P`, `P + (−P)` and additions with infinity are handled explicitly.

### Fixed-base comb with zero-less signed digits

For a base point `P` and field size `nbits`, let `d = ceil(nbits/4)` and
`P_r = 2^(r·d)·P` for r = 0..3. The comb has four teeth.

The scalar is recoded into digits `s_j ∈ {+1, −1}` for j = 0..4d−1. For an
odd `k`:

- `s_(4d−1) = +1`;
- `s_j = 2·k_(j+1) − 1` for all lower `j`.

The weighted sum of these digits equals `k`. No digit is zero, so every comb
column costs exactly one doubling and one addition, whatever the key. This
removes the key-dependent operation pattern that a simple power analysis
would read.

Column `i` collects the digits `s_(i + r·d)`. Its value is
`Σ_r s_(i+rd)·P_r`. Factoring out the sign of the top tooth gives

    column_i = sign · T[u],   T[u] = P_3 + Σ_(r<3) (u_r ? +1 : −1)·P_r,

where `sign = s_(i+3d)` and `u_r = (s_(i+rd) == sign)`. Only the eight
points `T[0..7]` need to be stored. A negative sign is applied by negating
`y`, which costs nothing.

**ECSM.** The scalar multiplication starts with `Q = column_(d−1)`. It then
runs `Q = 2Q + column_i` for i = d−2 down to 0.

For a 256-bit field this gives d = 64 columns and 63 doubling/addition
pairs. That is 126 divisions and 63·3 + 63·2 = 315 multiplications per
scalar multiplication, plus one more addition for an even scalar. These
numbers agree with the roughly 128 inversions and 320 multiplications
reported for the original affine design, which is why a comb width of four
was chosen.

**Even scalars.** An even `k` is run as `k+1`, and `P` is subtracted at the
end. This final step is the one place where the operation count depends on
the key: one extra addition for even scalars. Use odd or blinded scalars if
that matters.

**Pre-computation.** `ECC_PRECOMP` takes the base point and fills one cache
slot:

- `3·d` doublings produce `P_1`, `P_2` and `P_3`;
- additions and subtractions then build the eight `T[u]`.

**Cache.** Each slot holds 8 points of 512 bits. Six slots take 3 KB of the
4 KB `comb_cache`. The ECC core refuses slots 6 and 7. For DTLS, a slot
would hold the curve generator or a cached server public key.

Measured engine clocks at the default 256-bit width, after pre-computation
(`tb_ecsm_curves`):

| curve     | pre-computation | ECSM    |
|-----------|-----------------|---------|
| secp160r1 | 114 697         | 58 902  |
| secp192r1 | 161 277         | 83 948  |
| secp224r1 | 215 815         | 115 463 |
| secp256r1 | 278 292         | 149 814 |

A 256-bit field multiplication issued as a command takes 261 engine clocks:
256 multiplier steps plus operand hand-over.

### Field operations

`ECC_MODMUL`, `ECC_MODDIV`, `ECC_MODADD` and `ECC_MODSUB` make the field
datapath available by itself. When `p` is set to the group order `n`, these
operations give the arithmetic modulo `n` that ECDSA signing and
verification need. Examples are `s = k⁻¹(e + r·d)` and `u1 = e/s`.

## Transcript hash (`sha_finish`)

The handshake transcript grows as messages are exchanged. Software feeds
each complete 64-byte block to the engine with the SHA commands. When the
hash is needed, the remaining 0–63 bytes and the total length go to the
SHA-last command. `sha_finish` then appends the padding: a 0x80 byte, zeros,
and the 64-bit length. It runs one compression if at most 55 bytes remain,
and two otherwise, on the shared SHA-256 core.

## Random numbers (`hmac_drbg`)

Handshake nonces and ephemeral ECDHE keys come from an HMAC-DRBG over
SHA-256, as defined in NIST SP 800-90A. The generator keeps the key `K` and
the value `V`. It has no hash of its own: while it runs, it borrows the
engine's SHA-256 core, and the controller does not see those
compressions.

Each HMAC is a short fixed program of block compressions:

1. inner key block `(K ^ ipad)`;
2. the message (`V`, `V‖00`, or `V‖00/01‖seed`), padded and with its bit
   length appended, in one or two blocks;
3. outer key block `(K ^ opad)`;
4. the inner digest with its padding.

All blocks are built from registers, so no RAM is used.

| operation | compressions | engine clocks (about) |
|---|---|---|
| instantiate or reseed | 18 | 1 224 |
| generate (32 bytes) | 12 | 816 |

The seed has a fixed length of 256 bits. Software must supply it from a
real entropy source, because the chip description names no source. There
is no reseed counter and no additional input.

## Clocks and sleep

There is one input clock, `clk`. Two clocks are derived from it, both
without synchronisers.

### Engine clock

`clock_div` produces the engine clock by **removing pulses** from CLK. A
counter raises `crypto_tick` in one CLK cycle out of `DIV_CFG+1`. A
latch-based clock gate lets the CLK pulse that ends that cycle through. As
a result, every engine clock edge is also a CLK edge.

The bus interface of `dtls_engine` relies on this:

- It grants a request only in a tick cycle, so the engine samples it on its
  own edge.
- It returns `rvalid` one CLK cycle later. The read data was registered on
  that engine edge and is stable.

Clearing the GATE bit of the system control register stops the engine
clock completely.

### Core clock

`core_clock_ctrl` sets a `sleeping` flag when the processor signals WFI, and
gates `core_clk` off. The engine interrupt clears the flag. An interrupt
that is already pending keeps the core awake, so no wake-up can be lost.

## Programming model

### System address map

The system address map is selected by `addr[31:28]`:

| base | target |
|---|---|
| `0x0000_0000` | data memory, 64 KB |
| `0x1000_0000` | DTLS engine: RAM at 0x000–0x7FF, registers from 0x800 |
| `0x2000_0000` | system control: bit 0 GATE (reset 1), bits [7:4] DIV_CFG (reset 0) |
| `0x3000_0000` | GPIO (`addr[13:12]`=0), UART (1), SPI (2) |

The bus is a simple request/grant protocol (`dtls_pkg::bus_req_t` and
`bus_rsp_t`):

- The master holds `req` until `gnt`.
- Read data comes with `rvalid` on a later cycle.
- One read may be outstanding at a time.

### Engine registers

Engine registers, as byte offsets in the engine window:

| offset | name | access |
|---|---|---|
| 0x800 | CMD | W. Bits [3:0]: command: 0 = SHA first block, 1 = SHA next block, 2 = SHA last (padded) block, 3 = GCM, 4 = ECC, 5 = DRBG. Bits [6:4]: GCM, ECC or DRBG sub-operation; for SHA last, bit 4 = this is the first block of the message |
| 0x804 | STATUS | R. Bit 0 busy, bit 1 done, bit 2 err, bit 3 inf, bit 4 timer expired. Bits 1 and 4 are cleared by writing 1 |
| 0x808 | IRQ_EN | Bit 0 done, bit 1 timer |
| 0x80C | TIMER | Re-transmission timer. Counts down to 0, then sets bit 4 |
| 0x810 | TPRESC | The timer counts once every TPRESC+1 engine clocks |

### DTLS RAM regions

The 512-word DTLS RAM has three regions:

- a 320-word (1.25 KB) micro stack;
- a 115-word DTLS configuration region;
- a 77-word accelerator configuration region starting at word 435.

Operands and results sit in the accelerator configuration region, at these
word offsets:

- **SHA-256**: message block W0..W15 at words 0–15. The digest H0..H7 is
  returned at words 16–23. Padding is done in software. The chaining value
  is kept between blocks. For SHA last, word 24 holds the number of valid
  bytes (0–63) in the final block, and words 25 and 26 hold the upper and
  lower halves of the total message length in bits. The padding is then
  added in hardware.
- **GCM**: data block at words 0–3, with the first word holding bytes 0–3.
  Word 4 holds the valid byte count of a partial block (1–16). The result
  is returned at words 8–11. The sub-operations are:
  - KEY: load the key, compute H;
  - IV: 96-bit IV;
  - AAD, ENC, DEC: one block each;
  - TAG: produce the tag;
  - ECB: plain AES of the block.
- **ECC**: 256-bit values are stored least significant word first:
  - `k` at words 0–7;
  - `x` at 8–15;
  - `y` at 16–23;
  - `p` at 24–31;
  - `a` at 32–39;
  - word 40 = `{slot[11:9], nbits[8:0]}`.

  The result `x` is returned at 41–48 and `y` at 49–56.

- **DRBG**: 256-bit seed at words 0–7, most significant word first. The
  32 output bytes are returned at words 16–23. Sub-operations: 0
  instantiate, 1 reseed, 2 generate.

### A typical job

1. Write the operands into the RAM.
2. Set the done bit in IRQ_EN.
3. Write CMD.
4. Execute WFI.
5. After the wake-up, clear STATUS.done and read the result.

While a command runs, RAM accesses from the processor wait without a grant.
Register accesses still go through.

## What follows the source design and what does not

These parts follow the published architecture:

- the block structure;
- the memory sizes: 16 KB instruction cache, 64 KB data memory, 2 KB DTLS
  RAM split 1.25 / 0.45 / 0.3 KB, 4 KB comb cache for six points;
- the 256-bit interleaved-reduction multiplier with datapath width set by
  the prime size;
- the dedicated Euclid inverter and affine coordinates;
- the comb method with zero-less signed digits;
- the divided engine clock with software control of ratio and gating;
- WFI sleep with wake-up by the engine interrupt;
- the re-transmission timer.

Own choices, because the architecture description is silent on them:

- the comb width of 4 teeth and 8 table points per base point;
- the binary, divide-form Euclid algorithm;
- the round-per-clock AES and SHA engines;
- the 8-bit digit-serial GHASH multiplier;
- the operation split of the GCM engine;
- all register maps, address maps and operand layouts;
- the bus protocol;
- the pulse-removal divider with a 4-bit ratio field;
- the direct-mapped cache with 4-word lines and its refill protocol;
- the GPIO, UART and SPI register sets;
- the rounding of 0.45 KB and 0.3 KB to 115 and 77 words;
- the HMAC-DRBG interface (fixed 256-bit seed, 32 bytes per generate) and
  the split of the transcript hash into software-fed blocks plus a hardware
  finisher, both sharing the one SHA-256 core.

The full engine in the original also holds 6.75 KB of SRAM. The 4 KB cache
and the 2 KB RAM here account for 6 KB of it. What the remaining 0.75 KB
holds is not known, so it is not modelled.

### Missing pieces

The original DTLS controller is a micro-coded protocol machine. It frames
handshake packets, keeps the running transcript, and parses and checks X.509
certificates. It also caches server certificate data so that later
handshakes skip one ECDSA verification. None of this was specified in
enough detail to rebuild. Of the controller's functions, only the HMAC-DRBG
and the final step of the transcript hash are built. Otherwise the controller here is a command sequencer: software
must drive every handshake step through the accelerators.

The point arithmetic covers short Weierstrass curves only. Montgomery-form
curves such as Curve25519 could use the field multiplier and divider
through the field-operation commands, but there is no x-only ladder.

The RISC-V core, the SD controller, the pads and the SRAM macros are
outside the RTL. The memories are written as arrays with registered reads.

## Verification

Every block has a self-checking testbench in `tb/`. Each testbench ends by
printing `TB_RESULT checks=N failures=M` and has a watchdog. The reference
values come from sources independent of the RTL:

| testbench | checked against |
|---|---|
| `tb_sha256_core` | FIPS 180-4 vectors and the cycle count |
| `tb_aes128_core` | FIPS 197 vectors |
| `tb_aes_gcm` | GCM spec test cases 1–4, including decryption and a partial block |
| `tb_hmac_drbg` | an HMAC-DRBG model in `tb/sha_ref.sv` with its own SHA-256 |
| `tb_sha_finish` | the same reference SHA-256, for message lengths around the one/two-block boundary |
| `tb_mod_mul`, `tb_mod_inv` | wide-integer arithmetic in the testbench, with the latency check |
| `tb_ecc_core`, `tb_ecsm_curves` | a plain double-and-add model in the package `tb/ec_ref.sv`, with a Fermat inversion |

`tb_ecc_core` also checks that results lie on the curve, `n·G` = infinity
and `(n−1)·G = −G`. `tb_ecsm_curves` runs all four SEC curves above.

`tb_dtls_soc` runs the whole SoC at its default sizes. The testbench itself
plays the processor (data bus, fetch port, WFI) and the SD controller
(refill port). It exercises:

- SHA (including a 100-byte message finished in hardware), GCM and DRBG
  commands, a P-256 generator pre-computation and scalar
  multiplication through the engine RAM;
- WFI sleep and interrupt wake-up;
- changing the engine clock ratio;
- a RAM access stalled by a busy engine;
- a timer interrupt;
- cache hits and misses;
- all three peripherals.

It counts each of these events and fails if one never happens.

To simulate a block with Verilator, for example the ECC workload:

    verilator --binary --timing --assert rtl/dtls_pkg.sv tb/ec_ref.sv \
        rtl/mod_mul.sv rtl/mod_inv.sv rtl/comb_cache.sv rtl/ecc_core.sv \
        tb/tb_ecsm_curves.sv --top-module tb_ecsm_curves -o sim
    ./obj_dir/sim

For the whole SoC, list `rtl/dtls_pkg.sv`, `tb/ec_ref.sv`, `tb/sha_ref.sv` and all other
files in `rtl/` with `tb/tb_dtls_soc.sv`, using `--top-module tb_dtls_soc`.
It runs in a few seconds.

### Limits of the evidence

- The engine has been simulated only with the bundled testbenches. No gate
  level or timing analysis is included.
- The clock gates use a latch, as an integrated clock-gating cell does. On
  silicon they should be mapped to the library's ICG cell.
