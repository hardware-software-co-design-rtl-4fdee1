# AES-128 image encryption pipeline (ECB and CTR) for IoT edge devices

An edge device that ships camera or medical images over a network needs
to encrypt the pixels cheaply and at line rate. This RTL is that part of
the device. It takes a stream of 8-bit grey pixels, packs each 16 pixels
into a 128-bit block, and encrypts the block with AES-128. The mode is
either ECB (electronic codebook) or CTR (counter). The design was
demonstrated as a hardware/software co-simulation: a host reads an image,
feeds the pixels to the FPGA, and displays what comes back. So the
pipeline also contains a decryptor. It sits right behind the encryptor,
and an output multiplexer returns either the ciphertext or the recovered
image. The host can then see both the encrypted picture and the proof that
it decrypts.

CTR is the mode to use. ECB encrypts equal blocks to equal ciphertext, so
the flat areas of an image (a black background, a uniform organ) show
through the encrypted picture as patches. CTR encrypts a counter that
changes with every block and XORs the result into the pixels. Its output
looks like noise whatever the image holds.

Both AES engines are *iterative*: one round per clock cycle, with the round
keys computed on the fly. A block therefore takes 11 cycles. That is fewer
than the 16 cycles in which 16 pixels arrive at one pixel per clock, so a
single iterative engine per direction is enough to keep up with the pixel
stream.

## Block diagram

```
             pix (8 bit)                     +--------------------+  d0
 pix_valid ---------> bit_conversion ------->| aes_encrypt_unit   |-----+------------+
 pix_ready <---------  (8 -> 128 bit)  blk   |  ECB: E_K(P)       |     |            |
                                             |  CTR: P ^ E_K(ctr) |     v            v
                                             +--------------------+  +------------------+
                                                  ^  key, mode       | aes_decrypt_unit |
   user_key (key register, enable1) --------------+------------------>|  ECB: D_K(C)     |
                                                                     |  CTR: C ^ E_K(ctr)|
                                                                     +------------------+
                                                                              | d1
                                        sel ---> out_mux (1 register) <-------+
                                                      |
                                                 dout_valid, dout (128 bit)
```

| Module | Role |
|---|---|
| `bit_conversion` | packs 16 pixels into one 128-bit block |
| `user_key` | key register feeding both AES units |
| `aes_encrypt_unit` | the "Encryption" stage: ECB or CTR around one `aes_enc_core` |
| `aes_decrypt_unit` | the "Decryption" stage: `aes_dec_core` for ECB, a second `aes_enc_core` for CTR |
| `aes_enc_core` | iterative AES-128 forward cipher, 11 cycles per block |
| `aes_dec_core` | iterative AES-128 inverse cipher, 11 cycles per block |
| `out_mux` | picks the ciphertext (`sel = 0`) or the plaintext (`sel = 1`), one register stage |
| `aes_pkg` | types, S-boxes and round functions shared by the cores |
| `aes_cosim_top` | the whole pipeline |

## Byte order

A block is a 128-bit vector. Bits 127:120 hold AES byte 0, which is the
order of the FIPS-197 hex test vectors. The first pixel of a group of 16
becomes byte 0, so a row of pixels maps onto blocks in reading order.
Byte `i` sits in row `i % 4`, column `i / 4` of the AES state.

## The iterative AES cores

This is the heart of the design and the part that needs the most care.

### Encryption (`aes_enc_core`)

The core holds three things: the 128-bit state, one round key and the
round constant. The cycle that accepts a block does the initial
AddRoundKey with the cipher key. It also computes round key 1 from the
cipher key. Each of the next ten cycles does one whole round in
combinational logic:

```
state <= ShiftRows(SubBytes(state)) -> MixColumns (not in round 10) -> xor round_key
round_key <= KeyStep(round_key, rcon);  rcon <= xtime(rcon)
```

`KeyStep` is one step of the AES-128 key schedule. It rotates the last word,
passes it through the S-box, XORs in the round constant, and chains the
four words. Only one round key is ever stored, so the core needs no key
memory and no key setup time. A new key can be used from the next block
on, because the key is sampled along with the block.

Timing: if a block is accepted at clock edge *t*, `out_valid` is high from
edge *t*+10. A new block can be accepted at the same edge that takes the
result. A continuous stream therefore runs at exactly one block every 11
cycles. At 175 MHz that is 128 × 175e6 / 11 ≈ 2.04 Gbit/s per core.

### Decryption (`aes_dec_core`)

The inverse cipher needs the round keys backwards, starting from round
key 10. The core keeps the last key it was given and that key's round key
10. When a block arrives with a different key, the core first runs the key
schedule forward for 10 cycles. `key_busy` is high and `in_ready` is low
during that time. It then stores round key 10. Each block is then handled
like encryption in mirror image:

```
accept:  state <= block xor rk10;  rk <= InvKeyStep(rk10, 0x36)
rounds:  state <= InvMixColumns(InvSubBytes(InvShiftRows(state)) xor rk)  (no InvMixColumns in the last)
         rk <= InvKeyStep(rk, rcon);  rcon <= xtime^-1(rcon)
```

`InvKeyStep` undoes one step of the key schedule. Words 3, 2 and 1 come
back by XOR with their neighbours. Word 0 comes back by XOR with
SubWord(RotWord(word 3)) and the round constant. The round constant steps
backwards through `xtime^-1`: `0x36 -> 0x1b -> 0x80 -> ... -> 0x01`. A key
change costs the first block after it 11 extra cycles. After that, blocks
again run at one per 11 cycles.

### S-boxes

The S-box and the inverse S-box are not typed in. `aes_pkg` computes them
when the design is elaborated, from their definition:

- Take the multiplicative inverse in GF(2^8), modulo x^8+x^4+x^3+x+1, as
  `a^254`, with 0 mapped to 0.
- Apply the affine map `b ^ rotl(b,1) ^ rotl(b,2) ^ rotl(b,3) ^ rotl(b,4) ^ 0x63`.

The inverse table is the inverse permutation of the first. Synthesis sees
them as constant 256 × 8 ROMs. Each core reads 20 S-box entries per cycle:
16 for SubBytes and 4 for the key schedule.

## ECB and CTR modes (`aes_encrypt_unit`, `aes_decrypt_unit`)

- **ECB:** ciphertext = E_K(P). The decryptor runs the inverse cipher.
- **CTR:** ciphertext = P xor E_K(counter). Decryption is the same operation,
  so the decryptor uses a second *forward* core, not the inverse one.
  Each unit has its own 128-bit counter. `ctr_load` loads the counter from
  `iv`. The counter then steps by one, modulo 2^128, after every CTR block.
  This is the standard incrementing function of NIST SP 800-38A applied to
  the whole block. Both units are loaded from the same `iv` and count the
  same blocks, so they stay in step.

`mode` is sampled with each block. The encryptor returns the mode on
`out_mode` together with the ciphertext, and the decryptor takes its mode
from there. The mode can therefore be switched between any two blocks,
even with blocks in flight. Each unit keeps one block in flight: it
accepts a new block in the cycle its result is taken. In CTR mode the
plaintext is held in a register next to the core while the key stream is
being computed.

## Output selection and key

`out_mux` is a two-input multiplexer followed by one register. `sel = 0`
passes the encryptor's result (`d0`), and `sel = 1` the decryptor's (`d1`).
Each input brings a valid flag. `dout_valid` is the selected flag one
cycle later, and `dout` holds its last value between results.

`user_key` holds the key. It resets to `DEFAULT_KEY`, which is the FIPS-197
example key `2b7e1516 28aed2a6 abf71588 09cf4f3c`. `key_wr` rewrites the
key. `key_user1` carries the key while `enable1` is high and all zeros
otherwise. The original system ties `enable1` to 1.

## Top-level interface (`aes_cosim_top`)

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low |
| `pix_valid`, `pix_ready`, `pix` | in/out/in | 1/1/8 | pixel stream, one pixel per cycle at most |
| `enable1` | in | 1 | key enable (tie to 1) |
| `sel` | in | 1 | 0: ciphertext out, 1: decrypted pixels out |
| `mode` | in | 1 | `aes_pkg::mode_e`: 0 ECB, 1 CTR; sampled per block |
| `iv`, `ctr_load` | in | 128/1 | load both CTR counters |
| `key_wr`, `key_wr_data` | in | 1/128 | write a new key |
| `dout_valid`, `dout` | out | 1/128 | one result block per pulse, no back-pressure |
| `idle` | out | 1 | nothing buffered or in flight |
| `key_busy` | out | 1 | ECB decryptor expanding a new key (input may stall) |

Rules of use:

- Give `ctr_load` and `key_wr` only while `idle` is high.
- Change `sel` only while `idle` is high. Otherwise a block in flight may
  come out on the other path, or not at all.
- An image whose pixel count is not a multiple of 16 must be padded by the
  sender. The 440 × 123 image needs 8 extra pixels.
- `dout` carries whole 128-bit blocks. Splitting them back into pixels is
  the receiver's job. Byte 0 (bits 127:120) is the first pixel.

Timing, measured from the clock edge that takes the 16th pixel of a block
to the first edge at which `dout_valid` is seen high:

- 13 cycles with `sel = 0`: 1 in the packer, 11 in the encryptor and 1 in
  the multiplexer.
- 24 cycles with `sel = 1`: another 11 in the decryptor.

With one pixel per cycle, results come every 16 cycles. Only the first ECB
block after a key change stalls the pixel input.

## Where this RTL departs from the original design

- The original was a set of separate VHDL designs: ECB and CTR each as
  their own design, plus a loop-unrolled ECB variant. Here one pipeline
  carries both modes, chosen per block. The loop-unrolled engine, which
  does all ten rounds in one pass, is not included: it was only a
  comparison point.
- The original calls its preferred CTR design both "FSM-based" and
  "pipelined". The throughputs reported for it (2.04 Gbit/s at 175.35 MHz
  and 2.58 Gbit/s at 222.22 MHz) both work out to 11 cycles per 128-bit
  block. That matches one iterative round per cycle, which is what is built
  here. The figures reported for the FSM ECB design do not agree with each
  other: 3.39 or 3.93 Gbit/s at 211.8 MHz, and 2.35 Gbit/s at 245.62 MHz.
  They imply between 6.9 and 13.4 cycles per block. In this RTL ECB also
  takes 11 cycles.
- The original does not describe the key schedule, the counter format, the
  key value, the handshakes, the reset, or how the 128-bit result becomes
  pixels again. Everything listed in the sections above for these points
  is this design's own choice: round keys on the fly, the cached last round
  key, the 128-bit counter incremented by one, valid/ready handshakes,
  asynchronous reset, and a 128-bit `dout`.
- `mode`, `iv`, `ctr_load`, `key_wr`, `idle` and `key_busy` are added ports.
  The original system shows only the pixel input, `enable1`, `sel` and the
  result.
- Not part of this RTL: the host side and the tool infrastructure. That
  covers image reading, pre- and post-processing, the viewers, and the JTAG
  hardware co-simulation link. The top's ports stand in for them.
- Resource and power figures of the FPGA implementations cannot be compared
  directly. For reference, generic synthesis of `aes_cosim_top` gives about
  2000 flip-flops. Its two forward cores and one inverse core make 72
  S-box lookups of 256 × 8 bits, each kept as its own ROM.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Expected values come
from known-answer vectors and from `tb/aes_ref_pkg.sv`, a separately
written software AES. That model builds its tables from log/antilog tables,
keeps the state as a byte array, and expands all round keys up front.

| Testbench | What it checks |
|---|---|
| `tb_aes_enc_core` | FIPS-197 App. B and C.1 and SP 800-38A ECB vectors. 240 random key/block pairs with random gaps and back-pressure. Blocks exactly 11 cycles apart in a stream. `out_valid` 10 cycles after accept. |
| `tb_aes_dec_core` | The same vectors decrypted, and random traffic with key changes. The 11-cycle stream rate. Exactly one 10-cycle key expansion per key change. |
| `tb_aes_encrypt_unit` | SP 800-38A F.1.1 (ECB) and F.5.1 (CTR) vectors. Random traffic with per-block mode switches, key changes and counter reloads, including a carry across bit 32 of the counter. `out_mode`. The 11-cycle rate. |
| `tb_aes_decrypt_unit` | SP 800-38A F.1.2 and F.5.2 vectors, random traffic, the rate in both modes, key expansions. |
| `tb_bit_conversion` | Byte order and packing under random gaps and back-pressure. A gapless stream gives one block per 16 cycles with no stall. |
| `tb_user_key` | Reset key, writes, one-bit key changes, `enable1`. |
| `tb_out_mux` | Selection, valid timing and hold against a cycle model. |
| `tb_aes_cosim_top` | End to end at default parameters. CTR and ECB; both outputs; mode switch with blocks in flight; key change with input stall; key disabled; counter reload. Each of these must occur at least once. Also the 16-cycle result rate and the 13/24-cycle latencies. |
| `tb_image_workload` | Whole images at default parameters. Details below. |

`tb_image_workload` uses two images: a 440 × 123 grey image, and a
512 × 512 synthetic image shaped like a chest CT slice. Each is encrypted
in CTR mode and every block is checked. It is decrypted back to the
original, and encrypted in ECB mode. The testbench computes the grey-level
entropy and the horizontal, vertical and diagonal neighbour correlations.
It also encrypts once more with one key bit flipped and measures NPCR (the
share of pixels that change) and UACI (their mean relative change).
Results:

| Image | Entropy in / CTR / ECB (bit) | Neighbour correlation, CTR (h, v, d) | NPCR / UACI, 1-bit key change |
|---|---|---|---|
| 440 × 123 | 3.73 / 7.9970 / 7.04 | 0.0076, −0.0009, 0.0004 | — |
| 512 × 512 | 3.73 / 7.9994 / 7.02 | 0.0005, 0.0054, 0.0004 | 99.61 % / 33.41 % |

On a real CT image the original work reports a CTR entropy of 7.99645,
correlations of about 0.002, and an NPCR/UACI of 99.45 % / 33.27 %. The
synthetic image is not the same picture, so only the order of magnitude
should agree, and it does. Each 512 × 512 pass takes 262 157 cycles for
16 384 blocks, one cycle per pixel plus the pipeline latency.

## Simulating

All files are SystemVerilog 2017. With Verilator 5, from the directory
that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/aes_pkg.sv tb/aes_ref_pkg.sv tb/tb_aes_cosim_top.sv --top-module tb_aes_cosim_top
./obj_dir/Vtb_aes_cosim_top
```

Replace `tb_aes_cosim_top` by any other testbench name. Testbenches that
do not use the reference model can leave out `tb/aes_ref_pkg.sv`.
`tb_image_workload` runs in a few seconds. Lint a module with
`verilator --lint-only -Wall -Irtl rtl/aes_pkg.sv rtl/<module>.sv`.

To change the design:

- The default key is the `DEFAULT_KEY` parameter of `aes_cosim_top`.
- The pixel width is set by the `IN_W` parameter of `bit_conversion`.
  `OUT_W` must stay 128 for AES.
- Cutting the 11-cycle latency by unrolling two rounds per cycle would
  mean changing the `ROUND` state of both cores, and the cycle counts
  checked in the testbenches.

The remaining lint warnings are expected:

- `rst_n` is used both as the flip-flops' asynchronous reset and in the
  `disable iff` of the handshake assertions.
- Some package constants are unused in some modules.
