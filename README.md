# Separable image steganography over Paillier encryption — RTL

A grey-scale cover image is hidden inside a Paillier-encrypted image, and a
secret message is hidden in how the encrypted values are arranged. The two
are *separable*:

* anyone who has the shared **data-hiding key** can read the secret bits
  without decrypting anything;
* the holder of the **Paillier private key** can recover the cover image,
  bit for bit.

Embedding never changes a pixel bit, so the recovered cover image is exact
(the "100 % PSNR" property). One secret bit goes into every pixel (1 bpp).

This repository holds synthesizable SystemVerilog for both sides: the
sender (embedding-encryption) and the receiver (decryption-extraction).
Both are built around one Montgomery simultaneous-exponentiation core.

## 1. The scheme

Paillier, with public key `(n, g)` and private key `lambda`:

    encrypt   E(M, r) = g^M * r^n  mod n^2            r random, gcd(r, n) = 1
    decrypt   M = L(C^lambda mod n^2) * mu  mod n     L(x) = (x - 1) / n
              mu = L(g^lambda mod n^2)^-1 mod n
    additive  D(E(M1) * E(M2)) = M1 + M2 mod n

**Sender, per pixel P (0..255):**

1. Split `P = M1 + M2`.
2. Encrypt each half: `E1 = E(M1, r1)` and `E2 = E(M2, r2)`.
   Paillier is randomised, so the order of `E1` and `E2` is unpredictable.
3. Put the secret bit `b` into that order:
   * `b = 1`: swap the pair if `E1 < E2`, so the first value is the larger.
   * `b = 0`: swap the pair if `E1 > E2`, so the first value is the smaller.

   Swapping changes neither `M1 + M2` nor the decryptability of each value.

**Receiver:**

* Extraction: `b = (first > second)`. This needs no key.
* Decryption: decrypt both values and add them mod `n`.

**Sizes.** A ciphertext is below `n^2`. It is stored as three bytes, which
can be shown as one RGB pixel of the stego image. So `n^2 < 2^24` and `n`
has 12 bits. Every width in the RTL follows from this (`stego_pkg`):

| name | value | what |
|---|---|---|
| `NBITS` | 12 | width of `n`, `lambda`, `mu`, `r` |
| `MOD_W` | 24 | width of `n^2` and of a ciphertext; Montgomery radix `R = 2^24` |
| `NPIX` | 65536 | pixels per image (256 x 256), the depth of each image memory |

Keys of this size give no security. They show the datapath, not a usable
key length. Widening `NBITS`/`MOD_W` scales every arithmetic unit. The
memory word would then no longer be three bytes per ciphertext.

## 2. Montgomery simultaneous exponentiation (`mse_core`)

Encryption needs a product of two powers, `g^M * r^n`. `mse_core`
computes `g0^e0 * g1^e1 mod N` in one left-to-right pass over the exponent
bits. It does every multiplication in the Montgomery domain, using one
Montgomery multiplier, `MontP(x, y) = x*y*R^-1 mod N`.

```
g0'  = MontP(g0, R^2 mod N)          precomputation, stored in mse_param_ram
g1'  = MontP(g1, R^2 mod N)
g01' = MontP(g0', g1')
A    = MontP(R^2 mod N, 1)           Montgomery form of 1
for i = EXP_W-1 downto 0:
    A = MontP(A, A)
    (e0[i], e1[i]) = 10 -> A = MontP(A, g0')
                     01 -> A = MontP(A, g1')
                     11 -> A = MontP(A, g01')
a = MontP(A, 1)                      back to normal representation
```

Each exponent bit costs one squaring. It costs at most one further
multiplication, whatever the bits of both exponents are. That is the
gain over two separate exponentiations. A plain exponentiation `c^lambda`,
used in decryption, is the same run with `e1 = 0`.

The four values `g0'`, `g1'`, `g01'` and `A` sit in a 4-word register file
(`mse_param_ram`). It has one write port, fed by the multiplier, and two
read ports, which drive the multiplier operands. A state machine steps
through the products above.

Two places where this RTL had to choose between readings:

* **Case labels.** Written as "case `e0i, e1i` = 0,1 → use `g0'`", the
  published case labels would compute `g0^e1 * g1^e0`. The RTL pairs bit
  `e0[i]` with `g0'`, which gives the stated result `g0^e0 * g1^e1`.
* **The constant `e_2k`.** One listing calls it `2^k mod n`, another
  `2^2k mod n`. It must be `R^2 mod N`. Only then is `MontP(g, e_2k)` the
  Montgomery form of `g`, and `MontP(e_2k, 1)` the Montgomery form of 1.
  The host supplies it with the key.

The loop runs over `EXP_W = 12` exponent bits, not over the 24 bits of the
modulus. All exponents used here (`M <= 255`, `n`, `lambda`) are below
2^12.

### The multiplier (`mont_mul`)

This is a bit-serial radix-2 Montgomery multiplier. It takes one bit of
`x` per clock:

    t = acc + x_i*y;  if t odd: t += N;  acc = t/2

After `W` steps `acc < 2N`. One conditional subtraction of `N` then gives
the result. `N` must be odd; `n^2` of a product of odd primes always is.

**Timing** (`W = 24`):

* One product takes `W + 2` cycles from start to done.
* Inside the core, each product costs `W + 3 = 27` cycles, including the
  hand-over.
* A whole exponentiation takes `(5 + 12 + ones(e0 | e1)) * 27 + 1` cycles:
  between 460 and 784.

## 3. Sender: `enc_embed`

The sender walks the image memory from address 0 to `NPIX-1`.

1. **Read.** It reads the word; the cover pixel is in bits [7:0]. It also
   reads secret bit number `addr XOR hide_key`. The data-hiding key thus
   decides which secret bit lands in which pixel.
2. **Split.** `M1 = P AND s` and `M2 = P - M1`, where `s` is a random byte.
   Both halves are non-negative and `M1 + M2 = P` exactly.
3. **Encrypt.** It runs two exponentiations on the shared core:
   `E = g^M * r^n mod n^2`, each with a fresh `r`.
4. **Embed and write back.** `embed_unit` orders the pair by the secret
   bit. The engine writes `{first, second}` back to the same address,
   each value as red, green and blue bytes.

**Randomness.** The random values come from outside, through a
request/response port. In a cycle with `rnd_req` high, the engine samples
`rnd_r` and `rnd_split`; the source then presents new values. `rnd_r`
must lie in `Z*_n`: `1 <= r < n` and `gcd(r, n) = 1`. The engine does not
check this.

**Speed.** The measured average is about 1260 cycles per pixel with the
test key `n = 3233`. The exact figure depends on the exponent bits. The
paper this design follows reports 1520 cycles per pixel. `swap_count`
reports how many pairs were swapped.

## 4. Receiver: `dec_extract`

The receiver reads each `{first, second}` word. It then does what its
`rx_mode` bits select. Either bit, or both, may be set.

**`extract_en`** — extraction:

* `extract_unit` computes `b = first > second`.
* `b` is written to secret address `addr XOR hide_key`.
* This takes 3 cycles per pixel. No private key is used.

**`decrypt_en`** — decryption. Each of the two ciphertexts is decrypted
on its own:

1. `u = c^lambda mod n^2`, on `mse_core` with `e1 = 0`.
2. `dec_lfunc` computes `m = ((u - 1) / n) * mu mod n`. It has one
   sequential restoring divider (`seq_div`, one quotient bit per clock),
   used twice: once for the quotient `(u-1)/n`, once for the remainder
   of `L * mu`. A done-to-done step takes `2*MOD_W + 5 = 53` cycles.
   Dividing by `L(g^lambda)` is done as multiplying by its inverse `mu`,
   which the key holder precomputes.
3. The two messages are added mod `n`.
4. The result, the cover pixel, is written back into bits [7:0] of the
   same word. All other bits are cleared.

About 1250 cycles per pixel with the test key `n = 3233` and 1360 with
`n = 3599`; the count follows the number of ones in `lambda`. The paper
reports 1460.

## 5. Top level: `stego_top`

`stego_top` holds both engines and four single-port block RAMs
(`bram_sp`: read-first, one-cycle read latency):

| memory | words | content |
|---|---|---|
| `MEM_TX_IMG` | NPIX x 48 | cover pixel, replaced by the stego pair |
| `MEM_TX_SEC` | NPIX x 1 | secret bits to embed |
| `MEM_RX_IMG` | NPIX x 48 | stego pair, replaced by the recovered pixel |
| `MEM_RX_SEC` | NPIX x 1 | extracted secret bits |

**Host port.** A host loads and reads the memories through one port:
`host_sel`, `host_addr`, `host_we`, `host_wdata`, `host_rdata`. Read data
appears one cycle after the address. The stego image is moved from the
sender to the receiver through the same port. It stands in for the file
transfer between the two sides.

**Arbitration.** While an engine is busy, it owns its two memories. Host
writes to them are then ignored.

**Start and finish.** `tx_start` and `rx_start` are one-cycle pulses.
`tx_done` and `rx_done` pulse when the whole image has been processed.

**Keys.** `pk`, `sk` and `hide_key` are plain inputs:

* `pk`: `n`, `n^2`, `g`, `R^2 mod n^2`.
* `sk`: `n`, `n^2`, `lambda`, `mu`, `R^2 mod n^2`.
* `hide_key`: the shared data-hiding key.

Key generation, choosing `p`, `q` and `g` and computing `lambda`, is done
off-chip. So is the random-number source.

## 6. What follows the published design and what does not

Taken from the published design:

* encrypt-then-embed with an additive split;
* the swap and compare rules;
* simultaneous exponentiation with precomputed `g0'`, `g1'`, `g01'` and
  the conversion products;
* the three parts of the exponentiation core: multiplier, parameter RAM
  and control FSM;
* block RAM holding the image, with results written back to the same
  address;
* three bytes per ciphertext;
* image sizes 64x64 to 256x256.

This design's own choices, where the source gives no detail:

* the bit-serial multiplier and the restoring divider;
* the split rule `M1 = P AND s`;
* the pixel order given by `addr XOR hide_key`;
* decrypting `mu` as a precomputed inverse;
* decrypting the two halves separately and adding them;
* the mode bits;
* the memory word layout;
* the host port;
* the external random-number port;
* reset behaviour: asynchronous, active low; memories are not reset.

Known differences from the published figures:

* **Cycle counts.** This design takes about 1260 cycles per pixel to
  encrypt and 1250 to 1360 to decrypt. The published figures are 1520 and 1460.
* **Key length.** It is inferred from the three-byte ciphertext, not
  stated.
* **Memory size.** Each pixel takes a 48-bit word here, two 24-bit
  ciphertexts. The published block-RAM counts are smaller than that would
  need, and the published packing is not known.
* **Equal pairs.** If a pair of ciphertexts is equal (possible only with
  tiny keys), it is never swapped and reads back as 0.

## 7. Files

| file | content |
|---|---|
| `rtl/stego_pkg.sv` | widths, key structs, memory word, host-select enum |
| `rtl/mont_mul.sv` | bit-serial Montgomery multiplier |
| `rtl/mse_param_ram.sv` | 4-word parameter memory of the exponentiation core |
| `rtl/mse_core.sv` | simultaneous exponentiation FSM |
| `rtl/seq_div.sv` | restoring divider (helper of `dec_lfunc`) |
| `rtl/dec_lfunc.sv` | `L(u) * mu mod n` |
| `rtl/embed_unit.sv`, `rtl/extract_unit.sv` | pair ordering / bit recovery |
| `rtl/bram_sp.sv` | single-port block RAM |
| `rtl/enc_embed.sv` | sender engine |
| `rtl/dec_extract.sv` | receiver engine |
| `rtl/stego_top.sv` | top level |
| `tb/tb_pkg.sv` | reference model: modular exponentiation, Paillier with 64-bit integers, test keys |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_stego_top_full.sv` | end-to-end run at full size (256 x 256) |
| `tb/stego_e2e_run.sv`, `tb/tb_stego_workloads.sv` | the same flow on 64 x 64 and 128 x 128 images, with cycle counts and throughput |

## 8. Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops on its
own, or through a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_stego_top \
    -y rtl -y tb +libext+.sv rtl/stego_pkg.sv tb/tb_pkg.sv tb/tb_stego_top.sv
./obj_dir/Vtb_stego_top
```

**Unit testbenches.** They compare each block with the reference model in
`tb_pkg`, and check the latencies given above.

**`tb_stego_top`** (64 pixels) runs the whole flow:

1. load a random cover image and random secret bits;
2. embed-encrypt;
3. check every stego pair with the reference decryption;
4. move the image to the receiver;
5. run extraction only, decryption only, then both.

It checks the image and the bits after each run. It also counts the
mechanisms: swapped pairs, kept pairs, each receiver mode, and host writes
blocked by a busy engine.

**`tb_stego_top_full`** does the same for a 256 x 256 image, with every
parameter at its default. That is about 2.5·10^8 clock cycles (a little over
two minutes of Verilator time).

**`tb_stego_workloads`** runs the flow on a 64 x 64 and a 128 x 128
synthetic image (gradient plus noise) and prints cycles per pixel and the
resulting pixel rate. At the 135.2 MHz clock reported for an Artix-7
build of the published design, this datapath processes about 107 Kpixel/s
in either direction with `n = 3233`, i.e. about 26 frames/s at 64 x 64
and 6.5 frames/s at 128 x 128 (one engine per side).

**Changing the design.** Image size is the `NPIX` parameter of
`stego_top`. Widths are in `stego_pkg`. A new key needs `n`, `n^2`, `g`,
`lambda`, `R^2 mod n^2` with `R = 2^MOD_W`, and
`mu = L(g^lambda mod n^2)^-1 mod n`. `tb_pkg::make_key` shows how to
compute them.
