# MHHEA: a parallel bit-hiding encryption processor

MHHEA (Modified Hybrid Hiding Encryption Algorithm) sits between cryptography and
steganography. It does not substitute or permute plaintext characters. It buries them:
every output word is a fresh 16-bit random *hiding vector*, and a handful of its bits are
overwritten with plaintext bits. A secret key says which bits. Before use, both the
positions and the plaintext bits are scrambled, so a constant chosen plaintext does not
show up at fixed places in the output.

This RTL implements a processor that hides one whole key-selected range of bits per
output word, all in the same clock cycle. A serial design would replace one bit per cycle,
so its speed would depend on the key. Here every output word takes exactly two cycles,
whatever the key. The datapath has no variable crossbar between message and vector.
Instead the message is *rotated* until the right bits line up with a fixed row of
multiplexers. That rotation trick is the least obvious part of the design and is explained
in detail below.

## 1. The algorithm for one key pair

The key is a table of L = 16 pairs `(K_i1, K_i2)` of integers 0..7. The plaintext is
consumed as a bit stream, least significant bit first. For each output word, using pair
`i` (with `i` counting modulo 16):

1. Draw a new 16-bit vector `V`.
2. Order the pair so that `K1 <= K2`.
3. Scramble the locations using the vector's upper byte:
   `KN1 = (V[K2+8 : K1+8] mod 8) XOR K1` and `KN2 = (KN1 + (K2 - K1)) mod 8`.
   If `KN1 > KN2` (the addition wrapped), swap them.
4. For `j = KN1 .. KN2`, set `V[j] = m XOR K1[q]`. Here `m` is the next plaintext bit and
   `q` runs 0,1,2,0,1,2,... from `KN1` upwards. `K1[q]` is bit `q` of the smaller original key.
5. Output `V` as the cipher word.

The number of bits hidden per word is `KN2 - KN1 + 1`, between 1 and 8. The bits always
land in the lower byte of the word. The upper byte is passed through untouched. This makes
decryption possible: a receiver that has the key reads `V[15:8]` from the cipher word,
recomputes `KN1` and `KN2`, and reads the bits back out (XOR with the same `K1` bits). The
end-to-end testbench does exactly this.

**Worked example** (these values appear as a simulation in the original publication and
are used as directed tests here):

| step | value |
|---|---|
| key pair, vector | (0, 3), `V = 16'hCA06` |
| slice `V[11:8]` | `4'b1010`, mod 8 = 2, XOR 0 gives `KN1 = 2` |
| `KN2` | 2 + 3 = 5 |
| message buffer before | `16'h48D0`, rotated left by 2 gives `16'h2341` |
| bits 5..2 of buffer | `4'b0000` (key bits are all zero, so no scrambling) |
| cipher | `16'hCA06` with bits 5..2 cleared gives `16'hCA02` |
| buffer after | `16'h2341` rotated right by 6 gives `16'h048D` |
| next pair, vector | (4, 6), `V = 16'hE503`, so `KN1 = 6 XOR 4 = 2`, `KN2 = 4` |
| next cipher | buffer `16'h1234`; bits 4..2 `101` XOR key bits `0,0,1` give `001`, so cipher is `16'hE507` |

## 2. Fixed wiring and message rotation

Bit `j` of the message buffer can only ever replace bit `j` of the vector. The
encryption module is just eight 2:1 multiplexers on the low byte. The plaintext bits still
to be hidden are always kept at the bottom of a 16-bit buffer, starting at bit 0. Two
rotations per word maintain this:

* **Circ cycle:** rotate the buffer *left* by `KN1`. The next unused bits now sit at
  positions `KN1` upwards, under the multiplexers that will select them.
* **Encrypt cycle:** the multiplexers for positions `KN1..KN2` take the scrambled buffer
  bits and the cipher word is registered. In the same cycle, the buffer is rotated
  *right* by `KN2 + 1`.

The net movement is a right rotation by `KN2 - KN1 + 1`, exactly the number of bits used.
The next unused bit is therefore back at bit 0. Both rotations are single-cycle
multiplexer rotators. The right-rotation amount runs from 1 to 8, so it is 4 bits wide.

Rotation needs the whole message word to be visible in the rotator. The 32-bit plaintext
block is therefore handled as two 16-bit halves, low half first. A half is finished when
its 16 bits have been hidden. The last word of a half may name a range longer than the
bits that are left. In that case only the remaining bits are written, and the rest of the
range keeps its random vector bits. The algorithm uses the same rule at the end of a file.
The next half then starts with the next key pair and a fresh vector.

## 3. Block structure

```
 plaintext(32) -> message_cache --16--> message_alignment --low byte--> message_scramble --8--> encryption_module --> cipher(16), ready
                                          ^ rotl KN1   ^ rotr KN2+1          ^ K1, KN1              ^ V(16), KN1, KN2
 key pairs -> key_cache -> key_scramble --KN1,KN2--> comparator --small/large--> plus_one
               ^ addr        ^ V[15:8], gives K1
 address_increment     random_number_generator (16-bit LFSR)
 control_unit: Init -> LMsg -> LKey -> LMsgCache -> (Circ <-> Encrypt) -> LMsgCache -> ... -> Init
```

| module | role |
|---|---|
| `mhhea_pkg` | widths, `key_t`, `key_pair_t`, `state_t` |
| `message_cache` | 32-bit plaintext register; selects the 16-bit half |
| `message_alignment` | 16-bit buffer with one-cycle left/right rotators |
| `key_cache`, `key_bank8` | 16 key pairs as two 8-pair register banks and a 2:1 read multiplexer |
| `address_increment` | 4-bit key address: used for loading the key, then as `i mod 16` |
| `key_scramble` | orders the pair and computes `KN1`, `KN2`, and the smaller original key `K1` |
| `comparator` | orders `KN1`/`KN2` into small and large |
| `plus_one` | right-rotation amount `KN2 + 1` |
| `message_scramble` | XORs the aligned byte with the cycling bits of `K1` |
| `encryption_module` | row of multiplexers; cipher register and `ready` |
| `random_number_generator` | LFSR x^16 + x^14 + x^13 + x^11 + 1 |
| `control_unit` | six-state controller and hidden-bit counter |
| `mhhea_top` | the processor |

## 4. Control sequence and timing

| state | cycles | what happens |
|---|---|---|
| Init | until `go` | key address and half counter cleared; `idle` high |
| LMsg | 1 | `plaintext` captured |
| LKey | 16 | `key_load` high; the pair on `key` is written at `key_addr` = 0..15 |
| LMsgCache | 1 per half | next half loaded into the buffer (low half first) |
| Circ | 1 per word | buffer rotated left by `KN1` |
| Encrypt | 1 per word | cipher registered, buffer rotated right, key address and LFSR stepped |
| LMsgCache | 1 | both halves done: back to Init |

Exactly two cycles separate successive cipher words within a half. A block takes
`1 + 16 + (1 + 2*w0) + (1 + 2*w1) + 1` cycles from the cycle `go` is seen. Here `w0`
and `w1` are the words needed for each half (2 to 16 each, depending on key and vectors).
`ready` is high for one cycle, the cycle after Encrypt. `cipher` holds its value until the
next word.

The key address runs on across the two halves and wraps modulo 16 inside a block. A new
block (a new `go`) restarts at pair 0 and reloads the key, as the controller always passes
through LKey. The LFSR is *not* restarted between blocks. Only `rst` reseeds it, so blocks
do not repeat vectors within the LFSR period of 65535 words.

Throughput is one 16-bit word per two cycles. That carries between 0.5 and 4 plaintext bits
per cycle, depending on the key. The original FPGA figures (23.9 MHz, about 95.5 Mbit/s)
correspond to the upper bound of 4 bits per cycle.

## 5. Using `mhhea_top`

Ports: `clk`, `rst` (synchronous, active high), `go`, `plaintext[31:0]`, `key` (a
`key_pair_t`: `left`, `right`, 3 bits each), `idle`, `key_load`, `key_addr[3:0]`,
`cipher[15:0]` and `ready`. Parameter `SEED` (default `16'hACE1`, must be nonzero) seeds the
LFSR.

1. While `idle` is high, raise `go` and present the plaintext. It is sampled in the
   following cycle.
2. While `key_load` is high, drive `key` with pair number `key_addr`. One pair is taken per
   cycle.
3. Collect `cipher` on every cycle with `ready` high. The first words carry bits 0.. of
   the plaintext, and the low half ends where the hidden-bit count reaches 16.

## 6. Where this RTL fills gaps or departs from the source

* **Key width.** One passage speaks of four-bit key registers, another of 3-bit registers.
  3 bits is used, matching key values 0..7.
* **Location slice.** The slice `V[K2+8 : K1+8]` is 1 to 8 bits wide. Only its low 3
  bits matter after the mod 8. This reading reproduces both worked examples.
* **Bit order of `K1[q]`.** `q = 0` is the least significant bit. This reproduces the
  second worked cipher word, `16'hE507`.
* **End of a half.** The rule above (remaining bits only) is this design's reading; the
  source does not say how the hardware ends a half.
* **Where the original pair is ordered.** This is done inside `key_scramble`. The
  comparator orders the scrambled pair.
* **Extra inputs.** The source block diagram labels two paths narrower than needed:
  * The vector input to the location scrambler is labelled 3 bits. Here it takes the
    whole upper byte.
  * The `+1` output is labelled 3 bits. It is 4 bits here, so that a rotation by 8 works.
  * The message scrambler also takes `KN1`, so that `q` starts at the range start.
* **LFSR.** The polynomial and seed are this design's choice. The LFSR is not reset at
  Init, although Init is described as resetting all modules.
* **Controller.** The state diagram shows a self-loop on LMsgCache labelled "Not EOF" with
  no described meaning. Here LMsgCache always lasts one cycle.
* **Key-load handshake.** The `key_load`/`key_addr` handshake for feeding key pairs is
  this design's own.
* **Not built.** Two uses are mentioned as possible without hardware changes: loading
  cover data (for example multimedia) in place of the random vector, and pairing the
  processor with a separate steganographic shuffler. Neither is built here. Replacing
  `random_number_generator` with a cover-data source is the natural place for the first.
* **FPGA results.** Area and clock figures from the original Spartan II implementation are
  not reproduced. This RTL only fixes the cycle behaviour.

## 7. Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M`.

* The block testbenches include the worked example above:
  * rotations `48D0 -> 2341 -> 048D`;
  * `KN` values (2,5) and (2,4);
  * cipher words `CA02` and `E507`.
* They also compare against independent bit-level models under random stimulus:
  * every key pair in `key_scramble`;
  * a full 65535-state period check of the LFSR.
* `tb_mhhea_top` encrypts six blocks at the default parameters. The first is
  `32'hABCD1234` with the example key. It checks:
  * every cipher word against a model written from the algorithm's pseudo-code;
  * decryption of each block from the cipher words alone;
  * the two-cycle word spacing and the total cycle count of each block.
* It also counts the mechanisms of the design and fails if any never occurs:
  * waiting in Init;
  * swap of the original pair and wrap-around swap of the scrambled pair;
  * a word cut short at the end of a half;
  * a full 8-bit range;
  * key address wrap.

To run one testbench with Verilator (the package first; the other modules are found in
`rtl/` by name):

```
verilator --binary --timing --assert -y rtl +libext+.sv rtl/mhhea_pkg.sv \
          tb/tb_mhhea_top.sv --top-module tb_mhhea_top -Mdir obj && ./obj/Vtb_mhhea_top
```

Replace `tb_mhhea_top` with any other testbench name to run that block alone. The top-level
test runs in well under a second.

## 8. Changing the design

The widths live in `mhhea_pkg`: block 32, half 16, key 3 bits, 16 pairs, vector 16, hidden
byte 8. The structure follows these proportions: key values 0..7 address a byte, and the
slice of the upper byte assumes a 16-bit vector. Changing them consistently is possible,
but the `+8` offset and the 3-bit masks in `key_scramble` and `message_scramble` must follow.
To change the random source, change only `random_number_generator`. The rest of the
design needs only a 16-bit vector that is stable from Circ through Encrypt and advances on
`step`.
