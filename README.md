# Key-locked sparsity-aware DNN accelerator datapath

Sparsity-aware DNN accelerators save memory by not storing the zeros that
ReLU produces. This design turns that saving into the thing a hardware key
protects. The usual zero detector in front of the compressor is replaced by a
*match detector* that also checks a hardware key (Hkey). With the correct
Hkey, zeros are dropped as usual. With a wrong one, no zero is ever dropped:
the accelerator still computes exactly the same results, but it stores and
moves several times more data. A wrong key therefore corrupts no output, so a
SAT attack, which can only rule out keys that change outputs, learns nothing.
The chip still works, but it is too slow and uses too much memory and energy
to be worth counterfeiting.

A second key, the model key (Mkey), protects the trained model. The model
provider scrambles the two most significant bits of every bias before
publishing the model. Each bias adder first passes those two bits through
XOR/XNOR gates driven by its Mkey segment, so only the correct Mkey gives
back the true biases. With a wrong Mkey the network computes with wrong
biases and its accuracy collapses.

The scheme, its gate-level equations and the overall lane architecture come
from the published joint Hkey/Mkey protection scheme for DNN accelerators.
This RTL supplies everything around them that a working datapath needs: the
MACs, the compressor and its three word formats, the memory, the read-back
path, handshakes and widths. Section 7 separates the two.

## 1. Datapath

```
                 B'_i  MK_i                HK_i
                   |    |                    |
 act (broadcast) ->MAC_i -> Adder'_i -> A_i -> ReLU'_i -> X'_i -> Match_i -> g_i
 weight_i ------>/                                        |               |
                                                          v               v
                                  +--------------------------------------------+
                        (N lanes) |  compression_block: drop lanes with g_i=1  |
                                  +--------------------------------------------+
                                                      | 32-bit words
                                                      v
                                               fmap_mem (append)
                                                      |
                                   decompression_block (undo format, XOR T)
                                                      |
                                            dense groups -> next layer
```

`jp_accel_top` has `N` = 128 identical lanes. A lane is built from:

| module | function |
|---|---|
| `mac_unit` | Σ act·weight over a kernel of any length, Q8.8 fixed point, 40-bit accumulator, result shifted and saturated to 16 bits |
| `bias_adder_mk` | recovers the bias (`B = B' ^ (MK_i ^ XNOR_MASK_i)` on the two MSBs), then a saturating 16-bit add: `A_i = mac + B` |
| `relu_t` | `x_15 = 0`, `x_j = ~a_15 & a_j`, then `X' = X ^ T` |
| `match_detector` | `g = (HK_i == HK*_i) & (X' == T)` |

All lanes share one `compression_block`. It feeds `fmap_mem`, and
`decompression_block` reads `fmap_mem` back.

## 2. The secrets and the keys

The design holds three kinds of secret constant. They are set as parameters
at design time and end up merged into the gates after synthesis:

* `T` (16 bits, the same in every lane): the vector XORed onto every ReLU
  output. A zero ReLU output leaves the lane as `T`, not as `0`. So someone
  who finds the ReLU output wires cannot put a plain zero detector there in
  place of the match detector. `T` is removed again when the memory is read.
  Because `x'_15` is always `t_15`, XORing with `T` gives back a clean sign bit
  of 0.
* `HK_STAR` (`C` = 8 bits per lane): the correct Hkey segment of each match
  detector. The detector ANDs an 8-bit equality test with the 16-bit
  "is `T`" test, which makes it one AND tree of key and data bits.
* `MK_XNOR_MASK` (2 bits per lane): marks which of the two bias-MSB gates
  are XNOR rather than XOR. The correct Mkey segment of lane `i` is
  `r_i ^ MK_XNOR_MASK_i`, where `r_i` is the 2-bit vector the model provider
  used to scramble every bias that goes through adder `i`. So even a known
  Mkey does not tell which bits of a bias were flipped.

The defaults for `HK_STAR` and `MK_XNOR_MASK` come from a fixed xorshift
pattern (`jp_pkg::key_pattern`). Replace them with your own values. The keys
enter the top as the plain input buses `hk[N][C]` (1024 bits) and
`mk[N][2]` (256 bits). Storing the keys on chip (tamper-proof memory) is not
part of this RTL.

Scrambling a model for this hardware works as follows. Bias `b` is added in
lane `i` (lane `i` handles output channel `i` of each group). Publish
`b' = {b[15:14] ^ r_i, b[13:0]}`. Then give the authorised user
`mk[i] = r_i ^ MK_XNOR_MASK[i]`. Every bias that shares an adder must be
scrambled with the same `r_i`, because the key of a lane does not change
from cycle to cycle.

## 3. Why a wrong Hkey changes cost but not results

| Hkey of lane i | ReLU output X | g_i | stored word | value after read-back |
|---|---|---|---|---|
| correct | 0 | 1 | none (dropped) | 0 (lane starts a group as 0) |
| correct | v > 0 | 0 | `v ^ T` | `v` |
| wrong | 0 | 0 | `T` | `T ^ T = 0` |
| wrong | v > 0 | 0 | `v ^ T` | `v` |

The read-back data is identical in every row. Only the number of stored
words changes. A wrong segment in only some lanes inflates only those lanes'
share of the memory. If a match detector's output is tied to 0, every value
is stored, which is the same as a wrong key. If it is tied to 1, every value
is dropped and all results become 0.

## 3a. Shorter keys: locking only some lanes

A 128-lane array with one 8-bit Hkey segment and one 2-bit Mkey segment
per lane needs a 1024-bit Hkey and a 256-bit Mkey. To shorten either key,
leave some lanes unlocked:

* A lane with `HK_LOCK[i] = 0` gets a plain zero detector (`X' == T`, no key
  input). It drops its zeros whatever Hkey is applied, so it adds nothing
  to the memory growth.
* A lane with `MK_LOCK[i] = 0` gets a plain bias adder. Its biases are
  published unscrambled.

Unlocked lanes ignore their key bits. The key buses keep one segment per
lane, so lane numbering stays simple. One example is 100 adders of which 64
are locked (a 128-bit Mkey): `tb_partial_lock` builds it with `N = 100`
and checks that a wrong Mkey changes only the locked lanes' outputs.

## 4. Compressed word formats

The compressor takes one *group*: the `N` values `X'` that the lanes produce
in the same cycle, plus their `g` flags. It writes one 32-bit word per
cycle: the value in bits `[15:0]` and a metadata field in `[31:16]`. The
format is chosen with the parameter `FMT`:

* **BitMap** (`FMT_BITMAP`, default): `ceil(N/32)` bitmap words come first.
  Bit `k` of word `w` is 1 if lane `32w+k` is kept. Then comes one word per
  kept lane, in lane order. Cost per group: `ceil(N/32) + kept`.
* **RLC** (`FMT_RLC`): one word `{run, value}` per kept lane, where `run` is
  the number of dropped lanes since the previous word. A group that ends in
  dropped lanes gets one closing word `{run, X'_{N-1}}`, whose value is
  `T`, i.e. a stored zero. Cost: `kept` (+1).
* **CSC** (`FMT_CSC`): one count word, then `{lane index, value}` per kept
  lane. Cost: `1 + kept`.

With a wrong Hkey every lane is kept. At `N` = 128 a group then costs 132,
128 and 129 words in the three formats. BitMap keeps its position data in
fixed-size bitmaps, so it grows the least. The paper reports the same
ordering.

The compressor finds the next kept lane with a priority encoder, so a group
takes exactly as many cycles as it has words. Stored words and latency
therefore grow together. In the top, the lanes wait (`in_ready` low) while
the compressor is still busy with the previous group, and `stall_cycles`
counts these waits. The compressor takes the next group in the same cycle
as the last word of the current one, so a group stream has no gaps.

## 5. Interfaces and timing

Top-level input stream: on each beat, `in_act` (broadcast to all lanes)
and `in_weight[N]` are accepted when `in_valid && in_ready`. The beat with
`in_last` also carries the scrambled biases `in_bias[N]`, which are held for
that group. One cycle after the last beat, the group enters the adders,
ReLUs and match detectors. These are combinational and sit between the MAC
output registers and the compressor's input registers. If the compressor is
free, the group is registered there in that cycle. It then writes to
`fmap_mem` at one word per cycle. `fmap_mem` needs no handshake: it always
takes the word.

* `mem_clear` starts a new layer. It resets the write pointer,
  `words_stored`, `words_requested` and `mem_overflow`.
* When the memory is full, further words are lost and `mem_overflow` is
  set. `words_requested` keeps counting, so you can still see how much
  memory the layer would have needed.
* `rd_start` makes `decompression_block` walk addresses `0 .. words_stored-1`.
  It delivers each group as `dec_data[N]` with `dec_valid`/`dec_ready`, and
  pulses `rd_done` when the last group has been taken. It spends two cycles
  per word (address, then data).
* `groups_out`, `zeros_dropped` and `stall_cycles` are running statistics.

Reset is asynchronous and active low. The memory array is not reset. The
compressor carries an assertion: an offered word must stay stable until it
is taken.

## 6. Parameters (`jp_accel_top`)

| parameter | default | meaning |
|---|---|---|
| `H` | 16 | data width; the 16-bit fixed point is the paper's |
| `N` | 128 | lanes, i.e. MACs, bias adders, ReLUs and match detectors; 128 × 2 bits gives the 256-bit Mkey the paper evaluates |
| `FRAC`, `ACC_W` | 8, 40 | fixed-point fraction bits, accumulator width |
| `C` | 8 | Hkey bits per match detector |
| `MKW` | 2 | bias MSBs locked per lane (Mkey bits per lane) |
| `MEM_W`, `DEPTH` | 32, 4096 | memory word width and depth |
| `FMT` | `FMT_BITMAP` | compression format |
| `T`, `HK_STAR`, `MK_XNOR_MASK` | see section 2 | secret constants |
| `HK_LOCK`, `MK_LOCK` | all ones | lanes that carry an Hkey / Mkey segment (section 3a) |

The shared types (`fmt_e`), `key_pattern()` and `sat16()` live in
`rtl/jp_pkg.sv`.

## 7. What follows the paper and what is this design's own

Taken from the paper:

* the lane structure: MAC → bias adder with Mkey → modified ReLU → match
  detector → compression → memory, with as many adders, ReLUs and detectors
  as MACs;
* the modified ReLU equations and the single `T` shared by all lanes;
* the match detector `g = f_k(HK) & f_x(X')`;
* the XOR (or secret XNOR) of the two bias MSBs with the Mkey segment;
* the three compression methods by name;
* the option of locking only some adders and some detectors;
* removing `T` when the feature map is read;
* 16-bit data, and 128 bias groups × 2 bits = 256-bit Mkey.

Chosen here, because the paper does not specify them:

* the MAC's fixed-point format, accumulator and saturation;
* the adder saturation;
* the Hkey segment width;
* the grouping of values and all word layouts;
* the on-chip memory, its size and its overflow rule;
* the decoder;
* every handshake and all reset behaviour.

The paper treats the store as (off-chip) memory. Here it is a 4096-word
array that stands in for it, so a full layer of a real network does not fit.
For example, AlexNet's first layer has 55 × 55 × 96 = 290,400 output
values. At the 59 % zeros reported for it, that is about 127,000 BitMap
words with the correct Hkey and 300,000 with a wrong one.

Options the paper mentions but this RTL does not offer:

* different numbers of locked MSBs in different lanes. `MKW` sets more than
  two, but the same width applies to every lane;
* max pooling and other layers outside the lane datapath;
* the weight buffer and the sequencing of layers. The decompressed output
  leaves on a port rather than looping back into the MACs.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each one computes its
expected values independently: integer reference arithmetic, plus a separate
reference encoder in `tb/tb_ref_pkg.sv` for the word formats.

* `tb_mac_unit`, `tb_bias_adder_mk`, `tb_relu_t`, `tb_match_detector`,
  `tb_fmap_mem`: random and edge-case tests of each block. These cover
  saturation, every wrong 2-bit Mkey, and all 256 Hkey segments.
* `tb_compression_block`, `tb_decompression_block`: all three formats at 40
  lanes, so a bitmap takes two words. They include all-kept and all-dropped
  groups and random back-pressure. The compression test also checks the
  one-word-per-cycle rate.
* `tb_jp_accel_top`: runs the full default configuration through five layers:
  1. correct keys;
  2. wrong Hkey everywhere (same output, 1056 instead of 557 words, more
     cycles);
  3. wrong Hkey in half the lanes;
  4. wrong Mkey (about 80 % of outputs change);
  5. memory overflow.

  It also counts compressor stalls.
* `tb_workload_sparsity`: runs one top per format on groups with 59 % and
  81 % zeros. These are the fractions reported for AlexNet's conv1 and conv2
  outputs. It checks the word counts, that the output is the same under
  either key, that the sparser layer grows more, and that BitMap grows
  least. A typical run shows growth of ×2.4 and ×4.3–4.7, the same order as
  the paper's per-layer results. The paper's figures come from whole
  networks, so the numbers are not directly comparable.
* `tb_partial_lock`: 100 lanes, Mkey on 64 adders, Hkey on every second
  detector. A wrong Mkey corrupts only the locked lanes. A wrong Hkey grows
  memory only through the locked detectors.

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. To simulate one
with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/jp_pkg.sv tb/tb_ref_pkg.sv tb/tb_jp_accel_top.sv \
    --top-module tb_jp_accel_top -o sim
./obj_dir/sim
```

Use the same command with another testbench file and `--top-module`; `-y`
lets Verilator find the modules by file name. The full-size top test takes about 20 s to build and under a second to run.
