# Virtual Coset Coding for encrypted MLC phase-change memory — RTL

Encrypted data looks random. Schemes that save write energy in non-volatile memory by exploiting
runs of zeros or similarity with the old contents (Flip-N-Write, data-bus inversion) stop working on
it. Coset coding still helps: XOR the word with one of N random "coset" vectors, keep the result that
is cheapest to write over what the cell array already holds, and store the index of the coset. The
more cosets, the better the best one. But N full-width random vectors cost area, energy and delay
in proportion to N.

Virtual Coset Coding (VCC), proposed by Longofono, Seyedzadeh and Jones, gets many cosets cheaply.
A short random **kernel** of m bits is repeated across the n-bit word. Each m-bit partition of the
word may use the kernel or its complement. One kernel therefore stands for 2^p "virtual" cosets
(p = n/m), and r kernels for N = r·2^p. The encoder does not have to try all N. Each partition's
plain-or-inverted choice is independent, so for every kernel it keeps the cheaper form of each
partition and adds the costs. It then compares only r totals.

This repository holds synthesizable SystemVerilog for the main configuration of that work,
**VCC(64,256,16)**:

| symbol | meaning | value |
|---|---|---|
| n | encoded word | 64 bits |
| m | kernel / partition width | 16 bits |
| p | partitions per word | 4 |
| r | kernels per word | 16 |
| N | virtual cosets per word | 256 |
| aux | index bits per word | log2 N = 8 (64 per 512-bit line, the space SECDED would use) |

It also holds the controller datapath around the coding unit: counter-mode encryption of 512-bit
cache lines, the VCC unit, and a read path that undoes both.

## 1. How a word is encoded

The word D is printed and indexed MSB first. Partition d0 is D[63:48] and d3 is D[15:0].

For every kernel R_i, i = 0..15, in parallel:

1. For every partition d_j, form both candidates `d_j ^ R_i` and `d_j ^ ~R_i`.
2. Cost each candidate against the stored partition o_j (see section 3).
3. Keep the cheaper candidate. Set flag_j = 1 only if the inverted form is *strictly* cheaper.
4. The kernel's total is the sum of the four kept partition costs plus the cost of writing its
   8-bit index `{i[3:0], flag0, flag1, flag2, flag3}` over the stored index cells.

The kernel with the lowest total wins. On a tie the lowest i wins. The outputs are the code word
X_opt and its index `opt`.

Decoding needs no search. The index names the kernel, and each partition is XORed with that kernel
or its complement according to its flag.

**Worked example** (reproduced bit-exactly by `tb_vcc_encoder` and `tb_vcc_decoder`). It uses four
kernels (VCC(64,64,4)), SLC cells, a stored word of all zeros, and "number of ones written" as the
cost:

```
D      = 1010001011011011 0101000100100100 0100011001000101 1010010100001011
R0..R3 = 1010100111011011 0100011111110100 0011001001100011 1010110001000111
ones per partition, best form:  i=0: 3 3 4 5 (+2 index ones) = 17   <- chosen
                                i=1: 6 6 5 4 (+3) = 24   i=2: 6 8 7 8 (+1) = 30   i=3: 7 5 6 5 (+3) = 26
X_opt  = 0000101100000000 0000011100000000 0001000001100001 0000110011010000,  opt = 00 0110
```

Row i=2 shows the tie rule. Partitions with exactly 8 ones out of 16 keep the plain kernel; an
inverted form would cost the same and add index ones.

## 2. Kernels generated from the data (MLC mode)

In a two-bit-per-cell (MLC) PCM, write energy depends on the new symbol's *right* digit (its less
significant bit). A new symbol ending in 1 is an intermediate resistance level: it needs a full
SET/RESET and then program-and-verify, about ten times the energy of the others. The left digit
does not matter to energy.

The design therefore encodes only right digits and leaves left digits untouched. The left digits
of an encrypted word are random, so they serve as the seed of the kernels
(`vcc_coset_generator`):

* The 32 left digits of the word, leftmost symbol first, form L. L is cut into b = 2 base vectors
  of 16 bits.
* The masks M_i = i, for i = 0..7, are 1 + log2(r/b) = 4 bits wide. The extra zero bit keeps a
  kernel and its complement from both appearing. Each mask is repeated four times across a base
  vector: `R_(2i+j) = base_j ^ {M_i, M_i, M_i, M_i}`.
* No kernel is stored, and the kernels change with every write. This also removes the risk that a
  fixed kernel set is learned and used against the scheme.
* On a read the same kernels are rebuilt from the stored code word, because its left digits are
  still the ciphertext's left digits.

The kernel is 16 bits wide but a 16-bit partition holds only 8 right digits. The design applies the
kernel bits that fall on right-digit positions (kernel AND 0x5555) and ignores the rest. The
published description does not say how the kernel maps onto right digits; this mapping is this
design's choice.

In SLC mode (one bit per cell) every bit is encoded, and there are no free digits to seed a
generator. The kernels then come from `vcc_coset_rom`, the optional ROM of stored kernels. The
mode is a top-level input (`mlc_i`). Its first four entries are the kernels of the worked example.
Entries 4..15 are filled by a 16-bit Galois LFSR: feedback 0xB400, seed 0xACE1, seven steps per
entry. A real part would hold kernels from a true random source.

## 3. Cost function

`vcc_field_cost` scores one candidate field against the stored field:

* **MLC energy:** an unchanged symbol costs 0. A changed symbol costs E_HIGH = 10 if its new right
  digit is 1, else E_LOW = 1. Only the high/low split is published; the 10:1 ratio is an estimate.
  The weights are constants in `vcc_pkg`.
* **SLC energy:** 1 per changed bit.
* **Stuck-at-wrong (SAW):** a changed bit (SLC) or changed symbol (MLC) on a cell that the fault
  repository reports as stuck. Such a cell keeps its old value, so the write would be wrong. In MLC
  mode a cell is stuck if either of its two per-bit flags is set.

Two orders are supported, selected by `opt_saw_first_i`:

* SAW first, then energy. This is the order used for lifetime.
* Energy first, then SAW.

Both are folded into one 20-bit scalar, `{primary, secondary}`, with the secondary objective in the
low 10 bits. A sum over 36 MLC symbols or 72 SLC bits never carries out of the low field. A plain
comparison of scalars is therefore a lexicographic comparison. Because the scalar is additive, the
per-partition choice in step 3 also gives the best total for each kernel.

The index cells are costed with the same function. They are written with every word: 4 MLC
symbols or 8 SLC bits.

### A limit of MLC mode: stuck cells

Left digits are never encoded. A stuck cell whose stored left digit differs from the new word's
left digit is therefore written wrong under every one of the 256 cosets. For random data a symbol
changes with probability 3/4 and its left digit differs with probability 1/2. So about two thirds
of the cells that unencoded writing would get wrong cannot be rescued, and SAW-first coding removes
at most about a third of them. The random-data workload test measures 33% at a 1% stuck-bit
density.

The published evaluation reports 88–95% fewer SAW cells. It does not say how the left digits of
stuck cells were treated, and this RTL does not reproduce that figure. Energy, which depends only
on right digits, is not affected by this limit.

## 4. The datapath around the coder

```
 write-back:  LLC line --XOR pads--> ciphertext --vcc_unit encode--> code words + indices + counter --> memory
                         ^ 4 x 128-bit pads from AES({counter+1, address, engine})
 read:        memory --vcc_unit decode--> ciphertext --XOR pads--> plaintext --> LLC
                                                          ^ AES({stored counter, address, engine})
```

* **`vcc_ctr_crypto`** does counter-mode encryption. Every line has a counter stored beside it.
  A write-back increments it, so a pad is never reused.
  * Four AES engines each turn a 128-bit block into a 128-bit pad. The block is
    `{counter[63:0], address zero-extended to 62 bits, engine index[1:0]}`. Engine e covers line
    bits [511-128e -: 128].
  * The AES engines themselves are outside this RTL. Their blocks and pads are ports of the top.
  * Encryption and decryption are the same XOR.
  * It runs one request at a time. States: idle, request to engines, wait for pads, result.
* **`vcc_unit`** does the coding for a whole line. It splits the line into eight 64-bit words
  (word 0 = line[511:448]). Each word has its own kernel generator, encoder and decoder, and all
  eight work in parallel.
  * The index of word w is aux[63-8w -: 8].
  * The stuck flags of word w are stuck[575-72w -: 72]: 64 data flags, then 8 index flags.
  * Encode and decode each have one register stage, so the result comes 1 cycle after the request.
* **`vcc_mem_top`** sequences one transaction at a time.
  * A write-back arrives together with the stored content of its line: code words, indices,
    counter and stuck flags. The controller reads these while the line is encrypted; this is the
    read-modify-write that every coset scheme needs.
  * A read that arrives together with a write goes first.
  * Latency: the engine request goes out 1 cycle after a write is accepted, or 2 cycles after a
    read is accepted (the read is decoded first). If the engines deliver the pads in cycle c, the
    plaintext of a read reaches the cache in cycle c+1. The code words of a write reach memory in
    cycle c+2, after one more cycle for encoding.
  * All results are one-cycle pulses. There is no back-pressure towards memory or cache.

The published encoder delay is 1.8–2 ns in 45 nm for the fully parallel design, about two cycles at
1 GHz. Here the encoder is one combinational stage followed by one register. At a fast clock it
would need pipelining, for example by registering the per-kernel totals before the 16-way minimum.

## 5. Files

| file | contents |
|---|---|
| `rtl/vcc_pkg.sv` | sizes (n, m, p, r, N, line, engines), energy weights, cost width, kernel type |
| `rtl/vcc_field_cost.sv` | energy + SAW cost of one field (helper) |
| `rtl/vcc_encoder.sv` | one-word encoder, parameter R (kernels) |
| `rtl/vcc_decoder.sv` | one-word decoder, parameter R |
| `rtl/vcc_coset_generator.sv` | kernels from a word's left digits, parameter R |
| `rtl/vcc_coset_rom.sv` | stored kernels for SLC mode |
| `rtl/vcc_unit.sv` | 512-bit line coder, registered |
| `rtl/vcc_ctr_crypto.sv` | counter-mode encryption/decryption control and XOR |
| `rtl/vcc_mem_top.sv` | top: write and read paths |
| `tb/vcc_ref_pkg.sv` | independent reference model (encoder, decoder, generator, cost) |
| `tb/aes_pad_model.sv` | stand-in for the AES engines, **not AES** (keyed mixing function) |
| `tb/tb_*.sv` | one self-checking testbench per module |

To simulate, for example the end-to-end test:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/vcc_pkg.sv tb/vcc_ref_pkg.sv tb/tb_vcc_mem_top.sv --top-module tb_vcc_mem_top
./obj_dir/Vtb_vcc_mem_top
```

Every testbench ends with `TB_RESULT checks=N failures=F` and has a watchdog.

To change the kernel count (the r = 2, 4, 8 configurations with N = 32, 64, 128), set `R_KERN` in
`vcc_pkg`. The index then shrinks to log2 r + 4 bits. The one-word modules also take `R` as a
parameter.

## 6. What the tests establish

* **`tb_vcc_encoder`:**
  * Reproduces the worked example above: code word, index and cost 17.
  * Runs 400 random words at full size against the reference model, in both modes and both cost
    orders, with random stored contents and stuck cells.
  * Checks that MLC left digits are unchanged.
* **`tb_vcc_decoder`:** decodes the example, random words, and reference-encoded words.
* **`tb_vcc_coset_generator`:**
  * Reproduces the published kernel example: base vectors `1101101100000100` and
    `0001000011000011`, and with mask 01 `1000111001010001` and `0100010110010110`.
  * At full size, checks that all 16 kernels are distinct, that no two are complements, and that
    they depend only on left digits.
* **`tb_vcc_coset_rom`:** checks the ROM contents against the fill rule.
* **`tb_vcc_unit`:** checks every word of random lines against the reference model, the 1-cycle
  latency, and the decode round trip.
* **`tb_vcc_ctr_crypto`:** checks the engine block layout, the counter update, the pad placement,
  the round trip, and that random engine stalls are handled.
* **`tb_vcc_workload_random`** repeats the published random-data study at small scale.
  * 3000 random words are written to 64 MLC words, with 1% stuck bits.
  * Encoding uses kernels generated from the data. Each word is read back and decoded with
    regenerated kernels.
  * Energy first saves about 32% of write energy, including the index cells.
  * SAW first saves about 31% of write energy and leaves 33% fewer SAW cells than unencoded
    writes, close to the bound described in section 3.
* **`tb_vcc_mem_top`** is the whole design at default parameters.
  * Setup: a behavioural memory of 8 lines with random initial contents, and fixed fault maps of
    about 1% stuck bits. Two lines are fault-free, so exact read-backs are guaranteed.
  * Three phases: MLC energy-first, MLC SAW-first, SLC.
  * Every written word is checked against the reference model, run on the ciphertext.
  * Every read of a line written without a SAW cell must return the plaintext.
  * Each mechanism must occur: read/write collision, engine stall, inverted partitions, kernels
    other than 0, SAW avoided, SAW remaining, both modes and both orders.
  * With random (encrypted-like) data and the 10:1 weights, the encoded MLC write energy,
    including the index cells, is about 31% below writing the ciphertext unencoded. The
    published figure for benchmark traces is about 28%.
  * With SAW first, the SAW cells left drop by about 30% compared with unencoded writes. This is
    at a deliberately harsh fault density and with the line's fixed fault map.

## 7. Where this RTL departs from, or adds to, the published description

* **Tie in the per-partition choice.** The published pseudocode inverts when the plain form's
  ones count is not below m/2, so ties invert. The prose and the worked example invert only when
  the count is *above* m/2. The RTL follows the prose and the example: it inverts only when the
  inverted form is strictly cheaper.
* **Kernel numbering.** The generator numbers kernels `i·b + j` as in its pseudocode. The prose
  example lists the same four kernels in a different order. Any order works as long as the
  encoder and decoder agree.
* **Right-digit mapping** of a 16-bit kernel onto 8 right digits: this design's choice
  (section 2).
* **Energy weights** 10 and 1, the **scalar cost packing**, and the **tie between kernels**
  (lowest index wins) are this design's choices.
* **SLC mode with ROM kernels.** The architecture diagram has an SLC/MLC select and an optional
  ROM. Using the ROM exactly for SLC is this design's reading of that diagram.
* **The old block in the encoder.** The published block diagram XORs the old block into the
  candidates and again after selection, which is a difference form. This RTL compares each
  candidate with the old block directly. The selected word is the same.
* **Outside the RTL:** the AES engines, the cache, the PCM and its bus, and the fault repository
  that tracks stuck cells. Their signals are top-level ports.
* **Crypto-unit details:** counter width (64), address width (32; a 2 GiB memory needs 31), the
  engine block layout, the handshakes, and the one-transaction-at-a-time sequencing with reads
  first are not specified by the source and were chosen here.
* **Synthesis size.** One 64-bit encoder is about 27k word-level cells after generic synthesis,
  fully parallel over 16 kernels × 4 partitions × 2 forms. The line unit has eight of them.
