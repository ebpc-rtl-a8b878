# Extended bit-plane compression (EBPC) for CNN feature maps

The intermediate feature maps of a convolutional network, and the gradient
maps of its training, are usually far larger than the weights, and moving
them to and from memory costs more energy than computing them. After a ReLU
these maps have two properties that a very small circuit can exploit:

* **they are sparse**: 20-80 % of the values are zero, and the zeros come in
  runs;
* **they are smooth**: neighbouring non-zero values are close to each other.

EBPC splits the word stream along these two properties. A zero/non-zero flag
stream is run-length coded (Zero-RLE), and the non-zero words alone are
compressed in blocks of eight by bit-plane compression (BPC) of their
differences. Neither part needs a dictionary or a code book; the whole state
is a few registers. The code is lossless.

This repository holds synthesizable SystemVerilog for the compressor, the
decompressor and a top that holds both, at the reference configuration of
8-bit words, blocks of 8 words, zero bursts of up to 16 words and an 8-bit
memory bus. It runs at up to one word per cycle, 0.8 words per cycle in the
worst case of no zeros at all. It also includes a self-checking testbench
for every unit and a bit-exact reference model of the code in SystemVerilog.

## 1. The compressed format

A stream of words becomes **two separate byte streams**: the Zero-RLE stream
and the bit-plane stream. The two streams are never merged, and a reader
needs both.

### 1.1 Bit order

Both streams are bit strings that are packed into bytes. The first bit of
the string goes into bit 0 (the LSB) of the first byte, the ninth bit into
bit 0 of the second byte, and so on. Inside the string, every multi-bit
field (a code prefix, a length, a position or a base word) is written most
significant bit first. The last byte of a stream is padded with zero bits.

### 1.2 Zero-RLE stream

The encoder reads the words in order:

| input | code |
|---|---|
| a non-zero word | `1` |
| a run of *k* zeros, 1 <= *k* <= 16 | `0` followed by *k*-1 in 4 bits |

A run of more than 16 zeros is cut into pieces of 16 plus a rest. For
example, 40 zeros give `0 1111`, `0 1111` and `0 0111`. A zero run ends at
the next non-zero word or at the end of the stream.

### 1.3 Bit-plane stream

The non-zero words, in order, are grouped into blocks of *n* = 8. For each
block:

1. **Base and deltas.** The first word is the *base*. The seven deltas are
   `d[j] = w[j+1] - w[j]`. Both words are read as signed 8-bit numbers, so
   each delta takes 9 bits in two's complement.
2. **Delta bit-planes (DBP).** Plane *i* (*i* = 0..8) is a 7-bit word whose
   bit *j* is bit *i* of `d[j]`. Small deltas of either sign make the upper
   planes all zeros or all ones.
3. **XOR of neighbouring planes (DBX).** `DBX[i] = DBP[i] ^ DBP[i+1]` for *i*
   < 8, and `DBX[8] = DBP[8]`. The XOR turns the all-ones planes of small
   negative deltas into zero planes as well.
4. **Symbols.** The block is written as the 8-bit base word, followed by the
   planes from DBX[8] down to DBX[0]. Each plane is coded with the first
   matching row of this table:

| plane class | condition | code | bits |
|---|---|---|---|
| multi-all-0 | DBX[i], DBX[i-1], ... is a run of *r* >= 2 zero planes | `001` + (*r*-2) in 3 bits | 6 |
| all-0 DBX | DBX[i] = 0 (a run of one) | `01` | 2 |
| all-1 DBX | DBX[i] = 1111111 | `00000` | 5 |
| all-0 DBP | DBP[i] = 0 | `00001` | 5 |
| two consecutive 1s | DBX[i] has exactly two ones, at bits *p* and *p*+1 | `00010` + *p* in 3 bits | 8 |
| single 1 | DBX[i] has exactly one one, at bit *p* | `00011` + *p* in 3 bits | 8 |
| uncompressed | anything else | `1` + DBX[i], bit 6 first | 8 |

A multi-all-0 symbol covers *r* planes, so the next symbol codes plane
*i*-*r*. The run counts only zero DBX planes from the current plane
downwards, and it is always taken at its full length (2..9 planes).

The code is a prefix code and every block has exactly 9 planes, so a decoder
always knows when a block ends. To rebuild the planes, it sets
`DBP[8] = DBX[8]` and then `DBP[i] = DBX[i] ^ DBP[i+1]`. The class "all-0
DBP" sends no DBX at all, because the decoder knows that the DBP is zero.

**Worked example.** The block 10, 12, 13, 13, 12, 12, 14, 15 has deltas +2,
+1, 0, -1, 0, +2, +1. DBP[8] to DBP[2] are all `0001000`, because only the
-1 has its upper bits set. DBP[1] is `0101001` and DBP[0] is `1001010`. The
stream is:

```
00001010        base 10
00011 011       DBX[8] = 0001000: single 1 at bit 3
001 100         DBX[7..2]: run of 6 zero planes (6-2 = 4)
1 0100001       DBX[1] = DBP[1]^DBP[2]: uncompressed
1 1100011       DBX[0] = DBP[0]^DBP[1]: uncompressed
```

That is 38 bits instead of 64.

### 1.4 End of a stream

The word count of a stream is not stored. The compressor is told that a word
is the last one (`in_last`), and then:

* A last block with fewer than 8 non-zero words is completed with zero
  deltas, which is the same as repeating its last word. The decompressor
  decodes these copies but never outputs them, because the Zero-RLE stream
  has no `1` for them. They are dropped by the clear that comes before the
  next stream.
* Both byte streams are padded to a whole byte, and their last byte is
  flagged.

Zero padding in the final byte of the Zero-RLE stream can decode as an
extra `0 0000` symbol, worth one extra zero word. The reader stops after the
stream's known length, so it ignores this word.

A stream without any non-zero word has an empty bit-plane stream.

### 1.5 What the format does not do

The base word is sent in full for every block. The text that describes the
algorithm mentions sending no base at all, and using the last decoded word
of the previous block instead, but the hardware described alongside it
forwards a base word in every block, and this design follows the hardware.
There is also no floating-point variant, in which the deltas would need one
bit fewer.

## 2. Compressor (`ebpc_compressor`)

```
              +-> ebpc_zrle_enc --> ebpc_packer (12-bit reg) ---> Zero-RLE bytes
 words --split|
              +-> ebpc_delta_xform --> ebpc_block_fifo --> ebpc_bp_encoder
                     (non-zero words)   (1 block)             |
                                                              v
                                         ebpc_packer (15-bit reg) ---> bit-plane bytes
```

* **Input split.** Each word goes to the Zero-RLE path, and each non-zero
  word also goes to the bit-plane path. A word is accepted only when every
  path that needs it can take it in that cycle. A zero word never waits for
  the bit-plane path, so zero runs keep flowing while a block is being
  coded. The final word always goes to both paths, because the bit-plane
  path has to see the end of the stream.
* **`ebpc_zrle_enc`** counts zeros and emits the 5-bit burst symbol when the
  count reaches 16, at the end of the stream, or when a non-zero word ends
  the run. In the last case it first sends the burst, and sends the `1` for
  the non-zero word one cycle later, so the non-zero word costs one extra
  input cycle.
* **`ebpc_delta_xform`** stores the first word of a block as the base and
  the previous word for the subtraction. It shifts the 9-bit deltas into a
  7-entry shift register. After 8 words, the base and all 7 deltas are
  offered together. A short last block is filled with zero deltas, one per
  cycle. If the stream ends exactly on a block boundary (or with zeros after
  one), an *empty marker* goes down the path so that the packer can still
  flush.
* **`ebpc_block_fifo`** is a depth-1 FIFO (one register and a full flag). It
  can be written in the same cycle in which it is read. It holds one
  complete block, so the next block can be gathered while the current one is
  being coded.
* **`ebpc_bp_encoder`** forms all 9 DBP and DBX planes from the block with
  combinational logic. It emits the base in one cycle, then one symbol per
  cycle, following a plane pointer that starts at 8. The length of a
  zero-DBX run is found by a priority chain from the plane pointer
  downwards, and a multi-all-0 symbol moves the pointer down by the whole
  run. A block takes 1 + (number of symbols) cycles: 10 cycles without runs,
  and down to 2 cycles for a block of equal words. It pops the block from
  the FIFO together with its last symbol.
* **`ebpc_packer`** ORs each symbol into a fill register, directly above the
  bits that it already holds. When the register holds 8 or more bits, it
  sends the low byte out and shifts the rest down. The register is BUS_W-1+SYM_W
  bits wide: 15 bits for the 8-bit bit-plane symbols and 12 bits for the
  5-bit Zero-RLE symbols. This is the smallest width that cannot overflow
  when one symbol and one byte move per cycle.

**Throughput.** For 8 non-zero words the bit-plane path needs 10 cycles (0.8
words per cycle). It needs fewer cycles when some planes are compressed by
runs, and it is idle while zeros pass. Zeros are taken at one per cycle. The
Zero-RLE path adds one cycle each time a zero run is followed by a non-zero
word.

## 3. Decompressor (`ebpc_decompressor`)

```
 bit-plane bytes -> ebpc_unpacker <-> ebpc_symbol_decoder -> ebpc_dbp_buffer -> ebpc_delta_reverse -+
                    (15-bit reg)      (len fed back)          (gathers block,    (base + sum of     |
                                                              depth-1 FIFO)      deltas)            v
 Zero-RLE bytes  -----------------------------------------------------------> ebpc_zrle_dec --> words
                                                                               (16-bit unpacker)
```

* **`ebpc_unpacker`** is the packer run backwards. It keeps at least 8 bits
  available when it can, and shows them as a window in which bit 0 is the
  next stream bit. It also reports how many bits are valid. The consumer
  removes 0..8 bits per cycle. A new byte is taken when it fits after this
  cycle's removal, so a consumer that removes 8 bits per cycle gets one byte
  per cycle.
* **`ebpc_symbol_decoder`** looks at the window. For the first symbol of a
  block it takes 8 bits as the base. After that it decodes one symbol per
  cycle: it finds the class from the prefix, rebuilds the DBX, and turns it
  into a DBP by XOR with the previous DBP. It feeds the length back to the
  unpacker. A multi-all-0 symbol is consumed in its first cycle, and the
  decoder then repeats the previous DBP for the remaining planes of the run,
  one plane per cycle. So it always emits base + 9 planes, in 10 cycles per
  block. A symbol is decoded only when all of its bits are in the window.
* **`ebpc_dbp_buffer`** shifts the 9 planes into place, and then pushes
  base + planes into an `ebpc_block_fifo`. It can accept the next block's
  planes while the previous block waits in the FIFO.
* **`ebpc_delta_reverse`** outputs the base, then rebuilds delta *j* from
  bit *j* of every plane and adds it to a running sum. It emits one word per
  cycle, 8 cycles per block, and pops the block with its last word. It is
  faster than the decoder (10 cycles per block), so it never limits the
  rate.
* **`ebpc_zrle_dec`** has its own unpacker, with a 16-bit register, for the
  Zero-RLE bytes. A `1` passes the next word from the bit-plane path. A burst
  symbol emits *k* zeros, one per cycle.

The decompressor has no end-of-stream input. The user stops reading after
the known number of words, and pulses `clear_i` before the next stream so
that padding bits and a partial block are dropped.

## 4. Interfaces

All ports use valid/ready handshakes. A transfer happens in a cycle where
both valid and ready are high. Outputs hold their value while valid is high
and ready is low, and assertions in the packer and FIFO check this.
`rst_ni` is an asynchronous reset, active low. `clear_i` is a synchronous
clear of all state. All registers that are read are reset.

`ebpc_top` has these ports (`c_` for the compressor, `d_` for the
decompressor):

| port | dir | width | meaning |
|---|---|---|---|
| `clk_i`, `rst_ni` | in | 1 | clock, asynchronous active-low reset |
| `c_clear_i`, `d_clear_i` | in | 1 | synchronous clear of one side |
| `c_in_valid_i/ready_o/data_i/last_i` | | WORD_W | words to compress; `last` marks the final word |
| `c_zrle_valid_o/ready_i/data_o/last_o` | | BUS_W | Zero-RLE byte stream |
| `c_bpc_valid_o/ready_i/data_o/last_o` | | BUS_W | bit-plane byte stream |
| `d_zrle_valid_i/ready_o/data_i` | | BUS_W | Zero-RLE bytes in |
| `d_bpc_valid_i/ready_o/data_i` | | BUS_W | bit-plane bytes in |
| `d_out_valid_o/ready_i/data_o` | | WORD_W | decompressed words |
| `c_sym_fire_o/c_sym_kind_o`, `d_sym_fire_o/d_sym_kind_o` | out | 1 / 4 | class of each bit-plane symbol coded or decoded (`ebpc_pkg::sym_kind_e`), for statistics only |

On the compressor side, `c_in_ready_o` can depend on the offered word,
because a zero word needs only the Zero-RLE path. The source must therefore
keep its data stable while valid is high, as the handshake requires anyway.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `WORD_W` | 8 | word width *m*; deltas and planes have *m*+1 bits |
| `BLOCK_N` | 8 | block size *n*; planes are *n*-1 bits wide |
| `MAX_ZBURST` | 16 | longest zero run per Zero-RLE symbol (power of two) |
| `BUS_W` | 8 | width of the compressed bus words |

The field widths follow the symbol table: ceil(log2 *m*) for the run
length, ceil(log2(*n*-2)) and ceil(log2(*n*-1)) for the positions, and
log2(MAX_ZBURST) for the burst. The defaults are the reference
configuration. The RTL is written for other sizes, and round trips at
WORD_W = 12, WORD_W = 16 and BLOCK_N = 16 pass in simulation
(`tb_ebpc_params`). At those sizes some symbols are wider than the bus. The
packer then accepts such a symbol only when it fits. It does not grow its
register for the full one-symbol-per-cycle rate, and the 10-cycles-per-block
rate only holds at the defaults. A wider MAX_ZBURST works the same way but
has not been simulated.

## 6. How far it follows the reference design, and where it departs

The following follow the reference description: the split into a Zero-RLE
path and a bit-plane path with separate output streams; the symbol table and
its priority; the block size; the word width; the maximum zero burst; the
register sizes of the packers (15 and 12 bits) and unpackers (15 and 16
bits); the depth-1 block FIFOs on both sides; the 10-cycles-per-block
decoding and the 8-cycles-per-block delta reverse; and XORing the top plane
with zero.

The following are this design's own choices, because the reference
description does not give them (its block diagrams are drawn without
control logic):

* the handshakes, the reset and the clear;
* the bit order (the first bit goes into the LSB of a byte, and fields are
  written MSB first);
* burst length - 1 and run length - 2 as the stored values;
* using the lower bit index as the position of two consecutive ones;
* the end-of-stream handling (zero-delta padding, the empty marker and the
  byte flush);
* the extra cycle when a non-zero word ends a zero run;
* letting the consumer of the unpacker check its symbol length against the
  valid-bit count, so that a short final symbol can be decoded (the
  reference says the unpacker always provides 8 bits).

The decompressor includes the inverse Zero-RLE. The reference area figures
for the decompressor leave it out.

The base word is sent in every block, as discussed in section 1.5.

Coarse synthesis with yosys (generic cells, no technology mapping) of
`ebpc_top` at the defaults gives about 680 cells and 426 flip-flop bits.
Most of the flip-flops are in the delta shift register and the two block
FIFOs (73 and 71 bits). No gate-level area in a real library has been
produced.

Some outputs are direct feed-throughs of inputs: `sym_valid_o` of the
encoder, `out_valid_o` of the delta reverse, and the base word of the symbol
decoder (taken straight from the window). Lint reports some bits as never
read: the top bit of a 9-bit delta in `ebpc_delta_reverse` (the sum is
taken modulo 2^8) and one window bit in the symbol decoder. These are
deliberate.

## 7. Verification

Each unit has a self-checking testbench, `tb/tb_<module>.sv`, and
`tb/ebpc_ref_pkg.sv` is a reference model of the code. The model is written
independently of the RTL, as plain bit-queue functions. Every testbench
prints `TB_RESULT checks=<n> failures=<n>`, and has a watchdog that ends the
run with a failure if it hangs.

| testbench | what it checks |
|---|---|
| `tb_ebpc_zrle_enc` | symbols for all burst lengths, splitting at 16, stall cycles |
| `tb_ebpc_packer` | byte packing of random symbol lengths, flush, back-pressure |
| `tb_ebpc_delta_xform` | base and deltas per block, padding, empty marker, 8 cycles per block |
| `tb_ebpc_block_fifo` | data order, back-pressure, one transfer per cycle |
| `tb_ebpc_bp_encoder` | bits for many block kinds against the model, symbol class counts, one cycle per symbol |
| `tb_ebpc_unpacker` | window contents under random consumption, one byte per cycle at full rate |
| `tb_ebpc_symbol_decoder` | base and planes against the model, class counts, 10 cycles per block |
| `tb_ebpc_dbp_buffer` | block assembly, 10 cycles per block with no gaps |
| `tb_ebpc_delta_reverse` | words rebuilt from planes, 8 cycles per block |
| `tb_ebpc_zrle_dec` | merging of all burst lengths 1..40, one word per cycle |
| `tb_ebpc_compressor` | both streams bit-exact against the model, `last` flags, 0.8 words per cycle dense, 1 word per cycle for zeros |
| `tb_ebpc_decompressor` | model streams back to words, rates |
| `tb_ebpc_top` | end-to-end round trip at the default parameters |
| `tb_ebpc_params` | round trips at WORD_W 12 and 16, and at BLOCK_N 16 |

`tb_ebpc_top` compresses synthetic feature-map streams: smooth, non-negative
8-bit values with 40-75 % zeros in runs. It also compresses dense random
data, runs of alternating values, long zero runs and corner cases of the
stream end. For each stream, it compares both byte streams bit for bit with
the model, decompresses them, and compares the words. It counts every
mechanism, and fails if any one of them never occurs. The counted mechanisms
are:

* every symbol class, on both sides;
* a split zero run;
* an input stall;
* back-pressure on each side;
* a padded last block;
* a bare end marker;
* a clear.

On the synthetic feature maps it reaches a compression ratio of about 2.8.
Real feature maps have different statistics. The published ratios for 8-bit
networks are about 2.2 (MobileNetV2) to 5 (AlexNet).

To run a testbench with plain Verilator (5.x) from the repository root:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/ebpc_pkg.sv tb/ebpc_ref_pkg.sv tb/tb_ebpc_top.sv --top-module tb_ebpc_top -o sim
./obj_dir/sim
```

Replace `tb_ebpc_top` with any other testbench name. The simulations take
seconds.

## 8. Files

* `rtl/ebpc_pkg.sv`: symbol class enumeration, shared helpers
* `rtl/ebpc_top.sv`: compressor and decompressor pair
* `rtl/ebpc_compressor.sv`, `ebpc_zrle_enc.sv`, `ebpc_delta_xform.sv`,
  `ebpc_block_fifo.sv`, `ebpc_bp_encoder.sv`, `ebpc_packer.sv`
* `rtl/ebpc_decompressor.sv`, `ebpc_unpacker.sv`, `ebpc_symbol_decoder.sv`,
  `ebpc_dbp_buffer.sv`, `ebpc_delta_reverse.sv`, `ebpc_zrle_dec.sv`
* `tb/ebpc_ref_pkg.sv`: reference model; `tb/ebpc_rt_harness.sv`: round-trip
  harness for one configuration; `tb/tb_*.sv`: testbenches

Every file begins with a description of what the unit does, how it does
it, its interface and timing, and which of its choices are its own.
