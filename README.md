# Host-side ECC for low-cost HBM: large Reed-Solomon codewords with per-chunk CRC filtering

HBM is expensive per bit, and part of that cost is the reliability each DRAM
die must reach, including its own on-die ECC on 16-32 byte words. This design
moves all error handling out of the memory stack and into the memory
controller, where it can use much longer codes. Data is protected by
Reed-Solomon (RS) codewords of hundreds of bytes, spread across the HBM
channels. Long codes correct far more raw bit errors at the same redundancy,
so the stack can be built cheaper and less reliable.

Long codewords have two costs. A small access would have to read or rewrite a
whole codeword. And the decoder is large. The design attacks both costs:

* **Per-chunk CRC as a filter.** Every 32-byte chunk of a codeword carries its
  own 2-byte CRC, which HBM interfaces already provide for. A random read checks
  only the CRCs of the chunks it asked for. It falls back to fetching and
  decoding the whole codeword only when one of them fails.
* **Differential parity.** A random write reads only the old chunks and the
  parity. RS is linear, so it computes the new parity from the difference
  between the old and new chunks.
* **Importance-adaptive protection.** Tensors are stored as bit-planes. Only the
  planes that matter for inference accuracy go through CRC and RS. For BF16
  these are the 8 exponent planes. The sign and mantissa planes are stored raw.

The RTL is SystemVerilog 2017 and synthesizable. It was checked with
Verilator 5 (lint and simulation) and with the slang front end of Yosys.

## 1. The codeword and where it lives

| Item | Default | Notes |
|---|---|---|
| Chunk | 32 B = 16 symbols of 16 bit | data or parity |
| Memory unit | 34 B = `{chunk[255:0], crc[15:0]}` | one transfer |
| Codeword | M = 16 data chunks + R = 1 parity chunk | 512 B of data, code rate 16/17 |
| RS code | GF(2^16), 272 symbols, NP = 16 parity symbols | corrects T = 8 symbol errors |
| Field polynomial | x^16 + x^12 + x^3 + x + 1 | alpha = x |
| Generator | prod over j = 0..NP-1 of (x + alpha^j) | first root alpha^0 |
| CRC | CRC-16/CCITT (0x1021), init 0xFFFF | input shifted MSB first, from bit 255 |
| Channels | S = 16 | one HBM3E stack |

The symbols are 16 bits wide so that a whole 17-chunk codeword (272 symbols)
is a single RS codeword. Byte symbols would cap a codeword at 255 bytes.

**Symbol order.** Symbol k of a chunk is `chunk[16k +: 16]`. Codeword
polynomials start with the highest degree: symbol 0 of chunk 0 has degree 271.
The parity chunk comes last, and its symbol 0 is the parity symbol of
degree 15.

**Striping** (`stripe_map`). The units of all codewords form one sequence of
slots. Unit `idx` of codeword `blk` goes in slot `blk*(M+R) + idx`. That slot
sits on channel `slot mod S` at row `slot div S`. One codeword therefore covers
all 16 channels once and puts one unit in the next row. The next codeword
continues from there.

Raw bit-planes go in a separate region: row bit 32 is set, and the slots are
numbered `blk*NRAW + idx`.

## 2. Serving requests (`ecc_ctrl`)

The engine handles one request at a time. Each request covers `k` chunks
starting at chunk `first` of a single codeword:

| Request | Units read | Units written | Decoder |
|---|---|---|---|
| SEQ_WR | 0 | M+R | - |
| SEQ_RD | M+R | 0 | always, CRC not checked; stops early if clean |
| RND_RD, all CRCs pass | k | 0 | not used |
| RND_RD, a CRC fails | M+R in total (k, then the rest) | 0 | whole codeword |
| RND_WR, all CRCs pass | k+R | k+R | not used; differential parity |
| RND_WR, a CRC fails | M+R in total | M+R | decode, merge new data, re-encode |

**Escalation.** When a CRC fails, the engine reads only the units it does not
already have. All M+R chunks are then fed through the decoder in order.

**Sequential reads.** These skip the CRCs entirely. Errors are likely at high
error rates, and the decoder stops early when the codeword is clean anyway.

**Write fallback.** A random write whose CRC check fails becomes a full
read-modify-write. This also scrubs the codeword: any errors in chunks the
write did not touch are corrected and written back.

Inside, a fetch phase is a bit mask of wanted units. Each cycle the memory port
accepts a request, the lowest pending unit is issued and its slot number is
queued. Read responses come back in order, and each response is placed by the
next queued slot number.

Buffers:
* one codeword buffer of M+R chunks (the CRC is stripped off);
* one buffer of M chunks for the host's new data.

Write data gets its CRC as it leaves.

The host sees a `done_o` pulse for each request, with four status outputs:
* `done_escalated_o`: the request escalated;
* `done_clean_o`: the decoder stopped early;
* `done_fail_o`: the codeword was uncorrectable;
* `done_nerr_o`: the number of symbols corrected.

An uncorrectable codeword is still returned, or still written back, as decoded.

## 3. The decoder (`rs_decoder`)

The decoder works on one codeword at a time, in four stages:

1. **Syndromes.** S_j = r(alpha^j) for j = 0..15, computed by Horner's rule
   while the 17 chunks arrive at one chunk per cycle. The chunks are also
   buffered.
2. **Early termination.** If every syndrome is zero, the 16 data chunks stream
   straight out of the buffer.
3. **Berlekamp-Massey.** The inversionless form runs one iteration per cycle,
   16 cycles in all. One more cycle forms Omega(x) = S(x)Lambda(x) mod x^16.
4. **Chien search and Forney.** This stage checks 16 symbol positions (one
   chunk) per cycle. Position X is in error when Lambda(X^-1) = 0. Because the
   first root is alpha^0, the error value is Omega(X^-1) / Lambda_odd(X^-1),
   where Lambda_odd holds only the odd-degree terms of Lambda. Data chunks are
   corrected and emitted as they are searched. The parity chunk is searched
   only to count roots.

The codeword is declared uncorrectable when deg Lambda > 8, or when the number
of roots found is not equal to deg Lambda.

Inversionless BM scales Lambda and Omega by the same constant, so their ratio
is unchanged. The one field inversion per position is a fixed chain of 15
squarings and products.

Latency after the last input chunk:
* clean codeword: M = 16 cycles;
* otherwise: NP + 1 + (M+R) = 34 cycles.

A new codeword is accepted on the cycle after `done_o`.

## 4. Differential parity (`parity_update_unit`)

Two sparse M-chunk vectors are built:
* D_old holds the old values of the updated chunks in their own positions, and
  zero everywhere else;
* D_new holds the new values in the same way.

Two RS encoders take one chunk position per cycle. After M cycles:

    P_new = P_old ^ RS(D_new) ^ RS(D_old)

The same unit does full encoding: drive D_old = 0 and P_old = 0.

Each `rs_encoder` is an LFSR divider that folds all 16 symbols of a chunk into
the remainder within one cycle. The parity is ready on the cycle after the last
chunk.

## 5. Bit-planes and selective protection (`bitplane_xpose`, tensor port)

A tensor block is 512 BF16 values, sent as 32 value words of 16 values each.
Bit-plane p is bit p of every value. One plane of 512 bits is two 32 B chunks.
Part 0 holds values 0..255 and part 1 holds values 256..511, and bit b of part c
is bit p of value 256c + b.

`PLANE_MASK` (default `16'h7F80`, BF16 bits 14..7) selects the protected
planes. The transposer lists the 32 plane chunks in a fixed order: protected
chunks first, then the raw ones. Within each group, planes run from the top bit
down, and each plane's part 0 comes before part 1.

With the default mask, the 16 protected chunks are exactly one codeword, and
block `b` is stored in codeword `b`. The 16 raw chunks go to the raw region as
plain units. Their CRC field is zero and is never checked, so errors in those
planes come back as stored.

* **Tensor write:** load 32 words, do a SEQ_WR of the protected chunks, then
  write the 16 raw units.
* **Tensor read:** do a SEQ_RD of the protected chunks, read the raw units, then
  return 32 words.

When the mask selects more planes, the block takes NCW = (protected chunks)/M
codewords, at codeword indices `b*NCW ...`. Full-bit protection is
`PLANE_MASK = 16'hFFFF`, which takes two codewords per block. The number of
protected chunks must be a multiple of M; elaboration stops with an error if it
is not.

## 6. Top level (`hbm_ecc_top`)

```
 chunk port h_* ─┐
                 ├─ ecc_ctrl ─┬─ crc16_chunk (check, generate)
 tensor port t_* ┤            ├─ parity_update_unit ── 2 x rs_encoder
   bitplane_xpose┘            ├─ rs_decoder
                              └─ stripe_map
 raw-plane path ── stripe_map (raw region) ─┐
 ecc_ctrl memory side ──────────────────────┴─ mem_* (34 B units to the HBM PHY)
```

**Arbitration.** The chunk port has priority. A tensor operation starts only
when the engine is idle and no chunk request is waiting.

**Memory port.** This is the connection to the HBM PHY:
* `mem_req_valid_o` / `mem_req_ready_i`: request handshake;
* `mem_req_we_o`: write enable;
* `mem_req_ch_o`, `mem_req_row_o`: channel and row;
* `mem_req_wdata_o`: the 272-bit unit to write;
* `mem_rsp_valid_i`, `mem_rsp_rdata_i`: read responses, which must return in
  request order.

The HBM stack and its PHY are not part of this RTL.

**Handshakes.** All request and write-data ports use valid/ready. The read-data
and completion outputs have no back-pressure: the host must take them in the
cycle they are valid.

Parameters of `hbm_ecc_top`:

| Parameter | Default | Meaning |
|---|---|---|
| M | 16 | data chunks per codeword |
| R | 1 | parity chunks per codeword (2T = 16R symbols) |
| S | 16 | channels |
| NV | 512 | values per tensor block |
| VW | 16 | bits per value |
| PLANE_MASK | 16'h7F80 | protected planes |
| BLK_W | 26 | codeword / block index width (2^26 x 512 B = 32 GiB) |
| IDX_W | 6 | chunk index width (M+R <= 63) |

The codeword length is set by M. For example, M = 4 gives 128 B and M = 64
gives 2 KB. R sets the correction strength.

## 7. What follows the source and what is this design's own

**Taken from the source description:**
* the 32 B chunk and its 2 B CRC, making a 34 B unit;
* RS codewords of 32 B data and parity chunks, striped sequentially across the
  channels;
* the random-read, random-write and sequential flows, including what each one
  reads and writes;
* the differential parity formula, computed with two separate encodings;
* the early stop of the decoder on a clean codeword;
* bit-plane storage with only the critical planes going through ECC, and
  exponent-only protection for BF16;
* 16 channels.

**This design's own choices:**
* 16-bit RS symbols, the field and generator polynomials, and the symbol order;
* the CRC polynomial and its initial value;
* the decoder algorithm and its timing;
* the slot-based address map and the raw region;
* the 512-value tensor block and the plane order;
* the two host ports and how they share the engine and memory port;
* one request in flight at a time;
* what happens on an uncorrectable codeword.

The decoder corrects errors only. It does not use CRC failures as erasure hints.

**Not modelled:**
* the HBM stack and PHY;
* the host processor;
* performance: tokens per second and bandwidth utilisation come from
  system-level simulation, not from this RTL.

## 8. Throughput and size

The memory port moves one 34 B unit per cycle when it is ready. The engine does
not overlap requests: each request fetches, decodes or encodes, and writes
before the next one starts.

A sequential write takes M cycles of host data, M encode cycles and M+R write
cycles. It does not interleave encoding with writing.

A stack delivering about 1 TB/s would need about 30 engines in parallel at
1 GHz. Replicating the engine is the intended way to scale. Pipelining across
requests would be the next step.

The decoder is the large block. After Yosys coarse synthesis it is about 36k
word-level cells, most of them GF(2^16) constant and variable multipliers in
the Chien/Forney stage, which handles 16 positions per cycle. The whole top
comes to about 47k word-level cells and 23k flip-flop bits: 8192 of those bits
are the transposer's block store and most of the rest are the controller's
codeword and new-data buffers.

## 9. Testbenches and how to run them

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=F` and has a cycle watchdog. The reference models
in `tb/rs_ref_pkg.sv` are written independently of the RTL:
* the GF multiply by carry-less product;
* a byte-wise CRC;
* RS encoding by long division of the whole message.

`tb/hbm_model.sv` is a behavioural HBM stack. It keeps one 34 B unit per
(channel, row), returns reads in order after a fixed latency, and stalls at
random. It can flip stored bits and counts every access.

| Testbench | What it shows |
|---|---|
| tb_crc16_chunk | CRC matches the reference; single-bit errors are detected |
| tb_rs_encoder | parity equals long-division parity; `clear_i` restarts correctly |
| tb_parity_update_unit | differential parity equals re-encoding the updated codeword, for random runs of k chunks |
| tb_rs_decoder | 0..8 random symbol errors corrected; error count, clean flag and latency exact; 9..11 errors flagged |
| tb_stripe_map | round-robin placement; no two units collide; raw region separate |
| tb_bitplane_xpose | plane chunks equal transposed values in the stated order; inverse transposition |
| tb_ecc_ctrl | all six rows of the table in section 2, with exact memory traffic and the contents stored in memory |
| tb_hbm_ecc_top | 300 random requests on 8 codewords while stored bits are flipped; tensor write/read; see below |

The last testbench runs the whole design at its default parameters. A golden
model predicts the data returned, whether each request escalates, and its
memory traffic. In the tensor part, an exponent-plane error must be corrected,
and a sign-plane or mantissa-plane error must come back as stored. The
testbench counts each mechanism (early stop, correction, CRC pass, escalation,
differential update, read-modify-write, bypass, memory stall, uncorrectable
codeword) and fails if any of them never happens.

To run a testbench with plain Verilator, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -y rtl -y tb \
  rtl/ecc_pkg.sv tb/rs_ref_pkg.sv tb/tb_hbm_ecc_top.sv \
  --top-module tb_hbm_ecc_top -o sim && ./obj_dir/sim
```

Replace the testbench file and the top-module name to run another testbench.
The packages are named first; `-y` lets Verilator find each module in the file
of the same name. Every testbench finishes within
seconds.
