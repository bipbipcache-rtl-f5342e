# BipBipCache: an encrypted direct-mapped cache with a pipelined tweakable cipher

On-chip SRAM in a small SoC keeps its contents in plaintext, so a cold-boot
attack, a probe on the array or a dump of a memory bus reads them directly.
This cache never stores a data word or an address tag in plaintext. Every word
goes through a tweakable block cipher on its way into the array and back out,
and a lookup has to decrypt the stored tag before it can compare it.

The cipher is BipBip. It has a 24-bit block, a 40-bit tweak and a 256-bit key,
and it was designed for encrypting pointers in C3 (cryptographic capability
computing). Its decryption is very fast (3 cycles), and encryption as
pipelined here takes 6. The design's main idea is how those two latencies are
scheduled. A write starts encrypting in the same cycle in which the lookup
starts, so the first three encryption cycles hide behind the tag decryption
and hit check. The write therefore costs only three more cycles once the hit
is known.

The RTL covers the cache controller, the word-to-cipher mapping, the hit
detector and all arrays. The 24-bit BipBip cores are **not** included (see
[The cipher cores](#the-cipher-cores)). The cache has their ports, and the
testbenches plug in a stand-in cipher.

Scope of the protection: it keeps data and tags confidential in the array. It
does not defend against cache timing side channels. The set index stays in
plaintext, and there is no authentication: an encrypted tag makes forged
lines hard to hit, but it is not a MAC.

## Organisation

| Field        | Bits of the 64-bit address | Stored as |
|--------------|----------------------------|-----------|
| tag          | 63:12 (52 bits)            | encrypted, 52x128 array |
| set index    | 11:5 (7 bits, 128 sets)    | row select, plaintext |
| word offset  | 4:3 (2 bits, 4 words/line) | bank select |
| byte offset  | 2:0                        | unused (word-wide accesses) |

Each set holds a 256-bit line as four 64-bit words, one in each of four
64x128 banks (`data0`..`data3`), plus an encrypted 52-bit tag, a valid bit and
a dirty bit. The cache is direct-mapped.

The tag and valid arrays behave as ROM towards the controller. Software loads
them (already encrypted) through a provisioning port, and the controller only
reads them. So there is no refill and no eviction. A read miss just reports
`hit = 0`, and a write miss is dropped. The dirty bit is set by every
committed write and can be read as a write-back hint.

## How a 64-bit word meets a 24-bit cipher

BipBip encrypts only 24 bits at a time. Each 64-bit word `W` is therefore cut
the way C3 cuts a pointer:

```
 63      58 57                        34 33                              0
+----------+----------------------------+---------------------------------+
|  T_hi(6) |      P (24): cipher block  |           T_lo (34)             |
+----------+----------------------------+---------------------------------+
tweak T = T_hi , T_lo (40 bits)
stored  W' = T_hi , E_K^T(P) , T_lo
```

Only the middle 24 bits are permuted. The other 40 bits are stored as they
are, but they are the tweak, so the ciphertext slice is bound to the rest of
its word. Changing any of those bits makes the slice decrypt to something
else. The word does not grow, and one cipher call per word is enough.

`c3_word_cipher` does this cut. It hands `{P, T}` to the 24-bit core and
carries `T` through a register chain as long as the core's latency. When the
core's result comes back, it puts the word together again. The same module is
used three times:

| Instance                  | Latency | Input              | Output |
|---------------------------|---------|--------------------|--------|
| data encryptor            | 6       | write data         | word for the banks |
| data decryptor            | 3       | word from the mux  | read data |
| tag decryptor (hit detector) | 3    | `{stored_tag, 12'b0}` | logical tag in bits 63:12 |

The tag uses the same layout after it is padded to 64 bits with twelve zeros.
Its ciphertext bits 11:0 are tweak passthrough and thus zero as well, which is
why storing only 52 bits loses nothing.

## Encrypted tags and the hit decision

`hit_detector` reads the set's stored tag, pads it and decrypts it in three
cycles. Meanwhile the request's own address tag and the set's valid bit each
travel through three registers. In cycle 3 the two tags are compared, and
`hit = match & valid`. Without the key, someone who overwrites the tag array
cannot choose a value that decrypts to a wanted tag.

## Pipeline and timing

Cycle 0 is the cycle in which a request is on `req_*`. One request may be
issued every cycle, reads and writes mixed freely.

| Cycle | Read | Write |
|-------|------|-------|
| 0 | tag, valid and the addressed word are read (asynchronous arrays); tag and data decryption start | same lookup; `req_wdata_i` enters the 6-cycle encryptor |
| 1-2 | decrypting | decrypting tag / encrypting data (overlap) |
| 3 | `resp_valid_o`, `resp_hit_o`, `resp_rdata_o` (plaintext) | `resp_hit_o` tells whether the write will commit |
| 4-5 | | encrypting |
| 6 | | `wr_commit_o = write(delayed 6) & hit(delayed 3)`; the decoder strobes the bank given by the word offset, and the set's dirty bit is written |

The write enable is formed exactly as in the paper's block diagram. The write
strobe goes through six registers, the hit goes through three more, and an AND
combines them. The write's set index and word offset are delayed by six cycles
as well, so that they still belong to the write when it commits. The array is
updated at the end of cycle 6. A read issued 7 or more cycles after a write
sees the new word, and a read issued 1 to 6 cycles after it gets the old word,
because there is no forwarding.

## The cipher cores

The round functions of BipBip are not reproduced here. Those are the S-box
layer, the bit permutations and linear layers of the shell and core rounds,
the 53-bit tweak schedule with its nonlinear and linear steps, the round-key
extractors and the key schedule. The block structure of the decryptor is
known: three shell rounds, five core rounds and three shell rounds, with
round keys taken from a tweak schedule that is driven by the master key. The
encryptor runs the inverted rounds in reverse order with the tweak schedule
running forward. Still, none of these parts can be written without the
original cipher specification.

The cache therefore ends at the core interface, in three identical port
groups:

| Ports | Core | Contract |
|-------|------|----------|
| `enc_core_block_o`, `enc_core_tweak_o` -> `enc_core_block_i` | encryptor | result exactly 6 cycles later |
| `ddec_core_*` | data decryptor | result exactly 3 cycles later |
| `tdec_core_*` | tag decryptor | result exactly 3 cycles later |

Each core must be fully pipelined, take a block every cycle and use no
handshake. All three share one 256-bit key, which the cores hold. A real
BipBip core with these latencies drops straight in. Any other 24-bit
tweakable block cipher with a 40-bit tweak would work too, after changing
`ENC_LAT` / `DEC_LAT` in `bipbip_cache_pkg`.

The testbenches use `tb/tbc_core_model.sv`, an 8-round Feistel network on two
12-bit halves keyed by the 256-bit test string
`"SuperCoolBipBipPasswordForTestin"`. **It is not BipBip** and has no
security value. It is just a keyed, tweak-dependent permutation with a known
inverse, so that encrypt, store and decrypt can be checked end to end.

## Top-level interface (`bipbip_cache`)

| Port | Dir | Width | Meaning |
|------|-----|-------|---------|
| `clk_i`, `rst_ni` | in | 1 | clock; active-low asynchronous reset |
| `req_valid_i`, `req_write_i` | in | 1 | request strobe; 1 = write |
| `req_addr_i` | in | 64 (`addr_t`) | byte address |
| `req_wdata_i` | in | 64 | write data (plaintext) |
| `resp_valid_o`, `resp_write_o` | out | 1 | response strobe, cycle 3; it belongs to a write |
| `resp_hit_o` | out | 1 | hit, cycle 3 |
| `resp_rdata_o` | out | 64 | plaintext read data, cycle 3 (meaningful on a read hit) |
| `wr_commit_o` | out | 1 | a write is committed in this cycle (cycle 6) |
| `prov_we_i`, `prov_set_i`, `prov_tag_i`, `prov_valid_i` | in | 1/7/52/1 | load an encrypted tag and valid bit |
| `dirty_query_set_i` -> `dirty_query_o` | in/out | 7 / 1 | combinational dirty-bit read |
| `*_core_*` | | 24/40/24 | cipher cores, see above |

Reset clears the pipeline strobes, the valid bits and the dirty bits. The
data and tag arrays and the data registers are not reset. Provision a set
before you use it.

To compute an encrypted tag to provision, encrypt the 64-bit word
`{tag, 12'b0}` with the word layout above and keep bits 63:12
(`tag_enc()` in `tb/tbc_model_pkg.sv` does exactly that with the stand-in
cipher).

## Where this RTL goes beyond or differs from the paper

Taken from the paper: the address split, the array sizes, the word layout,
the three cipher instances and their latencies, the tag pad and the delayed
compare, the write-enable rule, the decoder, the mux and the dirty array
(written with 1). The following are choices made here:

* **Hit output timing.** The paper's block diagram draws the hit output after
  the extra three-cycle hit delay (cycle 6). Its text and timing table put
  the hit on cycle 3. `resp_hit_o` follows the text. The delayed copy is only
  used inside the design, for the write enable.
* **Write address delay.** The diagram wires the set index and word offset
  straight to the write ports of the banks. That works only if the requester
  holds the address for six cycles. Here they go through six registers, so
  requests can be pipelined. With a held address both behave the same.
* **Asynchronous array reads.** These keep the read at the stated 3 cycles.
  The paper's FPGA build used four block-RAM tiles, whose reads are
  registered. How that extra cycle was absorbed is not described. With these
  asynchronous reads, an FPGA tool will map the banks to distributed RAM.
* **Request/response strobes, the provisioning port, the dirty query port and
  reset behaviour** are not specified by the paper and were added.
* **No read-after-write forwarding** inside the 6-cycle commit window (not
  discussed in the paper).
* **Board round-trip tag.** The paper's hardware round trip quotes a tag value
  `0x00000000ABCD1234`, with nonzero bits 11:0. A 52-bit tag padded with
  zeros cannot carry those bits, so that tag ciphertext cannot be an entry of
  this tag array. The end-to-end test uses that value as the request
  *address* instead (set 0x11, word 2).
* **Vector direction.** The text that introduces the published reference
  vectors names their roles backwards for a cipher: the encryptor is fed
  ciphertext and expected to give plaintext. The tests follow the worked
  example instead, in which encrypting the right-hand (all-plaintext-looking)
  value gives the left-hand value. Only the 24-bit middle slice differs
  between the columns, so the layout checks hold either way.

Not reproduced: the BipBip cores (above), the UART board test harness and the
100 MHz Artix-7 implementation results.

## Verification

Every module except the small `delay_line` (exercised inside the others) has a
self-checking testbench that prints
`TB_RESULT checks=N failures=M`:

| Testbench | What it shows |
|-----------|---------------|
| `tb_c3_word_cipher` | Both latencies (6 and 3). The seven published word pairs (five reference vectors, plus the data and tag round trip), with the test playing the core: the block and tweak handed to the core are the exact slices, and the rebuilt word matches the published 64-bit value bit for bit. Random streams with gaps; exact latency. |
| `tb_hit_detector` | Encrypted tag hit, invalid line, tag off by one bit, plaintext tag in the array (no hit); decrypted tag, match and hit on cycle 3. |
| `tb_sram_1r1w` | 64x128 bank and a 1x128 bit array; read-during-write returns old data; reset clears only the bit array. |
| `tb_published_words` | The five published reference pairs and the round-trip data word, pushed through the full-size cache. The core models return the published 24-bit results for exactly these inputs. For each pair the array ends up holding the published stored word (for example `0x0008C70789ABCDEF` for `0x0123456789ABCDEF`), the read returns the plaintext with a hit on cycle 3, and the write commits on cycle 6. |
| `tb_write_decoder`, `tb_word_mux` | exhaustive / random function checks. |
| `tb_bipbip_cache` | Whole cache at full size with three core models. Provisions 128 sets (every eighth invalid), fills every valid word with back-to-back writes, runs the round-trip word, then 4000 random requests. A cycle-exact model predicts each response (cycle 3), each commit (cycle 6), each read value (old data inside the commit window) and every dirty bit. On each read hit it checks that the word leaving the array is the ciphertext of the data, with the tweak bits unchanged. It counts read hits, tag misses, invalid-line misses, commits, dropped writes of both kinds, back-to-back issue, reads inside the commit window and dirty sets, and fails if any of them never happened. |

Simulating with Verilator (5.x), from the folder that holds `rtl/` and `tb/`:

```sh
verilator --binary --timing --assert -Wno-fatal \
  rtl/bipbip_cache_pkg.sv tb/tbc_model_pkg.sv rtl/delay_line.sv \
  rtl/c3_word_cipher.sv rtl/hit_detector.sv rtl/sram_1r1w.sv \
  rtl/write_decoder.sv rtl/word_mux.sv rtl/bipbip_cache.sv \
  tb/tbc_core_model.sv tb/tb_bipbip_cache.sv --top-module tb_bipbip_cache
./obj_dir/Vtb_bipbip_cache
```

For another block, list the package(s), the module and its submodules, the
testbench and `--top-module tb_<name>`. The full-size cache test runs in well
under a second.

A synthesis report lists many top-level outputs as "idle". Most of them are
the `*_core_block_o` / `*_core_tweak_o` buses, which are plain wires from the
request data and the stored tag: the C3 cut is wiring. The 12 low tweak bits
of the tag decryptor are the constant zero pad.

## Files

| File | Contents |
|------|----------|
| `rtl/bipbip_cache_pkg.sv` | sizes, latencies, `addr_t`, word-layout functions |
| `rtl/bipbip_cache.sv` | top level: arrays, pipeline, write commit |
| `rtl/hit_detector.sv` | encrypted-tag lookup |
| `rtl/c3_word_cipher.sv` | 64-bit word <-> 24-bit core front end |
| `rtl/sram_1r1w.sv` | storage array (data, tag, valid, dirty) |
| `rtl/write_decoder.sv`, `rtl/word_mux.sv` | bank write decoder, read mux |
| `rtl/delay_line.sv` | register chains that align the pipelines |
| `tb/tbc_model_pkg.sv`, `tb/tbc_core_model.sv` | stand-in cipher (not BipBip), the published word pairs, and the pipelined core model |
| `tb/tb_*.sv` | testbenches |
