# A Wu-Manber signature-matching engine in SystemVerilog

Intrusion detectors and virus scanners spend most of their time looking for
thousands of fixed byte strings (signatures) in a stream of packets. Wu-Manber
does this without touching every byte. It looks at a window as long as the
shortest signature and reads only the window's last two bytes. A table then
says how far the window can jump. Most byte pairs of normal traffic occur in no
signature, so the window usually jumps almost its whole length. Only when the
last pair ends the start of some signature does the engine compare whole
signatures.

This RTL implements the hardware organisation described in *Efficient Wu-Manber
Pattern Matching Hardware for Intrusion and Malware Detection* (Aldwairi,
Flaifel, Mhaidat). That design has:

- a pattern buffer for the signatures;
- a shift table and a hash table built from those signatures;
- a Bloom filter that avoids most shift-table reads;
- a pattern matcher built around two 2 KB byte buffers;
- a LAN-interface buffer for the trace, and a controller.

The paper describes these blocks at the level of memories, registers and a
few sentences each. Everything it leaves open had to be decided here; the
sections below say what those decisions are. The default parameters are the
paper's sizes: a 15-byte window, a 14-byte maximum shift, 2 KB buffers, a
128k x 32 hash table and a 64k x 8 shift table.

## 1. Scanning a trace

### The window in the Shift Buffer

The trace passes through the **Shift Buffer** `sb[0..2047]`, a byte-wide shift
register. New bytes enter at the low end (the "input slot"). Every move of the
window pushes the contents toward index 2047 by the move distance. The window
is the top `ML` bytes:

```
 index:  2047  2046 ...  2048-ML+1  2048-ML   2048-ML-1 ...        0
         [ first byte of window ... pair hi   pair lo ] [ look-ahead ... input slot ]
 text:   pos   pos+1 ... pos+ML-2   pos+ML-1
```

`pos` is the text offset of `sb[2047]`. The matcher examines the pair
`{sb[2048-ML+1], sb[2048-ML]}`, which is the window's last two bytes. For
`ML = 9` this is indices 2040 and 2039, the positions the paper's figure marks.

The remaining ~2 KB below the window is look-ahead. A signature that starts at
the window can be up to 2,048 bytes long and is still entirely inside the
buffer, so it can be compared in place. Each byte carries a valid bit. The
bits are cleared at start, and bytes that arrive after the end of the trace
are marked invalid. An invalid byte never compares equal.

### One window step

| step | what happens | cycles |
|---|---|---|
| EVAL | Bloom filter tests the pair. Clear bit: the pair is in no signature prefix, so move by the maximum shift `ML-1`. | 1 |
| ST | Set bit: read the shift table. A non-zero value is the move distance. | 2 |
| HT | Zero shift: the pair ends the `ML`-byte prefix of at least one signature. Read the segment's start and end address from the hash table. | 3 |
| PLOAD | Copy one signature from the pattern buffer into the **Match Buffer**, one 64-bit word per cycle. Byte `k` of the signature goes to `mb[2047-k]`, next to the text byte it must equal. | words |
| PCMP | Compare `mb` with `sb` over the signature's length in one cycle. A hit is reported on `m_valid`, with `m_pos = pos`, `m_addr` = the signature's pattern-buffer address and `m_len` = its length. Repeat PLOAD/PCMP for every signature of the segment. | 1 per signature |
| SHIFT | Move the window: by the shift value, or after a segment by the length of the first signature found, or by 1 if none matched. At most `ML-1` bytes move per cycle, so a long skip takes several cycles. | ≥ 1 |

The move **stalls** while the LAN interface holds fewer bytes than it needs,
unless the trace has ended. If the trace has ended, the missing bytes enter as
invalid.

Scanning ends when the window's last byte is invalid, that is, when fewer than
`ML` trace bytes remain. `done` then stays high.

At start, the buffer is first filled until the first trace byte reaches
index 2047. This takes about 2048/8 cycles, because the LAN interface
delivers 8 bytes per cycle.

Throughput follows directly from this table. A window that the Bloom filter
rejects costs 2 cycles for 14 bytes (7 bytes/cycle). A window whose pair is in
the shift table costs 3 cycles plus the move. A zero shift costs the hash-table
read, plus (words + 1) cycles per signature in the segment. On the synthetic
doped traces of the end-to-end test the engine averages about 2.4 bytes/cycle.

### Signature length

The pattern buffer stores no length. A signature ends with the word whose flag
is 0, and the unused bytes of that word are zero. The matcher therefore takes
the length as 8 × (words − 1) plus the position of the last non-zero byte in
the last word. **A signature must not end in a 0x00 byte.** Such a signature
would be matched without its trailing zeros.

## 2. Building the tables (preprocessing)

The pattern shifter (`wm_ps`) builds all three lookup structures from the
signatures in the pattern buffer. Let `m = ML` and let `q` be the 1-based
position at which a pair ends inside the first `m` bytes of a signature. Then:

```
shift[pair] = m - 1                       if the pair ends no such prefix position
            = min over signatures of m-q  otherwise
```

Pairs with shift 0 are the suffix pairs: bytes `m-1` and `m` of some signature.
Only the first `m` bytes of each signature enter the tables.

The shifter works in this order:

1. Clear the Bloom filter. Write `m-1` to all 65,536 shift-table entries,
   2 cycles each (≈131k cycles).
2. For each signature, in pattern-buffer order:
   - read its words and keep the first `ceil(m/8)`;
   - for each of its `m-1` prefix pairs, read the table entry and write the
     new shift only if it is smaller, then set the pair's Bloom bit;
   - send the hash-table command: `HT_NEW` with the signature's address if
     its suffix pair differs from the previous signature's, otherwise
     `HT_APPEND`. Either way the signature's word count goes on Bus1.

Preprocessing costs about 131k cycles plus roughly 4 × `ML` cycles per
signature.

Signatures that share a suffix pair form one **segment**: a contiguous address
range of the pattern buffer. The host must store them next to each other. The
engine does not sort.

## 3. Storage formats

**Pattern buffer (`wm_pb`)**: 2^15 words of 65 bits, read through the 32-bit
address register AD. Bit 64 is the flag: 1 while more words of the signature
follow, 0 on the last word. Bits [63:0] hold eight signature bytes, the first
in [63:56], with the last word zero padded. The memory has a registered
address, so the word appears one cycle after AD is loaded or incremented.

**Hash table (`wm_ht`)**: 2^17 words of 32 bits, addressed by
`{StrAdd, pair}`. With `StrAdd = 1` the word is a segment's first word
address; with `StrAdd = 0` it is the segment's last word address. Inside the
table:

- `DINReg` captures the start address;
- `AddressReg` is loaded from `DINReg` and then advanced by each signature's
  word count (Hash Count);
- the end address written is `AddressReg - 1`.

Seven states drive this: IDLE, LOAD, WR_START, ADD, WR_END, RD_START and
RD_END. `HT_NEW` keeps the table busy 4 cycles, `HT_APPEND` 2 and `HT_READ` 2.

**Shift table (`wm_st`)**: 64k × 8 bits, addressed by the pair on Bus2 and
written from Bus1 when `write` is high. `data_ready` or `write_done` pulses
one cycle after each `req`.

**Bloom filter (`wm_bf`)**: an 8,192-bit register with one hash: the top 13
bits of `(pair × 40503) mod 65536`. A clear bit proves the pair is in no
signature prefix. A set bit only means "maybe", and the shift table, filled
with `m-1` everywhere else, gives the right answer for false positives.

**LAN interface (`wm_li`)**: a 512-word FIFO of 64-bit trace words. The last
word of a trace is flagged and carries its byte count. Words are unpacked
into a 24-byte staging register. The matcher reads the oldest 16 staged bytes
and says how many it took. When the last word has been staged, `fin` rises.
`next` (pulsed with every matcher start) drops what is left of a finished
trace and releases the following one.

## 4. Phases and the top level

`wm_cm` steps the engine through four modes. The mode also steers the
multiplexers in `wm_top` that give the shared tables to one module at a time.

| mode | owner of PB read port, ST, HT, BF | left by |
|---|---|---|
| `MODE_LOAD` | host writes PB (`pb_wr_*` is ignored in other modes) | `start` (latches `n_words`) |
| `MODE_PRE` | pattern shifter | shifter done |
| `MODE_SEARCH` | pattern matcher | matcher done |
| `MODE_DONE` | — | `scan` (next trace, same tables) or `load` |

Bus1 (8 bits) and Bus2 (16 bits) are shared by the shifter's shift-table
writes and hash-table commands, as in the paper.

Top-level ports:

- host load: `pb_wr_en/addr/data`, `n_words`, `start`, `scan`, `load`, `mode`;
- trace stream: `s_valid/s_ready/s_data/s_last/s_nbytes`;
- matches: `m_valid/m_pos/m_addr/m_len`;
- `stats`: windows, Bloom rejects, table shifts, hash lookups, signatures
  compared, matches, long skips, stall cycles.

The trace may be streamed before the search starts; the FIFO holds it.

## 5. Where this RTL departs from, or fills in, the paper

From the paper:

- the block list and roles;
- the 65-bit pattern words and 32-bit AD;
- the last-word flag polarity (0 marks the last piece);
- the 128k × 32 hash table, its start/end halves, `DINReg`, `AddressReg`, the
  Hash Count adder and the 7-state count;
- the 64k × 8 shift table with write/DataReady/WriteDone;
- the 8-bit Bus1 and 16-bit Bus2;
- the Bloom filter's role;
- the two 2K × 8 buffers, the input slot and the pair position;
- the shift formula and maximum shift;
- moving by 1 or by the matched length;
- ML = 15.

Chosen here, because the paper does not give them:

- the Bloom vector length and hash function;
- the pattern-buffer depth (256 KB);
- the LI FIFO depth and its staging register;
- all handshakes and latencies;
- the seven HT state names and sequences;
- reading the length of a signature from its padding;
- the valid bits;
- the start-up fill and end condition;
- the one-cycle compare;
- comparing every signature of a segment before moving (and moving by the
  first match);
- at most `ML-1` bytes moved per cycle;
- the clearing pass over the shift table;
- the controller's phase sequence and the `scan`/`load` commands.

Known limits:

- Signatures of a segment must be stored together.
- Each signature must be at least `ML` bytes, at most 255 words (Bus1 width)
  and must not end in 0x00.
- `ML-1` must be at most 16 (the LI offers 16 bytes per cycle).

Not reproduced:

- the FPGA timing, area and power figures;
- the bit rates measured on the authors' traces, which are not public.

The LAN interface here is only the trace buffer: no Ethernet MAC or PHY is
modelled.

## 6. Sizes against the evaluated workload

- **Signatures.** The evaluated set was 2,500 ClamAV signatures in 154 KB,
  the shortest 15 bytes. That needs at most ~21,750 pattern-buffer words
  (19,250 data words plus at most one padding word per signature). The buffer
  has 32,768. At most 2,500 of the 65,536 hash-table segment slots are used.
- **Traces.** The doped traces (147–404 KB) stream through; their length is
  limited only by the 32-bit offset counter.

`tb/tb_wm_workload.sv` runs the engine at this scale with synthetic data:

- 2,500 random signatures of 15–108 bytes (154,845 bytes, 20,470 words);
- preprocessing takes 267,358 cycles;
- then four traces with the evaluated sizes and doping levels are scanned.
  Doping is the share of trace bytes inside inserted signatures, intact or
  damaged.
- Every report equals the reference.

| trace | matches | cycles | bytes/cycle |
|---|---|---|---|
| 147 KB, 1.66 % | 370 | 62,596 | 2.35 |
| 163 KB, 11.71 % | 730 | 87,643 | 1.86 |
| 238 KB, 39.02 % | 1,497 | 142,620 | 1.67 |
| 404 KB, 63.98 % | 2,767 | 254,879 | 1.59 |

The rate falls as doping rises, because more windows end in a signature
pair and need a segment compare. That is the trend the original evaluation
reports too. The absolute rates are not comparable with it: the traces are
different, and this is a different micro-architecture.

## 7. Files

| file | content |
|---|---|
| `rtl/wm_pkg.sv` | shared types: pattern word, HT commands, modes, counters |
| `rtl/wm_top.sv` | top level |
| `rtl/wm_cm.sv` | controller |
| `rtl/wm_li.sv` | LAN interface buffer |
| `rtl/wm_pb.sv` | pattern buffer |
| `rtl/wm_ps.sv` | pattern shifter (preprocessing) |
| `rtl/wm_st.sv` | shift table |
| `rtl/wm_ht.sv` | hash table |
| `rtl/wm_bf.sv` | Bloom filter |
| `rtl/wm_pm.sv` | pattern matcher |
| `tb/wm_ref_pkg.sv` | software reference (tables, search, signature and trace generators) |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_wm_workload.sv` | 2,500-signature, four-trace run at the evaluated scale |

## 8. Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops on its own.
It also has a cycle watchdog. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/wm_pkg.sv rtl/wm_cm.sv rtl/wm_li.sv rtl/wm_pb.sv rtl/wm_ps.sv rtl/wm_st.sv \
  rtl/wm_ht.sv rtl/wm_bf.sv rtl/wm_pm.sv rtl/wm_top.sv \
  tb/wm_ref_pkg.sv tb/tb_wm_top.sv --top-module tb_wm_top -Mdir obj -o sim
./obj/sim
```

For another block, replace the top module with its testbench (for example
`tb_wm_pm`). What each testbench covers:

- **`tb_wm_top`**: runs the whole engine at the default sizes.
  - It loads 60 random signatures, a third of which share suffix pairs.
  - It preprocesses (~134k cycles) and scans two doped traces: one sent with
    gaps, one sent after `scan`.
  - Every report is compared with the software reference.
  - It fails if any mechanism never occurs: Bloom reject, table shift, hash
    lookup, failed compare, match, match of a non-first segment member, long
    skip, stall, and every mode change.
- **`tb_wm_pm`** programs the tables directly, without the shifter. It also
  checks the 2-cycle cost of a maximum-shift window.
- **`tb_wm_ps`** reads back all 64k shift entries, every segment and the
  Bloom bits.

All testbenches run in seconds; `tb_wm_workload` runs in about 10 s.

## 9. How far to trust it

Every module has a testbench with an independently computed expected result.
Each testbench was also run against a deliberately broken copy of its module,
and it failed there.

The reference model in `tb/wm_ref_pkg.sv` implements the same search rule:

- shift while the shift is non-zero;
- on a zero shift, test every signature of the segment;
- move by the first match's length, or by 1.

The reference is an executable statement of the rule, not a second opinion on
the rule itself. In particular, Wu-Manber with "skip the matched length" can
miss a signature that overlaps an earlier match. That is the algorithm's
behaviour as described, not a fault of the RTL.

The RTL has not been through FPGA synthesis or timing closure. The
2,048-byte variable shifter and the 2,048-byte one-cycle compare are large
and are the likely critical paths.
