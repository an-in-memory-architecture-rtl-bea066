# FilterFuse RTL: an in-memory pre-alignment filter for long DNA reads

Read mapping compares each sequenced read with the stretches of a reference genome
where it might belong. Most of these candidate pairings are poor matches, and running
a full dynamic-programming alignment on them wastes most of the mapping time. A
*pre-alignment filter* cheaply estimates how many edits (substitutions, insertions,
deletions) separate a read from its reference window and rejects the pairing when the
estimate exceeds a threshold E. Only the pairings it accepts go on to alignment.

This RTL implements such a filter inside the memory that already holds the reference.
The reference sits in small memory crossbars, together with copies of itself moved by
a few bases. The read is written next to it, and the crossbars' sense amplifiers XOR
the read against every moved copy. Small ternary CAMs (TCAMs) turn the XOR bits into
one verdict per segment, and a few adders count the edits. Only the verdict and a
count leave the memory.

## The filtering rule

The read is cut into **segments** of 8 bases. A segment counts as *matching* if, for
at least one shift `d` in the allowed range (for example −E..+E), all of its bases
equal the reference bases `d` positions away. Every segment that does not match
counts as one edit. The pairing is accepted when

    edits <= E        (equivalently: matching segments >= segments - E)

Two edits that fall in one segment count once, so the count can fall short of the
true edit distance and the filter may let a pairing through that an aligner would
then reject. The filter is meant to err that way: a false accept costs one
alignment, while a false reject loses a mapping.

In memory, segments sit at fixed positions of the stored reference, and a read
rarely starts on a segment boundary. The host therefore sends a **mask** with each
word: one bit per base, set when the base belongs to the read. Bases outside the read
compare as matches, so a segment cut by the read's start or end is judged only on the
bases it has.

## Data layout

* **Base encoding**: 2 bits per base. Base `i` of a 32-bit word is bits `[2i+1:2i]`,
  so a word holds 16 bases, or two segments.
* **Word-set**: 4 words (128 bits, 64 bases, 8 segments). Word `k` of every word-set
  goes to bank group `k`, so the four parts are handled in parallel.
* **Tile group**: inside a sub-array, a word occupies 4 tiles of 8 sense amplifiers;
  tile `k` of group `Z` (tile `4Z+k`) holds bits `[8k+7:8k]`. Eight tiles form two
  groups.
* **Crossbar rows**: a tile has a 16×16 crossbar. Row 0 is the **query row**, where
  the read is written. Rows 1–15 hold the reference word and its moved copies. For
  example, rows `r..r+4` hold the reference moved by −2..+2 bases. Each sense
  amplifier serves two columns through the column multiplexer (`colsel`), so one
  crossbar holds two independent word columns.
* **Shift sets**: for long reads and large thresholds, the shifts cannot all sit next
  to one word-set. They are split into **shift sets**. A shift set is one compare over
  a run of stored rows, and may place the read moved by `shv` whole segments (8 bases)
  against the stored rows. The results of all shift sets of a word-set are ANDed, so a
  segment stays an edit only if no shift set matched it. The shift value travels with
  the result, and the rank moves the result back by `shv` segment positions before the
  AND.

Where the reference lives is up to the host. Each word carries a full address: bank,
sub-array, tile group, column position, first row and number of rows. No address
arithmetic is fixed in hardware.

## Hierarchy

```
filterfuse_top (rank)
 ├─ input buffer (one word-set), dispatch, pairing slots, AND/sum buffers
 ├─ ff_count_unit: Count TCAM per bank group → TCAM mask → multi-operand adder
 └─ 4 × ff_bankgroup ─ ff_level_router (buffer + result arbiter)
        └─ 2 × ff_bank ─ ff_level_router
               └─ 2 × ff_subarray
                      ├─ ff_fifo (command FIFO, depth 4)
                      ├─ 8 × ff_tile (16×16 crossbar, 8 sense amplifiers)
                      ├─ XOR-result register → pairwise OR → mask AND
                      ├─ ff_tcam PD (pattern detect) → ff_tcam OS (output select)
                      └─ partial-result AND, output buffer, ID register, req/ack
```

`ff_pkg` holds the sizes, enums and the command, result, programming and host-word
structs.

### Tile (`ff_tile`)

This is the crossbar as a register array, plus the digital periphery. The periphery
covers the instruction (idle/read/write/XOR), a cycle counter that models the
crossbar's operation time, the write buffer and write-driver select mask, the column
multiplexer, and an output register. The sense amplifiers either read a row or return
`query_row XOR row`. `done` pulses `WR_CYCLES` or `RD_CYCLES` cycles after an
instruction is taken. The analog cells and drivers are not modelled.

### Sub-array (`ff_subarray`)

This is where the filtering happens. For a compare command the controller runs these
steps:

1. It writes the 32-bit read piece into the query row of the addressed tile group.
2. For each shift row `r` it XORs the query row with row `r` in all four tiles and
   picks the tiles' outputs into the 32-bit XOR-result register.
3. It ORs each 2-bit pair into a base mismatch bit (16 bits) and ANDs that with the
   mask.
4. The **PD TCAM** searches those 16 bits. Its match lines say which programmed
   patterns are present. The intended program has entry `j` match "segment `j` has
   no mismatching base".
5. The **OS TCAM** uses the PD match lines as its key and returns a 2-bit segment
   vector (1 = edit). It is programmed as the inverse of the two match lines.
6. It ANDs that vector into the partial result, which starts at all ones.

After the last row, the result and its tag (ID low bits and shift value) move into a
two-entry output buffer. The buffer offers them upward through a request/acknowledge
pair and holds each until it is acknowledged. Meanwhile the controller starts the next
command, so a busy result bus only stalls the sub-array once the output buffer is
full. A compare with `n` shift rows occupies the sub-array for
`WR_CYCLES + 2 + n·(RD_CYCLES + 3)` cycles. The command FIFO in front lets the levels
above keep sending while the sub-array is busy.

The TCAM contents are the host's, loaded over one broadcast programming bus
(`prog_t`: target PD/OS/Count, entry index, valid, key, care mask, data). If the OS
TCAM finds no entry, it returns all ones. A sub-array whose TCAMs were never
programmed therefore reports every segment as an edit and can never cause a false
accept.

### Bank and bank group (`ff_bank`, `ff_bankgroup`, `ff_level_router`)

Both levels work the same way; they differ only in how many children they have and
which address field selects the child. A one-entry input buffer acknowledges a command
in the same cycle if it is empty or emptying. The level above therefore never waits
on the whole path down to a sub-array, only on this buffer. Results from the children
go through a round-robin arbiter into a one-entry output buffer, handed up with
req/ack. Results that finish in the same cycle thus leave one after another. Each
level adds one cycle on the way down and one on the way up.

### Rank (`filterfuse_top`)

The host sends one word per `in_valid/in_ready` handshake (`host_word_t`). Each word
carries:

* the instruction and address with mask;
* 32 data bits;
* the 16-bit pairing ID;
* an *active* bit;
* the shift value;
* the pairing's settings: number of word-sets, shift sets per word-set, and threshold
  E.

Words are collected four at a time. A full word-set is handed down in parallel, word
`k` to bank group `k`. Inactive words are skipped; these are words that contain no
base of the read.

**Pairing slots.** The low 2 bits of the ID travel with the data as the tag. The
upper 14 bits wait in the ID MSB buffer, indexed by those low bits, and are joined
back when the pairing finishes. Up to four pairings with different low ID bits are
therefore in flight at once. Results can return in any order, for example when a
short pairing overtakes a long one, and each carries its own ID. Each slot keeps the
following state:

* the AND buffer (8 segment bits);
* shift sets sent;
* results expected and received;
* the word-set count;
* the sum buffer.

**Dispatch rules** (the stalls the host sees as `in_ready` low):

* A write word-set always goes.
* A compare word-set goes if its slot is free, or if the slot already belongs to the
  same pairing and not all shift sets of the current word-set have been sent.
* Otherwise the word-set waits in the input buffer. This happens when the slot is held
  by another pairing with the same low ID bits, or when the pairing's next word-set
  must wait for the current one to be counted.
* Back-pressure from a full sub-array FIFO also reaches the rank through the bank
  group's ready signal.

**Counting.** Each returning bank-group result is placed at segment position
`2g + j − shv` and ANDed into its slot's AND buffer. Once all shift sets of the
word-set have been sent and all their results received, the AND buffer goes to the
count unit. There each bank group's two bits pass through a 4-bit-wide Count TCAM,
which is programmed to return the number of ones. Counts of inactive bank groups are
masked to zero, and an adder sums the four counts. The sum is added to the sum buffer.
After the pairing's last word-set, `out_valid` pulses for one cycle with:

* `out_id` (full ID);
* `out_edits`;
* `out_accept = (out_edits <= E)`.

Three event outputs report performance events: a sub-array FIFO refusing a command
(`ev_fifo_full`), results competing at a bank or bank group (`ev_arb`), and a
word-set held for its slot (`ev_slot_wait`).

## Using it from a host

1. Program the TCAMs. PD entries 0/1: key 0, care `0x00ff`/`0xff00`, valid. OS entries
   0..3: key `i`, care `0x3`, data `~i & 3`. Count entries 0..3: key `i`, care `0xf`,
   data = ones in `i`.
2. Write the reference. Use `OP_WRITE_REF` word-sets, one per stored row and shift,
   with all four words active.
3. Send each pairing. For every covered reference word-set, and every shift set, send
   one `OP_COMPARE` word-set. Each word carries:
   * the read bases aligned to the stored reference, moved by `8·shv` for a shifted
     shift set;
   * the base mask;
   * the first row and number of shift rows;
   * the pairing ID and settings.
4. Collect `out_valid` results by ID.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| word width / bank groups / words per word-set | 32 / 4 / 4 | paper |
| tiles per sub-array, sense amplifiers per tile | 8, 8 | paper |
| crossbar | 16 × 16 | paper's example |
| segment length | 8 bases | paper |
| Count TCAM width | 4 bits | paper |
| banks per bank group (`N_BANK`), sub-arrays per bank (`N_SUB`) | 2, 2 | this design |
| FIFO depth | 4 | this design |
| `WR_CYCLES`, `RD_CYCLES` | 2, 1 | this design |
| ID width / low ID bits (slots) | 16 / 2 (4) | this design |
| PD / OS / Count TCAM entries | 4 / 16 / 16 | this design |
| edit, word-set and threshold counters | 16 bits | this design |

The default array has 16 sub-arrays (32 kbit of crossbar). A stored word-set row takes
one row slot in every bank group, so the array holds 240 word-set rows, or 15 kbp of
reference stored once. That is enough for a 10 kbp read whose window is stored
without shifted copies. It is too small once shifted copies are needed: a 10 kbp read
with thresholds of 2–7 % of its length needs about 1,300–1,400 word-set rows (8
shifted copies of the window), and a 100 kbp read needs over 1,500 rows even
unshifted. Scaling `N_BANK` and `N_SUB` grows the array. The shift-set counter (8 bits,
255 shift sets per word-set) limits thresholds to about 1,000 edits.

## Where this design departs from, or adds to, the original architecture

* Sizes the architecture leaves open are this design's choices (see the table). So
  are the host word format, the command format, and the programming bus.
* The shift value is in whole segments and moves results toward lower segment
  positions. Bits moved past the word-set edge are dropped. If a shifted shift set
  needs read bases from the neighbouring word-set, the host supplies them in the
  query word.
* One word-set per pairing is in flight at a time. Pairings overlap only with other
  pairings, and at most four are in flight (one per low-ID value).
* The rank takes all four bank-group results in the same cycle, so there is no
  arbitration at the rank itself.
* The analog crossbar periphery (row selector, gate/source drivers, sample-and-hold)
  and the memory cells are not modelled. The crossbar is a register array whose
  operation time is a fixed cycle count.
* The event outputs are additions for observability.
* A 32-bit host word is not cut into pieces across the bank groups. Word `k` of a
  word-set goes whole to bank group `k`, where its four bytes go to four tiles of
  one tile group. The architecture's description can be read either way; this layout
  matches its word-set map, where bits 31..0 of a word-set sit in bank group 0.

## Simulation

Every file in `tb/` is a self-checking testbench. It ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. With plain verilator, for
example:

```
verilator --binary --timing --assert -Irtl rtl/ff_pkg.sv tb/tb_filterfuse_top.sv \
    --top-module tb_filterfuse_top && ./obj_dir/Vtb_filterfuse_top
```

(`-Irtl` lets verilator find each module in `rtl/<name>.sv`.)

| Testbench | What it shows |
|---|---|
| `tb_ff_tile` | random read/write/XOR against a model, operation latency |
| `tb_ff_tcam` | ternary search and first-match priority against a model |
| `tb_ff_fifo` | bursty push/pop against a queue, full/empty flags |
| `tb_ff_subarray` | segment results against a base-level model, latency `5+WR+n(3+RD)` from the drive cycle (result register plus output buffer), FIFO-full stalls |
| `tb_ff_bank`, `tb_ff_bankgroup` | routing, out-of-order results matched by tag, arbitration, latency (+2 cycles per level) |
| `tb_ff_count_unit` | edit count through the Count TCAMs and TCAM mask, one-cycle latency |
| `tb_ont10k_workload` | whole design at default size on reads of the ONT-10k size (10,000 bases, 157 word-sets, reference stored once): 1 % and 5 % substitutions and an unrelated read at E = 200 and 700, checked against the segment count worked out from the strings; prints cycles per pairing |
| `tb_filterfuse_top` | whole design at default size: random reference, 104 pairings with substitutions and indels, three shift-set plans (one set; two sets; a second set moved one segment), checked against a base-level model of the filtering rule; counts host stalls, FIFO back-pressure, slot waits, arbitration, multi-shift-set AND, shift value, TCAM mask, accept, reject and out-of-order results, and fails if any never happened |

Both whole-design tests run at the default parameters. In the 10 kbp test, one pairing
of 157 word-sets takes about 2,830 cycles (18 per word-set), because a pairing has
only one word-set in flight and each word-set waits for its own count. Throughput
comes from running four pairings at once, which the end-to-end test exercises. Reads
of 100 kbp were not simulated; their reference window does not fit the default
array.
