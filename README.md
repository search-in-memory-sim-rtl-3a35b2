# Search-in-Memory NAND flash chip in SystemVerilog

An index lookup on an SSD normally reads a whole 4 KiB page over the flash
bus, through the controller and over PCIe, only for the host CPU to compare
one 8-byte key against the page and throw almost all of it away. This design
does the comparison inside the NAND flash chip. The page buffers, which
every NAND die already has for programming and reading, hold the page. They
are extended just enough to compare all 512 eight-byte slots of that page
against a 64-bit key under a 64-bit mask in one step. The chip then sends
back a 512-bit match bitmap (64 bytes) instead of the page. A second command
returns only the 64-byte chunks the host asks for.

The comparison reuses the hardware a NAND die uses to verify its own
programs:

- Every bitline's page buffer gets an XOR of two latches.
- The failed-bit counter (FBC), which normally counts misprogrammed cells
  after a program, counts mismatching bits instead.
- The FBC is split into groups of 64 bitlines. A group's count is zero
  exactly when its slot matches, so each group gives one bit of the bitmap.

The RTL models one chip with two dies. Each die has 32 blocks of 128 SLC
pages of 4 KiB. It also includes the controller-side check that makes
searching a raw, un-decoded page safe.

## Page, slot and chunk

- A **slot** is 8 bytes, the unit of one comparison. Byte 0 of a slot is its
  most significant byte, so keys compare as big-endian numbers. Slot `s`
  occupies data bytes `8s .. 8s+7`.
- A **chunk** is 8 slots (64 bytes), the unit a gather returns. A page has
  64 chunks.
- The **spare area** follows the 4096 data bytes (280 bytes):

| offset | bytes | content |
|---|---|---|
| 0 | 8 | write timestamp |
| 8 | 8 | magic number |
| 16 | 8 | CRC-64 over timestamp, magic and chunk 0 (as stored) |
| 24 + 4c | 4 | ECC parity of chunk c |

Stored data is **randomized**: the controller XORs each slot with a
pseudo-random word before programming it, and the chip never de-randomizes.
The random stream restarts for every chunk, from a seed made of the row
address and the chunk number. This lets the controller de-randomize any
chunk returned by a gather on its own.

- The generator is a 64-bit xorshift with shifts 13, 7 and 17.
- The seed is `0x9E3779B97F4A7C15 ^ {row, chunk, 4'hB}`.
- Slot `k` of a chunk uses the state after `k+1` steps.

## The page buffer group and the four latches

`sim_page_buffer` holds the 64 page buffers of one slot. Each bitline has
four latches:

| latch | role |
|---|---|
| Latch 1 (stage) | receives a sensed page, or program data from the bus |
| Latch 2 (active) | the page being searched, or the data being programmed |
| Latch 4 (query) | the search key, or the page sensed back for program verify |
| Latch 3 (XOR out) | `Latch 2 ^ Latch 4`, one cycle after `xor_en` |

The FBC switch of a bitline conducts when its Latch 3 bit is 1 and either
*Enable FBC* (program verify: count every bit) or that bit of the search
mask is set. `sim_fbc_counter` counts the conducting switches of the group:

- The analog current sum becomes a popcount.
- The 1-bit comparator becomes `count != 0`.

`sim_failed_bit_accumulator` latches the 512 group outputs as the bitmap,
with bit `s = 1` when slot `s` matches. It also latches the sum of all
counts as the failed-bit total used by program verify.

Because the key is XORed with the same random word as the stored slot, the
random stream cancels in Latch 3. The stored bytes are compared as if they
were plain. Masked bits never count, so a range of bits can be ignored.

## A search, cycle by cycle

The deserializer (`sim_deserializer`) copies the key into Latch 4 of all
512 slots, one slot position per cycle:

- In cycle `k`, position `k` of every chunk is written with
  `key ^ random word k of that chunk`.
- All 64 chunks are written in parallel.
- The 64 per-chunk random generators step once per cycle.

A search therefore takes 10 core cycles:

```
edge c      last mask byte taken by the I/O control
edge c+1    command decoded: key_load
edges c+2..c+9   Latch 4 filled, positions 0..7
edge c+10   Latch 3 <= Latch 2 ^ Latch 4            (xor_en)
edge c+11   bitmap and failed-bit total latched     (acc_capture, with mask)
edge c+12   bitmap load; from here 64 bytes leave, one per cycle
```

These are cycles c+2 to c+11: 8 fill, 1 XOR and 1 capture. At 33 MHz this
is 0.3 us, against 16 us for a page read. The testbenches check this timing:

- `tb_sim_control_logic` checks the strobes at +9, +10 and +11 from the
  decoded command.
- The chip-level testbenches check the first bitmap byte 12 cycles after the
  last mask byte, at reduced size and at full size.

## Match mode: open, search, gather, close

The control logic (`sim_control_logic`) tracks two pages per die:

- the **active** page in Latch 2, which searches use;
- a **staged** page in Latch 1, which waits for Latch 2.

**PAGE_OPEN** starts a page sense into Latch 1 in the background:

- The chip stays ready, so searches and gathers on the active page continue
  during the 16 us read. This is how the read of the next page hides behind
  the searches on the current one.
- When the read ends, the page moves straight into Latch 2 if no page is
  active. Otherwise it stays staged.
- Either way, as soon as the bus is free, the chip sends the page's 24-byte
  header followed by chunk 0 (88 bytes, tag `DK_OPEN`).

**SEARCH** works only on the active page. A search of any other row is
dropped and sets the status fail bit. Searches can be issued back to back,
as often as wanted.

**GATHER** takes a 64-bit chunk bitmap. The page can come from three places:

- Latch 2, if the page is active;
- Latch 1, if the page is staged;
- otherwise a blocking sense into Latch 1 first.

The column decoder (`sim_column_decoder`) walks the set bits from chunk 0
upward. For each set bit it sends the 64 chunk bytes and then that chunk's 4
parity bytes. The controller can therefore check and correct chunks one by
one, without the rest of the page.

This staging also pipelines a B+tree leaf lookup whose keys and values sit
on two pages of one die:

1. Open the key page.
2. Open the value page; its read overlaps the searches.
3. Search the key page.
4. Gather the matching chunk of the value page straight from Latch 1.

There is no separate "open into the cache latch" opcode: a PAGE_OPEN sent
while a page is active plays that role. Unlike a read-cache command that is
limited to the next page of the same block, it can stage any page of the die.

**PAGE_CLOSE** releases Latch 2. A staged page moves into it in the same
cycle. This also works when a background read finishes at the same edge.

## Storage mode

These commands block the bus (`rdy` low) until they finish:

- **READ** returns data and spare, 4376 bytes, tag `DK_PAGE`.
- **ERASE** erases one block.
- **PROGRAM** runs this sequence:
  1. Takes the page and spare bytes into Latch 1.
  2. Copies them to Latch 2.
  3. Programs them.
  4. Senses the page back into Latch 4.
  5. Counts `Latch 2 ^ Latch 4` with Enable FBC.
  6. Sets the status fail bit if any bit failed.

NAND programming can only clear bits. Programming over written data without
an erase therefore fails verify, and the failed-bit total is exactly
`popcount(new & ~old)`.

## Bus protocol

`sim_io_control` is an ONFI-like 8-bit bus with one byte per core clock
(`cle` / `ale` / `we` / `dq_in`). Responses come out on `dq_out` with
`dq_valid`, `dq_last` and a tag `dq_kind`.

| opcode | command | bytes after opcode + 2 row bytes (low first) | response |
|---|---|---|---|
| 00h | READ | - | page + spare |
| 80h | PROGRAM | 4096 data + 280 spare | - (status) |
| 60h | ERASE | - | - |
| 70h | STATUS | (no row bytes) | 1 byte |
| A0h | PAGE_OPEN | - | header + chunk 0, when the read ends |
| A1h | SEARCH | key (8 B, MSB first), mask (8 B) | 64-byte bitmap |
| A2h | GATHER | chunk bitmap (8 B, byte j = chunks 8j..8j+7) | 68 B per chunk |
| A3h | PAGE_CLOSE | - | - |

- A row is `{die[15:12], block[11:7], page[6:0]}`.
- Bitmap byte `j` bit `k` is slot `8j+k`.
- The status byte is `{rdy, ardy, active, staged, match_mode, 0, 0, fail}`.
- A byte may be sent only while `rdy` is high.

## Optimistic error check

An SLC page is almost always error-free, so the chip searches the raw page.
It does not first run the page through ECC in the controller. Safety comes
from the page-open response, which `sim_oec_checker` (in `sim_top`) checks
as it streams past:

| result | condition | next step |
|---|---|---|
| `ok` | CRC-64/ECMA-182 (poly 42F0E1EBA9EA3693, init 0, MSB first) over timestamp, magic and chunk 0 matches | search |
| `full_read` | CRC mismatch | read the whole page through ECC |
| `read_retry` | CRC matches but the magic differs | the sensing voltage is off |
| `refresh` | `now - timestamp > MAX_AGE` | read the page out and rewrite it |

The ECC engine, the retries and the refresh queue belong to the SSD
controller and are not part of this RTL.

## Files

`rtl/` holds one module per file, plus `sim_pkg.sv` with the shared
constants, opcodes and types.

| module | contents |
|---|---|
| `sim_top` | chip + page-open header checker |
| `sim_chip` | I/O control, control logic, deserializer, `NDIE` dies |
| `sim_plane` | one die: row decoder, cell array, 512 page buffer groups with counters, accumulator, spare latches, column decoder |
| `sim_cell_array` | **behavioural model** of the NAND array and its sensing (not synthesizable; it stores only written pages) |

Parameter defaults are the published configuration:

| parameter | default |
|---|---|
| `M` | 512 slots |
| `NDIE` | 2 |
| `BLK` | 32 |
| `PGS` | 128 |
| `T_READ` | 528 cycles (16 us at 33 MHz) |
| `T_PROG` | 2640 cycles (80 us) |
| `T_ERASE` | 33000 cycles (1 ms) |

Testbenches (`tb/`) are self-checking and print
`TB_RESULT checks=N failures=F`. Chip-level testbenches share
`tb_sim_bus.svh`. It contains a bus driver and an independent reference
model of the randomizer, the page image, the CRC and the search.

- `tb_sim_top` runs every mechanism at a reduced size and counts each one:
  - erase, program, verify failure and storage read;
  - open responses and all four verdicts of the header check: ok, full
    read (bad CRC), read retry (foreign magic number) and refresh (old
    timestamp);
  - batched and masked searches and the salary range query (two masked
    searches, combined as upper AND NOT lower), and a column query that
    compares only the gender byte of rows packed as user id, gender,
    country and job;
  - a search overlapping a page open, staging and hand-over at close;
  - gathers from Latch 2, from Latch 1 and via the array;
  - a rejected search, the second die, and the mode switch.
- `tb_sim_full` runs the top at the default size: 4 KiB pages and the real
  array times. It takes about 35 s to build and 3 s to run.
- `tb_sim_index_lookup` runs the primary-index workload at the default
  size. A leaf is stored as two pages: 512 sorted keys and their 512 values
  in the same slot order. Each lookup is one search on the key page, then a
  gather of the one value chunk that holds the answer. The value page is
  staged in Latch 1 while searches run on the key page. The testbench checks
  40 random lookups, some of them for absent keys, and one batch of four. It
  counts 132 bytes on the bus per lookup, against 8192 bytes for reading both
  pages.

Simulate, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/sim_pkg.sv rtl/*.sv \
    tb/tb_sim_top.sv --top-module tb_sim_top -Mdir obj && obj/Vtb_sim_top
```

## Where this departs from the published design, and what is assumed

**Bus speed.** The bus runs at one byte per core clock. The 80 MT/s
(match-mode) and 800 MT/s (storage-mode) NV-DDR3 rates and DDR signalling
are not modelled.

**Gather size.** A gathered chunk carries its 4 parity bytes, so a
search-plus-gather lookup moves 64 + 68 = 132 bytes. The published I/O count
is 128 bytes, which leaves the parity out.

**Analog parts are digital here.**

- FBC current summation is a popcount.
- The voltage comparator is `!= 0`.
- Bitline sensing is the array model.

**Program verify** senses back into Latch 4 and reuses the search XOR. The
published text says only that the FBC counts misprogrammed cells in
Latch 3. `FAIL_LIMIT` is 0, and the spare area is not verified.

**Latch used for bus data.** Only the search key and the program-verify
sense enter Latch 4. Program data enters Latch 1, and reads leave from
Latch 1 or Latch 2 through the column decoder. The published page-buffer
drawing labels the bus connection at Latch 4, but the text does not say
which latch carries bus data.

**Own choices.** These are all implementation decisions:

- the randomizer and its seed mixing;
- the spare layout;
- the CRC polynomial;
- the magic value and the age limit (`MAX_AGE`, in units of `now`);
- opcodes, framing and response tags;
- status bits;
- the row address format;
- the rule that a search is accepted only on the active page;
- one command at a time per chip, with page-open reads of different dies
  allowed to overlap;
- the order of the 10 search cycles (8 fill, 1 XOR, 1 capture). The total of
  10 is the published figure.

**Bitmap polarity.** The bitmap uses 1 for a match. Since few slots match, a
bitmap is mostly zeros. That is the property the published design relies on
for low-power transfer.

**Not included.** The SSD controller firmware is not part of this RTL: the
FTL, command scheduling (including the deadline-based batching scheduler),
the ECC engine, DRAM and the PCIe/NVMe host interface.

**Capacity.** One chip at the defaults holds 32 MiB (8192 pages). An on-SSD
index of hundreds of MiB therefore spans many chips.

**Synthesis.** Everything except `sim_cell_array` is synthesizable. The
array model uses an associative array and is meant for simulation only.
