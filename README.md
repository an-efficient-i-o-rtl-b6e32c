# A 65,536 × 8-bit RAM-based CAM whose update keeps up with a 256-bit bus

A binary content-addressable memory (CAM) answers "which stored words equal this key?"
for all words in one clock. FPGAs have no CAM cells, so a CAM is built from ordinary
block RAM. Searching that kind of CAM is fast: one key per clock. Changing its contents
is slow. Each word must first be erased, which needs its old value, and then written. A
conventional RAM-based CAM also takes one 8-bit word per clock, while the memory system
feeding it delivers 256 bits per clock.

This RTL builds a 65,536-word × 8-bit CAM. A full reload streams in at the bus rate, one
256-bit part per clock, and finishes two clocks after the last part. Three ideas make that
possible:

* **Centralized erase RAM.** A separate RAM keeps a copy of what the CAM holds. The CAM can
  therefore be erased from this copy while the new contents are still arriving. There is
  one erase RAM for the whole CAM, not one small erase RAM per CAM unit.
* **Bit-sliced writes.** Many small CAM units sit side by side and are written together:
  one write stores 256 words. The match outputs are then rewired so that match bit *n*
  still belongs to word *n* of the input stream.
* **Horizontal partitioning of the erase RAM.** The erase RAM is eight 256-bit-wide memories
  placed side by side. It is written 256 bits at a time but read 2,048 bits at a time. The
  CAM can therefore be erased and rewritten eight times faster than the bus delivers data.
  Both stages hide behind the transfer.

## 1. The CAM unit (`rcu`)

One CAM unit holds 32 words of 8 bits in one dual-port RAM of 8,192 bits. This fits one
Arria V M10K block. The two ports see that RAM in different shapes:

| port | shape | address | data | used for |
|---|---|---|---|---|
| write (A) | 8,192 × 1 | `{value[7:0], word[4:0]}` | 1 bit (`csc`) | erase / write |
| read (B)  | 256 × 32  | `key[7:0]` | 32 bits | search |

Cell `{v, i}` is 1 exactly when word *i* holds value *v*. Reading row `key` on port B
therefore returns the 32-bit match vector in one access. There are two kinds of write:

* `csc = 1` at `{new, i}` stores value *new* in word *i*.
* `csc = 0` at `{old, i}` erases word *i*.

Word *i* must be erased before it gets a new value, or it would hold two values. The erase
needs `old`, the value the word currently holds, and that value cannot be read back out of
the CAM. This is why the erase RAM exists.

The search has a registered read: `match` is valid one clock after `key`. The RAM powers up
all zero, so the CAM starts empty and nothing matches.

## 2. The CAM array and the bit-sliced match order (`rcb`, `rcam`, `rcam_encoder`)

The 2,048 units are grouped into 8 sub-blocks (RCBs) of 256 units each.

* **A write.** One write puts one 2,048-bit row (`cdata`) into one RCB. Unit *u* of that
  RCB takes bits `[8u+7:8u]`, and all 256 units use the same word address.
* **Choosing the RCB.** The row address `caddr` (8 bits) is `{RCB[2:0], word[4:0]}`. The
  encoder turns the RCB field into a write strobe for just that RCB; `cdata` goes to all
  RCBs. So rows 0–31 fill RCB0, rows 32–63 fill RCB1, and so on.

**Where each word ends up.** Row *r* holds stream words 256·*r* … 256·*r*+255. Stream
word *n* is therefore:

* in RCB *b* = *n* / 8192,
* at word address *j* = (*n* / 256) mod 32,
* in unit *u* = *n* mod 256.

Each unit's 32-bit match vector is indexed by *j*. Left in unit order, the matches would be
scrambled. The **bit-sliced output** puts bit *j* of unit *u* of RCB *b* at

    cmatch[b·8192 + j·256 + u]

This is exactly *n*. So `cmatch[n]` is the match of the *n*-th byte delivered by the stream.
Within one RCB, the first 256 match bits are bit 0 of every unit, the next 256 are bit 1
of every unit, and so on. The wiring costs no logic.

**Wider words.** The word width is set by `WORD_W` (16, 32 or 64 bits). The same 2,048
units then hold 65,536·8/`WORD_W` words. A word occupies `WORD_W`/8 neighbouring units,
lowest byte in the lowest unit. Each unit searches its own byte of the key, and an AND of
the group's match bits gives the word's match. The match order follows the same rule, with
"unit" replaced by "word of the row".

## 3. The erase RAM (`erase_ram`, `erase_dpm`)

The erase RAM holds the same 64 KB as the CAM, in the order it was streamed in. It is
eight dual-port memories DPM0–DPM7, each 256 rows × 256 bits.

* **Writes.** Stream part *i* (`eaddr` = *i*, 11 bits) goes to DPM *i* mod 8, at row *i*/8.
  So parts 0–7 form row 0, parts 8–15 form row 1, and so on.
* **Reads.** A read returns one row of all eight DPMs at once (DPM0 in the low bits). That is
  a 2,048-bit row, in the layout the CAM array wants for `cdata`.
* **Read during write.** Reads are registered. A read of a row in the same clock as a write
  to it returns the old contents. The update sequencer depends on this.

## 4. The update sequence (`rcwe_control`)

An update is a full reload: 2,048 parts at `eaddr` 0, 1, 2, … with `ewe` high. Gaps in `ewe`
are allowed. The sequencer drives one CAM write per clock at most, in two stages:

1. **Erase**, rows 0 to 255, one per clock. This starts with the first part, before
   anything else has arrived. Each row is read from the erase RAM, which still holds the
   old contents, and written to the CAM with `csc = 0`.

   Is row *r* still old when it is read? It is read in clock *r*. Its first new part
   cannot arrive before clock 8·*r*, so the read always sees old data. For row 0, read and
   overwrite fall in the same clock, which is why the erase RAM returns old data there.
2. **Write**, rows 0 to 255, `csc = 1`. Row *r* is written when two things hold: the erase
   stage is over, and all 8 parts of row *r* have arrived. The sequencer counts the parts
   received to tell.

With an unbroken stream starting in clock 0:

| clock | stream (parts received) | CAM write issued |
|---|---|---|
| 0 … 255 | parts 0 … 255 | erase rows 0 … 255 |
| 256 … 291 | parts 256 … 291 | write rows 0 … 35 (already complete) |
| 296, 304, … | — | write row 36, 37, … : each row the clock after its 8th part |
| 2,047 | part 2,047 (last) | — |
| 2,048 | — | write row 255 |
| 2,049 | — | row 255 lands in the CAM; `busy` falls after this clock |

So an update takes 2,048 + 2 clocks. The CAM's own overhead on a 64 KB transfer is therefore
0.1%. With `ROWS` rows of `PARTS` parts, the erase stage takes `ROWS` clocks and the stream
takes `ROWS`·`PARTS`. Rows written right after the erase stage are the ones already
complete: rows *r* with 8·*r* + 8 ≤ 256 + *r*, that is *r* ≤ 35.

The command (`cwe`, `csc`, `caddr`) is registered, so that it lines up with the erase RAM's
registered `cdata`. Assertions check the stream rules:

* an update starts at `eaddr` 0,
* parts arrive in order,
* there are no more than 2,048 parts.

## 5. Top level (`rcwe64k8`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | synchronous, active-low reset of the sequencer (the RAMs are not reset) |
| `ewe` | in | 1 | a stream part is present |
| `eaddr` | in | 11 | part number, 0 … 2,047 |
| `edata` | in | 256 | part: stream bytes 32·`eaddr` … 32·`eaddr`+31, first byte in bits [7:0] |
| `ckey` | in | `WORD_W` | search key |
| `cmatch` | out | 65,536·8/`WORD_W` | `cmatch[n]` = word *n* equals the key; one clock after `ckey` |
| `busy` | out | 1 | an update is running; `cmatch` is meaningless meanwhile |

**Parameters.** All default to the sizes above. `BUS_W` = 256 and `PARTS` = 8 set the stream
width and the number of DPMs. `RCU_DW` = 8 and `RCU_WORDS` = 32 set the unit size.
`N_RCB` = 8 and `WORD_W` = 8 complete the list. Derived sizes:

* 2,048-bit `cdata`,
* `K` = 256 units per RCB,
* 256 rows,
* 65,536 words.

The package `rcam_pkg` holds the defaults and the sequencer's state type.

**Resources.** At the defaults the design uses:

* 2,048 RAMs of 8,192 bits for the CAM,
* 8 RAMs of 256 × 256 bits for the erase RAM (64 M10K blocks on Arria V),
* a 2-bit state, an 8-bit row pointer, a 12-bit part counter and registers for the CAM
  write command.

With 8-bit words there are no AND gates. Wider words add one AND per word, of
`WORD_W`/8 inputs.

## 6. Where this RTL departs from, or goes beyond, the published description

* **Polarity of `csc`.** The published description says in one place that `csc` = 0 erases
  and `csc` = 1 writes, and in another the reverse. This RTL uses 0 = erase, 1 = write, which
  fits the name set/clear.
* **Write timing.** The published timing diagram labels the write of the 38th and 39th row at
  clocks 296 and 304, and the last write at the clock of the last part. Here those writes go
  out at clocks 296 and 304 (rows 36 and 37, counted from 0). The last row goes out one clock
  after its last part and lands one clock later. A registered RAM cannot return a row in the
  clock it is written.
* **Not specified, chosen here:**
  * the bit order of the unit's write address,
  * the byte order inside wide words,
  * which DPM lands in which bits of `cdata`,
  * registered search and erase-RAM reads, with old data on read during write,
  * all-zero power-up contents,
  * the decoder inside the encoder,
  * counting parts to detect complete rows,
  * the `busy` output and the reset,
  * the rule that an update is always a full, in-order reload.
* **24-bit words.** A 16,384 × 24-bit configuration appears in one results table but cannot
  be built this way: 256 units per row do not split into groups of three. The other width
  configurations, 16, 32 and 64 bits, are supported through `WORD_W`.
* **Not included.** The DMA controller and the DDR3 memory of the measurement system are not
  part of this RTL. The testbenches drive the stream directly.

## 7. Simulating

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`. Each has a
watchdog. Build one with Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -Itb rtl/rcam_pkg.sv tb/tb_rcwe64k8_full.sv \
              --top-module tb_rcwe64k8_full -Mdir obj && ./obj/Vtb_rcwe64k8_full

| testbench | what it checks |
|---|---|
| `tb_rcu` | one unit: erase/write sequences against a reference, latency, read during write |
| `tb_rcb` | 8-unit blocks with 8- and 16-bit words: bit-sliced order, AND of the byte matches |
| `tb_rcam_encoder` | every row address reaches exactly one RCB |
| `tb_rcam` | a 4-RCB array: row placement and the match order across RCBs |
| `tb_erase_dpm`, `tb_erase_ram` | write demultiplexing, 2,048-bit row layout, old data on read during write |
| `tb_rcwe_control` | the clock-by-clock command schedule, for unbroken and gappy streams |
| `tb_rcwe64k8` | end to end at reduced size, 8- and 16-bit words, four updates (see below) |
| `tb_rcwe64k8_full` | end to end at full size: two 64 KB updates, 2,050 clocks each, 65,536-bit match vectors checked |
| `tb_rcwe_wide` | full-size 32,768 × 16, 16,384 × 32 and 8,192 × 64 instances, with partial-word matches rejected |

`tb_rcwe64k8` also counts erase rows, write rows, writes held back for data, stream gaps,
matches removed by an update, multi-word matches and AND rejections. It fails if any of
them never occurs.

The full-size testbenches build in well under a minute and run in seconds. Search results
are compared with a byte-array reference model. That model is written independently of
the RTL's bit-slice wiring.
