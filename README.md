# Sub-path speculation for control flow auditing (SpecCFA, hardware version)

Control flow attestation/auditing (CFA) lets a remote verifier see how a
microcontroller actually ran its program. A small root of trust next to the CPU
records every control flow transfer as a (source, destination) address pair in
a protected log, CF_Log. The verifier then checks that log against the program's
control flow graph. The trouble is the log's size: even small firmware produces
tens of kilobytes. The device has to store all of it, authenticate it and send
it, and it usually has to pause the program to send each full slice.

Most of that log is predictable. Busy-wait loops, signal-processing routines
and the same few paths through a dispatcher appear over and over. The design in
this repository, which follows the SpecCFA paper (Caulfield, Tyler, De Oliveira
Nunes, ACSAC 2024), lets the verifier send a few *speculated sub-paths* with
each request. A sub-path is a short list of transfers with an 8-bit ID. The
hardware watches transfers as they are logged. When the last transfers in the
log form a complete speculated sub-path, it overwrites that part of the log with
one entry holding the sub-path's ID. If the same sub-path then occurs again
right away, it does not write the ID again: it writes the number of consecutive
occurrences in the next entry and keeps updating that count. No information is
lost. The verifier knows every ID's path and can expand the log back to the
full trace.

The RTL covers the hardware version of the scheme for a 16-bit MCU (the paper
builds on openMSP430 with the ACFA auditing hardware). It contains the sub-path
detectors, the selection and repetition logic, the log rewriter, the guard that
keeps untrusted code away from the speculations, and simple storage for the
speculations and for CF_Log. The CPU and the underlying CFA logic, which
produces the transfer pairs and sends log slices, are not part of it. Their
signals are ports of the top module.

## What happens to the log: an example

Words are 16 bits. A log entry is two words (src, dest). `CF_size` counts the
words in use, so the next entry goes to offset `CF_size`. Take one
speculation, ID 1 = (A, B, D, G), where each letter stands for one transfer
pair.

| step | transfers logged | CF_Log entries (word offset: content) | CF_size |
|---|---|---|---|
| before | ... | ..., 8: X | 10 |
| A, B, D, G appended | | 10: A, 12: B, 14: D, 16: G | 18 |
| one cycle later, sub-path 1 detected at 10 | | 10: **1** | 12 |
| A, B, D, G again | | 10: 1, 12: A ... 18: G | 20 |
| detected at 12, adjacent to the ID 1 at 10 | | 10: 1, 12: **2** | 14 |
| A, B, D, G a third time | | 10: 1, 12: 2, 14: A ... | 22 |
| detected at 14, adjacent again | | 10: 1, 12: **3** | 14 |
| C, F | | 10: 1, 12: 3, 14: C, 16: F | 18 |

Eight transfers became two entries. Each further occurrence rewrites the count
in place, so a run of any length costs two entries. Only the first word of an
ID or count entry is written; the second word keeps whatever it held before and
means nothing.

## Speculations in BlockMem

The verifier's sub-paths live in BlockMem, a reserved memory region (256 words
here). Blocks are packed from word 0:

```
word b_i          : { ID[15:8], len[7:0] }
word b_i + 1, + 2 : src_0, dest_0
...
word b_i + 2k+1, +2k+2 : src_k, dest_k
b_(i+1) = b_i + 2*len_i + 1,   b_0 = 0
```

The hardware has `N_BLOCKS` detector slots (8 by default). Slot i serves the
i-th block in this chain. A header with `len = 0` marks an empty slot: it never
matches, and the chain steps past it by one word. BlockMem resets to all zeros,
so the trusted loader only has to write the blocks it uses. The longest
possible sub-path is 255 transfers. With 256 words, the sub-paths of all eight
slots can hold 124 transfers in total.

## Detecting one sub-path: the Block Detect state machine

Each slot has a `block_detect` with a pointer `block_ptr` to the next expected
pair. Every time the CFA logic appends a pair (`hw_en`), the pair is compared
with `(block_src, block_dest)` = pair `block_ptr` of the block:

* **inter**: it matches and `block_ptr < len-1`. More pairs are needed.
* **last**: it matches and `block_ptr == len-1`. The sub-path is complete.
* **mismatch**: it does not match.

```
            inter                       last
   Idle  ----------->  Monitor  ------------------>  Detect
  ptr=0  <-----------  ptr+=1   <------------------  ptr=0, detect_active=1
        detect_any or    (inter: stay)      inter        (last: stay)
          mismatch
   Idle --last--> Detect            Detect --anything else--> Idle
```

On **last** the detector registers the first word of the sub-path in CF_Log,
`active_addr = CF_size - 2*(len-1)`. In that cycle `CF_size` is the offset
where the last pair is being written. The next cycle is the Detect state. Here
`detect_active` is high for one cycle and the rewrite takes place.

Two rules of the state machine matter in practice:

* When any slot detects its sub-path (`detect_any`), every slot that is
  partway through a match drops it. The matched words are about to be
  overwritten, so a longer sub-path that contains a shorter speculated one can
  never complete. The verifier has to avoid such pairs.
* A mismatch sends a slot to Idle without re-testing that same pair as the
  start of a new occurrence. Speculating (A, A, B) against the log A, A, A, B
  therefore finds nothing. The log is still correct; it just saves less.

## Choosing among detections and counting repeats

`detect_mux` passes on the detection of the lowest-numbered active slot
(`active_ID`, `active_addr`). `detect_any` is the OR of all slots. If two
sub-paths end on the same transfer, the one in the lower slot wins, and the
other is simply not replaced.

`repeat_detect` decides what is written. It remembers the last speculation
written (`last_ID`, `last_addr`) and a counter `repeat_ctr`, which is 2 while
no run is in progress:

| case | condition | written value | at offset | `CF_size` becomes |
|---|---|---|---|---|
| new entry | not a repeat | `active_ID` | `active_addr` | `active_addr + 2` |
| first repeat | same ID, `active_addr == last_addr + 2`, `repeat_ctr == 2` | `repeat_ctr` (=2) | `last_addr + 2` | `last_addr + 4` |
| later repeat | same ID, `active_addr == last_addr + 2`, `repeat_ctr > 2` | `repeat_ctr` | `last_addr` | `last_addr + 2` |

After a repeat the counter increments. After a new entry it returns to 2. On a
new entry and on a first repeat, `last_addr` takes `active_addr`. After a first
repeat it therefore points at the count entry, and later repeats compare
against that entry and overwrite it. The comparison `active_addr == last_addr +
2` works for later repeats because the previous rewrite left `CF_size` right
after the count, so the next occurrence starts exactly there. The 16-bit
counter saturates: at 65535, a further occurrence starts a new ID entry.

The log does not mark count entries. A verifier expanding the log has to tell
an ID that follows an ID from a count, for example by giving IDs values that
counts will not reach in practice, or by tracking which ID can follow which.

`mem_interface` turns the result into one CF_Log word write and one `CF_size`
write. It refuses any offset outside the log.

## Protecting the speculations

If untrusted code could edit BlockMem, it could declare an attack path to be
"speculated" and hide it behind an innocent ID. `mem_monitor` raises
`reset_req` (meant to reset the whole MCU) when

```
(PC outside the TCB  and  CPU writes an address inside BlockMem)
or (DMA accesses an address inside BlockMem)
```

CPU reads of BlockMem are allowed, so the CPU's read enable is not an input. BlockMem also ignores CPU writes unless the PC is inside the TCB. The memory
map is this design's own: BlockMem at bytes `0x0400`–`0x05FF`, TCB code at
`0xA000`–`0xAFFF`. Change it through parameters. CF_Log and `CF_size` are
protected in the same way by the underlying CFA hardware (not included).

## Interface and timing of `speccfa_top`

| port | dir | meaning |
|---|---|---|
| `hw_en`, `src`, `dest` | in | from the CFA logic: a transfer pair is appended this cycle |
| `pc`, `w_en`, `d_addr`, `d_wdata` | in | CPU bus. Trusted code loads BlockMem through it |
| `dma_en`, `dma_addr` | in | DMA bus, watched by the monitor |
| `log_raddr` / `log_rdata` | in/out | combinational CF_Log read port for the trusted software |
| `cf_size`, `log_full`, `log_overflow` | out | log fill state. `full` means there is no room for another pair |
| `log_clear` | in | the trusted software has sent the slice: empties the log and drops all partial matches and the repeat state |
| `spec_out` | out | the rewrite being applied this cycle (`en`, `addr`, `value`) |
| `reset_req` | out | Memory Monitor exception |

Cycle by cycle:

1. Cycle t: `hw_en`. The pair is written at `CF_size` and `CF_size += 2`.
   All detectors classify the pair.
2. Cycle t+1: a detector that saw **last** is in Detect. The MUX, Repeat Detect
   and Memory Interface are combinational, and the rewrite of CF_Log and
   `CF_size` happens at the end of this cycle.

The rewrite and an append cannot share a cycle, so `hw_en` must not be high in
two consecutive cycles. An assertion in the top checks this. On the MCU this
holds because jumps take several cycles. When the log is full, appends are
dropped and `log_overflow` is set. The detectors ignore dropped transfers. The
CFA logic is expected to send the slice first.

Reset is asynchronous and active low. Storage words are not reset, except
BlockMem, which clears to zero.

## Parameters

| parameter | default | origin |
|---|---|---|
| `N_BLOCKS` | 8 | the paper evaluates 1 to 8 sub-paths; 8 is its largest configuration |
| `CFLOG_WORDS` | 128 | 256-byte CF_Log slices, as in the paper's latency measurements |
| `BM_WORDS` | 256 | this design's choice |
| `BM_BASE`, `TCB_BASE`, `TCB_END` | `0x0400`, `0xA000`, `0xAFFF` | this design's choice |
| address / ID / length widths | 16 / 8 / 8 (in `speccfa_pkg`) | from the paper (16-bit MSP430, 8-bit ID and length) |

## Where this RTL departs from, or settles, the paper

The paper gives most of this logic as equations. Some of them disagree with
each other or with the paper's prose. In each case the RTL follows the reading
that makes the scheme work:

* **Pair addressing.** The equations read `block_src` at `base + block_ptr + 1`
  and `block_dest` at `base + block_ptr + 2`. That does not fit the stated
  layout of two words per pair, or the chain `base + 2*len + 1`. The RTL reads
  pair k at `base + 2k + 1` and `base + 2k + 2`.
* **Start address of a detected sub-path.** The equation `(CF_size - 2) -
  2*len`, updated only when `repeat_ctr = 2`, would point one entry before the
  sub-path (with `CF_size - 2` taken as the last pair's offset, as the paper
  says). Holding the address during a run would also stop later repeats from
  being recognised. The RTL registers the true start on every completion.
* **`spec_en`.** The paper ORs ungated repeat conditions into `spec_en`. Here
  the repeat conditions require a detection in the same cycle, so `spec_en =
  detect_any`.
* **When `last_ID`/`last_addr` load.** Read literally, the paper loads them only
  while `repeat_ctr = 2`. Then the first repeat of a sub-path that follows a
  run would be missed. The RTL loads them on every detection that is not a
  later repeat.
* **Where the base chain is computed.** The paper has each detector compute
  its own block's base. Here BlockMem walks the headers and hands each detector
  its base and header. The result is the same, and it avoids a false
  combinational path through the shared read-port array.
* **Additions of this design:** empty slots (`len = 0`), the `log_clear`
  flush, a valid bit in the repeat state, counter saturation, the memory map,
  and BlockMem with combinational read ports and a clear-to-zero reset. The
  paper gives no cycle timing. The one-cycle detect and rewrite above is this
  design's.

The paper also describes a software version running in the TrustZone Secure
World of an ARM Cortex-M33. That version has no hardware, and none is given
here.

## Files

| file | contents |
|---|---|
| `rtl/speccfa_pkg.sv` | widths, `detect_t`, `spec_t`, state encoding |
| `rtl/block_detect.sv` | one sub-path detector (state machine) |
| `rtl/detect_mux.sv` | priority selection, `detect_any` |
| `rtl/repeat_detect.sv` | ID versus repetition count |
| `rtl/mem_interface.sv` | CF_Log / `CF_size` rewrite |
| `rtl/mem_monitor.sv` | BlockMem protection |
| `rtl/blockmem.sv` | speculation storage and header chain |
| `rtl/cflog_mem.sv` | CF_Log words and `CF_size` |
| `rtl/speccfa_top.sv` | everything wired together |
| `tb/<module>_tb.sv` | one self-checking testbench per module |
| `tb/speccfa_workload_tb.sv` | the introductory example and a loop-heavy program, two slots |

## Simulating

Each testbench prints `TB_RESULT checks=N failures=M` and stops. With
Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
    rtl/speccfa_pkg.sv tb/speccfa_top_tb.sv --top-module speccfa_top_tb -o sim
./obj_dir/sim
```

Replace `speccfa_top_tb` with any other testbench name.

`speccfa_top_tb` runs the design at its default size. It loads seven sub-paths
into BlockMem from trusted code and leaves slot 7 empty. It then streams about
9000 transfers: whole sub-paths, often repeated, abandoned prefixes and
random pairs from the same address pool. A reference model written at the
level of log entries predicts `CF_size` after every transfer and every CF_Log
word before each slice is cleared. In the stream, sub-path 2 is a suffix of
sub-path 3, so simultaneous completions happen, and sub-path 5 sits inside
sub-path 6, so partial matches are dropped. The test counts ID replacements,
first and later repeats, simultaneous detections, dropped partial matches,
mismatches, full slices and both monitor resets, and fails if any of them never
occurs. It also tries an untrusted write and a DMA access to BlockMem. The
module testbenches check their blocks one by one: directed edge cases, plus
random stimulus against independent models. The Block Detect testbench also
checks the one-cycle detect latency.

`speccfa_workload_tb` runs the top with two sub-path slots and 128-word
(256-byte) slices, the setting used for the latency measurements. First it
replays the introductory example: with sub-path ID 1 = A B D G (each letter is
the transfer into that node), the stream A B D G, A C D F G, A B D G,
A B C D F G must leave the log as `1`, then `1 A C D F G`, then
`1 A C D F G 1` (not adjacent to the first, so a new ID and not a count), then
`1 A C D F G 1 A B C D F G`. It then runs a synthetic sensor-style program
for 400 iterations: a 3-transfer busy-wait body repeated 5 to 30 times, a
5-transfer measurement routine and two unpredictable transfers. Both recurring
paths are speculated. The testbench plays the trusted software that ships each
full slice. It also plays the verifier: it expands every ID and count back
into transfers and requires the result to equal the issued stream. A typical
run needs 34 slices where the raw trace would need 372. The program is
synthetic: the traces of the paper's six sensor applications are not
available, so their reductions are not reproduced here.

What has not been verified: the design has not been run against a real
openMSP430/ACFA system or on an FPGA, so its timing contract with the CFA logic
(one append at most every other cycle) is an assumption about that logic.
