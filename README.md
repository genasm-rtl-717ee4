# GenASM: a bitvector accelerator for approximate string matching

Read mapping in genome analysis must align a short or long query read
(the *pattern*) to a candidate region of the reference genome (the *text*)
while allowing substitutions, insertions and deletions. Dynamic programming
does this with a table of integers. The Bitap algorithm instead keeps, for
every allowed number of edits `d`, one bitvector over the pattern, and
updates all of them with shifts, ANDs and ORs. That maps naturally onto
narrow, regular hardware. GenASM adds two things to Bitap: it splits long
sequences into overlapping windows, so the hardware never needs more than
64 bits per vector, and it adds a traceback, so it can report the alignment
itself (a CIGAR string) and not only the edit distance.

This repository is synthesizable SystemVerilog for one GenASM accelerator,
in the configuration of the original GenASM work (MICRO 2020):

* window `W = 64` bases, window overlap `O = 24`;
* a processing block of `P = 64` processing elements (PEs), `ND = 64`
  edit-distance rows;
* one 8 KB DC-SRAM and 64 TB-SRAMs of 1.5 KB each;
* a traceback engine that emits one CIGAR operation per clock.

In the original system, 32 such accelerators sit in the logic layer of a
3D-stacked memory, one per vault. Only one accelerator is built here. Its
memory port and its host task port are plain top-level signals.

## 1. The Bitap recurrence, as the hardware sees it

Bases are 2-bit codes: `A=00 C=01 G=10 T=11`. For a window pattern of
length `Lp <= W`, pattern base `j` occupies bit `Lp-1-j`. The first pattern
base is therefore the most significant bit used. A **0 means "matches so
far"**, and unused bits above `Lp-1` are held at 1.

The text is scanned from its **last** base to its first. For each text base,
a pattern mask `PM` has a 0 wherever the pattern holds that base. With
`oldR[d]` the vectors after the previous text base, and `R[d]` the new ones:

```
R[0]  = (oldR[0] << 1) | PM
D     =  oldR[d-1]                    deletion
S     =  oldR[d-1] << 1               substitution
I     =  R[d-1]    << 1               insertion
M     = (oldR[d]   << 1) | PM         match
R[d]  =  D & S & I & M
```

Before the first text base, every `oldR` is all ones. After the window's
first text base (index 0), the window edit distance is the smallest `d`
whose `R[d]` has a 0 at bit `Lp-1`.

`genasm_pc` is exactly this equation. It is combinational and `W` bits
wide. For `d = 0` it forces `D`, `S` and `I` to all ones.

## 2. The processing block: a cyclic systolic array

`R[d]` for one text base needs `R[d-1]` for the same base, and `oldR[d-1]`
and `oldR[d]` from the previous base. `genasm_pb` places distance `d` on
PE `d mod P`. It lets text bases flow through the array as a diagonal
wavefront:

```
PE x computes distance d = g*P + x, for step tt of a P-base text tile,
in cycle  (tile * ND) + g*P + tt + x
```

Each PE (`genasm_pe`) registers three things:

* the `R` it produced, which becomes `R[d-1]` for PE x+1 in the next cycle;
* the `oldR[d-1]` it was given, forwarded one cycle later;
* its own `R`, which is `oldR[d]` for its next step.

Two flip-flops and a token register per PE are all the storage it needs.
The token carries the pattern mask, the text index, and the
valid/pad/first/last flags.

**Wrap-around (feedback).** When `ND > P`, the last PE's output is fed back
into PE 0 for pass `g+1`, which computes distances `P..2P-1`, and so on.
The controller spaces tiles `ND` cycles apart, so feedback and new input
never collide. An assertion checks this.

**Spill.** When the window is longer than the array (`W > P`), a PE
revisits the same distance row only after a whole tile has passed.
Meanwhile it has computed other rows. So the last step of every tile writes
`R` to a spill area in the DC-SRAM, and the first step of the next tile
reads it back as `oldR[d]`. The read request is issued one cycle early, so
the data arrives in time. The schedule produces at most one spill read and
one spill write per cycle, which is the DC-SRAM's port budget.

At the default size (`W = P = ND = 64`) there is one tile and one pass.
Feedback and spill then never occur, and a window's DC phase takes
`ND + P + 1 = 129` cycles. The reduced-size end-to-end test (`W=16`, `P=4`,
`ND=16`) exercises both feedback and spill.

**Padding.** A window shorter than `W`, at the end of the text, is fed with
leading "pad" steps. These output all-ones vectors, as if the text started
later. This keeps the schedule fixed.

Each PE also writes its step's **match, insertion and deletion** vectors
into its own TB-SRAM, at address `pass*W + textIndex`. The word layout is
`{match, insertion, deletion}`: 192 bits by 64 words, or 1.5 KB. The
substitution vector is not stored: it equals the deletion vector shifted
left by one.

## 3. Windows and traceback

The traceback engine `genasm_tb_engine` starts from the window distance `e`
at text index 0, pattern bit `Lp-1`. Each cycle it reads one TB-SRAM word:
the one from the PE that owns `curError`, at the address for the current
text index. It then picks an operation in this priority order:

1. insertion extension, or deletion extension (only directly after an
   insertion or deletion of the same kind: affine-gap preference);
2. match;
3. substitution;
4. insertion open;
5. deletion open.

With `subs_last = 1`, substitution moves after the two gap opens. A match
consumes one base of text and of pattern. A substitution consumes both and
costs one error. An insertion consumes pattern only, and a deletion
consumes text only. Both cost one error.

The bit it tests is `patternI` of the vector. The next read address is
computed combinationally from the chosen operation, so the engine produces
**one CIGAR op per cycle**. It stops after `W - O = 40` bases of text or of
pattern in a non-final window. In the final window (the one whose remaining
pattern fits in `W`), it runs until the pattern is used up.

The controller then advances `curText` and `curPattern` by what was
consumed, and adds the errors used to the running total. It then starts
the next window. The `O = 24` bases that were examined but not committed
are recomputed in the next window, which hides the window edge.

With no errors left (`curError = 0`) only a match is accepted. If no legal op is found, the task reports `fail`.

## 4. The DC controller and memory layout

`genasm_dc_ctrl` runs a task through these steps:

| Phase | Work |
|---|---|
| fetch | reads `ceil(text_len/32)` text words, then the query words, from the memory port. Up to one request per cycle; in-order responses. |
| window load | six DC-SRAM reads: three words of text, three of query. A funnel shift extracts the W bases at `curText` / `curPattern`. |
| mask build | four masks, one per base value, aligned so query base 0 sits at bit `Lp-1`; ones above. |
| DC run | injects one text base per cycle into the PB, last base first, in tiles of P; routes spill reads and writes. Keeps the smallest distance found. |
| TB | starts the traceback engine and waits for it. |
| next | advances the window, or finishes. |

DC-SRAM map at the default `DEPTH = 1024` words of 64 bits:

| Words | Content | Capacity |
|---|---|---|
| 0 .. 511 | text region, 32 bases per word, base `j` at bits `2j+1:2j` | 16,384 bases |
| 512 .. 959 | query | 14,336 bases |
| 960 .. 1023 | spill rows, one per distance | ND = 64 |

A 10 Kbp long read (313 words) against an 11.5 Kbp reference region
(360 words) fits. Inputs of 100 Kbp or 1 Mbp, as in whole-sequence edit
distance runs, do not. The controller loads both sequences whole before
the first window.

**Modes** (`mode_e` in `genasm_pkg`):

* `MODE_ALIGN` runs everything and streams the CIGAR ops on
  `cigar_valid` / `cigar_op` (`M=0 S=1 I=2 D=3`).
* `MODE_EDIT` runs the same windows but does not drive the CIGAR stream.
  `edit_dist` is the sum of the window edit distances.
* `MODE_FILTER` is pre-alignment filtering. It stops as soon as the
  running total exceeds `threshold`, and reports `filter_pass`.

## 5. Top-level interface and timing (`genasm_top`)

| Signal | Dir | Meaning |
|---|---|---|
| `start` | in | one-cycle pulse while `busy` is low; latches the task |
| `text_addr`, `text_len` | in | word address and length in bases of the reference region |
| `pat_addr`, `pat_len` | in | the same, for the query |
| `mode`, `subs_last`, `threshold` | in | see above |
| `busy` | out | high from start until `done` |
| `done` | out | one-cycle pulse; `edit_dist`, `fail`, `filter_pass`, `windows` valid |
| `last_dc_cycles` | out | cycle count of the last window's DC phase |
| `mem_req_valid/ready/addr` | out/in/out | word read requests |
| `mem_rsp_valid`, `mem_rsp_data` | in | 64-bit responses, in request order, any latency, stalls allowed |
| `cigar_valid`, `cigar_op` | out | one op per cycle during traceback (ALIGN mode only) |

The reset `rst_n` is asynchronous and active-low. A window costs
about six load cycles, a few setup cycles, `NT*ND + P + 1` DC cycles and
one cycle per CIGAR op. Measured at 15% error, this design needs 4,663
cycles for a 1 Kbp read and about 47,500 for a 10 Kbp read. At 1 GHz that
is about 214,000 and 21,000 alignments per second per accelerator. The
original analytical model estimates 236,686 and 23,669.

Parameters of `genasm_top` (defaults are the published configuration):

| Parameter | Default | Meaning |
|---|---|---|
| `W` | 64 | window and vector width (at most 64, the DC-SRAM word) |
| `O` | 24 | window overlap |
| `P` | 64 | PEs in the processing block; `W` and `ND` must be multiples of it |
| `ND` | 64 | distance rows computed per window (maximum window edit distance `ND-1`) |
| `DC_DEPTH` | 1024 | DC-SRAM words |
| `LW`, `MAW` | 24, 32 | length/count width and memory address width |

## 6. Where this design departs from the original description

* **Pattern masks.** The original keeps the query's pattern bitmasks in the
  DC-SRAM. Here the query is stored as 2-bit bases, and the four masks of
  each window are built in the controller as the window is loaded.
* **Final window.** The window walk only gives the `W-O` stopping rule.
  Here the window whose remaining query fits in `W` is run to the end of
  the query.
* **Filter mode.** Stopping early once the threshold is exceeded is this
  design's choice. Without it the filter would simply run an edit-distance
  task.
* **Padding, spill addressing and the PE token** are own choices that
  realise the published schedule.
* **Multi-word vectors.** Windows wider than one 64-bit word (vectors
  processed as several machine words) are not built. The main
  configuration never needs them.
* **Sequence length.** Both sequences are loaded whole into the DC-SRAM
  before the first window, so a task is limited to 16,384 text bases and
  14,336 query bases. Edit distance between sequences of 100 Kbp or more
  would need the buffer to be refilled while the windows advance. That is
  not built.
* **Filter.** The filter runs the same window loop as alignment, with the
  traceback, because the traceback decides where the next window starts.
* **Vault replication.** The 32-vault system and the memory-side vault
  controller are not built. The host and memory sides are ports.
* The published block diagram of the traceback datapath labels the last
  TB-SRAM with PE number 65. The text says 64 PEs with 64 TB-SRAMs, and
  that is what is built.
* Lint reports `rst_n` as "used both synchronously and asynchronously" in
  `genasm_pb` and `genasm_top`. The synchronous use is only the
  `disable iff` of the assertions.

## 7. Files

| File | Contents |
|---|---|
| `rtl/genasm_pkg.sv` | word size, base, CIGAR and mode enums |
| `rtl/genasm_pc.sv` | processing core: the Bitap step |
| `rtl/genasm_pe.sv` | processing element: PC plus wavefront registers and token |
| `rtl/genasm_pb.sv` | processing block: P PEs, feedback, spill routing, distance detect |
| `rtl/dc_sram.sv` | DC-SRAM, 1R1W, synchronous read |
| `rtl/tb_sram.sv` | TB-SRAM, single port |
| `rtl/genasm_dc_ctrl.sv` | DC controller |
| `rtl/genasm_tb_engine.sv` | traceback engine |
| `rtl/genasm_top.sv` | one accelerator |
| `tb/genasm_ref_pkg.sv` | software reference: windowed Bitap, traceback, full alignment, and a DP edit-distance bound |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_genasm_top_full` |

## 8. Verification

Every testbench is self-checking. Each compares against values computed
independently, usually by `genasm_ref_pkg`. Each has a watchdog and ends
with a line `TB_RESULT checks=N failures=M`.

| Testbench | Size | What it checks |
|---|---|---|
| `tb_genasm_pc` | W=64 | worked Bitap examples and random vectors against the equations |
| `tb_genasm_pe` | W=8, P=2, ND=4 | registered outputs, oldR selection, TB writes, spill, detect |
| `tb_genasm_pb` | W=16, P=4, ND=16 | all R vectors of random windows against the reference; cycle count `NT*ND+P+1`; spill traffic count |
| `tb_dc_sram`, `tb_tb_sram` | default | read-old-data behaviour, port semantics |
| `tb_genasm_tb_engine` | W=8, O=3, P=2 | worked traceback examples (match, substitution, insertion, deletion, gap extension); one op per cycle; random windows against the reference |
| `tb_genasm_dc_ctrl` | reduced | memory requests, injected tokens and masks, handoff to traceback, window walk, totals, filter early stop |
| `tb_genasm_top` | W=16, O=6, P=4, ND=16 | 60 random tasks end to end: CIGAR stream vs reference, CIGAR consistency with the sequences, totals against a DP bound. It counts, and requires at least once: feedback, spill, padding, short pattern, multi-window, gap extension, `subs_last`, filter early stop, edit mode and memory stall. |
| `tb_genasm_top_full` | defaults | 100, 150 and 250 bp reads at 5% error; 1 Kbp and 10 Kbp reads at 15% error against regions 15% longer; filter pairs of 100 bp (threshold 5) and 250 bp (threshold 15), similar and dissimilar; 129-cycle DC phase; one op per cycle; cycle counts within 25% of the published throughput |

To run one with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -yrtl -ytb --top-module tb_genasm_top \
    rtl/genasm_pkg.sv tb/genasm_ref_pkg.sv tb/tb_genasm_top.sv -o sim
./obj_dir/sim
```

The full-size test takes about half a minute; the others take seconds.
The seed of the random tests is set with `+verilator+seed+N`.
