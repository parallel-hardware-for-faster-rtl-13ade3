# A five-stage processor for Arabic verb-root extraction

Most Arabic verbs are built from a root of three or four letters. Letters are
added in front of the root (prefixes), behind it (suffixes) and sometimes inside
it. A *linguistic-based stemmer* recovers the root by trying every way of
stripping a prefix and a suffix from the word. It keeps the pieces that are three
or four letters long and looks them up in a list of known roots. In software this
is a double loop over prefix and suffix lengths. In hardware every choice can be
tried at once.

This RTL implements such a stemmer as a fixed five-stage datapath. It follows the
processor in *Parallel hardware for faster morphological analysis* (Damaj,
Imdoukh, Zantout, 2017). A word of up to 15 letters goes in, and its trilateral
and quadrilateral roots come out five clock edges later. The same datapath runs
under two control schemes:

* a **non-pipelined** one that takes a word every five cycles;
* a **pipelined** one that takes a word every cycle.

The original reports 10.4 MHz and 10.78 MHz on a Stratix IV FPGA for these two
schemes. That is about 2.1 and 10.8 million words per second.

Everything is synthesizable SystemVerilog (IEEE 1800-2017). `rtl/` holds the
design and `tb/` the self-checking testbenches.

## Characters and words

* A **character** is its 16-bit Unicode code point, for example `16'h0633` for
  sin (س). Diacritics are assumed to be stripped already.
* A **word** (`arabic_pkg::word_t`) is an array of 15 characters. Fifteen is the
  length of the longest Arabic verb form, أفاستقيناكموها.
* Element 0 holds the *first* letter of the word. That is the right-most letter
  as written, because Arabic is written right to left.
* A shorter word is left-aligned. Its unused tail positions hold `16'h0000`, and
  the design finds the end of the word from the first such position.
* A three-letter stem (`stem3_t`) and a four-letter stem (`stem4_t`) are
  ordered the same way: index 0 is the first letter.

Letters that may form affixes:

| role    | letters                        | code points |
|---------|--------------------------------|-------------|
| prefix  | أ ت س ف ل ن ي (7)              | 0623 062A 0633 0641 0644 0646 064A |
| suffix  | إ ي ت ن ك م و ه ا (9)          | 0625 064A 062A 0646 0643 0645 0648 0647 0627 |

The source names the nine suffix letters only through a mnemonic word that has
eight distinct letters. Plain alif (ا) is the ninth letter here, because the
source's own example suffix, ناكموها, ends in it.

## The five stages

Each stage ends in a register array. The control unit raises the load `ld[k]`
of array k+1.

| stage | combinational work | register array (loaded by) |
|---|---|---|
| 1 | none | `regC` ×15: the input characters, `Chars` (`ld[0]`) |
| 2 | `check_prefix` ×5 on letters 0–4; `check_suffix` ×15 on every letter | `isp` (5 bits), `iss` (15 bits), plus a copy of the word and its used mask (`ld[1]`) |
| 3 | `prd_prefixes`, `prd_suffixes`: keep only the usable affix runs | `pp_r` (5), `ps_r` (15), word copy (`ld[2]`) |
| 4 | `generate_stems`: cut all 3- and 4-letter candidates | `reg3C` ×6 and `reg4C` ×6, with slot-valid bits (`ld[3]`) |
| 5 | `compare_stems`: look the candidates up in the root list | `root3` (`reg3C`), `root4` (`reg4C`), found flags (`ld[4]`) |

* `check_prefix` and `check_suffix` are banks of `comparator_hex` equality
  comparators against constant letters, ORed together.
* `compare_stems` is built from `stem3_comparator` and `stem4_comparator`
  instances. There is one per pair of stem slot and stored root, 6×15 + 6×4 in
  all.

### Affix runs (stage 3)

A flag from stage 2 only says that one letter *could* belong to an affix. Most
such letters sit in the middle of the word and are root letters.

A prefix must be a run of prefix letters that starts at the first letter. A
suffix must be a run of suffix letters that ends at the last letter. The
producers keep exactly those runs:

* **`pp_o[i]`** is 1 when letters `0..i` are all prefix letters. The stem may
  then start at `i+1`.
* **`ps_o[j]`** is 1 when letters `j..len-1` are all suffix letters. The stem
  may then end just before `j`.

Example: يكتبون (y-k-t-b-w-n).

* Raw suffix flags, first letter on the right: `1 1 0 1 1 1`. The letters y, k
  and t are suffix letters too.
* After masking: `1 1 0 0 0 0`. The b (ب) ends the suffix run, so only w and n
  can be suffix letters.

Two options are always open and are not flagged. They are added in stage 4:

* no prefix: the stem starts at letter 0;
* no suffix: the stem ends at the last letter.

### Cutting stems (stage 4)

A stem runs from start `a` to end `e`, where `e` is exclusive.

* The possible starts are six: `a = 0`, or `a = i+1` for each flagged `pp[i]`.
* The possible ends are `e = len`, or `e = j` for each flagged `ps[j]`.

For each start there is at most one end giving three letters (`e = a+3`) and one
giving four letters (`e = a+4`). So each size has at most six stems, and six
slots per size are always enough.

The stems are packed into the lowest free slots in order of increasing start.
This is what the two counters of the original's truncation loop do. Slots left
over are marked invalid and read as zero.

Worked example: سيلعبون (s-y-l-'-b-w-n, "they will play").

* Prefix run: س ي ل. This RTL also flags the third letter, as explained below.
* Suffix run: و ن.

| start | three letters | four letters |
|---|---|---|
| 0 | – (would end at 3) | – (would end at 4) |
| 1 | – | يلعب (ends at 5, before و) |
| 2 | لعب (ends at 5) | لعبو (ends at 6, before ن) |
| 3 | عبو (ends at 6) | عبون (ends at 7, the word end) |

لعب is the first three-letter stem found in the root list.

The source's table for this word does not flag the third letter, so it lacks the
two stems of start 3. It gives no rule that would exclude that letter. The extra
stems cannot change which root is found, because lower slots win.

### Root lookup (stage 5)

Every valid slot is compared with every stored root in parallel. The lowest
matching slot wins, which means the stem with the shortest prefix.

* `root3`/`found3` report the trilateral result.
* `root4`/`found4` report the quadrilateral result.

Both can be found for the same word. Deciding between them is left to the user
of the core.

**The root list is a stand-in.** The source compares against "stored roots" but
publishes neither the list nor its size. `arabic_pkg` stores:

* the 15 trilateral roots that the source uses as examples: سقي لعب درس صحب علم
  كفر قول نفس نزل عمل خلق جعل كتب كون رأى;
* four quadrilateral roots: حزرج from the source, and زلزل دحرج ترجم added so
  the four-letter path can be exercised.

To use the core on real text, replace `ROOTS3`/`ROOTS4` and their counts
`N_ROOT3`/`N_ROOT4`. A full dictionary for Quranic Arabic has about 1,800 roots.

Cost grows linearly with the list: 6 × N comparators of 48 or 64 bits, and an
OR tree. At that size, a sorted memory with a search would be the better
structure.

## Control: two schemes

`control_unit` has a parameter `PIPELINED` (default 1).

* **Non-pipelined** (`PIPELINED = 0`): a five-state machine.
  * `S1_LOAD_CHARS` waits for `in_valid` and then loads `Chars`.
  * `S2_CHECK`, `S3_PRODUCE`, `S4_STEMS` and `S5_ROOTS` each load one array.
  * The machine then returns to S1.
  * `in_ready` is high only in S1.
  * An assertion checks that at most one array loads per cycle.
* **Pipelined** (`PIPELINED = 1`): all five loads are tied high.
  * A five-bit shift register carries a valid bit along with each word.
  * `in_ready` is constant 1. There are no stalls, because nothing downstream
    can refuse a result.

Timing is the same in both schemes:

* A word is taken on a rising edge where `in_valid && in_ready`. That edge is
  the first of the five loads.
* Its roots are loaded on the fifth edge, and `out_valid` is high for the cycle
  after that edge.
* The result registers then hold until the next result.
* In pipelined mode, N back-to-back words need N + 4 edges.

Every stage of the datapath is combinational between registers. The clock period
is therefore set by the slowest stage, and that is stem generation or the lookup.
The source names these same processes as the ones to break up for a faster core.
It attributes its own low clock rate of about 10 MHz to hold-time checks.

## Interface of `ama` (the top)

| port | dir | width | meaning |
|---|---|---|---|
| `clock` | in | 1 | rising-edge clock |
| `reset` | in | 1 | synchronous, active high; clears every register and the control state |
| `word_i` | in | 15×16 (`word_t`) | word, letter 0 first, unused positions 0 |
| `in_valid` / `in_ready` | in / out | 1 | word handshake |
| `root3`, `found3` | out | 3×16, 1 | trilateral root and whether one was found |
| `root4`, `found4` | out | 4×16, 1 | quadrilateral root and whether one was found |
| `out_valid` | out | 1 | results belong to a word, for one cycle |

The module name and the port names `clock`, `reset`, `word_i`, `root3` and
`root4` are those of the original's simulation traces. The handshake and the
found flags are additions of this RTL.

## Where this RTL fills gaps or departs from the source

* **Word carried with the flags.** Stem generation needs the word itself. The
  source's datapath diagram shows no copy of the word travelling down the
  pipeline. Here, stages 2 and 3 register a copy, so overlapping words cannot mix
  in pipelined mode. This costs about 510 flip-flops.
* **End of word.** The source expects "unused" positions but gives no encoding.
  Here it is `0x0000`, and a *used* mask derived from it feeds the suffix
  producer and the stem generator.
* **Ninth suffix letter:** plain alif (see above).
* **Prefix masking:** this RTL masks only at the first non-prefix letter (see
  the worked example).
* **A misprint in the source.** Its table of stems for سيلعبون gives the wrong
  prefix index for لعبو. Its own size formula shows which index is meant, and
  that index is used here.
* **Two root outputs.** The source's process diagram ends in a single "extract
  root" box, but its datapath has two outputs; both are kept.
* **An unusable example.** The source's second simulation example is printed
  with two different input words and two different roots, and neither root is
  a substring of its word, so it cannot be reproduced by stem cutting.
* **Root printed with yaa.** The source's simulation trace prints the root of
  the longest word as Sin-Qaf-Yaa (ي), while its caption writes the last letter
  as alif maqsura (ى). The stored root uses yaa, as in the trace.
* **Lookup priority, found flags and handshake** are this RTL's choices.
* **Root list:** a stand-in (see above).
* **No infix processing.** The source improves accuracy with two software
  passes: removing an infix letter in second position, and turning a medial alif
  back into waw (قال → قول). They run only in its software stemmer and are
  listed there as future hardware work, so they are not in this core. A word
  such as فقالوا therefore yields no stored root here.
* **Reset** is synchronous and active high; the source does not say.

## Size

After generic synthesis with default parameters, the core has about:

* 1,200 word-level cells, 425 of them 16-bit equality comparators;
* about 1,400 flip-flops.

The source's FPGA build used 1,057 registers for the pipelined core. It must
therefore have held less of the word between stages, or fewer flag bits.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with a
watchdog. The reference model in `tb/stem_ref_pkg.sv` is written the way the
software stemmer works: it enumerates prefix and suffix *lengths*. It has its own
copy of the letter sets, so a wrong constant in the RTL shows up as a mismatch.

Example, the full processor at default parameters:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/arabic_pkg.sv tb/stem_ref_pkg.sv rtl/*.sv tb/ama_full_tb.sv \
  --top-module ama_full_tb -Mdir obj_full
./obj_full/Vama_full_tb
```

Use the same command with any other `tb/<unit>_tb.sv` and `--top-module <unit>_tb`.

| testbench | what it shows |
|---|---|
| `ama_full_tb` | Default (pipelined) core: the source's example words give the roots it reports (سقي from the longest word, لعب, دحرج). The longest word and its root are printed by letter name, as in the source's simulation trace. Then streams of 980 and 77,476 generated words, the word counts of the source's two evaluation texts, each taking word count + 4 edges. |
| `ama_tb` | Pipelined and non-pipelined cores side by side. Checks latency, rates of one word per cycle and one per five cycles, and that each mechanism occurs: root3 found, root4 found, no root, prefix masking, suffix masking, all six slots full, short and 15-letter words, overlapping words, a word held off. |
| `datapath_tb` | Datapath with all loads high, and with one load at a time while the input changes. |
| `control_unit_tb` | Cycle-level models of both schemes under random traffic. |
| unit testbenches | Each comparator, checker, producer, `generate_stems` (slot order and contents) and `compare_stems` (priority), against independent computations. |

Generated words mix random letters with words built around stored roots, so that
found and not-found results both occur often.

## Files

| file | contents |
|---|---|
| `rtl/arabic_pkg.sv` | types, letter sets, root list |
| `rtl/ama.sv` | top: control unit + datapath |
| `rtl/control_unit.sv` | the two control schemes |
| `rtl/datapath.sv` | five stages and register arrays |
| `rtl/check_prefix.sv`, `rtl/check_suffix.sv`, `rtl/comparator_hex.sv` | letter checks |
| `rtl/prd_prefixes.sv`, `rtl/prd_suffixes.sv` | affix-run masking |
| `rtl/generate_stems.sv` | stem cutting and packing |
| `rtl/compare_stems.sv`, `rtl/stem3_comparator.sv`, `rtl/stem4_comparator.sv` | root lookup |
| `rtl/ld_reg.sv` | load-enable register (regC, reg3C, reg4C, reg) |
| `tb/stem_ref_pkg.sv` | reference stemmer, UTF-8 word helper, word generators |
