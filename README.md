# Resistive similarity-search array for long-read pre-alignment

Long DNA reads (thousands of bases, 1-20% insertion, deletion and substitution
errors) must be placed on a reference genome before they can be aligned. Full
alignment of every read against the whole reference is far too slow. This
design is a pre-alignment filter that works by brute force and in parallel.
The reference is stored in a large in-memory-compute array, 240 bases per Word
Row. A short piece of the read, a *chunk* of up to 240 bases, is slid across
every position of the reference. At each position every row reports whether
the chunk's Hamming distance to the reference there is at or below a
threshold.

Two random DNA strings disagree in 3 of 4 bases, so random positions score
about 75% mismatches. A chunk that lines up with its true origin scores far
lower, even when indels break it into pieces: the longest indel-free stretch
lines up, and the rest scores like random text. A threshold of about 50-65% of
the chunk length separates the two cases. The output is one bit per Word Row
per step. From the row index and the step's offset the host computes the
reference coordinate.

The RTL here models the array as digital logic: the storage, the per-Sub-Word
mismatch counts, the adders and comparators, the shared key lines and the
compare schedule. In silicon, each bitcell is a memristor with two
transistors, and each count comes from charge sharing on an analog match line
read by a 4-bit ADC. Here that analog path is an exact digital count.

## Storing and comparing a base

Each base takes four bitcells in one-hot code: A=`1000`, C=`0100`, G=`0010`,
T=`0001`. A stored `1` is a memristor in its high-resistance state, and a
stored `0` is in its low-resistance state. During a compare the key bit drives
the cell's selector transistor. A cell leaks match-line charge only when its
selector is on (key bit 1) and its memristor is low-resistance (stored 0). For
one base this happens exactly when the key's base differs from the stored
one, and then in exactly one of the four cells. A 2-bit code would not work:
some pairs of bases would differ in one bit and others in two. A key group of
`0000` turns all four selectors off. That is how bases are masked out.

A **Sub-Word** (`rassa_subword`) is 60 cells, or 15 bases, on one match line.
Its score is the number of leaking cells, 0..15, the range of the 4-bit ADC.
In the model the score is `$countones(key & ~stored)` clipped to 15. It is
registered at the end of the compare cycle, which stands for the ADC sampling
point.

A row is written in two cycles. `OP_WRITE0` switches every cell whose data bit
is 0 to low resistance. `OP_WRITE1` switches every cell whose data bit is 1 to
high resistance. Loading L reference bases therefore takes 2*ceil(L/240)
cycles. The cell array has no reset, because it stands for nonvolatile
storage.

## Word Row: adder, threshold and the row-to-row score

A **Word Row** (`rassa_word_row`) has 16 Sub-Words (240 bases, 960 cells), an
adder and a `<=` comparator. The row's previous-score input is the stored
score of the row above. The operation issued to the row says how to use it:

| operation   | adder input                        | result                                   |
|-------------|------------------------------------|------------------------------------------|
| `OP_SINGLE` | 16 Sub-Word scores                 | `match = sum <= threshold`               |
| `OP_EVEN`   | 16 Sub-Word scores                 | sum kept in `score_q`, no match          |
| `OP_ODD`    | 16 Sub-Word scores + `prev_score`  | `match = sum <= threshold`               |

Scores are 9 bits wide, enough for two rows' partial sums. Inside the adder
the sum has one more bit, so that a full-scale `prev_score` cannot wrap.

## Sliding a chunk across row boundaries

This is the least obvious part of the design. Let R = 240 and let C be the
chunk length. Every row compares at the same time, so one cycle examines the
same offset in every row. The offsets where the chunk lies wholly inside a
row are 0..R-C. There are R-C+1 of them, and each takes one `OP_SINGLE`
cycle.

Then the chunk crosses the boundary into the next row: s bases (s = 1..C-1)
hang past the end of the row. No single row sees the whole chunk, so the
compare takes a pair of cycles:

* **even cycle**: the first C-s chunk bases are applied to the last C-s key
  lines. Every row scores them against its own last bases and keeps the score.
* **odd cycle**: the last s chunk bases are applied to the first s key lines.
  Every row scores them against its own first bases and adds the score kept by
  the row above. Row r's result then covers the chunk placed at
  (r-1)*R + R-C+s.

Before each even cycle the pattern moves one base right. The head gets one
base shorter and the tail one base longer. A whole chunk takes
(R-C+1) + 2(C-1) = R+C-1 cycles: 439 for C = 200 and 339 for C = 100. For
C = 200, cycles 1..41 are single cycles. Cycle 140 is the even cycle with
s = 50, which applies the first 150 bases. Cycle 141 is its odd partner, which
applies the last 50 bases.

The sequencer (`rassa_controller`) tags each result vector with a signed
offset `res_offset`. A set bit r means a candidate start at reference position
`r*240 + res_offset`:

* in single cycles, `res_offset` is 0..R-C;
* in odd cycles, `res_offset` is s-C, which is negative.

Row 0 has no row above. Its previous-score input is tied to full scale, so an
odd cycle never flags a chunk that would start before the reference.

## Key Pattern register

`rassa_key_pattern` produces the key lines for this schedule with a
two-row-long shift register of 480 one-hot base positions. The chunk is loaded
into positions 0..C-1 and everything else is zero, which means masked. The
register shifts right by one base after every single cycle and after every odd
cycle. The lower 240 positions drive the key lines in single and even cycles.
The upper 240 positions drive them in odd cycles: they hold the chunk's tail,
which has passed the row boundary. Masking needs no extra logic, because every
position outside the chunk is already `0000`.

## Timing

One operation is issued per clock; the paper's circuit runs at 1 GHz.

* A Sub-Word score is registered one edge after the operation.
* The row's `match` and `score_q` are registered one edge later, so there are
  two cycles of latency.
* Because an even cycle is always followed at once by its odd cycle, the row
  above's `score_q` is ready exactly when the odd cycle's sum needs it.
* The sequencer delays its tags (`res_valid`, `res_offset`, `res_last`) by the
  same two cycles.
* A row load takes two cycles. A new load request is taken during the second
  write cycle, so back-to-back loads write one row every two cycles.
* A compare takes R+C-1 busy cycles.

## Top-level interface (`rassa_top`)

| port | dir | meaning |
|------|-----|---------|
| `load_valid`, `load_ready`, `load_row`, `load_data[240]` | in/out | write 240 bases (2-bit codes A=0 C=1 G=2 T=3) into one row |
| `cmp_start`, `cmp_accept`, `cmp_len`, `chunk[240]`, `threshold` | in/out | start a compare; chunk, length (1..240) and threshold (a mismatch count, e.g. 110 = 55% of 200) are captured on `cmp_accept` |
| `busy` | out | a load or compare is running |
| `res_valid`, `res_match[N_ROWS]`, `res_offset`, `res_last` | out | one result vector per single/odd cycle |

A load request has priority over a compare request in the same idle cycle.
These handshakes are this implementation's own choice. The paper defines no
I/O.

## Sizes

| quantity | paper | RTL default |
|---|---|---|
| bases per row (cells) | 240 (960) | 240 (960) |
| Sub-Words per row, cells per Sub-Word | 16, 60 | 16, 60 |
| ADC resolution | 4 bits | 4-bit score (exact count) |
| Word Rows | 131072 (2^17), 31.5 Mbp | `N_ROWS` = 8192 (2^13), 1.97 Mbp |
| clock | 1 GHz | - |

The row count was scaled down because of elaboration memory, not simulation
speed. A lint elaboration of the array costs about 0.9 MB per Word Row: 3.7 GB
at 4096 rows and 7.5 GB at 8192. A SystemVerilog parse adds about 0.4 MB per
row. At that rate 2^17 rows would need over 150 GB. 2^14 rows would need
about 15 GB for the lint alone, too much to run beside the parse and
synthesis of the same design within 32 GiB, so the default is 2^13 rows.
`N_ROWS` is a parameter of `rassa_top`, and any value works.

At 8192 rows the array holds 1.97 Mbp. That is not enough for the E. coli
reference (4.6 Mbp, 19167 rows) or the yeast reference (11.7 Mbp, 48750 rows).
The paper's full die holds both. Chunks of 100 and 200 bases fit, and reads of
any length are streamed chunk by chunk. A 300-base short read does not fit in
one chunk and must be split into two.

## What follows the paper and what does not

Taken from the paper:

* one-hot storage and masking, and the count of R_ON cells under an active
  selector;
* 60 cells and a 4-bit score per Sub-Word, and 16 Sub-Words per row;
* the summing of Sub-Word scores and the `<=` threshold compare;
* the row-to-row score path and the even/odd pair;
* the R+C-1 cycle schedule with its shift before each even cycle;
* two-cycle row writes;
* the one-bit-per-row output.

Choices made here, where the paper is silent:

* the register placement and the two-cycle latency;
* the score widths;
* ignoring `prev_score` outside odd cycles;
* tying off row 0's previous score;
* the two-row shift register that makes the key pattern;
* the 2-bit input code of the bases;
* the handshakes and the offset tag.

Not modelled:

* the analog match-line voltage and the ADC. The paper notes a possible ±1
  error for 60-cell lines, and this model counts exactly.
* precharge and evaluate as separate phases.
* the key-line drivers.
* the host-side step that merges candidate locations closer than one read
  length and drops reads with more than two locations.

The paper's alternative design, which sums match-line currents with analog
op-amps instead of ADCs, is a future-work direction and is not part of this
RTL.

## Files

| file | content |
|---|---|
| `rtl/rassa_pkg.sv` | constants, `base_t`, `row_op_t`, one-hot encoder |
| `rtl/rassa_subword.sv` | 60-cell Sub-Word with its mismatch count |
| `rtl/rassa_word_row.sv` | 16 Sub-Words, adder, comparator, kept score |
| `rtl/rassa_key_pattern.sv` | key line shift register |
| `rtl/rassa_controller.sv` | load and compare sequencer, result tags |
| `rtl/rassa_top.sv` | the array |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_rassa_workload` |

## Simulating

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M` and has a watchdog. To build and run one with
Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/rassa_pkg.sv tb/tb_rassa_top.sv --top-module tb_rassa_top
    ./obj_dir/Vtb_rassa_top

* `tb_rassa_subword` and `tb_rassa_word_row` compare the scores with counts
  computed in the testbench.
* `tb_rassa_key_pattern` checks every shift and both halves.
* `tb_rassa_controller` checks the whole schedule cycle by cycle for
  C = 200, 100, 240, 1 and random lengths, including 439 cycles for C = 200.
* `tb_rassa_top` runs the whole array with 6 rows. It loads a reference and
  compares chunks planted with substitutions, an insertion and a deletion, at
  positions inside one row and across row boundaries. It checks every result
  bit against a Hamming-distance model.
* `tb_rassa_workload` does the same with 64 rows. Its reads are synthetic
  1000-base reads with the error profiles of PacBio, CCS and ONT data, cut
  into 200- and 100-base chunks.

The full 8192-row array is not simulated. The largest simulated size is 64
rows. The logic of every row is identical, and rows interact only through the
shared key lines and the chain to the next row.
