# An in-memory hyperdimensional-computing accelerator for food profiling

Food profiling asks which species are present in a food sample, and in what
proportion, given the short DNA reads a sequencer produced from it. This
design treats it as a classification problem in hyperdimensional (HD)
space. Every reference genome (chicken, pork, turkey, ...) is encoded once
into a 40,000-bit binary *prototype* vector. Every read is then encoded the
same way into a *query* vector and compared with all prototypes. The
comparison counts matching bit positions. A read may resemble one, several or
none of the references. So the hardware does not pick a winner: it returns
every score, and the host applies a threshold and estimates the abundances.

The accelerator has five units:

| unit | file | role |
|---|---|---|
| item memory (IM) | `rtl/item_memory.sv` | the four atomic vectors, one per base A/C/G/T |
| encoder | `rtl/encoder.sv` = `rtl/binder.sv` + `rtl/bundler.sv` | bases → N-grams → one binary HD vector |
| associative memory (AM) | `rtl/assoc_memory.sv` | prototypes stored in two crossbars, read with ADCs |
| similarity check | `rtl/similarity_check.sv` | adds the ADC codes into one score per prototype |
| controller | `rtl/controller.sv` | FSM that runs build and query jobs |

`rtl/demeter_top.sv` wires them together. `rtl/demeter_pkg.sv` holds the
shared sizes and types. In the target technology the IM and the AM are
phase-change-memory (PCM) crossbar arrays, and the encoder and similarity
check sit in their periphery. In this RTL the arrays are ideal digital
memories (see *Departures*).

## 1. From bases to an HD vector

**Atomic vectors.** The host generates four random 40,000-bit vectors, one per
base, and programs them into the IM once. The IM stores each vector along a
row (row-major), so one access returns a whole vector. That is the access the
encoder makes for every base. A 40,000-bit row does not fit in one 2048-column
array. The vector is therefore cut into 1024-bit chunks, the largest power of
two below 2048, and chunk *j* goes to array *j* (40 arrays). All arrays are
read in the same cycle. The arrays can only be programmed a column at a time.
A column write therefore sets one bit position of all four vectors
(`im_wr_data[s]` is the bit of base *s*). Base codes are A=0, C=1, G=2, T=3.

**Binding (one N-gram).** An N-gram of bases c1..cN becomes

    B(cN) ^ sh(B(c(N-1))) ^ sh²(B(c(N-2))) ^ ... ^ sh^(N-1)(B(c1))

where B is the atomic vector and sh moves every bit down by one position. The
binder gets the shift for free. Each bit position has an XOR gate and a
flip-flop. Each cycle, gate *i* XORs the new atomic-vector bit with the
content of the *neighbouring* flip-flop *i+1*. The top gate reads a constant
0. The first base of an N-gram loads its vector unchanged, which clears the
buffer. After N bases the buffer holds the N-gram above. One base is
processed per clock.

**Bundling (one vector).** The bundler has one counter per bit position
(36 bits, saturating). Each finished N-gram adds its bits to the counters.
The N-gram that *closes* a vector is added as well. Then every position is
compared with the threshold T (`bit = count > T`), the result goes into the
output register, and the counters restart from zero in the same clock. T is
part of the job command. With T equal to half the number of N-grams bundled,
this is the usual majority rule.

**Which N-grams.** The controller uses a sliding window. A sequence of L bases
gives L−N+1 N-grams, and each N-gram re-reads its N bases from memory. So a
read costs (L−N+1)·N clocks of encoding. A vector is closed at the end of a
sequence, or after M N-grams (`max_ngrams`), whichever comes first. A long
reference with a small M therefore yields several consecutive prototypes.

Timing: base address issued in cycle t → base returned by memory at t+1
(host-memory latency) → IM row out at t+2 → binder register at t+3 → bundler
output at t+4 for the closing N-gram.

## 2. Comparing in the crossbar

The comparison is an XNOR followed by a pop-count over 40,000 bits. The AM
does most of it inside the arrays. It stores everything twice, in two banks
of 512×2048 crossbars:

* **true bank:** chunk *k* (512 bits) of prototype *p* is in column
  `p·79 + k`. There are 79 = ⌈40000/512⌉ chunks per prototype. Columns past 2047
  go to a second tile. With 31 prototypes, 2449 columns are used out of
  2·2048.
* **complement bank:** the same column holds the inverted chunk.

To compare, the query sits in a register inside the AM. For a column of chunk
*k*, chunk *k* of Q drives the rows of the true bank and chunk *k* of ¬Q
drives the rows of the complement bank. Only the column being read is
enabled. The current on its bit line counts the rows where both row and cell
are 1. The ADC of each bank converts that count:

    adc_p = |Q ∧ P|  over the chunk,   adc_n = |¬Q ∧ ¬P|  over the chunk
    adc_p + adc_n = pop-count(XNOR(Q, P)) over the chunk

The last chunk has 448 rows past bit 39,999. Those rows are not driven, so
they never count. Both banks are written in the same clock, one column at a
time. A freshly encoded prototype therefore never has to be transposed.

The **similarity check** adds the two 9-bit codes and sums the 79 chunk sums
of a prototype into a 16-bit score, the number of matching bits (0..40000).
It then emits the score with the prototype number and the query number.

Note on the ADC: it has 9 bits, but a 512-row column can have all 512 rows
conducting. The model saturates at 511. Random dense vectors put about 128
rows on in either bank, so this never matters in practice. The reference
model in the testbenches applies the same saturation.

## 3. Running a job

The host fills the command (`cmd_t` in `demeter_pkg`) and pulses `start`:

| field | meaning |
|---|---|
| `mode` | `OP_BUILD` (references → AM slots) or `OP_QUERY` (reads → scores) |
| `seq_base` | address of the first base; sequences are stored back to back, one base per address |
| `num_seqs`, `seq_len` | how many sequences, all of the same length |
| `ngram_n` | N |
| `max_ngrams` | M, the largest number of N-grams per vector |
| `threshold` | T of the bundler |
| `proto_base` | BUILD: slot of the first prototype written |
| `num_protos` | QUERY: prototypes 0..num_protos−1 are scored |

If N = 0, `num_seqs` = 0, M = 0 or `seq_len` < N, the job does nothing and
`done` follows at once.

**BUILD.** Each finished vector is written into the AM at 512 bits per clock
(79 clocks). The slots used are `proto_base`, `proto_base+1`, and so on.
Writes to slots beyond `NUM_PROTO` are dropped.

**QUERY.** Each finished vector is copied into the AM query register in one
clock. The controller then sweeps columns 0 .. 79·`num_protos`−1, one per
clock. It frames the ADC outputs (first/last chunk, prototype, query number)
for the similarity check. The encoder is free as soon as the copy is done, so
the **next read is encoded while the current one is being scored**. The
encoder is **held** only when the next vector would be finished before the
previous one has been handed over. At the defaults this happens whenever a
read encodes faster than a sweep of 79·`num_protos` columns. For example, a
100-base read with N = 8 takes 744 clocks, while 31 prototypes take 2449.

**Results** leave on `res_valid/res_ready/res_tag/res_proto/res_score`, in
query order and then prototype order. `res_tag` counts the query vectors of
the job from 0. While the host holds `res_ready` low, the AM read, the ADC
register and the accumulator all stall (`adv = !res_valid || res_ready`).
Nothing is lost.

`done` pulses when every vector has been encoded and written or scored, and
the last score has been taken. The status pulses `stat_overlap` (a base is
issued while a sweep runs), `stat_fin_stall` (the encoder is held) and
`stat_split` (a vector is closed by the M limit) are there for observation.

A typical session: program the IM (40,000 column writes), run one BUILD per
reference set, then run QUERY jobs for the reads. The host thresholds each
score and does the abundance estimation: a uniquely matching read goes to
its species, and multi-matching reads are shared in proportion to the unique
counts divided by genome length.

## 4. Sizes

| parameter | default | origin |
|---|---|---|
| `D` (vector bits) | 40000 | described design point |
| IM chunk `IM_COLS` | 1024 (40 arrays) | largest power of two below 2048 columns |
| AM crossbar `ROWS`×`COLS` | 512 × 2048 | described PCM array |
| `NUM_PROTO` | 31 (2 tiles) | largest food reference set (31 genomes) |
| `ADC_BITS` | 9 | described ADC |
| counter width | 36 | this design (fits a 14 Gbp genome in one vector) |
| score width `SCORE_W` | 16 | this design (≥ 40000) |
| address / length fields | 40 / 36 bits | this design |

Capacity: the 20-genome and the 31-genome food reference sets both fit with
one prototype per genome (1580 and 2449 columns of 4096). The largest genomes
(about 14 Gbp) fit the 36-bit counters and length fields. Reads of 100–150
bases are far inside every limit.

## 5. Departures and open points

* **Shift, not rotation.** The N-gram formula is usually written with a
  permutation ρ, typically a rotation. The binder's top gate reads ground,
  so bits shifted out are lost and zeros come in. The binder follows that
  zero-fill shift. Which neighbour a bit reads (i+1) is this design's choice.
* **Sliding window.** Whether consecutive N-grams overlap is not stated. A
  sliding window is used, each N-gram re-read from memory.
* **Ideal arrays.** PCM cells, sense amplifiers, analog multiplexers and ADCs
  are exact digital models. There is no conductance variation, drift or
  read/write-latency difference (a PCM write is much slower than a read). All
  accesses take one clock.
* **One ADC conversion per bank per clock.** The number of ADCs behind the
  analog multiplexers is not given. One column per clock is swept, 79 clocks
  per prototype.
* **ADC saturation** at 511 for a full 512-row column (see section 2).
* **Chunk summation in the similarity check.** The described unit only adds
  the two ADC codes of a column. Summing the 79 chunk results into one score
  per prototype is done here in the output buffer, not on the host.
* **Memory port.** Host memory is a fixed one-clock read port, one base per
  address. The real system reaches host memory through the host's address
  translation and a PCI-X link. Neither is modelled.
* **Not implemented:** the host-side instructions (`bbop_init`, `bbop_op`),
  saving and restoring controller state on a context switch, the option to
  keep query vectors as a read database, sparsity or encodings other than
  dense binary N-grams, and similarity metrics other than matching-bit count.
  Direct host writes into the AM are also left out: prototypes reach the AM
  only through BUILD.

## 6. Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog.
`tb/hd_model_pkg.sv` is the shared reference model. It uses the closed form of
the N-gram (XOR of atomic vectors shifted by N−1−i), counts and thresholds
directly, and scores chunk by chunk with the ADC saturation.

| testbench | what it does |
|---|---|
| `tb_item_memory` | column programming, row read-back, one-clock latency |
| `tb_binder` | random N-grams with idle cycles against the closed form |
| `tb_bundler` | random groups, threshold, counter restart, saturation (4-bit counters) |
| `tb_encoder` | sliding windows with M splits; two-clock latency |
| `tb_assoc_memory` | two tiles, padding rows, ADC saturation, output hold |
| `tb_similarity_check` | chunk sums, framing, stall |
| `tb_controller` | addresses and framing, build writes, sweep order, back-pressure, done |
| `tb_demeter_top` | end to end at D = 256: two builds (one split into three slots), two query jobs; every score checked; overlap, hold, split and back-pressure must each occur |
| `tb_demeter_full` | end to end at the default sizes: 31 prototypes from 40-base references, three 100-base reads, 93 scores checked |

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/demeter_pkg.sv tb/hd_model_pkg.sv rtl/*.sv tb/tb_demeter_top.sv \
        --top-module tb_demeter_top -o sim && ./obj_dir/sim

Verilator leaves uninitialised state random. Everything that is read is
reset, or written before it is read, so the tests pass under
`+verilator+rand+reset+2`. The full-size test builds in about 15 s and runs
in a few seconds.
