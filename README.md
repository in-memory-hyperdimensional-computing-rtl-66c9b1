# In-memory hyperdimensional computing engine (RTL)

Hyperdimensional computing (HDC) classifies symbol sequences, such as text, by
mapping them to very wide binary vectors and comparing those vectors. Each of
the `h` input symbols (here 26 letters and the space) gets a random
`d`-bit basis hypervector, with `d = 10,000`. A sequence is cut into
overlapping n-grams. Each n-gram is encoded by combining the basis vectors of
its symbols, each shifted by its position. The n-gram vectors are summed per
bit and thresholded, which gives one `d`-bit hypervector for the whole sequence.

Training makes one such hypervector per class. This is the class *prototype*.
Inference encodes a query the same way, and then picks the prototype that has
the largest dot product (count of common ones) with it.

The design here holds every hypervector in memory crossbars. The crossbars
compute on the data where it is stored:

- **Encoder.** The item memory (IM) is a crossbar with `h` rows of `d` cells.
  Reading one row while the per-column gate lines carry another vector gives
  the bitwise AND of the two vectors in one read.
- **Associative memory (AM).** The AM is a crossbar that holds the prototypes.
  Driving a query onto its columns gives, on each row, the dot product of the
  query with that row.

This RTL describes the digital part of that system cycle by cycle. The two
kinds of crossbar are written as ideal behavioural models: a cell is one bit,
a read is exact, and a read takes one clock.

Default size:

| Quantity | Value |
|---|---|
| d (bits per hypervector) | 10,000 |
| h (symbols) | 27 |
| c (classes) | 22 |
| f (AM partitions) | 10 |

## Block map

```
 symbols ─► index_buffer ─┬─► im_crossbar (B)   ─► minterm_buffer ─┐
                          └─► im_crossbar (~B)  ─► minterm_buffer ─┤ (gate lines fed back, shifted)
                                                                   ▼
                                                OR array ─► bundler ─► query / prototype register
                                                                          │
 controller_i (n, l, handshakes) ── controls all of the above             ▼
                                         segment_mux ─► am_crossbar (c·f rows × d/f cols, popcount "ADC")
                                                              ▼
                                         sum_buffer (per class, routed by placement table) ─► wta ─► class
 controller_ii (partition select, accumulate, training writes) ── controls the AM side
```

| Module | Role |
|---|---|
| `hdc_pkg` | Default sizes and the mode enum |
| `hdc_top` | Encoder and AM search wired together |
| `hdc_encoder` | `controller_i`, `index_buffer`, two `im_crossbar`, two `minterm_buffer`, OR array, `bundler` |
| `am_search` | `controller_ii`, `segment_mux`, `am_crossbar`, `sum_buffer`, `wta` |

## The 2-minterm n-gram encoder

This block is the least obvious part of the design.

Let `B[s]` be the basis vector of symbol `s`. Let ρ be a shift by one bit
position: bit `i` takes bit `i-1`, and a zero enters at bit 0. The shift is
not circular. The n-gram encoding wanted is the XOR of the shifted basis
vectors, which a crossbar cannot compute directly. The design uses a
two-term approximation of it instead:

```
G = ( B[s1] & ρB[s2] & ρ²B[s3] … ρ^(n-1)B[sn] )  |  ( ~B[s1] & ρ~B[s2] & … ρ^(n-1)~B[sn] )
```

Each term is an AND of shifted vectors, so the crossbar can build it one
factor per read. There are two IM crossbars:

- the *original* crossbar holds `B`;
- the *complementary* crossbar holds `~B`. Programming one IM row writes the
  complement into the same row of the second array.

Each crossbar has a minterm buffer behind its sense amplifiers. The buffer
feeds back to the gate lines, shifted by one column. Let `s[N]` be the
newest symbol. The encoding sequence is:

1. **Cycle 1.** `ngram_start` turns on every gate line, and the row of `s[N]`
   is read. Each buffer now holds `B[s[N]]` (or its complement).
2. **Cycle j (2 … n).** The row of `s[N-j+1]` is read. The gate lines carry
   the buffer contents shifted by one. The buffer is therefore loaded with
   `B[s[N-j+1]] & ρ(previous buffer)`.
3. **After n cycles.** The original buffer holds
   `B[s1] & ρB[s2] & … & ρ^(n-1)B[sn]`, with `s1` the oldest symbol. The
   complementary buffer holds the same product of complements.
4. **OR array.** A bitwise OR of the two buffers gives `G`.

You can check the exponents by counting shifts. The newest symbol is read
first, so it is shifted n-1 times. The oldest is read last and is not
shifted at all.

**The index buffer.** This is a shift register holding the last `NMAX`
symbol indices, with entry 0 the newest. In cycle `j` the controller reads
entry `j-1`.

**Pipelining.** The next symbol is accepted during the last cycle of the
current n-gram. A continuous stream therefore produces one n-gram every `n`
clocks. The first `n-1` symbols of a sequence only fill the index buffer.

**Direction of the shift.** Seen as a vector in RTL (`logic [D-1:0]`), ρ is
`{v[D-2:0], 1'b0}`. The original design calls this a right shift, and a left
shift in the complementary array. That is because the complementary array's
columns are drawn in mirrored order. In terms of the vector component both
are the same shift, so one `minterm_buffer` module serves both arrays.

## Bundler and threshold

The bundler has one counter per bit, `LEN_W = 21` bits wide. On each
`ngram_end` it adds the OR-array output to the counters. After the last
n-gram of a sequence of `l` symbols, `query_end` compares every counter with
a threshold and loads the result into the output register. The comparison
is strict: a bit becomes 1 when `threshold < count`. The counters are then
cleared.

The threshold is `l >> (n-1)`. It comes from `l / 2^(n - log2 k)` with
`k = 2` minterms. It accounts for the fact that an AND of `n` random vectors,
OR'd over two terms, is 1 with probability about `2/2^n`. The threshold is
computed in `controller_i` from the configured `n` and `l`.

## AM search: partitions, placement table and winner-take-all

The AM is not one `c × d` array. It is folded into `c·f` rows of `d/f`
columns. Row `p·C + r` holds segment `p` of the prototype stored in row `r`.
Segment `p` is bits `p·d/f … (p+1)·d/f − 1`.

A search runs `f` clocks:

1. In clock `p`, `segment_mux` drives query segment `p` onto the columns.
2. The crossbar gives each of the `c` rows of partition `p` a partial dot
   product. The "ADC" in the model is an exact popcount of `segment & row`.
3. `sum_buffer` accumulates the partial products per class. The first
   partition loads the sums instead of adding to them.
4. After the last partition, `wta` returns the class with the largest sum.
   On a tie it returns the lowest class index.

**Placement table.** `controller_ii` holds a table `row_of_class` that says
which row stores which class. The sum buffer uses it to route each ADC output
to the right class. The table models the random placement of classes into
rows used by the original design, and one table serves every partition. It
is the identity after reset, and the host writes it through `map_*` while
the AM is idle.

**Timing.** `result_valid` is a one-cycle pulse `f + 2` clocks after the
encoder's `query_valid`. It carries the class index on `result_class`.

## Training and inference

Each sequence carries a mode and a label (`seq_mode`, `seq_label`). They are
sampled with the first accepted symbol.

- **Inference.** The finished hypervector is a query, and the AM search
  described above runs on it.
- **Training.** The finished hypervector is a prototype. `controller_ii`
  writes its `f` segments into rows `p·C + row_of_class[label]`, one per clock.
  `train_done` pulses `f + 1` clocks after `query_valid`.

Prototypes can also be written from outside through `am_prog_*`, for
example when they were trained in software. A training write from the
controller takes priority over a host write in the same cycle.

## Interface and handshakes

All signals are synchronous to `clk`, and `rst_n` is an asynchronous
active-low reset. The crossbar cells are not reset, so program them before
use.

| Port group | Meaning |
|---|---|
| `im_prog_we/row/data` | Write one basis hypervector (and its complement) |
| `am_prog_we/row/data` | Write one AM row of `d/f` bits; row = `p·C + r` |
| `map_we/class/row` | Placement table entry |
| `cfg_we/cfg_n/cfg_len` | n-gram size (1 … `NMAX` = 8) and sequence length `l`. Taken only while the encoder is idle. Reset values are n = 4, l = 4. |
| `seq_mode/seq_label` | Mode (`MODE_INFER`, `MODE_TRAIN`) and class of the next sequence |
| `sym_valid/sym_ready/sym_idx` | Symbol stream; a symbol is taken on a clock where both valid and ready are high |
| `result_valid/result_class` | Inference result |
| `train_done` | Training write finished |
| `enc_busy/am_busy` | Status |

There are two kinds of stall:

- **Input stall.** When the stream has a gap, the encoder waits with
  `sym_ready` high.
- **Output stall.** When a sequence ends while the AM is still searching the
  previous query, the encoder holds its result in the counters. It issues
  `query_end` only once the AM is free. In the meantime it takes no new
  symbols.

Sequences can otherwise follow each other back to back.

Assertions check two rules:

- the configured `n` must be within the index buffer;
- a new `query_valid` must not arrive while the AM search is busy.

## Departures from the original design

- **Crossbars are ideal.** PCM cells, their conductance spread and drift,
  sense-amplifier thresholds and the ADCs are not modelled. Each read is exact
  and takes one clock. The original system reads the encoder crossbar in
  about 2.8 ns and the AM in about 100 ns, so the AM search timing here is
  optimistic. Programming a row is a single-cycle write, not a sequence of
  programming pulses.
- **Only the dot-product metric is built.** The AM alternative that uses the
  inverse Hamming distance, which needs a second, complementary AM array, was
  a comparison point in the original work and is not included.
- **EMG gesture recognition cannot run.** That task builds its symbol
  vectors by a spatial encoding from four channels and a continuous item
  memory, which this design does not have.
- **Widths and handshakes are this design's own choices.** This covers:
  - the index-buffer depth (`NMAX = 8`);
  - the counter and length width (`LEN_W = 21`, enough for training texts of
    about 2 million symbols);
  - the strictness of the threshold comparison;
  - the valid/ready stream;
  - the output stall;
  - the contiguous segment split;
  - the tie rule of the winner-take-all;
  - the host ports for IM, AM and placement table.
- **The encoding order follows the product formula.** Cycle `j` reads
  symbol `s[N-j+1]`. One sentence of the original description names the
  basis vector one position further on. Following it would break the
  product formula, so it was not followed.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares the module against a model written independently in the testbench,
and ends by printing `TB_RESULT checks=N failures=M`.

**`tb_hdc_top`** runs the whole engine at `d = 200, c = 5`. Each class is
modelled as a random symbol source with its own preferred successors. The
test:

- trains four classes on chip and writes one class from the host;
- runs inference batches, with and without gaps in the stream;
- changes `n` from 4 to 5 and retrains.

Every predicted class must match a software model of the same encoder and
search. The test also counts each mechanism and fails if one never happened:

- training write;
- host write;
- inference result;
- input stall;
- output stall;
- n-gram size change.

**`tb_hdc_top_full`** runs the top at its default size (d = 10,000, c = 22,
f = 10). It programs the IM and AM, trains one class on chip and checks four
inference results and the `f + 2` search latency.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl +libext+.sv \
    rtl/hdc_pkg.sv tb/tb_hdc_top.sv --top-module tb_hdc_top
./obj_dir/Vtb_hdc_top
```

To run a single block, replace `tb_hdc_top` with that block's testbench.

The full-size test takes about 15 seconds of simulation on a typical machine.
The remaining Verilator warnings are about width-extended fills of the wide
vectors and the unused `win_val` port. They are harmless.
