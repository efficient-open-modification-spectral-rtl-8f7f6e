# In-memory open-modification spectral library search with MLC RRAM

Open modification search (OMS) compares each measured (query) mass spectrum
against a very large library of reference spectra, also allowing matches to
modified peptides. The search space is huge, so this design does both
expensive steps inside resistive memory (RRAM) crossbars:

* **Encoding.** Every spectrum is encoded as a binary hypervector of
  D = 8192 elements in {-1, +1}, using ID-level hyperdimensional encoding.
* **Search.** A query hypervector is compared with all stored reference
  hypervectors at once by an analog matrix-vector product. The reference with
  the largest dot product has the highest Hamming similarity and is the match.

Multi-level cells (8 conductance levels, 3 bits per cell) serve two purposes.
They store 3-bit ID hypervector elements, and they pack query hypervectors
three elements per cell. Hyperdimensional vectors tolerate errors, which is
what makes the imprecise analog arithmetic and MLC storage acceptable.

This RTL contains:

* the digital controllers;
* the level-vector generator;
* the conductance mapping;
* the MLC query storage;
* behavioural models of the two crossbars and their voltage ADCs.

Three parts are left to the host: preprocessing raw spectra into binned peak
lists, choosing the ID hypervectors, and the false-discovery-rate filter on the
matches.

## 1. Encoding rule

A spectrum is a set S of peaks. Peak i has an m/z bin b_i and an intensity
quantized to a level q_i in 0..Q-1 (Q = 16). Each bin has a position
hypervector ID_b, with multi-bit elements in {-4,-3,-2,-1,1,2,3,4}. Each level
has a binary level hypervector l_q. The encoded spectrum is

    h = Sign( sum_{i in S}  ID_{b_i} (*) l_{q_i} )      (*) = element-wise product

where Sign(0) is taken as +1. In the RTL, bit value 1 stands for element +1
and bit value 0 for element -1. This holds everywhere.

### Chunked level hypervectors (`lv_gen`)

The D elements are cut into NCHUNK = D/CHUNK chunks of CHUNK = 64 elements. A
level hypervector has one value per chunk, so all elements inside a chunk are
equal. This is what lets the crossbar do the element-wise product in matrix
style (see section 2).

Level hypervectors are built from a random l_0. Each next level flips
D/(2Q) = 256 more elements, which is F = 4 chunks per step. Nearby intensity
levels therefore stay similar and distant ones become nearly orthogonal.

The choice of which chunks flip is this design's own:

* chunk c has rank r(c) = (37·c) mod NCHUNK;
* chunk c is flipped in l_j exactly when r(c) < j·F.

As a result, l_j differs from l_{j-1} in exactly F chunks and from l_0 in
exactly j·F chunks. l_0 comes from an xorshift32 sequence seeded with SEED,
computed at elaboration. Nothing is stored as a table.

## 2. Encoding in memory (`enc_xbar`, `hd_encoder`)

The encoding array has NBINS = 256 logical rows, one per m/z bin, and D
columns. Row b holds ID_b, one element per column, and each element is a
differential pair of cells (section 3).

In one sensing cycle the controller does the following:

* It activates up to NACT = 64 rows, which are the bins of up to 64 peaks.
* It drives each row's bit lines with the value of that peak's level
  hypervector in the current chunk: +1 gives BL+ = Vref+Vpulse and
  BL- = Vref-Vpulse, and -1 gives the reverse.
* Column d then accumulates sum_i ID_{b_i}[d] · l_{q_i}[d] over the active rows.

This sum is valid only for the columns inside the current chunk, because only
there is the level value the one that was applied. Those are exactly the CHUNK
columns that are sensed. So one cycle gives 64 element-wise results, not one.
A spectrum is encoded in NCHUNK = 128 cycles when it has at most 64 peaks.

Spectra can have more than 64 peaks (the paper's data have 50 to 150). This
design then splits the peaks into batches of 64 and runs them one after
another for each chunk. This batching is this design's own, and it works as
follows:

* The ADC code of a batch is normalised by the batch's row count N (see
  section 4).
* `hd_encoder` therefore multiplies each code by N before adding it to the
  chunk's CHUNK accumulators.
* After the last batch of the chunk, the sign of each accumulator is written
  into h.

The loop order is chunk-outer, batch-inner, and the ADC rounds down (floor).
Together these keep the sign of each batch's result exact.

Peaks beyond MAX_PEAKS = 150 are dropped. The encoder then raises `overflow`
for that spectrum.

## 3. Conductance mapping (`weight_mapper`, `oms_pkg`)

A signed element W with |W| <= Wmax (Wmax = 4 for 3-bit IDs, 1 for binary
references) is stored in two cells of one column:

    g+ = (1 + W/Wmax) · gmax/2        g- = (1 - W/Wmax) · gmax/2

`weight_mapper` gives both values in units of gmax/(2·Wmax), as Wmax ± W. It
also gives the level index of the g+ cell, which is what the array models
store:

* level L stands for W = L - 4 when L < 4;
* level L stands for W = L - 3 otherwise.

So the eight levels 0..7 map to -4..-1, 1..4. An element of 0, or one outside
the range, is illegal. On the top-level ID port it raises `id_illegal` and is
written as level 0.

## 4. Sensing and ADC (`voltage_adc`)

The arrays use open-circuit voltage sensing: the source line charges a
capacitor until no current flows. At that point

    V_SL = Vref + Vpulse · sum_i X_i (g+_i - g-_i) / (N · gmax)
         = Vref + Vpulse · sum_i X_i W_i / (N · Wmax)

So the voltage is linear in the MAC, and it is normalised by the number N of
active rows.

The ADC model returns

    code = floor( MAC · FS / (N · Wmax) ),   FS = 2^(ADC_BITS-1) - 1 = 127

This is a signed 8-bit code. Full scale ±Vpulse maps to ±127, and N = 0 gives
0. The resolution and the rounding are this design's choices. The model is
ideal: it has no device noise, relaxation or ADC offset. It has no timing
either, since the crossbar models register its output one clock after the
read strobe.

## 5. Search (`search_xbar`, `hamming_search`)

The search array stores NREF = 128 reference hypervectors, one per column,
each as D differential pairs with g+/g- = gmax/0 or 0/gmax.

A search feeds the query into the array NACT = 64 dimensions per cycle: block
t drives dimensions 64t .. 64t+63. Every column returns an ADC code for that
block's partial dot product, and 128 accumulators add up the D/64 = 128 block
codes.

For binary vectors, dot = 2·(matching elements) - D. The largest score
therefore marks the most similar reference. A final cycle looks at columns
0..ref_count-1 and picks the largest; ties go to the lower index.

The query comes from `query_store`. This is the multi-level-cell store for
query hypervectors:

* Queries are stored non-differentially, with 3 elements per 8-level cell, so
  a query takes ceil(8192/3) = 2731 cells.
* Each group of three elements is read as an unsigned integer h' (-1 gives
  bit 0, +1 gives bit 1), and h' is the stored level, g = h'/7 · gmax.
* The first element of a group is the most significant bit.
* The last, short group is padded with -1.

The design has 1024 query slots.

## 6. Top level (`oms_accel`)

The blocks are connected as follows:

* `weight_mapper` ×64 drives the ID programming port of `enc_xbar`.
* `hd_encoder` and `lv_gen` drive `enc_xbar`.
* The encoded hypervector goes either to a column of `search_xbar` or to a
  slot of `query_store`.
* `hamming_search` reads a slot and searches `search_xbar`.

Ports and protocol:

* **ID programming.** `id_wr_en`, `id_row`, `id_grp` and `id_w[64]` write 64
  signed ID elements of one bin and chunk in one clock. `id_illegal` reports a
  bad element one clock later.
* **Commands.** These use valid/ready, `cmd_op`, `cmd_arg` and `ref_count`. One
  command runs at a time, and `cmd_ready` is low while busy.
  * `OP_ENC_QUERY slot`: encode the next spectrum into a query slot.
  * `OP_ENC_REF col`: encode the next spectrum into a reference column.
  * `OP_SEARCH slot`: search the stored query against columns 0..ref_count-1.
    `ref_count` is captured with the command.
* **Peaks.** These use `pk_valid`/`pk_ready`, with `pk_bin`, `pk_level` and
  `pk_last`. Peaks are accepted only during an encode command and only until
  its last peak. A peak offered early for the next spectrum waits.
* **Results.** `res_valid` pulses with `res_op`. After an encode, `enc_hv` and
  `enc_overflow` hold the result. After a search, `res_best_idx` and
  `res_best_score` do. `busy` is high while a command runs.

Latencies at the defaults:

| Operation | Cycles | At the defaults |
|---|---|---|
| Encode | peaks loaded + 128·ceil(P/64) + 2 | 386 for 64 peaks, 514 for 150, after the last peak |
| Search | 2 (store read) + 128 + 3 | 133 |

Assertions check the following:

* command and peak valid/ready stability;
* legal opcodes;
* no search started while one runs.

## 7. Where this departs from the paper, and what is missing

* The crossbars, ADCs and MLC cells are ideal behavioural models. The paper's
  results are about tolerating conductance relaxation and computing errors,
  and none of these errors are modelled. Error injection would go into
  `enc_xbar`, `search_xbar` and `query_store`.
* The paper does not give the array sizes, ADC resolution, number of bins,
  chunk-flip choice, command interface, batching beyond 64 rows or tie rule.
  These are this design's choices and are listed above. The paper's own
  numbers are D = 8k, 3-bit IDs, 8-level cells, 64 active rows and
  Q = 16 to 32.
* The paper feeds level hypervectors "bit by bit"; here they are binary, one
  bit per chunk.
* The paper's chip has a single array of 3 million cells. Here encoding and
  search use separate arrays, and the store is a third.
* One search array holds 128 references. A real library (1M to 3M spectra)
  needs many arrays or many reloads of one; that scheduling is a host task. A
  query set of 16k to 47k spectra likewise needs 16 to 46 loads of the
  1024-slot store.
* The datapath has no precursor-mass window. OMS ranks all loaded references
  for a query.
* Preprocessing, FDR filtering, the host link and RRAM write-verify
  programming are not implemented.

## 8. Files and simulation

Files in `rtl/`:

* `oms_pkg.sv`: opcodes and the level mapping;
* `weight_mapper.sv`;
* `voltage_adc.sv`;
* `enc_xbar.sv`;
* `search_xbar.sv`;
* `lv_gen.sv`;
* `hd_encoder.sv`;
* `hamming_search.sv`;
* `query_store.sv`;
* `oms_accel.sv` (top).

Every block has a self-checking testbench `tb/<module>_tb.sv`. Expected values
come from `tb/oms_model_pkg.sv`, which is an independent reference model of the
level vectors, ID levels and ADC.

* `oms_accel_tb` runs the whole design at reduced size. It counts the
  following events and fails if any never happens:
  * batched (more than 64-row) encodes;
  * peak overflow;
  * encodes of both kinds;
  * searches;
  * score ties;
  * a ref_count window;
  * an illegal ID;
  * peak and command stalls.
* `oms_accel_full_tb` runs the top at its default parameters: D = 8192,
  256 bins, 128 references and 1024 slots.

Each testbench ends by printing `TB_RESULT checks=N failures=M`. To simulate
one with plain verilator (here the full-size run), from the directory that
holds `rtl/` and `tb/`:

    verilator --binary -j 0 --timing -Wno-fatal -Irtl --top-module oms_accel_full_tb \
        rtl/oms_pkg.sv tb/oms_model_pkg.sv rtl/*.sv tb/oms_accel_full_tb.sv
    ./obj_dir/Voms_accel_full_tb

Use `--top-module <module>_tb` with `tb/<module>_tb.sv` for the other blocks.
The full-size test builds in about 15 s and runs in about 1 s.

Lint notes:

* Reset is asynchronous and active low.
* Verilator reports `rst_n` as used both synchronously and asynchronously,
  because the assertions disable on it. This is expected.
