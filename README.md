# SpecPCM in SystemVerilog: analog PCM in-memory computing for spectral clustering and database search

Mass-spectrometry pipelines spend most of their time comparing spectra with one another. Two cases matter:

- **Clustering** groups similar reference spectra, pair by pair.
- **Database (DB) search** compares each query spectrum with millions of library spectra.

SpecPCM does that work on hypervectors (HVs) stored in phase-change-memory (PCM) crossbars. A spectrum becomes a long vector of ±1 values. The similarity of two spectra is the dot product of their HVs. A PCM array holding one stored HV per row computes the dot product of an input HV with every row in one analog step.

This RTL implements that accelerator. The pieces are:

- the digital encoder and dimension packer;
- the sequencing of the array operations: program with write-verify, normal read, and matrix-vector multiply (MVM);
- the peripheral time-sharing: word-line (WL) decoder, source-line (SL) drivers, sense amplifiers and flash ADCs;
- the score reduction for search;
- a complete-linkage clustering engine.

The PCM array and the flash ADCs are analog, so they are written as behavioural models with integer voltages and currents. Everything else is synthesizable.

## 1. The main idea: pack several HV bits into one signed multi-level cell

A binary HV wastes a multi-level cell. Each 2T2R cell is a pair of PCM devices. Its value is the difference of their conductance levels, `gp − gn`. With levels 0..3 per device, the cell holds any integer in −3..3.

The **dimension packer** sums `n` adjacent bipolar bits into one element, where `n` is `mlc_bits` (1, 2 or 3). The element range is −n..n. A D-dimensional HV therefore becomes D/n elements.

The dot product of two packed vectors approximates `n` times the dot product of the binary vectors. The approximation is coarser, but it stores and computes `n` times as many dimensions per cell.

The element order is fixed so that packing only ever sums neighbours. Packed element `e` of segment `s` holds dimensions `(s·128 + e)·n + t`, for `t = 0..n−1`.

## 2. Where an HV lives

A bank is a 128 × 128 array of 2T2R cells. One row holds one 128-element segment of one HV. A longer HV is cut into segments, and segment `a` goes into **array `a`, at the same row** in every array. The number of arrays in use is:

```
arrays_used = ceil(hd_dim / (mlc_bits · 128))
```

The top instantiates `NUM_ARRAYS = 22` banks. That is exactly enough for the DB-search default: 8192 dimensions at 3 bits per cell give 2731 elements, which is 22 segments. Clustering uses D = 2048 at 3 bits, which needs 6 arrays.

One row index thus names one stored spectrum. Each bank holds 128 spectra at a time.

## 3. Encoding a spectrum (`hd_encoder`, `dim_packer`)

A spectrum arrives as a list of peaks. Each peak has a feature index (the m/z bin) and a quantised intensity level, 16 levels by default.

Encoding is ID-level encoding:

```
HV[d] = sign( Σ_peaks  ID_f[d] · LV_l[d] )        bipolar product, sign(0) = −1
```

The ID and level hypervectors are not stored. Element `d` of vector `idx` is bit 31 of a 32-bit integer hash of `seed ^ {idx, d}`:

- multiply by 0x9E3779B1, then xor with itself shifted right by 16;
- multiply by 0x85EBCA6B, then xor with itself shifted right by 13.

`ID_SEED` and `LV_SEED` select the two families. The function is `hv_bit` in `specpcm_pkg`. Any reimplementation, for example host software, must use the same hash to produce matching HVs.

Timing:

- The encoder makes one segment per run.
- It has 128 × 3 lanes in parallel and consumes one peak per cycle.
- `done` comes `num_peaks + 1` cycles after `start`.
- The packer adds one registered cycle.
- `OP_ENCODE` repeats this for every segment in use and fills the on-chip **HV buffer**, `hv_buf[array][column]`.

## 4. One bank and its peripherals (`imc_macro`)

`imc_macro` wires the following together and sequences them:

- `wl_decoder`: an 8-bit address `{row, polarity}` drives 256 WL drivers, two per row (WL+, WL−). Its modes are one line, a row pair, or a range of rows for MVM.
- `sl_write_gen`: 64 SL driver units serve the 256 source lines, L = 2·column + polarity. Unit `u` drives line `4u + phase` in one of four phases.
- `pcm_cim_bank`: the array model, including the 3-bit DAC and the read pulse generator.
- `sa_readout`: 32 three-bit sense amplifiers, each serving four columns. Amplifier `k` reads column `4k + phase`, so one row is read in four cycles.
- `adc_readout`: 16 flash ADCs, each serving eight rows. ADC `a` converts row `8a + phase`, so all 128 rows are converted in eight cycles.

### STORE: programming with write-verify

Programming a row is one **program round** followed by up to `write_cycles` **verify cycles**.

- A program round drives the four SL phases, each for `PULSE_CYCLES = 10` cycles (20 ns at 500 MHz).
- The pulse amplitude starts at the target level of each device.
- A verify cycle:
  1. reads the + devices of the row, with WL+ only;
  2. reads the − devices, with WL− only;
  3. changes the amplitude of each wrong device by one step: up if its level is low, down if it is high;
  4. re-pulses only the wrong devices.
- Verification ends early once every device matches its target.

With `write_cycles = 0` (the clustering default) there is no verify cycle at all.

The model gives each programmed device a ±1 level error with probability `ERR_THRESH/256`, about 30% by default. This is what write-verify has to correct. The rate is a model parameter, not a measured device figure.

`verify_rounds` and `pulse_rounds` report what the last STORE did.

| operation | cycles, command accepted to `done` |
|---|---|
| STORE, no verify | 4 × PULSE_CYCLES = 40 |
| each verify cycle | two row reads (WL set-up, array, 4 sense phases each) and an update, plus 40 if any device is re-pulsed |
| READ | WL set-up, array access, 4 sense phases |
| MVM | **10**: 1 WL/DAC set-up, 1 array, 8 ADC phases |

The MVM latency is the published figure, and the macro testbench checks it to the cycle. At instruction level the top adds its own decode and reduction cycles: an `OP_MVM` returns a search result 14 cycles after it is issued.

### MVM: the analog dot product

The signed input elements are first clamped to ±`mlc_bits`, the DAC range in use. They are then applied on the SLs of every column. The selected rows have both WLs on.

Each row returns two bit-line sums, BL+ and BL−. Their difference is `Σ_c x[c]·(gp − gn)`.

A flash ADC with 63 comparators turns the difference into a 6-bit code:

```
code = #{k in 1..63 : vin ≥ (k − 32)·LSB} − 32,   LSB = 8
```

At `adc_bits = b < 6`, only every 2^(6−b)-th comparator is enabled. The code stays on the 6-bit scale but moves in coarser steps. Fewer comparators are powered, which is what the precision knob trades for energy.

The LSB of 8 level units makes the full scale ±256. That is far below the largest possible row sum (±1152), on the premise that sums of random-like HVs sit near zero. Sums beyond full scale clip.

## 5. DB search (`score_argmax`)

All arrays run their MVM in lockstep with the same phase sequence. Each cycle, `score_argmax` adds the 16 codes of the current phase across the enabled arrays, giving the full dot-product estimate for those 16 rows. It keeps the best row seen so far.

After the eighth phase it reports `scores[128]`, `best_row` and `best_score`. Ties go to the lower row.

Scores are 12-bit signed. 22 arrays × 32 is at most 704, so they cannot overflow.

## 6. Clustering (`linkage_engine`)

Clustering the HVs held in one set of rows works like this:

1. READ_HV one stored row back into the HV buffer.
2. MVM it against all rows with `to_linkage = 1`. The score row is written into the similarity matrix as row `dst_row`.
3. Repeat for every point.
4. Issue `OP_CLUSTER` with the number of points and a similarity threshold.

The engine runs agglomerative clustering with **complete linkage**:

- Every point starts as its own cluster.
- The most similar pair of clusters is merged, as long as its similarity is at least `threshold`.
- After each merge, the similarity of the merged cluster to any other cluster is the **minimum** of its members' similarities. In distance terms, that is the maximum distance.

Only the upper triangle `S[i][j]`, i < j, is used.

Cost:

- A scan visits one pair per cycle, which is O(N²) cycles per merge.
- A merge updates one row entry per cycle.

Results:

- `labels[k]` is the lowest point index in k's cluster.
- `num_merges` counts the merges.
- `merge_valid`, `merge_a`, `merge_b` and `merge_sim` stream each merge as it happens.

## 7. Instruction interface (`specpcm_top`)

The top accepts one `instr_t` at a time with a `instr_valid`/`instr_ready` handshake. The peak list is loaded beforehand through `peak_we`/`peak_waddr`/`peak_idx`/`peak_lvl`.

| opcode | fields used | action |
|---|---|---|
| `OP_CONFIG` | `hd_dim` | HV dimension; 8192 after reset |
| `OP_ENCODE` | `num_peaks`, `mlc_bits` | encode and pack the peak list into `hv_buf` |
| `OP_STORE_HV` | `arr_all`/`arr_idx`, `row_addr`, `col_addr`, `data_size`, `mlc_bits`, `write_cycles` | program buffer segment(s) into one array or all arrays in use |
| `OP_READ_HV` | same, without `write_cycles` | normal read of array row(s) into the buffer, within the column window |
| `OP_MVM` | `row_addr`, `num_rows`, `adc_bits`, `mlc_bits`, `to_linkage`, `dst_row` | MVM of the buffer with the activated rows, then argmax (sets `search_valid`) and optionally a write of the similarity row |
| `OP_CLUSTER` | `num_rows`, `threshold` | complete-linkage clustering (sets `cluster_done`) |

STORE_HV, READ_HV and MVM with these operands are the instruction set of the original design. So are the run-time knobs `write_cycles`, `MLC_bits`, `ADC_bits` and the HD dimension.

The following are additions of this implementation, needed to drive the on-chip encoder and clustering logic:

- CONFIG, ENCODE and CLUSTER;
- the `arr_all` broadcast;
- the binary encoding and widths of every field.

Typical flows:

- **DB search**:
  1. Encode each reference spectrum and STORE_HV it with `arr_all` at its row, using 3 verify cycles.
  2. Encode the query.
  3. Issue MVM over all 128 rows and read `best_row` and `best_score`.
- **Clustering**:
  1. Issue CONFIG with `hd_dim = 2048`.
  2. Store the points with 0 verify cycles.
  3. For each point, issue READ_HV, then MVM with `to_linkage`.
  4. Issue CLUSTER.

## 8. Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_ARRAYS` | 22 | banks; covers D = 8192 at 3 bits per cell |
| `MAX_PEAKS` | 64 | peak list length |
| `LVL_W` | 4 | intensity level bits (16 levels) |
| `PULSE_CYCLES` | 10 | cycles per SL phase pulse |
| `ERR_THRESH` | 77 | programming error probability × 256 (model) |
| `ADC_LSB` | 8 | ADC step in level units (model) |
| `LINK_N` | 128 | points per clustering run |

Fixed in `specpcm_pkg`:

- the 128 × 128 geometry;
- 64 SL units, 32 sense amplifiers, 16 ADCs;
- 3-bit cells, 6-bit ADC.

## 9. How far to trust it, and where it departs from the original design

These parts follow the published design:

- the array size and 2T2R differential storage;
- the peripheral counts and their sharing: 256 WL drivers, 64 SL units over four lines each, 32 sense amplifiers over four columns, 16 ADCs over eight rows;
- the 63-comparator 6-bit flash ADC with 1–6-bit operation;
- the ten-cycle MVM and the ten-cycle programming pulse;
- ID-level encoding and dimension packing by summing adjacent bits;
- segments of one HV in the same row of several arrays;
- write-verify that raises or lowers the pulse amplitude;
- argmax over summed partial scores;
- complete-linkage merging down to a threshold;
- the default settings: D = 8192 with 3 verify cycles for search, D = 2048 without verify for clustering, 3-bit cells, 6-bit ADC.

Departures and own choices:

- **Distance matrix storage.** The original stores the clustering distance matrix in a separate PCM array and re-programs it at each merge. Here it is a register array inside `linkage_engine`. The original does not say how 12-bit scores map onto 3-bit cells. As a result, the programming cost of matrix updates is not modelled.
- **Hypervector generation.** The ID and level HVs come from the hash in §3, not from a stored random codebook.
- **Device error.** The error model (±1 level, fixed probability) and the integer units of the analog models are illustrative. They are not fitted to device data, and no noise, drift or resistance-to-conductance curve is modelled.
- **Sign convention for reads and writes.** A device "level" is treated as the quantity the write pulse sets and the read returns. The write-verify direction, a higher amplitude for a level that is too low, is stated in those terms.
- **SL driver count.** The SL driver count of 64 units "each shared between four columns" only adds up if a column counts each of the two SLs of a cell. 256 lines / 64 = 4 is the reading used here.
- **Interleave mappings.** The phase mappings (`4u + phase`, `4k + phase`, `8a + phase`), the WL address format and the comparator subsets for reduced ADC precision are not published. They are choices made here.
- **Encoder speed.** The encoder is fully parallel over 384 lanes and runs one peak per cycle. The original reports a much smaller encoder, so its encoder is likely more serial. Throughput figures from this RTL therefore do not match the original's.
- **HVs longer than 22 arrays.** There is no multi-pass accumulation for HVs that need more than 22 arrays. DB search at D = 8192 with 1- or 2-bit cells (64 or 32 arrays) does not run. Clustering at D = 2048 runs at every cell precision.
- **Outside the chip.** Spectrum pre-processing, bucketing, FDR filtering and the staging of million-spectrum libraries through the 128-row arrays belong to the host. A full library is searched batch by batch, 128 references at a time.
- **Device materials.** The two PCM materials, one for search and one for clustering, affect only device behaviour. They do not appear in the logic.

## 10. Simulating

All files use the package `specpcm_pkg`, and the testbenches also use `tb_ref_pkg`. Compile the packages first, then the RTL, then one testbench. For example, the end-to-end test at full size:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/specpcm_pkg.sv tb/tb_ref_pkg.sv \
  rtl/wl_decoder.sv rtl/sl_write_gen.sv rtl/pcm_cim_bank.sv rtl/sa_readout.sv \
  rtl/flash_adc.sv rtl/adc_readout.sv rtl/imc_macro.sv rtl/hd_encoder.sv \
  rtl/dim_packer.sv rtl/score_argmax.sv rtl/linkage_engine.sv rtl/specpcm_top.sv \
  tb/tb_specpcm_top.sv \
  --top-module tb_specpcm_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops by itself. A watchdog ends a run that hangs.

Each testbench compares against reference code written separately, in `tb_ref_pkg` or in the testbench:

- the ADC transfer function;
- the HV hash;
- the packing sums;
- the decoder patterns;
- the write-verify amplitude rules;
- the dot products;
- a software complete-linkage clustering.

They also check the cycle counts where the timing is specified.

`tb_specpcm_top` runs the top at its default size (22 arrays, D = 8192) and takes a few minutes in total. It:

- encodes and stores six spectra;
- reads them back;
- runs searches at 6-bit and 3-bit ADC precision;
- switches to D = 2048 and clusters;
- counts every mechanism it exercised: write-verify and no-verify stores, broadcast and single-array access, windowed reads, reduced-precision conversion, all three cell precisions, merges, the threshold stop, and search hits.

`tb_workloads` runs the two workloads at the size one pass holds, again at the default parameters:

- **DB search.** 128 references are stored with 3 verify cycles at D = 8192, taking 109,440 cycles. 16 noisy queries are then searched against all 128 rows. Each must find its reference, and the smallest margin over the runner-up is checked.
- **Clustering.** A bucket of 128 spectra in 32 families of four is handled at D = 2048 with no verify:
  - storing the bucket and building the 128 × 128 similarity matrix takes 33,920 cycles;
  - the linkage takes 800,805 cycles and 96 merges.

  The labels must equal a software complete linkage run on the same scores, and each family must form exactly one cluster.

These cycle counts show where the time goes. The serial pair scan of the linkage engine (one pair per cycle) dominates clustering. A wider scan would be the first thing to change for throughput.
