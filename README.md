# Fixed-to-fixed decompression of irregularly pruned weights

After fine-grained pruning, a weight matrix keeps about 10% of its values in scattered positions.
Index-based sparse formats (CSR and similar) store these irregular positions at a variable rate,
which is awkward for hardware that wants a steady stream of bits. This design takes another route.
Each bit plane of the weights is stored as a stream of short **encoded vectors** of N_IN bits.
A fixed **XOR-gate network** expands each one into N_OUT bits, so every cycle gives a known number
of output bits and the memory bandwidth is fixed.

The expansion works because pruned positions are "don't care": an encoded vector only has to
reproduce the unpruned bits of its N_OUT-bit slice. At S = 0.9 sparsity an 80-bit slice holds
about 8 unpruned bits. Eight free input bits can usually satisfy them, so N_OUT = N_IN/(1-S) = 80.
The encoder finds the encoded vectors offline. Bits it cannot match are fixed by a small
**correction** step that flips listed bit positions. The decompressor is therefore lossless for
unpruned weights.

The default configuration is FP32 weights (32 bit planes), N_IN = 8, N_OUT = 80, two shift
registers of history (N_S = 2) and 512-bit correction blocks.

## Sequential XOR decoding

`xor_gate_network` computes `y = M (+) x` over GF(2): `x` is N_IN·(N_S+1) bits, `y` is N_OUT bits,
and `M` is a fixed random binary matrix. Each output bit is the XOR of the input bits chosen by one
row of `M`. `M` is generated at elaboration time by `f2f_pkg::m_bit(seed,row,col)`, a 32-bit
integer hash, so the matrix is a pure function of the `M_SEED` parameter. The encoder and any
reference model must use the same function. To use a matrix searched offline, change the seed or
replace `build_matrix`.

`shift_register_chain` keeps the N_S previous encoded vectors. `sequential_decoder` feeds the
network with `{w[t-2], w[t-1], w[t]}`, with the oldest vector in the high bits. Because each output
depends on N_S+1 inputs, the encoder has N_IN·(N_S+1) bits to fit each slice instead of N_IN. This
raises the share of matched bits from about 90% (N_S = 0) to about 98–99% in the source's
experiments.

The cost is a warm-up. Each stream carries l + N_S encoded vectors for l output vectors, where
l = ⌈mn/N_OUT⌉. The first N_S vectors only fill the registers and produce no output. The encoder
normally sets them to zero, but the decoder accepts any value. After warm-up the decoder produces
one 80-bit vector per accepted 8-bit vector, with one register stage (1 cycle latency). `start`
clears the history and the warm-up count.

## Reshape into correction blocks

Decoded vectors are 80 bits wide; corrections work on 512-bit blocks of the flattened plane.
`reshape_buffer` is a gearbox with a P+N_OUT-bit buffer. It appends each vector's valid bits and
emits a block whenever 512 bits are present. It drops the padding bits of the last vector using
`total_bits` = mn, given at `start`. The final partial block is zero-padded and marked `out_last`.
The buffer takes one vector per cycle except in cycles where the buffer is full, so it adds at most
one cycle per block.

## Correction

For each 512-bit block the correction store holds one **flag** bit. If the flag is 1, a list of
**location entries** follows. Each entry is `{idx[8:0], cont}`: `idx` is the bit to flip, and
`cont = 1` means another entry for the same block follows.

`correction_unit` is a 4-state FSM: EMPTY → FLAG → FIX (one flip per cycle) → FULL. A clean block
passes in 2 cycles; a block with e errors takes 2+e. `flips` counts flipped bits since reset, for
measuring the encoding efficiency. `correction_memory` holds the flag and location arrays for one
plane (4096 entries each by default). It has a simple write port for loading and two read pointers
that `start` rewinds. Corrections are stored apart from the encoded stream, so decoding reads never
wait for them.

The lossless storage cost per plane is `N_IN·⌈mn/N_OUT⌉ + ⌈mn/P⌉ + 10·(unmatched bits)` bits.
With efficiency E (the matched fraction), the overall memory saving relative to dense storage is
about `1 − (1−S)(1 + (1−E)·N_c)`, where N_c is the cost of one correction in bit units.

## Bit planes and inversion

`bitplane_lane` chains decoder → reshape → correction with its own correction memory. The top
`f2f_decompressor` runs N_W = 32 lanes in parallel, one per bit plane, from a single
`enc_data[N_W][N_IN]` input. It accepts a beat only when all lanes are ready.

Before encoding, a plane is inverted when fewer than half of its unpruned bits are 0. The source
reports that this improves matching. `weight_assembler` undoes this with the `invert[p]`
configuration bit. It waits until all 32 planes and the mask block are present, then regroups them
into 512 weights of 32 bits: plane 0 becomes bit 31 (the sign), then the exponent, then the
fraction. Weights where the pruning `mask` is 0 are forced to zero.

## Top-level interface (`f2f_decompressor`)

| port | width | use |
|---|---|---|
| `clk`, `rst_n` | 1 | clock, asynchronous active-low reset |
| `invert` | N_W | per-plane inversion flags, held for a layer |
| `corr_wr_en/plane/flag/addr/data` | 1/5/1/12/10 | load one correction memory word: flag array (`flag=1`, bit 0 of data) or location array |
| `start`, `total_bits` | 1, 32 | begin a layer of mn = `total_bits` weights |
| `enc_valid/ready/data` | N_W×N_IN | one encoded vector per plane per beat, l+N_S beats per layer |
| `mask_valid/ready/data` | P | pruning mask, one 512-bit block per output block |
| `w_valid/ready/data/last` | P×N_W | 512 decoded weights per beat; `last` on the final block |
| `flips` | 32 | total corrected bits |

Sequence per layer:
1. Load the corrections.
2. Set `invert`.
3. Pulse `start` with `total_bits`.
4. Stream the encoded vectors and masks.
5. Collect ⌈mn/512⌉ weight blocks.

All streams use valid/ready. When nothing stalls, the top takes one encoded beat per cycle and
outputs one 512-weight block about every 7 cycles (512/80 = 6.4 cycles, plus correction cycles).

## Verification

Each block has a self-checking testbench in `tb/` that compares with a bit-level reference model
built from the same `m_bit` function. The testbenches drive random gaps and back-pressure. Each
ends with a `TB_RESULT checks=… failures=…` line.

`tb/f2f_bench.sv` is an end-to-end bench. It prunes random FP32 weights, encodes each plane with a
simple greedy search (one vector at a time, over the 256 candidates), decides inversion, builds the
correction data, loads it, runs the top, and checks every weight bit. It also counts each mechanism
and fails if one never occurred:
- warm-up
- clean blocks and corrected blocks
- multi-entry blocks
- inverted planes
- partial last vector and partial last block
- input stall and output back-pressure
- pruned zeros

It is used in two testbenches:
- `tb_f2f_decompressor`: two small layers (3000 weights) with output back-pressure.
- `tb_f2f_full`: a 512×512 layer at S = 0.9 with all default parameters. It runs in about 15 s.

The greedy encoder reaches E ≈ 93% (memory saving ≈ 83%). The source's dynamic-programming
encoder reaches about 98–99%. Encoder quality changes only the number of corrections, not the
correctness of the hardware.

To run a testbench:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_f2f_full \
  rtl/f2f_pkg.sv rtl/*.sv tb/f2f_bench.sv tb/tb_f2f_full.sv && obj_dir/Vtb_f2f_full
```

## Departures and limits

- **Matrix.** `M` is a fixed hash-generated random matrix, not a matrix chosen by search as in the
  source. The input order (oldest vector in the high bits) is a column permutation and does not
  change the quality of a random `M`.
- **Data formats are this design's own.** The source does not define the bit order inside slices
  (LSB first here) or the location entry packing (`{idx, cont}`).
- **One decoder per plane.** The source shows one decoder; 32 parallel lanes is a throughput choice.
  The shared `M` is the same for every plane.
- **Capacity.** Correction memories hold 4096 flags (up to 2M weights per layer) and 4096 locations
  per plane. A 3×3×512×512 convolution layer (2.36M weights) needs more flags; raise `FLAG_DEPTH`
  or split the layer.
- **Other sparsity levels.** These need `N_OUT` changed to about N_IN/(1−S), for example 26 for
  S = 0.7.
- **Not included.** The offline encoder, the weight memory, the mask source (the mask is an input),
  and the compute units that use the weights are outside this RTL.
- **Warnings left in place.** Verilator reports `SYNCASYNCNET` on `rst_n`, because the handshake
  assertions sample it with `disable iff`. It also reports wide-constant notes on the 16384-bit
  output register. Neither affects the circuit.
