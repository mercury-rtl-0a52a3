# MERCURY accelerator (synchronous design)

This is an RTL model of a row-stationary DNN training accelerator. It skips
dot products whose input vectors are similar to a vector seen earlier. It then
reuses the result already computed for that earlier vector.

## How it works

1. **Signatures.** For each input channel, the Random Generator makes one
   K x K random filter per signature bit. Every PE set convolves that filter
   over its input vectors. The sign of each result becomes one bit of the
   vector's signature in the Signature Table. The ORg register in each PE lets
   a new dot product start every K cycles. The first result therefore takes
   2K+1 cycles, and each later one takes K more.
2. **MCache fill.** Each signature, cut to the current signature length, goes
   to the MCache. The MCache has 1024 entries in 64 sets of 16 ways, with one
   request queue per set. Each vector gets one of three answers, written to the
   Hitmap together with its entry id:
   - HIT: the tag is already present.
   - MAU: a free way was allocated.
   - MNU: the set is full. There is no replacement.
3. **Filters.** For every filter, the weights are loaded into all PE sets and
   the MCache data-valid (VD) bits are cleared. Each PE set then handles its
   vectors:
   - HIT with valid data: the stored result is reused in one cycle.
   - MAU: the dot product is computed and its result stored in the cache line.
   - MNU, or a HIT whose data is not ready yet: the dot product is computed.
   The controller waits until no PE set's busy bit is set before it takes the
   next filter.
4. **Adaptation.** The host reports the loss of each iteration.
   - Signatures start at 20 bits. They grow by one bit after K_ITERS
     iterations with an unchanged loss.
   - At the end of each batch, the cycles actually used are compared with a
     baseline cost. After T_BATCHES batches that used more than the baseline,
     similarity detection is turned off.

The backward pass of a layer can keep the saved Hitmap and signatures
(`chan_reuse`). The saved-state port lets the host read and write them.

## Files

| File | Block |
|---|---|
| `rtl/mercury_pkg.sv` | shared types (Hitmap states, PE set modes) |
| `rtl/mercury_pe.sv` | PE: multiplier, accumulator, ORg, partial-sum chain |
| `rtl/pe_set.sv` | K chained PEs computing one K x K dot product |
| `rtl/pe_set_ctrl.sv` | PE set with its skip/compute/reuse control and busy bit |
| `rtl/rand_gen.sv` | random projection filters (LFSR based) |
| `rtl/signature_table.sv` | signatures and entry ids per vector |
| `rtl/hitmap.sv` | HIT/MAU/MNU per vector |
| `rtl/req_fifo.sv`, `rtl/mcache_set.sv`, `rtl/mcache.sv` | MCache |
| `rtl/global_buffer.sv` | input tile and result buffer |
| `rtl/adapt_ctrl.sv` | signature length and stoppage logic |
| `rtl/mercury_ctrl.sv` | central sequencer |
| `rtl/mercury_top.sv` | top level, 168 PEs as 56 PE sets of 3 |

## Defaults and own choices

These defaults are the paper's numbers:
- 168 PEs in a 12 x 14 array, K = 3.
- MCache of 1024 entries with 16 ways.
- Initial signature length of 20 bits.

These are this design's own choices, because the paper does not give them:
- 16-bit data and 32-bit accumulation.
- A 32-bit maximum signature length.
- Tiles of 34 x 34 inputs (32 x 32 output positions).
- A queue depth of 4 per MCache set.
- K_ITERS = T_BATCHES = 5.
- The host handshake.

## Limitations

- Only the synchronous design is built. The asynchronous variant is not: its
  InUse/FlUse bits, BusyMap, dual input buffers and versioned cache lines are
  missing.
- Forwarding in fully connected layers and attention-layer support are not
  built.
- Only the adaptation logic has a self-checking testbench. The other blocks
  have been linted and elaborated, but they have
  not been simulated.
- Coarse synthesis of the full-size top does not finish within 10 minutes.
  Most of the cost is the 56 parallel window read ports on the register-based
  input tile.
