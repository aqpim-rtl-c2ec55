# AQPIM pseudo-channel: attention on a product-quantized KV cache inside HBM-PIM

Long contexts make an LLM's key/value cache too large for the banks of a
processing-in-memory (PIM) stack. AQPIM shrinks the cache by **product
quantization (PQ)** inside the memory. It does the attention directly on the
compressed form, so no decompression is needed and no new arithmetic units
are added.

- Each key or value vector of a head is split into `m` subvectors.
- Each subvector is replaced by the index of its nearest centroid in a small
  per-subvector codebook of `K` entries.
- For attention, the bank computes the inner product of the query with all
  `K` key centroids once.
- Every token's score is then a sum of `m` table lookups. Likewise, every
  value is a sum of `m` codebook lookups.

Random lookups in DRAM are slow, because each one may open a new row. The
design avoids that with two measures:

- **Page-aware windowed clustering.** Tokens are clustered in windows. The
  `K = 512` centroids of a window are chosen so that its 512 inner products
  fill exactly one 1 KB DRAM row (512 16-bit words).
- **Intra-row indirection.** A multiplexer in front of the bank's column
  decoder can take the column address from a lookup index held in the PE's
  register file, instead of from the memory controller.

As a result, all the lookups of a window cost one row activation.

This RTL is one **pseudo-channel slice serving one attention head**. It has
`NB = 32` banks. Bank `i` holds subvector `i` of every token, and next to
each bank sits a bank-level PE (BankPE). One buffer-die PE (BufferPE) joins
the banks. A host, the GPU's memory controller, drives it with a small
PIM command set.

## Block structure

```
            cmd / rd_data (PIM command port)
                     |
             +---------------+
             |  aqpim_pch    |  command decoder, config register
             +---------------+
        op / host access |  start / mode
   +------------+--------+-------------------------+
   |            |                                  |
 bank_pe[0] ... bank_pe[NB-1]   <== MV_BA ==>   buffer_pe
   |            |               <== MV_BF ==    (CA argmin, reciprocals,
 dram_bank[0]   dram_bank[NB-1]                  score sum, softmax,
 (row buffer, column decoder,                    softmax buffer,
  indirection MUX)                               seq_div x NB, fx_exp)
```

| file | role |
|---|---|
| `rtl/aqpim_pkg.sv` | number formats, command/struct types, per-bank row map |
| `rtl/dram_bank.sv` | one bank: array, open row, column decoder, indirection MUX, activation counter |
| `rtl/bank_pe.sv` | BankPE: DC, CC, ATNK, RET lookups, ATNV, COPY, MV_BF writes |
| `rtl/buffer_pe.sv` | BufferPE: CA, CC reciprocals, score summation, softmax, MV_BF streams |
| `rtl/seq_div.sv` | restoring divider, one quotient bit per cycle |
| `rtl/fx_exp.sv` | combinational e^y for y <= 0 |
| `rtl/aqpim_pch.sv` | top: decoder, NB bank/PE pairs, one BufferPE |

The work is split between the two PEs by how much data each step moves
between banks:

- The BankPE uses only adders and multipliers. It computes:
  - distances (DC);
  - the numerator of the weighted centroid and the final multiply (CC);
  - the query-centroid inner products (ATNK);
  - the value accumulation (ATNV).
- The BufferPE holds the parts that need every bank, or that are costly in
  area:
  - the argmin of cluster assignment (CA);
  - the divisions;
  - the exponential;
  - the softmax buffer.

## How a window is clustered

The importance-weighted k-means update is

    c_k = sum_{n in k} w_n x_n / sum_{n in k} w_n

where `w_n` is an importance weight per token, supplied by the host. One
iteration is four commands:

1. `PIM_MAC_AB fn=DC`. Every BankPE loads token `x_n` (d/m = 4 words) and
   streams the squared distance to each centroid over MV_BA. The BufferPE
   accepts a word only when all NB banks offer one (a join). It keeps a
   running minimum per bank and, at the last centroid, writes the winner
   into its assignment table.
2. `PIM_MV_BF fn=IDX`. The assignments go back to each bank's index row.
3. `PIM_SFM fn=1`. The BufferPE sums the weights of each cluster, per bank,
   and divides `2^24` by each sum. An empty cluster is marked with bit 39.
4. `PIM_MAC_AB fn=CC`. Each BankPE receives the reciprocals of a block of 8
   centroids into GRF_EVEN. It accumulates `w_n x_n` over the window's
   tokens, multiplies by the reciprocal and writes the new centroid. A
   marked (empty) centroid keeps its old value.

The host repeats this four times (four iterations are enough to converge),
then runs one last DC + IDX. `PIM_MAC_AB fn=COPY` starts a new window by
copying the previous window's codebooks into the new window's rows. A token
added during decoding is assigned with a DC and IDX on just that token.

## How attention runs on the compressed cache

1. `PIM_WR tgt=GRF` puts each bank's query subvector into GRF_ODD.
2. `PIM_MAC_AB fn=ATNK` computes `IP[k] = q . Kcb[k]` for all K centroids and
   writes them into the window's single inner-product row.
3. `PIM_RET` works in batches of 8 tokens:
   - it reads the key indices into GRF_EVEN (one row);
   - it reads the IP row eight times with `ind = 1`, so each column comes
     from the GRF through the MUX;
   - the looked-up values stream to the BufferPE, which adds them over all
     NB banks and stores the token's score in the softmax buffer.

   This costs exactly two activations per bank per batch, and the
   testbenches check that number.
4. `PIM_SFM fn=0` runs the softmax over the first `cnt` scores:
   - find the maximum;
   - compute `e^(s-max)` with `fx_exp` and sum;
   - divide once, `2^31 / sum`;
   - do one multiply per entry.
5. `PIM_MV_BF fn=PROB` broadcasts the probabilities of a window into every
   bank's probability row.
6. `PIM_MAC_AB fn=ATNV` computes `out[j] = sum_n p_n * Vcb_j[vidx_n]`, again
   by indirect reads within one codebook row per dimension. With `c != 0`
   it adds to the previous window's result. The output stays in GRF_ODD and
   is read with `PIM_RD tgt=GRF`.

## Row map of a bank

A window `w` owns `win_rows(WIN_TOK)` consecutive rows: 105 rows at
`WIN_TOK = 4096`, so the default `N_WIN = 2` gives 210 rows. The rows, in
order:

| rows | content |
|---|---|
| `4 x tok_rows` per kv | token subvectors, dimension-major: dim j of token n at row `j*tok_rows + n/512`, column `n%512` |
| `4` per kv | codebook, one row per dimension, centroid k at column k |
| `tok_rows` per kv | centroid index per token |
| `tok_rows` | importance weight per token |
| `tok_rows` | softmax probability per token |
| `1` | inner-product table |

`kv = 0` is the key set and `kv = 1` the value set. `tok_rows = WIN_TOK/512`.
The address functions are in `aqpim_pkg` (`row_x`, `row_cb`, `row_idx`,
`row_w`, `row_p`, `row_ip`).

## Command port

`cmd` is a `pim_cmd_t` struct with the fields `op`, `fn`, `tgt`, `kv`,
`bcast`, `bank`, `row`, `a`, `b`, `c` and `data`. It is taken when
`cmd_valid && cmd_ready`. `cmd_ready` stays low until the command has
finished in every PE. For compute commands `row` is the window number, and
`a` / `b` are the first token and the count.

| op | meaning |
|---|---|
| `PIM_SET_CONFIG` | a = tokens N in the window, b = centroids K, c = d/m |
| `PIM_WR`, `PIM_RD` | bank word (bank, row, a = column), GRF word, or BufferPE weight (`tgt`); `bcast` writes all banks; reads answer on `rd_valid`/`rd_data` |
| `PIM_ACT_AB` | open `row` in every bank |
| `PIM_MAC_AB` | fn DC, CC, ATNK, ATNV, COPY as above |
| `PIM_RET` | key lookups and score summation |
| `PIM_SFM` | fn 0 softmax, fn 1 CC reciprocals |
| `PIM_MV_BF` | fn IDX assignments, fn PROB probabilities |
| `PIM_MV_BA` | accepted, no effect: the transfer happens inside DC and RET |

Bank timing:

- A request that hits the open row is acknowledged in the next cycle.
- A miss takes `T_ACT + 2` cycles from request to acknowledge.
- Every BankPE access takes two cycles on a hit.

## Number formats

The PEs described for this architecture are FP16 MAC units. This RTL uses
fixed point instead:

- data, codebooks, the query, inner products and outputs: signed Q8.8;
- importance weights: unsigned Q8.8;
- probabilities: unsigned Q1.15;
- distances and sums over the banks: 40 bits;
- accumulators: 64 bits;
- results: saturated to 16 bits.

The exponential uses `2^f ~= 1 + 0.6557 f + 0.3443 f^2` for the fractional
part (error below 0.4 %), with a shift for the integer part. The query is
expected to be scaled by `1/sqrt(d)` already.

## Departures and limits

- **Number format.** Fixed point rather than FP16. This is why BankPE and
  BufferPE count as partial.
- **One BankPE per bank.** The published floorplan places one BankPE
  between two banks.
- **One 16-bit word per bank access.** A real HBM column access moves
  32 bytes.
- **Banks.** The rows are write-through, and the activation time is a
  parameter.
- **Softmax range.** The softmax covers buffer entries `[0, cnt)`, so every
  window except the last must be full (`WIN_TOK` tokens).
- **Sink and recent tokens.** The full-precision attention over the
  8 "sink" tokens and the 32 most recent tokens is not modelled.
- **Not built:**
  - the command/scalar register files named next to the BankPE;
  - the HBM PHY and TSVs;
  - the host.
- **Capacity.** Default capacity is 8192 tokens per head (2 windows of 4096).
  A 32K context needs `N_WIN = 8`.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=N failures=M`, has a watchdog, and runs with plain
verilator, for example:

    verilator --binary --timing --assert -Irtl rtl/aqpim_pkg.sv tb/tb_aqpim_pch.sv \
              --top-module tb_aqpim_pch && ./obj_dir/Vtb_aqpim_pch

| testbench | what it checks |
|---|---|
| `tb_dram_bank` | direct and indirect reads, hit/miss latency, activation counts |
| `tb_bank_pe` | every BankPE function bit-exact against integer arithmetic; RET under random back-pressure and its activation count; empty-cluster rule |
| `tb_buffer_pe` | argmin with ties under staggered bank streams, reciprocals, softmax against real exponentials (within 0.004) |
| `tb_aqpim_pch` | 4 banks, 32-token windows, two windows. Bit-exact k-means against a reference model (including an empty cluster), window copy, token append, RET activation count, softmax and attention output against real arithmetic. Fails if any mechanism never happened |
| `tb_aqpim_full` | the same flow at the default size (32 banks, 4096-token windows), on a 33-token context |

The largest size simulated is the full default configuration:
`tb_aqpim_full` takes about a minute to build and a few seconds to run.
