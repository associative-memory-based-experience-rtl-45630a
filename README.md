# AMPER sampling accelerator: prioritized experience replay in associative memory

Deep Q-network agents learn from a replay memory of past experiences. Prioritized
experience replay (PER) draws each experience with probability proportional to its
priority (its temporal-difference error). Software does this with a sum tree. Each draw
and each priority update walks the tree from root to leaf, and those scattered memory
accesses dominate the time spent in replay.

AMPER avoids the tree. Each sampling request first builds a small *candidate set of
priorities* (CSP) in which large priorities appear more often than small ones. It then
samples that set uniformly. The candidate set is found by searching for priority
*values*, which is what a ternary content-addressable memory (TCAM) does in a single
step over every stored row. This RTL is a digital model of such an accelerator. The
priorities sit one per row in a bank of TCAM arrays, next to a random number generator,
a query generator and a candidate set buffer. One request runs the whole algorithm and
returns a batch of sampled experience addresses with their priorities.

## The algorithm the hardware runs

The priority range `[0, Vmax]` is split into `m` equal groups. Group `g_i` covers
`[i*Vmax/m, (i+1)*Vmax/m]`. For each group, in order:

1. Draw a random value `V(g_i)` inside the group.
2. Collect entries whose priority lies near `V(g_i)`. Two variants are built, and
   `cfg_mode` chooses between them for each request:
   * **kNN**: take the `N_i = round(lambda * V(g_i) * C(g_i))` entries nearest to
     `V(g_i)`. `C(g_i)` is the number of stored priorities in the group. The subset
     therefore grows with both the group's value and its population.
   * **frNN** (fixed-radius): take every entry within `Delta_i = round(lambda'/m * V(g_i))`
     of `V(g_i)`. No count is needed.
3. Append the chosen entries to the candidate set.

Finally, draw `batch` uniform positions in the candidate set. The entries found there are
the sample.

## Block structure

```
                 +-----------+   V(g_i)   +------------------+  query (data, don't-care)
   seed -------->|   urng    |----------->| query_gen_frnn   |---------+
                 | 32b LFSR  |            | query_gen_knn    |         |  broadcast
                 +-----------+            +------------------+         v
                       |                        ^ C(g_i)     +--------------------+
                       | sample positions       |            | tcam_bank          |
                       |               +--------------------+| ARRAYS x tcam_array|
                       |               |group_count_tracker || (ROWS x 32 each)   |
                       |               +--------------------+|  exact-match vector|
                       |                        ^ writes     |  best match        |
                       v                        |            +--------------------+
                 +-----------------------+      |              |match     |best
                 | candidate_set_buffer  |<-----+--------------+----------+
                 | 8000 x {addr, prio}   |   match_collector (one match per cycle)
                 +-----------------------+
                       | smp_addr, smp_prio
```

| module | role |
|---|---|
| `amper_accelerator` | top level: sequencer for the steps above, host write port, sample output |
| `urng` | 32-bit Galois LFSR, x^32+x^22+x^2+x+1, one word per cycle |
| `q_multiplier` | saturating fixed-point multiplier, used for N_i, Delta_i and range scaling |
| `query_gen_frnn` | multiplier, then `mask_generator`, then OR gates: the prefix query |
| `mask_generator` | marks the leftmost 1 of Delta_i and every bit to its right |
| `query_gen_knn` | one multiplier used twice for N_i, then repeats V(g_i) N_i times |
| `tcam_bank` | ARRAYS arrays, broadcast query, global best match |
| `tcam_array` | ROWS x 32-bit entries; exact-match and best-match sensing |
| `best_match_sense` | winner-take-all: fewest mismatching cells among eligible rows |
| `match_collector` | turns the match vector of one search into a stream of addresses (two-level priority encoder, 64-bit chunks) |
| `candidate_set_buffer` | the CSP memory; appends, drops and flags overflow, random-access read |
| `group_count_tracker` | keeps C(g_i) up to date on every priority write |
| `amper_pkg` | the 32-bit word, the ternary query struct, the mode enum |

## The prefix query: fixed-radius search in one exact-match step

An exact-match TCAM cannot compare magnitudes. It can, however, ignore bits. If the low
`k` bits of the query are don't-care, one search returns every entry that shares the
upper `32-k` bits with `V(g_i)`. That set is an aligned block of `2^k` consecutive
values containing `V(g_i)`. The query generator chooses `k` from the radius:

1. `Delta_i = round(lambda'/m * V(g_i))` (one multiply).
2. `p` = position of the leftmost 1 of `Delta_i`. The mask is 1 at bit `p` and at every
   bit below it. This is an OR chain, `mask[j] = |delta[31:j]`.
3. `query.data = V | mask` and `query.dc = mask`. The OR gates set the masked bits, and
   the don't-care word tells the cells to ignore them.

Example with 8-bit values: `V = 10101010`, `Delta = 00001001`, `p = 3`,
`mask = 00001111`, query `1010xxxx`. This matches the 16 values `10100000` to
`10101111`. The accepted block is a power of two between `Delta_i + 1` and
`2*Delta_i` wide. It is aligned to that power of two, not centred on `V(g_i)`. This is
the approximation error of the method: `V` can sit anywhere in the block. `Delta_i = 0`
gives an exact search for `V(g_i)`.

In the array, a cell mismatches when its bit differs from a query bit that is not
don't-care. A row matches when no cell mismatches and the row holds a priority (valid
bit). All matches of one search are latched by `match_collector`. It hands them to the
buffer one per cycle, lowest address first.

## kNN: repeated best-match searches

The kNN variant uses best-match sensing instead. The array reports the valid row with
the fewest mismatching cells, the one whose matchline would discharge slowest. A real
winner-take-all circuit does this in analog. Here every row's mismatch count (the
Hamming distance to `V(g_i)`) is computed, and `best_match_sense` selects the minimum;
ties go to the lower address. Each search yields one neighbour. To get the next-nearest
one, the chosen row is marked in an exclusion vector (`chosen`), and the next search
ignores marked rows. The vector is cleared at the start of each group, so groups are
independent. A group ends after `N_i` searches. It ends earlier if a search finds no
eligible row; `knn_exhausted` then reports this.

"Nearest" here means fewest differing bits, not smallest numeric difference. For example,
`0111...1` and `1000...0` are numerically adjacent but differ in every bit. This is
inherent in using TCAM best match for nearest-value search. Software kNN on real-valued
priorities picks a somewhat different set.

`C(g_i)` comes from `group_count_tracker`. On every host write it increments the group of
the new value and decrements the group of the value being replaced. The old value is read
through the array read port. The group of a value `v` is the number of boundaries
`k*Vmax/m` (`k = 1..m-1`) that `v` reaches, so a value on a boundary belongs to the upper
group. Values above `Vmax` go to the last group.

## Number formats

* Priorities: unsigned 32-bit integers. The host chooses the quantisation of its
  real-valued TD errors and supplies `cfg_gw = Vmax/m`.
* `cfg_lambda` and `cfg_lambda_pm` (= lambda'/m): unsigned fixed point with 16 fraction
  bits (UQ16.16). `FRAC` is in `amper_pkg`.
* `N_i` is computed as `round(round(V * C) * lambda)`. The first product passes `C` as
  `C << 16` through the same rounding multiplier, so it is exact. Products saturate at
  2^32-1.
* `V(g_i) = i*gw + round(rnd * gw / 2^32)`, so `V` lies in the closed range
  `[i*gw, (i+1)*gw]`. Sample position = `floor(rnd * len / 2^32)`.

The resolution of lambda is tied to the priority scale. With 8192 priorities spread over
`Vmax = 2^12`, lambda = 5/2^16 gives a candidate set of about 16 % of the memory. With
`Vmax = 2^20` the same ratio would need lambda below 2^-16, so use a smaller `Vmax` or
raise `FRAC`.

## Timing

One TCAM search, one buffer write or one buffer read takes one clock cycle. Search and
array reads are combinational; writes land at the clock edge.

| phase | cycles |
|---|---|
| frNN group | 5 + number of matches |
| kNN group | 6 + number of searches (N_i, or up to the first empty search) |
| sampling | batch + 2 (2 if the candidate set is empty) |

`done` pulses one cycle after the last phase. Samples come out one per cycle with
`smp_valid`. As in the circuit study this model follows, the frNN latency is set by the
buffer writes, one per match. kNN adds one search per candidate. Changing `m` adds only
a few cycles per group.

Circuit-level delays (TCAM search 0.58 ns exact or 1.0 ns best match, write 2 ns, buffer
0.78 ns) are not modelled. A clock period long enough for the slowest step is assumed.

## Host interface

* `wr_en / wr_addr / wr_data` store or update the priority of entry `wr_addr`. They are
  accepted only while idle (`wr_ready`). There is one copy per entry, so an update is a
  single write.
* `mem_clear` (while idle) invalidates all entries and zeroes `C(g_i)`. Group counts use
  `cfg_m` and `cfg_gw` at the time of each write. After changing either, clear the memory
  and rewrite the priorities before running kNN.
* `start` captures `cfg_mode`, `cfg_m` (1..MAX_GROUPS), `cfg_gw`, `cfg_lambda`,
  `cfg_lambda_pm` and `cfg_batch` (1..MAX_BATCH), then runs one request.
* After `done`: `csp_len`, `csb_overflow` (candidates beyond the buffer depth were
  dropped), `knn_exhausted` and `search_ops` (TCAM searches issued) describe the run.
* `seed_load / seed` reseed the LFSR (a zero seed is replaced by the default).

## Sizes

The defaults are those of the evaluated configuration: 128 arrays of 64 rows (8192
entries), a 32-bit priority per row, an 8000-entry candidate buffer, up to 20 groups and
batches of 64.

| workload | fits at defaults |
|---|---|
| replay memory 2000 or 5000 (CartPole) | yes |
| replay memory 8192 | yes (this is the built size) |
| replay memory 10000 (Acrobot) or 20000 (LunarLander) | no: set `ARRAYS` to 157 or 313 or more |
| candidate set at 15 % of 20000 = 3000 | fits the 8000-entry buffer |

A buffer word is `{13-bit address, 32-bit priority}`. The address width follows
`ARRAYS*ROWS`.

## Behaviour on replay-memory workloads

`amper_workload_tb` fills the full-size bank with 2000 and then 5000 priorities, the
CartPole memory sizes. The priorities are skewed: each is the smaller of two uniform
draws in `[0, 4096)`, so small values are common and large ones rare. Each memory gets
four requests per variant with `m = 20` and batches of 64, and 64 priority updates after
each request. All results are checked against the reference model. The run also prints
how prioritised the sampling is:

| memory | variant | candidate set (ratio) | searches | cycles | mean of memory | PER expectation sum(p^2)/sum(p) | mean of candidates | mean of samples |
|---|---|---|---|---|---|---|---|---|
| 2000 | kNN, lambda = 7/2^16 | 295-301 (0.15) | = CSP | 481-487 | 1376 | 2066 | 1658 | 1775 |
| 2000 | frNN, lambda'/m = 655/2^16 | 175-203 (0.09-0.10) | 20 | 341-369 | 1365 | 2047 | 2042 | 2083 |
| 5000 | kNN | 736-748 (0.15) | = CSP | 922-934 | 1382 | 2046 | 1676 | 1680 |
| 5000 | frNN | 474-537 (0.09-0.11) | 20 | 640-703 | 1383 | 2044 | 2021 | 1917 |

Both variants clearly favour large priorities over uniform replay. The frNN variant lands
close to the PER expectation. kNN lands lower because its neighbours are chosen by bit
distance (see above), which pulls in values from other groups. frNN needs one search per
group, so its run time is set by the buffer writes. kNN needs one search per candidate.

## Where this model departs from the source design or fills gaps

* A TCAM row holds 32 binary cells plus a valid bit. The source design gives 64 columns
  per array and also 32-bit priorities. The 64 columns are read here as two bit lines per
  ternary cell. Stored don't-care values are not used.
* The buffer depth is 8000 words. Its size is quoted as both 0.3 MB and 0.03 MB; 8000
  32-bit words is 0.03 MB.
* This design adds its own sequencer, the valid/ready handshake inside the kNN query
  generator, the match collector's one-per-cycle order, drop-on-overflow, the exclusion
  vector for repeated best-match searches, the array read port, `mem_clear`, the
  fixed-point formats, the LFSR polynomial and seed, and the tie-breaking rules.
* Precharge, matchline sense amplifiers and the 16-transistor cell are analog and appear
  only through their logic function. The winner-take-all has no limit on the mismatch
  count it can resolve.
* The DQN agent that writes priorities and consumes samples is outside this RTL.

## Simulating

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/amper_ref_model.svh` is an independent reference
model of a whole request, written from the algorithm: it computes group counts by
division, scans every entry for best matches and steps the LFSR bit by bit. The three
top-level testbenches use it.

* `amper_accelerator_tb`: 4 x 16 entries, a 40-entry buffer, about 60 requests of both
  kinds. It checks every sample, the flags, the search count and the exact cycle count.
  It also checks that each mechanism occurred: don't-care and exact frNN queries, kNN
  groups with several searches, kNN running out of rows, buffer overflow, an empty
  candidate set, mode switches, priority updates and memory clear.
* `amper_accelerator_full_tb`: default parameters (8192 entries, m = 20, batch 64). It
  makes one frNN and one kNN request with a candidate set of about 16 % and takes about
  10 s.
* `amper_workload_tb`: default parameters, replay memories of 2000 and 5000 skewed
  priorities, four requests per variant with updates in between (see the workload table
  above). It checks every result against the model. It also checks that the candidates
  and samples have a mean at least 1.15 times the memory mean.

With plain Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/amper_pkg.sv tb/amper_accelerator_tb.sv --top-module amper_accelerator_tb
./obj_dir/Vamper_accelerator_tb
```

Verilator has two states: every register that is read is reset, and the TCAM cell
contents are qualified by valid bits. To scale the design, change the top's parameters
`ARRAYS`, `ROWS`, `CSB_DEPTH`, `MAX_GROUPS` and `MAX_BATCH`. The word width and `FRAC`
are in `amper_pkg`.
