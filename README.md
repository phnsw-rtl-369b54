# pHNSW: a search processor for HNSW with PCA filtering

HNSW (hierarchical navigable small world) finds approximate nearest neighbours by
walking a layered proximity graph: each step takes the closest unexpanded
candidate, reads its neighbour list, computes the distance from the query to every
neighbour, and keeps the best. With 128-dimensional SIFT vectors, each neighbour
costs a 512-byte irregular memory read and a 128-term distance.

pHNSW cuts this cost with PCA filtering. Every point also has a 15-dimensional PCA
projection, and the database stores these projections *inside* each neighbour list.
One sequential burst therefore brings in a node's neighbour indices together with all
their low-dimensional vectors. The processor ranks the neighbours in the PCA space
and keeps only the k most promising. Only those k have their 128-dimensional vectors
fetched and their exact distances computed. k depends on the layer: 3 in layers 2–5,
8 in layer 1 and 16 in layer 0.

This repository holds synthesizable SystemVerilog for the processor that runs this
search. It has a controller, a DMA engine with an address generator, a scratchpad,
two Move units, register files, a 16-lane low-dimensional distance unit (Dist.L), a
fully parallel top-k sorter (kSort.L), a high-dimensional distance unit (Dist.H), the
candidate and result lists with their min/max units (Min.H, RMF) and a visited
bitmap (Visit&Raw). It follows the design published as *pHNSW: PCA-Based Filtering
to Accelerate HNSW Approximate Nearest Neighbor Search* (ASP-DAC 2026). Where that
publication leaves something open, this RTL makes its own choice; those choices are
listed in the section on departures.

## 1. The search, as the hardware runs it

The query `q` arrives in two forms: 128 dimensions and its 15-dimensional
projection `q_pca`. The search starts from an entry point `ep` in the top layer. It
uses three lists:

* **V**, the visited points;
* **C**, the candidates still to expand;
* **F**, the current best `ef` results.

`ef` is 1 in layers 1–5 and 10 in layer 0.

```
F <- {ep}
for layer l = top .. 0:
    V <- F ; C <- F ; f_pca <- infinity
    loop:
        c <- nearest of C (removed)            ; stop the layer if C is empty
        if dist(c) > furthest of F: stop the layer
        read c's layer-l neighbour entry (indices + PCA vectors)
        S <- neighbours e with dist_pca(e) < f_pca, the k(l) nearest in PCA space
        A <- {}
        for m in S, nearest first:
            if m in V: skip ; V <- V + m
            d <- exact 128-dim distance of m (one vector fetch)
            if d < furthest of F or |F| < ef(l):
                C <- C + m ; F <- F + m ; A <- A + m
                if |F| > ef(l): remove the furthest of F
        f_pca <- largest PCA distance in A (infinity if A is empty)
return F
```

The threshold `f_pca` is what makes this more than a plain top-k. A neighbour only
enters the sort if its PCA distance beats the worst survivor that was *accepted*
in the previous expansion. Distances are squared Euclidean and exact: vectors are
32-bit two's-complement integers (4 bytes per dimension), and distances are 73 bits
wide (`DIST_W`), so nothing overflows or rounds.

## 2. Database layout in off-chip memory

Memory is read in 64-byte bursts. In the RTL a burst is a *row* of sixteen 32-bit
words.

**Raw vectors.** Each point's 128-dimensional vector takes 512 bytes (8 rows) at
`raw_base + idx*512`.

**Neighbour-list entries.** Each layer `l` has a table with one entry slot per point
index, at `layer_base[l] + idx*m*64`. Here `m` is the neighbour count: 32 in layer 0
and 16 above. An entry holds:

```
word 0 .. m-1           neighbour indices (0xFFFFFFFF = empty slot)
word m .. m + 15m - 1   the m neighbours' 15-dim PCA vectors, point after point
```

A 16-neighbour entry is thus 1 index row followed by 15 vector rows (1 KB). A
32-neighbour entry is 2 index rows followed by 30 vector rows (2 KB). Neighbours
16–31 begin exactly on row 17, so each group of 16 neighbours is a whole number of
rows. Storing the PCA vectors next to the indices duplicates each of them once per
list they appear in. In return, a node's neighbourhood comes in with one sequential
read.

## 3. Organisation

```
                 +-------------------- phnsw_ctrl (state machine, ALU/CMP work) ---------------+
                 |                                                                             |
 off-chip  <->  dma <- agu            Move A --bus A--\                       Dist.L -> kSort.L
 memory          |                                    +--> regfile --> q_pca, 16 x 15-dim
                 v                    Move B --bus B--/        |          q, 128-dim --> Dist.H
                spm (64 rows x 512b) --two read ports--^       |
                                                               v
 visit_raw (1M-bit visited bitmap)      cand_list C (Min.H)    final_list F (RMF)
```

| Unit | Module | What it does | Cycles (from start to done) |
|---|---|---|---|
| AGU | `agu` | point index -> entry or vector address | 1 |
| DMA | `dma` | n bursts -> n SPM rows, requests pipelined | n + memory latency |
| SPM | `spm` | 64 x 512-bit rows, 1 write and 2 read ports | 1 (read) |
| Move (x2) | `move_unit` | SPM rows -> register-file rows, 1 row per cycle | n + 1 |
| Register files | `regfile` | query, 16-neighbour batch, one 128-dim vector | – |
| Dist.L | `dist_l` | 16 PCA distances in parallel, 1 dimension per cycle | 16 |
| kSort.L | `ksort_l` | filter + sort 16, keep k | 7 (14 with merge) |
| Dist.H | `dist_h` | one 128-dim distance, 16 dimensions per cycle | 9 |
| Min.H | `min_h` (in `cand_list`) | nearest candidate | combinational |
| RMF | `rmf` (in `final_list`) | find the furthest result, 2 slots per cycle | 9 (10 until freed) |
| Visit&Raw | `visit_raw` | test-and-set a visited bit | 1 if visited, 2 if new |

The published instruction table gives 1 cycle for Move, 7 for kSort.L, 1 for Min.H,
8 for RMF and "1 or 2" for Visit&Raw. The RTL keeps those figures, plus one start
cycle where a unit latches its operands.

For one expansion the controller does the following:

1. It has the AGU form the entry address and the DMA fetch the whole entry into SPM
   rows 0–31.
2. For each group of 16 neighbours, **both Move units run at once**. Move A copies
   the index row into register-file row 0. Move B copies the 15 vector rows into rows
   1–15.
3. Dist.L and then kSort.L run on the group.
4. For each survivor, the controller tests the visited bit. For a new point it
   fetches the vector into SPM rows 32–39, has Move B copy it to register-file rows
   16–23, and runs Dist.H.
5. The CMP test then updates C and F. An RMF removal follows when F is over size.

## 4. kSort.L, the parallel top-k sorter

This is the unit the design relies on to make the low-dimensional pass cheap. It
does not use a sorting network. It ranks and then selects:

1. **Load.** Each of the 16 distances gets an "absent" bit above its MSB. The bit is
   set if the slot is empty or the distance is not below `f_pca`, so such elements
   rank last. The unit also counts the survivors.
2. **Compare.** A 16 x 16 comparator matrix computes `gt[i][j] = key[i] > key[j]`. On
   equal keys the lower slot counts as smaller, so every element gets a different
   rank.
3. **Count.** The rank of element `i` is the number of 1s in row `i`, which is its
   position in ascending order. For the inputs 4, 2, 5, 8, 6 the ranks are 1, 0, 2,
   4, 3.
4. **Select.** Output position `p` takes the element whose rank equals `p`. Four
   16-input multiplexers fill four positions per cycle, so the 16 outputs take 4
   cycles.

This gives 1 + 1 + 1 + 4 = 7 cycles. The first `min(k, survivors)` outputs are
reported with their indices. The others are marked empty.

**Layer 0 (32 neighbours).** The sorter is 16 wide, so the two groups of 16 go
through it one after the other. The second run has `merge` set. After sorting
group B, the unit pairs it with the kept result A of group A as
`min(A[j], B[15-j])`. For two ascending lists this "half-cleaner" step yields
exactly the 16 smallest elements of their union. Those are ranked and selected
again and cut to k. The merge therefore costs 14 cycles instead of 7. The published
design describes only the 16-element sorter, so this merge step is this
implementation's addition.

## 5. The visited list

`visit_raw` keeps one bit per point: 1M bits, sized for SIFT1M. The algorithm
restarts V at every layer, and sweeping 32K words each time would cost more than the
search itself. Instead, every word that receives a bit is also recorded in a
256-entry log, and `clear` zeroes only the logged words. If the log overflowed, or
after reset, the whole bitmap is swept at one word per cycle. At the default size
that sweep is 32,768 cycles; `busy` stays high until it ends.

## 6. Using the top level (`phnsw_top`)

1. Reset, then wait for `busy` to fall (the reset sweep).
2. Write the query through `q_we/q_hi/q_addr/q_data`. With `q_hi=1`, use addresses
   0–127 for the 128-dim vector. With `q_hi=0`, use addresses 0–14 for the PCA
   vector.
3. Set `layer_base[0..5]` and `raw_base`.
4. Pulse `start` with `ep` and `top_layer`.
5. When `done` pulses, `res_valid/res_idx/res_dist` hold F, the `ef(0)=10` nearest
   points found (unordered). `stats` counts the expansions, distance stops, merges,
   visited hits, vector fetches, RMF removals and cycles.

Memory port: `mem_req_valid/ready/addr` carries one 64-byte-aligned read request
per accepted cycle. `mem_rsp_valid/data` must return one 512-bit burst per request,
in order, with no back-pressure.

Parameters of the top: `N_POINTS` (visited bitmap size, default 2^20), `C_SIZE`
(candidate list, 64) and `LOG_DEPTH` (clear log, 256). The per-layer `k`, `ef` and
`m` values, the dimensions and the widths live in `phnsw_pkg`.

## 7. Departures from the published design, and how far to trust this RTL

* **No instruction set.** The published processor runs the search as a program of
  32-bit custom instructions (Move, DMA, Visit&Raw, kSort.L, Min.H, RMF, JMP) from
  an instruction memory. Their encoding and the program are not published. Here a
  state machine issues the same unit operations in the algorithm's order. The ALU
  and CMP work (counters, distance tests) is done inside it. The instruction memory
  and decoder are not built.
* **Own choices** where the publication is silent:
  * number format (integers), distance metric (squared L2) and all widths;
  * the memory channel protocol;
  * the table placement (one slot per point per layer, 40-bit addresses);
  * the Dist.L/Dist.H schedules (1 dimension per cycle / 16 dimensions per cycle);
  * how the 7 kSort.L cycles split, and the layer-0 merge;
  * the candidate-list size (64, with the furthest entry replaced on overflow) and
    the F size (16 slots);
  * the visited-list clearing scheme;
  * resetting `f_pca` to infinity at each layer and after an expansion that
    accepted nothing.
* **Visit&Raw.** The publication's instruction of that name reads and writes both
  the visited state and raw data in the SPM. Here `visit_raw` holds only the visited
  bitmap, and the Move units read the raw rows.
* **Memory.** The publication gives a single 128 KB SPM that also holds the 1M-bit
  visited list. Here the bitmap (128 KB) and a 4 KB row buffer are separate arrays.
* **Table placement.** One entry slot per point index in every layer spans 7 GiB
  of address space at SIFT1M scale. Only about 2.6 GB of it is populated, counting
  the raw vectors. The 4 GB DDR4 used in the publication's evaluation would need a
  denser layout for layers 1–5.
* **Bandwidth.** At one burst per cycle the DMA reaches 64 GB/s at 1 GHz. That is
  enough for DDR4 (19.2 GB/s) but half of HBM 1.0 (128 GB/s).
* **Reading of the listing.** The published pseudocode "extracts" the furthest
  element of F at the top of each expansion and again before each acceptance test,
  but removes from F only when it grows beyond `ef`. Here the furthest element is
  looked up, not removed, as in the original HNSW search.
* **Verification.** Every unit has a self-checking testbench with an independent
  model, and each testbench has been shown to catch a deliberately broken copy of
  its unit. The end-to-end test runs the top at its default parameters. It builds a
  random 400-point, 3-layer database that includes empty neighbour slots. It also
  builds a separate 800-point layer-0 "line" graph, where each point links to the
  next 32 and the query lies beyond the end. That query makes each expansion accept
  16 new points, which overfills the candidate list and the visited-list clear log.
  Four queries are run. For each, the result list and every event counter are
  compared with a separate procedural model of the search above, including the
  candidate-list overflow policy. The test requires each mechanism to occur:
  * distance stop and empty-list stop;
  * layer-0 merge and the top-k cut;
  * visited hits and RMF removals;
  * threshold filtering;
  * candidate-list overflow;
  * log-based clearing, and the full sweep after a log overflow.

  On the random database one query takes about 9,500–10,000 cycles with a 24-cycle
  memory latency. This says nothing about recall or throughput on SIFT1M, which was
  not simulated.

## 8. Simulating

Each testbench is a self-contained top module in `tb/`. It prints
`TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
          rtl/phnsw_pkg.sv $(ls rtl/*.sv | grep -v phnsw_pkg) \
          tb/tb_phnsw_top.sv --top-module tb_phnsw_top -o sim
./obj_dir/sim
```

The package has to come first. `-Wno-fatal` keeps lint warnings from stopping the
build. Most of them are width warnings on the testbenches' random stimulus.

Replace `tb_phnsw_top` with `tb_ksort_l`, `tb_dist_l`, `tb_visit_raw` and so on for
the unit tests. The end-to-end test uses the top's default parameters and finishes
in well under a second.

Files: `rtl/phnsw_pkg.sv` holds the shared types and constants. The other `rtl/*.sv`
files hold one module each, and `tb/tb_<module>.sv` holds the matching testbench.
