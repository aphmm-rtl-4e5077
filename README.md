# ApHMM in SystemVerilog: a Baum-Welch engine for profile HMMs

Training a profile hidden Markov model (pHMM) with the Baum-Welch algorithm
means, for every character of an observed sequence, updating a value for
every state of a graph from the values of its neighbours one character
earlier (Forward) or later (Backward), and then re-estimating every
transition and emission probability from the products of those two values.
The work is regular, the neighbour sets are small and fixed, and a handful
of products (transition x emission) repeat over and over. This RTL builds an
accelerator that uses those facts. It has four main ideas:

* **Broadcast instead of fetch.** The values of the previous timestamp are
  sent once, four at a time, to all 64 processing engines (PEs). Each PE
  picks out the values of its own neighbours.
* **Preset products.** Each PE keeps the 36 products alpha x e(c) of its
  state (9 neighbours x 4 DNA letters) in a small look-up table (LUT).
* **Partial compute.** Backward values are consumed as they are produced:
  the transition numerators are summed while B_{t+1} is broadcast, and the
  emission sums are updated as each B_t is written. No Backward array is
  stored.
* **A histogram filter instead of a sort.** The filter keeps only the most
  likely states of each timestamp.

## The equations

For a sequence S[1..T] and states i, j:

    F_t(i)   = sum_j F_{t-1}(j) alpha_ji e_{S[t]}(i)                  (1)
    B_t(i)   = sum_j B_{t+1}(j) alpha_ij e_{S[t+1]}(j)                (2)
    alpha*_ij = sum_t alpha_ij e_{S[t+1]}(j) F_t(i) B_{t+1}(j)  /  sum over all j of the same   (3)
    e*_X(i)  = sum_t F_t(i) B_t(i) [S[t] = X]  /  sum_t F_t(i) B_t(i) (4)

Every state emits. Start values are F_1(i) = pi_i e_{S[1]}(i) and B_T(i) = 1.

## Structure

    aphmm_top
     |- global_event_control      start the selected cores, report when all are done
     |- aphmm_core x 4
         |- control: parameter register (cfg_t), sequence buffer, sequencer
         |- hist_filter           histogram filter (16 bins)
         |- pe x 64 (16 groups of 4)
         |   |- pe_lut            36 preset alpha x e products
         |   |- update_transition 8 KB numerator scratchpad + fp_div
         |- update_emission x 4   numerator / denominator sums + fp_div
    aphmm_pkg                     types, sizes, fp32 multiply / add / bin

The host, DRAM, the L2 cache, the DMA engines and the L1 SRAM macro are not
built. Where they connect, the core has ports:

* **Graph port** (`gr_req`, `gr_dir`, `gr_id` -> `gr_rec` one cycle later).
  It returns a `graph_rec_t` for a state and a direction: up to 9 neighbour
  ids with their alpha, the 4 emissions that go with each neighbour, and pi.
  - Forward uses the state's predecessors, each with the state's own
    emissions.
  - Backward uses the state's successors, each with the successor's
    emissions.
  This way one PE datapath serves both directions.
* **Forward store** (`fs_*`, one cycle read latency). F_t(i) is written at
  address {t, i} during Forward and read back during Backward. In the full
  system this is L2/DRAM.
* **Result stream** (`res_*`, valid/ready). It carries the updated
  transitions (state, neighbour index k) and emissions (state, letter).

## One core, step by step

A run starts with `start` and ends with `done`:

1. **Forward, t = 1..T.** At t = 1 each PE computes pi * e. Each later t
   broadcasts F_{t-1} and computes F_t, which also goes to the forward store.
2. **Backward, t = T..1** (if `bwd_en`). At t = T every B is 1. Each earlier
   t broadcasts B_{t+1}. With `upd_en`:
   - each PE hands every matched lane (alpha e, F_t(i), B_{t+1}(j)) to its
     Update Transition unit (UT);
   - each new B_t(i) goes with F_t(i) and S[t] to the Update Emission unit
     (UE) of state i mod 4.
3. **Update.** Every UT, then every UE, divides its sums, and the new
   probabilities leave on the result stream.

### Passes and the broadcast

A timestamp with N states runs ceil(N/64) passes. A pass has four phases:

* **Load.** One state per cycle goes to PE (id mod 64). Its graph record is
  loaded and, when LUTs are on, the PE spends 36 cycles filling its LUT
  through its TE multiplier.
* **Broadcast.** Lines of 4 previous-step values (one 128-bit L1 line) go to
  every PE. Only the lines in a window around the pass's states are sent:
  `win` is the widest id distance of an edge, from the parameter register.
  A line whose four states were all filtered out is skipped.
  - Each PE compares the 4 lane ids with its neighbour table. It multiplies
    each matched lane by its alpha x e product (from the LUT, or from the TE
    multiplier when LUTs are off) and accumulates the result lane by lane.
  - A beat waits until every PE is ready. A PE is not ready while it fills
    its LUT or while it still hands matched lanes to its UT, one per cycle.
    Such a wait is a **stall**.
* **End of pass.** Each PE adds its 4 accumulators into the result.
* **Drain.** One result per cycle is written to the current value buffer,
  the forward store, the filter and the UE.

If all states fit in one pass (N <= 64), later timestamps of the same
direction keep the PEs' tables and LUTs and only reload F. This is the
**LUT keep** event.

The previous and current values live in two L1 arrays that swap roles each
timestamp. Each array has an active bit per state, which marks the states
the filter kept.

### Histogram filter

With `filter_en` on, each state value is filed into one of 16 bins of width
1/16. A bin is a memory block with a base and an offset; the offset is the
next free entry, so it is also the bin's count. After the timestamp the
filter walks the bins from the top, adding counts. The bin where the sum
reaches `filter_size` (500 by default) is the last one kept. Everything
below is dropped, without sorting.

This keeps every state that a sort would keep, plus the remainder of the
last bin. States that are dropped take no part in the next timestamp's
broadcast.

### Transition and emission updates

**UT.** Each UT holds an 8 KB scratchpad (2048 fp32 words), laid out as 128
slots of 16 words. One slot holds all the numerators of one state, so the
numerators for i -> j sit side by side.
- Each beat is multiplied, then read-added-written into its word.
- At the end, the UT adds a slot's words to form the denominator of Eq. 3
  and divides each word by it.

**UE.** Each UE adds F*B to the numerator of (state, S[t]) and to the
state's denominator in the same cycle. At the end it divides each of the 4
numerators by the denominator.

## Arithmetic

Everything is IEEE single precision:
- subnormals flush to zero;
- products and sums are truncated, not rounded;
- the divider (`fp_div`) is a 26-cycle restoring divider;
- a zero denominator gives 0.

Against a double-precision reference, values agree to better than 1e-3
relative over the test runs. Scaling, or log-space arithmetic, is not
implemented, so very long sequences will underflow.

## Parameters

| name | default | meaning |
|---|---|---|
| NUM_PE / NP | 64 | PEs per core (16 groups of 4) |
| LANES | 4 | values per broadcast line, multipliers and adders per PE |
| NUM_UE | 4 | Update Emission units per core |
| K_NBR | 9 | neighbours per state |
| N_SIGMA | 4 | alphabet size (DNA) |
| LUT_ENTRIES | 36 | 9 x 4 products |
| SP_BYTES | 8192 | UT scratchpad |
| NBINS, FILTER_SIZE | 16, 500 | histogram filter |
| MAX_STATES | 3072 | states per (sub)graph, enough for a 1000-base chunk of a 3-states-per-position pHMM |
| MAX_LEN | 1000 | characters per chunk |
| NCORE | 4 | cores |

The run-time configuration (`cfg_t`) has these fields:
- pHMM design id, passed to the graph port;
- Backward enable and update enable;
- filter enable and filter size;
- LUT enable;
- state count and sequence length;
- broadcast window.

## Where this departs from the source design

* **Scratchpad size.** The UT scratchpad is 8 KB, as specified. The source
  also says it holds "256 numerators", which does not match 2048 words. The
  8 KB size was kept.
* **Not built:**
  - L1/L2 caches, DMA tables and DRAM. The arrays inside the core stand in
    for the parts of L1 it needs.
  - Memory-port arbitration.
  - The 128 KB L1 organisation.
  - Per-design hardware for pHMM designs other than the traditional one.
    The graph port can describe any design with at most 9 neighbours per
    state.
* **Only one alphabet.** The alphabet is fixed at 4 letters, so protein
  workloads (20 letters) cannot run without widening N_SIGMA, the records
  and the LUT.
* **Write Selector and PE groups.** The Write Selector is a one-result-per-
  cycle drain. The PE groups exist only as hierarchy; every group sees the
  same broadcast line.
* **This design's own choices** (not given by the source):
  - the broadcast-and-match scheme, the windows and the pass structure;
  - the one-lane-per-cycle UT hand-off;
  - the arithmetic details.

## Simulating

Every testbench is self-checking and prints
`TB_RESULT checks=N failures=M`. They use a shared test package,
`tb/tb_phmm_pkg.sv`, which:
- builds random traditional pHMMs and sequences;
- produces the graph records;
- runs a double-precision Baum-Welch with the same filter rule.

Example with Verilator 5:

    verilator --binary --timing -Wno-fatal -Irtl -Itb --top-module tb_aphmm_top \
      rtl/aphmm_pkg.sv tb/tb_phmm_pkg.sv rtl/fp_div.sv rtl/pe_lut.sv \
      rtl/update_transition.sv rtl/pe.sv rtl/update_emission.sv rtl/hist_filter.sv \
      rtl/aphmm_core.sv rtl/global_event_control.sv rtl/aphmm_top.sv tb/tb_aphmm_top.sv
    ./obj_dir/Vtb_aphmm_top

| testbench | what it runs |
|---|---|
| tb_aphmm_top | full size (4 cores x 64 PEs, no parameter overrides): two jobs with core masks and different modes per core; checks every F, alpha* and e*; counts stalls, skipped lines, filtered states, LUT keeps, LUT reuse and mode switches, and fails if any is zero |
| tb_aphmm_core | one core with 8 PEs, so a timestamp needs several passes: filter + LUT, LUT off, Forward only |
| tb_pe, tb_pe_lut, tb_update_transition, tb_update_emission, tb_hist_filter, tb_fp_div, tb_global_event_control, tb_aphmm_pkg | unit tests against independent models; they also check the latencies (LUT fill 36 cycles, stall = matched lanes, divider 26 cycles) |

The full-size test takes a few seconds of simulation after a build of a few
minutes. The models used are small (up to 21 states, up to 9 characters).
The sizes are parameters of the test package's model class (up to 96 states).
