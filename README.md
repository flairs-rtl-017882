# FLAIRS kernel: backdoor-resistant federated-learning aggregation in hardware

In federated learning a server merges the model updates of many clients into one global
model. Two threats pull in opposite directions. Poisoned clients can slip a backdoor into the
merged model, and a defence has to look at every update to catch them. A curious server can
learn about a client's data from its update, and a privacy defence has to hide every update
from the server. FLAME is a defence that filters, clips and adds noise. Running it under
secure multi-party computation protects privacy but costs minutes per round. FLAIRS runs FLAME
inside a trusted execution environment on an FPGA instead: updates are decrypted only inside
the attested FPGA configuration, and the FLAME arithmetic runs on dedicated processing
elements (PEs).

This repository is synthesizable SystemVerilog for that FPGA kernel: the five PEs, the noise
generator they need, a controller that chains them (together `flairs_top`), and the 512-bit
AXI4 master through which the kernel reaches DRAM (`axi_burst_bridge`). `flairs_kernel` joins
the two and is the top level. The host-side scheduler, the TEE,
attestation and encryption are software or platform features, not kernel logic, and are not
included.

## What one aggregation round computes

The inputs are the global model `g` and `n` local models `w_1 .. w_n`, each of `P`
parameters, all in DRAM. The kernel computes the following, with every value in Q16.16 fixed
point:

1. **Differential vectors and norms (Prep PE).** `d_i = w_i - g` and `||d_i|| = floor(sqrt(sum_k d_i[k]^2))`.
2. **Cosine distances (Cosine PE).** `dist_ij = 1 - (d_i . d_j) / (||d_i|| ||d_j||)` for every
   pair `i < j`.
3. **Filtering (HDBSCAN PE).** It finds the one cluster of models holding at least `n/2 + 1`
   of them. Members get label 1 (accepted) and all others get label 0.
4. **Clipping bound (Scale PE).** `S_t` is the median of the norms, and
   `scale_i = min(1, S_t / ||d_i||)`.
5. **Aggregation and noise (Agg PE).** For each parameter,
   `G[k] = (sum over accepted i of (g[k] + d_i[k] * scale_i)) / accepted_num + lambda * z_k`,
   where `z_k` is approximately N(0,1).

The result `G` is written back to DRAM.

```
              DRAM: global model, local models, differential vectors, aggregated model
                 |  ^                  |                                  |   ^
                 v  | d_i              | d_i (passes >= 1)          d_i   v   | G
             +--------+  d_i, norms  +-----------+  dist_ij  +---------+ labels  +--------+
 start ----> | Prep   | -----------> | Cosine    | --------> | HDBSCAN | ------> | Agg    |
             | PE     |              | PE        |           +---------+         | PE     |
             +--------+              | (cascade) |           +---------+ scales, | (clip, |
                 | norms             +-----------+     +---> | Scale   | ------> |  mean, |
                 +-------------------------------------+     +---------+ median  |  noise)|
                                                                                 +--------+
                                                                     gauss_noise --^
```

Not drawn: Agg also reads, through a side port of the Cosine PE, the vectors that the cascade
still holds when it finishes (see below).

`flairs_top` runs three phases. First, Prep and Cosine run together: the Cosine PE consumes
the Prep PE's stream as it is produced. Second, HDBSCAN and Scale run together, since neither
needs the other's result. Third, Agg runs. `done` pulses at the end.

## The cosine cascade (the part worth reading first)

The pairwise distances cost `n^2/2` dot products of length `P`. This is almost all of the
work: in the original FPGA measurements, cosine distances and aggregation made up to 98% of
the runtime. The Cosine PE handles them with a *cascade* of `N_STAGES` identical stages
(`cosine_stage`), chained by a one-register forward path:

- In each pass, a stage keeps the first vector that reaches it in its own RAM and does not
  pass it on. Stage 0 keeps `d_a`, stage 1 keeps `d_{a+1}`, and so on.
- Every later vector `d_j` that reaches a stage is multiplied word by word with the stored
  vector and accumulated (the multiply-accumulate loop). The vector is also forwarded to the
  next stage. Stage `s` therefore produces row `a+s` of the distance matrix while the vectors
  stream past.
- When `d_j` ends, the stage's finishing step multiplies the two norms, divides the dot product
  by that product, and subtracts the result from 1. It then offers `(i, j, dist_ij)` to a
  fixed-priority arbiter that writes one distance per cycle into the HDBSCAN PE's distance RAM.

Pass 0 is fed straight from the Prep PE, so the first `N_STAGES` rows cost no extra DRAM
traffic. If `n > N_STAGES + 1`, the PE runs more passes. Pass `p` clears the stages and re-reads
the differential vectors of clients `p*N_STAGES .. n-1` from DRAM, where the Prep PE wrote them.
There are `ceil((n-1)/N_STAGES)` passes in all: 13 for `n = 100` with 8 stages.

Two things can hold the cascade, and both stop all stages and the source together through a
single `adv` (advance) signal:

- **Finish busy.** A stage raises `stall_req` when a new vector ends in it while its divider
  is still finishing the previous distance. With `P = 1024` this never happens, because the
  division of about 90 cycles is much shorter than a vector. With short vectors it does
  (output `cos_stalled`).
- **Norm not yet known.** In pass 0 the norm of `d_j` comes out of the Prep PE's square root
  about 40 cycles after `d_j` ends. The finishing step waits for it; the stream keeps moving
  meanwhile.

A pass ends after the last vector has been fed, then `N_STAGES + 1` advance cycles have
flushed the forward registers, and then every stage's finishing step is idle.

The stage RAMs are not cleared when the PE finishes. After the last pass, stage `s` still holds
the vector of client `a+s`, where `a` is the first client of that pass (clients 96 to 99 for
`n = 100` and 8 stages). Each stage has a second, combinational read port for this. The
Aggregation PE asks the Cosine PE for client `i` and word `k` (`lk_client`, `lk_idx`). If a stage
holds that client, `lk_hit` is high and the word comes back in the same cycle, with no DRAM
access. Only the vectors of the other accepted clients are read from DRAM.

## The PEs one by one

| Module | Role | Cost per round (cycles, roughly) |
|---|---|---|
| `prep_pe` | Copies `g` into an on-chip RAM, then streams every `w_i`. It forms `d_i`, sends it to the cascade and back to DRAM, and accumulates `d^2`. A digit-by-digit square root (`isqrt_seq`) gives the norm while the next vector streams. | 2-3 per word read |
| `cosine_pe`, `cosine_stage` | The cascade above | 2-3 per word read, per pass |
| `hdbscan_pe` | Prim's minimum spanning tree over the distance matrix, then tree edges merged shortest first until a component has `n/2+1` members | about `3 n^2` |
| `scale_pe` | Odd-even transposition sort of the norms (`n` cycles), median, then `S_t/‖d_i‖` by a sequential divider | about `50 n` |
| `agg_pe` | Per parameter: fetches `d_i[k]` of the accepted clients (from a cascade stage RAM when the last pass left the vector there, otherwise from DRAM), forms `g + d*scale`, accumulates, divides by `accepted_num` (signed, truncating), adds `lambda*z` and writes `G[k]` | about `3*accepted + 45` per parameter |
| `gauss_noise`, `mt19937` | Noise source: an exact MT19937 generator and the sum of 12 uniforms minus 6 | 12 per sample, hidden behind Agg |
| `div_seq`, `isqrt_seq` | Shared helpers: radix-2 restoring divider and square root, one result bit per cycle | |

### How the filter decides

The clustering is single linkage, which is what HDBSCAN reduces to with `min_samples = 1`.
Merging tree edges from the shortest up, the first component to reach `n/2 + 1` models is the
accepted set. Everything else gets label 0, including benign models that would have joined the
cluster at a larger distance. The reference HDBSCAN library behaves the same way when it is
asked for a single cluster: only the models still in the cluster at its last split count as
members. In practice `accepted_num` therefore tends to sit close to `n/2 + 1`, even when far
fewer than half the clients are poisoned. The full-size test shows it: with 100 clients, 20 of
them poisoned, 51 models are accepted. A design that wanted to keep more benign models would
change only the stopping rule in `hdbscan_pe` (state `H_KMERGE`).

## Interfaces

The top level, `flairs_kernel`, has only plain ports. Its control, layout and observation
ports are those of `flairs_top` listed below. In place of the word port it has a 512-bit AXI4
master (`m_ar*`, `m_r*`, `m_aw*`, `m_w*`, `m_b*`), described further below. It adds
`burst_start`, which pulses for each read burst. Its `done` comes only after the last
aggregated word has its write response. `flairs_top` on its own has the word port:

- **Control.** `start`, `busy` and `done`. Runtime sizes `n_clients` (at most `MAX_CLIENTS`)
  and `n_params` (at most `MAX_PARAMS`). The noise level `lambda` (Q16.16) and the noise
  `seed`.
- **DRAM layout.** Four word addresses:
  - `global_base`: the global model.
  - `model_base`: model `i` starts at `model_base + i*n_params`.
  - `diff_base`: the same layout, written by the kernel.
  - `agg_base`: the aggregated model.
- **DRAM read.** A read request is `rd_valid` and `rd_addr`, held until `rd_ready`. The data
  returns on `rd_rvalid` and `rd_rdata` one or more cycles later. Only one read is outstanding
  at a time.
- **DRAM write.** `wr_valid`, `wr_addr` and `wr_data`, held until `wr_ready`.
- **Observation.** `labels`, `accepted_num`, `median`, `cos_pass` and `cos_stalled`. There is
  also `agg_local`, which pulses for each differential word that aggregation takes from a
  stage RAM rather than from DRAM.

Every PE-level handshake holds its payload while it waits. Assertions check this in `axi_burst_bridge`, `prep_pe`,
`cosine_stage` and `agg_pe`. Reset is asynchronous and active low. It clears all control state
but not the RAM contents.

### The AXI4 bridge

The PEs ask for one 32-bit word at a time, by word address. `axi_burst_bridge` maps these
requests onto a 512-bit AXI4 master with 4 KB bursts. The byte address is four times the word
address.

- **Reads** go through a buffer holding one aligned 4 KB block (64 beats, 1024 words). A hit is
  answered one cycle after it is accepted. A miss fetches the block with a single INCR burst
  (`ARLEN = 63`, `ARSIZE` = 64 bytes) and then answers. Prep and Cosine read whole vectors in
  order, so they miss once per 1024 words. Agg reads one word per client per parameter, a
  stride of `n_params` words, so nearly every one of its DRAM reads is a burst.
- **Writes** are gathered in a second buffer that also covers one aligned 4 KB block, with one
  strobe bit per byte. It is sent as a single 64-beat INCR burst (`AWLEN = 63`). Beats with
  no word written carry `WSTRB = 0`. The send happens when a write to another block arrives,
  when a read misses on the block being gathered, or when the kernel raises `wr_flush` at the
  end of the round. Prep writes each difference vector, and Agg the result, in order, so each
  4 KB of them leaves in one burst. A write that falls in the read buffer's block also updates
  that buffer.
- **Ordering.** AXI4 does not order reads against writes. So a read miss on the block being
  gathered first sends it and waits for its B response. A miss elsewhere waits only for a
  write burst still in flight. `done` is raised only after the last write burst is answered.

### Parameters

| Parameter | Default | Origin |
|---|---|---|
| `MAX_CLIENTS` | 100 | the largest client count evaluated for FLAIRS |
| `MAX_PARAMS` | 1024 | this design's choice; sets the depth of the global-model RAM and of every stage RAM |
| `N_STAGES` | 8 | this design's choice; the original says only that it depends on device resources |
| `DATA_W` / `FRAC` (package) | 32 / 16 | this design's choice of number format |
| `AXI_DW` | 512 | the original kernel's AXI4 data width |
| `BURST_BYTES` | 4096 | the original kernel's burst size |
| `AXI_AW` | 64 | this design's choice |

## Where this RTL departs from the original FLAIRS kernel

The original kernel was written in HLS C++ for a Versal VMK180 board at 300 MHz. Its
description gives the structure of each PE, not bit-level detail. This RTL differs from it in
the following ways:

- **Memory interface.** The AXI4 side matches the original: 512 bits wide, with 4 KB bursts
  for reads and writes. Behind it, however, the PEs handle one 32-bit word per cycle at best,
  with one read outstanding, and a write burst is only sent once its block is finished. The
  arithmetic is unaffected, but throughput is far below the original's.
- **Number format.** Not stated in the original. Q16.16 is used everywhere. Results are
  truncated, except that norms are floored square roots and the cosine ratio is clamped to
  [-1, 1].
- **Clustering.** The original only says it uses a simplified HDBSCAN that finds one majority
  cluster. The rule above is this design's reading of it.
- **Median of an even count.** This design takes the mean of the two middle values.
- **Noise.** The original uses the vendor library's MT19937 generator with an inverse
  cumulative normal transform. The MT19937 here is exact, but the inverse CDF is replaced by a
  12-term Irwin-Hall sum, which has the right mean and variance and is bounded to ±6.
- **Aggregation order.** The original does not say in what order aggregation walks the
  vectors. Here it is parameter by parameter, visiting the accepted clients for each. The
  vectors still held in the cascade are read from its stage RAMs, the rest word by word from
  DRAM.
- **Phase control.** The original's host triggers the kernel. Here one `start` runs the whole
  round through an internal phase controller.

### Sizes of the evaluated workloads

The original evaluation uses 10, 50 and 100 clients on an IoT-traffic model and on CIFAR-10.
All three client counts fit `MAX_CLIENTS = 100`. The model sizes are not stated there. The
CIFAR-10 model of FLAME is, to general knowledge, a ResNet-18 of about 11 million parameters,
far more than `MAX_PARAMS = 1024`. A model that large does not fit the on-chip stage RAMs of
this design, nor block RAM on a single FPGA at 32 bits. Holding one would need the vectors
tiled over parameter blocks, which neither the original nor this RTL describes. The tests run
the client counts of the evaluation at `P = 1024`.

## Verification

Each module has a self-checking testbench in `tb/` that compares against reference arithmetic
computed independently in the testbench (`flairs_ref_pkg`). The checks are bit-exact, so a
one-LSB rounding change shows up. Two behavioural memories stand in for DRAM. `dram_model`
serves the word port: it randomly refuses requests and returns data after 1 to 3 cycles.
`axi_mem_model` is an AXI4 slave with random readiness on every channel. It also counts
protocol errors: a burst that is not 64 beats of 64 bytes on a 4 KB boundary, `WLAST` on the
wrong beat, or a 4-byte word only partly enabled.

| Testbench | What it runs |
|---|---|
| `mt19937_tb` | Known first output for seed 5489 (3499211612); 2700 words against a software MT19937 |
| `gauss_noise_tb` | Bit-exact samples; mean and variance of 3000 samples |
| `prep_pe_tb` | Streamed and written-back `d`, norms, on-chip global model |
| `cosine_stage_tb` | Keep, forward, distances, late norm, forced stalls, clear, read-back of the kept vector |
| `cosine_pe_tb` | 8 clients on 3 stages: 3 passes, every pair exactly once; afterwards exactly the clients of the last pass are held and read back |
| `hdbscan_pe_tb` | A planted majority cluster; random matrices against a Kruskal-over-all-pairs reference; `n = 1` |
| `scale_pe_tb` | Odd and even `n`, repeated and zero norms |
| `agg_pe_tb` | Random labels, scales, noise; half the clients answered from the cascade port, which must never cause a DRAM read |
| `axi_burst_bridge_tb` | One whole block read in order (exactly one burst); writes read back through the buffer; 200 scattered writes to one block leave as exactly one burst; 3000 random reads and writes over four blocks against a shadow memory; no protocol errors |
| `flairs_kernel_tb` | The whole kernel over AXI4, at the same reduced size as `flairs_top_tb`; the same checks plus read and write bursts (at least 8 words per write burst) and no protocol errors |
| `flairs_top_tb` | PE subsystem alone, end to end at reduced size (10 clients, 3 poisoned, 8 parameters, 3 stages). Stalls, multiple passes, DRAM refusals, rejection, clipping, noise and aggregation from the stage RAMs must all occur. |
| `flairs_n50_tb` | Kernel over AXI4 at default sizes: 50 clients × 1024 parameters, 7 passes, about 3.1 M cycles. The clients held by the last pass are rejected in this round, so no word comes from the stage RAMs, and the test checks that count is zero. |
| `flairs_full_tb` | Kernel over AXI4 at default sizes: 100 clients × 1024 parameters, 13 passes, about 6.8 M cycles (about 51 000 read bursts, most of them for Agg's strided reads, and 101 write bursts carrying all 103 424 written words), some seconds of simulation; 2048 words come from the stage RAMs |

The end-to-end testbenches rebuild the whole round in software and compare the labels, the
median, every differential word and every aggregated word. They also check that the
number of words taken from the stage RAMs equals `P` times the number of accepted clients that
the last pass holds.

### Running a test with Verilator

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/flairs_pkg.sv tb/flairs_ref_pkg.sv $(ls rtl/*.sv | grep -v _pkg) \
  tb/dram_model.sv tb/axi_mem_model.sv tb/flairs_top_env.sv \
  tb/flairs_kernel_tb.sv --top-module flairs_kernel_tb
./obj_dir/Vflairs_kernel_tb
```

Replace the last file and the top module to run another testbench. The packages go first.
`-Wno-fatal` is only needed for the unit testbenches, which have width warnings in their
reference code. Each one prints
`TB_RESULT checks=N failures=M` and stops itself after a fixed number of cycles if the design
hangs.

## File map

- `rtl/flairs_pkg.sv`: shared types (`fix_t`, `dvec_word_t`, ...) and constants.
- `rtl/flairs_kernel.sv`: the kernel (top level).
- `rtl/flairs_top.sv`: the PE subsystem and phase controller.
- `rtl/axi_burst_bridge.sv`: the AXI4 master.
- `rtl/prep_pe.sv`, `rtl/cosine_pe.sv`, `rtl/cosine_stage.sv`, `rtl/hdbscan_pe.sv`,
  `rtl/scale_pe.sv`, `rtl/agg_pe.sv`: the PEs.
- `rtl/gauss_noise.sv`, `rtl/mt19937.sv`: the noise source.
- `rtl/div_seq.sv`, `rtl/isqrt_seq.sv`: arithmetic helpers.
- `tb/`: testbenches, the DRAM model, the reference package and the shared end-to-end
  environment.
