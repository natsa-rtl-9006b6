# NATSA: a near-memory matrix-profile accelerator in SystemVerilog

The *matrix profile* of a time series T of n samples gives, for each window
of m consecutive samples, the z-normalised Euclidean distance to the most
similar other window (P) and where that window starts (I). Motifs show up as
low profile values and anomalies as high ones. The exact computation visits
every cell of an (n-m+1) x (n-m+1) distance matrix, but does very little
arithmetic per byte fetched, so on CPUs it is bound by memory bandwidth.

NATSA puts many small floating-point processing units (PUs) on the logic die
next to a 3D-stacked HBM memory, so the data never cross a CPU memory bus.
The RTL here describes that accelerator: 48 PUs, grouped six to a
controller on each of the 8 HBM channels. Each PU walks whole diagonals of
the distance matrix. On a diagonal the dot product of each cell follows from
the cell above-left of it, so only the first cell costs a full dot product.
Every PU updates its own private copy of the profile, so the PUs never talk
to each other. The host merges the copies at the end.

## The computation

For windows i and j with means mu and standard deviations sigma, and
dot product q(i,j) of the two windows:

    d(i,j)^2 = 2 * ( m - (q(i,j) - m*mu_i*mu_j) / (sigma_i*sigma_j) )

    q(i,j)   = q(i-1,j-1) - t[i-1]*t[j-1] + t[i+m-1]*t[j+m-1]

The profile stores *squared* distances. The distance unit has no square
root; the minimum and its index are the same either way. A host that wants
true distances takes the square root of P after the run.

The matrix is symmetric, so only the upper triangle is walked. Diagonal j
starts at row 0, column j, and has nprof - j cells, where nprof = n-m+1.
The main diagonal and the next `exc` diagonals form the exclusion zone and
are skipped. The default is exc = m/4; it lies with the host, because the
host builds the diagonal lists. Each cell (i, j+i) updates two profile
entries: P[i] with index j+i (the "row side") and P[j+i] with index i (the
"column side").

## Block structure

```
natsa_top
 ├─ natsa_chan_ctrl  x NUM_CH (8)      round-robin share of one HBM channel
 └─ natsa_pu         x NUM_PU (48)     PU p sits on channel p / 6
     ├─ natsa_spm                       1 KB scratchpad (configuration)
     ├─ natsa_dpu                       first-cell dot product
     ├─ natsa_dpuu   x VEC (4), chained dot-product update
     ├─ natsa_dcu    x VEC              squared distance
     ├─ natsa_puu    x VEC              profile compare / select
     └─ control FSM + the DPU/DPUU multiplexer
fp_mul, fp_add, fp_div, fp_lt           binary32 operators used above
natsa_pkg                               VEC, word types, memory request, scratchpad map
```

### Processing unit (`natsa_pu`)

A PU works on batches of up to VEC = 4 cells of one diagonal. Its control
unit steps through these states:

1. **CFG** copies words 0..9 of the scratchpad into registers.
2. **NEXT** reads the next entry of the PU's diagonal list, which gives the
   start column j. If it has finished its list, the PU raises `done`.
3. **DP_A / DP_B** read T[k..k+3] and T[j+k..j+k+3] for k = 0, 4, 8, ...
   The DPU multiplies them lane by lane and adds the products into one
   register. Lanes at or beyond m are masked, so m need not be a multiple
   of 4.
4. The first cell goes alone (lane 0). The multiplexer passes the DPU
   result to the DCU.
5. For later batches, four vector reads fetch the leaving and entering
   elements: T[i-1..], T[j+i-1..], T[i+m-1..] and T[j+i+m-1..]. The four
   DPUU lanes are chained: lane k starts from the q of lane k-1, and lane 0
   starts from the last q of the previous batch. The multiplexer now passes
   the DPUU results.
6. Four more reads bring mu and sigma for both sides. In **COMP** the four
   DCUs give the four distances, which are registered.
7. **Row-side update.** The PU reads PP[i..i+3]. The PUUs compare each lane
   and the PU writes back PP, then II, with a lane mask of the lanes that
   improved. If no lane improved, both writes are skipped.
8. **Column-side update.** The same for PP[j+i..], with indices i+k.
9. **ADV** moves i by the batch size. It starts the next batch, whose last
   batch may be partial, or goes on to the next diagonal.

The row-side write finishes before the column-side read starts. Near the
exclusion zone the two index ranges can overlap, and this order keeps them
correct. Ties keep the stored entry: an entry is replaced only if the new
distance is strictly lower.

### Memory port and channel controller

A PU has one memory port and makes one access at a time. `mem_req` carries
`we`, a word address, a 4-bit lane mask and 4 write words (`mem_req_t` in
`natsa_pkg`). A read returns the 4 consecutive words that start at the
address. The requester holds `req_valid` and the request steady until it
gets a one-cycle `rsp_valid`. `natsa_chan_ctrl` uses the same handshake on
its channel side. It picks a requester round robin, forwards that one
request, and routes the response back. It holds one access at a time, so
with a channel that answers in L cycles each access takes L+2 cycles. The
controller checks two rules with assertions: a response comes only while an
access is in flight, and the winning PU holds its request until then.

A batch costs 10 vector reads and up to 4 masked writes. The first cell of
a diagonal costs 2*ceil(m/4) reads more.

### Number format (`fp_*`)

The datapath is IEEE-754 binary32, which is the single-precision variant.
The operators are combinational and deliberately simple:

- Results are truncated (rounded toward zero).
- Subnormals are flushed to zero.
- Overflow and division by zero give infinity.
- No NaN is produced.
- `fp_lt` orders the sign-magnitude words like real numbers. A squared
  distance that rounding makes slightly negative therefore still compares
  correctly.

The multiplier, adder and divider take exponent and fraction widths as
parameters. The PU datapath, though, is fixed at 32-bit words.

## Using it

### Host protocol

The host does everything except the diagonal walk:

1. Write to each channel's memory: T, mu and sigma (binary32), each PU's
   diagonal list (32-bit start columns), and each PU's PP (all +inf) and II.
   Each PU reads only its own channel's memory, so the read-only arrays are
   copied once per channel.
2. Write each PU's scratchpad through `cfg_we / cfg_pu / cfg_addr /
   cfg_wdata`:

   | word | content |
   |---|---|
   | 0 | m (integer) |
   | 1 | m (binary32) |
   | 2 | nprof = n-m+1 |
   | 3-5 | base addresses of T, mu, sigma |
   | 6, 7 | base addresses of this PU's PP and II |
   | 8, 9 | base address and length of this PU's diagonal list |

3. Pulse `start`. `done` rises when every PU has finished.
4. Reduce: for each i, P[i] is the minimum of PP[i] over all PUs, and I[i]
   is the II[i] that goes with it.

**Diagonal schedule.** Diagonals differ in length, so they are dealt out in
pairs: the k-th diagonal from the short end is paired with the k-th from the
long end. Every pair then holds nprof - exc cells, and pair k goes to PU
k mod NUM_PU. Within a PU's list the order is free: a random order keeps
the result usable if the run is stopped early, and a sequential order gives
locality. The testbenches build this schedule in `tb_natsa_host_pkg`.

### Simulating

All testbenches are self-checking. Each prints
`TB_RESULT checks=N failures=F` and has a watchdog. Example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/natsa_pkg.sv tb/tb_fp_pkg.sv tb/tb_natsa_host_pkg.sv \
  tb/tb_natsa_top_full.sv --top-module tb_natsa_top_full
./obj_dir/Vtb_natsa_top_full
```

| testbench | what it checks |
|---|---|
| `tb_fp_ops` | mul/add/sub/div within 4e-7 relative of exact; exact compare |
| `tb_natsa_dpu` | dot products for m = 1..200, masked last beat, ceil(m/4) beats |
| `tb_natsa_dpuu` | single updates, and walks down diagonals against direct dot products |
| `tb_natsa_dcu` | squared distance against real arithmetic |
| `tb_natsa_puu` | strict-less update, ties, negatives, +inf, invalid lanes |
| `tb_natsa_spm` | 256-word write/read-back with one-cycle latency |
| `tb_natsa_chan_ctrl` | data integrity for 6 requesters, round-robin order, L+2 latency |
| `tb_natsa_pu` | one PU computes a full profile (n=48, m=8 and n=61, m=7), random diagonal order |
| `tb_natsa_top` | 4 PUs on 2 channels, n=70, m=10, full host flow, mechanism counts |
| `tb_natsa_top_full` | default size, 48 PUs on 8 channels, n=128, m=10 (about 24k cycles) |
| `tb_natsa_rand_workload` | uniform random series in [0,1), the kind of input used for performance studies, scaled down to n=320, m=18, 16 PUs on 8 channels (about 87k cycles) |

`hbm_chan_model` (in `tb/`) is a behavioural stand-in for one HBM channel:
a word array with a fixed latency. It does not model DRAM timing.

The PU and top testbenches compare with a real-valued reference. Each P[i]
must be within 2e-3*(m+1) of the true minimum. Each I[i] must point outside
the exclusion zone to a window at that distance, which allows for ties.
The top-level testbenches also count each mechanism and fail if one never
happens:

- first cells through the DPU path of the multiplexer;
- batches through the DPUU path;
- partial batches at a diagonal end;
- masked DPU beats;
- row-side and column-side writes;
- skipped writes;
- cycles a PU spent waiting for its channel.

## How this relates to the published design

These parts follow the paper:

- the four units of a PU and what each computes;
- the multiplexer between DPU and DPUU;
- the operators drawn inside the distance unit, with no square root;
- the six-step flow;
- the 1 KB scratchpad per PU;
- private profiles per PU, with a host-side reduction;
- 48 PUs on 8 HBM channels;
- the host-computed mu/sigma and diagonal schedule;
- the pairing scheme for the schedule.

These are this design's own choices:

- **Batch width:** VEC = 4 lanes.
- **Control:** the state machine and the strictly sequential memory access
  pattern. A PU has one access in flight and no prefetch or overlap, so it
  is far slower than the paper's performance figures imply.
- **Interfaces:** the memory request format and the handshakes.
- **Arbitration:** round robin.
- **Host side:** the scratchpad word map and the host interface.
- **Arithmetic:** the rounding and special-value handling.
- **Distance unit:** two multipliers for m*mu_i*mu_j where the drawing shows
  one three-input multiplier.

Where the drawing's update unit shows a `<=` comparator and the algorithm
text uses a strict `<`, the design keeps the old entry when PP <= d, which
satisfies both.

Not built:

- **Double precision.** The datapath words are 32 bits.
- **The memory and host.** The HBM stack, its physical interface and
  interposer, and the host CPU are left out. The top exposes one plain
  request/response port per channel instead.
- **Pipelining.** The operators are combinational, with a registered
  distance stage. At 1 GHz in 45 nm they would need pipelining, which the
  paper does not describe.

## Capacity

Addresses and indices are 32 bits (word addresses). For the largest series
evaluated, n = 2,097,152, one channel holds:

- T, mu and sigma: 3n words;
- six private PP/II pairs: 12n words;
- diagonal lists: about n/96 words per PU.

That is about 31.5M words (126 MB) per channel, or 1 GB over the 8 channels,
which fits a 4 GB HBM2 stack. The window length m is passed as an integer
and as a float. It is exact in binary32 up to 2^24, well above the largest
m of 16,384 in the paper's sensitivity study.
