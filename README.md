# K-Min KNN accelerator for smart-home flow classification

A home network run as a software-defined network (SDN) has a small controller
(here a Raspberry Pi) that sees per-flow statistics from the access point's
switch. For every flow the controller computes six features: the share of
ICMP, TCP and UDP packets, the IP diversity ratio (unique addresses per packet
sent), the packet count and the packet size. It must then decide which device
the flow belongs to, or whether it is part of a DDoS flood, and update the
switch rules. That decision is a k-nearest-neighbour (KNN) classification
against tens of thousands of labelled flows. On the controller's CPU it takes
tens of seconds. The accelerator in this repository takes it off the CPU. It
scans the stored training flows once, one per clock cycle, and keeps only the k
nearest ones as it goes. There is no sort.

The design follows "An Efficient SDN Architecture for Smart Home Security
Accelerated by FPGA" (Gordon, Park, Tushir, Liu, Dezfouli). Its authors built
the KNN kernel with high-level synthesis for an Artix-7. This RTL is an
independent register-transfer version of their K-Min KNN data flow. Widths,
handshakes and timing that the paper leaves open are filled in here and marked
as such below.

```
            SDN controller                          accelerator (knn_accel_top)
  flow stats -> feature extraction --q_feat--> +-----------------------------------+
                                               | knn_ctrl   scan 0..n-1, drain,    |
  training flows ------------tr_wr_*---------> |            vote, hand out result  |
                                               | train_mem -> manhattan_dist ->    |
  switch rule update <------r_class----------- |   kmin_select -> mode_vote        |
                                               +-----------------------------------+
```

## The K-Min selection

Textbook KNN computes all N distances, sorts them and takes the first k. In
hardware a sort means storing all N distances and running many passes over
them. K-Min keeps only k (distance, label) registers. At the start of a query
they hold "infinity". For each training sample, in arrival order:

1. find the register holding the largest distance (the furthest kept
   neighbour);
2. if the new distance is strictly smaller, overwrite that register with the
   new distance and label; otherwise drop the sample.

Each sample costs one comparison against the furthest kept neighbour, and the
training set is read exactly once. `kmin_select` does step 1 as a
combinational search over the K_MAX = 5 registers and step 2 on the next clock
edge. So it takes a new sample every cycle and never stalls, even when
consecutive samples both replace neighbours.

**Equal distances.** The rule above does not say which register is "the
furthest" when several hold the same largest distance. That choice decides
which neighbours survive. Example, k = 2, distances 5, 7, 5, 3 in that order:
the second 5 replaces the 7, and the 3 must then evict one of the two 5s. If
the search picks the lowest register index, it evicts the first 5 and keeps the
later one. Each register therefore also stores the arrival number of its sample
(a counter that restarts with the query), and the search looks for the largest
(distance, arrival) pair. A newcomer always has the largest arrival number, so
it still enters only when its distance is strictly smaller. The entry evicted
is always the latest of the furthest. As a result, the kept set is exactly the
first k entries of the training set sorted stably by distance. This is the
result an ordinary sort-based KNN gives, and the testbenches use it as their
reference.

**Run-time k.** The evaluation tunes k per data set and finds values below the
default 5 that keep the accuracy. The paper does not print the tuned values.
Therefore k is a run-time input from 1 to K_MAX, sampled with each query.
Registers at index k and above are ignored by the search and by the vote. A
smaller k does not speed up this design: the search over five registers already
fits in one cycle.

**The vote.** `mode_vote` counts, for each of the 16 classes in parallel, how
many valid neighbours carry that label, and returns the class with the highest
count. If counts are equal, the smaller class number wins. This matches the
`mode` that common software KNN libraries use. The number of agreeing
neighbours (`r_votes`) is returned as a confidence hint.

## Data path and timing

```
cycle   a        a+1 .. a+n          a+n+1 .. a+n+3    a+n+4        a+n+5
ctrl    accept   SCAN (read i)       DRAIN             VOTE         RES (r_valid)
        clear
mem              word i  ->  +1 cycle
dist                         |a-q| (+1) -> sum (+1)
kmin                                        update (+1)
```

* `train_mem` has a synchronous read port: data comes one cycle after the
  address.
* `manhattan_dist` has two register stages: six absolute differences, then
  their sum.
* `kmin_select` updates its registers on the following edge.

From the read of sample i to the updated neighbour registers is four cycles
(`PIPE_LAT`). The controller waits three cycles after the last read, asks for
the vote, and offers the result in the next cycle. A query accepted in cycle a
with n samples has `r_valid` high from cycle **a + n + 5**. With the full
36,225-sample set that is 36,230 cycles, 0.36 ms at 100 MHz. The paper gives
no clock frequency for its build.

## Interface of `knn_accel_top`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, synchronous active-low reset |
| `tr_wr_en`, `tr_wr_addr`, `tr_wr_feat`, `tr_wr_label` | in | 1, 16, 6x16, 4 | write training sample `tr_wr_addr`; only while `busy` is low |
| `n_train` | in | 16 | samples 0..n_train-1 are scanned; values above N_TRAIN_MAX are clamped |
| `k_cfg` | in | 3 | neighbours for this query; 0 counts as 1, above K_MAX as K_MAX |
| `q_valid`, `q_ready`, `q_feat` | in/out/in | 1, 1, 6x16 | query transfer; `n_train` and `k_cfg` are sampled with it |
| `r_valid`, `r_ready` | out/in | 1 | result transfer; `r_valid` stays high until taken |
| `r_class`, `r_votes` | out | 4, 3 | winning class, neighbours that agreed |
| `busy` | out | 1 | a query is in progress (`q_ready` is low) |

The query features are latched on acceptance, so `q_feat` may change
afterwards. With `n_train = 0` the result is class 0 with 0 votes. Assertions
check that nothing writes the training store while a query runs, that the vote
result lands exactly when `r_valid` rises, that scan addresses stay below the
latched count, and that a result once offered is held.

Feature vectors are packed `[N_FEAT-1:0][FEAT_W-1:0]`; feature 0 is in the low
bits. The order of the six features is up to the software that loads the
training set, as long as queries use the same order. Features are unsigned.
The controller must scale each one to 16 bits, with the same scale for
training and query data. The Manhattan distance weighs all features equally,
so the scales matter.

## Sizes

| parameter | default | origin |
|---|---|---|
| N_TRAIN_MAX | 36,225 | training set of the main evaluation point (50 % split) |
| N_FEAT | 6 | the six flow features listed above |
| K_MAX | 5 | default k of the evaluation |
| FEAT_W | 16 | own choice (the paper gives no number format) |
| LABEL_W | 4 (16 classes) | own choice: the evaluation names 14 distinct devices plus attack traffic |
| DIST_W | 20 | FEAT_W + clog2(N_FEAT) + 1, so all-ones is above any real distance |
| PIPE_LAT | 4 | own choice (memory 1 + distance 2 + selection 1) |

The evaluation uses training sets of 1, 5, 10, 30, 50, 70 and 90 % of one data
set. If 36,225 samples is the 50 % split, these are 725, 3,623, 7,245, 21,735,
36,225, 50,715 and 65,205 samples. The default build holds up to the 50 %
point. Setting `N_TRAIN_MAX = 65205` (address width 17) holds all seven, and
`tb/knn_workload_tb.sv` runs them that way. The scan takes n + 5 cycles for
each.

## Where this departs from the published design

* **Rate.** The published kernel came out of HLS. Its reported latencies work
  out to roughly nine cycles per training sample at k = 5: about 6.5 thousand
  cycles at the 1 % split and 580 thousand at 90 %. About a third less is
  reported with the tuned k. This RTL takes one sample per cycle for any k. Its
  cycle counts are therefore much lower and are not meant to reproduce the
  published ones.
* **Training store.** The published build uses only 4 block RAMs, so its
  training data must have lived outside the FPGA's block RAM. Here the store
  is an on-chip array: 36,225 x 100 bits = 3.6 Mbit. That is more block RAM
  than the smallest Artix-7 parts have. The read port is a plain
  request/data-next-cycle interface, so `train_mem` can be replaced by a
  controller for external memory that streams one sample per cycle. Such a
  controller must keep that rate or add a valid signal to the pipeline.
* **Equal distances** are resolved as described above (earliest sample kept,
  smallest class wins a tied vote). The paper does not specify either.
* **Tuned k values** are not built in; k is chosen per query.
* **One result label.** The paper's FPGA returns "the device classification
  and DDoS detection class". Here that is one class number from a single label
  space covering devices and attack traffic. How classes are numbered is up to
  whoever builds the training set.
* **Not included**: the controller software, feature extraction (which the
  paper puts on the controller), the Open vSwitch access point, and the link
  between controller and FPGA. The paper does not describe that link. Its
  place is taken by the valid/ready query and result ports.

The alternative selection methods in the paper (bubble, merge, odd-even and
enumeration sort) are only compared with K-Min there, and are not part of this
RTL.

## Files

| file | contents |
|---|---|
| `rtl/knn_pkg.sv` | default sizes and the distance-width function |
| `rtl/train_mem.sv` | training-sample store |
| `rtl/manhattan_dist.sv` | two-stage L1 distance |
| `rtl/kmin_select.sv` | K-Min neighbour registers |
| `rtl/mode_vote.sv` | majority vote |
| `rtl/knn_ctrl.sv` | query sequencer |
| `rtl/knn_accel_top.sv` | the accelerator |
| `tb/<module>_tb.sv` | one self-checking test per module |
| `tb/knn_accel_top_full_tb.sv` | full-size run: 36,225 samples, k = 5, 3, 1, every parameter at its default |
| `tb/knn_workload_tb.sv` | the seven training-set sizes, k = 5 and 3 |

## Simulating

Every testbench checks its outputs against a reference computed inside the
testbench. For the whole accelerator that reference is a plain KNN:
all distances, a stable sort, the first k, the most common label. The
testbenches also check cycle counts against the timing above. Each one ends by
printing `TB_RESULT checks=<n> failures=<m>`. The end-to-end test
(`knn_accel_top_tb`) uses a 256-sample store. It counts the mechanisms it
exercises and fails if any of them never occurred: neighbour replaced and
rejected, reduced and full k, k and n_train clamping, a tied vote, result
back-pressure, a query offered while busy, and the empty training set. The
training data are synthetic: 16 random class centres with noise, plus
duplicate samples so that equal distances occur. The real flow records are not
available, so the 95 % accuracy reported for them is not reproduced here.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
    rtl/knn_pkg.sv tb/knn_accel_top_full_tb.sv --top-module knn_accel_top_full_tb
./obj_dir/Vknn_accel_top_full_tb
```

Replace the testbench name to run any other test. All of them finish in
seconds; the full-size test simulates about 145 thousand cycles.

## Changing it

* **Capacity:** `N_TRAIN_MAX`. The address width follows it.
* **Features:** `N_FEAT` and `FEAT_W`. The distance width follows them.
* **Classes:** `LABEL_W`. The vote has one counter per class, so this block
  grows with 2^LABEL_W.
* **Larger k:** `K_MAX`. The max search is a chain of K_MAX comparisons in one
  cycle. For much larger K_MAX that chain limits the clock. One fix is to
  register the search result and accept a sample every other cycle.
* **Deeper memory or distance pipeline:** if `PIPE_LAT` in `knn_accel_top`
  stops matching the real depth, the `a_vote_timing` assertion fires.
