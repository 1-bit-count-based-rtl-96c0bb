# Popcount-sorting unit for low-toggle links in a CNN accelerator

When a DNN accelerator ships operands to its processing elements over wide on-chip
links, a large part of the dynamic power goes into charging and discharging link wires.
Each wire toggles when the bit it carries changes between consecutive flits. A
convolution accumulates its products in any order. So the sender may reorder the
elements of a window before sending. If values with a similar number of '1' bits are
sent one after the other, fewer wires flip. Weights must move together with their
inputs so that the pairs still match.

This RTL implements such a sender. Its heart is a **comparison-free popcount-sorting
unit (PSU)**. The unit sorts the 25 words of a 5×5 convolution window by their '1'-bit
count, using counting (a histogram and a prefix sum) instead of comparators. It sorts
one window per clock, with a fixed latency of three cycles. The unit is *approximate*:
the nine possible counts of an 8-bit word (0…8) are folded into four buckets. This
narrows the whole sorting datapath, and window order still keeps most of its low-toggle
quality. Around the PSU, a small platform computes the first convolution layer and the
pooling layer of LeNet-5 on 16 processing elements. It exists to exercise the sorter and
to measure link toggling.

The design follows the paper "'1'-bit Count-based Sorting Unit to Reduce Link Power in
DNN Accelerators" (Han, Chen, Lei, Altayo Gonzalez, Hemani). That paper describes the
PSU pipeline in detail and the surrounding platform only in outline. The section
"What follows the paper and what does not" lists which parts are which.

## The sorting unit, stage by stage

`pop_sort_unit` takes `N = 25` words of `W = 8` bits and returns `sorted_idx[0..24]`.
Entry `sorted_idx[p]` is the index of the element that must be sent in position `p`.
Lower buckets come first. Elements in the same bucket keep their original order, so the
sort is stable. A window entered in cycle *t* produces its result in cycle *t + 3*. The
unit accepts a new window every cycle.

Take a six-element example, with inputs `07 00 7F 3F 0F 1F`.

**Stage 1 – popcount bucket encoders** (`popcount_bucket_encoder`, one per element).
Each word is split into two nibbles. A 16-entry table gives the '1'-bit count of each
nibble, and an adder sums the two. A second small table maps the count (0…8) to a
bucket:

| '1'-bit count | 0 1 2 | 3 4 | 5 6 | 7 8 |
|---------------|-------|-----|-----|-----|
| bucket        | 0     | 1   | 2   | 3   |

The example has counts 3 0 7 6 4 5, so its buckets are **1 0 3 2 1 2**. The 2-bit bucket
ids are registered.

**Stage 2 – histogram and prefix sum** (`bucket_histogram`, `prefix_sum`). Each bucket
id becomes a 4-bit one-hot row. Counting the '1's in each column of the 25×4 matrix
gives the histogram, here **1 2 2 1**. A log-depth scan turns the histogram into running
sums. The first level adds neighbours (1 3 4 3). The second level adds at distance two
(1 3 5 6). Shifting this by one bucket gives each bucket's *start address* in the sorted
output, **0 1 3 5**. The start addresses and a copy of the bucket ids (the "bucket
buffer") are registered.

**Stage 3 – index mapping** (`local_rank_calc`, `address_generator`, `index_crossbar`).
- For every element, the local-rank calculator counts the earlier elements that share
  its bucket. Here the ranks are 0 0 0 0 1 1.
- The address generator looks up the start address of the element's bucket
  (1 0 5 3 1 3) and adds the rank. That gives each element's output position,
  **1 0 5 3 2 4**.
- The crossbar then sends index *i* to position `addr[i]`. The result is
  **1 0 4 3 5 2**: first `00`, then `07`, `0F`, `3F`, `1F`, and last `7F`. The result
  is registered.

The three stages never compare two data words. The cost of stages 2 and 3 grows with the
number of buckets K, not with the word width. So going from 9 exact buckets to 4 shrinks
the histogram, the scan and the bucket fields. Setting `K = W + 1 = 9` gives the exact
(accurate) sorter from the same RTL. The accurate sorter is the reference the approximate
one is judged against.

With all ones or all zeros in the window, everything lands in one bucket, and the output
is 0, 1, …, 24. With all zeros the start addresses are 0, 25, 25, 25.

## Sending a window: the transmitting unit and the flit format

One `transmitting_unit` per link holds one window. It has these parts:
- a data buffer with 25 inputs, 25 weights and the bias;
- an index buffer with the PSU result;
- a crossbar that permutes inputs and weights by the same indices;
- a multiplexer that picks the crossbar output, or the unpermuted data in **bypass**
  mode;
- a small controller;
- the 128-bit transmission register that drives the link.

A window goes out as `F = 4` flits on four consecutive cycles:

```
bit 127 ............................ 64 | 63 ............................. 0
 w-slot7 w-slot6 ... w-slot1 w-slot0    |  i-slot7 i-slot6 ... i-slot1 i-slot0
```

Slot `s` of the input half is bits `[8s+7:8s]`. The weight half is laid out the same way,
64 bits higher. Sorted position `p` goes to **flit `p mod 4`, slot `p div 4`**, so the
order runs column-major across the four flits:

| flit | slot 0 | slot 1 | … | slot 5 | slot 6 | slot 7 (input / weight) |
|------|--------|--------|---|--------|--------|-------------------------|
| 0    | p0     | p4     | … | p20    | p24    | 0 / **bias**            |
| 1    | p1     | p5     | … | p21    | 0      | 0 / 0                   |
| 2    | p2     | p6     | … | p22    | 0      | 0 / 0                   |
| 3    | p3     | p7     | … | p23    | 0      | 0 / 0                   |

A given wire therefore carries positions 4s, 4s+1, 4s+2, 4s+3 on successive cycles.
Those are neighbours in sorted order, so they have similar '1'-bit counts. That is
where the toggle reduction comes from. The wire only holds its value when the next word
happens to be the same. Between windows the register keeps its last value, so an idle
link does not toggle.

A window is loaded with `data_load`, and its indices later with `idx_load`. The first
flit is on the link two cycles after the later of the two loads. `ready` falls at the
load and rises again after the fourth flit. In bypass mode no indices are needed. The
flit layout is the same, with the elements in their original order.

## The LeNet-5 platform

`lenet_platform` is `data_allocation_unit` plus 16 `processing_element`s. Each PE has its
own link.

- **Data memory.** This is a register array written through one byte-wide port.
  - Addresses 0–1023 hold the 32×32 image, row by row.
  - 1024–1173 hold the six 5×5 filters, filter-major and row by row.
  - 1174–1179 hold the six biases.

  The memory reads a whole 5×5 window in one cycle. Element `i = 5·row + col` is read
  together with the weights and bias of one filter.
- **Config.** `cfg_wr` latches `cfg_bypass`. A bypass run is the unsorted baseline.
- **Scheduler.**
  - Every pooled output (filter, row, column, 6×14×14 = 1176 of them) is a *job*.
  - Job `j` goes to PE `j mod 16`.
  - A job is four convolution windows, the four positions of one 2×2 pooling window.
  - Jobs are handed out in groups of 16: first quadrant 0 to PEs 0…15, then quadrant 1,
    and so on.
  - The scheduler issues one window per cycle. It loads the target transmitting unit
    and, when sorting, sends the inputs to the shared PSU, tagged with the PE number.
  - Three cycles later the tag routes the sorted indices to the right transmitting unit.
  - If the target transmitting unit is still busy, the scheduler stalls. With 16 PEs it
    never does, because every link is free again after 16 issue slots. With fewer PEs it
    does.
- **Processing element.**
  - A buffer register sits on the link.
  - PSUM multiplies the eight input/weight pairs of each flit and accumulates them over
    the four flits. Pads are zero, so they add nothing.
  - CONV adds the bias and rescales: `clamp((Σx·w + bias·128) >>> 7)` to
    [−128, 127], with all values signed Q0.7.
  - POOL averages four convolution results: `(c0+c1+c2+c3) >>> 2`.
  - The result is ready four cycles after the last flit of the fourth window.
- **Pool buffer.** It has one write port per PE. PE `p`'s `k`-th result belongs to job
  `16k + p`, and that job number is the address. Results are read back on `rd_addr`.
  The result for filter `f`, row `y`, column `x` is at `196f + 14y + x`. `done` rises
  when all 1176 results are stored.

One layer takes about 4 740 cycles: 4 704 windows at one per cycle, plus the empty slots
of the last, half-filled group and the pipeline drain.
The sorted and bypass runs produce the same pooled values, because only the order of the
summed products changes.

## Measured link activity

`tb_bt_workload` sends 10 000 windows over one link through three chains: bypass,
approximate ordering (K = 4) and exact ordering (K = 9). It uses two kinds of input
data: uniformly random bytes, and small signed values (−16…16). Weights are random bytes
in both. `tb_lenet_platform` runs the whole layer on a random image. Bit transitions per
128-bit flit:

| data, ordering                 | input half | weight half | total | vs. bypass |
|--------------------------------|-----------:|------------:|------:|-----------:|
| random bytes, bypass           | 26.02      | 27.99       | 54.01 | –          |
| random bytes, K=4              | 25.20      | 27.98       | 53.18 | −1.5 %     |
| random bytes, K=9              | 25.00      | 27.98       | 52.98 | −1.9 %     |
| small signed, bypass           | 25.94      | 27.99       | 53.93 | –          |
| small signed, K=4              | 17.56      | 27.99       | 45.55 | −15.5 %    |
| small signed, K=9              | 16.57      | 28.00       | 44.57 | −17.4 %    |
| LeNet layer, random image, bypass | 26.15   | 28.41       | 54.56 | –          |
| LeNet layer, random image, K=4 | 25.02      | 27.65       | 52.67 | −3.5 %     |

The bypass numbers agree with the paper's "column-major" row of its link experiment
(26.00 input, 28.01 weight). That suggests the paper used the same slot layout. The
paper's "non-optimised" row (31.0 input) uses a different layout, which it does not
describe. That layout is not built here.

The paper reports 22.3 (exact) and 22.9 (approximate) input-side transitions after
sorting, a total reduction of 20.2 % and 19.3 %. The gain from popcount sorting depends
strongly on the data:
- **Uniformly random bytes gain little.** Two random words with four '1' bits each still
  differ in four bits on average.
- **Small signed values gain a lot.** Their counts crowd near 0 (small positive) and
  near 8 (small negative), and there the RTL reaches −15.5 % and −17.4 %.

The paper only says "random inputs and weights", so its exact figures cannot be
reproduced. In every case the exact sorter saves a little more than the approximate
one, as the paper reports.

## What follows the paper and what does not

Taken from the paper and its figures:
- the three-stage PSU: nibble-table popcount with an adder and a mapping table, one-hot
  histogram, scan adder network, bucket buffer, local-rank calculator, address generator
  and crossbar;
- the 4-bucket map {0,1,2}, {3,4}, {5,6}, {7,8};
- the 3-cycle latency;
- ascending bucket order, stable inside a bucket;
- 8-bit data, 25-element windows, 128-bit links split into 64 input and 64 weight bits;
- four flits per window, column-major slots, the bias in the last weight slot of the
  first flit;
- the bypass multiplexer;
- 16 PEs, each with Buffer, PSUM, CONV and POOL stages;
- the data memory, config and pool buffer of the allocation unit.

Chosen here, where the paper is silent:
- asynchronous active-low reset of control state only;
- the load handshakes, and the tag that travels through the PSU;
- holding the link value while idle;
- the data memory address map and single-cycle window read;
- the scheduler and its stall rule;
- the PE arithmetic: Q0.7, no activation function, average pooling with truncation;
- LeNet-5's sizes: 32×32 input, 6 maps, 14×14 pooling, taken from the usual definition
  of that network;
- the bucket rule for sizes other than 8 bits / 4 buckets:
  `bucket = (count−1)·K / W` for count > 0.

The paper is inconsistent about sort direction. Its waveform and its description of the
sorter put higher counts *last*. Its link example shows counts *decreasing* along the
flit. This RTL sends low buckets first. The toggle count inside a window is the same
either way.

Not built:
- the 22 nm implementation, timing closure at 500 MHz, and the power and area analysis;
- the comparator-based sorters (bitonic, competition network) that the paper compares
  against;
- multi-hop routers.

The default platform uses 5×5 windows. The paper also sizes the sorter for 7×7 windows.
`pop_sort_unit` and `transmitting_unit` accept `N = 49` (seven flits per window), and
`tb_psu_7x7` checks them at that size. The platform above is not set up for it.

## Files

| file | contents |
|------|----------|
| `rtl/psu_pkg.sv` | shared sizes, bucket map function, flits-per-window function |
| `rtl/popcount_bucket_encoder.sv` | stage 1: nibble tables, adder, bucket map |
| `rtl/bucket_histogram.sv` | stage 2: one-hot encoders, column popcounts |
| `rtl/prefix_sum.sv` | stage 2: log-depth scan, bucket start addresses |
| `rtl/local_rank_calc.sv` | stage 3: rank inside a bucket |
| `rtl/address_generator.sv` | stage 3: start + rank |
| `rtl/index_crossbar.sv` | stage 3: scatter indices to positions |
| `rtl/pop_sort_unit.sv` | the 3-stage PSU |
| `rtl/transmitting_unit.sv` | buffers, data crossbar, bypass mux, flit packer, link register |
| `rtl/processing_element.sv` | Buffer, PSUM, CONV, POOL |
| `rtl/data_memory.sv`, `rtl/pool_buffer.sv` | storage of the allocation unit |
| `rtl/data_allocation_unit.sv` | scheduler, config, PSU, 16 transmitting units |
| `rtl/lenet_platform.sv` | top level |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_bt_workload.sv` | link-toggle comparison of bypass, K=4 and K=9 on two data sets |
| `tb/tb_psu_7x7.sv` | sorting unit and transmitting unit at N = 49 (7×7 kernel, 7 flits) |

Parameters with their defaults:
- `N = 25`: elements per window;
- `W = 8`: data width;
- `K = 4`: buckets;
- `LINK_W = 128`: link width;
- `NP = 16`: PEs;
- `IMG = 32`: image size;
- `KS = 5`: kernel size;
- `NF = 6`: filters.

## Simulating

Every testbench checks itself. Each one ends with a line
`TB_RESULT checks=<n> failures=<m>` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert rtl/psu_pkg.sv \
    $(ls rtl/*.sv | grep -v psu_pkg) tb/tb_lenet_platform.sv \
    --top-module tb_lenet_platform -o sim
./obj_dir/sim
```

Replace `tb_lenet_platform` with any other testbench name. The package must come first
on the command line. The full-platform testbench runs at the default size. It takes
about a minute to compile and under a second to run. It checks all 1176 pooled outputs,
once with sorting and once in bypass mode, and prints the link toggle counts.
`tb_data_allocation_unit` uses a 12×12 image, 2 filters and 3 PEs. At that size the
last group of jobs is only partly filled and the scheduler has to stall.
