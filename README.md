# A segmented, lifecycle-aware eDRAM workspace for BF16 attention activations

An LLM running on an edge NPU needs a large on-chip workspace for the
attention tensors of each layer: the queries Q, keys K, values V and the
attention output O, each a BF16 matrix of sequence length by model width.
SRAM of that size leaks too much. Gain-cell eDRAM is dense and leaks little,
but it forgets: every cell must be refreshed before its charge decays, and
refresh becomes the main energy cost.

This RTL implements the SHIELD organisation of such a workspace (J. Zhang and
X. Fong, "SHIELD: A Segmented Hierarchical Memory Architecture for
Energy-Efficient LLM Inference on Edge NPUs"). Not every bit needs the same
refresh. It depends on two properties of the data:

* **Which field the bit is in.** An error in the sign or the 8-bit exponent
  of a BF16 number can change its value by orders of magnitude. An error in
  the 7-bit mantissa changes it by less than a factor of two.
* **How long the tensor lives.** K and V form the KV cache, which must
  survive for the whole context window. Q and O are used inside one layer
  and then discarded. The source measured at most about 1.5 ms for that
  lifetime.

The workspace therefore stores each 16-bit word in two pieces, in three
banks:

| bank | bits per word | holds | refresh |
|---|---|---|---|
| standard-refresh | 9 | sign + exponent of Q, K, V and O | every 45 us |
| relaxed-refresh | 7 | mantissa of K and V | every 1216 us |
| refresh-less | 7 | mantissa of Q and O | never |

The 1216 us interval keeps the mantissa bit-error rate of the 3T cell at or
below 1e-4. Over a 1.5 ms lifetime, an unrefreshed QO mantissa reaches about
4e-4. The source reports that neither rate measurably changes the model's
accuracy.

## Block diagram

```
                      +------------------------------+
                      |  refresh_ctrl                |
                      |  45 us sweep   1216 us sweep |
                      +------+---------------+-------+
                             | std_ref       | rel_ref
 NPU request  +-----------+  v               v
 ------------>|           |--sign+exp--> [standard bank  9b x (KV+QO)]
 <------------| data_seg_ |--K/V mant--> [relaxed bank   7b x KV     ]
 response     |   ctrl    |--Q/O mant--> [refresh-less   7b x QO     ]  (no refresh port)
              +-----------+
```

`shield_top` contains one `data_seg_ctrl`, one `refresh_ctrl` and three
`edram_bank` instances. The three banks use the same model; the refresh-less
bank has its refresh port tied off.

## How a word is stored

A request gives a tensor (`TENSOR_Q`, `TENSOR_K`, `TENSOR_V` or `TENSOR_O`)
and a word address inside that tensor's *lifecycle region*. K and V share
the KV region (`KV_WORDS` words); Q and O share the QO region (`QO_WORDS`
words). Software decides how K and V, or Q and O, divide their region.

* Bits [15:7] go to the standard bank: at the same address for KV words, and
  at `KV_WORDS + address` for QO words.
* Bits [6:0] go to the relaxed bank at `address` for K/V, or to the
  refresh-less bank at `address` for Q/O.

A read accesses both banks in the same cycle and joins the two pieces again.

## Refresh

`refresh_ctrl` has two sequencers (`refresh_seq`). Each walks the rows of one
bank in order and issues one row refresh per command. The commands are
spread evenly, so that each row is refreshed once per interval. The spacing
comes from a phase accumulator: add `ROWS` every cycle, and when the sum
reaches `T * CLK_MHZ` subtract that and issue a refresh. A sweep therefore
takes exactly the interval. The spacing between commands is
`floor(T*CLK_MHZ/ROWS)` or one cycle more. At the defaults this is 10 or 11
cycles for the standard bank (4096 rows, 45 000 cycles) and 593 or 594
cycles for the relaxed bank (2048 rows, 1 216 000 cycles).

Relaxed refresh costs energy only where there is a KV cache to keep. The
input `kv_live_rows` tells the controller how many relaxed-bank rows, counted
from row 0, hold live K/V mantissas. The NPU raises it as the cache grows
during decoding. The relaxed sequencer keeps its timing, but in the slot of
a row at or above `kv_live_rows` it issues no refresh. Relaxed refresh work
is therefore proportional to the KV footprint, which is what the energy
model below assumes. The standard bank is always refreshed in full. The
system must fill the KV region from address 0 upwards. K/V data stored above
the live rows is not refreshed, and decays like Q/O data.

A refresh occupies its bank for one cycle and has priority over an access.
While the standard bank refreshes (about 1 cycle in 11), every request
stalls. While the relaxed bank refreshes, only K/V requests stall. Q/O
requests go through, because their mantissa bank is never busy.

## The retention model (`edram_bank`)

The eDRAM cell is an analog circuit, so `edram_bank` is a behavioural model.
Its storage array and ports are ordinary logic. On top of them it has a
statistical model of charge loss, fitted to the 3T cell's measured
bit-error rate (BER) against the time a cell goes without being restored:

| longest unrestored gap | BER used |
|---|---|
| up to 45 us | 0 |
| up to 767 us | 1e-5 |
| up to 1216 us | 1e-4 |
| up to 1500 us | 4e-4 |
| up to 1770 us | 1e-3 |
| up to 9115 us | 1e-1 |
| longer | 0.5 |

Each row takes the rate of the next measured point above it, so the model is
pessimistic between points. The first row (0 up to 45 us) and the last
(0.5 beyond 9115 us) are this model's own choice; the measurements give no
number there.

Each cell has a fixed, random retention strength *u*, uniform in [0, 1). A
64-bit hash of the cell's address, its bit position, the cycle of the word's
last write and `SEED` draws it. The cell reads wrong (its bit inverted) when
BER(longest gap) > *u*. The rate never falls as the gap grows, so a failed
bit stays failed. This matches a real cell, where a refresh writes back the
value that has already been lost. Repeated reads agree.

The model never touches a whole row's words. A write records its cycle for
that word. A refresh records, for its row, the cycle of the refresh and the
row's longest unrefreshed interval (defined below). On a read the model
works out the word's longest gap:

* If the row has not been refreshed since the write, the gap is the time
  since the write.
* Otherwise it is the larger of the row's longest unrefreshed interval and
  the time since the row's last refresh.

The longest unrefreshed interval is the longest time any written data of the
row has gone without a refresh. It counts from the previous refresh if the row held
data then, and otherwise from the first write since. That record covers the
row's whole history, including time before the word was written. For a row
that is refreshed periodically from its first write, as live rows are, this
makes no difference. A row that held data while left unrefreshed (K/V data
above `kv_live_rows`) stays marked weak. Words written into it later are then
judged pessimistically.

With the default refresh, the worst gaps are 45 us in the standard bank
(error-free), 1216 us in the relaxed bank (BER <= 1e-4), and the QO lifetime
in the refresh-less bank (BER <= 4e-4 if the NPU consumes Q/O within
1.5 ms). The workspace does not enforce that lifetime. A Q/O word kept
longer loses its mantissa, though its sign and exponent survive.

## Interface and timing (`shield_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `kv_live_rows` | in | 12 | relaxed-bank rows (of `ROW_WORDS` KV words, from address 0) holding live KV data |
| `req_valid` / `req_ready` | in / out | 1 | request handshake; accepted when both are high |
| `req_we` | in | 1 | 1 = write, 0 = read |
| `req_tensor` | in | `tensor_e` (2) | Q, K, V or O |
| `req_addr` | in | 19 | word address in the tensor's region |
| `req_wdata` | in | 16 | BF16 write data |
| `rsp_valid`, `rsp_rdata` | out | 1, 16 | read data, valid in the cycle after acceptance |
| `std_refresh`, `rel_refresh` | out | 1 | a row of that bank is refreshed this cycle |
| `std_sweep`, `rel_sweep` | out | 1 | that bank finished a full sweep |

The port accepts one request per cycle. A stalled request must be held
unchanged until it is accepted. An assertion in `data_seg_ctrl` checks this
rule and also checks that the address lies inside the tensor's region.
Writes give no response.

Parameters: `CLK_MHZ` (1000), `KV_WORDS` (524288), `QO_WORDS` (524288) and
`ROW_WORDS` (256). Together they make a 2 MB workspace at 1 GHz. The refresh
intervals and field widths are constants in `shield_pkg`.

## Refresh energy

Take a plain eDRAM workspace that refreshes all 16 bits of every word every
45 us as the baseline. The fraction of refresh work saved is

    eta = 1 - [ 9/16 + 7/16 * (B_KV / B_total) * (45 / 1216) ]

Here B_KV is the live KV footprint: `kv_live_rows * ROW_WORDS`. With an
empty KV cache eta is 1 - 9/16 = 0.4375. With the default region full
(B_KV / B_total = 1/2) it is 0.4294. The refresh strobes show how many row
refreshes each bank performs. The end-to-end testbenches turn the strobe
counts into refreshed bits and compare the result with this formula.
`tb_gen_trace` does this step by step over a generation of 128 prefill and
256 decode tokens. Its measured eta falls from 0.4374 at the first step to
0.4252 at the last as the KV cache grows, never more than 0.0002 from the
formula. Leakage is not part of this count. The source's headline figures
(a 35% reduction in refresh energy, and a system-level efficiency gain of
about 1.35x) come from its own evaluation, whose inputs it does not list.
This count does not reproduce them. Its per-step eta (about 43.7% after
prefill, easing to about 42.5% by the end of decode) falls as the KV cache
grows, which is the trend the source describes.

## Sizes and what fits

The source uses a 2 MB workspace to compare eDRAM with SRAM. It gives no
other size for the workspace, so 2 MB is the default here. All workloads
below run in the source's own evaluation flow, not on this RTL:

* The source states that Qwen3-8B needs about 32 MB of Q/O workspace alone.
  The default QO region is 1 MB, so that does not fit.
* The generation trace of 128 prefill and 256 decode tokens, estimated here
  for an 8B-class model (4096-wide Q/O, 1024-wide K/V): one layer needs about
  2 MB of Q/O at prefill and 1.5 MB of K/V at the end. That does not fit
  either.
* The error rates the banks produce (<= 1e-4 KV, <= 4e-4 QO) lie within the
  tolerances the source measured for its accuracy experiments: KV mantissas
  up to 1e-4, QO mantissas up to 25%.

To hold such workloads, raise `KV_WORDS` and `QO_WORDS`. The logic does not
change, and the row counts and refresh spacing follow from the parameters.

## What follows the source and what is this design's own

These follow the source: the three banks and their widths (9, 7, 7 bits);
which tensor's mantissa goes where; the two refresh intervals; no refresh for
the Q/O mantissa bank; relaxed refresh in proportion to the KV footprint
(as the source's power model assumes); and the BER points of the retention
model.

These are this design's own choices: the request/response interface and its
one-cycle read latency; the address map and the even KV/QO split; the clock
(1 GHz) and row size (256 words); distributed one-row refresh with an
accumulator; refresh priority over access and the resulting stalls; conveying the KV
footprint as a live-row count, with the cache filled from address 0; the
refresh strobes; the step shape of the BER curve and its two end values; and
the fixed-retention-strength cell model.

Not modelled: the NPU that produces the tensors, the cell circuit itself,
leakage and refresh power in watts, and any check that Q/O words are read
within their lifetime. The source also describes a fault-injection
procedure for accuracy evaluation. That procedure is a software method, not
hardware, and is not part of this RTL.

## Files

| file | contents |
|---|---|
| `rtl/shield_pkg.sv` | field widths, intervals, default sizes, `tensor_e` |
| `rtl/data_seg_ctrl.sv` | field split, lifecycle steering, stall logic |
| `rtl/refresh_ctrl.sv`, `rtl/refresh_seq.sv` | the two refresh sequencers |
| `rtl/edram_bank.sv` | bank behavioural model with retention |
| `rtl/shield_top.sv` | the workspace |
| `tb/tb_edram_bank.sv` | read-back, refresh priority, retention statistics |
| `tb/tb_refresh_ctrl.sv` | spacing, order and exact sweep time of both sequencers, at default and small sizes |
| `tb/tb_data_seg_ctrl.sv` | random traffic against bank models with random busy periods |
| `tb/tb_shield_top.sv` | reduced workspace over eight layers with a growing KV cache, plus QO expiry; energy check |
| `tb/tb_shield_full.sv` | one complete fill-and-read of the default 2 MB workspace |
| `tb/tb_gen_trace.sv` | 128 prefill + 256 decode steps on a scaled layer; eta per step |

Each testbench checks itself and ends with a line
`TB_RESULT checks=N failures=M`. To run one with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
        rtl/shield_pkg.sv tb/tb_shield_top.sv --top-module tb_shield_top -Mdir obj
    ./obj/Vtb_shield_top

Replace the testbench name to run another. `tb_shield_full` runs about
2.3 million cycles and finishes in a few seconds.
