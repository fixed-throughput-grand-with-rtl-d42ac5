# Fixed-throughput scheduling for decoders with random runtime

Guessing random additive noise decoding (GRAND), and its soft-input variant
ORBGRAND, decodes a received word by testing candidate noise patterns in
order of decreasing likelihood until the corrected word is a codeword. How
many patterns have to be tried depends on the noise, so the decoding time of
a codeword is random: most codewords decode in a few cycles, a few take very
long. A receiver, however, gets one codeword every *I* clock cycles and must
hand one on every *I* cycles, without ever dropping data.

The usual answer is to stop every decoding after a fixed budget of *I*
cycles. This RTL implements the alternative proposed in *Fixed-Throughput
GRAND with FIFO Scheduling* (F. Christen, D. Nonaca, C. Studer): put an
input FIFO in front of one or more decoders and a re-order buffer (ROB)
behind them, and release every codeword a fixed *P·I* cycles after it
arrived. A codeword that is quick to decode leaves time to the next one, so a
hard codeword can run for much longer than *I* cycles. Only when the buffers
cannot absorb the delay any more is the longest-running decoding cut short
("early termination"). Throughput and latency stay exactly constant; what
varies is how much decoding time each codeword gets.

The decoders themselves are not part of this RTL. The scheduler brings their
interface out as ports, so any decoder with random runtime that can be
stopped on demand (ORBGRAND, GRAND, an iterative LDPC decoder) can be
attached. The testbenches use a behavioural decoder with a random runtime.

## Data path

```
             +-----------+   +--------------+   +----------+   +------------+   +--------+
 in_valid -->| input     |-->| distribution |-->| decoder 1|-->| collection |-->|  ROB   |--> out_valid
 in_llr      | FIFO (F)  |   | unit         |-->|   ...    |-->| unit       |   |  (R)   |    out_cw
             +-----------+   +--------------+   | decoder D|   +------------+   +--------+
                                    ^           +----------+         ^             ^  ^
                                    |                ^ terminate     |             |  | booking
                              distribution control --+---------------+   output    |  |
                              early termination -----+                   pacer ----+  rob_booking
```

| Module | Role |
|---|---|
| `llr_fifo` | input FIFO, F LLR blocks of n×QW bits |
| `distribution_unit` | picks the lowest-numbered available decoder and starts it |
| `distribution_control` | decides when the FIFO head is released; table of which decoder holds which ROB slot |
| `collection_unit` | moves one decoder result per cycle into its ROB slot |
| `reorder_buffer` | R codeword slots released in arrival order, with a same-cycle forward path |
| `rob_booking` | hands each block leaving the FIFO the next ROB slot |
| `early_termination` | the termination condition and the choice of the decoder to stop |
| `output_pacer` | pairs each arrival with an output after the first P arrivals |
| `oldest_select` | helper: among a set of decoders, the one with the oldest codeword |
| `fifo_sched_top` | the whole scheduler |
| `fifo_sched_pkg` | default sizes and the `et_cause_e` type |

## Timing: why the latency is exactly P·I

*P*, the data parallelism, is the number of codewords inside the scheduler at
any time (`cfg_p`, 1 ≤ P ≤ F+R, held constant after reset). The scheduler
does not know *I*: the source sets it. `output_pacer` counts the first P
arrivals; from then on every arrival is paired, in the same cycle, with the
release of the ROB head. Because arrivals are *I* cycles apart, the codeword
released together with arrival *j+P* is codeword *j*, which came in exactly
*P·I* cycles earlier. Output therefore has the same period as input and a
constant latency, whatever the decoding times were.

Cycle by cycle, for a codeword accepted at clock edge *t*:

- *t*: written into the FIFO.
- *t+1* or later: released to a free decoder when a ROB slot can be booked
  (FIFO pop, ROB booking and decoder start are one event).
- decoding, for as long as the decoder needs or until terminated.
- result written into its booked ROB slot (one write per cycle).
- *t + P·I*: expelled from the ROB into the output register; `out_valid`
  and `out_cw` show it after that edge.

Since a codeword needs one cycle in the FIFO and one to reach a decoder,
**P·I must be at least 2**. The smallest case in the source evaluation,
(F=R=P=2, D=1) at I=1, is exactly 2; (1,1) is only evaluated at I=10.

## Early termination

Two things must never happen: an arriving codeword finds the FIFO full, and
the ROB head is not decoded when it is due. In a cycle with a new input the
scheduler fires an early termination (`et`) when

- (a) an output is requested and the head codeword is neither stored in the
  ROB nor finished by its decoder in this cycle, or
- (b) the FIFO is full and every decoder is occupied, where a decoder that
  finished and hands over its result this cycle does not count as occupied.

This is the published condition network, ((a) OR (b)) AND "new input and
output request". Here the ROB term carries the output request, because
during the first P arrivals there is input but no output yet, and (b) still
has to prevent an overflow then. After those P arrivals the two are the
same.

The decoding process that has run longest is stopped. Blocks leave the FIFO
in order and book ROB slots in order, so the oldest process is the busy
decoder whose ROB slot is nearest to the ROB head (`oldest_select`). No
start-time counters are needed. The stopped decoder's current estimate is
taken as its result, and everything that follows happens within the same
cycle:

- for (a) the stopped process *is* the head codeword (the head cannot still
  be waiting in the FIFO once P·I ≥ 2). The collection unit writes it, and
  the ROB forwards the write straight to the output register.
- for (b) the stopped decoder counts as free in that cycle. The FIFO releases
  its head into it, and the arriving block takes the freed FIFO entry. The
  ROB slot for the released block exists: either the head is being expelled
  in the same cycle, or fewer than P ≤ F+R codewords are in flight.

So one termination always restores both input and output, and `in_overflow`
and `out_miss` never rise in correct operation (assertions check this).
`et_cause` says which of (a), (b) or both fired.

Some consequences that are visible in simulation:

- Small P means frequent terminations of type (a): the ROB has too little
  slack. P close to F+R means frequent terminations of type (b): the FIFO
  fills. The published error rates show an optimum of P around F for F=R=4.
- At P·I = 2 every codeword is terminated after one cycle of decoding. Such a
  setting only works with a decoder that tests several patterns per cycle
  (the reference ORBGRAND core tests four).
- A second decoder helps when I is small: one long decoding no longer blocks
  the FIFO. When I is large, more buffering helps more.

## Top-level ports

| Signal | Dir | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset |
| `cfg_p` | in | data parallelism P (1..F+R), constant after reset |
| `in_valid`, `in_llr` | in | one LLR block, every I cycles |
| `out_valid`, `out_cw` | out | one n-bit codeword, every I cycles after the first P arrivals |
| `out_active` | out | the first P arrivals have been seen; outputs are running |
| `et`, `et_cause` | out | an early termination this cycle and its cause (`ET_ROB`, `ET_FIFO`, `ET_BOTH`) |
| `fifo_count` | out | FIFO occupancy |
| `in_overflow`, `out_miss` | out | error flags, never raised when P·I ≥ 2 |
| `dec_*` | – | decoder interface, below |

## Decoder interface

Per decoder *i* (`D` of them; the LLR bus is shared):

| Signal | Dir | Meaning |
|---|---|---|
| `dec_start[i]` | out | one-cycle start; capture `dec_llr` |
| `dec_llr` | out | n LLRs of QW bits, two's complement, LLR *b* at bits `[b*QW +: QW]`; negative means hard decision 1 |
| `dec_done[i]` | in | decoding finished; must come from a register (it feeds the termination logic combinationally) |
| `dec_cw[i]` | in | current codeword estimate, valid from the cycle after `dec_start`; held while `dec_done` is high |
| `dec_ack[i]` | out | result taken this cycle; the decoder is idle next cycle unless `dec_start[i]` is also high |
| `dec_abort[i]` | out | early termination: stop now; `dec_ack[i]` is high in the same cycle and `dec_cw[i]` is taken as the result |

A decoder can be restarted in the cycle its result is taken. With D > 1,
results can finish out of order; when several finish at once, the one with
the oldest codeword goes first and the others wait.

## Parameters

| Parameter | Default | Meaning | Origin |
|---|---|---|---|
| `N` | 256 | code length n | the (256,234) code of the evaluation |
| `QW` | 6 | bits per LLR | own choice, not given |
| `F` | 4 | FIFO entries | the (4,1) configuration the work centres on |
| `R` | 4 | ROB slots | same; elaboration fails if R < D |
| `D` | 1 | decoders | same |
| `cfg_p` (port) | – | data parallelism P, 1..F+R | runtime setting |

The evaluated configurations are written (F=R=P, D): (1,1), (2,1), (2,2),
(4,1), (4,2), with I from 1 to 10^5 cycles. All of them are parameter
settings of this RTL. Nothing in the RTL depends on I or on the number of
codewords. Storage is F·n·QW bits of FIFO (6144 at the defaults) and R·n bits
of ROB (1024).

## Where this design departs from, or adds to, the source

The source describes the blocks, the booking rule, the termination condition
and the P·I timing, but not the circuits. The following are choices of this
design:

- The release of a codeword is tied to an input arrival, as in the timing
  description of the evaluation. One passage of the overview instead speaks
  of data released "when requested" by the next block; no separate sink
  request is implemented.
- The same-cycle paths: push into a full FIFO together with a pop, booking a
  slot released in the same cycle, restart of a decoder in its collect cycle,
  and forwarding a ROB write to the output.
- The age of a decoding taken from its ROB slot. Lowest-index choice among
  free decoders. Oldest-first choice among finished decoders.
- The ROB stores and outputs the full n-bit codeword. Extracting the k
  information bits depends on the code's encoder and is left to the sink.
- LLR width, reset (asynchronous, active low, control state only) and the
  registered output.
- The decoders (the reference design is the ORBGRAND core "D1" of another
  publication) are not included, nor is the random (256,234) code they would
  need.

## Simulating

All files are SystemVerilog-2017. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/fifo_sched_pkg.sv tb/tb_fifo_sched_top.sv --top-module tb_fifo_sched_top
./obj_dir/Vtb_fifo_sched_top
```

Every testbench ends with `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. The testbenches are:

- `tb_fifo_sched_top`: the scheduler at n=32, 4-bit LLRs, F=R=4, D=2. It runs
  six phases with different P and I. One of them, P=4 and I=4, is the
  16-cycle-latency example. For every codeword it checks that it leaves
  exactly P·I cycles after entering, in order, with the right content, and
  marked correctly as finished or terminated. It counts every mechanism (both
  termination causes, forwarding, out-of-order completion, push into a full
  FIFO, same-cycle restart, all decoders busy) and fails if one never occurs.
- `tb_fifo_sched_full`: the same checks with every parameter at its default
  (n=256, QW=6, F=R=4, D=1), 14,000 codewords.
- `tb_fifo_sched_configs`: the five evaluated (F=R=P, D) configurations at
  n=256, 10^5 codewords each at I=1 and I=10 (only I=10 for (1,1)). It checks
  every codeword and prints the share of codewords cut short, about 7 s.
  With the random-runtime model this share is only an illustration; the
  error rates need a real decoder.
- one testbench per block (`tb_llr_fifo`, `tb_rob_booking`,
  `tb_reorder_buffer`, `tb_distribution_unit`, `tb_distribution_control`,
  `tb_collection_unit`, `tb_early_termination`, `tb_output_pacer`). Each
  compares the block with its own reference model under random stimulus.
- `orbgrand_model` and `sched_harness` are helpers. The model captures the
  hard decisions and draws a runtime: 3/4 of the time uniform in
  1..`rt_short`, otherwise uniform in 1..`rt_long`. It inverts bit 0 of its
  estimate when it finishes, so the checks can see whether a codeword was
  terminated. It also counts active cycles, the activity factor behind the
  dynamic-power estimate (power = activity × power of one decoder).

To attach a real decoder, replace `orbgrand_model` with a core that keeps
the interface above. Its runtime then sets the termination statistics.
