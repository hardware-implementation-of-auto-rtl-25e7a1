# Real-time auto-mutual information function (AMIF) calculator

This RTL computes the auto-mutual information function of a vibration signal
while the samples stream in. It also reports the lag at which the function has
its first minimum. That lag, the delay time tau, is the feature the paper
"Hardware implementation of auto-mutual information function for condition
monitoring" (Siljak, Subasi, Upadhyaya) uses to tell a healthy induction motor
from an aged one. In their tests a healthy motor gives tau = 4 and an aged one
gives tau = 1. The paper describes the algorithm, a block diagram of the
hardware and how the design was tested. It does not publish its Verilog. The
SystemVerilog here is a fresh implementation of that block diagram. Everything
the paper leaves open was decided here, and this document says which parts
those are.

## What is computed

Take a window of M sample pairs (x[i], x[i+l]), with every sample already
scaled to one of N levels. Three histograms are kept for each lag l:

* A: the levels of the earlier samples x[i]
* B: the levels of the delayed samples x[i+l]
* AB: the joint N x N histogram of the pairs

The design keeps, for every lag l = 1..L_MAX,

    AMIF(l) = sum over AB cells with v > 0 of  v * log2( v / (vA * vB) )

Here v is the joint count of a cell, vA the count of its row in A and vB the
count of its column in B. This is the form the paper uses: raw counts, with no
division by M. It equals M*I(l) - M*log2(M), where I(l) is the mutual
information in bits. So the location of the minimum is the same as for I(l).

The windows follow the paper's batch procedure. With maximum lag L:

* A covers x[t-L-M+1 .. t-L].
* B_l is the same range shifted by l.

Once a record has been read completely, the sums therefore equal the batch
result over its first M points. When samples keep coming, the window slides.

tau is the smallest l with AMIF(l) < AMIF(l+1), the first lag after which the
function rises again. If it never rises within 1..L_MAX, tau = L_MAX and
`tau_found` = 0.

Default sizes, set in `amif_pkg`:

| parameter | default | where it comes from |
|---|---|---|
| `N_LEVELS` | 128 | the paper's scaling range 1-128 and its synthesis figures |
| `L_MAX` | 15 | the paper's 15 lag values, all computed in parallel |
| `WINDOW` | 512 | the window of the paper's hardware tests |
| `SAMPLE_W` | 16 | choice of this design |
| `LOG_FRAC` | 12 | fractional bits of the logarithms; choice of this design |
| `ACC_W` | 40 | width of the AMIF sums; choice of this design |

## Updating instead of recomputing

This is the central idea, and the least obvious part of the RTL.

Each new sample x[t] enters the window, and the oldest sample leaves it. For
histogram A, one bin goes up (a_in = level of x[t-L]) and one goes down
(a_out = level of x[t-L-M]). For each lag, B changes the same way: b_in is the
level of x[t-L+l] and b_out the level of x[t-L-M+l]. In AB, one cell goes up,
(a_in, b_in), and one goes down, (a_out, b_out).

A term depends on its cell, its row count and its column count. So the only
terms that change are those in:

* rows a_in and a_out of AB, because their vA changed;
* columns b_in and b_out, because their vB changed.

That is at most 4N cells out of N². The paper proposes exactly this update. The
RTL carries it out as follows (`amif_update`, `amif_cell_term`):

1. **Row walk**, N cycles, j = 0..N-1. The engine reads AB(a_in, j),
   AB(a_out, j) and B[j]. For each of the two cells it computes the term with
   the old counts and the term with the new counts, and adds the difference to
   the sum. The new counts are old + delta, where delta is +1, 0 or -1 and is
   worked out from the four bin numbers. Row a_out is skipped if it equals
   a_in.
2. **Column walk**, N cycles, i = 0..N-1. The engine reads AB(i, b_in),
   AB(i, b_out) and A[i] and does the same. Rows a_in and a_out are skipped,
   because the row walk already covered them. Column b_out is skipped if it
   equals b_in.
3. **Commit**. The two AB cells are written back through the two RAM ports, and
   A and B count the new and the old sample. The old values of the two AB cells
   were captured during the row walk, so the commit needs no extra read. If the
   entering and leaving pair fall in the same cell, AB is not written at all.

All reads in a walk return counts from before the sample. Each affected cell
is processed exactly once, with the same old and new values a full
recomputation would use. The sum therefore equals the sum of the rounded terms
exactly, and it does not drift however long the design runs. The only
difference from floating point comes from rounding the logarithms. That error
is at most about 1.5 units in the last place per count, about M*1.5*2^-13 in
total: 0.1 for a 512-sample window, against sums of about -2500.

Every term is `v * (log2 v - log2 vA - log2 vB)`, with all three logarithms
read from a table (`amif_log2`). The table has `WINDOW+1` entries, because no
count can exceed the window length. `amif_pkg::log2_fx` fills it while the
design is elaborated, using only integer arithmetic: the integer part comes
from the position of the leading one, and the fraction bits from repeated
squaring. Each result is rounded to `LOG_FRAC` bits, and log2 0 is taken as 0.
No data file is needed.

## Block structure

```
sensor ------------------------------+
emulator -> amif_sample_fifo --------+-> amif_source_select -> amif_input_scaling
                                                                     |
                           amif_sample_buffer (new / outdated samples)
                                     |                       |
                            amif_hist1d (A)      L_MAX x amif_lag_lane
                                     |                 amif_hist1d (B)
                                     +---- A[i] -----> amif_hist2d (AB)
                                                       amif_update -> amif[l]
                                                                     |
                                                      amif_first_min -> tau
                 amif_ctrl sequences all of the above
```

* `amif_source_select`: chooses the on-board sensor (`mode_emu` = 0) or the
  emulator, which replays recorded files (`mode_emu` = 1). The sensor cannot be
  stalled: a sensor sample that arrives while the calculator is busy is dropped
  and flagged by `sensor_overrun`. Changing the mode restarts the measurement.
* `amif_sample_fifo`: holds emulator samples. In the paper the emulator is a
  program on a host processor that sends samples over PCIe, and the paper says
  a buffering module is needed. The depth (16) is a choice of this design.
* `amif_input_scaling`: level = clamp((sample - lo) >> shift, 0, N-1). `lo`
  and `shift` are run-time inputs. The paper only asks for a fixed 1..128
  range; the scaling it started from used the minimum and maximum of a whole
  file, which a stream does not have. For a 16-bit full-scale signal at 128
  levels, use lo = -32768 and shift = 9.
* `amif_sample_buffer`: the sample part of the memory. It is a head shift
  register x[t..t-L], a circular RAM of depth M, and a tail shift register
  x[t-M..t-M-L]. Together they give the entering and leaving level of A and of
  every B_l in the same cycle. A counter tracks how full the window is. Until a
  sample actually leaves, nothing is subtracted, so the histograms simply fill
  during the first M+L samples.
* `amif_hist1d`: N counters with increment/decrement update and two read
  ports with one cycle of latency.
* `amif_hist2d`: N² counters in a true dual-port RAM with one cycle of read
  latency. It has no reset. The controller clears it after reset.
* `amif_lag_lane`: one lag, made of B, AB, the AMIF update and the address and
  capture logic between them. All lanes run in lock step from one controller.
  Histogram A is shared by all lanes; during the column walk its port 0 value
  A[i] goes to every lane.
* `amif_ctrl`: the schedule, described below.
* `amif_first_min`: computes tau with combinational comparators and registers
  the result.
* `amif_top`: the wiring above.

## Schedule and timing

| state | cycles | what happens |
|---|---|---|
| INIT | N²/2 | after reset or a mode change: zero all AB cells through both ports; clear A, B, sums, sample buffer |
| IDLE | >= 1 | `sample_ready`; a sample is shifted into the buffer |
| PREP | 1 | read A[a_in], A[a_out], B[b_in], B[b_out]; if no sample enters the window yet, back to IDLE |
| ROWS | N | row walk |
| COLS | N | column walk |
| DRAIN | 1 | last read data returns |
| COMMIT | 1 | write back; `amif[]` final, `amif_valid` pulses if the window is full |

One sample therefore costs 2N+4 cycles. At the defaults that is 260 cycles, or
about 192 k samples/s at 50 MHz. The motor data was sampled at 12 kHz.
`tau_valid` follows `amif_valid` by one cycle. The memories answer one cycle
after the address, so the controller also produces delayed copies of the scan
index and phase (`d_en`, `d_phase`, `d_idx`) that travel with the returning
data.

## Top-level interface (`amif_top`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `mode_emu` | in | 0: sensor, 1: emulator (board switch); a change restarts |
| `scale_lo`, `scale_shift` | in | input range (see scaling) |
| `sensor_valid`, `sensor_data` | in | A/D samples, no flow control |
| `sensor_overrun` | out | a sensor sample was lost |
| `emu_valid`, `emu_data`, `emu_ready` | in/in/out | emulator stream, valid/ready |
| `emu_fifo_level` | out | emulator FIFO fill |
| `amif[L_MAX]` | out | AMIF(1..L_MAX), signed, `LOG_FRAC` fraction bits |
| `amif_valid` | out | pulse: new values of a full window |
| `tau`, `tau_found`, `tau_valid` | out | first minimum |
| `sample_clipped` | out | the accepted sample was outside the range |
| `busy` | out | not idle (also high during the clearing sweep) |

Outside this module are the accelerometer and its A/D converter, the PCIe link
and host program of the emulator, the switches or IR remote, and the LCD or
web-server output of the paper's board set-up. Their signals are the plain
ports above.

## Where this design departs from the paper, or goes beyond it

* Parallel lags. The paper computed all 15 lags in parallel on its board, and
  this design does the same. The alternative it mentions, one module looping
  over the lags, is not built.
* Memory. The paper's block diagram draws the histogram and sample memory
  outside the FPGA. Here it is on chip: one 128 x 128 x 10-bit RAM per lag,
  2.46 Mbit in total. The paper also notes that small N needs no external RAM.
* Amount of arithmetic. The paper counts 4n multiplications and 8n logarithms
  per sample. This engine evaluates the old and the new term of up to 4n cells,
  which is up to 8n multiplications with table logarithms, spread over 2n
  cycles. The paper does not describe its own datapath, so this one may not
  match.
* Rate. The paper states that inputs up to 3 MHz posed no problem. The
  schedule here gives 2N+4 cycles per sample and does not reach 3 MHz at 128
  levels with a realistic clock. It is far above the 12 kHz of the data.
* Orientation of AB. The paper's text names the new-sample bins as columns and
  the delayed-sample bins as rows. Here rows belong to histogram A (the earlier
  sample x[i]) and columns to B (the later sample x[i+l]). This only transposes
  the matrix; the sum is the same.
* Number formats, handshakes, reset and clearing, the scaling rule, the rule
  for equal neighbours in the first-minimum search, the FIFO depth and the
  restart on a mode change are all choices of this design.
* Not built: a "good / aged" decision on tau (the paper gives no rule), and
  the display and network output.
* Sample counts. The paper's evaluations over whole records of 16,000 or
  120,000 samples need a much larger `WINDOW`. This changes only the parameter
  and the counter width, and the joint memory grows with it.

## Simulating

All files are SystemVerilog 2017, one module or package per file. The design
files are in `rtl/`; the two packages are named on the command line first, and verilator finds every module through `-y`. Each block has a
self-checking testbench `tb/tb_<module>.sv`. Each testbench prints
`TB_RESULT checks=N failures=F` and ends with `$finish`. The
testbenches compare against `tb/amif_ref_pkg.sv`, which recomputes the AMIF in
floating point from the definition. It shares no code with the design.
Example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/amif_pkg.sv tb/amif_ref_pkg.sv tb/tb_amif_top.sv \
    --top-module tb_amif_top -o sim
obj_dir/sim
```

* `tb_amif_top` runs the whole design at 8 levels, 4 lags and a 39-sample
  window. It covers sensor input with dropped and clipped samples, then a mode
  switch, then emulator input at full rate with the FIFO holding the source
  off. It checks every result against the reference. It counts sliding-window
  updates, same-cell updates, first minima found and the 2N+4-cycle spacing,
  and fails if any of these never occurred.
* `tb_amif_full` runs the default size (128 / 15 / 512). It feeds a Rossler
  chaotic series through the emulator port, checks every AMIF value and tau
  over 24 consecutive full windows, and checks the 260-cycle rate. Its series
  gives tau = 11 at the sampling step used. It takes well under a minute.
* `tb_amif_workload_table1` uses the configuration of the paper's workbench
  test: 32 levels, 15 lags and 15 disjoint 512-sample windows per series. The
  motor recordings are not included, so it runs two synthetic series: a
  low-frequency vibration and a high-frequency one. It checks every window
  against the reference and prints the mean tau of each series (about 4 and
  about 1.7).
* The other testbenches check one block each: the log table against `$ln`,
  scaling, FIFO, source selection, the sample delay lines, the two histogram
  memories, the update engine with testbench-held histograms, one lane with the
  real controller, the controller's schedule cycle by cycle, and the
  first-minimum search.

To change the size, override `N_LEVELS`, `L_MAX` and `WINDOW` on `amif_top`.
The widths of counters, addresses, the log table and `tau` follow from them.
`N_LEVELS` must be a power of two, because AB addresses are {row, column} bit
concatenations. `WINDOW` may be any size of at least 2.
