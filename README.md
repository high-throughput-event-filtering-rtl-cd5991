# DIF event filter: a one-event-per-cycle noise filter for event cameras

An event camera does not deliver frames. Each pixel reports, on its own, that
its brightness changed: an *event* made of the pixel coordinates, a polarity
bit and a timestamp. Real sensors add background activity, i.e. isolated
events that no scene change caused. This design removes such noise from the
stream in hardware at one event per clock cycle, for a 1280 x 720 sensor,
using a fixed and small amount of on-chip memory.

The filter implements DIF, *distance-based interpolation with frequency
weights*. It does not remember every pixel, which would need several
megabytes at this resolution. Instead it divides the sensor into square
subareas of 16 x 16 pixels (3600 areas) and keeps two numbers per area:

* **T**, a running (IIR) average of the timestamps of the area's events;
* **I**, a running average of the time between consecutive events of the area.
  A small I means a busy area.

For each incoming event, the filter estimates when this spot was last active.
It interpolates the T of the four areas whose centres surround the event
pixel. Each area is weighted by its activity (1/I) and by its closeness to the
pixel (1/distance). The event passes if that estimate lies less than a
*filter length* F_L (200 time units) in the past. The event's own area then
absorbs the event into its T and I.

Every event leaves the filter after exactly 30 clock cycles, with a flag
`out_pass`. The filter decides; the consumer drops the events that have the
flag at 0.

## The decision without division

Call the four neighbour areas 11 (top left), 12 (top right), 21 (bottom left)
and 22 (bottom right). d_ij is the distance from the event to area ij's centre.
The weighted average is

    T_est = sum(T_ij / (I_ij d_ij)) / sum(1 / (I_ij d_ij))

The test `Ts - T_est < F_L` contains a division. Define K_ij = I_ij · d_ij,
and multiply both sides by the product of all four K. The test becomes

    D_11 = K_12 K_21 K_22      D_12 = K_11 K_21 K_22
    D_21 = K_11 K_12 K_22      D_22 = K_11 K_12 K_21

    pass  <=>  F_L · (D_11 + D_12 + D_21 + D_22)  >  sum((Ts - T_ij) · D_ij)
               `--------------- Fc -------------'     `------ dTc ------'

These are the steps in hardware:

| quantity | how it is formed | width |
|---|---|---|
| d_ij | table lookup, 4 x the true distance, rounded | 7 bit (scale 16) |
| K_ij | `I_ij · d_ij`; then the lowest 8 bits are dropped; 0 is raised to 1; the result is clipped at 4095 | 12 bit |
| K_d1, K_d2 | `K_12 · K_21` and `K_11 · K_22` | 24 bit |
| D_ij | `D_11 = K_d1 K_22`, `D_12 = K_d2 K_21`, `D_21 = K_d2 K_12`, `D_22 = K_d1 K_11` | 36 bit |
| Ts - T_ij | 32-bit difference, truncated to 24 bits | 24 bit |
| dTc | four products, summed in two levels | 62 bit |
| Fc | `(D_11 + D_12) + (D_21 + D_22)`, times F_L | 54 bit |

Sharing K_d1 and K_d2 brings the count from eight multiplications to six. The
lower clamp of K keeps an area's weight from vanishing. Without it, one K of
zero makes three of the four D zero, and two zero K make both Fc and dTc zero,
so every event there would be rejected. The clipping bounds the word widths.

Truncating Ts - T to 24 bits wraps differences of 2^24 or more. With 1 µs
timestamps that is about 16.8 s. An area that has been quiet that long can
look recent again. The global update (below) limits how stale T can become.

## Area geometry and the four neighbours

`event_area_mapper` splits each coordinate into an area index (upper bits)
and an offset within the area (the low log2(SCALE) bits). Its output is
registered.

* **Choosing the neighbours.** The offset's top bit says on which side of the
  area centre the pixel lies. The neighbour pair in x is {area-1, area} for
  the left half and {area, area+1} for the right half; y works the same way.
* **Own area.** `own_sel` marks which of the four neighbours is the event's
  own area. The update reads its old T and I from that port.
* **Distances.** For the chosen pair the horizontal distance indices are
  `dx1 = offset XOR SCALE/2` and `dx2 = SCALE-1 - dx1`. Each is one of 16
  values.
* **Distance tables.** `distance_rom` maps a (dx, dy) pair to
  `round(4 · sqrt((dx+0.5)² + (dy+0.5)²))`. This is the distance between pixel
  centres in units of a quarter pixel. The table is computed at elaboration
  from that formula. `k_calc` holds four copies, one per neighbour, so all
  four lookups happen in the same cycle.
* **Sensor edges.** A neighbour index that would fall outside the sensor is
  clamped to the edge area. Near an edge the two areas of a pair are then
  the same area; near a corner all four are. The arithmetic is therefore the
  same everywhere and needs no special case.

Area addresses are `row · COLS + col`, with COLS = WIDTH/SCALE.

## Feature memories and the write-back cache

This is the hardest part of the design to follow.

**Organisation.** T and I each live in a `feature_memory`. It holds four
identical copies (`feature_bram`), one per neighbour, so the four neighbours
are read in one cycle. All copies, and both memories, share one write port
and are written together with the new value of the event's own area, so the
copies never diverge. Each copy is a simple dual-port block RAM:

* a read takes two cycles (address register, output register);
* a write takes effect at the end of the cycle after it is presented,
  because the write goes through register **D1**.

**The hazard.** At one event per cycle, the own area updated by event n is
often read again by events n+1, n+2 and n+3. Those events read the RAM before
event n's write has landed.

**The fix.** Every write is kept in a three-entry history, D1 -> D2 -> D3
(address, data, valid). The read address travels alongside the RAM pipeline.
When the data come out, each port compares its address with D1, D2 and D3,
and takes the newest matching entry instead of the RAM word.

The timing works out as follows:

* Event n reads its neighbours in cycle c (pipeline cycle 1) and gets the
  data in cycle c+2.
* In that same cycle c+2 it computes its own area's new T and I from that
  data and presents the write.
* The next event issues one cycle later and gets its data in cycle c+3,
  when event n's write is in D1.
* Events n+2 and n+3 find it in D2 and D3.
* From event n+4 on, the value is in the RAM.

So a read issued in cycle c reflects every write presented up to cycle c+1,
and the stream of per-event decisions is the same as that of a purely
sequential implementation. The top-level testbench checks exactly this
against a model with no cache.

**Reset and power-up.** The memories have no reset: the RAM starts at zero, as
block RAM does after FPGA configuration. D1..D3 are reset, so no stale write
can be forwarded or committed after reset.

**The update formula** (`ts_update`, `interval_update`, UPDATE_OFFSET = 2,
i.e. weight 1/4) is integer and uses shifts only:

    T_new = T - (T >> 2) + (Ts >> 2)
    I_new = I - (I >> 2) + ((Ts - T) >> 2)      (T is the old value)

An area that has seen no event starts from T = I = 0. Its first event
therefore gives a large I, a low weight, until more events arrive.

## Global update of inactive areas

If a quiet area is never touched, its T stays old and its I small. A small I
makes the area look busy, so it keeps a high weight. The global update ages
such areas.

* **Activity record.** Every GU_PERIOD time units (20000, i.e. 20 ms with µs
  timestamps), each area that received no event during the period is updated
  as if an event with the period's end time had arrived. The `activity_matrix`
  is a register array with one bit per area. An event sets its own area's bit.
* **Trigger.** `global_update_ctrl` keeps the end time of the current period.
  The first input event whose timestamp reaches it starts a sweep, and that
  event is held at the input (`in_ready` low) until the sweep finishes.
* **Sweep.** The sweep issues one area per cycle into the same update
  pipeline that events use. Each step reads and clears the area's activity
  bit. The area is written only if the bit was 0.
* **Cost.** A sweep of the 3600 areas holds the input for 3600 cycles. Sweep
  steps produce no output.
* **Several periods.** If the held event lies several periods ahead, one
  sweep runs per period, each with its own end time.
* **No drain needed.** Sweep steps travel through the same write-back cache,
  so the sweep needs no drain before it starts. The event that follows sees
  its results at once.

With `GLOBAL_UPDATE = 0` the controller and the activity array are not built.
`in_ready` is then always 1, and the filter accepts an event every cycle
without exception.

## Pipeline and timing

Cycles are counted from the clock edge that accepts an event
(`in_valid && in_ready`):

| cycle | stage |
|---|---|
| 0 | event accepted |
| 1 | neighbour addresses, own area, distance indices registered; memories addressed |
| 3 | corrected T and I of the four neighbours available; own area's new T, I presented for writing |
| 4 | T and I registered |
| 5 | four Ts - T differences |
| 4 .. 10 | distance lookup (2), I·d multiplier (4), K reduction and clamping (1) |
| 11 .. 18 | K_d multipliers, then D multipliers (4 + 4) |
| 19 .. 24 | Fc: two adds, one multiplier; dTc: multipliers, two adds |
| 25 .. 28 | padding registers |
| 29 -> 30 | comparison registered; `out_valid`, `out_event`, `out_pass` |

Every multiplier has MULT_STAGES = 4 register stages, the depth at which an
FPGA DSP multiplier of these widths runs at full speed. The natural pipeline
depth is `10 + 4·MULT_STAGES` = 26 cycles. Registers placed before the
comparator bring it to LATENCY = 30, the latency of the original
implementation. With other settings, LATENCY must be at least the natural
depth; an elaboration assertion checks this. The differences Ts - T are
delayed so that they meet the D factors at the dTc multipliers.

## Interface

```
clk, rst_n               clock; asynchronous active-low reset
in_valid, in_ready       input handshake; an event is taken when both are 1
in_event                 dif_pkg::event_t = {pol[63], y[62:48], x[47:32], ts[31:0]}
out_valid                one cycle per accepted event, LATENCY cycles later, in order
out_event                the event, unchanged
out_pass                 1: keep (signal), 0: drop (noise)
gu_busy                  1 while a global-update sweep runs
```

The output has no back-pressure: the consumer must take one event per
cycle. Timestamps are unsigned, 32 bits, in any unit. F_L and GU_PERIOD are
given in that unit; 200 and 20000 assume microseconds.

## Parameters (`dif_filter`)

| parameter | default | meaning |
|---|---|---|
| WIDTH, HEIGHT | 1280, 720 | sensor size; COLS = WIDTH/SCALE, ROWS = HEIGHT/SCALE |
| SCALE | 16 | area edge in pixels; power of two |
| UPDATE_OFFSET | 2 | IIR weight 2^-UPDATE_OFFSET for T and I |
| FILTER_LENGTH | 200 | F_L (16-bit) |
| GLOBAL_UPDATE | 1 | build the sweep of inactive areas |
| GU_PERIOD | 20000 | global update period in timestamp units |
| MULT_STAGES | 4 | register stages per multiplier |
| LATENCY | 30 | input-to-output latency in cycles |

For a 640 x 480 sensor, set WIDTH = 640 and HEIGHT = 480. This gives 1200
areas and a 1200-cycle sweep. A 1280 x 720 build would also accept those
events, but it would treat column 40 and row 30 as real neighbours instead of
clamping at the sensor edge.

Storage at the defaults:

* feature memories: 2 features x 4 copies x 3600 areas x 32 bits = 921 600 bits;
* activity array: 3600 flip-flops.

The shared word widths are in `dif_pkg` and follow from the 12-bit K and the
24-bit differences.

## Where this design departs from, or adds to, the published architecture

The following come from the published architecture:

* the division-free comparison;
* the K / K_d / D factoring, with the 8-bit drop, the clamp to 1 and 12-bit saturation;
* quarter-pixel distance tables with four parallel copies;
* 24-bit timestamp differences;
* four parallel memory copies per feature, with one shared write port;
* the three-entry write cache;
* the edge rule;
* the register-based activity array, read and cleared during the update of inactive areas;
* the default parameters and the 30-cycle latency.

The following are choices of this design, where the published description is
silent:

* the event word layout;
* 32-bit stored T and I;
* zero initial memory contents;
* the valid/ready handshake;
* the trigger of the sweep (the first event past the period end) and the
  timestamp used for refreshed areas (the period end);
* the split into pipeline stages and the padding to 30 cycles;
* rounding the distance tables to the nearest quarter;
* the sign convention of the differences (event time minus area time).

Not included:

* a camera interface;
* the replay memories and logic analyser of a board test setup;
* FPGA clock buffers.

The filter's ports are the points where such parts connect.

The decisions have been checked against a bit-exact sequential model of the
algorithm described here. They have not been compared with results from the
original implementation, for which no reference data were available.

## Source files

| file | contents |
|---|---|
| `rtl/dif_pkg.sv` | widths, `event_t`, operation type |
| `rtl/dif_filter.sv` | top level: pipeline, sweep multiplexing, latency pad |
| `rtl/event_area_mapper.sv` | neighbour addresses, own area, distance indices |
| `rtl/feature_bram.sv` | one RAM copy (2-cycle read) |
| `rtl/feature_memory.sv` | four copies plus D1..D3 write-back cache |
| `rtl/ts_update.sv`, `rtl/interval_update.sv` | IIR update of T and I |
| `rtl/activity_matrix.sv` | one activity bit per area |
| `rtl/global_update_ctrl.sv` | period tracking, sweep counter, input hold |
| `rtl/distance_rom.sv` | quarter-pixel distance table |
| `rtl/k_calc.sv` | four I·d products, reduction, clamp, saturation |
| `rtl/d_calc.sv` | K_d and D multipliers |
| `rtl/ts_diff.sv` | Ts - T, truncated to 24 bits |
| `rtl/dtc_calc.sv`, `rtl/fc_calc.sv` | the two sides of the comparison |
| `rtl/result_compare.sv` | final comparison and output register |
| `rtl/pipe_mult.sv`, `rtl/delay_line.sv` | pipelined multiplier, delay line |

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=<n> failures=<m>` and ends with a watchdog. Expected values
come from models written independently of the RTL: direct formulas,
reference arrays, or floating-point square roots for the distance table.

`tb/tb_dif_filter.sv` runs two small filters (128 x 64 pixels, 32 areas,
update period 2000) side by side, one with and one without the global update.

* **Stimulus.** 6000 generated events: a moving cluster; noise that is
  switched off in every other period, which makes areas inactive; corner and
  edge pixels; bursts into one area; idle cycles; and a long silent gap.
* **Model.** A sequential model without any cache predicts every output.
* **Checks.** For each event: the word, the pass flag, the order and the
  exact 30-cycle latency.
* **Counted mechanisms.** The testbench counts each mechanism and fails if
  one never occurs:
  * forwarding from each of D1, D2 and D3;
  * sweeps, input stall cycles and refreshed areas;
  * corner and edge events;
  * K clamped to 1 and K saturated;
  * both pass outcomes.

`tb/tb_dif_filter_full.sv` instantiates the filter with all defaults
(1280 x 720, 3600 areas). It runs 24000 events through more than two update
periods, including two complete 3600-area sweeps, and checks every output
against the same model.

`tb/tb_dif_filter_workloads.sv` runs four more configurations side by side,
each against the same model:

* a 640 x 480 sensor;
* 1280 x 720 without the global update;
* 1280 x 720 with an update every 2000 time units;
* 29031 events spread over eight periods of 1000 time units, one sweep
  between consecutive 1 ms batches.

It checks that each configuration sweeps exactly as often as the model
predicts, and that the filter without the global update never stalls.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal rtl/dif_pkg.sv -y rtl \
          tb/tb_dif_filter.sv --top-module tb_dif_filter -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Replace the names for the other testbenches. `+verilator+rand+reset+2` starts
every register that has no reset or initial value at a random value, which
shows up any dependence on uninitialised state.
