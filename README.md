# MARC: a row hammer detector that watches ACT timing, not addresses

Row hammer attacks flip bits by activating a few DRAM rows as often as
possible. To reach as many activations as possible inside a refresh window,
an attacker issues ACT commands back to back, so the ACT-to-ACT time of a
bank (tRC) stays close to the minimum tRCmin (60 ns on LPDDR5). The tRC
values also repeat: the same value over and over, or a short sequence of
values in a loop. Ordinary workloads rarely show tRC below 100 ns (well
under 1% of ACTs in the mobile traces MARC was designed against).

MARC uses this. Per bank it watches only ACT timing and decides, once per
refresh interval tREFi (15.6 us), whether the bank is being hammered. When
it is, MARC asks the memory controller for adaptive refresh management
(ARFM). ARFM is the LPDDR5/DDR5 feature that lowers the RFM threshold
RAAIMT, so the controller sends more RFM commands and the DRAM gets more time
to repair victim rows. The longer the attack lasts, the higher the ARFM level,
from A up to C. During normal operation MARC requests nothing, so it costs
no refresh energy. Because no row address is tracked, its size does not grow
with DRAM density or with lower hammer thresholds. The only sizeable storage
is a 260 x 3-bit label buffer per bank.

This RTL implements the MARC detector for a 16-bank channel. It also includes
the controller-side RAA counter that turns MARC's ARFM level into RFM
requests.

## Where it sits

```
 memory controller ──ACT/REF/RFM──────────────────────────▶ DRAM
        ▲                  │ (commands only, no address)
        │ RH_DETECT,       ▼
        │ ARFM level   ┌──────────── marc_top ────────────┐
        │ RFM request  │  per bank (x16):                 │
        └──────────────┤   marc_bank ──level──▶ raa_counter│
                       └──────────────────────────────────┘
```

The controller hands `marc_top` decoded command pulses: `act_valid` with
`act_bank`, an all-bank `ref_valid`, and `rfm_valid` with `rfm_bank`. For
each bank it gets back `rh_detect`, `arfm_level`, `rfm_req` (RAACNT >
RAAIMT: an RFM should be scheduled) and `rfm_urgent` (RAACNT >= RAAMMT: no
further ACT before an RFM). All outputs are registered.

## Step 1: tRC labels (`trc_checker`)

A saturating counter measures the cycles between two ACTs of the bank. The
default clock is 1 ns, so the counter gives tRC directly in nanoseconds. The
result is reduced to a 3-bit label:

| label   | tRC            |
|---------|----------------|
| short-A | 60 – <70 ns (and anything shorter) |
| short-B | 70 – <80 ns    |
| short-C | 80 – <90 ns    |
| short-D | 90 – 100 ns    |
| long    | > 100 ns       |

Only labels are used after this point. Two tRCs in the same 10 ns bin count
as identical, so an attacker who jitters tRC by a few ns is still seen as
repeating. The first ACT after reset has no predecessor and gives no label.

## Step 2: a three-window pipeline

Each bank processes one tREFi window per stage. The REF command marks the
window boundary:

```
window:        n             n+1              n+2
            store+count   capture+dup     inspect -> RH_DETECT, ARFM level
                           store+count    capture+dup     ...
```

* **Store & count** (`short_trc_buffer`, `short_trc_counter`). Every short
  label is written into the buffer and counted. tREFi / tRCmin = 260, so a
  window holds at most 260 labels. The buffer has two halves of 260 x 3 bit,
  used in turn: one half fills while the other replays the previous window.
* **Capture & duplication** (`capture_engine`). After the REF, the frozen
  half is replayed into the capture engine at one label per cycle (261
  cycles, far below the 15,600 cycles of a window). At the end of the replay
  the engine gives two verdicts on the window: *duplication* and *loop*.
* **Inspection & ARFM** (`inspection_control`). At the next REF, the
  window's short count and its verdicts are combined. The result shows on
  `rh_detect` and `arfm_level` for the whole following window.

Labels stored in window n therefore take effect from the start of window
n+2, which is about 31 us after the attack began.

## Step 3: the capture engine

This is the heart of MARC and the least obvious part. It holds:

* a **point latch** (1 label),
* a **capture latch** of K labels (K = 3),
* an **eviction latch** of K-2 labels (here 1),
* a comparator for each latch and an **eviction counter**.

Its state persists from one window to the next, so a pattern is followed for
as long as it lasts. Labels are processed as follows.

1. **Point process.** The first label loads the point latch. Each following
   label equal to it raises the *point compare flag*. The first different
   label goes into capture slot 0, and the capture process starts.
2. **Capture process.** A label equal to the most recently filled slot
   raises the *capture compare flag*. A different label fills the next slot.
   The last slot is special: the next label fills it whatever its value.
   The capture is then done, and *loop control* goes high.
3. **Loop / eviction process.** Each label is compared with the captured
   sequence. Right after the capture, only slot 0 is accepted. Once a label
   has matched, the engine is in step. From then on it accepts the next slot
   (tried first) or a repeat of the current slot, so `D D C C` still matches
   a captured `D C C`.
   * A match raises the capture compare flag. A match that advances to the
     next slot (or re-enters at slot 0) also clears the eviction latch and
     counter; a repeat of the current slot does not.
   * A mismatch equal to the eviction latch raises the *eviction compare
     flag*. This is the same stranger repeating.
   * Any other mismatch goes into the eviction latch and counts one
     eviction.
   * The engine resets to the point process when the count would exceed
     EVICT_TH (2). The label that caused the reset loads the point latch.

Worked example. With K = 3 and labels `C C D D C C A A A C D D C C D D ...`,
the engine goes through these states (all reproduced by `tb_capture_engine`):

| step | label | what happens                                   | point | capture | evict (count) |
|------|-------|------------------------------------------------|-------|---------|---------------|
| T1   | C     | loads point latch                              | C     | - - -   | - (0) |
| T2   | C     | point compare flag                             | C     | - - -   | - (0) |
| T3   | D     | differs: capture slot 0                        | C     | D - -   | - (0) |
| T4   | D     | equals last slot: capture compare flag         | C     | D - -   | - (0) |
| T5   | C     | fills slot 1                                   | C     | D C -   | - (0) |
| T6   | C     | last slot, filled regardless                   | C     | D C C   | - (0) |
| T7   | A     | loop control high; A is a stranger: evicted    | C     | D C C   | A (1) |
| T8,T9| A     | equals eviction latch: eviction compare flag   | C     | D C C   | A (1) |
| T10  | C     | not slot 0, not A: evicted                     | C     | D C C   | C (2) |
| T11  | D     | matches slot 0: in step, eviction cleared      | C     | D C C   | - (0) |
| T12… | D C C D D C C … | every label matches: capture flag stays high | | | |

*Duplication control* is a per-label signal. It is high when a label equals
the one before it.

At the end of each window the engine reports:

* **loop** = loop control is high at the end of the window and no reset
  happened inside it;
* **duplication** = every label of the window raised some compare flag. The
  one exception is a label that only loaded the point latch. A steady
  single-label stream (`A A A …`) is the typical case.

## Step 4: attack decision and ARFM level (`inspection_control`)

A window is an **attack window** when both of these hold:

1. its short-tRC count exceeds S_tRC_TH (130, half of the 260 possible), and
2. its verdict is duplication **or** loop.

`rh_detect` is this decision. The inspection timer counts consecutive attack
windows, and the ARFM level follows it:

| consecutive attack windows | ARFM level | RAAIMT | RAAMMT (8x) | RAADEC per REF (1x) | RAADEC per RFM (4x) |
|---|---|---|---|---|---|
| 0                      | default | 248 | 1984 | 248 | 992 |
| 1–2                    | A       | 128 | 1024 | 128 | 512 |
| 3–4                    | B       | 64  | 512  | 64  | 256 |
| 5 or more              | C       | 32  | 256  | 32  | 128 |

A single normal window returns the bank to the default level.

## Step 5: turning the level into RFMs (`raa_counter`)

RAACNT rises by one for each ACT. It falls by RAADEC per REF and by RAADEC
per RFM, and never goes below zero. An RFM is requested while RAACNT >
RAAIMT and becomes mandatory at RAAMMT. RFM is enabled only when tREFi >=
RAAIMT x tRCmin (14.88 us <= 15.6 us with the default RAAIMT). This check is
made once, on the constants.

At the default level a bank that is hammered at full speed collects about
260 ACTs per window, and each REF removes 248. The counter therefore gains only about 12
per window and requests an RFM only rarely. At level C an RFM is due every 33 ACTs.

## Parameters

| parameter | default | meaning | origin |
|---|---|---|---|
| `NUM_BANKS` | 16 | banks per channel | LPDDR5 bank count, own choice |
| `T_CK_PS` | 1000 | clock period (ps) used to measure tRC | own choice |
| `DEPTH` | 260 | labels per window (tREFi / tRCmin) | paper |
| `K` | 3 | capture latch entries | paper |
| `S_TRC_TH` | 130 | short tRCs per window above which the count condition holds | own choice (paper gives no value) |
| `EVICT_TH` | 2 | evictions tolerated before the engine resets | own choice (paper gives no value) |
| `LVL_STEP` | 2 | attack windows per level step after level A | own choice |
| `RAA_W` | 12 | RAACNT width | own choice |

Synthesised with the default parameters, the design holds 24,960 memory bits
(16 banks x 2 halves x 260 x 3 bit) and about 1,900 flip-flops.

## How closely this follows the paper, and where it departs

The following come from the MARC paper:

* the label bins and the 3-bit labels;
* the 260-entry buffer;
* the three pipeline phases of one tREFi each;
* K = 3;
* the point, capture and eviction latches and their comparators;
* the last-slot rule;
* the (K-2)-entry eviction latch;
* the reset on too many evictions;
* the two attack conditions;
* the level table.

The worked example of the capture engine matches the paper's timing diagram
label for label.

The following are this design's own choices. The paper either does not
state them or states them ambiguously.

* **Loop matching rule.** The paper says only that the capture latch is
  watched for repetition. The "slot 0 first, then next-or-same slot" rule
  was chosen because it reproduces the paper's example waveform exactly.
  The example clears the eviction count on a match that advances; whether a
  repeat of the same slot clears it too is not shown. Clearing only on an
  advance was chosen because it brings the recognition rates closest to the
  paper's table below (clearing on every match flags about a quarter of
  50- and 90-value patterns).
* **Window verdicts.** The text says a duplicated signal is raised "if any
  of the compare flags are activated", and that an attack is seen if a
  signal is active "during the whole inspection phase". Here both verdicts
  must hold across the whole window. Under the looser reading, almost any
  stream of random short tRCs would be flagged.
* **Which pattern is captured.** The paper's overview says the capture
  phase selects "the most frequent pattern". Its step-by-step description,
  followed here, captures the first sequence met, and replaces it only after
  too many evictions. Traffic that switches from random short tRCs to an
  attack can therefore cost one extra window before detection, while the
  engine drops the stale capture.
* **Thresholds.** S_tRC_TH, EVICT_TH and the level step sizes have no
  printed values in the paper.
* **Ping-pong buffer.** The buffer has two halves, 2 x 260 entries in
  total. The paper quotes 260 entries and also describes the pipeline; the
  pipeline needs one half storing while the other is read.
* **Window boundary.** The REF command marks the window edge, and the
  design assumes an all-bank REF.
* **RFM enable.** The paper's text states the enable condition as tREFi <
  RFMTH, while its flow chart shows tREFi >= RFMTH. The flow chart is
  followed here, since only it enables RFM with the paper's own numbers.
* **RAADEC.** The text gives a single RAADEC of 4 x RAAIMT. Its table splits
  it into RAAIMT per REF and 4 x RAAIMT per RFM; the table is followed.

Measured recognition rate, with `tb_marc_efficacy` using 40 random
combinations per size and 3 judged windows each (ranges over two seeds; the
rate of a single combination depends strongly on which labels it draws):

| distinct tRC values in the repeated pattern | 1–3 | 5 | 7 | 10 | 15 | 20 | 50 | 90 | any, all > 100 ns |
|---|---|---|---|---|---|---|---|---|---|
| this RTL | 100% | 95% | 79–84% | 72–77% | 64–74% | 60–67% | 10–19% | 2–5% | 0% |
| paper    | 99.9% | 99.9% | 97% | 88% | 77% | 65% | 0% | 0% | 0% |

The trend is the same: short, simple patterns are always caught, long-tRC
patterns never are, and detection fades as the pattern grows. Patterns of 7
to 15 values are caught somewhat less often than in the paper, and a few
long random patterns (50, 90 values) are still flagged, where the paper
reports none. This follows from the loop-matching rule and thresholds
above, which are reconstructions. `EVICT_TH` and `S_TRC_TH` are the knobs
to tune it.

Not included:

* the memory controller and the DRAM;
* the DRFM path;
* the row hammer mitigation IPs (PARA, Graphene, in-DRAM schemes) that MARC
  is meant to strengthen.

The paper's max-exposure results depend on those parts, so this RTL does not
reproduce them.

## Timing rules for the user

* REF commands must be at least DEPTH + 4 cycles apart. An assertion in the
  buffer checks that a replay has finished before the next REF.
* At most one ACT per cycle enters `marc_top`.
* No ACT may go to a bank while its `rfm_urgent` is high (RAACNT at
  RAAMMT); an assertion in `marc_top` checks this.
* `rh_detect` and `arfm_level` change only at a REF edge. `rfm_req` and
  `rfm_urgent` follow RAACNT one cycle after the command.

## Simulating

Every module starts with a comment describing its function and timing. The
shared types are in `rtl/marc_pkg.sv`. Each block has a self-checking
testbench in `tb/` that ends with a `TB_RESULT checks=… failures=…` line.
For example, to simulate the whole design at its default size:

```
verilator --binary --timing --assert -Irtl rtl/marc_pkg.sv \
    rtl/trc_checker.sv rtl/short_trc_buffer.sv rtl/short_trc_counter.sv \
    rtl/capture_engine.sv rtl/inspection_control.sv rtl/marc_bank.sv \
    rtl/raa_counter.sv rtl/marc_top.sv tb/tb_marc_top.sv --top-module tb_marc_top
./obj_dir/Vtb_marc_top
```

| testbench | what it shows |
|---|---|
| `tb_trc_checker` | bin edges (69/70, 100/101 ns, …) and 300 random tRCs |
| `tb_short_trc_buffer` | replay equals what was written, overflow, replay length 261 cycles |
| `tb_short_trc_counter` | per-window count and threshold edge (130 vs 131) |
| `tb_capture_engine` | the worked example above, flag by flag; loop, broken and duplication windows |
| `tb_inspection_control` | attack decision and the A/B/C escalation |
| `tb_raa_counter` | RAACNT against a reference at all four levels |
| `tb_marc_bank` | one bank over 17 windows of loop, duplication, long, normal and random-short traffic |
| `tb_marc_top` | 16 banks for 13 windows with a controller model issuing RFMs, every mechanism counted |
| `tb_marc_efficacy` | the recognition-rate table above |

`tb_marc_top` runs in well under a second and `tb_marc_efficacy` in about
35 seconds.
