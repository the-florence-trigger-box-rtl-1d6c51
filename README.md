# FTB: a two-layer configurable trigger box in SystemVerilog

A nuclear-physics experiment with hundreds of detector channels has to decide,
within a few hundred nanoseconds, whether an event is worth reading out. Every
front-end channel raises a *trigger request* (TReq). The box here takes those
requests in two layers:

* **Concentrator Boards (CB)** each take up to 128 TReqs. They compress them into
  32 *concentrated* requests, using programmable OR sums and multiplicity
  conditions.
* One **Main Trigger Board (MTB)** takes up to 128 signals. These are CB outputs
  and direct inputs. It forms up to 8 *partial triggers* from arbitrary logic
  expressions, applies a veto and per-trigger downscaling, and then emits:
  * the **Main Trigger (MT)**;
  * a delayed **Validation (VAL)** pulse;
  * an 8-bit **trigger pattern** that records which partial triggers fired
    within a *resolving time*.

All behaviour is set by configuration registers, so the same hardware serves
different detector set-ups. In the RTL those registers are a packed struct on
a port. Both board types also carry an internal **logic analyser**, and the MTB
counts partial triggers at three points of its chain. The boards it was
designed for are 50 MHz FPGA boards. All logic here runs in one 50 MHz clock
domain (20 ns per clock).

```
 TReq[127:0] ──► CB 0 ──► ctreq[31:0]  ─┐
 TReq[127:0] ──► CB 1 ──► ctreq[63:32] ─┤    MTB inputs [127:0]
 TReq[127:0] ──► CB 2 ──► ctreq[95:64] ─┼──► MTB ──► MT, VAL, pattern[7:0],
               direct inputs [127:96] ──┘             serial pattern, busy, scalers
```

## Configuration fields and their coding

`ftb_pkg` defines the constants and the two configuration types, `cb_cfg_t` and
`mtb_cfg_t`.

Every programmable time of 1 to 64 clocks is a 6-bit field coded **N-1**:
* field value 0 means 1 clock;
* field value 63 means 64 clocks.

The same coding is used for:
* the 16-bit VAL width (1 to 65536 clocks);
* the logic-analyser lengths, where the pre-trigger runs 1 to 2048 samples and
  the total runs 1 to 4096 samples.

The downscale factor n is plain binary, 1 to 65535; 0 behaves as 1.

Some controls are one-clock strobes, standing for a register write:
* `veto_clr`;
* `cnt_clr`;
* `la.sw_trig`.

The board's register map and its bus interface (VME) are not part of this RTL.
Whoever instantiates `ftb_system` drives the structs and reads the counter and
logic-analyser ports.

## Concentrator Board

`concentrator_board` chains five blocks:

1. **Debouncer** (`debouncer`). Each input goes through two synchroniser flops
   and an edge register. Every rising edge then (re)starts an 8-clock (160 ns)
   output pulse. A new request on a channel that is already active lengthens
   the pulse, so the dead time is *paralyzable*.
2. **Logic Matrix** (`cb_logic_matrix`). There are 16 OR sums. Sum j is the OR
   of the debounced inputs selected by the 128-bit mask `lm_mask[j]`. The
   output is registered.
3. **Gate** (`cb_gate`). Each debounced rising edge starts a pulse of
   `gate_w+1` clocks. Edges that arrive during the pulse are ignored, so this
   dead time is *nonparalyzable*. The gate length is the coincidence window for
   the multiplicity.
4. **Multiplicity Matrix** (`multiplicity_matrix`). There are two masked sets.
   For each set, the number of gated inputs that are high is compared with
   n = 1 to 8, which gives 8 outputs "M ≥ n". Bit `s*8+n-1` is M ≥ n of set s.
5. **Merge & Shuffle** (`merge_shuffle`). The four 8-bit groups are:
   * A and B: the logic matrix, bits 7:0 and 15:8;
   * C and D: the multiplicity sets 0 and 1.

   Output group k is the source group `shuffle[k]`, where 0 = A … 3 = D.
   The output is registered.

Latency is counted from the clock edge that first samples a request:
* 5 clocks to the CB output through the logic matrix;
* 6 clocks through the multiplicity path.

## Main Trigger Board

`main_trigger_board` is a single chain from input to output. The three counter
banks tap it along the way.

### Gate & Delay Generator: catching short requests

Each input clocks its own flip-flop (`always_ff @(posedge din[i] or negedge
clr_n)`). Because of this, a request shorter than 20 ns is still caught.

The latch output goes through two synchroniser flops into a small state
machine for each channel:
* The delay phase lasts `gd_delay[i]+1` clocks, set per input. It lets
  detectors with different response times be aligned.
* The gate phase lasts `gd_width+1` clocks. The width is common to all inputs.

From the moment a request is accepted until the gate ends, the latch is held
cleared (`clr_n = rst_n & ~hold`). The dead time per channel is therefore
delay plus width, plus the clocks needed to synchronise the request and
re-open the latch. It is nonparalyzable.

With k the first clock edge after the input edge:
* the gate is high from edge k+3+delay to edge k+3+delay+width;
* the channel accepts a new edge after edge k+4+delay+width.

This stage is the one place where reset has to be a real event. The latches
are cleared asynchronously by a *falling edge* of `rst_n`. A simulation must
therefore start with `rst_n` high and drive it low. The testbenches do this
with `rst_n=0; rst_n=1; rst_n=0`, one time step apart.

### Logic Matrix and its feedback

Each of the 8 partial triggers is computed as

```
trig[j] = out_en[j] & (out_inv[j] ^ ( |((din ^ in_inv[j]) & in_en[j])
                                    | |((fb_q ^ fb_inv[j]) & fb_en[j]) ))
```

* Each operand has an enable bit and an invert bit, and so does the result.
* This gives ORs of literals directly. It gives ANDs through De Morgan: invert
  every operand and the output.
* The feedback operands `fb_q` are the trigger outputs of the *previous* clock.
  A trigger can therefore use other triggers, for example "GARFIELD AND RCo"
  built from the two sub-triggers.

On the board this matrix is purely combinational. Here the feedback passes
through one register, which avoids a combinational loop. A trigger built from
feedback therefore appears one clock after its operands.

### Busy Logic, inhibit and the resolving time

`busy` is the OR of two sources:
* the synchronised external veto, if `ext_veto_en` is set;
* an automatic veto, set when MT falls if `auto_veto_en` is set, and released
  by a `veto_clr` strobe. This strobe stands for the acquisition writing a
  register.

While busy, the partial triggers are blocked. The exception is while MT itself
is high: MT inhibits the veto. Triggers that arrive during the resolving time
are therefore not lost from the pattern.

### Downscaler

For each trigger, the block counts rising edges modulo n. A pulse passes whole
if the count was 0 at its rising edge, so the 1st, (n+1)th, … pulses pass.

### Trigger & Pattern Generator

`trigger_generator` forms the OR of the downscaled triggers selected by
`tg_mask`.

1. A rising edge of this OR starts MT on the next clock. MT lasts
   `res_time+1` clocks: this is the resolving time.
2. Throughout MT, the enabled triggers are ORed into an accumulator.
3. On the edge where MT falls, the accumulator becomes `pattern`, and
   `pattern_stb` pulses.
4. VAL rises `val_delay+1` clocks later and lasts `val_width+1` clocks.
5. A new MT can start only after VAL has ended. Starting on an edge rather than
   a level keeps a trigger that is still high from firing again.

Two assertions in the module check the output rules in every simulation:
* MT and VAL are never high together;
* `pattern_stb` comes only on the clock where MT ends.

The MTB's total latency, from an input edge to MT, is edge k+4+delay.

`pattern_serializer` sends each new pattern on `pattern_sout` as a frame:
* a start bit 1;
* the 8 pattern bits, MSB first;
* `BIT_CYC` clocks per bit.

### Scalers

`trigger_counters` is instantiated three times, giving three banks of 8×32-bit
counters:
* *raw*: the logic-matrix outputs;
* *post-busy*: after the busy logic;
* *post-reduction*: after the downscaler.

Each counter counts rising edges. `cnt_clr` clears all three banks. Comparing
raw with post-busy gives the dead-time fraction of the acquisition.

## Logic analyser

Each board has one `logic_analyzer`. A multiplexer, set by the 4-bit
`la.mux_sel`, picks a preset group of 32 internal signals. There are enough
presets for every intermediate signal of a board to be displayed.

| Board | Presets |
|---|---|
| CB  | 0–3: debouncer 31:0 … 127:96; 4–7: gate 31:0 … 127:96; 8: {MM, LM}; 9: CB output |
| MTB | 0–3: G&D 31:0 … 127:96; 4: {pattern, post-red., post-busy, LM}; 5: {…, serial, busy, VAL, MT, ext. veto, capturing} |

Unused selections record zeros.

The selected word is written on every clock into a 2048-word circular buffer.
The buffer is also read `pre_len+1` words behind its write pointer. Its read
port is therefore the sample stream delayed by `pre_len+1` clocks.

When the analyser is armed and a trigger condition (LAT) occurs, the
4096-word capture memory records this delayed stream for `tot_len+1` words.
The LAT is any of:
* the software strobe;
* MT, if `mt_en` is set;
* any displayed signal selected by `lat_mask`.

Word k of a capture then holds the sample taken `pre_len+1-k` clocks before
the LAT, so the capture has a programmable pre-trigger part, as on a digital
oscilloscope.

`done` rises when the capture is complete. Dropping `arm` clears it. Reads go
through `rd_addr`/`rd_data`, with one clock of latency.

Both memories are plain arrays, which synthesis maps to block RAM. The whole
three-CB system holds 786432 memory bits.

## System top

`ftb_system` is parameterised by `N_CB`, which defaults to 3 and can be at
most 4. CB c drives MTB inputs 32c to 32c+31. The remaining `128-32*N_CB` MTB
inputs are the `mtb_direct` port. With four CBs no input is left over, and
the port keeps a single bit that is not used. Logic-analyser port index `N_CB` belongs to
the MTB.

Limits of the model:
* All boards share `clk` and `rst_n`.
* Cable delays are not modelled.
* Signalling standards (LVDS, ECL, NIM) and connector routing are not modelled.

## Dead time and counting rate

Three stages decide how fast requests can arrive before some are lost.

* **Debouncer: paralyzable, 8 clocks.** A request within 8 clocks of the
  previous one only stretches the pulse.
* **CB gate: nonparalyzable, `gate_w+1` clocks.** Requests inside an open gate
  are ignored.
* **Gate & Delay channel: nonparalyzable.** Its dead time is
  `gd_delay+gd_width+4` clocks, measured from the first clock edge after the
  accepted request to the first edge after which the latch catches again.
  This includes the two synchroniser clocks and the clock that re-opens the
  latch. With the shortest delay and a 200 ns (10-clock) gate, the dead time
  is 13 clocks = 260 ns.

At the MTB logic matrix, overlapping gates from different inputs merge into
one output pulse. An OR trigger is therefore paralyzable, with the gate width
as its dead time.

`tb_dead_time` drives Poisson request trains into each stage. It runs at the
rates where the boards are specified to lose 1 % of requests, and then at ten
times those rates. It checks the output count against an exact event model
and against the textbook dead-time formulas.

| Stage | Rate | Lost, measured | Formula |
|---|---|---|---|
| Debouncer, 160 ns | 63 kHz | 1.00 % | 1.00 % |
| CB gate, 200 ns | 50 kHz | 1.04 % | 0.99 % |
| G&D channel, 200 ns gate | 50 kHz | 1.26 % | 1.28 % |
| OR of four G&D inputs | 50 kHz | 1.14 % | 1.07 % |

The G&D figure is higher than the 1 % the board description quotes for a
200 ns gate at "zero delay". The difference comes from the minimum delay of
1 clock and the 3 clocks of synchronisation and latch re-arming, which count
as dead time here. At 50 kHz this is 1.28 % instead of 1 %; 1 % is reached
at about 39 kHz.

## Where this RTL departs from the board description or fills gaps

* **Feedback register.** The MTB logic matrix is registered on its feedback
  path (see above).
* **Delays.** Delays are 1 to 64 clocks: the value table gives that range.
  The "zero delay" mentioned in the board's performance discussion cannot be
  set.
* **VAL timing.** The value table gives the trigger generator's Width/Delay as
  6-bit fields. The text asks for a VAL length of up to 2^16 clocks. Here the
  VAL *width* has 16 bits and the VAL *delay* after the resolving time has
  6 bits.
* **MT is registered.** MT appears one clock after an enabled trigger
  reaches the trigger generator, not in the same clock.
* **VAL start.** VAL starts `val_delay+1` clocks after the resolving time
  ends, not exactly at its end.
* **Board cabling.** Each CB drives a full 32-bit slice of MTB inputs. A setup
  that wires two CBs' 16 useful bits into one 32-bit connector reaches the
  same result here through the shuffle setting and the MTB masks.
* **G&D dead time.** A Gate & Delay channel is dead for 3 clocks more than
  its delay plus width (see the dead-time section).
* **Veto timing.** The automatic veto is set when MT ends. The external veto is
  synchronised with two flops.
* **Fixed latencies.** There are fixed synchroniser and edge-register
  latencies: 3 clocks at each board input. The output registers of the CB
  matrices are also this design's own.
* **Own choices for unspecified details:**
  * the serial frame format;
  * the analyser presets and their pre-trigger mechanism;
  * the shuffle selector encoding. It allows duplicating a group as well as
    permuting.
* **Not in the RTL:**
  * the bus interface;
  * the register map;
  * expansion-board detection;
  * I/O standard selection;
  * routing of MTB outputs to a chosen connector.

## Simulating

Each testbench is self-checking. It compares outputs with a model of its own,
has a watchdog, and ends with a line `TB_RESULT checks=N failures=M`. With
Verilator 5:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb \
    rtl/ftb_pkg.sv tb/tb_ftb_system.sv --top-module tb_ftb_system
./obj_dir/Vtb_ftb_system
```

Replace `tb_ftb_system` with any `tb_<module>` to test one block. Notes on the
testbenches:
* `tb_ftb_system` runs the full default system, three CBs and one MTB,
  configured like a real two-detector setup:
  * sub-triggers from each detector;
  * a coincidence built through the feedback path;
  * a multiplicity trigger;
  * a pulser with its own delay;
  * a downscaled beam monitor.

  It counts each mechanism and fails if any never happened: debouncing, gate
  dead time, multiplicity, shuffling, G&D delay, coincidence, late trigger in
  the pattern, automatic and external veto, downscaling, VAL, serial pattern,
  logic-analyser captures and scalers.
* `tb_ftb_system_4cb` builds the largest single-layer system: four CBs, 512
  front-end inputs, all 128 MTB inputs. It routes requests from every CB,
  including the first and last input of each, to the Main Trigger and checks
  the pattern and scalers.
* `tb_concentrator_board` and `tb_main_trigger_board` run one board at full
  size.
* `tb_logic_analyzer` uses the full 2048/4096 memories.
* `tb_dead_time` is the counting-rate workload described above. It runs in
  well under a minute.
* `tb/tb_check.svh` holds the shared `CHECK`, `TB_DONE` and `TB_WATCHDOG`
  macros.

The simulator is two-state. Every register that is read is reset. The
Gate & Delay latches need the falling reset edge described above.

To change a size, override the parameters. Examples:
* `N_CB` on `ftb_system`;
* `DEB_CYC` on `concentrator_board`, for example 2 for a 40 ns debouncer;
* the logic-analyser depths `LA_BUF_D`/`LA_CAP_D`.

The field widths in `ftb_pkg` follow from those constants.
