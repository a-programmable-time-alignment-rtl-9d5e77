# Programmable per-channel BC clock phase alignment for a 104-channel pad trigger

A detector pad signal has to be tagged with the 25 ns bunch crossing (BC) in
which it occurred. When 104 pads are routed to one chip over traces of
different length, the signals of one particle arrive spread over up to about
20 ns, so a shared sampling clock puts some of them into the next BC. The
usual fix is to delay each late signal. This design does the opposite: every
channel gets its **own copy of the 40 MHz BC clock**, shifted in phase so that
its BC window lines up with the arrival time of its signals. The phase is
programmable in eight steps of 3.125 ns, covering 21.875 ns.

The shifted clocks come from a 160 MHz global clock and a few flip-flops per
channel. There is no delay line, so a step is exactly one half period of the
160 MHz clock, and it does not change with process, voltage or temperature. The
whole scheme is ordinary synchronous logic and can be triplicated for
radiation tolerance like the rest of the chip.

This RTL contains the phase shifters, their load/refresh synchronizer, the
per-channel hit capture in the shifted clocks and the per-BC output frame.
Three parts of the chip are not in it: the 4.8 Gbps serializer, the
configuration bus and the clock generation. Their signals are ports of the top
module.

## 1. Regenerating a BC clock from a 160 MHz ring

One BC (25 ns) is four periods of the 160 MHz clock CLK160. We call these
periods slots 0-3; slot 0 starts at the rising edge of the 40 MHz reference.
A **4-step cell** is a ring of four flip-flops on CLK160. Each flip-flop sits
behind a 2:1 multiplexer:

```
          SEL              SEL              SEL              SEL
 d[3] ─┐  │      d[2] ─┐   │     d[1] ─┐   │     d[0] ─┐   │
      [mux]─►FF3 ─────[mux]─►FF2 ─────[mux]─►FF1 ─────[mux]─►FF0 ──┬──► CLK40
   ┌──►                                                            │
   └───────────────────────────────────────────────────────────────┘
```

While SEL is high, every flip-flop loads its control bit. While SEL is low, the
ring rotates. The output is FF0, so after a load the clock shows d[0], d[1],
d[2], d[3] in four consecutive slots and then repeats every 25 ns. The bit
pattern therefore fixes both the phase (in 6.25 ns steps) and the duty cycle:

| d[3:0] | slots high | rising edge after the load edge | duty |
|--------|------------|---------------------------------|------|
| 0011   | 0, 1       | 0 ns                            | 1:1  |
| 0110   | 1, 2       | 6.25 ns                         | 1:1  |
| 1100   | 2, 3       | 12.5 ns                         | 1:1  |
| 1001   | 3, 0       | 18.75 ns                        | 1:1  |
| 1101   | 0, 2, 3    | 12.5 ns                         | 3:1  |

The downstream logic needs a 1:1 clock, so only the first four rows are used.

## 2. Eight steps from two clock edges

A second cell is clocked by the inverted CLK160 and holds the same pattern.
Its output is therefore the first cell's output delayed by half a CLK160
period, 3.125 ns. A fifth control bit d[4] picks the output: 1 selects the
rising-edge cell and 0 the falling-edge cell. A delay of m × 3.125 ns is
encoded as:

| step m | delay (ns) | d[4:0]  |
|--------|-----------:|---------|
| 0      | 0          | 1_0011  |
| 1      | 3.125      | 0_0011  |
| 2      | 6.25       | 1_0110  |
| 3      | 9.375      | 0_0110  |
| 4      | 12.5       | 1_1100  |
| 5      | 15.625     | 0_1100  |
| 6      | 18.75      | 1_1001  |
| 7      | 21.875     | 0_1001  |

`pad_tds_pkg::step_to_ctrl(m)` computes this word: the pattern has ones in
slots k and k+1 (mod 4) with k = m/2, and d[4] = not m[0].

The module is `phase_shifter8_tmr`. It has two triplicated 4-step cells and one
output multiplexer per replica, which makes 24 flip-flops per channel and 2496
for 104 channels.

## 3. Loading at a fixed phase, and the BCR refresh

The phase that a pattern produces is measured from the edge at which it was
loaded. Every load must therefore happen at the same point relative to the
reference clock, or two channels with equal settings would end up with
different phases. `phase_load_sync` handles this:

* ref40, bcr and cfg_load are sampled on the **falling** edge of CLK160. That
  edge is half a period away from the CLK160 rising edges that coincide with
  the reference edges, so the sampling is clean.
* A 2-bit slot counter is realigned to every reference rising edge it sees.
  `aligned` goes high after the first one.
* A load is requested once after reset, on `cfg_load`, and on every bunch
  crossing reset (BCR). The request is held until the next slot 3. `sel_rise`
  is then high during slot 3, so the rising-edge cells load exactly at the
  reference edge. `sel_fall` is high during the following slot 0, so the
  falling-edge cells load at the CLK160 falling edge 3.125 ns later. The
  falling-edge cell therefore lags the rising-edge cell rather than leading
  it.
* Latency: a request in BC n gives `sel_rise` in slot 3 of BC n+1. The new
  phase holds from the start of BC n+2.

The BCR (every 3580 BCs) reloads the control bits even when nothing has
changed. This reload writes back exactly the pattern the ring already holds at
that moment, so a healthy channel clock shows no glitch. A ring whose contents
were upset is repaired. The end-to-end testbench checks every edge of every
channel clock across all BCR refreshes.

## 4. Triple redundancy

Every 4-step cell is built three times (`phase_shift_cell4_tmr`). Each replica
has its own clock input, SEL, control bits and output. In every stage, the
three replicas' multiplexer outputs go into three 2-of-3 voters
(`tmr_voter`), and each replica's flip-flop takes its own voter's output.
This has three effects:

* One upset flip-flop, in any stage of any replica, is outvoted and is
  overwritten with the correct value at the next CLK160 edge. The output of
  a replica whose *output* flip-flop was hit is wrong for at most one CLK160
  period. The other two replicas' outputs are not affected.
* A SEL or control-bit upset in one replica is outvoted at the load.
* If two replicas are upset in the same stage, the wrong value wins the vote
  and circulates. It stays until the next load, which at the latest is the
  next BCR.

The hit capture is also triplicated and voted, one replica per channel-clock
replica. The synchronizer is instantiated three times, and replica r of every
phase shifter takes its load strobes from synchronizer r. The BC timing that
the three synchronizers give the frame builder is voted. The three clock trees
of a real chip are modelled by driving all replicas from the one `clk160`
input. The control words come from one input and are fanned out to the three
replicas. The frame builder is not triplicated.

## 5. Hit capture in the shifted windows, and the frame

`pad_channel` assigns a time-over-threshold (TOT) pulse to the BC whose window
holds its **leading edge**. The windows are those of the channel's own clock.
A toggle flip-flop is clocked by the TOT pulse itself. The channel clock
samples the toggle at each of its rising edges, and `hit` is the XOR of the
last two samples. A leading edge in window [t_n, t_n+1) therefore gives
`hit = 1` from t_n+1 until t_n+2.

Suppose channel c has step m and the reference edge of BC n is T_n. The
channel's window for BC n is then [T_n + m·3.125 ns, T_n+1 + m·3.125 ns). A
pulse that arrives m·3.125 ns late still counts in its own BC. A pulse that
arrives less than m·3.125 ns after T_n counts in the BC before.

Every hit bit of window n becomes valid by T_n+1 + 21.875 ns and stays valid
until T_n+2. `pad_frame_builder` samples all 104 bits at T_n+2, on the CLK160
edge that ends slot 3. It labels them with the BCID of BC n and registers the
frame:

```
frame[119:116] header 4'b1010
frame[115:104] BCID (12 bits): 0 in the BC after a BCR, +1 per BC
frame[103:0]   hit bit of each channel
```

`frame_valid` is high for one CLK160 period after each update. At 4.8 Gbps,
120 bits fill exactly one 25 ns BC. The latency from the end of a channel
window to its frame is (8 − m) × 3.125 ns, so at most one BC; the frame of BC n
appears two reference edges after the start of BC n for every step.

Note the timing at T_n+2: the clock edge of a step-0 channel coincides with
the sampling edge. The sampling is correct because a channel clock is the
output of a flip-flop, so its hit bit can change only a clock-to-output delay
after the edge. This is a hold-time path that static timing analysis of a
real implementation has to cover.

## 6. Top level: `pad_tds_align`

| port | dir | width | meaning |
|------|-----|-------|---------|
| clk160 | in | 1 | 160 MHz global clock |
| rst | in | 1 | synchronous reset, active high |
| ref40 | in | 1 | 40 MHz BC reference. Its rising edge must coincide with a clk160 rising edge. |
| bcr | in | 1 | bunch crossing reset, one BC wide, synchronous to ref40 |
| cfg_load | in | 1 | load the control words now, one BC wide |
| phase_cfg | in | 104 × 5 | control word d[4:0] of each channel |
| tot | in | 104 | TOT pulses, asynchronous |
| frame | out | 120 | per-BC frame for the serializer |
| frame_valid | out | 1 | frame update strobe |
| bcid | out | 12 | BCID of the current BC |
| aligned | out | 1 | the synchronizer has found the reference phase |
| ch_clk40 | out | 104 | replica-0 channel clocks, for observation |

Parameter `NCH` (default 104) sets the number of channels. The frame is then
16 + NCH bits wide.

Files (`rtl/`): `pad_tds_pkg.sv` (constants, `phase_ctrl_t`,
`step_to_ctrl`), `tmr_voter.sv`, `phase_shift_cell4_tmr.sv`,
`phase_shifter8_tmr.sv`, `phase_load_sync.sv`, `pad_channel.sv`,
`pad_frame_builder.sv`, `pad_tds_align.sv`.

## 7. What follows the published scheme and what is this implementation's own

From the published design:
* the 4-flip-flop ring with per-stage SEL multiplexers, the output order
  d[0] first, and the 0110 / 1101 examples;
* two cells on the two CLK160 edges, with selection by d[4] (1 = rising edge);
* a voter in every stage of the three replicas, 24 flip-flops per channel and
  104 channels;
* loading at a fixed phase relative to the reference edge, at configuration
  and at every BCR (3580 BCs);
* 104 hit bits per BC in 120 bits at 4.8 Gbps, and a 12-bit BCID.

Own choices, where the published description gives the function but not the
circuit:
* the synchronizer circuit: falling-edge sampling, slot counter, pending flag,
  and a separate `sel_fall` one CLK160 period after `sel_rise`;
* the toggle-and-sample hit capture, with no metastability synchronizer. A
  real chip needs one, which adds a fixed BC of latency;
* sampling all hit bits at the reference edge two BCs after the window opened;
* the frame layout, the header value, and BCID = 0 after BCR;
* three synchronizers with voted BC timing, but untriplicated control words
  (fanned out to the three replicas) and a single frame builder;
* no reset on the ring flip-flops or on the hit capture. Channel clocks are
  undefined until the first load after reset, which comes within two BCs of
  `aligned`. Hit bits are meaningful from the second channel-clock edge.

## 8. Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`.

* `tmr_voter_tb`: applies all input combinations.
* `phase_shift_cell4_tmr_tb`: applies all 16 patterns and checks the output
  sequence, the 0110 and 1101 examples, single flip-flop and SEL upsets
  (invisible), and a double upset (visible until reload).
* `phase_shifter8_tmr_tb`: measures the rising and falling edge times of all
  eight steps and all replicas against t_load + m·3.125 ns. It also checks
  that a refresh with the same word and an upset leave the edges unchanged.
* `phase_load_sync_tb`: checks slot tracking against an independent model,
  strobe slots, the one-BC latency of BCR and cfg_load, the load after reset,
  and realignment when the reference phase moves.
* `pad_channel_tb`: applies random TOT pulses and checks the window
  assignment in a channel clock at step 7, with random upsets in one replica.
* `pad_frame_builder_tb`: checks frame contents and labels, BCID over BCR and
  over the 12-bit wrap.
* `pad_tds_align_tb`: runs the full design at its default size, 104 channels
  with a 3580-BC BCR period. It repeats the delay scan used to evaluate the
  silicon. One pulse per machine cycle goes into BCID 516 and walks through
  the eight 3.125 ns slots. In round R, channel c is set to step (c+R) mod 8,
  and after each round every channel must report 8−m pulses in BCID 516 and
  m in BCID 515. For example, step 1 gives 7:1. Next, 104 channels with
  random 0-20 ns trace delays are shown split over two BCIDs without
  compensation and in one BCID with it. Every channel clock edge and every
  frame label is checked throughout. The testbench also injects upsets and
  counts that each mechanism happened. It takes about a minute.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  --top-module pad_tds_align_tb -y rtl -y tb rtl/pad_tds_pkg.sv tb/pad_tds_align_tb.sv
./obj_dir/Vpad_tds_align_tb
```

The testbenches use a 1 ps time unit and inject upsets by writing internal
flip-flops through hierarchical names, such as `g_rep[1].q`.

## 9. Limits

* These are functional models with ideal clocks. The simulations do not
  cover clock-tree skew between the 104 regenerated clocks, glitches of the
  combinational clock multiplexer when d[4] changes, or the metastability of
  the asynchronous TOT input.
* Changing a channel's step is not glitch-free: the clock takes its new phase
  at the load, and the BC in which that happens may be shorter or longer.
  Only reloading unchanged bits is glitch-free.
* The serializer, the configuration registers and bus, the clock generation
  and the analog front end are outside this RTL.
