# Asynchronous vernier digital event timer

This design measures the time between two pulses, `start` and `stop`, to a
fraction of a gate delay. It has no fast clock. The start edge runs down ten
delay chains at once. The chains are 10, 9, ..., 1 stages long, and each stage
costs 17.1 ps. When stop arrives, every chain freezes where it is. A chain that
the start edge got all the way through before the freeze holds a 1 at its
output; the others hold 0. The number of 1s is the interval in units of one
stage delay. Because neighbouring chains differ by exactly one stage, the
resolution is one stage delay (17.1 ps). No clock runs faster than that.

The approach is a vernier made of parallel chains of different lengths, with
latches in the chains themselves. It was proposed for FPGA logic cells
(LCELLs), where one cell gives a buffer and a latch. The reported figures are
for a 65 nm FPGA: an inverter is 5.7 ps, a buffer is two inverters (11.4 ps),
and the wire between two cells placed side by side is about one more inverter
(5.7 ps). The RTL here follows that structure cell for cell. A slow clock
counter extends the range beyond the ten-stage span.

## Block structure

```
            +-------------------------- event_timer ---------------------------+
 start ---->| comp2 (detection)                         cal (calculation)      |
 stop  ---->|  10 x det_delay_chain  --tw[9:0]-->  selector -> LUT -> MUX ->  |--> result[5:0]
 rst   ---->|  freeze network        --andout--->  result latches             |--> andout, tw, sel
 clk   ---->| coarse_counter (clock cycles between start and stop)            |--> coarse, coarse_done
            +-----------------------------------------------------------------+

 det_delay_chain (STAGES = k):
   start -> [buffer] -> [latch] -> [buffer] -> [latch] -> ... -> [latch] -> tw[k-1]
                          en_n                  en_n                en_n      (one shared enable per chain)
 det_delay_buffer: inverter (5.7 ps) -> inverter (5.7 ps) -> wire (5.7 ps)
```

| Module | Kind | Role |
|---|---|---|
| `det_pkg` | package | shared constants: 10 chains, 4-bit selector, 6-bit result, table step 5, inverter and wire delays |
| `det_delay_buffer` | behavioural model | one LCELL buffer: two inverters and the wire to the next cell, 17.1 ps |
| `det_latch` | RTL | LCELL latch: active-low enable, asynchronous clear |
| `det_delay_chain` | RTL | `STAGES` buffer+latch stages with one shared enable |
| `comp2` | RTL | event delay detection: the ten chains and the freeze network |
| `cal` | RTL | event delay calculation: selector, look-up table, multiplexer, result latches |
| `coarse_counter` | RTL | clock-cycle counter between start and stop |
| `event_timer` | RTL, top | wires `comp2` into `cal` and adds the coarse counter |

The instance names `c` (comp2) and `cal2` (cal) inside `event_timer` match the
original netlist.

## The freeze network

This is the least obvious part of the design. Everything else is a delay line
or a table. Let `tw[k-1]` be the output of the chain with `k` stages. Every
latch in chain `k` shares one active-low enable `en_n[k-1]`:

```
any        = tw[0] | tw[1] | ... | tw[9]        wide OR of all chain outputs
andout     = any & stop                         2-input AND
en_n[k-1]  = andout | tw[k-1]                   one 2-input OR per chain
```

From these three equations:

* **Self-lock.** When the start edge leaves the last latch of chain `k`,
  `tw[k-1]` rises. Its own OR gate then closes every latch of that chain, so
  the chain keeps its 1 even after the start pulse has ended. The start pulse
  can be shorter than the interval being measured. The `comp2` testbench uses a
  40 ps start pulse for intervals up to 220 ps.
* **Global freeze.** When `stop` is high and at least one chain has completed,
  `andout` rises and closes every chain. The chains that were still running
  hold a partial pattern and output 0. The outputs then form a thermometer
  code: the `k` shortest chains are 1 and the rest are 0.
* **Stop before the first chain.** If stop comes less than one stage after
  start, `any` is still 0. `andout` then waits until the one-stage chain
  completes, 17.1 ps after start. The reading is one step. The timer cannot
  report less than one step.
* **Saturation.** If stop comes more than 10 stages after start, all ten
  chains have already locked themselves. `andout` rises with stop and the
  reading is 10 steps. The coarse counter covers longer intervals.
* **After stop.** When stop falls, `andout` falls and the unfinished chains
  open again. They may then complete. The thermometer code is therefore valid
  only while `andout` is high. `cal` latches its result while `andout` is
  high and holds it afterwards.
* **Timing of `andout`.** `andout` rises at the stop edge, or at 17.1 ps in the
  stop-before-first-chain case. It is the "measurement done" signal. Each
  chain's output is an intended feedback loop through a latch, and lint tools
  report it as a combinational loop.

`comp2` asserts that `tw` is a thermometer code whenever `andout` falls. If
a longer chain has finished while a shorter one has not, the stages are not
matched well enough for the chain lengths, and the assertion fires.

Reset clears every latch. Hold it for at least one stage delay, so that each
buffer, now fed by a cleared latch, has settled to 0 before reset is
released. Otherwise a 1 still inside a buffer walks into the chain after
reset. Reset only after the stop pulse has ended. Every measurement starts
with a reset.

## Delay model and what it means for silicon

`det_delay_buffer` is the only part that is not logic. It is a behavioural
model made of three delayed continuous assignments (inverter, inverter, wire),
5.7 ps each by default. In simulation it makes chain `k` complete exactly
`k x 17.1 ps` after start. In the testbenches this is checked to within
±0.3 ps for k = 1..10.

A synthesis tool drops these delays, and with them the whole measuring
principle. To build the design on real silicon:

* replace the buffer with a delay cell the tool is not allowed to optimise
  away (an LCELL-type primitive, or a kept buffer/inverter pair);
* place the cells by hand, so that every stage has the same cell and wire
  delay;
* characterise the real stage delay and set the table to match it.

The resolution is only as good as the matching between stages and between
chains. Mismatch, temperature and voltage all move it. None of that is
modelled here. The latches are modelled with zero delay.

## Reading the result

`cal` counts the 1s in `tw` to form a 4-bit selector (0..10). The selector
indexes a table with entries `k x LUT_STEP`. The 6-bit result is latched while
`andout` is high. With the default `LUT_STEP = 5` the table reads 0, 5, 10,
..., 50. These are the values of the original design's table. A count of 1s is
used instead of a priority encoder, so a single bubble in the thermometer code
costs at most one step.

**Units: read this before using `result`.** The step of 5 comes from the
original functional simulation, which used a 5 ps stage: a 10 ps interval
(start at 10 ps, stop at 20 ps) read as 10. The hardware stage is 17.1 ps. At
the default parameters, `result / 5` is therefore the number of 17.1 ps steps,
and the interval is about `(result / 5) x 17.1 ps`, rounded down. The result
is not in picoseconds. Both defaults are kept as published. To get picoseconds
directly:

* widen `RESULT_W`, and
* change the table so that it holds `k x 17.1` in the unit you want. For
  example, set `LUT_STEP = 171` with `RESULT_W = 11` to read in tenths of a
  picosecond.

`tb_event_timer_10ps` replays the 10 ps demonstration with the stage delay set
to 5 ps (1.7 ps inverters and a 1.6 ps wire) and reads 10. With stop at exactly
20 ps, the two-stage chain completes at the same instant as stop. The bench
also runs stop at 19.5 ps (reads 5) and at 20.5 ps (reads 10). A real circuit
would resolve that tie either way, or go metastable.

## Coarse counter

`coarse_counter` counts rising edges of `clk` that fall strictly between the
start edge and the stop edge. It stops at stop and holds its value until
reset. It saturates at 1023, which is about 1 µs at a 1 GHz clock. Start and
stop set two sticky flags asynchronously.

The counter and the vernier measure the same start-to-stop interval. The
vernier gives the fine reading up to 171 ps, and the counter gives whole clock
periods. This design does not combine the two into one number. If an edge
falls within a flip-flop setup window of a clock edge, the count for that edge
is undefined. The usual fix is a second vernier that measures from stop to
the next clock edge, and it is not included here.

The original description also mentions using the next clock edge as the
vernier's stop, to timestamp events. Here `stop` is an input pin instead. For
that use, connect `stop` to a gated copy of the clock.

## Parameters

| Parameter | Default | Where | Meaning |
|---|---|---|---|
| `NUM_CHAINS` | 10 | `comp2`, `cal`, top | number of chains; the longest has this many stages |
| `SEL_W` | 4 | `cal`, top | selector width; needs `2**SEL_W > NUM_CHAINS` |
| `RESULT_W` | 6 | `cal`, top | result width; needs `NUM_CHAINS * LUT_STEP < 2**RESULT_W` |
| `LUT_STEP` | 5 | `cal`, top | table entry per completed chain |
| `INV_DELAY` | 5.7 ps | buffer, chain, `comp2`, top | one inverter; a buffer is two |
| `WIRE_DELAY` | 5.7 ps | buffer, chain, `comp2`, top | interconnect to the next cell |
| `COUNT_W` | 10 | `coarse_counter`, top | coarse counter width |

`cal` checks the two width rules with immediate assertions at time zero.

## Simulating

Every file declares `timeunit 1ps; timeprecision 100fs;` so that 5.7 ps
delays are exact. Delays need Verilator's timing support:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/det_pkg.sv tb/tb_event_timer.sv --top-module tb_event_timer
./obj_dir/Vtb_event_timer
```

Each testbench ends with `TB_RESULT checks=N failures=M`. Each also has a
watchdog that fails the run if it hangs.

| Testbench | What it checks |
|---|---|
| `tb_det_delay_buffer` | output edge arrives 17.1 ps after each input edge (sampled ±0.2 ps) |
| `tb_det_latch` | 400 random steps against a reference latch |
| `tb_det_delay_chain` | tap `s` rises at `s x 17.1 ps`; freezing mid-chain keeps exactly the passed taps; reset clears |
| `tb_comp2` | 52 intervals: thermometer code, `andout` edge time, sub-step and saturated cases |
| `tb_cal` | all thermometer codes and 100 random codes against the literal table; latch hold; reset |
| `tb_coarse_counter` | counts against an independent edge monitor; hold after stop; saturation at 1023 |
| `tb_event_timer` | full design at default parameters: the 1..10-stage delay table, 46 measurements (in-range, sub-step, saturated, multi-ns with coarse counts), result held after stop, reset; each of these cases must occur at least once |
| `tb_event_timer_10ps` | the 10 ps demonstration at a 5 ps stage, plus the 5 ps grid up to 50 |

The tests in `tb_comp2` and `tb_event_timer` keep stop at least 2 ps away from
a stage boundary. Exact ties are left out on purpose.

Verilator runs two-state. Anything a testbench reads is reset or initialised
first. The asynchronous reset of the coarse counter needs a rising edge, so the
testbenches start with `rst` low and pulse it.

## Where this RTL goes beyond, or departs from, the original description

* **Taken from the original:**
  * the chain structure (buffer, latch, buffer, latch), ten chains of 10..1
    stages, and one shared active-low enable per chain;
  * the OR/AND/OR freeze network, and the port names `rst`, `start`, `stop`
    and `andout`;
  * the 17.1 ps stage (11.4 ps buffer + 5.7 ps wire);
  * the 4-bit selector, the 6-bit result and the table values 5..50;
  * the comp2 → cal wiring.
* **This design's choices:**
  * active-high reset, with priority over enable;
  * a count of 1s as the selector, and table entry 0 for selector 0;
  * the result latch is transparent while `andout` is high;
  * array ports `tw[9:0]` instead of ten named wires (the original names run
    twt20 for the 10-stage chain to twt110 for the 1-stage chain);
  * the extra observation outputs `tw`, `sel` and `taps`;
  * everything about the coarse counter except its purpose (width, arming,
    saturation, reset).
* **Known gaps:**
  * the unit mismatch between the 5-per-step table and the 17.1 ps stage
    (see *Reading the result*);
  * no combination of the coarse and fine readings;
  * no model of delay mismatch, latch delay or metastability;
  * the start and stop pulse sources are outside the design: `start` and
    `stop` are plain input ports.
