# A four-road junction controller with a Safe State

This is a small traffic-light controller for a four-way junction. It has two
inputs, a clock and a 3-bit state select `em`, and one 24-bit lamp output.
It is built on one idea. A change from normal operation to an emergency, or
back, never switches the junction straight from one set of greens to another.
In between, every road shows yellow for at least 15 seconds. This interval is
called the *Safe State*. It gives vehicles that are already in the junction
time to clear it before anyone else gets right of way.

The RTL follows the FPGA design published as "An FPGA-Based Semi-Automated
Traffic Control System Using Verilog HDL" (Mallik, Kundu, Rahman, KUET). That
publication gives the lamp words, the phase timings and the state codes used
in its timing diagrams. It does not give the internal logic. The structure
here is therefore this design's own, and so are the details listed under
[Departures and choices](#departures-and-choices).

## The lamps

Each road has six lamps: red, yellow, a straight-on green, a green right-turn
arrow, a green left-turn arrow, and a walk signal for the zebra crossing.
Four roads give 24 bits, written as six hex digits:

```
out_final[23:18]  road 1     each road: {R, Y, G_straight, G_right, G_left, M}
out_final[17:12]  road 2                  5  4      3         2       1    0
out_final[11:6]   road 3
out_final[5:0]    road 4
```

For example, `3218A6` is `001100 100001 100010 100110`. Road 1 has straight
and right-turn green. Road 2 is red with its walk signal on. Road 3 is red
with a left-turn arrow. Road 4 is red with both turn arrows. (Roads are
numbered around the junction in order, so road 4 is next to road 1.)

## Selecting a state

| `em` | state | lamps |
|---|---|---|
| 0 | traditional cycle | eight timed phases, below |
| 1 | emergency, road 1 | `3A0822`: road 1 all greens, roads 2 and 3 red, road 4 red with its left-turn arrow |
| 2 | emergency, road 2 | `88E820` (road 1 word rotated by one road) |
| 3 | emergency, road 3 | `8223A0` |
| 4 | emergency, road 4 | `82088E` |
| 5 | Safe State | `410410`: every road yellow |
| 6, 7 | spare | `410410` |

An emergency or the Safe State is held for as long as `em` selects it. An
operator sets `em` by hand; the controller is only *semi*-automated.

### The traditional cycle

Each road in turn gets 60 s of green. Then comes 15 s in which that road and
the next one show yellow. One cycle takes 300 s:

| phase | length | word | road with straight-on green |
|---|---|---|---|
| 0 | 60 s | `3218A6` | 1 |
| 1 | 15 s | `410820` | (roads 1, 2 yellow) |
| 2 | 60 s | `98C862` | 2 |
| 3 | 15 s | `810420` | (roads 2, 3 yellow) |
| 4 | 60 s | `8A6321` | 3 |
| 5 | 15 s | `820410` | (roads 3, 4 yellow) |
| 6 | 60 s | `86298C` | 4 |
| 7 | 15 s | `420810` | (roads 4, 1 yellow) |

Each green phase is the previous one rotated by one road. This symmetry is
also how the emergency words of roads 2 to 4 are derived from the road 1
word.

## Changes of selection and the Safe interval

This is the part of the design that needs the most care. The controller
keeps the code it is currently serving in a register (`mode`). On every
clock edge it compares that register with the live `em` input:

1. **Same cycle.** Once `em` differs from `mode`, the output is `410410`
   (all yellow). This happens in the same cycle, before any clock edge. The
   output logic reads `em` directly, which makes the controller a Mealy
   machine.
2. **Next edge.** `mode` takes the new code and the `clearing` flag is set.
   The interval timer restarts.
3. **Safe interval.** While `clearing` is set, the output stays `410410` for
   `SAFE_S` seconds (15 s by default).
4. **New state.** The new state's lamps appear. A return to the traditional
   cycle always starts at phase 0, road 1 green. It does not resume where
   it left off.

So in cycles, a change of `em` gives 1 + `SAFE_S`×`CLK_HZ` cycles of all
yellow before the new lamps. If `em` changes again during the Safe interval,
the interval starts over for the newest code. Choosing Safe State (`em = 5`)
goes through the same steps and then simply holds all yellow.

At power-up the controller is in the traditional cycle at phase 0, with no
Safe interval. With `em = 0` from power-up, the junction shows `3218A6`
immediately, as in the published traditional-state timing diagram. With any
other code at power-up, the code counts as a change, so the Safe interval
comes first. For example, `em = 1` gives 16 s of `410410` and then `3A0822`,
which matches the published Emergency-1 diagram.

## Structure

```
            +--------------------------- traffic_control ----------------------------+
 em[2:0] -->+--+--------------------------------+                                    |
            |  |   traffic_fsm                  |  state    light_encoder            |
            |  +-> mode / clearing / phase reg  +---------> (Mealy output logic)  ---+--> out_final[23:0]
            |      next-state logic             |   em ---> lamp tables, rotation    |
            |        | timer_restart  ^ expire  |                                    |
            |        v limit_s        |         |                                    |
            |      interval_timer (prescaler + seconds counter)                      |
 clock ---->+------------------------------------------------------------------------+
```

| file | role |
|---|---|
| `rtl/traffic_pkg.sv` | lamp bit positions, `sel_t` state codes, `ctrl_state_t`, the lamp tables, `rotate_roads()` |
| `rtl/interval_timer.sv` | divides the clock by `CLK_HZ` into seconds. It pulses `expire` on the last cycle of an interval of `limit_s` seconds, then reloads itself. |
| `rtl/traffic_fsm.sv` | the state register (`mode`, `clearing`, 3-bit `phase`) and the next-state logic, in one process. It also picks the interval length: 60, 15 or 15 s. |
| `rtl/light_encoder.sv` | combinational; turns the state plus the live `em` into the lamp word |
| `rtl/traffic_control.sv` | top level, with the ports `clock`, `em`, `out_final`. It also holds the lamp safety assertions. |

The phase is a plain 3-bit binary counter (sequential encoding) that wraps
from 7 to 0. All 8 codes of the counter are legal phases. Every code of
`mode` is a legal state, so the machine has no unreachable or stuck
encodings. After synthesis the whole design is about 15 flip-flops, plus the
192-bit lamp table.

### Parameters of `traffic_control`

| parameter | default | meaning |
|---|---|---|
| `CLK_HZ` | 1 | clock cycles per second; set this to the board oscillator frequency |
| `GREEN_S` | 60 | green phase of the traditional cycle, in seconds |
| `YELLOW_S` | 15 | yellow phase of the traditional cycle, in seconds |
| `SAFE_S` | 15 | Safe interval after a change of selection, in seconds |

The seconds counter is 7 bits wide, so each time can be at most 127 s unless
`SEC_W` in `traffic_control` is widened.

### Safety assertions

`traffic_control` checks five rules on every clock edge. Every lamp word in
the tables obeys them:

- At most one road has its straight-on green.
- No road is red and yellow at once.
- No road is red with straight-on green.
- A yellow road shows no green arrow.
- The walk signal is lit only on a red road.

If you edit the tables, run a simulation with assertions enabled: it will
catch a word that breaks these rules.

## Departures and choices

The following come from the publication: the lamp words, the 60/15/15 s
timings, codes 0, 1 and 5, the Safe interval between normal and emergency
operation, and the inputs limited to clock and state select. These are this
design's own choices:

- **Clock.** The publication gives no clock frequency. The default
  `CLK_HZ = 1` treats the clock as a 1 Hz beat, so the counter counts clock
  cycles as seconds. On a real board, set `CLK_HZ` to the oscillator
  frequency.
- **No reset.** The publication's controller has only the two inputs. The
  registers start from declaration initial values, which FPGA configuration
  loads. For an ASIC, or for an FPGA flow that ignores initial values, add a
  reset that loads the same values: traditional cycle, phase 0, timer zero.
  Lint tools flag the timer registers because they have both an initial value
  and a synchronous restart. That is intended; both values are zero.
- **Codes 2 to 4 and their lamp words.** The publication shows only the road
  1 emergency, and says two of the eight codes are left spare. Using 2, 3
  and 4 for the other roads' emergencies, with the rotated road 1 word, fits
  that description, but those words were not published.
- **Spare codes 6 and 7** show all yellow.
- **Power-up.** The published flow chart passes through the Safe State
  right after start. The published traditional-state timing diagram, however,
  shows `3218A6` from time zero. This design follows the timing diagram.
- **Restart at phase 0** after the Safe interval, and a restart of the Safe
  interval when `em` changes again during it. The publication does not
  describe either case.
- **Major and minor roads.** The publication mentions defining major and
  minor roads by hand, but does not say how. Here every road gets the same
  times, and those times are parameters, not inputs.
- The vehicle-counting sensors the publication proposes as future work are
  not included.

## Simulation

Each module has a self-checking testbench in `tb/`. Each one prints a
`TB_RESULT checks=N failures=M` line and stops itself if it runs too long.

| testbench | what it checks |
|---|---|
| `tb_interval_timer` | every cycle of `expire` against a cycle count, at 3 cycles/s: several limits, a restart in mid-interval, restart beating expiry, and limit 0 |
| `tb_traffic_fsm` | a scripted sequence with expected state, restart and limit written out by hand. The timer is replaced by a directly driven `expire`. |
| `tb_light_encoder` | all 1024 combinations of `em`, mode, clearing and phase. The expected words are built road by road in the testbench. |
| `tb_traffic_control` | the whole controller at 2 cycles/s with 6/3/4 s times, against a time-based reference model. It counts each behaviour: all eight phases, the cycle wrap, the same-cycle yellow, the Safe intervals, each emergency held, the Safe State held, the spare codes, and a change in mid-phase. It fails if any of them never occurs. |
| `tb_traffic_control_full` | three controllers at the default parameters, powered up with `em` = 0, 1 and 5: the three published scenarios. It checks 620 s cycle by cycle and measures every traditional phase length (60 s, 15 s). |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl rtl/traffic_pkg.sv \
    rtl/interval_timer.sv rtl/traffic_fsm.sv rtl/light_encoder.sv \
    rtl/traffic_control.sv tb/tb_traffic_control.sv \
    --top-module tb_traffic_control
./obj_dir/Vtb_traffic_control
```

For another testbench, change the last file and the top module. Each
testbench runs in well under a second.
