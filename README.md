# A programmable chemical engine for network dynamics

This design shapes network traffic with *chemical algorithms*. Packets are
modelled as molecules, and a small reaction network decides when each packet
may leave a queue. Each packet that arrives adds molecules of an input species.
Reactions consume and produce species at rates given by the Law of Mass Action.
Each molecule of an output species that appears lets one packet leave, or drops
one. Changing a rate constant or a starting concentration changes the behaviour
of the controller. A pacer, a rate limiter, an active queue manager and a
weighted fair queue all come from the same hardware, and you reprogram it at
runtime by writing registers.

The SystemVerilog here is a synthesizable version of that engine. It follows
the published architecture: a manager, one or more chemical engines (called
"AC modules"), and a single scheduling core per engine (called the "LoMA core").
Where the original gives only a block's name or function, this design fills it
in, and each such choice is pointed out below and in the header of every file.

## Reaction networks as tables

A chemical algorithm is a set of species `S` and a set of reactions. Reaction
`r` has a rate constant `k_r`, reactant coefficients `alpha_rs` and product
coefficients `beta_rs`. An engine stores one network in four tables:

| table     | contents                                      | default size                  |
|-----------|-----------------------------------------------|-------------------------------|
| c-mem     | concentration of every species, 16-bit        | 255 species + location 0      |
| alpha-mem | reactant records, each a species address      | 8 reactions x 8 slots x 8 records |
| beta-mem  | product records, same layout                  | 8 x 8 x 8                     |
| k-mem     | rate constant per reaction, IEEE-754 single   | 8                             |

Coefficients are not stored as numbers. A reactant of order *n* takes *n*
records that all hold the same species address. Address 0 means "empty record".
Location 0 of c-mem is reserved, always reads 1, and is never written. As a
result an empty record adds a factor of 1 to the propensity and changes no
species when a reaction fires. `2 S -> S + D` is therefore stored as alpha
records `{S, S}` in one slot and beta records `{S}` and `{D}` in two slots.

Concentrations saturate at 0 and at 65535. The biggest network that fits is
8 reactions of up to 8 reactants and 8 products each, with each of those up to
8th order, over 255 species. All of these are parameters (`N_REACT`, `N_PSI`,
`N_ORD`, `N_SPECIES`, `C_W`).

## How an engine runs a network (`ac_engine`)

Each reaction has a timer (`reaction_timers`) that holds the number of clock
cycles until it fires. All-ones means "never". Every timer counts down once per
cycle. The engine control loop handles one job at a time, in this order:

1. **Programming write.** A write to a table takes one cycle. Writing a
   concentration marks that species as changed. Writing a record or a
   coefficient marks that reaction for rescheduling.
2. **Event batch.** The engine adds a batch of molecules to a species, or
   takes one away if enough are present.
3. **Dependency scan** (`N_REACT` cycles). Every reaction with a reactant
   record that names a changed species is marked for rescheduling.
4. **Rescheduling.** The lowest-numbered marked reaction goes through the
   scheduling core (next section).
5. **Firing.** The engine picks a reaction whose timer has reached 0. The
   choice is round-robin, starting after the last reaction fired. Two
   reactions whose times both round down to 0 cycles therefore take turns,
   and the lower-numbered one cannot starve the other. The HLS update logic (`update_logic`) subtracts its reactants and
   adds its products (see "Firing" below). The engine then marks the changed
   species and sends the reaction for a fresh schedule.

Only reactions whose inputs changed are recomputed. This is the main saving
over recomputing every reaction after every event.

Computing a schedule takes time, and the timers keep counting while it runs.
After a reaction fires, its timer is parked at all-ones minus 1 and keeps
counting down. When the new value is ready, the cycles that have passed since
the firing are taken off it. For a rescaled reaction, the cycles since
`t_left` was sampled are taken off instead. The wait between firings is
therefore `1/a`, not `1/a` plus the scheduling latency. Without this step a
rate limiter set to one packet per 1000 cycles would run about 35 % slow.

## The scheduling core (`reaction_scheduler`)

This part takes the most thought, so here it is step by step. For reaction `r`
the core computes the propensity

    a_new = k_r * prod over records (c[record])

It does this with one floating-point multiplier that walks all
`N_PSI x N_ORD` records. `propensity_select` feeds it one concentration per
step, and an empty record contributes the 1 stored at location 0. The core
then computes `1/a_new` and `a_old/a_new` in two dividers that run in
parallel, and multiplies `a_old/a_new` by the remaining time `t_left` in a
second multiplier. A final multiplexer picks one of two results:

* **fresh** (the reaction has just fired, or was disabled): `t = 1/a_new`;
* **rescale** (a reactant changed while the reaction was waiting):
  `t = t_left * a_old / a_new`.

The rescale step is the Next Reaction Method. A waiting reaction whose
propensity doubles will fire in half the time it had left. The chosen result
is converted to an integer number of cycles. A zero propensity gives "never".
The core adds no random term, so an engine is a deterministic dynamical
system. A rate constant is given per clock cycle: at 80 MHz, a rate of 20 /s
is written as `k = 20 / 80e6`.

The core's latency is `2*(N_PSI*N_ORD + 1) + 32` cycles: 162 cycles at the
default size. The floating-point units (`fp_mul`, `fp_div`, `int_to_float`,
`float_to_int`) belong to this design. They truncate instead of rounding and
flush subnormals to zero. The divider is a 27-cycle restoring divider. The
original design used vendor floating-point cores here, and reports about 1600
cycles to reschedule with one core. This design does not try to match that
figure.

## Firing: the HLS update logic (`update_logic`, `c_mem`)

Each reactant/product slot has its own *hardware logic slice* (HLS). When a
reaction fires, a step-down counter runs over the order records of that
reaction, from the highest non-empty record down to 0. At each step, every HLS
decodes the species address in its record. c-mem then decrements the reactant
species and increments the product species, all slots in parallel and in the
same cycle. If several slots name the same species in one step, c-mem adds up
their changes. A reaction of order *n* therefore takes *n* cycles to apply.

## Events in and out (`io_mapper`)

Each event input channel has a map `{engine, species, ratio}`. A rising edge
on `ev_in[i]` adds `ratio` molecules to the mapped species. With one molecule
per kilobyte of traffic, a 1.5 KB packet can be mapped to a ratio of 1 or 2.
Inputs pass through a two-flop synchroniser. Each input has a pending counter,
so events that arrive while the engine is busy are kept, not lost.

Each output channel watches its species. When the species holds at least
`ratio` molecules, the channel removes them and raises `ev_out[j]` for
`OUT_PULSE` cycles. The host reads each pulse as "send one packet" or, on a
channel mapped to a drop species, "drop one packet". Channels are served in
round-robin order. The synchroniser, the pending counters, the pulse length
and the round-robin order are all this design's own choices.

## Programming and monitoring links (`prog_decoder`, `monitor`, `chem_manager`)

Both links run at 9600 baud, 8N1 (`BAUD_DIV = 8333` at 80 MHz). The frame
formats are this design's own choice. A programming frame is 8 bytes:

    0x57, {engine[3:0], table[3:0]}, index[15:8], index[7:0], data[31:24] .. data[7:0]

| table | meaning                                              | index                      |
|-------|------------------------------------------------------|----------------------------|
| 0     | concentration                                        | species                    |
| 1 / 2 | reactant / product record (data = species address)   | `(r*N_PSI + p)*N_ORD + o`  |
| 3     | rate constant (IEEE-754 single, per cycle)           | reaction                   |
| 8 / 9 | input / output channel map `{ac[27:24], species[23:16], ratio[15:0]}` | channel   |
| 10    | monitor slot `{enable[31], ac[11:8], species[7:0]}`  | slot                       |
| 11    | monitor period in cycles                             | -                          |

Tables 0 to 3 go to the engine named in the frame, and tables 8 to 11 to the
manager. Every `MONPER` cycles, the monitor sends one 4-byte report
`0xA5, slot, value[15:8], value[7:0]` for each enabled slot.

`chem_manager` is the top level. It holds `NUM_AC` engines (default 1), the
decoder, the event mapper and the monitor. Its ports are `clk`, `rst_n`,
`uart_rx`, `uart_tx`, `ev_in[N_IN]` and `ev_out[N_OUT]`.

## Example networks

* **Pacer** (`S -> P`): each packet leaves about `1/(k*S)` cycles after the
  one before it.
* **Rate limiter** (`S + E -> ES`, `ES -> E + P`): the throughput cannot rise
  above `k2 * e0`, where `e0 = E + ES` is the enzyme total. The total stays
  fixed under the reactions. You can retune it at runtime by writing `k2`
  or `E`.
* **AQM** (rate limiter plus `2 S -> S + D`, with `D` on a drop output): when
  the backlog `S` is large, the second-order reaction starts to drop packets.
* **Weighted fair queuing**: three rate-limiter sub-networks that share
  tokens, feeding an AQM stage. This takes at least 12 reactions, so it needs
  `N_REACT = 16`. The sub-networks share species, so they cannot be split
  over several engines.

When the engine itself is the bottleneck (large rate constants, a standing
backlog), a default-size engine running the pacer handles one packet every
198 cycles. At 80 MHz and one molecule per kilobyte that is about 3.2 Gbit/s.
The rate limiter, with 25,000 enzyme molecules, needs 702 cycles per packet,
about 0.9 Gbit/s. The original reports about 1.6 Gbit/s and 800 Mbit/s for
these two cases.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Build and run a testbench
with plain Verilator:

    verilator --binary --timing --assert -y rtl rtl/chem_pkg.sv tb/tb_ac_engine.sv \
              --top-module tb_ac_engine -Mdir obj && obj/Vtb_ac_engine

* `tb_reaction_scheduler` compares the propensity and the next time with a
  real-number model, and checks that the latency matches `2*(N_PSI*N_ORD + 1) + 32` cycles.
* `tb_ac_engine` runs the pacer, the rate limiter and the AQM on one engine. It
  checks the stoichiometry of every firing, the pacer intervals, and that the
  enzyme total is conserved.
* `tb_chem_manager` is the end-to-end test at reduced size: two engines and a
  16-cycle UART bit. Everything is programmed over the UART. It runs the
  pacer, reprograms to the rate limiter and checks the rate cap under
  overload, retunes `k2` and `e0`, runs the AQM on the second engine, and
  decodes monitor reports. It counts each mechanism: frames, reprogramming,
  retuning, input and output events, drops, the firing of every reaction,
  dependent rescheduling, monitor reports, rate cap reached and second engine.
  A mechanism that never happens counts as a failure.
* `tb_workloads` loads the pacer and the rate limiter into a default-size
  engine with `e0 = 25,000`. It measures cycles per packet when the engine is
  the bottleneck, and checks those against 400 and 800 cycles. It then sets
  the cap `k2*e0` to one packet per 1000 cycles and checks that the measured
  rate is within the cap (it measures 1003 cycles).
* `tb_chem_full` runs the top at its default size: one engine, 8 x 8 x 8
  records, 255 species, a real 9600-baud link at 80 MHz. It programs the pacer
  frame by frame (7 frames, about 4.7 M cycles) and checks the single-packet
  delay against `1/k`. It then passes 30 packets through and waits for a
  monitor report. It runs in about 20 s.

## Where this design departs from the original

* The scheduling core is deterministic (`t = 1/a`). No random numbers are
  drawn.
* The floating-point units are this design's own. They truncate, so their
  results can differ from IEEE round-to-nearest in the last bit. One
  reschedule takes 162 cycles at the default size. The original reports about
  1600 cycles for rescheduling with a single core.
* These are all this design's own choices: the priority order inside an
  engine, the frame formats, the monitor report format, the event-channel
  maps, the pulse outputs, and the handling of saturation at 0 and 65535.
* The order-*n* chain of multiplexers is built as one wide multiplexer. The
  result is the same, but the logic is laid out differently.
* With more than one engine, the engines can only affect each other through
  external events. A network cannot be split across engines.
* Event inputs are sampled on the clock. A pulse has to last at least one
  clock period (12.5 ns at 80 MHz) to be seen for certain. The original
  reports that it caught events only about 5 ns long.
* Only the chemical engine is described here. The host that queues packets
  and turns the `ev_out` pulses into sends and drops is not part of this RTL.
  The testbenches model it.
