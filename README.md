# Segmented ladder bus with a scenario-driven control plane

Spiking neural network hardware is built from many tiles that exchange spikes.
That traffic is sparse and bursty, and much of it is known at compile time. A
*segmented ladder bus* exploits this. It is a bufferless, circuit-switched
interconnect: at any moment its switches join lane segments into
point-to-point paths between tiles, and a word crosses a path in the same
cycle it is sent. The bus has no routing logic. All the routing work is done
at compile time. The compiler groups the application's connections into
*scenarios*, which are sets of paths that share no switch. The control plane
then only has to replay those scenarios, in the right order and for the right
time. This RTL implements that scheme after Huynh, Catthoor and Das,
"Scenario-Aware Control of Segmented Ladder Bus: Design and FPGA
Implementation". It has two parts:

* the data plane: two rows of tiles, a set of parallel segmented lanes between
  them, and three-way switches tying everything together;
* the control plane: distributed local controllers. Each one is a loop counter
  that addresses a small scenario memory. Each controller drives the switches
  of its own region, and all of them step in lockstep.

The paper describes the controller as a block diagram and the bus as a
figure. Most bit-level choices below (switch encoding, memory word, loop
semantics, load port) are this implementation's own. They are listed in
[Where this departs from, or adds to, the paper](#where-this-departs-from-or-adds-to-the-paper).

## The ladder

With `TILES` tiles there are `COLS = TILES/2` tile columns and
`NPOS = 2*COLS` switch positions on each of the `LANES` lanes. Here is the
8-tile, 3-lane example (`x` is the switch position, `|` a vertical link):

```
           T0      T1      T2      T3
            |       |       |       |
lane 0  o---o---o---o---o---o---o---o        x = 0 .. 7
        |       |       |       |
lane 1  o---o---o---o---o---o---o---o
            |       |       |       |
lane 2  o---o---o---o---o---o---o---o
        |       |       |       |
        T4      T5      T6      T7
```

Every `o` is a three-way switch. It has a left port and a right port on its
lane, plus one vertical port, which goes up or down:

* On lane `k`, the vertical port at position `x` goes **up** when `x` has the
  parity of `k+1`, and **down** when `x` has the parity of `k`.
* An upward port on lane 0 goes to top tile `c = x/2` (T0..T{COLS-1}).
* A downward port on the last lane goes to bottom tile `COLS + x/2`.
* Every other vertical port is a *rung*. It joins position `x` of lane `k` to
  position `x` of the neighbouring lane.

This gives the criss-cross pattern: rungs between lanes 0 and 1 sit at even
positions, rungs between lanes 1 and 2 at odd ones, and so on. Top tiles are
always at odd positions of lane 0. Bottom tiles are at positions of parity
`(LANES-1) mod 2` on the last lane. Lane ends are open. The rules live in
`ladder_pkg`, and `ladder_data_plane` builds the fabric from them for any even
`TILES` and any `LANES >= 1`.

### The switch and what a path is

A switch is in one of four states (`ladder_pkg::sw_state_e`):

| state     | code | joins                        |
|-----------|------|------------------------------|
| `SW_OPEN` | 0    | nothing                      |
| `SW_LR`   | 1    | left segment and right segment |
| `SW_LV`   | 2    | left segment and vertical port |
| `SW_RV`   | 3    | right segment and vertical port |

A joined pair passes data **both ways**. Each lane segment is two links, one
per direction, and every output that is not joined drives zero. A link is
`DATA_W` data bits with a valid bit above them.

A *path* between tiles `a` and `b` is a chain of switches. Its first switch
is `a`'s switch, joining `a` (vertical) to the side the path leaves by. Each
middle switch joins the port the path enters by to the port it leaves by.
Its last switch joins the entry side to `b`. While the path is set up, `a`
receives whatever `b` sends and `b` receives whatever `a` sends, within the
same cycle. A tile on no path receives all zeros.

A switch joins only one pair, so **two paths intersect exactly when they
would use the same switch**. Scenario grouping must prevent this. It also
follows that a tile takes part in at most one path per scenario, which is the
paper's remark that connections sharing a source or destination fall into
different scenarios.

### Combinational cycles, and the one rule a scenario must obey

The fabric has structural combinational cycles. For example: along lane 0,
down a rung, back along lane 1, up the next rung. Synthesis and lint tools
report them, and Verilator reports them as `UNOPTFLAT`. They are the bus
itself and are left in. A set of simple paths never closes one of these
cycles. A switch setting that joins a ring of switches does close one, and is
not a valid scenario. In hardware it would be a combinational loop; a
two-state simulator may fail to settle on it. Scenarios produced by path
routing, like the test benches' router, are always valid.

## The control plane

### Regions and lockstep

`ladder_bus_top` cuts the switch positions into regions of `REGION_POS`
consecutive positions across all lanes. With the defaults (30 tiles, 4
positions per region) that makes 8 controllers, and the last one covers 2
positions. Each region has one `local_controller` with its own memory and its
own loop counter. All controllers receive the same `start`, `halt`,
`num_iter` and `evt`. When the loader gives every controller the same
hold/wait/last fields for each scenario index, they walk through the
scenarios in lockstep. The bus-wide scenario is then the union of the
regional pieces. `sync_err` rises in any cycle in which the controllers
disagree on running, done or address. It can only happen if the loader broke
the lockstep rule.

### Scenario words and the loop nest

A controller's memory (`scenario_memory`, `DEPTH` words) holds one word per
scenario:

```
{ last, wait_evt, hold[HOLD_W-1:0], cfg[CFG_W-1:0] }
```

`cfg` holds one 2-bit switch state per switch of the region. The switch on
lane `k` at offset `j` of a region `rw` positions wide is at bits
`2*(k*rw + j) +: 2`.

The loop counter (`loop_counter`) runs a three-level loop nest:

1. **Hold.** The current scenario stays for `hold` cycles (0 counts as 1).
2. **Event.** If `wait_evt` is set, the scenario then stays until a cycle in
   which `evt` is high. This is the irregular, event-triggered case. `evt` is
   ignored in all other cycles.
3. **List and iterations.** The address steps 0, 1, 2, … up to the first word
   with `last` set (or `DEPTH-1`), then returns to 0. One pass is an
   iteration. After `num_iter` iterations the counter stops. `num_iter = 0`
   runs forever, until `halt`.

### Timing

`start` is raised before edge E0, which samples it. En is the edge at which
the last scenario of the last iteration ends. Between consecutive edges:

| interval       | `busy` | `done` | `cur_scen`              | switches            |
|----------------|--------|--------|-------------------------|---------------------|
| before E0      | 0      | 0      | 0                       | all open            |
| E0 to E1       | 1      | 0      | 0                       | all open            |
| E1 onwards     | 1      | 0      | steps through the list  | the scenario `cur_scen` had one cycle earlier |
| En to En+1     | 0      | 1      | 0                       | last scenario       |
| after En+1     | 0      | 0      | 0                       | all open            |

* Scenario 0 reaches the switches at E1, the edge after the one that samples
  `start`.
* Every scenario then stays on the switches for exactly its hold time plus
  any event wait.
* `halt` stops all controllers at the next edge. `done` does not pulse, and
  the switches open one edge later.
* Tile traffic crosses the fabric within a cycle.

### Loading

Scenario loading is done by the central software framework, which is not
part of this design. `ld_we` writes `ld_data` to word `ld_addr` of
controller `ld_ctrl`. `ld_data` has one layout for every controller:

| bits                               | field |
|------------------------------------|-------|
| `[CFG_MAX_W-1:0]`                  | region switch states (`CFG_MAX_W = 2*LANES*REGION_POS`); a narrower last region uses the low bits |
| `[CFG_MAX_W +: HOLD_W]`            | hold |
| `[CFG_MAX_W+HOLD_W]`               | wait_evt |
| `[CFG_MAX_W+HOLD_W+1]`             | last |

With the defaults that is 40 + 16 + 2 = 58 bits. The memory has no reset, so
load every word the loop will reach before starting. Words may be reloaded
while the bus is idle, which is how a program with more scenarios than
`DEPTH` is run in parts.

## Producing scenarios

The paper gives two compile-time grouping algorithms, both run in software:

* **greedy:** put each path in the first scenario it does not intersect;
* **max-clique:** seed scenarios from the largest cliques of the path
  conflict graph.

The test benches contain a working version of each.

* `ladder_router` in `tb/ladder_tb_pkg.sv` finds a path by breadth-first
  search over the switches a scenario does not use yet. `claim` adds a
  ready-made path to a scenario if the path shares no switch with it.
* `tb/ladder_top_tb_body.svh` holds the groupings: `group_paths` (greedy
  with re-routing), `group_fixed_greedy` and `group_fixed_clique` (on fixed
  paths).
* `load_program` in the same file packs the scenarios into load words. Use
  it as the reference for building load words.

## Sizes and the applications of the paper

The defaults are the largest configuration the paper puts on its FPGA, the
`emnist` row: 30 tiles, 5 lanes of 32 bits, 26 scenarios per controller. The
paper sizes lanes as the square root of the tile count. All five FPGA
applications fit the default build by tile count and by the scenario counts
the paper reports:

| application   | clusters | lanes (paper) | scenarios (paper) | fits 30 tiles / 26 words |
|---------------|----------|---------------|-------------------|--------------------------|
| mnist         | 11 | 3 | 8  | yes |
| LeNet         | 14 | 4 | 13 | yes |
| fashion-mnist | 24 | 5 | 24 | yes |
| cifar10       | 26 | 5 | 23 | yes |
| emnist        | 30 | 5 | 26 | yes, exactly |

The synthetic 40- and 60-cluster networks and ResNet (96 clusters) need a
larger bus: set `TILES`, `LANES` and `DEPTH` accordingly. The paper evaluates
those only in software.

The workload benches run traffic of every size in the paper's application
table through the whole bus:

| bench | bus size | workloads |
|-------|----------|-----------|
| `tb_workloads` | 30 tiles, 5 lanes (default) | mnist, LeNet, fashion-mnist, cifar10, emnist |
| `tb_workloads_synth40` | 40 tiles, 6 lanes | synth_40 with 160 and with 292 connections |
| `tb_workloads_synth60` | 60 tiles, 8 lanes | synth_60 with 348 and with 772 connections |
| `tb_workloads_resnet` | 96 tiles, 10 lanes | ResNet, 1068 connections |

The larger buses follow the paper's rule of about `sqrt(TILES)` lanes.

The applications' connection lists are not public. Each bench therefore uses
a random directed graph with the published cluster count and
`round(clusters × average degree)` connections. The grouping works in three
steps:

1. Each connection is routed alone on an empty ladder (shortest path).
2. The fixed paths are grouped twice: greedily (the paper's Algorithm 1), and
   clique by clique from their conflict graph (Algorithm 2). Two paths
   conflict when they share a switch. The members of a clique go to distinct
   scenarios.
3. For comparison, a third grouping re-routes each connection around the
   switches already used in a scenario.

The clique grouping is the program actually loaded and run. Counts from one
run (seed 5):

| workload        | connections | largest degree | greedy | clique | greedy, re-routed |
|-----------------|-------------|----------------|--------|--------|-------------------|
| mnist           | 18   | 5  | 12  | 12  | 9   |
| LeNet           | 41   | 9  | 26  | 26  | 22  |
| fashion-mnist   | 128  | 16 | 51  | 48  | 38  |
| cifar10         | 141  | 15 | 44  | 41  | 36  |
| emnist          | 161  | 17 | 57  | 48  | 45  |
| synth_40 (160)  | 160  | 15 | 49  | 47  | 38  |
| synth_40 (292)  | 292  | 21 | 79  | 75  | 59  |
| synth_60 (348)  | 348  | 21 | 105 | 100 | 72  |
| synth_60 (772)  | 772  | 37 | 214 | 208 | 147 |
| ResNet          | 1068 | 35 | 277 | 264 | 171 |

As in the paper, clique grouping needs no more scenarios than greedy
grouping, and neither needs fewer than the largest per-tile degree, since a
tile takes part in at most one path per scenario. Each bench checks that
lower bound.

The absolute counts are well above the paper's, for two reasons. The graphs
are random rather than layered networks. And the reference paths are plain
shortest paths that crowd the outer lanes, where the paper's routing step
spreads traffic. These counts say nothing about the paper's numbers. Any
program with more scenarios than `DEPTH` runs in several loads, each written
over the previous one while the bus is idle.

## Where this departs from, or adds to, the paper

From the paper:

* the two-row ladder with lanes between the rows;
* three-way switches;
* the criss-cross rung placement and the tile names (from its example
  figure);
* bufferless paths and 32-bit lanes;
* distributed controllers, each a loop counter addressing a scenario memory
  whose output drives the switches of its region;
* scenarios loaded by a central framework;
* regular and event-triggered scenario sequences;
* the default sizes.

This design's own:

* the 2-bit switch encoding, with one joined pair at a time, passing both
  ways;
* the valid bit on every link;
* the memory word layout, and the hold / wait-for-event / last /
  iteration-count semantics of the loop nest;
* reading the paper's run-time selection of a scenario "based on the current
  communication demands" as an event that releases the move to the next
  scenario. There is no jump to an arbitrary scenario, because the paper
  gives no rule for choosing one;
* the LUT-RAM style memory (combinational read, no reset);
* the registered controller output, with all switches open when idle;
* regions of 4 switch positions (read from the controller inset of the
  paper's figure, which serves the switches beside two tiles);
* lockstep by shared start/event signals, and the `sync_err` flag;
* the load port;
* the active-low asynchronous reset.

Not built:

* the tiles themselves;
* the compile-time mapping, scheduling, routing and grouping software. The
  test benches contain a simple shortest-path router and both groupings, to
  produce programs;
* compression of sparse scenarios, which the paper mentions only as an
  opportunity.

The resource split between data and control plane that the paper measures
on an FPGA has not been reproduced.

## Files and simulation

`rtl/`:

| file | contents |
|------|----------|
| `ladder_pkg.sv` | switch state type, geometry rules |
| `ladder_switch.sv` | three-way switch |
| `ladder_data_plane.sv` | the ladder fabric |
| `scenario_memory.sv` | scenario memory |
| `loop_counter.sv` | loop nest sequencer |
| `local_controller.sv` | counter + memory + output register |
| `ladder_bus_top.sv` | whole bus |

`tb/`:

* one self-checking bench per module;
* `tb_ladder_bus_top`: end to end at default size. It covers two programs,
  event waits, loop wraps, end of run, halt and reload, and counts each one;
* `tb_workloads`, `tb_workloads_synth40`, `tb_workloads_synth60`,
  `tb_workloads_resnet`: the application-sized traffic;
* shared test code in `ladder_tb_pkg.sv` and `ladder_top_tb_body.svh`.

Each bench prints `TB_RESULT checks=N failures=M`. Example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_ladder_bus_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/ladder_pkg.sv tb/ladder_tb_pkg.sv \
  tb/tb_ladder_bus_top.sv
./obj_dir/Vtb_ladder_bus_top +verilator+seed+1
```

Every bench runs in about a second or less once built. Expect
Verilator's `UNOPTFLAT` warnings on the data plane, explained above.
