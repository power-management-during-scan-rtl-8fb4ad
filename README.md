# Freezing power-sensitive scan cells in a scan-inserted s27

In scan testing, every shift clock moves new bits through the scan flip-flops.
Each bit that lands in a flip-flop also reaches the combinational logic that
flip-flop drives. The logic toggles for nothing, because its outputs are not
captured until the shift ends. Most of a test's average power is spent in this
shift phase. Some scan cells drive much more logic than others. A change on
such a *power-sensitive* cell ripples through many gates, so holding just
those cells' outputs constant while shifting removes a large share of the
wasted toggling. It costs only one gate per cell. The second measure is to
split the scan path into several shorter chains. This cuts the shift clocks
per pattern, and with them the test time.

This RTL applies both measures to the ISCAS'89 benchmark **s27**, which has
four primary inputs, one output and three flip-flops. It follows a published
study of this method ("Power Management during Scan Based Sequential Circuit
Testing"). Everything is built:

* the s27 logic and its three mux-D scan flip-flops;
* a freeze gate on the power-sensitive cell `reg_d_out_1` (net G6), which is
  an AND gate whose second input is the inverted scan enable;
* a choice of 1, 2 or 3 scan chains;
* a synthesizable toggle counter. It measures how much the internal nets
  switch while scan enable is high, which is the figure the method aims to
  reduce.

## The circuit

### s27 and its scan cells

The three flip-flops are the scan cells `reg_d_out_0`, `reg_d_out_1` and
`reg_d_out_2`. Their outputs are the s27 nets G5, G6 and G7, and they load
G10, G11 and G13. The ten gates are:

| net | function        | net | function         |
|-----|-----------------|-----|------------------|
| G14 | ~G0             | G9  | ~(G15 & G16)     |
| G8  | G6 & G14        | G11 | ~(G5 \| G9)      |
| G12 | ~(G7 \| G1)     | G10 | ~(G14 \| G11)    |
| G15 | G8 \| G12       | G13 | ~(G2 \| G12)     |
| G16 | G3 \| G8        | G17 | ~G11 (output)    |

Each scan cell (`scan_dff`) is a 2:1 multiplexer in front of a D flip-flop.
`SE = 1` selects the scan input `SI` (shift), and `SE = 0` selects the
functional input `D` (normal operation and capture). All cells share one
`scan_en`. The cells have no reset, as the original cell has none: a scan load
defines their state.

### Scan chains and their inversions

The part most likely to surprise a user is this: **the chain is stitched
through the inverted output QB.** This is how the scan-insertion netlist that
this design follows does it. A bit is inverted every time it leaves a cell.
The single-chain order is

    scan_in[0] -> reg_d_out_2 -> reg_d_out_1 -> reg_d_out_0 -> scan_out[0]

and `scan_out` is the QB of the last cell. Take a bit `b` shifted in. It is
`b` in reg_d_out_2, `~b` in reg_d_out_1, `b` in reg_d_out_0, and `~b` at
`scan_out`. So an unloaded stream is the inversion of what was loaded. The
chain test of the original ATPG pattern file shows this: it loads `010` and
expects to unload `101`. The end-to-end test repeats that check.

To load a state `S` into a chain of `L` cells, shift the bits
`x_1 .. x_L` in order with

    x_(L-p) = S[cell at position p] XOR (p mod 2),   position 0 = cell next to scan_in

A shorter chain among several is shifted the same `L_max` clocks. Its early
bits just fall out of the end.

`NUM_CHAINS` selects the stitching:

| NUM_CHAINS | chain 0 (scan_in1 / scan_out1) | chain 1 (scan_in2 / scan_out2) | chain 2 (scan_in3 / scan_out3) |
|---|---|---|---|
| 1 | reg_d_out_2 → reg_d_out_1 → reg_d_out_0 | – | – |
| 2 | reg_d_out_1 → reg_d_out_0 | reg_d_out_2 | – |
| 3 | reg_d_out_0 | reg_d_out_1 | reg_d_out_2 |

Port bit `scan_in[c]` is pin `scan_in<c+1>`. The default is three chains,
which the original work presents as its final configuration. Each
multi-chain variant also passes QB on. For 2 and 3 chains, the source's
schematics show which pins sit next to which cell but not the wires
themselves, so the cell-to-chain assignment in those two rows is this
design's reading.

### Test length

A scan pattern is `L_max` shift clocks, which load the next state and unload
the previous response, followed by one capture clock with `scan_en = 0`. One
more unload ends the test:

    clocks = NPAT * (L_max + 1) + L_max

For 8 patterns (the size of the s27 stuck-at test set) this is 35 clocks with
one chain, 26 with two and 17 with three. The original work reports 24 and 20
clocks for one and three chains without saying how it counted. Those numbers
are not reproduced here.

## The freeze gate

`freeze_gate` puts `q_func[i] = q[i] & ~se` between each cell whose bit is set
in `FREEZE_MASK` and the logic that cell drives. Every other cell passes
straight through. With the default mask `3'b010`, G6 becomes the gated net
G18, with G19 the inverted scan enable, and G18 feeds G8. While shifting, G8
is held at 0. G15 then follows G12, G16 follows G3, and the bits passing
through `reg_d_out_1` no longer reach G8, G15, G16, G9, G11, G10 or G17. When
`scan_en` is 0, G18 equals G6, so normal operation and the capture clock are
unchanged. Only the scan cell's *functional* output is gated. The chain runs
through QB, which is not gated, so shifting is unaffected.

An immediate assertion in `freeze_gate` checks that every frozen output reads
0 while `se` is 1.

Timing: the gate is combinational. G18 falls as soon as `scan_en` rises, and
it returns to G6 as soon as `scan_en` falls before the capture edge. So G8
and the logic behind it settle to functional values within the capture clock
period. The gate therefore adds one AND delay in front of G8 on that path.

Frozen values other than 0 are not provided. The source describes only the
AND gate, which can only freeze to 0. The mask lets other cells be frozen, and
this design adds the mask as a generalisation. The source also names the
Dff_2 → Dff_0 path as heavily toggling, but it gates only G6, so the default does too.

## Measuring shift toggles

`toggle_counter` samples the ten nets G8..G17 (the `s27_nets_t` struct) at
every rising clock edge. When `scan_en` is 1 at that edge, it adds the
number of nets that changed since the previous edge. `toggle_clr` clears the
count synchronously, and the count saturates at its maximum. The count is
registered, so a period's toggles appear one clock after the edge that ends
it.

It counts settled changes once per clock, so glitches are not counted. The
original measurements came from an event-driven gate simulation that counted
glitches too. They also came from its own ATPG pattern file, which is not
available. Absolute counts are therefore not comparable with the published
ones (88 toggles before and 38 after freezing).

Three more counters of the same kind, `path_toggle_count[0..2]`, count only
the nets on one flip-flop-to-flip-flop path each. The nets on each path are
the gates the source's toggle tables list for it:

| index | path | nets |
|---|---|---|
| 0 | Dff_1 → Dff_0 | G8, G16, G15, G9, G11, G10 |
| 1 | Dff_2 → Dff_0 | G12, G15, G9, G11, G10 |
| 2 | Dff_2 → Dff_1 | G12, G15, G9, G11 |

Here Dff_k is `reg_d_out_k`. A net on several paths is counted in each. The
tables also list G18, the freeze gate output, on the first path. It is left
out here, so every configuration counts the same nets.

What `tb_chain_compare` measures with these counters, for identical
pseudo-random patterns:

| patterns | configuration | test clocks | shift toggles | path 1→0 | path 2→0 | path 2→1 |
|---|---|---|---|---|---|---|
| 256 | 1 chain, no freeze | 1027 | 1727 | 1112 | 945 | 813 |
| 256 | 1 chain, G6 frozen | 1027 | 1436 (−16 %) | 839 | 868 | 736 |
| 256 | 3 chains, no freeze | 513 | 844 | 511 | 422 | 306 |
| 256 | 3 chains, G6 frozen | 513 | 932 (+10 %) | 580 | 476 | 360 |
| 256 | 2 chains, G6 frozen | 770 | 1107 | 669 | 607 | 482 |
| 8 | 1 chain, no freeze | 35 | 69 | 39 | 34 | 32 |
| 8 | 1 chain, G6 frozen | 35 | 77 | 47 | 49 | 47 |

With one chain and 256 patterns, freezing G6 cuts the Dff_1 → Dff_0 path by
25 %. The source's tables show a larger cut, from 88 to 38.

Freezing does not always pay, and the counter shows why. Every switch from
capture to shift drops G18 from G6 to 0, and that toggle happens while scan
enable is high. With one long chain there are three shifts per pattern, so
the transitions blocked in later shifts outweigh that cost over a long
pattern set. With three one-cell chains each pattern has a single shift.
Nothing ripples through a long chain, so the mode switch costs more than the
freeze saves. A short set of 8 patterns is too small for the saving to show.
Combining many chains with freezing is the configuration the source
recommends. Under this measure, its benefit is the shorter test, not fewer
shift toggles.

## Modules

| module | role |
|---|---|
| `s27_scan_pkg` | `NUM_FF = 3`, the `s27_nets_t` struct of internal nets, the per-path net masks `PATH_NETS` |
| `scan_dff` | mux-D scan flip-flop, outputs Q and QB |
| `s27_comb` | the ten s27 gates; takes the gated state, gives the next state, G17 and the nets |
| `freeze_gate` | AND with inverted scan enable on the cells in `FREEZE_MASK` |
| `toggle_counter` | counts changes of a net vector while enabled |
| `s27_scan_top` | the three scan cells, the chain stitching, the freeze gate, the logic and the four toggle counters |

The top, `s27_scan_top`, has these parameters: `NUM_CHAINS` (1–3, default 3),
`FREEZE_MASK` (default `3'b010`) and `CNT_W` (toggle counter width, default
16). Its ports:

* Inputs: `CLK`, `G0..G3`, `scan_in[NUM_CHAINS]`, `scan_en` and `toggle_clr`.
* Outputs: `G17`, `scan_out[NUM_CHAINS]`, `toggle_count[CNT_W]` and
  `path_toggle_count[3][CNT_W]`.

`scan_out` comes straight from the QB of each chain's last cell, and `G17` is
combinational. `NUM_CHAINS` outside 1–3 stops elaboration with an error.

The top with all its submodules synthesizes to 3 scan flip-flops and about
ten gates for s27 plus one gate for the freeze. The rest of the cells are the
four toggle counters. Each has a sample register, a population count and a
16-bit saturating adder. Leave the counters out if you only want the test
logic.

## Testbenches

Every testbench checks itself and prints `TB_RESULT checks=N failures=M`.

* `tb_scan_dff`, `tb_s27_comb`, `tb_freeze_gate` and `tb_toggle_counter` test
  one module each. `s27_comb` is checked exhaustively (all 128 input and
  state values) against the `.bench` form of s27 in `tb/s27_ref_pkg.sv`. The
  toggle counter is also tested at 4 bits to check saturation.
* `tb_s27_scan_top` runs the top at its defaults: a chain test, 64 scan
  patterns and a final unload. It checks G17, every scan output and the
  toggle count each clock, and checks that the test takes
  `NPAT * (L + 1) + L` clocks. It also checks the three path counts each
  clock. It counts how often each mechanism happened: shifts, captures, the
  freeze gate masking a 1, and toggles counted on every path. If any
  of them never happened, that counts as a failure.
* `tb_chain_compare` runs five configurations side by side on the same
  patterns. It produced the table above.
* `tb/s27_scan_tester.sv` is the tester the last two share. It generates the
  patterns with a fixed linear congruential sequence, so every configuration
  gets the same ones. `tb/s27_ref_pkg.sv` holds the reference model.

To run one, for example the end-to-end test:

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/s27_scan_pkg.sv tb/s27_ref_pkg.sv tb/tb_s27_scan_top.sv \
        --top-module tb_s27_scan_top
    obj_dir/Vtb_s27_scan_top

Each run takes well under a second.

## What is taken from the source and what is chosen here

Taken from the source:

* the s27 gate netlist and its instance names;
* the sff cell's pins;
* the single-chain stitching through QB;
* the freeze gate's function (AND with inverted scan enable) and its place
  on G6;
* the 1-, 2- and 3-chain variants;
* the idea of counting toggles while scan enable is high;
* the three flip-flop paths and the gates on each.

Chosen here:

* the 2- and 3-chain cell assignment, read from pin labels;
* rising-edge clocking and no reset;
* the toggle counter's insides: once-per-clock sampling, which nets the
  total count watches, synchronous clear, saturation and width;
* leaving G18 out of the path counts;
* making the frozen set a parameter;
* bringing the counter out as ports.

Not reproduced:

* the published toggle counts, which need the original patterns and a
  glitch-aware simulation;
* the clock counts of the chain comparison;
* the FPGA area figures.

The ATPG tool, the tester and the cell library are outside the design. The
library's gates are written inline in `s27_comb`.
