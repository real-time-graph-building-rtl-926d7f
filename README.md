# Fixed-latency p-NN graph building for a drift-chamber trigger sector

A graph neural network in a first-level trigger needs its input graph within
a fraction of a microsecond, for every bunch-crossing sample, with no
variation in latency. Building a k-nearest-neighbour graph at run time cannot
meet that: it is sequential and data-dependent. This design builds a
*locally constrained* graph instead. Which pairs of wires may be joined by an
edge is decided once, at design time, from the detector geometry and a
neighbourhood pattern; at run time the hardware only decides, for every
candidate, whether it is active in this event. Every candidate edge therefore
has its own fixed slot in hardware and its own fixed position in the output,
the work per event is constant, and the latency is a fixed number of clock
cycles whatever the event looks like (time O(1), space O(|E|)).

The RTL here implements that scheme for one sector of a cylindrical drift
chamber of the Belle II type: 978 sense wires, 4545 candidate edges, one new
event every 8 clock cycles (32 MHz at a 256 MHz clock) and a latency of 10
clock cycles (39.06 ns at 256 MHz). An edge is active when both of its wires
report a hit. Every edge carries a 60-bit feature vector: the readings of both
wires (hit flag, 4-bit ADC, 5-bit TDC) and the design-time coordinates of both
wires and their distance.

The architecture and the case-study numbers follow M. Neu et al., "Real-time
Graph Building on FPGAs for Machine Learning Trigger Applications in Particle
Physics", where the hardware is produced by a generator. This is an
independent SystemVerilog rendering of the generated module; section 6 lists
what was filled in here.

## 1. The sector and its candidate edges

### Geometry

A sector is a patch of one superlayer, unrolled: `N_LAYERS` layers (the
radial direction, R) of `N_WIRES` wires each (the azimuthal direction, phi).
Odd layers are shifted by half a wire pitch, so the wires form a hexagonal
grid. Wire `w` of layer `l` is vertex `v = l*N_WIRES + w`.

### The hourglass pattern

A wire's candidate neighbours are:

| layer offset | wires (in half-pitch units of phi offset) | count |
|---|---|---|
| 0  | the two adjacent wires (offset +-2) | 2 |
| +-1 | the two nearest wires (offset +-1) | 2 + 2 |
| +-2 | the three nearest wires (offset -2, 0, +2) | 3 + 3 |

That is 12 candidates for a wire deep inside the sector, in a shape that is
narrow at the wire and wide two layers away, like an hourglass. It extends the
segment-finder pattern of the existing trigger with neighbours in the same
layer. Edges are undirected, so each pair is stored once.

With 6 layers the number of candidate edges is

    |E| = 6(W-1) + 5(2W-1) + 4(3W-2)

which gives 2305 edges for 83 wires per layer (498 wires), 3649 for 131
(786 wires) and 4545 for 163 (978 wires), the smallest, a middle and the
largest sector of the chamber. The default is the largest.

### Edge numbering

The position of an edge in the output is its number, so the numbering is
part of the interface. Edges are numbered in three groups:

1. **S**, same layer: layer by layer, wire pairs (w, w+1). `6*(W-1)` edges.
2. **D1**, adjacent layers: for each layer pair (l, l+1), the zig-zag of
   `2W-1` edges along the layer, ordered by position. If layer l is even, the
   order is (0,0), (1,0), (1,1), (2,1), ... (lower wire, upper wire); if it is
   odd, (0,0), (0,1), (1,1), (1,2), ...
3. **D2**, layers two apart: for each pair (l, l+2), `3W-2` edges:
   (0,0), then for every k: (k,k+1), (k+1,k), (k+1,k+1).

Endpoint `a` is always the lower-numbered wire. The functions `n_edges` and
`edge_ends` in `rtl/gb_pkg.sv` implement this numbering; everything else
(routing, look-up tables, output positions) is derived from them while the
design elaborates. To change the pattern, replace these two functions.

### Static features

The coordinates of both wires and their distance are known when the design is
built and are stored as constants. Positions are computed on a fine grid of
1/16 mm (16 bits, 0 to 4096 mm), then rounded down to `COORD_W` bits by
dropping low bits; the distance is the floor of the Euclidean distance on the
fine grid, rounded down to `DIST_W` bits the same way.

**The wire positions are placeholders.** A real sector takes its wire
positions from the detector's geometry database, which is not part of this
RTL. Here both pitches are 16 mm. The pattern and the edge counts do not
depend on this; only the values of the coordinate and distance fields do.
Replace `wire_x_fine` / `wire_y_fine` in `gb_pkg` to use real positions.

## 2. Datapath

```
 sensors_i[978]                                                  edges_o[4545]
 (hit,ADC,TDC)   +-----------+   A[8],B[8]  +-----------+  8 edges  +----------+  active_o
 --------------->|  sensor   |------------->| edge_pe 0 |---------->|   edge   |----------->
                 |  network  |      ...     |    ...    |    ...    |  gather  |  valid_o
 valid_i ------->|  (wires)  |------------->| edge_pe   |---------->| (output  |----------->
                 +-----------+              |   568     |           | register)|
                                            +-----------+           +----------+
```

The 4545 candidate edges are split over `M = ceil(4545/8) = 569` edge
processing elements of `N = 8` edges each: element m builds edges
`8m .. 8m+7`. The last element has a single real edge; its seven other slots
are permanently inactive.

* **The input distribution network** is wiring only and is written as a
  generate loop in `graph_builder`. For every slot of every element it
  selects the readings of the edge's two wires (A and B). A wire fans out to every slot that uses it (up to 12), so no
  element ever has to wait for a shared input.
* **`edge_pe`**, the edge processing element, builds its 8 edges one per
  clock cycle (time-division multiplexing), see section 3.
* **`edge_gather`**, the output distribution network, copies all element
  arrays into the output register when the elements report ready; edge e
  comes from slot `e mod 8` of element `e div 8`. The register holds the
  graph until the next event, so a downstream stage has 8 cycles to read it.

Parallelism is spatial across the 569 elements and temporal within each one.
`N` trades the two: a larger N means fewer elements and a lower event rate at
the same clock (one event every N cycles).

## 3. Inside a processing element, and the timing

Each element contains:

* **`stream_converter`**: two 8-entry shift registers, one for the readings
  of the A wires and one for the B wires of its 8 edges. Both are loaded in
  parallel in one cycle and then shift one entry per cycle towards entry 0,
  which feeds the classifier.
* **`edge_lut`**: an 8-entry constant table with the static features of the
  8 edges, addressed by the slot counter, plus a bit telling whether the slot
  holds a real edge.
* **`edge_classifier`**: combinational. The edge is active when the slot is
  real and both hit flags are set; the feature vector is built in any case.
* **`epe_fsm`**: the state machine (IDLE / BUSY with a 3-bit slot counter).
* **The array of edges**: 8 edge registers and 8 active flags; the classifier
  result is written into the register of the current slot.

Cycle by cycle, with `valid_i` high in cycle 0:

| clock edge | what happens |
|---|---|
| 1 | shift registers load the readings; state BUSY, slot 0 |
| 2 .. 9 | slot 0 .. 7 classified and written into the edge array; shift |
| (cycle 9) | `ready` high in every element |
| 10 | output register loaded, `valid_o` high in cycle 10 |

So `valid_o` follows `valid_i` by exactly `N + 2 = 10` cycles. The next event
may arrive in cycle 8, the cycle in which slot 7 is classified: the shift
registers are reloaded on edge 9 while slot 7 is still written from their old
contents, and on edge 10 slot 0 of the new event is written while the output
register takes the old array. Events can therefore follow each other every
8 cycles without a gap.

An event that arrives earlier (while slots 0 to 6 are in flight) cannot be
taken. The input has no back-pressure, because trigger data arrive at a fixed
rate; the event is dropped and `overrun_o` is high in that cycle. The elements
all run the same schedule, so they are always in the same state; an assertion
in `edge_gather` checks that their ready lines agree.

## 4. Edge format

`edges_o[e]`, MSB first, for the default `COORD_W = DIST_W = 8`:

| bits | field |
|---|---|
| 59 | hit flag of wire a |
| 58:55 | ADC of wire a |
| 54:50 | TDC of wire a |
| 49 | hit flag of wire b |
| 48:45 | ADC of wire b |
| 44:40 | TDC of wire b |
| 39:32 | x of wire a |
| 31:24 | y of wire a |
| 23:16 | x of wire b |
| 15:8 | y of wire b |
| 7:0 | distance |

The width is `20 + 4*COORD_W + DIST_W`: 40 bits with 4-bit, 60 with 8-bit and
100 with 16-bit static fields. The active flag is not part of the vector; it is
`active_o[e]`. Inactive edges keep their features, so the output is a sparse
array in which every candidate is present and marked.

## 5. Top-level interface (`graph_builder`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock (256 MHz for a 32 MHz event rate) |
| `rst_n` | in | 1 | synchronous reset, active low |
| `valid_i` | in | 1 | a new event is on `sensors_i` this cycle |
| `sensors_i` | in | 978 x `sensor_t` | per wire: `hit`, `adc[3:0]`, `tdc[4:0]` |
| `edges_o` | out | 4545 x 60 | edge feature vectors, held between events |
| `active_o` | out | 4545 | edge e is part of the graph |
| `valid_o` | out | 1 | one-cycle pulse: a new graph is in `edges_o`/`active_o` |
| `overrun_o` | out | 1 | `valid_i` came too early and was ignored |

`sensors_i` only has to be stable in the cycle `valid_i` is high. Reset
clears all registers, so after reset every edge reads inactive.

Parameters (all with the defaults described above): `N_LAYERS` (6),
`N_WIRES` (163), `N_PER_PE` (8), `COORD_W` (8), `DIST_W` (8). The edge
numbering needs `N_LAYERS >= 3` and `N_WIRES >= 2`; the top stops elaboration
otherwise. Other sector sizes are obtained by changing `N_WIRES`, e.g. 83 or
131 for the other two sectors above.

## 6. How far it can be trusted, and what is this design's own

Taken from the description of the method: the split into M processing
elements of N edges fed by a static input network, the element's structure
(N:1 stream converter with A/B shift registers, static look-up table, edge
classifier, state machine, array of edge registers), the second static
network that places every edge at a fixed output position, the classification
rule (both wires hit), N = 8, the reading widths (1/4/5 bits), the set of
edge features and their 40/60/100-bit widths, the sector sizes, the
hourglass pattern, 32 MHz throughput and 10-cycle latency.

This design's own choices:

* the 6-layer hexagonal sector model and the edge numbering (chosen because
  they reproduce the three published sector sizes exactly);
* the placeholder wire coordinates and the exact distance metric;
* the schedule inside the element (one load cycle, 8 slot cycles, one output
  register cycle) that produces the 10-cycle latency;
* the assignment of edges to elements (in numbering order);
* dropping and flagging early events; reset behaviour; the field order in
  the edge vector; keeping the active flag outside the vector.

Not built: an optional FIFO (or several "output queues") that would turn the
parallel output register into a serial stream for a consumer that wants one;
the source describes such queues only as an add-on and gives neither their
depth nor what they carry. Also not built: the epsilon-NN variant (candidates = all wire pairs
closer than epsilon), which would need its own `n_edges`/`edge_ends`
functions.

The testbenches check the design against an independent model that finds the
candidates by testing every pair of wires against the pattern and recomputes
the features with real arithmetic. They were run at the default size; no
synthesis for an FPGA has been done with this RTL, so timing closure at
256 MHz is not established here.

## 7. Simulating

All files are plain SystemVerilog-2017. `rtl/gb_pkg.sv` must be read first.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/gb_pkg.sv tb/tb_ref_pkg.sv tb/tb_graph_builder.sv \
    -y rtl -y tb --top-module tb_graph_builder -o sim
./obj_dir/sim
```

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops; a
watchdog ends it with a failure if it hangs.

| testbench | what it checks |
|---|---|
| `tb_stream_converter` | load, shift order, drain, load priority, reset |
| `tb_epe_fsm` | load/write/shift/slot/ready per cycle; back-to-back; overrun |
| `tb_edge_lut` | table contents of three elements against the reference |
| `tb_edge_classifier` | active rule and vector layout, random |
| `tb_edge_pe` | one element: edges, latency 9 to ready, back-to-back, overrun, partly used element |
| `tb_edge_gather` | output positions, valid pulse, hold |
| `tb_graph_builder` | end to end on a 6 x 10 sector (261 edges): routing (each wire's index as its reading), random events, latency 10, events every 8 cycles, overrun, hold, each counted |
| `tb_graph_builder_widths` | the same with 40-bit and 100-bit edges (4- and 16-bit coordinates) |
| `tb_graph_builder_full` | the same at the default size (978 wires, 4545 edges) |

`tb/tb_ref_pkg.sv` holds the reference model; `tb/tb_gb_env.sv` is the
end-to-end scoreboard shared by the small end-to-end testbenches.

The full-size testbench runs in well under a second, but building it is slow.
Each of the 569 elements has its own constant table, so Verilator emits about
40 MB of C++, and compiling that on one core takes about 12 minutes. Add `-j`
to build in parallel. The 83- and 131-wire sectors differ from the default
only in `N_WIRES` and were not simulated separately. The 10-wire and
163-wire runs bracket them.

## 8. Files

| file | content |
|---|---|
| `rtl/gb_pkg.sv` | reading type, defaults, sector geometry, pattern, edge numbering, feature quantisation |
| `rtl/graph_builder.sv` | top level, including the input distribution network |
| `rtl/edge_pe.sv` | edge processing element |
| `rtl/stream_converter.sv` | A/B shift registers |
| `rtl/edge_lut.sv` | static feature table |
| `rtl/edge_classifier.sv` | activity rule and feature vector |
| `rtl/epe_fsm.sv` | element state machine |
| `rtl/edge_gather.sv` | output distribution network and output register |
