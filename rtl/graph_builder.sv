// graph_builder -- real-time p-NN graph builder for one drift-chamber sector.
//
// Every event, the readings of all wires of the sector (hit identifier, ADC,
// TDC) arrive in parallel.  The design-time set of candidate edges (hourglass
// neighbourhood, see gb_pkg) is split over M processing elements of N edges
// each, in numbering order.  The input distribution network, written here as
// plain wiring, hands each element the readings of both wires of its edges; each element classifies its N edges one per cycle
// (active when both wires are hit) and attaches the static coordinates and
// distance; the output distribution network places every edge at a fixed
// position of a parallel output register.
//
// Default configuration: the largest sector of the case study, 6 layers x
// 163 wires = 978 wires, 4545 candidate edges, N = 8 edges per element,
// M = ceil(4545/8) = 569 elements, 8-bit coordinates and distance, so 60-bit
// edges.
//
// Interface: valid_i with sensors_i starts an event; valid_o is high for one
// cycle when edges_o/active_o hold that event's graph; they are held until
// the next event's graph replaces them.  overrun_o pulses when valid_i comes
// while the elements are still busy (event dropped; at most one event every N
// cycles is taken).
//
// Timing: valid_o follows valid_i by N+2 cycles, 10 cycles for N = 8, which at
// 256 MHz is 39.06 ns; one event every 8 cycles = 32 MHz.  Both numbers match
// the paper; the cycle schedule that produces them is this design's own.
// Synchronous active-low reset.
module graph_builder
  import gb_pkg::*;
#(
  parameter int unsigned N_LAYERS = DEF_N_LAYERS,
  parameter int unsigned N_WIRES  = DEF_N_WIRES,
  parameter int unsigned N_PER_PE = DEF_N_PER_PE,
  parameter int unsigned COORD_W  = DEF_COORD_W,
  parameter int unsigned DIST_W   = DEF_DIST_W,
  localparam int unsigned N_VERT  = N_LAYERS * N_WIRES,
  localparam int unsigned N_EDGES = n_edges(N_LAYERS, N_WIRES),
  localparam int unsigned M       = n_pe(N_LAYERS, N_WIRES, N_PER_PE),
  localparam int unsigned EDGE_W  = 2*SENSOR_W + 4*COORD_W + DIST_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               valid_i,
  input  sensor_t            sensors_i [N_VERT],
  output logic [EDGE_W-1:0]  edges_o [N_EDGES],
  output logic [N_EDGES-1:0] active_o,
  output logic               valid_o,
  output logic               overrun_o
);

  sensor_t           pe_a      [M][N_PER_PE];
  sensor_t           pe_b      [M][N_PER_PE];
  logic [EDGE_W-1:0] pe_edges  [M][N_PER_PE];
  logic [N_PER_PE-1:0] pe_active [M];
  logic [M-1:0]      pe_ready;
  logic [M-1:0]      pe_overrun;

  // Input distribution network: pure wiring, fixed at elaboration.  Slot n
  // of element m builds edge m*N_PER_PE + n and receives the readings of its
  // first wire on A and its second wire on B; a wire fans out to every slot
  // that uses it (up to 12), so no element waits for a shared input.  Slots
  // past the last edge get an all-zero reading (no hit).
  for (genvar m = 0; m < M; m++) begin : g_scatter
    for (genvar n = 0; n < N_PER_PE; n++) begin : g_slot
      localparam int unsigned E = m*N_PER_PE + n;
      if (E < N_EDGES) begin : g_edge
        localparam edge_ends_t P = edge_ends(E, N_LAYERS, N_WIRES);
        assign pe_a[m][n] = sensors_i[P.va];
        assign pe_b[m][n] = sensors_i[P.vb];
      end else begin : g_unused
        assign pe_a[m][n] = '0;
        assign pe_b[m][n] = '0;
      end
    end
  end

  for (genvar m = 0; m < M; m++) begin : g_pe
    edge_pe #(
      .N(N_PER_PE), .BASE(m*N_PER_PE), .N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES),
      .COORD_W(COORD_W), .DIST_W(DIST_W)
    ) u_pe (
      .clk, .rst_n, .valid_i,
      .a_i(pe_a[m]), .b_i(pe_b[m]),
      .edges_o(pe_edges[m]), .active_o(pe_active[m]),
      .ready_o(pe_ready[m]), .overrun_o(pe_overrun[m])
    );
  end

  edge_gather #(
    .N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES), .N(N_PER_PE), .EDGE_W(EDGE_W)
  ) u_gather (
    .clk, .rst_n, .pe_edges_i(pe_edges), .pe_active_i(pe_active),
    .pe_ready_i(pe_ready), .edges_o, .active_o, .valid_o
  );

  assign overrun_o = |pe_overrun;

  // The edge numbering of gb_pkg needs at least three layers of two wires.
  if (N_LAYERS < 3 || N_WIRES < 2) begin : g_bad_size
    $error("graph_builder: N_LAYERS must be >= 3 and N_WIRES >= 2");
  end

endmodule
