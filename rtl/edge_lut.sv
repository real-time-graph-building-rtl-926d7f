// edge_lut -- static lookup table of an edge processing element.
//
// Read-only table with one entry per time slot of the processing element:
// the design-time features of the edge built in that slot, namely the
// quantised coordinates of both wires (xa, ya, xb, yb, COORD_W bits each) and
// their quantised distance (DIST_W bits), plus a present bit that is 0 for
// the unused slots of the last processing element.  The contents are computed
// during elaboration from the edge numbering of gb_pkg: slot n holds edge
// BASE + n.  Asynchronous read: feat_o follows addr_i in the same cycle.
//
// Follows the paper: static edge and sensor features stored in read-only
// registers/LUTs next to the classifier and read per slot.  The geometry and
// quantisation are described in gb_pkg.
//
// Output layout, MSB first: {xa, ya, xb, yb, dist}.
module edge_lut
  import gb_pkg::*;
#(
  parameter int unsigned N        = DEF_N_PER_PE,
  parameter int unsigned BASE     = 0,
  parameter int unsigned N_LAYERS = DEF_N_LAYERS,
  parameter int unsigned N_WIRES  = DEF_N_WIRES,
  parameter int unsigned COORD_W  = DEF_COORD_W,
  parameter int unsigned DIST_W   = DEF_DIST_W,
  localparam int unsigned SLOT_W  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned STAT_W  = 4*COORD_W + DIST_W
) (
  input  logic [SLOT_W-1:0] addr_i,
  output logic [STAT_W-1:0] feat_o,
  output logic              present_o
);

  localparam int unsigned N_EDGES = n_edges(N_LAYERS, N_WIRES);

  logic [STAT_W-1:0] rom     [N];
  logic              rom_use [N];

  for (genvar n = 0; n < N; n++) begin : g_rom
    localparam int unsigned E = BASE + n;
    if (E < N_EDGES) begin : g_edge
      localparam static_feat_t F = static_feat(E, N_LAYERS, N_WIRES, COORD_W, DIST_W);
      assign rom[n]     = {F.xa[COORD_W-1:0], F.ya[COORD_W-1:0],
                           F.xb[COORD_W-1:0], F.yb[COORD_W-1:0], F.dst[DIST_W-1:0]};
      assign rom_use[n] = 1'b1;
    end else begin : g_unused
      assign rom[n]     = '0;
      assign rom_use[n] = 1'b0;
    end
  end

  always_comb begin
    feat_o    = '0;
    present_o = 1'b0;
    if (int'(addr_i) < N) begin
      feat_o    = rom[addr_i];
      present_o = rom_use[addr_i];
    end
  end

endmodule
