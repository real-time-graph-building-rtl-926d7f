// edge_classifier -- decides whether a candidate edge is part of the graph
// and assembles its feature vector.
//
// Combinational.  Inputs are the readings of the two wires of one candidate
// edge (hit identifier, ADC, TDC), the edge's static features from the lookup
// table and its present bit.  The edge is active when the slot holds a real
// edge and the hit identifiers of both wires are set, the neighbourhood
// condition of the case study.  The feature vector is formed in every case;
// inactive edges keep their features and are marked by active_o = 0.
//
// Edge layout, MSB first: {sensor a (hit, adc, tdc), sensor b (hit, adc,
// tdc), xa, ya, xb, yb, dist}: 2*10 + 4*COORD_W + DIST_W bits, i.e. 40, 60
// and 100 bits for 4-, 8- and 16-bit coordinates.  The field order is this
// design's choice; the field set and widths follow the paper's feature table.
module edge_classifier
  import gb_pkg::*;
#(
  parameter int unsigned COORD_W = DEF_COORD_W,
  parameter int unsigned DIST_W  = DEF_DIST_W,
  localparam int unsigned STAT_W = 4*COORD_W + DIST_W,
  localparam int unsigned EDGE_W = 2*SENSOR_W + STAT_W
) (
  input  sensor_t           a_i,
  input  sensor_t           b_i,
  input  logic [STAT_W-1:0] feat_i,
  input  logic              present_i,
  output logic              active_o,
  output logic [EDGE_W-1:0] edge_o
);

  assign active_o = present_i && a_i.hit && b_i.hit;
  assign edge_o   = {a_i, b_i, feat_i};

endmodule
