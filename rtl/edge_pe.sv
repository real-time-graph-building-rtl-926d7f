// edge_pe -- edge processing element.
//
// Builds the N candidate edges BASE .. BASE+N-1 of the sector one after the
// other, one per clock cycle, and keeps them in an array of N edge registers.
// Inside: the stream converter (two N-entry shift registers for the readings
// of the A and B wires of every edge), the static lookup table (coordinates
// and distance of every edge), the edge classifier (active when both wires
// are hit) and the state machine.  The classifier output is demultiplexed
// into edge register slot_o of the array.
//
// Interface: valid_i with a_i/b_i (the wire readings routed to this element
// by the input distribution network) starts an event; ready_o is high for
// one cycle when edges_o/active_o hold all N edges of that event; they stay
// there until the first slot of the next event is written.  overrun_o marks
// an event offered while the element was busy (dropped).
//
// Timing: valid_i in cycle 0 -> load on edge 1 -> slots 0..N-1 written on
// edges 2..N+1 -> ready_o high in cycle N+1 (cycle 9 for N = 8).  One event
// every N cycles.
//
// Follows the paper's element: stream converter N:1, lookup table, edge
// classifier, state machine, array of edges.  The exact cycle schedule is
// this design's choice.
module edge_pe
  import gb_pkg::*;
#(
  parameter int unsigned N        = DEF_N_PER_PE,
  parameter int unsigned BASE     = 0,
  parameter int unsigned N_LAYERS = DEF_N_LAYERS,
  parameter int unsigned N_WIRES  = DEF_N_WIRES,
  parameter int unsigned COORD_W  = DEF_COORD_W,
  parameter int unsigned DIST_W   = DEF_DIST_W,
  localparam int unsigned SLOT_W  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned STAT_W  = 4*COORD_W + DIST_W,
  localparam int unsigned EDGE_W  = 2*SENSOR_W + STAT_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  input  sensor_t           a_i [N],
  input  sensor_t           b_i [N],
  output logic [EDGE_W-1:0] edges_o [N],
  output logic [N-1:0]      active_o,
  output logic              ready_o,
  output logic              overrun_o
);

  logic              load, shift, wr_en;
  logic [SLOT_W-1:0] slot;
  sensor_t           a_cur, b_cur;
  logic [STAT_W-1:0] feat;
  logic              present;
  logic              edge_active;
  logic [EDGE_W-1:0] edge_vec;

  epe_fsm #(.N(N)) u_fsm (
    .clk, .rst_n, .valid_i,
    .load_o(load), .shift_o(shift), .wr_en_o(wr_en), .slot_o(slot),
    .ready_o, .overrun_o
  );

  stream_converter #(.N(N)) u_conv (
    .clk, .rst_n, .load_i(load), .shift_i(shift),
    .a_i, .b_i, .a_o(a_cur), .b_o(b_cur)
  );

  edge_lut #(
    .N(N), .BASE(BASE), .N_LAYERS(N_LAYERS), .N_WIRES(N_WIRES),
    .COORD_W(COORD_W), .DIST_W(DIST_W)
  ) u_lut (
    .addr_i(slot), .feat_o(feat), .present_o(present)
  );

  edge_classifier #(.COORD_W(COORD_W), .DIST_W(DIST_W)) u_cls (
    .a_i(a_cur), .b_i(b_cur), .feat_i(feat), .present_i(present),
    .active_o(edge_active), .edge_o(edge_vec)
  );

  // Array of edges: the classifier result goes to the register of its slot.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) edges_o[k] <= '0;
      active_o <= '0;
    end else if (wr_en) begin
      edges_o[slot]  <= edge_vec;
      active_o[slot] <= edge_active;
    end
  end

endmodule
