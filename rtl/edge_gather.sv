// edge_gather -- output distribution network and parallel output register.
//
// Collects the edge arrays of all M processing elements and places every
// edge at its fixed position in the output register: edge e, built in slot
// e mod N of element e div N, appears at edges_o[e] with its active flag at
// active_o[e].  Unused slots of the last element are not mapped.  The output
// register is loaded when the processing elements report ready (they run in
// lockstep, so all M ready lines rise together; the AND of them is used and an
// assertion checks the lockstep), and valid_o is high for one cycle with the
// new contents.  The register holds its contents until the next event, so a
// downstream stage has N cycles to read it.
//
// Follows the paper: a second static network that maps edges to fixed
// positions of a parallel output register.  The register stage, valid_o and
// the reset to "no active edge" are this design's choices.
//
// Timing: one cycle from pe_ready_i to valid_o.
module edge_gather
  import gb_pkg::*;
#(
  parameter int unsigned N_LAYERS = DEF_N_LAYERS,
  parameter int unsigned N_WIRES  = DEF_N_WIRES,
  parameter int unsigned N        = DEF_N_PER_PE,
  parameter int unsigned EDGE_W   = 2*SENSOR_W + 4*DEF_COORD_W + DEF_DIST_W,
  localparam int unsigned N_EDGES = n_edges(N_LAYERS, N_WIRES),
  localparam int unsigned M       = n_pe(N_LAYERS, N_WIRES, N)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [EDGE_W-1:0] pe_edges_i  [M][N],
  input  logic [N-1:0]      pe_active_i [M],
  input  logic [M-1:0]      pe_ready_i,
  output logic [EDGE_W-1:0] edges_o [N_EDGES],
  output logic [N_EDGES-1:0] active_o,
  output logic              valid_o
);

  logic capture;
  assign capture = &pe_ready_i;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < N_EDGES; e++) edges_o[e] <= '0;
      active_o <= '0;
      valid_o  <= 1'b0;
    end else begin
      valid_o <= capture;
      if (capture) begin
        for (int e = 0; e < N_EDGES; e++) begin
          edges_o[e]  <= pe_edges_i[e / N][e % N];
          active_o[e] <= pe_active_i[e / N][e % N];
        end
      end
    end
  end

  // All processing elements share one schedule.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               (pe_ready_i == '0) || (pe_ready_i == '1));

endmodule
