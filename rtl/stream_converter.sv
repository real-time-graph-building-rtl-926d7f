// stream_converter -- N:1 stream converter of an edge processing element.
//
// Holds the sensor readings of both ends of the N edges that one processing
// element builds.  Two shift registers of N entries, "Sensors A" and
// "Sensors B", are loaded in parallel in one cycle (load_i) and then shifted
// by one entry per cycle (shift_i), so that entry 0 (a_o / b_o) always shows
// the pair of the edge being classified.  Load has priority over shift, so a
// new event can be loaded in the same cycle the last pair of the previous one
// is consumed.
//
// Follows the paper: two parallel-in, serial-out shift registers feeding the
// classifier one sensor pair per cycle.  Own choices: shift direction
// (towards entry 0), load priority, and a synchronous active-low reset that
// clears the registers (an empty register reads as "no hit").
//
// Timing: a_o/b_o change on the clock edge that performs a load or a shift.
module stream_converter
  import gb_pkg::*;
#(
  parameter int unsigned N = DEF_N_PER_PE
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    load_i,
  input  logic    shift_i,
  input  sensor_t a_i [N],
  input  sensor_t b_i [N],
  output sensor_t a_o,
  output sensor_t b_o
);

  sensor_t sr_a [N];
  sensor_t sr_b [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N; k++) begin
        sr_a[k] <= '0;
        sr_b[k] <= '0;
      end
    end else if (load_i) begin
      for (int k = 0; k < N; k++) begin
        sr_a[k] <= a_i[k];
        sr_b[k] <= b_i[k];
      end
    end else if (shift_i) begin
      for (int k = 0; k < N; k++) begin
        sr_a[k] <= (k == N-1) ? sensor_t'('0) : sr_a[k+1];
        sr_b[k] <= (k == N-1) ? sensor_t'('0) : sr_b[k+1];
      end
    end
  end

  assign a_o = sr_a[0];
  assign b_o = sr_b[0];

endmodule
