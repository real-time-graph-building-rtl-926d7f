// epe_fsm -- state machine of an edge processing element.
//
// Sequences the N edges that one processing element builds in time-division
// multiplex.  In IDLE it waits for valid_i; accepting an event pulses load_o
// (the stream converter captures the sensor pairs) and enters BUSY with slot
// 0.  In BUSY, every cycle the edge of slot_o is classified and written
// (wr_en_o), the stream converter shifts (shift_o) and the slot advances.
// The cycle after slot N-1 has been written, ready_o is high for one cycle:
// the edge array then holds the complete set of N edges of the event.
//
// An event can be accepted in IDLE or in the cycle of the last slot, so one
// event every N cycles is sustained (8 cycles at 256 MHz = 32 MHz).  An event
// offered while earlier slots are still in flight cannot be taken (the paper
// gives the input no back-pressure, the trigger data arrive at a fixed rate);
// it is dropped and overrun_o pulses in that cycle.
//
// The paper names this block and its Valid/Ready signals only; the states,
// the overlap of load and last slot, and the overrun flag are this design's
// choices.  Synchronous active-low reset to IDLE.
module epe_fsm
  import gb_pkg::*;
#(
  parameter int unsigned N      = DEF_N_PER_PE,
  localparam int unsigned SLOT_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid_i,
  output logic              load_o,
  output logic              shift_o,
  output logic              wr_en_o,
  output logic [SLOT_W-1:0] slot_o,
  output logic              ready_o,
  output logic              overrun_o
);

  typedef enum logic {IDLE, BUSY} state_t;

  state_t            state_q;
  logic [SLOT_W-1:0] slot_q;
  logic              last;
  logic              accept;

  assign last      = (state_q == BUSY) && (slot_q == SLOT_W'(N-1));
  assign accept    = valid_i && ((state_q == IDLE) || last);
  assign load_o    = accept;
  assign wr_en_o   = (state_q == BUSY);
  assign shift_o   = (state_q == BUSY) && !accept;
  assign slot_o    = slot_q;
  assign overrun_o = valid_i && !accept;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= IDLE;
      slot_q  <= '0;
      ready_o <= 1'b0;
    end else begin
      ready_o <= last;
      if (accept) begin
        state_q <= BUSY;
        slot_q  <= '0;
      end else if (last) begin
        state_q <= IDLE;
        slot_q  <= '0;
      end else if (state_q == BUSY) begin
        slot_q  <= slot_q + 1'b1;
      end
    end
  end

  // The slot counter never leaves 0..N-1.
  a_slot_range: assert property (@(posedge clk) disable iff (!rst_n) slot_q <= SLOT_W'(N-1));
  // Ready follows the last slot by exactly one cycle.
  a_ready_after_last: assert property (@(posedge clk) disable iff (!rst_n) last |=> ready_o);

endmodule
