// tb_epe_fsm -- self-checking test of the processing-element state machine.
// Checks, cycle by cycle, load / write / shift / slot / ready for an isolated
// event (ready N+1 cycles after valid), back-to-back events every N cycles,
// and that an event offered too early is dropped with an overrun pulse.
module tb_epe_fsm;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, valid = 0;
  logic load, shift, wr_en, ready, overrun;
  logic [2:0] slot;
  int checks = 0, failures = 0;

  epe_fsm #(.N(N)) dut (.clk, .rst_n, .valid_i(valid), .load_o(load), .shift_o(shift),
                        .wr_en_o(wr_en), .slot_o(slot), .ready_o(ready), .overrun_o(overrun));
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // Reference schedule: valid_at[] lists the cycles valid is driven.
  // Expected per cycle: busy slot, load, ready, overrun.
  task automatic run(int valid_at[$], int cycles, int exp_ready[$], int exp_over[$]);
    int busy_slot = -1;   // slot being written this cycle, -1 idle
    int start;
    bit acc;
    for (int t = 0; t < cycles; t++) begin
      valid = 1'b0;
      foreach (valid_at[i]) if (valid_at[i] == t) valid = 1'b1;
      #1;
      acc = valid && (busy_slot < 0 || busy_slot == N-1);
      chk(load == acc, $sformatf("load t=%0d", t));
      chk(wr_en == (busy_slot >= 0), $sformatf("wr_en t=%0d", t));
      if (busy_slot >= 0) chk(slot == 3'(busy_slot), $sformatf("slot t=%0d", t));
      chk(shift == (busy_slot >= 0 && !acc), $sformatf("shift t=%0d", t));
      chk(ready == (exp_ready.size() > 0 && exp_ready[0] == t), $sformatf("ready t=%0d", t));
      if (exp_ready.size() > 0 && exp_ready[0] == t) void'(exp_ready.pop_front());
      chk(overrun == (exp_over.size() > 0 && exp_over[0] == t), $sformatf("overrun t=%0d", t));
      if (exp_over.size() > 0 && exp_over[0] == t) void'(exp_over.pop_front());
      @(posedge clk);
      if (acc) busy_slot = 0;
      else if (busy_slot == N-1) busy_slot = -1;
      else if (busy_slot >= 0) busy_slot++;
      #1;
    end
    valid = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // isolated event: valid at 0, ready at N+1
    run('{0}, 14, '{N+1}, '{});
    // back-to-back: valid at 0, 8, 16 -> ready at 9, 17, 25
    run('{0, 8, 16}, 28, '{9, 17, 25}, '{});
    // early event at 3 is dropped
    run('{0, 3, 8}, 20, '{9, 17}, '{3});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
