// tb_graph_builder -- end-to-end test of the graph builder on a small sector.
//
// A 6 x 10 sector (60 wires, 261 candidate edges, 33 processing elements,
// the last one partly used) with the default 60-bit edges, run by the
// scoreboard environment tb_gb_env: routing, random events with active and
// inactive edges, 10-cycle latency, events every 8 cycles, overrun and
// output hold, each counted; a mechanism that never happens is a failure.
module tb_graph_builder;
  bit done;
  int checks, failures;
  tb_gb_env #(.W(10), .CW(8), .DW(8)) env (.done, .checks, .failures);

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #50000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
