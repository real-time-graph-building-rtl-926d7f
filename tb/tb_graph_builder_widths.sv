// tb_graph_builder_widths -- the edge-width series: the graph builder with
// 4-bit and 16-bit coordinates and distance (40-bit and 100-bit edges), each
// run end to end on a 6 x 10 sector by tb_gb_env.  The 60-bit case is
// tb_graph_builder.
module tb_graph_builder_widths;
  bit d4, d16;
  int c4, c16, f4, f16;
  tb_gb_env #(.W(10), .CW(4),  .DW(4))  env4  (.done(d4),  .checks(c4),  .failures(f4));
  tb_gb_env #(.W(10), .CW(16), .DW(16)) env16 (.done(d16), .checks(c16), .failures(f16));

  initial begin
    wait (d4 && d16);
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16, f4 + f16);
    $finish;
  end
  initial begin
    #50000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c4 + c16, f4 + f16 + 1);
    $finish;
  end
endmodule
