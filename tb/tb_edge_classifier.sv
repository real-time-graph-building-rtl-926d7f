// tb_edge_classifier -- self-checking test of the edge classifier.
// Random sensor pairs and static features; checks the active flag
// (present and both hits) and the field-by-field layout of the edge vector.
module tb_edge_classifier;
  import gb_pkg::*;
  localparam int CW = 8, DW = 8, SW = 4*CW + DW, EW = 2*10 + SW;
  sensor_t a, b;
  logic [SW-1:0] feat;
  logic present, active;
  logic [EW-1:0] edge_v;
  int checks = 0, failures = 0;
  int n_act = 0;

  edge_classifier #(.COORD_W(CW), .DIST_W(DW)) dut (.a_i(a), .b_i(b), .feat_i(feat),
                                                   .present_i(present), .active_o(active),
                                                   .edge_o(edge_v));
  initial begin
    for (int i = 0; i < 2000; i++) begin
      a = sensor_t'($urandom); b = sensor_t'($urandom);
      feat = {$urandom, $urandom};
      present = ($urandom % 8) != 0;
      #1;
      checks++;
      if (active !== (present & a.hit & b.hit)) begin
        failures++; $display("FAIL active %b %b %b -> %b", present, a.hit, b.hit, active);
      end
      if (active) n_act++;
      checks++;
      if (edge_v[EW-1]      !== a.hit || edge_v[EW-2 -: 4] !== a.adc || edge_v[EW-6 -: 5] !== a.tdc ||
          edge_v[SW+9]      !== b.hit || edge_v[SW+8 -: 4] !== b.adc || edge_v[SW+4 -: 5] !== b.tdc ||
          edge_v[SW-1:0]    !== feat) begin
        failures++; $display("FAIL layout %h", edge_v);
      end
    end
    checks++;
    if (n_act == 0) begin failures++; $display("FAIL no active edge seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
