// tb_edge_lut -- self-checking test of the static lookup table.
// Three tables of the default 6 x 163 sector (one straddling the
// boundary between two edge groups, one a layer-pair boundary, and the last, partly used
// table) are read at every address and compared with coordinates and
// distances recomputed from the reference candidate list.
module tb_edge_lut;
  import gb_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 6, W = 163, N = 8, CW = 8, DW = 8, SW = 4*CW + DW;
  localparam int B0 = 2592, B1 = 1296, B2 = 4544;
  logic [2:0] addr;
  logic [SW-1:0] f0, f1, f2;
  logic p0, p1, p2;
  int checks = 0, failures = 0;
  ends_t list[$];

  edge_lut #(.N(N), .BASE(B0), .N_LAYERS(L), .N_WIRES(W), .COORD_W(CW), .DIST_W(DW))
    u0 (.addr_i(addr), .feat_o(f0), .present_o(p0));
  edge_lut #(.N(N), .BASE(B1), .N_LAYERS(L), .N_WIRES(W), .COORD_W(CW), .DIST_W(DW))
    u1 (.addr_i(addr), .feat_o(f1), .present_o(p1));
  edge_lut #(.N(N), .BASE(B2), .N_LAYERS(L), .N_WIRES(W), .COORD_W(CW), .DIST_W(DW))
    u2 (.addr_i(addr), .feat_o(f2), .present_o(p2));

  task automatic chk(int base, logic [SW-1:0] f, logic p, int n);
    int e = base + n;
    logic [79:0] x;
    checks++;
    if (e < list.size()) begin
      x = feat(list[e].va, list[e].vb, W, CW, DW);
      if (!p || f !== x[SW-1:0]) begin
        failures++;
        $display("FAIL edge %0d (%0d-%0d): got %h/%b exp %h", e, list[e].va, list[e].vb, f, p, x[SW-1:0]);
      end
    end else if (p || f !== '0) begin
      failures++; $display("FAIL unused slot %0d present", e);
    end
  endtask

  initial begin
    build_edges(L, W, list);
    checks++;
    if (list.size() != 4545) begin failures++; $display("FAIL reference size %0d", list.size()); end
    for (int n = 0; n < N; n++) begin
      addr = 3'(n); #1;
      chk(B0, f0, p0, n);
      chk(B1, f1, p1, n);
      chk(B2, f2, p2, n);
    end
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
