// tb_edge_pe -- self-checking test of one edge processing element.
// An element of the default sector (edges 1296..1303) gets random wire
// readings; after ready every edge register must hold {A, B, static
// features} with active = both hits.  Checks ready N+1 cycles after valid,
// back-to-back events every N cycles, an early event being dropped with an
// overrun pulse, and the last, partly used element (unused slots inactive).
module tb_edge_pe;
  import gb_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 6, W = 163, N = 8, CW = 8, DW = 8;
  localparam int SW = 4*CW + DW, EW = 20 + SW;
  localparam int BASE = 1296, BASE_LAST = 4544;
  logic clk = 0, rst_n = 0, valid = 0;
  sensor_t a [N], b [N];
  logic [EW-1:0] edges [N], edges_l [N];
  logic [N-1:0] act, act_l;
  logic ready, ready_l, over, over_l;
  int checks = 0, failures = 0;
  int n_act = 0, n_inact = 0;
  ends_t list[$];

  edge_pe #(.N(N), .BASE(BASE), .N_LAYERS(L), .N_WIRES(W), .COORD_W(CW), .DIST_W(DW)) dut (
    .clk, .rst_n, .valid_i(valid), .a_i(a), .b_i(b), .edges_o(edges), .active_o(act),
    .ready_o(ready), .overrun_o(over));
  edge_pe #(.N(N), .BASE(BASE_LAST), .N_LAYERS(L), .N_WIRES(W), .COORD_W(CW), .DIST_W(DW)) dut_l (
    .clk, .rst_n, .valid_i(valid), .a_i(a), .b_i(b), .edges_o(edges_l), .active_o(act_l),
    .ready_o(ready_l), .overrun_o(over_l));
  always #5 clk = ~clk;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic check_edges(sensor_t sa [N], sensor_t sb [N]);
    logic [79:0] f;
    for (int n = 0; n < N; n++) begin
      f = feat(list[BASE+n].va, list[BASE+n].vb, W, CW, DW);
      chk(edges[n] == {sa[n], sb[n], f[SW-1:0]}, $sformatf("edge %0d", n));
      chk(act[n] == (sa[n].hit & sb[n].hit), $sformatf("active %0d", n));
      if (act[n]) n_act++; else n_inact++;
      if (BASE_LAST + n < list.size()) begin
        f = feat(list[BASE_LAST+n].va, list[BASE_LAST+n].vb, W, CW, DW);
        chk(edges_l[n] == {sa[n], sb[n], f[SW-1:0]} && act_l[n] == (sa[n].hit & sb[n].hit),
            $sformatf("last element edge %0d", n));
      end else begin
        chk(act_l[n] == 1'b0, $sformatf("unused slot %0d inactive", n));
      end
    end
  endtask

  sensor_t sa [N], sb [N];
  // Drive an event in this cycle (called right after a clock edge).
  task automatic drive();
    for (int n = 0; n < N; n++) begin
      sa[n] = sensor_t'($urandom); sb[n] = sensor_t'($urandom);
      a[n] = sa[n]; b[n] = sb[n];
    end
    valid = 1;
  endtask

  initial begin
    int t;
    build_edges(L, W, list);
    for (int n = 0; n < N; n++) begin a[n] = '0; b[n] = '0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int ev = 0; ev < 30; ev++) begin
      sensor_t ca [N], cb [N];
      drive();
      ca = sa; cb = sb;
      @(posedge clk); #1 valid = 0;
      // scramble the inputs: the element must have captured them
      for (int n = 0; n < N; n++) begin a[n] = sensor_t'($urandom); b[n] = sensor_t'($urandom); end
      t = 1;
      while (!ready && t < 20) begin @(posedge clk); #1 t++; end
      chk(t == N+1, $sformatf("latency %0d cycles", t));
      chk(ready_l == ready, "lockstep");
      check_edges(ca, cb);
      @(posedge clk); #1;
    end
    // back-to-back: events at cycles 0 and N
    begin
      sensor_t c1a [N], c1b [N], c2a [N], c2b [N];
      drive(); c1a = sa; c1b = sb;
      @(posedge clk); #1 valid = 0;
      repeat (N-1) @(posedge clk);
      #1 drive(); c2a = sa; c2b = sb;
      @(posedge clk); #1 valid = 0;
      chk(ready, "ready of first back-to-back event");
      check_edges(c1a, c1b);
      repeat (N-1) @(posedge clk);
      #1 chk(!ready, "no early ready");
      @(posedge clk); #1;
      chk(ready, "ready of second back-to-back event");
      check_edges(c2a, c2b);
    end
    // early event (3 cycles after) is dropped
    begin
      sensor_t c1a [N], c1b [N];
      @(posedge clk); #1;
      drive(); c1a = sa; c1b = sb;
      @(posedge clk); #1 valid = 0;
      repeat (2) @(posedge clk);
      #1 drive();
      #1 chk(over == 1'b1, "overrun flagged");
      @(posedge clk); #1 valid = 0;
      #1 chk(over == 1'b0, "overrun is a pulse");
      t = 4;
      while (!ready && t < 20) begin @(posedge clk); #1 t++; end
      chk(t == N+1, "dropped event does not restart the element");
      check_edges(c1a, c1b);
    end
    chk(n_act > 0 && n_inact > 0, "active and inactive edges seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
