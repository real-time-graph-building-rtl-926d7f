// tb_graph_builder_full -- end-to-end test of the graph builder at its default size.
//
// The default 6 x 163 sector (978 wires, 4545 candidate edges, 569 elements,
// the last one partly used).  A scoreboard keeps every accepted event; on
// each valid_o the whole output register is compared with the reference:
// edge e = wires (va, vb) of the reference list, vector {reading va,
// reading vb, static features}, active = both hit.  Checked and counted:
//   - routing: an event whose readings are the wire indices,
//   - classification: random events with active and inactive edges,
//   - latency: valid_o exactly 10 cycles after valid_i,
//   - throughput: back-to-back events every 8 cycles,
//   - overrun: an event 3 cycles after another is dropped and flagged,
//   - hold: the output register is stable between events.
// A mechanism that never happened counts as a failure.
module tb_graph_builder_full;
  import gb_pkg::*;
  import tb_ref_pkg::*;
  localparam int L = 6, W = 163, N = 8, CW = 8, DW = 8;
  localparam int V = L*W;
  localparam int E = L*(W-1) + (L-1)*(2*W-1) + (L-2)*(3*W-2);
  localparam int SW = 4*CW + DW, EW = 20 + SW;
  localparam int LATENCY = 10;

  logic clk = 0, rst_n = 0, valid = 0;
  sensor_t s [V];
  logic [EW-1:0] eo [E];
  logic [E-1:0] ao;
  logic vo, over;

  graph_builder dut (
    .clk, .rst_n, .valid_i(valid), .sensors_i(s),
    .edges_o(eo), .active_o(ao), .valid_o(vo), .overrun_o(over));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_events = 0, n_active = 0, n_inactive = 0, n_b2b = 0, n_overrun = 0, n_hold = 0;
  int n_route = 0;
  longint cycle = 0;
  ends_t list[$];
  logic [SW-1:0] feats [E];

  typedef struct { sensor_t s [V]; longint t; } ev_t;
  ev_t pending[$];

  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  // Check the output register against one expected event.
  task automatic compare(ev_t ev);
    int bad = 0;
    for (int e = 0; e < E; e++) begin
      logic [EW-1:0] x;
      logic xa;
      x  = {ev.s[list[e].va], ev.s[list[e].vb], feats[e]};
      xa = ev.s[list[e].va].hit & ev.s[list[e].vb].hit;
      if (eo[e] !== x || ao[e] !== xa) begin
        bad++;
        if (bad < 4) $display("  edge %0d: got %h/%b exp %h/%b", e, eo[e], ao[e], x, xa);
      end
      if (xa) n_active++; else n_inactive++;
    end
    chk(bad == 0, $sformatf("graph of event sent at %0d (%0d edges wrong)", ev.t, bad));
  endtask

  // Scoreboard: every valid_o must match the oldest accepted event.
  always @(posedge clk) begin
    if (rst_n && vo) begin
      if (pending.size() == 0) chk(0, "valid_o without event");
      else begin
        automatic ev_t ev = pending.pop_front();
        chk(cycle - ev.t == LATENCY, $sformatf("latency %0d", cycle - ev.t));
        compare(ev);
        n_events++;
      end
    end
  end

  // Drive one event in the current cycle (called just after a clock edge).
  task automatic send(int mode, bit expect_drop);
    ev_t ev;
    for (int v = 0; v < V; v++) begin
      if (mode == 0) s[v] = sensor_t'(v);
      else begin
        s[v] = sensor_t'($urandom);
        s[v].hit = ($urandom % 100) < 40;
      end
      ev.s[v] = s[v];
    end
    ev.t = cycle;
    valid = 1;
    #1;
    chk(over == expect_drop, "overrun flag");
    if (expect_drop) n_overrun++;
    else pending.push_back(ev);
    @(posedge clk); #1 valid = 0;
  endtask

  initial begin
    build_edges(L, W, list);
    chk(list.size() == E, "reference edge count");
    foreach (list[e]) begin
      automatic logic [79:0] f = feat(list[e].va, list[e].vb, W, CW, DW);
      feats[e] = f[SW-1:0];
    end
    for (int v = 0; v < V; v++) s[v] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // routing: readings are the wire indices
    send(0, 0); n_route++;
    repeat (15) @(posedge clk); #1;
    // isolated random events
    for (int i = 0; i < 5; i++) begin
      send(1, 0);
      repeat (12 + i) @(posedge clk); #1;
    end
    // back-to-back stream at the full rate: one event every 8 cycles
    for (int i = 0; i < 6; i++) begin
      send(1, 0);
      if (i > 0) n_b2b++;
      repeat (N-1) @(posedge clk); #1;
    end
    repeat (12) @(posedge clk); #1;
    // overrun: second event 3 cycles after the first is dropped
    send(1, 0);
    repeat (2) @(posedge clk); #1;
    send(1, 1);
    repeat (14) @(posedge clk); #1;
    // hold: output unchanged while no event arrives
    begin
      logic [EW-1:0] snap [E];
      logic [E-1:0] snap_a;
      snap = eo; snap_a = ao;
      for (int v = 0; v < V; v++) s[v] = sensor_t'($urandom);
      repeat (20) @(posedge clk); #1;
      chk(snap == eo && snap_a == ao, "output register holds");
      n_hold++;
    end
    chk(pending.size() == 0, "every event produced a graph");
    $display("events=%0d route=%0d active_edges=%0d inactive_edges=%0d back_to_back=%0d overrun=%0d hold=%0d",
             n_events, n_route, n_active, n_inactive, n_b2b, n_overrun, n_hold);
    chk(n_route > 0 && n_active > 0 && n_inactive > 0 && n_b2b > 0 && n_overrun > 0 && n_hold > 0,
        "every mechanism exercised");
    chk(n_events == 13, "event count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
