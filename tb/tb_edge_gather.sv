// tb_edge_gather -- self-checking test of the output distribution network.
// A 6 x 10 sector (261 edges, 33 elements of 8, last one partly used).  The
// element registers are filled with random values and all ready lines
// raised; one cycle later every edge must sit at position e with its active
// flag, valid_o must pulse, and the register must hold while ready is low.
module tb_edge_gather;
  import gb_pkg::*;
  localparam int L = 6, W = 10, N = 8, EW = 60;
  localparam int E = 6*9 + 5*19 + 4*28;
  localparam int M = (E + N - 1) / N;
  logic clk = 0, rst_n = 0;
  logic [EW-1:0] pe_e [M][N];
  logic [N-1:0] pe_a [M];
  logic [M-1:0] rdy;
  logic [EW-1:0] eo [E];
  logic [E-1:0] ao;
  logic vo;
  int checks = 0, failures = 0;
  logic [EW-1:0] exp_e [E];
  logic [E-1:0] exp_a;

  edge_gather #(.N_LAYERS(L), .N_WIRES(W), .N(N), .EDGE_W(EW)) dut (
    .clk, .rst_n, .pe_edges_i(pe_e), .pe_active_i(pe_a), .pe_ready_i(rdy),
    .edges_o(eo), .active_o(ao), .valid_o(vo));
  always #5 clk = ~clk;

  task automatic randomise();
    for (int m = 0; m < M; m++) begin
      pe_a[m] = N'($urandom);
      for (int n = 0; n < N; n++) pe_e[m][n] = {$urandom, $urandom};
    end
  endtask

  task automatic compare(string what);
    for (int e = 0; e < E; e++) begin
      checks++;
      if (eo[e] != exp_e[e] || ao[e] != exp_a[e]) begin
        failures++;
        if (failures < 10) $display("FAIL %s edge %0d", what, e);
      end
    end
  endtask

  initial begin
    rdy = '0;
    randomise();
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    checks++; if (ao != '0 || vo) begin failures++; $display("FAIL reset"); end
    for (int ev = 0; ev < 10; ev++) begin
      randomise();
      for (int e = 0; e < E; e++) begin exp_e[e] = pe_e[e/N][e%N]; exp_a[e] = pe_a[e/N][e%N]; end
      rdy = '1;
      @(posedge clk); #1 rdy = '0;
      checks++; if (!vo) begin failures++; $display("FAIL valid_o"); end
      compare("capture");
      randomise();
      repeat (3) @(posedge clk);
      #1;
      checks++; if (vo) begin failures++; $display("FAIL valid_o not a pulse"); end
      compare("hold");
    end
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
