// tb_stream_converter -- self-checking test of the N:1 stream converter.
// Loads random sensor pairs, shifts them out and checks the order, the
// zero fill behind the last entry, load priority over shift and reset.
module tb_stream_converter;
  import gb_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, load = 0, shift = 0;
  sensor_t a_i [N], b_i [N], a_o, b_o;
  sensor_t ea [N], eb [N];
  int checks = 0, failures = 0;

  stream_converter #(.N(N)) dut (.clk, .rst_n, .load_i(load), .shift_i(shift),
                                 .a_i, .b_i, .a_o, .b_o);
  always #5 clk = ~clk;

  task automatic chk(sensor_t ga, sensor_t gb, sensor_t xa, sensor_t xb, string what);
    checks++;
    if (ga !== xa || gb !== xb) begin
      failures++;
      $display("FAIL %s: got %h/%h exp %h/%h", what, ga, gb, xa, xb);
    end
  endtask

  task automatic fill();
    for (int k = 0; k < N; k++) begin
      a_i[k] = sensor_t'($urandom); b_i[k] = sensor_t'($urandom);
      ea[k] = a_i[k]; eb[k] = b_i[k];
    end
  endtask

  initial begin
    fill();
    repeat (2) @(posedge clk);
    #1 chk(a_o, b_o, '0, '0, "reset");
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      fill();
      load = 1; @(posedge clk); #1 load = 0;
      for (int k = 0; k < N; k++) begin
        chk(a_o, b_o, ea[k], eb[k], $sformatf("slot %0d", k));
        shift = 1; @(posedge clk); #1 shift = 0;
      end
      chk(a_o, b_o, '0, '0, "drained");
      // hold without shift
      @(posedge clk); #1 chk(a_o, b_o, '0, '0, "hold");
    end
    // load has priority over shift
    fill();
    load = 1; shift = 1; @(posedge clk); #1 load = 0; shift = 0;
    chk(a_o, b_o, ea[0], eb[0], "load priority");
    shift = 1; @(posedge clk); #1 shift = 0;
    chk(a_o, b_o, ea[1], eb[1], "after priority");
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
