`timescale 1ns/1ps
// tb_clk_edge_xor: checks the edge-select gate exhaustively (clk_sw follows
// clk with m = 0 and is its inverse with m = 1), then checks in time that a
// flip-flop-style edge counter on clk_sw sees rising clk edges with m = 0 and
// falling clk edges with m = 1.
module tb_clk_edge_xor;
  logic clk = 1'b0, m = 1'b0, clk_sw;
  int checks = 0, failures = 0;
  int sw_edges = 0;
  realtime last_sw_edge;

  clk_edge_xor dut (.clk, .m, .clk_sw);

  always @(posedge clk_sw) begin
    sw_edges++;
    last_sw_edge = $realtime;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int v = 0; v < 4; v++) begin
      {m, clk} = 2'(v);
      #1 check(clk_sw == (v == 1 || v == 2), $sformatf("truth table m=%0d clk=%0d", m, clk));
    end
    // timing: m = 0, capture edge coincides with rising clk
    clk = 1'b0; m = 1'b0; #1;
    for (int n = 0; n < 5; n++) begin
      #2 clk = 1'b1; #0.1 check(last_sw_edge == $realtime - 0.1, "m=0: clk_sw rises with clk");
      #1.9 clk = 1'b0; #0.1 check(last_sw_edge != $realtime - 0.1, "m=0: no edge at falling clk");
      #1.9;
    end
    // switch to m = 1 while clk is high: no extra edge
    clk = 1'b1; #1 begin int prev_v; prev_v = sw_edges; m = 1'b1; #0.1 check(sw_edges == prev_v, "m 0->1 while clk high makes no edge"); end
    for (int n = 0; n < 5; n++) begin
      #1.9 clk = 1'b0; #0.1 check(last_sw_edge == $realtime - 0.1, "m=1: clk_sw rises at falling clk");
      #1.9 clk = 1'b1; #0.1 check(last_sw_edge != $realtime - 0.1, "m=1: no edge at rising clk");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
