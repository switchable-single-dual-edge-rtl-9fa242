`timescale 1ns/1ps
// tb_sw_reg_pair: self-checking test of the switchable register pair.
// Clock period 4 ns (250 MHz). A serial stream, starting with the pattern
// 0 1 1 0 0, is shifted in with m = 0, then m = 1, then m = 0 again. An
// independent edge-by-edge model predicts qi and qi1: qi takes d at each
// rising edge; qi1 takes qi at the rising edge when m = 0 and at the falling
// edge when m = 1. A single 1 in a stream of 0s measures the delay from the
// capturing rising edge to qi1: one period (4 ns) with m = 0, half a period
// (2 ns) with m = 1.
module tb_sw_reg_pair;
  logic clk = 1'b0, rst = 1'b0, m = 1'b0;
  logic d = 1'b0, qi, qi1;
  logic exp_qi = 1'b0, exp_qi1 = 1'b0;
  int checks = 0, failures = 0;
  int edges_m0 = 0, edges_m1 = 0;
  realtime t_cap, t_out;

  sw_reg_pair #(.WIDTH(1)) dut (.clk, .rst, .m, .d, .qi, .qi1);

  always #2 clk = ~clk;

  // reference model
  always @(clk) if (!rst) begin
    if (clk) begin
      if (!m) exp_qi1 <= exp_qi;
      exp_qi <= d;
      if (m) edges_m1++; else edges_m0++;
    end else if (m) begin
      exp_qi1 <= exp_qi;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t (qi=%0d qi1=%0d exp %0d %0d)", what, $time, qi, qi1, exp_qi, exp_qi1);
    end
  endtask

  // compare after every edge
  always @(posedge clk or negedge clk) if (!rst) begin
    #0.5 check(qi == exp_qi && qi1 == exp_qi1, "shift model");
  end

  task automatic stream(input int n);
    for (int i = 0; i < n; i++) begin
      @(posedge clk); #1 d = 1'($urandom);
    end
  endtask

  task automatic measure(input realtime expected);
    @(posedge clk); #1 d = 1'b0;
    repeat (3) @(posedge clk);
    #1 d = 1'b1;
    @(posedge clk); t_cap = $realtime;
    #1 d = 1'b0;
    @(posedge qi1); t_out = $realtime;
    check(t_out - t_cap == expected,
          $sformatf("capture-to-qi1 delay %0.1f ns, expected %0.1f ns", t_out - t_cap, expected));
  endtask

  initial begin
    logic [4:0] pat;
    rst = 1'b1;                  // rising edge of the asynchronous reset
    pat = 5'b01100;
    #1 check(qi == 1'b0 && qi1 == 1'b0, "reset");
    @(negedge clk); rst = 1'b0;
    // pattern 0,1,1,0,0 then random, single-edge mode
    for (int i = 4; i >= 0; i--) begin
      d = pat[i];
      @(posedge clk); #1;
    end
    stream(40);
    measure(4.0);
    // switch to dual edge while clk is high
    @(posedge clk); #1 m = 1'b1;
    stream(40);
    measure(2.0);
    // back to single edge while clk is low
    @(negedge clk); #1 m = 1'b0;
    stream(40);
    measure(4.0);
    check(edges_m0 > 0 && edges_m1 > 0, "both modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
