`timescale 1ns/1ps
// tb_sw_pipe_adder: end-to-end test of the switchable pipelined adder at its
// default size (4 bits, level 2 switchable).
//
// The adder is fed one operand pair per clock. A reference model keeps the
// operands captured at every rising edge and expects {cout, sum} = a + b of
// the pair captured 2 edges earlier with m = 0, 1 edge earlier with m = 1.
// Results are compared after every rising edge, and after every falling edge
// to check that the outputs hold there. For three edges after a mode switch
// the stream is not compared (one result is dropped or repeated there).
//
// Phases: reset; the operand sequence of the published waveform
// (a = 1, 2, 3, ...; b = a with bit 3 inverted when a is odd); directed
// latency measurements in both modes; random operands with random mode
// switches. Every mechanism is counted and must occur: m = 0 results,
// m = 1 results, switches 0->1 and 1->0, a carry out, and latency 2 and 1.
module tb_sw_pipe_adder;
  localparam int W = 4;
  logic clk = 1'b0, rst = 1'b0, m = 1'b0;
  logic [W-1:0] a = '0, b = '0, sum;
  logic cout;
  int checks = 0, failures = 0;

  int hist[$];           // a + b captured at each rising edge since reset
  int settle = 0;        // edges left prev_v the stream is compared again
  int n_m0 = 0, n_m1 = 0, n_sw01 = 0, n_sw10 = 0, n_cout = 0, n_skip = 0;
  int n_lat2 = 0, n_lat1 = 0;

  sw_pipe_adder dut (.clk, .rst, .m, .a, .b, .sum, .cout);

  always #2 clk = ~clk;   // 250 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t: m=%0d got %0d", what, $time, m, {cout, sum});
    end
  endtask

  // reference model and stream comparison
  always @(posedge clk) if (!rst) begin
    int lat, exp_v;
    hist.push_back(int'(a) + int'(b));
    lat = m ? 1 : 2;
    #0.5;
    if (settle > 0) begin
      settle--;
      n_skip++;
    end else if (hist.size() > lat) begin
      exp_v = hist[hist.size() - 1 - lat];
      check({cout, sum} == (W+1)'(exp_v), "stream result");
      if (m) n_m1++; else n_m0++;
      if (cout) n_cout++;
    end
  end

  always @(negedge clk) if (!rst) begin
    logic [W:0] prev_v;
    prev_v = {cout, sum};
    #1.5 check({cout, sum} == prev_v, "outputs hold across the falling edge");
  end

  task automatic drive(input logic [W-1:0] na, input logic [W-1:0] nb);
    @(posedge clk); #1 a = na; b = nb;
  endtask

  task automatic set_mode(input logic nm);
    if (nm == m) return;
    if (nm) begin
      @(posedge clk); #1 m = 1'b1; n_sw01++;     // 0 -> 1 while clk is high
    end else begin
      @(negedge clk); #1 m = 1'b0; n_sw10++;     // 1 -> 0 while clk is low
    end
    settle = 3;
  endtask

  // one tagged addition in a stream of zeros: count rising edges from the
  // capturing edge until the sum appears
  task automatic measure_latency(input int expected);
    int edges;
    repeat (4) drive('0, '0);
    drive(4'd9, 4'd12);                  // 21 = carry out + 0101
    @(posedge clk);                      // the edge that captures 9 + 12
    #1 a = '0; b = '0;
    edges = 0;
    do begin
      @(posedge clk); #0.5 edges++;
    end while ({cout, sum} != 5'd21 && edges < 6);
    check(edges == expected, $sformatf("latency %0d clock periods, expected %0d", edges, expected));
    if (edges == 2) n_lat2++;
    if (edges == 1) n_lat1++;
  endtask

  initial begin
    rst = 1'b1;                  // rising edge of the asynchronous reset
    #1 check(sum == '0 && cout == 1'b0, "reset clears the outputs");
    @(negedge clk); rst = 1'b0;

    // published waveform sequence, dual-edge mode first, then single-edge
    set_mode(1'b1);
    for (int i = 1; i <= 18; i++) begin
      automatic logic [W-1:0] va = W'(i);
      drive(va, va ^ (va[0] ? 4'b1000 : 4'b0000));
    end
    set_mode(1'b0);
    for (int i = 1; i <= 18; i++) begin
      automatic logic [W-1:0] va = W'(i);
      drive(va, va ^ (va[0] ? 4'b1000 : 4'b0000));
    end

    measure_latency(2);
    set_mode(1'b1);
    measure_latency(1);
    set_mode(1'b0);
    measure_latency(2);

    // random stream with random mode switches
    for (int i = 0; i < 3000; i++) begin
      if ($urandom_range(0, 39) == 0) set_mode(~m);
      drive(W'($urandom), W'($urandom));
    end
    repeat (4) drive('0, '0);

    check(n_m0 > 0,   "single-edge results compared");
    check(n_m1 > 0,   "dual-edge results compared");
    check(n_sw01 > 0, "switch to dual edge happened");
    check(n_sw10 > 0, "switch to single edge happened");
    check(n_cout > 0, "carry out happened");
    check(n_lat2 > 0 && n_lat1 > 0, "both latencies measured");
    $display("mechanisms: m0_results=%0d m1_results=%0d switch01=%0d switch10=%0d cout=%0d skipped=%0d latency2=%0d latency1=%0d",
             n_m0, n_m1, n_sw01, n_sw10, n_cout, n_skip, n_lat2, n_lat1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
