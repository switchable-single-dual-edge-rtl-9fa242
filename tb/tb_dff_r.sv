`timescale 1ns/1ps
// tb_dff_r: self-checking test of the rising-edge flip-flop.
// Drives random 8-bit data, checks that q follows d only at rising edges (not
// at falling edges) and that the asynchronous reset clears q between edges.
module tb_dff_r;
  localparam int W = 8;
  logic clk = 1'b0, rst = 1'b0;
  logic [W-1:0] d = '0, q, exp_q;
  int checks = 0, failures = 0;

  dff_r #(.WIDTH(W)) dut (.clk, .rst, .d, .q);

  always #2 clk = ~clk;

  task automatic check(input logic [W-1:0] got, input logic [W-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    rst = 1'b1;                  // rising edge of the asynchronous reset
    #1 check(q, '0, "reset value");
    @(negedge clk); rst = 1'b0;
    exp_q = '0;
    for (int n = 0; n < 200; n++) begin
      d = W'($urandom);
      @(posedge clk); exp_q = d;
      #0.5 check(q, exp_q, "capture at rising edge");
      d = W'($urandom);                         // change d while clk is high
      @(negedge clk);
      #0.5 check(q, exp_q, "hold across falling edge");
    end
    // asynchronous reset in the middle of a cycle
    d = 8'hA5; @(posedge clk); #0.5 check(q, 8'hA5, "load before reset");
    #0.5 rst = 1'b1; #0.2 check(q, '0, "asynchronous reset");
    @(posedge clk); #0.5 check(q, '0, "reset holds through an edge");
    rst = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
