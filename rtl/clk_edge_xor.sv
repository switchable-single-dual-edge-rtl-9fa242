`timescale 1ns/1ps
// clk_edge_xor: the edge-select gate, clk_sw = clk XOR m.
//
// A flip-flop clocked from clk_sw captures on the rising edge of clk while
// m = 0 and on the falling edge of clk while m = 1, because the XOR then
// inverts the clock. This single gate is the only hardware the switchable
// scheme adds to an ordinary pipeline; one gate may drive every switchable
// flip-flop of a register level.
//
// Interface: clk (system clock), m (mode: 0 single edge, 1 dual edge),
// clk_sw (clock for the switchable flip-flops).
// Timing: purely combinational. Changing m inverts clk_sw, so a change of m
// can itself make a rising edge on clk_sw: 0->1 while clk is low, or 1->0
// while clk is high. Change m while clk is high (0->1) or low (1->0) to
// avoid an extra capture; the paper does not discuss this.
module clk_edge_xor (
  input  logic clk,
  input  logic m,
  output logic clk_sw
);

  assign clk_sw = clk ^ m;

endmodule
