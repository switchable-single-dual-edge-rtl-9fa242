`timescale 1ns/1ps
// sw_reg_pair: the switchable single/dual-edge register pair (two-stage
// shift register).
//
// Stage 1 is an ordinary rising-edge flip-flop. Stage 2 is the same kind of
// flip-flop, but its clock passes through clk_edge_xor, so it is clocked by
// clk XOR m:
//   m = 0  both stages capture on the rising edge: a single-edge shift
//          register, data moves one stage per clock period;
//   m = 1  stage 2 captures on the falling edge: data entering stage 1 at a
//          rising edge reaches qi1 half a period later, so the pair moves data
//          on both edges like a dual-edge-triggered register, without a
//          special dual-edge cell or a pulse generator.
// This structure and the mode table follow the paper.
//
// Interface: clk, rst (asynchronous, active high, this design's choice),
// m, d[WIDTH-1:0], qi (stage 1 output), qi1 (stage 2 output).
// Timing: qi takes d at the rising edge of clk. qi1 takes qi at the next
// rising edge (m = 0) or at the next falling edge (m = 1). With m = 1 the
// logic between the stages has half a period:
//   T/2 >= Tc2q + Tlogic_max + Tsetup - Txor.
module sw_reg_pair #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             m,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] qi,
  output logic [WIDTH-1:0] qi1
);

  logic clk_sw;

  clk_edge_xor u_xor (
    .clk    (clk),
    .m      (m),
    .clk_sw (clk_sw)
  );

  dff_r #(.WIDTH(WIDTH)) u_set (
    .clk (clk),
    .rst (rst),
    .d   (d),
    .q   (qi)
  );

  dff_r #(.WIDTH(WIDTH)) u_sw (
    .clk (clk_sw),
    .rst (rst),
    .d   (qi),
    .q   (qi1)
  );

endmodule
