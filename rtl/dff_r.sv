`timescale 1ns/1ps
// dff_r: rising-edge D flip-flop, WIDTH bits wide, with asynchronous
// active-high reset to zero.
//
// This is the storage cell of the whole design. Clocked straight from the
// system clock it is the ordinary single-edge-triggered (SET) register. Clocked
// from the output of clk_edge_xor it becomes the switchable-edge register: with
// M = 0 it still captures on the rising edge of the system clock, with M = 1 on
// the falling edge. The switchable cell drawn as a master latch and a slave
// latch with an inverted clock is exactly a master-slave flip-flop, so it is
// written here as an always_ff rather than as two latches.
//
// Interface: clk, rst (asynchronous, active high), d[WIDTH-1:0], q[WIDTH-1:0].
// Timing: q takes d on every rising edge of clk; rst clears q at once.
// The reset is this design's own choice; the cell itself follows the paper.
module dff_r #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) q <= '0;
    else     q <= d;
  end

endmodule
