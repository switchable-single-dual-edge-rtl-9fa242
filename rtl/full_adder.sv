`timescale 1ns/1ps
// full_adder: one-bit full adder, the "+" cell of each bit slice of the
// pipelined parallel adder.
//
// s = a ^ b ^ cin, cout = majority(a, b, cin). Purely combinational.
// The paper only draws the cell; its gate-level form here is the textbook one.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);

  assign s    = a ^ b ^ cin;
  assign cout = (a & b) | (cin & (a ^ b));

endmodule
