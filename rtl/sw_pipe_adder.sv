`timescale 1ns/1ps
// sw_pipe_adder: bit-skewed pipelined ripple-carry adder whose middle register
// level can be switched between single-edge and dual-edge operation.
//
// Structure (WIDTH = 4, as published). Bit slice i has one full adder. The
// carry from slice i-1 reaches slice i through one register, so slice i works
// one register level after slice i-1. To keep the data aligned, the operand
// bits A(i), B(i) pass through i registers before the adder of slice i, and
// its sum bit passes through WIDTH-1-i registers after it. All outputs
// therefore leave register level WIDTH-1 together; slice WIDTH-1's sum and the
// carry out are combinational from that level. Register level k (k = 1 ..
// WIDTH-1) is switchable (clocked by clk XOR m) when bit k-1 of SW_LEVELS is
// set. The default 3'b010 makes level 2 switchable, as published. Every
// register path is a reg_chain, which builds a rising-edge register followed
// by a switchable one as a sw_reg_pair and gives every switchable register its
// own XOR gate (five at the default size; they all compute clk ^ m).
//
//   level:      1        2 (switchable)    3
//   slice 0   s0       s0                s0         -> Sum(0)
//   slice 1   A1,B1,c1 s1               s1          -> Sum(1)
//   slice 2   A2,B2    A2,B2,c2         s2          -> Sum(2)
//   slice 3   A3,B3    A3,B3            A3,B3,c3    -> Sum(3), cout
//
// Latency, counted from the rising edge that captures a, b:
//   m = 0  all levels on rising edges: result after 2 clock periods;
//   m = 1  level 2 on the falling edge: result after 1 clock period.
// Throughput is one addition per clock in both modes. The carry out is this
// design's own addition, taken from the adder of the top slice; the
// asynchronous reset is also this design's choice.
//
// Interface: clk, rst (asynchronous, active high), m, a, b (WIDTH bits each,
// sampled at the rising edge of clk), sum (WIDTH bits), cout.
// Changing m while results are in flight drops or repeats one result; change
// m 0->1 while clk is high and 1->0 while clk is low so that the XOR output
// makes no extra edge (see clk_edge_xor).
module sw_pipe_adder #(
  parameter int unsigned         WIDTH     = 4,
  parameter logic [WIDTH-2:0]    SW_LEVELS = 3'b010
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             m,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  output logic [WIDTH-1:0] sum,
  output logic             cout
);

  localparam int unsigned LEVELS  = WIDTH - 1;
  localparam logic [31:0] SW_MASK = 32'(SW_LEVELS) << 1;   // bit k = level k

  logic [WIDTH-1:0] cin;   // registered carry into each slice
  logic [WIDTH-1:0] co;    // carry out of each slice's adder

  assign cin[0] = 1'b0;
  assign cout   = co[WIDTH-1];

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    logic a_i, b_i;   // operands at the slice's adder
    logic s_i;        // sum bit out of the slice's adder

    // operand registers, levels 1 .. i
    if (i == 0) begin : g_op0
      assign {a_i, b_i} = {a[i], b[i]};
    end else begin : g_op
      reg_chain #(.WIDTH(2), .FIRST(1), .LAST(i), .SW_MASK(SW_MASK)) u_op (
        .clk (clk),
        .rst (rst),
        .m   (m),
        .d   ({a[i], b[i]}),
        .q   ({a_i, b_i})
      );

      // carry register from slice i-1, at level i
      reg_chain #(.WIDTH(1), .FIRST(i), .LAST(i), .SW_MASK(SW_MASK)) u_c (
        .clk (clk),
        .rst (rst),
        .m   (m),
        .d   (co[i-1]),
        .q   (cin[i])
      );
    end

    full_adder u_fa (
      .a    (a_i),
      .b    (b_i),
      .cin  (cin[i]),
      .s    (s_i),
      .cout (co[i])
    );

    // sum registers, levels i+1 .. LEVELS
    if (i == LEVELS) begin : g_s0
      assign sum[i] = s_i;
    end else begin : g_s
      reg_chain #(.WIDTH(1), .FIRST(i + 1), .LAST(LEVELS), .SW_MASK(SW_MASK)) u_s (
        .clk (clk),
        .rst (rst),
        .m   (m),
        .d   (s_i),
        .q   (sum[i])
      );
    end
  end

endmodule
