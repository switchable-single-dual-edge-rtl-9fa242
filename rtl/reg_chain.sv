`timescale 1ns/1ps
// reg_chain: the registers that one signal of the pipelined adder passes
// through, from register level FIRST to register level LAST (inclusive).
//
// Level k is switchable when SW_MASK[k] is set (bit k is level k; bit 0 is
// unused). Where a rising-edge level is followed by a switchable level the two
// registers are built as one sw_reg_pair, the switchable register pair. A
// switchable level on its own is a dff_r clocked through its own clk_edge_xor,
// and any other level is a dff_r on clk. Each switchable register thus has its
// own XOR gate, as in the switchable cell of the published adder.
//
// Interface: clk, rst (asynchronous, active high), m, d[WIDTH-1:0],
// q[WIDTH-1:0]. Requires 1 <= FIRST <= LAST <= 30. In a chain with no
// switchable level m is not used; lint reports it unused there.
// Timing: d is captured by level FIRST at its edge; q is the output of level
// LAST. Each rising-edge level captures at a rising edge of clk; each
// switchable level captures at the rising edge (m = 0) or the falling edge
// (m = 1) of clk.
module reg_chain #(
  parameter int unsigned WIDTH   = 1,
  parameter int unsigned FIRST   = 1,
  parameter int unsigned LAST    = 1,
  parameter logic [31:0] SW_MASK = 32'b0
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             m,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);

  logic [LAST:FIRST-1][WIDTH-1:0] st;   // st[k]: output of level k

  assign st[FIRST-1] = d;
  assign q           = st[LAST];

  for (genvar k = FIRST; k <= LAST; k++) begin : g_lvl
    localparam bit SW        = SW_MASK[k];
    localparam bit PAIR_HEAD = !SW && (k < LAST) && SW_MASK[k+1];
    localparam bit PAIR_TAIL = SW && (k > FIRST) && !SW_MASK[k-1];

    if (PAIR_HEAD) begin : g_pair
      sw_reg_pair #(.WIDTH(WIDTH)) u_pair (
        .clk (clk),
        .rst (rst),
        .m   (m),
        .d   (st[k-1]),
        .qi  (st[k]),
        .qi1 (st[k+1])
      );
    end else if (PAIR_TAIL) begin : g_tail
      // second register of the pair started at level k-1
    end else if (SW) begin : g_sw
      logic clk_sw;
      clk_edge_xor u_xor (
        .clk    (clk),
        .m      (m),
        .clk_sw (clk_sw)
      );
      dff_r #(.WIDTH(WIDTH)) u_ff (
        .clk (clk_sw),
        .rst (rst),
        .d   (st[k-1]),
        .q   (st[k])
      );
    end else begin : g_set
      dff_r #(.WIDTH(WIDTH)) u_ff (
        .clk (clk),
        .rst (rst),
        .d   (st[k-1]),
        .q   (st[k])
      );
    end
  end

endmodule
