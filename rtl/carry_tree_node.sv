// carry_tree_node -- one subtree of the Fibonacci-split prefix carry tree.
//
// Computes y = z[N-1] o ... o z[0] for N inputs. With one input it is a
// wire. Otherwise pfx_pkg::split() decides, from the leaf counts of the
// Fibonacci tree of index K, how many low inputs NR go to the right
// subtree (which has F(K-2) leaves) and how many go left (F(K-1) leaves);
// the node instantiates itself for both parts and joins them with one
// prefix_gate, left part as the higher operand. CLO and CHI are the leaf
// counts still owned by the lowest and highest input of this subproblem
// (an input cut by an earlier split holds only part of its share).
// Instantiated only by carry_tree, which normalises the arrival times.
// Combinational; the logic delay of the result is pfx_pkg::tree_delay().
//
// Lint note: verilator -Wall, when this self-instantiating module is
// itself elaborated as the top, reports y_right and y_left as undriven.
// They are driven by the output ports of u_right and u_left; the report
// appears for any module that instantiates itself and assigns a local
// signal from the recursive instance. It does not appear when the node is
// elaborated under carry_tree, and every output is checked in simulation.
module carry_tree_node
  import pfx_pkg::*;
#(
  // defaults: the root of the worked example t = 3, 2, 3, 1, 0
  // (leaf counts 7, 4, 7, 2, 1; 21 leaves, Fibonacci index 8)
  parameter int      N   = 5,
  parameter int      K   = 8,
  parameter at_vec_t TN  = at_vec_t'({8'd0, 8'd1, 8'd3, 8'd2, 8'd3}),
  parameter longint  CLO = 7,
  parameter longint  CHI = 1
) (
  input  gp_t [N-1:0] z,
  output gp_t         y
);

  if (N == 1) begin : g_leaf
    assign y = z[0];
  end else begin : g_split
    localparam split_t S  = split(TN, N, K, CLO, CHI);
    localparam int     NR = int'(S.nr);

    gp_t y_right, y_left;

    carry_tree_node #(
      .N  (NR),
      .K  (k_right(K)),
      .TN (TN),
      .CLO(CLO),
      .CHI(longint'(S.rhi))
    ) u_right (
      .z(z[NR-1:0]),
      .y(y_right)
    );

    carry_tree_node #(
      .N  (N - NR),
      .K  (k_left(K)),
      .TN (TN >> (NR * TW)),
      .CLO(longint'(S.llo)),
      .CHI(CHI)
    ) u_left (
      .z(z[N-1:NR]),
      .y(y_left)
    );

    prefix_gate u_gate (
      .zl(y_left),
      .zr(y_right),
      .y (y)
    );
  end

endmodule
