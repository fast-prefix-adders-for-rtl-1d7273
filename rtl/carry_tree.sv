// carry_tree -- prefix carry bit circuit for non-uniform input arrival times.
//
// Given N pairs z[i] = (g_{i+1}, p_{i+1}) with arrival times T (TW bits per
// input, input 0 in the lowest field), computes
//   y = z[N-1] o z[N-2] o ... o z[0],
// i.e. y.g is the carry out of the N positions and y.p their group
// propagate. The circuit is a prefix tree of N-1 prefix_gates (3N-3 logic
// gates, fan-out at most two), shaped by the Fibonacci-tree splitting
// algorithm: every input owns F(t+3)-1 leaves of a Fibonacci tree of index
// K (the first Fibonacci number that covers all leaves), and the tree is
// cut recursively where that Fibonacci tree is cut (carry_tree_node). The
// logic delay of y is then at most KBOUND = K + (common shift of the
// arrival times), about log_phi(sum phi^t_i) + 4.
//
// Following the construction: the leaf counts, the split rule (boundary
// input goes right iff at least F(t_j+1) of its leaves fall right), and
// the rounding of early inputs to max(t) - GAMMA*ceil(log_phi N).
// Own choices: the proper-partition rule for degenerate splits, an 8-bit
// arrival-time field, GAMMA = 3 by default. Combinational, no clock.
// DELAY (exact gate-level delay of y.g for T) and KBOUND are localparams
// that a testbench may read.
module carry_tree
  import pfx_pkg::*;
#(
  parameter int      N     = 5,
  // t_1..t_5 = 3, 2, 3, 1, 0 (the worked example), t_1 in the lowest byte
  parameter at_vec_t T     = at_vec_t'({8'd0, 8'd1, 8'd3, 8'd2, 8'd3}),
  parameter int      GAMMA = 3
) (
  input  gp_t [N-1:0] z,
  output gp_t         y
);

  localparam at_vec_t TN     = normalize(T, N, GAMMA);
  localparam int      SHIFT  = norm_shift(T, N, GAMMA);
  localparam int      K      = fib_index(leaf_sum(TN, N));
  localparam int      KBOUND = K + SHIFT;
  localparam longint  CLO    = leaves(at_get(TN, 0));
  localparam longint  CHI    = leaves(at_get(TN, N - 1));
  // delay of the tree built below, evaluated on the original times
  localparam dly_t    D      = tree_delay(TN, T, N, K, CLO, CHI);
  localparam int      DELAY  = int'(D.dg);

  carry_tree_node #(
    .N  (N),
    .K  (K),
    .TN (TN),
    .CLO(CLO),
    .CHI(CHI)
  ) u_root (
    .z(z),
    .y(y)
  );

endmodule
