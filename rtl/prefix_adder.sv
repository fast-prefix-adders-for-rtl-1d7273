// prefix_adder -- N-bit binary adder whose carry network is shaped by the
// arrival times of its input bits.
//
// s = a + b, N+1 result bits, no carry input. Bit i forms
// g_i = a_i & b_i and p_i = a_i ^ b_i; a prefix_graph built for the
// per-bit arrival times T computes every carry c_{i+1} = g of the prefix
// z_i o ... o z_1; the sum bits are s_i = c_i ^ p_i (c_1 = 0) and the
// top bit is the last carry. T holds TW = 8 bits per bit position, bit 0
// of the operands in the lowest field; it describes when the operand bits
// become valid (for instance the column profile of a multiplier's
// reduction tree), so the same RTL yields a different carry network for
// every profile. The default is the 25-bit instance with uniform arrival
// times. Everything follows the construction except the choices listed in
// prefix_graph and carry_tree. Purely combinational: outputs settle in the
// logic delay of the network, there is no clock or handshake.
module prefix_adder
  import pfx_pkg::*;
#(
  parameter int      N     = 25,
  parameter at_vec_t T     = '0,
  parameter int      GAMMA = 3
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N:0]   s
);

  gp_t [N-1:0] z;  // per-bit generate / propagate
  gp_t [N-1:0] c;  // c[i].g = carry into bit i+1

  for (genvar i = 0; i < N; i++) begin : g_bit
    assign z[i].g = a[i] & b[i];
    assign z[i].p = a[i] ^ b[i];
  end

  prefix_graph #(
    .N    (N),
    .T    (T),
    .GAMMA(GAMMA)
  ) u_graph (
    .z(z),
    .y(c)
  );

  assign s[0] = z[0].p;
  for (genvar i = 1; i < N; i++) begin : g_sum
    assign s[i] = z[i].p ^ c[i-1].g;
  end
  assign s[N] = c[N-1].g;

endmodule
