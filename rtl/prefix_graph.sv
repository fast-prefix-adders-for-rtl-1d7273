// prefix_graph -- parallel prefix graph for non-uniform arrival times.
//
// Computes every prefix y[i] = z[i] o z[i-1] o ... o z[0], i = 0..N-1,
// by a recursive square-root decomposition:
//   1. split the N inputs into L = ceil(sqrt(N)) groups of consecutive
//      inputs (sizes differ by at most one, larger groups at the low end);
//   2. compute each group result Z_g with a carry_tree built for the
//      arrival times of that group ("best" circuit);
//   3. recursively, build a prefix_graph over each group without its top
//      input, and one over Z_0..Z_{L-2}, whose input arrival times are
//      the delays of the carry trees that produce them;
//   4. combine: in group g >= 1 every local prefix is joined with the
//      prefix of Z_{g-1} by one prefix_gate; the top input of group g < L-1
//      takes the Z-prefix directly; the top of the last group is
//      Z_{L-1} o (Z-prefix L-2).
// Group 0 needs no combining; y[0] is z[0] itself. N = 1 is a wire. Localparams DELAY (delay
// of the slowest output, an upper bound, see pfx_pkg::graph_delay) and
// GATES (prefix gates used) describe the result. The Z-prefix signals drive
// up to about sqrt(N) gates each; no fan-out repeaters are inserted.
// The decomposition and the combining follow the construction; the group
// sizes when N is not a square and the arrival times given to the Z
// recursion are this design's choices. Combinational, no clock.
//
// Lint note: verilator -Wall, when this self-instantiating module is
// itself elaborated as the top, reports zp and lp as undriven. Both are
// driven by the output port of the recursive prefix_graph instance (u_zrec
// and u_rec); the same report appears for any module that instantiates
// itself and assigns a local signal from the recursive instance, even
// with one-dimensional ports. It does not appear when prefix_graph is
// elaborated under prefix_adder, and every output is checked in simulation.
module prefix_graph
  import pfx_pkg::*;
#(
  parameter int      N     = 25,
  parameter at_vec_t T     = '0,
  parameter int      GAMMA = 3
) (
  input  gp_t [N-1:0] z,
  output gp_t [N-1:0] y
);

  // gate-level delay of the slowest output and number of prefix gates
  // (3 logic gates each), for testbenches and reports
  localparam int DELAY = graph_max_delay(T, N, GAMMA);
  localparam int GATES = graph_gates(N);

  if (N == 1) begin : g_wire
    assign y = z;
  end else begin : g_rec
    localparam int      L  = grp_count(N);
    localparam at_vec_t TZ = group_at(T, N, GAMMA);

    gp_t [L-1:0] zg;   // group results Z_g
    gp_t [L-2:0] zp;   // prefixes of Z_0..Z_{L-2}

    for (genvar g = 0; g < L; g++) begin : g_grp
      localparam int S0 = grp_start(N, g);
      localparam int SZ = grp_size(N, g);

      carry_tree #(
        .N    (SZ),
        .T    (T >> (S0 * TW)),
        .GAMMA(GAMMA)
      ) u_best (
        .z(z[S0+SZ-1:S0]),
        .y(zg[g])
      );

      if (SZ > 1) begin : g_local
        gp_t [SZ-2:0] lp;  // prefixes inside the group, top input excluded

        prefix_graph #(
          .N    (SZ - 1),
          .T    (T >> (S0 * TW)),
          .GAMMA(GAMMA)
        ) u_rec (
          .z(z[S0+SZ-2:S0]),
          .y(lp)
        );

        for (genvar i = 0; i < SZ - 1; i++) begin : g_out
          if (g == 0) begin : g_pass
            assign y[S0+i] = lp[i];
          end else begin : g_join
            prefix_gate u_join (
              .zl(lp[i]),
              .zr(zp[g-1]),
              .y (y[S0+i])
            );
          end
        end
      end

      if (g < L - 1) begin : g_top
        assign y[S0+SZ-1] = zp[g];
      end else begin : g_last
        prefix_gate u_last (
          .zl(zg[g]),
          .zr(zp[g-1]),
          .y (y[S0+SZ-1])
        );
      end
    end

    prefix_graph #(
      .N    (L - 1),
      .T    (TZ),
      .GAMMA(GAMMA)
    ) u_zrec (
      .z(zg[L-2:0]),
      .y(zp)
    );
  end

endmodule
