// tb_carry_tree -- checks the arrival-time driven prefix carry tree.
//
// Several instances with different arrival-time profiles are built. For
// each one the testbench
//   * applies random (and, for small N, all) input vectors and compares
//     y.g with a ripple evaluation of the carry and y.p with the AND of
//     all propagates;
//   * checks the circuit's logic delay (localparam DELAY) against the
//     lower bound log_phi(sum phi^t) - 1 and the construction's upper
//     bound floor(log_phi(sum phi^t)) + 4 + 2.1*N^(1-GAMMA), and checks
//     DELAY <= KBOUND, all bounds being computed here in real arithmetic;
//   * for the two small worked examples, checks the exact figures:
//     t = 3,2,3,1,0 needs a Fibonacci tree of index 8 and builds the chain
//     (((z5 o z4) o z3) o z2) o z1, whose gate delay is 7;
//     t = 0,1,0 gives index 5 and a delay of exactly 5;
//   * for the three 5-input profiles whose optimum delays are known
//     (0,0,0,0,0: 4; 4,3,2,1,0: 6; 0,1,2,3,4: 7) checks that the reported
//     delay is not below the optimum (a sanity check of DELAY itself).
// Instances run one after another; a watchdog ends a hung run.
module tb_carry_tree;
  import pfx_pkg::*;

  localparam int NCFG = 10;

  int checks = 0;
  int failures = 0;
  int done = 0;

  function automatic int cfg_n(int c);
    case (c)
      0: return 5;
      1: return 3;
      2: return 5;
      3: return 16;
      4: return 32;
      5: return 64;
      6: return 40;
      7: return 20;
      default: return 5;
    endcase
  endfunction

  function automatic int cfg_t(int c, int i);
    case (c)
      0: begin
        int v[5] = '{3, 2, 3, 1, 0};
        return v[i];
      end
      1: return (i == 1) ? 1 : 0;
      2: return 0;
      3: return i % 5;
      4: return ((i < 31 - i) ? i : 31 - i) / 2;      // multiplier-like hill
      5: return (i * 37) % 13;
      6: return (i == 0) ? 20 : 0;                     // one late low input
      7: return 10 * i;                                // very wide spread
      8: return 4 - i;                                 // 4, 3, 2, 1, 0
      default: return i;                               // 0, 1, 2, 3, 4
    endcase
  endfunction

  function automatic at_vec_t cfg_vec(int c);
    at_vec_t r = '0;
    for (int i = 0; i < cfg_n(c); i++) r[i*TW +: TW] = 8'(cfg_t(c, i));
    return r;
  endfunction

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int      NN = cfg_n(c);
    localparam at_vec_t TT = cfg_vec(c);

    gp_t [NN-1:0] z;
    gp_t          y;

    carry_tree #(.N(NN), .T(TT), .GAMMA(3)) u_ct (.z(z), .y(y));

    initial begin
      real    phi, w, lb, ub;
      logic   cg, cp;
      int     nvec;
      wait (done == c);
      // ---- delay checks
      phi = (1.0 + $sqrt(5.0)) / 2.0;
      w = 0.0;
      for (int i = 0; i < NN; i++) w += phi ** real'(cfg_t(c, i));
      lb = $ln(w) / $ln(phi) - 1.0;
      ub = $floor($ln(w) / $ln(phi) + 1e-9) + 4.0 + 2.1 * (real'(NN) ** (1.0 - 3.0));
      checks++;
      if (real'(u_ct.DELAY) < lb - 1e-9 || real'(u_ct.DELAY) > real'(u_ct.KBOUND)
          || real'(u_ct.KBOUND) > ub + 1e-9) begin
        failures++;
        $display("FAIL cfg %0d delay=%0d kbound=%0d lb=%f ub=%f", c, u_ct.DELAY, u_ct.KBOUND, lb, ub);
      end
      if (c == 0) begin
        checks++;
        if (u_ct.K != 8 || u_ct.DELAY != 7) begin
          failures++;
          $display("FAIL example 3,2,3,1,0: k=%0d delay=%0d (expected 8, 7)", u_ct.K, u_ct.DELAY);
        end
      end
      // optimum delays of the 5-input examples: no circuit can be faster
      if (c == 2 || c == 8 || c == 9) begin
        checks++;
        if (u_ct.DELAY < ((c == 2) ? 4 : (c == 8) ? 6 : 7)) begin
          failures++;
          $display("FAIL cfg %0d: delay %0d below the known optimum", c, u_ct.DELAY);
        end
      end
      if (c == 1) begin
        checks++;
        if (u_ct.K != 5 || u_ct.DELAY != 5) begin
          failures++;
          $display("FAIL example 0,1,0: k=%0d delay=%0d (expected 5, 5)", u_ct.K, u_ct.DELAY);
        end
      end
      $display("cfg %0d: N=%0d K=%0d KBOUND=%0d DELAY=%0d bounds [%f, %f]", c, NN, u_ct.K,
               u_ct.KBOUND, u_ct.DELAY, lb, ub);
      // ---- function checks
      nvec = (NN <= 5) ? (1 << (2 * NN)) : 3000;
      for (int v = 0; v < nvec; v++) begin
        for (int i = 0; i < NN; i++) begin
          if (NN <= 5) begin
            z[i].g = v[2*i];
            z[i].p = v[2*i+1];
          end else begin
            // bias towards propagate so that long carry chains occur
            z[i].p = ($urandom_range(0, 3) != 0);
            z[i].g = ($urandom_range(0, 3) == 0);
          end
        end
        #1;
        cg = 1'b0;
        cp = 1'b1;
        for (int i = 0; i < NN; i++) begin
          cg = z[i].g | (z[i].p & cg);
          cp = cp & z[i].p;
        end
        checks++;
        if (y.g !== cg || y.p !== cp) begin
          failures++;
          if (failures < 10) $display("FAIL cfg %0d vector %0d: y=%b%b exp=%b%b", c, v, y.g, y.p, cg, cp);
        end
      end
      done = c + 1;
    end
  end

  initial begin
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
