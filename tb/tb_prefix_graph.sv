// tb_prefix_graph -- checks every prefix output of the parallel prefix graph.
//
// Instances cover the recursion's corner cases (N = 1, 2, 3, 4, a
// non-square N = 10, N = 26 with groups of unequal size) and the 25-input
// case with uniform and with non-uniform arrival times, plus a 64-input
// multiplier-like profile. Each gets random (g, p) vectors biased towards
// propagate, so that carries cross group boundaries, and every output
// y[i] is compared with a ripple evaluation of z[i] o ... o z[0]. The
// logic delay of the slowest output (DELAY) must lie between the lower
// bound log_phi(sum phi^t) - 1 and log_phi(sum phi^t) + 5 log2 log2 N + 4.5,
// and the number of prefix gates (GATES) must not exceed 2 N log2 log2 N
// (both for N >= 3). The number of vectors where a carry crossed from one sqrt-group into the
// next is counted and must be non-zero for every instance with N > 3.
module tb_prefix_graph;
  import pfx_pkg::*;

  localparam int NCFG = 9;

  int checks = 0;
  int failures = 0;
  int done = 0;

  function automatic int cfg_n(int c);
    case (c)
      0: return 25;
      1: return 1;
      2: return 2;
      3: return 3;
      4: return 4;
      5: return 10;
      6: return 26;
      7: return 25;
      default: return 64;
    endcase
  endfunction

  function automatic int cfg_t(int c, int i);
    case (c)
      7: return (i * 7) % 5;
      8: return ((i < 63 - i) ? i : 63 - i) / 3;
      5: return 9 - i;
      default: return 0;
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
    gp_t [NN-1:0] y;

    prefix_graph #(.N(NN), .T(TT)) u_pg (.z(z), .y(y));

    initial begin
      logic cg, cp;
      int   nvec, ncross, gsz;
      bit   crossed;
      wait (done == c);
      nvec  = (NN <= 4) ? (1 << (2 * NN)) : 4000;
      ncross = 0;
      gsz   = grp_size(NN, 0);
      for (int v = 0; v < nvec; v++) begin
        for (int i = 0; i < NN; i++) begin
          if (NN <= 4) begin
            z[i].g = v[2*i];
            z[i].p = v[2*i+1];
          end else begin
            z[i].p = ($urandom_range(0, 4) != 0);
            z[i].g = ($urandom_range(0, 3) == 0);
          end
        end
        #1;
        cg = 1'b0;
        cp = 1'b1;
        crossed = 1'b0;
        for (int i = 0; i < NN; i++) begin
          if (i == gsz && cg && z[i].p && !z[i].g) crossed = 1'b1;
          cg = z[i].g | (z[i].p & cg);
          cp = cp & z[i].p;
          checks++;
          if (y[i].g !== cg || y[i].p !== cp) begin
            failures++;
            if (failures < 10) $display("FAIL cfg %0d vector %0d bit %0d: y=%b%b exp=%b%b", c, v, i,
                                        y[i].g, y[i].p, cg, cp);
          end
        end
        if (crossed) ncross++;
      end
      if (NN > 3) begin
        checks++;
        if (ncross == 0) begin
          failures++;
          $display("FAIL cfg %0d: no carry crossed a group boundary", c);
        end
      end
      // size and delay guarantees of the construction
      if (NN >= 3) begin
        real phi, w, llog, dub, gub;
        phi  = (1.0 + $sqrt(5.0)) / 2.0;
        w    = 0.0;
        for (int i = 0; i < NN; i++) w += phi ** real'(cfg_t(c, i));
        llog = $ln($ln(real'(NN)) / $ln(2.0)) / $ln(2.0);
        dub  = $ln(w) / $ln(phi) + 5.0 * llog + 4.5 + 2.1 * (real'(NN) ** (1.0 - 3.0));
        gub  = 2.0 * real'(NN) * llog;
        checks += 2;
        if (real'(u_pg.DELAY) > dub + 1e-9 || real'(u_pg.DELAY) < $ln(w) / $ln(phi) - 1.0) begin
          failures++;
          $display("FAIL cfg %0d: delay %0d outside [%f, %f]", c, u_pg.DELAY,
                   $ln(w) / $ln(phi) - 1.0, dub);
        end
        if (real'(u_pg.GATES) > gub + 1e-9) begin
          failures++;
          $display("FAIL cfg %0d: %0d prefix gates, bound %f", c, u_pg.GATES, gub);
        end
        $display("cfg %0d: delay %0d (bound %f), prefix gates %0d (bound %f)", c, u_pg.DELAY,
                 dub, u_pg.GATES, gub);
      end
      $display("cfg %0d: N=%0d groups=%0d vectors=%0d group-crossing carries=%0d", c, NN,
               grp_count(NN), nvec, ncross);
      done = c + 1;
    end
  end

  initial begin
    wait (done == NCFG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
