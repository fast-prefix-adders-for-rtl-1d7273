// tb_prefix_adder -- end-to-end test of the arrival-time driven adder.
//
// Five adders are built: the 25-bit default shape with uniform arrival
// times, the same width with a multiplier-like (hill-shaped) arrival
// profile, a 64-bit adder with a multiplier-like profile, an 8-bit
// adder that is checked exhaustively, and a 256-bit adder (the largest
// width the package's arrival-time vectors hold) with an irregular
// profile. Each sum is compared with the
// testbench's own a + b. Per instance the testbench counts three events
// of the carry network and fails if one never happened:
//   * carry out     - the top sum bit is set;
//   * full ripple   - a carry generated in bit 0 travels through every
//                     other bit (all higher bits propagate);
//   * group cross   - a carry leaves the lowest sqrt-group of the prefix
//                     graph and is consumed by a higher group's combining
//                     gate.
module tb_prefix_adder;
  import pfx_pkg::*;

  localparam int NCFG = 5;

  int checks = 0;
  int failures = 0;
  int done = 0;

  function automatic int cfg_n(int c);
    case (c)
      0: return 25;
      1: return 25;
      2: return 64;
      3: return 8;
      default: return 256;
    endcase
  endfunction

  function automatic int cfg_t(int c, int i);
    int n = cfg_n(c);
    case (c)
      1, 2: return ((i < n - 1 - i) ? i : n - 1 - i) / 2;
      3: return i % 3;
      4: return ((i < n - 1 - i) ? i : n - 1 - i) / 8 + (i * 7) % 5;
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
    localparam int      GSZ = grp_size(NN, 0);  // size of the lowest group

    logic [NN-1:0] a, b;
    logic [NN:0]   s;

    prefix_adder #(.N(NN), .T(TT)) u_add (.a(a), .b(b), .s(s));

    task automatic apply(input logic [NN-1:0] av, input logic [NN-1:0] bv,
                         inout int n_cout, inout int n_ripple, inout int n_cross);
      logic [NN:0] exp;
      logic [NN-1:0] pv;
      a = av;
      b = bv;
      #1;
      exp = {1'b0, av} + {1'b0, bv};
      checks++;
      if (s !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL cfg %0d: %h + %h = %h, expected %h", c, av, bv, s, exp);
      end
      pv  = av ^ bv;
      if (exp[NN]) n_cout++;
      if ((av[0] & bv[0]) && (&pv[NN-1:1])) n_ripple++;
      // carry into the first bit of group 1 that this bit only propagates
      if ((exp[GSZ] ^ pv[GSZ]) && pv[GSZ]) n_cross++;
    endtask

    initial begin
      int n_cout, n_ripple, n_cross;
      logic [NN-1:0] av, bv;
      wait (done == c);
      n_cout = 0;
      n_ripple = 0;
      n_cross = 0;
      if (NN <= 8) begin
        for (int v = 0; v < (1 << (2 * NN)); v++) begin
          av = NN'(v);
          bv = NN'(v >> NN);
          apply(av, bv, n_cout, n_ripple, n_cross);
        end
      end else begin
        // directed: longest carry chain, its neighbours, extremes
        apply('1, NN'(1), n_cout, n_ripple, n_cross);
        apply(NN'(1), '1, n_cout, n_ripple, n_cross);
        apply('1, '1, n_cout, n_ripple, n_cross);
        apply('0, '0, n_cout, n_ripple, n_cross);
        apply({1'b0, {(NN-1){1'b1}}}, NN'(1), n_cout, n_ripple, n_cross);
        for (int v = 0; v < 20000; v++) begin
          for (int i = 0; i < NN; i++) begin
            av[i] = 1'($urandom);
            // b mostly the complement of a: long propagate runs
            bv[i] = ($urandom_range(0, 7) == 0) ? av[i] : ~av[i];
          end
          apply(av, bv, n_cout, n_ripple, n_cross);
        end
      end
      $display("cfg %0d: N=%0d carry-out=%0d full-ripple=%0d group-cross=%0d", c, NN, n_cout,
               n_ripple, n_cross);
      checks += 3;
      if (n_cout == 0 || n_ripple == 0 || n_cross == 0) begin
        failures++;
        $display("FAIL cfg %0d: a carry event never happened", c);
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
