// tb_prefix_adder_full -- the adder exactly as delivered (25 bits, uniform
// arrival times, no parameter overrides), checked against a + b.
//
// Directed operands exercise the longest carry chain and the extremes;
// then 50000 random operand pairs follow, half of them with b close to
// the complement of a so that long propagate runs cross the sqrt-groups.
// Counts carry-out and full-ripple events and fails if either is absent.
module tb_prefix_adder_full;
  localparam int N = 25;

  int checks = 0;
  int failures = 0;
  int n_cout = 0;
  int n_ripple = 0;

  logic [N-1:0] a, b;
  logic [N:0]   s;

  prefix_adder dut (.a(a), .b(b), .s(s));

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(input logic [N-1:0] av, input logic [N-1:0] bv);
    logic [N:0] exp;
    a = av;
    b = bv;
    #1;
    exp = {1'b0, av} + {1'b0, bv};
    checks++;
    if (s !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", av, bv, s, exp);
    end
    if (exp[N]) n_cout++;
    if ((av[0] & bv[0]) && (&(av[N-1:1] ^ bv[N-1:1]))) n_ripple++;
  endtask

  initial begin
    logic [N-1:0] av, bv;
    apply('1, N'(1));
    apply(N'(1), '1);
    apply('1, '1);
    apply('0, '0);
    apply({1'b0, {(N-1){1'b1}}}, N'(1));
    for (int v = 0; v < 50000; v++) begin
      av = N'($urandom);
      bv = (v % 2 == 0) ? N'($urandom) : ~av ^ N'(1 << $urandom_range(0, N - 1));
      if (v % 4 == 1) bv[0] = av[0];
      apply(av, bv);
    end
    checks++;
    if (n_cout == 0 || n_ripple == 0) begin
      failures++;
      $display("FAIL carry-out=%0d full-ripple=%0d", n_cout, n_ripple);
    end
    $display("carry-out=%0d full-ripple=%0d", n_cout, n_ripple);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
