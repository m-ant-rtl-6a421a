// tb_mant_enc: the Fig. 7 example (a = 17: 0.97, 0.33, -0.2, 0.54 with max
// 0.97 encode to 7, 4, -3, 5) and random values for every type code, checked
// against a nearest-grid-point search done in real arithmetic.
module tb_mant_enc;
  import mant_pkg::*;
  logic signed [VW-1:0] v;
  logic [VW-1:0] vmax;
  logic [3:0] code, q;
  int checks = 0, failures = 0;
  int atab [15] = '{0, 5, 10, 17, 20, 30, 40, 50, 60, 70, 80, 90, 100, 110, 120};
  mant_enc dut (.v, .vmax, .code, .q);

  function automatic real g(int cd, int i);
    return (cd == 15) ? real'(i) : real'(atab[cd] * i + (1 << i));
  endfunction

  task automatic check(int val, int mx, int cd, int exp_q);
    v = VW'(val); vmax = VW'(mx); code = 4'(cd);
    #1;
    checks++;
    if (q != 4'(exp_q)) begin
      failures++;
      if (failures < 8) $display("FAIL v=%0d max=%0d code=%0d q=%h exp %h", val, mx, cd, q, exp_q);
    end
  endtask

  initial begin
    check(9700, 9700, 3, 7);
    check(3300, 9700, 3, 4);
    check(-2000, 9700, 3, 8 + 3);
    check(5400, 9700, 3, 5);
    for (int t = 0; t < 20000; t++) begin
      int mx, val, cd, best;
      real tn, bd;
      cd = $urandom_range(0, 15);
      mx = $urandom_range(1, 8000000);
      val = $urandom_range(0, mx);
      tn = real'(val) * g(cd, 7) / real'(mx);
      best = 0; bd = 1.0e30;
      for (int i = 0; i < 8; i++) begin
        real dd;
        dd = (tn > g(cd, i)) ? tn - g(cd, i) : g(cd, i) - tn;
        if (dd < bd - 1.0e-9) begin bd = dd; best = i; end
      end
      if ($urandom_range(0, 1) == 1) check(-val, mx, cd, 8 + best);
      else check(val, mx, cd, best);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
