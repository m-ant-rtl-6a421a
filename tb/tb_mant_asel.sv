// tb_mant_asel: random groups of 64 values with different spreads; the
// normalised variance is computed in real arithmetic from the elements and
// binned against the same thresholds, and the expected type code is read from
// a random bin-to-code mapping. Includes the paper's a = 40 example range
// [0.104, 0.118].
module tb_mant_asel;
  import mant_pkg::*;
  localparam int SUMW = VW + 7, SQW = 2*VW + 7, N = 64;
  logic [6:0] n;
  logic signed [SUMW-1:0] s1;
  logic [SQW-1:0] s2;
  logic [VW-1:0] vmax;
  logic [15:0] thr [NTYPES-1];
  logic [3:0] bin_code [NTYPES], code;
  int checks = 0, failures = 0;
  mant_asel dut (.n, .s1, .s2, .vmax, .thr, .bin_code, .code);
  initial begin
    real tr [NTYPES-1];
    for (int j = 0; j < NTYPES-1; j++) begin
      tr[j] = 0.03 + 0.025 * j;
      if (j == 3) tr[j] = 0.104;
      if (j == 4) tr[j] = 0.118;
      thr[j] = 16'($rtoi(tr[j] * 65536.0));
    end
    for (int t = 0; t < 3000; t++) begin
      longint a1, a2, mx;
      int x [N];
      real var_n;
      int bin, spread;
      for (int b = 0; b < NTYPES; b++) bin_code[b] = 4'($urandom);
      spread = $urandom_range(1, 6);
      a1 = 0; a2 = 0; mx = 0;
      for (int i = 0; i < N; i++) begin
        int u;
        u = $urandom_range(0, 2000000);
        for (int k = 1; k < spread; k++) u = (u * ($urandom_range(0, 1000))) / 1000;
        x[i] = ($urandom_range(0, 1) == 1) ? u : -u;
        if (i == 0) x[i] = 2000000;
        a1 += x[i]; a2 += longint'(x[i]) * x[i];
        if ((x[i] < 0 ? -x[i] : x[i]) > mx) mx = (x[i] < 0 ? -x[i] : x[i]);
      end
      var_n = (real'(a2) / N - (real'(a1) / N) * (real'(a1) / N)) / (real'(mx) * real'(mx));
      bin = 0;
      for (int j = 0; j < NTYPES-1; j++) if (var_n >= real'(thr[j]) / 65536.0) bin++;
      n = 7'(N); s1 = SUMW'(a1); s2 = SQW'(a2); vmax = VW'(mx);
      #1;
      checks++;
      if (code != bin_code[bin]) begin
        failures++;
        if (failures < 6) $display("FAIL var=%f bin=%0d code=%0d exp %0d", var_n, bin, code, bin_code[bin]);
      end
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
