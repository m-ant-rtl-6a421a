// tb_mant_rqu_array: a chain of 4 RQUs. Spatial mode: rows are fed skewed
// (lane i one cycle after lane i-1, as they leave the array), with and
// without a carried partial result; the last unit must give max |v|, sum and
// sum of squares of the row (plus carry) N cycles after the first element.
// Temporal mode: each unit reduces its own lane over 64 rows.
module tb_mant_rqu_array;
  import mant_pkg::*;
  localparam int N = 4, SUMW = VW + 7, SQW = 2*VW + 7;
  logic clk = 0, rst_n = 0;
  logic temporal, clr, cin_vld;
  logic v_vld [N], o_vld [N];
  logic signed [VW-1:0] v [N];
  logic [VW-1:0] cin_max, o_max [N];
  logic signed [SUMW-1:0] cin_sum, o_sum [N];
  logic [SQW-1:0] cin_sq, o_sq [N];
  int checks = 0, failures = 0;
  mant_rqu_array #(.N(N)) dut (.clk, .rst_n, .temporal, .clr, .v_vld, .v, .cin_vld, .cin_max,
    .cin_sum, .cin_sq, .o_vld, .o_max, .o_sum, .o_sq);
  always #5 clk = ~clk;

  function automatic int rnd();
    return int'($urandom_range(0, 16000000)) - 8000000;
  endfunction

  initial begin
    temporal = 0; clr = 0; cin_vld = 0; cin_max = 0; cin_sum = 0; cin_sq = 0;
    for (int i = 0; i < N; i++) begin v_vld[i] = 0; v[i] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    // spatial
    for (int t = 0; t < 300; t++) begin
      int x [N];
      longint em, es, eq;
      em = 0; es = 0; eq = 0;
      cin_vld = (t % 2 == 1);
      cin_max = VW'($urandom_range(0, 8000000)); cin_sum = SUMW'(rnd()); cin_sq = SQW'($urandom);
      if (cin_vld) begin em = longint'(cin_max); es = longint'(cin_sum); eq = longint'(cin_sq); end
      for (int i = 0; i < N; i++) begin
        x[i] = rnd();
        if ((x[i] < 0 ? -x[i] : x[i]) > em) em = (x[i] < 0 ? -x[i] : x[i]);
        es += x[i]; eq += longint'(x[i]) * x[i];
      end
      for (int k = 0; k < N; k++) begin
        for (int i = 0; i < N; i++) begin v_vld[i] = (i == k); v[i] = VW'(x[i]); end
        @(negedge clk);
      end
      for (int i = 0; i < N; i++) v_vld[i] = 0;
      checks++;
      if (!o_vld[N-1] || longint'(o_max[N-1]) != em || longint'(o_sum[N-1]) != es || longint'(o_sq[N-1]) != eq) begin
        failures++;
        if (failures < 6) $display("FAIL spatial t=%0d max %0d/%0d sum %0d/%0d", t, o_max[N-1], em, o_sum[N-1], es);
      end
    end
    // temporal
    temporal = 1; cin_vld = 0;
    for (int g = 0; g < 20; g++) begin
      longint em [N], es [N], eq [N];
      for (int i = 0; i < N; i++) begin em[i] = 0; es[i] = 0; eq[i] = 0; end
      for (int r = 0; r < GROUP; r++) begin
        clr = (r == 0);
        for (int i = 0; i < N; i++) begin
          int x;
          x = rnd();
          v_vld[i] = 1; v[i] = VW'(x);
          if ((x < 0 ? -x : x) > em[i]) em[i] = (x < 0 ? -x : x);
          es[i] += x; eq[i] += longint'(x) * x;
        end
        @(negedge clk);
      end
      clr = 0;
      for (int i = 0; i < N; i++) v_vld[i] = 0;
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (longint'(o_max[i]) != em[i] || longint'(o_sum[i]) != es[i] || longint'(o_sq[i]) != eq[i]) begin
          failures++;
          if (failures < 6) $display("FAIL temporal g=%0d lane %0d", g, i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
