// tb_mant_vwin: the two-phase V-cache unit with 3 channels and a window of 8
// (the default is 64). The driver offers 3 windows of V vectors, each held
// until accepted, with random gaps. Checkers compare: the INT8 value of each
// element (v * inv_s / 2^16 rounded half up, clipped to +-127); after a full
// window each channel's type (variance of the INT8 window, normalised to its
// max, binned in real arithmetic), its max, and the 4-bit MANT codes of all
// tokens (nearest grid point, real arithmetic); and that in_rdy stays low
// for exactly 1 + G cycles per window, stalling the next vector.
module tb_mant_vwin;
  import mant_pkg::*;
  localparam int CH = 3, G = 8, NWIN = 3;
  logic clk = 0, rst_n = 0;
  logic in_vld, in_rdy, q8_vld, mq_vld;
  logic signed [VW-1:0] v [CH];
  logic [15:0] inv_s [CH];
  logic [15:0] thr [NTYPES-1];
  logic [3:0] bin_code [NTYPES];
  logic signed [7:0] q8 [CH];
  logic [2:0] mq_tok;
  logic [3:0] mq [CH], grp_code [CH];
  logic [VW-1:0] grp_max [CH];
  int checks = 0, failures = 0, stalls = 0, phase2 = 0, low_run = 0, tokens = 0;
  int atab [15] = '{0, 5, 10, 17, 20, 30, 40, 50, 60, 70, 80, 90, 100, 110, 120};
  int win [CH][G];        // INT8 window being filled
  int snap [CH][G];       // window under phase 2
  int exp_q [$];
  int acc_cnt = 0;

  mant_vwin #(.CH(CH), .G(G)) dut (.clk, .rst_n, .in_vld, .in_rdy, .v, .inv_s, .thr, .bin_code,
    .q8_vld, .q8, .mq_vld, .mq_tok, .mq, .grp_code, .grp_max);
  always #5 clk = ~clk;

  function automatic real g(int cd, int i);
    return (cd == 15) ? real'(i) : real'(atab[cd] * i + (1 << i));
  endfunction
  function automatic int nearest(int val, int mx, int cd);
    real tn, bd; int best, a;
    a = val < 0 ? -val : val;
    tn = real'(a) * g(cd, 7) / real'(mx);
    best = 0; bd = 1.0e30;
    for (int i = 0; i < 8; i++) begin
      real dd;
      dd = (tn > g(cd, i)) ? tn - g(cd, i) : g(cd, i) - tn;
      if (dd < bd - 1.0e-9) begin bd = dd; best = i; end
    end
    return (val < 0) ? 8 + best : best;
  endfunction
  function automatic int q8_of(int x, int inv);
    longint p;
    p = (longint'(x) * longint'(inv) + 32768) >>> 16;
    if (p > 127) p = 127;
    if (p < -127) p = -127;
    return int'(p);
  endfunction

  // accept, INT8 check, phase-2 checks
  always @(posedge clk) if (rst_n) begin
    if (in_vld && in_rdy) begin
      for (int c = 0; c < CH; c++) begin
        win[c][acc_cnt] = q8_of(int'(v[c]), int'(inv_s[c]));
        exp_q.push_back(win[c][acc_cnt]);
      end
      acc_cnt++;
      if (acc_cnt == G) begin snap = win; acc_cnt = 0; end
    end
  end
  always @(negedge clk) if (rst_n) begin
    if (in_vld && !in_rdy) stalls++;
    if (!in_rdy) low_run++;
    else if (low_run != 0) begin
      checks++;
      if (low_run != 1 + G) begin failures++; $display("FAIL phase-2 length %0d", low_run); end
      phase2++;
      low_run = 0;
    end
    if (q8_vld) for (int c = 0; c < CH; c++) begin
      int e;
      e = exp_q.pop_front();
      checks++;
      if (int'(q8[c]) != e) begin failures++; if (failures < 6) $display("FAIL q8 %0d/%0d", q8[c], e); end
    end
    if (mq_vld) begin
      tokens++;
      for (int c = 0; c < CH; c++) begin
        int mx, s1, s2, bin;
        real vr;
        mx = 0; s1 = 0; s2 = 0;
        for (int k = 0; k < G; k++) begin
          int a; a = snap[c][k] < 0 ? -snap[c][k] : snap[c][k];
          if (a > mx) mx = a;
          s1 += snap[c][k]; s2 += snap[c][k] * snap[c][k];
        end
        vr = (real'(s2) / G - (real'(s1) / G) ** 2) / (real'(mx) ** 2);
        bin = 0;
        for (int j = 0; j < NTYPES-1; j++) if (vr >= real'(thr[j]) / 65536.0) bin++;
        checks++;
        if (int'(grp_code[c]) != bin || int'(grp_max[c]) != mx) begin
          failures++; if (failures < 6) $display("FAIL type ch %0d code %0d/%0d max %0d/%0d", c, grp_code[c], bin, grp_max[c], mx);
        end
        checks++;
        if (int'(mq[c]) != nearest(snap[c][mq_tok], mx, bin)) begin
          failures++; if (failures < 6) $display("FAIL code ch %0d tok %0d got %h", c, mq_tok, mq[c]);
        end
      end
    end
  end

  initial begin
    for (int j = 0; j < NTYPES-1; j++) thr[j] = 16'(2000 + 1200 * j);
    for (int b = 0; b < NTYPES; b++) bin_code[b] = 4'(b);
    in_vld = 0;
    for (int c = 0; c < CH; c++) begin v[c] = 0; inv_s[c] = 16'(300 + 500 * c); end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < NWIN * G; k++) begin
      if ($urandom_range(0, 2) == 0) @(negedge clk);
      for (int c = 0; c < CH; c++)
        v[c] = VW'(int'($urandom_range(0, 2 * (40000 >> c))) - (40000 >> c) + 1);
      in_vld = 1;
      @(posedge clk);
      while (!in_rdy) @(posedge clk);
      @(negedge clk);
      in_vld = 0;
    end
    repeat (G + 6) @(negedge clk);
    checks++;
    if (stalls == 0 || phase2 != NWIN || tokens != NWIN * G) begin
      failures++; $display("FAIL stalls=%0d phase2=%0d tokens=%0d", stalls, phase2, tokens);
    end
    $display("INFO stalls=%0d windows=%0d", stalls, phase2);
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
