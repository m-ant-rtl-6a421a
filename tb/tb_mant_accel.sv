// tb_mant_accel: end-to-end test of the accelerator, built with an 8x8 array
// of PE groups (the buffers keep their default depths), with a reference
// model written here from the definitions of the number formats. R and C
// below can be raised to 16 or 32; the same checks then apply unchanged (the
// 32x32 build takes the C++ compiler very long).
//
// Four kinds of operation are run, each filling the buffers through the host
// port, starting the command and checking everything that comes out:
//   A  4-bit MANT weights, 3 rows, 2 K tiles, 2 column tiles, INT8 output
//      quantization (spatial RQU chain over a 64-wide row group, two rounds)
//      plus a read-back of the dequantized, K-accumulated output buffer;
//   B  INT8 weights, K-cache style 4-bit MANT output quantization with the
//      type chosen from the variance;
//   C  2-bit MANT weights, 64 rows, V-cache prefill quantization in the
//      temporal RQU mode (groups along columns);
//   D  65 single-row GEMMs whose result goes to the V window unit: INT8 per
//      step, and one full window re-encoded to 4-bit MANT.
// The count of each mechanism is printed; one that never happened fails.
module tb_mant_accel;
  import mant_pkg::*;
  localparam int R = 8, C = 8;
  localparam int QX_BASE = 512, QV_BASE = 1023;
  logic clk = 0, rst_n = 0;
  logic hw_en; logic [1:0] hw_buf; logic [11:0] hw_addr; logic [31:0] hw_data [C];
  logic hr_en, hr_buf; logic [11:0] hr_addr; logic hr_vld; logic [31:0] hr_data [C];
  logic cmd_start; wmode_e cfg_mode; logic [9:0] cfg_m; logic [4:0] cfg_kt; logic [1:0] cfg_nt;
  oqmode_e cfg_oq; logic cfg_vdec;
  logic [15:0] cfg_thr [NTYPES-1]; logic [3:0] cfg_bin_code [NTYPES];
  logic busy, done;
  logic qo_vld; logic [9:0] qo_m; logic [1:0] qo_nt; logic [7:0] qo_data [C];
  logic qp_vld; logic [9:0] qp_m; logic [1:0] qp_nt; logic [3:0] qp_code [C];
  logic [VW-1:0] qp_max [C]; logic [SW-1:0] qp_scale [C];
  logic vq8_vld; logic signed [7:0] vq8 [C]; logic vmq_vld; logic [5:0] vmq_tok;
  logic [3:0] vmq [C], vgrp_code [C]; logic [VW-1:0] vgrp_max [C]; logic vstall;

  mant_accel #(.R(R), .C(C)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_w8 = 0, n_w4 = 0, n_w2 = 0, n_ktacc = 0, n_carry = 0, n_temporal = 0, n_vphase2 = 0,
      n_act8 = 0, n_kmant = 0;
  int atab [15] = '{0, 5, 10, 17, 20, 30, 40, 50, 60, 70, 80, 90, 100, 110, 120};

  // operation data
  int X [2][64][R][LANES];
  logic [7:0] Wt [2][2][R][C];
  int TC [2][2][C], SWv [2][2][C], SXv [2][64];
  longint OUT [2][64][C];
  int INV [C];

  function automatic void fail(string s);
    failures++;
    if (failures < 12) $display("FAIL %s", s);
  endfunction
  function automatic real g(int cd, int i);
    return (cd == 15) ? real'(i) : real'(atab[cd] * i + (1 << i));
  endfunction
  function automatic int gmx(int cd);
    return (cd == 15) ? 7 : atab[cd] * 7 + 128;
  endfunction
  function automatic int nearest(longint val, longint mx, int cd);
    real tn, bd; int best; longint a;
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
  function automatic int var_code(longint s1, longint s2, longint mx, int n);
    real vr; int bin;
    vr = (mx == 0) ? 0.0 : (real'(s2) / n - (real'(s1) / n) ** 2) / (real'(mx) ** 2);
    bin = 0;
    for (int j = 0; j < NTYPES-1; j++) if (vr >= real'(cfg_thr[j]) / 65536.0) bin++;
    return int'(cfg_bin_code[bin]);
  endfunction
  function automatic void peg_ref(wmode_e md, logic [7:0] w, int xs [LANES], output longint e1, output longint e2);
    e1 = 0; e2 = 0;
    if (md == W8) e1 = xs[0] * int'($signed(w));
    else if (md == W4) for (int j = 0; j < 2; j++) begin
      int m, s; m = int'(w[4*j +: 3]); s = w[4*j+3] ? -1 : 1;
      e1 += s * xs[j] * m; e2 += s * xs[j] * (1 << m);
    end else for (int k = 0; k < 4; k++) begin
      int m, s; m = int'(w[2*k]); s = w[2*k+1] ? -1 : 1;
      e1 += s * xs[k] * m; e2 += s * xs[k] * (1 << m);
    end
  endfunction
  function automatic longint sat(longint x);
    longint vmax;
    vmax = (64'sd1 <<< (VW-1)) - 1;
    return (x > vmax) ? vmax : (x < -vmax - 1) ? -vmax - 1 : x;
  endfunction

  task automatic hwrite(int bufsel, int addr, logic [31:0] d [C]);
    @(negedge clk);
    hw_en = 1; hw_buf = 2'(bufsel); hw_addr = 12'(addr); hw_data = d;
    @(negedge clk);
    hw_en = 0;
  endtask

  // generate data, load buffers, compute the reference output
  task automatic setup(wmode_e md, int M, int KT, int NT, int fixed_w8);
    logic [31:0] d [C];
    for (int kt = 0; kt < KT; kt++) for (int m = 0; m < M; m++) begin
      SXv[kt][m] = $urandom_range(16, 128);
      for (int r = 0; r < R; r++) for (int l = 0; l < LANES; l++) X[kt][m][r][l] = int'($signed(8'($urandom)));
    end
    for (int nt = 0; nt < NT; nt++) for (int kt = 0; kt < KT; kt++) begin
      for (int c = 0; c < C; c++) begin
        TC[nt][kt][c] = fixed_w8 ? 15 : $urandom_range(0, 15);
        SWv[nt][kt][c] = $urandom_range(16, 128);
      end
      for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) Wt[nt][kt][r][c] = 8'($urandom);
    end
    // input buffer
    for (int kt = 0; kt < KT; kt++) for (int m = 0; m < M; m++) begin
      for (int r = 0; r < R; r++) d[r] = {8'(X[kt][m][r][3]), 8'(X[kt][m][r][2]), 8'(X[kt][m][r][1]), 8'(X[kt][m][r][0])};
      hwrite(0, kt * M + m, d);
    end
    // weight buffer and column metadata
    for (int nt = 0; nt < NT; nt++) for (int kt = 0; kt < KT; kt++) begin
      for (int r = 0; r < R; r++) begin
        for (int c = 0; c < C; c++) d[c] = 32'(Wt[nt][kt][r][c]);
        hwrite(1, (nt * KT + kt) * R + r, d);
      end
      for (int c = 0; c < C; c++) d[c] = {12'd0, 4'(TC[nt][kt][c]), 16'(SWv[nt][kt][c])};
      hwrite(3, nt * KT + kt, d);
    end
    // activation scales: row m in bank m % C
    for (int kt = 0; kt < KT; kt++) for (int blk = 0; blk * C < M; blk++) begin
      for (int b = 0; b < C; b++) d[b] = (blk * C + b < M) ? 32'(SXv[kt][blk * C + b]) : 32'd0;
      hwrite(3, QX_BASE + kt * ((M + C - 1) / C) + blk, d);
    end
    // reference
    for (int nt = 0; nt < NT; nt++) for (int m = 0; m < M; m++) for (int c = 0; c < C; c++) begin
      longint acc;
      acc = 0;
      for (int kt = 0; kt < KT; kt++) begin
        longint p1, p2, e1, e2, comb, val;
        p1 = 0; p2 = 0;
        for (int r = 0; r < R; r++) begin
          peg_ref(md, Wt[nt][kt][r][c], X[kt][m][r], e1, e2);
          p1 += e1; p2 += e2;
        end
        comb = (TC[nt][kt][c] == 15) ? p1 : p1 * atab[TC[nt][kt][c]] + p2;
        val = sat((comb * SXv[kt][m] * SWv[nt][kt][c] + 32768) >>> 16);
        acc = (kt == 0) ? val : sat(acc + val);
      end
      OUT[nt][m][c] = acc;
    end
  endtask

  // collected outputs
  typedef struct { int m; int nt; logic [7:0] d [C]; } qo_t;
  typedef struct { int m; int nt; logic [3:0] code [C]; logic [VW-1:0] mx [C]; logic [SW-1:0] sc [C]; } qp_t;
  qo_t qos [$];
  qp_t qps [$];
  always @(negedge clk) if (rst_n) begin
    if (qo_vld) begin qo_t e; e.m = int'(qo_m); e.nt = int'(qo_nt); e.d = qo_data; qos.push_back(e); end
    if (qp_vld) begin qp_t e; e.m = int'(qp_m); e.nt = int'(qp_nt); e.code = qp_code; e.mx = qp_max; e.sc = qp_scale; qps.push_back(e); end
  end

  task automatic run(wmode_e md, int M, int KT, int NT, oqmode_e oq, logic vdec);
    @(negedge clk);
    cfg_mode = md; cfg_m = 10'(M); cfg_kt = 5'(KT); cfg_nt = 2'(NT); cfg_oq = oq; cfg_vdec = vdec;
    cmd_start = 1;
    @(negedge clk);
    cmd_start = 0;
    while (!done) @(negedge clk);
    if (md == W8) n_w8++; else if (md == W4) n_w4++; else n_w2++;
    if (KT > 1) n_ktacc++;
  endtask

  task automatic check_outbuf(int M, int NT);
    for (int nt = 0; nt < NT; nt++) for (int m = 0; m < M; m++) begin
      @(negedge clk); hr_en = 1; hr_buf = 0; hr_addr = 12'(nt * M + m);
      @(negedge clk); hr_en = 0;
      for (int c = 0; c < C; c++) begin
        checks++;
        if (longint'($signed(hr_data[c][VW-1:0])) != OUT[nt][m][c])
          fail($sformatf("outbuf nt%0d m%0d c%0d %0d/%0d", nt, m, c, $signed(hr_data[c][VW-1:0]), OUT[nt][m][c]));
      end
    end
  endtask

  // spatial (row-group) checks for ACT8 / KMANT
  task automatic check_spatial(int M, int NT, oqmode_e oq);
    checks++;
    if (qps.size() != M || qos.size() != M * NT) fail($sformatf("spatial counts %0d %0d", qps.size(), qos.size()));
    for (int m = 0; m < M; m++) begin
      longint mx, s1, s2; int cd, gm;
      qp_t p;
      mx = 0; s1 = 0; s2 = 0;
      for (int nt = 0; nt < NT; nt++) for (int c = 0; c < C; c++) begin
        longint a; a = OUT[nt][m][c] < 0 ? -OUT[nt][m][c] : OUT[nt][m][c];
        if (a > mx) mx = a;
        s1 += OUT[nt][m][c]; s2 += OUT[nt][m][c] * OUT[nt][m][c];
      end
      cd = (oq == OQ_ACT8) ? 15 : var_code(s1, s2, mx, NT * C);
      gm = (oq == OQ_ACT8) ? 127 : gmx(cd);
      p = qps.pop_front();
      checks++;
      if (p.m != m || int'(p.code[0]) != cd || longint'(p.mx[0]) != mx ||
          longint'(p.sc[0]) != ((mx * 512 + gm) / (2 * gm) > 65535 ? 65535 : (mx * 512 + gm) / (2 * gm)))
        fail($sformatf("qp m%0d code %0d/%0d max %0d/%0d scale %0d", m, p.code[0], cd, p.mx[0], mx, p.sc[0]));
      if (oq == OQ_KMANT) n_kmant++; else n_act8++;
      if (NT > 1) n_carry++;
      for (int nt = 0; nt < NT; nt++) begin
        qo_t o;
        o = qos.pop_front();
        for (int c = 0; c < C; c++) begin
          int e;
          if (oq == OQ_ACT8) begin
            longint a, q;
            a = OUT[nt][m][c] < 0 ? -OUT[nt][m][c] : OUT[nt][m][c];
            q = (mx == 0) ? 0 : (254 * a + mx) / (2 * mx);
            if (q > 127) q = 127;
            e = int'(OUT[nt][m][c] < 0 ? (256 - q) & 255 : q);
          end else e = nearest(OUT[nt][m][c], mx, cd);
          checks++;
          if (o.m != m || o.nt != nt || int'(o.d[c]) != e)
            fail($sformatf("qo m%0d nt%0d c%0d got %0d exp %0d", m, nt, c, o.d[c], e));
        end
      end
    end
  endtask

  // temporal (column-group) checks for the V prefill
  task automatic check_temporal(int M);
    qp_t p;
    int cd [C]; longint mx [C];
    checks++;
    if (qps.size() != 1 || qos.size() != M) fail($sformatf("temporal counts %0d %0d", qps.size(), qos.size()));
    p = qps.pop_front();
    for (int c = 0; c < C; c++) begin
      longint s1, s2; int gm;
      mx[c] = 0; s1 = 0; s2 = 0;
      for (int m = 0; m < M; m++) begin
        longint a; a = OUT[0][m][c] < 0 ? -OUT[0][m][c] : OUT[0][m][c];
        if (a > mx[c]) mx[c] = a;
        s1 += OUT[0][m][c]; s2 += OUT[0][m][c] * OUT[0][m][c];
      end
      cd[c] = var_code(s1, s2, mx[c], M);
      gm = gmx(cd[c]);
      checks++;
      if (int'(p.code[c]) != cd[c] || longint'(p.mx[c]) != mx[c] ||
          longint'(p.sc[c]) != ((mx[c] * 512 + gm) / (2 * gm) > 65535 ? 65535 : (mx[c] * 512 + gm) / (2 * gm)))
        fail($sformatf("temporal qp c%0d code %0d/%0d max %0d/%0d", c, p.code[c], cd[c], p.mx[c], mx[c]));
    end
    for (int m = 0; m < M; m++) begin
      qo_t o;
      o = qos.pop_front();
      for (int c = 0; c < C; c++) begin
        checks++;
        if (o.m != m || int'(o.d[c]) != nearest(OUT[0][m][c], mx[c], cd[c]))
          fail($sformatf("temporal qo m%0d c%0d", m, c));
      end
    end
    n_temporal++;
  endtask

  int vwin [C][GROUP];
  int vcount = 0;
  int vq8_seen = 0, vmq_seen = 0;
  always @(negedge clk) if (rst_n) begin
    if (vq8_vld) begin
      for (int c = 0; c < C; c++) begin
        longint p;
        p = (OUT[0][0][c] * longint'(INV[c]) + 32768) >>> 16;
        if (p > 127) p = 127;
        if (p < -127) p = -127;
        vwin[c][vcount % GROUP] = int'(p);
        checks++;
        if (int'(vq8[c]) != int'(p)) fail($sformatf("vq8 c%0d %0d/%0d", c, vq8[c], p));
      end
      vcount++;
      vq8_seen++;
    end
    if (vmq_vld) begin
      for (int c = 0; c < C; c++) begin
        longint mx, s1, s2; int cd;
        mx = 0; s1 = 0; s2 = 0;
        for (int k = 0; k < GROUP; k++) begin
          int a; a = vwin[c][k] < 0 ? -vwin[c][k] : vwin[c][k];
          if (a > mx) mx = a;
          s1 += vwin[c][k]; s2 += vwin[c][k] * vwin[c][k];
        end
        cd = var_code(s1, s2, mx, GROUP);
        checks++;
        if (int'(vgrp_code[c]) != cd || int'(vmq[c]) != nearest(vwin[c][vmq_tok], mx, cd))
          fail($sformatf("vmq tok%0d c%0d code %0d/%0d q %h", vmq_tok, c, vgrp_code[c], cd, vmq[c]));
      end
      vmq_seen++;
      if (vmq_tok == 6'(GROUP - 1)) n_vphase2++;
    end
  end

  initial begin
    logic [31:0] d [C];
    hw_en = 0; hw_buf = 0; hw_addr = 0; hr_en = 0; hr_buf = 0; hr_addr = 0;
    cmd_start = 0; cfg_mode = W4; cfg_m = 1; cfg_kt = 1; cfg_nt = 1; cfg_oq = OQ_NONE; cfg_vdec = 0;
    for (int c = 0; c < C; c++) hw_data[c] = 0;
    for (int j = 0; j < NTYPES-1; j++) cfg_thr[j] = 16'(1500 + 1100 * j);
    for (int b = 0; b < NTYPES; b++) cfg_bin_code[b] = 4'(b);
    repeat (3) @(negedge clk); rst_n = 1;

    // A: W4, 2 K tiles, 2 column tiles, INT8 activation quantization
    setup(W4, 3, 2, 2, 0);
    run(W4, 3, 2, 2, OQ_ACT8, 0);
    check_outbuf(3, 2);
    check_spatial(3, 2, OQ_ACT8);
    // B: W8, K-cache MANT quantization with variance-based type choice
    setup(W8, 2, 1, 2, 1);
    run(W8, 2, 1, 2, OQ_KMANT, 0);
    check_outbuf(2, 2);
    check_spatial(2, 2, OQ_KMANT);
    // C: W2, 64 rows, V prefill in the temporal mode
    setup(W2, 64, 1, 1, 0);
    run(W2, 64, 1, 1, OQ_VMANT, 0);
    check_temporal(64);
    // D: V decode through the two-phase window
    for (int c = 0; c < C; c++) begin INV[c] = $urandom_range(200, 3000); d[c] = 32'(INV[c]); end
    hwrite(3, QV_BASE, d);
    for (int it = 0; it < GROUP + 1; it++) begin
      setup(W4, 1, 1, 1, 0);
      run(W4, 1, 1, 1, OQ_NONE, 1);
    end
    repeat (GROUP + 10) @(negedge clk);
    checks++;
    if (vq8_seen != GROUP + 1 || vmq_seen != GROUP) fail($sformatf("v window beats %0d %0d", vq8_seen, vmq_seen));

    $display("INFO mechanisms: W8=%0d W4=%0d W2=%0d ktile_accum=%0d rqu_carry=%0d act8=%0d kmant=%0d temporal=%0d v_phase2=%0d",
             n_w8, n_w4, n_w2, n_ktacc, n_carry, n_act8, n_kmant, n_temporal, n_vphase2);
    if (n_w8 == 0) fail("no W8 op");
    if (n_w4 == 0) fail("no W4 op");
    if (n_w2 == 0) fail("no W2 op");
    if (n_ktacc == 0) fail("no K-tile accumulation");
    if (n_carry == 0) fail("no two-round RQU group");
    if (n_act8 == 0) fail("no INT8 quantization");
    if (n_kmant == 0) fail("no spatial MANT quantization");
    if (n_temporal == 0) fail("no temporal quantization");
    if (n_vphase2 == 0) fail("no V window phase 2");
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
