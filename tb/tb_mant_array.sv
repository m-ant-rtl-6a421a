// tb_mant_array: a small 4x3 array runs random GEMM rows in each weight mode.
// Expected column sums are computed in the testbench from the format
// definitions; the testbench also checks that column c's first result appears
// R-1+c clock edges after the edge that takes in the first input row.
module tb_mant_array;
  import mant_pkg::*;
  localparam int R = 4, C = 3, M = 6;
  logic clk = 0, rst_n = 0;
  wmode_e mode;
  logic w_we;
  logic [1:0] w_row;
  logic [7:0] w_data [C];
  logic x_vld;
  logic signed [7:0] x_in [R][LANES];
  logic out_vld [C];
  logic signed [PSW-1:0] psum1 [C], psum2 [C];
  int checks = 0, failures = 0;
  logic [7:0] W [R][C];
  int X [M][R][LANES];
  int got [C];
  int edge_cnt, first_edge [C];

  mant_array #(.R(R), .C(C)) dut (.clk, .rst_n, .mode, .w_we, .w_row, .w_data, .x_vld, .x_in,
    .out_vld, .psum1, .psum2);
  always #5 clk = ~clk;

  function automatic void ref_peg(input wmode_e md, input logic [7:0] w, input int xs [LANES],
      output int e1, output int e2);
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

  always @(posedge clk) begin
    edge_cnt <= edge_cnt + 1;
  end

  // monitor: compare each column's results in arrival order
  always @(negedge clk) if (rst_n) begin
    for (int c = 0; c < C; c++) if (out_vld[c]) begin
      int e1, e2, t1, t2;
      e1 = 0; e2 = 0;
      for (int r = 0; r < R; r++) begin
        ref_peg(mode, W[r][c], X[got[c]][r], t1, t2);
        e1 += t1; e2 += t2;
      end
      checks++;
      if (psum1[c] != e1 || psum2[c] != e2) begin
        failures++;
        if (failures < 6) $display("FAIL mode=%0d m=%0d c=%0d p1=%0d/%0d p2=%0d/%0d", mode, got[c], c, psum1[c], e1, psum2[c], e2);
      end
      if (got[c] == 0) first_edge[c] = edge_cnt;
      got[c]++;
    end
  end

  initial begin
    w_we = 0; w_row = 0; x_vld = 0; mode = W8; edge_cnt = 0;
    for (int c = 0; c < C; c++) w_data[c] = 0;
    for (int r = 0; r < R; r++) for (int l = 0; l < LANES; l++) x_in[r][l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int md = 0; md < 3; md++) begin
      int start_edge;
      mode = wmode_e'(md);
      for (int c = 0; c < C; c++) got[c] = 0;
      for (int r = 0; r < R; r++) begin
        @(negedge clk);
        w_we = 1; w_row = 2'(r);
        for (int c = 0; c < C; c++) begin W[r][c] = 8'($urandom); w_data[c] = W[r][c]; end
      end
      @(negedge clk); w_we = 0;
      for (int m = 0; m < M; m++)
        for (int r = 0; r < R; r++)
          for (int l = 0; l < LANES; l++) X[m][r][l] = int'($signed(8'($urandom)));
      start_edge = edge_cnt;
      for (int m = 0; m < M; m++) begin
        x_vld = 1;
        for (int r = 0; r < R; r++) for (int l = 0; l < LANES; l++) x_in[r][l] = 8'(X[m][r][l]);
        @(negedge clk);
      end
      x_vld = 0;
      repeat (R + C + 4) @(negedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (got[c] != M) begin failures++; $display("FAIL column %0d got %0d rows", c, got[c]); end
        checks++;
        // the edge that takes row 0 in is number start_edge+1; the result is
        // seen after edge start_edge+R+c, i.e. R-1+c edges later
        if (first_edge[c] - start_edge != R + c) begin
          failures++; $display("FAIL column %0d latency %0d", c, first_edge[c] - start_edge);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
