// tb_mant_peg: random weights and activations in all three weight modes.
// The expected psum increments are worked out from the definition of the
// formats: INT8 two's complement weight; 4-/2-bit sign-magnitude MANT
// weights contribute s*x*|i| to psum1 and s*x*2^|i| to psum2. Also checks the
// one-cycle forwarding of the activations and the Fig. 7 example.
module tb_mant_peg;
  import mant_pkg::*;
  logic clk = 0, rst_n = 0;
  wmode_e mode;
  logic w_load;
  logic [7:0] w_in;
  logic signed [7:0] x_in [LANES], x_out [LANES];
  logic x_vld_in, x_vld_out;
  logic signed [PSW-1:0] p1i, p2i, p1o, p2o;
  int checks = 0, failures = 0;

  mant_peg dut (.clk, .rst_n, .mode, .w_load, .w_in, .x_in, .x_vld_in,
    .psum1_in(p1i), .psum2_in(p2i), .x_out, .x_vld_out, .psum1_out(p1o), .psum2_out(p2o));

  always #5 clk = ~clk;

  function automatic void ref_peg(input wmode_e md, input logic [7:0] w,
      input int x0, input int x1, input int x2, input int x3, output int e1, output int e2);
    int xs [4];
    xs = '{x0, x1, x2, x3};
    e1 = 0; e2 = 0;
    if (md == W8) e1 = x0 * int'($signed(w));
    else if (md == W4) begin
      for (int j = 0; j < 2; j++) begin
        int m, s;
        m = int'(w[4*j +: 3]); s = w[4*j+3] ? -1 : 1;
        e1 += s * xs[j] * m; e2 += s * xs[j] * (1 << m);
      end
    end else begin
      for (int k = 0; k < 4; k++) begin
        int m, s;
        m = int'(w[2*k]); s = w[2*k+1] ? -1 : 1;
        e1 += s * xs[k] * m; e2 += s * xs[k] * (1 << m);
      end
    end
  endfunction

  task automatic one(input wmode_e md, input logic [7:0] w, input int xv [4], input int i1, input int i2);
    int e1, e2;
    mode = md;
    @(negedge clk); w_load = 1; w_in = w;
    @(negedge clk); w_load = 0;
    for (int l = 0; l < LANES; l++) x_in[l] = 8'(xv[l]);
    x_vld_in = 1; p1i = i1; p2i = i2;
    @(negedge clk);
    ref_peg(md, w, xv[0], xv[1], xv[2], xv[3], e1, e2);
    checks++;
    if (p1o != PSW'(i1 + e1) || p2o != PSW'(i2 + e2) || x_out != x_in || !x_vld_out) begin
      failures++;
      if (failures < 6) $display("FAIL mode=%0d w=%h p1=%0d/%0d p2=%0d/%0d", md, w, p1o, i1+e1, p2o, i2+e2);
    end
    x_vld_in = 0;
  endtask

  initial begin
    int xv [4];
    w_load = 0; w_in = 0; x_vld_in = 0; p1i = 0; p2i = 0; mode = W8;
    for (int l = 0; l < LANES; l++) x_in[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // Fig. 7 pairs: x=(-7,76) with codes (7,4) and x=(70,127) with codes (-3,5)
    xv = '{-7, 76, 0, 0};  one(W4, {4'b0100, 4'b0111}, xv, 0, 0);
    xv = '{70, 127, 0, 0}; one(W4, {4'b0101, 4'b1011}, xv, 0, 0);
    for (int t = 0; t < 3000; t++) begin
      wmode_e md;
      md = wmode_e'(t % 3);
      for (int l = 0; l < 4; l++) xv[l] = int'($signed(8'($urandom)));
      one(md, 8'($urandom), xv, int'($urandom_range(0, 200000)) - 100000, int'($urandom_range(0, 200000)) - 100000);
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
