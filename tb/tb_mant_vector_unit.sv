// tb_mant_vector_unit: random psums, type codes and scales on 4 lanes; the
// expected value (psum1*a + psum2, or psum1 for INT, times sX*sW / 2^16 with
// round-half-up and saturation) is computed in 64-bit integers with the
// coefficient table written out here. Includes the Fig. 7 example
// (psum1 = 680, psum2 = 3824, a = 17 -> 15384 at unit scales).
module tb_mant_vector_unit;
  import mant_pkg::*;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  logic in_vld [C], out_vld [C];
  logic signed [PSW-1:0] p1 [C], p2 [C];
  logic [3:0] tc [C];
  logic [SW-1:0] sx [C], sw [C];
  logic signed [VW-1:0] val [C];
  int checks = 0, failures = 0;
  int atab [15] = '{0, 5, 10, 17, 20, 30, 40, 50, 60, 70, 80, 90, 100, 110, 120};

  mant_vector_unit #(.C(C)) dut (.clk, .rst_n, .in_vld, .psum1(p1), .psum2(p2), .tcode(tc),
    .sx, .sw, .out_vld, .value(val));
  always #5 clk = ~clk;

  function automatic longint expect_v(longint a1, longint a2, int code, longint s1, longint s2);
    longint comb, pr, r, vmax;
    comb = (code == 15) ? a1 : a1 * atab[code] + a2;
    pr = comb * s1 * s2;
    r = (pr + 32768) >>> 16;
    vmax = (64'sd1 <<< (VW-1)) - 1;
    if (r > vmax) r = vmax;
    if (r < -vmax - 1) r = -vmax - 1;
    return r;
  endfunction

  initial begin
    longint e [C];
    for (int c = 0; c < C; c++) begin in_vld[c] = 0; p1[c] = 0; p2[c] = 0; tc[c] = 0; sx[c] = 0; sw[c] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2001; t++) begin
      for (int c = 0; c < C; c++) begin
        in_vld[c] = 1;
        if (t == 0) begin
          p1[c] = 680; p2[c] = 3824; tc[c] = 4'd3; sx[c] = 16'd256; sw[c] = 16'd256;
        end else begin
          p1[c] = PSW'(int'($urandom_range(0, 400000)) - 200000);
          p2[c] = PSW'(int'($urandom_range(0, 4000000)) - 2000000);
          tc[c] = 4'($urandom);
          sx[c] = 16'($urandom_range(1, (t % 2) ? 600 : 65535));
          sw[c] = 16'($urandom_range(1, 600));
        end
        e[c] = expect_v(longint'(p1[c]), longint'(p2[c]), int'(tc[c]), longint'(sx[c]), longint'(sw[c]));
      end
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (!out_vld[c] || longint'(val[c]) != e[c]) begin
          failures++;
          if (failures < 6) $display("FAIL t=%0d c=%0d got %0d exp %0d", t, c, val[c], e[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
