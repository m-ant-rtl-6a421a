// tb_mant_accum: random partial outputs added to random running sums, with
// and without the first-tile flag, including values that must saturate.
module tb_mant_accum;
  import mant_pkg::*;
  localparam int C = 4;
  logic clk = 0, rst_n = 0;
  logic in_vld [C], first [C], out_vld [C];
  logic signed [VW-1:0] in_val [C], acc_in [C], out_val [C];
  int checks = 0, failures = 0;
  mant_accum #(.C(C)) dut (.clk, .rst_n, .in_vld, .first, .in_val, .acc_in, .out_vld, .out_val);
  always #5 clk = ~clk;
  initial begin
    int e [C];
    int vmax;
    vmax = (1 << (VW-1)) - 1;
    for (int c = 0; c < C; c++) begin in_vld[c] = 0; first[c] = 0; in_val[c] = 0; acc_in[c] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      for (int c = 0; c < C; c++) begin
        int a, b;
        a = (t % 4 == 0) ? int'($urandom_range(0, 2*vmax)) - vmax : int'($urandom_range(0, 2000000)) - 1000000;
        b = (t % 4 == 0) ? int'($urandom_range(0, 2*vmax)) - vmax : int'($urandom_range(0, 2000000)) - 1000000;
        in_vld[c] = 1; first[c] = ($urandom_range(0, 3) == 0);
        in_val[c] = VW'(a); acc_in[c] = VW'(b);
        e[c] = first[c] ? a : a + b;
        if (e[c] > vmax) e[c] = vmax;
        if (e[c] < -vmax - 1) e[c] = -vmax - 1;
      end
      @(negedge clk);
      for (int c = 0; c < C; c++) begin
        checks++;
        if (!out_vld[c] || int'(out_val[c]) != e[c]) begin
          failures++;
          if (failures < 6) $display("FAIL got %0d exp %0d", out_val[c], e[c]);
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
