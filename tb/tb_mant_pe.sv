// tb_mant_pe: exhaustive check of the 2-bit PE (all x, all slices, both
// slice interpretations) against products and shifts worked out in integers.
module tb_mant_pe;
  logic signed [7:0]  x;
  logic        [1:0]  w;
  logic               sg;
  logic signed [10:0] prod, shifted;
  int checks = 0, failures = 0;
  mant_pe dut (.x, .w, .w_signed(sg), .prod, .shifted);
  initial begin
    for (int xi = -128; xi < 128; xi++)
      for (int wi = 0; wi < 4; wi++)
        for (int s = 0; s < 2; s++) begin
          int wv, ep, es;
          x = 8'(xi); w = 2'(wi); sg = s[0];
          #1;
          wv = (s == 1 && wi >= 2) ? wi - 4 : wi;
          ep = xi * wv;
          es = xi * (1 << wi);
          checks++;
          if (prod != 11'(ep) || shifted != 11'(es)) begin
            failures++;
            if (failures < 5) $display("FAIL x=%0d w=%0d s=%0d prod=%0d/%0d sh=%0d/%0d", xi, wi, s, prod, ep, shifted, es);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
