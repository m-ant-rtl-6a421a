// mant_asel: choice of the MANT coefficient a from a group's variance.
//
// Real-time data (K and V cache) cannot afford the offline MSE search used for
// weights, so the type of a group is chosen from the variance of its elements
// normalised to the group's absolute maximum:
//   var = (S2/n - (S1/n)^2) / max^2,
// with S1 = sum v, S2 = sum v^2 and n elements. Each type owns a variance
// range found by calibration. The unit compares, without dividing,
//   (n*S2 - S1^2) * 2^16  against  T_j * n^2 * max^2
// for NTYPES-1 ascending thresholds T_j (unsigned, 16 fraction bits). The
// number of thresholds met is the range index, and bin_code maps it to a
// 4-bit type code. Thresholds and mapping are run-time inputs because the
// paper gives only one example range (a=40: [0.104, 0.118]).
// Combinational.
module mant_asel
  import mant_pkg::*;
#(
  parameter int SUMW = VW + 7,
  parameter int SQW  = 2*VW + 7
) (
  input  logic [6:0]        n,
  input  logic signed [SUMW-1:0] s1,
  input  logic [SQW-1:0]    s2,
  input  logic [VW-1:0]     vmax,
  input  logic [15:0]       thr      [NTYPES-1],
  input  logic [3:0]        bin_code [NTYPES],
  output logic [3:0]        code
);
  localparam int WW = 2*SUMW + 24;
  logic [WW-1:0] lhs, n2m2, rhs;
  logic [SUMW-1:0] a1;
  logic [4:0] bin;
  always_comb begin
    a1   = s1[SUMW-1] ? SUMW'(-s1) : SUMW'(s1);
    lhs  = (WW'(n) * WW'(s2) - WW'(a1) * WW'(a1)) << 16;
    n2m2 = WW'(n) * WW'(n) * WW'(vmax) * WW'(vmax);
    bin  = '0;
    for (int j = 0; j < NTYPES-1; j++) begin
      rhs = WW'(thr[j]) * n2m2;
      if (lhs >= rhs) bin = bin + 5'd1;
    end
    code = bin_code[bin[3:0]];
  end
endmodule
