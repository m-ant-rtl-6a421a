// mant_rqu_array: the row of N real-time quantization units under the array.
//
// Spatial mode (activations, K cache): RQU i takes column i's value and the
// partial result of RQU i-1; RQU 0 takes the carry input, which is empty on
// the first pass over a group and holds the first pass's result on the second
// (a 64-element group spans two 32-column rows). Because column i's output
// leaves the array i cycles after column 0's, the chain needs no extra skew:
// feed it the skewed array outputs and the last RQU emits one reduced row per
// cycle, N cycles after the row's first element. Temporal mode (V cache):
// every RQU keeps its own column's max/sum/sum of squares over successive
// rows; clr starts a new group. Results of every unit are visible on the
// per-unit outputs; the chain result is the last unit's.
module mant_rqu_array
  import mant_pkg::*;
#(
  parameter int N    = COLS,
  parameter int SUMW = VW + 7,
  parameter int SQW  = 2*VW + 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               temporal,
  input  logic               clr,
  input  logic               v_vld [N],
  input  logic signed [VW-1:0] v  [N],
  input  logic               cin_vld,
  input  logic [VW-1:0]      cin_max,
  input  logic signed [SUMW-1:0] cin_sum,
  input  logic [SQW-1:0]     cin_sq,
  output logic               o_vld [N],
  output logic [VW-1:0]      o_max [N],
  output logic signed [SUMW-1:0] o_sum [N],
  output logic [SQW-1:0]     o_sq  [N]
);
  for (genvar i = 0; i < N; i++) begin : g_rqu
    mant_rqu #(.SUMW(SUMW), .SQW(SQW)) u_rqu (
      .clk, .rst_n, .temporal, .clr,
      .v_vld (v_vld[i]),
      .v     (v[i]),
      .c_vld (i == 0 ? cin_vld : o_vld[(i == 0) ? 0 : i-1]),
      .c_max (i == 0 ? cin_max : o_max[(i == 0) ? 0 : i-1]),
      .c_sum (i == 0 ? cin_sum : o_sum[(i == 0) ? 0 : i-1]),
      .c_sq  (i == 0 ? cin_sq  : o_sq[(i == 0) ? 0 : i-1]),
      .o_vld (o_vld[i]),
      .o_max (o_max[i]),
      .o_sum (o_sum[i]),
      .o_sq  (o_sq[i])
    );
  end
endmodule
