// mant_rqu: one real-time quantization unit (RQU).
//
// An RQU holds a comparator (running max of |v|) and two accumulators (sum of
// v and sum of v^2, the terms of the group variance). In the spatial mode it
// combines the partial result arriving from its left neighbour with its own
// input and passes the result right one cycle later, so a chain of RQUs
// reduces one output row as the row leaves the skewed array. In the temporal
// mode it folds each new input into its own registers (clr starts a new
// group), reducing one column over successive rows. Outputs are registered.
// The paper specifies FP16 comparator and accumulators; this design keeps the
// values in the VW-bit fixed-point format of the vector unit instead.
module mant_rqu
  import mant_pkg::*;
#(
  parameter int SUMW = VW + 7,
  parameter int SQW  = 2*VW + 7
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               temporal,
  input  logic               clr,
  input  logic               v_vld,
  input  logic signed [VW-1:0] v,
  input  logic               c_vld,        // chain input (spatial mode)
  input  logic [VW-1:0]      c_max,
  input  logic signed [SUMW-1:0] c_sum,
  input  logic [SQW-1:0]     c_sq,
  output logic               o_vld,
  output logic [VW-1:0]      o_max,
  output logic signed [SUMW-1:0] o_sum,
  output logic [SQW-1:0]     o_sq
);
  logic [VW-1:0]         b_max, absv;
  logic signed [SUMW-1:0] b_sum;
  logic [SQW-1:0]        b_sq;
  always_comb begin
    absv = v[VW-1] ? VW'(-v) : VW'(v);
    if (temporal) begin
      b_max = clr ? '0 : o_max;
      b_sum = clr ? '0 : o_sum;
      b_sq  = clr ? '0 : o_sq;
    end else begin
      b_max = c_vld ? c_max : '0;
      b_sum = c_vld ? c_sum : '0;
      b_sq  = c_vld ? c_sq  : '0;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_vld <= 1'b0;
      o_max <= '0;
      o_sum <= '0;
      o_sq  <= '0;
    end else if (v_vld) begin
      o_vld <= 1'b1;
      o_max <= (absv > b_max) ? absv : b_max;
      o_sum <= b_sum + SUMW'(v);
      o_sq  <= b_sq + SQW'(absv) * SQW'(absv);
    end else if (temporal && clr) begin
      o_vld <= 1'b0;
      o_max <= '0;
      o_sum <= '0;
      o_sq  <= '0;
    end else if (!temporal) begin
      o_vld <= 1'b0;
    end
  end
endmodule
