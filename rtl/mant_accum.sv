// mant_accum: accumulation unit, one lane per output column.
//
// Adds a dequantized partial output (one K tile of the GEMM) to the running
// sum read from the output buffer, or starts a new sum on the first K tile.
// The sum saturates at the VW-bit signed range. Registered, one cycle:
// out = first ? in : sat(acc_in + in). The output buffer read that supplies
// acc_in is issued one cycle ahead by the controller. The paper gives only
// the unit's role (32 accumulation units, deferred scale multiply before the
// partial-sum accumulation); the saturating add is this design's choice.
module mant_accum
  import mant_pkg::*;
#(
  parameter int C = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_vld [C],
  input  logic               first  [C],
  input  logic signed [VW-1:0] in_val [C],
  input  logic signed [VW-1:0] acc_in [C],
  output logic               out_vld [C],
  output logic signed [VW-1:0] out_val [C]
);
  localparam logic signed [VW:0] VMAX = (VW+1)'({1'b0, {(VW-1){1'b1}}});
  localparam logic signed [VW:0] VMIN = -VMAX - 1;
  for (genvar c = 0; c < C; c++) begin : g_lane
    logic signed [VW:0] s;
    always_comb s = first[c] ? (VW+1)'(in_val[c]) : (VW+1)'(in_val[c]) + (VW+1)'(acc_in[c]);
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_vld[c] <= 1'b0;
        out_val[c] <= '0;
      end else begin
        out_vld[c] <= in_vld[c];
        out_val[c] <= (s > VMAX) ? VW'(VMAX) : (s < VMIN) ? VW'(VMIN) : VW'(s);
      end
    end
  end
endmodule
