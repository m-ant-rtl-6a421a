// mant_vector_unit: dequantization of the array outputs, one lane per column.
//
// Each lane finishes the fused MANT decode of Eq. (5): the column's psum1
// (sum of x*i) is multiplied by the column's coefficient a and added to psum2
// (sum of x*2^i); for an INT-typed column the value is psum1 alone. The
// result is multiplied by the product of the activation scale sX (for the
// output row that is leaving this column now) and the weight scale sW of the
// column, which the lane forms at the same time. Scales are unsigned fixed
// point with SFRAC fraction bits, so the product is shifted right by
// 2*SFRAC with round-half-up and saturated to a VW-bit signed value.
// Latency: one cycle, fully pipelined. Scales in fixed point (rather than
// FP16) are this design's choice.
module mant_vector_unit
  import mant_pkg::*;
#(
  parameter int C = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_vld [C],
  input  logic signed [PSW-1:0] psum1 [C],
  input  logic signed [PSW-1:0] psum2 [C],
  input  logic [3:0]         tcode [C],   // data type of the column's weights
  input  logic [SW-1:0]      sx    [C],   // activation scale of the row in lane c
  input  logic [SW-1:0]      sw    [C],   // weight scale of the column
  output logic               out_vld [C],
  output logic signed [VW-1:0] value [C]
);
  localparam int PW = PSW + 10;
  localparam int MW = PW + 2*SW + 1;
  localparam logic signed [VW-1:0] VMAX = {1'b0, {(VW-1){1'b1}}};
  localparam logic signed [VW-1:0] VMIN = {1'b1, {(VW-1){1'b0}}};

  for (genvar c = 0; c < C; c++) begin : g_lane
    logic signed [PW-1:0] comb;
    logic signed [MW-1:0] prod, shr;
    logic        [2*SW-1:0] sxw;
    always_comb begin
      sxw  = sx[c] * sw[c];
      comb = (tcode[c] == TYPE_INT) ? PW'(psum1[c])
           : PW'(psum1[c]) * PW'($signed({1'b0, a_of(tcode[c])})) + PW'(psum2[c]);
      prod = MW'(comb) * $signed(MW'(sxw));
      shr  = (prod + (MW'(1) <<< (2*SFRAC-1))) >>> (2*SFRAC);
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        out_vld[c] <= 1'b0;
        value[c]   <= '0;
      end else begin
        out_vld[c] <= in_vld[c];
        if (shr > MW'(VMAX))      value[c] <= VMAX;
        else if (shr < MW'(VMIN)) value[c] <= VMIN;
        else                      value[c] <= VW'(shr);
      end
    end
  end
endmodule
