// mant_pe: one processing element, the 2-bit weight slice of a PE group.
//
// The PE holds the two halves that the MANT product needs (Fig. 9 of the
// design): a multiplier (MAC side) that forms x * w for psum1, and a shifter
// (SAC side) that forms x << w for psum2, the term x * 2^|W| of the MANT
// decode. x is a signed INT8 activation, w a 2-bit weight slice that is read
// as unsigned (0..3) or, for the top slice of an INT8 weight, as signed
// (-2..1). The PE is purely combinational; the PE group around it adds the
// results into the two psum lanes and registers them. Splitting an 8-bit
// weight into four 2-bit slices follows the BitFusion-style composition the
// paper adopts; the signed-slice control is this design's own detail.
module mant_pe (
  input  logic signed [7:0]  x,        // activation
  input  logic        [1:0]  w,        // weight slice
  input  logic               w_signed, // read w as two's complement
  output logic signed [10:0] prod,     // x * w           (MAC)
  output logic signed [10:0] shifted   // x << w, w as 0..3 (SAC)
);
  logic signed [2:0] wv;
  always_comb begin
    wv      = w_signed ? {w[1], w} : {1'b0, w};
    prod    = 11'(x) * 11'(wv);
    shifted = 11'(x) <<< w;
  end
endmodule
