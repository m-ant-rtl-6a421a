// mant_enc: 4-bit MANT encoder (nearest grid point).
//
// Given a value v, the absolute maximum of its group and the group's type
// code, returns {sign, |i|}: the index of the grid point a*|i| + 2^|i| (or
// |i| for INT) nearest to |v| * gmax / max, where gmax = 7a + 128 (or 7) is
// the largest grid magnitude, so max maps to index 7. Instead of dividing,
// the unit tests the seven midpoints in parallel:
//   2*|v|*gmax > max*(g_i + g_{i+1})   for i = 0..6,
// and |i| is the number of midpoints passed (a tie rounds down). The paper
// defines the encoding as an argmin over the grid; the midpoint comparators
// are this design's implementation of it. Combinational.
module mant_enc
  import mant_pkg::*;
(
  input  logic signed [VW-1:0] v,
  input  logic [VW-1:0]       vmax,
  input  logic [3:0]          code,
  output logic [3:0]          q
);
  localparam int EW = VW + 14;
  logic [VW-1:0] absv;
  logic [EW-1:0] lhs;
  logic [2:0]    mag;
  always_comb begin
    absv = v[VW-1] ? VW'(-v) : VW'(v);
    lhs  = EW'(absv) * EW'(gmax(code)) * EW'(2);
    mag  = '0;
    for (int i = 0; i < 7; i++)
      if (lhs > EW'(vmax) * EW'(grid(code, 3'(i)) + grid(code, 3'(i+1)))) mag = mag + 3'd1;
    q = {v[VW-1], mag};
  end
endmodule
