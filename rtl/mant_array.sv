// mant_array: weight-stationary systolic array of MANT PE groups.
//
// R x C PE groups (32 x 32 by default). Row r of the input vector enters PEG
// (r,0) r cycles after it is presented (an input skew of r registers), moves
// right one column per cycle, and the two psum lanes flow down one row per
// cycle. Column c therefore emits the result of input row m at the bottom
// R + c cycles after that row was presented: the rightmost column runs C-1
// cycles behind the leftmost, which the real-time quantization units use to
// pipeline their work. out_vld[c] marks a valid result for column c.
//
// Weights are loaded one PEG row per cycle (w_we, w_row, w_data). With W8
// weights the array is a 32x32 INT8 array, with W4 it acts as 64x32 and with
// W2 as 128x32 (each PEG row takes LANES activations, one per weight slot).
// psum1 carries sum(x*i) and psum2 sum(x*2^i) of the MANT decode, both signed
// and summed over the accumulation dimension.
module mant_array
  import mant_pkg::*;
#(
  parameter int R = ROWS,
  parameter int C = COLS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  wmode_e             mode,
  input  logic               w_we,
  input  logic [$clog2(R)-1:0] w_row,
  input  logic [7:0]         w_data [C],
  input  logic               x_vld,
  input  logic signed [7:0]  x_in   [R][LANES],
  output logic               out_vld [C],
  output logic signed [PSW-1:0] psum1 [C],
  output logic signed [PSW-1:0] psum2 [C]
);
  logic signed [7:0]     xh  [R][C+1][LANES];  // horizontal activation wires
  logic                  vh  [R][C+1];
  logic signed [PSW-1:0] p1v [R+1][C];         // vertical psum wires
  logic signed [PSW-1:0] p2v [R+1][C];
  logic                  vv  [R+1][C];

  // Input skew: row r is delayed by r cycles.
  for (genvar r = 0; r < R; r++) begin : g_skew
    if (r == 0) begin : g_direct
      assign xh[0][0] = x_in[0];
      assign vh[0][0] = x_vld;
    end else begin : g_delay
      logic signed [7:0] sx [r][LANES];
      logic              sv [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < r; d++) begin
            sv[d] <= 1'b0;
            for (int l = 0; l < LANES; l++) sx[d][l] <= '0;
          end
        end else begin
          sx[0] <= x_in[r];
          sv[0] <= x_vld;
          for (int d = 1; d < r; d++) begin
            sx[d] <= sx[d-1];
            sv[d] <= sv[d-1];
          end
        end
      end
      assign xh[r][0] = sx[r-1];
      assign vh[r][0] = sv[r-1];
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_top
    assign p1v[0][c] = '0;
    assign p2v[0][c] = '0;
    assign vv[0][c]  = 1'b0;
  end

  for (genvar r = 0; r < R; r++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      logic pv_q;
      mant_peg u_peg (
        .clk, .rst_n, .mode,
        .w_load   (w_we && (w_row == r[$clog2(R)-1:0])),
        .w_in     (w_data[c]),
        .x_in     (xh[r][c]),
        .x_vld_in (vh[r][c]),
        .psum1_in (p1v[r][c]),
        .psum2_in (p2v[r][c]),
        .x_out    (xh[r][c+1]),
        .x_vld_out(vh[r][c+1]),
        .psum1_out(p1v[r+1][c]),
        .psum2_out(p2v[r+1][c])
      );
      // A psum leaving this PEG is valid when the activation it used was.
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) pv_q <= 1'b0;
        else        pv_q <= vh[r][c];
      end
      assign vv[r+1][c] = pv_q;
    end
  end

  for (genvar c = 0; c < C; c++) begin : g_out
    assign out_vld[c] = vv[R][c];
    assign psum1[c]   = p1v[R][c];
    assign psum2[c]   = p2v[R][c];
  end
endmodule
