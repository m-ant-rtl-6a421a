// mant_peg: processing element group (PEG), one cell of the systolic array.
//
// Four 2-bit PEs (mant_pe) are combined so that one PEG computes per cycle
//   W8: one INT8 x INT8 product          (weight two's complement, psum2 = 0)
//   W4: two INT8 x 4-bit MANT products   (weight nibble j pairs with x lane j)
//   W2: four INT8 x 2-bit MANT products  (weight pair k pairs with x lane k)
// A 4-bit (2-bit) MANT weight is sign-magnitude: {s, |i|}. For it the PEG adds
// s*(x*|i|) into psum1 and s*(x << |i|) into psum2, the two partial sums of
// the fused decode  x*W = a*(x*i) + x*2^i  (the factor a is applied after the
// array, once per column). In W4 the low PE of a pair takes |i|[1:0] and the
// high PE |i|[2]; the product is the shifted sum of both, the shift is the low
// PE's x << |i|[1:0] moved four more places when |i|[2] is set.
//
// Weight-stationary: the 8-bit weight register loads when w_load is high. The
// activations move one PEG to the right and the psums one PEG down per
// cycle; x_vld travels with the activations. All outputs are registered.
module mant_peg
  import mant_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  wmode_e             mode,
  input  logic               w_load,
  input  logic        [7:0]  w_in,
  input  logic signed [7:0]  x_in  [LANES],
  input  logic               x_vld_in,
  input  logic signed [PSW-1:0] psum1_in,
  input  logic signed [PSW-1:0] psum2_in,
  output logic signed [7:0]  x_out [LANES],
  output logic               x_vld_out,
  output logic signed [PSW-1:0] psum1_out,
  output logic signed [PSW-1:0] psum2_out
);
  logic [7:0] w_q;
  logic signed [7:0]  pe_x   [LANES];
  logic        [1:0]  pe_w   [LANES];
  logic               pe_sg  [LANES];
  logic signed [10:0] pe_p   [LANES];
  logic signed [10:0] pe_s   [LANES];
  logic signed [PSW-1:0] add1, add2;

  for (genvar l = 0; l < LANES; l++) begin : g_pe
    mant_pe u_pe (.x(pe_x[l]), .w(pe_w[l]), .w_signed(pe_sg[l]),
                  .prod(pe_p[l]), .shifted(pe_s[l]));
  end

  // Operand routing to the four PEs.
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      pe_x[l]  = x_in[0];
      pe_w[l]  = w_q[2*l +: 2];
      pe_sg[l] = 1'b0;
    end
    case (mode)
      W8: pe_sg[3] = 1'b1;
      W4: for (int j = 0; j < 2; j++) begin
            pe_x[2*j]   = x_in[j];
            pe_x[2*j+1] = x_in[j];
            pe_w[2*j]   = w_q[4*j +: 2];
            pe_w[2*j+1] = {1'b0, w_q[4*j+2]};
          end
      default: for (int k = 0; k < LANES; k++) begin
            pe_x[k] = x_in[k];
            pe_w[k] = {1'b0, w_q[2*k]};
          end
    endcase
  end

  // Composition of the PE results: one signed term per weight slot, summed.
  always_comb begin
    logic signed [PSW-1:0] t1 [LANES];
    logic signed [PSW-1:0] t2 [LANES];
    for (int k = 0; k < LANES; k++) begin
      t1[k] = '0;
      t2[k] = '0;
    end
    case (mode)
      W8: for (int k = 0; k < LANES; k++) t1[k] = PSW'(pe_p[k]) <<< (2 * k);
      W4: for (int j = 0; j < 2; j++) begin
            t1[j] = PSW'(pe_p[2*j]) + (PSW'(pe_p[2*j+1]) <<< 2);
            t2[j] = w_q[4*j+2] ? (PSW'(pe_s[2*j]) <<< 4) : PSW'(pe_s[2*j]);
            if (w_q[4*j+3]) begin
              t1[j] = -t1[j];
              t2[j] = -t2[j];
            end
          end
      default: for (int k = 0; k < LANES; k++) begin
            t1[k] = w_q[2*k+1] ? -PSW'(pe_p[k]) : PSW'(pe_p[k]);
            t2[k] = w_q[2*k+1] ? -PSW'(pe_s[k]) : PSW'(pe_s[k]);
          end
    endcase
    add1 = t1[0] + t1[1] + t1[2] + t1[3];
    add2 = t2[0] + t2[1] + t2[2] + t2[3];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q       <= '0;
      x_vld_out <= 1'b0;
      psum1_out <= '0;
      psum2_out <= '0;
      for (int l = 0; l < LANES; l++) x_out[l] <= '0;
    end else begin
      if (w_load) w_q <= w_in;
      x_vld_out <= x_vld_in;
      x_out     <= x_in;
      psum1_out <= psum1_in + add1;
      psum2_out <= psum2_in + add2;
    end
  end
endmodule
