// mant_vwin: two-phase real-time quantization of the V cache (decode stage).
//
// In decoding, each step produces one new V vector, i.e. one element of every
// V group (groups run along the token dimension), so a group's statistics are
// only complete after G = 64 steps. Phase 1, every step: each channel's new
// value is quantized to INT8 with the channel's scale from the prefill stage
// (supplied as a reciprocal inv_s, 16 fraction bits, round half up, saturate
// at +-127), stored in the window buffer, and folded into a temporal-mode RQU
// that keeps the channel's max |q|, sum q and sum q^2. Phase 2, after the
// G-th vector: every channel picks its MANT type from the variance
// (mant_asel), then the G stored INT8 values of all channels are re-encoded
// to 4-bit MANT (mant_enc), one token per cycle, and the window restarts.
//
// Interface: in_vld/in_rdy handshake for a V vector; q8_vld/q8 echo the INT8
// vector one cycle later; during phase 2 mq_vld marks one token (mq_tok) of
// MANT codes and grp_code/grp_max hold each channel's type and max. While
// phase 2 runs (1 + G cycles) in_rdy is low, so the producer stalls.
// The statistics are taken on the INT8 values (the paper accumulates v_i; the
// normalised variance is the same up to INT8 rounding): this design's choice.
module mant_vwin
  import mant_pkg::*;
#(
  parameter int CH = COLS,
  parameter int G  = GROUP
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_vld,
  output logic               in_rdy,
  input  logic signed [VW-1:0] v     [CH],
  input  logic [15:0]        inv_s   [CH],
  input  logic [15:0]        thr     [NTYPES-1],
  input  logic [3:0]         bin_code [NTYPES],
  output logic               q8_vld,
  output logic signed [7:0]  q8      [CH],
  output logic               mq_vld,
  output logic [$clog2(G)-1:0] mq_tok,
  output logic [3:0]         mq      [CH],
  output logic [3:0]         grp_code [CH],
  output logic [VW-1:0]      grp_max  [CH]
);
  localparam int SUMW = VW + 7;
  localparam int SQW  = 2*VW + 7;
  localparam int TW   = $clog2(G);
  typedef enum logic [1:0] {S_FILL, S_SEL, S_EMIT} state_e;

  state_e st_q;
  logic [TW-1:0] cnt_q, tok_q;
  logic signed [7:0] win [CH][G];
  logic signed [7:0] q8_n [CH];
  logic              r_vld [CH];
  logic signed [VW-1:0] r_v [CH];
  logic              ro_vld [CH];
  logic [VW-1:0]     ro_max [CH];
  logic signed [SUMW-1:0] ro_sum [CH];
  logic [SQW-1:0]    ro_sq  [CH];
  logic [3:0]        sel_code [CH];
  logic [3:0]        enc_q    [CH];
  logic              accept;

  assign in_rdy = (st_q == S_FILL);
  assign accept = in_vld && in_rdy;

  for (genvar c = 0; c < CH; c++) begin : g_ch
    logic signed [VW+17:0] prod, rnd;
    always_comb begin
      prod = (VW+18)'(v[c]) * $signed({2'b0, inv_s[c]});
      rnd  = (prod + (VW+18)'(32768)) >>> 16;
      if (rnd > 127)       q8_n[c] = 8'sd127;
      else if (rnd < -127) q8_n[c] = -8'sd127;
      else                 q8_n[c] = 8'(rnd);
      r_vld[c] = accept;
      r_v[c]   = VW'(q8_n[c]);
    end
    mant_rqu #(.SUMW(SUMW), .SQW(SQW)) u_rqu (
      .clk, .rst_n, .temporal(1'b1), .clr(accept && cnt_q == '0),
      .v_vld(r_vld[c]), .v(r_v[c]),
      .c_vld(1'b0), .c_max('0), .c_sum('0), .c_sq('0),
      .o_vld(ro_vld[c]), .o_max(ro_max[c]), .o_sum(ro_sum[c]), .o_sq(ro_sq[c]));
    mant_asel #(.SUMW(SUMW), .SQW(SQW)) u_asel (
      .n(7'(G)), .s1(ro_sum[c]), .s2(ro_sq[c]), .vmax(ro_max[c]),
      .thr, .bin_code, .code(sel_code[c]));
    mant_enc u_enc (.v(VW'(win[c][tok_q])), .vmax(grp_max[c]), .code(grp_code[c]),
                    .q(enc_q[c]));
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < CH; c++)
      if (accept) win[c][cnt_q] <= q8_n[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_FILL; cnt_q <= '0; tok_q <= '0;
      q8_vld <= 1'b0; mq_vld <= 1'b0; mq_tok <= '0;
      for (int c = 0; c < CH; c++) begin
        q8[c] <= '0; mq[c] <= '0; grp_code[c] <= '0; grp_max[c] <= '0;
      end
    end else begin
      q8_vld <= accept;
      mq_vld <= 1'b0;
      if (accept) q8 <= q8_n;
      case (st_q)
        S_FILL: if (accept) begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == TW'(G-1)) st_q <= S_SEL;
        end
        S_SEL: begin
          grp_code <= sel_code;
          grp_max  <= ro_max;
          tok_q    <= '0;
          st_q     <= S_EMIT;
        end
        default: begin
          mq_vld <= 1'b1;
          mq_tok <= tok_q;
          mq     <= enc_q;
          tok_q  <= tok_q + 1'b1;
          if (tok_q == TW'(G-1)) begin
            st_q  <= S_FILL;
            cnt_q <= '0;
          end
        end
      endcase
    end
  end
endmodule
