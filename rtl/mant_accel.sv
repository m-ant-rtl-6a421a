// mant_accel: the MANT accelerator top level.
//
// A 32x32 weight-stationary array of MANT PE groups computes group-quantized
// GEMMs with INT8 activations and 8-, 4- or 2-bit weights; 4-/2-bit weights
// are MANT-coded, and the two psum lanes (sum x*i, sum x*2^i) are fused into
// the dequantized result below the array by the vector unit, which also
// applies sX*sW. Accumulation units add the K tiles in the output buffer.
// After the last K tile the finished output is quantized on chip: row groups
// through the spatial RQU chain (activations to INT8, K cache to 4-bit MANT
// with a chosen from the variance), column groups through the temporal RQU
// mode (V cache in prefill to 4-bit MANT). A V vector produced in decoding
// can instead be sent to the two-phase V window unit.
//
// Operation (cmd_start with the cfg_* inputs held stable until done):
//   for nt < cfg_nt, kt < cfg_kt: load weight tile (R+1 cycles), stream
//   cfg_m input rows (one per cycle), drain; then the cfg_oq pass.
// Buffer layout (this design's choice; each buffer is 32 banks):
//   input  buffer  addr kt*M + m, bank r = the LANES bytes of PEG row r
//   weight buffer  addr (nt*KT + kt)*R + r, bank c = weight byte of PEG(r,c)
//   quant  buffer  addr QW_BASE + nt*KT + kt, bank c = {tcode, sW} of column c
//                  addr QX_BASE + kt*ceil(M/C) + m/C, bank m%C = sX of row m
//                  (so KT*ceil(M/C) must stay below QV_BASE - QX_BASE)
//                  (sX of successive rows sit in different banks, so the 32
//                  columns, which leave the array on different rows, read
//                  their sX in the same cycle without conflict)
//                  addr QV_BASE, bank c = 1/scale of V channel c (16 frac bits)
//   output buffer  addr nt*M + m, bank c = dequantized value (VW bits, sign-extended)
// Outputs: quantized elements on qo_* (one row of C per beat, INT8 or 4-bit
// codes in the low bits), group parameters on qp_* (type code, max, scale =
// max/qmax in SFRAC fixed point), the V window streams on vq8_*/vmq_*.
// Host ports write any buffer row, or read the output/quant buffer, when idle.
// The spatial quantization pass walks one row at a time and is not overlapped
// with the next GEMM, unlike the paper's schedule.
module mant_accel
  import mant_pkg::*;
#(
  parameter int R        = ROWS,
  parameter int C        = COLS,
  parameter int IB_DEPTH = 1024,   // 32 banks x 32 bit  -> 128 KB
  parameter int WB_DEPTH = 4096,   // 32 banks x 8 bit   -> 128 KB
  parameter int OB_DEPTH = 1024,   // 32 banks x 32 bit  -> 128 KB
  parameter int QB_DEPTH = 1024,   // 32 banks x 32 bit  -> 128 KB
  parameter int QW_BASE  = 0,
  parameter int QX_BASE  = 512,
  parameter int QV_BASE  = 1023
) (
  input  logic               clk,
  input  logic               rst_n,
  // host buffer access
  input  logic               hw_en,
  input  logic [1:0]         hw_buf,      // 0 input, 1 weight, 2 output, 3 quant
  input  logic [11:0]        hw_addr,
  input  logic [31:0]        hw_data [C],
  input  logic               hr_en,
  input  logic               hr_buf,      // 0 output, 1 quant
  input  logic [11:0]        hr_addr,
  output logic               hr_vld,
  output logic [31:0]        hr_data [C],
  // command
  input  logic               cmd_start,
  input  wmode_e             cfg_mode,
  input  logic [9:0]         cfg_m,
  input  logic [4:0]         cfg_kt,
  input  logic [1:0]         cfg_nt,
  input  oqmode_e            cfg_oq,
  input  logic               cfg_vdec,    // send output row 0 to the V window
  input  logic [15:0]        cfg_thr      [NTYPES-1],
  input  logic [3:0]         cfg_bin_code [NTYPES],
  output logic               busy,
  output logic               done,
  // quantized output and quantization parameters
  output logic               qo_vld,
  output logic [9:0]         qo_m,
  output logic [1:0]         qo_nt,
  output logic [7:0]         qo_data [C],
  output logic               qp_vld,
  output logic [9:0]         qp_m,
  output logic [1:0]         qp_nt,
  output logic [3:0]         qp_code  [C],
  output logic [VW-1:0]      qp_max   [C],
  output logic [SW-1:0]      qp_scale [C],
  // V cache window (decode)
  output logic               vq8_vld,
  output logic signed [7:0]  vq8 [C],
  output logic               vmq_vld,
  output logic [5:0]         vmq_tok,
  output logic [3:0]         vmq [C],
  output logic [3:0]         vgrp_code [C],
  output logic [VW-1:0]      vgrp_max  [C],
  output logic               vstall
);
  localparam int SUMW = VW + 7;
  localparam int SQW  = 2*VW + 7;
  localparam int RB   = $clog2(R);
  localparam int CB   = $clog2(C);
  localparam int IBA  = $clog2(IB_DEPTH);
  localparam int WBA  = $clog2(WB_DEPTH);
  localparam int OBA  = $clog2(OB_DEPTH);
  localparam int QBA  = $clog2(QB_DEPTH);
  localparam int DRAIN = R + C + 6;

  typedef enum logic [4:0] {
    S_IDLE, S_WL, S_ST, S_DR, S_NEXT,
    S_QRD, S_QCH, S_QSEL, S_QSW, S_QERD, S_QEL, S_QEW, S_QNEXT,
    S_TRD, S_TSEL, S_TSW, S_TERD, S_TEL,
    S_VRD, S_VIN, S_DONE
  } state_e;

  state_e st;
  logic [9:0]  m_q, t_q;
  logic [4:0]  kt_q;
  logic [1:0]  nt_q, j_q;
  logic [7:0]  cyc_q;
  logic [3:0]  tcode_q [C];
  logic [SW-1:0] sw_q  [C];
  logic        meta_ld;

  // ---------------- buffers ----------------
  logic            ib_we [R], ib_re [R];
  logic [IBA-1:0]  ib_wa [R], ib_ra [R];
  logic [31:0]     ib_wd [R], ib_rd [R];
  logic            wb_we [C], wb_re [C];
  logic [WBA-1:0]  wb_wa [C], wb_ra [C];
  logic [7:0]      wb_wd [C], wb_rd [C];
  logic            ob_we [C], ob_re [C];
  logic [OBA-1:0]  ob_wa [C], ob_ra [C];
  logic [31:0]     ob_wd [C], ob_rd [C];
  logic            qb_we [C], qb_re [C];
  logic [QBA-1:0]  qb_wa [C], qb_ra [C];
  logic [31:0]     qb_wd [C], qb_rd [C];

  mant_sram_banked #(.BANKS(R), .WIDTH(32), .DEPTH(IB_DEPTH)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_wa), .wdata(ib_wd), .re(ib_re), .raddr(ib_ra), .rdata(ib_rd));
  mant_sram_banked #(.BANKS(C), .WIDTH(8), .DEPTH(WB_DEPTH)) u_wbuf (
    .clk, .we(wb_we), .waddr(wb_wa), .wdata(wb_wd), .re(wb_re), .raddr(wb_ra), .rdata(wb_rd));
  mant_sram_banked #(.BANKS(C), .WIDTH(32), .DEPTH(OB_DEPTH)) u_obuf (
    .clk, .we(ob_we), .waddr(ob_wa), .wdata(ob_wd), .re(ob_re), .raddr(ob_ra), .rdata(ob_rd));
  mant_sram_banked #(.BANKS(C), .WIDTH(32), .DEPTH(QB_DEPTH)) u_qbuf (
    .clk, .we(qb_we), .waddr(qb_wa), .wdata(qb_wd), .re(qb_re), .raddr(qb_ra), .rdata(qb_rd));

  // ---------------- array ----------------
  logic               a_wwe;
  logic [RB-1:0]      a_wrow;
  logic [7:0]         a_wdata [C];
  logic               a_xvld;
  logic signed [7:0]  a_x [R][LANES];
  logic               a_ovld [C];
  logic signed [PSW-1:0] a_p1 [C], a_p2 [C];

  mant_array #(.R(R), .C(C)) u_array (
    .clk, .rst_n, .mode(cfg_mode), .w_we(a_wwe), .w_row(a_wrow), .w_data(a_wdata),
    .x_vld(a_xvld), .x_in(a_x), .out_vld(a_ovld), .psum1(a_p1), .psum2(a_p2));

  // weight-load and stream pipelines (buffer read -> array, one cycle)
  logic wl_d, st_d;
  logic [RB-1:0] wl_row_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wl_d <= 1'b0; st_d <= 1'b0; wl_row_d <= '0;
    end else begin
      wl_d     <= (st == S_WL) && (cyc_q < 8'(R));
      wl_row_d <= RB'(cyc_q);
      st_d     <= (st == S_ST);
    end
  end
  always_comb begin
    a_wwe  = wl_d;
    a_wrow = wl_row_d;
    for (int c = 0; c < C; c++) a_wdata[c] = wb_rd[c];
    a_xvld = st_d;
    for (int r = 0; r < R; r++)
      for (int l = 0; l < LANES; l++) a_x[r][l] = ib_rd[r][8*l +: 8];
  end

  // ---------------- dequantization / accumulation pipeline ----------------
  logic [9:0]  mc_q [C];                 // row index of the next output per column
  logic        d1_vld [C], d2_vld [C];
  logic [9:0]  d1_m [C], d2_m [C], d3_m [C];
  logic signed [PSW-1:0] d1_p1 [C], d1_p2 [C];
  logic [SW-1:0] vu_sx [C];
  logic        vu_vld [C], ac_vld [C], ac_first [C];
  logic signed [VW-1:0] vu_val [C], ac_in [C], ac_val [C];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < C; c++) begin
        mc_q[c] <= '0; d1_vld[c] <= 1'b0; d2_vld[c] <= 1'b0;
        d1_m[c] <= '0; d2_m[c] <= '0; d3_m[c] <= '0; d1_p1[c] <= '0; d1_p2[c] <= '0;
      end
    end else begin
      for (int c = 0; c < C; c++) begin
        if (st == S_WL) mc_q[c] <= '0;
        else if (a_ovld[c]) mc_q[c] <= mc_q[c] + 1'b1;
        d1_vld[c] <= a_ovld[c];
        d1_m[c]   <= mc_q[c];
        d1_p1[c]  <= a_p1[c];
        d1_p2[c]  <= a_p2[c];
        d2_vld[c] <= d1_vld[c];
        d2_m[c]   <= d1_m[c];
        d3_m[c]   <= d2_m[c];
      end
    end
  end

  always_comb begin
    for (int c = 0; c < C; c++) vu_sx[c] = qb_rd[d1_m[c][CB-1:0]][SW-1:0];
  end

  mant_vector_unit #(.C(C)) u_vec (
    .clk, .rst_n, .in_vld(d1_vld), .psum1(d1_p1), .psum2(d1_p2),
    .tcode(tcode_q), .sx(vu_sx), .sw(sw_q), .out_vld(vu_vld), .value(vu_val));

  always_comb begin
    for (int c = 0; c < C; c++) begin
      ac_in[c]    = VW'(ob_rd[c]);
      ac_first[c] = (kt_q == '0);
    end
  end

  mant_accum #(.C(C)) u_acc (
    .clk, .rst_n, .in_vld(vu_vld), .first(ac_first), .in_val(vu_val), .acc_in(ac_in),
    .out_vld(ac_vld), .out_val(ac_val));

  // ---------------- real-time quantization ----------------
  logic signed [VW-1:0] qv [C];          // output-buffer row being quantized
  logic        rq_temporal, rq_clr, rq_cin_vld;
  logic        rq_vld [C];
  logic signed [VW-1:0] rq_v [C];
  logic        ro_vld [C];
  logic [VW-1:0] ro_max [C];
  logic signed [SUMW-1:0] ro_sum [C];
  logic [SQW-1:0] ro_sq [C];
  logic [VW-1:0] car_max;
  logic signed [SUMW-1:0] car_sum;
  logic [SQW-1:0] car_sq;
  logic        rd_d;                       // output-buffer row data valid this cycle

  always_comb for (int c = 0; c < C; c++) qv[c] = VW'(ob_rd[c]);

  // skew of the row for the spatial chain: lane c delayed by c cycles
  for (genvar c = 0; c < C; c++) begin : g_skew
    if (c == 0) begin : g_0
      assign rq_v[0]   = qv[0];
      assign rq_vld[0] = rd_d && (st == S_QCH || st == S_TRD);
    end else begin : g_d
      logic signed [VW-1:0] sv [c];
      logic sk [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int d = 0; d < c; d++) begin sv[d] <= '0; sk[d] <= 1'b0; end
        end else begin
          sv[0] <= qv[c];
          sk[0] <= rd_d && (st == S_QCH);
          for (int d = 1; d < c; d++) begin sv[d] <= sv[d-1]; sk[d] <= sk[d-1]; end
        end
      end
      assign rq_v[c]   = rq_temporal ? qv[c] : sv[c-1];
      assign rq_vld[c] = rq_temporal ? (rd_d && st == S_TRD) : sk[c-1];
    end
  end

  mant_rqu_array #(.N(C), .SUMW(SUMW), .SQW(SQW)) u_rqu (
    .clk, .rst_n, .temporal(rq_temporal), .clr(rq_clr), .v_vld(rq_vld), .v(rq_v),
    .cin_vld(rq_cin_vld), .cin_max(car_max), .cin_sum(car_sum), .cin_sq(car_sq),
    .o_vld(ro_vld), .o_max(ro_max), .o_sum(ro_sum), .o_sq(ro_sq));

  // type selection: lane 0 serves the spatial group, every lane a temporal column
  logic [3:0]     as_code [C];
  for (genvar c = 0; c < C; c++) begin : g_asel
    logic signed [SUMW-1:0] s1;
    logic [SQW-1:0]  s2;
    logic [VW-1:0]   mx;
    logic [6:0]      n;
    assign s1 = (c == 0 && !rq_temporal) ? car_sum : ro_sum[c];
    assign s2 = (c == 0 && !rq_temporal) ? car_sq  : ro_sq[c];
    assign mx = (c == 0 && !rq_temporal) ? car_max : ro_max[c];
    assign n  = rq_temporal ? 7'(GROUP) : 7'(cfg_nt) * 7'(C);
    mant_asel #(.SUMW(SUMW), .SQW(SQW)) u_asel (
      .n, .s1, .s2, .vmax(mx), .thr(cfg_thr), .bin_code(cfg_bin_code), .code(as_code[c]));
  end

  logic qv_sign_q [C];

  // group parameters held during the element pass
  logic [3:0]    g_code [C];
  logic [VW-1:0] g_max  [C];

  // per-lane dividers (scales and INT8 elements) and MANT encoders
  logic          dv_start;
  logic [39:0]   dv_num [C];
  logic [VW:0]   dv_den [C];
  logic          dv_busy [C], dv_done [C];
  logic [39:0]   dv_q [C];
  logic [VW:0]   dv_r [C];
  logic [3:0]    enc_q [C];
  for (genvar c = 0; c < C; c++) begin : g_lane
    logic [VW-1:0] av;
    logic [10:0]   gm;
    assign av = qv[c][VW-1] ? VW'(-qv[c]) : VW'(qv[c]);
    assign gm = (g_code[c] == TYPE_INT && cfg_oq == OQ_ACT8) ? 11'd127 : gmax(g_code[c]);
    always_comb begin
      if (st == S_QSEL || st == S_QSW || st == S_TSEL || st == S_TSW) begin
        // scale = round(max * 2^SFRAC / qmax)
        dv_num[c] = (40'(g_max[c]) << (SFRAC + 1)) + 40'(gm);
        dv_den[c] = (VW+1)'(gm) << 1;
      end else begin
        // INT8 element = round(127 * |v| / max)
        dv_num[c] = 40'(av) * 40'd254 + 40'(g_max[c]);
        dv_den[c] = (VW+1)'(g_max[c]) << 1;
      end
    end
    mant_div #(.DW(40), .DVW(VW+1), .LAT(12)) u_div (
      .clk, .rst_n, .start(dv_start), .dividend(dv_num[c]), .divisor(dv_den[c]),
      .busy(dv_busy[c]), .done(dv_done[c]), .quotient(dv_q[c]), .remainder(dv_r[c]));
    mant_enc u_enc (.v(qv[c]), .vmax(g_max[c]), .code(g_code[c]), .q(enc_q[c]));
  end

  // ---------------- V window ----------------
  logic        vw_in_vld, vw_rdy;
  logic [15:0] vw_inv [C];
  logic [15:0] inv_q  [C];
  always_comb for (int c = 0; c < C; c++) vw_inv[c] = (cyc_q == 8'd0) ? qb_rd[c][15:0] : inv_q[c];
  mant_vwin #(.CH(C), .G(GROUP)) u_vwin (
    .clk, .rst_n, .in_vld(vw_in_vld), .in_rdy(vw_rdy), .v(qv), .inv_s(vw_inv),
    .thr(cfg_thr), .bin_code(cfg_bin_code), .q8_vld(vq8_vld), .q8(vq8),
    .mq_vld(vmq_vld), .mq_tok(vmq_tok), .mq(vmq), .grp_code(vgrp_code), .grp_max(vgrp_max));

  // ---------------- buffer port control ----------------
  logic hr_d;
  logic hr_buf_d;
  always_comb begin
    for (int r = 0; r < R; r++) begin
      ib_we[r] = hw_en && hw_buf == 2'd0 && st == S_IDLE;
      ib_wa[r] = IBA'(hw_addr);
      ib_wd[r] = hw_data[r % C];
      ib_re[r] = (st == S_ST);
      ib_ra[r] = IBA'(kt_q * cfg_m + m_q);
    end
    for (int c = 0; c < C; c++) begin
      wb_we[c] = hw_en && hw_buf == 2'd1 && st == S_IDLE;
      wb_wa[c] = WBA'(hw_addr);
      wb_wd[c] = hw_data[c][7:0];
      wb_re[c] = (st == S_WL);
      wb_ra[c] = WBA'((32'(nt_q) * 32'(cfg_kt) + 32'(kt_q)) * 32'(R) + 32'(cyc_q));

      // output buffer: host, accumulation write-back, quantization reads
      ob_we[c] = (hw_en && hw_buf == 2'd2 && st == S_IDLE) || ac_vld[c];
      ob_wa[c] = ac_vld[c] ? OBA'(nt_q * cfg_m + d3_m[c]) : OBA'(hw_addr);
      ob_wd[c] = ac_vld[c] ? 32'(ac_val[c]) : hw_data[c];
      ob_re[c] = 1'b1;
      if (st == S_IDLE)
        ob_ra[c] = OBA'(hr_addr);
      else if (st == S_ST || st == S_DR)
        ob_ra[c] = OBA'(nt_q * cfg_m + d1_m[c]);
      else if (st == S_TRD || st == S_TERD)
        ob_ra[c] = OBA'(j_q * cfg_m + m_q + t_q);
      else if (st == S_VRD || st == S_VIN)
        ob_ra[c] = '0;
      else
        ob_ra[c] = OBA'(j_q * cfg_m + m_q);

      qb_we[c] = hw_en && hw_buf == 2'd3 && st == S_IDLE;
      qb_wa[c] = QBA'(hw_addr);
      qb_wd[c] = hw_data[c];
      qb_re[c] = 1'b1;
      qb_ra[c] = (st == S_IDLE) ? QBA'(hr_addr)
               : (st == S_WL)   ? QBA'(QW_BASE + 32'(nt_q) * cfg_kt + kt_q)
               : (st == S_VRD)  ? QBA'(QV_BASE) : '0;
    end
    // sX reads: the column that carries row m reads bank m % C
    if (st == S_ST || st == S_DR)
      for (int c = 0; c < C; c++)
        if (a_ovld[c]) qb_ra[mc_q[c][CB-1:0]] = QBA'(32'(QX_BASE) + 32'(kt_q) * ((32'(cfg_m) + 32'(C - 1)) >> CB) + 32'(mc_q[c] >> CB));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin hr_d <= 1'b0; hr_buf_d <= 1'b0; end
    else begin hr_d <= hr_en && st == S_IDLE; hr_buf_d <= hr_buf; end
  end
  assign hr_vld = hr_d;
  always_comb for (int c = 0; c < C; c++) hr_data[c] = hr_buf_d ? qb_rd[c] : ob_rd[c];

  // column metadata captured one cycle after the W-meta read
  assign meta_ld = (st == S_WL) && (cyc_q == 8'd1);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int c = 0; c < C; c++) begin tcode_q[c] <= '0; sw_q[c] <= '0; end
    else if (meta_ld) for (int c = 0; c < C; c++) begin
      tcode_q[c] <= qb_rd[c][SW +: 4];
      sw_q[c]    <= qb_rd[c][SW-1:0];
    end
  end

  // ---------------- controller ----------------
  assign busy        = (st != S_IDLE);
  assign rq_temporal = (st == S_TRD || st == S_TSEL || st == S_TSW);
  assign rq_clr      = (st == S_TRD) && rd_d && (t_q == 10'd1);
  assign rq_cin_vld  = (j_q != '0);
  assign vstall      = (st == S_VIN) && !vw_rdy;
  assign vw_in_vld   = (st == S_VIN) && rd_d;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; m_q <= '0; t_q <= '0; kt_q <= '0; nt_q <= '0; j_q <= '0; cyc_q <= '0;
      done <= 1'b0; rd_d <= 1'b0; dv_start <= 1'b0;
      qo_vld <= 1'b0; qo_m <= '0; qo_nt <= '0; qp_vld <= 1'b0; qp_m <= '0; qp_nt <= '0;
      car_max <= '0; car_sum <= '0; car_sq <= '0;
      for (int c = 0; c < C; c++) begin
        qo_data[c] <= '0; qp_code[c] <= '0; qp_max[c] <= '0; qp_scale[c] <= '0;
        g_code[c] <= '0; g_max[c] <= '0; inv_q[c] <= '0;
      end
    end else begin
      done     <= 1'b0;
      qo_vld   <= 1'b0;
      qp_vld   <= 1'b0;
      dv_start <= 1'b0;
      rd_d     <= 1'b0;
      case (st)
        S_IDLE: if (cmd_start) begin
          st <= S_WL; kt_q <= '0; nt_q <= '0; cyc_q <= '0;
        end
        // weight tile: R buffer reads, array loads one cycle behind
        S_WL: begin
          cyc_q <= cyc_q + 1'b1;
          if (cyc_q == 8'(R)) begin st <= S_ST; cyc_q <= '0; m_q <= '0; end
        end
        S_ST: begin
          m_q <= m_q + 1'b1;
          if (m_q == cfg_m - 1'b1) begin st <= S_DR; cyc_q <= '0; end
        end
        S_DR: begin
          cyc_q <= cyc_q + 1'b1;
          if (cyc_q == 8'(DRAIN)) st <= S_NEXT;
        end
        S_NEXT: begin
          cyc_q <= '0;
          if (kt_q != cfg_kt - 1'b1) begin kt_q <= kt_q + 1'b1; st <= S_WL; end
          else if (nt_q != cfg_nt - 1'b1) begin kt_q <= '0; nt_q <= nt_q + 1'b1; st <= S_WL; end
          else begin
            m_q <= '0; j_q <= '0; t_q <= '0;
            case (cfg_oq)
              OQ_ACT8, OQ_KMANT: st <= S_QRD;
              OQ_VMANT:          st <= S_TRD;
              default:           st <= cfg_vdec ? S_VRD : S_DONE;
            endcase
          end
        end
        // ---- spatial: reduce row m over cfg_nt tiles through the RQU chain
        S_QRD: begin rd_d <= 1'b1; st <= S_QCH; cyc_q <= '0; end
        S_QCH: begin
          cyc_q <= cyc_q + 1'b1;
          if (cyc_q == 8'(C)) begin
            car_max <= ro_max[C-1]; car_sum <= ro_sum[C-1]; car_sq <= ro_sq[C-1];
            if (j_q != cfg_nt - 1'b1) begin j_q <= j_q + 1'b1; st <= S_QRD; end
            else st <= S_QSEL;
          end
        end
        S_QSEL: begin
          for (int c = 0; c < C; c++) begin
            g_code[c] <= (cfg_oq == OQ_ACT8) ? TYPE_INT : as_code[0];
            g_max[c]  <= car_max;
          end
          st <= S_QSW; cyc_q <= '0;
        end
        S_QSW: begin
          // S_QSW re-enters the divider inputs in scale form for one cycle
          if (cyc_q == 8'd0) dv_start <= 1'b1;
          cyc_q <= cyc_q + 1'b1;
          if (dv_done[0]) begin
            qp_vld <= 1'b1; qp_m <= m_q; qp_nt <= '0;
            for (int c = 0; c < C; c++) begin
              qp_code[c]  <= g_code[c];
              qp_max[c]   <= g_max[c];
              qp_scale[c] <= (dv_q[c] > 40'hFFFF) ? '1 : SW'(dv_q[c]);
            end
            j_q <= '0; st <= S_QERD;
          end
        end
        S_QERD: begin rd_d <= 1'b1; st <= S_QEL; cyc_q <= '0; end
        S_QEL: begin
          if (cfg_oq == OQ_KMANT) begin
            qo_vld <= 1'b1; qo_m <= m_q; qo_nt <= j_q;
            for (int c = 0; c < C; c++) qo_data[c] <= {4'b0, enc_q[c]};
            st <= S_QNEXT;
          end else begin
            dv_start <= 1'b1;
            st <= S_QEW;
          end
        end
        S_QEW: if (dv_done[0]) begin
          qo_vld <= 1'b1; qo_m <= m_q; qo_nt <= j_q;
          for (int c = 0; c < C; c++) begin
            logic [7:0] mag;
            mag = (g_max[c] == '0) ? 8'd0 : (dv_q[c] > 40'd127) ? 8'd127 : 8'(dv_q[c]);
            qo_data[c] <= qv_sign_q[c] ? 8'(-mag) : mag;
          end
          st <= S_QNEXT;
        end
        S_QNEXT: begin
          if (j_q != cfg_nt - 1'b1) begin j_q <= j_q + 1'b1; st <= S_QERD; end
          else if (m_q != cfg_m - 1'b1) begin m_q <= m_q + 1'b1; j_q <= '0; st <= S_QRD; end
          else st <= cfg_vdec ? S_VRD : S_DONE;
        end
        // ---- temporal: column groups of GROUP rows, tile j_q, group base m_q
        S_TRD: begin
          rd_d <= 1'b1;
          t_q  <= t_q + 1'b1;
          if (t_q == 10'(GROUP)) begin t_q <= '0; rd_d <= 1'b0; st <= S_TSEL; end
        end
        S_TSEL: begin
          for (int c = 0; c < C; c++) begin g_code[c] <= as_code[c]; g_max[c] <= ro_max[c]; end
          st <= S_TSW; cyc_q <= '0;
        end
        S_TSW: begin
          if (cyc_q == 8'd0) dv_start <= 1'b1;
          cyc_q <= cyc_q + 1'b1;
          if (dv_done[0]) begin
            qp_vld <= 1'b1; qp_m <= m_q; qp_nt <= j_q;
            for (int c = 0; c < C; c++) begin
              qp_code[c]  <= g_code[c];
              qp_max[c]   <= g_max[c];
              qp_scale[c] <= (dv_q[c] > 40'hFFFF) ? '1 : SW'(dv_q[c]);
            end
            t_q <= '0; st <= S_TERD;
          end
        end
        S_TERD: begin rd_d <= 1'b1; st <= S_TEL; end
        S_TEL: begin
          qo_vld <= 1'b1; qo_m <= m_q + t_q; qo_nt <= j_q;
          for (int c = 0; c < C; c++) qo_data[c] <= {4'b0, enc_q[c]};
          t_q <= t_q + 1'b1;
          if (t_q != 10'(GROUP - 1)) st <= S_TERD;
          else if (m_q + 10'(GROUP) < cfg_m) begin m_q <= m_q + 10'(GROUP); t_q <= '0; st <= S_TRD; end
          else if (j_q != cfg_nt - 1'b1) begin j_q <= j_q + 1'b1; m_q <= '0; t_q <= '0; st <= S_TRD; end
          else st <= cfg_vdec ? S_VRD : S_DONE;
        end
        // ---- V window: output row 0 of tile 0 goes to the two-phase unit
        S_VRD: begin rd_d <= 1'b1; cyc_q <= '0; st <= S_VIN; end
        S_VIN: begin
          if (cyc_q == 8'd0) for (int c = 0; c < C; c++) inv_q[c] <= qb_rd[c][15:0];
          cyc_q <= 8'd1;
          rd_d  <= 1'b1;                  // hold the row until accepted
          if (rd_d && vw_rdy) begin rd_d <= 1'b0; st <= S_DONE; end
        end
        default: begin done <= 1'b1; st <= S_IDLE; end
      endcase
    end
  end

  // sign of the element under INT8 division, captured with the row
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) for (int c = 0; c < C; c++) qv_sign_q[c] <= 1'b0;
    else if (st == S_QEL) for (int c = 0; c < C; c++) qv_sign_q[c] <= qv[c][VW-1];
  end
endmodule
