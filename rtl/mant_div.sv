// mant_div: non-pipelined restoring divider with a fixed latency.
//
// The quantization step needs two divisions: once per group for the scaling
// factor (max / qmax) and once per element for its quantized value. The
// paper models the unit as a 12-cycle non-pipelined divider; this one
// produces an unsigned DW-bit quotient and a remainder LAT cycles after
// start, retiring ceil(DW/LAT) quotient bits per cycle (restoring long
// division). done pulses for one cycle with the result; start is ignored
// while busy. A zero divisor returns an all-ones quotient.
module mant_div #(
  parameter int DW  = 40,   // dividend / quotient width
  parameter int DVW = 24,   // divisor width
  parameter int LAT = 12    // cycles from start to done
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [DW-1:0]  dividend,
  input  logic [DVW-1:0] divisor,
  output logic           busy,
  output logic           done,
  output logic [DW-1:0]  quotient,
  output logic [DVW-1:0] remainder
);
  localparam int BPC = (DW + LAT - 1) / LAT;
  localparam int DWI = BPC * LAT;
  localparam int CW  = $clog2(LAT + 1);

  logic [DWI-1:0] num_q, quo_q;
  logic [DVW:0]   rem_q;
  logic [DVW-1:0] den_q;
  logic [CW-1:0]  cnt_q;
  logic [DWI-1:0] num_n, quo_n;
  logic [DVW:0]   rem_n;

  always_comb begin
    num_n = num_q;
    quo_n = quo_q;
    rem_n = rem_q;
    for (int b = 0; b < BPC; b++) begin
      rem_n = {rem_n[DVW-1:0], num_n[DWI-1]};
      num_n = num_n << 1;
      if (rem_n >= {1'b0, den_q}) begin
        rem_n = rem_n - {1'b0, den_q};
        quo_n = {quo_n[DWI-2:0], 1'b1};
      end else begin
        quo_n = {quo_n[DWI-2:0], 1'b0};
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt_q <= '0;
      num_q <= '0; quo_q <= '0; rem_q <= '0; den_q <= '0;
      quotient <= '0; remainder <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy  <= 1'b1;
        cnt_q <= CW'(LAT - 1);
        num_q <= DWI'(dividend);
        den_q <= divisor;
        quo_q <= '0;
        rem_q <= '0;
      end else if (busy) begin
        num_q <= num_n;
        quo_q <= quo_n;
        rem_q <= rem_n;
        if (cnt_q == '0) begin
          busy      <= 1'b0;
          done      <= 1'b1;
          quotient  <= (den_q == '0) ? '1 : DW'(quo_n);
          remainder <= DVW'(rem_n);
        end else begin
          cnt_q <= cnt_q - 1'b1;
        end
      end
    end
  end
endmodule
