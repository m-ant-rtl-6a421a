// tb_mant_div: random divisions checked against the integer quotient and
// remainder; also checks the fixed 12-cycle latency from start to done and
// that a second start during a division is ignored.
module tb_mant_div;
  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [39:0] dividend, quotient;
  logic [24:0] divisor, remainder;
  int checks = 0, failures = 0;
  mant_div #(.DW(40), .DVW(25), .LAT(12)) dut (.clk, .rst_n, .start, .dividend, .divisor,
    .busy, .done, .quotient, .remainder);
  always #5 clk = ~clk;
  initial begin
    start = 0; dividend = 0; divisor = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      longint n, d;
      int lat;
      n = (t % 2) ? longint'($urandom_range(0, 32'h7fffffff)) * 128 + $urandom_range(0, 127)
                  : longint'($urandom_range(0, 100000));
      d = (t % 3 == 0) ? longint'($urandom_range(1, 300)) : longint'($urandom_range(1, 25'h1ffffff));
      dividend = 40'(n); divisor = 25'(d); start = 1;
      @(negedge clk); start = 1; dividend = 40'd5; lat = 1;   // ignored second start
      @(negedge clk); start = 0; lat++;
      while (!done && lat < 40) begin @(negedge clk); lat++; end
      checks++;
      if (quotient != 40'(n / d) || remainder != 25'(n % d)) begin
        failures++;
        if (failures < 6) $display("FAIL %0d / %0d = %0d r %0d", n, d, quotient, remainder);
      end
      checks++;
      // done is seen 12 edges after the edge that accepts start
      if (lat - 1 != 12) begin failures++; if (failures < 6) $display("FAIL latency %0d", lat); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
