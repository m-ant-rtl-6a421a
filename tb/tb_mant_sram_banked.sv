// tb_mant_sram_banked: random simultaneous per-bank writes and reads against
// a reference array; checks the one-cycle read latency and read-old-data on a
// same-cycle read and write of one word.
module tb_mant_sram_banked;
  localparam int B = 4, W = 16, D = 16;
  logic clk = 0;
  logic we [B], re [B];
  logic [3:0] wa [B], ra [B];
  logic [W-1:0] wd [B], rd [B];
  logic [W-1:0] ref_mem [B][D];
  int checks = 0, failures = 0;
  mant_sram_banked #(.BANKS(B), .WIDTH(W), .DEPTH(D)) dut (.clk, .we, .waddr(wa), .wdata(wd),
    .re, .raddr(ra), .rdata(rd));
  always #5 clk = ~clk;
  initial begin
    logic [W-1:0] e [B];
    logic chk [B];
    for (int b = 0; b < B; b++) begin we[b] = 0; re[b] = 0; wa[b] = 0; ra[b] = 0; wd[b] = 0; end
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin we[b] = 1; wa[b] = 4'(a); wd[b] = W'($urandom); ref_mem[b][a] = wd[b]; end
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int b = 0; b < B; b++) begin
        re[b] = $urandom_range(0, 1); ra[b] = 4'($urandom);
        we[b] = $urandom_range(0, 1); wa[b] = (t % 5 == 0) ? ra[b] : 4'($urandom); wd[b] = W'($urandom);
        e[b] = ref_mem[b][ra[b]]; chk[b] = re[b];
      end
      @(posedge clk);
      for (int b = 0; b < B; b++) if (we[b]) ref_mem[b][wa[b]] = wd[b];
      #1;
      for (int b = 0; b < B; b++) if (chk[b]) begin
        checks++;
        if (rd[b] != e[b]) begin failures++; if (failures < 6) $display("FAIL bank %0d", b); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
