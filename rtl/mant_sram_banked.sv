// mant_sram_banked: multi-bank on-chip buffer.
//
// BANKS independent banks of DEPTH words of WIDTH bits. Every bank has its
// own write port and its own read port, both usable in the same cycle, so the
// array and the vector unit can touch one word in every bank per cycle
// without conflict. Reads return data one cycle after re (synchronous SRAM
// behaviour); a read and a write of the same word in one cycle return the old
// word. The input, weight, output and quantization buffers of the
// accelerator are instances of this module; the multi-bank organisation is
// from the paper, the one-read-one-write bank and the sizes are this design's
// choice. Contents are not reset.
module mant_sram_banked #(
  parameter int BANKS = 32,
  parameter int WIDTH = 32,
  parameter int DEPTH = 1024
) (
  input  logic                      clk,
  input  logic                      we    [BANKS],
  input  logic [$clog2(DEPTH)-1:0]  waddr [BANKS],
  input  logic [WIDTH-1:0]          wdata [BANKS],
  input  logic                      re    [BANKS],
  input  logic [$clog2(DEPTH)-1:0]  raddr [BANKS],
  output logic [WIDTH-1:0]          rdata [BANKS]
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[b]) mem[waddr[b]] <= wdata[b];
      if (re[b]) rdata[b] <= mem[raddr[b]];
    end
  end
endmodule
