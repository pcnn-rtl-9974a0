// weight_sram: the 128 KB on-chip weight memory.
//
// Holds the non-zero weight sequences of all kernels, packed densely in
// kernel order, eight 8-bit weights per 64-bit word; weight k of a word
// sits in bits [8k+7:8k]. A kernel may straddle two words. The size is
// the paper's (128 KB, 32768 kernels of 4 non-zeros); the port structure
// (a write port for loading, a read port with one cycle of latency) is
// this design's own, written as an array in place of a foundry macro.
module weight_sram
  import pcnn_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                        clk,
  input  logic                        we,
  input  logic [AW-1:0]               waddr,
  input  logic [WORD_WEIGHTS*WBITS-1:0] wdata,
  input  logic                        re,
  input  logic [AW-1:0]               raddr,
  output logic [WORD_WEIGHTS*WBITS-1:0] rdata
);

  logic [WORD_WEIGHTS*WBITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
