// data_sram: the on-chip activation (feature map) memory.
//
// Byte-addressed store of the input feature maps, channel-major, then
// row, then column. The host controller gathers each 3x3 window from it
// one byte per cycle. The paper gives only the block's name and area;
// the 128 KB size and the byte-wide ports are this design's own choices.
// Reads return data one cycle after re.
module data_sram
  import pcnn_pkg::*;
#(
  parameter int unsigned DEPTH = 131072,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [ABITS-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [ABITS-1:0] rdata
);

  logic [ABITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
