// pattern_sram: the on-chip SPM code memory.
//
// Holds the SPM code of every kernel, packed into 60-bit words with the
// first code in the least significant bits. With b-bit codes a word holds
// 60/b codes (60, 30, 20, 15 or 12 for b = 1..5), so no code straddles a
// word. The 60-bit word and the 4 KB capacity (546 words) follow the
// paper; the ports (separate load write port, one-cycle read) are this
// design's own, written as an array in place of a foundry macro.
module pattern_sram
  import pcnn_pkg::*;
#(
  parameter int unsigned DEPTH = 546,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [PAT_BITS-1:0] wdata,
  input  logic                re,
  input  logic [AW-1:0]       raddr,
  output logic [PAT_BITS-1:0] rdata
);

  logic [PAT_BITS-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
