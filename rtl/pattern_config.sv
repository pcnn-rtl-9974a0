// pattern_config: the per-layer Pattern Config (PaC) registers.
//
// Holds the layer's kernel sparsity (n non-zeros per 3x3 kernel), the
// number of weights stored per kernel in the weight SRAM (n, or more when
// the layout is zero-padded), the SPM code width, and the SPM mapping
// table that turns a code into a 9-bit weight mask. The paper names the
// block and its contents; the register map below is this design's own.
//
// Interface: one write port. cfg_addr 0..31 writes mapping-table entry
// cfg_addr with cfg_wdata[8:0]. cfg_addr 32 writes the layer register:
// cfg_wdata[3:0] = n, [7:4] = stride, [10:8] = code width.
// Timing: a write is visible on the outputs the cycle after cfg_we.
// Reset: n = stride = 4, code width 4, table cleared.
module pattern_config
  import pcnn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [5:0]  cfg_addr,
  input  logic [15:0] cfg_wdata,
  output layer_cfg_t  cfg,
  output mask_t       spm_table [MAX_PATTERNS]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.n_nz      <= 4'd4;
      cfg.stride    <= 4'd4;
      cfg.code_bits <= 3'd4;
      for (int i = 0; i < MAX_PATTERNS; i++) spm_table[i] <= '0;
    end else if (cfg_we) begin
      if (cfg_addr[5]) begin
        cfg.n_nz      <= cfg_wdata[3:0];
        cfg.stride    <= cfg_wdata[7:4];
        cfg.code_bits <= cfg_wdata[10:8];
      end else begin
        spm_table[cfg_addr[4:0]] <= cfg_wdata[KSIZE-1:0];
      end
    end
  end

endmodule
