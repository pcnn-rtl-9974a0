// pattern_decoder: SPM code to 9-bit weight mask.
//
// Looks the code up in the layer's SPM mapping table (held by the pattern
// configuration block). Bit p of the mask marks a non-zero weight at
// window position p (row-major). The decoder also checks that the mask
// has exactly n ones, which every kernel of a pattern-pruned layer must
// have; mask_ok is this design's own addition and flags a corrupt table.
// Purely combinational.
module pattern_decoder
  import pcnn_pkg::*;
(
  input  code_t      code,
  input  mask_t      spm_table [MAX_PATTERNS],
  input  logic [3:0] n_nz,
  output mask_t      mask,
  output logic       mask_ok
);

  always_comb begin
    mask    = spm_table[code];
    mask_ok = ($countones(mask) == int'(n_nz));
  end

endmodule
