// pcnn_pkg: types and constants shared by the pattern-aware accelerator.
//
// A 3x3 kernel is kept as an SPM code (sparsity pattern mask index) plus
// the sequence of its n non-zero weights in raster order. Every kernel of
// a layer has the same n, so all MAC lanes see the same amount of work.
// Bit p of a 9-bit mask is window position p, row-major (p = 3*row + col).
// Sizes with a paper source: 8-bit weights, 64 PEs x 4 MACs, 60-word
// kernel and SPM registers, 60-bit pattern words, up to 32 patterns.
// The 8-bit activation, 32-bit accumulator and the register map are
// this design's own choices.
package pcnn_pkg;

  localparam int unsigned KSIZE        = 9;   // 3x3 window
  localparam int unsigned WBITS        = 8;   // weight width
  localparam int unsigned ABITS        = 8;   // activation width
  localparam int unsigned ACC_W        = 32;  // partial-sum width
  localparam int unsigned WORD_WEIGHTS = 8;   // weights per weight-SRAM word
  localparam int unsigned KRF_DEPTH    = 60;  // kernel register file, weights
  localparam int unsigned PAT_BITS     = 60;  // pattern-SRAM word
  localparam int unsigned MAX_CODE_W   = 5;   // up to 32 patterns
  localparam int unsigned MAX_PATTERNS = 32;
  localparam int unsigned MAX_STRIDE   = 12;  // stored weights per kernel, padded

  typedef logic signed [WBITS-1:0] weight_t;
  typedef logic signed [ABITS-1:0] act_t;
  typedef logic signed [ACC_W-1:0] acc_t;
  typedef logic [KSIZE-1:0]        mask_t;
  typedef logic [MAX_CODE_W-1:0]   code_t;
  typedef logic [3:0]              pos_t;   // 0..8, 9 = none

  // Per-layer settings held by the pattern configuration block.
  typedef struct packed {
    logic [3:0] n_nz;      // non-zero weights per kernel, 1..9
    logic [3:0] stride;    // weights stored per kernel (>= n_nz, padding)
    logic [2:0] code_bits; // SPM code width, 1..5
  } layer_cfg_t;

  // One pass of the host controller: a 3x3 stride-1 valid convolution
  // producing all output pixels of N_PE output channels.
  typedef struct packed {
    logic [7:0]  groups;    // input channels / 4
    logic [7:0]  in_h;      // input map height (>= 3)
    logic [7:0]  in_w;      // input map width  (>= 3)
    logic [16:0] act_base;  // data SRAM byte address of channel 0, (0,0)
    logic [13:0] w_base;    // weight SRAM word address of the first kernel
    logic [9:0]  p_base;    // pattern SRAM word address of the first code
  } op_cfg_t;

  // Codes held in one 60-bit pattern word for a code width of b bits.
  function automatic logic [6:0] codes_per_word(input logic [2:0] b);
    case (b)
      3'd1:    return 7'd60;
      3'd2:    return 7'd30;
      3'd3:    return 7'd20;
      3'd4:    return 7'd15;
      3'd5:    return 7'd12;
      default: return 7'd12;
    endcase
  endfunction

endpackage
