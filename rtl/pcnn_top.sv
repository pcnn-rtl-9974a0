// pcnn_top: pattern-aware CNN accelerator for pattern-pruned 3x3 layers.
//
// Every kernel of a layer keeps the same number n of non-zero weights, so
// a kernel is stored as n weights plus a short SPM code naming its
// pattern. The weight SRAM holds the non-zero sequences, the pattern SRAM
// the codes, the data SRAM the input feature maps. The host controller
// streams weights through the 60-word kernel register file and codes
// through the SPM code register; the pattern decoder turns each code into
// a 9-bit weight mask via the table in the pattern configuration block;
// the sparsity controller restores each kernel and loads it into one of
// the N_PE x N_MAC MAC lanes. Activation windows sit in a shared register
// file with zero detection. Each lane ANDs weight and activation masks,
// turns the result into pointers with an adder-AND chain, and multiplies
// only effectual pairs, one per cycle. PEs accumulate over input channels
// and apply ReLU.
//
// Interface: the three SRAMs and the configuration are loaded through
// plain write ports (standing in for the chip IO). A pulse on start with
// op set runs one pass; each output pixel's N_PE results appear for one
// cycle with out_valid, and done pulses at the end. pattern_error is
// sticky and set when a decoded mask does not have exactly n ones.
module pcnn_top
  import pcnn_pkg::*;
#(
  parameter int unsigned N_PE     = 64,
  parameter int unsigned N_MAC    = 4,
  parameter int unsigned W_DEPTH  = 16384,
  parameter int unsigned P_DEPTH  = 546,
  parameter int unsigned D_DEPTH  = 131072,
  parameter int unsigned WAW      = $clog2(W_DEPTH),
  parameter int unsigned PAW      = $clog2(P_DEPTH),
  parameter int unsigned DAW      = $clog2(D_DEPTH)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // pattern configuration
  input  logic                          cfg_we,
  input  logic [5:0]                    cfg_addr,
  input  logic [15:0]                   cfg_wdata,
  // SRAM load ports
  input  logic                          wsram_we,
  input  logic [WAW-1:0]                wsram_addr,
  input  logic [WORD_WEIGHTS*WBITS-1:0] wsram_wdata,
  input  logic                          psram_we,
  input  logic [PAW-1:0]                psram_addr,
  input  logic [PAT_BITS-1:0]           psram_wdata,
  input  logic                          dsram_we,
  input  logic [DAW-1:0]                dsram_addr,
  input  logic [ABITS-1:0]              dsram_wdata,
  // run
  input  logic                          start,
  input  op_cfg_t                       op,
  output logic                          busy,
  output logic                          done,
  output logic                          out_valid,
  output logic [7:0]                    out_y,
  output logic [7:0]                    out_x,
  output acc_t                          out_data [N_PE],
  output logic                          pattern_error
);

  localparam int unsigned N_LANES = N_PE * N_MAC;
  localparam int unsigned CW      = (N_MAC > 1) ? $clog2(N_MAC) : 1;

  layer_cfg_t cfg;
  mask_t      spm_table [MAX_PATTERNS];

  logic                          w_re, p_re, d_re;
  logic [WAW-1:0]                w_raddr;
  logic [PAW-1:0]                p_raddr;
  logic [DAW-1:0]                d_raddr;
  logic [WORD_WEIGHTS*WBITS-1:0] w_rdata;
  logic [PAT_BITS-1:0]           p_rdata;
  act_t                          d_rdata;

  logic       krf_push, krf_flush;
  logic [6:0] krf_count;
  weight_t    krf_word [WORD_WEIGHTS];
  weight_t    krf_head [MAX_STRIDE];
  weight_t    kseq     [KSIZE];

  logic       code_load, code_flush, code_avail;
  logic [6:0] code_left;
  code_t      code;
  mask_t      wmask;
  logic       mask_ok;

  logic               dispatch, sctrl_clear, sctrl_full;
  logic [N_LANES-1:0] lane_we;
  weight_t            lane_kernel [KSIZE];
  mask_t              lane_mask;

  logic          act_we;
  logic [CW-1:0] act_wch;
  pos_t          act_wpos;
  act_t          act   [N_MAC][KSIZE];
  mask_t         amask [N_MAC];

  logic pe_start, pe_clear, pe_finish, pe_busy;

  pattern_config u_pac (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata,
    .cfg (cfg), .spm_table (spm_table)
  );

  weight_sram #(.DEPTH(W_DEPTH)) u_wsram (
    .clk, .we (wsram_we), .waddr (wsram_addr), .wdata (wsram_wdata),
    .re (w_re), .raddr (w_raddr), .rdata (w_rdata)
  );

  pattern_sram #(.DEPTH(P_DEPTH)) u_psram (
    .clk, .we (psram_we), .waddr (psram_addr), .wdata (psram_wdata),
    .re (p_re), .raddr (p_raddr), .rdata (p_rdata)
  );

  data_sram #(.DEPTH(D_DEPTH)) u_dsram (
    .clk, .we (dsram_we), .waddr (dsram_addr), .wdata (dsram_wdata),
    .re (d_re), .raddr (d_raddr), .rdata (d_rdata)
  );

  always_comb
    for (int k = 0; k < WORD_WEIGHTS; k++) krf_word[k] = w_rdata[k*WBITS +: WBITS];

  kernel_rf u_krf (
    .clk, .rst_n, .flush (krf_flush), .push (krf_push), .push_word (krf_word),
    .pop (dispatch), .stride (cfg.stride), .count (krf_count), .head (krf_head)
  );

  spm_code_rf u_crf (
    .clk, .rst_n, .flush (code_flush), .load (code_load), .load_word (p_rdata),
    .pop (dispatch), .code_bits (cfg.code_bits), .avail (code_avail),
    .left (code_left), .code (code)
  );

  pattern_decoder u_dec (
    .code (code), .spm_table (spm_table), .n_nz (cfg.n_nz),
    .mask (wmask), .mask_ok (mask_ok)
  );

  always_comb
    for (int p = 0; p < KSIZE; p++) kseq[p] = krf_head[p];

  sparsity_ctrl #(.N_LANES(N_LANES)) u_sctrl (
    .clk, .rst_n, .clear (sctrl_clear), .in_valid (dispatch),
    .in_seq (kseq), .in_mask (wmask),
    .lane_we (lane_we), .lane_kernel (lane_kernel), .lane_mask (lane_mask),
    .full (sctrl_full)
  );

  act_rf_zd #(.N_CH(N_MAC)) u_act (
    .clk, .rst_n, .we (act_we), .wch (act_wch), .wpos (act_wpos),
    .wdata (d_rdata), .act (act), .amask (amask)
  );

  pe_group #(.N_PE(N_PE), .N_MAC(N_MAC)) u_pes (
    .clk, .rst_n, .lane_we (lane_we), .lane_kernel (lane_kernel),
    .lane_mask (lane_mask), .act (act), .amask (amask),
    .start (pe_start), .clear_acc (pe_clear), .finish (pe_finish),
    .busy (pe_busy), .result (out_data)
  );

  host_ctrl #(.N_PE(N_PE), .N_MAC(N_MAC), .WAW(WAW), .PAW(PAW), .DAW(DAW)) u_host (
    .clk, .rst_n, .start, .op, .cfg (cfg),
    .w_re, .w_raddr, .krf_push, .krf_flush, .krf_count,
    .p_re, .p_raddr, .code_load, .code_flush, .code_avail,
    .dispatch, .sctrl_clear, .sctrl_full,
    .d_re, .d_raddr, .act_we, .act_wch, .act_wpos,
    .pe_start, .pe_clear, .pe_finish, .pe_busy,
    .out_valid, .out_y, .out_x, .busy, .done
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    pattern_error <= 1'b0;
    else if (dispatch && !mask_ok) pattern_error <= 1'b1;
  end

endmodule
