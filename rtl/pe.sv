// pe: pattern-aware processing element with N_MAC MAC units.
//
// Each MAC unit (lane) owns a kernel register (the restored 3x3 kernel
// and its weight mask, written by the sparsity controller) and a
// sparsity_io pointer generator. The N_MAC lanes of a PE work on N_MAC
// input channels of the same output channel at once; the activation
// windows of those channels come from the shared activation register file.
// After start, every lane issues one pointer per cycle to its next
// effectual position; the lane multiplies weight and activation at that
// position. The products of all lanes are added into one partial sum per
// cycle, and partial sums of successive channel groups accumulate until
// `finish`, which applies ReLU and updates `result`.
//
// Pipeline, after the paper's stages: pointer register (sparsity pointer)
// -> product register (MAC) -> accumulator -> ReLU register. The lane
// organisation (one input channel per MAC) is this design's own; with it
// a channel group takes n cycles for n non-zeros per kernel, or fewer
// when activations are zero.
//
// Timing: start at t; for k = the largest number of effectual pairs in a
// lane, busy is high for cycles t+1 .. t+k+1 and the accumulator holds
// the group's sum after cycle t+k+1. clear_acc zeroes the accumulator;
// result changes the cycle after finish. Kernel registers must not be
// written and windows must not change while busy.
module pe
  import pcnn_pkg::*;
#(
  parameter int unsigned N_MAC = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_MAC-1:0] lane_we,
  input  weight_t          lane_kernel [KSIZE],
  input  mask_t            lane_mask,
  input  act_t             act   [N_MAC][KSIZE],
  input  mask_t            amask [N_MAC],
  input  logic             start,
  input  logic             clear_acc,
  input  logic             finish,
  output logic             busy,
  output acc_t             result
);

  weight_t          kern  [N_MAC][KSIZE];
  mask_t            wmask [N_MAC];
  logic [N_MAC-1:0] ptr_valid;
  pos_t             ptr   [N_MAC];
  logic [N_MAC-1:0] lane_busy;

  logic signed [2*WBITS-1:0] prod [N_MAC];
  logic                      prod_valid;
  acc_t                      acc;
  acc_t                      prod_sum;

  for (genvar l = 0; l < N_MAC; l++) begin : g_lane
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        wmask[l] <= '0;
        for (int p = 0; p < KSIZE; p++) kern[l][p] <= '0;
      end else if (lane_we[l]) begin
        wmask[l] <= lane_mask;
        kern[l]  <= lane_kernel;
      end
    end

    sparsity_io u_spio (
      .clk       (clk),
      .rst_n     (rst_n),
      .start     (start),
      .wmask     (wmask[l]),
      .amask     (amask[l]),
      .ptr_valid (ptr_valid[l]),
      .ptr       (ptr[l]),
      .busy      (lane_busy[l])
    );

    // MAC stage: multiply the pair the pointer selects.
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)            prod[l] <= '0;
      else if (ptr_valid[l]) prod[l] <= kern[l][ptr[l]] * act[l][ptr[l]];
      else                   prod[l] <= '0;
    end
  end

  always_comb begin
    prod_sum = '0;
    for (int l = 0; l < N_MAC; l++) prod_sum += acc_t'(prod[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prod_valid <= 1'b0;
      acc        <= '0;
      result     <= '0;
    end else begin
      prod_valid <= |ptr_valid;
      if (clear_acc)       acc <= '0;
      else if (prod_valid) acc <= acc + prod_sum;
      if (finish)          result <= (acc > 0) ? acc : '0;   // ReLU
    end
  end

  assign busy = (|lane_busy) | prod_valid;

  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                         busy |-> lane_we == '0);

endmodule
