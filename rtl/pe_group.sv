// pe_group: the array of N_PE pattern-aware PEs.
//
// All PEs share one set of activation windows and are started together;
// PE k computes output channel k. The sparsity controller writes one lane
// at a time through lane_we, where lane 4*k + m is MAC unit m of PE k;
// the restored kernel and mask are broadcast to all lanes. The group is
// busy while any lane still has effectual pairs, so a channel group lasts
// as long as its busiest lane. With 64 PEs x 4 MACs the array performs up
// to 256 multiply-accumulates per cycle, as in the paper.
module pe_group
  import pcnn_pkg::*;
#(
  parameter int unsigned N_PE  = 64,
  parameter int unsigned N_MAC = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [N_PE*N_MAC-1:0]  lane_we,
  input  weight_t                lane_kernel [KSIZE],
  input  mask_t                  lane_mask,
  input  act_t                   act   [N_MAC][KSIZE],
  input  mask_t                  amask [N_MAC],
  input  logic                   start,
  input  logic                   clear_acc,
  input  logic                   finish,
  output logic                   busy,
  output acc_t                   result [N_PE]
);

  logic [N_PE-1:0] pe_busy;

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    pe #(.N_MAC(N_MAC)) u_pe (
      .clk         (clk),
      .rst_n       (rst_n),
      .lane_we     (lane_we[k*N_MAC +: N_MAC]),
      .lane_kernel (lane_kernel),
      .lane_mask   (lane_mask),
      .act         (act),
      .amask       (amask),
      .start       (start),
      .clear_acc   (clear_acc),
      .finish      (finish),
      .busy        (pe_busy[k]),
      .result      (result[k])
    );
  end

  assign busy = |pe_busy;

endmodule
