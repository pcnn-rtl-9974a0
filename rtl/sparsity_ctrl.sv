// sparsity_ctrl: kernel restore and distribution to the MAC lanes.
//
// Each cycle with in_valid it takes one kernel: its non-zero sequence
// (the front of the kernel register file) and its 9-bit weight mask (from
// the pattern decoder). It restores the dense 3x3 kernel, putting the
// i-th non-zero at the position of the i-th set mask bit and zero
// elsewhere, and writes the kernel and its mask into the next MAC lane of
// the PE group. Lanes are filled in order 0..N_LANES-1, where lane
// l = 4*pe + mac. `full` rises once every lane holds a kernel; `clear`
// restarts at lane 0. Kernel restore is the paper's first pipeline stage;
// one kernel per cycle and the lane order are this design's own choices.
//
// Timing: one register stage. The lane write strobe, restored kernel and
// mask appear the cycle after in_valid.
module sparsity_ctrl
  import pcnn_pkg::*;
#(
  parameter int unsigned N_LANES = 256,
  parameter int unsigned LW      = $clog2(N_LANES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  input  weight_t           in_seq [KSIZE],
  input  mask_t             in_mask,
  output logic [N_LANES-1:0] lane_we,
  output weight_t           lane_kernel [KSIZE],
  output mask_t             lane_mask,
  output logic              full
);

  logic [LW-1:0] next_lane;
  weight_t       restored [KSIZE];

  // Kernel restore: position p takes the non-zero whose rank is the
  // number of mask bits set below p.
  always_comb begin
    int unsigned rank;
    rank = 0;
    for (int p = 0; p < KSIZE; p++) begin
      restored[p] = '0;
      if (in_mask[p]) begin
        restored[p] = in_seq[rank];
        rank++;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_lane <= '0;
      lane_we   <= '0;
      lane_mask <= '0;
      for (int p = 0; p < KSIZE; p++) lane_kernel[p] <= '0;
    end else begin
      lane_we <= '0;
      if (clear) begin
        next_lane <= '0;
      end else if (in_valid && !full) begin
        lane_we[next_lane[LW-2:0]] <= 1'b1;
        lane_kernel                <= restored;
        lane_mask                  <= in_mask;
        next_lane                  <= next_lane + 1'b1;
      end
    end
  end

  assign full = (next_lane == LW'(N_LANES));

  a_no_extra: assert property (@(posedge clk) disable iff (!rst_n || clear)
                               in_valid |-> !full);

endmodule
