// sparsity_io: per-lane sparsity mask and non-zero pointer generator.
//
// On start the lane ANDs its kernel's weight mask with the activation
// mask of its window, giving the sparsity mask of effectual pairs (both
// operands non-zero). The adder-AND chain (pointer_offset) turns that mask
// into a head pointer and eight offsets, which are registered. From the
// next cycle on the lane issues one pointer per cycle: first the head,
// then p + 1 + offset[p], until the pointer passes position 8. A lane thus
// spends exactly popcount(weight mask & activation mask) cycles and
// skips zero weights and zero activations alike. The AND, the chain and
// the pointer generator follow the paper; one pointer per cycle is this
// design's choice.
//
// Timing: start at cycle t; pointers valid at cycles t+1 .. t+k for k
// effectual pairs; busy is high exactly while ptr_valid is.
module sparsity_io
  import pcnn_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  mask_t wmask,
  input  mask_t amask,
  output logic  ptr_valid,
  output pos_t  ptr,
  output logic  busy
);

  mask_t sp_mask;
  pos_t  head;
  pos_t  offset   [KSIZE-1];
  pos_t  offset_q [KSIZE-1];

  assign sp_mask = wmask & amask;

  pointer_offset u_chain (
    .mask   (sp_mask),
    .head   (head),
    .offset (offset)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= pos_t'(KSIZE);
      for (int i = 0; i < KSIZE - 1; i++) offset_q[i] <= '0;
    end else if (start) begin
      ptr      <= head;
      offset_q <= offset;
    end else if (ptr < pos_t'(KSIZE)) begin
      // offset of the last position is 0: the pointer runs out to 9
      ptr <= (ptr == pos_t'(KSIZE - 1)) ? pos_t'(KSIZE)
                                        : ptr + 4'd1 + offset_q[ptr[2:0]];
    end
  end

  assign ptr_valid = (ptr < pos_t'(KSIZE));
  assign busy      = ptr_valid;

endmodule
