// pointer_offset: the adder-AND chain that turns a 9-bit sparsity mask
// into a head pointer and eight pointer offsets.
//
// Each mask bit is inverted, so a 1 now marks a zero (skippable) slot.
// Going from position 8 down to 0, each stage adds its inverted bit to the
// running count from the stage on its right and ANDs the result with the
// inverted bit, so the count restarts at zero at every non-zero slot:
//   run[9] = 0,  run[i] = inv[i] ? run[i+1] + 1 : 0.
// head = run[0] is the first non-zero position (9 when there is none) and
// offset[i] = run[i+1] is the number of zero slots directly after
// position i, so the next non-zero after position p is p + 1 + offset[p].
// Example from the paper: mask 0 1 0 1 0 1 0 0 0 (positions 0..8) gives
// head 1 and offsets 0 1 0 1 0 3 2 1. Purely combinational.
module pointer_offset
  import pcnn_pkg::*;
(
  input  mask_t mask,
  output pos_t  head,
  output pos_t  offset [KSIZE-1]
);

  pos_t run [KSIZE+1];

  always_comb begin
    run[KSIZE] = '0;
    for (int i = KSIZE - 1; i >= 0; i--)
      run[i] = (run[i+1] + 4'd1) & {4{~mask[i]}};
    head = run[0];
    for (int i = 0; i < KSIZE - 1; i++) offset[i] = run[i+1];
  end

endmodule
