// kernel_rf: the 60-word kernel register file.
//
// A first-in first-out file of 60 weight registers between the weight
// SRAM and the sparsity controller. The SRAM side writes a whole 64-bit
// word (8 weights) at a time; the controller side removes one kernel at a
// time, i.e. `stride` weights (the n non-zeros plus any zero padding the
// layout carries). Because weights are stored densely in kernel order, a
// kernel may be split over two SRAM words, and the file joins the parts.
// With 60 = lcm(1..6) registers the file holds a whole number of kernels
// for n = 1..6, as the paper intends; its first-in first-out organisation
// is this design's own.
//
// Interface: head[0..11] are the oldest twelve weights; head[0] is the
// first non-zero of the kernel at the front. count is the fill level.
// Timing: push and pop take effect on the same clock edge; a pop is
// applied before the pushed word is appended. push is legal only while
// count - (pop ? stride : 0) + 8 <= 60, pop only while count >= stride.
module kernel_rf
  import pcnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  input  logic                push,
  input  weight_t             push_word [WORD_WEIGHTS],
  input  logic                pop,
  input  logic [3:0]          stride,
  output logic [6:0]          count,
  output weight_t             head [MAX_STRIDE]
);

  weight_t    regs [KRF_DEPTH];
  weight_t    regs_n [KRF_DEPTH];
  logic [6:0] count_n;
  logic [6:0] shift;

  always_comb begin
    shift   = pop ? 7'(stride) : 7'd0;
    count_n = count - shift;
    for (int i = 0; i < KRF_DEPTH; i++)
      regs_n[i] = (i + int'(shift) < KRF_DEPTH) ? regs[i + int'(shift)] : '0;
    if (push)
      for (int i = 0; i < KRF_DEPTH; i++)
        for (int k = 0; k < WORD_WEIGHTS; k++)
          if (i == int'(count_n) + k) regs_n[i] = push_word[k];
    if (push) count_n = count_n + 7'(WORD_WEIGHTS);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      for (int i = 0; i < KRF_DEPTH; i++) regs[i] <= '0;
    end else if (flush) begin
      count <= '0;
    end else begin
      count <= count_n;
      regs  <= regs_n;
    end
  end

  always_comb
    for (int i = 0; i < MAX_STRIDE; i++) head[i] = regs[i];

  // Handshake rules of the file.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || flush)
                                   pop |-> count >= 7'(stride));
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n || flush)
                                   push |-> (count - (pop ? 7'(stride) : 7'd0)
                                             + 7'(WORD_WEIGHTS)) <= 7'(KRF_DEPTH));

endmodule
