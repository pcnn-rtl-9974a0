// spm_code_rf: the SPM code register between pattern SRAM and decoder.
//
// Holds one 60-bit pattern SRAM word and hands out its codes one at a
// time, least significant first: pop shifts the word right by the code
// width (1..5 bits, set per layer). A word carries 60/b codes; when the
// last one is popped the register is empty (avail low) until the next
// load. The 60-bit width follows the paper's pattern word; the shift
// organisation is this design's own.
//
// Timing: load and pop act on the clock edge. A load may come in the
// same cycle as the pop of the last code. code is combinational from the
// register (the low bits, masked to the code width).
module spm_code_rf
  import pcnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                flush,
  input  logic                load,
  input  logic [PAT_BITS-1:0] load_word,
  input  logic                pop,
  input  logic [2:0]          code_bits,
  output logic                avail,
  output logic [6:0]          left,
  output code_t               code
);

  logic [PAT_BITS-1:0] word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      word <= '0;
      left <= '0;
    end else if (flush) begin
      left <= '0;
    end else if (load) begin
      word <= load_word;
      left <= codes_per_word(code_bits);
    end else if (pop && left != 0) begin
      word <= word >> code_bits;
      left <= left - 7'd1;
    end
  end

  assign avail = (left != 0);
  always_comb code = word[MAX_CODE_W-1:0] & code_t'((6'd1 << code_bits) - 6'd1);

  a_pop_avail: assert property (@(posedge clk) disable iff (!rst_n || flush)
                                pop |-> avail);
  a_load_empty: assert property (@(posedge clk) disable iff (!rst_n || flush)
                                 load |-> (left == 0 || (left == 1 && pop)));

endmodule
