// tb_sparsity_io: checks the adder-AND chain and pointer generator.
// First the worked example of the pointer-offset figure: sparsity mask
// 0 1 0 1 0 1 0 0 0 must give head 1 and offsets 0 1 0 1 0 3 2 1, and the
// example of the pointer-generation figure (weight mask 1 1 1 1 0 1 0 0 0,
// activation mask 0 1 0 1 1 1 1 1 1) pointers 1, 3, 5. Then, for all 512
// x random activation masks, the pointer sequence must list the set bits
// of (weight & activation) in ascending order, one per cycle, with busy
// high for exactly popcount cycles.
module tb_sparsity_io;
  import pcnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  mask_t wmask = '0, amask = '0;
  logic ptr_valid, busy;
  pos_t ptr;
  mask_t chain_mask;
  pos_t chain_head;
  pos_t chain_off [KSIZE-1];
  int checks = 0, failures = 0;

  sparsity_io dut (.*);
  pointer_offset u_chain (.mask(chain_mask), .head(chain_head), .offset(chain_off));
  always #5 clk = ~clk;

  // positions are written in the figures left to right as bit 0 .. bit 8
  function automatic mask_t from_fig(input string s);
    mask_t m;
    for (int i = 0; i < KSIZE; i++) m[i] = (s[i] == "1");
    return m;
  endfunction

  task automatic run(input mask_t w, input mask_t a);
    mask_t sp;
    int exp [$];
    int got [$];
    int cycles;
    sp = w & a;
    for (int p = 0; p < KSIZE; p++) if (sp[p]) exp.push_back(p);
    @(negedge clk); wmask = w; amask = a; start = 1;
    @(negedge clk); start = 0;
    cycles = 0;
    while (busy && cycles < 20) begin
      checks++; if (!ptr_valid) failures++;
      got.push_back(int'(ptr));
      cycles++;
      @(negedge clk);
    end
    checks++;
    if (got != exp) begin failures++; $display("FAIL seq w=%b a=%b", w, a); end
    checks++;
    if (cycles != exp.size()) begin failures++; $display("FAIL cycles %0d", cycles); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_off [8] = '{0, 1, 0, 1, 0, 3, 2, 1};
    repeat (3) @(posedge clk);
    rst_n = 1;
    chain_mask = from_fig("010101000");
    #1;
    checks++; if (chain_head != 4'd1) begin failures++; $display("FAIL head %0d", chain_head); end
    for (int i = 0; i < 8; i++) begin
      checks++;
      if (chain_off[i] != pos_t'(exp_off[i])) begin failures++; $display("FAIL off[%0d]=%0d", i, chain_off[i]); end
    end
    chain_mask = '0; #1;
    checks++; if (chain_head != 4'd9) failures++;
    run(from_fig("111101000"), from_fig("010111111"));
    for (int w = 0; w < 512; w++) begin
      run(mask_t'(w), 9'h1ff);
      run(mask_t'(w), mask_t'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
