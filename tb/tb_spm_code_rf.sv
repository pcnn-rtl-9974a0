// tb_spm_code_rf: loads random 60-bit pattern words and pops every code
// for code widths 1..5, checking the code sequence against a slice of the
// word (least significant first), the 60/b code count, and that a new
// word can be loaded in the cycle that pops the last code.
module tb_spm_code_rf;
  import pcnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flush = 0, load = 0, pop = 0;
  logic [PAT_BITS-1:0] load_word = '0;
  logic [2:0] code_bits = 3'd4;
  logic avail;
  logic [6:0] left;
  code_t code;
  int checks = 0, failures = 0;

  spm_code_rf dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (avail) failures++;
    for (int b = 1; b <= 5; b++) begin
      code_bits = 3'(b);
      for (int w = 0; w < 4; w++) begin
        logic [PAT_BITS-1:0] word;
        word = {$urandom, $urandom};
        @(negedge clk); load = 1; load_word = word; pop = 0;
        if (w > 0) pop = 1;      // pop the last code of the previous word
        @(negedge clk); load = 0; pop = 0;
        checks++;
        if (left != 7'(60 / b)) begin failures++; $display("FAIL left b=%0d: %0d", b, left); end
        for (int c = 0; c < 60 / b; c++) begin
          logic [4:0] exp;
          exp = 5'((word >> (c * b)) & ((64'd1 << b) - 1));
          checks++;
          if (!avail || code != exp) begin
            failures++; $display("FAIL b=%0d c=%0d code %0d exp %0d", b, c, code, exp);
          end
          if (c < 60 / b - 1) begin
            @(negedge clk); pop = 1; @(negedge clk); pop = 0;
          end
        end
      end
      @(negedge clk); pop = 1; @(negedge clk); pop = 0;
      checks++; if (avail) begin failures++; $display("FAIL empty b=%0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
