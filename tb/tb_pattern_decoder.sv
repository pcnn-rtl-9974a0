// tb_pattern_decoder: fills a random mapping table whose entries have n
// ones (plus a few corrupt entries) and checks every code's mask and the
// popcount check, for n = 1..9.
module tb_pattern_decoder;
  import pcnn_pkg::*;
  code_t code;
  mask_t spm_table [MAX_PATTERNS];
  logic [3:0] n_nz;
  mask_t mask;
  logic mask_ok;
  int checks = 0, failures = 0;

  pattern_decoder dut (.*);

  function automatic mask_t rand_mask(input int n);
    mask_t m = '0;
    while ($countones(m) < n) m[$urandom_range(0, 8)] = 1'b1;
    return m;
  endfunction

  initial begin
    #1000000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 1; n <= 9; n++) begin
      bit bad [MAX_PATTERNS];
      n_nz = 4'(n);
      for (int i = 0; i < MAX_PATTERNS; i++) begin
        bad[i] = ($urandom_range(0, 7) == 0);
        spm_table[i] = rand_mask(bad[i] ? ((n % 9) + 1) : n);
      end
      for (int i = 0; i < MAX_PATTERNS; i++) begin
        code = code_t'(i);
        #1;
        checks++;
        if (mask != spm_table[i]) begin failures++; $display("FAIL mask n=%0d code=%0d", n, i); end
        checks++;
        if (mask_ok == bad[i]) begin failures++; $display("FAIL ok n=%0d code=%0d", n, i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
