// tb_pattern_config: writes random SPM mapping tables and layer settings
// into the pattern configuration block and reads them back from its
// outputs, checking reset values first.
module tb_pattern_config;
  import pcnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  layer_cfg_t cfg;
  mask_t spm_table [MAX_PATTERNS];
  mask_t ref_table [MAX_PATTERNS];
  int checks = 0, failures = 0;

  pattern_config dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [5:0] a, input logic [15:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(cfg.n_nz == 4 && cfg.stride == 4 && cfg.code_bits == 4, "reset layer");
    check(spm_table[7] == '0, "reset table");
    for (int r = 0; r < 5; r++) begin
      for (int i = 0; i < MAX_PATTERNS; i++) begin
        ref_table[i] = mask_t'($urandom);
        wr(6'(i), 16'(ref_table[i]));
      end
      for (int i = 0; i < MAX_PATTERNS; i++)
        check(spm_table[i] == ref_table[i], $sformatf("table %0d", i));
      begin
        logic [3:0] n, s; logic [2:0] b;
        n = 4'($urandom_range(1, 9)); s = 4'($urandom_range(int'(n), 12)); b = 3'($urandom_range(1, 5));
        wr(6'd32, {5'd0, b, s, n});
        check(cfg.n_nz == n && cfg.stride == s && cfg.code_bits == b, "layer reg");
        check(spm_table[0] == ref_table[0], "layer write leaves table");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
