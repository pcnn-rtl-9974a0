// tb_sparsity_ctrl: offers random kernels (non-zero sequence and mask)
// to a sparsity controller with 8 lanes and checks, one cycle later, the
// one-hot lane strobe, the lane order, the restored 3x3 kernel (i-th
// non-zero at the i-th set mask bit, zero elsewhere), `full` after the
// last lane, and restart after `clear`. Includes the paper's example
// kernel (mask 0 1 1 0 0 1 1 1 1).
module tb_sparsity_ctrl;
  import pcnn_pkg::*;
  localparam int unsigned N_LANES = 8;
  logic clk = 0, rst_n = 0;
  logic clear = 0, in_valid = 0;
  weight_t in_seq [KSIZE];
  mask_t in_mask = '0;
  logic [N_LANES-1:0] lane_we;
  weight_t lane_kernel [KSIZE];
  mask_t lane_mask;
  logic full;
  int checks = 0, failures = 0;

  sparsity_ctrl #(.N_LANES(N_LANES)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (in_seq[i]) in_seq[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      checks++; if (full) failures++;
      for (int l = 0; l < N_LANES; l++) begin
        weight_t exp [KSIZE];
        int r;
        // random gaps between kernels
        while ($urandom_range(0, 2) == 0) begin
          @(negedge clk);
          checks++; if (lane_we != '0) begin failures++; $display("FAIL idle strobe"); end
        end
        @(negedge clk);
        in_valid = 1;
        in_mask = (round == 0 && l == 0) ? 9'b111100110 : mask_t'($urandom);
        foreach (in_seq[i]) in_seq[i] = weight_t'($urandom_range(1, 255));
        r = 0;
        for (int p = 0; p < KSIZE; p++)
          if (in_mask[p]) begin exp[p] = in_seq[r]; r++; end
          else exp[p] = '0;
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (lane_we != (N_LANES'(1) << l)) begin failures++; $display("FAIL lane %0d we=%b", l, lane_we); end
        checks++; if (lane_mask != in_mask) failures++;
        for (int p = 0; p < KSIZE; p++) begin
          checks++;
          if (lane_kernel[p] != exp[p]) begin failures++; $display("FAIL restore p=%0d", p); end
        end
        checks++;
        if (full != (l == N_LANES - 1)) begin failures++; $display("FAIL full at %0d", l); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
