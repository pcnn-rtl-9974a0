// tb_pe: loads random kernels into the four MAC lanes of one PE, sets
// random activation windows (with zeros), and runs several channel groups
// per output. It checks the accumulated sum and the ReLU result against a
// dense 3x3 dot-product model, and the group latency: busy must last
// exactly (largest number of effectual pairs in any lane) + 1 cycles.
module tb_pe;
  import pcnn_pkg::*;
  localparam int unsigned N_MAC = 4;
  logic clk = 0, rst_n = 0;
  logic [N_MAC-1:0] lane_we = '0;
  weight_t lane_kernel [KSIZE];
  mask_t lane_mask = '0;
  act_t act [N_MAC][KSIZE];
  mask_t amask [N_MAC];
  logic start = 0, clear_acc = 0, finish = 0;
  logic busy;
  acc_t result;
  int checks = 0, failures = 0;
  int relu_neg = 0, relu_pos = 0, idle_groups = 0;

  pe #(.N_MAC(N_MAC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (lane_kernel[p]) lane_kernel[p] = '0;
    foreach (act[l, p]) act[l][p] = '0;
    foreach (amask[l]) amask[l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      longint sum;
      int groups, n;
      sum = 0;
      groups = $urandom_range(1, 4);
      n = $urandom_range(1, 9);
      @(negedge clk); clear_acc = 1; @(negedge clk); clear_acc = 0;
      for (int g = 0; g < groups; g++) begin
        weight_t kw [N_MAC][KSIZE];
        mask_t km [N_MAC];
        int maxk, cycles;
        maxk = 0;
        for (int l = 0; l < N_MAC; l++) begin
          km[l] = '0;
          while ($countones(km[l]) < n) km[l][$urandom_range(0, 8)] = 1'b1;
          for (int p = 0; p < KSIZE; p++)
            kw[l][p] = km[l][p] ? weight_t'($urandom_range(1, 255)) : '0;
          @(negedge clk);
          lane_we = N_MAC'(1) << l; lane_kernel = kw[l]; lane_mask = km[l];
        end
        @(negedge clk); lane_we = '0;
        for (int l = 0; l < N_MAC; l++)
          for (int p = 0; p < KSIZE; p++) begin
            act[l][p] = ($urandom_range(0, 4) == 0) ? '0 : act_t'($urandom);
            amask[l][p] = (act[l][p] != 0);
            sum += longint'(kw[l][p]) * longint'(act[l][p]);
          end
        for (int l = 0; l < N_MAC; l++)
          if ($countones(km[l] & amask[l]) > maxk) maxk = $countones(km[l] & amask[l]);
        if (maxk == 0) idle_groups++;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        cycles = 0;
        while (busy && cycles < 50) begin @(negedge clk); cycles++; end
        checks++;
        if (cycles != (maxk == 0 ? 0 : maxk + 1)) begin
          failures++; $display("FAIL latency %0d for %0d pairs", cycles, maxk);
        end
      end
      @(negedge clk); finish = 1; @(negedge clk); finish = 0;
      checks++;
      if (result != ((sum > 0) ? acc_t'(sum) : '0)) begin
        failures++; $display("FAIL result %0d exp %0d", result, sum);
      end
      if (sum < 0) relu_neg++; else relu_pos++;
    end
    checks++;
    if (relu_neg == 0 || relu_pos == 0) begin failures++; $display("FAIL ReLU coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
