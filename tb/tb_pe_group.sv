// tb_pe_group: an 8-PE group (4 MACs each) is loaded lane by lane with
// random pattern kernels for 8 output channels and run over several
// channel groups with shared activation windows; every PE's ReLU output
// is compared with a model, and the group must stay busy until its
// busiest lane is done ((max effectual pairs) + 1 cycles).
module tb_pe_group;
  import pcnn_pkg::*;
  localparam int unsigned N_PE = 8, N_MAC = 4;
  logic clk = 0, rst_n = 0;
  logic [N_PE*N_MAC-1:0] lane_we = '0;
  weight_t lane_kernel [KSIZE];
  mask_t lane_mask = '0;
  act_t act [N_MAC][KSIZE];
  mask_t amask [N_MAC];
  logic start = 0, clear_acc = 0, finish = 0;
  logic busy;
  acc_t result [N_PE];
  int checks = 0, failures = 0;

  pe_group #(.N_PE(N_PE), .N_MAC(N_MAC)) dut (.*);
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
    for (int t = 0; t < 40; t++) begin
      longint sum [N_PE];
      int n, groups;
      n = $urandom_range(1, 5);
      groups = $urandom_range(1, 3);
      foreach (sum[k]) sum[k] = 0;
      @(negedge clk); clear_acc = 1; @(negedge clk); clear_acc = 0;
      for (int g = 0; g < groups; g++) begin
        weight_t kw [N_PE*N_MAC][KSIZE];
        mask_t km [N_PE*N_MAC];
        int maxk, cycles;
        for (int l = 0; l < N_MAC; l++)
          for (int p = 0; p < KSIZE; p++) begin
            act[l][p] = ($urandom_range(0, 3) == 0) ? '0 : act_t'($urandom);
            amask[l][p] = (act[l][p] != 0);
          end
        maxk = 0;
        for (int i = 0; i < N_PE * N_MAC; i++) begin
          km[i] = '0;
          while ($countones(km[i]) < n) km[i][$urandom_range(0, 8)] = 1'b1;
          for (int p = 0; p < KSIZE; p++) begin
            kw[i][p] = km[i][p] ? weight_t'($urandom_range(1, 255)) : '0;
            sum[i / N_MAC] += longint'(kw[i][p]) * longint'(act[i % N_MAC][p]);
          end
          if ($countones(km[i] & amask[i % N_MAC]) > maxk) maxk = $countones(km[i] & amask[i % N_MAC]);
          @(negedge clk);
          lane_we = (N_PE*N_MAC)'(1) << i; lane_kernel = kw[i]; lane_mask = km[i];
        end
        @(negedge clk); lane_we = '0;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        cycles = 0;
        while (busy && cycles < 50) begin @(negedge clk); cycles++; end
        checks++;
        if (cycles != (maxk == 0 ? 0 : maxk + 1)) begin
          failures++; $display("FAIL latency %0d for %0d", cycles, maxk);
        end
      end
      @(negedge clk); finish = 1; @(negedge clk); finish = 0;
      for (int k = 0; k < N_PE; k++) begin
        checks++;
        if (result[k] != ((sum[k] > 0) ? acc_t'(sum[k]) : '0)) begin
          failures++; $display("FAIL pe %0d: %0d exp %0d", k, result[k], sum[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
