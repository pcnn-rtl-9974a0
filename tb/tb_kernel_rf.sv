// tb_kernel_rf: drives random word pushes and kernel pops into the
// 60-word kernel register file under its legality rules and compares the
// fill level and the front twelve weights with a queue model, for several
// strides including padded ones (n = 7..9 stored as 10 or 12).
module tb_kernel_rf;
  import pcnn_pkg::*;
  logic clk = 0, rst_n = 0;
  logic flush = 0, push = 0, pop = 0;
  weight_t push_word [WORD_WEIGHTS];
  logic [3:0] stride = 4'd4;
  logic [6:0] count;
  weight_t head [MAX_STRIDE];
  weight_t q [$];
  int checks = 0, failures = 0;
  int pops = 0, pushes = 0, both = 0;

  kernel_rf dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int strides [8] = '{1, 2, 3, 4, 5, 6, 10, 12};
    foreach (push_word[k]) push_word[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (strides[s]) begin
      @(negedge clk); flush = 1; @(negedge clk); flush = 0;
      q.delete();
      stride = 4'(strides[s]);
      for (int cyc = 0; cyc < 400; cyc++) begin
        @(negedge clk);
        pop  = (q.size() >= strides[s]) && ($urandom_range(0, 2) != 0);
        push = (q.size() - (pop ? strides[s] : 0) + 8 <= 60) && ($urandom_range(0, 1) != 0);
        foreach (push_word[k]) push_word[k] = weight_t'($urandom);
        @(posedge clk); #1;
        if (pop) begin repeat (strides[s]) void'(q.pop_front()); pops++; end
        if (push) begin foreach (push_word[k]) q.push_back(push_word[k]); pushes++; end
        if (push && pop) both++;
        checks++;
        if (count != 7'(q.size())) begin
          failures++; $display("FAIL count %0d vs %0d", count, q.size());
        end
        for (int i = 0; i < MAX_STRIDE && i < q.size(); i++) begin
          checks++;
          if (head[i] != q[i]) begin failures++; $display("FAIL head[%0d]", i); end
        end
      end
      @(negedge clk); push = 0; pop = 0;
    end
    // the file must reach its full 60-word capacity
    @(negedge clk); flush = 1; @(negedge clk); flush = 0; stride = 4'd6;
    for (int w = 0; w < 7; w++) begin
      @(negedge clk); push = 1; foreach (push_word[k]) push_word[k] = weight_t'(w * 8 + k + 1);
    end
    @(negedge clk); push = 0;
    checks++; if (count != 7'd56) failures++;
    // 56 held: pop one kernel of 6 and push 8 in the same cycle -> 58
    @(negedge clk); pop = 1; push = 1; foreach (push_word[k]) push_word[k] = weight_t'(100 + k);
    @(negedge clk); pop = 0; push = 0;
    checks++; if (count != 7'd58 || head[0] != weight_t'(7)) begin failures++; $display("FAIL full"); end
    checks++; if (pops < 100 || both < 20) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
