// tb_act_rf_zd: writes random activation windows (about half zeros) into
// the shared activation register file and checks every register and the
// zero-detect mask bit (1 = non-zero) against a model.
module tb_act_rf_zd;
  import pcnn_pkg::*;
  localparam int unsigned N_CH = 4;
  logic clk = 0, rst_n = 0;
  logic we = 0;
  logic [1:0] wch = '0;
  pos_t wpos = '0;
  act_t wdata = '0;
  act_t act [N_CH][KSIZE];
  mask_t amask [N_CH];
  act_t refa [N_CH][KSIZE];
  int checks = 0, failures = 0;

  act_rf_zd #(.N_CH(N_CH)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < N_CH; c++) for (int p = 0; p < KSIZE; p++) refa[c][p] = '0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = ($urandom_range(0, 3) != 0);
      wch = 2'($urandom_range(0, N_CH - 1));
      wpos = pos_t'($urandom_range(0, 8));
      wdata = ($urandom_range(0, 1) == 0) ? '0 : act_t'($urandom);
      if (we) refa[wch][wpos] = wdata;
      @(negedge clk); we = 0;
      for (int c = 0; c < N_CH; c++)
        for (int p = 0; p < KSIZE; p++) begin
          checks++;
          if (act[c][p] != refa[c][p] || amask[c][p] != (refa[c][p] != 0)) begin
            failures++; $display("FAIL c=%0d p=%0d", c, p);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
