// tb_host_ctrl: runs the host controller (2 PEs x 4 MACs) against small
// models of its neighbours: a kernel-register-file fill counter, an SPM
// code counter, a lane counter for the sparsity controller, a PE group
// that stays busy a random number of cycles, and a data SRAM model. It
// checks the window-gather addresses of every pixel and group, the
// register-file legality rules (no overflow, no pop when empty), the
// weight and pattern address streams restarting at their bases each
// pixel, the number of kernels dispatched, the start/clear/finish pulses
// and the raster order of out_valid, for several layer settings.
module tb_host_ctrl;
  import pcnn_pkg::*;
  localparam int unsigned N_PE = 2, N_MAC = 4, N_LANES = N_PE * N_MAC;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  op_cfg_t op;
  layer_cfg_t cfg;
  logic w_re, krf_push, krf_flush;
  logic [13:0] w_raddr;
  logic [6:0] krf_count;
  logic p_re, code_load, code_flush, code_avail;
  logic [9:0] p_raddr;
  logic dispatch, sctrl_clear, sctrl_full;
  logic d_re, act_we;
  logic [16:0] d_raddr;
  logic [1:0] act_wch;
  pos_t act_wpos;
  logic pe_start, pe_clear, pe_finish, pe_busy;
  logic out_valid, busy, done;
  logic [7:0] out_y, out_x;
  int checks = 0, failures = 0;

  host_ctrl #(.N_PE(N_PE), .N_MAC(N_MAC)) dut (.*);
  always #5 clk = ~clk;

  // neighbour models
  int kcnt, codes, lanes, busy_left;
  int dispatched, starts, clears, finishes, outs, gathered;
  int exp_y, exp_x, grp_seen;
  logic [16:0] d_q;
  logic [16:0] gather_q [$];
  assign krf_count  = 7'(kcnt);
  assign code_avail = (codes > 0);
  assign sctrl_full = (lanes == N_LANES);
  assign pe_busy    = (busy_left > 0);

  task automatic fail(input string s);
    failures++; $display("FAIL %s", s);
  endtask

  always_ff @(posedge clk) begin
    if (rst_n) begin
      int kn;
      kn = kcnt;
      if (krf_flush) kn = 0;
      else begin
        if (dispatch) begin
          checks++; if (kn < int'(cfg.stride)) fail("pop from empty kernel file");
          kn -= int'(cfg.stride);
        end
        if (krf_push) kn += 8;
        checks++; if (kn > 60) fail("kernel file overflow");
      end
      kcnt <= kn;
      if (code_flush) codes <= 0;
      else if (code_load) begin
        checks++; if (codes > 1 || (codes == 1 && !dispatch)) fail("code load over live code");
        codes <= int'(codes_per_word(cfg.code_bits));
      end else if (dispatch) codes <= codes - 1;
      if (dispatch) begin
        checks++; if (codes == 0 || lanes >= N_LANES) fail("bad dispatch");
        dispatched <= dispatched + 1;
      end
      if (sctrl_clear) lanes <= 0;
      else if (dispatch) lanes <= lanes + 1;
      if (pe_start) begin
        busy_left <= $urandom_range(0, 9) + 1;
        starts <= starts + 1;
        checks++; if (lanes != N_LANES) fail("start before lanes loaded");
      end else if (busy_left > 0) busy_left <= busy_left - 1;
      if (pe_clear) clears <= clears + 1;
      if (pe_finish) finishes <= finishes + 1;
      if (d_re) gather_q.push_back(d_raddr);
      if (act_we) gathered <= gathered + 1;
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int settings [4][3] = '{'{4, 4, 4}, '{3, 3, 5}, '{1, 1, 3}, '{7, 10, 2}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (settings[s]) begin
      int pixels, oh, ow;
      cfg.n_nz = 4'(settings[s][0]); cfg.stride = 4'(settings[s][1]); cfg.code_bits = 3'(settings[s][2]);
      op.groups = 8'($urandom_range(1, 3));
      op.in_h = 8'($urandom_range(3, 5));
      op.in_w = 8'($urandom_range(3, 6));
      op.act_base = 17'($urandom_range(0, 1000));
      op.w_base = 14'($urandom_range(0, 1000));
      op.p_base = 10'($urandom_range(0, 100));
      oh = op.in_h - 2; ow = op.in_w - 2; pixels = oh * ow;
      dispatched = 0; starts = 0; clears = 0; finishes = 0; outs = 0; gathered = 0;
      gather_q.delete();
      exp_y = 0; exp_x = 0;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) begin
        @(negedge clk);
        if (out_valid) begin
          checks++;
          if (out_y != 8'(exp_y) || out_x != 8'(exp_x)) fail("pixel order");
          checks++;
          if (finishes != outs + 1 || clears != outs + 1) fail("clear/finish pulses");
          outs++;
          exp_x++; if (exp_x == ow) begin exp_x = 0; exp_y++; end
        end
      end
      @(negedge clk);
      checks++; if (outs != pixels) fail($sformatf("outputs %0d exp %0d", outs, pixels));
      checks++; if (starts != pixels * op.groups) fail("starts");
      checks++; if (dispatched != pixels * op.groups * N_LANES) fail("dispatch count");
      checks++; if (gathered != pixels * op.groups * N_MAC * 9) fail("gather count");
      // gather addresses in order pixel, group, channel, window position
      for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++)
        for (int g = 0; g < op.groups; g++) for (int c = 0; c < N_MAC; c++)
          for (int p = 0; p < 9; p++) begin
            int a;
            a = op.act_base + (g * N_MAC + c) * op.in_h * op.in_w + (y + p / 3) * op.in_w + x + p % 3;
            checks++;
            if (gather_q.size() == 0 || gather_q.pop_front() != 17'(a)) fail("gather address");
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight and pattern reads restart at the bases on each pixel
  logic first_w, first_p;
  always_ff @(posedge clk) begin
    if (!rst_n || krf_flush) begin first_w <= 1'b1; first_p <= 1'b1; end
    else begin
      if (w_re) begin
        first_w <= 1'b0;
        if (first_w) begin checks++; if (w_raddr != op.w_base) fail("weight base"); end
      end
      if (p_re) begin
        first_p <= 1'b0;
        if (first_p) begin checks++; if (p_raddr != op.p_base) fail("pattern base"); end
      end
    end
  end
  initial begin kcnt = 0; codes = 0; lanes = 0; busy_left = 0; end
endmodule
