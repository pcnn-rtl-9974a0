// tb_pcnn_vgg: workload test at the default size (64 PEs x 4 MACs). It runs
// a spatial tile of the second convolution layer of VGG-16 on CIFAR-10,
// with 64 input and 64 output channels, at the pruning settings evaluated
// for that network: n = 4 with 16 patterns, n = 3, 2 with 32 patterns and
// n = 1 with 8 patterns.
//
// One pass covers the whole layer's channels: 64 x 64 = 4096 kernels,
// i.e. 16 channel groups of 4 input channels. The codes need at most
// 4096 / 12 = 342 pattern-SRAM words, and the weights at most 2048
// weight-SRAM words. Only the spatial size is cut, from 32x32 to a 6x6
// output tile read from an 8x8 input tile, to keep the simulation short;
// every output channel of the tile is still computed. Weights, patterns
// and activations are random. Half the activations are zero, roughly
// what follows a ReLU layer. Every output of every channel is compared
// with a direct convolution + ReLU model, and the PE group's busy time is
// compared with the busiest lane's effectual pairs + 1 per channel group.
// At the end the bench prints the PE issue cycles per setting and their
// ratio to a dense (n = 9) run of the same tile.
module tb_pcnn_vgg;
  import pcnn_pkg::*;
  localparam int unsigned N_PE = 64;
  localparam int unsigned N_MAC = 4;
  localparam int unsigned N_LANES = N_PE * N_MAC;
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [5:0] cfg_addr = '0;
  logic [15:0] cfg_wdata = '0;
  logic wsram_we = 0, psram_we = 0, dsram_we = 0;
  logic [13:0] wsram_addr = '0;
  logic [63:0] wsram_wdata = '0;
  logic [9:0] psram_addr = '0;
  logic [59:0] psram_wdata = '0;
  logic [16:0] dsram_addr = '0;
  logic [7:0] dsram_wdata = '0;
  logic start = 0;
  op_cfg_t op;
  logic busy, done, out_valid, pattern_error;
  logic [7:0] out_y, out_x;
  acc_t out_data [N_PE];
  int checks = 0, failures = 0;

  pcnn_top dut (.*);
  always #5 clk = ~clk;

  // mechanism counters
  int n_split = 0, n_refill = 0, n_multigroup = 0, n_zero_skip = 0;
  int n_relu_clamp = 0, n_relu_pass = 0, n_padded = 0, n_pattern_err = 0;

  // knobs for workload runs
  int zero_pct = 40;          // share of zero activations, percent
  bit check_mech = 1;
  int last_busy, last_steps, pass_cycles;

  // PE-group latency: count busy cycles
  int busy_cycles = 0;
  always @(posedge clk) if (dut.pe_busy) busy_cycles++;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic wr_cfg(input int a, input int d);
    @(negedge clk); cfg_we = 1; cfg_addr = 6'(a); cfg_wdata = 16'(d);
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic run_layer(input int n, input int stride, input int b, input int groups,
                           input int h, input int w, input bit bad_table);
    int V, C, K, oh, ow, cpw, nwords, npwords, exp_busy;
    mask_t table_m [32];
    int kcode [];
    weight_t kw [][KSIZE];      // dense kernels, index g*N_LANES + k*N_MAC + m
    act_t fm [];                // C x h x w
    byte unsigned wstream [$];
    longint exp_out [];
    V = 1 << b; C = groups * N_MAC; K = groups * N_LANES;
    oh = h - 2; ow = w - 2; cpw = 60 / b;
    // mapping table: V masks with n ones
    for (int i = 0; i < 32; i++) begin
      table_m[i] = '0;
      while ($countones(table_m[i]) < n) table_m[i][$urandom_range(0, 8)] = 1'b1;
      if (bad_table && i == 0) table_m[i] = 9'h000;
      wr_cfg(i, int'(table_m[i]));
    end
    wr_cfg(32, (b << 8) | (stride << 4) | n);
    // kernels
    kcode = new[K]; kw = new[K];
    for (int i = 0; i < K; i++) begin
      kcode[i] = bad_table ? 0 : $urandom_range(0, V - 1);
      for (int p = 0; p < KSIZE; p++) begin
        int v;
        do v = $urandom_range(0, 255) - 128; while (v == 0);
        kw[i][p] = table_m[kcode[i]][p] ? weight_t'(v) : '0;
      end
      if (((i * stride) % 8) + stride > 8) n_split++;
      for (int p = 0; p < KSIZE; p++) if (table_m[kcode[i]][p]) wstream.push_back(byte'(kw[i][p]));
      for (int p = n; p < stride; p++) wstream.push_back(8'h00);
    end
    if (stride > n) n_padded++;
    if (K > cpw) n_refill++;
    if (groups > 1) n_multigroup++;
    // weight SRAM
    nwords = (wstream.size() + 7) / 8;
    for (int wd = 0; wd < nwords; wd++) begin
      logic [63:0] word;
      word = '0;
      for (int k = 0; k < 8; k++)
        if (wd * 8 + k < wstream.size()) word[k*8 +: 8] = wstream[wd * 8 + k];
      @(negedge clk); wsram_we = 1; wsram_addr = 14'(wd + 5); wsram_wdata = word;
    end
    @(negedge clk); wsram_we = 0;
    // pattern SRAM
    npwords = (K + cpw - 1) / cpw;
    for (int pw = 0; pw < npwords; pw++) begin
      logic [59:0] word;
      word = '0;
      for (int c = 0; c < cpw; c++)
        if (pw * cpw + c < K) word[c*b +: 5] = 5'(kcode[pw * cpw + c]);
      @(negedge clk); psram_we = 1; psram_addr = 10'(pw + 3); psram_wdata = word;
    end
    @(negedge clk); psram_we = 0;
    // feature map, ~40% zeros
    fm = new[C * h * w];
    for (int i = 0; i < C * h * w; i++) begin
      begin
        int v;
        do v = $urandom_range(0, 255) - 128; while (v == 0);
        fm[i] = ($urandom_range(0, 99) < zero_pct) ? '0 : act_t'(v);
      end
      @(negedge clk); dsram_we = 1; dsram_addr = 17'(i + 100); dsram_wdata = fm[i];
    end
    @(negedge clk); dsram_we = 0;
    // model
    exp_out = new[oh * ow * N_PE];
    exp_busy = 0;
    for (int y = 0; y < oh; y++) for (int x = 0; x < ow; x++) begin
      for (int k = 0; k < N_PE; k++) exp_out[(y * ow + x) * N_PE + k] = 0;
      for (int g = 0; g < groups; g++) begin
        int maxk;
        maxk = 0;
        for (int k = 0; k < N_PE; k++) for (int m = 0; m < N_MAC; m++) begin
          int i, c, eff;
          i = g * N_LANES + k * N_MAC + m;
          c = g * N_MAC + m;
          eff = 0;
          for (int p = 0; p < KSIZE; p++) begin
            act_t a;
            a = fm[c * h * w + (y + p / 3) * w + x + p % 3];
            exp_out[(y * ow + x) * N_PE + k] += longint'(kw[i][p]) * longint'(a);
            if (kw[i][p] != 0 && a != 0) eff++;
            if (kw[i][p] != 0 && a == 0) n_zero_skip++;
          end
          if (eff > maxk) maxk = eff;
        end
        exp_busy += (maxk == 0) ? 0 : maxk + 1;
      end
    end
    // run
    op.groups = 8'(groups); op.in_h = 8'(h); op.in_w = 8'(w);
    op.act_base = 17'd100; op.w_base = 14'd5; op.p_base = 10'd3;
    busy_cycles = 0;
    pass_cycles = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) begin
      @(negedge clk);
      pass_cycles++;
      if (out_valid && !bad_table) begin
        for (int k = 0; k < N_PE; k++) begin
          longint e;
          int yy, xx, idx;
          yy = int'(out_y); xx = int'(out_x);
          idx = (yy * ow + xx) * N_PE + k;
          e = exp_out[idx];
          checks++;
          if (out_data[k] != ((e > 0) ? acc_t'(e) : '0)) begin
            failures++;
            $display("FAIL n=%0d (%0d,%0d) ch %0d: %0d exp %0d", n, out_y, out_x, k, out_data[k], e);
          end
          if (e <= 0) n_relu_clamp++; else n_relu_pass++;
        end
      end
    end
    @(negedge clk);
    if (!bad_table) begin
      checks++;
      if (busy_cycles != exp_busy) begin
        failures++; $display("FAIL n=%0d PE busy %0d exp %0d", n, busy_cycles, exp_busy);
      end
      checks++; if (pattern_error) begin failures++; $display("FAIL spurious pattern error"); end
    end else begin
      checks++;
      if (!pattern_error) begin failures++; $display("FAIL pattern error not flagged"); end
      else n_pattern_err++;
    end
    last_busy = busy_cycles;
    last_steps = oh * ow * groups;
    $display("layer n=%0d stride=%0d b=%0d C=%0d %0dx%0d: PE busy %0d of %0d pass cycles", n, stride, b, C, h, w, busy_cycles, pass_cycles);
  endtask

  initial begin
    op = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    check_mech = 0;
    zero_pct = 50;
    begin
      int nlist [5], blist [5], issue [5];
      nlist = '{9, 4, 3, 2, 1};
      blist = '{5, 4, 5, 5, 3};
      foreach (nlist[i]) begin
        run_layer(nlist[i], nlist[i], blist[i], 16, 8, 8, 0);
        issue[i] = last_busy - last_steps;
        checks++;
        if (issue[i] > nlist[i] * last_steps) begin
          failures++; $display("FAIL n=%0d issue cycles %0d above %0d", nlist[i], issue[i], nlist[i] * last_steps);
        end
      end
      foreach (nlist[i])
        $display("VGG-16 conv1_2 tile, n=%0d, %0d patterns: PE issue cycles %0d, %0.2fx fewer than n=9",
                 nlist[i], 1 << blist[i], issue[i], real'(issue[0]) / real'(issue[i]));
    end
    if (check_mech) begin
      int counts [8];
      string names [8];
      counts = '{n_split, n_refill, n_multigroup, n_zero_skip, n_relu_clamp, n_relu_pass, n_padded, n_pattern_err};
      names  = '{"split kernel", "pattern refill", "multi-group", "zero skip", "relu clamp", "relu pass", "padding", "pattern error"};
      foreach (counts[i]) begin
        $display("mechanism %-15s %0d", names[i], counts[i]);
        checks++;
        if (counts[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", names[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
