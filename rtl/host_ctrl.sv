// host_ctrl: the sequencer of one convolution pass.
//
// A pass computes a 3x3, stride-1, unpadded convolution over
// op.groups * N_MAC input channels of an in_h x in_w map, for N_PE output
// channels at once, pixel by pixel in raster order. For every output
// pixel and every channel group it
//   1. gathers the N_MAC activation windows of the group from the data
//      SRAM, one byte per cycle, into the shared activation register file;
//   2. dispatches the group's N_PE*N_MAC kernels, one per cycle, from the
//      kernel register file (non-zero sequence) and the SPM code register
//      (code, decoded by the pattern decoder) to the sparsity controller,
//      which restores them into the MAC lanes;
//   3. starts the PE group and waits until it is idle.
// Steps 1 and 2 run at the same time, in state S_LOAD, as the pre-process
// stage of the paper's pipeline; step 3 begins when both are complete.
// After the last group it applies ReLU (finish) and presents the N_PE
// results for one cycle with out_valid. Two fetch engines run beside the
// sequence and keep the register files filled: 8-weight words are read
// from the weight SRAM while the kernel register file has room, and
// 60-bit pattern words whenever the code register is empty. Kernels are
// stored in the order pixel-independent group g, PE k, lane m, i.e.
// kernel index g*N_PE*N_MAC + k*N_MAC + m; they are read again for every
// output pixel, and both register files are flushed at each pixel start.
// The paper states only that the host controller fetches data into the
// registers according to the sparsity set in the pattern configuration;
// this loop order and dataflow are this design's own.
//
// Timing: start is taken while idle; done pulses one cycle after the last
// pixel's out_valid. SRAM reads have one cycle of latency.
module host_ctrl
  import pcnn_pkg::*;
#(
  parameter int unsigned N_PE  = 64,
  parameter int unsigned N_MAC = 4,
  parameter int unsigned WAW   = 14,
  parameter int unsigned PAW   = 10,
  parameter int unsigned DAW   = 17,
  parameter int unsigned CW    = (N_MAC > 1) ? $clog2(N_MAC) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  op_cfg_t         op,
  input  layer_cfg_t      cfg,
  // weight SRAM and kernel register file
  output logic            w_re,
  output logic [WAW-1:0]  w_raddr,
  output logic            krf_push,
  output logic            krf_flush,
  input  logic [6:0]      krf_count,
  // pattern SRAM and SPM code register
  output logic            p_re,
  output logic [PAW-1:0]  p_raddr,
  output logic            code_load,
  output logic            code_flush,
  input  logic            code_avail,
  // kernel dispatch (pops both register files, feeds sparsity controller)
  output logic            dispatch,
  output logic            sctrl_clear,
  input  logic            sctrl_full,
  // data SRAM and activation register file
  output logic            d_re,
  output logic [DAW-1:0]  d_raddr,
  output logic            act_we,
  output logic [CW-1:0]   act_wch,
  output pos_t            act_wpos,
  // PE group
  output logic            pe_start,
  output logic            pe_clear,
  output logic            pe_finish,
  input  logic            pe_busy,
  // results
  output logic            out_valid,
  output logic [7:0]      out_y,
  output logic [7:0]      out_x,
  output logic            busy,
  output logic            done
);

  localparam int unsigned N_LANES = N_PE * N_MAC;
  localparam int unsigned N_ACT   = N_MAC * KSIZE;

  typedef enum logic [2:0] {
    S_IDLE, S_PIXEL, S_LOAD, S_START, S_WAIT, S_FINISH, S_OUT, S_DONE
  } state_t;

  state_t      state;
  op_cfg_t     opq;
  logic [7:0]  oy, ox, grp;
  logic [7:0]  out_h, out_w;

  // fetch engines
  logic [23:0] w_total, w_fetched;   // weights of a pixel / fetched so far
  logic [23:0] k_total;              // kernels of a pixel
  logic [23:0] c_loaded;             // codes loaded so far this pixel
  logic        w_pend, p_pend;
  logic        fetch_on;

  // activation gather
  logic [6:0]  a_idx;                // 0 .. N_ACT, next read
  logic        a_pend;
  logic [CW-1:0] a_ch_q;
  pos_t        a_pos_q;
  logic [3:0]  a_pos, a_dy, a_dx;
  logic [CW-1:0] a_ch;
  logic        a_done;
  logic        waited;

  assign out_h   = opq.in_h - 8'd2;
  assign out_w   = opq.in_w - 8'd2;
  assign k_total = 24'(opq.groups) * 24'(N_LANES);
  assign w_total = k_total * 24'(cfg.stride);

  // ---------------------------------------------------------------
  // Weight fetch: read a word when the file can take it on arrival.
  // ---------------------------------------------------------------
  always_comb begin
    w_re = fetch_on && (w_fetched < w_total) &&
           (32'(krf_count) + (w_pend ? 32'(WORD_WEIGHTS) : 0) + 32'(WORD_WEIGHTS)
            <= 32'(KRF_DEPTH));
    p_re = fetch_on && (c_loaded < k_total) && !code_avail && !p_pend;
  end
  assign krf_push  = w_pend;
  assign code_load = p_pend;

  // ---------------------------------------------------------------
  // Activation gather address: channel a_ch, position a_pos of the
  // window whose top-left input pixel is (oy, ox).
  // ---------------------------------------------------------------
  always_comb begin
    a_ch  = CW'(a_idx / 7'(KSIZE));
    a_pos = 4'(a_idx % 7'(KSIZE));
    a_dy  = a_pos / 4'd3;
    a_dx  = a_pos % 4'd3;
    d_raddr = DAW'(32'(opq.act_base)
              + (32'(grp) * 32'(N_MAC) + 32'(a_ch)) * (32'(opq.in_h) * 32'(opq.in_w))
              + (32'(oy) + 32'(a_dy)) * 32'(opq.in_w) + 32'(ox) + 32'(a_dx));
    d_re    = (state == S_LOAD) && (a_idx < 7'(N_ACT));
  end
  assign act_we   = a_pend;
  assign act_wch  = a_ch_q;
  assign act_wpos = a_pos_q;
  assign a_done   = (a_idx == 7'(N_ACT)) && !a_pend;

  assign dispatch    = (state == S_LOAD) && !sctrl_full && code_avail &&
                       (krf_count >= 7'(cfg.stride));
  assign sctrl_clear = (state == S_WAIT) && waited && !pe_busy;
  assign pe_start    = (state == S_START);
  assign pe_finish   = (state == S_FINISH);
  assign pe_clear    = (state == S_PIXEL);
  assign krf_flush   = (state == S_PIXEL);
  assign code_flush  = (state == S_PIXEL);
  assign out_valid   = (state == S_OUT);
  assign out_y       = oy;
  assign out_x       = ox;
  assign busy        = (state != S_IDLE);
  assign done        = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      opq       <= '0;
      oy        <= '0;
      ox        <= '0;
      grp       <= '0;
      w_raddr   <= '0;
      p_raddr   <= '0;
      w_fetched <= '0;
      c_loaded  <= '0;
      w_pend    <= 1'b0;
      p_pend    <= 1'b0;
      fetch_on  <= 1'b0;
      a_idx     <= '0;
      a_pend    <= 1'b0;
      a_ch_q    <= '0;
      a_pos_q   <= '0;
      waited    <= 1'b0;
    end else begin
      // fetch engines
      w_pend <= w_re;
      p_pend <= p_re;
      if (w_re) begin
        w_raddr   <= w_raddr + 1'b1;
        w_fetched <= w_fetched + 24'(WORD_WEIGHTS);
      end
      if (p_re) begin
        p_raddr  <= p_raddr + 1'b1;
        c_loaded <= c_loaded + 24'(codes_per_word(cfg.code_bits));
      end
      // activation gather
      a_pend <= d_re;
      if (d_re) begin
        a_idx   <= a_idx + 7'd1;
        a_ch_q  <= a_ch;
        a_pos_q <= a_pos;
      end

      case (state)
        S_IDLE: if (start) begin
          opq   <= op;
          oy    <= '0;
          ox    <= '0;
          state <= S_PIXEL;
        end
        S_PIXEL: begin            // flush files, restart the kernel streams
          w_raddr   <= opq.w_base;
          p_raddr   <= opq.p_base;
          w_fetched <= '0;
          c_loaded  <= '0;
          fetch_on  <= 1'b1;
          grp       <= '0;
          a_idx     <= '0;
          state     <= S_LOAD;
        end
        S_LOAD: if (a_done && sctrl_full) state <= S_START;
        S_START: begin
          waited <= 1'b0;
          state  <= S_WAIT;
        end
        S_WAIT: begin
          waited <= 1'b1;
          if (waited && !pe_busy) begin
            if (grp == opq.groups - 8'd1) begin
              state <= S_FINISH;
            end else begin
              grp   <= grp + 8'd1;
              a_idx <= '0;
              state <= S_LOAD;
            end
          end
        end
        S_FINISH: begin
          fetch_on <= 1'b0;
          state    <= S_OUT;
        end
        S_OUT: begin
          if (ox == out_w - 8'd1) begin
            ox <= '0;
            if (oy == out_h - 8'd1) state <= S_DONE;
            else begin
              oy    <= oy + 8'd1;
              state <= S_PIXEL;
            end
          end else begin
            ox    <= ox + 8'd1;
            state <= S_PIXEL;
          end
        end
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_sane: assert property (@(posedge clk) disable iff (!rst_n)
                                 (state == S_IDLE && start) |->
                                 (op.groups != 0 && op.in_h >= 8'd3 && op.in_w >= 8'd3));

endmodule
