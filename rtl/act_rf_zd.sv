// act_rf_zd: shared activation register file with zero detect.
//
// Holds one 3x3 activation window for each of N_CH input channels; all PEs
// read the same windows (shared-activation dataflow). Each register has a
// zero detector, so the 9-bit activation mask of a window (bit p set when
// activation p is non-zero) is formed while the window is written, as in
// the paper's data-preprocess stage. Holding N_CH = 4 windows, one per
// MAC unit of a PE, is this design's own choice.
//
// Interface: one activation written per cycle at (wch, wpos).
// Timing: act and amask reflect a write from the next cycle on.
module act_rf_zd
  import pcnn_pkg::*;
#(
  parameter int unsigned N_CH = 4,
  parameter int unsigned CW   = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [CW-1:0] wch,
  input  pos_t          wpos,
  input  act_t          wdata,
  output act_t          act   [N_CH][KSIZE],
  output mask_t         amask [N_CH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CH; c++) begin
        amask[c] <= '0;
        for (int p = 0; p < KSIZE; p++) act[c][p] <= '0;
      end
    end else if (we) begin
      act[wch][wpos]   <= wdata;
      amask[wch][wpos] <= (wdata != '0);
    end
  end

  a_pos_range: assert property (@(posedge clk) disable iff (!rst_n)
                                we |-> (wpos < pos_t'(KSIZE) && 32'(wch) < N_CH));

endmodule
