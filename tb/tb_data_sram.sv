// tb_data_sram: writes random words to random addresses of the data
// SRAM at its full depth, then reads each back and checks the data
// arrives exactly one cycle after the read enable.
module tb_data_sram;
  import pcnn_pkg::*;
  localparam int unsigned DEPTH = 131072;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned DW = ABITS;
  logic clk = 0;
  logic we = 0, re = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] refm [logic [AW-1:0]];
  logic [AW-1:0] addrs [200];
  int checks = 0, failures = 0;

  data_sram dut (.*);
  always #5 clk = ~clk;

  function automatic logic [DW-1:0] rnd();
    logic [DW-1:0] v;
    for (int i = 0; i < DW; i += 32) v[i +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < 200; i++) begin
      logic [DW-1:0] v;
      addrs[i] = (i == 0) ? AW'(DEPTH - 1) : (i == 1) ? '0 : AW'($urandom_range(0, DEPTH - 1));
      v = rnd();
      refm[addrs[i]] = v;
      @(negedge clk); we = 1; waddr = addrs[i]; wdata = v;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk); re = 1; raddr = addrs[i];
      @(negedge clk); re = 0;
      checks++;
      if (rdata !== refm[addrs[i]]) begin
        failures++; $display("FAIL addr %0d", addrs[i]);
      end
      // data must hold while re is low, even when the address moves
      raddr = addrs[(i + 1) % 200] ^ AW'(1);
      @(negedge clk);
      checks++;
      if (rdata !== refm[addrs[i]]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
