// tb_m4bram_conv_l: the convolution tiles of m4bram_conv_body.svh on
// M4BRAM-L with synchronous BPEs (NBANK = 2: 64-bit weight vectors from two
// banks, 16-bit slices, twice the output channels of M4BRAM-S per tile,
// 8 read-out words). Tile latency 18*(n+3)+1 cycles.
module tb_m4bram_conv_l;
  localparam int NBANK = 2;
  localparam bit DPUMP = 1'b0;
  `include "m4bram_conv_body.svh"

  m4bram #(.NBANK(NBANK)) dut (
    .clk, .clk2x, .rst_n, .cfg,
    .wen_a, .addr_a, .data_a, .be_a, .inclr, .dout_a,
    .wen_b, .addr_b, .data_b, .be_b, .dout_b, .dout_b_is_result,
    .cim_busy, .cim_ready, .cim_drop
  );

  // end of the test, from the main sequence or the watchdog
  initial begin
    @(tb_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
