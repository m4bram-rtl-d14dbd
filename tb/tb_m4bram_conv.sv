// tb_m4bram_conv: convolution tiles of the evaluated precision mixes on one
// M4BRAM-S with synchronous BPEs, every parameter at its default (no
// parameter list on the block). Stimulus and checks are in
// m4bram_conv_body.svh: per tile 18 back-to-back MAC2s checked against a
// direct convolution and against the 18*(n+3)+1 cycle tile latency.
module tb_m4bram_conv;
  localparam int NBANK = 1;
  localparam bit DPUMP = 1'b0;
  `include "m4bram_conv_body.svh"

  m4bram dut (
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
