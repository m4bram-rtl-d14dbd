// tb_m4bram: end-to-end self-checking test of the M4BRAM block in its
// default configuration (M4BRAM-S: one 512 x 40 array, four 7 x 32 BPEs).
// The stimulus, the reference model and the mechanism counters are in
// m4bram_tb_body.svh; see there for what is checked. Runs in well under a
// minute with plain verilator --binary --timing.
module tb_m4bram;
  localparam int NBANK = 1;
  localparam bit DPUMP = 1'b0;
  `include "m4bram_tb_body.svh"

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
