// tb_m4bram_dp: end-to-end self-checking test of a double-pumped M4BRAM-S
// (DPUMP = 1: BPEs on clk2x, a MAC2 in ceil(n/2)+2 cycles). Same stimulus
// and checks as tb_m4bram, from m4bram_tb_body.svh.
module tb_m4bram_dp;
  localparam int NBANK = 1;
  localparam bit DPUMP = 1'b1;
  `include "m4bram_tb_body.svh"

  m4bram #(.DPUMP(DPUMP)) dut (
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
