// tb_m4bram_l: end-to-end self-checking test of the M4BRAM-L organisation
// (NBANK = 2: two banks giving a 64-bit weight vector, four 7 x 64 BPEs,
// 8 read-out cycles). Same stimulus and checks as tb_m4bram, from
// m4bram_tb_body.svh.
module tb_m4bram_l;
  localparam int NBANK = 2;
  localparam bit DPUMP = 1'b0;
  `include "m4bram_tb_body.svh"

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
