// tb_m4bram_dup_shuffler: exhaustive check of the duplication shuffler's
// select decoding (every DP-sram code and addrDP) on random weight vectors,
// for the 32-bit (M4BRAM-S) and 64-bit (M4BRAM-L) versions. Expected slice
// indices come from m4bram_ref_pkg::shuffle_idx. Combinational block: each
// vector is checked one time step after it is applied.
module tb_m4bram_dup_shuffler;
  import m4bram_pkg::*;
  import m4bram_ref_pkg::*;

  logic [31:0] w32;
  logic [63:0] w64;
  dp_e         dp;
  logic [1:0]  adp;
  logic [7:0]  s32 [NBPE];
  logic [15:0] s64 [NBPE];
  logic        clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  m4bram_dup_shuffler dut32 (.wvec(w32), .dp, .addr_dp(adp), .slice_o(s32));
  m4bram_dup_shuffler #(.VW(64)) dut64 (.wvec(w64), .dp, .addr_dp(adp), .slice_o(s64));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    int idx;
    for (int t = 0; t < 200; t++) begin
      for (int d = 0; d < 3; d++) begin
        for (int a = 0; a < 4; a++) begin
          w32 = $urandom; w64 = {$urandom, $urandom}; dp = dp_e'(d); adp = 2'(a);
          #1;
          for (int k = 0; k < NBPE; k++) begin
            idx = shuffle_idx(d, a, k);
            checks += 2;
            if (s32[k] !== w32[idx*8 +: 8])   begin failures++; $display("FAIL s32 dp=%0d a=%0d k=%0d", d, a, k); end
            if (s64[k] !== w64[idx*16 +: 16]) begin failures++; $display("FAIL s64 dp=%0d a=%0d k=%0d", d, a, k); end
          end
        end
      end
    end
    // DP_1 ignores addrDP; DP_4 sends one slice to all four BPEs
    dp = DP_4; adp = 2'd2; w32 = 32'hDDCCBBAA; #1;
    checks++;
    if ({s32[3], s32[2], s32[1], s32[0]} !== 32'hCCCCCCCC) begin failures++; $display("FAIL broadcast"); end
    dp = DP_1; #1;
    checks++;
    if ({s32[3], s32[2], s32[1], s32[0]} !== 32'hDDCCBBAA) begin failures++; $display("FAIL straight"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
