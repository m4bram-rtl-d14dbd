// tb_m4bram_bpe: self-checking test of the BPE, for both dummy-array widths
// (32 columns as in M4BRAM-S, 64 as in M4BRAM-L). The testbench plays the
// eFSM's part: it loads W1 and W2, runs BOP_SUM, the MSB step, n-1 bit
// steps and BOP_ACC, then compares P and the accumulator with integer
// arithmetic from m4bram_ref_pkg. Random weight precisions, activation
// precisions 2..8, signed and unsigned, with and without accumulator reset.
// The MAC2 sequence is n+2 cycles long, which the testbench counts.
module tb_m4bram_bpe;
  import m4bram_pkg::*;
  import m4bram_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n;
  pw_e         pw;
  logic        ld1, ld2, sgn, acc_clr;
  logic [15:0] ws;
  bop_e        op;
  logic [1:0]  abits;
  logic [31:0] p32, acc32;
  logic [63:0] p64, acc64;

  always #5 clk = ~clk;

  m4bram_bpe dut32 (.clk, .rst_n, .pw, .ld1, .ld2, .wslice(ws[7:0]), .op, .abits, .sgn,
                    .acc_clr, .p_o(p32), .acc_o(acc32));
  m4bram_bpe #(.NCOL(64)) dut64 (.clk, .rst_n, .pw, .ld1, .ld2, .wslice(ws), .op, .abits,
                                 .sgn, .acc_clr, .p_o(p64), .acc_o(acc64));

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input bop_e o, input logic [1:0] ab, input bit s, input bit c,
                      input bit l1, input bit l2, input logic [15:0] w);
    @(negedge clk);
    op = o; abits = ab; sgn = s; acc_clr = c; ld1 = l1; ld2 = l2; ws = w;
    @(posedge clk);
    #1;
  endtask

  initial begin : main
    logic [63:0] e_acc32, e_acc64, e_p32, e_p64;
    logic [15:0] s1, s2;
    logic [7:0]  i1, i2;
    int          n, pwb, ncyc;
    bit          sg, clr;
    op = BOP_NOP; abits = '0; sgn = 0; acc_clr = 0; ld1 = 0; ld2 = 0; ws = '0; pw = PW_8;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    checks++;
    if (acc32 !== '0 || acc64 !== '0) begin failures++; $display("FAIL: reset"); end
    e_acc32 = '0; e_acc64 = '0;
    for (int t = 0; t < 3000; t++) begin
      pw  = pw_e'($urandom_range(2));
      pwb = 2 << int'(pw);
      n   = 2 + $urandom_range(6);
      sg  = 1'($urandom);
      clr = ($urandom_range(3) == 0);
      s1 = 16'($urandom); s2 = 16'($urandom); i1 = 8'($urandom); i2 = 8'($urandom);
      step(BOP_NOP, 2'b00, 0, 0, 1, 0, s1);                    // copy W1
      ncyc = 0;
      step(BOP_SUM, 2'b00, 0, 0, 0, 1, s2); ncyc++;            // copy W2, W1+W2
      for (int b = n-1; b >= 0; b--) begin
        step(b == n-1 ? BOP_MSB : BOP_BIT, {i2[b], i1[b]}, sg && (b == n-1), 0, 0, 0, '0);
        ncyc++;
      end
      e_p32 = ref_mac2(s1, s2, i1, i2, pwb, n, sg, '0, 1, 32);
      e_p64 = ref_mac2(s1, s2, i1, i2, pwb, n, sg, '0, 1, 64);
      checks += 2;
      if (64'(p32) !== e_p32) begin failures++; $display("FAIL P32 %h exp %h pw=%0d n=%0d s=%0b", p32, e_p32, pwb, n, sg); end
      if (p64 !== e_p64)      begin failures++; $display("FAIL P64 %h exp %h pw=%0d n=%0d s=%0b", p64, e_p64, pwb, n, sg); end
      step(BOP_ACC, 2'b00, 0, clr, 0, 0, '0); ncyc++;
      e_acc32 = ref_mac2(s1, s2, i1, i2, pwb, n, sg, e_acc32, clr, 32);
      e_acc64 = ref_mac2(s1, s2, i1, i2, pwb, n, sg, e_acc64, clr, 64);
      checks += 3;
      if (64'(acc32) !== e_acc32) begin failures++; $display("FAIL ACC32 %h exp %h", acc32, e_acc32); end
      if (acc64 !== e_acc64)      begin failures++; $display("FAIL ACC64 %h exp %h", acc64, e_acc64); end
      if (ncyc != n + 2)          begin failures++; $display("FAIL MAC2 took %0d cycles", ncyc); end
      // idle cycles must not disturb the accumulator
      step(BOP_NOP, 2'($urandom), 0, 0, 0, 0, '0);
      checks++;
      if (64'(acc32) !== e_acc32) begin failures++; $display("FAIL ACC32 changed on NOP"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
