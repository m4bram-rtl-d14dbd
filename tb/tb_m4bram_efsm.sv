// tb_m4bram_efsm: cycle-by-cycle self-checking test of the eFSM. It sends
// configuration instructions (activation sign and precision) and MAC2
// instruction pairs with random flags, and checks in every following cycle
// the weight-copy strobes and their addrDP, the BPE operation (SUM, MSB,
// n-1 BIT steps, ACC: n+2 cycles), the activation bits handed to each BPE
// (MSB first), the signed-MSB and accumulator-reset controls, the
// read-out window (4 cycles, word index 0..3), ready/busy, and that an
// instruction arriving mid-MAC2 is dropped. Expected values are derived
// from the instruction fields, not from the design.
module tb_m4bram_efsm;
  import m4bram_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n, iv, inclr;
  logic [1:0]  adp;
  logic [31:0] data;
  logic [3:0]  be;
  logic        ld1, ld2, acc_clr, mo_sel, busy, ready, drop, in_sign;
  logic [1:0]  dp_addr;
  bop_e        op [2];
  logic [1:0]  abits [2][NBPE];
  logic        sgn2 [2];
  logic [1:0]  rd_idx;
  logic [3:0]  in_bits;
  int checks = 0, failures = 0;
  int n_b2b = 0, n_drop = 0;

  always #5 clk = ~clk;

  m4bram_efsm dut (.clk, .rst_n, .instr_valid(iv), .inclr, .addr_dp(adp), .data, .be,
                   .ld1, .ld2, .dp_addr, .op, .abits, .sgn(sgn2), .acc_clr, .mo_sel, .rd_idx,
                   .busy, .ready, .drop, .in_sign, .in_bits);

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(input string m);
    failures++;
    $display("FAIL @%0t: %s", $time, m);
  endtask

  // Drive one cycle's inputs at the negedge, then check the outputs of
  // that cycle one time step later.
  task automatic drive(input bit v, input bit c, input logic [1:0] a, input logic [31:0] d,
                       input logic [3:0] b);
    @(negedge clk);
    iv = v; inclr = c; adp = a; data = d; be = b;
    #1;
  endtask

  task automatic expect_cycle(input bop_e eop, input bit eld1, input bit eld2, input logic [1:0] edp,
                              input bit esgn, input bit eclr, input bit emo, input int eidx = 0);
    checks++;
    if (op[0] !== eop || ld1 !== eld1 || ld2 !== eld2 || sgn2[0] !== esgn || acc_clr !== eclr || mo_sel !== emo)
      fail($sformatf("op=%s ld=%b%b sgn=%b clr=%b mo=%b exp op=%s ld=%b%b sgn=%b clr=%b mo=%b",
                     op[0].name(), ld1, ld2, sgn2[0], acc_clr, mo_sel, eop.name(), eld1, eld2, esgn, eclr, emo));
    // without double pumping the second half-cycle slot stays idle
    if (op[1] !== BOP_NOP || sgn2[1] !== 1'b0) fail("second half-cycle slot not idle");
    if ((eld1 || eld2) && dp_addr !== edp) fail("dp_addr");
    if (emo && rd_idx !== 2'(eidx)) fail($sformatf("rd_idx %0d exp %0d", rd_idx, eidx));
  endtask

  initial begin : main
    logic [31:0] a1, a2;
    logic [1:0]  d1, d2;
    bit          cp1, cp2, rs, dn, sg, first, in_acc;
    int          n;
    iv = 0; inclr = 0; adp = '0; data = '0; be = '0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    first = 1;
    in_acc = 0;
    for (int t = 0; t < 600; t++) begin
      // configuration instruction, only when idle
      if (first) begin
        while (busy) drive(0, 0, 0, 0, 0);
        n  = 2 + $urandom_range(6);
        sg = 1'($urandom);
        drive(1, 1, 2'($urandom), $urandom, {3'(n-1), sg});
        checks++; if (drop) fail("config dropped");
        @(posedge clk); #1;
        checks++;
        if (in_bits !== 4'(n) || in_sign !== sg) fail("config not taken");
      end
      a1 = $urandom; a2 = $urandom; d1 = 2'($urandom); d2 = 2'($urandom);
      cp1 = 1'($urandom); cp2 = 1'($urandom); rs = 1'($urandom); dn = ($urandom_range(2) == 0);
      // instruction 1 whenever ready (idle, or accumulation cycle of a MAC2 without done)
      if (!in_acc) begin
        @(negedge clk); #1;
        while (!ready) begin iv = 0; @(posedge clk); @(negedge clk); #1; end
      end
      if (busy) n_b2b++;
      iv = 1; inclr = 0; adp = d1; data = a1; be = {1'b0, cp1, 1'b0, rs};
      #1;
      checks++; if (drop) fail("instruction 1 dropped");
      @(posedge clk);
      drive(1, 0, d2, a2, {dn, cp2, 1'b1, 1'b0});
      checks++; if (drop) fail("instruction 2 dropped");
      expect_cycle(BOP_NOP, cp1, 0, d1, 0, 0, 0);
      @(posedge clk);
      // MAC2: n+2 cycles
      drive(0, 0, 0, 0, 0);
      expect_cycle(BOP_SUM, 0, cp2, d2, 0, 0, 0);
      checks++; if (!busy || ready) fail("busy/ready in SUM");
      @(posedge clk);
      for (int b = n-1; b >= 0; b--) begin
        if (b == n-2 && ($urandom_range(3) == 0)) begin
          // a stray instruction in the middle of the MAC2 is dropped
          drive(1, 0, 0, $urandom, 4'b0110);
          checks++; if (!drop) fail("stray instruction not dropped");
          n_drop++;
        end else drive(0, 0, 0, 0, 0);
        expect_cycle(b == n-1 ? BOP_MSB : BOP_BIT, 0, 0, 0, sg && (b == n-1), 0, 0);
        for (int k = 0; k < NBPE; k++) begin
          checks++;
          if (abits[0][k] !== {a2[k*8+b], a1[k*8+b]}) fail($sformatf("abits[%0d] bit %0d", k, b));
        end
        @(posedge clk);
      end
      drive(0, 0, 0, 0, 0);
      expect_cycle(BOP_ACC, 0, 0, 0, 0, rs, 0);
      checks++; if (ready === dn) fail("ready in ACC");
      if (dn) begin
        @(posedge clk);
        for (int i = 0; i < NBPE; i++) begin
          drive(0, 0, 0, 0, 0);
          expect_cycle(BOP_NOP, 0, 0, 0, 0, 0, 1, i);
          @(posedge clk);
        end
        drive(0, 0, 0, 0, 0);
        checks++; if (mo_sel || busy) fail("read-out too long");
        first = 1;
    in_acc = 0;
      end else begin
        first = 0;
      end
      // without done, the next instruction 1 either goes into this same
      // accumulation cycle or waits until the block is idle
      in_acc = !dn && ($urandom_range(1) != 0);
      if (!dn && !in_acc) @(posedge clk);
    end
    checks += 2;
    if (n_b2b == 0)  fail("no instruction taken in an accumulation cycle");
    if (n_drop == 0) fail("no dropped instruction");
    $display("back-to-back %0d, dropped %0d", n_b2b, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
