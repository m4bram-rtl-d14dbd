// tb_m4bram_array: self-checking test of the main BRAM array in both
// organisations, one bank (M4BRAM-S) and two banks (M4BRAM-L), driven with
// the same random dual-port traffic: writes with random byte enables on
// both ports (distinct addresses), reads on both ports every cycle. Checks
// the one-cycle read latency with read-before-write, and the compute-mode
// weight vector a_wvec (32 bits, or 64 bits gathered from both banks).
module tb_m4bram_array;
  import m4bram_pkg::*;

  logic             clk = 1'b0;
  logic [AW-1:0]    a_addr, b_addr;
  logic             a_we, b_we;
  logic [BE_W-1:0]  a_be, b_be;
  logic [WIDTH-1:0] a_din, b_din, a1, b1, a2, b2;
  logic [31:0]      wv1;
  logic [63:0]      wv2;
  logic [WIDTH-1:0] mem_m [DEPTH];
  bit               valid [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  m4bram_array dut1 (.clk, .a_addr, .a_we, .a_be, .a_din, .a_dout(a1), .a_wvec(wv1),
                     .b_addr, .b_we, .b_be, .b_din, .b_dout(b1));
  m4bram_array #(.NBANK(2)) dut2 (.clk, .a_addr, .a_we, .a_be, .a_din, .a_dout(a2), .a_wvec(wv2),
                                  .b_addr, .b_we, .b_be, .b_din, .b_dout(b2));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic [WIDTH-1:0] got, input logic [WIDTH-1:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s %h exp %h", what, got, exp); end
  endtask

  initial begin : main
    int aa, ab;
    logic [WIDTH-1:0] ea, eb;
    logic [63:0]      ew2;
    a_we = 0; b_we = 0; a_be = '1; b_be = '1; a_addr = '0; b_addr = '0; a_din = '0; b_din = '0;
    // fill with full-word writes
    for (int i = 0; i < DEPTH; i += 2) begin
      @(negedge clk);
      a_we = 1; a_addr = AW'(i);   a_din = WIDTH'({$urandom, $urandom}); a_be = '1;
      b_we = 1; b_addr = AW'(i+1); b_din = WIDTH'({$urandom, $urandom}); b_be = '1;
      @(posedge clk);
      mem_m[i] = a_din; mem_m[i+1] = b_din;
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      aa = $urandom_range(DEPTH-1);
      do ab = $urandom_range(DEPTH-1); while (ab == aa);
      a_addr = AW'(aa); b_addr = AW'(ab);
      a_we = 1'($urandom); b_we = 1'($urandom);
      a_be = BE_W'($urandom); b_be = BE_W'($urandom);
      a_din = WIDTH'({$urandom, $urandom}); b_din = WIDTH'({$urandom, $urandom});
      ea  = mem_m[aa];
      eb  = mem_m[ab];
      ew2 = {mem_m[DEPTH/2 + (aa % (DEPTH/2))][31:0], mem_m[aa % (DEPTH/2)][31:0]};
      @(posedge clk);
      for (int i = 0; i < BE_W; i++) begin
        if (a_we && a_be[i]) mem_m[aa][i*BYTE_W +: BYTE_W] = a_din[i*BYTE_W +: BYTE_W];
        if (b_we && b_be[i]) mem_m[ab][i*BYTE_W +: BYTE_W] = b_din[i*BYTE_W +: BYTE_W];
      end
      #1;
      chk(a1, ea, "S port A");
      chk(b1, eb, "S port B");
      chk(a2, ea, "L port A");
      chk(b2, eb, "L port B");
      chk(WIDTH'(wv1), WIDTH'(ea[31:0]), "S wvec");
      checks++;
      if (wv2 !== ew2) begin failures++; $display("FAIL L wvec %h exp %h", wv2, ew2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
