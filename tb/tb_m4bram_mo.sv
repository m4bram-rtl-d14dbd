// tb_m4bram_mo: self-checking test of the MO output mux for M4BRAM-S
// (4 result words) and M4BRAM-L (8 result words): with sel low the array
// data must pass, with sel high the addressed 32-bit accumulator word,
// zero-extended. Combinational; checked one time step after each vector.
module tb_m4bram_mo;
  import m4bram_pkg::*;

  logic [WIDTH-1:0] arr, d1, d2;
  logic [31:0]      a1 [NBPE];
  logic [63:0]      a2 [NBPE];
  logic             sel;
  logic [2:0]       idx;
  logic             clk = 1'b0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  m4bram_mo dut1 (.arr_dout(arr), .acc(a1), .sel, .rd_idx(idx[1:0]), .dout(d1));
  m4bram_mo #(.NBANK(2)) dut2 (.arr_dout(arr), .acc(a2), .sel, .rd_idx(idx), .dout(d2));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    for (int t = 0; t < 2000; t++) begin
      arr = WIDTH'({$urandom, $urandom});
      for (int k = 0; k < NBPE; k++) begin a1[k] = $urandom; a2[k] = {$urandom, $urandom}; end
      sel = 1'($urandom);
      idx = 3'($urandom);
      #1;
      checks += 2;
      if (d1 !== (sel ? {8'h0, a1[idx[1:0]]} : arr)) begin failures++; $display("FAIL S sel=%0b idx=%0d", sel, idx); end
      if (d2 !== (sel ? {8'h0, (idx[0] ? a2[idx[2:1]][63:32] : a2[idx[2:1]][31:0])} : arr))
        begin failures++; $display("FAIL L sel=%0b idx=%0d", sel, idx); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
