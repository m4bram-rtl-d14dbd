// tb_m4bram_width: self-checking test of the port aspect-ratio adapter.
//
// The adapter is connected to a behavioural 512 x 40 byte-enabled word
// memory (one cycle read latency) inside the testbench, so the pair forms
// one port of the block. Random reads and writes in the 512 x 40, 1K x 20
// and 2K x 10 shapes, with the shape changed at random between accesses, are
// checked against a model that keeps one flat array of 10-bit bytes: a
// narrow word of 40/k bits at address a is bytes (a*(4/k)) .. (a*(4/k) +
// 4/k - 1), in the low-address-in-low-bits order the adapter implements.
// Each read is checked one cycle after its access, as the port delivers it.
module tb_m4bram_width;
  import m4bram_pkg::*;

  logic              clk = 1'b0;
  logic              rst_n;
  width_e            width;
  logic [ADDR_W-1:0] addr;
  logic [BE_W-1:0]   be;
  logic [WIDTH-1:0]  din, dout;
  logic [AW-1:0]     w_addr;
  logic [BE_W-1:0]   w_be;
  logic [WIDTH-1:0]  w_din, w_dout;
  logic              we;

  always #5 clk = ~clk;

  m4bram_width dut (
    .clk, .rst_n, .width, .addr, .be, .din, .dout,
    .w_addr, .w_be, .w_din, .w_dout
  );

  // word memory behind the adapter
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    for (int i = 0; i < BE_W; i++)
      if (we && w_be[i]) mem[w_addr][i*BYTE_W +: BYTE_W] <= w_din[i*BYTE_W +: BYTE_W];
    w_dout <= mem[w_addr];
  end

  // model: flat array of bytes
  logic [BYTE_W-1:0] bytes_m [DEPTH*BE_W];

  int checks = 0, failures = 0;
  int n_wd [3] = '{0, 0, 0};

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    bit               pend;
    logic [WIDTH-1:0] exp;
    pend = 0; exp = '0;
    width = WD_40; addr = '0; be = '0; din = '0; we = 0;
    for (int i = 0; i < DEPTH; i++) mem[i] = '0;
    for (int i = 0; i < DEPTH*BE_W; i++) bytes_m[i] = '0;
    rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int k, nb, a;
      @(negedge clk);
      if (pend) begin
        checks++;
        if (dout !== exp) begin
          failures++;
          $display("FAIL t=%0d: dout %h exp %h", t, dout, exp);
        end
      end
      width = width_e'($urandom_range(2));
      k     = (width == WD_40) ? 1 : (width == WD_20) ? 2 : 4;   // narrow words per array word
      nb    = 4 / k;                                              // bytes per narrow word
      a     = $urandom_range(DEPTH*k - 1);
      addr  = ADDR_W'(a);
      be    = BE_W'($urandom);
      din   = WIDTH'({$urandom, $urandom});
      we    = 1'($urandom);
      exp   = '0;
      for (int j = 0; j < nb; j++) exp[j*BYTE_W +: BYTE_W] = bytes_m[a*nb + j];
      pend  = 1;
      @(posedge clk);
      // x40 and x20 use be[nb-1:0]; x10 always writes its byte
      if (we)
        for (int j = 0; j < nb; j++)
          if (width == WD_10 || be[j]) bytes_m[a*nb + j] = din[j*BYTE_W +: BYTE_W];
      n_wd[int'(width)]++;
    end
    begin
      checks++;
      if (n_wd[0] == 0 || n_wd[1] == 0 || n_wd[2] == 0) begin
        failures++;
        $display("FAIL: a shape was never exercised");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
