// m4bram_conv_body.svh: convolution tiles of the evaluated precision mixes on
// one M4BRAM, shared by tb_m4bram_conv (M4BRAM-S, all defaults),
// tb_m4bram_conv_l (M4BRAM-L), tb_m4bram_conv_dp (double-pumped M4BRAM-S)
// and tb_m4bram_conv_dpl (double-pumped M4BRAM-L). The including module
// declares localparams NBANK and DPUMP and instantiates the block as `dut`
// on the signals declared here.
//
// Each tile is one piece of a 3x3 convolution layer mapped the way an
// accelerator would map it onto a single block, driven only through the
// block's ports: a 4-channel 4x4 input feature map, 3x3 kernels, the 2x2
// output pixels, and as many output channels as one instruction stream
// covers: (4 / N_I) weight slices x (8*NBANK / Pw) weights per slice. The 36
// kernel terms (channel, ky, kx) are paired into 18 MAC2s that accumulate in
// the BPEs; the first carries reset, the last done.
//
// Weights are written in memory mode, packed so that one weight vector
// (32 bits, or 64 bits over the two banks of M4BRAM-L) holds what the
// duplication shuffler needs: with N_I = 1 one term of 4 groups, with
// N_I = 2 two terms of 2 groups (addrDP[1] picks the term), with N_I = 4 four
// terms of one group (addrDP picks the term). The feature map values go in
// as activations, one output pixel per BPE group. After the read-out every
// output (channel, pixel) is compared with a direct convolution computed
// here with integers, modulo the BPE lane width 2^(4*Pw) that the hardware
// keeps. The tile must also take exactly 18 * (m + 3) + 1 cycles from the
// first instruction to the first result word, where m = n (m = ceil(n/2)
// double-pumped): back-to-back MAC2s every m+3 cycles, and the result on
// port B in the cycle after the last accumulation.
//
// Precision mixes, as evaluated for M4BRAM: 8-bit weights with 4..8-bit
// activations; uniform 2/2, 4/4 and 8/8; 4-bit and 8-bit filters with
// 6-bit activations (the two filter groups of a mixed-precision layer run
// one after the other); each with all three duplication factors, unsigned
// (post-ReLU) activations, plus signed activations for the 8-bit case.

import m4bram_pkg::*;

localparam int C    = 4;            // input channels
localparam int HI   = 4;            // input height = width
localparam int T    = C * 9;        // kernel terms
localparam int SW   = 8 * NBANK;    // bits per weight slice
localparam int BDEP = DEPTH / NBANK;

logic              clk = 1'b0, clk2x = 1'b0;
logic              rst_n;
cfg_t              cfg;
logic              wen_a, wen_b, inclr;
logic [ADDR_W-1:0] addr_a, addr_b;
logic [WIDTH-1:0]  data_a, data_b, dout_a, dout_b;
logic [BE_W-1:0]   be_a, be_b;
logic              dout_b_is_result, cim_busy, cim_ready, cim_drop;

// With double pumping clk is derived from clk2x so their rising edges coincide.
if (DPUMP) begin : g_clk_dp
  always #5 clk2x = ~clk2x;
  always @(posedge clk2x) clk <= ~clk;
end else begin : g_clk_sy
  always #5 clk = ~clk;
end

// The including module prints the result line and ends the run on tb_done.
event tb_done;
int checks = 0, failures = 0, cyc = 0;
always @(posedge clk) cyc <= cyc + 1;

task automatic fail(input string msg);
  failures++;
  $display("FAIL @%0d: %s", cyc, msg);
endtask

initial begin : watchdog
  repeat (200000) @(posedge clk);
  failures++;
  $display("FAIL: watchdog");
  -> tb_done;
end

// tile data
int xfm [C][HI][HI];                // input feature map
int wk  [64][T];                    // weight of output channel oc for term t

function automatic int act_of(input int pix, input int t);
  int c, ky, kx;
  c  = t / 9;
  ky = (t % 9) / 3;
  kx = t % 3;
  return xfm[c][pix / 2 + ky][pix % 2 + kx];
endfunction

task automatic idle_inputs();
  wen_a = 0; wen_b = 0; inclr = 0; be_a = '0; be_b = '0;
  addr_a = '0; addr_b = '0; data_a = '0; data_b = '0;
endtask

// One tile: pw code, dp code, activation bits n, signed activations.
task automatic run_tile(input int pwc, input int dpc, input int n, input bit sgn);
  int pwb, wps, ni, ngrp, noc, nwords, tpw, m_cyc;
  int t_first, t_res;
  logic [CW*NBANK-1:0] res [NBPE];
  pwb    = 2 << pwc;                // 2, 4, 8
  wps    = SW / pwb;                // weights per slice
  ni     = 1 << dpc;                // N_I
  ngrp   = 4 / ni;                  // distinct slices per instruction
  noc    = ngrp * wps;              // output channels in the tile
  tpw    = ni;                      // terms per weight vector
  nwords = T / tpw;
  m_cyc  = DPUMP ? (n + 1) / 2 : n;

  // random operands
  for (int c = 0; c < C; c++)
    for (int y = 0; y < HI; y++)
      for (int x = 0; x < HI; x++) begin
        xfm[c][y][x] = int'($urandom_range((1 << n) - 1));
        if (sgn && xfm[c][y][x] >= (1 << (n - 1))) xfm[c][y][x] -= (1 << n);
      end
  for (int oc = 0; oc < noc; oc++)
    for (int t = 0; t < T; t++)
      wk[oc][t] = int'($urandom_range((1 << pwb) - 1)) - (1 << (pwb - 1));

  // memory mode: write the packed weight vectors through port A, one
  // 32-bit half per bank (bank 1 at address BDEP + w)
  @(negedge clk);
  cfg.cim_mode = 1'b0;
  for (int w = 0; w < nwords; w++) begin
    logic [63:0] vec;
    vec = '0;
    for (int s = 0; s < 4; s++) begin
      int t, g;
      t = w * tpw + s / ngrp;       // term of slice s
      g = s % ngrp;                 // channel group of slice s
      for (int j = 0; j < wps; j++)
        vec[s*SW + j*pwb +: 8] = 8'(wk[g*wps + j][t]) & 8'((1 << pwb) - 1);
    end
    for (int b = 0; b < NBANK; b++) begin
      wen_a = 1; addr_a = ADDR_W'(b * BDEP + w); data_a = WIDTH'(vec[b*CW +: CW]); be_a = '1;
      @(negedge clk);
    end
  end
  idle_inputs();

  // compute mode: configure the activations
  cfg.cim_mode = 1'b1;
  cfg.pw = pw_e'(pwc);
  cfg.dp = dp_e'(dpc);
  @(negedge clk);
  wen_b = 1; inclr = 1; be_a = {3'(n - 1), sgn};
  @(negedge clk);
  idle_inputs();

  // 18 MAC2s, issued as soon as the block is ready
  t_first = -1;
  for (int m = 0; m < T / 2; m++) begin
    for (int h = 0; h < 2; h++) begin
      int t;
      logic [31:0] acts;
      t = 2 * m + h;
      if (h == 0) while (!cim_ready) @(negedge clk);
      acts = '0;
      for (int k = 0; k < NBPE; k++) begin
        int pix;
        pix = (dpc == 0) ? 0 : (dpc == 1) ? k / 2 : k;
        acts[k*8 +: 8] = 8'(act_of(pix, t)) & 8'((1 << n) - 1);
      end
      wen_b  = 1; inclr = 0;
      addr_a = {2'((dpc == 2) ? t % 4 : (dpc == 1) ? 2 * (t % 2) : 0), 9'(t / tpw)};
      data_a = {8'h0, acts};
      be_a   = {1'(h == 1 && m == T / 2 - 1), 1'b1, 1'(h == 1), 1'(h == 0 && m == 0)};
      if (t_first < 0) t_first = cyc;
      #1;
      checks++;
      if (cim_drop) fail($sformatf("instruction %0d dropped", t));
      @(negedge clk);
      idle_inputs();
    end
  end

  // collect the read-out: word i is 32-bit part i % NBANK of BPE i / NBANK
  while (!dout_b_is_result) @(negedge clk);
  t_res = cyc;
  for (int i = 0; i < NBPE * NBANK; i++) begin
    res[i / NBANK][(i % NBANK)*CW +: CW] = dout_b[CW-1:0];
    @(negedge clk);
  end
  checks++;
  if (t_res - t_first != (T / 2) * (m_cyc + 3) + 1)
    fail($sformatf("tile took %0d cycles, exp %0d", t_res - t_first, (T / 2) * (m_cyc + 3) + 1));

  // compare with a direct convolution
  for (int k = 0; k < NBPE; k++) begin
    int pix, g, lw;
    pix = (dpc == 0) ? 0 : (dpc == 1) ? k / 2 : k;
    g   = (dpc == 0) ? k : (dpc == 1) ? k % 2 : 0;
    lw  = 4 * pwb;
    for (int j = 0; j < wps; j++) begin
      longint sum, mask;
      logic [31:0] got;
      sum = 0;
      for (int t = 0; t < T; t++) sum += longint'(wk[g*wps + j][t]) * longint'(act_of(pix, t));
      mask = (longint'(1) << lw) - 1;
      got  = 32'((res[k] >> (j * lw)) & (CW*NBANK)'(mask));
      checks++;
      if (longint'(got) != (sum & mask))
        fail($sformatf("Pw=%0d N_I=%0d n=%0d s=%0b: out ch %0d pixel %0d = %h exp %h",
                       pwb, ni, n, sgn, g*wps + j, pix, got, sum & mask));
    end
  end
endtask

int n_tiles = 0;

initial begin : main
  cfg = '{cim_mode: 1'b0, pw: PW_8, dp: DP_1, width: WD_40};
  idle_inputs();
  rst_n = 0;
  repeat (3) @(posedge clk);
  rst_n = 1;

  for (int dpc = 0; dpc < 3; dpc++) begin
    // 8-bit weights, 4..8-bit activations
    for (int n = 4; n <= 8; n++) begin run_tile(2, dpc, n, 1'b0); n_tiles++; end
    run_tile(2, dpc, 8, 1'b1); n_tiles++;
    // uniform 2/2, 4/4, 8/8
    run_tile(0, dpc, 2, 1'b0); run_tile(1, dpc, 4, 1'b0); run_tile(2, dpc, 8, 1'b0);
    n_tiles += 3;
    // mixed 4-bit and 8-bit filters with 6-bit activations
    run_tile(1, dpc, 6, 1'b0); run_tile(2, dpc, 6, 1'b0);
    n_tiles += 2;
  end
  checks++;
  if (n_tiles != 33) fail("not every tile ran");
  $display("tiles run: %0d", n_tiles);
  -> tb_done;
end
