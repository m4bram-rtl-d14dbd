// m4bram_tb_body.svh: end-to-end test of one M4BRAM block, shared by
// tb_m4bram (M4BRAM-S, all defaults), tb_m4bram_l (M4BRAM-L) and
// tb_m4bram_dp (double-pumped M4BRAM-S). The including module declares
// localparams NBANK and DPUMP and instantiates the block as `dut` on the
// signals declared here.
//
// The test keeps its own model of the 512 x 40 array and of every BPE's
// accumulator (m4bram_ref_pkg) and runs:
//   1. memory mode: random byte-enabled writes and reads on both ports, in
//      the 512 x 40, 1K x 20 and 2K x 10 shapes;
//   2. compute mode: dot products of 1..4 MAC2s for all weight precisions,
//      duplication factors and activation precisions 2..8, signed and
//      unsigned, while port A keeps writing another region (double
//      buffering) and port B keeps reading and checking (DSP access);
//   3. per MAC2 it checks the read-out words and that the MAC2 takes n+2
//      cycles (ceil(n/2)+2 double-pumped) after its second instruction.
// It counts how often each mechanism happened and fails if one never did.

import m4bram_pkg::*;
import m4bram_ref_pkg::*;

localparam int NOUT  = NBPE * NBANK;
localparam int NCOLT = CW * NBANK;
localparam int SWT   = NCOLT / 4;
localparam int BDEP  = DEPTH / NBANK;   // words per bank

logic              clk = 1'b0, clk2x = 1'b0;
logic              rst_n;
cfg_t              cfg;
logic              wen_a, wen_b, inclr;
logic [ADDR_W-1:0] addr_a, addr_b;
logic [WIDTH-1:0]  data_a, data_b, dout_a, dout_b;
logic [BE_W-1:0]   be_a, be_b;
logic              dout_b_is_result, cim_busy, cim_ready, cim_drop;

// Main clock; with double pumping clk2x runs at twice its rate and clk is
// derived from it so that their rising edges coincide.
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

// mechanism counters
int n_mem_rw = 0, n_cfg = 0, n_instr = 0, n_dbuf = 0, n_dsp_rd = 0, n_stall = 0;
int n_b2b = 0, n_drop = 0, n_reuse = 0, n_accum = 0, n_signed = 0, n_unsigned = 0;
int n_pw [3] = '{0, 0, 0};
int n_dp [3] = '{0, 0, 0};
int n_bits [9] = '{0, 0, 0, 0, 0, 0, 0, 0, 0};
int n_wd [3] = '{0, 0, 0};

logic [WIDTH-1:0] mem_m [DEPTH];

// pending port reads to check on the next negedge
bit               rdA_pend, rdB_pend;
logic [WIDTH-1:0] rdA_exp, rdB_exp;
// collected read-out words
logic [CW-1:0]    res_w [NOUT];
int               res_cnt, res_first_cyc;

// instruction for the next cycle
bit               ins_v;
logic [ADDR_W-1:0] ins_addr;
logic [WIDTH-1:0] ins_data;
logic [BE_W-1:0]  ins_be;
bit               ins_clr;
bit               bg_en;      // background traffic in compute mode
bit               expect_drop;

task automatic fail(input string msg);
  failures++;
  $display("FAIL @%0d: %s", cyc, msg);
endtask

// One clock cycle: check last cycle's reads, apply this cycle's inputs,
// update the model at the clock edge.
task automatic tick();
  int          wa;
  logic [WIDTH-1:0] wd;
  logic [BE_W-1:0]  wb;
  bit          do_wa;
  @(negedge clk);
  if (dout_b_is_result) begin
    if (res_cnt == 0) res_first_cyc = cyc;
    if (res_cnt < NOUT) res_w[res_cnt] = dout_b[CW-1:0];
    res_cnt++;
    if (rdB_pend) n_stall++;
  end else if (rdB_pend) begin
    checks++;
    if (dout_b !== rdB_exp) fail($sformatf("port B read %h exp %h", dout_b, rdB_exp));
    if (cim_busy) n_dsp_rd++;
  end
  if (rdA_pend) begin
    checks++;
    if (dout_a !== rdA_exp) fail($sformatf("port A read %h exp %h", dout_a, rdA_exp));
  end
  rdA_pend = 0;
  rdB_pend = 0;
  // defaults
  wen_a = 0; wen_b = 0; inclr = 0; be_a = '0; be_b = '0;
  addr_a = ADDR_W'($urandom_range(DEPTH-1));
  addr_b = ADDR_W'($urandom_range(DEPTH-1));
  data_a = WIDTH'({$urandom, $urandom});
  data_b = WIDTH'({$urandom, $urandom});
  do_wa  = 0;
  if (ins_v) begin
    wen_b  = 1;
    addr_a = ins_addr;
    data_a = ins_data;
    be_a   = ins_be;
    inclr  = ins_clr;
    be_b   = '1;      // port B's write inputs carry junk: in compute mode they must not write
    n_instr++;
    if (cim_busy && cim_ready && !ins_clr) n_b2b++;
  end else if (cfg.cim_mode && bg_en) begin
    // double buffering: port A writes the upper half of each bank while the BPEs compute
    if ($urandom_range(1) != 0) begin
      wen_a  = 1;
      addr_a = ADDR_W'($urandom_range(NBANK-1) * BDEP + BDEP/2 + $urandom_range(BDEP/2-1));
      be_a   = BE_W'($urandom);
      do_wa  = 1;
      if (cim_busy) n_dbuf++;
    end
    // DSP-side reads on port B
    if ($urandom_range(3) != 0) begin
      rdB_pend = 1;
      rdB_exp  = mem_m[addr_b[AW-1:0]];
    end
  end
  #1;
  if (ins_v) begin
    checks++;
    if (cim_drop !== expect_drop) fail($sformatf("cim_drop=%0b exp %0b", cim_drop, expect_drop));
    if (cim_drop) n_drop++;
  end
  wa = int'(addr_a[AW-1:0]); wd = data_a; wb = be_a;
  @(posedge clk);
  if (do_wa)
    for (int i = 0; i < BE_W; i++) if (wb[i]) mem_m[wa][i*BYTE_W +: BYTE_W] = wd[i*BYTE_W +: BYTE_W];
  ins_v = 0;
  expect_drop = 0;
  #1;  // let the block's registers settle before the caller looks at its status
endtask

// Weight vector as port A sees it in compute mode.
function automatic logic [63:0] wvec_of(input int a);
  logic [63:0] v;
  if (NBANK == 1) v = 64'(mem_m[a][CW-1:0]);
  else            v = {mem_m[BDEP + (a % BDEP)][CW-1:0], mem_m[a % BDEP][CW-1:0]};
  return v;
endfunction

function automatic logic [15:0] slice_of(input logic [63:0] v, input int idx);
  return 16'((v >> (idx * SWT)) & ((64'(1) << SWT) - 1));
endfunction

// model state of the BPEs
logic [15:0] w1s [NBPE], w2s [NBPE];
logic [63:0] acc_m [NBPE];

task automatic send(input logic [ADDR_W-1:0] a, input logic [WIDTH-1:0] d,
                    input logic [BE_W-1:0] be, input bit clr);
  ins_v = 1; ins_addr = a; ins_data = d; ins_be = be; ins_clr = clr;
  tick();
endtask

task automatic set_act(input int n, input bit sgn);
  while (cim_busy) tick();
  send('0, '0, {3'(n-1), sgn}, 1);
  n_cfg++;
endtask

// One MAC2: two instructions, then the model update.
task automatic mac2(input int a1, input int a2, input int dpa1, input int dpa2,
                    input logic [31:0] act1, input logic [31:0] act2,
                    input bit clr, input bit done, input bit cp1, input bit cp2,
                    input int n, input bit sgn);
  int ins2_cyc;
  while (!cim_ready) tick();
  send({2'(dpa1), 9'(a1)}, {8'h0, act1}, {1'b0, cp1, 1'b0, clr}, 0);
  // instruction 2 must come right after, so no wait here
  send({2'(dpa2), 9'(a2)}, {8'h0, act2}, {done, cp2, 1'b1, 1'b0}, 0);
  ins2_cyc = cyc;
  n_pw[int'(cfg.pw)]++;
  n_dp[int'(cfg.dp)]++;
  n_bits[n]++;
  if (sgn) n_signed++; else n_unsigned++;
  if (!clr) n_accum++;
  if (!cp1 || !cp2) n_reuse++;
  for (int k = 0; k < NBPE; k++) begin
    if (cp1) w1s[k] = slice_of(wvec_of(a1), shuffle_idx(int'(cfg.dp), dpa1, k));
    if (cp2) w2s[k] = slice_of(wvec_of(a2), shuffle_idx(int'(cfg.dp), dpa2, k));
    acc_m[k] = ref_mac2(w1s[k], w2s[k], act1[k*8 +: 8], act2[k*8 +: 8],
                        2 << int'(cfg.pw), n, sgn, acc_m[k], clr, NCOLT);
  end
  if (done) begin
    res_cnt = 0;
    while (res_cnt < NOUT) tick();
    // latency: the MAC2 takes the n+2 clock edges (ceil(n/2)+2 when
    // double-pumped) after the one that takes instruction 2; the first
    // result word is on port B right after them
    checks++;
    if (res_first_cyc - ins2_cyc != (DPUMP ? (n + 1) / 2 : n) + 2)
      fail($sformatf("read-out after %0d cycles, exp %0d", res_first_cyc - ins2_cyc,
                     (DPUMP ? (n + 1) / 2 : n) + 2));
    for (int i = 0; i < NOUT; i++) begin
      checks++;
      if (res_w[i] !== acc_m[i / NBANK][(i % NBANK)*CW +: CW])
        fail($sformatf("result word %0d = %h exp %h (pw=%0d dp=%0d n=%0d s=%0b)", i, res_w[i],
                       acc_m[i / NBANK][(i % NBANK)*CW +: CW], int'(cfg.pw), int'(cfg.dp), n, sgn));
    end
    tick();
    checks++;
    if (dout_b_is_result) fail("read-out longer than NBPE*NBANK cycles");
  end
endtask

initial begin : watchdog
  repeat (400000) @(posedge clk);
  failures++;
  $display("FAIL: watchdog");
  -> tb_done;
end

initial begin : main
  int n, len, a1, a2;
  bit sgn;
  ins_v = 0; expect_drop = 0; bg_en = 0; rdA_pend = 0; rdB_pend = 0; res_cnt = 0;
  cfg = '{cim_mode: 1'b0, pw: PW_8, dp: DP_1, width: WD_40};
  wen_a = 0; wen_b = 0; inclr = 0; be_a = '0; be_b = '0;
  addr_a = '0; addr_b = '0; data_a = '0; data_b = '0;
  rst_n = 0;
  repeat (3) @(posedge clk);
  rst_n = 1;

  // ---------------- memory mode: fill, then random traffic ----------------
  for (int i = 0; i < DEPTH; i += 2) begin
    @(negedge clk);
    wen_a = 1; addr_a = ADDR_W'(i);   data_a = WIDTH'({$urandom, $urandom}); be_a = '1;
    wen_b = 1; addr_b = ADDR_W'(i+1); data_b = WIDTH'({$urandom, $urandom}); be_b = '1;
    @(posedge clk);
    mem_m[i] = data_a; mem_m[i+1] = data_b;
    n_mem_rw++;
  end
  @(negedge clk); wen_a = 0; wen_b = 0;
  for (int t = 0; t < 2000; t++) begin
    int aa, ab;
    logic [WIDTH-1:0] da, db;
    logic [BE_W-1:0]  ba, bb;
    bit wa, wb;
    @(negedge clk);
    if (rdA_pend) begin checks++; if (dout_a !== rdA_exp) fail($sformatf("mem A %h exp %h", dout_a, rdA_exp)); end
    if (rdB_pend) begin checks++; if (dout_b !== rdB_exp) fail($sformatf("mem B %h exp %h", dout_b, rdB_exp)); end
    aa = $urandom_range(DEPTH-1);
    do ab = $urandom_range(DEPTH-1); while (ab == aa);
    wa = 1'($urandom); wb = 1'($urandom);
    da = WIDTH'({$urandom, $urandom}); db = WIDTH'({$urandom, $urandom});
    ba = BE_W'($urandom); bb = BE_W'($urandom);
    wen_a = wa; addr_a = ADDR_W'(aa); data_a = da; be_a = ba;
    wen_b = wb; addr_b = ADDR_W'(ab); data_b = db; be_b = bb;
    rdA_pend = 1; rdA_exp = mem_m[aa];
    rdB_pend = 1; rdB_exp = mem_m[ab];
    @(posedge clk);
    for (int i = 0; i < BE_W; i++) begin
      if (wa && ba[i]) mem_m[aa][i*BYTE_W +: BYTE_W] = da[i*BYTE_W +: BYTE_W];
      if (wb && bb[i]) mem_m[ab][i*BYTE_W +: BYTE_W] = db[i*BYTE_W +: BYTE_W];
    end
    if (wa || wb) n_mem_rw++;
  end
  @(negedge clk);
  if (rdA_pend) begin checks++; if (dout_a !== rdA_exp) fail("mem A last"); end
  if (rdB_pend) begin checks++; if (dout_b !== rdB_exp) fail("mem B last"); end
  rdA_pend = 0; rdB_pend = 0;

  // ---------------- memory mode, 1K x 20 and 2K x 10 ----------------
  // A narrow word of width 40/k at address a is lane a%k of array word a/k.
  for (int t = 0; t < 3000; t++) begin
    int k, lw, aa, ab;
    logic [WIDTH-1:0] da, db;
    logic [BE_W-1:0]  ba, bb, ma, mb;
    bit wa, wb;
    @(negedge clk);
    if (rdA_pend) begin checks++; if (dout_a !== rdA_exp) fail($sformatf("narrow A %h exp %h", dout_a, rdA_exp)); end
    if (rdB_pend) begin checks++; if (dout_b !== rdB_exp) fail($sformatf("narrow B %h exp %h", dout_b, rdB_exp)); end
    // switch the shape every 500 cycles (an idle cycle in between)
    if (t % 500 == 0) begin
      cfg.width = ((t / 500) % 2 != 0) ? WD_10 : WD_20;
      wen_a = 0; wen_b = 0; rdA_pend = 0; rdB_pend = 0;
      @(posedge clk);
      continue;
    end
    k  = (cfg.width == WD_20) ? 2 : 4;
    lw = WIDTH / k;
    aa = $urandom_range(DEPTH*k-1);
    do ab = $urandom_range(DEPTH*k-1); while (ab == aa);
    wa = 1'($urandom); wb = 1'($urandom);
    da = WIDTH'({$urandom, $urandom}); db = WIDTH'({$urandom, $urandom});
    ba = BE_W'($urandom); bb = BE_W'($urandom);
    wen_a = wa; addr_a = ADDR_W'(aa); data_a = da; be_a = ba;
    wen_b = wb; addr_b = ADDR_W'(ab); data_b = db; be_b = bb;
    rdA_pend = 1; rdA_exp = WIDTH'((64'(mem_m[aa/k]) >> ((aa%k)*lw)) & ((64'(1) << lw) - 1));
    rdB_pend = 1; rdB_exp = WIDTH'((64'(mem_m[ab/k]) >> ((ab%k)*lw)) & ((64'(1) << lw) - 1));
    // byte enables of the lane's bytes: be[1:0] in x20, always on in x10
    ma = (k == 2) ? BE_W'(ba[1:0]) << (2*(aa%k)) : BE_W'(1) << (aa%k);
    mb = (k == 2) ? BE_W'(bb[1:0]) << (2*(ab%k)) : BE_W'(1) << (ab%k);
    @(posedge clk);
    for (int i = 0; i < BE_W; i++) begin
      if (wa && ma[i]) mem_m[aa/k][i*BYTE_W +: BYTE_W] = da[(i % (4/k))*BYTE_W +: BYTE_W];
      if (wb && mb[i]) mem_m[ab/k][i*BYTE_W +: BYTE_W] = db[(i % (4/k))*BYTE_W +: BYTE_W];
    end
    if (wa || wb) n_wd[k/2]++;
  end
  @(negedge clk);
  if (rdA_pend) begin checks++; if (dout_a !== rdA_exp) fail("narrow A last"); end
  if (rdB_pend) begin checks++; if (dout_b !== rdB_exp) fail("narrow B last"); end
  rdA_pend = 0; rdB_pend = 0;
  wen_a = 0; wen_b = 0;
  // leave the shape at 2K x 10: compute mode must use 512 x 40 whatever cfg.width says
  cfg.width = WD_10;
  wen_a = 0; wen_b = 0;

  // ---------------- compute mode ----------------
  cfg.cim_mode = 1'b1;
  bg_en = 1;
  for (int k = 0; k < NBPE; k++) begin w1s[k] = '0; w2s[k] = '0; acc_m[k] = '0; end
  for (int t = 0; t < 180; t++) begin
    while (cim_busy) tick();
    cfg.pw = pw_e'(t % 3);
    cfg.dp = dp_e'((t / 3) % 3);
    n      = 2 + (t % 7);
    sgn    = 1'((t / 9) % 2);
    set_act(n, sgn);
    len = 1 + $urandom_range(3);
    for (int m = 0; m < len; m++) begin
      // weights come from the lower half of each bank, which background writes leave alone
      a1 = $urandom_range(BDEP/2-1);
      a2 = $urandom_range(BDEP/2-1);
      mac2(a1, a2, $urandom_range(3), $urandom_range(3), $urandom, $urandom,
           m == 0, m == len-1, (m == 0) || ($urandom_range(3) != 0), (m == 0) || ($urandom_range(3) != 0),
           n, sgn);
    end
    // an instruction sent while a MAC2 is running must be dropped
    if (t % 10 == 5) begin
      mac2(1, 2, 0, 0, $urandom, $urandom, 1, 0, 1, 1, n, sgn);
      tick();
      if (cim_busy && !cim_ready) begin
        expect_drop = 1;
        send(11'd3, '0, 4'b0001, 0);
      end
      while (cim_busy) tick();
      // leave the accumulators in a known state for the next round
    end
  end
  repeat (4) tick();

  // every mechanism must have happened
  begin
    int cnt [string];
    cnt["memory-mode write"] = n_mem_rw;      cnt["activation config"] = n_cfg;
    cnt["CIM instruction"] = n_instr;         cnt["port-A write during compute"] = n_dbuf;
    cnt["port-B read during compute"] = n_dsp_rd; cnt["port-B read lost to read-out"] = n_stall;
    cnt["instruction in accumulation cycle"] = n_b2b; cnt["dropped instruction"] = n_drop;
    cnt["weight reuse without copy"] = n_reuse; cnt["accumulate without reset"] = n_accum;
    cnt["signed activation"] = n_signed;      cnt["unsigned activation"] = n_unsigned;
    cnt["memory-mode 1K x 20 access"] = n_wd[1]; cnt["memory-mode 2K x 10 access"] = n_wd[2];
    cnt["Pw=2"] = n_pw[0]; cnt["Pw=4"] = n_pw[1]; cnt["Pw=8"] = n_pw[2];
    cnt["N_I=1"] = n_dp[0]; cnt["N_I=2"] = n_dp[1]; cnt["N_I=4"] = n_dp[2];
    for (int b = 2; b <= 8; b++) cnt[$sformatf("%0d-bit activation", b)] = n_bits[b];
    foreach (cnt[s]) begin
      $display("mechanism %-36s %0d", s, cnt[s]);
      checks++;
      if (cnt[s] == 0) fail({"mechanism never exercised: ", s});
    end
  end
  -> tb_done;
end
