// m4bram: one M4BRAM block, an M20K-style BRAM that computes mixed-precision MAC2.
//
// Memory mode (cfg.cim_mode = 0): a true dual-port RAM with one cycle read
// latency, 512 x 40 with byte enables, 1K x 20 or 2K x 10 as set by
// cfg.width (m4bram_width on each port); the compute logic sits idle.
//
// Compute mode (cfg.cim_mode = 1): port A is the write port and port B the
// read port. Because port B never writes, its write enable wen_b is free and
// marks a CIM instruction: in a cycle with wen_b high, addr_a / data_a[31:0]
// / be_a (and inclr) go to the eFSM instead of writing the array, and the
// array word at addr_a is read through port A for the duplication shuffler.
// In every other cycle port A writes normally (wen_a), so the next tile can
// be loaded while the BPEs compute, and port B keeps serving reads to other
// logic (e.g. DSPs). A MAC2 (P = W1*I1 + W2*I2 in each of the 4 BPEs) takes
// two instruction cycles plus n+2 cycles for n-bit activations; when a MAC2
// with the done flag has accumulated, port B's output carries the
// accumulators for NBPE*NBANK cycles (dout_b_is_result high, 4 cycles for
// M4BRAM-S, 8 for M4BRAM-L), during which its array read data is not
// visible. See m4bram_efsm for the instruction fields and flags.
//
// Configuration (mode-sram, Pw, DP-sram and the aspect ratio) is static and comes in on cfg.
// NBANK = 1 is M4BRAM-S (BPEs of 7 x 32), NBANK = 2 is M4BRAM-L (two banks
// feeding a 64-bit weight vector to BPEs of 7 x 64). DPUMP = 1 clocks the
// BPEs with clk2x (twice clk, rising edges aligned) and shortens a MAC2 to
// ceil(n/2)+2 cycles; with DPUMP = 0 clk2x is unused. The input and output
// crossbars of the FPGA routing are outside this module. Outputs left open
// on purpose (lint notes them): the eFSM's activation sign/precision status,
// the pump's phase flag and each BPE's P row, which are for observation only.
module m4bram
  import m4bram_pkg::*;
#(
  parameter int unsigned NBANK = 1,          // 1: M4BRAM-S, 2: M4BRAM-L
  parameter bit          DPUMP = 1'b0        // 1: BPEs double-pumped on clk2x
) (
  input  logic               clk,
  input  logic               clk2x,          // 2x clk, edges aligned; used when DPUMP = 1
  input  logic               rst_n,
  input  cfg_t               cfg,
  // port A
  input  logic               wen_a,
  input  logic [ADDR_W-1:0]  addr_a,
  input  logic [WIDTH-1:0]   data_a,
  input  logic [BE_W-1:0]    be_a,
  input  logic               inclr,
  output logic [WIDTH-1:0]   dout_a,
  // port B
  input  logic               wen_b,
  input  logic [ADDR_W-1:0]  addr_b,
  input  logic [WIDTH-1:0]   data_b,
  input  logic [BE_W-1:0]    be_b,
  output logic [WIDTH-1:0]   dout_b,
  output logic               dout_b_is_result,
  // compute status
  output logic               cim_busy,
  output logic               cim_ready,
  output logic               cim_drop
);

  localparam int unsigned NCOL = NBANK * CW;

  logic                  cim_instr;
  logic [NCOL-1:0]       wvec;
  logic [WIDTH-1:0]      arr_dout_b, arr_dout_b_w;
  logic                  ld1, ld2, acc_clr, mo_sel;
  logic [1:0]            dp_addr;
  bop_e                  op [2];
  logic [1:0]            abits [2][NBPE];
  logic                  sgn2 [2];
  bop_e                  op_f;
  logic [1:0]            abits_f [NBPE];
  logic                  sgn_f;
  logic [$clog2(NBPE*NBANK)-1:0] rd_idx;
  logic [NCOL/4-1:0]     slice [NBPE];
  logic [NCOL-1:0]       acc [NBPE];
  width_e                width_eff;
  logic [AW-1:0]         wa_addr, wb_addr;
  logic [BE_W-1:0]       wa_be, wb_be;
  logic [WIDTH-1:0]      wa_din, wb_din, arr_dout_a;

  assign cim_instr = cfg.cim_mode && wen_b;

  // Compute mode always uses the 512 x 40 shape: the CIM instruction needs
  // the whole address bus for its own fields.
  assign width_eff = cfg.cim_mode ? WD_40 : cfg.width;

  m4bram_width u_width_a (
    .clk, .rst_n, .width (width_eff),
    .addr (addr_a), .be (be_a), .din (data_a), .dout (dout_a),
    .w_addr (wa_addr), .w_be (wa_be), .w_din (wa_din), .w_dout (arr_dout_a)
  );

  m4bram_width u_width_b (
    .clk, .rst_n, .width (width_eff),
    .addr (addr_b), .be (be_b), .din (data_b), .dout (arr_dout_b),
    .w_addr (wb_addr), .w_be (wb_be), .w_din (wb_din), .w_dout (arr_dout_b_w)
  );

  m4bram_array #(.NBANK(NBANK)) u_array (
    .clk    (clk),
    .a_addr (wa_addr),
    .a_we   (wen_a && !cim_instr),
    .a_be   (wa_be),
    .a_din  (wa_din),
    .a_dout (arr_dout_a),
    .a_wvec (wvec),
    .b_addr (wb_addr),
    .b_we   (wen_b && !cfg.cim_mode),
    .b_be   (wb_be),
    .b_din  (wb_din),
    .b_dout (arr_dout_b_w)
  );

  m4bram_efsm #(.NBANK(NBANK), .DPUMP(DPUMP)) u_efsm (
    .clk         (clk),
    .rst_n       (rst_n),
    .instr_valid (cim_instr),
    .inclr       (inclr),
    .addr_dp     (addr_a[DP_LSB +: 2]),
    .data        (data_a[NBPE*ACT_W-1:0]),
    .be          (be_a),
    .ld1         (ld1),
    .ld2         (ld2),
    .dp_addr     (dp_addr),
    .op          (op),
    .abits       (abits),
    .sgn         (sgn2),
    .acc_clr     (acc_clr),
    .mo_sel      (mo_sel),
    .rd_idx      (rd_idx),
    .busy        (cim_busy),
    .ready       (cim_ready),
    .drop        (cim_drop),
    .in_sign     (),
    .in_bits     ()
  );

  m4bram_pump #(.DPUMP(DPUMP)) u_pump (
    .clk      (clk),
    .clk2x    (clk2x),
    .rst_n    (rst_n),
    .op_i     (op),
    .abits_i  (abits),
    .sgn_i    (sgn2),
    .op_o     (op_f),
    .abits_o  (abits_f),
    .sgn_o    (sgn_f),
    .second_o ()
  );

  m4bram_dup_shuffler #(.VW(NCOL)) u_shuffler (
    .wvec    (wvec),
    .dp      (cfg.dp),
    .addr_dp (dp_addr),
    .slice_o (slice)
  );

  // The BPEs take their clock straight from a port (clk, or clk2x when
  // double-pumped) so that no logic sits in the clock path.
  for (genvar k = 0; k < NBPE; k++) begin : g_bpe
    if (DPUMP) begin : g_dp
      m4bram_bpe #(.NCOL(NCOL)) u_bpe (
        .clk (clk2x), .rst_n, .pw (cfg.pw), .ld1, .ld2, .wslice (slice[k]), .op (op_f),
        .abits (abits_f[k]), .sgn (sgn_f), .acc_clr, .p_o (), .acc_o (acc[k])
      );
    end else begin : g_sy
      m4bram_bpe #(.NCOL(NCOL)) u_bpe (
        .clk (clk), .rst_n, .pw (cfg.pw), .ld1, .ld2, .wslice (slice[k]), .op (op_f),
        .abits (abits_f[k]), .sgn (sgn_f), .acc_clr, .p_o (), .acc_o (acc[k])
      );
    end
  end

  m4bram_mo #(.NBANK(NBANK)) u_mo (
    .arr_dout (arr_dout_b),
    .acc      (acc),
    .sel      (mo_sel),
    .rd_idx   (rd_idx),
    .dout     (dout_b)
  );

  assign dout_b_is_result = mo_sel;

endmodule
