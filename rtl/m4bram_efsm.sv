// m4bram_efsm: embedded FSM (eFSM) that runs the MAC2 operations of M4BRAM.
//
// In compute mode a cycle with wenB high carries a CIM instruction on port A:
//   addrA[6:0] addrRow, addrA[8:7] addrCol  - weight vector in the main array
//   addrA[10:9] addrDP                      - duplication shuffler select
//   dataA[8k+7:8k]                          - activation for BPE-(k+1)
//   byte enable, inClr = 1: be[0] inSign, be[3:1] inPrecision
//   byte enable, inClr = 0: be[0] reset, be[1] start, be[2] copy, be[3] done
// (field positions of address, data, inSign and inPrecision as in the
// paper's instruction figure, and reset/start/copy/done in bits 0..3 as
// its left-to-right order suggests; the inPrecision code n-1 and all
// semantics below are this design's choice).
//
// A MAC2 takes two instructions: the first fills slot 1 (W1, I1), the
// second slot 2 (W2, I2). With copy set, the port-A read of the addressed
// word happens in the instruction cycle and the shuffled slice is written
// into the BPEs' W row one cycle later (ld1/ld2, with the addrDP of that
// instruction on dp_addr); without copy the old W row is reused. start on
// the second instruction launches the MAC2, which takes n+2 cycles:
// phase 0 BOP_SUM (overlapping the W2 copy), phases 1..n one activation bit
// each, MSB first, phase n+1 BOP_ACC. reset on either instruction makes that
// accumulation restart the accumulator. done on either instruction makes the
// eFSM enter the read-out state after the accumulation: for NBPE*NBANK cycles
// mo_sel is high and rd_idx walks over the 32-bit accumulator words, which
// the MO mux puts on the port-B output. A new first instruction is accepted
// in the idle state or during the accumulation cycle of a MAC2 without done,
// so back-to-back MAC2s issue every n+3 cycles (ceil(n/2)+3 double-pumped). A
// configuration instruction (inClr = 1) is taken only when idle. Any
// instruction that arrives when it cannot be taken is dropped and flagged on
// drop for one cycle.
module m4bram_efsm
  import m4bram_pkg::*;
#(
  parameter int unsigned NBANK = 1,
  parameter bit          DPUMP = 1'b0     // 1: BPEs double-pumped, two bit steps per cycle
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 instr_valid,   // compute mode and wenB
  input  logic                 inclr,
  input  logic [1:0]           addr_dp,
  input  logic [NBPE*ACT_W-1:0] data,
  input  logic [BE_W-1:0]      be,
  // weight copy into the BPEs
  output logic                 ld1,
  output logic                 ld2,
  output logic [1:0]           dp_addr,
  // BPE sequencing, per half cycle h (h = 1 is used only when DPUMP = 1)
  output bop_e                 op    [2],
  output logic [1:0]           abits [2][NBPE],
  output logic                 sgn   [2],
  output logic                 acc_clr,
  // result read-out
  output logic                 mo_sel,
  output logic [$clog2(NBPE*NBANK)-1:0] rd_idx,
  // status
  output logic                 busy,
  output logic                 ready,
  output logic                 drop,
  output logic                 in_sign,
  output logic [3:0]           in_bits
);

  localparam int unsigned NOUT = NBPE * NBANK;

  typedef enum logic [1:0] {S_IDLE, S_GOT1, S_MAC, S_OUT} state_e;

  state_e            state_q, state_d;
  logic [3:0]        phase_q;
  logic [$clog2(NOUT)-1:0] out_q;
  logic [ACT_W-1:0]  i1_q [NBPE];
  logic [ACT_W-1:0]  i2_q [NBPE];
  logic              sign_q;
  logic [3:0]        n_q;
  logic              f1_clr_q, f1_done_q;     // flags of the pending slot 1
  logic              mac_clr_q, mac_done_q;   // flags of the running MAC2
  logic              ld_q, ld_slot_q;
  logic [1:0]        ld_dp_q;

  flags_t            fl;
  logic              mac_instr, cfg_instr, acc_phase;
  logic              take1, take2, take_cfg;

  assign fl        = flags_t'(be);
  assign mac_instr = instr_valid && !inclr;
  assign cfg_instr = instr_valid && inclr;
  // Number of bit phases: n, or ceil(n/2) when double-pumped.
  logic [3:0] nph;
  assign nph       = DPUMP ? ((n_q + 4'd1) >> 1) : n_q;
  assign acc_phase = (state_q == S_MAC) && (phase_q == nph + 4'd1);

  assign ready    = (state_q == S_IDLE) || (acc_phase && !mac_done_q);
  assign take1    = mac_instr && ready;
  assign take2    = mac_instr && (state_q == S_GOT1);
  assign take_cfg = cfg_instr && (state_q == S_IDLE);
  assign drop     = instr_valid && !(take1 || take2 || take_cfg);

  // Next state.
  always_comb begin
    state_d = state_q;
    case (state_q)
      S_IDLE: if (take1) state_d = S_GOT1;
      S_GOT1: if (take2) state_d = fl.start ? S_MAC : S_IDLE;
      S_MAC:  if (acc_phase) state_d = mac_done_q ? S_OUT : (take1 ? S_GOT1 : S_IDLE);
      S_OUT:  if (out_q == $bits(out_q)'(NOUT-1)) state_d = S_IDLE;
      default: state_d = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      phase_q    <= '0;
      out_q      <= '0;
      sign_q     <= 1'b0;
      n_q        <= 4'd8;
      f1_clr_q   <= 1'b0;
      f1_done_q  <= 1'b0;
      mac_clr_q  <= 1'b0;
      mac_done_q <= 1'b0;
      ld_q       <= 1'b0;
      ld_slot_q  <= 1'b0;
      ld_dp_q    <= '0;
      for (int k = 0; k < NBPE; k++) begin
        i1_q[k] <= '0;
        i2_q[k] <= '0;
      end
    end else begin
      state_q <= state_d;

      if (take_cfg) begin
        sign_q <= be[0];
        n_q    <= {1'b0, be[3:1]} + 4'd1;
      end

      ld_q      <= (take1 || take2) && fl.copy;
      ld_slot_q <= take2;
      ld_dp_q   <= addr_dp;

      if (take1) begin
        for (int k = 0; k < NBPE; k++) i1_q[k] <= data[k*ACT_W +: ACT_W];
        f1_clr_q  <= fl.reset;
        f1_done_q <= fl.done;
      end
      if (take2) begin
        for (int k = 0; k < NBPE; k++) i2_q[k] <= data[k*ACT_W +: ACT_W];
        mac_clr_q  <= f1_clr_q  || fl.reset;
        mac_done_q <= f1_done_q || fl.done;
      end

      if (state_d == S_MAC && state_q != S_MAC) phase_q <= '0;
      else if (state_q == S_MAC)                phase_q <= phase_q + 4'd1;

      if (state_q == S_OUT) out_q <= out_q + 1'b1;
      else                  out_q <= '0;
    end
  end

  // BPE control for the current phase. Bit step s = HALVES*(phase-1) + h
  // handles activation bit n-1-(s-pad), MSB first; when double-pumped with
  // an odd n the first half of the first bit phase is a padding NOP.
  localparam int unsigned HALVES = DPUMP ? 2 : 1;
  logic [3:0] pad;
  assign pad = 4'(HALVES) * nph - n_q;

  always_comb begin
    acc_clr = 1'b0;
    for (int h = 0; h < 2; h++) begin
      logic [3:0] st, b;
      op[h]  = BOP_NOP;
      sgn[h] = 1'b0;
      st     = 4'(HALVES) * (phase_q - 4'd1) + 4'(h);
      b      = n_q - 4'd1 - (st - pad);
      if (state_q == S_MAC && h < HALVES) begin
        if (phase_q == 4'd0) begin
          if (h == 0) op[h] = BOP_SUM;
        end else if (acc_phase) begin
          if (h == 0) begin op[h] = BOP_ACC; acc_clr = mac_clr_q; end
        end else if (st == pad) begin
          op[h] = BOP_MSB; sgn[h] = sign_q;
        end else if (st > pad) begin
          op[h] = BOP_BIT;
        end
      end
      for (int k = 0; k < NBPE; k++)
        abits[h][k] = {i2_q[k][b[2:0]], i1_q[k][b[2:0]]};
    end
  end

  assign ld1     = ld_q && !ld_slot_q;
  assign ld2     = ld_q &&  ld_slot_q;
  assign dp_addr = ld_dp_q;
  assign mo_sel  = (state_q == S_OUT);
  assign rd_idx  = out_q;
  assign busy    = (state_q != S_IDLE);
  assign in_sign = sign_q;
  assign in_bits = n_q;

  // A weight copy always lands in exactly one slot.
  a_one_slot: assert property (@(posedge clk) disable iff (!rst_n) !(ld1 && ld2));
  // The MAC2 sequence never runs past its accumulation phase.
  a_phase:    assert property (@(posedge clk) disable iff (!rst_n)
                               (state_q == S_MAC) |-> (phase_q <= nph + 4'd1));

endmodule
