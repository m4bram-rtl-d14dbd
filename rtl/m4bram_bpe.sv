// m4bram_bpe: one in-BRAM processing element (BPE) of M4BRAM.
//
// The BPE is a small "dummy" array of 7 rows x NCOL columns next to the main
// BRAM array plus one bit-parallel adder that reads two rows and writes one
// back per cycle. The rows are, top to bottom: constant 0, sign-extended W1,
// sign-extended W2, W1+W2, INV, the MAC2 result P and the accumulator. Rows
// 0-3 form a look-up table indexed by two activation bits {I2[b], I1[b]},
// so MAC2 P = W1*I1 + W2*I2 is computed bit-serially, MSB first:
//   BOP_SUM  row3 <- W1 + W2                    (one cycle)
//   BOP_MSB  P <- LUT[bits] or, for a signed activation, P <- -LUT[bits]:
//            the inverted LUT word is kept in the INV row and the adder adds
//            it to 0 with carry-in 1 (two's complement negation)
//   BOP_BIT  P <- 2P + LUT[bits]                (one cycle per further bit)
//   BOP_ACC  ACC <- ACC + P, or ACC <- P when acc_clr is set
// An n-bit activation therefore takes n+2 cycles. The row layout, the LUT
// scheme, the INV row and the n+2 latency follow the paper; the exact cycle
// use of the INV row and the adder's carry-in are this design's own choice.
// The adder takes the inverted word straight from the INV row's write data
// in the same cycle, so the stored row (inv_q) is never read back: lint
// reports it as unused and synthesis drops it. It is kept as the seventh row
// of the BPE so the row set matches the described array.
//
// Mixed precision: a weight of Pw bits (2/4/8) is sign-extended into a lane
// of 4*Pw bits (8/16/32). The adder's carries and the 2P shift are cut at
// lane boundaries, so one NCOL-bit row holds NCOL/(4*Pw) independent MAC2s
// (one 8-bit, two 4-bit or four 2-bit weights for NCOL = 32). Lane results
// wrap modulo 2^(4*Pw): with 2-bit weights and long activations or long dot
// products an 8-bit lane overflows, as the fixed lane widths imply.
//
// Interface: ld1/ld2 write the NCOL/4-bit weight slice wslice, sign-extended,
// into the W1/W2 rows at the clock edge. When op is BOP_SUM and ld2 is set in
// the same cycle, the incoming W2 is forwarded to the adder so that W2 can
// be copied and W1+W2 formed in one cycle. acc_o and p_o are the row
// contents (registered). All rows clear on reset.
module m4bram_bpe
  import m4bram_pkg::*;
#(
  parameter int unsigned NCOL = 32          // 32 for M4BRAM-S, 64 for M4BRAM-L
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pw_e               pw,
  input  logic              ld1,
  input  logic              ld2,
  input  logic [NCOL/4-1:0] wslice,
  input  bop_e              op,
  input  logic [1:0]        abits,         // {I2[b], I1[b]}
  input  logic              sgn,           // MSB step of a signed activation
  input  logic              acc_clr,
  output logic [NCOL-1:0]   p_o,
  output logic [NCOL-1:0]   acc_o
);

  localparam int unsigned SW = NCOL / 4;

  logic [NCOL-1:0] w1_q, w2_q, w12_q, inv_q, p_q, acc_q;

  // Sign-extend each Pw-bit weight of the slice into its own 4*Pw-bit lane.
  function automatic logic [NCOL-1:0] sext(input logic [SW-1:0] s, input pw_e p);
    logic [NCOL-1:0] r;
    r = '0;
    case (p)
      PW_8:    for (int j = 0; j < NCOL/32; j++) r[j*32 +: 32] = {{24{s[j*8+7]}}, s[j*8 +: 8]};
      PW_4:    for (int j = 0; j < NCOL/16; j++) r[j*16 +: 16] = {{12{s[j*4+3]}}, s[j*4 +: 4]};
      default: for (int j = 0; j < NCOL/8;  j++) r[j*8  +: 8]  = {{6{s[j*2+1]}},  s[j*2 +: 2]};
    endcase
    return r;
  endfunction

  // Lane-segmented addition: carries do not cross lane boundaries.
  function automatic logic [NCOL-1:0] seg_add(input logic [NCOL-1:0] a, input logic [NCOL-1:0] b,
                                              input logic cin, input pw_e p);
    logic [NCOL-1:0] r;
    r = '0;
    case (p)
      PW_8:    for (int j = 0; j < NCOL/32; j++) r[j*32 +: 32] = a[j*32 +: 32] + b[j*32 +: 32] + 32'(cin);
      PW_4:    for (int j = 0; j < NCOL/16; j++) r[j*16 +: 16] = a[j*16 +: 16] + b[j*16 +: 16] + 16'(cin);
      default: for (int j = 0; j < NCOL/8;  j++) r[j*8  +: 8]  = a[j*8  +: 8]  + b[j*8  +: 8]  + 8'(cin);
    endcase
    return r;
  endfunction

  // Lane-segmented shift left by one (2P).
  function automatic logic [NCOL-1:0] seg_shl(input logic [NCOL-1:0] a, input pw_e p);
    logic [NCOL-1:0] r;
    r = '0;
    case (p)
      PW_8:    for (int j = 0; j < NCOL/32; j++) r[j*32 +: 32] = {a[j*32 +: 31], 1'b0};
      PW_4:    for (int j = 0; j < NCOL/16; j++) r[j*16 +: 16] = {a[j*16 +: 15], 1'b0};
      default: for (int j = 0; j < NCOL/8;  j++) r[j*8  +: 8]  = {a[j*8  +: 7],  1'b0};
    endcase
    return r;
  endfunction

  logic [NCOL-1:0] w_in, w2_eff, lut, add_a, add_b, add_r;
  logic            add_cin;

  assign w_in   = sext(wslice, pw);
  assign w2_eff = ld2 ? w_in : w2_q;

  // Look-up table rows 0..3 selected by the two activation bits.
  always_comb begin
    case (abits)
      2'b00:   lut = '0;
      2'b01:   lut = w1_q;
      2'b10:   lut = w2_q;
      default: lut = w12_q;
    endcase
  end

  // Operand selection for the single bit-parallel adder.
  always_comb begin
    add_a   = '0;
    add_b   = '0;
    add_cin = 1'b0;
    case (op)
      BOP_SUM: begin add_a = w1_q;            add_b = w2_eff; end
      BOP_MSB: begin add_a = '0;              add_b = sgn ? ~lut : lut; add_cin = sgn; end
      BOP_BIT: begin add_a = seg_shl(p_q, pw); add_b = lut; end
      BOP_ACC: begin add_a = acc_clr ? '0 : acc_q; add_b = p_q; end
      default: ;
    endcase
  end

  assign add_r = seg_add(add_a, add_b, add_cin, pw);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w1_q  <= '0;
      w2_q  <= '0;
      w12_q <= '0;
      inv_q <= '0;
      p_q   <= '0;
      acc_q <= '0;
    end else begin
      if (ld1) w1_q <= w_in;
      if (ld2) w2_q <= w_in;
      case (op)
        BOP_SUM: w12_q <= add_r;
        BOP_MSB: begin
          if (sgn) inv_q <= ~lut;
          p_q <= add_r;
        end
        BOP_BIT: p_q   <= add_r;
        BOP_ACC: acc_q <= add_r;
        default: ;
      endcase
    end
  end

  assign p_o   = p_q;
  assign acc_o = acc_q;

endmodule
