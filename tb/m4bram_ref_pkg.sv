// m4bram_ref_pkg: reference arithmetic for the M4BRAM testbenches.
//
// Computes, with plain integer multiplication, what one BPE row should hold
// after a MAC2: per lane of 4*Pw bits, ACC + W1*I1 + W2*I2 modulo 2^(4*Pw),
// where W1/W2 are the Pw-bit two's complement weights of that lane taken
// from the weight slices and I1/I2 the n-bit activations (signed or not).
// It also gives the duplication shuffler's expected slice index. None of it
// shares code with the RTL.
package m4bram_ref_pkg;

  function automatic longint act_val(input logic [7:0] a, input int n, input bit sgn);
    longint v;
    v = longint'(a) & ((longint'(1) << n) - 1);
    if (sgn && v[n-1]) v = v - (longint'(1) << n);
    return v;
  endfunction

  function automatic longint w_val(input logic [15:0] s, input int j, input int pwb);
    longint v;
    v = (longint'(s) >> (j*pwb)) & ((longint'(1) << pwb) - 1);
    if (v[pwb-1]) v = v - (longint'(1) << pwb);
    return v;
  endfunction

  // One MAC2 in a BPE of ncol columns; pwb = 2, 4 or 8.
  function automatic logic [63:0] ref_mac2(input logic [15:0] s1, input logic [15:0] s2,
                                           input logic [7:0] i1, input logic [7:0] i2,
                                           input int pwb, input int n, input bit sgn,
                                           input logic [63:0] acc, input bit clr, input int ncol);
    logic [63:0] r;
    int          lw;
    longint      lane, mask;
    r    = '0;
    lw   = 4 * pwb;
    mask = (longint'(1) << lw) - 1;
    for (int j = 0; j < ncol / lw; j++) begin
      lane = clr ? 0 : ((longint'(acc) >> (j*lw)) & mask);
      lane = lane + w_val(s1, j, pwb) * act_val(i1, n, sgn) + w_val(s2, j, pwb) * act_val(i2, n, sgn);
      lane = lane & mask;
      r = r | (64'(lane) << (j*lw));
    end
    return r;
  endfunction

  // Slice that BPE k receives for duplication factor code dp (0:1, 1:2, 2:4).
  function automatic int shuffle_idx(input int dp, input int addr_dp, input int k);
    case (dp)
      1:       return (addr_dp / 2) * 2 + (k % 2);
      2:       return addr_dp;
      default: return k;
    endcase
  endfunction

endpackage
