// m4bram_dup_shuffler: duplication shuffler between the main array and the BPEs.
//
// The weight vector read from the main array (32 bits for M4BRAM-S, 64 for
// M4BRAM-L) is cut into four equal slices A, B, C, D (A in the low bits).
// Four 4-to-1 muxes, one per BPE, pick a slice each; a decoder drives their
// selects from the duplication factor (DP-sram, i.e. N_I) and the 2-bit
// addrDP field of the CIM instruction:
//   DP_1: BPE-k gets slice k (addrDP ignored)           -> N_I = 1
//   DP_2: BPE-k gets slice {addrDP[1], k[0]}: a pair of
//         slices, each sent to two BPEs                  -> N_I = 2
//   DP_4: every BPE gets slice addrDP (broadcast)        -> N_I = 4
// DP_1 and DP_4 are as described in the paper; which pair of slices DP_2
// picks and how it spreads them over the BPEs is this design's choice.
// Purely combinational.
module m4bram_dup_shuffler
  import m4bram_pkg::*;
#(
  parameter int unsigned VW = 32            // weight vector width
) (
  input  logic [VW-1:0]   wvec,
  input  dp_e             dp,
  input  logic [1:0]      addr_dp,
  output logic [VW/4-1:0] slice_o [NBPE]
);

  logic [1:0] sel [NBPE];

  // Decoder: mux select per BPE.
  always_comb begin
    for (int k = 0; k < NBPE; k++) begin
      case (dp)
        DP_2:    sel[k] = {addr_dp[1], 1'(k)};
        DP_4:    sel[k] = addr_dp;
        default: sel[k] = 2'(k);
      endcase
    end
  end

  // Four 4-to-1 muxes.
  always_comb begin
    for (int k = 0; k < NBPE; k++) slice_o[k] = wvec[sel[k]*(VW/4) +: VW/4];
  end

endmodule
