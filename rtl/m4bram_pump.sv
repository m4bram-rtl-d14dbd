// m4bram_pump: hands the eFSM's per-cycle BPE control to double-pumped BPEs.
//
// With double pumping the BPEs are clocked by clk2x, a clock of twice the
// main frequency whose rising edges line up with those of clk. The eFSM
// (on clk) gives two operations per main cycle, ctl[0] and ctl[1]. The
// control of main cycle k is stable from the clk edge that starts it, so
// the BPEs must take ctl[0] at the clk2x edge in the middle of the cycle
// and ctl[1] at the clk2x edge that coincides with the next clk edge.
// A phase detector tells the two apart without any reset alignment: tog
// flips at every clk edge, tog_f copies it at every clk2x edge; at the
// middle edge tog_f still holds the previous value of tog (they differ),
// at the coinciding edge both have caught up (they agree). The resulting
// selection is combinational from registers of both domains.
//
// The paper only states that the BPE is double-pumped at twice the main
// BRAM clock; this phase detector and the half-cycle split are this
// design's own. With DPUMP = 0 the BPEs run on clk and ctl[0] is used.
module m4bram_pump
  import m4bram_pkg::*;
#(
  parameter bit DPUMP = 1'b1
) (
  input  logic       clk,
  input  logic       clk2x,
  input  logic       rst_n,
  input  bop_e       op_i    [2],
  input  logic [1:0] abits_i [2][NBPE],
  input  logic       sgn_i   [2],
  output bop_e       op_o,
  output logic [1:0] abits_o [NBPE],
  output logic       sgn_o,
  output logic       second_o        // the current clk2x edge is the second of the cycle
);

  logic tog, tog_f, second;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) tog <= 1'b0;
    else        tog <= ~tog;

  always_ff @(posedge clk2x or negedge rst_n)
    if (!rst_n) tog_f <= 1'b0;
    else        tog_f <= tog;

  assign second   = DPUMP && (tog_f == tog);
  assign second_o = second;

  always_comb begin
    op_o  = second ? op_i[1]  : op_i[0];
    sgn_o = second ? sgn_i[1] : sgn_i[0];
    for (int k = 0; k < NBPE; k++) abits_o[k] = second ? abits_i[1][k] : abits_i[0][k];
  end

endmodule
