// m4bram_mo: the MO output multiplexer on port B of M4BRAM.
//
// Selects what leaves the block on port B: the main array's read data, or,
// while the eFSM reads the results out (sel high), the 32-bit accumulator
// word rd_idx of the BPEs, zero-extended to the 40-bit port. Word i is bits
// [32*(i%NBANK) +: 32] of the accumulator of BPE-(i/NBANK+1), so M4BRAM-S
// needs 4 read-out cycles and M4BRAM-L 8. The 2-to-1 mux is the paper's;
// folding the choice of the accumulator word into it is this design's own.
// Combinational.
module m4bram_mo
  import m4bram_pkg::*;
#(
  parameter int unsigned NBANK = 1
) (
  input  logic [WIDTH-1:0]             arr_dout,
  input  logic [NBANK*CW-1:0]          acc [NBPE],
  input  logic                         sel,
  input  logic [$clog2(NBPE*NBANK)-1:0] rd_idx,
  output logic [WIDTH-1:0]             dout
);

  logic [CW-1:0] word;

  always_comb begin
    word = '0;
    for (int i = 0; i < NBPE*NBANK; i++)
      if (int'(rd_idx) == i) word = acc[i / NBANK][(i % NBANK)*CW +: CW];
  end

  assign dout = sel ? {{(WIDTH-CW){1'b0}}, word} : arr_dout;

endmodule
