// m4bram_array: the main BRAM array of M4BRAM with its port circuits.
//
// Models an M20K-like true dual-port array of 128 rows x 160 columns. A
// 4:1 column mux makes each port see 512 words of 40 bits; a word address
// is {addrCol, addrRow} (addr[8:7] column, addr[6:0] row). Each port has a
// write enable and four byte enables of 10 bits each. Reads are
// synchronous: the word addressed in cycle t appears on *_dout in cycle t+1
// (read-before-write for a write to the same word in the same cycle). When
// both ports write the same word in the same cycle, port B's write lands.
//
// NBANK = 2 gives the M4BRAM-L organisation: two banks of 64 rows each, both
// read at the same in-bank address every cycle so that port A delivers a
// 64-bit weight vector ({bank1[31:0], bank0[31:0]}) to the duplication
// shuffler, while normal accesses go to the bank named by the address MSB
// through a 2:1 output mux. For NBANK = 1 (M4BRAM-S) a_wvec is bits 31:0 of
// the port-A word. The banking and the DOUT mux follow the paper's M4BRAM-L
// figure; which address bit selects the bank (the MSB) follows its caption.
//
// Only the 512 x 40 aspect ratio of the memory mode is modelled; the other
// M20K depth/width configurations are not.
module m4bram_array
  import m4bram_pkg::*;
#(
  parameter int unsigned NBANK = 1          // 1: M4BRAM-S, 2: M4BRAM-L
) (
  input  logic                  clk,
  // port A
  input  logic [AW-1:0]         a_addr,
  input  logic                  a_we,
  input  logic [BE_W-1:0]       a_be,
  input  logic [WIDTH-1:0]      a_din,
  output logic [WIDTH-1:0]      a_dout,
  output logic [NBANK*CW-1:0]   a_wvec,
  // port B
  input  logic [AW-1:0]         b_addr,
  input  logic                  b_we,
  input  logic [BE_W-1:0]       b_be,
  input  logic [WIDTH-1:0]      b_din,
  output logic [WIDTH-1:0]      b_dout
);

  localparam int unsigned BDEPTH = DEPTH / NBANK;
  localparam int unsigned IAW    = $clog2(BDEPTH);

  logic [IAW-1:0]   a_ia, b_ia;
  logic             a_bank, b_bank, a_bank_q, b_bank_q;
  logic [WIDTH-1:0] a_q [NBANK];
  logic [WIDTH-1:0] b_q [NBANK];

  assign a_ia   = a_addr[IAW-1:0];
  assign b_ia   = b_addr[IAW-1:0];
  assign a_bank = (NBANK > 1) ? a_addr[AW-1] : 1'b0;
  assign b_bank = (NBANK > 1) ? b_addr[AW-1] : 1'b0;

  for (genvar g = 0; g < NBANK; g++) begin : g_bank
    logic [WIDTH-1:0] mem [BDEPTH];
    logic             a_hit, b_hit;

    assign a_hit = (NBANK == 1) || (a_bank == 1'(g));
    assign b_hit = (NBANK == 1) || (b_bank == 1'(g));

    always_ff @(posedge clk) begin
      for (int i = 0; i < BE_W; i++) begin
        if (a_we && a_hit && a_be[i]) mem[a_ia][i*BYTE_W +: BYTE_W] <= a_din[i*BYTE_W +: BYTE_W];
        if (b_we && b_hit && b_be[i]) mem[b_ia][i*BYTE_W +: BYTE_W] <= b_din[i*BYTE_W +: BYTE_W];
      end
      a_q[g] <= mem[a_ia];
      b_q[g] <= mem[b_ia];
    end

    assign a_wvec[g*CW +: CW] = a_q[g][CW-1:0];
  end

  always_ff @(posedge clk) begin
    a_bank_q <= a_bank;
    b_bank_q <= b_bank;
  end

  assign a_dout = (NBANK > 1) ? a_q[NBANK-1 - int'(!a_bank_q)] : a_q[0];
  assign b_dout = (NBANK > 1) ? b_q[NBANK-1 - int'(!b_bank_q)] : b_q[0];

  initial assert (NBANK == 1 || NBANK == 2) else $error("NBANK must be 1 or 2");

endmodule
