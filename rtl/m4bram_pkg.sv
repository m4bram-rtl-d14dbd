// m4bram_pkg: types and constants shared by the M4BRAM blocks.
//
// M4BRAM is an M20K-style block RAM (128 rows x 160 columns, 4:1 column
// mux, so 512 words of 40 bits) that can also compute MAC2 operations,
// P = W1*I1 + W2*I2, in four small processing elements (BPEs) next to the
// main array. The geometry, the instruction field positions and the set of
// precisions follow the published M4BRAM description. The binary encodings
// of the configuration bits (weight precision, duplication factor, aspect
// ratio) and of
// the internal BPE operations are this design's own choice.
package m4bram_pkg;

  // Main array geometry (M20K): 128 rows x 160 columns, 4:1 column mux.
  localparam int unsigned ROWS      = 128;
  localparam int unsigned COLS      = 160;
  localparam int unsigned COLMUX    = 4;
  localparam int unsigned DEPTH     = ROWS * COLMUX;     // 512 words
  localparam int unsigned WIDTH     = COLS / COLMUX;     // 40 bits
  localparam int unsigned AW        = 9;                 // word address
  localparam int unsigned ADDR_W    = 11;                // port address bus (incl. addrDP)
  localparam int unsigned BE_W      = 4;                 // byte enables
  localparam int unsigned BYTE_W    = WIDTH / BE_W;      // 10-bit "bytes" in x40 mode

  // Compute mode: simple dual-port 512 x 32.
  localparam int unsigned CW        = 32;
  localparam int unsigned NBPE      = 4;
  localparam int unsigned ACT_W     = 8;                 // one activation field in dataA

  // CIM instruction fields (port-A address bit positions).
  localparam int unsigned ROW_LSB   = 0;                 // addrRow = addrA[6:0]
  localparam int unsigned COL_LSB   = 7;                 // addrCol = addrA[8:7]
  localparam int unsigned DP_LSB    = 9;                 // addrDP  = addrA[10:9]

  // Weight precision Pw, held in configuration SRAM.
  typedef enum logic [1:0] {
    PW_2 = 2'd0,
    PW_4 = 2'd1,
    PW_8 = 2'd2
  } pw_e;

  // Duplication factor N_I, held in DP-sram.
  typedef enum logic [1:0] {
    DP_1 = 2'd0,
    DP_2 = 2'd1,
    DP_4 = 2'd2
  } dp_e;

  // Memory-mode aspect ratio of a port (depth x width).
  typedef enum logic [1:0] {
    WD_40 = 2'd0,     //  512 x 40, four 10-bit byte enables
    WD_20 = 2'd1,     // 1024 x 20, two byte enables (be[1:0])
    WD_10 = 2'd2      // 2048 x 10, no byte enable
  } width_e;

  // Static configuration bits of one block.
  typedef struct packed {
    logic   cim_mode; // mode-sram: 1 = compute mode
    pw_e    pw;       // weight precision
    dp_e    dp;       // duplication factor
    width_e width;    // memory-mode aspect ratio (compute mode is always 512 x 40)
  } cfg_t;

  // MAC2 control flags carried in the byte enable when inClr = 0.
  typedef struct packed {
    logic done;       // be[3]: read the accumulators out after this MAC2
    logic copy;       // be[2]: copy the addressed weight vector into the BPEs
    logic start;      // be[1]: launch the MAC2 after this instruction
    logic reset;      // be[0]: this MAC2 restarts the accumulator
  } flags_t;

  // One operation of the BPE's bit-parallel adder per cycle.
  typedef enum logic [2:0] {
    BOP_NOP = 3'd0,
    BOP_SUM = 3'd1,   // row3 <- W1 + W2
    BOP_MSB = 3'd2,   // P <- LUT (or -LUT via INV row for a signed MSB)
    BOP_BIT = 3'd3,   // P <- 2P + LUT
    BOP_ACC = 3'd4    // ACC <- ACC + P (or P when the reset flag is set)
  } bop_e;

  // Lane width of a weight inside a BPE row: 4*Pw (32/16/8 bits).
  function automatic int unsigned lane_w(pw_e pw);
    case (pw)
      PW_8:    return 32;
      PW_4:    return 16;
      default: return 8;
    endcase
  endfunction

endpackage
