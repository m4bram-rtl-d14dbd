// m4bram_width: depth/width configuration of one port of the main array.
//
// In memory mode an M20K-style block can be set to several aspect ratios.
// This port adapter maps a port access in one of them onto the 512 x 40
// word array. The array always stores 40-bit words; a narrow word is a lane
// of one of them:
//   WD_40:  512 x 40, word address addr[8:0], byte enables be[3:0]
//   WD_20: 1024 x 20, array word addr[9:1], lane addr[0] (bits 20*lane+:20),
//          byte enables be[1:0] for the lane's two 10-bit bytes
//   WD_10: 2048 x 10, array word addr[10:2], lane addr[1:0] (bits 10*lane+:10),
//          the byte is written whenever the port writes (be ignored)
// Write data are replicated into every lane and the lane's byte enables
// pick where they land. For reads the lane and width of the access are
// registered along with the array's one-cycle read, so dout carries the
// selected lane, zero-extended to 40 bits, in the cycle after the access.
//
// That the memory mode has a configurable depth and width is stated in the
// published M4BRAM description; the set of shapes (the true dual-port
// M20K shapes up to the 11-bit address bus), the lane order (low address in
// the low bits) and the byte-enable use are this design's own choices. The
// compute mode always uses 512 x 40 (the top passes WD_40 there), since the
// CIM instruction needs the full address bus for its own fields. The
// deeper and narrower shapes (4K x 5 down to 16K x 1) are not built.
module m4bram_width
  import m4bram_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  width_e             width,
  // port side
  input  logic [ADDR_W-1:0]  addr,
  input  logic [BE_W-1:0]    be,
  input  logic [WIDTH-1:0]   din,
  output logic [WIDTH-1:0]   dout,
  // array side
  output logic [AW-1:0]      w_addr,
  output logic [BE_W-1:0]    w_be,
  output logic [WIDTH-1:0]   w_din,
  input  logic [WIDTH-1:0]   w_dout
);

  logic [1:0] lane, lane_q;
  width_e     width_q;

  always_comb begin
    case (width)
      WD_20: begin
        w_addr = addr[AW:1];
        lane   = {1'b0, addr[0]};
        w_be   = addr[0] ? {be[1:0], 2'b00} : {2'b00, be[1:0]};
        w_din  = {2{din[2*BYTE_W-1:0]}};
      end
      WD_10: begin
        w_addr = addr[AW+1:2];
        lane   = addr[1:0];
        w_be   = BE_W'(1) << addr[1:0];
        w_din  = {4{din[BYTE_W-1:0]}};
      end
      default: begin
        w_addr = addr[AW-1:0];
        lane   = 2'd0;
        w_be   = be;
        w_din  = din;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      lane_q  <= 2'd0;
      width_q <= WD_40;
    end else begin
      lane_q  <= lane;
      width_q <= width;
    end

  always_comb begin
    case (width_q)
      WD_20:   dout = WIDTH'(lane_q[0] ? w_dout[2*BYTE_W +: 2*BYTE_W] : w_dout[0 +: 2*BYTE_W]);
      WD_10:   dout = WIDTH'(w_dout[lane_q*BYTE_W +: BYTE_W]);
      default: dout = w_dout;
    endcase
  end

endmodule
