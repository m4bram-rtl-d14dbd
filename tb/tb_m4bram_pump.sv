// tb_m4bram_pump: self-checking test of the double-pumping phase selector.
// clk2x runs at twice clk with coinciding rising edges. Every main cycle the
// testbench puts a fresh random pair of controls on the inputs right after
// the clk edge and records, at each clk2x edge, what the selector passes.
// The edge in the middle of cycle k must see control 0 of cycle k, the edge
// that coincides with the next clk edge control 1 of cycle k. A second
// instance with DPUMP = 0 must always pass control 0.
module tb_m4bram_pump;
  import m4bram_pkg::*;

  logic       clk = 1'b0, clk2x = 1'b0, rst_n;
  bop_e       op_i [2];
  logic [1:0] ab_i [2][NBPE];
  logic       sg_i [2];
  bop_e       op_o, op_s;
  logic [1:0] ab_o [NBPE];
  logic [1:0] ab_s [NBPE];
  logic       sg_o, sg_s, second;
  int checks = 0, failures = 0;

  always #5 clk2x = ~clk2x;
  always @(posedge clk2x) clk <= ~clk;

  m4bram_pump dut (.clk, .clk2x, .rst_n, .op_i, .abits_i(ab_i), .sgn_i(sg_i),
                   .op_o, .abits_o(ab_o), .sgn_o(sg_o), .second_o(second));
  m4bram_pump #(.DPUMP(1'b0)) dut_sy (.clk, .clk2x, .rst_n, .op_i, .abits_i(ab_i), .sgn_i(sg_i),
                   .op_o(op_s), .abits_o(ab_s), .sgn_o(sg_s), .second_o());

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sample what the fast domain would capture at each clk2x edge.
  int   edge_no = 0;
  bop_e cap_op;
  logic [1:0] cap_ab;
  logic cap_sg;
  always @(posedge clk2x) begin
    cap_op = op_o; cap_ab = ab_o[edge_no % NBPE]; cap_sg = sg_o;
    edge_no++;
  end

  task automatic rand_ctl();
    for (int h = 0; h < 2; h++) begin
      op_i[h] = bop_e'($urandom_range(4));
      sg_i[h] = 1'($urandom);
      for (int k = 0; k < NBPE; k++) ab_i[h][k] = 2'($urandom);
    end
  endtask

  initial begin : main
    bop_e e_op [2];
    logic e_sg [2];
    logic [1:0] e_ab [2][NBPE];
    rand_ctl();
    rst_n = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      #1;
      rand_ctl();
      e_op = op_i; e_sg = sg_i; e_ab = ab_i;
      // middle clk2x edge of this cycle
      @(posedge clk2x); #1;
      checks++;
      if (cap_op !== e_op[0] || cap_sg !== e_sg[0] || cap_ab !== e_ab[0][(edge_no - 1) % NBPE]) begin
        failures++; $display("FAIL first half");
      end
      // the clk2x edge that coincides with the next clk edge
      @(posedge clk2x); #1;
      checks++;
      if (cap_op !== e_op[1] || cap_sg !== e_sg[1] || cap_ab !== e_ab[1][(edge_no - 1) % NBPE]) begin
        failures++; $display("FAIL second half");
      end
      // the synchronous instance always passes the first slot
      checks++;
      if (op_s !== op_i[0] || sg_s !== sg_i[0] || ab_s[t % NBPE] !== ab_i[0][t % NBPE]) begin
        failures++; $display("FAIL DPUMP=0 selector");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
