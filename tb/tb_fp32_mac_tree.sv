// tb_fp32_mac_tree: checks the LANES-wide multiply and adder tree.
//
// Two trees are driven with random normal floats: a 32-lane one (the fast
// PE's width) and a 2-lane one (the slow PE's width).  Each result is
// compared bit for bit with tb_fp_pkg's reference, which rounds double
// precision results to float.  A few hand cases exercise cancellation to
// zero, rounding ties and infinity.
//
// Paper vs. choice: 32 lanes (F-PE) and 2 lanes (S-PE) are the paper's widths;
// the tree order is this design's.  Timing: combinational, sampled after #1.
module tb_fp32_mac_tree;
  import tb_fp_pkg::*;

  int checks = 0, failures = 0;

  logic [31:0][31:0] a32, b32;
  logic [31:0]       s32;
  logic [1:0][31:0]  a2, b2;
  logic [31:0]       s2;

  fp32_mac_tree #(.LANES(32)) u32 (.a(a32), .b(b32), .sum(s32));
  fp32_mac_tree #(.LANES(2))  u2  (.a(a2),  .b(b2),  .sum(s2));

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] ra [];
    logic [31:0] rb [];
    ra = new[32];
    rb = new[32];
    for (int t = 0; t < 400; t++) begin
      for (int l = 0; l < 32; l++) begin
        ra[l] = rand_f(); rb[l] = rand_f();
        a32[l] = ra[l]; b32[l] = rb[l];
      end
      a2[0] = ra[0]; a2[1] = ra[1]; b2[0] = rb[0]; b2[1] = rb[1];
      #1;
      check(s32, tree_sum(ra, rb, 32), "32-lane sum");
      check(s2,  tree_sum(ra, rb, 2),  "2-lane sum");
    end
    // x*1 + (-x)*1 cancels to +0
    a2[0] = 32'h4049_0FDB; b2[0] = 32'h3F80_0000;
    a2[1] = 32'hC049_0FDB; b2[1] = 32'h3F80_0000;
    #1 check(s2, 32'h0000_0000, "cancellation");
    // 1 + 2^-24 rounds to 1 (tie to even), 1 + 3*2^-24 rounds up
    a2[0] = 32'h3F80_0000; b2[0] = 32'h3F80_0000;
    a2[1] = 32'h3380_0000; b2[1] = 32'h3F80_0000;
    #1 check(s2, 32'h3F80_0000, "tie to even");
    a2[1] = 32'h3440_0000;
    #1 check(s2, 32'h3F80_0002, "round up");
    // overflow to infinity
    a2[0] = 32'h7F00_0000; b2[0] = 32'h4000_0000;
    a2[1] = 32'h3F80_0000; b2[1] = 32'h3F80_0000;
    #1 check(s2, 32'h7F80_0000, "overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
