// fp32_mac_tree: LANES single-precision products summed by a balanced tree.
//
// This is the datapath of the unrolled innermost loop (loop3) of the tiled
// matrix-multiply kernel: lane l multiplies a[l] by b[l], and the products
// are added pairwise, level by level, into one sum.  The node numbering is
// that of a heap: node i adds nodes 2i+1 and 2i+2, the products sit in nodes
// LANES-1 .. 2*LANES-2, and node 0 is the result, so the order of the
// additions (which matters in floating point) is fixed and documented.
// LANES must be a power of two.  The paper gives the unrolling factors
// (fully unrolled, TS = 32 lanes, in the fast PE; factor 2 in the slow PE)
// but not the reduction order; the balanced tree is this design's choice.
// Combinational: sum follows the operands.
module fp32_mac_tree #(
  parameter int unsigned LANES = 32
) (
  input  logic [LANES-1:0][31:0] a,
  input  logic [LANES-1:0][31:0] b,
  output logic [31:0]            sum
);
  logic [31:0] node [2*LANES-1];

  for (genvar l = 0; l < LANES; l++) begin : g_mul
    fp32_mul u_mul (.a(a[l]), .b(b[l]), .y(node[LANES-1+l]));
  end

  for (genvar i = 0; i < LANES-1; i++) begin : g_add
    fp32_add u_add (.a(node[2*i+1]), .b(node[2*i+2]), .y(node[i]));
  end

  assign sum = node[0];

  initial begin
    assert (LANES >= 1 && (LANES & (LANES - 1)) == 0)
      else $error("fp32_mac_tree: LANES must be a power of two");
  end
endmodule
