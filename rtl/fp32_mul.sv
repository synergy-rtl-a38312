// fp32_mul: combinational IEEE-754 single-precision multiplier.
//
// The accelerators compute in 32-bit floating point, as the CNN models do.
// This unit multiplies the two 24-bit significands, normalises by at most
// one place and rounds to nearest, ties to even.  Subnormal inputs are read
// as zero and results below the smallest normal number are flushed to a
// signed zero (a common FPGA simplification, this design's choice).
// Infinities propagate, overflow gives infinity, and NaN or inf*0 give the
// quiet NaN 0x7FC00000.  Purely combinational: y follows a and b.
//
// Paper vs. choice: the paper asks only for single-precision arithmetic; the
// flush-to-zero of subnormals and the rounding mode are this design's choice.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  logic [47:0] prod;
  logic [23:0] mant;      // 1.23 before rounding
  logic        g, st, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] ey;

  always_comb begin
    sa = a[31]; sb = b[31]; sy = sa ^ sb;
    ea = a[30:23]; eb = b[30:23];
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    prod = ma * mb;
    ey = 11'(signed'({3'b000, ea})) + 11'(signed'({3'b000, eb})) - 11'sd127;
    if (prod[47]) begin
      mant = prod[47:24]; g = prod[23]; st = |prod[22:0]; ey = ey + 11'sd1;
    end else begin
      mant = prod[46:23]; g = prod[22]; st = |prod[21:0];
    end
    rnd    = g & (st | mant[0]);
    mant_r = {1'b0, mant} + {24'd0, rnd};
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      ey = ey + 11'sd1;
    end
    if (ea == 8'hFF || eb == 8'hFF) begin
      if ((ea == 8'hFF && a[22:0] != 0) || (eb == 8'hFF && b[22:0] != 0) ||
          ea == 8'h00 || eb == 8'h00)
        y = 32'h7FC0_0000;                      // NaN, or inf * 0
      else
        y = {sy, 8'hFF, 23'd0};
    end else if (ea == 8'h00 || eb == 8'h00) begin
      y = {sy, 31'd0};                          // zero or flushed subnormal input
    end else if (ey >= 11'sd255) begin
      y = {sy, 8'hFF, 23'd0};                   // overflow
    end else if (ey <= 11'sd0) begin
      y = {sy, 31'd0};                          // underflow, flushed
    end else begin
      y = {sy, ey[7:0], mant_r[22:0]};
    end
  end
endmodule
